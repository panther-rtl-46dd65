// xbar_slice: BEHAVIOURAL MODEL (not synthesizable logic) of one ReRAM crossbar array holding
// one bit slice of a weight matrix. The real part is an analog array of resistive cells.
//
// Each of the N x N cells stores an unsigned CELL_BITS-bit conductance level. Level 2^(CELL_BITS-1)
// (the mid state between R_on and R_off) stands for digit 0, so the cell holds the signed
// digit  d = level - 2^(CELL_BITS-1). The reference column that removes this bias in the real
// array is folded into the sums below.
//
// Operations (one per clock, results registered on the rising edge):
//   XB_MVM   rows driven with row_lvl, column j senses   sum_i row_lvl[i] * d[i][j]
//   XB_MTVM  columns driven with col_lvl, row i senses   sum_j col_lvl[j] * d[i][j]
//   XB_OPA   rows (pulse width) and columns (amplitude) driven together; every cell moves by
//            row_lvl[i] * col_lvl[j] and is clipped at its lowest/highest level (saturation).
//            sat_cnt reports how many cells clipped.
//   XB_READ  row `addr` is read serially: rdata[j] = d[addr][j]
//   XB_WRITE row `addr` is programmed where wmask[j] is set: d[addr][j] = wdata[j] (clipped)
// A synchronous reset puts every cell at the zero-digit level.
//
// Follows the paper: 128x128 array, biased zero at (R_on+R_off)/2, in-place outer-product
// update whose amount is the product of row and column drive, saturation at the end states.
// This model's own choices: ideal linear device, exact integer sums (no noise), one-cycle latency.
module xbar_slice
  import panther_pkg::*;
#(
  parameter int unsigned N         = XBAR_N,
  parameter int unsigned CELL_BITS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  xb_op_e               op,
  input  lvl_t                 row_lvl [N],
  input  lvl_t                 col_lvl [N],
  input  logic [$clog2(N)-1:0] addr,
  input  digit_t               wdata   [N],
  input  logic [N-1:0]         wmask,
  output sum_t                 col_sum [N],
  output sum_t                 row_sum [N],
  output digit_t               rdata   [N],
  output logic [15:0]          sat_cnt
);
  localparam int BIAS = 1 << (CELL_BITS - 1);
  localparam int DMIN = -BIAS;
  localparam int DMAX = BIAS - 1;

  logic [CELL_BITS-1:0] lvl_mem [N][N];

  function automatic logic [CELL_BITS-1:0] enc(input int d);
    int c;
    c = (d < DMIN) ? DMIN : (d > DMAX) ? DMAX : d;
    return CELL_BITS'(c + BIAS);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) lvl_mem[i][j] <= CELL_BITS'(BIAS);
      sat_cnt <= '0;
    end else begin
      unique case (op)
        XB_MVM: begin
          for (int j = 0; j < N; j++) begin
            int acc;
            acc = 0;
            for (int i = 0; i < N; i++)
              if (row_lvl[i] != 0) acc += int'(row_lvl[i]) * (int'(lvl_mem[i][j]) - BIAS);
            col_sum[j] <= sum_t'(acc);
          end
        end
        XB_MTVM: begin
          for (int i = 0; i < N; i++) begin
            int acc;
            acc = 0;
            for (int j = 0; j < N; j++)
              if (col_lvl[j] != 0) acc += int'(col_lvl[j]) * (int'(lvl_mem[i][j]) - BIAS);
            row_sum[i] <= sum_t'(acc);
          end
        end
        XB_OPA: begin
          int sats;
          sats = 0;
          for (int i = 0; i < N; i++) begin
            if (row_lvl[i] != 0) begin
              for (int j = 0; j < N; j++) begin
                int d;
                d = int'(lvl_mem[i][j]) - BIAS + int'(row_lvl[i]) * int'(col_lvl[j]);
                if (d < DMIN || d > DMAX) sats++;
                lvl_mem[i][j] <= enc(d);
              end
            end
          end
          sat_cnt <= 16'(sats);
        end
        XB_READ: begin
          for (int j = 0; j < N; j++) rdata[j] <= digit_t'(int'(lvl_mem[addr][j]) - BIAS);
        end
        XB_WRITE: begin
          for (int j = 0; j < N; j++)
            if (wmask[j]) lvl_mem[addr][j] <= enc(int'(wdata[j]));
        end
        default: ;
      endcase
    end
  end
endmodule
