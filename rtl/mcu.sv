// mcu: Matrix Computation Unit -- bit-sliced ReRAM crossbars performing MVM, transposed MVM
// (MTVM) and in-place outer-product accumulate (OPA) on a 128x128 matrix of 32-bit weights.
//
// Datapath. The weight matrix is held in VARIANT copies; each copy is N_SLICES crossbars
// (xbar_slice), crossbar k holding the k-th signed base-16 digit of every weight with
// 4..6 bits of conductance (slice widths from SLICE_BITS, default "44466555" MSB first).
// Operands live in the XbarIn registers (row side: MVM / OPA row input; column side: MTVM input)
// and the XbarOut registers (column side: MVM result and OPA column input; row side: MTVM result).
// All three operations stream their operand over 16 steps, one bit per step (m = 1):
//   MVM : input_driver turns bit n of each XbarIn-row operand into +1/-1/0 on the rows of copy 0;
//         the column sums of every slice go through an adc bank into shift_add, which adds
//         code << (4k + n); after 16 steps the 16-bit result is written to XbarOut (column side).
//   MTVM: the same from the column side of XbarIn onto the columns of copy 1 (copy 0 in
//         variant 1), row sums to XbarOut (row side).
//   OPA : in step n the rows carry bit n of the row operand (pulse width) while column j of
//         slice k carries bits [4k+3:4k] of (|a_j| << n) with a_j's sign (4-bit amplitude).
//         Each cell moves by the product, so after 16 steps every weight has grown by x_i * a_j
//         without any read or write; digits that leave their range saturate.
// Variants: 1 = one copy, MVM and MTVM serialised; 2 = two copies, MVM and MTVM in parallel, OPA
// applied to both copies; 3 = three copies, OPA runs on copy 2 in parallel with MVM/MTVM and is
// committed to copies 0 and 1 by serial row reads/writes at the end of the batch.
// Carry resolution step (CRS): every CRS_PERIOD batch ends, each row of each copy is read, the
// digits of every weight are summed, saturated to 32 bits and rewritten as balanced digits in
// [-8, 7], clearing the carries that the slices accumulated.
// The row-decoder path (serial read/write) is also open to a host port for programming and
// inspecting single weights while the unit is idle.
//
// Interface and timing. cmd_valid/cmd is accepted only while busy is low; busy rises the next
// cycle and falls when every requested operation is done. A pass of concurrent operations
// takes 16 stream cycles, 3 pipeline cycles (crossbar, ADC, accumulate) and one write-back
// cycle: 20 cycles. Commit takes 2N cycles, CRS 2N cycles per copy. Host writes take one cycle;
// host reads return w_rdata with w_rvalid two cycles after w_re.
//
// From the paper: XbarIn/XbarOut, input drivers with sign select, muxes to rows or columns,
// ADCs, shift-and-add, m = 1 row streaming, p = 4 column slicing, 8 slices "44466555", biased
// zero, in-slice carry with periodic CRS, the three variants and the halt semantics. This
// design's own choices: the split of XbarIn/XbarOut into row- and column-side vectors, balanced
// digits after CRS, the pipeline depth, the end-of-batch command and the host port.
module mcu
  import panther_pkg::*;
#(
  parameter int unsigned VARIANT    = 2,
  parameter int unsigned N          = XBAR_N,
  parameter int unsigned NSLICE     = N_SLICES,
  parameter logic [31:0] SLICE_BITS = SLICE_BITS_DEFAULT,
  parameter int unsigned OUT_SHIFT  = 16,
  parameter int unsigned CRS_PERIOD = 1024,
  parameter int unsigned ADC_EXTRA  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      cmd_valid,
  input  mcu_cmd_t                  cmd,
  output logic                      busy,
  // XbarIn / XbarOut register port
  input  logic                      reg_we,
  input  vec_sel_e                  reg_wsel,
  input  logic [$clog2(N)-1:0]      reg_widx,
  input  logic signed [IN_BITS-1:0] reg_wdata,
  input  vec_sel_e                  reg_rsel,
  input  logic [$clog2(N)-1:0]      reg_ridx,
  output logic signed [IN_BITS-1:0] reg_rdata,
  // host weight port (row decoder path), idle only
  input  logic                      w_we,
  input  logic                      w_re,
  input  logic [$clog2(N)-1:0]      w_row,
  input  logic [$clog2(N)-1:0]      w_col,
  input  logic [1:0]                w_copy,
  input  logic signed [W_BITS-1:0]  w_wdata,
  output logic signed [W_BITS-1:0]  w_rdata,
  output logic                      w_rvalid,
  // event counters
  output logic [31:0]               sat_events,
  output logic [15:0]               mvm_count,
  output logic [15:0]               mtvm_count,
  output logic [15:0]               opa_count,
  output logic [15:0]               commit_count,
  output logic [15:0]               crs_count
);
  localparam int unsigned NCOPY     = VARIANT;
  localparam int unsigned MTVM_COPY = (VARIANT >= 2) ? 1 : 0;
  localparam int unsigned AW        = $clog2(N);

  // ---------------- registers ----------------------------------------------------------
  logic signed [IN_BITS-1:0] xin_row [N], xin_col [N], xout_col [N], xout_row [N];

  always_comb begin
    unique case (reg_rsel)
      VEC_IN_ROW:  reg_rdata = xin_row[reg_ridx];
      VEC_IN_COL:  reg_rdata = xin_col[reg_ridx];
      VEC_OUT_COL: reg_rdata = xout_col[reg_ridx];
      default:     reg_rdata = xout_row[reg_ridx];
    endcase
  end

  // ---------------- control state ------------------------------------------------------
  typedef enum logic [3:0] {
    S_IDLE, S_PASS, S_STREAM, S_DRAIN, S_WB, S_BATCH,
    S_COMMIT_RD, S_COMMIT_WR, S_CRS_RD, S_CRS_WR, S_WREAD, S_WREAD2
  } state_e;
  state_e state;

  logic pend_mvm, pend_mtvm, pend_opa, pend_batch;
  logic go_mvm, go_mtvm, go_opa;
  logic [3:0]  step;
  logic [1:0]  drain;
  logic [AW-1:0] row;
  logic [1:0]  copy;
  logic [$clog2(CRS_PERIOD+1)-1:0] batch_cnt;
  logic p1_valid;
  logic [3:0] p1_step, p2_step;
  logic sa_clear_col, sa_clear_row;
  logic col_wb_pending;  // MVM result held back until a later OPA pass has used XbarOut

  assign busy = (state != S_IDLE);

  // ---------------- input drivers ------------------------------------------------------
  lvl_t row_lvl [N];                 // rows: MVM / OPA row operand, 1 bit per step
  lvl_t col_lvl_mtvm [N];            // columns: MTVM operand, 1 bit per step
  lvl_t col_lvl_opa [NSLICE][N];     // columns: OPA operand chunk per slice
  logic streaming;
  assign streaming = (state == S_STREAM);

  input_driver #(.CHUNK_BITS(0), .N(N)) u_row_drv (
    .value(xin_row), .step(step), .enable(streaming && (go_mvm || go_opa)), .level(row_lvl));
  input_driver #(.CHUNK_BITS(0), .N(N)) u_col_drv (
    .value(xin_col), .step(step), .enable(streaming && go_mtvm), .level(col_lvl_mtvm));
  for (genvar k = 0; k < NSLICE; k++) begin : g_chunk
    input_driver #(.CHUNK_BITS(P_BITS), .SLICE(k), .N(N)) u_opa_drv (
      .value(xout_col), .step(step), .enable(streaming && go_opa), .level(col_lvl_opa[k]));
  end

  // ---------------- crossbars ----------------------------------------------------------
  xb_op_e xb_op   [NCOPY];
  logic [AW-1:0] xb_addr;
  digit_t xb_wdata [NSLICE][N];
  logic [N-1:0] xb_wmask;
  sum_t   col_sum [NCOPY][NSLICE][N];
  sum_t   row_sum [NCOPY][NSLICE][N];
  digit_t rdata   [NCOPY][NSLICE][N];
  logic [15:0] sat [NCOPY][NSLICE];
  for (genvar c = 0; c < NCOPY; c++) begin : g_copy
    for (genvar k = 0; k < NSLICE; k++) begin : g_slice
      localparam int unsigned CB = 32'(SLICE_BITS[4*k +: 4]);
      lvl_t cl [N];
      always_comb
        for (int j = 0; j < N; j++) cl[j] = (xb_op[c] == XB_OPA) ? col_lvl_opa[k][j] : col_lvl_mtvm[j];
      xbar_slice #(.N(N), .CELL_BITS(CB)) u_xb (
        .clk, .rst_n, .op(xb_op[c]), .row_lvl(row_lvl), .col_lvl(cl), .addr(xb_addr),
        .wdata(xb_wdata[k]), .wmask(xb_wmask), .col_sum(col_sum[c][k]), .row_sum(row_sum[c][k]),
        .rdata(rdata[c][k]), .sat_cnt(sat[c][k]));
    end
  end

  // ---------------- ADCs and shift-and-add ---------------------------------------------
  sum_t code_col [NSLICE][N];
  sum_t code_row [NSLICE][N];
  logic adc_col_v [NSLICE];
  logic adc_row_v [NSLICE];
  logic signed [IN_BITS-1:0] res_col [N], res_row [N];

  for (genvar k = 0; k < NSLICE; k++) begin : g_adc
    localparam int unsigned CB = 32'(SLICE_BITS[4*k +: 4]);
    adc #(.N(N), .ADC_BITS(CB + ADC_EXTRA)) u_adc_col (
      .clk, .rst_n, .sample(p1_valid && go_mvm), .line(col_sum[0][k]),
      .code(code_col[k]), .valid(adc_col_v[k]));
    adc #(.N(N), .ADC_BITS(CB + ADC_EXTRA)) u_adc_row (
      .clk, .rst_n, .sample(p1_valid && go_mtvm), .line(row_sum[MTVM_COPY][k]),
      .code(code_row[k]), .valid(adc_row_v[k]));
  end

  shift_add #(.N(N), .NSLICE(NSLICE), .OUT_SHIFT(OUT_SHIFT)) u_sa_col (
    .clk, .rst_n, .clear(sa_clear_col), .en(adc_col_v[0]), .step(p2_step), .code(code_col), .result(res_col));
  shift_add #(.N(N), .NSLICE(NSLICE), .OUT_SHIFT(OUT_SHIFT)) u_sa_row (
    .clk, .rst_n, .clear(sa_clear_row), .en(adc_row_v[0]), .step(p2_step), .code(code_row), .result(res_row));

  // ---------------- digit arithmetic for CRS and the host port -------------------------
  // Weight value of a column from its slice digits, saturated to 32 bits.
  function automatic logic signed [W_BITS-1:0] digits_to_w(input int d [NSLICE]);
    logic signed [63:0] s;
    s = '0;
    for (int k = 0; k < NSLICE; k++) s += 64'(signed'(d[k])) <<< (P_BITS * k);
    if (s > 64'sh7fff_ffff)       return 32'sh7fff_ffff;
    else if (s < -64'sh8000_0000) return 32'sh8000_0000;
    else                          return s[31:0];
  endfunction

  // Balanced base-16 digits in [-8, 7]; the last slice takes what remains (clipped in the cell).
  function automatic void w_to_digits(input logic signed [W_BITS-1:0] w, output digit_t d [NSLICE]);
    logic signed [63:0] r;
    int nib;
    r = 64'(w);
    for (int k = 0; k < NSLICE; k++) begin
      if (k == NSLICE - 1) begin
        d[k] = digit_t'((r > 64'sd127) ? 127 : (r < -64'sd128) ? -128 : int'(r));
      end else begin
        nib = int'(r[3:0]);
        if (nib >= 8) nib -= 16;
        d[k] = digit_t'(nib);
        r = (r - 64'(nib)) >>> P_BITS;
      end
    end
  endfunction

  // Read-back view: digits of copy `copy`, column-wise.
  logic signed [W_BITS-1:0] renorm_w [N];
  digit_t host_digits [NSLICE];
  logic [1:0] rd_copy;
  always_comb begin
    rd_copy = (state == S_WREAD2) ? w_copy : (state == S_COMMIT_WR) ? 2'(NCOPY - 1) : copy;
    for (int j = 0; j < N; j++) begin
      int d [NSLICE];
      for (int k = 0; k < NSLICE; k++) begin
        d[k] = 0;
        for (int c = 0; c < NCOPY; c++) if (c == int'(rd_copy)) d[k] = int'(rdata[c][k][j]);
      end
      renorm_w[j] = digits_to_w(d);
    end
    w_to_digits(w_wdata, host_digits);
  end

  // CRS write data: the read-back weights rewritten as balanced digits.
  digit_t crs_digits [NSLICE][N];
  always_comb begin
    for (int j = 0; j < N; j++) begin
      digit_t d [NSLICE];
      w_to_digits(renorm_w[j], d);
      for (int k = 0; k < NSLICE; k++) crs_digits[k][j] = d[k];
    end
  end

  // ---------------- crossbar command and write data ------------------------------------
  always_comb begin
    xb_addr  = row;
    xb_wmask = '1;
    for (int k = 0; k < NSLICE; k++) for (int j = 0; j < N; j++) xb_wdata[k][j] = '0;
    for (int c = 0; c < NCOPY; c++) xb_op[c] = XB_NOP;
    unique case (state)
      S_IDLE: begin
        xb_addr = w_row;
        if (w_we) begin
          xb_wmask = '0;
          xb_wmask[w_col] = 1'b1;
          for (int k = 0; k < NSLICE; k++) for (int j = 0; j < N; j++) xb_wdata[k][j] = host_digits[k];
          for (int c = 0; c < NCOPY; c++) xb_op[c] = XB_WRITE;
        end else if (w_re) begin
          for (int c = 0; c < NCOPY; c++) if (c == int'(w_copy)) xb_op[c] = XB_READ;
        end
      end
      S_STREAM: begin
        for (int c = 0; c < NCOPY; c++) begin
          if (go_opa && (VARIANT != 3 || c == 2))   xb_op[c] = XB_OPA;
          else if (go_mvm && c == 0)                xb_op[c] = XB_MVM;
          else if (go_mtvm && c == int'(MTVM_COPY)) xb_op[c] = XB_MTVM;
        end
      end
      S_COMMIT_RD: xb_op[NCOPY-1] = XB_READ;
      S_COMMIT_WR: begin
        for (int k = 0; k < NSLICE; k++) for (int j = 0; j < N; j++) xb_wdata[k][j] = rdata[NCOPY-1][k][j];
        for (int c = 0; c + 1 < NCOPY; c++) xb_op[c] = XB_WRITE;
      end
      S_CRS_RD: for (int c = 0; c < NCOPY; c++) if (c == int'(copy)) xb_op[c] = XB_READ;
      S_CRS_WR: begin
        xb_wdata = crs_digits;
        for (int c = 0; c < NCOPY; c++) if (c == int'(copy)) xb_op[c] = XB_WRITE;
      end
      default: ;
    endcase
  end

  // ---------------- sequencer ----------------------------------------------------------
  // Which of the pending operations can run together in the next pass.
  logic nx_mvm, nx_mtvm, nx_opa;
  always_comb begin
    nx_mvm  = pend_mvm;
    nx_mtvm = pend_mtvm && (VARIANT >= 2 || !pend_mvm);
    nx_opa  = pend_opa && (VARIANT == 3 || (!pend_mvm && !pend_mtvm));
  end

  logic [31:0] sat_sum;
  always_comb begin
    sat_sum = '0;
    for (int c = 0; c < NCOPY; c++)
      for (int k = 0; k < NSLICE; k++) sat_sum += 32'(sat[c][k]);
  end
  logic opa_d1;  // OPA was issued last cycle: its saturation count is valid now

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {pend_mvm, pend_mtvm, pend_opa, pend_batch} <= '0;
      {go_mvm, go_mtvm, go_opa} <= '0;
      step <= '0; drain <= '0; row <= '0; copy <= '0; batch_cnt <= '0;
      p1_valid <= 1'b0; p1_step <= '0; p2_step <= '0;
      sa_clear_col <= 1'b0; sa_clear_row <= 1'b0; col_wb_pending <= 1'b0; opa_d1 <= 1'b0; w_rvalid <= 1'b0; w_rdata <= '0;
      sat_events <= '0; mvm_count <= '0; mtvm_count <= '0; opa_count <= '0;
      commit_count <= '0; crs_count <= '0;
      for (int i = 0; i < N; i++) begin
        xin_row[i] <= '0; xin_col[i] <= '0; xout_col[i] <= '0; xout_row[i] <= '0;
      end
    end else begin
      sa_clear_col <= 1'b0;
      sa_clear_row <= 1'b0;
      w_rvalid <= 1'b0;
      p1_valid <= streaming;
      p1_step  <= step;
      p2_step  <= p1_step;
      opa_d1   <= streaming && go_opa;
      if (opa_d1) sat_events <= sat_events + sat_sum;

      if (reg_we && state == S_IDLE) begin
        unique case (reg_wsel)
          VEC_IN_ROW:  xin_row[reg_widx]  <= reg_wdata;
          VEC_IN_COL:  xin_col[reg_widx]  <= reg_wdata;
          VEC_OUT_COL: xout_col[reg_widx] <= reg_wdata;
          default:     xout_row[reg_widx] <= reg_wdata;
        endcase
      end

      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            pend_mvm <= cmd.mvm; pend_mtvm <= cmd.mtvm; pend_opa <= cmd.opa;
            pend_batch <= cmd.batch_end;
            state <= S_PASS;
          end else if (w_re && !w_we) begin
            state <= S_WREAD;
          end
        end
        S_PASS: begin
          if (pend_mvm || pend_mtvm || pend_opa) begin
            go_mvm <= nx_mvm; go_mtvm <= nx_mtvm; go_opa <= nx_opa;
            pend_mvm <= 1'b0;
            if (nx_mtvm) pend_mtvm <= 1'b0;
            if (nx_opa)  pend_opa  <= 1'b0;
            step <= '0;
            sa_clear_col <= nx_mvm;
            sa_clear_row <= nx_mtvm;
            state <= S_STREAM;
          end else if (col_wb_pending) begin
            for (int j = 0; j < N; j++) xout_col[j] <= res_col[j];
            col_wb_pending <= 1'b0;
          end else if (pend_batch) begin
            state <= S_BATCH;
          end else begin
            state <= S_IDLE;
          end
        end
        S_STREAM: begin
          step <= step + 4'd1;
          if (step == 4'(STREAM_STEPS - 1)) begin
            drain <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain + 2'd1;
          if (drain == 2'd2) state <= S_WB;
        end
        S_WB: begin
          if (go_mvm) begin
            // OPA reads XbarOut (column side) as it was when the command was issued.
            if (pend_opa) col_wb_pending <= 1'b1;
            else for (int j = 0; j < N; j++) xout_col[j] <= res_col[j];
            mvm_count <= mvm_count + 16'd1;
          end
          if (go_mtvm) begin for (int j = 0; j < N; j++) xout_row[j] <= res_row[j]; mtvm_count <= mtvm_count + 16'd1; end
          if (go_opa)  opa_count <= opa_count + 16'd1;
          {go_mvm, go_mtvm, go_opa} <= '0;
          state <= S_PASS;
        end
        S_BATCH: begin
          pend_batch <= 1'b0;
          row <= '0;
          copy <= '0;
          if (VARIANT == 3) state <= S_COMMIT_RD;
          else if (32'(batch_cnt) + 1 >= CRS_PERIOD) state <= S_CRS_RD;
          else begin batch_cnt <= batch_cnt + 1'b1; state <= S_IDLE; end
        end
        S_COMMIT_RD: state <= S_COMMIT_WR;
        S_COMMIT_WR: begin
          row <= row + 1'b1;
          if (row == AW'(N - 1)) begin
            commit_count <= commit_count + 16'd1;
            if (32'(batch_cnt) + 1 >= CRS_PERIOD) state <= S_CRS_RD;
            else begin batch_cnt <= batch_cnt + 1'b1; state <= S_IDLE; end
          end else state <= S_COMMIT_RD;
        end
        S_CRS_RD: state <= S_CRS_WR;
        S_CRS_WR: begin
          row <= row + 1'b1;
          if (row == AW'(N - 1)) begin
            if (32'(copy) + 1 == NCOPY) begin
              crs_count <= crs_count + 16'd1;
              batch_cnt <= '0;
              state <= S_IDLE;
            end else begin
              copy <= copy + 2'd1;
              state <= S_CRS_RD;
            end
          end else state <= S_CRS_RD;
        end
        S_WREAD: state <= S_WREAD2;
        S_WREAD2: begin
          w_rdata  <= renorm_w[w_col];
          w_rvalid <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new command may only be given while the unit is idle.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> !busy)
    else $error("mcu: command while busy");
endmodule
