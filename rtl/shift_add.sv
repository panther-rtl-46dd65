// shift_add: digital shift-and-add unit that rebuilds a full-precision MVM (or MTVM) result from
// the ADC codes of all weight slices and all streamed input bits.
//
// In step n of a bit-streamed operation every slice k delivers, for each output line j, the
// code s_kj = sum_i x_i[n] * d_k[i][j] (x_i[n] is bit n of input i's magnitude with its sign).
// The weight is W = sum_k d_k * 16^k, so the exact dot product is
//     y_j = sum_n sum_k s_kj * 2^(P_BITS*k + n).
// `clear` empties the accumulators, each `en` cycle adds one step's codes with shift
// `step`. `result` is the accumulator scaled down by OUT_SHIFT (arithmetic shift, i.e. a
// truncation toward -inf) and saturated to a 16-bit two's complement value.
//
// Follows the paper: shift-and-add logic combines the bits of all slices and streamed input
// bits; 16-bit data, 32-bit weights. This design's own choices: 64-bit accumulators, OUT_SHIFT
// = 16 (weights carry 16 fraction bits, so inputs and outputs keep the same fixed-point
// scaling), saturation instead of wrap. Latency: the accumulator updates on the clock edge
// after `en`; `result` is combinational from the accumulators.
module shift_add
  import panther_pkg::*;
#(
  parameter int unsigned N         = XBAR_N,
  parameter int unsigned NSLICE    = N_SLICES,
  parameter int unsigned OUT_SHIFT = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      en,
  input  logic [3:0]                step,
  input  sum_t                      code   [NSLICE][N],
  output logic signed [IN_BITS-1:0] result [N]
);
  logic signed [63:0] acc [N];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int j = 0; j < N; j++) acc[j] <= '0;
    end else if (en) begin
      for (int j = 0; j < N; j++) begin
        logic signed [63:0] s;
        s = '0;
        for (int k = 0; k < NSLICE; k++)
          s += 64'(code[k][j]) <<< (P_BITS * k);
        acc[j] <= acc[j] + (s <<< step);
      end
    end
  end

  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [63:0] q;
      q = acc[j] >>> OUT_SHIFT;
      if (q > 64'sd32767)       result[j] = 16'sh7fff;
      else if (q < -64'sd32768) result[j] = 16'sh8000;
      else                      result[j] = q[15:0];
    end
  end
endmodule
