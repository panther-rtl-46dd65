// input_driver: digital select logic in front of the N lines (rows or columns) of a crossbar.
//
// The MCU keeps its operands as 16-bit two's complement words; the driver turns one into
// sign-magnitude form (15 magnitude bits) and produces the signed drive level that the line
// DAC applies in time step `step` of a bit-streamed operation:
//
//   CHUNK_BITS = 0 : 1-bit driver. Level = +1 / -1 / 0 (the +Vdd / -Vdd / Gnd choice made
//                    from the sign and the streamed bit). Used for MVM rows, MTVM columns
//                    and OPA rows, where bit `step` of the magnitude is streamed.
//   CHUNK_BITS = p : p-bit amplitude driver for OPA columns. The magnitude is shifted left
//                    by `step` and chunk SLICE (bits [p*SLICE +: p]) is applied, with the
//                    operand's sign, to the crossbar holding weight slice SLICE.
//
// Following the paper: m = 1 row bit per step, p = 4 column bits per slice, sign taken from
// the MSB of a sign-magnitude operand. This design's own choices: operands are stored in two's
// complement and converted here (-32768 saturates to -32767); step 15, the sign position, drives
// level 0. Purely combinational.
module input_driver
  import panther_pkg::*;
#(
  parameter int unsigned CHUNK_BITS = 0,
  parameter int unsigned SLICE      = 0,
  parameter int unsigned N          = XBAR_N
) (
  input  logic signed [IN_BITS-1:0] value [N],
  input  logic [3:0]                step,
  input  logic                      enable,
  output lvl_t                      level [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [15:0] sm;
      logic [31:0] shifted;
      logic [4:0]  amp;
      sm      = to_sm(value[i]);
      shifted = 32'(sm[14:0]) << step;
      if (CHUNK_BITS == 0) amp = (step != 4'd15) ? 5'(sm[step]) : 5'd0;
      else                 amp = 5'((shifted >> (CHUNK_BITS * SLICE)) & ((32'd1 << CHUNK_BITS) - 1));
      if (!enable)    level[i] = '0;
      else if (sm[15]) level[i] = -lvl_t'(amp);
      else            level[i] = lvl_t'(amp);
    end
  end
endmodule
