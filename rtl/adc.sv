// adc: BEHAVIOURAL MODEL (not synthesizable logic) of the bank of analog-to-digital converters,
// with their sample-and-hold stage, behind one crossbar. The real part is a set of SAR ADCs.
//
// When `sample` is high the N line sums are captured on the rising edge and converted to signed
// codes of ADC_BITS bits: a value beyond the converter's range is clipped to its largest or
// smallest code. `valid` follows `sample` by one clock, as do the codes.
//
// Follows the paper: ADCs digitise the crossbar's column (MVM) or row (MTVM) outputs before they
// reach XbarOut; precision grows with the slice width. This model's own choices: one converter
// per line, one conversion per clock, ideal (no quantisation error other than the range clip).
module adc
  import panther_pkg::*;
#(
  parameter int unsigned N        = XBAR_N,
  parameter int unsigned ADC_BITS = 13
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  input  sum_t line [N],
  output sum_t code [N],
  output logic valid
);
  localparam int CMAX = (1 << (ADC_BITS - 1)) - 1;
  localparam int CMIN = -(1 << (ADC_BITS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= sample;
    if (sample)
      for (int j = 0; j < N; j++)
        code[j] <= (int'(line[j]) > CMAX) ? sum_t'(CMAX) :
                   (int'(line[j]) < CMIN) ? sum_t'(CMIN) : line[j];
  end
endmodule
