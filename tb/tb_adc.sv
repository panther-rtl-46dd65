// tb_adc: checks the ADC bank model -- one-cycle latency of codes and valid, and clipping of
// line values outside the signed ADC_BITS range.
module tb_adc;
  import panther_pkg::*;
  localparam int N = 4, B = 6;
  logic clk = 0, rst_n = 0, sample = 0, valid;
  sum_t line [N], code [N];
  int checks = 0, failures = 0;
  int exp_c [N];
  always #5 clk = ~clk;
  adc #(.N(N), .ADC_BITS(B)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      sample = 1;
      for (int j = 0; j < N; j++) begin
        line[j] = sum_t'($urandom_range(200) - 100);
        exp_c[j] = int'(line[j]) > 31 ? 31 : int'(line[j]) < -32 ? -32 : int'(line[j]);
      end
      @(negedge clk);
      sample = 0;
      checks++; if (!valid) failures++;
      for (int j = 0; j < N; j++) begin checks++; if (int'(code[j]) != exp_c[j]) failures++; end
      @(negedge clk);
      checks++; if (valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
