// tb_shift_add: feeds random per-slice codes for 16 steps and compares the scaled, saturated
// result with sum_n sum_k code * 2^(4k+n) computed here; also checks clear and the saturation.
module tb_shift_add;
  import panther_pkg::*;
  localparam int N = 4, NS = 8;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [3:0] step = 0;
  sum_t code [NS][N];
  logic signed [15:0] result [N];
  int checks = 0, failures = 0;
  longint accm [N];
  always #5 clk = ~clk;
  shift_add #(.N(N), .NSLICE(NS), .OUT_SHIFT(16)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int big;
      big = (t % 4 == 3);  // large codes drive the result into saturation
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < N; j++) accm[j] = 0;
      for (int n = 0; n < 16; n++) begin
        for (int k = 0; k < NS; k++) for (int j = 0; j < N; j++) begin
          code[k][j] = big ? sum_t'($urandom_range(4000) - 2000) : (k > 3 ? 0 : sum_t'($urandom_range(400) - 200));
          accm[j] += longint'(code[k][j]) * (longint'(1) << (4 * k + n));
        end
        step = 4'(n); en = 1;
        @(negedge clk);
      end
      en = 0;
      for (int j = 0; j < N; j++) begin
        longint q; q = accm[j] >>> 16;
        q = q > 32767 ? 32767 : q < -32768 ? -32768 : q;
        checks++;
        if (longint'(result[j]) != q) begin failures++; $display("j%0d got %0d exp %0d", j, result[j], q); end
      end
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
