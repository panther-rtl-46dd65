// tb_mcu: checks the Matrix Computation Unit in all three variants (one, two and three matrix
// copies) at the full 128x128 crossbar size, through three mcu_harness instances run in parallel.
module tb_mcu;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int c1, f1, c2, f2, c3, f3;
  logic d1, d2, d3;
  mcu_harness #(.VARIANT(1), .N(128)) h1 (.clk, .checks(c1), .failures(f1), .finished(d1));
  mcu_harness #(.VARIANT(2), .N(128)) h2 (.clk, .checks(c2), .failures(f2), .finished(d2));
  mcu_harness #(.VARIANT(3), .N(128)) h3 (.clk, .checks(c3), .failures(f3), .finished(d3));

  initial begin
    wait (d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3, f1 + f2 + f3);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3, f1 + f2 + f3 + 1);
    $finish;
  end
endmodule
