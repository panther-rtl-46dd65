// tb_xbar_slice: checks the crossbar model on an 8x8 array of 5-bit cells: serial write/read of
// random digits (with clipping), MVM and MTVM sums against dot products computed here, and an
// OPA update with the saturation count.
module tb_xbar_slice;
  import panther_pkg::*;
  localparam int N = 8, CB = 5;
  logic clk = 0, rst_n = 0;
  xb_op_e op = XB_NOP;
  lvl_t row_lvl [N], col_lvl [N];
  logic [2:0] addr = '0;
  digit_t wdata [N];
  logic [N-1:0] wmask = '0;
  sum_t col_sum [N], row_sum [N];
  digit_t rdata [N];
  logic [15:0] sat_cnt;
  int d [N][N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  xbar_slice #(.N(N), .CELL_BITS(CB)) dut (.*);

  function automatic int clip(int v);
    return v < -16 ? -16 : v > 15 ? 15 : v;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin row_lvl[i] = '0; col_lvl[i] = '0; wdata[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      // program all rows (one column left untouched per row to test the mask)
      for (int i = 0; i < N; i++) begin
        op = XB_WRITE; addr = 3'(i); wmask = '1; wmask[(i + r) % N] = 1'b0;
        for (int j = 0; j < N; j++) begin
          wdata[j] = digit_t'($urandom_range(40) - 20);
          if (wmask[j]) d[i][j] = clip(int'(wdata[j]));
          else if (r == 0) d[i][j] = 0;
        end
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) begin
        op = XB_READ; addr = 3'(i); @(negedge clk);
        for (int j = 0; j < N; j++) begin checks++; if (int'(rdata[j]) != d[i][j]) failures++; end
      end
      // MVM and MTVM
      for (int i = 0; i < N; i++) begin row_lvl[i] = lvl_t'($urandom_range(30) - 15); col_lvl[i] = lvl_t'($urandom_range(2) - 1); end
      op = XB_MVM; @(negedge clk);
      op = XB_MTVM; @(negedge clk);
      for (int j = 0; j < N; j++) begin
        int s, t;
        s = 0; t = 0;
        for (int i = 0; i < N; i++) begin s += int'(row_lvl[i]) * d[i][j]; t += int'(col_lvl[i]) * d[j][i]; end
        checks += 2;
        if (int'(col_sum[j]) != s) failures++;
        if (int'(row_sum[j]) != t) failures++;
      end
      // OPA
      begin
        int sats;
        sats = 0;
        for (int i = 0; i < N; i++) begin row_lvl[i] = lvl_t'($urandom_range(2) - 1); col_lvl[i] = lvl_t'($urandom_range(30) - 15); end
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
          int v; v = d[i][j] + int'(row_lvl[i]) * int'(col_lvl[j]);
          if (v != clip(v)) sats++;
          d[i][j] = clip(v);
        end
        op = XB_OPA; @(negedge clk);
        op = XB_NOP;
        checks++; if (int'(sat_cnt) != sats) failures++;
      end
      for (int i = 0; i < N; i++) begin
        op = XB_READ; addr = 3'(i); @(negedge clk);
        for (int j = 0; j < N; j++) begin checks++; if (int'(rdata[j]) != d[i][j]) failures++; end
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
