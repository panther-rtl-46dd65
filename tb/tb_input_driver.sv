// tb_input_driver: checks the 1-bit (row) and 4-bit chunk (OPA column) drivers against levels
// computed here from the sign-magnitude form of random operands, for every step and slice.
module tb_input_driver;
  import panther_pkg::*;
  localparam int N = 8;
  logic signed [15:0] value [N];
  logic [3:0] step;
  logic en;
  lvl_t lv_bit [N];
  lvl_t lv_chk [4][N];
  int checks = 0, failures = 0;

  input_driver #(.CHUNK_BITS(0), .N(N)) u_bit (.value, .step, .enable(en), .level(lv_bit));
  for (genvar k = 0; k < 4; k++) begin : g
    input_driver #(.CHUNK_BITS(4), .SLICE(2 * k + 1), .N(N)) u_chk (.value, .step, .enable(en), .level(lv_chk[k]));
  end

  function automatic int expect_lvl(int v, int n, int cb, int sl);
    int s, mag, a;
    if (v == -32768) v = -32767;
    s = v < 0 ? -1 : 1; mag = v < 0 ? -v : v;
    if (cb == 0) a = (n == 15) ? 0 : (mag >> n) & 1;
    else a = int'((longint'(mag) << n) >> (4 * sl)) & 15;
    return s * a;
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) value[i] = (t == 0 && i == 0) ? -16'sd32768 : 16'($urandom);
      en = (t % 10) != 9;
      for (int n = 0; n < 16; n++) begin
        step = 4'(n); #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(lv_bit[i]) != (en ? expect_lvl(int'(value[i]), n, 0, 0) : 0)) failures++;
          for (int k = 0; k < 4; k++) begin
            checks++;
            if (int'(lv_chk[k][i]) != (en ? expect_lvl(int'(value[i]), n, 4, 2 * k + 1) : 0)) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
