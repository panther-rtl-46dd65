// tb_shared_memory: three requesters hammer a small shared memory at random; the test keeps a
// copy of the memory, checks every read, checks one-hot grants, and checks that a requester
// that keeps asking is served within NPORTS grants (round-robin fairness).
module tb_shared_memory;
  localparam int NP = 3, W = 64;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] req = '0, we = '0, gnt, rvalid;
  logic [5:0] addr [NP];
  logic [15:0] wdata [NP];
  logic [15:0] rdata;
  logic [15:0] model [W];
  int checks = 0, failures = 0;
  int wait_cnt [NP];
  int pend_exp [NP];
  logic [NP-1:0] served = '0;  // grants sampled in the previous cycle
  always #5 clk = ~clk;
  shared_memory #(.NPORTS(NP), .WORDS(W)) dut (.*);

  initial begin
    for (int i = 0; i < W; i++) model[i] = '0;
    for (int p = 0; p < NP; p++) begin wait_cnt[p] = 0; addr[p] = '0; wdata[p] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // clear the memory through port 0
    for (int i = 0; i < W; i++) begin
      req[0] = 1; we[0] = 1; addr[0] = 6'(i); wdata[0] = '0;
      @(posedge clk); while (!gnt[0]) @(posedge clk);
      @(negedge clk);
    end
    req = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check read data granted last cycle
      for (int p = 0; p < NP; p++) if (rvalid[p]) begin
        checks++; if (int'(rdata) != pend_exp[p]) begin failures++; if (failures < 4) $display("rd p%0d got %h exp %h", p, rdata, pend_exp[p]); end
      end
      for (int p = 0; p < NP; p++) if (!req[p] || served[p]) begin
        req[p] = ($urandom_range(3) != 0);
        we[p] = $urandom_range(1);
        addr[p] = 6'($urandom_range(W - 1));
        wdata[p] = 16'($urandom);
      end
      #1;
      checks++; if (!$onehot0(gnt)) failures++;
      served = gnt;
      for (int p = 0; p < NP; p++) begin
        if (gnt[p]) begin
          if (we[p]) model[addr[p]] = wdata[p];
          else pend_exp[p] = int'(model[addr[p]]);
          wait_cnt[p] = 0;
        end else if (req[p]) begin
          wait_cnt[p]++;
          checks++; if (wait_cnt[p] >= NP) begin failures++; if (failures < 4) $display("wait p%0d %0d", p, wait_cnt[p]); end
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
