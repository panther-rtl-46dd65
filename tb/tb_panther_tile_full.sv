// tb_panther_tile_full: the end-to-end test on the tile at its full size, every parameter at its
// default (8 cores, 2 MCUs each, variant 2, 16 OPA log entries per MCU, CRS every 1024 batches).
// All 8 cores run the kernel of tile_test.svh once, together. One batch does not reach the
// carry resolution period and the log does not overflow, so those two are covered by
// tb_panther_tile on a reduced tile; everything else is checked here at full size.
module tb_panther_tile_full;
  import panther_pkg::*;
  localparam int NC = 8, RUNS = 1, LOGE = 16, CRSP = 1024;
  localparam int MEM_AW = 18, CW = $clog2(NC + 1);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;
  logic [NC-1:0] halted;
  logic [CW-1:0] im_core = '0, w_core = '0;
  logic im_we = 1'b0;
  logic [9:0] im_addr = '0;
  instr_t im_wdata = '0;
  logic hm_req = 1'b0, hm_we = 1'b0, hm_gnt, hm_rvalid;
  logic [MEM_AW-1:0] hm_addr = '0;
  logic [15:0] hm_wdata = '0, hm_rdata;
  logic [2:0] w_mcu = '0;
  logic w_we = 1'b0, w_re = 1'b0, w_rvalid;
  logic [6:0] w_row = '0, w_col = '0;
  logic [1:0] w_copy = '0;
  logic signed [31:0] w_wdata = '0, w_rdata;
  logic [31:0] sat_events, mvm_count, mtvm_count, opa_count, commit_count, crs_count, opa_logged,
               log_overflow, instr_count;

  panther_tile dut (.*);

  `include "tile_test.svh"

  initial begin
    repeat (1000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
