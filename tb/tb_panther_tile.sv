// tb_panther_tile: end-to-end test of a reduced tile -- 2 cores, 2 MCUs each, variant 2, a
// one-entry OPA log per MCU (so the second OPA of the kernel overflows) and a carry resolution
// step every 2 batches -- running the same kernel twice on both cores. The test body and what it
// checks are described in tile_test.svh; this file only sets the sizes and builds the DUT.
module tb_panther_tile;
  import panther_pkg::*;
  localparam int NC = 2, RUNS = 2, LOGE = 1, CRSP = 2;
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

  panther_tile #(.NCORES(NC), .LOG_ENTRIES(LOGE), .CRS_PERIOD(CRSP)) dut (.*);

  `include "tile_test.svh"

  initial begin
    repeat (1000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
