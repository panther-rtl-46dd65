// panther_tile: one PANTHER tile -- NCORES cores, each with NMCU matrix computation units, sharing
// one tile memory. This is the top of the RTL.
//
// Structure. Every core runs its own instruction stream (loaded through im_*), reads and writes
// the shared memory through its load/store unit, and drives its MCUs with mcu instructions.
// The shared memory has NCORES+1 ports under round-robin arbitration: one per core and one
// for the host (hm_*), through which inputs are placed and results collected. The host also
// programs and inspects single weights of any MCU through the MCUs' row-decoder path (w_*),
// and starts all cores together with `start`; halted[c] rises when core c has executed halt
// and its MCUs have finished the end-of-batch work. Each core's deferred-OPA log (variants 1
// and 2) occupies LOG_ENTRIES operand pairs per MCU at the top of the shared memory, core 0
// highest.
//
// From the paper: 8 cores per tile, 2 MCUs per core, cores attached to one shared memory, the
// MCU variant as a build-time choice (default 2, the mini-batch variant used for most of the
// evaluation), 128x128 crossbars and a carry resolution step every 1024 batches. The tiles of a
// node and the network-on-chip joining them are not part of this RTL; neither are send/receive.
// This design's own choices: memory size and arbitration, the host ports, the log placement.
module panther_tile
  import panther_pkg::*;
#(
  parameter int unsigned NCORES      = 8,
  parameter int unsigned NMCU        = 2,
  parameter int unsigned VARIANT     = 2,
  parameter int unsigned N           = XBAR_N,
  parameter int unsigned SHMEM_WORDS = 262144,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned LOG_ENTRIES = 16,
  parameter int unsigned CRS_PERIOD  = 1024,
  parameter int unsigned MEM_AW      = $clog2(SHMEM_WORDS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic [NCORES-1:0]         halted,
  // instruction memory load
  input  logic [$clog2(NCORES+1)-1:0]   im_core,
  input  logic                      im_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] im_addr,
  input  instr_t                    im_wdata,
  // host port on the shared memory
  input  logic                      hm_req,
  input  logic                      hm_we,
  input  logic [MEM_AW-1:0]         hm_addr,
  input  logic [15:0]               hm_wdata,
  output logic                      hm_gnt,
  output logic                      hm_rvalid,
  output logic [15:0]               hm_rdata,
  // host weight port
  input  logic [$clog2(NCORES+1)-1:0] w_core,
  input  logic [2:0]                w_mcu,
  input  logic                      w_we,
  input  logic                      w_re,
  input  logic [$clog2(N)-1:0]      w_row,
  input  logic [$clog2(N)-1:0]      w_col,
  input  logic [1:0]                w_copy,
  input  logic signed [W_BITS-1:0]  w_wdata,
  output logic signed [W_BITS-1:0]  w_rdata,
  output logic                      w_rvalid,
  // event counters, summed over the tile
  output logic [31:0]               sat_events,
  output logic [31:0]               mvm_count,
  output logic [31:0]               mtvm_count,
  output logic [31:0]               opa_count,
  output logic [31:0]               commit_count,
  output logic [31:0]               crs_count,
  output logic [31:0]               opa_logged,
  output logic [31:0]               log_overflow,
  output logic [31:0]               instr_count
);
  localparam int unsigned NP        = NCORES + 1;
  localparam int unsigned LOG_WORDS = NMCU * LOG_ENTRIES * 2 * N;

  logic [NP-1:0] req, we, gnt, rvalid;
  logic [MEM_AW-1:0] addr [NP];
  logic [15:0] wdata [NP];
  logic [15:0] rdata;

  shared_memory #(.NPORTS(NP), .WORDS(SHMEM_WORDS), .AW(MEM_AW)) u_shmem (
    .clk, .rst_n, .req, .we, .addr, .wdata, .gnt, .rvalid, .rdata);

  assign req[NCORES]   = hm_req;
  assign we[NCORES]    = hm_we;
  assign addr[NCORES]  = hm_addr;
  assign wdata[NCORES] = hm_wdata;
  assign hm_gnt        = gnt[NCORES];
  assign hm_rvalid     = rvalid[NCORES];
  assign hm_rdata      = rdata;

  logic signed [W_BITS-1:0] c_wrdata [NCORES];
  logic c_wrvalid [NCORES];
  logic [31:0] c_sat [NCORES];
  logic [15:0] c_mvm [NCORES], c_mtvm [NCORES], c_opa [NCORES], c_commit [NCORES], c_crs [NCORES];
  logic [15:0] c_logged [NCORES], c_ovf [NCORES], c_instr [NCORES];

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    core #(
      .NMCU(NMCU), .VARIANT(VARIANT), .N(N), .IMEM_WORDS(IMEM_WORDS), .MEM_AW(MEM_AW),
      .LOG_BASE(SHMEM_WORDS - (c + 1) * LOG_WORDS), .LOG_ENTRIES(LOG_ENTRIES), .CRS_PERIOD(CRS_PERIOD)
    ) u_core (
      .clk, .rst_n, .start, .halted(halted[c]),
      .im_we(im_we && int'(im_core) == c), .im_addr, .im_wdata,
      .mem_req(req[c]), .mem_we(we[c]), .mem_addr(addr[c]), .mem_wdata(wdata[c]),
      .mem_gnt(gnt[c]), .mem_rvalid(rvalid[c]), .mem_rdata(rdata),
      .w_mcu, .w_we(w_we && int'(w_core) == c), .w_re(w_re && int'(w_core) == c),
      .w_row, .w_col, .w_copy, .w_wdata, .w_rdata(c_wrdata[c]), .w_rvalid(c_wrvalid[c]),
      .sat_events(c_sat[c]), .mvm_count(c_mvm[c]), .mtvm_count(c_mtvm[c]), .opa_count(c_opa[c]),
      .commit_count(c_commit[c]), .crs_count(c_crs[c]), .opa_logged(c_logged[c]),
      .log_overflow(c_ovf[c]), .instr_count(c_instr[c]));
  end

  always_comb begin
    w_rdata = '0; w_rvalid = 1'b0;
    sat_events = '0; mvm_count = '0; mtvm_count = '0; opa_count = '0;
    commit_count = '0; crs_count = '0; opa_logged = '0; log_overflow = '0; instr_count = '0;
    for (int c = 0; c < NCORES; c++) begin
      if (c_wrvalid[c]) begin w_rdata = c_wrdata[c]; w_rvalid = 1'b1; end
      sat_events   += c_sat[c];
      mvm_count    += 32'(c_mvm[c]);
      mtvm_count   += 32'(c_mtvm[c]);
      opa_count    += 32'(c_opa[c]);
      commit_count += 32'(c_commit[c]);
      crs_count    += 32'(c_crs[c]);
      opa_logged   += 32'(c_logged[c]);
      log_overflow += 32'(c_ovf[c]);
      instr_count  += 32'(c_instr[c]);
    end
  end
endmodule
