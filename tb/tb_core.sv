// tb_core: runs one training-style kernel on a core (two MCUs) attached to a shared memory, for
// MCU variants 2 and 3, and checks every result against values computed here.
//
// Kernel (instruction memory loaded by the test): load an input vector and an error vector from
// shared memory into MCU 0, run MVM and MTVM together (mcu mask 110), store both results, run
// each VFU operation over the MVM result, load a gradient vector and issue OPA on both MCUs,
// then halt. The test then reads weights back through the host port. Weights are programmed as
// multiples of 16 and the update operands are small, so the bit-sliced OPA is exact and the
// expected weights are W + x*g. In variant 2 the OPA must have been logged to shared memory and
// replayed at halt (opa_logged = 2, both copies updated); in variant 3 it runs at once on the
// third copy and the halt commits it (commit_count = 2). Also checked: the weights are unchanged
// until halt, instruction count, MVM/MTVM/OPA counters, and the MCU busy cycles before halt
// (one 22-cycle pass per mcu instruction that runs; a logged OPA in variant 2 runs none).
module core_harness
  import panther_pkg::*;
#(
  parameter int unsigned VARIANT = 2
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int N = XBAR_N;
  localparam int RFW = 1024;
  localparam int MEM_AW = 18;
  localparam int X_A = 'h1000, E_A = 'h1100, G_A = 'h1200, Y_A = 'h2000, Z_A = 'h2100, R_A = 'h2200;
  localparam int LOG_B = 'h30000;

  logic rst_n = 1'b0, start = 1'b0, halted;
  logic im_we = 1'b0;
  logic [9:0] im_addr = '0;
  instr_t im_wdata = '0;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [MEM_AW-1:0] mem_addr;
  logic [15:0] mem_wdata, mem_rdata;
  logic [2:0] w_mcu = '0;
  logic w_we = 1'b0, w_re = 1'b0, w_rvalid;
  logic [6:0] w_row = '0, w_col = '0;
  logic [1:0] w_copy = '0;
  logic signed [31:0] w_wdata = '0, w_rdata;
  logic [31:0] sat_events;
  logic [15:0] mvm_count, mtvm_count, opa_count, commit_count, crs_count, opa_logged, log_overflow, instr_count;

  core #(.NMCU(2), .VARIANT(VARIANT), .LOG_BASE(LOG_B)) dut (.*);

  // shared memory: port 0 = core, port 1 = test bench
  logic [1:0] sm_req, sm_we, sm_gnt, sm_rvalid;
  logic [MEM_AW-1:0] sm_addr [2];
  logic [15:0] sm_wdata [2];
  logic tb_req = 1'b0, tb_we = 1'b0;
  logic [MEM_AW-1:0] tb_addr = '0;
  logic [15:0] tb_wdata = '0;
  assign sm_req = {tb_req, mem_req};
  assign sm_we = {tb_we, mem_we};
  assign sm_addr[0] = mem_addr;  assign sm_addr[1] = tb_addr;
  assign sm_wdata[0] = mem_wdata; assign sm_wdata[1] = tb_wdata;
  assign mem_gnt = sm_gnt[0];
  assign mem_rvalid = sm_rvalid[0];
  shared_memory #(.NPORTS(2), .WORDS(1 << MEM_AW)) u_mem (
    .clk, .rst_n, .req(sm_req), .we(sm_we), .addr(sm_addr), .wdata(sm_wdata),
    .gnt(sm_gnt), .rvalid(sm_rvalid), .rdata(mem_rdata));

  int x [N], e [N], g [N];
  int w0 [N][N];
  int n_v;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("  v%0d FAIL: %s", VARIANT, what); end
  endtask
  task automatic mem_write(int a, int v);
    @(negedge clk); tb_req = 1; tb_we = 1; tb_addr = MEM_AW'(a); tb_wdata = 16'(v);
    @(posedge clk); while (!sm_gnt[1]) @(posedge clk);
    @(negedge clk); tb_req = 0; tb_we = 0;
  endtask
  task automatic mem_read(int a, output int v);
    @(negedge clk); tb_req = 1; tb_we = 0; tb_addr = MEM_AW'(a);
    #1; while (!sm_gnt[1]) begin @(negedge clk); #1; end
    @(negedge clk); tb_req = 0;
    v = int'($signed(mem_rdata));
  endtask
  task automatic host_write(int m, int i, int j, int w);
    @(negedge clk); w_we = 1; w_mcu = 3'(m); w_row = 7'(i); w_col = 7'(j); w_wdata = w;
    @(negedge clk); w_we = 0;
  endtask
  task automatic host_read(int m, int c, int i, int j, output int w);
    @(negedge clk); w_re = 1; w_mcu = 3'(m); w_row = 7'(i); w_col = 7'(j); w_copy = 2'(c);
    @(negedge clk); w_re = 0;
    while (!w_rvalid) @(negedge clk);
    w = w_rdata;
  endtask
  task automatic load(int pc, opcode_e op, int a, int b, int c, int len);
    instr_t ins;
    ins.op = op; ins.a = 20'(a); ins.b = 20'(b); ins.c = 12'(c); ins.len = 8'(len);
    @(negedge clk); im_we = 1; im_addr = 10'(pc); im_wdata = ins;
    @(negedge clk); im_we = 0;
  endtask
  function automatic int mreg(int m, vec_sel_e v);
    return RFW + m * 4 * N + int'(v) * N;
  endfunction
  function automatic int sat16(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : int'(v);
  endfunction
  function automatic int vop(opcode_e op, int a, int b);
    case (op)
      OP_VADD:  return sat16(longint'(a) + b);
      OP_VSUB:  return sat16(longint'(a) - b);
      OP_VMUL:  return sat16((longint'(a) * b) >>> 8);
      OP_VRELU: return a > 0 ? a : 0;
      default:  return a > 0 ? b : 0;
    endcase
  endfunction

  int mcu_busy_cycles;
  logic counting = 1'b0;
  always @(posedge clk) if (counting && dut.any_busy) mcu_busy_cycles++;

  initial begin
    int pc, v, bad, w, cyc;
    opcode_e vops [5];
    vops = '{OP_VRELU, OP_VADD, OP_VSUB, OP_VMUL, OP_VDRELU};
    checks = 0; failures = 0; finished = 0; n_v = N; mcu_busy_cycles = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // operands and weights
    for (int i = 0; i < n_v; i++) begin
      x[i] = $urandom_range(6) - 3; e[i] = $urandom_range(4000) - 2000; g[i] = $urandom_range(6) - 3;
      mem_write(X_A + i, x[i]); mem_write(E_A + i, e[i]); mem_write(G_A + i, g[i]);
    end
    for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++) begin
      w0[i][j] = 16 * (int'($urandom_range(1 << 17)) - (1 << 16));
      host_write(0, i, j, w0[i][j]);
    end
    // kernel
    pc = 0;
    load(pc++, OP_LD, mreg(0, VEC_IN_ROW), X_A, 0, N);
    load(pc++, OP_LD, mreg(0, VEC_IN_COL), E_A, 0, N);
    load(pc++, OP_MCU, 'b110, 0, 0, 0);
    load(pc++, OP_ST, Y_A, mreg(0, VEC_OUT_COL), 0, N);
    load(pc++, OP_ST, Z_A, mreg(0, VEC_OUT_ROW), 0, N);
    load(pc++, OP_LD, 0, Y_A, 0, N);
    load(pc++, OP_LD, 128, E_A, 0, N);
    for (int k = 0; k < 5; k++) begin
      load(pc++, vops[k], 256 + 128 * k, 0, 128, N);
      load(pc++, OP_ST, R_A + 128 * k, 256 + 128 * k, 0, N);
    end
    load(pc++, OP_SET, 1000, 'h1234, 0, 0);
    load(pc++, OP_ST, R_A + 640, 1000, 0, 1);
    load(pc++, OP_LD, mreg(0, VEC_OUT_COL), G_A, 0, N);
    load(pc++, OP_LD, mreg(1, VEC_IN_ROW), X_A, 0, N);
    load(pc++, OP_LD, mreg(1, VEC_OUT_COL), G_A, 0, N);
    load(pc++, OP_MCU, 'b001_001, 0, 0, 0);
    load(pc++, OP_VRELU, 900, 0, 0, 100);  // 200 cycles of VFU work before the halt
    load(pc++, OP_HALT, 0, 0, 0, 0);

    @(negedge clk); start = 1; counting = 1; @(negedge clk); start = 0;
    // before halt: weights must be untouched by the OPA (it takes effect at halt)
    while (int'(instr_count) != pc - 1) @(negedge clk);
    counting = 0;
    host_read(0, 0, 0, 0, w);
    check(w == w0[0][0], "OPA not visible before halt");
    cyc = 0;
    while (!halted) begin @(negedge clk); cyc++; check(cyc < 100000, "halt reached"); if (cyc >= 100000) break; end

    // MVM / MTVM results
    bad = 0;
    for (int j = 0; j < n_v; j++) begin
      longint s; s = 0;
      for (int i = 0; i < n_v; i++) s += longint'(x[i]) * w0[i][j];
      mem_read(Y_A + j, v);
      if (v != sat16(s >>> 16)) bad++;
    end
    check(bad == 0, "MVM results in shared memory");
    bad = 0;
    for (int i = 0; i < n_v; i++) begin
      longint s; s = 0;
      for (int j = 0; j < n_v; j++) s += longint'(e[j]) * w0[i][j];
      mem_read(Z_A + i, v);
      if (v != sat16(s >>> 16)) bad++;
    end
    check(bad == 0, "MTVM results in shared memory");
    // VFU results
    bad = 0;
    for (int k = 0; k < 5; k++)
      for (int j = 0; j < n_v; j++) begin
        longint s; int y;
        s = 0;
        for (int i = 0; i < n_v; i++) s += longint'(x[i]) * w0[i][j];
        y = sat16(s >>> 16);
        mem_read(R_A + 128 * k + j, v);
        if (v != vop(vops[k], y, e[j])) bad++;
      end
    check(bad == 0, "VFU results");
    mem_read(R_A + 640, v);
    check(v == 'h1234, "SET + single-word store");
    // weights after the update
    for (int c = 0; c < (VARIANT == 3 ? 2 : VARIANT); c++) begin
      bad = 0;
      for (int t = 0; t < 300; t++) begin
        int i, j;
        i = (t < 128) ? t : int'($urandom_range(n_v - 1)); j = (t < 128) ? 127 - t : int'($urandom_range(n_v - 1));
        host_read(0, c, i, j, w);
        if (w != w0[i][j] + x[i] * g[j]) bad++;
        host_read(1, c, i, j, w);
        if (w != x[i] * g[j]) bad++;
      end
      check(bad == 0, $sformatf("weights after OPA, copy %0d", c));
    end
    check(mvm_count == 1 && mtvm_count == 1, "MVM/MTVM counters");
    check(opa_count == 2, "OPA counter");
    check(instr_count == 16'(pc), "instruction count");
    check(log_overflow == 0, "no log overflow");
    if (VARIANT == 3) check(opa_logged == 0 && commit_count == 2, "variant 3: eager OPA and commit");
    else check(opa_logged == 2, "variants 1/2: OPA logged and replayed");
    // MCUs busy before the halt: one 22-cycle pass for MVM+MTVM; the OPA instruction adds a
    // second pass only in variant 3 (in variant 2 it is logged and runs at halt)
    check(mcu_busy_cycles == (VARIANT == 3 ? 2 : 1) * 22, $sformatf("MCU busy cycles %0d", mcu_busy_cycles));
    check(crs_count == 0, "no CRS in first batch");
    finished = 1;
  end
endmodule

module tb_core;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int c2, f2, c3, f3;
  logic d2, d3;
  core_harness #(.VARIANT(2)) h2 (.clk, .checks(c2), .failures(f2), .finished(d2));
  core_harness #(.VARIANT(3)) h3 (.clk, .checks(c3), .failures(f3), .finished(d3));
  initial begin
    repeat (5) @(posedge clk);  // the harnesses clear `finished` at time 0
    wait (d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, f2 + f3);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, f2 + f3 + 1);
    $finish;
  end
endmodule
