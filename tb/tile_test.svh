// tile_test.svh: the end-to-end test body shared by tb_panther_tile and tb_panther_tile_full.
// The including module declares the DUT signals, instantiates panther_tile as `dut`, and
// defines NC (cores), RUNS (kernel runs = batches), LOGE (log entries per MCU) and CRSP (CRS
// period) to match the DUT's parameters.
//
// Every core c gets its own input, error and gradient vectors in shared memory and a sparse
// weight matrix in MCU 0 (row 0 and the diagonal, multiples of 16, zero elsewhere); MCU 1 starts
// at zero. The kernel, the same on every core and run by all cores at once:
//   LD x -> MCU0 row input; LD e -> MCU0 column input; mcu 110 (MVM and MTVM together);
//   ST MVM result; ST MTVM result; LD g -> MCU0 output (column) vector; LD x1 -> MCU1 row
//   input; LD h -> MCU1 column vector (x1 and h large, so MCU1 cells saturate);
//   mcu 001_001 (OPA on both MCUs); mcu 001 (second OPA on MCU0); halt.
// Checked: MVM and MTVM results against dot products computed here; MCU0 weights after the
// halt equal W + k*x*g, with k the number of OPAs the log could hold (the rest dropped and
// counted as log overflow); later runs use g = 0 and h = 0 and must leave the weights unchanged,
// also across a carry resolution step. Counted and required to have happened at least once:
// MVM, MTVM, OPA logged to shared memory, OPA replayed at halt, cell saturation during OPA (MCU1),
// shared-memory contention between cores, every core halting, and -- when the run count
// reaches the CRS period -- carry resolution; log overflow when LOGE < 2.
  localparam int N = 128;
  localparam int IN_RF = 1024;
  int checks = 0, failures = 0;
  int n_v, nc_v;
  int x [NC][N], e [NC][N], g [NC][N];
  int w0 [NC][N][N];
  int contention = 0;
  int mech_seen [string];

  always @(posedge clk) if (rst_n && $countones(dut.req) > 1) contention++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic mem_write(int a, int v);
    @(negedge clk); hm_req = 1; hm_we = 1; hm_addr = MEM_AW'(a); hm_wdata = 16'(v);
    #1; while (!hm_gnt) begin @(negedge clk); #1; end
    @(negedge clk); hm_req = 0; hm_we = 0;
  endtask
  task automatic mem_read(int a, output int v);
    @(negedge clk); hm_req = 1; hm_we = 0; hm_addr = MEM_AW'(a);
    #1; while (!hm_gnt) begin @(negedge clk); #1; end
    @(negedge clk); hm_req = 0;
    v = int'($signed(hm_rdata));
  endtask
  task automatic host_write(int c, int m, int i, int j, int w);
    @(negedge clk); w_we = 1; w_core = CW'(c); w_mcu = 3'(m); w_row = 7'(i); w_col = 7'(j); w_wdata = w;
    @(negedge clk); w_we = 0;
  endtask
  task automatic host_read(int c, int m, int i, int j, output int w);
    @(negedge clk); w_re = 1; w_core = CW'(c); w_mcu = 3'(m); w_row = 7'(i); w_col = 7'(j); w_copy = 2'd0;
    @(negedge clk); w_re = 0;
    while (!w_rvalid) @(negedge clk);
    w = w_rdata;
  endtask
  task automatic load(int c, int pc, opcode_e op, int a, int b, int len);
    instr_t ins;
    ins.op = op; ins.a = 20'(a); ins.b = 20'(b); ins.c = '0; ins.len = 8'(len);
    @(negedge clk); im_we = 1; im_core = CW'(c); im_addr = 10'(pc); im_wdata = ins;
    @(negedge clk); im_we = 0;
  endtask
  function automatic int mreg(int m, vec_sel_e v);
    return IN_RF + m * 4 * N + int'(v) * N;
  endfunction
  function automatic int sat16(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : int'(v);
  endfunction
  // per-core data areas in shared memory
  function automatic int base(int c);
    return c * 'h1000;
  endfunction
  task automatic seen(string what, bit happened);
    mech_seen[what] = happened ? 1 : 0;
  endtask

  int kopa, pc_end;
  initial begin
    int v, w, bad, cyc;
    n_v = N; nc_v = NC;
    kopa = (LOGE >= 2) ? 2 : 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < nc_v; c++) begin
      for (int i = 0; i < n_v; i++) begin
        x[c][i] = $urandom_range(4) - 2; e[c][i] = $urandom_range(4000) - 2000; g[c][i] = $urandom_range(4) - 2;
        mem_write(base(c) + i, x[c][i]);
        mem_write(base(c) + 'h100 + i, e[c][i]);
        mem_write(base(c) + 'h200 + i, g[c][i]);
        mem_write(base(c) + 'h300 + i, 30000 - i);
        mem_write(base(c) + 'h600 + i, 1000 + i);
        for (int j = 0; j < n_v; j++) w0[c][i][j] = 0;
      end
      for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++)
        if (i == 0 || i == j) begin
          w0[c][i][j] = 16 * (int'($urandom_range(1 << 17)) - (1 << 16));
          host_write(c, 0, i, j, w0[c][i][j]);
        end
      begin
        int pc; pc = 0;
        load(c, pc++, OP_LD, mreg(0, VEC_IN_ROW), base(c), N);
        load(c, pc++, OP_LD, mreg(0, VEC_IN_COL), base(c) + 'h100, N);
        load(c, pc++, OP_MCU, 'b110, 0, 0);
        load(c, pc++, OP_ST, base(c) + 'h400, mreg(0, VEC_OUT_COL), N);
        load(c, pc++, OP_ST, base(c) + 'h500, mreg(0, VEC_OUT_ROW), N);
        load(c, pc++, OP_LD, mreg(0, VEC_OUT_COL), base(c) + 'h200, N);
        load(c, pc++, OP_LD, mreg(1, VEC_IN_ROW), base(c) + 'h600, N);
        load(c, pc++, OP_LD, mreg(1, VEC_OUT_COL), base(c) + 'h300, N);
        load(c, pc++, OP_MCU, 'b001_001, 0, 0);
        load(c, pc++, OP_MCU, 'b000_001, 0, 0);
        load(c, pc++, OP_HALT, 0, 0, 0);
        pc_end = pc;
      end
    end

    for (int r = 0; r < RUNS; r++) begin
      if (r > 0)  // later batches: zero gradients, the weights must stay put
        for (int c = 0; c < nc_v; c++) for (int i = 0; i < n_v; i++) begin
          mem_write(base(c) + 'h200 + i, 0); mem_write(base(c) + 'h300 + i, 0);
        end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (halted != '1 && cyc < 200000) begin @(negedge clk); cyc++; end
      check(halted == '1, $sformatf("run %0d: all cores halted", r));
      // MVM and MTVM results of every core
      bad = 0;
      for (int c = 0; c < nc_v; c++) begin
        for (int j = 0; j < n_v; j++) begin
          longint s; s = 0;
          for (int i = 0; i < n_v; i++) s += longint'(x[c][i]) * w0[c][i][j];
          mem_read(base(c) + 'h400 + j, v);
          if (v != sat16(s >>> 16)) bad++;
        end
        for (int i = 0; i < n_v; i++) begin
          longint s; s = 0;
          for (int j = 0; j < n_v; j++) s += longint'(e[c][j]) * w0[c][i][j];
          mem_read(base(c) + 'h500 + i, v);
          if (v != sat16(s >>> 16)) bad++;
        end
      end
      check(bad == 0, $sformatf("run %0d: MVM/MTVM results of all cores", r));
      // weights of MCU 0 after the update (first run only changes them)
      if (r == 0)
        for (int c = 0; c < nc_v; c++) for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++)
          w0[c][i][j] += kopa * x[c][i] * g[c][j];
      bad = 0;
      for (int c = 0; c < nc_v; c++) for (int t = 0; t < 200; t++) begin
        int i, j;
        i = (t < n_v) ? t : int'($urandom_range(n_v - 1));
        j = (t < n_v) ? t : int'($urandom_range(n_v - 1));
        host_read(c, 0, i, j, w);
        if (w != w0[c][i][j]) bad++;
      end
      check(bad == 0, $sformatf("run %0d: MCU0 weights after halt (OPA x%0d)", r, kopa));
    end

    check(mvm_count == 32'(NC * RUNS) && mtvm_count == 32'(NC * RUNS), "MVM/MTVM counters");
    check(opa_logged == 32'(NC * RUNS * (1 + kopa)), $sformatf("OPAs logged %0d", opa_logged));
    check(opa_count == opa_logged, "every logged OPA replayed");
    check(log_overflow == 32'(NC * RUNS * (2 - kopa)), "log overflow count");
    check(instr_count == 32'(NC * RUNS * pc_end), "instruction count");
    seen("MVM", mvm_count != 0);
    seen("MTVM", mtvm_count != 0);
    seen("OPA logged to shared memory", opa_logged != 0);
    seen("OPA replayed at halt", opa_count != 0);
    seen("cell saturation in OPA", sat_events != 0);
    seen("shared-memory contention", contention != 0);
    if (RUNS >= CRSP) seen("carry resolution step", crs_count != 0);
    if (LOGE < 2) seen("log overflow", log_overflow != 0);
    foreach (mech_seen[k]) begin
      $display("mechanism %-28s %s", k, mech_seen[k] ? "happened" : "NEVER HAPPENED");
      check(mech_seen[k] == 1, {"mechanism happened: ", k});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
