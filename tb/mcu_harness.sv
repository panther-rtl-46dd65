// mcu_harness: self-checking test of one mcu instance of a given VARIANT, used by tb_mcu.
//
// The harness keeps its own model of every slice digit of every matrix copy and works out
// the expected MVM / MTVM results from the weight values (plain integer dot products), the
// expected OPA result by stepping the bit-streamed, bit-sliced update with per-slice
// saturation, and the expected effect of commit and carry resolution. It checks results,
// a sample of weights read back through the host port, saturation counts, event counters and the busy
// time of each command, and reports its counts through its outputs when `finished` rises.
module mcu_harness
  import panther_pkg::*;
#(
  parameter int unsigned VARIANT = 2,
  parameter int unsigned N       = 16
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int NC = VARIANT;
  localparam int NS = N_SLICES;
  localparam int AW = $clog2(N);

  logic rst_n = 1'b0;
  logic cmd_valid = 1'b0;
  mcu_cmd_t cmd = '0;
  logic busy;
  logic reg_we = 1'b0;
  vec_sel_e reg_wsel = VEC_IN_ROW, reg_rsel = VEC_IN_ROW;
  logic [AW-1:0] reg_widx = '0, reg_ridx = '0;
  logic signed [15:0] reg_wdata = '0, reg_rdata;
  logic w_we = 1'b0, w_re = 1'b0, w_rvalid;
  logic [AW-1:0] w_row = '0, w_col = '0;
  logic [1:0] w_copy = '0;
  logic signed [31:0] w_wdata = '0, w_rdata;
  logic [31:0] sat_events;
  logic [15:0] mvm_count, mtvm_count, opa_count, commit_count, crs_count;

  mcu #(.VARIANT(VARIANT), .N(N), .CRS_PERIOD(2)) dut (.*);

  // ---------------- reference model ----------------
  int dg [NC][NS][N][N];   // digits
  int xr [N], xc [N], ao [N];
  int sat_model;
  // Loop bounds held in variables so that the simulator keeps the reference loops rolled.
  int ns_v, n_v, nc_v, st_v, samples_v;

  function automatic int sbits(int k);
    return int'(SLICE_BITS_DEFAULT[4*k +: 4]);
  endfunction
  function automatic int clipd(int d, int k);
    int lo, hi;
    lo = -(1 << (sbits(k) - 1)); hi = (1 << (sbits(k) - 1)) - 1;
    return d < lo ? lo : d > hi ? hi : d;
  endfunction
  function automatic longint wval(int c, int i, int j);
    longint s;
    s = 0;
    for (int k = 0; k < ns_v; k++) s += longint'(dg[c][k][i][j]) * (longint'(1) << (4 * k));
    return s;
  endfunction
  function automatic longint sat32(longint v);
    return v > 64'sh7fffffff ? 64'sh7fffffff : v < -64'sh80000000 ? -64'sh80000000 : v;
  endfunction
  function automatic int sat16(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : int'(v);
  endfunction
  function automatic int smv(int v);  // value seen after sign-magnitude conversion
    return v == -32768 ? -32767 : v;
  endfunction
  task automatic set_digits(int c, int i, int j, longint w);
    longint r; int nib;
    r = w;
    for (int k = 0; k < ns_v; k++) begin
      if (k == NS - 1) dg[c][k][i][j] = clipd(int'(r), k);
      else begin
        nib = int'(r & 15); if (nib >= 8) nib -= 16;
        dg[c][k][i][j] = clipd(nib, k);
        r = (r - nib) >>> 4;
      end
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL v%0d: %s", VARIANT, what); end
  endtask

  // ---------------- drivers ----------------
  task automatic host_write(int i, int j, int w);
    @(negedge clk); w_we = 1; w_row = AW'(i); w_col = AW'(j); w_wdata = w;
    @(negedge clk); w_we = 0;
    for (int c = 0; c < nc_v; c++) set_digits(c, i, j, longint'(w));
  endtask
  task automatic host_read(int c, int i, int j, output int w);
    @(negedge clk); w_re = 1; w_row = AW'(i); w_col = AW'(j); w_copy = 2'(c);
    @(negedge clk); w_re = 0;
    while (!w_rvalid) @(negedge clk);
    w = w_rdata;
  endtask
  task automatic set_reg(vec_sel_e s, int idx, int v);
    @(negedge clk); reg_we = 1; reg_wsel = s; reg_widx = AW'(idx); reg_wdata = 16'(v);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic get_reg(vec_sel_e s, int idx, output int v);
    reg_rsel = s; reg_ridx = AW'(idx); #1; v = int'(reg_rdata);
  endtask
  task automatic run_cmd(bit mvm, bit mtvm, bit opa, bit be, output int cycles);
    @(negedge clk); cmd_valid = 1; cmd = '{mvm: mvm, mtvm: mtvm, opa: opa, batch_end: be};
    @(negedge clk); cmd_valid = 0; cycles = 0;
    while (busy) begin cycles++; @(negedge clk); end
  endtask

  // reference OPA on copy c with rows xr, columns ao
  task automatic model_opa(int c);
    for (int n = 0; n < st_v; n++)
      for (int i = 0; i < n_v; i++) begin
        int xm, am, sr;
        xm = smv(xr[i]); xm = xm < 0 ? -xm : xm;
        if (n == 15 || ((xm >> n) & 1) == 0) continue;
        sr = xr[i] < 0 ? -1 : 1;
        for (int j = 0; j < n_v; j++) begin
          int sa, ch, d;
          am = smv(ao[j]); sa = am < 0 ? -1 : 1; am = am < 0 ? -am : am;
          for (int k = 0; k < ns_v; k++) begin
            ch = int'((longint'(am) << n) >> (4 * k)) & 15;
            d = dg[c][k][i][j] + sr * sa * ch;
            if (d != clipd(d, k)) sat_model++;
            dg[c][k][i][j] = clipd(d, k);
          end
        end
      end
  endtask

  task automatic check_weights(int c, string what);
    int w, bad;
    bad = 0;
    for (int t = 0; t < samples_v; t++) begin
        int i, j;
        // row 0 / column 0 always, the rest at random positions
        i = (t < n_v) ? 0 : int'($urandom_range(n_v - 1));
        j = (t < n_v) ? t : int'($urandom_range(n_v - 1));
        host_read(c, i, j, w);
        if (longint'(w) != sat32(wval(c, i, j))) begin
          if (bad < 3) $display("  v%0d copy%0d w[%0d][%0d]=%0d exp %0d", VARIANT, c, i, j, w, sat32(wval(c, i, j)));
          bad++;
        end
      end
    check(bad == 0, what);
  endtask

  task automatic load_operands(int xmax, int amax);
    for (int i = 0; i < n_v; i++) begin
      xr[i] = $urandom_range(2 * xmax) - xmax; set_reg(VEC_IN_ROW, i, xr[i]);
      xc[i] = $urandom_range(2 * xmax) - xmax; set_reg(VEC_IN_COL, i, xc[i]);
      ao[i] = $urandom_range(2 * amax) - amax; set_reg(VEC_OUT_COL, i, ao[i]);
    end
  endtask

  task automatic check_mvm_mtvm(int c_mvm, int c_mtvm, string what);
    int v, bad;
    bad = 0;
    for (int j = 0; j < n_v; j++) begin
      longint s; s = 0;
      for (int i = 0; i < n_v; i++) s += longint'(smv(xr[i])) * wval(c_mvm, i, j);
      get_reg(VEC_OUT_COL, j, v);
      if (v != sat16(s >>> 16)) bad++;
    end
    for (int i = 0; i < n_v; i++) begin
      longint s; s = 0;
      for (int j = 0; j < n_v; j++) s += longint'(smv(xc[j])) * wval(c_mtvm, i, j);
      get_reg(VEC_OUT_ROW, i, v);
      if (v != sat16(s >>> 16)) bad++;
    end
    check(bad == 0, what);
  endtask

  int cyc, w, exp_pass;
  int opa_copy_lo, opa_copy_hi;
  initial begin
    ns_v = NS; n_v = N; nc_v = NC; st_v = 16; samples_v = 2 * N;
    checks = 0; failures = 0; finished = 0; sat_model = 0;
    for (int c = 0; c < nc_v; c++) for (int k = 0; k < ns_v; k++)
      for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++) dg[c][k][i][j] = 0;
    opa_copy_lo = (VARIANT == 3) ? 2 : 0;
    opa_copy_hi = (VARIANT == 3) ? 2 : NC - 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. program weights through the row-decoder path, read back from every copy
    for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++)
      host_write(i, j, int'($urandom_range(1 << 21)) - (1 << 20));
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("programmed weights copy %0d", c));
    // 2. MVM + MTVM in one mcu command
    load_operands(30000, 300);
    exp_pass = (VARIANT == 1) ? 2 : 1;
    run_cmd(1, 1, 0, 0, cyc);
    check(cyc == 1 + 21 * exp_pass, $sformatf("MVM+MTVM busy %0d cycles, expected %0d", cyc, 1 + 21 * exp_pass));
    check_mvm_mtvm(0, NC >= 2 ? 1 : 0, "MVM / MTVM results");
    check(mvm_count == 1 && mtvm_count == 1, "mvm/mtvm counters");
    // 3. OPA with small operands
    load_operands(200, 300);
    run_cmd(0, 0, 1, 0, cyc);
    check(cyc == 22, $sformatf("OPA busy %0d cycles", cyc));
    for (int c = opa_copy_lo; c <= opa_copy_hi; c++) model_opa(c);
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("weights after OPA copy %0d", c));
    check(opa_count == 1, "opa counter");
    // 4. all three operations in one command
    load_operands(20000, 2000);
    run_cmd(1, 1, 1, 0, cyc);
    exp_pass = (VARIANT == 1) ? 3 : (VARIANT == 2) ? 2 : 1;
    check(cyc == 1 + 21 * exp_pass + (VARIANT == 3 ? 0 : 1), $sformatf("MVM+MTVM+OPA busy %0d cycles, expected %0d", cyc, 1 + 21 * exp_pass));
    check_mvm_mtvm(0, NC >= 2 ? 1 : 0, "MVM / MTVM results with concurrent OPA");
    for (int c = opa_copy_lo; c <= opa_copy_hi; c++) model_opa(c);
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("weights after fused command copy %0d", c));
    check(sat_events == 32'(sat_model), $sformatf("saturation events %0d expected %0d", sat_events, sat_model));
    check(sat_model > 0, "some slice saturated");
    // 5. first end of batch: commit in variant 3, no CRS yet (period 2)
    run_cmd(0, 0, 0, 1, cyc);
    if (VARIANT == 3) begin
      for (int c = 0; c < 2; c++) for (int k = 0; k < ns_v; k++)
        for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++) dg[c][k][i][j] = dg[2][k][i][j];
      check(cyc == 1 + 1 + 2 * N + 0, $sformatf("commit busy %0d cycles", cyc));
      check(commit_count == 1, "commit counter");
    end
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("weights after first batch end copy %0d", c));
    check(crs_count == 0, "no CRS before the period");
    // 6. second end of batch: CRS renormalises every copy without changing weights
    run_cmd(0, 0, 0, 1, cyc);
    check(crs_count == 1, "CRS ran at the period");
    for (int c = 0; c < nc_v; c++) for (int i = 0; i < n_v; i++) for (int j = 0; j < n_v; j++)
      set_digits(c, i, j, sat32(wval(c, i, j)));
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("weights after CRS copy %0d", c));
    // 7. an OPA after CRS behaves as on freshly written digits
    load_operands(3000, 3000);
    run_cmd(0, 0, 1, 0, cyc);
    for (int c = opa_copy_lo; c <= opa_copy_hi; c++) model_opa(c);
    for (int c = 0; c < nc_v; c++) check_weights(c, $sformatf("weights after OPA past CRS copy %0d", c));
    check(sat_events == 32'(sat_model), "saturation events after CRS");
    finished = 1;
  end
endmodule
