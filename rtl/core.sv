// core: ISA-programmable core with NMCU matrix computation units (MCUs), a register file, a
// vector functional unit (VFU) and a load/store memory unit on the tile's shared memory.
//
// Execution. The core fetches 64-bit instructions (instr_t) from its instruction memory,
// decodes them and executes each to completion before fetching the next one (fetch, decode,
// execute; no overlap). Operands are addressed in one register space: words 0..RF_WORDS-1 are
// the register file; after it, each MCU m exposes its four operand vectors (XbarIn row side,
// XbarIn column side, XbarOut column side, XbarOut row side) at RF_WORDS + m*4N + v*N + i.
//   SET  writes an immediate;  LD/ST move `len` words between registers and shared memory;
//   VADD/VSUB/VMUL/VRELU/VDRELU run the VFU over `len` elements (two cycles per element);
//   MCU  carries one 3-bit mask {MVM, MTVM, OPA} per MCU and starts all of them together,
//        then waits until every started MCU is idle;
//   HALT ends the kernel: the deferred OPAs are applied, each MCU gets an end-of-batch command
//        (commit in variant 3, carry resolution when due), and `halted` rises.
// OPA semantics: an OPA takes effect only at halt, so the same code runs on every variant.
// In variants 1 and 2 the memory unit saves the two OPA operand vectors (XbarIn row side and
// XbarOut column side) of each requested OPA to a log in shared memory when the mcu instruction
// executes, and at halt loads each pair back and runs the OPA. In variant 3 the MCU runs the
// OPA at once on its third crossbar copy. A log that is full drops the OPA and counts it in
// log_overflow.
//
// From the paper: the core's parts (MCUs, VFU, register file, memory unit, fetch/decode/
// execute), the mcu instruction with one 3-bit mask per MCU (up to six) and no operands, and the
// halt semantics per variant. This design's own choices: the instruction encoding and the rest
// of the instruction set (no control flow), the register map, sizes, the log layout
// (LOG_ENTRIES pairs per MCU from LOG_BASE) and the blocking, unpipelined execution.
module core
  import panther_pkg::*;
#(
  parameter int unsigned NMCU        = 2,
  parameter int unsigned VARIANT     = 2,
  parameter int unsigned N           = XBAR_N,
  parameter int unsigned RF_WORDS    = 1024,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned MEM_AW      = 18,
  parameter int unsigned LOG_BASE    = 0,
  parameter int unsigned LOG_ENTRIES = 16,
  parameter int unsigned CRS_PERIOD  = 1024,
  parameter int unsigned FRAC        = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      halted,
  // instruction memory load
  input  logic                      im_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] im_addr,
  input  instr_t                    im_wdata,
  // shared memory port
  output logic                      mem_req,
  output logic                      mem_we,
  output logic [MEM_AW-1:0]         mem_addr,
  output logic [15:0]               mem_wdata,
  input  logic                      mem_gnt,
  input  logic                      mem_rvalid,
  input  logic [15:0]               mem_rdata,
  // host weight port, routed to MCU w_mcu
  input  logic [2:0]                w_mcu,
  input  logic                      w_we,
  input  logic                      w_re,
  input  logic [$clog2(N)-1:0]      w_row,
  input  logic [$clog2(N)-1:0]      w_col,
  input  logic [1:0]                w_copy,
  input  logic signed [W_BITS-1:0]  w_wdata,
  output logic signed [W_BITS-1:0]  w_rdata,
  output logic                      w_rvalid,
  // event counters
  output logic [31:0]               sat_events,
  output logic [15:0]               mvm_count,
  output logic [15:0]               mtvm_count,
  output logic [15:0]               opa_count,
  output logic [15:0]               commit_count,
  output logic [15:0]               crs_count,
  output logic [15:0]               opa_logged,
  output logic [15:0]               log_overflow,
  output logic [15:0]               instr_count
);
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned RA  = 12;  // register address width
  localparam int unsigned LEB = (LOG_ENTRIES > 1) ? $clog2(LOG_ENTRIES + 1) : 1;

  // ---------------- state ----------------
  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_EXEC, S_VEC_A, S_VEC_B, S_MV, S_MV_WAIT,
    S_LOG_CHECK, S_LOG_2, S_LOG_3, S_ISSUE, S_WAIT,
    S_RP_CHECK, S_RP_2, S_RP_3, S_RP_WAIT, S_BE, S_BE_WAIT, S_DONE
  } state_e;
  state_e state, mv_ret;

  instr_t imem [IMEM_WORDS];
  instr_t ir;
  logic [$clog2(IMEM_WORDS)-1:0] pc;
  logic [15:0] rf [RF_WORDS];
  logic [7:0]  idx;
  logic signed [15:0] vtmp;
  // mover (LD/ST engine)
  logic              mv_st;
  logic [MEM_AW-1:0] mv_maddr;
  logic [RA-1:0]     mv_raddr;
  logic [8:0]        mv_cnt;
  // mcu instruction / halt bookkeeping
  logic [2:0]        mask [NMCU];
  logic [2:0]        m;
  logic [LEB-1:0]    log_cnt [NMCU];
  logic [LEB-1:0]    rp_e;

  always_ff @(posedge clk) if (im_we) imem[im_addr] <= im_wdata;

  // ---------------- MCUs ----------------
  logic      mcu_cmd_valid [NMCU];
  mcu_cmd_t  mcu_cmd [NMCU];
  logic      mcu_busy [NMCU];
  logic      mcu_reg_we [NMCU];
  vec_sel_e  reg_sel_w, reg_sel_r;
  logic [AW-1:0] reg_idx_w, reg_idx_r;
  logic signed [15:0] reg_wdata;
  logic signed [15:0] mcu_rdata [NMCU];
  logic signed [W_BITS-1:0] mw_rdata [NMCU];
  logic mw_rvalid [NMCU];
  logic [31:0] m_sat [NMCU];
  logic [15:0] m_mvm [NMCU], m_mtvm [NMCU], m_opa [NMCU], m_commit [NMCU], m_crs [NMCU];

  for (genvar g = 0; g < NMCU; g++) begin : g_mcu
    mcu #(.VARIANT(VARIANT), .N(N), .CRS_PERIOD(CRS_PERIOD)) u_mcu (
      .clk, .rst_n,
      .cmd_valid(mcu_cmd_valid[g]), .cmd(mcu_cmd[g]), .busy(mcu_busy[g]),
      .reg_we(mcu_reg_we[g]), .reg_wsel(reg_sel_w), .reg_widx(reg_idx_w), .reg_wdata(reg_wdata),
      .reg_rsel(reg_sel_r), .reg_ridx(reg_idx_r), .reg_rdata(mcu_rdata[g]),
      .w_we(w_we && int'(w_mcu) == g), .w_re(w_re && int'(w_mcu) == g), .w_row, .w_col, .w_copy,
      .w_wdata, .w_rdata(mw_rdata[g]), .w_rvalid(mw_rvalid[g]),
      .sat_events(m_sat[g]), .mvm_count(m_mvm[g]), .mtvm_count(m_mtvm[g]), .opa_count(m_opa[g]),
      .commit_count(m_commit[g]), .crs_count(m_crs[g]));
  end

  always_comb begin
    w_rdata = '0; w_rvalid = 1'b0;
    sat_events = '0; mvm_count = '0; mtvm_count = '0; opa_count = '0; commit_count = '0; crs_count = '0;
    for (int g = 0; g < NMCU; g++) begin
      if (mw_rvalid[g]) begin w_rdata = mw_rdata[g]; w_rvalid = 1'b1; end
      sat_events += m_sat[g]; mvm_count += m_mvm[g]; mtvm_count += m_mtvm[g];
      opa_count += m_opa[g]; commit_count += m_commit[g]; crs_count += m_crs[g];
    end
  end

  // ---------------- register space ----------------
  // Read port (combinational) and write port, both by register address.
  logic [RA-1:0] rd_addr, wr_addr;
  logic          wr_en;
  logic [15:0]   rd_data, wr_data;
  logic [RA-1:0] rd_off, wr_off;
  int unsigned   rd_m, wr_m;

  function automatic logic [RA-1:0] mreg(input int unsigned mm, input vec_sel_e v);
    return RA'(RF_WORDS + mm * 4 * N + int'(v) * N);
  endfunction

  always_comb begin
    rd_off    = rd_addr - RA'(RF_WORDS);
    rd_m      = int'(rd_off) / (4 * N);
    reg_sel_r = vec_sel_e'((int'(rd_off) / N) % 4);
    reg_idx_r = AW'(rd_off);
    if (int'(rd_addr) < RF_WORDS) rd_data = rf[rd_addr[$clog2(RF_WORDS)-1:0]];
    else begin
      rd_data = '0;
      for (int g = 0; g < NMCU; g++) if (rd_m == g) rd_data = mcu_rdata[g];
    end
    wr_off    = wr_addr - RA'(RF_WORDS);
    wr_m      = int'(wr_off) / (4 * N);
    reg_sel_w = vec_sel_e'((int'(wr_off) / N) % 4);
    reg_idx_w = AW'(wr_off);
    reg_wdata = wr_data;
    for (int g = 0; g < NMCU; g++) mcu_reg_we[g] = wr_en && int'(wr_addr) >= RF_WORDS && wr_m == g;
  end

  always_ff @(posedge clk)
    if (wr_en && int'(wr_addr) < RF_WORDS) rf[wr_addr[$clog2(RF_WORDS)-1:0]] <= wr_data;

  // ---------------- VFU ----------------
  logic signed [15:0] vfu_y;
  vfu #(.FRAC(FRAC)) u_vfu (.op(ir.op), .a(vtmp), .b(rd_data), .y(vfu_y));

  // ---------------- datapath control (combinational) ----------------
  function automatic logic [MEM_AW-1:0] log_addr(input int unsigned mm, input int unsigned e);
    return MEM_AW'(LOG_BASE + (mm * LOG_ENTRIES + e) * 2 * N);
  endfunction

  always_comb begin
    rd_addr = '0; wr_addr = '0; wr_en = 1'b0; wr_data = '0;
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = mv_maddr; mem_wdata = '0;
    for (int g = 0; g < NMCU; g++) begin mcu_cmd_valid[g] = 1'b0; mcu_cmd[g] = '0; end
    unique case (state)
      S_EXEC: if (ir.op == OP_SET) begin wr_en = 1'b1; wr_addr = ir.a[RA-1:0]; wr_data = ir.b[15:0]; end
      S_VEC_A: rd_addr = ir.b[RA-1:0] + RA'(idx);
      S_VEC_B: begin
        rd_addr = ir.c + RA'(idx);
        wr_en = 1'b1; wr_addr = ir.a[RA-1:0] + RA'(idx); wr_data = vfu_y;
      end
      S_MV: if (mv_cnt != 0) begin
        mem_req = 1'b1; mem_we = mv_st; rd_addr = mv_raddr; mem_wdata = rd_data;
      end
      S_MV_WAIT: if (mem_rvalid) begin wr_en = 1'b1; wr_addr = mv_raddr; wr_data = mem_rdata; end
      S_ISSUE:
        for (int g = 0; g < NMCU; g++) if (mask[g] != 0) begin
          mcu_cmd_valid[g] = 1'b1;
          mcu_cmd[g] = '{mvm: mask[g][2], mtvm: mask[g][1], opa: mask[g][0], batch_end: 1'b0};
        end
      S_RP_3:
        for (int g = 0; g < NMCU; g++) if (int'(m) == g) begin
          mcu_cmd_valid[g] = 1'b1;
          mcu_cmd[g] = '{mvm: 1'b0, mtvm: 1'b0, opa: 1'b1, batch_end: 1'b0};
        end
      S_BE:
        for (int g = 0; g < NMCU; g++) begin
          mcu_cmd_valid[g] = 1'b1;
          mcu_cmd[g] = '{mvm: 1'b0, mtvm: 1'b0, opa: 1'b0, batch_end: 1'b1};
        end
      default: ;
    endcase
  end

  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int g = 0; g < NMCU; g++) any_busy |= mcu_busy[g];
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; mv_ret <= S_IDLE; pc <= '0; ir <= '0; idx <= '0; vtmp <= '0;
      mv_st <= 1'b0; mv_maddr <= '0; mv_raddr <= '0; mv_cnt <= '0; m <= '0; rp_e <= '0;
      for (int g = 0; g < NMCU; g++) begin mask[g] <= '0; log_cnt[g] <= '0; end
      halted <= 1'b0; opa_logged <= '0; log_overflow <= '0; instr_count <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin pc <= '0; halted <= 1'b0; state <= S_FETCH; end
        S_FETCH: begin
          ir <= imem[pc];
          pc <= pc + 1'b1;
          instr_count <= instr_count + 16'd1;
          state <= S_EXEC;
        end
        S_EXEC: begin
          idx <= '0;
          unique case (ir.op)
            OP_LD, OP_ST: begin
              mv_st    <= (ir.op == OP_ST);
              mv_maddr <= (ir.op == OP_ST) ? ir.a[MEM_AW-1:0] : ir.b[MEM_AW-1:0];
              mv_raddr <= (ir.op == OP_ST) ? ir.b[RA-1:0] : ir.a[RA-1:0];
              mv_cnt   <= 9'(ir.len);
              mv_ret   <= S_FETCH;
              state    <= S_MV;
            end
            OP_VADD, OP_VSUB, OP_VMUL, OP_VRELU, OP_VDRELU:
              state <= (ir.len == 0) ? S_FETCH : S_VEC_A;
            OP_MCU: begin
              for (int g = 0; g < NMCU; g++) mask[g] <= ir.a[3*g +: 3];
              m <= '0;
              state <= S_LOG_CHECK;
            end
            OP_HALT: begin m <= '0; rp_e <= '0; state <= (VARIANT == 3) ? S_BE : S_RP_CHECK; end
            default: state <= S_FETCH;  // NOP, SET (written combinationally)
          endcase
        end
        S_VEC_A: begin vtmp <= rd_data; state <= S_VEC_B; end
        S_VEC_B: begin
          idx <= idx + 8'd1;
          state <= (idx + 8'd1 == ir.len) ? S_FETCH : S_VEC_A;
        end
        // ---- load/store engine ----
        S_MV: begin
          if (mv_cnt == 0) state <= mv_ret;
          else if (mem_gnt) begin
            if (mv_st) begin
              mv_maddr <= mv_maddr + 1'b1; mv_raddr <= mv_raddr + 1'b1; mv_cnt <= mv_cnt - 9'd1;
            end else state <= S_MV_WAIT;
          end
        end
        S_MV_WAIT: if (mem_rvalid) begin
          mv_maddr <= mv_maddr + 1'b1; mv_raddr <= mv_raddr + 1'b1; mv_cnt <= mv_cnt - 9'd1;
          state <= S_MV;
        end
        // ---- mcu instruction: save deferred OPA operands (variants 1 and 2) ----
        S_LOG_CHECK: begin
          if (int'(m) == NMCU) state <= S_ISSUE;
          else if (VARIANT != 3 && mask[m][0]) begin
            mask[m][0] <= 1'b0;
            if (int'(log_cnt[m]) < LOG_ENTRIES) begin
              mv_st <= 1'b1; mv_cnt <= 9'(N); mv_ret <= S_LOG_2;
              mv_maddr <= log_addr(m, log_cnt[m]);
              mv_raddr <= mreg(m, VEC_IN_ROW);
              state <= S_MV;
            end else begin
              log_overflow <= log_overflow + 16'd1;
              m <= m + 3'd1;
            end
          end else m <= m + 3'd1;
        end
        S_LOG_2: begin
          mv_st <= 1'b1; mv_cnt <= 9'(N); mv_ret <= S_LOG_3;
          mv_maddr <= log_addr(m, log_cnt[m]) + MEM_AW'(N);
          mv_raddr <= mreg(m, VEC_OUT_COL);
          state <= S_MV;
        end
        S_LOG_3: begin
          log_cnt[m] <= log_cnt[m] + 1'b1;
          opa_logged <= opa_logged + 16'd1;
          m <= m + 3'd1;
          state <= S_LOG_CHECK;
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (!any_busy) state <= S_FETCH;
        // ---- halt: replay deferred OPAs, then end the batch in every MCU ----
        S_RP_CHECK: begin
          if (int'(m) == NMCU) state <= S_BE;
          else if (rp_e < log_cnt[m]) begin
            mv_st <= 1'b0; mv_cnt <= 9'(N); mv_ret <= S_RP_2;
            mv_maddr <= log_addr(m, rp_e);
            mv_raddr <= mreg(m, VEC_IN_ROW);
            state <= S_MV;
          end else begin
            log_cnt[m] <= '0;
            rp_e <= '0;
            m <= m + 3'd1;
          end
        end
        S_RP_2: begin
          mv_st <= 1'b0; mv_cnt <= 9'(N); mv_ret <= S_RP_3;
          mv_maddr <= log_addr(m, rp_e) + MEM_AW'(N);
          mv_raddr <= mreg(m, VEC_OUT_COL);
          state <= S_MV;
        end
        S_RP_3: state <= S_RP_WAIT;
        S_RP_WAIT: if (!any_busy) begin rp_e <= rp_e + 1'b1; state <= S_RP_CHECK; end
        S_BE: state <= S_BE_WAIT;
        S_BE_WAIT: if (!any_busy) begin halted <= 1'b1; state <= S_DONE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_mover: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req && !mem_gnt && state == S_MV |=> state == S_MV);
endmodule
