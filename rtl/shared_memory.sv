// shared_memory: the memory a tile's cores share for inputs, outputs, spilled data and, in
// MCU variants 1 and 2, the saved operands of outer-product (OPA) operations awaiting halt.
//
// One single-ported array of WORDS 16-bit words behind a round-robin arbiter over NPORTS
// requesters. A requester holds req (with we, addr, wdata) until gnt; one request is granted
// per cycle. A granted write lands on that clock edge; a granted read returns rdata with
// rvalid[p] on the following cycle. The arbiter starts its search after the last port served,
// so no requester waits more than NPORTS-1 grants.
//
// The paper names the shared memory and its users; its size, port count, width and
// arbitration are not given and are this design's choices (WORDS default: 512 KiB).
module shared_memory #(
  parameter int unsigned NPORTS = 9,
  parameter int unsigned WORDS  = 262144,
  parameter int unsigned AW     = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] req,
  input  logic [NPORTS-1:0] we,
  input  logic [AW-1:0]     addr  [NPORTS],
  input  logic [15:0]       wdata [NPORTS],
  output logic [NPORTS-1:0] gnt,
  output logic [NPORTS-1:0] rvalid,
  output logic [15:0]       rdata
);
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  logic [15:0] mem [WORDS];
  logic [PW-1:0] last;
  logic [PW-1:0] sel;
  logic          any;

  // Round-robin choice: first requesting port after `last`.
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int o = 1; o <= NPORTS; o++) begin
      int p;
      p = (int'(last) + o) % NPORTS;
      if (!any && req[p]) begin
        any = 1'b1;
        sel = PW'(p);
      end
    end
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last   <= PW'(NPORTS - 1);
      rvalid <= '0;
    end else begin
      rvalid <= '0;
      if (any) begin
        last <= sel;
        if (!we[sel]) rvalid[sel] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (any) begin
      if (we[sel]) mem[addr[sel]] <= wdata[sel];
      else         rdata <= mem[addr[sel]];
    end
  end

  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_gnt_req:    assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
