// cache_controller: one of the 16 controllers of the cache layer.
//
// Each controller owns four LLC banks. It takes request packets from the
// network (pkt_rx), hands each to the bank named by the address, and returns
// read responses as packets (pkt_tx): a raw line as four 128-bit flits, an FV
// codeword as one 32-bit flit, a miss or a zero line as a head flit only.
// One request is in flight at a time; the next packet is taken when the
// response path is idle and the target bank is ready.
//
// Monitoring: per bank it counts accesses (C_A), accesses to compressed lines
// (C_C) and accesses that find an invalid line (C_I) in 12-bit saturating
// counters. On `snap` (end of an interval) the counts and the complete
// accesses to valid lines C_X = C_A - C_C - C_I are latched on the outputs
// for the monitoring unit and the counters restart from 0. The T (t_on) and
// M (m_discard) fields come back from the monitoring unit. Lines leaving the
// banks (write-backs, migrations) are merged round-robin onto `evict`.
// Saturation, the arbitration and the parallel counter outputs (instead of a
// control flit) are this design's choices.
module cache_controller
  import nfv_pkg::*;
#(
  parameter int      LINES  = 2048,
  parameter scheme_e SCHEME = SCHEME_NFV
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  flit_t                  flit_in,
  output logic                   flit_in_ready,
  output flit_t                  flit_out,
  input  logic                   flit_out_ready,
  input  logic                   snap,
  output logic [CNT_W-1:0]       cx [BANKS_PER_CC],
  output logic [CNT_W-1:0]       ca [BANKS_PER_CC],
  output logic [CNT_W-1:0]       cc [BANKS_PER_CC],
  output logic [CNT_W-1:0]       ci [BANKS_PER_CC],
  input  logic [BANKS_PER_CC-1:0] t_on,
  input  logic [BANKS_PER_CC-1:0] m_discard,
  output logic [BANKS_PER_CC-1:0] powered,
  output evict_t                 evict,
  input  logic                   evict_ready
);
  localparam int NB = BANKS_PER_CC;

  pkt_t pkt;
  logic pkt_valid, pkt_pop, tx_ready;

  pkt_rx u_rx (
    .clk, .rst_n,
    .flit (flit_in), .flit_ready (flit_in_ready),
    .out_valid (pkt_valid), .out_ready (pkt_pop), .out_pkt (pkt)
  );

  logic [$clog2(NB)-1:0] sel;
  assign sel = pkt.hdr.addr[OFFSET_W +: $clog2(NB)];

  bank_req_t breq [NB];
  bank_rsp_t brsp [NB];
  bank_ev_t  bev  [NB];
  evict_t    bevict [NB];
  logic [NB-1:0] bready, bevict_ready;
  logic          busy;   // a read response is on its way to pkt_tx

  assign pkt_pop = pkt_valid && bready[sel] && tx_ready && !busy;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    always_comb begin
      breq[b]       = '0;
      breq[b].valid = pkt_pop && (sel == b);
      breq[b].cmd   = pkt.hdr.cmd;
      breq[b].cmp   = pkt.hdr.cmp;
      breq[b].src   = pkt.hdr.src;
      breq[b].addr  = pkt.hdr.addr;
      breq[b].data  = pkt.data;
    end
    l2_bank #(.LINES(LINES), .SCHEME(SCHEME)) u_bank (
      .clk, .rst_n,
      .req (breq[b]), .req_ready (bready[b]), .rsp (brsp[b]), .ev (bev[b]),
      .power_on (t_on[b]), .m_discard (m_discard[b]),
      .powered (powered[b]), .draining (),
      .evict (bevict[b]), .evict_ready (bevict_ready[b])
    );

    // ---- statistics counters (C_A, C_C, C_I) ------------------------------
    logic [CNT_W-1:0] n_a, n_c, n_i;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        n_a <= '0; n_c <= '0; n_i <= '0;
        ca[b] <= '0; cc[b] <= '0; ci[b] <= '0; cx[b] <= '0;
      end else if (snap) begin
        ca[b] <= n_a;
        cc[b] <= n_c;
        ci[b] <= n_i;
        cx[b] <= (n_a > n_c + n_i) ? n_a - n_c - n_i : '0;
        n_a <= '0; n_c <= '0; n_i <= '0;
      end else begin
        if (bev[b].access  && !(&n_a)) n_a <= n_a + 1'b1;
        if (bev[b].cmp_hit && !(&n_c)) n_c <= n_c + 1'b1;
        if (bev[b].invalid && !(&n_i)) n_i <= n_i + 1'b1;
      end
    end
  end

  // ---- response path -------------------------------------------------------
  pkt_t rsp_pkt;
  logic rsp_valid;
  always_comb begin
    rsp_valid = 1'b0;
    rsp_pkt   = '0;
    for (int b = 0; b < NB; b++) begin
      if (brsp[b].valid) begin
        rsp_valid        = 1'b1;
        rsp_pkt.hdr.cmd  = CMD_RSP;
        rsp_pkt.hdr.cmp  = brsp[b].cmp;
        rsp_pkt.hdr.hit  = brsp[b].hit;
        rsp_pkt.hdr.src  = brsp[b].src;
        rsp_pkt.hdr.addr = brsp[b].addr;
        rsp_pkt.data     = brsp[b].data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (pkt_pop && pkt.hdr.cmd == CMD_RD) busy <= 1'b1;
    else if (rsp_valid) busy <= 1'b0;
  end

  pkt_tx #(.SCHEME(SCHEME)) u_tx (
    .clk, .rst_n,
    .in_valid (rsp_valid), .in_ready (tx_ready), .in_pkt (rsp_pkt),
    .flit (flit_out), .flit_ready (flit_out_ready)
  );

  // ---- eviction merge (round robin) ----------------------------------------
  logic [$clog2(NB)-1:0] rr, gsel;
  logic                  gvalid;
  always_comb begin
    gvalid = 1'b0;
    gsel   = rr;
    for (int k = NB - 1; k >= 0; k--) begin
      if (bevict[(int'(rr) + k) % NB].valid) begin
        gvalid = 1'b1;
        gsel   = $clog2(NB)'((int'(rr) + k) % NB);
      end
    end
    evict = gvalid ? bevict[gsel] : '0;
    bevict_ready = '0;
    if (gvalid) bevict_ready[gsel] = evict_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (gvalid && evict_ready) rr <= gsel + 1'b1;
  end
endmodule
