// nfvcache_top: compressed, bank-gated NUCA last-level cache of a 16-core 3D chip.
//
// Core layer: one network_interface per tile (16) with its frequent-value
// table, sending FV-coded (32-wire) or raw (128-wire) packets over the tile's
// TSV link. Cache layer: 16 cache_controllers, each with four 128 KB l2_banks
// (64 banks, 8 MB), and one power_manager (the monitoring unit) that gathers
// the per-bank counters every interval and sets the T (power) and M
// (migration) fields of all banks.
// The mesh network that carries packets between a tile's TSV link and the
// controller owning an address is not part of this design: both ends are
// brought out as ports (ni_tx/ni_rx on the core side, cc_in/cc_out on the
// cache side) and an external router connects them. Lines leaving the banks
// (write-backs, write-arounds, migrations) leave through `evict`, one port per
// controller, towards the write buffers and the memory side. Bank g is bank
// g%4 of controller g/4; address bits [11:6] give g.
module nfvcache_top
  import nfv_pkg::*;
#(
  parameter scheme_e     SCHEME   = SCHEME_NFV,
  parameter int          LINES    = 2048,
  parameter int unsigned INTERVAL = 32'd67108864,
  parameter int          N_OFF    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  fv_load_t            fv_load,
  // core side of every tile
  input  core_req_t           core_req       [NUM_CC],
  output logic [NUM_CC-1:0]   core_req_ready,
  output core_rsp_t           core_rsp       [NUM_CC],
  // TSV side of every network interface (towards the network)
  output flit_t               ni_tx          [NUM_CC],
  input  logic [NUM_CC-1:0]   ni_tx_ready,
  input  flit_t               ni_rx          [NUM_CC],
  output logic [NUM_CC-1:0]   ni_rx_ready,
  // network side of every cache controller
  input  flit_t               cc_in          [NUM_CC],
  output logic [NUM_CC-1:0]   cc_in_ready,
  output flit_t               cc_out         [NUM_CC],
  input  logic [NUM_CC-1:0]   cc_out_ready,
  // lines leaving the banks
  output evict_t              evict          [NUM_CC],
  input  logic [NUM_CC-1:0]   evict_ready,
  // power state and monitoring status
  output logic [NUM_BANKS-1:0] t_on,
  output logic [NUM_BANKS-1:0] m_discard,
  output logic [NUM_BANKS-1:0] powered,
  output logic [CNT_W-1:0]    last_mean,
  output logic [CNT_W-1:0]    last_std,
  output logic [15:0]         n_intervals,
  output logic [15:0]         n_nonuniform,
  output logic [15:0]         n_consecutive,
  output logic [15:0]         n_on_individual,
  output logic [15:0]         n_on_collective
);
  logic             snap;
  logic [CNT_W-1:0] cx [NUM_BANKS];
  logic [CNT_W-1:0] ca [NUM_BANKS];
  logic [CNT_W-1:0] cc [NUM_BANKS];
  logic [CNT_W-1:0] ci [NUM_BANKS];

  for (genvar t = 0; t < NUM_CC; t++) begin : g_tile
    network_interface #(.SCHEME(SCHEME), .TILE(TILE_W'(t))) u_ni (
      .clk, .rst_n, .fv_load,
      .core_req (core_req[t]), .core_req_ready (core_req_ready[t]), .core_rsp (core_rsp[t]),
      .tsv_tx (ni_tx[t]), .tsv_tx_ready (ni_tx_ready[t]),
      .tsv_rx (ni_rx[t]), .tsv_rx_ready (ni_rx_ready[t])
    );

    logic [CNT_W-1:0] lcx [BANKS_PER_CC];
    logic [CNT_W-1:0] lca [BANKS_PER_CC];
    logic [CNT_W-1:0] lcc [BANKS_PER_CC];
    logic [CNT_W-1:0] lci [BANKS_PER_CC];

    cache_controller #(.LINES(LINES), .SCHEME(SCHEME)) u_cc (
      .clk, .rst_n,
      .flit_in (cc_in[t]), .flit_in_ready (cc_in_ready[t]),
      .flit_out (cc_out[t]), .flit_out_ready (cc_out_ready[t]),
      .snap, .cx (lcx), .ca (lca), .cc (lcc), .ci (lci),
      .t_on      (t_on[t*BANKS_PER_CC +: BANKS_PER_CC]),
      .m_discard (m_discard[t*BANKS_PER_CC +: BANKS_PER_CC]),
      .powered   (powered[t*BANKS_PER_CC +: BANKS_PER_CC]),
      .evict (evict[t]), .evict_ready (evict_ready[t])
    );

    for (genvar b = 0; b < BANKS_PER_CC; b++) begin : g_cnt
      assign cx[t*BANKS_PER_CC + b] = lcx[b];
      assign ca[t*BANKS_PER_CC + b] = lca[b];
      assign cc[t*BANKS_PER_CC + b] = lcc[b];
      assign ci[t*BANKS_PER_CC + b] = lci[b];
    end
  end

  power_manager #(.NB(NUM_BANKS), .INTERVAL(INTERVAL), .N_OFF(N_OFF)) u_pm (
    .clk, .rst_n, .snap, .cx, .ca, .cc, .ci, .t_on, .m_discard,
    .last_mean, .last_std, .n_intervals, .n_nonuniform, .n_consecutive,
    .n_on_individual, .n_on_collective
  );
endmodule
