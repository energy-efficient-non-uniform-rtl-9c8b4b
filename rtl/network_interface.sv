// network_interface: the core-tile end of the TSV link (encoder and decoder).
//
// Encoder (L1 -> L2): a line coming from L1 is searched in the frequent-value
// table; the FV bit selects, through a multiplexer, either the one-hot 32-bit
// 1-LWC codeword or the original line. This takes one register stage, the one
// extra cycle that coding adds to a write. The packet is then sent over the
// 128-wire link: 32 wires for a codeword, all 128 wires (4 flits) for a raw
// line. Reads send only a head flit.
// Decoder (L2 -> L1): the FV bit of a response picks the table output for a
// codeword or the raw payload. In the zero-line scheme (SCHEME_NIZ) the table
// is not used for encoding and a compressed response is a zero line.
// Timing: core_req accepted when core_req_ready; head flit leaves one cycle
// later. core_rsp is a one-cycle pulse one cycle after the response packet is
// complete. Table load, packet format and the handshake are this design's.
module network_interface
  import nfv_pkg::*;
#(
  parameter scheme_e           SCHEME = SCHEME_NFV,
  parameter logic [TILE_W-1:0] TILE   = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  fv_load_t  fv_load,
  input  core_req_t core_req,
  output logic      core_req_ready,
  output core_rsp_t core_rsp,
  output flit_t     tsv_tx,
  input  logic      tsv_tx_ready,
  input  flit_t     tsv_rx,
  output logic      tsv_rx_ready
);
  logic                 s_hit, d_hit;
  logic [CW_BITS-1:0]   s_cw;
  logic [LINE_BITS-1:0] d_value;
  pkt_t                 rx_pkt;
  logic                 rx_valid;

  fv_table u_fv (
    .clk, .rst_n,
    .load_valid   (fv_load.valid),
    .load_idx     (fv_load.idx),
    .load_value   (fv_load.value),
    .search_value (core_req.data),
    .search_hit   (s_hit),
    .search_cw    (s_cw),
    .decode_cw    (rx_pkt.data[CW_BITS-1:0]),
    .decode_hit   (d_hit),
    .decode_value (d_value)
  );

  // ---- encoder stage -------------------------------------------------------
  pkt_t enc_pkt;
  logic enc_valid, tx_ready;

  assign core_req_ready = !enc_valid || tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_valid <= 1'b0;
      enc_pkt   <= '0;
    end else if (core_req_ready) begin
      enc_valid <= core_req.valid;
      if (core_req.valid) begin
        enc_pkt.hdr.cmd  <= core_req.cmd;
        enc_pkt.hdr.hit  <= 1'b0;
        enc_pkt.hdr.src  <= TILE;
        enc_pkt.hdr.addr <= core_req.addr;
        // FV bit drives the MUX: codeword when the line is a frequent value.
        if (SCHEME == SCHEME_NFV && core_req.cmd != CMD_RD && s_hit) begin
          enc_pkt.hdr.cmp <= 1'b1;
          enc_pkt.data    <= LINE_BITS'(s_cw);
        end else begin
          enc_pkt.hdr.cmp <= 1'b0;
          enc_pkt.data    <= (core_req.cmd == CMD_RD) ? '0 : core_req.data;
        end
      end
    end
  end

  pkt_tx #(.SCHEME(SCHEME)) u_tx (
    .clk, .rst_n,
    .in_valid (enc_valid), .in_ready (tx_ready), .in_pkt (enc_pkt),
    .flit (tsv_tx), .flit_ready (tsv_tx_ready)
  );

  // ---- decoder -------------------------------------------------------------
  pkt_rx u_rx (
    .clk, .rst_n,
    .flit (tsv_rx), .flit_ready (tsv_rx_ready),
    .out_valid (rx_valid), .out_ready (1'b1), .out_pkt (rx_pkt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) core_rsp <= '0;
    else begin
      core_rsp.valid <= rx_valid;
      core_rsp.hit   <= rx_pkt.hdr.hit;
      core_rsp.cmp   <= rx_pkt.hdr.cmp;
      core_rsp.addr  <= rx_pkt.hdr.addr;
      if (!rx_pkt.hdr.hit)      core_rsp.data <= '0;
      else if (!rx_pkt.hdr.cmp) core_rsp.data <= rx_pkt.data;
      else if (SCHEME == SCHEME_NFV) core_rsp.data <= d_hit ? d_value : '0;
      else                      core_rsp.data <= '0;   // zero line
    end
  end
endmodule
