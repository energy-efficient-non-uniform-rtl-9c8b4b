// pkt_tx: serialises one packet onto the 128-wire TSV/NoC link.
//
// A packet is a head flit carrying the header (command, compression bit, hit,
// source tile, address) followed by the payload flits given by
// nfv_pkg::payload_flits: four 128-bit flits for a raw line, a single flit
// that drives only wires [CW_BITS-1:0] for an FV codeword, none otherwise.
// Unused wires are driven to 0. One flit per cycle while flit_ready is high;
// in_ready is high only when no packet is in flight.
module pkt_tx
  import nfv_pkg::*;
#(
  parameter scheme_e SCHEME = SCHEME_NFV
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  pkt_t  in_pkt,
  output flit_t flit,
  input  logic  flit_ready
);
  pkt_t        cur;
  logic        busy;
  logic [2:0]  idx;     // 0 = head, 1..4 payload
  logic [2:0]  nflits;  // payload flits of cur

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      idx    <= '0;
      nflits <= '0;
      cur    <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy   <= 1'b1;
        cur    <= in_pkt;
        idx    <= '0;
        nflits <= 3'(payload_flits(in_pkt.hdr, SCHEME));
      end
    end else if (flit_ready) begin
      if (idx == nflits) busy <= 1'b0;
      else idx <= idx + 3'd1;
    end
  end

  always_comb begin
    flit       = '0;
    flit.valid = busy;
    flit.head  = busy && (idx == 3'd0);
    flit.last  = busy && (idx == nflits);
    if (idx == 3'd0) flit.data = FLIT_BITS'(cur.hdr);
    else if (cur.hdr.cmp) flit.data = FLIT_BITS'(cur.data[CW_BITS-1:0]);
    else flit.data = cur.data[32'(idx - 3'd1) * FLIT_BITS +: FLIT_BITS];
  end
endmodule
