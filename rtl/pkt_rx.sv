// pkt_rx: reassembles packets from the 128-wire link (inverse of pkt_tx).
//
// Payload flits follow the head flit until the one marked last; they are placed
// into the 512-bit data field (an FV codeword lands in bits [CW_BITS-1:0]).
// The finished packet is held at out_valid until out_ready; no flit is
// accepted meanwhile (flit_ready low), which back-pressures the link.
module pkt_rx
  import nfv_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t flit,
  output logic  flit_ready,
  output logic  out_valid,
  input  logic  out_ready,
  output pkt_t  out_pkt
);
  logic [2:0] idx;     // payload flits received
  logic       in_pkt;  // a head flit was taken and payload is pending

  assign flit_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
      idx       <= '0;
      in_pkt    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (flit.valid && flit_ready) begin
        if (flit.head) begin
          out_pkt.hdr  <= hdr_t'(flit.data[$bits(hdr_t)-1:0]);
          out_pkt.data <= '0;
          idx          <= '0;
          in_pkt       <= !flit.last;
          out_valid    <= flit.last;
        end else if (in_pkt) begin
          out_pkt.data[idx * FLIT_BITS +: FLIT_BITS] <= flit.data;
          idx <= idx + 3'd1;
          if (flit.last) begin
            in_pkt    <= 1'b0;
            out_valid <= 1'b1;
          end
        end
      end
    end
  end
endmodule
