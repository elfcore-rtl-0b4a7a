// async_deser: deserializer of the spike input link.
//
// Spike packets arrive bit-serially, least-significant bit first, under a
// two-phase (transition-signalling) handshake: the sender puts a bit on
// data_in and toggles req_in; the receiver stores the bit and toggles ack_out.
// Bits are written round-robin into a bit ring buffer by a write counter;
// after PKT_W (30) bits the ring is copied into the output pipeline stage as
// one parallel packet (pkt_valid for one cycle).
// The chip builds this block as a clockless Mousetrap pipeline with latches
// enabled by the XOR of request and acknowledge. This version keeps the
// protocol, the bit ring and the 30-bit packet but is synchronous: req_in
// passes a two-flop synchronizer and every handshake takes a few clock cycles.
// A packet is only completed (and its last bit acknowledged) when the
// previous one has been taken (pkt_ready), so the link is back-pressured.
module async_deser
  import elf_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_in,
  input  logic             data_in,
  output logic             ack_out,
  output logic             pkt_valid,
  input  logic             pkt_ready,
  output logic [PKT_W-1:0] pkt
);
  localparam int unsigned CW = $clog2(PKT_W);
  logic [2:0]       req_s;       // synchronizer and edge history
  logic [PKT_W-1:0] ring;
  logic [CW-1:0]    wcnt;
  logic             pend;        // a request is waiting to be served

  wire req_edge = req_s[2] ^ req_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s <= '0; ring <= '0; wcnt <= '0; ack_out <= 1'b0;
      pkt_valid <= 1'b0; pkt <= '0; pend <= 1'b0;
    end else begin
      req_s <= {req_s[1:0], req_in};
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (req_edge) pend <= 1'b1;
      if (pend || req_edge) begin
        if (wcnt == CW'(PKT_W - 1)) begin
          if (!pkt_valid || pkt_ready) begin
            pkt       <= {data_in, ring[PKT_W-2:0]};
            pkt_valid <= 1'b1;
            wcnt      <= '0;
            ack_out   <= ~ack_out;
            pend      <= 1'b0;
          end
        end else begin
          ring[wcnt] <= data_in;
          wcnt       <= wcnt + 1'b1;
          ack_out    <= ~ack_out;
          pend       <= 1'b0;
        end
      end
    end
  end
endmodule
