// async_ser: serializer of the inter-chip output link.
//
// Parallel PKT_W-bit packets from the core are written into a bit ring buffer
// (RING_BITS deep) by a write controller; a read controller sends them out one
// bit at a time, least-significant bit first, with the two-phase handshake of
// the input link: data_out is set, req_out toggles, and the next bit follows
// the receiver's ack_in toggle. pkt_ready is high when the ring has room for
// a whole packet. The chip builds this as a clockless Mousetrap pipeline; this
// version keeps the ring and protocol but runs on the core clock with a
// two-flop synchronizer on ack_in.
module async_ser
  import elf_pkg::*;
#(
  parameter int unsigned RING_BITS = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pkt_valid,
  output logic             pkt_ready,
  input  logic [PKT_W-1:0] pkt,
  output logic             req_out,
  output logic             data_out,
  input  logic             ack_in
);
  localparam int unsigned AW = $clog2(RING_BITS);
  logic [RING_BITS-1:0] ring;
  logic [AW-1:0]        wptr, rptr;
  logic [AW:0]          fill;
  logic [2:0]           ack_s;
  logic                 waiting;   // a bit is out, waiting for its ack

  wire ack_edge = ack_s[2] ^ ack_s[1];
  assign pkt_ready = (fill <= (AW+1)'(RING_BITS - PKT_W));

  logic push, pop;
  assign push = pkt_valid && pkt_ready;
  assign pop  = !waiting && (fill != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ring <= '0; wptr <= '0; rptr <= '0; fill <= '0; ack_s <= '0;
      waiting <= 1'b0; req_out <= 1'b0; data_out <= 1'b0;
    end else begin
      ack_s <= {ack_s[1:0], ack_in};
      if (push)
        for (int b = 0; b < PKT_W; b++) ring[AW'((int'(wptr) + b) % RING_BITS)] <= pkt[b];
      if (push) wptr <= AW'((int'(wptr) + PKT_W) % RING_BITS);
      if (pop) begin
        data_out <= ring[rptr];
        req_out  <= ~req_out;
        waiting  <= 1'b1;
        rptr     <= AW'((int'(rptr) + 1) % RING_BITS);
      end else if (waiting && ack_edge) begin
        waiting <= 1'b0;
      end
      fill <= fill + (push ? (AW+1)'(PKT_W) : '0) - (pop ? (AW+1)'(1) : '0);
    end
  end
endmodule
