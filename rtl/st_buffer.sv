// st_buffer: spatiotemporal input buffer.
//
// Holds SLOTS = 4 spike vectors of D = 512 bits, one per upcoming time step,
// so that an input spike can be delivered with an axonal delay of 0..3 time
// steps. A spike packet (address a, delay d) sets bit a of slot
// (head + d) mod 4 (delay and address decoders). An end-of-time-step packet
// closes the current time step: the head slot is presented on `vec` with
// `ts_valid`, together with the packet's last-TS and label fields, and is
// then cleared and the head advances. The core takes the vector with
// ts_ready; until then further end-of-TS packets are refused (pkt_ready low).
// Size and purpose follow the chip; packet fields are this design's choice.
module st_buffer
  import elf_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pkt_valid,
  output logic          pkt_ready,
  input  pkt_t          pkt,
  output logic          ts_valid,
  input  logic          ts_ready,
  output logic [D-1:0]  vec,
  output logic          ts_last,     // the TS just closed ends a sample
  output logic          ts_lbl_v,
  output logic [3:0]    ts_lbl
);
  logic [D-1:0] slot [SLOTS];
  logic [1:0]   head;

  assign pkt_ready = !(ts_valid && pkt.eot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SLOTS; s++) slot[s] <= '0;
      head <= '0; ts_valid <= 1'b0; vec <= '0; ts_last <= 1'b0;
      ts_lbl_v <= 1'b0; ts_lbl <= '0;
    end else begin
      if (ts_valid && ts_ready) ts_valid <= 1'b0;
      if (pkt_valid && pkt_ready) begin
        if (pkt.spk_v) slot[head + pkt.delay][pkt.addr] <= 1'b1;
        if (pkt.eot) begin
          vec      <= slot[head];
          if (pkt.spk_v && pkt.delay == 2'd0) vec[pkt.addr] <= 1'b1;
          ts_valid <= 1'b1;
          ts_last  <= pkt.last_ts;
          ts_lbl_v <= pkt.lbl_v;
          ts_lbl   <= pkt.lbl;
          slot[head] <= '0;
          if (pkt.spk_v && pkt.delay != 2'd0) slot[head + pkt.delay][pkt.addr] <= 1'b1;
          head <= head + 1'b1;
        end
      end
    end
  end
endmodule
