// neuron_sram: neuron memory of one PE. Each word holds one neuron's state:
// membrane potential, the three traces the multi-timescale learning rule needs
// (current TS for WU, previous TS for PC, last TS of the previous sample for CC)
// and the post-gradient written back for WU and DSST sorting.
//
// Written as an array with three combinational read ports and one synchronous
// write port: port A serves the neuron-dynamics pass and the read-modify-write
// of spike integration, port B the post-gradient for WU and DSST, port C the
// trace reads of the next layer. A write is visible to reads on the next cycle.
// The port count is this design's choice; the chip uses SRAM macros.
module neuron_sram
  import elf_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] ra_addr,
  output neu_t          ra_data,
  input  logic [AW-1:0] rb_addr,
  output neu_t          rb_data,
  input  logic [AW-1:0] rc_addr,
  output neu_t          rc_data,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  neu_t          wd
);
  neu_t mem [DEPTH];

  assign ra_data = mem[ra_addr];
  assign rb_data = mem[rb_addr];
  assign rc_data = mem[rc_addr];

  always_ff @(posedge clk) if (we) mem[wa] <= wd;
endmodule
