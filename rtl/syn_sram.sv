// syn_sram: one bank of the sparse synapse memory. A hidden layer has one bank
// per N:M group (PE). The word at address i*N_MAX + k holds slot k of
// presynaptic neuron i in this group: an 8-bit weight and the 9-bit index of
// its postsynaptic neuron, so pruning and regrowing a connection only rewrites
// the index. Array with one combinational read port and one synchronous write
// port; a write is visible on the next cycle.
module syn_sram
  import elf_pkg::*;
#(
  parameter int unsigned DEPTH = D * N_MAX,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output syn_t          rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  syn_t          wdata
);
  syn_t mem [DEPTH];
  assign rdata = mem[raddr];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
endmodule
