// ste_lut: straight-through-estimator (STE) look-up table.
//
// A spike is a step function of the membrane potential and has no useful
// derivative, so the weight update replaces it by a surrogate h(u). The chip
// reads h from a small LUT addressed by the membrane potential; the table's
// contents are not published. This design uses a triangle centred on the
// firing threshold: the distance |u - theta| is cut into 16 bins of 2^BIN_SH
// each, and bin b holds 255 - 16*b (h is a fraction /256). Outside the 16 bins
// h is 0. The table is generated by a function, not stored in a file.
// Purely combinational.
module ste_lut
  import elf_pkg::*;
#(
  parameter int unsigned BIN_SH = 3
) (
  input  logic signed [U_W-1:0] u,      // membrane potential u_j^{t,l}
  input  logic        [15:0]    theta,  // firing threshold of the layer
  output logic        [7:0]     h       // surrogate derivative, /256
);
  typedef logic [7:0] lut_t [16];

  function automatic lut_t make_lut();
    lut_t t;
    for (int b = 0; b < 16; b++) t[b] = 8'(255 - 16 * b);
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic signed [U_W+1:0] diff;
  logic        [U_W+1:0] dst;
  logic        [U_W+1:0] bin;

  always_comb begin
    diff = $signed({{2{u[U_W-1]}}, u}) - $signed({2'b00, theta});
    dst = diff[U_W+1] ? (U_W+2)'(-diff) : diff;
    bin  = dst >> BIN_SH;
    h    = (bin < 16) ? LUT[bin[3:0]] : 8'd0;
  end
endmodule
