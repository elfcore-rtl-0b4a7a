// si_wu_pe: one spike-integration (SI) and weight-update (WU) processing
// element. The chip runs four of them per hidden layer, one per N:M group,
// and feeds each with one weight&index word of the current presynaptic row
// per cycle (input-stationary dataflow).
//
//   SI : u_j <- u_j + (w << w_shift)            when the presynaptic neuron spiked
//   WU : w   <- w + Stoc(e_i * g_j >> lr)       when WU is enabled for the layer
//        with g_j = h_j * (e_j^{t-1} - e^{T}_{prev,j}) precomputed per post-neuron
//
// The weight is clipped to int8 and the potential to int16. SI uses the weight
// before the update. Purely combinational: the caller reads the synapse word
// and the post-neuron state and writes both back.
module si_wu_pe
  import elf_pkg::*;
(
  input  syn_t                   syn,      // weight & index
  input  logic                   si_en,    // presynaptic spike S_i
  input  logic                   wu_en,    // layer WU enabled and e_i != 0
  input  logic [TR_W-1:0]        e_pre,    // presynaptic trace e_i^{t,l-1}
  input  logic signed [U_W-1:0]  u_post,   // membrane of post-neuron syn.idx
  input  logic signed [GR_W-1:0] g_post,   // post-gradient of post-neuron
  input  logic [2:0]             w_shift,
  input  logic [3:0]             lr,
  input  logic [15:0]            rnd,
  output syn_t                   syn_nxt,
  output logic signed [U_W-1:0]  u_nxt
);
  logic signed [31:0] dw, prod;
  always_comb begin
    u_nxt = si_en ? sat_u(32'(u_post) + (32'(syn.w) <<< w_shift)) : u_post;
    prod  = $signed({24'd0, e_pre}) * 32'(g_post);
    dw    = stoc_shr(prod, {1'b0, lr}, rnd);
    syn_nxt     = syn;
    syn_nxt.w   = wu_en ? sat_w(32'(syn.w) + dw) : syn.w;
  end
endmodule
