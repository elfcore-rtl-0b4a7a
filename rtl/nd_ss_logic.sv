// nd_ss_logic: neuron dynamics (ND) and similarity-score (SS) logic of one
// neuron for one time step (TS), following the chip's neuron datapath.
//
//   spike   = u^{t-1} > theta
//   e^t     = Stoc(beta * e^{t-1}) + (spike ? 1.0 : 0)       (trace)
//   u^t     = Stoc(beta * u^{t-1}) - (spike ? theta : 0)      (leak, reset)
//   H_PC   += spike ? e^{t-1}      : 0                        (predictive)
//   H_CC   += spike ? e^{T}_{prev} : 0                        (contrastive)
//   e^{T}_{prev} <= e^t on the last TS of a sample
//
// Stoc() is stochastic rounding of the product (beta is a fraction /256) with
// random bits supplied by the caller. "1.0" of the trace is 1 << TR_FRAC. The
// paper shows a "scaling" stage in front of the SS accumulators; this design
// uses unit scaling. The same block also forms the post-gradient used by the
// OSSL weight update, g = h(u^t) * (e^{t-1} - e^{T}_{prev}) / 256, where h is
// the STE LUT output, so that it can be written back to the neuron memory.
// The H_CC increment is returned as a positive quantity; its minus sign is
// applied in the WU gating comparison.
// Purely combinational; the caller updates the neuron memory and the SS
// accumulators.
module nd_ss_logic
  import elf_pkg::*;
(
  input  neu_t              st,        // neuron state before this TS
  input  logic [7:0]        beta,      // decay, /256
  input  logic [15:0]       theta,     // threshold
  input  logic              last_ts,   // last TS of a sample
  input  logic [15:0]       rnd,       // random bits for stochastic rounding
  output neu_t              st_nxt,    // neuron state after this TS
  output logic              spike,     // S_j^t
  output logic [TR_W-1:0]   hpc_inc,   // contribution to H_PC
  output logic [TR_W-1:0]   hcc_inc    // contribution to H_CC (positive)
);
  logic signed [31:0] eb, ub, e_n, u_n, diff, gr;
  logic [7:0]         h;
  neu_t               n;

  always_comb begin
    spike = $signed(st.u) > $signed({1'b0, theta});
    eb    = stoc_shr($signed({24'd0, st.e_cur}) * $signed({24'd0, beta}), 5'd8, rnd);
    ub    = stoc_shr($signed(32'(st.u)) * $signed({24'd0, beta}), 5'd8, {rnd[7:0], rnd[15:8]});
    e_n   = spike ? eb + (32'sd1 <<< TR_FRAC) : eb;
    u_n   = spike ? ub - $signed({16'd0, theta}) : ub;
    n        = st;
    n.u      = sat_u(u_n);
    n.e_old  = st.e_cur;
    n.e_cur  = sat_tr(e_n);
    n.e_last = last_ts ? sat_tr(e_n) : st.e_last;
    hpc_inc  = spike ? st.e_cur  : '0;
    hcc_inc  = spike ? st.e_last : '0;
  end

  ste_lut u_lut (.u(n.u), .theta(theta), .h(h));

  always_comb begin
    // post-gradient uses e^{t-1} (the state's e_cur before update) and the
    // previous-sample trace before it is overwritten
    diff = $signed({24'd0, st.e_cur}) - $signed({24'd0, st.e_last});
    gr   = (diff * $signed({24'd0, h})) >>> 8;
    st_nxt   = n;
    st_nxt.g = gr[GR_W-1:0];
  end
endmodule
