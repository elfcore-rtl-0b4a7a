// wu_gating: layer-wise activity-dependent weight-update (WU) gating.
//
// After the neuron-dynamics pass of a time step the layer knows its two
// similarity scores, H_PC = S^T e^{t-1} and H_CC = -S^T e^{T}_{prev} (the
// latter is passed in without its minus sign, hcc = S^T e^{T}_{prev}). The
// adaptive thresholds are C_PC * i_bar and -C_CC * i_bar, where i_bar is the
// averaged input activity. The layer is updated only when the input activity
// exceeds the global threshold and a similarity score is below its adaptive
// threshold:
//   ia_ok = i_bar > i_thr
//   pc_ok = H_PC < C_PC*i_bar
//   cc_ok = -hcc < -C_CC*i_bar   (i.e. hcc > C_CC*i_bar)
//   en    = ossl_en & ia_ok & (pc_ok | cc_ok)
// How the two SS conditions are combined is this design's choice (the chip's
// text speaks of one SS compared with one adaptive threshold).
// Purely combinational.
module wu_gating
  import elf_pkg::*;
(
  input  logic             ossl_en,
  input  logic [15:0]      i_bar,    // averaged input activity
  input  logic [15:0]      i_thr,    // global input-activity threshold
  input  logic [H_W-1:0]   hpc,      // H_PC of the layer
  input  logic [H_W-1:0]   hcc,      // S^T e_prev of the layer (H_CC = -hcc)
  input  logic [H_W-1:0]   thr_pc,   // C_PC * i_bar
  input  logic [H_W-1:0]   thr_cc,   // C_CC * i_bar
  output logic             en,
  output logic             ia_ok,
  output logic             pc_ok,
  output logic             cc_ok
);
  always_comb begin
    ia_ok = i_bar > i_thr;
    pc_ok = hpc < thr_pc;
    cc_ok = hcc > thr_cc;
    en    = ossl_en & ia_ok & (pc_ok | cc_ok);
  end
endmodule
