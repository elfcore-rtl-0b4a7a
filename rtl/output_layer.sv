// output_layer: the 16-neuron output layer with its dense synapse memory,
// neuron register file, spike counters, two argmax units and the supervised
// learning (SL) engine.
//
// Presynaptic input is whichever layer the bypass selects (input, hidden 1 or
// hidden 2); the selection is made outside. Per time step:
//  * nd   : the 16 output neurons (register file) update in one cycle with the
//           same neuron dynamics as the hidden layers; each neuron's spike
//           counter (Cnt) adds its spike. On the last time step of a sample the
//           prediction is the neuron with the largest spike count (pred_mode 0)
//           or the largest membrane potential u^t (pred_mode 1), and the
//           counters restart.
//  * siwu : one dense row of 16 int8 weights per presynaptic neuron, one row
//           per cycle (D cycles). For a row whose neuron spiked, 16 PEs
//           integrate the spike. If the neuron carries a trace, a label
//           is present and SL is enabled, the 16 weights of the row are
//           updated in the same cycle by
//           dW_ji = Stoc(e_i * err_j >> lr_sl) with
//           err_j = (j == label ? SL_TGT : 0) - e_j^t, SL_TGT = 4.0, the
//           trace of a neuron that fires on most time steps.
// The SL rule is this design's choice: the chip names an SL engine for the
// output layer but does not publish its rule.
module output_layer
  import elf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        beta,
  input  logic [15:0]       theta,
  input  logic [3:0]        lr,
  input  logic [2:0]        w_shift,
  input  logic              pred_mode,
  input  logic              sl_en,
  input  logic              last_ts,
  input  logic              lbl_v,
  input  logic [3:0]        lbl,
  input  logic [15:0]       seed,
  input  logic              init_start,
  input  logic              nd_start,
  input  logic              siwu_start,
  output logic              init_done,
  output logic              nd_done,
  output logic              siwu_done,
  input  logic [D-1:0]      pre_spk,
  output logic [8:0]        pre_tr_addr,
  input  logic [TR_W-1:0]   pre_tr_data,
  output logic [N_OUT-1:0]  out_spk,
  output logic              pred_valid,    // one-cycle pulse at the end of a sample
  output logic [3:0]        pred,
  output logic              sl_active      // SL weight update ran this TS
);
  typedef logic signed [W_W-1:0] row_t [N_OUT];
  row_t  wmem [D];                 // Out. Syn. SRAM
  neu_t  rf [N_OUT];               // Neuron RF
  logic [15:0] cnt [N_OUT];        // Cnt

  typedef enum logic [1:0] {O_IDLE, O_INIT, O_SCAN} ostate_t;
  ostate_t st;
  logic [9:0]  pi;
  localparam int SL_TGT = 4 << TR_FRAC;   // target trace of the labelled neuron
  logic [15:0] rnd;

  // ---------------- neuron dynamics ----------------
  neu_t            nd_nxt [N_OUT];
  logic [N_OUT-1:0] nd_spk;
  for (genvar n = 0; n < N_OUT; n++) begin : nd
    logic [TR_W-1:0] hp, hc;
    nd_ss_logic u_nd (
      .st(rf[n]), .beta, .theta, .last_ts, .rnd(rnd ^ 16'(n * 16'h2F1)),
      .st_nxt(nd_nxt[n]), .spike(nd_spk[n]), .hpc_inc(hp), .hcc_inc(hc));
  end

  // argmax of spike count (including this TS) and of u^t
  logic [3:0]  arg_c, arg_u;
  logic [15:0] c_new [N_OUT];
  always_comb begin
    arg_c = '0; arg_u = '0;
    for (int n = 0; n < N_OUT; n++) c_new[n] = cnt[n] + 16'(nd_spk[n]);
    for (int n = 1; n < N_OUT; n++) begin
      if (c_new[n] > c_new[arg_c]) arg_c = 4'(n);
      if ($signed(nd_nxt[n].u) > $signed(nd_nxt[arg_u].u)) arg_u = 4'(n);
    end
  end

  // ---------------- SI and SL ----------------
  logic cur_si, cur_sl, sl_on;
  assign sl_on       = sl_en && lbl_v;
  assign pre_tr_addr = pi[8:0];
  assign cur_si      = (st == O_SCAN) && pi < 10'(D) && pre_spk[pi[8:0]];
  assign cur_sl      = (st == O_SCAN) && pi < 10'(D) && sl_on && (pre_tr_data != '0);

  syn_t                  pe_nxt [N_OUT];
  logic signed [U_W-1:0] pe_u [N_OUT];
  logic signed [GR_W-1:0] err [N_OUT];
  for (genvar n = 0; n < N_OUT; n++) begin : pe
    assign err[n] = $signed(GR_W'((lbl == 4'(n)) ? SL_TGT : 0)) - $signed({8'd0, rf[n].e_cur});
    si_wu_pe u_pe (
      .syn('{w: wmem[pi[8:0]][n], idx: IDX_W'(n)}), .si_en(cur_si), .wu_en(cur_sl),
      .e_pre(pre_tr_data), .u_post(rf[n].u), .g_post(err[n]), .w_shift, .lr,
      .rnd(rnd ^ 16'(n * 16'h0B7)), .syn_nxt(pe_nxt[n]), .u_nxt(pe_u[n]));
  end

  always_ff @(posedge clk) begin
    if (st == O_INIT)
      for (int n = 0; n < N_OUT; n++) wmem[pi[8:0]][n] <= W_W'($signed(8'(rnd ^ 16'(n * 16'h0B7))) >>> 2);
    else if (cur_sl)
      for (int n = 0; n < N_OUT; n++) wmem[pi[8:0]][n] <= pe_nxt[n].w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_IDLE; pi <= '0; rnd <= 16'h7A3D;
      init_done <= 1'b0; nd_done <= 1'b0; siwu_done <= 1'b0;
      pred_valid <= 1'b0; pred <= '0; out_spk <= '0; sl_active <= 1'b0;
      for (int n = 0; n < N_OUT; n++) begin rf[n] <= '0; cnt[n] <= '0; end
    end else begin
      init_done <= 1'b0; nd_done <= 1'b0; siwu_done <= 1'b0; pred_valid <= 1'b0;
      rnd <= lfsr_next(rnd);
      unique case (st)
        O_IDLE: begin
          if (init_start) begin
            pi <= '0; st <= O_INIT; rnd <= seed ^ 16'hC3C3;
          end else if (nd_start) begin
            for (int n = 0; n < N_OUT; n++) begin
              rf[n]  <= nd_nxt[n];
              cnt[n] <= last_ts ? '0 : c_new[n];
            end
            out_spk <= nd_spk;
            if (last_ts) begin
              pred_valid <= 1'b1;
              pred       <= pred_mode ? arg_u : arg_c;
            end
            nd_done <= 1'b1;
          end else if (siwu_start) begin
            pi <= '0; st <= O_SCAN; sl_active <= 1'b0;
          end
        end
        O_INIT: begin
          pi <= pi + 1'b1;
          for (int n = 0; n < N_OUT; n++) begin rf[n] <= '0; cnt[n] <= '0; end
          if (pi == 10'(D - 1)) begin st <= O_IDLE; init_done <= 1'b1; end
        end
        O_SCAN: begin
          if (pi == 10'(D)) begin
            st <= O_IDLE; siwu_done <= 1'b1;
          end else begin
            if (cur_si) for (int n = 0; n < N_OUT; n++) rf[n].u <= pe_u[n];
            if (cur_sl) sl_active <= 1'b1;
            pi <= pi + 1'b1;
          end
        end
        default: st <= O_IDLE;
      endcase
    end
  end
endmodule
