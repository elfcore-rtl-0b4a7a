// hidden_layer: one hidden layer of the network with its four PEs, neuron
// memories, sparse synapse memory, online self-supervised learning (OSSL)
// weight update and DSST engine.
//
// The D = 512 neurons are split into G = 4 N:M groups of M = 128; PE q owns
// neurons q*M..q*M+M-1, a neuron memory bank and a synapse bank holding, for
// every presynaptic neuron i, n_act (<= N_MAX) weight&index slots that point
// into its group. The layer is driven by the time-step FSM through four
// commands, each answered by a one-cycle `*_done`:
//  * init : writes uniform N:M sparsity (slot k of neuron i in group q points
//           to q*M + (k*M/N_MAX + i) mod M) with small random weights, and
//           clears the neuron state. D*N_MAX cycles.
//  * nd   : neuron dynamics and similarity scores for all neurons, the four
//           PEs in parallel (M cycles); fills the spike buffer and, from the
//           scores, the layer's WU enable for this time step.
//  * siwu : input-stationary pass over the presynaptic layer. Presynaptic
//           neurons that neither spiked nor (when WU is enabled) carry a
//           non-zero trace are skipped in one cycle (zero skipping). For an
//           active one, n_act cycles walk its row; every cycle each PE takes
//           one weight&index word, integrates the spike into the addressed
//           post-neuron and updates the weight (SI and WU concurrently).
//  * dsst : prune and regrow (see dsst_engine).
// Presynaptic spikes arrive as a D-bit vector, presynaptic traces through a
// read port (pre_tr_addr -> pre_tr_data, combinational). The layer offers the
// same two things to the next layer (spk, tr_addr -> tr_data).
// The command structure, the init pattern and the zero-skip timing are this
// design's choices; the PE/group organisation, input stationarity, the
// concurrent SI/WU and the learning rules follow the chip.
module hidden_layer
  import elf_pkg::*;
#(
  parameter int unsigned PRUNE_K_MAX = 32,
  localparam int unsigned SAW = $clog2(D * N_MAX),
  localparam int unsigned MW  = $clog2(M)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [7:0]         beta,
  input  logic [15:0]        theta,
  input  logic [4:0]         n_act,
  input  logic [3:0]         lr,
  input  logic [2:0]         w_shift,
  input  logic [7:0]         prune_k,
  input  logic [15:0]        seed,
  input  logic               ossl_en,
  input  logic [15:0]        i_bar,
  input  logic [15:0]        i_thr,
  input  logic [H_W-1:0]     thr_pc,
  input  logic [H_W-1:0]     thr_cc,
  input  logic               last_ts,
  // commands
  input  logic               init_start,
  input  logic               nd_start,
  input  logic               siwu_start,
  input  logic               dsst_start,
  output logic               init_done,
  output logic               nd_done,
  output logic               siwu_done,
  output logic               dsst_done,
  // presynaptic side
  input  logic [D-1:0]       pre_spk,
  output logic [8:0]         pre_tr_addr,
  input  logic [TR_W-1:0]    pre_tr_data,
  // postsynaptic side
  output logic [D-1:0]       spk,
  input  logic [8:0]         tr_addr,
  output logic [TR_W-1:0]    tr_data,
  // status of the current time step
  output logic               wu_en,
  output logic [H_W-1:0]     hpc,
  output logic [H_W-1:0]     hcc,
  output logic [15:0]        skip_cnt,   // presynaptic neurons skipped this TS
  output logic [15:0]        row_cnt     // rows processed this TS
);
  typedef enum logic [2:0] {L_IDLE, L_INIT, L_ND, L_SCAN, L_ROW, L_DSST} lstate_t;
  lstate_t st;

  // ---------------- memories ----------------
  logic [MW-1:0]  na_addr [G], nb_addr [G];
  neu_t           na_data [G], nb_data [G], nc_data [G];
  logic [G-1:0]   n_we;
  logic [MW-1:0]  n_wa [G];
  neu_t           n_wd [G];
  logic [SAW-1:0] s_raddr [G], s_waddr [G];
  syn_t           s_rdata [G], s_wdata [G];
  logic [G-1:0]   s_we;

  for (genvar q = 0; q < G; q++) begin : bank
    neuron_sram #(.DEPTH(M)) u_nmem (
      .clk, .ra_addr(na_addr[q]), .ra_data(na_data[q]),
      .rb_addr(nb_addr[q]), .rb_data(nb_data[q]),
      .rc_addr(tr_addr[MW-1:0]), .rc_data(nc_data[q]),
      .we(n_we[q]), .wa(n_wa[q]), .wd(n_wd[q]));
    syn_sram #(.DEPTH(D * N_MAX)) u_smem (
      .clk, .raddr(s_raddr[q]), .rdata(s_rdata[q]),
      .we(s_we[q]), .waddr(s_waddr[q]), .wdata(s_wdata[q]));
  end
  assign tr_data = nc_data[tr_addr[8:MW]].e_cur;

  // ---------------- random bits ----------------
  logic [15:0] rnd [G];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int q = 0; q < G; q++) rnd[q] <= 16'hACE1 ^ 16'(q * 16'h1F35);
    else if (init_start) for (int q = 0; q < G; q++) rnd[q] <= (seed | 16'd1) ^ 16'(q * 16'h1F35);
    else for (int q = 0; q < G; q++) rnd[q] <= lfsr_next(rnd[q]);
  end

  // ---------------- counters ----------------
  logic [SAW-1:0]  ia;          // init address
  logic [MW:0]     j;           // ND neuron
  logic [9:0]      pi;          // presynaptic neuron of SI/WU
  logic [3:0]      k;           // slot
  logic            cur_si, cur_wu;
  logic [TR_W-1:0] cur_e;
  logic            wu_en_r;
  logic [H_W-1:0]  hpc_r, hcc_r;

  assign wu_en = wu_en_r;
  assign hpc   = hpc_r;
  assign hcc   = hcc_r;
  logic [D-1:0] spk_r;
  assign spk   = spk_r;

  // ---------------- ND and SS ----------------
  neu_t            nd_nxt [G];
  logic [G-1:0]    nd_spk;
  logic [TR_W-1:0] nd_hpc [G], nd_hcc [G];
  for (genvar q = 0; q < G; q++) begin : nd
    nd_ss_logic u_nd (
      .st(na_data[q]), .beta, .theta, .last_ts, .rnd(rnd[q]),
      .st_nxt(nd_nxt[q]), .spike(nd_spk[q]), .hpc_inc(nd_hpc[q]), .hcc_inc(nd_hcc[q]));
  end
  logic [H_W-1:0] hpc_sum, hcc_sum;
  always_comb begin
    hpc_sum = hpc_r; hcc_sum = hcc_r;
    for (int q = 0; q < G; q++) begin
      hpc_sum = hpc_sum + H_W'(nd_hpc[q]);
      hcc_sum = hcc_sum + H_W'(nd_hcc[q]);
    end
  end

  logic gate_en, gate_ia, gate_pc, gate_cc;
  wu_gating u_gate (
    .ossl_en, .i_bar, .i_thr, .hpc(hpc_r), .hcc(hcc_r), .thr_pc, .thr_cc,
    .en(gate_en), .ia_ok(gate_ia), .pc_ok(gate_pc), .cc_ok(gate_cc));

  // ---------------- SI / WU PEs ----------------
  syn_t                  pe_syn_nxt [G];
  logic signed [U_W-1:0] pe_u_nxt [G];
  for (genvar q = 0; q < G; q++) begin : pe
    si_wu_pe u_pe (
      .syn(s_rdata[q]), .si_en(cur_si), .wu_en(cur_wu), .e_pre(cur_e),
      .u_post(na_data[q].u), .g_post(nb_data[q].g), .w_shift, .lr, .rnd(rnd[q]),
      .syn_nxt(pe_syn_nxt[q]), .u_nxt(pe_u_nxt[q]));
  end

  // ---------------- DSST ----------------
  logic [SAW-1:0]        d_raddr, d_waddr;
  logic                  d_we, d_busy, d_done;
  logic [1:0]            d_wbank;
  syn_t                  d_wdata;
  logic [MW-1:0]         d_graddr;
  logic signed [GR_W-1:0] d_grd [G];
  for (genvar q = 0; q < G; q++) begin : grd
    assign d_grd[q] = nb_data[q].g;
  end
  dsst_engine #(.K_MAX(PRUNE_K_MAX)) u_dsst (
    .clk, .rst_n, .start(dsst_start && st == L_IDLE), .n_act, .prune_k,
    .busy(d_busy), .done(d_done),
    .syn_raddr(d_raddr), .syn_rdata(s_rdata), .syn_we(d_we), .syn_wbank(d_wbank),
    .syn_waddr(d_waddr), .syn_wdata(d_wdata),
    .g_raddr(d_graddr), .g_rdata(d_grd));

  // ---------------- memory port muxing ----------------
  assign pre_tr_addr = pi[8:0];
  always_comb begin
    for (int q = 0; q < G; q++) begin
      na_addr[q] = j[MW-1:0];
      nb_addr[q] = s_rdata[q].idx[MW-1:0];
      n_we[q]    = 1'b0;
      n_wa[q]    = j[MW-1:0];
      n_wd[q]    = nd_nxt[q];
      s_raddr[q] = SAW'({pi[8:0], k});
      s_we[q]    = 1'b0;
      s_waddr[q] = SAW'({pi[8:0], k});
      s_wdata[q] = pe_syn_nxt[q];
      unique case (st)
        L_INIT: begin
          n_we[q]    = (ia < SAW'(M));
          n_wa[q]    = ia[MW-1:0];
          n_wd[q]    = '0;
          s_we[q]    = 1'b1;
          s_waddr[q] = ia;
          s_wdata[q].w   = W_W'($signed(rnd[q][7:0]) >>> 2);
          s_wdata[q].idx = IDX_W'({2'(q), MW'(ia[3:0] * (M / N_MAX) + ia[SAW-1:4])});
        end
        L_ND: begin
          n_we[q] = 1'b1;
        end
        L_ROW: begin
          na_addr[q] = s_rdata[q].idx[MW-1:0];
          n_we[q]    = cur_si;
          n_wa[q]    = s_rdata[q].idx[MW-1:0];
          n_wd[q]    = na_data[q];
          n_wd[q].u  = pe_u_nxt[q];
          s_we[q]    = cur_wu;
        end
        L_DSST: begin
          s_raddr[q] = d_raddr;
          nb_addr[q] = d_graddr;
          s_we[q]    = d_we && (d_wbank == 2'(q));
          s_waddr[q] = d_waddr;
          s_wdata[q] = d_wdata;
        end
        default: ;
      endcase
    end
  end

  // ---------------- control ----------------
  logic pre_act_si, pre_act_wu;
  assign pre_act_si = pre_spk[pi[8:0]];
  assign pre_act_wu = wu_en_r && (pre_tr_data != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE;
      ia <= '0; j <= '0; pi <= '0; k <= '0;
      cur_si <= 1'b0; cur_wu <= 1'b0; cur_e <= '0;
      wu_en_r <= 1'b0; hpc_r <= '0; hcc_r <= '0; spk_r <= '0;
      skip_cnt <= '0; row_cnt <= '0;
      init_done <= 1'b0; nd_done <= 1'b0; siwu_done <= 1'b0; dsst_done <= 1'b0;
    end else begin
      init_done <= 1'b0; nd_done <= 1'b0; siwu_done <= 1'b0; dsst_done <= 1'b0;
      unique case (st)
        L_IDLE: begin
          if (init_start) begin
            ia <= '0; st <= L_INIT;
          end else if (nd_start) begin
            j <= '0; hpc_r <= '0; hcc_r <= '0; st <= L_ND;
          end else if (siwu_start) begin
            pi <= '0; skip_cnt <= '0; row_cnt <= '0; st <= L_SCAN;
          end else if (dsst_start) begin
            st <= L_DSST;
          end
        end
        L_INIT: begin
          ia <= ia + 1'b1;
          if (ia == SAW'(D * N_MAX - 1)) begin
            st <= L_IDLE; init_done <= 1'b1; wu_en_r <= 1'b0; spk_r <= '0;
          end
        end
        L_ND: begin
          for (int q = 0; q < G; q++) spk_r[q * M + int'(j[MW-1:0])] <= nd_spk[q];
          hpc_r <= hpc_sum;
          hcc_r <= hcc_sum;
          j <= j + 1'b1;
          if (j == (MW+1)'(M - 1)) st <= L_IDLE;
        end
        L_SCAN: begin
          if (pi == 10'(D)) begin
            st <= L_IDLE; siwu_done <= 1'b1;
          end else if (pre_act_si || pre_act_wu) begin
            cur_si <= pre_act_si;
            cur_wu <= pre_act_wu;
            cur_e  <= pre_tr_data;
            k      <= '0;
            row_cnt <= row_cnt + 1'b1;
            st     <= L_ROW;
          end else begin
            skip_cnt <= skip_cnt + 1'b1;
            pi <= pi + 1'b1;
          end
        end
        L_ROW: begin
          if (k == 4'(n_act - 1)) begin
            k  <= '0;
            pi <= pi + 1'b1;
            cur_si <= 1'b0; cur_wu <= 1'b0;
            st <= L_SCAN;
          end else k <= k + 1'b1;
        end
        L_DSST: if (d_done) begin st <= L_IDLE; dsst_done <= 1'b1; end
        default: st <= L_IDLE;
      endcase
      // WU enable for this TS is decided once ND has produced both scores
      if (st == L_ND && j == (MW+1)'(M - 1)) nd_done <= 1'b1;
      if (nd_done) wu_en_r <= gate_en;
    end
  end
endmodule
