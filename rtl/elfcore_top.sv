// elfcore_top: the ElfCore spiking neural network processor.
//
// A (512)-512-512-16 spiking network that learns on-line: two hidden layers
// trained by layer-local self-supervised learning (predictive coding within a
// sample, contrastive coding across samples), with N:M structured sparse
// weights whose connectivity is itself trained (DSST), activity-dependent
// gating of the weight updates, and a supervised output layer. Bypass paths
// let the output layer listen to the input (n_hidden = 0), hidden layer 1
// (n_hidden = 1) or hidden layer 2 (n_hidden = 2).
//
// Data path: serial input link -> async_deser (30-bit packets) -> st_buffer
// (4-slot axonal-delay buffer, closes time steps) -> input spike register ->
// hidden_layer 1 -> hidden_layer 2 -> output_layer -> async_ser (one packet
// per time step: output spikes, and the prediction on a sample's last step).
// adapt_thr and input_trace derive input activity, adaptive thresholds and
// input traces from the input spikes. ctrl_fsm sequences ND, SI/WU and DSST
// and keeps the core idle (clk_en low) between time steps. spi_slave and
// param_bank hold the configuration; writing bit 15 of register 0 runs the
// weight/state initialisation, which must precede the first time step.
//
// Output packet (30 bits): [15:0] output spikes, [19:16] prediction,
// [20] prediction valid (sample ended), [29:21] zero.
// The clock gating of the chip is represented by the clk_en output only.
module elfcore_top
  import elf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // configuration port
  input  logic       spi_sck,
  input  logic       spi_cs_n,
  input  logic       spi_mosi,
  output logic       spi_miso,
  // serial spike input link (two-phase handshake)
  input  logic       in_req,
  input  logic       in_data,
  output logic       in_ack,
  // serial output link (two-phase handshake)
  output logic       out_req,
  output logic       out_data,
  input  logic       out_ack,
  // prediction and status
  output logic       pred_valid,
  output logic [3:0] pred,
  output logic       clk_en,
  output logic [1:0] wu_en,
  output logic [1:0] dsst_active
);
  // ---------------- configuration ----------------
  logic        p_we, p_init;
  logic [6:0]  p_addr, p_raddr;
  logic [15:0] p_wd, p_rd;
  cfg_t        cfg;

  spi_slave u_spi (
    .clk, .rst_n, .sck(spi_sck), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr_en(p_we), .addr(p_addr), .wr_data(p_wd), .rd_addr(p_raddr), .rd_data(p_rd));

  param_bank u_pb (
    .clk, .rst_n, .wr_en(p_we), .addr(p_addr), .wr_data(p_wd),
    .rd_addr(p_raddr), .rd_data(p_rd), .cfg, .init(p_init));

  logic init_req, busy_init;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) init_req <= 1'b0;
    else if (p_init) init_req <= 1'b1;
    else if (busy_init) init_req <= 1'b0;

  // ---------------- input link ----------------
  logic             dpkt_v, dpkt_r;
  logic [PKT_W-1:0] dpkt;
  async_deser u_deser (
    .clk, .rst_n, .req_in(in_req), .data_in(in_data), .ack_out(in_ack),
    .pkt_valid(dpkt_v), .pkt_ready(dpkt_r), .pkt(dpkt));

  logic          ts_valid, ts_ready, ts_last, ts_lbl_v;
  logic [3:0]    ts_lbl;
  logic [D-1:0]  ts_vec;
  st_buffer u_stbuf (
    .clk, .rst_n, .pkt_valid(dpkt_v), .pkt_ready(dpkt_r), .pkt(pkt_t'(dpkt)),
    .ts_valid, .ts_ready, .vec(ts_vec), .ts_last, .ts_lbl_v, .ts_lbl);

  // input spike register of the current time step
  logic [D-1:0] in_spk;
  logic         cur_last, cur_lbl_v;
  logic [3:0]   cur_lbl;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_spk <= '0; cur_last <= 1'b0; cur_lbl_v <= 1'b0; cur_lbl <= '0;
    end else if (ts_valid && ts_ready) begin
      in_spk <= ts_vec; cur_last <= ts_last; cur_lbl_v <= ts_lbl_v; cur_lbl <= ts_lbl;
    end
  end

  // ---------------- control ----------------
  logic [3:0] init_start, nd_start, siwu_start, init_done, nd_done, siwu_done;
  logic [1:0] dsst_start, dsst_done;
  logic       ia_update, out_valid, out_ready;
  logic [15:0] wu_cnt1, wu_cnt2;

  ctrl_fsm u_fsm (
    .clk, .rst_n, .init_req, .ts_valid, .ts_ready, .n_hidden(cfg.n_hidden),
    .dsst_en(cfg.dsst_en), .dsst_x(cfg.dsst_x), .wu_en,
    .init_start, .nd_start, .siwu_start, .dsst_start,
    .init_done, .nd_done, .siwu_done, .dsst_done,
    .ia_update, .out_valid, .out_ready, .clk_en, .busy_init, .wu_cnt1, .wu_cnt2);

  // ---------------- input activity and traces ----------------
  logic [15:0]    ia_count, i_bar;
  logic [H_W-1:0] thr_pc1, thr_pc2, thr_cc1, thr_cc2;
  adapt_thr u_athr (
    .clk, .rst_n, .init(init_start[0]), .update(ia_update), .spk_in(in_spk),
    .ia_shift(cfg.ia_shift), .cpc1(cfg.cpc1), .cpc2(cfg.cpc2), .ccc1(cfg.ccc1), .ccc2(cfg.ccc2),
    .count(ia_count), .i_bar, .thr_pc1, .thr_pc2, .thr_cc1, .thr_cc2);

  logic [8:0]      itr_addr;
  logic [TR_W-1:0] itr_data;
  logic            itr_done;
  input_trace u_itr (
    .clk, .rst_n, .beta(cfg.beta_in), .seed(cfg.seed),
    .init_start(init_start[0]), .nd_start(nd_start[0]),
    .done(itr_done), .spk_in(in_spk), .rd_addr(itr_addr), .rd_data(itr_data));
  assign init_done[0] = itr_done;
  assign nd_done[0]   = itr_done;
  assign siwu_done[0] = siwu_start[0];   // input traces take no part in SI/WU

  // ---------------- hidden layers ----------------
  logic [D-1:0]    spk1, spk2;
  logic [8:0]      h1_pre_addr, h2_pre_addr, h1_tr_addr, h2_tr_addr;
  logic [TR_W-1:0] h1_tr, h2_tr;
  logic [H_W-1:0]  hpc1, hcc1, hpc2, hcc2;
  logic [15:0]     skip1, rows1, skip2, rows2;

  hidden_layer u_h1 (
    .clk, .rst_n, .beta(cfg.beta1), .theta(cfg.theta1), .n_act(cfg.n_act),
    .lr(cfg.lr_ossl), .w_shift(cfg.w_shift), .prune_k(cfg.prune_k), .seed(cfg.seed),
    .ossl_en(cfg.ossl_en), .i_bar, .i_thr(cfg.i_thr), .thr_pc(thr_pc1), .thr_cc(thr_cc1),
    .last_ts(cur_last),
    .init_start(init_start[1]), .nd_start(nd_start[1]), .siwu_start(siwu_start[1]),
    .dsst_start(dsst_start[0]),
    .init_done(init_done[1]), .nd_done(nd_done[1]), .siwu_done(siwu_done[1]),
    .dsst_done(dsst_done[0]),
    .pre_spk(in_spk), .pre_tr_addr(h1_pre_addr), .pre_tr_data(itr_data),
    .spk(spk1), .tr_addr(h1_tr_addr), .tr_data(h1_tr),
    .wu_en(wu_en[0]), .hpc(hpc1), .hcc(hcc1), .skip_cnt(skip1), .row_cnt(rows1));

  hidden_layer u_h2 (
    .clk, .rst_n, .beta(cfg.beta2), .theta(cfg.theta2), .n_act(cfg.n_act),
    .lr(cfg.lr_ossl), .w_shift(cfg.w_shift), .prune_k(cfg.prune_k), .seed(cfg.seed ^ 16'h9E37),
    .ossl_en(cfg.ossl_en), .i_bar, .i_thr(cfg.i_thr), .thr_pc(thr_pc2), .thr_cc(thr_cc2),
    .last_ts(cur_last),
    .init_start(init_start[2]), .nd_start(nd_start[2]), .siwu_start(siwu_start[2]),
    .dsst_start(dsst_start[1]),
    .init_done(init_done[2]), .nd_done(nd_done[2]), .siwu_done(siwu_done[2]),
    .dsst_done(dsst_done[1]),
    .pre_spk(spk1), .pre_tr_addr(h2_pre_addr), .pre_tr_data(h1_tr),
    .spk(spk2), .tr_addr(h2_tr_addr), .tr_data(h2_tr),
    .wu_en(wu_en[1]), .hpc(hpc2), .hcc(hcc2), .skip_cnt(skip2), .row_cnt(rows2));

  assign dsst_active = dsst_start;

  // ---------------- bypass and output layer ----------------
  logic [D-1:0]    o_pre_spk;
  logic [8:0]      o_pre_addr;
  logic [TR_W-1:0] o_pre_tr;
  always_comb begin
    itr_addr   = h1_pre_addr;
    h1_tr_addr = h2_pre_addr;
    h2_tr_addr = o_pre_addr;
    unique case (cfg.n_hidden)
      2'd0: begin o_pre_spk = in_spk; itr_addr = o_pre_addr; o_pre_tr = itr_data; end
      2'd1: begin o_pre_spk = spk1; h1_tr_addr = o_pre_addr; o_pre_tr = h1_tr; end
      default: begin o_pre_spk = spk2; o_pre_tr = h2_tr; end
    endcase
  end

  logic [N_OUT-1:0] out_spk;
  logic             o_pred_v, sl_active;
  logic [3:0]       o_pred;
  output_layer u_out (
    .clk, .rst_n, .beta(cfg.beta_out), .theta(cfg.theta_out), .lr(cfg.lr_sl),
    .w_shift(cfg.w_shift), .pred_mode(cfg.pred_mode), .sl_en(cfg.sl_en),
    .last_ts(cur_last), .lbl_v(cur_lbl_v), .lbl(cur_lbl), .seed(cfg.seed ^ 16'h51ED),
    .init_start(init_start[3]), .nd_start(nd_start[3]), .siwu_start(siwu_start[3]),
    .init_done(init_done[3]), .nd_done(nd_done[3]), .siwu_done(siwu_done[3]),
    .pre_spk(o_pre_spk), .pre_tr_addr(o_pre_addr), .pre_tr_data(o_pre_tr),
    .out_spk, .pred_valid(o_pred_v), .pred(o_pred), .sl_active);

  logic pv_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pred <= '0; pv_r <= 1'b0; end
    else begin
      if (o_pred_v) begin pred <= o_pred; pv_r <= 1'b1; end
      else if (out_valid && out_ready) pv_r <= 1'b0;
    end
  end
  assign pred_valid = o_pred_v;

  // ---------------- output link ----------------
  logic [PKT_W-1:0] opkt;
  assign opkt = PKT_W'({pv_r, pred, out_spk});
  async_ser u_ser (
    .clk, .rst_n, .pkt_valid(out_valid), .pkt_ready(out_ready), .pkt(opkt),
    .req_out(out_req), .data_out(out_data), .ack_in(out_ack));
endmodule
