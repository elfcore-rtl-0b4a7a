// dsst_engine: dynamic structured sparse training (DSST) of one hidden layer.
//
// After enough weight-update time steps the layer's connectivity is changed
// while the number of connections per presynaptic neuron and N:M group stays
// fixed (constant fan-out). One DSST pass:
//  1. SCAN: five TopK sorters run in parallel. One streams every active
//     weight&index slot of the layer with key -|w| and keeps the k smallest
//     weights (payload: presynaptic neuron, group, slot). Four stream the
//     stored post-gradients |g_j| of the M neurons of their group and keep the
//     N largest. Because the gradient of a synapse is the product of a
//     presynaptic and a postsynaptic factor, the best post-neurons of a group
//     are the same for every presynaptic neuron, so no dense gradient matrix
//     is sorted.
//  2. REGROW: for each pruned slot (i, g, s), the engine reads the other
//     slots of row (i, g), drops the candidates of group g that are already
//     connected to i (overlap), and writes the remaining candidate with the
//     largest |g| into slot s with weight 0. Prune and regrow are thus one
//     index rewrite.
// The regrown weight value (0) and the tie-break (first in heap order) are
// this design's choices.
// Memory ports: one read address shared by the G synapse banks (rdata of all
// banks comes back, `syn_rbank` chooses), one write port with bank select,
// and one post-gradient read address shared by the G neuron memories.
// Timing: SCAN takes about D*G*n_act cycles plus sift cycles; each regrowth
// takes n_act+2 cycles. `done` pulses for one cycle at the end.
module dsst_engine
  import elf_pkg::*;
#(
  parameter int unsigned K_MAX = 32,            // max synapses pruned per pass
  localparam int unsigned SAW = $clog2(D * N_MAX),
  localparam int unsigned MW  = $clog2(M),
  localparam int unsigned KCW = $clog2(K_MAX + 1),
  localparam int unsigned NCW = $clog2(N_MAX + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [4:0]             n_act,
  input  logic [7:0]             prune_k,
  output logic                   busy,
  output logic                   done,
  // synapse memory banks
  output logic [SAW-1:0]         syn_raddr,
  input  syn_t                   syn_rdata [G],
  output logic                   syn_we,
  output logic [1:0]             syn_wbank,
  output logic [SAW-1:0]         syn_waddr,
  output syn_t                   syn_wdata,
  // post-gradient reads from the G neuron memories
  output logic [MW-1:0]          g_raddr,
  input  logic signed [GR_W-1:0] g_rdata [G]
);
  typedef enum logic [2:0] {D_IDLE, D_SCAN, D_WAIT, D_SEL, D_CHECK, D_WRITE, D_DONE} dstate_t;
  dstate_t st;

  // ---------------- scan pointers ----------------
  logic [8:0] sc_i;  logic [1:0] sc_g;  logic [3:0] sc_s;  logic w_scan_end;
  logic [MW:0] sc_j;                                       logic g_scan_end;

  // ---------------- sorters ----------------
  localparam int unsigned WPAY = 9 + 2 + 4;
  logic                w_ready, w_done;
  logic [KCW-1:0]      w_cnt, w_k;
  logic signed [9:0]   w_key_in;
  logic signed [9:0]   w_key [K_MAX];
  logic [WPAY-1:0]     w_pay [K_MAX];
  syn_t                w_cur;

  logic [G-1:0]        g_ready, g_done;
  logic [NCW-1:0]      g_cnt [G];
  logic signed [GR_W:0] gk_in [G];
  logic signed [GR_W:0] gk [G][N_MAX];
  logic [MW-1:0]       gp [G][N_MAX];
  logic [NCW-1:0]      n_k;

  assign w_k  = (prune_k > K_MAX) ? KCW'(K_MAX) : KCW'(prune_k);
  assign n_k  = (n_act > N_MAX) ? NCW'(N_MAX) : NCW'(n_act);
  assign w_cur = syn_rdata[sc_g];
  assign w_key_in = w_cur.w[W_W-1] ? 10'(signed'(w_cur.w)) : -10'(signed'(w_cur.w));

  logic scanning;
  assign scanning = (st == D_SCAN);

  topk_heap #(.K_MAX(K_MAX), .KEY_W(10), .PAY_W(WPAY)) u_wsort (
    .clk, .rst_n, .start(start && st == D_IDLE), .k(w_k),
    .in_valid(scanning && !w_scan_end), .in_ready(w_ready),
    .in_key(w_key_in), .in_pay({sc_i, sc_g, sc_s}),
    .flush(scanning && w_scan_end), .done(w_done), .count(w_cnt),
    .hp_key(w_key), .hp_pay(w_pay));

  for (genvar q = 0; q < G; q++) begin : g_sort
    assign gk_in[q] = g_rdata[q][GR_W-1] ? -(GR_W+1)'(g_rdata[q]) : (GR_W+1)'(g_rdata[q]);
    topk_heap #(.K_MAX(N_MAX), .KEY_W(GR_W+1), .PAY_W(MW)) u_gsort (
      .clk, .rst_n, .start(start && st == D_IDLE), .k(n_k),
      .in_valid(scanning && !g_scan_end && (&g_ready)), .in_ready(g_ready[q]),
      .in_key(gk_in[q]), .in_pay(sc_j[MW-1:0]),
      .flush(scanning && g_scan_end), .done(g_done[q]), .count(g_cnt[q]),
      .hp_key(gk[q]), .hp_pay(gp[q]));
  end

  logic w_fed, w_last;     // all slots sent to the weight sorter
  assign w_last     = (sc_i == 9'(D - 1)) && (sc_g == 2'(G - 1)) && (sc_s == 4'(n_k - 1));
  assign w_scan_end = w_fed;
  assign g_scan_end = (sc_j == (MW+1)'(M));
  assign g_raddr    = sc_j[MW-1:0];

  // ---------------- regrow ----------------
  logic [KCW-1:0]  p;            // pruned entry being handled
  logic [8:0]      pi;  logic [1:0] pg;  logic [3:0] ps;
  logic [3:0]      chk;          // slot being compared
  logic [N_MAX-1:0] conn;        // candidate already connected

  always_comb begin
    syn_raddr = '0;
    if (st == D_SCAN)  syn_raddr = SAW'({sc_i, sc_s});
    if (st == D_CHECK) syn_raddr = SAW'({pi, chk});
  end

  // best free candidate of group pg
  logic               best_v;
  logic [MW-1:0]      best_j;
  logic signed [GR_W:0] best_k;
  always_comb begin
    best_v = 1'b0; best_j = '0; best_k = '0;
    for (int c = 0; c < N_MAX; c++) begin
      if (c < int'(g_cnt[pg]) && !conn[c] && (!best_v || gk[pg][c] > best_k)) begin
        best_v = 1'b1; best_j = gp[pg][c]; best_k = gk[pg][c];
      end
    end
  end

  assign syn_we    = (st == D_WRITE) && best_v;
  assign syn_wbank = pg;
  assign syn_waddr = SAW'({pi, ps});
  assign syn_wdata = '{w: '0, idx: IDX_W'({pg, best_j})};
  assign busy      = (st != D_IDLE);
  assign done      = (st == D_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE;
      sc_i <= '0; sc_g <= '0; sc_s <= '0; sc_j <= '0; w_fed <= 1'b0;
      p <= '0; pi <= '0; pg <= '0; ps <= '0; chk <= '0; conn <= '0;
    end else begin
      unique case (st)
        D_IDLE: if (start) begin
          sc_i <= '0; sc_g <= '0; sc_s <= '0; sc_j <= '0; w_fed <= 1'b0;
          st <= (prune_k == 0 || n_act == 0) ? D_DONE : D_SCAN;
        end
        D_SCAN: begin
          // weight stream: slot, then group, then presynaptic neuron
          if (!w_scan_end && w_ready) begin
            if (w_last) w_fed <= 1'b1;
            if (sc_s == 4'(n_k - 1)) begin
              sc_s <= '0;
              if (sc_g == 2'(G - 1)) begin sc_g <= '0; sc_i <= sc_i + 1'b1; end
              else sc_g <= sc_g + 1'b1;
            end else sc_s <= sc_s + 1'b1;
          end
          if (!g_scan_end && (&g_ready)) sc_j <= sc_j + 1'b1;
          if (w_done && (&g_done)) begin
            p  <= '0;
            st <= D_WAIT;
          end
        end
        D_WAIT: st <= (p < w_cnt) ? D_SEL : D_DONE;
        D_SEL: begin
          {pi, pg, ps} <= w_pay[p];
          chk  <= '0;
          conn <= '0;
          st   <= D_CHECK;
        end
        D_CHECK: begin
          if (chk != ps) begin
            for (int c = 0; c < N_MAX; c++)
              if (gp[pg][c] == syn_rdata[pg].idx[MW-1:0] && syn_rdata[pg].idx[IDX_W-1:MW] == pg)
                conn[c] <= 1'b1;
          end
          if (chk == 4'(n_k - 1)) st <= D_WRITE;
          chk <= chk + 1'b1;
        end
        D_WRITE: begin
          p  <= p + 1'b1;
          st <= D_WAIT;
        end
        D_DONE: st <= D_IDLE;
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
