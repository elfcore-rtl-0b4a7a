// tb_dsst_engine: one DSST pass on a full-size layer memory (512 presynaptic
// neurons, 4 groups, n_act = 4 active slots) with random weights and random
// post-gradients. Checks: exactly k slots change; each changed slot held one
// of the k smallest |w|; it now has weight 0 and points into its own group at
// one of the n_act neurons with the largest |g|; no row holds an index twice;
// untouched slots keep their contents; the pass ends within its cycle budget.
module tb_dsst_engine;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NA = 4, KP = 20;

  logic start, busy, done, s_we;
  logic [4:0] n_act = 5'(NA);
  logic [7:0] prune_k = 8'(KP);
  logic [12:0] s_raddr, s_waddr;
  logic [1:0]  s_wbank;
  syn_t        s_rdata [G], s_wdata;
  logic [6:0]  g_raddr;
  logic signed [15:0] g_rdata [G];
  logic signed [15:0] gmem [G][M];

  for (genvar q = 0; q < G; q++) begin : bank
    syn_sram u (.clk, .raddr(s_raddr), .rdata(s_rdata[q]), .we(s_we && s_wbank == 2'(q)),
                .waddr(s_waddr), .wdata(s_wdata));
    assign g_rdata[q] = gmem[q][g_raddr];
  end

  dsst_engine #(.K_MAX(32)) dut (.clk, .rst_n, .start, .n_act, .prune_k, .busy, .done,
    .syn_raddr(s_raddr), .syn_rdata(s_rdata), .syn_we(s_we), .syn_wbank(s_wbank),
    .syn_waddr(s_waddr), .syn_wdata(s_wdata), .g_raddr, .g_rdata);

  syn_t pre_m [G][D][N_MAX];
  syn_t post_m [G][D][N_MAX];
  int   absw [$];

  task automatic mem_wr(input int q, input int a, input syn_t e);
    case (q)
      0: bank[0].u.mem[a] = e;
      1: bank[1].u.mem[a] = e;
      2: bank[2].u.mem[a] = e;
      default: bank[3].u.mem[a] = e;
    endcase
  endtask
  function automatic syn_t mem_rd(input int q, input int a);
    case (q)
      0: return bank[0].u.mem[a];
      1: return bank[1].u.mem[a];
      2: return bank[2].u.mem[a];
      default: return bank[3].u.mem[a];
    endcase
  endfunction

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  initial begin
    int cyc, kth, nchg, gthr [G];
    start = 0;
    // fill memories (uniform N:M pattern, random weights), random gradients
    for (int q = 0; q < G; q++) begin
      for (int i = 0; i < D; i++)
        for (int s = 0; s < N_MAX; s++) begin
          syn_t e;
          e.w = 8'($urandom_range(0, 255));
          e.idx = 9'(q * M + ((s * 8 + i) % M));
          mem_wr(q, i * N_MAX + s, e);
          pre_m[q][i][s] = e;
        end
      for (int j = 0; j < M; j++) gmem[q][j] = 16'($signed(16'($urandom_range(0, 4000))) - 16'sd2000);
    end
    // reference thresholds
    for (int q = 0; q < G; q++) for (int i = 0; i < D; i++) for (int s = 0; s < NA; s++)
      absw.push_back(iabs(int'(pre_m[q][i][s].w)));
    for (int a = 0; a < KP; a++) begin   // partial selection of the KP smallest
      int m = a;
      for (int b = a + 1; b < absw.size(); b++) if (absw[b] < absw[m]) m = b;
      begin int t = absw[a]; absw[a] = absw[m]; absw[m] = t; end
    end
    kth = absw[KP - 1];
    for (int q = 0; q < G; q++) begin
      int gs [$];
      for (int j = 0; j < M; j++) gs.push_back(iabs(int'(gmem[q][j])));
      for (int a = 0; a < NA; a++) begin
        int m = a;
        for (int b = a + 1; b < M; b++) if (gs[b] > gs[m]) m = b;
        begin int t = gs[a]; gs[a] = gs[m]; gs[m] = t; end
      end
      gthr[q] = gs[NA - 1];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; #1; end
    @(negedge clk);
    nchg = 0;
    for (int q = 0; q < G; q++) for (int i = 0; i < D; i++) begin
      for (int s = 0; s < N_MAX; s++) post_m[q][i][s] = mem_rd(q, i * N_MAX + s);
      for (int s = 0; s < N_MAX; s++) begin
        if (post_m[q][i][s] != pre_m[q][i][s]) begin
          nchg++;
          chk(s < NA, "changed an inactive slot");
          chk(iabs(int'(pre_m[q][i][s].w)) <= kth, $sformatf("pruned |w|=%0d > kth %0d", pre_m[q][i][s].w, kth));
          chk(post_m[q][i][s].w == 0, "regrown weight not 0");
          chk(int'(post_m[q][i][s].idx) / M == q, "regrown outside group");
          chk(iabs(int'(gmem[q][post_m[q][i][s].idx % M])) >= gthr[q], "regrown to a small gradient");
        end
      end
      for (int s = 0; s < NA; s++) for (int r = s + 1; r < NA; r++)
        chk(post_m[q][i][s].idx != post_m[q][i][r].idx, "duplicate index in a row");
    end
    // a slot pruned and regrown onto its own index with w already 0 looks unchanged
    chk(nchg <= KP && nchg >= KP - 2, $sformatf("changed %0d slots, expected %0d", nchg, KP));
    chk(cyc < D * G * NA * 2 + KP * (NA + 4) + 2000, $sformatf("cycles %0d", cyc));
    $display("DSST pass: %0d cycles, %0d slots rewritten", cyc, nchg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
