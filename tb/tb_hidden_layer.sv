// tb_hidden_layer: a full-size hidden layer (512 neurons, 4 PEs, N_MAX = 16,
// n_act = 4 active slots) driven through init, two time steps and a DSST pass.
// A reference model in the testbench, working from snapshots of the layer's
// memories, checks: the uniform N:M init pattern; spike integration (exact
// membrane sums over the spiking presynaptic neurons' connections); the spike
// decision, H_PC/H_CC and the WU gate of the neuron-dynamics pass; the
// weight update of every active row (within one stochastic-rounding step);
// zero skipping (rows walked vs. skipped); the ND (M cycles) and SI/WU
// (1 + D + rows*n_act cycles) latencies; and DSST (k slots rewritten, each
// to weight 0).
module tb_hidden_layer;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NA = 4;

  logic [7:0] beta = 8'd224, prune_k = 8'd6;
  logic [15:0] theta = 16'd20, seed = 16'h1234, i_bar = 16'd10, i_thr = 16'd0;
  logic [4:0] n_act = 5'(NA);
  logic [3:0] lr = 4'd6;
  logic [2:0] w_shift = 3'd2;
  logic ossl_en = 0, last_ts = 0;
  logic [H_W-1:0] thr_pc = 0, thr_cc = '1;
  logic init_start = 0, nd_start = 0, siwu_start = 0, dsst_start = 0;
  logic init_done, nd_done, siwu_done, dsst_done, wu_en;
  logic [D-1:0] pre_spk = '0, spk;
  logic [8:0] pre_tr_addr, tr_addr = '0;
  logic [7:0] pre_tr_data, tr_data;
  logic [H_W-1:0] hpc, hcc;
  logic [15:0] skip_cnt, row_cnt;
  logic [7:0] pre_tr [D];
  assign pre_tr_data = pre_tr[pre_tr_addr];

  hidden_layer dut (.*);

  function automatic syn_t srd(int q, int a);
    case (q) 0: return dut.bank[0].u_smem.mem[a]; 1: return dut.bank[1].u_smem.mem[a];
             2: return dut.bank[2].u_smem.mem[a]; default: return dut.bank[3].u_smem.mem[a]; endcase
  endfunction
  function automatic neu_t nrd(int q, int a);
    case (q) 0: return dut.bank[0].u_nmem.mem[a]; 1: return dut.bank[1].u_nmem.mem[a];
             2: return dut.bank[2].u_nmem.mem[a]; default: return dut.bank[3].u_nmem.mem[a]; endcase
  endfunction
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", s); end
  endtask
  function automatic int clip(int x, int lo, int hi); return x < lo ? lo : (x > hi ? hi : x); endfunction

  syn_t sw [G][D*N_MAX];
  neu_t sn [G][M];
  task automatic snap();
    for (int q = 0; q < G; q++) begin
      for (int a = 0; a < D * N_MAX; a++) sw[q][a] = srd(q, a);
      for (int j = 0; j < M; j++) sn[q][j] = nrd(q, j);
    end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  int cyc;
  task automatic wait_done(ref logic d);
    cyc = 1;
    while (!d) begin @(posedge clk); #1; cyc++; end
  endtask

  // one SI/WU pass checked against the model (snapshot taken before)
  task automatic run_siwu(input bit expect_wu);
    int exp_u [D];
    int nact, nspk, nchg;
    nact = 0; nspk = 0; nchg = 0;
    for (int j = 0; j < D; j++) exp_u[j] = int'(sn[j / M][j % M].u);
    for (int i = 0; i < D; i++) begin
      bit a_si, a_wu;
      a_si = pre_spk[i];
      a_wu = expect_wu && pre_tr[i] != 0;
      if (a_si || a_wu) nact++;
      for (int q = 0; q < G; q++) for (int s = 0; s < NA; s++) begin
        syn_t e = sw[q][i * N_MAX + s];
        if (a_si) exp_u[e.idx] = clip(exp_u[e.idx] + (int'(e.w) <<< w_shift), -32768, 32767);
      end
    end
    pulse(siwu_start);
    wait_done(siwu_done);
    chk(int'(row_cnt) == nact, $sformatf("rows %0d vs %0d", row_cnt, nact));
    chk(int'(skip_cnt) == D - nact, "skips");
    chk(cyc >= D + nact * NA && cyc <= D + nact * NA + 3, $sformatf("SI/WU cycles %0d, expected %0d", cyc, D + nact * NA + 1));
    for (int j = 0; j < D; j++) chk(int'(nrd(j / M, j % M).u) == exp_u[j], $sformatf("u[%0d] %0d vs %0d", j, nrd(j / M, j % M).u, exp_u[j]));
    for (int q = 0; q < G; q++) for (int i = 0; i < D; i++) for (int s = 0; s < N_MAX; s++) begin
      syn_t o, n;
      o = sw[q][i * N_MAX + s]; n = srd(q, i * N_MAX + s);
      chk(n.idx == o.idx, "index changed by WU");
      if (n.w != o.w) nchg++;
      if (expect_wu && pre_tr[i] != 0 && s < NA) begin
        int fl;
        fl = (int'(pre_tr[i]) * int'(sn[q][o.idx % M].g)) >>> lr;
        chk(int'(n.w) == clip(int'(o.w) + fl, -128, 127) || int'(n.w) == clip(int'(o.w) + fl + 1, -128, 127),
            $sformatf("WU w %0d e %0d g %0d -> %0d", o.w, pre_tr[i], sn[q][o.idx % M].g, n.w));
      end else chk(n.w == o.w, "weight changed without WU");
    end
    if (expect_wu) chk(nchg > 50, $sformatf("WU changed only %0d weights", nchg));
  endtask

  initial begin
    for (int i = 0; i < D; i++) pre_tr[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---------------- init ----------------
    pulse(init_start);
    wait_done(init_done);
    chk(cyc >= D * N_MAX && cyc <= D * N_MAX + 2, $sformatf("init cycles %0d", cyc));
    snap();
    for (int q = 0; q < G; q++) for (int i = 0; i < D; i++) for (int s = 0; s < N_MAX; s++) begin
      chk(int'(sw[q][i * N_MAX + s].idx) == q * M + (s * 8 + i) % M, "init index");
      chk(int'(sw[q][i * N_MAX + s].w) >= -32 && int'(sw[q][i * N_MAX + s].w) < 32, "init weight");
    end
    for (int q = 0; q < G; q++) for (int j = 0; j < M; j++) chk(sn[q][j] == '0, "neuron cleared");
    // ---------------- TS 1: ND (nothing spikes), SI only ----------------
    pulse(nd_start);
    wait_done(nd_done);
    chk(cyc >= M && cyc <= M + 2, $sformatf("ND cycles %0d", cyc));
    chk(spk == '0 && hpc == 0, "no spikes from rest");
    @(posedge clk); #1;
    chk(wu_en == 0, "WU off while ossl disabled");
    for (int i = 0; i < D; i++) pre_spk[i] = ($urandom_range(0, 3) == 0);
    snap();
    run_siwu(0);
    // ---------------- TS 2: ND with spikes, gated WU ----------------
    snap();
    begin
      logic [D-1:0] exp_spk;
      int exp_hpc, exp_hcc;
      exp_hpc = 0; exp_hcc = 0;
      for (int j = 0; j < D; j++) begin
        exp_spk[j] = int'(sn[j / M][j % M].u) > int'(theta);
        if (exp_spk[j]) begin exp_hpc += sn[j / M][j % M].e_cur; exp_hcc += sn[j / M][j % M].e_last; end
      end
      pulse(nd_start);
      wait_done(nd_done);
      chk(spk == exp_spk, "spike vector");
      chk($countones(spk) > 10, "layer spiked");
      chk(int'(hpc) == exp_hpc && int'(hcc) == exp_hcc, "similarity scores");
      @(posedge clk); #1;
      chk(wu_en == 0, "WU off while ossl disabled (2)");
    end
    // SI of TS 2, then TS 3 with learning on: traces now differ from e_prev
    for (int i = 0; i < D; i++) pre_spk[i] = ($urandom_range(0, 3) == 0);
    snap();
    run_siwu(0);
    ossl_en = 1; thr_pc = 24'd1000000;   // PC condition met -> WU on
    pulse(nd_start);
    wait_done(nd_done);
    @(posedge clk); #1;
    chk(wu_en == 1, "WU gate opened");
    for (int i = 0; i < D; i++) begin
      pre_spk[i] = ($urandom_range(0, 7) == 0);
      pre_tr[i]  = ($urandom_range(0, 2) == 0) ? 8'($urandom_range(1, 60)) : 8'd0;
    end
    snap();
    begin int ng; ng = 0; for (int q = 0; q < G; q++) for (int j = 0; j < M; j++) ng += (sn[q][j].g != 0); chk(ng > 20, "post-gradients present"); end
    run_siwu(1);
    // ---------------- TS 3: gate closed by input activity ----------------
    i_thr = 16'd50;
    pulse(nd_start);
    wait_done(nd_done);
    @(posedge clk); #1;
    chk(wu_en == 0, "WU gate closed by low input activity");
    snap();
    run_siwu(0);
    // ---------------- DSST ----------------
    snap();
    pulse(dsst_start);
    wait_done(dsst_done);
    begin
      int nchg; nchg = 0;
      for (int q = 0; q < G; q++) for (int a = 0; a < D * N_MAX; a++)
        if (srd(q, a) != sw[q][a]) begin nchg++; chk(srd(q, a).w == 0, "regrown weight"); end
      chk(nchg > 0 && nchg <= int'(prune_k), $sformatf("DSST rewrote %0d", nchg));
    end
    // trace read port
    tr_addr = 9'd300; #1;
    chk(tr_data == nrd(300 / M, 300 % M).e_cur, "trace port");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
