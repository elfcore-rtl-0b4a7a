// tb_elfcore_top: end-to-end test of the full-size core (no parameter
// overrides). The bench talks to the chip only through its pins: it
// configures the parameter bank over SPI (and reads registers back), sends
// spike packets bit-serially over the two-phase input link, and receives the
// 30-bit output packets over the two-phase output link, acknowledging them
// after random delays. It runs several samples in four configurations:
//   A: two hidden layers, OSSL + DSST + SL on, gating threshold 0 (WU runs)
//   B: global activity threshold above any input (WU gated off)
//   C: bypass to one hidden layer      D: bypass to the output layer only,
//      prediction by largest membrane potential
// Checked independently of the RTL: the spike vector the core takes in each
// time step equals the union of the spikes sent for it, allowing for their
// axonal delays; one output packet per time step; the prediction flag only
// on a sample's last step; the prediction equals the output neuron with the
// most spikes in the received packets (count mode); SPI read-back; WU gating
// off under configuration B; hidden layers left out by a bypass are never
// started. Mechanisms counted (each must occur): link back-pressure on input
// and output, delayed spikes, WU on and off, zero-skipping, DSST, SL, every
// bypass, both prediction modes, clock-enable idle periods.
module tb_elfcore_top;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic spi_sck = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic in_req = 0, in_data = 0, in_ack;
  logic out_req, out_data, out_ack = 0;
  logic pred_valid, clk_en;
  logic [3:0] pred;
  logic [1:0] wu_en, dsst_active;
  elfcore_top dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", s, $time); end
  endtask

  // ---------------- SPI ----------------
  task automatic spi_xfer(input logic [23:0] f, output logic [15:0] rx);
    spi_cs_n = 0; repeat (4) @(posedge clk);
    for (int b = 23; b >= 0; b--) begin
      spi_mosi = f[b]; repeat (4) @(posedge clk);
      spi_sck = 1; if (b < 16) rx[b] = spi_miso; repeat (4) @(posedge clk);
      spi_sck = 0;
    end
    repeat (4) @(posedge clk); spi_cs_n = 1; repeat (4) @(posedge clk);
  endtask
  task automatic wr(input int a, input logic [15:0] d);
    logic [15:0] rx;
    spi_xfer({1'b1, 7'(a), d}, rx);
  endtask
  task automatic rd(input int a, output logic [15:0] d);
    spi_xfer({1'b0, 7'(a), 16'h0}, d);
  endtask

  // ---------------- input link sender ----------------
  task automatic send_pkt(input pkt_t p);
    logic [PKT_W-1:0] v;
    v = p;
    for (int b = 0; b < PKT_W; b++) begin
      logic a0;
      a0 = in_ack;
      #3; in_data = v[b]; #2; in_req = ~in_req;
      while (in_ack == a0) @(posedge clk);
    end
  endtask

  // ---------------- output link receiver ----------------
  logic [PKT_W-1:0] rx_pkts [$];
  int out_stall_ack = 0;
  initial begin
    logic [PKT_W-1:0] v;
    int b;
    logic r0;
    b = 0;
    wait (rst_n); @(posedge clk);
    r0 = out_req;
    forever begin
      @(posedge clk);
      if (out_req != r0) begin
        r0 = out_req;
        // now and then hold the first bit of a packet back for a long time
        if (b == 0 && rx_pkts.size() == 3) repeat (100000) @(posedge clk);
        else if (b == 0 && $urandom_range(0, 3) == 0) repeat (6000) @(posedge clk);
        else repeat ($urandom_range(0, 6)) @(posedge clk);
        v[b] = out_data;
        out_ack = ~out_ack;
        if (b == PKT_W - 1) begin rx_pkts.push_back(v); b = 0; end
        else b++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_in_bp, n_out_bp, n_delay, n_wu_on, n_wu_off, n_skip, n_dsst, n_sl, n_idle;
  int n_byp [3];
  int n_pmode [2];
  int n_ospk;
  int n_ts_taken, h1_starts_bad, h2_starts_bad, wu_bad;
  bit cfg_b;
  logic [D-1:0] taken [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.dpkt_v && !dut.dpkt_r) n_in_bp++;
    if (dut.out_valid && !dut.out_ready) n_out_bp++;
    if (dut.u_h1.nd_done && dut.u_h1.skip_cnt != 0 && dut.u_fsm.st == dut.u_fsm.F_ND) n_skip++;
    if (dut.dsst_start != 0) n_dsst++;
    if (dut.u_out.sl_active && dut.u_out.siwu_done) n_sl++;
    if (!clk_en && $past(clk_en)) n_idle++;
    if (dut.ts_valid && dut.ts_ready) begin n_ts_taken++; taken.push_back(dut.ts_vec); end
    if (dut.cfg.n_hidden == 0 && (dut.nd_start[1] || dut.siwu_start[1])) h1_starts_bad++;
    if (dut.cfg.n_hidden < 2 && (dut.nd_start[2] || dut.siwu_start[2])) h2_starts_bad++;
    if (dut.u_fsm.st == dut.u_fsm.F_SIWU && $past(dut.u_fsm.st) == dut.u_fsm.F_GATE) begin
      for (int l = 0; l < 2; l++) begin
        if (l + 1 <= int'(dut.cfg.n_hidden)) begin
          if (wu_en[l]) n_wu_on++; else n_wu_off++;
          if (cfg_b && wu_en[l]) wu_bad++;
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  localparam int TS_PER_SAMPLE = 3;
  logic [D-1:0] exp_vec [64];   // expected input vector per TS (index = global TS)
  int ts_glob = 0;
  int sample_lbl;

  task automatic run_sample(input int lbl, input int n_spk);
    for (int t = 0; t < TS_PER_SAMPLE; t++) begin
      pkt_t p;

      for (int s = 0; s < n_spk; s++) begin
        p = '0;
        p.spk_v = 1;
        p.addr  = 9'($urandom_range(0, D - 1));
        p.delay = ($urandom_range(0, 3) == 0) ? 2'($urandom_range(1, 3)) : 2'd0;
        if (p.delay != 0) n_delay++;
        exp_vec[ts_glob + p.delay][p.addr] = 1'b1;
        send_pkt(p);
      end
      p = '0;
      p.eot = 1; p.last_ts = (t == TS_PER_SAMPLE - 1); p.lbl_v = 1; p.lbl = 4'(lbl);
      send_pkt(p);
      ts_glob++;
    end
  endtask

  // wait until all TSs sent so far have been processed and their packets received
  task automatic drain();
    int guard;
    guard = 0;
    while ((rx_pkts.size() < ts_glob || clk_en || dut.ts_valid) && guard < 400000) begin
      @(posedge clk); guard++;
    end
    chk(guard < 400000, "drain");
    repeat (20) @(posedge clk);
  endtask

  // check the packets of one sample
  int pk_idx = 0;
  task automatic check_sample(input bit count_mode);
    int cnt [N_OUT];
    int best;
    logic [PKT_W-1:0] v;
    for (int n = 0; n < N_OUT; n++) cnt[n] = 0;
    for (int t = 0; t < TS_PER_SAMPLE; t++) begin
      v = rx_pkts[pk_idx++];
      for (int n = 0; n < N_OUT; n++) begin cnt[n] += v[n]; n_ospk += v[n]; end
      chk(v[20] == (t == TS_PER_SAMPLE - 1), "prediction flag only on the last TS");
      chk(v[29:21] == '0, "unused packet bits");
      if (t == TS_PER_SAMPLE - 1) begin
        if (count_mode) begin
          best = 0;
          for (int n = 1; n < N_OUT; n++) if (cnt[n] > cnt[best]) best = n;
          chk(v[19:16] == 4'(best), $sformatf("prediction %0d expected %0d", v[19:16], best));
        end
        n_pmode[count_mode ? 0 : 1]++;
      end
    end
  endtask

  logic [15:0] rb;
  initial begin
    for (int k = 0; k < 64; k++) exp_vec[k] = '0;
    repeat (5) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    // configuration A
    wr(0, 16'h0017);          // ossl, dsst, sl, two hidden layers, count prediction
    wr(2, 16'd1);             // DSST after more than one WU step
    wr(3, 16'd4);             // prune 4
    wr(12, 16'd8);            // output threshold
    wr(10, 16'd16); wr(11, 16'd16);
    wr(19, 16'd2);            // w_shift
    rd(12, rb); chk(rb == 16'd8, "SPI read-back theta_out");
    rd(1, rb);  chk(rb == 16'd16, "SPI read-back n_act reset value");
    wr(0, 16'h8017);          // init
    repeat (10) @(posedge clk);
    while (dut.busy_init || dut.init_req) @(posedge clk);
    repeat (10) @(posedge clk);
    n_byp[2]++;
    for (int s = 0; s < 2; s++) begin run_sample(s + 1, 40); drain(); check_sample(1); end
    // configuration B: gate off by the global input-activity threshold
    wr(4, 16'hFFFF); cfg_b = 1;
    run_sample(5, 40); drain(); check_sample(1);
    cfg_b = 0; wr(4, 16'd0);
    // configuration C: one hidden layer
    wr(0, 16'h000F); n_byp[1]++;
    run_sample(7, 40); drain(); check_sample(1);
    // configuration D: output layer only, membrane-based prediction
    wr(0, 16'h0024); n_byp[0]++;
    run_sample(9, 60); drain(); check_sample(0);

    // input vectors against the spikes sent
    chk(n_ts_taken == ts_glob, $sformatf("time steps taken %0d sent %0d", n_ts_taken, ts_glob));
    for (int k = 0; k < n_ts_taken && k < taken.size(); k++)
      chk(taken[k] == exp_vec[k], $sformatf("input vector of TS %0d: %0d vs %0d bits", k, $countones(taken[k]), $countones(exp_vec[k])));
    chk(rx_pkts.size() == ts_glob, "one output packet per TS");
    chk(wu_bad == 0, "WU gated off under the activity threshold");
    chk(h1_starts_bad == 0 && h2_starts_bad == 0, "bypassed layers idle");
    $display("mechanisms: in_bp=%0d out_bp=%0d delay=%0d wu_on=%0d wu_off=%0d skip=%0d dsst=%0d sl=%0d idle=%0d byp=%0d/%0d/%0d pmode=%0d/%0d ospk=%0d",
             n_in_bp, n_out_bp, n_delay, n_wu_on, n_wu_off, n_skip, n_dsst, n_sl, n_idle,
             n_byp[0], n_byp[1], n_byp[2], n_pmode[0], n_pmode[1], n_ospk);
    chk(n_ospk > 0, "output spikes");
    chk(n_in_bp > 0, "input back-pressure");
    chk(n_out_bp > 0, "output back-pressure");
    chk(n_delay > 0, "delayed spikes");
    chk(n_wu_on > 0, "WU on");
    chk(n_wu_off > 0, "WU off");
    chk(n_skip > 0, "zero skipping");
    chk(n_dsst > 0, "DSST");
    chk(n_sl > 0, "SL");
    chk(n_idle > 0, "idle (clock gated)");
    for (int i = 0; i < 3; i++) chk(n_byp[i] > 0, "bypass mode");
    chk(n_pmode[0] > 0 && n_pmode[1] > 0, "prediction modes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
