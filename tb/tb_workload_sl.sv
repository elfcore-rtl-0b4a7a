// tb_workload_sl: a small synthetic classification workload run through the
// pins of the full-size core, to show that on-chip learning works end to end.
// Four classes; a sample of class c is T = 4 time steps in which each of the
// 24 input channels of class c fires with probability 1/2, plus 4 random
// noise spikes per step, followed by one silent step that ends the sample
// (the output layer integrates a step's input in the next step). The output
// layer listens to the input directly (n_hidden = 0), learns with the
// supervised rule while labels are sent, and predicts by the largest spike
// count of the sample. Training: 96 labelled samples; test: 24 samples with
// learning switched off. Checks: one output packet per time step, a
// prediction on every sample's last step, and test accuracy of at least 80 %
// (chance is 25 %). All traffic uses the SPI and the two-phase links.
// Register values (theta_out 600, beta_in 64, lr_sl 5) are this bench's
// choice for the synthetic data, not values from the chip. The real tasks of
// the chip (speech, EEG, gestures, ...) need data sets that are not part of
// this bench; this workload only exercises the same path.
module tb_workload_sl;
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
        if (b == 0 && $urandom_range(0, 3) == 0) repeat (10) @(posedge clk);
        else repeat ($urandom_range(0, 6)) @(posedge clk);
        v[b] = out_data;
        out_ack = ~out_ack;
        if (b == PKT_W - 1) begin rx_pkts.push_back(v); b = 0; end
        else b++;
      end
    end
  end


  localparam int NCLS = 4, NCH = 24;
  localparam int T = 4, GAP = 1;
  int ts_sent = 0;
  task automatic run_sample(input int cls, input bit with_lbl);
    pkt_t p;
    for (int t = 0; t < T; t++) begin
      for (int ch = 0; ch < NCH; ch++) if ($urandom_range(0, 1)) begin
        p = '0; p.spk_v = 1; p.addr = 9'(cls * 64 + ch); send_pkt(p);
      end
      for (int n = 0; n < 4; n++) begin
        p = '0; p.spk_v = 1; p.addr = 9'($urandom_range(0, D - 1)); send_pkt(p);
      end
      p = '0; p.eot = 1; p.lbl_v = with_lbl; p.lbl = 4'(cls);
      send_pkt(p);
      ts_sent++;
    end
    // silent steps close the sample: the output layer integrates a step's
    // input one step later, and the input traces decay before the next sample
    for (int t = 0; t < GAP; t++) begin
      p = '0; p.eot = 1; p.last_ts = (t == GAP - 1); p.lbl_v = with_lbl; p.lbl = 4'(cls);
      send_pkt(p);
      ts_sent++;
    end
  endtask
  task automatic wait_packets();
    int guard; guard = 0;
    while ((rx_pkts.size() < ts_sent || clk_en) && guard < 200000) begin @(posedge clk); guard++; end
    chk(guard < 200000, "packets of a sample");
  endtask

  int correct = 0;
  logic [15:0] rb;
  initial begin
    repeat (5) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    wr(0, 16'h0004);          // SL on, no hidden layer
    wr(9, 16'd200);           // beta_out
    wr(12, 16'd600);          // theta_out
    wr(18, 16'd5);            // lr_sl
    wr(6, 16'd64);            // beta_in: fast input trace
    wr(0, 16'h8004);          // init
    repeat (10) @(posedge clk);
    while (dut.busy_init || dut.init_req) @(posedge clk);
    for (int s = 0; s < 96; s++) begin run_sample(s % NCLS, 1); wait_packets(); end
    wr(0, 16'h0000);          // learning off
    for (int s = 0; s < 24; s++) begin
      int c;
      logic [PKT_W-1:0] v;
      c = $urandom_range(0, NCLS - 1);
      run_sample(c, 0); wait_packets();
      v = rx_pkts[rx_pkts.size() - 1];
      chk(v[20], "prediction on the last step");
      if (int'(v[19:16]) == c) correct++;
    end
    chk(rx_pkts.size() == ts_sent, "one packet per time step");
    $display("test accuracy %0d / 24", correct);
    chk(correct * 100 >= 24 * 80, "accuracy at least 80 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
