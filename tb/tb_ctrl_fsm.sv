// tb_ctrl_fsm: behavioural units answer the FSM's start pulses with done
// pulses after random delays. Checks the phase order (ND before SI/WU before
// DSST before the output packet), that only the units in use are started for
// each bypass setting, that DSST of a layer starts exactly on the time step
// where its WU count exceeds X, that the core is idle (clk_en low) between
// time steps, and the initialisation sequence.
module tb_ctrl_fsm;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_req = 0, ts_valid = 0, ts_ready, dsst_en = 1, ia_update, out_valid, out_ready = 1, clk_en, busy_init;
  logic [1:0] n_hidden = 2, wu_en = 2'b11, dsst_start, dsst_done;
  logic [15:0] dsst_x = 16'd3, wu_cnt1, wu_cnt2;
  logic [3:0] init_start, nd_start, siwu_start, init_done, nd_done, siwu_done;
  ctrl_fsm dut (.*);

  // responders: done after 1..20 cycles; each unit drives its own done bits
  logic [3:0] i_d, n_d, s_d; logic [1:0] d_d;
  assign init_done = i_d; assign nd_done = n_d; assign siwu_done = s_d; assign dsst_done = d_d;
  for (genvar u = 0; u < 4; u++) begin : resp
    logic id = 0, nd = 0, sd = 0, dd = 0;
    assign i_d[u] = id; assign n_d[u] = nd; assign s_d[u] = sd;
    if (u < 2) begin : g_d
      assign d_d[u] = dd;
    end
    initial begin wait (rst_n); forever begin
      @(posedge clk);
      if (init_start[u]) begin repeat ($urandom_range(1, 20)) @(posedge clk); id <= 1; @(posedge clk); id <= 0; end
      else if (nd_start[u]) begin repeat ($urandom_range(1, 20)) @(posedge clk); nd <= 1; @(posedge clk); nd <= 0; end
      else if (siwu_start[u]) begin repeat ($urandom_range(1, 20)) @(posedge clk); sd <= 1; @(posedge clk); sd <= 0; end
      else if (u < 2 && dsst_start[u % 2]) begin repeat ($urandom_range(1, 20)) @(posedge clk); dd <= 1; @(posedge clk); dd <= 0; end
    end
    end
  end

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // phase log
  int nd_seen = 0, siwu_seen = 0, dsst_seen = 0, out_seen = 0;
  logic [3:0] nd_mask, siwu_mask; logic [1:0] dsst_mask;
  always @(posedge clk) begin
    if (|nd_start) begin nd_seen++; nd_mask <= nd_start; chk(siwu_seen == nd_seen - 1, "ND before SI/WU"); end
    if (|siwu_start) begin siwu_seen++; siwu_mask <= siwu_start; end
    if (|dsst_start) begin dsst_seen++; dsst_mask <= dsst_start; end
    if (out_valid) out_seen++;
  end

  initial begin
    int c1, c2, ndsst;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); init_req = 1;
    @(posedge clk); #1; chk(init_start == 4'b1111, "init starts all units");
    @(negedge clk); init_req = 0;
    while (busy_init) @(posedge clk);
    @(negedge clk); chk(!clk_en && ts_ready, "idle after init");
    c1 = 0; c2 = 0;
    for (int t = 0; t < 30; t++) begin
      int o0, d0;
      n_hidden = (t < 20) ? 2'd2 : (t < 25 ? 2'd1 : 2'd0);
      wu_en = 2'($urandom);
      o0 = out_seen; d0 = dsst_seen;
      @(negedge clk); ts_valid = 1;
      @(posedge clk); #1; ts_valid = 0;
      chk(clk_en, "core awake");
      while (out_seen == o0) @(posedge clk);
      @(negedge clk);
      chk(nd_mask == {1'b1, n_hidden == 2, n_hidden != 0, 1'b1}, $sformatf("ND mask %b for %0d hidden", nd_mask, n_hidden));
      chk(siwu_mask == nd_mask, "SI/WU mask");
      if (n_hidden == 2) begin
        c1 += wu_en[0]; c2 += wu_en[1];
        ndsst = 0;
        if (c1 > 3) begin ndsst++; chk(dsst_mask[0], "DSST layer 1"); c1 = 0; end
        if (c2 > 3) begin ndsst++; chk(dsst_mask[1], "DSST layer 2"); c2 = 0; end
        chk((dsst_seen - d0) == (ndsst > 0 ? 1 : 0), $sformatf("DSST starts at t=%0d", t));
        chk(int'(wu_cnt1) == c1 && int'(wu_cnt2) == c2, "WU counters");
      end
      repeat (2) @(posedge clk);
      chk(!clk_en, "core idle between time steps");
    end
    chk(dsst_seen >= 3, "DSST exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
