// tb_output_layer: init, then time steps with random presynaptic spikes and
// traces. Checks exact spike integration into the 16 membranes, the spike
// decision, spike counting and the max-count / max-membrane prediction at the
// end of a sample, the SL weight update (target minus output trace, times
// presynaptic trace, within one rounding step) and the D-cycle SI latency.
module tb_output_layer;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] beta = 8'd230;
  logic [15:0] theta = 16'd30, seed = 16'h4321;
  logic [3:0] lr = 4'd5, lbl = 4'd3;
  logic [2:0] w_shift = 3'd1;
  logic pred_mode = 0, sl_en = 0, last_ts = 0, lbl_v = 0;
  logic init_start = 0, nd_start = 0, siwu_start = 0, init_done, nd_done, siwu_done;
  logic [D-1:0] pre_spk = '0;
  logic [8:0] pre_tr_addr;
  logic [7:0] pre_tr_data;
  logic [N_OUT-1:0] out_spk;
  logic pred_valid, sl_active;
  logic [3:0] pred;
  logic [7:0] ptr [D];
  assign pre_tr_data = ptr[pre_tr_addr];
  output_layer dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic int clip(int x, int lo, int hi); return x < lo ? lo : (x > hi ? hi : x); endfunction
  int cyc;
  task automatic pulse_wait(ref logic s, ref logic d);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
    cyc = 1;
    while (!d) begin @(posedge clk); #1; cyc++; end
  endtask

  int cnt [N_OUT];
  initial begin
    int w0 [D][N_OUT];
    for (int i = 0; i < D; i++) ptr[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    pulse_wait(init_start, init_done);
    for (int n = 0; n < N_OUT; n++) begin chk(dut.rf[n] == '0, "rf cleared"); cnt[n] = 0; end
    for (int s = 0; s < 6; s++) begin
      int exp_u [N_OUT];
      bit spk_exp [N_OUT];
      bit is_last;
      is_last = (s == 5);
      // SI (+ SL on later steps)
      sl_en = (s >= 2); lbl_v = 1;
      for (int i = 0; i < D; i++) begin
        pre_spk[i] = ($urandom_range(0, 5) == 0);
        ptr[i] = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(1, 40)) : 8'd0;
      end
      for (int i = 0; i < D; i++) for (int n = 0; n < N_OUT; n++) w0[i][n] = int'(dut.wmem[i][n]);
      for (int n = 0; n < N_OUT; n++) begin
        exp_u[n] = int'(dut.rf[n].u);
        for (int i = 0; i < D; i++) if (pre_spk[i]) exp_u[n] = clip(exp_u[n] + (w0[i][n] <<< w_shift), -32768, 32767);
      end
      pulse_wait(siwu_start, siwu_done);
      chk(cyc >= D && cyc <= D + 3, $sformatf("SI cycles %0d", cyc));
      for (int n = 0; n < N_OUT; n++) chk(int'(dut.rf[n].u) == exp_u[n], $sformatf("u[%0d]", n));
      for (int i = 0; i < D; i++) for (int n = 0; n < N_OUT; n++) begin
        if (sl_en && ptr[i] != 0) begin
          int err, fl;
          err = ((n == 3) ? 64 : 0) - int'(dut.rf[n].e_cur);
          fl = (int'(ptr[i]) * err) >>> lr;
          chk(int'(dut.wmem[i][n]) == clip(w0[i][n] + fl, -128, 127) || int'(dut.wmem[i][n]) == clip(w0[i][n] + fl + 1, -128, 127), "SL update");
        end else chk(int'(dut.wmem[i][n]) == w0[i][n], "weight kept");
      end
      if (sl_en) chk(sl_active, "SL ran");
      // ND
      last_ts = is_last;
      pred_mode = 0;
      for (int n = 0; n < N_OUT; n++) begin
        spk_exp[n] = int'(dut.rf[n].u) > int'(theta);
        cnt[n] += spk_exp[n];
      end
      pulse_wait(nd_start, nd_done);
      chk(cyc <= 2, "ND in one cycle");
      for (int n = 0; n < N_OUT; n++) chk(out_spk[n] == spk_exp[n], "output spike");
      if (is_last) begin
        int best; best = 0;
        for (int n = 1; n < N_OUT; n++) if (cnt[n] > cnt[best]) best = n;
        chk(pred == 4'(best), $sformatf("prediction %0d vs %0d", pred, best));
      end
    end
    // membrane-based prediction
    pred_mode = 1; last_ts = 1;
    pulse_wait(nd_start, nd_done);
    begin
      int best; best = 0;
      for (int n = 1; n < N_OUT; n++) if ($signed(dut.rf[n].u) > $signed(dut.rf[best].u)) best = n;
      chk(pred == 4'(best), "max-membrane prediction");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
