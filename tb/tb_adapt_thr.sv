// tb_adapt_thr: spike vectors with known counts; i_bar must follow
// i_bar + (count - i_bar) >>> shift and the thresholds C*i_bar/16.
module tb_adapt_thr;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, update = 0;
  logic [D-1:0] spk_in = '0;
  logic [3:0] ia_shift = 4'd2;
  logic [7:0] cpc1 = 8'd16, cpc2 = 8'd24, ccc1 = 8'd8, ccc2 = 8'd40;
  logic [15:0] count, i_bar;
  logic [H_W-1:0] thr_pc1, thr_pc2, thr_cc1, thr_cc2;
  adapt_thr dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    int ib;
    repeat (2) @(posedge clk); rst_n = 1;
    ib = 0;
    for (int t = 0; t < 40; t++) begin
      int n;
      n = $urandom_range(0, 300);
      spk_in = '0;
      for (int i = 0; i < n; i++) spk_in[$urandom_range(0, D - 1)] = 1'b1;
      n = $countones(spk_in);
      @(negedge clk); update = 1; @(negedge clk); update = 0;
      ib = ib + ((n - ib) >>> 2);
      chk(int'(count) == n, "count");
      chk(int'(i_bar) == ib, $sformatf("i_bar %0d vs %0d", i_bar, ib));
      chk(int'(thr_pc1) == (ib * 16) / 16 && int'(thr_pc2) == (ib * 24) / 16, "pc thresholds");
      chk(int'(thr_cc1) == (ib * 8) / 16 && int'(thr_cc2) == (ib * 40) / 16, "cc thresholds");
    end
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    chk(i_bar == 0, "init clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
