// tb_input_trace: three time steps of random input spikes; every trace must
// follow e <- beta*e (rounded down or up one step) + 16*spike, saturating at
// 255, and each sweep must take M = 128 cycles. Init must clear all traces.
module tb_input_trace;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] beta = 8'd200;
  logic init_start = 0, nd_start = 0, done;
  logic [D-1:0] spk_in = '0;
  logic [8:0] rd_addr;
  logic [7:0] rd_data;
  logic [15:0] seed = 16'h77;
  int model [D];
  input_trace dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    int cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); init_start = 1; @(negedge clk); init_start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < D; i++) begin rd_addr = 9'(i); #1; chk(rd_data == 0, "cleared"); model[i] = 0; end
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < D; i++) spk_in[i] = ($urandom_range(0, 2) == 0);
      @(negedge clk); nd_start = 1; @(negedge clk); nd_start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      chk(cyc >= M && cyc <= M + 2, $sformatf("sweep cycles %0d", cyc));
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        int lo, hi;
        lo = (model[i] * 200) >>> 8; hi = lo + 1;
        if (spk_in[i]) begin lo += 16; hi += 16; end
        if (lo > 255) lo = 255; if (hi > 255) hi = 255;
        rd_addr = 9'(i); #1;
        chk(int'(rd_data) == lo || int'(rd_data) == hi, $sformatf("trace %0d: %0d not in [%0d,%0d]", i, rd_data, lo, hi));
        model[i] = int'(rd_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
