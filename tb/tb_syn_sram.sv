// tb_syn_sram: fills the full default-size bank (512*16 words) and reads back.
module tb_syn_sram;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [12:0] ra, wa;
  syn_t rd, wd;
  logic we;
  function automatic syn_t pat(int a); return syn_t'(17'((a * 40503) ^ (a >> 3))); endfunction
  syn_sram dut (.clk, .raddr(ra), .rdata(rd), .we, .waddr(wa), .wdata(wd));
  initial begin
    we = 0;
    for (int a = 0; a < D * N_MAX; a++) begin
      @(negedge clk); we = 1; wa = 13'(a); wd = pat(a);
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D * N_MAX; a += 7) begin
      ra = 13'(a); #1; checks++;
      if (rd != pat(a)) begin failures++; if (failures < 5) $display("FAIL a=%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
