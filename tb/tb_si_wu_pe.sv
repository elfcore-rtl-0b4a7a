// tb_si_wu_pe: random operands; SI must add w<<w_shift to u (saturating), WU
// must move w by e*g/2^lr rounded down or up by one step (saturating).
module tb_si_wu_pe;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  syn_t syn, syn_nxt;
  logic si_en, wu_en;
  logic [7:0] e_pre;
  logic signed [15:0] u_post, g_post, u_nxt;
  logic [2:0] w_shift;
  logic [3:0] lr;
  logic [15:0] rnd;
  si_wu_pe dut (.*);
  function automatic int clip(int x, int lo, int hi); return x < lo ? lo : (x > hi ? hi : x); endfunction
  initial begin
    for (int t = 0; t < 4000; t++) begin
      int eu, ew, fl;
      syn.w = 8'($urandom); syn.idx = 9'($urandom);
      si_en = 1'($urandom); wu_en = 1'($urandom);
      e_pre = 8'($urandom); u_post = 16'($urandom); g_post = 16'($signed(16'($urandom_range(0, 400))) - 16'sd200);
      w_shift = 3'($urandom_range(0, 3)); lr = 4'($urandom_range(4, 10)); rnd = 16'($urandom);
      if (t % 3 == 0) u_post = 16'($signed(16'($urandom_range(0, 2000))) - 16'sd1000);
      #1;
      eu = si_en ? clip(int'(u_post) + (int'(syn.w) <<< w_shift), -32768, 32767) : int'(u_post);
      fl = (int'(e_pre) * int'(g_post)) >>> lr;
      checks++;
      if (int'(u_nxt) != eu) begin failures++; if (failures < 5) $display("FAIL u %0d %0d", u_nxt, eu); end
      checks++;
      if (syn_nxt.idx != syn.idx) failures++;
      checks++;
      if (!wu_en) begin
        if (syn_nxt.w != syn.w) failures++;
      end else if (!(int'(syn_nxt.w) == clip(int'(syn.w) + fl, -128, 127) ||
                     int'(syn_nxt.w) == clip(int'(syn.w) + fl + 1, -128, 127))) begin
        failures++; if (failures < 5) $display("FAIL w %0d + %0d -> %0d", syn.w, fl, syn_nxt.w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
