// tb_ste_lut: checks the surrogate-derivative table against a direct
// evaluation of the triangle h = 255 - 16*floor(|u-theta|/8) (0 beyond 16 bins).
module tb_ste_lut;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic signed [15:0] u;
  logic [15:0] theta;
  logic [7:0] h;
  ste_lut dut (.u, .theta, .h);
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int d, exp_h;
      theta = 16'($urandom_range(0, 300));
      u = (t % 2) ? 16'($signed(theta) + $signed(16'($urandom_range(0, 300)) - 16'sd150))
                  : 16'($urandom);
      #1;
      d = int'(u) - int'(theta);
      if (d < 0) d = -d;
      exp_h = (d / 8 < 16) ? 255 - 16 * (d / 8) : 0;
      checks++;
      if (h != 8'(exp_h)) begin
        failures++;
        if (failures < 5) $display("FAIL u=%0d th=%0d h=%0d exp=%0d", u, theta, h, exp_h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
