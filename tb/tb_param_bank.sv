// tb_param_bank: reset values, register writes reflected in the read port and
// in the configuration struct, n_act clamping, and the init pulse.
module tb_param_bank;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, init;
  logic [6:0] addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;
  cfg_t cfg;
  param_bank dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic wr(input int a, input int d);
    @(negedge clk); wr_en = 1; addr = 7'(a); wr_data = 16'(d); @(negedge clk); wr_en = 0;
  endtask
  // register map: the configuration field each register drives, and the
  // value it must take for register value d
  function automatic int field(input int a);
    case (a)
      0: return {cfg.pred_mode, cfg.n_hidden, cfg.sl_en, cfg.dsst_en, cfg.ossl_en};
      1: return cfg.n_act;      2: return cfg.dsst_x;    3: return cfg.prune_k;
      4: return cfg.i_thr;      5: return cfg.ia_shift;  6: return cfg.beta_in;
      7: return cfg.beta1;      8: return cfg.beta2;     9: return cfg.beta_out;
      10: return cfg.theta1;    11: return cfg.theta2;   12: return cfg.theta_out;
      13: return cfg.cpc1;      14: return cfg.cpc2;     15: return cfg.ccc1;
      16: return cfg.ccc2;      17: return cfg.lr_ossl;  18: return cfg.lr_sl;
      19: return cfg.w_shift;   default: return cfg.seed;
    endcase
  endfunction
  function automatic int exp_field(input int a, input int d);
    case (a)
      0: return d & 'h3f;
      1: return (d % 32 == 0) ? 1 : (d > N_MAX ? N_MAX : d % 32);
      3, 6, 7, 8, 9, 13, 14, 15, 16: return d & 'hff;
      5, 17, 18: return d & 'hf;
      19: return d & 'h7;
      default: return d;
    endcase
  endfunction
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    #1;
    chk(cfg.ossl_en && cfg.dsst_en && cfg.sl_en && cfg.n_hidden == 2 && cfg.n_act == 16, "reset config");
    chk(cfg.beta1 == 224 && cfg.theta2 == 64, "reset values");
    wr(1, 40); chk(cfg.n_act == 16, "n_act clamped to N_MAX");
    wr(1, 5);  chk(cfg.n_act == 5, "n_act");
    wr(0, 16'h0009); chk(cfg.ossl_en && !cfg.dsst_en && !cfg.sl_en && cfg.n_hidden == 1, "ctrl fields");
    wr(11, 1234); chk(cfg.theta2 == 1234, "theta2");
    wr(20, 16'hBEEF); chk(cfg.seed == 16'hBEEF, "seed");
    for (int a = 0; a < 21; a++) begin
      int d; d = $urandom_range(0, 65535);
      if (a == 0) d = d & 16'h7fff;
      wr(a, d); rd_addr = 7'(a); #1; chk(rd_data == 16'(d), $sformatf("readback %0d", a));
      chk(field(a) == exp_field(a, d), $sformatf("register %0d reaches its field", a));
    end
    rd_addr = 7'd100; #1; chk(rd_data == 0, "unmapped reads 0");
    begin
      bit seen; seen = 0;
      @(negedge clk); wr_en = 1; addr = 0; wr_data = 16'h8017;
      @(posedge clk); #1; seen = init; @(negedge clk); wr_en = 0;
      @(posedge clk); #1;
      chk(seen && !init, "init is a one-cycle pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
