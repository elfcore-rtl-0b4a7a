// tb_wu_gating: exhaustive-ish random check of the WU enable rule
// en = ossl_en & (i_bar > i_thr) & (H_PC < C_PC*i_bar | hcc > C_CC*i_bar).
module tb_wu_gating;
  import elf_pkg::*;
  int checks = 0, failures = 0, n_en = 0;
  logic ossl_en, en, ia_ok, pc_ok, cc_ok;
  logic [15:0] i_bar, i_thr;
  logic [H_W-1:0] hpc, hcc, thr_pc, thr_cc;
  wu_gating dut (.*);
  initial begin
    for (int t = 0; t < 4000; t++) begin
      bit e;
      ossl_en = ($urandom_range(0, 9) != 0);
      i_bar = 16'($urandom_range(0, 100)); i_thr = 16'($urandom_range(0, 100));
      hpc = H_W'($urandom_range(0, 1000)); hcc = H_W'($urandom_range(0, 1000));
      thr_pc = H_W'($urandom_range(0, 1000)); thr_cc = H_W'($urandom_range(0, 1000));
      #1;
      e = ossl_en && (i_bar > i_thr) && ((hpc < thr_pc) || (hcc > thr_cc));
      n_en += e;
      checks++;
      if (en !== e) begin failures++; if (failures < 5) $display("FAIL t=%0d", t); end
    end
    checks++; if (n_en < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
