// tb_neuron_sram: writes random neuron words and reads them back on all three
// ports, one cycle after the write.
module tb_neuron_sram;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] ra, rb, rc, wa;
  neu_t da, db, dc, wd;
  logic we;
  neu_t ref_m [128];
  neuron_sram #(.DEPTH(128)) dut (.clk, .ra_addr(ra), .ra_data(da), .rb_addr(rb), .rb_data(db),
    .rc_addr(rc), .rc_data(dc), .we, .wa, .wd);
  initial begin
    we = 0;
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); we = 1; wa = 7'(a); wd = neu_t'({$urandom, $urandom}); ref_m[a] = wd;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      if (t % 4 == 0) begin we = 1; wa = 7'($urandom); wd = neu_t'({$urandom, $urandom}); end
      else we = 0;
      ra = 7'($urandom); rb = 7'($urandom); rc = 7'($urandom);
      #1;
      checks += 3;
      if (da != ref_m[ra]) failures++;
      if (db != ref_m[rb]) failures++;
      if (dc != ref_m[rc]) failures++;
      @(posedge clk); if (we) ref_m[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
