// tb_spi_slave: SPI mode-0 master model; writes must appear on the register
// write port with the right address and data, and reads must shift the value
// presented for the addressed register out on MISO, MSB first.
module tb_spi_slave;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sck = 0, cs_n = 1, mosi = 0, miso, wr_en;
  logic [6:0] addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  logic [15:0] regs [128];
  assign rd_data = regs[rd_addr];
  spi_slave dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic xfer(input logic [23:0] f, output logic [15:0] rx);
    cs_n = 0; repeat (4) @(posedge clk);
    for (int b = 23; b >= 0; b--) begin
      mosi = f[b]; repeat (4) @(posedge clk);
      sck = 1; if (b < 16) rx[b] = miso; repeat (4) @(posedge clk);
      sck = 0;
    end
    repeat (4) @(posedge clk); cs_n = 1; repeat (4) @(posedge clk);
  endtask
  logic seen; logic [6:0] sa; logic [15:0] sd;
  always @(posedge clk) if (wr_en) begin seen <= 1; sa <= addr; sd <= wr_data; end
  initial begin
    logic [15:0] rx;
    for (int a = 0; a < 128; a++) regs[a] = 16'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [6:0] a; logic [15:0] d;
      a = 7'($urandom); d = 16'($urandom);
      seen = 0;
      xfer({1'b1, a, d}, rx);
      chk(seen && sa == a && sd == d, $sformatf("write a=%0d", a));
      a = 7'($urandom);
      seen = 0;
      xfer({1'b0, a, 16'h0}, rx);
      chk(!seen, "read must not write");
      chk(rx == regs[a], $sformatf("read a=%0d got %h exp %h", a, rx, regs[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
