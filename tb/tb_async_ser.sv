// tb_async_ser: random packets pushed as fast as pkt_ready allows; a
// behavioural two-phase receiver with random response delay reassembles the
// bit stream (LSB first) and must see every packet in order.
module tb_async_ser;
  import elf_pkg::*;
  int checks = 0, failures = 0, full = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pkt_valid = 0, pkt_ready, req_out, data_out, ack_in = 0;
  logic [PKT_W-1:0] pkt;
  logic [PKT_W-1:0] sent [$];
  async_ser dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 50; p++) begin
      @(negedge clk);
      pkt = PKT_W'({$urandom, $urandom}); pkt_valid = 1;
      @(posedge clk); while (!pkt_ready) begin full++; @(posedge clk); end
      sent.push_back(pkt);
      @(negedge clk); pkt_valid = 0;
    end
  end
  int got = 0;
  initial begin
    logic [PKT_W-1:0] acc;
    logic r0;
    wait (rst_n); @(posedge clk);
    r0 = req_out;
    while (got < 50) begin
      for (int b = 0; b < PKT_W; b++) begin
        while (req_out == r0) @(posedge clk);
        r0 = req_out;
        acc[b] = data_out;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        ack_in = ~ack_in;
      end
      chk(sent.size() > 0 && acc == sent[0], $sformatf("packet %0d got %h exp %h", got, acc, sent[0]));
      if (sent.size() > 0) void'(sent.pop_front());
      got++;
    end
    chk(full > 0, "ring full back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
