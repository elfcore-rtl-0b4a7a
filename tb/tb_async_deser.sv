// tb_async_deser: a behavioural two-phase sender pushes random 30-bit packets
// bit-serially (LSB first) while the receiving side sometimes stalls; every
// packet must come out whole and in order, and each bit must be acknowledged.
module tb_async_deser;
  import elf_pkg::*;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_in = 0, data_in = 0, ack_out, pkt_valid, pkt_ready = 1;
  logic [PKT_W-1:0] pkt;
  logic [PKT_W-1:0] sent [$];
  async_deser dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  // sender
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      logic [PKT_W-1:0] v;
      v = PKT_W'({$urandom, $urandom});
      sent.push_back(v);
      for (int b = 0; b < PKT_W; b++) begin
        logic a0;
        a0 = ack_out;
        #3; data_in = v[b]; #2; req_in = ~req_in;
        while (ack_out == a0) @(posedge clk);
      end
    end
  end
  // receiver with random stalls
  int got = 0;
  always @(posedge clk) begin
    if (pkt_valid && pkt_ready) begin
      chk(sent.size() > 0 && pkt == sent[0], $sformatf("packet %0d", got));
      if (sent.size() > 0) void'(sent.pop_front());
      got++;
    end
    pkt_ready <= ($urandom_range(0, 3) != 0);
    if (pkt_valid && !pkt_ready) stalls++;
  end
  initial begin
    wait (got == 60);
    chk(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
