// tb_st_buffer: random spikes with delays 0..3 over many time steps; each
// closed time step must present exactly the spikes scheduled for it.
module tb_st_buffer;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pkt_valid = 0, pkt_ready, ts_valid, ts_ready = 0, ts_last, ts_lbl_v;
  pkt_t pkt;
  logic [D-1:0] vec;
  logic [3:0] ts_lbl;
  logic [D-1:0] sched [64];
  st_buffer dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic send(input pkt_t p);
    @(negedge clk); pkt = p; pkt_valid = 1;
    @(posedge clk); while (!pkt_ready) @(posedge clk);
    @(negedge clk); pkt_valid = 0;
  endtask
  initial begin
    pkt = '0;
    for (int t = 0; t < 64; t++) sched[t] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int n;
      n = $urandom_range(0, 12);
      for (int s = 0; s < n; s++) begin
        pkt_t p; p = '0;
        p.spk_v = 1; p.addr = 9'($urandom); p.delay = 2'($urandom);
        sched[t + p.delay][p.addr] = 1'b1;
        send(p);
      end
      begin
        pkt_t p; p = '0; p.eot = 1; p.last_ts = (t % 5 == 4); p.lbl_v = 1; p.lbl = 4'(t);
        send(p);
        while (!ts_valid) @(posedge clk);
        #1;
        chk(vec == sched[t], $sformatf("TS %0d vector", t));
        chk(ts_last == (t % 5 == 4) && ts_lbl == 4'(t) && ts_lbl_v, "TS fields");
        @(negedge clk); ts_ready = 1; @(negedge clk); ts_ready = 0;
        chk(!ts_valid, "vector taken");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
