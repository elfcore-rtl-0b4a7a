// tb_topk_heap: streams of random keys (with repeats) of several lengths and
// k values; the kept multiset of keys must equal the k largest of the stream,
// the heap must satisfy the min-heap order, payloads must stay with their
// keys, and the stream must finish within (len * (log2(k)+3)) cycles.
module tb_topk_heap;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int K = 16;
  logic start, in_valid, in_ready, flush, done;
  logic [4:0] k, count;
  logic signed [16:0] in_key;
  logic [15:0] in_pay;
  logic signed [16:0] hk [K];
  logic [15:0] hp [K];
  topk_heap #(.K_MAX(K), .KEY_W(17), .PAY_W(16)) dut (.clk, .rst_n, .start, .k, .in_valid, .in_ready,
    .in_key, .in_pay, .flush, .done, .count, .hp_key(hk), .hp_pay(hp));

  int len, kk, cyc;
  int keys[$], sorted[$], got[$];

  // descending sort written out (independent of queue methods)
  task automatic dsort(ref int q[$]);
    for (int i = 1; i < q.size(); i++)
      for (int j = i; j > 0 && q[j] > q[j-1]; j--) begin int t; t = q[j]; q[j] = q[j-1]; q[j-1] = t; end
  endtask

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    start = 0; in_valid = 0; flush = 0; k = 0; in_key = 0; in_pay = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      keys.delete(); got.delete(); sorted.delete();
      len = $urandom_range(1, 300); kk = $urandom_range(1, K);
      @(negedge clk); start = 1; k = 5'(kk); @(negedge clk); start = 0;
      for (int i = 0; i < len; i++) keys.push_back((trial % 3 == 0) ? int'($urandom_range(0, 20)) : int'($urandom_range(0, 60000)) - 30000);
      cyc = 0;
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_key = 17'(keys[i]); in_pay = 16'(i);
        do begin @(posedge clk); cyc++; end while (!in_ready);
        #1;
        // accepted at the edge where in_ready was high
        @(negedge clk);
      end
      in_valid = 0; flush = 1;
      while (!done) begin @(posedge clk); cyc++; #1; end
      @(negedge clk); flush = 0;
      sorted = keys; dsort(sorted);
      for (int i = 0; i < int'(count); i++) got.push_back(int'(hk[i]));
      dsort(got);
      chk(int'(count) == ((len < kk) ? len : kk), "count");
      for (int i = 0; i < got.size(); i++) chk(got[i] == sorted[i], $sformatf("trial %0d key %0d: %0d vs %0d", trial, i, got[i], sorted[i]));
      for (int i = 0; i < int'(count); i++) chk(keys[hp[i]] == int'(hk[i]), "payload");
      if (len >= kk)
        for (int i = 1; i < int'(count); i++) chk(hk[(i - 1) / 2] <= hk[i], "heap order");
      chk(cyc <= 2 * len * ($clog2(K) + 3) + 10, $sformatf("cycles %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
