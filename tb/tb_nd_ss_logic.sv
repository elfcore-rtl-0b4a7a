// tb_nd_ss_logic: random neuron states through one time step, compared with a
// reference computed in the testbench (floor rounding when the random bits
// are zero, and the +1 LSB bound otherwise).
module tb_nd_ss_logic;
  import elf_pkg::*;
  int checks = 0, failures = 0;
  neu_t st, nx;
  logic [7:0] beta;
  logic [15:0] theta, rnd;
  logic last_ts, spike;
  logic [7:0] hpc, hcc;
  int n_spk = 0;
  nd_ss_logic dut (.st, .beta, .theta, .last_ts, .rnd, .st_nxt(nx), .spike, .hpc_inc(hpc), .hcc_inc(hcc));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int eb, ub, en, un, lo_e, lo_u, h, d, g;
      bit s;
      st.u = 16'($signed(16'($urandom_range(0, 400))) - 16'sd150);
      st.e_cur = 8'($urandom); st.e_old = 8'($urandom); st.e_last = 8'($urandom); st.g = 16'($urandom);
      beta = 8'($urandom_range(128, 250)); theta = 16'($urandom_range(20, 200));
      last_ts = 1'($urandom); rnd = (t < 1500) ? 16'd0 : 16'($urandom);
      #1;
      s  = int'(st.u) > int'(theta);
      eb = (int'(st.e_cur) * int'(beta)) >>> 8;    // floor
      ub = (int'(st.u) * int'(beta)) >>> 8;
      en = s ? eb + 16 : eb;
      un = s ? ub - int'(theta) : ub;
      if (en > 255) en = 255;
      n_spk += s;
      chk(spike == s, "spike");
      if (rnd == 0) begin
        chk(int'(nx.e_cur) == en, $sformatf("e_cur %0d vs %0d", nx.e_cur, en));
        chk(int'(nx.u) == un, $sformatf("u %0d vs %0d", nx.u, un));
      end else begin
        chk(int'(nx.e_cur) - en inside {0, 1} || en == 255, "e_cur stoc");
        chk(int'(nx.u) - un inside {0, 1}, "u stoc");
      end
      chk(nx.e_old == st.e_cur, "e_old");
      chk(nx.e_last == (last_ts ? nx.e_cur : st.e_last), "e_last");
      chk(hpc == (s ? st.e_cur : 8'd0), "hpc");
      chk(hcc == (s ? st.e_last : 8'd0), "hcc");
      d = int'(nx.u) - int'(theta); if (d < 0) d = -d;
      h = (d / 8 < 16) ? 255 - 16 * (d / 8) : 0;
      g = ((int'(st.e_cur) - int'(st.e_last)) * h) >>> 8;
      chk(int'(nx.g) == g, $sformatf("g %0d vs %0d", nx.g, g));
    end
    chk(n_spk > 100, "spikes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
