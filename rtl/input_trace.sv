// input_trace: presynaptic traces of the 512 input channels.
//
// The OSSL rule of the first hidden layer needs the trace e_i^{t,0} of every
// input channel, e^t = beta_in * e^{t-1} + S^t, with the same fixed-point
// format and stochastic rounding as the neuron traces. Where the chip keeps
// these traces is not published; here they sit in four array banks of 128
// entries swept in parallel during the neuron-dynamics phase (128 cycles per
// time step, same as a hidden layer). `init` clears them in the same time.
// Trace reads (addr -> data) are combinational.
module input_trace
  import elf_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      beta,
  input  logic [15:0]     seed,
  input  logic            init_start,
  input  logic            nd_start,
  output logic            done,        // one-cycle pulse after init or nd
  input  logic [D-1:0]    spk_in,      // input spike vector of this TS
  input  logic [8:0]      rd_addr,
  output logic [TR_W-1:0] rd_data
);
  localparam int unsigned MW = $clog2(M);
  logic [TR_W-1:0] mem [G][M];
  logic [MW:0]     j;
  logic            busy, clr;
  logic [15:0]     rnd;

  assign rd_data = mem[rd_addr[8:MW]][rd_addr[MW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j <= '0; busy <= 1'b0; clr <= 1'b0; done <= 1'b0; rnd <= 16'h1D0F;
    end else begin
      done <= 1'b0;
      rnd  <= lfsr_next(rnd);
      if (!busy && (init_start || nd_start)) begin
        busy <= 1'b1; clr <= init_start; j <= '0;
        if (init_start) rnd <= seed ^ 16'h5A5A;
      end else if (busy) begin
        j <= j + 1'b1;
        if (j == (MW+1)'(M - 1)) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      for (int q = 0; q < G; q++) begin
        logic signed [31:0] eb;
        eb = stoc_shr($signed({24'd0, mem[q][j[MW-1:0]]}) * $signed({24'd0, beta}), 5'd8,
                      rnd ^ 16'(q * 16'h3C3));
        if (spk_in[q * M + int'(j[MW-1:0])]) eb = eb + (32'sd1 <<< TR_FRAC);
        mem[q][j[MW-1:0]] <= clr ? '0 : sat_tr(eb);
      end
    end
  end
endmodule
