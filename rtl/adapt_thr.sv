// adapt_thr: input activity (IA) and adaptive similarity-score thresholds.
//
// Once per time step (`update`), the number of spikes in the incoming 512-bit
// spike vector is counted and folded into a running average,
//   i_bar <- i_bar + (count - i_bar) >>> ia_shift,
// which stands for the input activity i_bar^t of the gating rule. From it the
// layer-specific adaptive thresholds C_PC^{t,l} = C_PC^l * i_bar and
// C_CC^{t,l} = C_CC^l * i_bar (returned without the minus sign) are formed for
// both hidden layers; the gains are fixed-point /16. The averaging rule and the
// number formats are this design's choices. `init` resets i_bar to zero.
// Registered outputs, one cycle after `update`.
module adapt_thr
  import elf_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic             update,
  input  logic [D-1:0]     spk_in,
  input  logic [3:0]       ia_shift,
  input  logic [7:0]       cpc1, cpc2, ccc1, ccc2,
  output logic [15:0]      count,     // spikes in the last vector
  output logic [15:0]      i_bar,
  output logic [H_W-1:0]   thr_pc1, thr_pc2, thr_cc1, thr_cc2
);
  logic [15:0] cnt;
  always_comb begin
    cnt = '0;
    for (int i = 0; i < D; i++) cnt = cnt + 16'(spk_in[i]);
  end

  logic signed [17:0] delta;
  assign delta = $signed({2'b00, cnt}) - $signed({2'b00, i_bar});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_bar <= '0; count <= '0;
    end else if (init) begin
      i_bar <= '0; count <= '0;
    end else if (update) begin
      count <= cnt;
      i_bar <= 16'($signed({2'b00, i_bar}) + (delta >>> ia_shift));
    end
  end

  assign thr_pc1 = H_W'((32'(i_bar) * 32'(cpc1)) >> 4);
  assign thr_pc2 = H_W'((32'(i_bar) * 32'(cpc2)) >> 4);
  assign thr_cc1 = H_W'((32'(i_bar) * 32'(ccc1)) >> 4);
  assign thr_cc2 = H_W'((32'(i_bar) * 32'(ccc2)) >> 4);
endmodule
