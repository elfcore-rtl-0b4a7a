// param_bank: neural-network parameter bank.
//
// Sixteen-bit registers written and read through the SPI port hold every
// run-time setting of the network and its learning engines; they are offered
// to the core as one packed configuration struct (elf_pkg::cfg_t). Writing
// bit 15 of register 0 additionally issues a one-cycle `init` command
// (weight and state initialisation). Register map (this design's choice):
//   0 ctrl   : [0] ossl_en [1] dsst_en [2] sl_en [4:3] n_hidden [5] pred_mode
//   1 n_act    2 dsst_x    3 prune_k    4 i_thr     5 ia_shift
//   6 beta_in  7 beta1     8 beta2      9 beta_out
//  10 theta1  11 theta2   12 theta_out 13 cpc1     14 cpc2    15 ccc1  16 ccc2
//  17 lr_ossl 18 lr_sl    19 w_shift   20 seed
// Reset values give a working two-hidden-layer configuration with all
// learning enabled.
module param_bank
  import elf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [6:0]  addr,
  input  logic [15:0] wr_data,
  input  logic [6:0]  rd_addr,
  output logic [15:0] rd_data,
  output cfg_t        cfg,
  output logic        init
);
  localparam int unsigned NREG = 21;
  logic [15:0] r [NREG];

  function automatic logic [15:0] rst_val(input int a);
    case (a)
      0:  return 16'h0017;   // ossl, dsst, sl on, two hidden layers
      1:  return 16'd16;     // n_act = N_MAX
      2:  return 16'd4;      // DSST after more than 4 WU time steps
      3:  return 16'd8;      // prune 8 per pass
      4:  return 16'd0;      // i_thr
      5:  return 16'd2;      // ia_shift
      6, 7, 8, 9: return 16'd224;  // beta = 0.875
      10, 11, 12: return 16'd64;   // thresholds
      13, 14: return 16'd16;       // C_PC = 1.0
      15, 16: return 16'd16;       // C_CC = 1.0
      17: return 16'd6;
      18: return 16'd6;
      19: return 16'd0;
      20: return 16'hACE1;
      default: return 16'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NREG; a++) r[a] <= rst_val(a);
      init <= 1'b0;
    end else begin
      init <= wr_en && addr == 7'd0 && wr_data[15];
      if (wr_en && addr < 7'(NREG)) r[addr] <= wr_data;
    end
  end

  assign rd_data = (rd_addr < 7'(NREG)) ? r[rd_addr] : 16'd0;

  always_comb begin
    cfg.ossl_en   = r[0][0];
    cfg.dsst_en   = r[0][1];
    cfg.sl_en     = r[0][2];
    cfg.n_hidden  = r[0][4:3];
    cfg.pred_mode = r[0][5];
    cfg.n_act     = (r[1][4:0] == 0) ? 5'd1 : (r[1] > 16'(N_MAX)) ? 5'(N_MAX) : r[1][4:0];
    cfg.dsst_x    = r[2];
    cfg.prune_k   = r[3][7:0];
    cfg.i_thr     = r[4];
    cfg.ia_shift  = r[5][3:0];
    cfg.beta_in   = r[6][7:0];
    cfg.beta1     = r[7][7:0];
    cfg.beta2     = r[8][7:0];
    cfg.beta_out  = r[9][7:0];
    cfg.theta1    = r[10];
    cfg.theta2    = r[11];
    cfg.theta_out = r[12];
    cfg.cpc1      = r[13][7:0];
    cfg.cpc2      = r[14][7:0];
    cfg.ccc1      = r[15][7:0];
    cfg.ccc2      = r[16][7:0];
    cfg.lr_ossl   = r[17][3:0];
    cfg.lr_sl     = r[18][3:0];
    cfg.w_shift   = r[19][2:0];
    cfg.seed      = r[20];
  end
endmodule
