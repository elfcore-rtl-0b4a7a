// elf_pkg: shared constants, types and arithmetic helpers of the ElfCore
// spiking neural network processor.
//
// Network geometry follows the chip: (512)-512-512-16, i.e. 512 inputs, two
// hidden layers of 512 neurons and 16 output neurons. Each hidden layer is
// split into G = 4 N:M groups of M = 128 post-neurons, one processing element
// (PE) per group. Weights are 8-bit, indices 9-bit. N_MAX, the number of
// weight&index slots each presynaptic neuron owns per group, is this design's
// choice (16, i.e. 87.5 % minimum sparsity, matching the minimum sparsity the
// chip reports for four groups in a 4096x128b SRAM space). Trace and membrane
// widths, fixed-point formats and the 30-bit packet layout are also choices of
// this design.
package elf_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned D       = 512;   // neurons per layer (inputs too)
  localparam int unsigned G       = 4;     // N:M groups = PEs per hidden layer
  localparam int unsigned M       = D / G; // group size (128)
  localparam int unsigned N_MAX   = 16;    // slots per pre-neuron per group
  localparam int unsigned N_OUT   = 16;    // output neurons
  localparam int unsigned W_W     = 8;     // weight width
  localparam int unsigned IDX_W   = 9;     // index width
  localparam int unsigned U_W     = 16;    // membrane potential width
  localparam int unsigned TR_W    = 8;     // trace width (unsigned)
  localparam int unsigned TR_FRAC = 4;     // trace fractional bits: 1.0 = 16
  localparam int unsigned GR_W    = 16;    // post-gradient width (signed)
  localparam int unsigned H_W     = 24;    // similarity-score accumulator width
  localparam int unsigned PKT_W   = 30;    // deserializer packet width
  localparam int unsigned SLOTS   = 4;     // spatiotemporal buffer depth

  // ---------------- types ----------------
  typedef struct packed {
    logic signed [W_W-1:0] w;
    logic [IDX_W-1:0]      idx;
  } syn_t;

  // one neuron's state word in a neuron SRAM
  typedef struct packed {
    logic signed [U_W-1:0]  u;      // membrane potential
    logic [TR_W-1:0]        e_cur;  // trace e^t  (used by WU as presynaptic trace)
    logic [TR_W-1:0]        e_old;  // trace e^{t-1} (PC)
    logic [TR_W-1:0]        e_last; // trace at last TS of previous sample (CC)
    logic signed [GR_W-1:0] g;      // post-gradient h*(e^{t-1}-e_prev)
  } neu_t;

  // 30-bit input/output packet (layout is this design's choice)
  typedef struct packed {
    logic [10:0]      rsvd;     // [29:19]
    logic             lbl_v;    // [18] label valid
    logic [3:0]       lbl;      // [17:14] class label for the SL engine
    logic             last_ts;  // [13] this TS is the last of a sample
    logic             eot;      // [12] end of time step
    logic             spk_v;    // [11] packet carries a spike
    logic [1:0]       delay;    // [10:9] axonal delay in TSs
    logic [IDX_W-1:0] addr;     // [8:0] input neuron address
  } pkt_t;

  // configuration held by the parameter bank
  typedef struct packed {
    logic        ossl_en;
    logic        dsst_en;
    logic        sl_en;
    logic [1:0]  n_hidden;    // 0/1/2 hidden layers in use (bypass)
    logic        pred_mode;   // 0: max spike count, 1: max membrane
    logic [4:0]  n_act;       // active slots per group (1..N_MAX)
    logic [15:0] dsst_x;      // DSST after more than X WU time steps
    logic [7:0]  prune_k;     // k synapses pruned per DSST
    logic [15:0] i_thr;       // global input-activity threshold
    logic [3:0]  ia_shift;    // averaging of input activity
    logic [7:0]  beta_in, beta1, beta2, beta_out;  // decay, /256
    logic [15:0] theta1, theta2, theta_out;
    logic [7:0]  cpc1, cpc2, ccc1, ccc2;             // SS threshold gains, /16
    logic [3:0]  lr_ossl, lr_sl;                     // right shifts of dW
    logic [2:0]  w_shift;                            // SI left shift of w
    logic [15:0] seed;
  } cfg_t;

  // ---------------- helpers ----------------
  // stochastic rounding of x / 2^sh: add sh random bits below the cut.
  function automatic logic signed [31:0] stoc_shr(input logic signed [31:0] x,
                                                  input logic [4:0] sh,
                                                  input logic [15:0] rnd);
    logic signed [31:0] mask, r;
    mask = (32'sd1 <<< sh) - 32'sd1;
    r    = $signed({16'd0, rnd}) & mask;
    return (x + r) >>> sh;
  endfunction

  function automatic logic signed [U_W-1:0] sat_u(input logic signed [31:0] x);
    if (x > 32'sd32767)       return 16'sh7fff;
    else if (x < -32'sd32768) return 16'sh8000;
    else                      return x[U_W-1:0];
  endfunction

  function automatic logic signed [W_W-1:0] sat_w(input logic signed [31:0] x);
    if (x > 32'sd127)       return 8'sh7f;
    else if (x < -32'sd128) return 8'sh80;
    else                    return x[W_W-1:0];
  endfunction

  function automatic logic [TR_W-1:0] sat_tr(input logic signed [31:0] x);
    if (x > 32'sd255)   return 8'hff;
    else if (x < 32'sd0) return 8'h00;
    else                 return x[TR_W-1:0];
  endfunction

  // 16-bit Galois LFSR step (x^16+x^14+x^13+x^11+1)
  function automatic logic [15:0] lfsr_next(input logic [15:0] s);
    logic [15:0] n;
    n = {1'b0, s[15:1]};
    if (s[0]) n = n ^ 16'hB400;
    if (n == 16'd0) n = 16'hACE1;
    return n;
  endfunction

endpackage
