// ctrl_fsm: time-step (TS) sequencer of the core.
//
// The core sleeps (clk_en low, the chip gates its clock) until the input
// buffer closes a time step. One TS then runs:
//   ND    : neuron dynamics and similarity scores in every layer in use, the
//           input traces and the input-activity average, all in parallel;
//           each hidden layer decides its own WU gating from the result.
//   SI/WU : spike integration and (gated) weight update in every layer in
//           use, in parallel; a hidden layer whose WU ran adds one to its WU
//           counter.
//   DSST  : for each hidden layer whose WU counter exceeds X (dsst_x), and
//           if DSST is enabled, prune/regrow, then clear the counter.
//   END   : hand the output spikes (and prediction) to the serializer.
// `init` runs the initialisation of all units first. Units that a bypass
// leaves unused (n_hidden < 2 or < 1) are neither started nor waited for.
// Each phase starts with one-cycle start pulses and waits for each started
// unit's one-cycle done pulse. The phase order follows the chip's FSM; that
// SI/WU of all layers run together with one TS of delay between layers
// follows its pipelined organisation.
module ctrl_fsm (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init_req,
  input  logic        ts_valid,
  output logic        ts_ready,       // takes the input vector (one cycle)
  input  logic [1:0]  n_hidden,
  input  logic        dsst_en,
  input  logic [15:0] dsst_x,
  input  logic [1:0]  wu_en,          // per hidden layer, valid after ND
  // unit 0: input traces, 1: hidden 1, 2: hidden 2, 3: output layer
  output logic [3:0]  init_start,
  output logic [3:0]  nd_start,
  output logic [3:0]  siwu_start,
  output logic [1:0]  dsst_start,     // hidden 1, hidden 2
  input  logic [3:0]  init_done,
  input  logic [3:0]  nd_done,
  input  logic [3:0]  siwu_done,
  input  logic [1:0]  dsst_done,
  output logic        ia_update,      // adapt_thr takes the new vector
  output logic        out_valid,      // output packet for the serializer
  input  logic        out_ready,
  output logic        clk_en,
  output logic        busy_init,
  output logic [15:0] wu_cnt1,
  output logic [15:0] wu_cnt2
);
  typedef enum logic [2:0] {F_IDLE, F_INIT, F_ND, F_GATE, F_SIWU, F_DSST, F_END} fstate_t;
  fstate_t st;
  logic [3:0] pend, used;
  logic [1:0] dsst_sel;

  assign used      = {1'b1, n_hidden >= 2'd2, n_hidden != 2'd0, 1'b1};
  assign clk_en    = (st != F_IDLE);
  assign busy_init = (st == F_INIT);
  assign ts_ready  = (st == F_IDLE) && !init_req;
  assign out_valid = (st == F_END);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; pend <= '0; dsst_sel <= '0;
      init_start <= '0; nd_start <= '0; siwu_start <= '0; dsst_start <= '0;
      ia_update <= 1'b0; wu_cnt1 <= '0; wu_cnt2 <= '0;
    end else begin
      init_start <= '0; nd_start <= '0; siwu_start <= '0; dsst_start <= '0;
      ia_update  <= 1'b0;
      unique case (st)
        F_IDLE: begin
          if (init_req) begin
            init_start <= 4'b1111; pend <= 4'b1111; st <= F_INIT;
            wu_cnt1 <= '0; wu_cnt2 <= '0;
          end else if (ts_valid) begin
            nd_start <= used; pend <= used; ia_update <= 1'b1; st <= F_ND;
          end
        end
        F_INIT: begin
          if ((pend & ~init_done) == '0) st <= F_IDLE;
          pend <= pend & ~init_done;
        end
        F_ND: begin
          if ((pend & ~nd_done) == '0) st <= F_GATE;
          pend <= pend & ~nd_done;
        end
        F_GATE: begin          // layers register their WU enable here
          siwu_start <= used; pend <= used; st <= F_SIWU;
        end
        F_SIWU: begin
          if ((pend & ~siwu_done) == '0) begin
            logic [15:0] c1, c2;
            logic [1:0]  sel;
            c1 = wu_cnt1 + 16'(used[1] && wu_en[0]);
            c2 = wu_cnt2 + 16'(used[2] && wu_en[1]);
            sel = {dsst_en && used[2] && c2 > dsst_x, dsst_en && used[1] && c1 > dsst_x};
            wu_cnt1 <= sel[0] ? '0 : c1;
            wu_cnt2 <= sel[1] ? '0 : c2;
            dsst_sel <= sel;
            if (sel != 2'b00) begin
              dsst_start <= sel; st <= F_DSST;
            end else st <= F_END;
          end
          pend <= pend & ~siwu_done;
        end
        F_DSST: begin
          if ((dsst_sel & ~dsst_done) == '0) st <= F_END;
          dsst_sel <= dsst_sel & ~dsst_done;
        end
        F_END: if (out_ready) st <= F_IDLE;
        default: st <= F_IDLE;
      endcase
    end
  end
endmodule
