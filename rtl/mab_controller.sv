// mab_controller: sequencer of the UCB_ISAC beam alignment (Algorithm 2 with
// the T_inf change detection of Algorithm 3).
//
// Phases (phase output, isac_pkg::phase_e):
//  * PH_RADAR: start the radar sweep (wf_start), wait for its end, start the
//    RSP (rsp_start) and wait for the candidate set beta / kt. An empty set
//    (no mobile target seen) repeats the radar search. Otherwise the bandit
//    statistics are cleared (Algorithm 2, lines 3-5) and the slot count t
//    restarts at 1.
//  * PH_RR: one data slot on each candidate beam beta[q], q = 0 .. kt-1
//    (lines 6-7).
//  * PH_REGRET: per slot, ask the UCB engine for Q_t = argmax UCB with the
//    slot index t (lines 9-10); the beam is beta[Q_t]. The first regret pick
//    is taken as the optimal beam k-bar; its range and Doppler are sent to the
//    T_inf estimator (Algorithm 3).
// Every slot: slot_start pulses with beam (= I_t); the communication side
// answers slot_done with ack and the normalized SNR reported over the uplink.
// The reward is snr when ack = 1 and 0 otherwise (no feedback, e.g. the user
// missed the frame); it updates the UCB statistics of Q_t (line 14).
// Restart (back to PH_RADAR): when t exceeds T_inf, or when DROP_N consecutive
// slots on k-bar return a reward below SNR_LOW (the paper restarts on the
// lower of the two estimates: T_inf or a low SNR on the optimal beam).
// Event counters (16-bit, wrap): radar searches, empty searches, round-robin
// slots, regret slots, T_inf restarts, SNR restarts, slots without ack.
//
// Timing: slot_start follows slot_done after 2 cycles in PH_RR, and after the
// UCB engine latency plus 3 cycles in PH_REGRET (plus the T_inf estimator
// latency on the first regret pick). ucb_upd is a one-cycle pulse one cycle
// after slot_done; ucb_req is never issued in the same cycle as ucb_upd.
// Follows the paper: phase order, round-robin, UCB choice, reward = SNR,
// T_inf / low-SNR restart. Own choices: the empty-set retry, the no-ack rule,
// SNR_LOW, DROP_N, and taking the first regret pick as k-bar.
module mab_controller
  import isac_pkg::*;
#(
  parameter int K      = 32,
  parameter int SNR_LOW = 16384,   // Q8.16: 0.25 of the normalized SNR
  parameter int DROP_N  = 2,
  localparam int KW    = $clog2(K),
  localparam int CW    = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          go,            // level: run the alignment loop
  output phase_e        phase,
  // radar sweep and RSP
  output logic          wf_start,
  input  logic          wf_done,
  output logic          rsp_start,
  input  logic          rsp_done,
  input  logic [CW-1:0] rsp_kt,
  input  logic [KW-1:0] rsp_beta [K],
  output logic [KW-1:0] q_beam,
  // UCB engine
  output logic          ucb_clear,
  output logic [CW-1:0] ucb_kt,
  output logic          ucb_req,
  output logic [15:0]   ucb_t,
  input  logic          ucb_sel_valid,
  input  logic [KW-1:0] ucb_sel_arm,
  output logic          ucb_upd,
  output logic [KW-1:0] ucb_upd_arm,
  output logic [23:0]   ucb_upd_reward,
  // T_inf estimator (beam and range/Doppler come through q_beam)
  output logic          tinf_start,
  input  logic          tinf_done,
  input  logic [15:0]   tinf,
  // data slots
  output logic          slot_start,
  output logic [KW-1:0] beam,
  input  logic          slot_done,
  input  logic          ack,
  input  logic [23:0]   snr,
  // status
  output logic [15:0]   tinf_q,
  output logic [15:0]   cnt_search,
  output logic [15:0]   cnt_empty,
  output logic [15:0]   cnt_rr,
  output logic [15:0]   cnt_regret,
  output logic [15:0]   cnt_tinf_restart,
  output logic [15:0]   cnt_snr_restart,
  output logic [15:0]   cnt_noack
);
  typedef enum logic [3:0] {
    C_IDLE, C_SWEEP, C_SWEEP_W, C_RSP_W, C_SLOT, C_SLOT_W, C_UPD, C_REQ, C_REQ_W,
    C_TINF, C_TINF_W
  } cstate_e;
  cstate_e state;

  logic [CW-1:0] q;          // current arm index into beta
  logic [15:0]   t;          // slot index since the last radar search
  logic          have_tinf;
  logic [KW-1:0] kbar;
  logic [$clog2(DROP_N + 1)-1:0] drops;
  logic [23:0]   reward;

  assign ucb_kt   = rsp_kt;
  assign ucb_t    = t;
  assign beam     = rsp_beta[KW'(q)];
  assign reward   = ack ? snr : 24'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; phase <= PH_IDLE;
      wf_start <= 1'b0; rsp_start <= 1'b0; ucb_clear <= 1'b0; ucb_req <= 1'b0;
      ucb_upd <= 1'b0; ucb_upd_arm <= '0; ucb_upd_reward <= '0; tinf_start <= 1'b0;
      slot_start <= 1'b0; q <= '0; t <= '0; have_tinf <= 1'b0; kbar <= '0; drops <= '0;
      q_beam <= '0; tinf_q <= '0;
      cnt_search <= '0; cnt_empty <= '0; cnt_rr <= '0; cnt_regret <= '0;
      cnt_tinf_restart <= '0; cnt_snr_restart <= '0; cnt_noack <= '0;
    end else begin
      wf_start <= 1'b0; rsp_start <= 1'b0; ucb_clear <= 1'b0; ucb_req <= 1'b0;
      ucb_upd <= 1'b0; tinf_start <= 1'b0; slot_start <= 1'b0;
      unique case (state)
        C_IDLE: begin phase <= PH_IDLE; if (go) state <= C_SWEEP; end
        C_SWEEP: begin
          phase <= PH_RADAR; wf_start <= 1'b1; cnt_search <= cnt_search + 1'b1;
          state <= C_SWEEP_W;
        end
        C_SWEEP_W: if (wf_done) begin rsp_start <= 1'b1; state <= C_RSP_W; end
        C_RSP_W: if (rsp_done) begin
          if (rsp_kt == '0) begin
            cnt_empty <= cnt_empty + 1'b1;
            state <= go ? C_SWEEP : C_IDLE;
          end else begin
            ucb_clear <= 1'b1; q <= '0; t <= 16'd1; have_tinf <= 1'b0; drops <= '0;
            phase <= PH_RR; state <= C_SLOT;
          end
        end
        C_SLOT: begin slot_start <= 1'b1; state <= C_SLOT_W; end
        C_SLOT_W: if (slot_done) begin
          ucb_upd <= 1'b1; ucb_upd_arm <= KW'(q); ucb_upd_reward <= reward;
          if (!ack) cnt_noack <= cnt_noack + 1'b1;
          if (phase == PH_RR) cnt_rr <= cnt_rr + 1'b1;
          else                cnt_regret <= cnt_regret + 1'b1;
          if (have_tinf && KW'(q) == kbar) begin
            if (reward < 24'(SNR_LOW)) drops <= drops + 1'b1;
            else                       drops <= '0;
          end
          state <= C_UPD;
        end
        C_UPD: begin
          t <= t + 1'b1;
          if (have_tinf && (t >= tinf_q)) begin
            cnt_tinf_restart <= cnt_tinf_restart + 1'b1;
            state <= go ? C_SWEEP : C_IDLE;
          end else if (have_tinf && (int'(drops) >= DROP_N)) begin
            cnt_snr_restart <= cnt_snr_restart + 1'b1;
            state <= go ? C_SWEEP : C_IDLE;
          end else if (!go) begin
            state <= C_IDLE;
          end else if (phase == PH_RR && (q + 1'b1) < rsp_kt) begin
            q <= q + 1'b1; state <= C_SLOT;
          end else begin
            phase <= PH_REGRET; state <= C_REQ;
          end
        end
        C_REQ: begin ucb_req <= 1'b1; state <= C_REQ_W; end
        C_REQ_W: if (ucb_sel_valid) begin
          q <= CW'(ucb_sel_arm);
          q_beam <= rsp_beta[ucb_sel_arm];
          if (!have_tinf) begin kbar <= ucb_sel_arm; state <= C_TINF; end
          else state <= C_SLOT;
        end
        C_TINF: begin tinf_start <= 1'b1; state <= C_TINF_W; end
        C_TINF_W: if (tinf_done) begin
          tinf_q <= tinf; have_tinf <= 1'b1; state <= C_SLOT;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
