// ucb_engine: serial-parallel UCB beam selector with its statistics store.
//
// It keeps, for each of up to K arms (arm q is the q-th candidate beam
// beta[q]), the cumulative reward S_q (Q16.16) and the pull count N_q.
//  * clear zeroes all S and N (Algorithm 2, line 5).
//  * upd adds the slot's reward (normalized SNR, Q8.16) to S[upd_arm] and 1 to
//    N[upd_arm] (Algorithm 2, line 14).
//  * req with slot index t: log_unit forms 2 ln t once, then LANES ucb_lane
//    units evaluate the arms LANES at a time, ceil(kt / LANES) rounds, each
//    round's results being compared in arm order against the best so far.
//    sel_valid then pulses with sel_arm = argmax UCB (lowest index on ties)
//    and its value sel_ucb.
// This is the paper's serial-parallel architecture with four parallel UCB
// blocks: with 32 arms the factors take 8 rounds instead of 32.
// Timing: from the clock edge that samples req to sel_valid is
// 19 + ceil(kt/LANES) * 65 cycles (539 for 32 arms, 149 for 8). upd takes one cycle and must not coincide with req
// processing of the same slot (the controller orders them).
module ucb_engine #(
  parameter int K     = 32,
  parameter int LANES = 4,
  localparam int KW   = $clog2(K),
  localparam int CW   = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [CW-1:0] kt,
  input  logic          req,
  input  logic [15:0]   t,
  output logic          busy,
  output logic          sel_valid,
  output logic [KW-1:0] sel_arm,
  output logic [23:0]   sel_ucb,
  input  logic          upd,
  input  logic [KW-1:0] upd_arm,
  input  logic [23:0]   upd_reward
);
  typedef enum logic [2:0] {E_IDLE, E_LOG, E_START, E_WAIT, E_CMP} estate_e;
  estate_e state;

  logic [31:0] s_mem [K];
  logic [15:0] n_mem [K];

  logic        l_start, l_busy, l_done;
  logic [23:0] two_ln, two_ln_q;
  log_unit u_log (.clk, .rst_n, .start(l_start), .t, .busy(l_busy), .done(l_done), .two_ln);

  logic [CW:0]   base;                 // first arm of the current round
  logic          ln_start [LANES];
  logic          ln_busy  [LANES];
  logic          ln_done  [LANES];
  logic [23:0]   ln_ucb   [LANES];
  logic [KW-1:0] arm      [LANES];
  logic          act      [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      arm[l]      = KW'(base + (CW+1)'(l));
      act[l]      = (base + (CW+1)'(l)) < (CW+1)'(kt);
      ln_start[l] = (state == E_START) && act[l];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    ucb_lane u_lane (
      .clk, .rst_n, .start(ln_start[l]), .s(s_mem[arm[l]]), .n(n_mem[arm[l]]),
      .two_ln(two_ln_q), .busy(ln_busy[l]), .done(ln_done[l]), .ucb(ln_ucb[l]));
  end

  assign l_start = (state == E_IDLE) && req;
  assign busy    = (state != E_IDLE);

  // best of this round, in arm order, against the best so far
  logic [23:0]   r_best;
  logic [KW-1:0] r_arm;
  logic          r_any;
  always_comb begin
    r_best = sel_ucb; r_arm = sel_arm; r_any = (base != '0);
    for (int l = 0; l < LANES; l++) begin
      if (act[l] && (!r_any || ln_ucb[l] > r_best)) begin
        r_best = ln_ucb[l]; r_arm = arm[l]; r_any = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; base <= '0; sel_valid <= 1'b0; sel_arm <= '0; sel_ucb <= '0;
      two_ln_q <= '0;
      for (int k = 0; k < K; k++) begin s_mem[k] <= '0; n_mem[k] <= '0; end
    end else begin
      sel_valid <= 1'b0;
      if (clear) begin
        for (int k = 0; k < K; k++) begin s_mem[k] <= '0; n_mem[k] <= '0; end
      end else if (upd) begin
        s_mem[upd_arm] <= s_mem[upd_arm] + 32'(upd_reward);
        n_mem[upd_arm] <= n_mem[upd_arm] + 1'b1;
      end
      unique case (state)
        E_IDLE:  if (req) begin state <= E_LOG; base <= '0; end
        E_LOG:   if (l_done) begin two_ln_q <= two_ln; state <= E_START; end
        E_START: state <= E_WAIT;
        E_WAIT:  if (ln_done[0] || !act[0]) state <= E_CMP;
        E_CMP: begin
          sel_ucb <= r_best; sel_arm <= r_arm;
          if (base + (CW+1)'(LANES) >= (CW+1)'(kt)) begin
            state <= E_IDLE; sel_valid <= 1'b1;
          end else begin
            base <= base + (CW+1)'(LANES); state <= E_START;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
