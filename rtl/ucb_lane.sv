// ucb_lane: one UCB quality-factor unit,
//   UCB_k(t) = S_k / N_k + sqrt(2 ln(t) / N_k).
//
// Formats: s (cumulative reward) is unsigned Q16.16 in 32 bits, n (pull
// count) an unsigned 16-bit integer, two_ln = 2 ln(t) unsigned Q8.16 from
// log_unit, and the result ucb unsigned Q8.16 in 24 bits (saturating), the
// 24-bit word length of the paper's reduced-precision bandit accelerator.
// The mean S/N is a 32/16 division (the quotient is already Q.16). The
// exploration term uses sqrt(L/N) * 2^16 = isqrt(floor(L_q16 * 2^16 / N)),
// a 40/16 division followed by a 40-bit integer square root; both dividers
// start together. An arm with n = 0 gets the largest value.
// Timing: start (inputs sampled) to done is NW + W/2 + 3 = 63 cycles.
module ucb_lane (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] s,
  input  logic [15:0] n,
  input  logic [23:0] two_ln,
  output logic        busy,
  output logic        done,
  output logic [23:0] ucb
);
  logic        d1_busy, d1_done, d2_busy, d2_done, sq_busy, sq_done;
  logic [31:0] mean_q;
  logic [39:0] expl2_q;
  logic [19:0] expl;
  logic [31:0] mean_hold;
  logic        n_zero;
  logic [24:0] sum;

  seq_divider #(.NW(32), .DW(16)) u_mean (
    .clk, .rst_n, .start, .dividend(s), .divisor(n),
    .busy(d1_busy), .done(d1_done), .quotient(mean_q));
  seq_divider #(.NW(40), .DW(16)) u_expl (
    .clk, .rst_n, .start, .dividend({two_ln, 16'b0}), .divisor(n),
    .busy(d2_busy), .done(d2_done), .quotient(expl2_q));
  isqrt #(.W(40)) u_sqrt (
    .clk, .rst_n, .start(d2_done), .radicand(expl2_q),
    .busy(sq_busy), .done(sq_done), .root(expl));

  assign busy = d1_busy | d2_busy | sq_busy | done;

  always_comb sum = 25'(mean_hold) + 25'(expl);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mean_hold <= '0; n_zero <= 1'b0; done <= 1'b0; ucb <= '0;
    end else begin
      done <= 1'b0;
      if (start) n_zero <= (n == '0);
      if (d1_done) mean_hold <= mean_q;
      if (sq_done) begin
        done <= 1'b1;
        if (n_zero || (mean_hold > 32'h00FF_FFFF) || sum[24]) ucb <= '1;
        else                                                  ucb <= sum[23:0];
      end
    end
  end
endmodule
