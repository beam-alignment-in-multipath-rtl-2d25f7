// tb_ucb_lane: random (S, N, t) triples; the lane result must match
// S/N + sqrt(2 ln t / N) computed in floating point to within 2^-11
// (the log approximation and truncations), n = 0 must give the largest
// value, and the latency must be 63 cycles. log_unit feeds 2 ln t, so this
// also checks it.
module tb_ucb_lane;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, lstart = 0;
  logic [31:0] s = 0; logic [15:0] n = 0, t = 1;
  logic [23:0] two_ln, ucb;
  logic busy, done, lbusy, ldone;
  int checks = 0, failures = 0;

  log_unit u_log (.clk, .rst_n, .start(lstart), .t, .busy(lbusy), .done(ldone), .two_ln);
  ucb_lane dut (.clk, .rst_n, .start, .s, .n, .two_ln, .busy, .done, .ucb);

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    real exp_ucb, got, exp_ln;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      t = (trial < 4) ? 16'(trial + 1) : 16'($urandom_range(1, 65535));
      n = (trial == 5) ? 16'd0 : 16'($urandom_range(1, (trial % 2) ? 30 : 3000));
      s = 32'($urandom_range(0, 65536) * longint'(n) / 65536 * 65536 + $urandom_range(0, 65535) % (int'(n) * 1 + 1));
      if (s > {n, 16'h0}) s = {n, 16'h0};
      @(negedge clk); lstart = 1; @(negedge clk); lstart = 0;
      cyc = 1;
      while (!ldone) begin @(negedge clk); cyc++; end
      exp_ln = 2.0 * $ln(real'(t));
      chk(cyc == 18, $sformatf("log latency %0d", cyc));
      chk(fabs(real'(two_ln) / 65536.0 - exp_ln) < 0.002,
          $sformatf("2ln(%0d) got %f exp %f", t, real'(two_ln) / 65536.0, exp_ln));
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == 63, $sformatf("lane latency %0d", cyc));
      got = real'(ucb) / 65536.0;
      if (n == 0) chk(ucb == 24'hFFFFFF, "n=0 gives max");
      else begin
        exp_ucb = real'(s) / 65536.0 / real'(n) + $sqrt(exp_ln / real'(n));
        chk(fabs(got - exp_ucb) < 1.0 / 2048.0,
            $sformatf("s=%0d n=%0d t=%0d got %f exp %f", s, n, t, got, exp_ucb));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
