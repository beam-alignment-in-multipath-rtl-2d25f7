// tb_ucb_engine: runs a small bandit through the engine. Each slot it asks
// for the UCB choice, compares it with a floating-point UCB reference over
// the same statistics (either of two arms whose factors differ by less than
// 2^-10 is accepted), then feeds back a noisy reward for that arm. Also checks
// the selection latency 19 + ceil(kt/LANES) * 65 cycles, that clear restarts
// the statistics, and that the best arm ends up pulled most.
module tb_ucb_engine;
  localparam int K = 10, LANES = 4, KW = $clog2(K), CW = $clog2(K+1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, req = 0, upd = 0;
  logic [CW-1:0] kt = 0;
  logic [15:0] t = 1;
  logic busy, sel_valid;
  logic [KW-1:0] sel_arm, upd_arm = 0;
  logic [23:0] sel_ucb, upd_reward = 0;
  int checks = 0, failures = 0;

  ucb_engine #(.K(K), .LANES(LANES)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint S [K]; int N [K];
    real mu [K];
    int cyc, best, second, pulls_best;
    real u, ub, us;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      kt = (run == 0) ? CW'(7) : CW'(K);
      for (int k = 0; k < K; k++) begin S[k] = 0; N[k] = 0; mu[k] = 0.2 + 0.05 * k; end
      mu[3] = 0.9;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // round-robin: one pull of each arm
      for (int k = 0; k < kt; k++) begin
        int w; w = $rtoi((mu[k] + ($signed({1'b0, $urandom_range(0, 200)}) - 100) / 1000.0) * 65536.0);
        upd = 1; upd_arm = KW'(k); upd_reward = 24'(w); S[k] += w; N[k]++;
        @(negedge clk);
      end
      upd = 0;
      for (int slot = kt + 1; slot <= kt + 150; slot++) begin
        t = 16'(slot);
        req = 1; @(negedge clk); req = 0;
        cyc = 1;
        while (!sel_valid) begin @(negedge clk); cyc++; end
        chk(cyc == 19 + ((kt + LANES - 1) / LANES) * 65, $sformatf("latency %0d", cyc));
        ub = -1; us = -1; best = 0; second = 0;
        for (int k = 0; k < kt; k++) begin
          u = real'(S[k]) / 65536.0 / N[k] + $sqrt(2.0 * $ln(real'(slot)) / N[k]);
          if (u > ub) begin us = ub; second = best; ub = u; best = k; end
          else if (u > us) begin us = u; second = k; end
        end
        chk(int'(sel_arm) == best || (int'(sel_arm) == second && ub - us < 1.0 / 1024.0),
            $sformatf("slot %0d: chose %0d, reference %0d (%f vs %f)", slot, sel_arm, best, ub, us));
        begin
          int w, k;
          k = int'(sel_arm);
          w = $rtoi((mu[k] + ($signed({1'b0, $urandom_range(0, 200)}) - 100) / 1000.0) * 65536.0);
          if (w < 0) w = 0;
          upd = 1; upd_arm = sel_arm; upd_reward = 24'(w); S[k] += w; N[k]++;
          @(negedge clk); upd = 0;
        end
      end
      pulls_best = N[3];
      for (int k = 0; k < kt; k++) if (k != 3) chk(N[k] < pulls_best, $sformatf("arm %0d pulled %0d >= best %0d", k, N[k], pulls_best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
