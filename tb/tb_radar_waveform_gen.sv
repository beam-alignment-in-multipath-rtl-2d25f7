// tb_radar_waveform_gen: checks the radar sweep generator against a Golay pair
// built here by the recursive concatenation a' = [a, b], b' = [a, -b]. It
// checks every transmitted chip, the silent half of each PRI, the capture
// address sequence, the beam/packet counters and the sweep length
// (K * P * 2N samples), with samp_en gaps in between.
module tb_radar_waveform_gen;
  localparam int K = 3, P = 4, N = 16;
  localparam int KW = $clog2(K), PW = $clog2(P), NW = $clog2(N), AW = $clog2(K*P*2*N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, samp_en = 0;
  logic busy, done, tx_on, tx_neg, cap_we;
  logic [KW-1:0] beam; logic [PW-1:0] pkt; logic [NW:0] fast; logic [AW-1:0] cap_addr;
  int checks = 0, failures = 0;
  int ga [N], gb [N];

  radar_waveform_gen #(.K(K), .P(P), .N(N)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, seen, cyc, exp_addr;
    int ta [N], tb [N];
    // recursive Golay pair
    ga[0] = 1; gb[0] = 1; len = 1;
    while (len < N) begin
      for (int i = 0; i < len; i++) begin ta[i] = ga[i]; tb[i] = gb[i]; end
      for (int i = 0; i < len; i++) begin
        ga[i] = ta[i]; ga[len+i] = tb[i];
        gb[i] = ta[i]; gb[len+i] = -tb[i];
      end
      len *= 2;
    end
    // complementary property of the reference pair
    for (int s = 1; s < N; s++) begin
      int acc = 0;
      for (int i = 0; i + s < N; i++) acc += ga[i]*ga[i+s] + gb[i]*gb[i+s];
      chk(acc == 0, $sformatf("reference pair not complementary at shift %0d", s));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !tx_on && !cap_we, "idle outputs");
    start = 1; @(negedge clk); start = 0;
    seen = 0; cyc = 0; exp_addr = 0;
    while (!done && cyc < 10000) begin
      samp_en = ($urandom_range(0, 3) != 0);
      #1;
      if (samp_en) begin
        int k, p, n, expneg, seq;
        k = seen / (P*2*N); p = (seen / (2*N)) % P; n = seen % (2*N);
        chk(cap_we && cap_addr == AW'(exp_addr), $sformatf("capture address at sample %0d", seen));
        chk(beam == KW'(k) && pkt == PW'(p) && fast == (NW+1)'(n), "counters");
        seq = $countones(p) % 2;
        if (n < N) begin
          expneg = (seq == 0) ? (ga[n] < 0) : (gb[n] < 0);
          chk(tx_on && tx_neg == expneg[0], $sformatf("chip k%0d p%0d n%0d", k, p, n));
        end else begin
          chk(!tx_on && !tx_neg, "silent half of PRI");
        end
        seen++; exp_addr++;
      end else begin
        chk(!cap_we, "no capture without samp_en");
      end
      @(negedge clk);
      cyc++;
    end
    chk(done, "done pulse");
    chk(seen == K*P*2*N, $sformatf("sweep length %0d", seen));
    @(negedge clk);
    chk(!busy && !done, "back to idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
