// tb_rsp_core: a four-beam radar scene written through the capture port:
// beam 0 holds a moving target (range 3, +3 Doppler bins), beam 1 a static
// clutter scatterer, beam 2 only noise, beam 3 a moving target (range 8,
// -2 bins) and a static one. The echoes are the packets' own Golay sequences
// delayed by the range and rotated by the Doppler phase. The RSP must return
// beta = {0, 3} with the right range and Doppler of each, overlap the matched
// filter of one beam with the back end of the previous one, and finish in
// about K matched-filter times plus one back-end time.
module tb_rsp_core;
  import isac_pkg::*;
  localparam int K = 4, P = 4, N = 16, NR = 16, LANES = 4, D = 15, MAX_TGT = 2;
  localparam logic [31:0] DPH = 32'h0800_0000;
  localparam int KW = $clog2(K), CW = $clog2(K+1), CAW = $clog2(K*P*2*N), RW = $clog2(NR), VW = $clog2(D) + 1;
  localparam int G = NR / LANES;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, cap_we = 0, start = 0;
  logic [CAW-1:0] cap_addr = 0;
  samp_t cap_data;
  logic busy, done, overlap;
  logic [CW-1:0] kt, n_dropped;
  logic [KW-1:0] beta [K];
  logic [KW-1:0] q_beam = 0;
  logic [RW-1:0] q_rbin;
  logic signed [VW-1:0] q_vbin;
  int checks = 0, failures = 0;

  rsp_core #(.K(K), .P(P), .N(N), .NR(NR), .LANES(LANES), .SHIFT(0), .D(D), .DPHASE(DPH),
             .MAX_TGT(MAX_TGT), .THR_MUL(4), .STRONG_MUL(16), .RGATE(14), .VMIN(1), .MANY(3)) dut (.*);

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

  int ga [N], gb [N];
  real xr [K][P][2*N], xi [K][P][2*N];

  task automatic echo(int k, int r, int v, real a);
    real pi2 = 6.283185307179586;
    for (int p = 0; p < P; p++) begin
      real th;
      th = pi2 * real'(v) * real'(DPH) * p / 4294967296.0 + 0.3;
      for (int i = 0; i < N; i++) begin
        int c;
        c = ($countones(p) % 2 == 0) ? ga[i] : gb[i];
        xr[k][p][r+i] += a * c * $cos(th);
        xi[k][p][r+i] += a * c * $sin(th);
      end
    end
  endtask

  initial begin
    int len, cyc, ov, mf_time;
    int ta [N], tb [N];
    ga[0] = 1; gb[0] = 1; len = 1;
    while (len < N) begin
      for (int i = 0; i < len; i++) begin ta[i] = ga[i]; tb[i] = gb[i]; end
      for (int i = 0; i < len; i++) begin
        ga[i] = ta[i]; ga[len+i] = tb[i]; gb[i] = ta[i]; gb[len+i] = -tb[i];
      end
      len *= 2;
    end
    for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int n = 0; n < 2*N; n++) begin
      xr[k][p][n] = $urandom_range(0, 10) - 5.0; xi[k][p][n] = $urandom_range(0, 10) - 5.0;
    end
    echo(0, 3, 3, 400.0);
    echo(1, 5, 0, 500.0);
    echo(3, 8, -2, 450.0);
    echo(3, 2, 0, 300.0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) for (int p = 0; p < P; p++) for (int n = 0; n < 2*N; n++) begin
      cap_we = 1; cap_addr = CAW'((k*P + p)*2*N + n);
      cap_data.re = SAMP_W'($rtoi(xr[k][p][n])); cap_data.im = SAMP_W'($rtoi(xi[k][p][n]));
      @(negedge clk);
    end
    cap_we = 0;
    start = 1; @(negedge clk); start = 0;
    cyc = 1; ov = 0;
    while (!done) begin @(negedge clk); cyc++; if (overlap) ov++; end
    mf_time = P*G*(N+LANES+1);
    chk(ov > 0, "matched filter overlapped with back end");
    chk(cyc > K*mf_time && cyc < K*mf_time + 2*(G*P + NR + MAX_TGT*(P + 3 + D*(P+1)) + 20),
        $sformatf("RSP time %0d cycles (MF time %0d)", cyc, mf_time));
    chk(kt == 2, $sformatf("kt=%0d", kt));
    chk(beta[0] == 0 && beta[1] == 3, $sformatf("beta %0d %0d", beta[0], beta[1]));
    chk(n_dropped == 0, "nothing dropped");
    q_beam = 0; #1;
    chk(q_rbin == 3 && q_vbin == 3, $sformatf("beam 0: r %0d v %0d", q_rbin, q_vbin));
    q_beam = 3; #1;
    chk(q_rbin == 8 && q_vbin == -2, $sformatf("beam 3: r %0d v %0d", q_rbin, q_vbin));
    $display("RSP cycles %0d, overlap cycles %0d", cyc, ov);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
