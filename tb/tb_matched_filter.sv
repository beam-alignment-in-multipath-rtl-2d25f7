// tb_matched_filter: fills a small radar data square with random samples,
// runs the matched filter on beam 1 into bank 1, and compares every range bin
// of every packet with a direct correlation against a Golay pair built here
// recursively. Also checks the cycle count P * G * (N + LANES + 1) and that
// only the selected bank is written.
module tb_matched_filter;
  import isac_pkg::*;
  localparam int K = 2, P = 3, N = 16, NR = 16, LANES = 4, SHIFT = 0;
  localparam int G = NR / LANES;
  localparam int KW = $clog2(K), CAW = $clog2(K*P*2*N), SAW = $clog2(2*P*G);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, bank = 1;
  logic [KW-1:0] beam = 1;
  logic busy, done, cube_re, sp_we;
  logic [CAW-1:0] cube_raddr;
  samp_t cube_rdata;
  logic [SAW-1:0] sp_waddr;
  yval_t [LANES-1:0] sp_wdata;
  int checks = 0, failures = 0;

  samp_t cube [K*P*2*N];
  yval_t spec [2*P*G][LANES];
  bit    written [2*P*G];
  int ga [N], gb [N];

  matched_filter #(.K(K), .P(P), .N(N), .NR(NR), .LANES(LANES), .SHIFT(SHIFT)) dut (.*);

  always_ff @(posedge clk) begin
    if (cube_re) cube_rdata <= cube[cube_raddr];
    if (sp_we) begin
      for (int l = 0; l < LANES; l++) spec[sp_waddr][l] <= sp_wdata[l];
      written[sp_waddr] <= 1'b1;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, cyc;
    int ta [N], tb [N];
    ga[0] = 1; gb[0] = 1; len = 1;
    while (len < N) begin
      for (int i = 0; i < len; i++) begin ta[i] = ga[i]; tb[i] = gb[i]; end
      for (int i = 0; i < len; i++) begin
        ga[i] = ta[i]; ga[len+i] = tb[i]; gb[i] = ta[i]; gb[len+i] = -tb[i];
      end
      len *= 2;
    end
    for (int a = 0; a < K*P*2*N; a++) begin
      cube[a].re = SAMP_W'($urandom_range(0, 4095));
      cube[a].im = SAMP_W'($urandom_range(0, 4095));
    end
    for (int a = 0; a < 2*P*G; a++) written[a] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc >= P*G*(N+LANES+1) && cyc <= P*G*(N+LANES+1) + 2,
        $sformatf("cycle count %0d, expected %0d", cyc, P*G*(N+LANES+1)));
    @(negedge clk);
    chk(!busy, "idle after done");
    for (int p = 0; p < P; p++) begin
      for (int n = 0; n < NR; n++) begin
        int sre, sim, c;
        yval_t got;
        sre = 0; sim = 0;
        for (int i = 0; i < N; i++) begin
          samp_t x;
          c = ($countones(p) % 2 == 0) ? ga[i] : gb[i];
          x = cube[(1*P + p)*2*N + n + i];
          sre += c * int'(x.re);
          sim += c * int'(x.im);
        end
        got = spec[P*G + p*G + n/LANES][n%LANES];
        chk(int'(got.re) == (sre >>> SHIFT) && int'(got.im) == (sim >>> SHIFT),
            $sformatf("p%0d n%0d got %0d,%0d exp %0d,%0d", p, n, got.re, got.im, sre, sim));
      end
    end
    for (int a = 0; a < P*G; a++) chk(!written[a], "bank 0 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
