// tb_music_doppler: plants a complex exponential slow-time vector
// y[p] = A * exp(j * (2pi * v * DPHASE * p / 2^32 + phi0)) plus small noise
// in a random range bin, and checks that the Doppler bin found is v. Two
// instances are tested: a short one (P = 8, D = 15, coarse phase step, with
// noise) and one with the paper's P = 20, D = 61 and DPHASE = 400 Hz * 0.58 us
// (noise-free, since that 1 m/s grid is very fine for a 20-pulse CPI). Also
// checks the latency P + 2 + D * (P + 1) cycles and a zero-Doppler return.
module tb_music_doppler;
  import isac_pkg::*;
  localparam int NR = 16, LANES = 4, G = NR / LANES;
  localparam int P1 = 8,  D1 = 15; localparam logic [31:0] DP1 = 32'h0800_0000;
  localparam int P2 = 20, D2 = 61; localparam logic [31:0] DP2 = 32'd996432;
  localparam int RW = $clog2(NR);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start1 = 0, start2 = 0, bank = 0;
  logic [RW-1:0] rbin = 0;
  logic busy1, done1, busy2, done2, re1, re2;
  logic [$clog2(2*P1*G)-1:0] ra1;
  logic [$clog2(2*P2*G)-1:0] ra2;
  yval_t [LANES-1:0] rd1, rd2;
  logic [$clog2(D1)-1:0] dbin1; logic signed [$clog2(D1):0] vbin1;
  logic [$clog2(D2)-1:0] dbin2; logic signed [$clog2(D2):0] vbin2;
  int checks = 0, failures = 0;
  yval_t spec1 [2*P1*G][LANES];
  yval_t spec2 [2*P2*G][LANES];

  music_doppler #(.P(P1), .NR(NR), .LANES(LANES), .D(D1), .DPHASE(DP1)) u1 (
    .clk, .rst_n, .start(start1), .bank, .rbin, .busy(busy1), .done(done1),
    .sp_re(re1), .sp_raddr(ra1), .sp_rdata(rd1), .dbin(dbin1), .vbin(vbin1));
  music_doppler #(.P(P2), .NR(NR), .LANES(LANES), .D(D2)) u2 (
    .clk, .rst_n, .start(start2), .bank, .rbin, .busy(busy2), .done(done2),
    .sp_re(re2), .sp_raddr(ra2), .sp_rdata(rd2), .dbin(dbin2), .vbin(vbin2));

  always_ff @(posedge clk) begin
    if (re1) for (int l = 0; l < LANES; l++) rd1[l] <= spec1[ra1][l];
    if (re2) for (int l = 0; l < LANES; l++) rd2[l] <= spec2[ra2][l];
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic yval_t mk(real a, real ph, int noise);
    yval_t v;
    v.re = Y_W'($rtoi(a * $cos(ph)) + (noise > 0 ? $urandom_range(0, 2*noise) - noise : 0));
    v.im = Y_W'($rtoi(a * $sin(ph)) + (noise > 0 ? $urandom_range(0, 2*noise) - noise : 0));
    return v;
  endfunction

  initial begin
    int v, cyc;
    real a, ph0, pi2;
    pi2 = 2.0 * 3.14159265358979;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      v = (trial == 0) ? 0 : $urandom_range(0, D1-1) - (D1-1)/2;
      a = 2000.0 + $urandom_range(0, 20000);
      ph0 = pi2 * $urandom_range(0, 999) / 1000.0;
      bank = trial[0]; rbin = RW'($urandom_range(0, NR-1));
      for (int p = 0; p < P1; p++)
        spec1[bank*P1*G + p*G + rbin/LANES][rbin%LANES] =
          mk(a, ph0 + pi2 * real'(v) * real'(DP1) * p / 4294967296.0, 40);
      @(negedge clk); start1 = 1; @(negedge clk); start1 = 0;
      cyc = 1;
      while (!done1) begin @(negedge clk); cyc++; end
      chk(cyc == P1 + 2 + D1*(P1+1), $sformatf("latency %0d", cyc));
      chk(int'(vbin1) == v && int'(dbin1) == v + (D1-1)/2,
          $sformatf("short: v=%0d got vbin %0d", v, vbin1));
    end
    for (int trial = 0; trial < 8; trial++) begin
      v = (trial == 0) ? 0 : $urandom_range(0, D2-1) - (D2-1)/2;
      a = 20000.0;
      ph0 = pi2 * $urandom_range(0, 999) / 1000.0;
      bank = trial[0]; rbin = RW'($urandom_range(0, NR-1));
      for (int p = 0; p < P2; p++)
        spec2[bank*P2*G + p*G + rbin/LANES][rbin%LANES] =
          mk(a, ph0 + pi2 * real'(v) * real'(DP2) * p / 4294967296.0, 0);
      @(negedge clk); start2 = 1; @(negedge clk); start2 = 0;
      cyc = 1;
      while (!done2) begin @(negedge clk); cyc++; end
      chk(cyc == P2 + 2 + D2*(P2+1), $sformatf("latency %0d", cyc));
      chk(int'(vbin2) == v, $sformatf("paper grid: v=%0d got vbin %0d", v, vbin2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
