// tb_peak_detector: random range spectra with a few planted peaks (strong,
// weak, adjacent pairs and weak peaks in the far range gate) in low-level
// noise. Each trial compares the reported target list (count, bins, powers,
// far flags) with a reference detector written here, and checks the latency
// P * NR / LANES + NR + 2 cycles.
module tb_peak_detector;
  import isac_pkg::*;
  localparam int P = 3, NR = 32, LANES = 8, MAX_TGT = 3, THR_MUL = 4, STRONG_MUL = 16, RGATE = 28;
  localparam int G = NR / LANES, SAW = $clog2(2*P*G), RW = $clog2(NR);
  localparam int PWW = 2*Y_W + $clog2(P) + 1, TW = $clog2(MAX_TGT+1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, bank = 0;
  logic busy, done, sp_re;
  logic [SAW-1:0] sp_raddr;
  yval_t [LANES-1:0] sp_rdata;
  logic [TW-1:0] ntgt;
  logic [RW-1:0] tgt_rbin [MAX_TGT];
  logic [PWW-1:0] tgt_pw [MAX_TGT];
  logic tgt_far [MAX_TGT];
  int checks = 0, failures = 0;
  yval_t spec [2*P*G][LANES];

  peak_detector #(.P(P), .NR(NR), .LANES(LANES), .MAX_TGT(MAX_TGT), .THR_MUL(THR_MUL),
                  .STRONG_MUL(STRONG_MUL), .RGATE(RGATE)) dut (.*);

  always_ff @(posedge clk) if (sp_re) for (int l = 0; l < LANES; l++) sp_rdata[l] <= spec[sp_raddr][l];

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
    longint pw [NR];
    longint tot;
    int amp [NR];
    int nexp, cyc, npk;
    int erb [MAX_TGT]; longint epw [MAX_TGT]; bit efar [MAX_TGT];
    int seen_far = 0, seen_full = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      bank = trial[0];
      for (int n = 0; n < NR; n++) amp[n] = 0;
      npk = $urandom_range(0, 8);
      for (int k = 0; k < npk; k++) amp[$urandom_range(0, NR-1)] = $urandom_range(60, 3000);
      if (trial % 4 == 2) for (int k = 0; k < 5; k++) amp[2 + 5*k] = 2000;
      if (trial % 4 == 1) amp[$urandom_range(RGATE, NR-1)] = 150;   // weak far echo
      for (int p = 0; p < P; p++)
        for (int n = 0; n < NR; n++) begin
          yval_t v;
          v.re = Y_W'(amp[n] + $urandom_range(0, 20) - 10);
          v.im = Y_W'($urandom_range(0, 20) - 10 - amp[n] / 2);
          spec[bank*P*G + p*G + n/LANES][n%LANES] = v;
        end
      // reference
      tot = 0;
      for (int n = 0; n < NR; n++) begin
        pw[n] = 0;
        for (int p = 0; p < P; p++) begin
          yval_t v;
          v = spec[bank*P*G + p*G + n/LANES][n%LANES];
          pw[n] += longint'(v.re) * v.re + longint'(v.im) * v.im;
        end
        tot += pw[n];
      end
      nexp = 0;
      for (int n = 0; n < NR; n++) begin
        bit up, dn;
        up = (n == 0) || (pw[n] >= pw[n-1]);
        dn = (n == NR-1) || (pw[n] > pw[n+1]);
        if (pw[n] * NR > THR_MUL * tot && up && dn && nexp < MAX_TGT) begin
          erb[nexp] = n; epw[nexp] = pw[n];
          efar[nexp] = (n >= RGATE) && !(pw[n] * NR > STRONG_MUL * tot);
          nexp++;
        end
      end
      @(negedge clk);
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == P*G + NR + 2, $sformatf("latency %0d", cyc));
      chk(int'(ntgt) == nexp, $sformatf("trial %0d: %0d targets, expected %0d", trial, ntgt, nexp));
      for (int t = 0; t < nexp && t < int'(ntgt); t++) begin
        chk(int'(tgt_rbin[t]) == erb[t] && longint'(tgt_pw[t]) == epw[t] && tgt_far[t] == efar[t],
            $sformatf("trial %0d target %0d: bin %0d far %0d, expected bin %0d far %0d", trial, t,
                      tgt_rbin[t], tgt_far[t], erb[t], efar[t]));
        if (efar[t]) seen_far++;
      end
      if (nexp == MAX_TGT) seen_full++;
    end
    chk(seen_far > 0, "far-gate case exercised");
    chk(seen_full > 0, "target limit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
