// tb_isac_mab_top: end-to-end, full-size test of the beam alignment
// accelerator (all parameters at their defaults: 32 beams, 20 packets,
// 512-chip pulses, 512 range bins, 4 UCB lanes).
//
// The testbench is the radio world around the chip:
//  * a radar channel: every ADC sample is the sum, over the targets seen by
//    the beam currently driven, of the transmitted chip (tx_on / tx_neg)
//    delayed by the target's range bin and rotated by its Doppler phase,
//    plus small noise. Nothing of the waveform is copied from the design.
//  * a user link: each data slot returns the normalized SNR of the served
//    beam (0.9 on the user's beam, 0.45 next to it, 0.1 elsewhere, +-0.05
//    noise), with no acknowledgement on every 9th slot.
// The scene changes at every radar search:
//  1. static clutter only: the search must come back empty and repeat;
//  2. 16 beams with a moving target plus 4 beams whose only moving echo is a
//     weak one near the maximum range: the 4 far beams must be dropped
//     (20 > 16 candidates), K~ = 16; the user (beam 10, range bin 100,
//     +5 m/s) must be found and T_inf must end the run (restart);
//  3. 3 moving beams; the user (beam 20, range 300, +1 m/s) is served until a
//     blockage makes its SNR collapse: an SNR restart must follow.
// Checks: candidate sets (seen as the round-robin beam order) and dropped
// count, T_inf against the formula with the true range and speed (so the
// range and Doppler estimates must be right), restart at exactly T_inf slots, the round-robin
// order, UCB convergence on the user's beam, fixed slot turnaround cycles,
// radar search duration, and event counters. Each mechanism (empty search,
// RSP stage overlap, far drop, round robin, regret slots, T_inf restart, SNR
// restart, no-ack slot) is counted and is a failure if it never happens.
// A watchdog ends the run.
module tb_isac_mab_top;
  import isac_pkg::*;
  localparam int K = 32, P = 20, N = 512, NR = 512, D = 61;
  localparam int KW = $clog2(K), CW = $clog2(K + 1);
  localparam real DPH = 996432.0;
  localparam int MF_TIME = P * (NR / 32) * (N + 32 + 1);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, go = 0, samp_en = 1, slot_done = 0, ack = 0;
  samp_t adc;
  logic [23:0] snr = 0;
  logic tx_on, tx_neg, slot_start, rsp_overlap;
  logic [KW-1:0] beam;
  phase_e phase;
  logic [CW-1:0] kt, n_dropped;
  logic [15:0] tinf, cnt_search, cnt_empty, cnt_rr, cnt_regret, cnt_tinf_restart,
               cnt_snr_restart, cnt_noack;
  int checks = 0, failures = 0;

  isac_mab_top dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (40_000_000) @(posedge clk);
    $display("FAIL watchdog (phase %0d, searches %0d)", phase, cnt_search);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // ---------------- scenes ----------------
  // per scene and beam up to two targets: range bin, Doppler (m/s = bins), amplitude
  int  t_r [4][K][2], t_v [4][K][2];
  real t_a [4][K][2];
  int  user_beam [4];
  int  scene;

  task automatic add(int s, int k, int r, int v, real a);
    int i;
    i = (t_a[s][k][0] == 0.0) ? 0 : 1;
    t_r[s][k][i] = r; t_v[s][k][i] = v; t_a[s][k][i] = a;
  endtask

  // ---------------- radar channel ----------------
  real    txh [1024];          // transmitted chip history, index = sample mod 1024
  longint s_idx = 0;
  always @(negedge clk) begin
    real re, im;
    int  k;
    txh[s_idx % 1024] = tx_on ? (tx_neg ? -1.0 : 1.0) : 0.0;
    re = real'($urandom_range(0, 6)) - 3.0;
    im = real'($urandom_range(0, 6)) - 3.0;
    k = int'(beam);
    if (phase == PH_RADAR) begin
      for (int i = 0; i < 2; i++) begin
        if (t_a[scene][k][i] != 0.0 && s_idx >= t_r[scene][k][i]) begin
          real c, th;
          c  = txh[(s_idx - t_r[scene][k][i]) % 1024];
          th = 6.283185307179586 * t_v[scene][k][i] * DPH * real'(s_idx) / (2.0 * N) / 4294967296.0;
          re += t_a[scene][k][i] * c * $cos(th + 0.7 * k);
          im += t_a[scene][k][i] * c * $sin(th + 0.7 * k);
        end
      end
    end
    adc.re = SAMP_W'($rtoi(re));
    adc.im = SAMP_W'($rtoi(im));
    s_idx++;
  end

  // ---------------- user link and bookkeeping ----------------
  int  slots_scene = 0, slot_no = 0, blocked = 0, noack_seen = 0;
  int  pulls [K];
  int  turn_rr = 0, turn_rg = 0, turn_rr_bad = 0, turn_rg_bad = 0, turn_cyc = 0;
  bit  in_turn = 0;
  int  ov_cycles = 0, far_drops = 0;
  int  rr_pos = 0;

  always @(negedge clk) if (rsp_overlap) ov_cycles++;

  initial begin
    for (int s = 0; s < 4; s++) for (int k = 0; k < K; k++) for (int i = 0; i < 2; i++) begin
      t_r[s][k][i] = 0; t_v[s][k][i] = 0; t_a[s][k][i] = 0.0;
    end
    // scene 1 (first search): static clutter only
    add(1, 12, 80, 0, 300.0);
    add(1, 25, 200, 0, 250.0);
    // scene 2: beams 0..15 moving, 16..19 static near + weak moving far
    for (int k = 0; k < 16; k++)
      add(2, k, 30 + 23 * k, ((k % 2) ? -1 : 1) * (2 + k), 200.0);
    t_r[2][10][0] = 100; t_v[2][10][0] = 5;
    add(2, 2, 300, 0, 250.0);
    add(2, 7, 60, 0, 250.0);
    for (int k = 16; k < 20; k++) begin
      add(2, k, 40 + 5 * k, 0, 300.0);
      add(2, k, 470 + k, 4 + k - 16, 100.0);
    end
    user_beam[2] = 10;
    // scene 3: three moving beams, static clutter
    add(3, 5, 200, -3, 200.0);
    add(3, 20, 300, 1, 200.0);
    add(3, 27, 150, 8, 200.0);
    add(3, 12, 80, 0, 300.0);
    user_beam[3] = 20;
    user_beam[1] = 0;
    user_beam[0] = 0;
  end

  always @(negedge clk) scene = (cnt_search > 3) ? 3 : int'(cnt_search);

  // slot responder: slot_done 20 cycles after slot_start
  always @(negedge clk) begin
    if (slot_start) begin
      int b, ub, w;
      real sv;
      b  = int'(beam);
      ub = user_beam[scene];
      sv = (b == ub) ? 0.9 : ((b == ub - 1 || b == ub + 1) ? 0.45 : 0.1);
      if (blocked && b == ub) sv = 0.05;
      sv += (real'($urandom_range(0, 100)) - 50.0) / 1000.0;
      w = $rtoi(sv * 65536.0);
      slot_no++;
      slots_scene++;
      pulls[b]++;
      // round robin: the candidate beams in beam order (the expected sets)
      if (phase == PH_RR) begin
        int e;
        e = (scene == 3) ? ((rr_pos == 0) ? 5 : (rr_pos == 1) ? 20 : 27) : rr_pos;
        chk(b == e, $sformatf("RR slot %0d beam %0d, expected %0d", rr_pos, b, e));
        rr_pos++;
      end
      // first regret pick: the user's beam (0.9 against 0.45 and 0.1)
      if (phase == PH_REGRET && slots_scene == int'(kt) + 1)
        chk(b == ub, $sformatf("first regret pick beam %0d, user beam %0d", b, ub));
      // turnaround of the previous slot
      if (in_turn) begin
        // round robin: 2 cycles; regret: UCB engine latency + 4 cycles
        if (phase == PH_RR) begin
          if (turn_cyc == 2) turn_rr++; else turn_rr_bad++;
        end else if (phase == PH_REGRET && slots_scene > int'(kt) + 2) begin
          if (turn_cyc == 23 + ((int'(kt) + 3) / 4) * 65) turn_rg++;
          else begin
            turn_rg_bad++;
            $display("regret turnaround %0d cycles with kt %0d", turn_cyc, kt);
          end
        end
      end
      repeat (20) @(negedge clk);
      ack = (slot_no % 9 != 0);
      if (!ack) noack_seen++;
      snr = 24'(w);
      slot_done = 1;
      @(negedge clk);
      slot_done = 0; ack = 0;
      in_turn = 1; turn_cyc = 1;
    end else if (in_turn) turn_cyc++;
  end

  // ---------------- sequence checks ----------------
  initial begin
    int cyc, kt2, tinf_ref;
    real phi;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); go = 1;

    // search 1: empty
    while (cnt_empty == 0 && phase != PH_RR) @(negedge clk);
    chk(cnt_empty == 1, "first search (clutter only) comes back empty");
    chk(kt == 0, $sformatf("empty search kt=%0d", kt));
    chk(cnt_search == 1, $sformatf("searches %0d", cnt_search));

    // search 2
    cyc = 0;
    while (phase != PH_RR) begin @(negedge clk); cyc++; end
    chk(cyc > K * P * 2 * N + K * MF_TIME && cyc < K * P * 2 * N + K * MF_TIME + 60000,
        $sformatf("radar search %0d cycles (sweep %0d + %0d MF times %0d)", cyc, K * P * 2 * N, K, MF_TIME));
    chk(cnt_search == 2, $sformatf("searches %0d", cnt_search));
    chk(kt == 16, $sformatf("scene 2 kt=%0d", kt));
    chk(n_dropped == 4, $sformatf("scene 2 dropped %0d", n_dropped));
    if (n_dropped != 0) far_drops += int'(n_dropped);
    for (int k = 0; k < K; k++) pulls[k] = 0;
    slots_scene = 0; rr_pos = 0; in_turn = 0;
    // T_inf of beam 10: phi = -22 deg, range 100, speed 5
    phi = (-62.0 + 4.0 * 10) * 3.14159265358979 / 180.0;
    tinf_ref = $rtoi(100 * (3.0e8 / (2.0 * 1.76e9)) * (4.0 * 3.14159265358979 / 180.0) / (5.0 * $cos(phi) * 5.5e-3));
    while (cnt_tinf_restart == 0) @(negedge clk);
    chk(tinf >= tinf_ref - 1 && tinf <= tinf_ref + 1, $sformatf("T_inf %0d slots, formula %0d", tinf, tinf_ref));
    chk(slots_scene == int'(tinf), $sformatf("restart after %0d slots, T_inf %0d", slots_scene, tinf));
    chk(cnt_rr == 16, $sformatf("round-robin slots %0d", cnt_rr));
    chk(cnt_regret == 16'(slots_scene - 16), $sformatf("regret slots %0d", cnt_regret));
    chk(pulls[10] >= 2, $sformatf("user beam pulled %0d of %0d slots", pulls[10], slots_scene));

    // search 3
    while (phase != PH_RR) @(negedge clk);
    kt2 = int'(kt);
    chk(kt2 == 3, $sformatf("scene 3 kt=%0d", kt2));
    for (int k = 0; k < K; k++) pulls[k] = 0;
    slots_scene = 0; rr_pos = 0; in_turn = 0;
    while (slots_scene < 80) @(negedge clk);
    chk(pulls[20] > 45, $sformatf("user beam 20 pulled %0d of 80", pulls[20]));
    chk(tinf > 300 && tinf < 380, $sformatf("scene 3 T_inf %0d", tinf));
    blocked = 1;
    cyc = 0;
    while (cnt_snr_restart == 0 && cyc < 400000) begin @(negedge clk); cyc++; end
    chk(cnt_snr_restart == 1, "blockage restarts the search");
    repeat (2) @(negedge clk);
    chk(cnt_tinf_restart == 1, $sformatf("T_inf restarts %0d", cnt_tinf_restart));
    chk(phase == PH_RADAR, "back in radar search");

    // slot turnaround: fixed cycle counts
    chk(turn_rr > 10 && turn_rr_bad == 0, $sformatf("round-robin turnarounds: %0d right, %0d wrong", turn_rr, turn_rr_bad));
    chk(turn_rg > 50 && turn_rg_bad == 0, $sformatf("regret turnarounds: %0d right, %0d wrong", turn_rg, turn_rg_bad));
    chk(int'(cnt_noack) == noack_seen, $sformatf("no-ack slots %0d, sent %0d", cnt_noack, noack_seen));

    // mechanisms
    $display("mechanisms: empty searches %0d, overlap cycles %0d, far drops %0d, RR slots %0d, regret slots %0d, T_inf restarts %0d, SNR restarts %0d, no-ack slots %0d",
             cnt_empty, ov_cycles, far_drops, cnt_rr, cnt_regret, cnt_tinf_restart, cnt_snr_restart, cnt_noack);
    chk(cnt_empty > 0, "mechanism: empty radar search");
    chk(ov_cycles > 0, "mechanism: RSP stage overlap");
    chk(far_drops > 0, "mechanism: far-beam drop");
    chk(cnt_rr > 0, "mechanism: round robin");
    chk(cnt_regret > 0, "mechanism: regret minimization");
    chk(cnt_tinf_restart > 0, "mechanism: T_inf restart");
    chk(cnt_snr_restart > 0, "mechanism: SNR restart");
    chk(cnt_noack > 0, "mechanism: slot without ack");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
