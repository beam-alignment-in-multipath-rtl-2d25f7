// tb_mab_controller: self-checking testbench of the Algorithm 2 sequencer.
//
// The radar sweep, RSP, UCB engine and T_inf estimator are replaced by small
// behavioural responders with fixed latencies; the testbench plays the
// communication side (slot_done with ack / SNR). Eight beams.
//  * search 1 returns an empty set: the search must repeat;
//  * search 2 returns beta = {1, 4, 6}: three round-robin slots in beta
//    order, then regret slots on beta[Q_t] with Q_t from the UCB responder;
//    the UCB slot index t must count 4, 5, ...; T_inf = 10 must restart the
//    search after exactly 10 slots; one slot without ack must give reward 0;
//  * search 3 returns beta = {2, 7}; the optimal beam then reports one low
//    SNR (no restart), a good one, then two low ones: restart after the
//    second.
// Also checked: statistics clear, the reward and arm of every UCB update,
// the beam handed to the T_inf estimator, fixed handshake latencies, event
// counters, and going idle when go drops. A watchdog bounds the run.
module tb_mab_controller;
  import isac_pkg::*;
  localparam int K = 8, KW = $clog2(K), CW = $clog2(K + 1);
  localparam int UCB_LAT = 7, TINF_LAT = 5, SLOT_LAT = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, go = 0;
  phase_e phase;
  logic wf_start, wf_done = 0, rsp_start, rsp_done = 0;
  logic [CW-1:0] rsp_kt = 0;
  logic [KW-1:0] rsp_beta [K];
  logic [KW-1:0] q_beam;
  logic ucb_clear, ucb_req, ucb_sel_valid = 0, ucb_upd;
  logic [CW-1:0] ucb_kt;
  logic [15:0] ucb_t;
  logic [KW-1:0] ucb_sel_arm = 0, ucb_upd_arm;
  logic [23:0] ucb_upd_reward;
  logic tinf_start, tinf_done = 0;
  logic [15:0] tinf = 0;
  logic slot_start, slot_done = 0, ack = 0;
  logic [KW-1:0] beam;
  logic [23:0] snr = 0;
  logic [15:0] tinf_q, cnt_search, cnt_empty, cnt_rr, cnt_regret, cnt_tinf_restart,
               cnt_snr_restart, cnt_noack;
  int checks = 0, failures = 0;

  mab_controller #(.K(K)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // ---------------- behavioural peripherals ----------------
  int search = 0;            // number of wf_start pulses seen
  int n_clear = 0;
  always @(negedge clk) begin
    if (wf_start) begin
      search++;
      repeat (10) @(negedge clk);
      wf_done = 1; @(negedge clk); wf_done = 0;
    end
  end
  always @(negedge clk) begin
    if (rsp_start) begin
      for (int k = 0; k < K; k++) rsp_beta[k] = '0;
      if (search == 1) rsp_kt = 0;
      else if (search == 2) begin rsp_kt = 3; rsp_beta[0] = 1; rsp_beta[1] = 4; rsp_beta[2] = 6; end
      else begin rsp_kt = 2; rsp_beta[0] = 2; rsp_beta[1] = 7; end
      repeat (15) @(negedge clk);
      rsp_done = 1; @(negedge clk); rsp_done = 0;
    end
  end
  always @(negedge clk) if (ucb_clear) n_clear++;

  // UCB responder: picks arm (t mod kt) in search 2, always arm 1 in search 3
  int t_bad = 0, n_req = 0;
  int slot_in_search = 0, last_search = 0;
  always @(negedge clk) begin
    if (ucb_req) begin
      n_req++;
      if (int'(ucb_t) != slot_in_search + 1) begin t_bad++; $display("ucb_t %0d, expected %0d", ucb_t, slot_in_search + 1); end
      repeat (UCB_LAT - 1) @(negedge clk);
      ucb_sel_arm = (search == 2) ? KW'(int'(ucb_t) % 3) : KW'(1);
      ucb_sel_valid = 1; @(negedge clk); ucb_sel_valid = 0;
    end
  end

  int n_tinf = 0;
  logic [KW-1:0] tinf_beam;
  always @(negedge clk) begin
    if (tinf_start) begin
      n_tinf++;
      tinf_beam = q_beam;
      repeat (TINF_LAT - 1) @(negedge clk);
      tinf = (search == 2) ? 16'd10 : 16'd100;
      tinf_done = 1; @(negedge clk); tinf_done = 0;
    end
  end

  // ---------------- communication side ----------------
  // slot responder: answers SLOT_LAT cycles after slot_start with the
  // (ack, snr) of the current plan and checks the UCB update that follows.
  int n_slots = 0, noack_sent = 0, upd_bad = 0, beam_bad = 0;
  int turn = 0, turn_rr_ok = 0, turn_rg_ok = 0, turn_bad = 0;
  bit turn_on = 0;
  logic [KW-1:0] exp_arm;
  bit plan_ack;
  logic [23:0] plan_snr;
  always @(negedge clk) begin
    if (slot_start) begin
      int arm;
      // turnaround from the previous slot of the same search: 2 cycles in
      // round robin, UCB latency + 3 in regret (+ T_inf latency + 1 once)
      if (turn_on && search == last_search) begin
        if (phase == PH_RR && turn == 2) turn_rr_ok++;
        else if (phase == PH_REGRET && (turn == UCB_LAT + 3 || turn == UCB_LAT + 3 + TINF_LAT + 1)) turn_rg_ok++;
        else begin turn_bad++; $display("turnaround %0d in phase %0d", turn, phase); end
      end
      turn_on = 0;
      if (search != last_search) begin slot_in_search = 0; last_search = search; end
      slot_in_search++; n_slots++;
      // expected arm
      if (phase == PH_RR) arm = slot_in_search - 1;
      else arm = (search == 2) ? (slot_in_search % 3) : 1;
      exp_arm = KW'(arm);
      if (beam != rsp_beta[arm]) begin beam_bad++; $display("slot %0d beam %0d, expected %0d", slot_in_search, beam, rsp_beta[arm]); end
      // plan: no ack on slot 2 of search 2; search 3 regret: low, good, low, low
      plan_ack = !(search == 2 && slot_in_search == 2);
      plan_snr = 24'd58982;                       // 0.9
      if (search == 3 && phase == PH_REGRET && slot_in_search != 4) plan_snr = 24'd6554;  // 0.1
      if (search == 3 && slot_in_search < 3) plan_snr = 24'd58982;
      if (!plan_ack) noack_sent++;
      repeat (SLOT_LAT) @(negedge clk);
      ack = plan_ack; snr = plan_snr; slot_done = 1;
      @(negedge clk);
      ack = 0; slot_done = 0; snr = 24'd12345;
      // the update is issued the cycle after slot_done
      if (!(ucb_upd && ucb_upd_arm == exp_arm && ucb_upd_reward == (plan_ack ? plan_snr : 24'd0))) begin
        upd_bad++;
        $display("slot %0d update: upd %0b arm %0d reward %0d", slot_in_search, ucb_upd, ucb_upd_arm, ucb_upd_reward);
      end
      turn_on = 1; turn = 1;
    end else if (turn_on) turn++;
  end

  initial begin
    int cyc;
    for (int k = 0; k < K; k++) rsp_beta[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    chk(phase == PH_IDLE, "idle without go");
    go = 1;
    // search 1: wf_start pulses 2 cycles after go is set, then the empty set
    cyc = 0;
    while (!wf_start) begin @(negedge clk); cyc++; end
    chk(cyc == 2, $sformatf("wf_start %0d cycles after go", cyc));
    @(negedge clk);
    chk(phase == PH_RADAR, "radar phase during sweep");
    while (!rsp_start) @(negedge clk);
    while (cnt_empty == 0) @(negedge clk);
    chk(n_clear == 0, "no clear after an empty search");

    // search 2
    while (search < 2) @(negedge clk);
    chk(cnt_search == 2, $sformatf("searches %0d", cnt_search));
    while (!ucb_clear) @(negedge clk);
    chk(ucb_kt == 3, $sformatf("ucb_kt %0d", ucb_kt));
    @(negedge clk);
    chk(phase == PH_RR, "round-robin phase");
    while (cnt_tinf_restart == 0) @(negedge clk);
    chk(slot_in_search == 10, $sformatf("T_inf restart after %0d slots", slot_in_search));
    chk(tinf_q == 10, $sformatf("tinf_q %0d", tinf_q));
    chk(tinf_beam == 4, $sformatf("T_inf beam %0d (first regret pick beta[1])", tinf_beam));
    chk(n_tinf == 1, $sformatf("T_inf started %0d times", n_tinf));
    chk(cnt_rr == 3, $sformatf("round-robin slots %0d", cnt_rr));
    chk(cnt_regret == 7, $sformatf("regret slots %0d", cnt_regret));
    chk(n_req == 7, $sformatf("UCB requests %0d", n_req));
    chk(cnt_noack == 1 && noack_sent == 1, $sformatf("no-ack count %0d", cnt_noack));

    // search 3
    while (search < 3) @(negedge clk);
    while (!ucb_clear) @(negedge clk);
    while (cnt_snr_restart == 0) @(negedge clk);
    chk(slot_in_search == 6, $sformatf("SNR restart after %0d slots (2 RR + 4 regret)", slot_in_search));
    chk(tinf_beam == 7, $sformatf("T_inf beam %0d", tinf_beam));
    chk(cnt_tinf_restart == 1, "one T_inf restart");
    chk(n_clear == 2, $sformatf("statistics cleared %0d times", n_clear));

    // go low: the search already started runs, one round-robin slot follows,
    // then the controller stops
    go = 0;
    repeat (200) @(negedge clk);
    chk(phase == PH_IDLE, $sformatf("idle after go drops (phase %0d)", phase));
    chk(cnt_search == 4, $sformatf("searches %0d", cnt_search));

    chk(t_bad == 0, $sformatf("%0d wrong UCB slot indices", t_bad));
    chk(beam_bad == 0, $sformatf("%0d wrong slot beams", beam_bad));
    chk(upd_bad == 0, $sformatf("%0d wrong UCB updates", upd_bad));
    chk(turn_bad == 0 && turn_rr_ok == 3 && turn_rg_ok > 8,
        $sformatf("turnarounds: RR %0d, regret %0d, wrong %0d", turn_rr_ok, turn_rg_ok, turn_bad));
    chk(n_slots == 17, $sformatf("slots %0d", n_slots));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
