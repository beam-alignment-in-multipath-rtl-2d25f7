// tb_beam_subset: random per-beam radar records (mobile, far, range, Doppler)
// in random order; after finalize the candidate list must hold exactly the
// mobile beams in increasing order, minus the far ones when more than MANY
// beams are mobile. Checks the query port and the K + 1 cycle scan.
module tb_beam_subset;
  localparam int K = 12, MANY = 4, RW = 6, VW = 5;
  localparam int KW = $clog2(K), CW = $clog2(K+1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, rec_valid = 0, rec_mobile = 0, rec_far = 0, finalize = 0;
  logic [KW-1:0] rec_beam = 0, q_beam = 0;
  logic [RW-1:0] rec_rbin = 0, q_rbin;
  logic signed [VW-1:0] rec_vbin = 0, q_vbin;
  logic done;
  logic [CW-1:0] kt, n_dropped;
  logic [KW-1:0] beta [K];
  int checks = 0, failures = 0;

  beam_subset #(.K(K), .MANY(MANY), .RW(RW), .VW(VW)) dut (.*);

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
    bit m [K], f [K]; int r [K], v [K], order [K];
    int nm, exp_list [K], nexp, ndrop, cyc, seen_drop;
    seen_drop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < K; k++) begin
        m[k] = ($urandom_range(0, 99) < (trial % 3 == 0 ? 70 : 30));
        f[k] = ($urandom_range(0, 2) == 0);
        r[k] = $urandom_range(0, 2**RW - 1);
        v[k] = $urandom_range(0, 2**VW - 1) - 2**(VW-1);
        order[k] = k;
      end
      order.shuffle();
      for (int i = 0; i < K; i++) begin
        int k; k = order[i];
        rec_valid = 1; rec_beam = KW'(k); rec_mobile = m[k]; rec_far = f[k];
        rec_rbin = RW'(r[k]); rec_vbin = VW'(v[k]);
        @(negedge clk);
      end
      rec_valid = 0;
      nm = 0; foreach (m[k]) nm += m[k];
      nexp = 0; ndrop = 0;
      for (int k = 0; k < K; k++)
        if (m[k]) begin
          if (nm > MANY && f[k]) ndrop++;
          else exp_list[nexp++] = k;
        end
      finalize = 1; @(negedge clk); finalize = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == K + 1, $sformatf("scan time %0d", cyc));
      chk(int'(kt) == nexp && int'(n_dropped) == ndrop,
          $sformatf("trial %0d: kt %0d dropped %0d, expected %0d %0d", trial, kt, n_dropped, nexp, ndrop));
      for (int i = 0; i < nexp; i++) chk(int'(beta[i]) == exp_list[i], $sformatf("beta[%0d]", i));
      if (ndrop > 0) seen_drop++;
      for (int k = 0; k < K; k++) begin
        q_beam = KW'(k); #1;
        chk(int'(q_rbin) == r[k] && int'(q_vbin) == v[k], "query port");
      end
    end
    chk(seen_drop > 0, "far-drop case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
