// tb_tinf_estimator: self-checking testbench of the T_inf estimator.
//
// Drives the default 32-beam configuration with every beam, a spread of range
// bins and both signs of Doppler bin, and compares the result with a
// floating-point evaluation of T_inf = rbin * dR * dphi / (|v| * cos(phi) * T)
// (+-1 slot for rounding), checks saturation for zero speed and the one-slot
// minimum, and checks the fixed start-to-done latency. A watchdog bounds the
// run. Prints TB_RESULT with the number of checks and failures.
module tb_tinf_estimator;
  localparam int K = 32, RW = 9, VW = 7, KW = $clog2(K), LAT = 43;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done;
  logic [KW-1:0] beam = 0;
  logic [RW-1:0] rbin = 0;
  logic signed [VW-1:0] vbin = 0;
  logic [15:0] tinf;
  int checks = 0, failures = 0;

  tinf_estimator #(.K(K)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic run(input int k, input int r, input int v, output int res);
    int cyc;
    @(negedge clk);
    beam = KW'(k); rbin = RW'(r); vbin = VW'(v); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == LAT, $sformatf("latency %0d", cyc));
    res = int'(tinf);
  endtask

  initial begin
    int res;
    real phi, ref_t, g;
    g = (3.0e8 / (2.0 * 1.76e9)) * (4.0 * 3.14159265358979 / 180.0) / (1.0 * 5.5e-3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < 6; i++) begin
        int r, v;
        r = 20 + 83 * i + k;
        v = ((i % 2) ? -1 : 1) * (1 + (k * 7 + i * 13) % 40);
        run(k, r, v, res);
        phi = (-64.0 + (k + 0.5) * 128.0 / K) * 3.14159265358979 / 180.0;
        ref_t = r * g / ((v < 0 ? -v : v) * $cos(phi));
        if (ref_t > 65535.0) ref_t = 65535.0;
        if (ref_t < 1.0) ref_t = 1.0;
        chk(real'(res) > ref_t - 1.01 && real'(res) < ref_t + 1.01,
            $sformatf("beam %0d r %0d v %0d: %0d, reference %f", k, r, v, res, ref_t));
      end
    end
    run(5, 300, 0, res);  chk(res == 65535, $sformatf("zero speed gives %0d", res));
    run(16, 0, 3, res);   chk(res == 1, $sformatf("zero range gives %0d", res));
    run(16, 511, 1, res); chk(res > 545 && res < 560, $sformatf("far slow target %0d", res));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
