// tb_sdp_ram: self-checking test of the dual-port RAM. Writes a pseudo-random
// pattern to every word, reads it back with the one-cycle latency, and checks
// read-during-write returns the old word.
module tb_sdp_ram;
  localparam int W = 20, DEPTH = 100, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];

  sdp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [W-1:0] pat(int a);
    return W'((a * 7919 + 12345) ^ (a << 9));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = pat(a); model[a] = pat(a);
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      re = 1; raddr = AW'(DEPTH - 1 - a);
      @(negedge clk);
      checks++;
      if (rdata !== model[DEPTH-1-a]) begin
        failures++; $display("read %0d: got %h exp %h", DEPTH-1-a, rdata, model[DEPTH-1-a]);
      end
    end
    // read during write: old value expected
    re = 1; raddr = 5; we = 1; waddr = 5; wdata = ~model[5];
    @(negedge clk);
    checks++;
    if (rdata !== model[5]) begin failures++; $display("read-during-write returned new data"); end
    we = 0;
    @(negedge clk);
    checks++;
    if (rdata !== ~model[5]) begin failures++; $display("write not stored"); end
    // hold when re=0
    re = 0; raddr = 6;
    @(negedge clk);
    checks++;
    if (rdata !== ~model[5]) begin failures++; $display("rdata changed with re=0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
