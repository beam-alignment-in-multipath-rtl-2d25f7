// log_unit: computes 2*ln(t) for the exploration term of the UCB factor.
//
// t is an unsigned 16-bit slot index (t >= 1). The integer part of log2(t) is
// the position e of its leading one. The fraction comes from the classic
// squaring method: with the mantissa m = t / 2^e in [1, 2) held as Q1.23,
// each of 16 steps squares m; if m reaches 2 the next fraction bit is 1 and m
// is halved. Finally 2*ln(t) = log2(t) * 2*ln(2), with 2*ln(2) = 90852 / 2^16.
// two_ln is unsigned Q8.16 (24 bits); at most 2*ln(65535) = 22.2.
// Timing: start to done is 18 cycles. t = 0 is treated as t = 1 (result 0).
// The method is this design's choice; the paper gives only the formula.
module log_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] t,
  output logic        busy,
  output logic        done,
  output logic [23:0] two_ln
);
  localparam logic [16:0] TWO_LN2_Q16 = 17'd90852;
  logic [3:0]  e;
  logic [23:0] m;          // Q1.23 mantissa
  logic [15:0] frac;
  logic [4:0]  cnt;
  logic [47:0] sq;
  logic [20:0] l2;         // Q5.16
  logic [37:0] prod;

  always_comb begin
    sq   = 48'(m) * 48'(m);          // Q2.46
    l2   = {1'b0, e, frac};
    prod = 38'(l2) * 38'(TWO_LN2_Q16);
  end

  // leading-one position of t
  function automatic logic [3:0] msb(input logic [15:0] v);
    logic [3:0] r;
    r = '0;
    for (int i = 0; i < 16; i++) if (v[i]) r = 4'(i);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0; m <= '0; frac <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; two_ln <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        e    <= msb(t);
        m    <= 24'({8'b0, t} << (23 - 32'(msb(t))));
        frac <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        if (cnt < 5'd16) begin
          if (sq[47]) begin             // m^2 >= 2
            m    <= sq[47:24];
            frac <= {frac[14:0], 1'b1};
          end else begin
            m    <= sq[46:23];
            frac <= {frac[14:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
        end else begin
          two_ln <= 24'(prod >> 16);
          busy   <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
