// isqrt: integer square root, one result bit per cycle (digit-by-digit).
//
// On start it latches the W-bit radicand (W even); W/2 cycles later done
// pulses with root = floor(sqrt(radicand)). Used for the exploration term of
// the UCB factor; the method is this design's choice.
module isqrt #(
  parameter int W = 40
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [W-1:0]    radicand,
  output logic            busy,
  output logic            done,
  output logic [W/2-1:0]  root
);
  logic [W-1:0]   x;        // remaining radicand bits, consumed two at a time
  logic [W/2+1:0] rem;
  logic [W/2-1:0] r;
  logic [$clog2(W/2+1)-1:0] cnt;
  logic [W/2+1:0] cur, tst;

  always_comb begin
    cur = {rem[W/2-1:0], x[W-1:W-2]};
    tst = {r, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; rem <= '0; r <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x <= radicand; rem <= '0; r <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        x <= x << 2;
        if (cur >= tst) begin
          rem <= cur - tst;
          r   <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= cur;
          r   <= {r[W/2-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(W/2 - 1)) begin
          busy <= 1'b0; done <= 1'b1;
          root <= (cur >= tst) ? {r[W/2-2:0], 1'b1} : {r[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
