// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// On start it latches dividend (NW bits) and divisor (DW bits); NW cycles
// later done pulses with quotient = floor(dividend / divisor). Division by
// zero returns an all-ones quotient. Used by the UCB lanes and the T_inf
// estimator; the method is this design's choice.
module seq_divider #(
  parameter int NW = 32,
  parameter int DW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient
);
  logic [NW-1:0]        q;
  logic [DW:0]          rem;
  logic [DW-1:0]        dv;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]          trial;
  logic                 zero;

  always_comb trial = {rem[DW-1:0], q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; dv <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
      quotient <= '0; zero <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q <= dividend; rem <= '0; dv <= divisor; cnt <= '0; busy <= 1'b1;
        zero <= (divisor == '0);
      end else if (busy) begin
        if (trial >= {1'b0, dv}) begin
          rem <= trial - {1'b0, dv};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(NW - 1)) begin
          busy <= 1'b0; done <= 1'b1;
          quotient <= zero ? '1 : ((trial >= {1'b0, dv}) ? {q[NW-2:0], 1'b1} : {q[NW-2:0], 1'b0});
        end
      end
    end
  end
endmodule
