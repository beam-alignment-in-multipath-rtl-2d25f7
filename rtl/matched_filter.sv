// matched_filter: range compression of one beam's radar data square.
//
// For every packet p and range bin n (0 .. NR-1) it computes the correlation of
// the received fast-time samples with the Golay sequence that packet p sent,
//   Y[p][n] = (sum_{i=0}^{N-1} g_p[i] * x[p][n+i]) >>> SHIFT,
// i.e. the matched filter x * g_p[-n] of the paper, scaled by 2^-SHIFT instead
// of 1/N and saturated to 16-bit I/Q (with the default SHIFT = log2(N) - 4 the
// values are 16/N times the correlation). The chips are +-1, so no multipliers
// are needed.
//
// LANES range bins are computed at once. For a group of LANES adjacent bins the
// unit streams N + LANES - 1 samples of the packet from the data square through
// a LANES-deep shift register; once full, lane l holds x[p][g*LANES + l + i]
// for chip i and adds or subtracts it. After the last chip the LANES results
// are written as one wide word to the range-spectrum buffer at
// bank * P * G + p * G + g (G = NR / LANES). One group takes N + LANES + 1
// cycles, a beam P * G * (N + LANES + 1) cycles: 174,400 cycles (1.74 ms at
// 100 MHz) with the defaults, inside the 2 ms the paper reports for its
// matched filter. The paper computes the correlation with a 24-bit FFT and a
// 16-bit inverse FFT; this unit computes the same correlation directly in the
// time domain, which with +-1 chips needs only adders. Requires NR <= N + 1,
// LANES dividing NR, and a data square of P packets x 2N samples per beam.
//
// Interface: beam and bank are sampled when start is pulsed; busy stays high until done
// pulses. Cube read port has one cycle of latency.
module matched_filter
  import isac_pkg::*;
#(
  parameter int K     = 32,
  parameter int P     = 20,
  parameter int N     = 512,
  parameter int NR    = 512,
  parameter int LANES = 32,
  parameter int SHIFT = $clog2(N) - 4,
  localparam int KW   = $clog2(K),
  localparam int NW   = $clog2(N),
  localparam int G    = NR / LANES,
  localparam int CAW  = $clog2(K * P * 2 * N),
  localparam int SAW  = $clog2(2 * P * G),
  localparam int ACCW = SAMP_W + NW + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [KW-1:0]          beam,
  input  logic                   bank,
  output logic                   busy,
  output logic                   done,
  // radar data square read port
  output logic                   cube_re,
  output logic [CAW-1:0]         cube_raddr,
  input  samp_t                  cube_rdata,
  // range-spectrum buffer write port
  output logic                   sp_we,
  output logic [SAW-1:0]         sp_waddr,
  output yval_t [LANES-1:0]      sp_wdata
);
  localparam int LAST = N + LANES - 2;   // index of the last sample read per group
  localparam int JW   = $clog2(LAST + 2);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WRITE} state_e;
  state_e state;

  logic [$clog2(P+1)-1:0] p;
  logic [$clog2(G+1)-1:0] g;
  logic [JW-1:0]          j, jd;
  logic                   vld_d;
  logic [KW-1:0]          beam_q;
  logic                   bank_q;
  samp_t                  win [LANES];
  logic signed [ACCW-1:0] acc_re [LANES];
  logic signed [ACCW-1:0] acc_im [LANES];

  assign busy = (state != S_IDLE);

  always_comb begin
    cube_re    = (state == S_RUN) && (j <= JW'(LAST));
    cube_raddr = CAW'((CAW'(beam_q) * CAW'(P) + CAW'(p)) * CAW'(2 * N) + CAW'(g) * CAW'(LANES) + CAW'(j));
  end

  // window after the arriving sample is shifted in: lane l sees x[g*LANES + l + chip]
  samp_t xin [LANES];
  always_comb begin
    for (int l = 0; l < LANES - 1; l++) xin[l] = win[l+1];
    xin[LANES-1] = cube_rdata;
  end

  // chip sign for the sample that arrives now
  logic [JW-1:0] chip;
  logic          neg;
  always_comb begin
    chip = jd - JW'(LANES - 1);
    neg  = golay_neg(16'(chip), NW, ptm_bit(16'(p)));
  end

  function automatic logic signed [Y_W-1:0] sat(input logic signed [ACCW-1:0] v);
    logic signed [ACCW-1:0] s;
    s = v >>> SHIFT;
    if (s > ACCW'(2 ** (Y_W - 1) - 1))       return Y_W'(2 ** (Y_W - 1) - 1);
    else if (s < -ACCW'(2 ** (Y_W - 1)))     return Y_W'(-(2 ** (Y_W - 1)));
    else                                     return Y_W'(s);
  endfunction

  always_comb begin
    sp_we    = (state == S_WRITE);
    sp_waddr = SAW'(SAW'(bank_q) * SAW'(P * G) + SAW'(p) * SAW'(G) + SAW'(g));
    for (int l = 0; l < LANES; l++) begin
      sp_wdata[l].re = sat(acc_re[l]);
      sp_wdata[l].im = sat(acc_im[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      p <= '0; g <= '0; j <= '0; jd <= '0; vld_d <= 1'b0; beam_q <= '0; bank_q <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        win[l] <= '0; acc_re[l] <= '0; acc_im[l] <= '0;
      end
    end else begin
      done  <= 1'b0;
      vld_d <= cube_re;
      jd    <= j;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; p <= '0; g <= '0; j <= '0; beam_q <= beam; bank_q <= bank;
          for (int l = 0; l < LANES; l++) begin acc_re[l] <= '0; acc_im[l] <= '0; end
        end
        S_RUN: begin
          if (cube_re) j <= j + 1'b1;
          if (vld_d) begin
            for (int l = 0; l < LANES - 1; l++) win[l] <= win[l+1];
            win[LANES-1] <= cube_rdata;
            if (jd >= JW'(LANES - 1)) begin
              for (int l = 0; l < LANES; l++) begin
                if (neg) begin
                  acc_re[l] <= acc_re[l] - ACCW'(xin[l].re);
                  acc_im[l] <= acc_im[l] - ACCW'(xin[l].im);
                end else begin
                  acc_re[l] <= acc_re[l] + ACCW'(xin[l].re);
                  acc_im[l] <= acc_im[l] + ACCW'(xin[l].im);
                end
              end
            end
            if (jd == JW'(LAST)) state <= S_WRITE;
          end
        end
        S_WRITE: begin
          for (int l = 0; l < LANES; l++) begin acc_re[l] <= '0; acc_im[l] <= '0; end
          j <= '0;
          if (g != ($bits(g))'(G - 1)) begin
            g <= g + 1'b1; state <= S_RUN;
          end else begin
            g <= '0;
            if (p != ($bits(p))'(P - 1)) begin
              p <= p + 1'b1; state <= S_RUN;
            end else begin
              state <= S_IDLE; done <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
