// peak_detector: amplitude- and range-based target detection on one beam's
// range spectra.
//
// Pass 1 reads the P x NR range spectrum of the selected bank (one wide word
// of LANES bins per cycle) and integrates the power over the packets,
//   pw[n] = sum_p |Y[p][n]|^2,
// while summing the total power of all bins. Pass 2 scans the bins in range
// order and reports bin n as a target when it is a local maximum
// (pw[n] >= pw[n-1], pw[n] > pw[n+1]) and stands THR_MUL times above the mean
// power of the spectrum, i.e. pw[n] * NR > THR_MUL * total. This is the
// peak-to-sidelobe test of the paper: a matched Golay echo gives a peak far
// above its sidelobes, while noise and mismatched (uplink) preambles do not.
// A detection in the last range bins (n >= RGATE) that is not also STRONG_MUL
// times above the mean is flagged "far": the paper drops such long-multipath
// candidates when too many beams qualify, which beam_subset decides. At most
// MAX_TGT targets are reported, the nearest ones first.
//
// Timing: bank is sampled at start; start to done takes P * NR / LANES + NR + 2 cycles.
// Outputs stay valid until the next start. The non-coherent integration over
// packets, the threshold values and the target limit are this design's
// choices; the paper states the test only as peak-to-sidelobe level.
module peak_detector
  import isac_pkg::*;
#(
  parameter int P          = 20,
  parameter int NR         = 512,
  parameter int LANES      = 32,
  parameter int MAX_TGT    = 4,
  parameter int THR_MUL    = 16,
  parameter int STRONG_MUL = 64,
  parameter int RGATE      = NR * 7 / 8,
  localparam int G   = NR / LANES,
  localparam int SAW = $clog2(2 * P * G),
  localparam int RW  = $clog2(NR),
  localparam int PWW = 2 * Y_W + $clog2(P) + 1,
  localparam int TW  = $clog2(MAX_TGT + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  bank,
  output logic                  busy,
  output logic                  done,
  output logic                  sp_re,
  output logic [SAW-1:0]        sp_raddr,
  input  yval_t [LANES-1:0]     sp_rdata,
  output logic [TW-1:0]         ntgt,
  output logic [RW-1:0]         tgt_rbin [MAX_TGT],
  output logic [PWW-1:0]        tgt_pw   [MAX_TGT],
  output logic                  tgt_far  [MAX_TGT]
);
  typedef enum logic [1:0] {S_IDLE, S_INTEG, S_SCAN} state_e;
  state_e state;

  logic [PWW-1:0]          pw [NR];
  logic [PWW+RW-1:0]       total;
  logic [$clog2(P*G+1)-1:0] rd, rd_d;
  logic                    vld_d;
  logic [RW:0]             n;
  logic                    bank_q;
  int                      gbase;   // first bin of the arriving word
  always_comb gbase = int'(rd_d % ($bits(rd_d))'(G)) * LANES;

  assign busy = (state != S_IDLE);

  always_comb begin
    sp_re    = (state == S_INTEG) && (rd < ($bits(rd))'(P * G));
    sp_raddr = SAW'(SAW'(bank_q) * SAW'(P * G) + SAW'(rd));
  end

  // power of the arriving word, per lane and summed
  logic [PWW-1:0]    lane_pw [LANES];
  logic [PWW+RW-1:0] word_pw;
  always_comb begin
    word_pw = '0;
    for (int l = 0; l < LANES; l++) begin
      lane_pw[l] = PWW'($signed(sp_rdata[l].re) * $signed(sp_rdata[l].re))
                 + PWW'($signed(sp_rdata[l].im) * $signed(sp_rdata[l].im));
      word_pw    = word_pw + (PWW+RW)'(lane_pw[l]);
    end
  end

  // detection test for bin n
  logic [RW-1:0] nb;
  logic          is_peak, is_strong;
  logic [63:0]   lhs;
  always_comb begin
    nb        = n[RW-1:0];
    lhs       = 64'(pw[nb]) * 64'(NR);
    is_peak   = (lhs > 64'(THR_MUL) * 64'(total))
             && ((nb == 0) || (pw[nb] >= pw[nb - 1'b1]))
             && ((nb == RW'(NR - 1)) || (pw[nb] > pw[nb + 1'b1]));
    is_strong = lhs > 64'(STRONG_MUL) * 64'(total);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; rd <= '0; rd_d <= '0; vld_d <= 1'b0;
      n <= '0; total <= '0; ntgt <= '0; bank_q <= 1'b0;
      for (int t = 0; t < MAX_TGT; t++) begin
        tgt_rbin[t] <= '0; tgt_pw[t] <= '0; tgt_far[t] <= 1'b0;
      end
    end else begin
      done  <= 1'b0;
      vld_d <= sp_re;
      rd_d  <= rd;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_INTEG; rd <= '0; total <= '0; ntgt <= '0; bank_q <= bank;
        end
        S_INTEG: begin
          if (sp_re) rd <= rd + 1'b1;
          if (vld_d) begin
            // word rd_d covers packet rd_d / G, bins (rd_d % G) * LANES + l
            for (int l = 0; l < LANES; l++) begin
              if (rd_d < ($bits(rd_d))'(G))
                pw[gbase + l] <= lane_pw[l];
              else
                pw[gbase + l] <= pw[gbase + l] + lane_pw[l];
            end
            total <= total + word_pw;
            if (rd_d == ($bits(rd_d))'(P * G - 1)) begin
              state <= S_SCAN; n <= '0;
            end
          end
        end
        S_SCAN: begin
          if (is_peak && (ntgt < TW'(MAX_TGT))) begin
            tgt_rbin[ntgt] <= nb;
            tgt_pw[ntgt]   <= pw[nb];
            tgt_far[ntgt]  <= (nb >= RW'(RGATE)) && !is_strong;
            ntgt           <= ntgt + 1'b1;
          end
          if (n == (RW+1)'(NR - 1)) begin
            state <= S_IDLE; done <= 1'b1;
          end
          n <= n + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
