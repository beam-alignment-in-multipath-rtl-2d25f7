// radar_waveform_gen: radar search sweep of the ISAC base station.
//
// On start it walks K beams; for each beam it sends P radar pulses, one per
// pulse repetition interval (PRI) of 2N samples. In the first N samples of a
// PRI the transmitter sends the N-chip Golay sequence (N = 512, the g_u512
// field of the 802.11ad channel-estimation preamble, built as [a256, b256]);
// in the other N samples it is silent, giving the 50% duty cycle of the paper.
// P pulses of one beam form one coherent processing interval (CPI), so the
// sweep takes K CPIs. The beam index drives the analog beamformer and every
// received sample is written into the radar data square at
// cap_addr = (beam * P + packet) * 2N + fast_time.
//
// Timing: all counters advance on cycles with samp_en = 1 (one ADC sample
// each). The outputs describe the current sample; done pulses for one cycle
// after the last sample of the last beam. start is ignored while busy.
// Packet p sends a9 (Prouhet-Thue-Morse bit 0) or its complementary partner b9
// (bit 1), see isac_pkg. The paper gives the sequence field, the 50% duty cycle
// and the K-CPI sweep; the ordering of packets and the address map are this
// design's choice.
module radar_waveform_gen
  import isac_pkg::*;
#(
  parameter int K = 32,
  parameter int P = 20,
  parameter int N = 512,
  localparam int KW = $clog2(K),
  localparam int PW = $clog2(P),
  localparam int NW = $clog2(N),
  localparam int AW = $clog2(K * P * 2 * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          samp_en,
  output logic          busy,
  output logic          done,
  output logic [KW-1:0] beam,
  output logic [PW-1:0] pkt,
  output logic [NW:0]   fast,      // 0 .. 2N-1
  output logic          tx_on,     // a chip is being sent
  output logic          tx_neg,    // chip sign: 1 = -1, 0 = +1
  output logic          cap_we,
  output logic [AW-1:0] cap_addr
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      beam <= '0; pkt <= '0; fast <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; beam <= '0; pkt <= '0; fast <= '0;
        end
      end else if (samp_en) begin
        if (fast != (NW+1)'(2 * N - 1)) begin
          fast <= fast + 1'b1;
        end else begin
          fast <= '0;
          if (pkt != PW'(P - 1)) begin
            pkt <= pkt + 1'b1;
          end else begin
            pkt <= '0;
            if (beam != KW'(K - 1)) begin
              beam <= beam + 1'b1;
            end else begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end
      end
    end
  end

  always_comb begin
    tx_on    = busy && !fast[NW];
    tx_neg   = tx_on && golay_neg(16'(fast[NW-1:0]), NW, ptm_bit(16'(pkt)));
    cap_we   = busy && samp_en;
    cap_addr = AW'((AW'(beam) * AW'(P) + AW'(pkt)) * AW'(2 * N) + AW'(fast));
  end
endmodule
