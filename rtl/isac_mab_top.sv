// isac_mab_top: ISAC beam alignment accelerator (radar-assisted UCB beam
// selection), top level.
//
// Blocks:
//  * radar_waveform_gen: radar search sweep, Golay pulses on K beams, and the
//    capture address of each received sample;
//  * rsp_core: radar data square, pipelined matched filter / peak detection /
//    MUSIC Doppler, and the candidate beam subset beta (K~ beams);
//  * ucb_engine: bandit statistics and the serial-parallel UCB argmax;
//  * tinf_estimator: time to misalignment T_inf from range, speed and angle;
//  * mab_controller: Algorithm 2 sequencing with T_inf / low-SNR restarts.
// The analog beamformer, the DAC/ADC and the 802.11ad data path are outside:
// this block drives the beam index and the radar chip (tx_on/tx_neg), takes one
// complex ADC sample per samp_en cycle during the sweep, and exchanges one
// slot handshake per data frame (slot_start/beam out; slot_done with ack and
// the normalized SNR from the uplink in).
//
// Interface timing: go (level) runs the loop. During PH_RADAR the beam output
// follows the sweep, afterwards the controller's slot beam. adc is sampled in
// the cycle it is presented with samp_en = 1 (the sample of the current
// tx chip position). All status counters are 16-bit.
// Parameters default to the paper's numbers (32 beams, 20 packets, 512-chip
// Golay pulses, 512 range bins, 4 UCB lanes, 24-bit bandit words); thresholds
// and the Doppler grid size are this design's choices.
module isac_mab_top
  import isac_pkg::*;
#(
  parameter int K          = 32,
  parameter int P          = 20,
  parameter int N          = 512,
  parameter int NR         = 512,
  parameter int MF_LANES   = 32,
  parameter int SHIFT      = $clog2(N) - 4,
  parameter int D          = 61,
  parameter logic [31:0] DPHASE = 32'd996432,
  parameter int MAX_TGT    = 4,
  parameter int THR_MUL    = 16,
  parameter int STRONG_MUL = 64,
  parameter int RGATE      = NR * 7 / 8,
  parameter int VMIN       = 1,
  parameter int MANY       = K / 2,
  parameter int UCB_LANES  = 4,
  parameter int G_Q16      = 70898,
  parameter int SNR_LOW    = 16384,
  parameter int DROP_N     = 2,
  localparam int KW  = $clog2(K),
  localparam int CW  = $clog2(K + 1),
  localparam int RW  = $clog2(NR),
  localparam int VW  = $clog2(D) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          go,
  // radar front end
  input  logic          samp_en,
  input  samp_t         adc,
  output logic          tx_on,
  output logic          tx_neg,
  output logic [KW-1:0] beam,
  output phase_e        phase,
  // data slots
  output logic          slot_start,
  input  logic          slot_done,
  input  logic          ack,
  input  logic [23:0]   snr,
  // status
  output logic [CW-1:0] kt,
  output logic [CW-1:0] n_dropped,
  output logic          rsp_overlap,
  output logic [15:0]   tinf,
  output logic [15:0]   cnt_search,
  output logic [15:0]   cnt_empty,
  output logic [15:0]   cnt_rr,
  output logic [15:0]   cnt_regret,
  output logic [15:0]   cnt_tinf_restart,
  output logic [15:0]   cnt_snr_restart,
  output logic [15:0]   cnt_noack
);
  localparam int PW  = $clog2(P);
  localparam int NW  = $clog2(N);
  localparam int CAW = $clog2(K * P * 2 * N);

  // ---------------- radar sweep ----------------
  logic           wf_start, wf_busy, wf_done, cap_we;
  logic [KW-1:0]  wf_beam;
  logic [PW-1:0]  wf_pkt;
  logic [NW:0]    wf_fast;
  logic [CAW-1:0] cap_addr;
  radar_waveform_gen #(.K(K), .P(P), .N(N)) u_wf (
    .clk, .rst_n, .start(wf_start), .samp_en, .busy(wf_busy), .done(wf_done),
    .beam(wf_beam), .pkt(wf_pkt), .fast(wf_fast), .tx_on, .tx_neg, .cap_we,
    .cap_addr);

  // ---------------- radar signal processing ----------------
  logic                 rsp_start, rsp_busy, rsp_done;
  logic [KW-1:0]        beta [K];
  logic [KW-1:0]        q_beam;
  logic [RW-1:0]        q_rbin;
  logic signed [VW-1:0] q_vbin;
  rsp_core #(
    .K(K), .P(P), .N(N), .NR(NR), .LANES(MF_LANES), .SHIFT(SHIFT), .D(D),
    .DPHASE(DPHASE), .MAX_TGT(MAX_TGT), .THR_MUL(THR_MUL),
    .STRONG_MUL(STRONG_MUL), .RGATE(RGATE), .VMIN(VMIN), .MANY(MANY)
  ) u_rsp (
    .clk, .rst_n, .cap_we, .cap_addr, .cap_data(adc), .start(rsp_start),
    .busy(rsp_busy), .done(rsp_done), .overlap(rsp_overlap), .kt, .beta,
    .n_dropped, .q_beam, .q_rbin, .q_vbin);

  // ---------------- bandit ----------------
  logic          ucb_clear, ucb_req, ucb_busy, ucb_sel_valid, ucb_upd;
  logic [CW-1:0] ucb_kt;
  logic [15:0]   ucb_t;
  logic [KW-1:0] ucb_sel_arm, ucb_upd_arm;
  logic [23:0]   ucb_sel_ucb, ucb_upd_reward;
  ucb_engine #(.K(K), .LANES(UCB_LANES)) u_ucb (
    .clk, .rst_n, .clear(ucb_clear), .kt(ucb_kt), .req(ucb_req), .t(ucb_t),
    .busy(ucb_busy), .sel_valid(ucb_sel_valid), .sel_arm(ucb_sel_arm),
    .sel_ucb(ucb_sel_ucb), .upd(ucb_upd), .upd_arm(ucb_upd_arm),
    .upd_reward(ucb_upd_reward));

  // ---------------- T_inf ----------------
  logic        tinf_start, tinf_busy, tinf_done;
  logic [15:0] tinf_val;
  tinf_estimator #(.K(K), .RW(RW), .VW(VW), .G_Q16(G_Q16)) u_tinf (
    .clk, .rst_n, .start(tinf_start), .beam(q_beam), .rbin(q_rbin),
    .vbin(q_vbin), .busy(tinf_busy), .done(tinf_done), .tinf(tinf_val));

  // ---------------- controller ----------------
  logic [KW-1:0] slot_beam;
  mab_controller #(.K(K), .SNR_LOW(SNR_LOW), .DROP_N(DROP_N)) u_ctl (
    .clk, .rst_n, .go, .phase, .wf_start, .wf_done, .rsp_start, .rsp_done,
    .rsp_kt(kt), .rsp_beta(beta), .q_beam, .ucb_clear, .ucb_kt, .ucb_req,
    .ucb_t, .ucb_sel_valid, .ucb_sel_arm, .ucb_upd, .ucb_upd_arm,
    .ucb_upd_reward, .tinf_start, .tinf_done, .tinf(tinf_val), .slot_start,
    .beam(slot_beam), .slot_done, .ack, .snr, .tinf_q(tinf), .cnt_search,
    .cnt_empty, .cnt_rr, .cnt_regret, .cnt_tinf_restart, .cnt_snr_restart,
    .cnt_noack);

  assign beam = (phase == PH_RADAR) ? wf_beam : slot_beam;
endmodule
