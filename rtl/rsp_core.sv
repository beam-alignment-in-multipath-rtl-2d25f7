// rsp_core: radar signal processing accelerator of the radar search phase.
//
// It holds the radar data square of all K beams (K x P packets x 2N samples,
// written by the capture port while the sweep runs) and, after start, turns
// it into the candidate beam set K~:
//   1. matched_filter compresses beam b into range spectra (P x NR) in bank
//      b mod 2 of a ping-pong range-spectrum buffer;
//   2. peak_detector finds up to MAX_TGT range peaks of that beam;
//   3. music_doppler estimates the Doppler bin of every peak;
//   4. a peak is mobile when |Doppler bin| >= VMIN; the beam's record (mobile,
//      far, range and Doppler of its strongest mobile peak) goes to
//      beam_subset, which builds beta once all beams are done.
// Steps 2-4 (the back end) of beam b run while the matched filter already
// processes beam b + 1 into the other bank, the pipelined RSP of the paper: a
// new beam enters every matched-filter time (1.74 ms at 100 MHz with the
// defaults) instead of every matched-filter plus MUSIC time. A bank is reused
// only after the back end has released it.
//
// Timing: start (after the capture sweep) to done: about K matched-filter
// times plus one back-end time. overlap is high in cycles where both stages
// work. kt, beta and the query port stay valid until the next start.
// The split into stages and buffers follows Fig. 3 and the paper's pipelining
// remark; the bank handshake, VMIN and the record format are this design's.
module rsp_core
  import isac_pkg::*;
#(
  parameter int K          = 32,
  parameter int P          = 20,
  parameter int N          = 512,
  parameter int NR         = 512,
  parameter int LANES      = 32,
  parameter int SHIFT      = $clog2(N) - 4,
  parameter int D          = 61,
  parameter logic [31:0] DPHASE = 32'd996432,
  parameter int MAX_TGT    = 4,
  parameter int THR_MUL    = 16,
  parameter int STRONG_MUL = 64,
  parameter int RGATE      = NR * 7 / 8,
  parameter int VMIN       = 1,
  parameter int MANY       = K / 2,
  localparam int KW  = $clog2(K),
  localparam int CW  = $clog2(K + 1),
  localparam int G   = NR / LANES,
  localparam int CAW = $clog2(K * P * 2 * N),
  localparam int SAW = $clog2(2 * P * G),
  localparam int RW  = $clog2(NR),
  localparam int DW  = $clog2(D),
  localparam int VW  = DW + 1,
  localparam int PWW = 2 * Y_W + $clog2(P) + 1,
  localparam int TW  = $clog2(MAX_TGT + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // capture port of the radar data square
  input  logic                 cap_we,
  input  logic [CAW-1:0]       cap_addr,
  input  samp_t                cap_data,
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 overlap,
  // candidate set
  output logic [CW-1:0]        kt,
  output logic [KW-1:0]        beta [K],
  output logic [CW-1:0]        n_dropped,
  input  logic [KW-1:0]        q_beam,
  output logic [RW-1:0]        q_rbin,
  output logic signed [VW-1:0] q_vbin
);
  // ---------------- buffers ----------------
  logic           cube_re;
  logic [CAW-1:0] cube_raddr;
  samp_t          cube_rdata;
  sdp_ram #(.W($bits(samp_t)), .DEPTH(K * P * 2 * N)) u_cube (
    .clk, .we(cap_we), .waddr(cap_addr), .wdata(cap_data),
    .re(cube_re), .raddr(cube_raddr), .rdata(cube_rdata));

  logic              sp_we, sp_re;
  logic [SAW-1:0]    sp_waddr, sp_raddr;
  yval_t [LANES-1:0] sp_wdata, sp_rdata;
  sdp_ram #(.W(LANES * $bits(yval_t)), .DEPTH(2 * P * G)) u_spec (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata),
    .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata));

  // ---------------- front end: matched filter ----------------
  logic          running;
  logic [KW:0]   mf_beam, mf_done_cnt, be_beam;
  logic          mf_start, mf_busy, mf_done;
  logic [1:0]    occupied;
  logic          mf_bank, be_bank;

  assign mf_bank  = mf_beam[0];
  assign be_bank  = be_beam[0];
  assign mf_start = running && !mf_busy && (mf_beam < (KW+1)'(K)) && !occupied[mf_bank];

  matched_filter #(.K(K), .P(P), .N(N), .NR(NR), .LANES(LANES), .SHIFT(SHIFT)) u_mf (
    .clk, .rst_n, .start(mf_start), .beam(mf_beam[KW-1:0]), .bank(mf_bank),
    .busy(mf_busy), .done(mf_done),
    .cube_re, .cube_raddr, .cube_rdata,
    .sp_we, .sp_waddr, .sp_wdata);

  // ---------------- back end: peak detection, MUSIC, classification ----------------
  typedef enum logic [2:0] {B_IDLE, B_PEAK, B_MUSIC, B_CLASS, B_REC, B_FIN, B_WAIT} bstate_e;
  bstate_e bstate;

  logic              pk_start, pk_busy, pk_done, pk_re;
  logic [SAW-1:0]    pk_raddr;
  logic [TW-1:0]     ntgt;
  logic [RW-1:0]     tgt_rbin [MAX_TGT];
  logic [PWW-1:0]    tgt_pw   [MAX_TGT];
  logic              tgt_far  [MAX_TGT];

  peak_detector #(.P(P), .NR(NR), .LANES(LANES), .MAX_TGT(MAX_TGT), .THR_MUL(THR_MUL),
                  .STRONG_MUL(STRONG_MUL), .RGATE(RGATE)) u_peak (
    .clk, .rst_n, .start(pk_start), .bank(be_bank), .busy(pk_busy), .done(pk_done),
    .sp_re(pk_re), .sp_raddr(pk_raddr), .sp_rdata,
    .ntgt, .tgt_rbin, .tgt_pw, .tgt_far);

  logic              mu_start, mu_busy, mu_done, mu_re;
  logic [SAW-1:0]    mu_raddr;
  logic [TW-1:0]     t;
  logic [DW-1:0]     dbin;
  logic signed [VW-1:0] vbin;

  music_doppler #(.P(P), .NR(NR), .LANES(LANES), .D(D), .DPHASE(DPHASE)) u_music (
    .clk, .rst_n, .start(mu_start), .bank(be_bank), .rbin(tgt_rbin[t]),
    .busy(mu_busy), .done(mu_done),
    .sp_re(mu_re), .sp_raddr(mu_raddr), .sp_rdata, .dbin, .vbin);

  assign sp_re    = pk_re | mu_re;
  assign sp_raddr = pk_re ? pk_raddr : mu_raddr;

  // per-beam result being collected
  logic                 b_mobile, b_far;
  logic [RW-1:0]        b_rbin;
  logic signed [VW-1:0] b_vbin;
  logic [PWW-1:0]       b_pw;
  logic                 is_mobile;
  assign is_mobile = (vbin >= VW'(VMIN)) || (vbin <= -VW'(VMIN));

  logic rec_valid, sub_clear, sub_fin, sub_done;
  beam_subset #(.K(K), .MANY(MANY), .RW(RW), .VW(VW)) u_subset (
    .clk, .rst_n, .clear(sub_clear), .rec_valid, .rec_beam(be_beam[KW-1:0]),
    .rec_mobile(b_mobile), .rec_far(b_far), .rec_rbin(b_rbin), .rec_vbin(b_vbin),
    .finalize(sub_fin), .done(sub_done), .kt, .beta, .n_dropped,
    .q_beam, .q_rbin, .q_vbin);

  always_comb begin
    pk_start  = (bstate == B_IDLE) && running && (be_beam < mf_done_cnt);
    mu_start  = (bstate == B_MUSIC) && !mu_busy && !mu_done && (t < ntgt);
    rec_valid = (bstate == B_REC);
    sub_fin   = (bstate == B_FIN);
    sub_clear = start && !running;
    busy      = running;
    overlap   = mf_busy && (bstate != B_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0; mf_beam <= '0; mf_done_cnt <= '0; be_beam <= '0;
      occupied <= '0; bstate <= B_IDLE; t <= '0;
      b_mobile <= 1'b0; b_far <= 1'b0; b_rbin <= '0; b_vbin <= '0; b_pw <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; mf_beam <= '0; mf_done_cnt <= '0; be_beam <= '0; occupied <= '0;
      end
      if (mf_start) begin
        occupied[mf_bank] <= 1'b1;
        mf_beam <= mf_beam + 1'b1;
      end
      if (mf_done) mf_done_cnt <= mf_done_cnt + 1'b1;

      unique case (bstate)
        B_IDLE: if (pk_start) begin
          bstate <= B_PEAK;
          b_mobile <= 1'b0; b_far <= 1'b1; b_rbin <= '0; b_vbin <= '0; b_pw <= '0;
        end
        B_PEAK: if (pk_done) begin
          bstate <= B_MUSIC; t <= '0;
        end
        B_MUSIC: begin
          if (t >= ntgt) bstate <= B_REC;
          else if (mu_done) bstate <= B_CLASS;
        end
        B_CLASS: begin
          if (is_mobile) begin
            b_mobile <= 1'b1;
            b_far    <= b_far & tgt_far[t];
            if (!b_mobile || tgt_pw[t] > b_pw) begin
              b_pw <= tgt_pw[t]; b_rbin <= tgt_rbin[t]; b_vbin <= vbin;
            end
          end
          t <= t + 1'b1;
          bstate <= B_MUSIC;
        end
        B_REC: begin
          occupied[be_bank] <= 1'b0;
          be_beam <= be_beam + 1'b1;
          bstate  <= (be_beam == (KW+1)'(K - 1)) ? B_FIN : B_IDLE;
        end
        B_FIN: bstate <= B_WAIT;
        B_WAIT: if (sub_done) begin
          bstate <= B_IDLE; running <= 1'b0; done <= 1'b1;
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end
endmodule
