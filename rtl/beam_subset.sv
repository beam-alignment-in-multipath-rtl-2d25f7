// beam_subset: builds the candidate beam set K~ (the index list beta of
// Algorithm 2) from the per-beam radar results.
//
// During the radar search the RSP delivers one record per beam: whether a
// target with non-zero Doppler was found ("mobile"), whether every such target
// was a weak echo near the maximum range ("far"), and the range and Doppler
// bins of the strongest mobile target. Beams with only static returns are
// clutter and are left out. On finalize the unit scans the K records in
// beam order and appends each mobile beam to beta. If more than MANY beams are
// mobile, beams flagged far are dropped as long multipath, as the paper
// suggests when a very large number of beams indicate targets.
//
// Timing: clear empties the records (one cycle). finalize to done takes K + 1
// cycles; kt, beta, n_dropped then hold until the next clear/finalize. The
// query port (q_beam -> q_rbin, q_vbin) is combinational. MANY and the
// choice of the strongest target as the beam's representative are this
// design's choices.
module beam_subset #(
  parameter int K    = 32,
  parameter int MANY = K / 2,
  parameter int RW   = 9,
  parameter int VW   = 7,
  localparam int KW  = $clog2(K),
  localparam int CW  = $clog2(K + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 rec_valid,
  input  logic [KW-1:0]        rec_beam,
  input  logic                 rec_mobile,
  input  logic                 rec_far,
  input  logic [RW-1:0]        rec_rbin,
  input  logic signed [VW-1:0] rec_vbin,
  input  logic                 finalize,
  output logic                 done,
  output logic [CW-1:0]        kt,
  output logic [KW-1:0]        beta [K],
  output logic [CW-1:0]        n_dropped,
  input  logic [KW-1:0]        q_beam,
  output logic [RW-1:0]        q_rbin,
  output logic signed [VW-1:0] q_vbin
);
  logic                 mob  [K];
  logic                 far  [K];
  logic [RW-1:0]        rbin [K];
  logic signed [VW-1:0] vbin [K];
  logic [CW-1:0]        n_mobile;
  logic                 scanning;
  logic [KW:0]          k;
  logic                 drop_far;

  assign q_rbin = rbin[q_beam];
  assign q_vbin = vbin[q_beam];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_mobile <= '0; scanning <= 1'b0; k <= '0; kt <= '0; n_dropped <= '0;
      done <= 1'b0; drop_far <= 1'b0;
      for (int i = 0; i < K; i++) begin
        mob[i] <= 1'b0; far[i] <= 1'b0; rbin[i] <= '0; vbin[i] <= '0; beta[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (clear) begin
        n_mobile <= '0; kt <= '0; n_dropped <= '0; scanning <= 1'b0;
        for (int i = 0; i < K; i++) mob[i] <= 1'b0;
      end else if (rec_valid) begin
        mob[rec_beam]  <= rec_mobile;
        far[rec_beam]  <= rec_far;
        rbin[rec_beam] <= rec_rbin;
        vbin[rec_beam] <= rec_vbin;
        if (rec_mobile && !mob[rec_beam]) n_mobile <= n_mobile + 1'b1;
      end else if (finalize && !scanning) begin
        scanning <= 1'b1; k <= '0; kt <= '0; n_dropped <= '0;
        drop_far <= (n_mobile > CW'(MANY));
      end else if (scanning) begin
        if (mob[k[KW-1:0]]) begin
          if (drop_far && far[k[KW-1:0]]) begin
            n_dropped <= n_dropped + 1'b1;
          end else begin
            beta[kt[KW-1:0]] <= k[KW-1:0];
            kt <= kt + 1'b1;
          end
        end
        if (k == (KW+1)'(K - 1)) begin
          scanning <= 1'b0; done <= 1'b1;
        end
        k <= k + 1'b1;
      end
    end
  end
endmodule
