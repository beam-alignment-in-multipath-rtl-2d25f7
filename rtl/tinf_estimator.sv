// tinf_estimator: estimated time to beam misalignment T_inf, in slots, of the
// beam the bandit has settled on.
//
// The paper restarts the radar search after T_inf = r * dphi / (v * cos(phi)),
// with r the target range, v its speed, phi the beam angle and dphi the beam
// width. Here r = rbin * dR and v = |vbin| * dv, so in slots of length T
//     T_inf = rbin * |1/vbin| * G / cos(phi),   G = dR * dphi / (dv * T).
// G is a Q16 constant: with dR = c / (2 * 1.76 GHz) = 0.0852 m, dphi = 4 deg,
// dv = 1 m/s and T = 5.5 ms, G = 1.0818 slots, i.e. G_Q16 = 70898.
// Beam k points at phi_k = -64 + (k + 1/2) * 128 / K degrees (K beams across
// -64..64 degrees; -62, -58, ..., 62 for K = 32). cos(phi_k) comes from the
// shared CORDIC in Q1.22; the division is the sequential restoring divider.
//
// Interface: start with beam, rbin (unsigned) and vbin (signed Doppler bin)
// sampled on that edge; done pulses with tinf (slots, 16-bit, saturated to
// 65535, at least 1). A zero speed gives 65535 ("no deadline").
// Timing: done arrives 43 cycles after the start edge (fixed).
// Follows the paper: the T_inf formula and the 4-degree beam width, 5.5 ms
// slot, 1.76 GHz bandwidth and 1 m/s Doppler resolution behind G. Own choice:
// beam-angle grid, fixed-point formats, saturation and minimum of one slot.
module tinf_estimator #(
  parameter int K     = 32,
  parameter int RW    = 9,
  parameter int VW    = 7,
  parameter int G_Q16 = 70898,
  localparam int KW   = $clog2(K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [KW-1:0]        beam,
  input  logic [RW-1:0]        rbin,
  input  logic signed [VW-1:0] vbin,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          tinf
);
  // beam angle in turns * 2^32: step 128/K degrees, first beam half a step in
  localparam longint PSTEP = (64'd1 << 39) / (64'(K) * 64'd360);
  localparam longint PH0   = (64'd1 << 32) - ((64'd1 << 32) * (64'(K) * 64 - 64)) / (64'(K) * 64'd360);

  logic [31:0]        phase;
  logic signed [23:0] cos_v, sin_v;
  always_comb phase = 32'(PH0) + 32'(PSTEP) * 32'(beam);
  cordic_sincos u_cos (.phase, .cos_o(cos_v), .sin_o(sin_v));

  logic [VW-1:0] vabs;
  always_comb vabs = vbin[VW-1] ? VW'(-vbin) : VW'(vbin);

  logic [39:0] num_q;
  logic [31:0] den_q;
  logic        d_start, d_busy, d_done;
  logic [39:0] quo;
  seq_divider #(.NW(40), .DW(32)) u_div (
    .clk, .rst_n, .start(d_start), .dividend(num_q), .divisor(den_q),
    .busy(d_busy), .done(d_done), .quotient(quo));

  // rbin * G * 2^6 / (|v| * cos_Q22) = rbin * G_Q16 / (|v| * cos) in slots
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_q <= '0; den_q <= '0; d_start <= 1'b0; busy <= 1'b0; done <= 1'b0; tinf <= '0;
    end else begin
      d_start <= 1'b0;
      done    <= 1'b0;
      if (start && !busy) begin
        num_q   <= (40'(rbin) * 40'(G_Q16)) << 6;
        den_q   <= 32'(vabs) * 32'(cos_v[22:0]);
        d_start <= 1'b1;
        busy    <= 1'b1;
      end
      if (d_done) begin
        busy <= 1'b0;
        done <= 1'b1;
        if (quo > 40'd65535)   tinf <= 16'hFFFF;
        else if (quo == '0)    tinf <= 16'd1;
        else                   tinf <= quo[15:0];
      end
    end
  end
endmodule
