// music_doppler: 1-D MUSIC Doppler estimate for one detected range bin.
//
// The slow-time vector y = (Y[0][r] .. Y[P-1][r]) of range bin r is read from
// the range-spectrum buffer. The paper forms R = y y^H, splits its
// eigenvectors into the signal vector q1 (largest eigenvalue) and the noise
// subspace A_n, and takes the Doppler bin that maximises the pseudo-spectrum
// 1 / (e^H A_n A_n^H e). With a single snapshot R has rank one, so q1 is
// exactly y / ||y|| and A_n A_n^H = I - y y^H / ||y||^2. The denominator,
// multiplied by the bin-independent ||y||^2, is therefore
//   den(d) = P * ||y||^2 - |sum_p y[p] * exp(-j * 2pi * f_d * p * T_p)|^2,
// and the unit returns the bin d with the smallest den (ties: lowest d). No
// eigen-solver is needed; the result equals the paper's MUSIC peak.
//
// Bin d stands for Doppler f_d = (d - (D-1)/2) * df. DPHASE is the phase step
// df * T_p per bin and packet in units of 2^-32 turns; the default 996432 is
// df = 400 Hz (1 m/s at 60 GHz) times T_p = 0.58 us. The steering terms come
// from a 24-bit CORDIC (close to the single-precision MUSIC of the paper).
// The exponent sign is chosen so that a return whose phase advances by
// +2pi f T_p per packet peaks at +f.
//
// Timing: bank and rbin are sampled at start; start to done takes P + 2 + D * (P + 1) cycles
// (1,303 with the defaults). dbin is the winning bin, vbin = dbin - (D-1)/2 is
// the velocity in bins (1 m/s each). Outputs hold until the next start.
module music_doppler
  import isac_pkg::*;
#(
  parameter int P      = 20,
  parameter int NR     = 512,
  parameter int LANES  = 32,
  parameter int D      = 61,
  parameter logic [31:0] DPHASE = 32'd996432,
  localparam int G    = NR / LANES,
  localparam int SAW  = $clog2(2 * P * G),
  localparam int RW   = $clog2(NR),
  localparam int DW   = $clog2(D),
  localparam int DC   = (D - 1) / 2,
  localparam int NYW  = 2 * Y_W + $clog2(P) + 1,
  localparam int CW   = Y_W + 24 + 1 + $clog2(P) + 1,
  localparam int DENW = 2 * (CW - 8) + 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   bank,
  input  logic [RW-1:0]          rbin,
  output logic                   busy,
  output logic                   done,
  output logic                   sp_re,
  output logic [SAW-1:0]         sp_raddr,
  input  yval_t [LANES-1:0]      sp_rdata,
  output logic [DW-1:0]          dbin,
  output logic signed [DW:0]     vbin
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SCAN, S_EVAL} state_e;
  state_e state;

  yval_t                     y [P];
  logic [NYW-1:0]            ny;
  logic [$clog2(P+1)-1:0]    rd, rd_d, p;
  logic                      vld_d;
  logic                      bank_q;
  logic [RW-1:0]             rbin_q;
  logic [DW:0]               d;
  logic [31:0]               step, ph;      // phase per packet of bin d, running phase
  logic signed [CW-1:0]      c_re, c_im;
  logic signed [DENW-1:0]    den_min;

  assign busy = (state != S_IDLE);
  assign vbin = $signed({1'b0, dbin}) - (DW+1)'(DC);

  always_comb begin
    sp_re    = (state == S_LOAD) && (rd < ($bits(rd))'(P));
    sp_raddr = SAW'(SAW'(bank_q) * SAW'(P * G) + SAW'(rd) * SAW'(G) + SAW'(rbin_q / RW'(LANES)));
  end

  yval_t yin;
  always_comb yin = sp_rdata[rbin_q % RW'(LANES)];

  logic signed [23:0] cs, sn;
  cordic_sincos #(.ITER(24)) u_cordic (.phase(ph), .cos_o(cs), .sin_o(sn));

  // y[p] * exp(-j*theta) = (yr*c + yi*s) + j(yi*c - yr*s)
  logic signed [CW-1:0] t_re, t_im;
  always_comb begin
    t_re = CW'($signed(y[p].re) * cs) + CW'($signed(y[p].im) * sn);
    t_im = CW'($signed(y[p].im) * cs) - CW'($signed(y[p].re) * sn);
  end

  logic signed [CW-9:0]   cr, ci;
  logic signed [DENW-1:0] den;
  always_comb begin
    cr  = (CW-8)'(c_re >>> 8);
    ci  = (CW-8)'(c_im >>> 8);
    den = (DENW'(P) * DENW'(ny) <<< 28) - DENW'(cr * cr) - DENW'(ci * ci);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; rd <= '0; rd_d <= '0; vld_d <= 1'b0; p <= '0;
      d <= '0; step <= '0; ph <= '0; c_re <= '0; c_im <= '0; ny <= '0;
      den_min <= '0; dbin <= '0; bank_q <= 1'b0; rbin_q <= '0;
      for (int i = 0; i < P; i++) y[i] <= '0;
    end else begin
      done  <= 1'b0;
      vld_d <= sp_re;
      rd_d  <= rd;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD; rd <= '0; ny <= '0; bank_q <= bank; rbin_q <= rbin;
        end
        S_LOAD: begin
          if (sp_re) rd <= rd + 1'b1;
          if (vld_d) begin
            y[rd_d] <= yin;
            ny <= ny + NYW'($signed(yin.re) * $signed(yin.re)) + NYW'($signed(yin.im) * $signed(yin.im));
            if (rd_d == ($bits(rd_d))'(P - 1)) begin
              state <= S_SCAN; d <= '0; p <= '0; ph <= '0; c_re <= '0; c_im <= '0;
              step  <= 32'(-DC) * DPHASE;
            end
          end
        end
        S_SCAN: begin
          c_re <= c_re + t_re;
          c_im <= c_im + t_im;
          ph   <= ph + step;
          if (p == ($bits(p))'(P - 1)) state <= S_EVAL;
          else                         p <= p + 1'b1;
        end
        S_EVAL: begin
          if (d == 0 || den < den_min) begin
            den_min <= den;
            dbin    <= d[DW-1:0];
          end
          p <= '0; ph <= '0; c_re <= '0; c_im <= '0;
          step <= step + DPHASE;
          if (d == (DW+1)'(D - 1)) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            d <= d + 1'b1; state <= S_SCAN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
