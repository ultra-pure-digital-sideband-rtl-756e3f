// fft_lane_combine: last step of a P-lane parallel FFT.
//
// An N-point transform of samples arriving P per clock is split as
// N = P*M (Cooley-Tukey): lane l carries the samples x[P*m + l], and an
// M-point FFT per lane (fft_r2sdf) gives Y_l[k1]. This block finishes the
// transform,
//     X[k1 + M*k2] / N = (1/P) * sum_l W_P^(l*k2) * W_N^(l*k1) * Y_l[k1],
// with W_K = exp(-2*pi*i/K). All lanes deliver the same k1 in the same
// clock, in bit-reversed order (k1 = bitrev(q) at lane output position q).
// Stage 1 rotates lane l by W_N^(l*k1) (18-bit twiddles, rounded, saturated);
// stage 2 forms the P-point DFT across the lanes as a sum of constant
// products, divided by P with rounding.
//
// Only k2 = 0..P/2-1 are produced, which for a real input signal are the
// channels 0..N/2-1: output lane j carries channel k1 + M*j. So each clock
// delivers P/2 channels, and a whole spectrum of N/2 channels takes M clocks.
//
// Interface: `sync` marks output position 0 of the lane transforms; the
// outputs follow two clocks later, `first` on k1 = 0, `k1` giving the
// in-lane channel number. P must be a power of two, at least 2.
//
// The described instrument digitises at 2 GS/s; it does not say how its
// datapath is parallelised. This lane structure and its size are this
// design's own.
module fft_lane_combine #(
  parameter int unsigned N  = sbs_pkg::NFFT,
  parameter int unsigned P  = sbs_pkg::LANES,
  parameter int unsigned DW = sbs_pkg::DW,
  parameter int unsigned TW = 18
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         sync,
  input  logic signed [DW-1:0]         in_re [P],
  input  logic signed [DW-1:0]         in_im [P],
  output logic                         valid,
  output logic                         first,
  output logic [$clog2(N/P)-1:0]       k1,
  output logic signed [DW-1:0]         out_re [P/2],
  output logic signed [DW-1:0]         out_im [P/2]
);

  localparam int unsigned M  = N / P;
  localparam int unsigned MB = $clog2(M);
  localparam int unsigned PB = $clog2(P);
  localparam int unsigned SW = DW + TW + PB + 2;

  typedef logic signed [DW-1:0] smp_t;

  // Lane twiddles W_N^(l*k1) and cross-lane DFT constants W_P^(l*k2).
  logic signed [TW-1:0] lw_re [P][M];
  logic signed [TW-1:0] lw_im [P][M];
  logic signed [TW-1:0] pw_re [P][P/2];
  logic signed [TW-1:0] pw_im [P][P/2];

  initial begin
    real pi, a, sc;
    pi = 3.14159265358979323846;
    sc = real'((1 << (TW - 1)) - 1);
    for (int unsigned l = 0; l < P; l++) begin
      for (int unsigned k = 0; k < M; k++) begin
        a = -2.0 * pi * real'(l * k) / real'(N);
        lw_re[l][k] = TW'($rtoi($floor($cos(a) * sc + 0.5)));
        lw_im[l][k] = TW'($rtoi($floor($sin(a) * sc + 0.5)));
      end
      for (int unsigned k = 0; k < P / 2; k++) begin
        a = -2.0 * pi * real'((l * k) % P) / real'(P);
        pw_re[l][k] = TW'($rtoi($floor($cos(a) * sc + 0.5)));
        pw_im[l][k] = TW'($rtoi($floor($sin(a) * sc + 0.5)));
      end
    end
  end

  function automatic smp_t sat(input logic signed [SW-1:0] v);
    if (v > SW'((1 << (DW - 1)) - 1)) return smp_t'((1 << (DW - 1)) - 1);
    if (v < -SW'(1 << (DW - 1)))      return smp_t'(-(1 << (DW - 1)));
    return v[DW-1:0];
  endfunction

  // Position within the lane transforms and its bit reversal.
  logic [MB-1:0] pos, pos_now, k1_now;
  logic          running;
  assign pos_now = sync ? '0 : pos;
  always_comb
    for (int unsigned b = 0; b < MB; b++) k1_now[b] = pos_now[MB-1-b];

  always_ff @(posedge clk) begin
    if (rst) begin
      pos     <= '0;
      running <= 1'b0;
    end else begin
      pos     <= pos_now + 1'b1;
      running <= running | sync;
    end
  end

  // Stage 1: lane rotation.
  smp_t          z_re [P];
  smp_t          z_im [P];
  logic [MB-1:0] k1_1;

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < P; l++) begin
      logic signed [SW-1:0] pr, pi;
      pr = SW'(in_re[l]) * SW'(lw_re[l][k1_now]) - SW'(in_im[l]) * SW'(lw_im[l][k1_now]);
      pi = SW'(in_re[l]) * SW'(lw_im[l][k1_now]) + SW'(in_im[l]) * SW'(lw_re[l][k1_now]);
      z_re[l] <= sat((pr + (SW'(1) <<< (TW - 2))) >>> (TW - 1));
      z_im[l] <= sat((pi + (SW'(1) <<< (TW - 2))) >>> (TW - 1));
    end
    k1_1 <= k1_now;
  end

  // Stage 2: P-point DFT across the lanes, divided by P.
  always_ff @(posedge clk) begin
    for (int unsigned j = 0; j < P / 2; j++) begin
      logic signed [SW-1:0] sr, si;
      sr = '0;
      si = '0;
      for (int unsigned l = 0; l < P; l++) begin
        sr += SW'(z_re[l]) * SW'(pw_re[l][j]) - SW'(z_im[l]) * SW'(pw_im[l][j]);
        si += SW'(z_re[l]) * SW'(pw_im[l][j]) + SW'(z_im[l]) * SW'(pw_re[l][j]);
      end
      out_re[j] <= sat((sr + (SW'(1) <<< (TW + PB - 2))) >>> (TW + PB - 1));
      out_im[j] <= sat((si + (SW'(1) <<< (TW + PB - 2))) >>> (TW + PB - 1));
    end
    k1 <= k1_1;
  end

  logic v1, f1;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; f1 <= 1'b0;
      valid <= 1'b0; first <= 1'b0;
    end else begin
      v1 <= running | sync; f1 <= sync;
      valid <= v1; first <= f1;
    end
  end

endmodule
