// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) FFT.
//
// Stage STAGE of an N-point transform pairs samples D = N/2^(STAGE+1) apart.
// During the first D samples of each 2D-sample block the input is parked in a
// D-word feedback memory while the memory's previous content, the twiddled
// differences of the last block, goes out. During the second D samples the
// parked sample a meets the new sample b: a+b goes out at once and
// (a-b)*W^(j*2^STAGE) is parked, with W = exp(-2*pi*i/N) and j the position
// within the half block. Chaining the stages for STAGE = 0..log2(N)-1 gives
// the transform in bit-reversed order.
//
// With SCALE = 1 the sum and difference are halved (rounded), so the stage
// cannot overflow; with SCALE = 0 they saturate to DW bits. Twiddles are
// TW-bit signed fractions computed at elaboration; the product is rounded
// and saturated to DW bits.
//
// Interface: `sync` marks sample 0 of an input frame, the stream is one
// complex sample per clock. `sync_o` marks sample 0 of the output frame,
// D+1 clocks later (D in the feedback memory, one output register), and
// recurs every N clocks once a first `sync` has been seen.
module fft_sdf_stage #(
  parameter int unsigned N     = sbs_pkg::NFFT,
  parameter int unsigned STAGE = 0,
  parameter int unsigned DW    = sbs_pkg::DW,
  parameter int unsigned TW    = 18,
  parameter bit          SCALE = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 sync,
  input  logic signed [DW-1:0] din_re,
  input  logic signed [DW-1:0] din_im,
  output logic                 sync_o,
  output logic signed [DW-1:0] dout_re,
  output logic signed [DW-1:0] dout_im
);

  localparam int unsigned D  = N >> (STAGE + 1);
  localparam int unsigned CB = $clog2(2 * D);        // block counter width
  localparam int unsigned LN = $clog2(N);            // frame counter width
  localparam int unsigned JB = (D > 1) ? $clog2(D) : 1;

  typedef logic signed [DW-1:0] smp_t;

  // Twiddle table for this stage: tw[j] = exp(-i*pi*j/D).
  logic signed [TW-1:0] tw_re [D];
  logic signed [TW-1:0] tw_im [D];

  initial begin
    real pi, a, sc;
    pi = 3.14159265358979323846;
    sc = real'((1 << (TW - 1)) - 1);
    for (int unsigned j = 0; j < D; j++) begin
      a = pi * real'(j) / real'(D);
      tw_re[j] = TW'($rtoi($floor($cos(a) * sc + 0.5)));
      tw_im[j] = TW'($rtoi($floor(-$sin(a) * sc + 0.5)));
    end
  end

  function automatic smp_t sat(input logic signed [DW+TW+1:0] v);
    if (v > $signed((DW+TW+2)'((1 << (DW - 1)) - 1)))  return smp_t'((1 << (DW - 1)) - 1);
    if (v < -$signed((DW+TW+2)'(1 << (DW - 1))))       return smp_t'(-(1 << (DW - 1)));
    return v[DW-1:0];
  endfunction

  logic [LN-1:0] cnt, cnt_now;
  logic          seen;
  logic [JB-1:0] j;
  logic          phase;
  smp_t          fb_re [D];
  smp_t          fb_im [D];
  smp_t          a_re, a_im;

  assign cnt_now = sync ? '0 : cnt;
  assign phase   = cnt_now[CB-1];
  assign j       = (D > 1) ? JB'(cnt_now) : '0;
  assign a_re    = fb_re[j];
  assign a_im    = fb_im[j];

  // Butterfly.
  logic signed [DW+TW+1:0] sum_re, sum_im, dif_re, dif_im;
  smp_t                    s_re, s_im, d_re, d_im;

  always_comb begin
    sum_re = (DW+TW+2)'(a_re) + (DW+TW+2)'(din_re);
    sum_im = (DW+TW+2)'(a_im) + (DW+TW+2)'(din_im);
    dif_re = (DW+TW+2)'(a_re) - (DW+TW+2)'(din_re);
    dif_im = (DW+TW+2)'(a_im) - (DW+TW+2)'(din_im);
    if (SCALE) begin
      sum_re = (sum_re + 1) >>> 1;
      sum_im = (sum_im + 1) >>> 1;
      dif_re = (dif_re + 1) >>> 1;
      dif_im = (dif_im + 1) >>> 1;
    end
    s_re = sat(sum_re);
    s_im = sat(sum_im);
    d_re = sat(dif_re);
    d_im = sat(dif_im);
  end

  // Twiddle rotation of the difference.
  logic signed [DW+TW+1:0] p_re, p_im;
  smp_t                    r_re, r_im;

  always_comb begin
    p_re = (DW+TW+2)'(d_re) * (DW+TW+2)'(tw_re[j]) - (DW+TW+2)'(d_im) * (DW+TW+2)'(tw_im[j]);
    p_im = (DW+TW+2)'(d_re) * (DW+TW+2)'(tw_im[j]) + (DW+TW+2)'(d_im) * (DW+TW+2)'(tw_re[j]);
    p_re = (p_re + ((DW+TW+2)'(1) <<< (TW - 2))) >>> (TW - 1);
    p_im = (p_im + ((DW+TW+2)'(1) <<< (TW - 2))) >>> (TW - 1);
    r_re = sat(p_re);
    r_im = sat(p_im);
  end

  always_ff @(posedge clk) begin
    if (!phase) begin
      fb_re[j] <= din_re;
      fb_im[j] <= din_im;
    end else begin
      fb_re[j] <= r_re;
      fb_im[j] <= r_im;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      seen    <= 1'b0;
      sync_o  <= 1'b0;
      dout_re <= '0;
      dout_im <= '0;
    end else begin
      cnt     <= cnt_now + 1'b1;
      seen    <= seen | sync;
      sync_o  <= (seen | sync) && (cnt_now == LN'(D));
      dout_re <= phase ? s_re : a_re;
      dout_im <= phase ? s_im : a_im;
    end
  end

endmodule
