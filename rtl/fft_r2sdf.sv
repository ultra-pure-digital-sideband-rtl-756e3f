// fft_r2sdf: streaming N-point complex FFT, radix-2 single-path delay
// feedback, one complex sample per clock.
//
// log2(N) fft_sdf_stage instances are chained; stage s pairs samples
// N/2^(s+1) apart. The output frame holds X[k] = sum_n x[n] exp(-2*pi*i*n*k/N)
// in bit-reversed order: output sample p of a frame is X[bitrev(p)]. Bit s of
// SHIFT_MASK makes stage s halve its results; with all bits set (the default)
// the output is X[k]/N and no stage can overflow.
//
// Interface: `sync` marks sample 0 of an input frame, and the stream must be
// continuous. `sync_o` marks sample 0 of the matching output frame, N-1+log2(N)
// clocks later, and repeats every N clocks.
//
// Data are 18+18 bits (real and imaginary), as in the described instrument's
// FFT. The SDF architecture, the rounding and the scaling schedule are this
// design's choices.
module fft_r2sdf #(
  parameter int unsigned N          = sbs_pkg::NFFT,
  parameter int unsigned DW         = sbs_pkg::DW,
  parameter int unsigned TW         = 18,
  parameter logic [31:0] SHIFT_MASK = '1
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

  localparam int unsigned L = $clog2(N);

  logic                 s_sync [L+1];
  logic signed [DW-1:0] s_re   [L+1];
  logic signed [DW-1:0] s_im   [L+1];

  assign s_sync[0] = sync;
  assign s_re[0]   = din_re;
  assign s_im[0]   = din_im;

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(
      .N(N), .STAGE(s), .DW(DW), .TW(TW), .SCALE(SHIFT_MASK[s])
    ) u_stage (
      .clk    (clk),
      .rst    (rst),
      .sync   (s_sync[s]),
      .din_re (s_re[s]),
      .din_im (s_im[s]),
      .sync_o (s_sync[s+1]),
      .dout_re(s_re[s+1]),
      .dout_im(s_im[s+1])
    );
  end

  assign sync_o  = s_sync[L];
  assign dout_re = s_re[L];
  assign dout_im = s_im[L];

endmodule
