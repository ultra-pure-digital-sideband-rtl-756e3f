// pfb: polyphase filter bank for one real input stream.
//
// Polyphase FIR filtering followed by an N-point FFT turns a real sample
// stream into spectra of N/2 channels (2048 channels from 4096 samples in the
// described instrument). The signal enters the transform as the real part
// with a zero imaginary part. A real input has a conjugate-symmetric
// spectrum, so only channels 0..N/2-1 are kept.
//
// Serial form (LANES = 1): one pfb_fir and one N-point fft_r2sdf, one sample
// per clock. In the transform's bit-reversed output the kept bins are the
// even output positions (bin bitrev(p) leaves at position p), so a spectrum
// comes out over N clocks as N/2 valid beats. Latency from sync to `first`:
// 2 (filter) + N-1+log2(N) (transform) + 1 (output register) = N+log2(N)+2.
//
// Interface (both forms): `sync` marks the first sample(s) of a frame and the
// input must be continuous. `valid` qualifies `chan`, `re`, `im`; `first`
// marks the first beat of a spectrum (channel 0).
//
// Parallel form (LANES = P > 1): the samples arrive P per clock, sample
// P*m + l of a frame on lane l. Each lane has its own polyphase filter
// (the lane's share of the same prototype) and an M = N/P point FFT, and
// fft_lane_combine finishes the N-point transform across the lanes. A frame
// then takes M clocks and every clock delivers P/2 channels: output lane j
// carries channel k1 + M*j, and `chan` gives k1 (bit-reversed order within
// the lane). With P = 1 there is one output lane and `chan` is the channel.
// Latency from sync to `first`: 2 (filter) + M-1+log2(M) (lane FFTs) + 2
// (combiner) + 1 (output register) = M+log2(M)+4 clocks.
//
// That the PFB takes 8-bit samples and yields 2048 channels of 18+18 bit data
// follows the described instrument; computing the real transform with a
// complex FFT of the same length and discarding the upper half, and the lane
// count that lets the 2 GS/s stream through at 2000/P MHz, are this design's
// own choices.
module pfb #(
  parameter int unsigned N      = sbs_pkg::NFFT,
  parameter int unsigned TAPS   = sbs_pkg::PFB_TAPS,
  parameter int unsigned IN_W   = sbs_pkg::ADC_BITS,
  parameter int unsigned DW     = sbs_pkg::DW,
  parameter int unsigned COEF_W = sbs_pkg::COEF_W,
  parameter int unsigned LANES  = sbs_pkg::LANES,
  localparam int unsigned OL    = (LANES > 1) ? LANES / 2 : 1,
  localparam int unsigned LCH   = N / 2 / OL
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         sync,
  input  logic signed [IN_W-1:0]       din [LANES],
  output logic                         valid,
  output logic                         first,
  output logic [$clog2(LCH)-1:0]       chan,
  output logic signed [DW-1:0]         re [OL],
  output logic signed [DW-1:0]         im [OL]
);

  localparam int unsigned M = N / LANES;
  localparam int unsigned L = $clog2(M);

  logic                 fir_sync [LANES];
  logic                 fft_sync [LANES];
  logic signed [DW-1:0] fir_out  [LANES];
  logic signed [DW-1:0] fft_re   [LANES];
  logic signed [DW-1:0] fft_im   [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    pfb_fir #(
      .N(N), .TAPS(TAPS), .IN_W(IN_W), .COEF_W(COEF_W), .OUT_W(DW),
      .STRIDE(LANES), .LANE(l)
    ) u_fir (
      .clk   (clk),
      .rst   (rst),
      .sync  (sync),
      .din   (din[l]),
      .sync_o(fir_sync[l]),
      .dout  (fir_out[l])
    );

    fft_r2sdf #(.N(M), .DW(DW)) u_fft (
      .clk    (clk),
      .rst    (rst),
      .sync   (fir_sync[l]),
      .din_re (fir_out[l]),
      .din_im ('0),
      .sync_o (fft_sync[l]),
      .dout_re(fft_re[l]),
      .dout_im(fft_im[l])
    );
  end

  if (LANES == 1) begin : g_serial
    // Output position within the transform frame.
    logic [L-1:0] pos, pos_now;
    logic         running;

    assign pos_now = fft_sync[0] ? '0 : pos;

    always_ff @(posedge clk) begin
      if (rst) begin
        pos     <= '0;
        running <= 1'b0;
      end else begin
        pos     <= pos_now + 1'b1;
        running <= running | fft_sync[0];
      end
    end

    // Even position p carries bin bitrev(p) = bitrev of p[L-1:1] over L-1 bits.
    logic [L-2:0] ch_now;
    always_comb
      for (int unsigned b = 0; b < L - 1; b++) ch_now[b] = pos_now[L-1-b];

    always_ff @(posedge clk) begin
      if (rst) begin
        valid <= 1'b0;
        first <= 1'b0;
      end else begin
        valid <= (running | fft_sync[0]) && !pos_now[0];
        first <= fft_sync[0];
      end
    end

    always_ff @(posedge clk) begin
      chan  <= ch_now;
      re[0] <= fft_re[0];
      im[0] <= fft_im[0];
    end
  end else begin : g_parallel
    logic                 c_valid, c_first;
    logic [L-1:0]         c_k1;
    logic signed [DW-1:0] c_re [OL];
    logic signed [DW-1:0] c_im [OL];

    fft_lane_combine #(.N(N), .P(LANES), .DW(DW)) u_comb (
      .clk, .rst,
      .sync  (fft_sync[0]),
      .in_re (fft_re),
      .in_im (fft_im),
      .valid (c_valid),
      .first (c_first),
      .k1    (c_k1),
      .out_re(c_re),
      .out_im(c_im)
    );

    always_ff @(posedge clk) begin
      if (rst) begin
        valid <= 1'b0;
        first <= 1'b0;
      end else begin
        valid <= c_valid;
        first <= c_first;
      end
    end

    always_ff @(posedge clk) begin
      chan <= c_k1;
      re   <= c_re;
      im   <= c_im;
    end
  end

endmodule
