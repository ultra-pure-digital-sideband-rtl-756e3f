// pfb_fir: polyphase FIR front end of the polyphase filter bank (PFB).
//
// The input is a real sample stream cut into frames of N samples. For the
// sample at frame position p the filter outputs
//     y[p] = sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*N + p] * x_{k-t}[p]
// where x_{k-t}[p] is the sample at the same position t frames earlier. Fed to
// an N-point transform, this turns the transform's sinc-shaped channel
// response into a flat-topped one with steep skirts, as a PFB does.
//
// Structure: TAPS-1 memories of N samples each hold the earlier frames; at
// every clock they are read and rewritten at address p, so a sample moves one
// memory further per frame. The prototype filter h has TAPS*N coefficients, a
// sinc over TAPS channel widths times a Hamming window, quantised to COEF_W
// bits with its peak at 2^(COEF_W-1)-1; the table is computed at elaboration.
// The products are summed at full width and scaled by 2^-SHIFT with rounding
// and saturation to OUT_W bits.
//
// Interface: `sync` marks the first sample of a frame (position 0); after
// that the stream must be continuous, one sample per clock. Outputs appear
// two clocks after the input, `sync_o` aligned with position 0.
//
// Parallel use: when the samples arrive STRIDE per clock, one instance per
// lane filters the samples at frame positions STRIDE*p + LANE, p = 0..N/STRIDE-1
// (a frame then lasts N/STRIDE clocks); the coefficients are taken from the
// same N-point prototype. STRIDE = 1, LANE = 0 is the serial filter.
//
// The PFB and its 2048 channels (N = 4096 real samples) follow the described
// instrument, which names the PFB but does not describe its inside. The tap
// count, the window and the scaling are this design's choices.
module pfb_fir #(
  parameter int unsigned N      = sbs_pkg::NFFT,
  parameter int unsigned TAPS   = sbs_pkg::PFB_TAPS,
  parameter int unsigned IN_W   = sbs_pkg::ADC_BITS,
  parameter int unsigned COEF_W = sbs_pkg::COEF_W,
  parameter int unsigned OUT_W  = sbs_pkg::DW,
  parameter int unsigned SHIFT  = IN_W + COEF_W - OUT_W,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned LANE   = 0
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    sync,
  input  logic signed [IN_W-1:0]  din,
  output logic                    sync_o,
  output logic signed [OUT_W-1:0] dout
);

  localparam int unsigned M    = N / STRIDE;
  localparam int unsigned PW   = $clog2(M);
  localparam int unsigned SUMW = IN_W + COEF_W + $clog2(TAPS) + 1;

  // Prototype filter, coef[t][p] = h[t*N + STRIDE*p + LANE].
  logic signed [COEF_W-1:0] coef [TAPS][M];

  initial begin
    real pi, x, s, w, m;
    int unsigned n;
    pi = 3.14159265358979323846;
    m  = real'(TAPS * N);
    for (int unsigned t = 0; t < TAPS; t++) begin
      for (int unsigned p = 0; p < M; p++) begin
        n = t * N + STRIDE * p + LANE;
        x = (real'(n) + 0.5 - m / 2.0) / real'(N);
        s = (x == 0.0) ? 1.0 : $sin(pi * x) / (pi * x);
        w = 0.54 - 0.46 * $cos(2.0 * pi * (real'(n) + 0.5) / m);
        coef[t][p] = COEF_W'($rtoi(s * w * real'((1 << (COEF_W - 1)) - 1) + ((s * w >= 0.0) ? 0.5 : -0.5)));
      end
    end
  end

  // Earlier frames: hist[0] is one frame back, hist[TAPS-2] is TAPS-1 back.
  logic signed [IN_W-1:0] hist [TAPS-1][M];
  logic [PW-1:0]          pos, pos_now;

  assign pos_now = sync ? '0 : pos;

  // Stage 1: gather the TAPS samples of this position and their weights.
  logic signed [IN_W-1:0]   smp_q  [TAPS];
  logic signed [COEF_W-1:0] coef_q [TAPS];
  logic                     sync_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      pos    <= '0;
      sync_q <= 1'b0;
    end else begin
      pos    <= pos_now + 1'b1;
      sync_q <= sync;
    end
  end

  always_ff @(posedge clk) begin
    smp_q[0] <= din;
    hist[0][pos_now] <= din;
    for (int unsigned t = 1; t < TAPS; t++) begin
      smp_q[t] <= hist[t-1][pos_now];
      if (t < TAPS - 1) hist[t][pos_now] <= hist[t-1][pos_now];
    end
    // The newest sample takes the last segment of the prototype filter.
    for (int unsigned t = 0; t < TAPS; t++) coef_q[t] <= coef[TAPS-1-t][pos_now];
  end

  // Stage 2: multiply, sum, round and saturate.
  logic signed [SUMW-1:0] acc;
  logic signed [SUMW-1:0] rnd;

  always_comb begin
    acc = '0;
    for (int unsigned t = 0; t < TAPS; t++) acc += SUMW'(smp_q[t]) * SUMW'(coef_q[t]);
    rnd = (acc + (SUMW'(1) <<< (SHIFT - 1))) >>> SHIFT;
  end

  localparam logic signed [SUMW-1:0] MAXV = SUMW'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [SUMW-1:0] MINV = -SUMW'(1 << (OUT_W - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_o <= 1'b0;
      dout   <= '0;
    end else begin
      sync_o <= sync_q;
      if (rnd > MAXV)      dout <= MAXV[OUT_W-1:0];
      else if (rnd < MINV) dout <= MINV[OUT_W-1:0];
      else                 dout <= rnd[OUT_W-1:0];
    end
  end

endmodule
