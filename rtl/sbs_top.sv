// sbs_top: calibrated digital sideband-separating spectrometer.
//
// A sideband-separating (2SB) receiver normally combines the I and Q outputs
// of its two mixers in an analog IF hybrid, and the amplitude and phase
// imbalance of the analog parts limits how well the unwanted sideband is
// rejected. Here the two IF signals are digitised instead and the hybrid is
// done per spectral channel, with complex constants that undo the measured
// imbalance:
//
//   ADC I -> adc_if -> pfb (I) --+--> C1 --+
//                                |         +--> (+) -> |.|^2 -> vacc -> LSB
//                                |  +-> C2 +
//                                +--|-> C3 --+
//   ADC Q -> adc_if -> pfb (Q) ---+-> C4 ----+--> (+) -> |.|^2 -> vacc -> USB
//
//   LSB[k] = C1[k]*I[k] + C2[k]*Q[k],   USB[k] = C3[k]*I[k] + C4[k]*Q[k]
//
// Each filter bank yields NCH = NFFT/2 channels of 18+18 bit data; the
// constants C1..C4 are written by the host over cal_wr; the powers (48 bits)
// are integrated for acc_len spectra in 64-bit vector accumulators and leave
// on the lsb/usb dump ports. Next to it, the calibration spectrometer
// (cal_xspec and four more accumulators) integrates |I|^2, |Q|^2 and
// I*conj(Q) per channel; from these, taken with a test tone in each sideband,
// the host computes the constants.
//
// Parallel datapath: each ADC delivers LANES samples per clock (8 by default,
// so 2 GS/s needs a 250 MHz clock). The filter banks then deliver LANES/2
// channels per clock, and everything after them (hybrid, power, accumulators,
// calibration spectrometer) is built once per output lane j, which carries
// the channels j*LCH .. (j+1)*LCH-1 (LCH = NCH/(LANES/2) = NFFT/LANES). The
// constants follow the channels: lane j holds constants j*LCH/2 onwards, and
// a host write to constant a goes to lane a/(LCH/2).
//
// Interface: adc_i[l]/adc_q[l] are 8-bit offset-binary samples, lane l
// holding sample LANES*n + l; `arm` (rising edge) aligns the frames. Each
// dump port is an array over the output lanes; a dump is LCH beats on every
// lane at once, in bit-reversed order within the lane, each beat tagged with
// its global channel number.
// Timing: a sample reaches the filter-bank output M+log2(M)+5 clocks after it
// enters adc_if (M = NFFT/LANES); the hybrid adds 3 clocks, power 1 and the
// accumulator 2.
//
// The block diagram, the channel count, the ADC, FFT, power and accumulator
// widths and the number of calibration points follow the described
// instrument. The ideal-hybrid power-up constants (C1 = C3 = 1, C2 = -i,
// C4 = +i, i.e. an upper-sideband signal reaches Q 90 degrees behind I), the
// lane count and all other internal choices are this design's own.
module sbs_top
  import sbs_pkg::*;
#(
  parameter int unsigned NFFT_P       = sbs_pkg::NFFT,
  parameter int unsigned TAPS_P       = sbs_pkg::PFB_TAPS,
  parameter int unsigned CAL_POINTS_P = sbs_pkg::CAL_POINTS,
  parameter int unsigned LANES_P      = sbs_pkg::LANES,
  localparam int unsigned OL          = (LANES_P > 1) ? LANES_P / 2 : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                arm,
  input  logic [ADC_BITS-1:0] adc_i [LANES_P],
  input  logic [ADC_BITS-1:0] adc_q [LANES_P],
  input  logic [31:0]         acc_len,
  input  cal_wr_t             cal_wr,
  output acc_dump_t           lsb_dump     [OL],
  output acc_dump_t           usb_dump     [OL],
  output acc_dump_t           cal_pow_i    [OL],
  output acc_dump_t           cal_pow_q    [OL],
  output acc_dump_t           cal_cross_re [OL],
  output acc_dump_t           cal_cross_im [OL],
  output logic [31:0]         integrations,
  output logic [31:0]         cal_integrations,
  output logic [31:0]         frames
);

  localparam int unsigned NCH_P = NFFT_P / 2;
  localparam int unsigned LCH   = NCH_P / OL;            // channels per lane
  localparam int unsigned CPL   = CAL_POINTS_P / OL;     // constants per lane
  localparam int unsigned CHW   = $clog2(LCH);
  localparam int unsigned MW    = DW + CW + 1 - CFRAC;   // multiplier output
  localparam int unsigned SW    = MW + 1;                // adder output
  localparam int unsigned XW    = 2 * DW + 1;            // calibration products
  localparam logic signed [CW-1:0] ONE = CW'(1 << CFRAC);
  localparam logic signed [CW-1:0] INIT_IM [4] = '{'0, -ONE, '0, ONE};

  // ---- ADC interface -------------------------------------------------------
  logic signed [ADC_BITS-1:0] si [LANES_P];
  logic signed [ADC_BITS-1:0] sq [LANES_P];
  logic                       sync;

  adc_if #(.ADC_BITS(ADC_BITS), .NFFT(NFFT_P), .LANES(LANES_P)) u_adc (
    .clk, .rst, .arm, .adc_i, .adc_q,
    .adc_i_q(si), .adc_q_q(sq), .sync, .frames
  );

  // ---- Filter banks ----------------------------------------------------------
  logic                 pi_valid, pi_first, pq_valid, pq_first;
  logic [CHW-1:0]       pi_chan, pq_chan;
  logic signed [DW-1:0] pi_re [OL];
  logic signed [DW-1:0] pi_im [OL];
  logic signed [DW-1:0] pq_re [OL];
  logic signed [DW-1:0] pq_im [OL];

  pfb #(
    .N(NFFT_P), .TAPS(TAPS_P), .IN_W(ADC_BITS), .DW(DW), .COEF_W(COEF_W), .LANES(LANES_P)
  ) u_pfb_i (
    .clk, .rst, .sync, .din(si),
    .valid(pi_valid), .first(pi_first), .chan(pi_chan), .re(pi_re), .im(pi_im)
  );

  pfb #(
    .N(NFFT_P), .TAPS(TAPS_P), .IN_W(ADC_BITS), .DW(DW), .COEF_W(COEF_W), .LANES(LANES_P)
  ) u_pfb_q (
    .clk, .rst, .sync, .din(sq),
    .valid(pq_valid), .first(pq_first), .chan(pq_chan), .re(pq_re), .im(pq_im)
  );

  // Global channel number of lane j's local channel k.
  function automatic logic [$clog2(NCHAN)-1:0] gchan(input int unsigned j, input logic [CHW-1:0] k);
    return $clog2(NCHAN)'(j * LCH + k);
  endfunction

  logic [31:0] lane_count [OL];
  logic [31:0] lane_xcount [OL];

  // ---- Per output lane: hybrid, detection, integration, calibration --------
  for (genvar j = 0; j < OL; j++) begin : g_lane
    logic                     lane_we;
    logic [$clog2(CPL)-1:0]   lane_addr;

    assign lane_we   = cal_wr.we && (int'(cal_wr.addr) / CPL) == j;
    assign lane_addr = $clog2(CPL)'(int'(cal_wr.addr) % CPL);

    // Calibrated digital IF hybrid: C1 and C3 take the I bank, C2 and C4 Q.
    logic                 c_valid [4];
    logic                 c_first [4];
    logic [CHW-1:0]       c_chan  [4];
    logic signed [MW-1:0] c_re    [4];
    logic signed [MW-1:0] c_im    [4];

    for (genvar c = 0; c < 4; c++) begin : g_cmult
      localparam bit USE_Q = (c % 2) == 1;
      cal_cmult #(
        .NCH(LCH), .CAL_POINTS(CPL), .DW(DW), .CW(CW), .CFRAC(CFRAC),
        .INIT_RE(USE_Q ? CW'(0) : ONE), .INIT_IM(INIT_IM[c])
      ) u_c (
        .clk, .rst,
        .in_valid (USE_Q ? pq_valid : pi_valid),
        .in_first (USE_Q ? pq_first : pi_first),
        .in_chan  (USE_Q ? pq_chan  : pi_chan),
        .in_re    (USE_Q ? pq_re[j] : pi_re[j]),
        .in_im    (USE_Q ? pq_im[j] : pi_im[j]),
        .cal_we   (lane_we && cal_wr.sel == 2'(c)),
        .cal_addr (lane_addr),
        .cal_re   (cal_wr.re),
        .cal_im   (cal_wr.im),
        .out_valid(c_valid[c]),
        .out_first(c_first[c]),
        .out_chan (c_chan[c]),
        .out_re   (c_re[c]),
        .out_im   (c_im[c])
      );
    end

    // Sideband 0 = LSB (C1 + C2), sideband 1 = USB (C3 + C4).
    logic                 h_valid [2];
    logic                 h_first [2];
    logic [CHW-1:0]       h_chan  [2];
    logic signed [SW-1:0] h_re    [2];
    logic signed [SW-1:0] h_im    [2];
    logic                 p_valid [2];
    logic                 p_first [2];
    logic [CHW-1:0]       p_chan  [2];
    logic [PW-1:0]        p_pow   [2];
    logic                 d_valid [2];
    logic                 d_first [2];
    logic [CHW-1:0]       d_chan  [2];
    logic signed [AW-1:0] d_data  [2];
    logic [31:0]          d_count [2];

    for (genvar s = 0; s < 2; s++) begin : g_sideband
      cadd #(.IW(MW), .NCH(LCH)) u_add (
        .clk, .rst,
        .a_valid(c_valid[2*s]), .a_first(c_first[2*s]), .a_chan(c_chan[2*s]),
        .a_re(c_re[2*s]), .a_im(c_im[2*s]),
        .b_re(c_re[2*s+1]), .b_im(c_im[2*s+1]),
        .out_valid(h_valid[s]), .out_first(h_first[s]), .out_chan(h_chan[s]),
        .out_re(h_re[s]), .out_im(h_im[s])
      );

      power #(.IW(SW), .PW(PW), .NCH(LCH)) u_pow (
        .clk, .rst,
        .in_valid(h_valid[s]), .in_first(h_first[s]), .in_chan(h_chan[s]),
        .in_re(h_re[s]), .in_im(h_im[s]),
        .out_valid(p_valid[s]), .out_first(p_first[s]), .out_chan(p_chan[s]),
        .out_pow(p_pow[s])
      );

      vacc #(.NCH(LCH), .DW(PW + 1), .AW(AW)) u_acc (
        .clk, .rst, .acc_len,
        .in_valid(p_valid[s]), .in_first(p_first[s]), .in_chan(p_chan[s]),
        .in_data({1'b0, p_pow[s]}),
        .dump_valid(d_valid[s]), .dump_first(d_first[s]), .dump_chan(d_chan[s]),
        .dump_data(d_data[s]), .integrations(d_count[s])
      );
    end

    assign lane_count[j] = d_count[0];

    always_comb begin
      lsb_dump[j] = '{valid: d_valid[0], first: d_first[0], chan: gchan(j, d_chan[0]), data: d_data[0]};
      usb_dump[j] = '{valid: d_valid[1], first: d_first[1], chan: gchan(j, d_chan[1]), data: d_data[1]};
    end

    // Calibration spectrometer.
    logic                 x_valid, x_first;
    logic [CHW-1:0]       x_chan;
    logic signed [XW-1:0] x_prod [4];

    cal_xspec #(.DW(DW), .NCH(LCH)) u_xspec (
      .clk, .rst,
      .in_valid(pi_valid), .in_first(pi_first), .in_chan(pi_chan),
      .i_re(pi_re[j]), .i_im(pi_im[j]), .q_re(pq_re[j]), .q_im(pq_im[j]),
      .out_valid(x_valid), .out_first(x_first), .out_chan(x_chan),
      .pow_i(x_prod[0]), .pow_q(x_prod[1]), .cross_re(x_prod[2]), .cross_im(x_prod[3])
    );

    acc_dump_t xd [4];
    logic [31:0] xcnt [4];

    for (genvar x = 0; x < 4; x++) begin : g_xacc
      logic                 v, f;
      logic [CHW-1:0]       ch;
      logic signed [AW-1:0] dat;

      vacc #(.NCH(LCH), .DW(XW), .AW(AW)) u_acc (
        .clk, .rst, .acc_len,
        .in_valid(x_valid), .in_first(x_first), .in_chan(x_chan), .in_data(x_prod[x]),
        .dump_valid(v), .dump_first(f), .dump_chan(ch), .dump_data(dat), .integrations(xcnt[x])
      );

      always_comb xd[x] = '{valid: v, first: f, chan: gchan(j, ch), data: dat};
    end

    assign lane_xcount[j]  = xcnt[0];
    assign cal_pow_i[j]    = xd[0];
    assign cal_pow_q[j]    = xd[1];
    assign cal_cross_re[j] = xd[2];
    assign cal_cross_im[j] = xd[3];
  end

  // All lanes integrate in step; lane 0 reports the counts.
  assign integrations     = lane_count[0];
  assign cal_integrations = lane_xcount[0];

  // Both filter banks run in lock step, so the hybrid's two inputs always
  // carry the same channel.
  always @(posedge clk)
    if (!rst) assert (pi_valid == pq_valid && (!pi_valid || pi_chan == pq_chan))
      else $error("I and Q filter banks out of step");

endmodule
