// cal_cmult: complex vector multiplier with per-channel calibration constants
// (one of C1..C4 in the digital IF hybrid).
//
// Every valid channel value x of the incoming spectrum stream is multiplied by
// the complex constant c stored for its channel, y = x * c. The constants
// correct the amplitude and phase imbalance of the analog front end channel
// by channel. NCH channels share CAL_POINTS constants: channel ch uses entry
// ch / (NCH/CAL_POINTS), so with 2048 channels and 1024 constants each
// constant serves two neighbouring channels.
//
// Constants are CW-bit signed fractions with CFRAC fraction bits (range
// [-2, 2) for 18/16), written by the host through cal_we/cal_addr/cal_re/
// cal_im at any time; a write takes effect from the next clock. After
// configuration the memory holds INIT_RE + i*INIT_IM everywhere. The product
// is rounded to OW = DW+CW+1-CFRAC bits, wide enough that it never overflows.
//
// Timing: two clocks from input to output (memory read, multiply), one
// channel per clock; valid, first and chan travel alongside.
//
// The four multipliers and the per-channel calibration follow the described
// instrument, as does the number of calibration points (1024); the constant
// format and the sharing of one constant by two channels are this design's
// reading of it.
module cal_cmult #(
  parameter int unsigned NCH        = sbs_pkg::NCHAN,
  parameter int unsigned CAL_POINTS = sbs_pkg::CAL_POINTS,
  parameter int unsigned DW         = sbs_pkg::DW,
  parameter int unsigned CW         = sbs_pkg::CW,
  parameter int unsigned CFRAC      = sbs_pkg::CFRAC,
  parameter int unsigned OW         = DW + CW + 1 - CFRAC,
  parameter logic signed [CW-1:0] INIT_RE = CW'(1 << CFRAC),
  parameter logic signed [CW-1:0] INIT_IM = '0
) (
  input  logic                            clk,
  input  logic                            rst,
  // spectrum in
  input  logic                            in_valid,
  input  logic                            in_first,
  input  logic [$clog2(NCH)-1:0]          in_chan,
  input  logic signed [DW-1:0]            in_re,
  input  logic signed [DW-1:0]            in_im,
  // calibration constant write port
  input  logic                            cal_we,
  input  logic [$clog2(CAL_POINTS)-1:0]   cal_addr,
  input  logic signed [CW-1:0]            cal_re,
  input  logic signed [CW-1:0]            cal_im,
  // spectrum out
  output logic                            out_valid,
  output logic                            out_first,
  output logic [$clog2(NCH)-1:0]          out_chan,
  output logic signed [OW-1:0]            out_re,
  output logic signed [OW-1:0]            out_im
);

  localparam int unsigned CSH = $clog2(NCH / CAL_POINTS);
  localparam int unsigned PWD = DW + CW + 1;

  logic signed [CW-1:0] mem_re [CAL_POINTS];
  logic signed [CW-1:0] mem_im [CAL_POINTS];

  initial
    for (int unsigned a = 0; a < CAL_POINTS; a++) begin
      mem_re[a] = INIT_RE;
      mem_im[a] = INIT_IM;
    end

  logic [$clog2(CAL_POINTS)-1:0] raddr;
  assign raddr = $clog2(CAL_POINTS)'(in_chan >> CSH);

  // Stage 1: read the constant, register the sample.
  logic                   v1, f1;
  logic [$clog2(NCH)-1:0] ch1;
  logic signed [DW-1:0]   xr1, xi1;
  logic signed [CW-1:0]   cr1, ci1;

  always_ff @(posedge clk) begin
    if (cal_we) begin
      mem_re[cal_addr] <= cal_re;
      mem_im[cal_addr] <= cal_im;
    end
    cr1 <= mem_re[raddr];
    ci1 <= mem_im[raddr];
    xr1 <= in_re;
    xi1 <= in_im;
    ch1 <= in_chan;
  end

  // Stage 2: complex multiply and round.
  logic signed [PWD-1:0] pr, pi;
  always_comb begin
    pr = PWD'(xr1) * PWD'(cr1) - PWD'(xi1) * PWD'(ci1);
    pi = PWD'(xr1) * PWD'(ci1) + PWD'(xi1) * PWD'(cr1);
    pr = (pr + (PWD'(1) <<< (CFRAC - 1))) >>> CFRAC;
    pi = (pi + (PWD'(1) <<< (CFRAC - 1))) >>> CFRAC;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; f1 <= 1'b0;
      out_valid <= 1'b0; out_first <= 1'b0;
    end else begin
      v1 <= in_valid; f1 <= in_first;
      out_valid <= v1; out_first <= f1;
    end
  end

  always_ff @(posedge clk) begin
    out_chan <= ch1;
    out_re   <= OW'(pr);
    out_im   <= OW'(pi);
  end

endmodule
