// cal_xspec: products of the calibration spectrometer.
//
// From the I and Q channel streams of the two filter banks it forms, per
// channel, the auto powers |I|^2 and |Q|^2 and the cross product
// I * conj(Q) = (Ir*Qr + Ii*Qi) + i*(Ii*Qr - Ir*Qi). Accumulated over many
// spectra while a test tone sits in one sideband, they give the amplitude
// ratio sqrt(|Q|^2/|I|^2) and the phase arg(I*conj(Q)) of the front end in
// every channel, from which the host derives the constants of the IF hybrid.
//
// Timing: one clock, one channel per clock; the tags are taken from the I
// stream, and both streams must carry the same channel in the same clock.
//
// The described instrument has a calibration spectrometer that measures the
// front end's amplitude and phase imbalance, but does not describe how; these
// products are the simplest sufficient statistics and are this design's choice.
module cal_xspec #(
  parameter int unsigned DW  = sbs_pkg::DW,
  parameter int unsigned NCH = sbs_pkg::NCHAN
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic [$clog2(NCH)-1:0]  in_chan,
  input  logic signed [DW-1:0]    i_re,
  input  logic signed [DW-1:0]    i_im,
  input  logic signed [DW-1:0]    q_re,
  input  logic signed [DW-1:0]    q_im,
  output logic                    out_valid,
  output logic                    out_first,
  output logic [$clog2(NCH)-1:0]  out_chan,
  output logic signed [2*DW:0]    pow_i,
  output logic signed [2*DW:0]    pow_q,
  output logic signed [2*DW:0]    cross_re,
  output logic signed [2*DW:0]    cross_im
);

  localparam int unsigned W = 2 * DW + 1;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
    end
  end

  always_ff @(posedge clk) begin
    out_chan <= in_chan;
    pow_i    <= W'(i_re) * W'(i_re) + W'(i_im) * W'(i_im);
    pow_q    <= W'(q_re) * W'(q_re) + W'(q_im) * W'(q_im);
    cross_re <= W'(i_re) * W'(q_re) + W'(i_im) * W'(q_im);
    cross_im <= W'(i_im) * W'(q_re) - W'(i_re) * W'(q_im);
  end

endmodule
