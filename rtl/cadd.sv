// cadd: complex adder of the digital IF hybrid.
//
// Adds two aligned complex channel streams, y = a + b, at full precision
// (one bit wider than the inputs), so it cannot overflow. The channel tags
// (valid, first, chan) are taken from input a; both inputs must carry the
// same channel in the same clock, which holds when they come from twin
// pipelines of equal latency.
//
// Timing: one clock, one channel per clock.
//
// The adder and its place after the calibration multipliers follow the
// described instrument; the widths are this design's choice.
module cadd #(
  parameter int unsigned IW  = 21,
  parameter int unsigned NCH = sbs_pkg::NCHAN
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   a_valid,
  input  logic                   a_first,
  input  logic [$clog2(NCH)-1:0] a_chan,
  input  logic signed [IW-1:0]   a_re,
  input  logic signed [IW-1:0]   a_im,
  input  logic signed [IW-1:0]   b_re,
  input  logic signed [IW-1:0]   b_im,
  output logic                   out_valid,
  output logic                   out_first,
  output logic [$clog2(NCH)-1:0] out_chan,
  output logic signed [IW:0]     out_re,
  output logic signed [IW:0]     out_im
);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= a_valid;
      out_first <= a_first;
    end
  end

  always_ff @(posedge clk) begin
    out_chan <= a_chan;
    out_re   <= (IW+1)'(a_re) + (IW+1)'(b_re);
    out_im   <= (IW+1)'(a_im) + (IW+1)'(b_im);
  end

endmodule
