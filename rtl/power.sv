// power: power of each spectral channel, |z|^2 = re^2 + im^2.
//
// The result is exact and zero-extended to PW bits (48 in the described
// instrument); 2*IW+1 must not exceed PW. Channel tags travel alongside.
//
// Timing: one clock, one channel per clock.
//
// The 48-bit power follows the described instrument; the single-stage
// pipeline is this design's choice.
module power #(
  parameter int unsigned IW  = 22,
  parameter int unsigned PW  = sbs_pkg::PW,
  parameter int unsigned NCH = sbs_pkg::NCHAN
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  logic signed [IW-1:0]   in_re,
  input  logic signed [IW-1:0]   in_im,
  output logic                   out_valid,
  output logic                   out_first,
  output logic [$clog2(NCH)-1:0] out_chan,
  output logic [PW-1:0]          out_pow
);

  logic signed [2*IW:0] p;
  assign p = (2*IW+1)'(in_re) * (2*IW+1)'(in_re) + (2*IW+1)'(in_im) * (2*IW+1)'(in_im);

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
    out_pow  <= PW'(unsigned'(p));
  end

endmodule
