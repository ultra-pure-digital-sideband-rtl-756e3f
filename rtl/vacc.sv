// vacc: vector accumulator, integrates a spectrum channel by channel.
//
// Each spectrum arrives as a stream of NCH valid beats tagged with their
// channel number (in any fixed order) and with `in_first` on the first beat.
// A memory of NCH words of AW bits (64 in the described instrument) holds the
// running sum of every channel. The first spectrum of an integration
// overwrites the sums, the following ones add to them, and on the last one
// (spectrum acc_len-1) the completed sums leave on the dump port instead of
// being kept, while the next spectrum starts a new integration. acc_len is
// the integration length in spectra; a new value applies from the next
// integration boundary, and acc_len = 1 dumps every spectrum.
//
// Data are signed, so the same block integrates powers and cross products.
// Spectra arriving before the first `in_first` are ignored. `integrations`
// counts the dumps begun.
//
// Timing: two clocks from an input beat to its dump beat (memory read, add);
// a channel is written back one clock after it is read, and a channel recurs
// only once per spectrum, so there is no read-after-write hazard as long as
// spectra are longer than two beats.
//
// The 64-bit accumulator follows the described instrument; the integration
// control (acc_len, dump stream) is this design's choice.
module vacc #(
  parameter int unsigned NCH = sbs_pkg::NCHAN,
  parameter int unsigned DW  = sbs_pkg::PW,
  parameter int unsigned AW  = sbs_pkg::AW
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [31:0]            acc_len,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  logic signed [DW-1:0]   in_data,
  output logic                   dump_valid,
  output logic                   dump_first,
  output logic [$clog2(NCH)-1:0] dump_chan,
  output logic signed [AW-1:0]   dump_data,
  output logic [31:0]            integrations
);

  logic signed [AW-1:0] mem [NCH];

  // Spectrum counter within the integration.
  // The current spectrum's place is fixed at its first beat: spec_now is its
  // index and last_now says whether it closes the integration.
  logic [31:0] spec, spec_now;
  logic        last, last_now;
  logic        started, start_now;

  assign start_now = started | (in_valid & in_first);
  always_comb begin
    spec_now = spec;
    last_now = last;
    if (in_valid && in_first) begin
      spec_now = (started && !last) ? spec + 1 : '0;
      last_now = (spec_now + 1 >= acc_len);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      spec    <= '0;
      last    <= 1'b0;
      started <= 1'b0;
    end else begin
      spec    <= spec_now;
      last    <= last_now;
      started <= start_now;
    end
  end

  // Stage 1: read the running sum.
  logic                   v1, f1, clr1, last1;
  logic [$clog2(NCH)-1:0] ch1;
  logic signed [DW-1:0]   d1;
  logic signed [AW-1:0]   rd1;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid & start_now;
    end
    f1    <= in_first;
    clr1  <= (spec_now == 0);
    last1 <= last_now;
    ch1   <= in_chan;
    d1    <= in_data;
    rd1   <= mem[in_chan];
  end

  // Stage 2: add, write back, dump.
  logic signed [AW-1:0] sum;
  assign sum = (clr1 ? '0 : rd1) + AW'(d1);

  always_ff @(posedge clk) begin
    if (v1) mem[ch1] <= sum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dump_valid   <= 1'b0;
      dump_first   <= 1'b0;
      integrations <= '0;
    end else begin
      dump_valid <= v1 & last1;
      dump_first <= v1 & last1 & f1;
      if (v1 && last1 && f1) integrations <= integrations + 1;
    end
    dump_chan <= ch1;
    dump_data <= sum;
  end

endmodule
