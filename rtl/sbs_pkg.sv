// sbs_pkg: types and constants shared by the digital sideband-separating
// spectrometer.
//
// The spectrometer turns the I and Q baseband outputs of a sideband-separating
// receiver into two power spectra, LSB and USB, after correcting each spectral
// channel with a complex calibration constant. The numbers below are those of
// the described instrument: 8-bit ADC samples, 2048 output channels per
// sideband (a 4096-point real transform), 18+18 bit complex data in the FFT,
// 48-bit power and 64-bit accumulators. The prototype-filter tap count, the
// calibration-constant format and the intermediate widths of the hybrid are
// choices of this design and are marked as such.
package sbs_pkg;

  // ADC sample width (2 GS/s, 8 bits in the described instrument).
  localparam int unsigned ADC_BITS   = 8;
  // Output channels per sideband and the real transform length behind them.
  localparam int unsigned NCHAN      = 2048;
  localparam int unsigned NFFT       = 2 * NCHAN;
  // Samples per ADC per clock: 2 GS/s on a 250 MHz datapath (design choice).
  localparam int unsigned LANES      = 8;
  // Polyphase filter taps per branch (design choice).
  localparam int unsigned PFB_TAPS   = 4;
  // FFT data width, per real/imaginary part.
  localparam int unsigned DW         = 18;
  // Prototype filter coefficient width.
  localparam int unsigned COEF_W     = 18;
  // Calibration constant width and its fraction bits (range [-2, 2)).
  localparam int unsigned CW         = 18;
  localparam int unsigned CFRAC      = 16;
  // Number of calibration constants over the 2048 channels.
  localparam int unsigned CAL_POINTS = 1024;
  // Power and accumulator widths.
  localparam int unsigned PW         = 48;
  localparam int unsigned AW         = 64;

  // One accumulated spectral value leaving a vector accumulator.
  typedef struct packed {
    logic                    valid;
    logic                    first;  // first beat of a dumped spectrum
    logic [$clog2(NCHAN)-1:0] chan;
    logic signed [AW-1:0]    data;
  } acc_dump_t;

  // Write port for one calibration-constant memory.
  typedef struct packed {
    logic                          we;
    logic [1:0]                    sel;   // 0..3 selects C1..C4
    logic [$clog2(CAL_POINTS)-1:0] addr;
    logic signed [CW-1:0]          re;
    logic signed [CW-1:0]          im;
  } cal_wr_t;

  // Bit reversal of the low `bits` bits of x.
  function automatic int unsigned bitrev(input int unsigned x, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

endpackage
