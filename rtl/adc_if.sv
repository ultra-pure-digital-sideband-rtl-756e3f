// adc_if: ADC hardware interface for the two sample streams (I and Q).
//
// Each ADC delivers LANES 8-bit offset-binary samples per clock (lane l holds
// the l-th oldest sample of the group). The interface registers both streams
// on the same clock edge, converts them to two's
// complement by inverting the most significant bit, and produces the frame
// sync that the filter banks use to find the first sample of a transform
// frame. A rising edge on `arm` makes `sync` pulse together with the next
// registered sample pair; from then on the filter banks count frames on their
// own, so `arm` is needed once after reset and whenever the host wants to
// realign. `frames` counts the frames (NFFT samples, NFFT/LANES clocks)
// started since the last arm.
//
// Timing: one register stage; adc_*_q and sync appear one clock after the
// samples at the pins.
//
// The sample width (8 bits) and the 2 GS/s rate follow the described
// instrument. The offset binary format, the arm/sync scheme and the number of
// lanes (8, so a 250 MHz clock carries 2 GS/s) are this design's choices.
module adc_if #(
  parameter int unsigned ADC_BITS = sbs_pkg::ADC_BITS,
  parameter int unsigned NFFT     = sbs_pkg::NFFT,
  parameter int unsigned LANES    = sbs_pkg::LANES
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       arm,
  input  logic [ADC_BITS-1:0]        adc_i   [LANES], // offset binary
  input  logic [ADC_BITS-1:0]        adc_q   [LANES], // offset binary
  output logic signed [ADC_BITS-1:0] adc_i_q [LANES], // two's complement
  output logic signed [ADC_BITS-1:0] adc_q_q [LANES],
  output logic                       sync,
  output logic [31:0]                frames
);

  logic                      arm_d;
  localparam int unsigned FW = (NFFT / LANES > 1) ? $clog2(NFFT / LANES) : 1;
  logic [FW-1:0]             pos;
  logic                      running;

  always_ff @(posedge clk) begin
    if (rst) begin
      arm_d   <= 1'b0;
      adc_i_q <= '{default: '0};
      adc_q_q <= '{default: '0};
      sync    <= 1'b0;
      pos     <= '0;
      running <= 1'b0;
      frames  <= '0;
    end else begin
      arm_d   <= arm;
      for (int unsigned l = 0; l < LANES; l++) begin
        adc_i_q[l] <= {~adc_i[l][ADC_BITS-1], adc_i[l][ADC_BITS-2:0]};
        adc_q_q[l] <= {~adc_q[l][ADC_BITS-1], adc_q[l][ADC_BITS-2:0]};
      end
      sync    <= 1'b0;
      if (arm && !arm_d) begin
        sync    <= 1'b1;
        pos     <= 1;
        running <= 1'b1;
        frames  <= 1;
      end else if (running) begin
        pos <= (pos == FW'(NFFT / LANES - 1)) ? '0 : pos + 1'b1;
        if (pos == '0) frames <= frames + 1;
      end
    end
  end

endmodule
