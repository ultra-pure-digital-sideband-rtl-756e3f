// adc_if_tb: checks the ADC interface.
//
// Random offset-binary samples go in on both channels, 4 lanes each; one clock
// later each must come out as the same value minus 128 in two's complement. A rising
// edge of `arm` must give exactly one sync pulse, on the clock of the first
// registered sample after it, and the frame counter must advance every
// NFFT/LANES clocks from then on; holding `arm` high must not give a second pulse.
module adc_if_tb;
  localparam int unsigned NFFT = 64, LANES = 4;
  logic clk = 0, rst = 1, arm = 0;
  logic [7:0] adc_i [LANES] = '{default: 0};
  logic [7:0] adc_q [LANES] = '{default: 0};
  logic signed [7:0] adc_i_q [LANES];
  logic signed [7:0] adc_q_q [LANES];
  logic sync;
  logic [31:0] frames;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  adc_if #(.NFFT(NFFT), .LANES(LANES)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int syncs = 0, arm_cyc = -1, cyc = 0;
  logic [7:0] pi [LANES];
  logic [7:0] pq [LANES];

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 200; n++) begin
      for (int l = 0; l < LANES; l++) begin
        pi[l] = 8'($urandom);
        pq[l] = 8'($urandom);
      end
      for (int l = 0; l < LANES; l++) begin
        adc_i[l] <= pi[l];
        adc_q[l] <= pq[l];
      end
      arm   <= (n >= 20);
      @(posedge clk);
      cyc++;
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks += 2;
        if (adc_i_q[l] != $signed(9'(pi[l]) - 9'd128)) begin failures++; $display("I %0d -> %0d", pi[l], adc_i_q[l]); end
        if (adc_q_q[l] != $signed(9'(pq[l]) - 9'd128)) begin failures++; $display("Q %0d -> %0d", pq[l], adc_q_q[l]); end
      end
      if (sync) begin
        syncs++;
        checks++;
        if (n != 20) begin failures++; $display("sync at sample %0d", n); end
      end
      if (n >= 20) begin
        checks++;
        if (frames != 32'((n - 20) / (NFFT / LANES) + 1)) begin failures++; $display("frames %0d at sample %0d", frames, n); end
      end
    end
    checks++;
    if (syncs != 1) begin failures++; $display("%0d sync pulses", syncs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
