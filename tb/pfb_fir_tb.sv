// pfb_fir_tb: checks the polyphase FIR against a direct evaluation.
//
// A 16-branch, 4-tap filter receives random 8-bit frames. The expected output
// for every position of every frame that has TAPS-1 predecessors is computed
// here from the prototype filter (windowed sinc over TAPS*N points, quantised
// to 18 bits) as sum_t h[(TAPS-1-t)*N+p] * x_{k-t}[p], scaled by 2^-8 with
// rounding. The output must match within one step, two clocks after input.
module pfb_fir_tb;
  localparam int unsigned N = 16, TAPS = 4, IN_W = 8, COEF_W = 18, OUT_W = 18;
  localparam int unsigned SHIFT = IN_W + COEF_W - OUT_W;
  localparam int unsigned NFR = 10;

  logic clk = 0, rst = 1, sync = 0, sync_o;
  logic signed [IN_W-1:0]  din = '0;
  logic signed [OUT_W-1:0] dout;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pfb_fir #(.N(N), .TAPS(TAPS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int signed x [NFR][N];
  longint signed h [TAPS*N];

  initial begin
    real pi, xx, s, w;
    pi = 3.14159265358979323846;
    for (int n = 0; n < TAPS * N; n++) begin
      xx = (real'(n) + 0.5 - real'(TAPS * N) / 2.0) / real'(N);
      s  = $sin(pi * xx) / (pi * xx);
      w  = 0.54 - 0.46 * $cos(2.0 * pi * (real'(n) + 0.5) / real'(TAPS * N));
      h[n] = longint'($rtoi(s * w * 131071.0 + ((s * w >= 0.0) ? 0.5 : -0.5)));
    end
    for (int f = 0; f < NFR; f++)
      for (int p = 0; p < N; p++) x[f][p] = (f == 5) ? ((p == 3) ? 127 : -128) : int'($urandom_range(0, 255)) - 128;
  end

  // Stimulus: sync at frame 0 only, then a continuous stream.
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int f = 0; f < NFR; f++)
      for (int p = 0; p < N; p++) begin
        sync <= (f == 0 && p == 0);
        din  <= IN_W'(x[f][p]);
        @(posedge clk);
      end
    sync <= 0;
  end

  // Checker: sampled at the falling edge.
  initial begin
    longint signed acc, e;
    @(negedge rst);
    while (!sync_o) @(negedge clk);
    checks++;   // the output sync arrived
    for (int f = 0; f < NFR; f++)
      for (int p = 0; p < N; p++) begin
        if (f > 0 || p > 0) @(negedge clk);
        if (p == 0) begin
          checks++;
          if (!sync_o && f == 0) failures++;
          if (sync_o && f != 0) begin failures++; $display("stray sync"); end
        end
        if (f >= TAPS - 1) begin
          acc = 0;
          for (int t = 0; t < TAPS; t++) acc += h[(TAPS - 1 - t) * N + p] * x[f - t][p];
          e = (acc + (64'sd1 <<< (SHIFT - 1))) >>> SHIFT;
          if (e > 131071) e = 131071;
          if (e < -131072) e = -131072;
          checks++;
          if (e - dout > 1 || dout - e > 1) begin
            failures++;
            if (failures < 10) $display("frame %0d pos %0d: got %0d expected %0d", f, p, dout, e);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
