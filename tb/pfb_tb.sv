// pfb_tb: checks the polyphase filter bank end to end.
//
// A 64-sample (32-channel), 4-tap filter bank with 4 input lanes (16 clocks
// per frame, 2 output lanes) receives random 8-bit frames and then a tone. For each spectrum whose filter history is complete the
// expected channels are computed here: the polyphase FIR sum with the
// quantised windowed-sinc prototype, then a direct DFT divided by N. Every
// valid beat must carry the right channel numbers and values within a few
// steps of the reference; each spectrum must have exactly N/P valid clocks
// (N/2 channels) with `first` on channel 0; the first spectrum must appear
// M+log2(M)+4 clocks after the input sync (M = N/P).
module pfb_tb;
  import sbs_pkg::bitrev;
  localparam int unsigned N = 64, TAPS = 4, P = 4, M = N / P, L = $clog2(M);
  localparam int unsigned OL = P / 2;
  localparam int unsigned NFR = 8;

  logic clk = 0, rst = 1, sync = 0;
  logic signed [7:0] din [P] = '{default: '0};
  logic valid, first;
  logic [L-1:0] chan;
  logic signed [17:0] re [OL];
  logic signed [17:0] im [OL];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pfb #(.N(N), .TAPS(TAPS), .LANES(P)) dut (.*);

  int cyc = 0, in_cyc = -1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (sync) in_cyc = cyc;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int signed x [NFR][N];
  longint signed h [TAPS*N];
  real yr [NFR][N];

  initial begin
    real pi, xx, s, w;
    longint signed acc;
    pi = 3.14159265358979323846;
    for (int n = 0; n < TAPS * N; n++) begin
      xx = (real'(n) + 0.5 - real'(TAPS * N) / 2.0) / real'(N);
      s  = $sin(pi * xx) / (pi * xx);
      w  = 0.54 - 0.46 * $cos(2.0 * pi * (real'(n) + 0.5) / real'(TAPS * N));
      h[n] = longint'($rtoi(s * w * 131071.0 + ((s * w >= 0.0) ? 0.5 : -0.5)));
    end
    for (int f = 0; f < NFR; f++)
      for (int p = 0; p < N; p++)
        x[f][p] = (f < 4) ? int'($urandom_range(0, 255)) - 128
                          : $rtoi(100.0 * $cos(2.0 * pi * 21.0 * real'(f * N + p) / real'(N)));
    for (int f = TAPS - 1; f < NFR; f++)
      for (int p = 0; p < N; p++) begin
        acc = 0;
        for (int t = 0; t < TAPS; t++) acc += h[(TAPS - 1 - t) * N + p] * x[f - t][p];
        yr[f][p] = real'((acc + 128) >>> 8);
      end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (4) @(posedge clk);
    for (int f = 0; f < NFR + 2; f++)
      for (int m = 0; m < M; m++) begin
        sync <= (f == 0 && m == 0);
        for (int l = 0; l < P; l++) din[l] <= (f < NFR) ? 8'(x[f][P * m + l]) : '0;
        @(posedge clk);
      end
  end

  initial begin
    real er, ei, a, pk;
    int beats, k, pkch;
    @(negedge rst);
    while (!(valid && first)) @(negedge clk);
    checks++;
    if (cyc - in_cyc != M + L + 4) begin
      failures++;
      $display("latency %0d expected %0d", cyc - in_cyc, M + L + 4);
    end
    for (int f = 0; f < NFR; f++) begin
      beats = 0; pk = 0.0; pkch = -1;
      for (int p = 0; p < M; p++) begin
        if (p > 0 || f > 0) @(negedge clk);
        if (p == 0) begin
          checks++;
          if (!(valid && first)) begin failures++; $display("spectrum %0d: no first beat", f); end
        end else if (first) begin failures++; $display("stray first"); end
        checks++;
        if (!valid) begin failures++; $display("spectrum %0d: gap at %0d", f, p); end
        if (valid) begin
          beats++;
          checks++;
          if (chan != L'(bitrev(p, L))) begin failures++; $display("chan %0d expected %0d", chan, bitrev(p, L)); end
          for (int j = 0; j < OL; j++) if (f >= TAPS - 1) begin
            k = bitrev(p, L) + M * j;
            er = 0.0; ei = 0.0;
            for (int n = 0; n < N; n++) begin
              a = -2.0 * 3.14159265358979323846 * real'(n * k) / real'(N);
              er += yr[f][n] * $cos(a);
              ei += yr[f][n] * $sin(a);
            end
            er /= N; ei /= N;
            checks++;
            if ((er - re[j]) ** 2 > 16.0 || (ei - im[j]) ** 2 > 16.0) begin
              failures++;
              if (failures < 10) $display("spectrum %0d ch %0d: got %0d %0d expected %f %f", f, k, re[j], im[j], er, ei);
            end
            if (real'(re[j]) ** 2 + real'(im[j]) ** 2 > pk) begin pk = real'(re[j]) ** 2 + real'(im[j]) ** 2; pkch = k; end
          end
        end
      end
      checks++;
      if (beats != M) begin failures++; $display("spectrum %0d: %0d beats", f, beats); end
      if (f >= 6) begin
        checks++;
        if (pkch != 21) begin failures++; $display("tone found in channel %0d", pkch); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
