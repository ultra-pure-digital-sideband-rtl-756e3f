// fft_r2sdf_tb: checks the streaming FFT against a direct DFT.
//
// Frames of random complex samples (and one frame holding a single tone) are
// streamed continuously through a 64-point transform. Every output sample p is
// compared with X[bitrev(p)]/N computed here in floating point; the error
// allowed covers the rounding of six stages. The latency from input sync to
// output sync must be N-1+log2(N) clocks.
module fft_r2sdf_tb;
  import sbs_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned DW = 18;
  localparam int unsigned NFR = 5;

  logic clk = 0, rst = 1, sync = 0;
  logic signed [DW-1:0] din_re, din_im, dout_re, dout_im;
  logic sync_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // Cycle counter; inputs and outputs are both sampled at the falling edge.
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (sync) in_cyc = cyc;

  fft_r2sdf #(.N(N), .DW(DW)) dut (.*);

  int signed xr [NFR][N];
  int signed xi [NFR][N];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus.
  int in_cyc, out_cyc;
  initial begin
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        if (f == 1) begin
          xr[f][n] = $rtoi(100000.0 * $cos(2.0 * 3.14159265358979 * 5.0 * n / N));
          xi[f][n] = $rtoi(100000.0 * $sin(2.0 * 3.14159265358979 * 5.0 * n / N));
        end else begin
          xr[f][n] = int'($urandom_range(0, 2 * 60000)) - 60000;
          xi[f][n] = int'($urandom_range(0, 2 * 60000)) - 60000;
        end
      end
    din_re = '0; din_im = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (7) @(posedge clk);
    for (int f = 0; f < NFR + 2; f++)
      for (int n = 0; n < N; n++) begin
        sync   <= (f == 0 && n == 0);
        din_re <= (f < NFR) ? DW'(xr[f][n]) : '0;
        din_im <= (f < NFR) ? DW'(xi[f][n]) : '0;
        @(posedge clk);
      end
  end

  // Checker.
  initial begin
    real er, ei, a;
    int k, nsync;
    nsync = 0;
    @(negedge rst);
    for (int f = 0; f < NFR; f++) begin
      for (int p = 0; p < N; p++) begin
        @(negedge clk);
        while (p == 0 && !sync_o) @(negedge clk);
        if (p == 0) begin
          nsync++;
          if (f == 0) begin
            out_cyc = cyc;
            checks++;
            if (out_cyc - in_cyc != N - 1 + L) begin
              failures++;
              $display("latency %0d, expected %0d", out_cyc - in_cyc, N - 1 + L);
            end
          end
        end
        k = bitrev(p, L);
        er = 0.0; ei = 0.0;
        for (int n = 0; n < N; n++) begin
          a  = -2.0 * 3.14159265358979323846 * real'(n * k) / real'(N);
          er += real'(xr[f][n]) * $cos(a) - real'(xi[f][n]) * $sin(a);
          ei += real'(xr[f][n]) * $sin(a) + real'(xi[f][n]) * $cos(a);
        end
        er /= N; ei /= N;
        checks++;
        if ((er - real'(dout_re)) ** 2 > 36.0 || (ei - real'(dout_im)) ** 2 > 36.0) begin
          failures++;
          if (failures < 10) $display("frame %0d bin %0d: got %0d %0d expected %f %f", f, k, dout_re, dout_im, er, ei);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
