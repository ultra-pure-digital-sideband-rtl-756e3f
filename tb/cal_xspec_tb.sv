// cal_xspec_tb: checks the calibration-spectrometer products |I|^2, |Q|^2
// and I*conj(Q) with random and extreme operands, and also with Q = I*(0+1i),
// for which the cross product must be purely imaginary with
// Im = -|I|^2 (a 90 degree phase between the channels). One-clock latency.
module cal_xspec_tb;
  localparam int unsigned DW = 18, NCH = 16;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_first = 0;
  logic [3:0] in_chan = 0;
  logic signed [DW-1:0] i_re = 0, i_im = 0, q_re = 0, q_im = 0;
  logic out_valid, out_first;
  logic [3:0] out_chan;
  logic signed [2*DW:0] pow_i, pow_q, cross_re, cross_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  cal_xspec #(.DW(DW), .NCH(NCH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rv(input int n);
    if (n % 9 == 0) return -(64'sd1 <<< (DW - 1));
    if (n % 9 == 1) return (64'sd1 <<< (DW - 1)) - 1;
    return longint'($urandom_range(0, (1 << DW) - 1)) - (64'sd1 <<< (DW - 1));
  endfunction

  initial begin
    longint ar, ai, br, bi;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      ar = rv(n); ai = rv(n + 2);
      if (n >= 200) begin   // Q = i * I
        br = -ai; bi = ar;
        if (br == (64'sd1 <<< (DW - 1))) br = br - 1;
      end else begin
        br = rv(n + 5); bi = rv(n / 2);
      end
      in_valid <= 1; in_first <= (n % 16 == 0); in_chan <= 4'(n);
      i_re <= DW'(ar); i_im <= DW'(ai); q_re <= DW'(br); q_im <= DW'(bi);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (!out_valid || out_first != (n % 16 == 0) || out_chan != 4'(n)
          || pow_i != (2*DW+1)'(ar * ar + ai * ai) || pow_q != (2*DW+1)'(br * br + bi * bi)
          || cross_re != (2*DW+1)'(ar * br + ai * bi) || cross_im != (2*DW+1)'(ai * br - ar * bi)) begin
        failures++;
        if (failures < 5) $display("n %0d: got %0d %0d %0d %0d", n, pow_i, pow_q, cross_re, cross_im);
      end
      if (n >= 200 && br == -ai) begin
        checks++;
        if (cross_re != 0 || cross_im != -pow_i) begin failures++; $display("quadrature check n %0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
