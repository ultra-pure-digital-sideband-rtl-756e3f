// cadd_tb: checks the complex adder with random operands, including the
// extremes of the input range, and its one-clock latency and channel tags.
module cadd_tb;
  localparam int unsigned IW = 21, NCH = 16;
  logic clk = 0, rst = 1;
  logic a_valid = 0, a_first = 0;
  logic [3:0] a_chan = 0;
  logic signed [IW-1:0] a_re = 0, a_im = 0, b_re = 0, b_im = 0;
  logic out_valid, out_first;
  logic [3:0] out_chan;
  logic signed [IW:0] out_re, out_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  cadd #(.IW(IW), .NCH(NCH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rv(input int n);
    if (n % 7 == 0) return -(64'sd1 <<< (IW - 1));
    if (n % 7 == 1) return (64'sd1 <<< (IW - 1)) - 1;
    return longint'($urandom_range(0, (1 << IW) - 1)) - (64'sd1 <<< (IW - 1));
  endfunction

  longint er, ei;
  bit ev, ef;
  int ech;

  initial begin
    longint ar, ai, br, bi;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 300; n++) begin
      ar = rv(n); ai = rv(n + 1); br = rv(n + 3); bi = rv(n / 2);
      a_valid <= (n % 5 != 4); a_first <= (n % 16 == 0); a_chan <= 4'(n);
      a_re <= IW'(ar); a_im <= IW'(ai); b_re <= IW'(br); b_im <= IW'(bi);
      @(posedge clk);
      ev = (n % 5 != 4); ef = (n % 16 == 0); ech = n % 16; er = ar + br; ei = ai + bi;
      @(negedge clk);
      checks++;
      if (out_valid != ev || out_first != ef || (ev && (out_chan != 4'(ech) || out_re != (IW+1)'(er) || out_im != (IW+1)'(ei)))) begin
        failures++;
        if (failures < 5) $display("n %0d: got %0d %0d expected %0d %0d", n, out_re, out_im, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
