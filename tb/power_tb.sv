// power_tb: checks |z|^2 with random and extreme operands (including the
// most negative value on both parts), its one-clock latency and channel tags.
module power_tb;
  localparam int unsigned IW = 22, PW = 48, NCH = 16;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_first = 0;
  logic [3:0] in_chan = 0;
  logic signed [IW-1:0] in_re = 0, in_im = 0;
  logic out_valid, out_first;
  logic [3:0] out_chan;
  logic [PW-1:0] out_pow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  power #(.IW(IW), .PW(PW), .NCH(NCH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rv(input int n);
    if (n % 6 == 0) return -(64'sd1 <<< (IW - 1));
    if (n % 6 == 1) return (64'sd1 <<< (IW - 1)) - 1;
    return longint'($urandom_range(0, (1 << IW) - 1)) - (64'sd1 <<< (IW - 1));
  endfunction

  initial begin
    longint r, i;
    longint unsigned e;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 300; n++) begin
      r = rv(n); i = rv(n / 3);
      in_valid <= (n % 4 != 3); in_first <= (n % 16 == 0); in_chan <= 4'(n);
      in_re <= IW'(r); in_im <= IW'(i);
      @(posedge clk);
      e = longint'(r * r + i * i);
      @(negedge clk);
      checks++;
      if (out_valid != (n % 4 != 3) || out_first != (n % 16 == 0) || out_chan != 4'(n) || out_pow != PW'(e)) begin
        failures++;
        if (failures < 5) $display("n %0d: got %0d expected %0d", n, out_pow, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
