// cal_cmult_tb: checks the calibration multiplier.
//
// A 16-channel, 8-constant multiplier is checked in three phases: with its
// power-up constant (1 + 0i the output equals the input), after the host
// writes a distinct random constant to every entry (each channel must use
// entry chan/2, product rounded to the nearest step), and after one entry is
// rewritten mid-stream. The output must follow the input by two clocks with
// its channel tag.
module cal_cmult_tb;
  localparam int unsigned NCH = 16, CP = 8, DW = 18, CW = 18, CFRAC = 16;
  localparam int unsigned OW = DW + CW + 1 - CFRAC;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_first = 0, cal_we = 0;
  logic [3:0] in_chan = 0;
  logic signed [DW-1:0] in_re = 0, in_im = 0;
  logic [2:0] cal_addr = 0;
  logic signed [CW-1:0] cal_re = 0, cal_im = 0;
  logic out_valid, out_first;
  logic [3:0] out_chan;
  logic signed [OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  cal_cmult #(.NCH(NCH), .CAL_POINTS(CP)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint signed cr [CP];
  longint signed ci [CP];

  // Expected outputs, pushed when an input is applied.
  typedef struct { int ch; longint re; longint im; bit first; } exp_t;
  exp_t q [$];

  function automatic longint rnd(input longint v);
    return (v + (64'sd1 <<< (CFRAC - 1))) >>> CFRAC;
  endfunction

  task automatic drive(input int ch, input bit first);
    longint xr, xi;
    exp_t e;
    xr = longint'($urandom_range(0, 2 * 131071)) - 131071;
    xi = longint'($urandom_range(0, 2 * 131071)) - 131071;
    in_valid <= 1; in_first <= first; in_chan <= 4'(ch);
    in_re <= DW'(xr); in_im <= DW'(xi);
    e.ch = ch; e.first = first;
    e.re = rnd(xr * cr[ch / 2] - xi * ci[ch / 2]);
    e.im = rnd(xr * ci[ch / 2] + xi * cr[ch / 2]);
    q.push_back(e);
    @(posedge clk);
  endtask

  initial begin
    for (int a = 0; a < CP; a++) begin cr[a] = 1 << CFRAC; ci[a] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int ch = 0; ch < NCH; ch++) drive(ch, ch == 0);
    in_valid <= 0;
    // Host writes new constants.
    for (int a = 0; a < CP; a++) begin
      cr[a] = longint'($urandom_range(0, 2 * 131071)) - 131071;
      ci[a] = longint'($urandom_range(0, 2 * 131071)) - 131071;
      cal_we <= 1; cal_addr <= 3'(a); cal_re <= CW'(cr[a]); cal_im <= CW'(ci[a]);
      @(posedge clk);
    end
    cal_we <= 0;
    for (int r = 0; r < 3; r++)
      for (int ch = 0; ch < NCH; ch++) drive(ch, ch == 0);
    // Rewrite entry 5 (channels 10, 11) while streaming.
    cr[5] = -(1 << CFRAC); ci[5] = 1 << (CFRAC - 1);
    in_valid <= 0;
    cal_we <= 1; cal_addr <= 3'd5; cal_re <= CW'(cr[5]); cal_im <= CW'(ci[5]);
    @(posedge clk);
    cal_we <= 0;
    for (int ch = 0; ch < NCH; ch++) drive(ch, ch == 0);
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Latency: a valid input at clock n must show at the output at clock n+2.
  logic v_d1 = 0, v_d2 = 0;
  always @(posedge clk) begin
    v_d1 <= in_valid & !rst;
    v_d2 <= v_d1;
  end

  always @(negedge clk) begin
    if (!rst) begin
      checks++;
      if (out_valid != v_d2) begin failures++; $display("valid timing"); end
    end
    if (!rst && out_valid) begin
      exp_t e;
      e = q.pop_front();
      checks++;
      if (out_chan != 4'(e.ch) || out_first != e.first || out_re != OW'(e.re) || out_im != OW'(e.im)) begin
        failures++;
        if (failures < 4) $display("%0t ch %0d: got %0d %0d expected %0d %0d", $time, e.ch, out_re, out_im, e.re, e.im);
      end
    end
  end
endmodule
