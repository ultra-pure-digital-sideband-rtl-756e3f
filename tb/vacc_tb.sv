// vacc_tb: checks the vector accumulator.
//
// Spectra of 8 channels arrive in bit-reversed channel order on every other
// clock, as the filter bank delivers them, with signed random data. Beats
// sent before the first `in_first` must be ignored. Integrations of 3 spectra,
// then 1 (acc_len changed at a boundary), then 4 are run; every dumped beat
// must carry the exact sum of its channel over its integration, `dump_first`
// on the first beat, and appear two clocks after the input beat that
// completed it. The number of dumps must match.
module vacc_tb;
  import sbs_pkg::bitrev;
  localparam int unsigned NCH = 8, DW = 48, AW = 64;
  logic clk = 0, rst = 1;
  logic [31:0] acc_len = 3;
  logic in_valid = 0, in_first = 0;
  logic [2:0] in_chan = 0;
  logic signed [DW-1:0] in_data = 0;
  logic dump_valid, dump_first;
  logic [2:0] dump_chan;
  logic signed [AW-1:0] dump_data;
  logic [31:0] integrations;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  vacc #(.NCH(NCH), .DW(DW), .AW(AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int ch; longint sum; bit first; int cyc; } exp_t;
  exp_t q [$];
  longint run [NCH];
  int cyc = 0, dumps = 0;
  always @(negedge clk) cyc = cyc + 1;

  task automatic spectrum(input int k, input int len, input bit lead_in);
    for (int p = 0; p < NCH; p++) begin
      int ch;
      longint d;
      exp_t e;
      ch = bitrev(p, 3);
      d = longint'($urandom_range(0, 2000000)) - 1000000;
      if (p == 3) d = 64'sd1 <<< 46;   // large positive power-like value
      in_valid <= 1; in_first <= (p == 0) && !lead_in; in_chan <= 3'(ch); in_data <= DW'(d);
      if (!lead_in) begin
        run[ch] = (k == 0) ? d : run[ch] + d;
        if (k == len - 1) begin
          e.ch = ch; e.sum = run[ch]; e.first = (p == 0); e.cyc = cyc + 3;   // sampled at the next edge, out two edges later
          q.push_back(e);
        end
      end
      @(posedge clk);
      in_valid <= 0; in_first <= 0;
      @(posedge clk);
    end
  endtask

  int lens [3] = '{3, 1, 4};
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    spectrum(0, 1, 1'b1);   // ignored: no first beat yet
    for (int i = 0; i < 3; i++) begin
      acc_len <= lens[i];
      for (int r = 0; r < 2; r++)
        for (int k = 0; k < lens[i]; k++) spectrum(k, lens[i], 1'b0);
    end
    repeat (4) @(posedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("%0d dump beats missing", q.size()); end
    if (integrations != 6) begin failures++; $display("integrations %0d", integrations); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && dump_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("unexpected dump");
      end else begin
        e = q.pop_front();
        if (dump_chan != 3'(e.ch) || dump_data != e.sum || dump_first != e.first || cyc != e.cyc) begin
          failures++;
          if (failures < 6) $display("ch %0d: got %0d expected %0d (cyc %0d vs %0d)", e.ch, dump_data, e.sum, cyc, e.cyc);
        end
      end
    end
  end
endmodule
