// sbs_top_tb: end-to-end test of the calibrated sideband-separating
// spectrometer at its full size (4096-point transform, 2048 channels,
// 1024 calibration constants, 8 samples per ADC per clock).
//
// The testbench models the analog front end and the host. The front end
// turns a test tone at channel k into I = A cos(w n) and
// Q = +g A sin(w n + e) for an upper-sideband (USB) tone or
// Q = -g A sin(w n - e) for a lower-sideband (LSB) tone, with a gain error g
// and phase error e that differ between the two test channels, plus a small
// random dither; both are quantised to 8-bit offset binary.
//
// Sequence:
//   1. Bypass: C1 = 1, C2 = 0, C3 = 0, C4 = 1 are written everywhere, so the
//      LSB and USB dumps must equal the calibration spectrometer's |I|^2 and
//      |Q|^2 dumps channel for channel.
//   2. The power-up (ideal hybrid) constants are restored, and the rejection
//      of the USB and LSB tones is measured; the imbalance must limit it.
//   3. Calibration run: with each tone in place, the host reads |I|^2 and
//      I*conj(Q) for the tone channels and derives C2 = -1/R_usb and
//      C4 = -1/R_lsb, R being the measured Q/I ratio; it writes them.
//   4. The integration length is changed and the rejection is measured
//      again; it must now exceed 40 dB in both sidebands.
// Every dump must hold each channel once, with `first` on its first beat.
// Counted mechanisms (each must occur): frame arm, constant writes,
// calibration dumps, sideband dumps, integration-length change.
module sbs_top_tb;
  import sbs_pkg::*;

  localparam real PI = 3.14159265358979323846;
  localparam int unsigned CHB = $clog2(NCHAN);

  logic clk = 0, rst = 1, arm = 0;
  logic [ADC_BITS-1:0] adc_i [LANES] = '{default: 8'h80};
  logic [ADC_BITS-1:0] adc_q [LANES] = '{default: 8'h80};
  logic [31:0] acc_len = 2;
  cal_wr_t cal_wr = '0;
  acc_dump_t lsb_dump [LANES/2], usb_dump [LANES/2], cal_pow_i [LANES/2], cal_pow_q [LANES/2];
  acc_dump_t cal_cross_re [LANES/2], cal_cross_im [LANES/2];
  logic [31:0] integrations, cal_integrations, frames;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  sbs_top dut (.*);

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- Front-end model -------------------------------------------------------
  localparam int NT = 2;
  int  tone_ch [NT] = '{100, 1234};
  real gain    [NT] = '{0.80, 1.15};
  real perr    [NT] = '{15.0, -25.0};   // degrees
  int  mode = 0;                        // 0 silence, 1 USB tones, 2 LSB tones
  longint n = 0;

  always @(posedge clk) begin
    real vi, vq, w, e;
    for (int l = 0; l < LANES; l++) begin
      vi = real'($urandom_range(0, 4)) - 2.0;
      vq = real'($urandom_range(0, 4)) - 2.0;
      for (int t = 0; t < NT; t++) begin
        w = 2.0 * PI * real'(tone_ch[t]) / real'(NFFT) * real'(n + l);
        e = perr[t] * PI / 180.0;
        if (mode != 0) vi += 50.0 * $cos(w);
        if (mode == 1) vq += gain[t] * 50.0 * $sin(w + e);
        if (mode == 2) vq -= gain[t] * 50.0 * $sin(w - e);
      end
      adc_i[l] <= 8'($rtoi($floor(vi + 0.5)) + 128);
      adc_q[l] <= 8'($rtoi($floor(vq + 0.5)) + 128);
    end
    n <= n + LANES;
  end

  // ---- Dump capture ----------------------------------------------------------
  // Six streams: 0 LSB, 1 USB, 2 |I|^2, 3 |Q|^2, 4 Re I*conj(Q), 5 Im.
  longint cur  [6][NCHAN];
  longint done [6][NCHAN];
  int     beats [6] = '{default: 0};
  int     ndone [6] = '{default: 0};
  int     bad_dumps = 0;
  localparam int OL = LANES / 2;
  acc_dump_t dumps [6][OL];
  bit seen [6][NCHAN];

  always_comb
    for (int j = 0; j < OL; j++) begin
      dumps[0][j] = lsb_dump[j];
      dumps[1][j] = usb_dump[j];
      dumps[2][j] = cal_pow_i[j];
      dumps[3][j] = cal_pow_q[j];
      dumps[4][j] = cal_cross_re[j];
      dumps[5][j] = cal_cross_im[j];
    end

  function automatic void close_dump(int s);
    if (beats[s] != NCHAN) bad_dumps++;
    for (int c = 0; c < NCHAN; c++) if (!seen[s][c]) bad_dumps++;
    done[s] = cur[s];
    ndone[s]++;
  endfunction

  // All output lanes deliver in the same clocks; `first` on lane 0 opens a dump.
  always @(negedge clk) begin
    for (int s = 0; s < 6; s++) begin
      if (!rst && dumps[s][0].first && dumps[s][0].valid) begin
        for (int c = 0; c < NCHAN; c++) seen[s][c] = 0;
        beats[s] = 0;
      end
      for (int j = 0; j < OL; j++)
        if (!rst && dumps[s][j].valid) begin
          cur[s][dumps[s][j].chan] = dumps[s][j].data;
          seen[s][dumps[s][j].chan] = 1;
          beats[s]++;
        end
      if (beats[s] == NCHAN) begin
        close_dump(s);
        beats[s] = 0;
      end
    end
  end

  // Wait until `k` more complete dumps of stream s have arrived.
  task automatic wait_dumps(int s, int k);
    int target = ndone[s] + k;
    while (ndone[s] < target) @(negedge clk);
  endtask

  // ---- Host ------------------------------------------------------------------
  int n_arm = 0, n_writes = 0, n_len_change = 0;
  int n_cal_dumps, n_sb_dumps;

  task automatic write_const(int sel, int addr, longint re, longint im);
    // Driven at the falling edge, held for one rising edge.
    @(negedge clk);
    cal_wr = '{we: 1'b1, sel: 2'(sel), addr: $bits(cal_wr.addr)'(addr), re: CW'(re), im: CW'(im)};
    @(negedge clk);
    cal_wr = '0;
    n_writes++;
  endtask

  task automatic write_all(longint c1r, longint c1i, longint c2r, longint c2i,
                           longint c3r, longint c3i, longint c4r, longint c4i);
    for (int a = 0; a < CAL_POINTS; a++) begin
      write_const(0, a, c1r, c1i);
      write_const(1, a, c2r, c2i);
      write_const(2, a, c3r, c3i);
      write_const(3, a, c4r, c4i);
    end
  endtask

  // Settle a new condition: two whole integrations pass before one is read.
  task automatic settle();
    wait_dumps(0, 3);
  endtask

  function automatic real db(real x);
    return 10.0 * $ln(x) / $ln(10.0);
  endfunction

  // Sideband rejection at the tone channels: wanted over unwanted power.
  task automatic measure(int sb, output real srr [NT]);
    for (int t = 0; t < NT; t++) begin
      real pw, pu;
      pw = real'(done[sb == 1 ? 1 : 0][tone_ch[t]]);
      pu = real'(done[sb == 1 ? 0 : 1][tone_ch[t]]);
      srr[t] = db(pw / (pu + 1.0));
    end
  endtask

  localparam longint ONE = 64'sd1 <<< CFRAC;
  real srr_u0 [NT], srr_l0 [NT], srr_u1 [NT], srr_l1 [NT];
  real xr_u [NT], xi_u [NT], pi_u [NT], xr_l [NT], xi_l [NT], pi_l [NT];

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (4) @(posedge clk);
    arm <= 1;
    n_arm++;
    @(posedge clk);
    arm <= 0;

    // 1. Bypass.
    mode = 1;
    write_all(ONE, 0, 0, 0, 0, 0, ONE, 0);
    settle();
    wait_dumps(2, 1);
    wait_dumps(0, 1);
    wait_dumps(1, 0);
    begin
      int mism = 0;
      // LSB, USB and the cal streams close on the same integration; take the
      // pair only when both are from the same one.
      for (int c = 0; c < NCHAN; c++) begin
        if (done[0][c] != done[2][c]) mism++;
        if (done[1][c] != done[3][c]) mism++;
      end
      checks++;
      if (mism != 0) begin failures++; $display("bypass: %0d channels differ", mism); end
    end

    // 2. Ideal-hybrid constants, uncalibrated rejection.
    write_all(ONE, 0, 0, -ONE, ONE, 0, 0, ONE);
    mode = 1;
    settle();
    measure(1, srr_u0);
    for (int t = 0; t < NT; t++) begin
      xr_u[t] = real'(done[4][tone_ch[t]]);
      xi_u[t] = real'(done[5][tone_ch[t]]);
      pi_u[t] = real'(done[2][tone_ch[t]]);
    end
    mode = 2;
    settle();
    measure(2, srr_l0);
    for (int t = 0; t < NT; t++) begin
      xr_l[t] = real'(done[4][tone_ch[t]]);
      xi_l[t] = real'(done[5][tone_ch[t]]);
      pi_l[t] = real'(done[2][tone_ch[t]]);
    end

    // 3. Constants from the calibration run: R = Q/I = conj(X)/|I|^2,
    //    C = -1/R = -|I|^2 (Xr + i Xi) / |X|^2.
    for (int t = 0; t < NT; t++) begin
      real m;
      int a;
      a = tone_ch[t] / (NCHAN / CAL_POINTS);
      m = xr_u[t] ** 2 + xi_u[t] ** 2;
      write_const(1, a, longint'($rtoi(-pi_u[t] * xr_u[t] / m * real'(ONE))),
                        longint'($rtoi(-pi_u[t] * xi_u[t] / m * real'(ONE))));
      m = xr_l[t] ** 2 + xi_l[t] ** 2;
      write_const(3, a, longint'($rtoi(-pi_l[t] * xr_l[t] / m * real'(ONE))),
                        longint'($rtoi(-pi_l[t] * xi_l[t] / m * real'(ONE))));
    end

    // 4. Longer integration, calibrated rejection.
    acc_len <= 4;
    n_len_change++;
    mode = 1;
    settle();
    measure(1, srr_u1);
    mode = 2;
    settle();
    measure(2, srr_l1);

    for (int t = 0; t < NT; t++) begin
      $display("channel %0d: USB rejection %0.1f dB -> %0.1f dB, LSB rejection %0.1f dB -> %0.1f dB",
               tone_ch[t], srr_u0[t], srr_u1[t], srr_l0[t], srr_l1[t]);
      checks += 4;
      if (srr_u0[t] > 25.0 || srr_l0[t] > 25.0) begin failures++; $display("imbalance not visible"); end
      if (srr_u0[t] < 5.0 || srr_l0[t] < 5.0)   begin failures++; $display("sidebands swapped"); end
      if (srr_u1[t] < 40.0) begin failures++; $display("USB rejection too low"); end
      if (srr_l1[t] < 40.0) begin failures++; $display("LSB rejection too low"); end
    end

    n_cal_dumps = ndone[2];
    n_sb_dumps  = ndone[0] + ndone[1];
    $display("mechanisms: arm %0d, constant writes %0d, calibration dumps %0d, sideband dumps %0d, integration-length changes %0d",
             n_arm, n_writes, n_cal_dumps, n_sb_dumps, n_len_change);
    checks += 6;
    if (n_arm == 0 || frames == 0) failures++;
    if (n_writes == 0)     failures++;
    if (n_cal_dumps == 0)  failures++;
    if (n_sb_dumps == 0)   failures++;
    if (n_len_change == 0) failures++;
    if (bad_dumps != 0) begin failures++; $display("%0d malformed dumps", bad_dumps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
