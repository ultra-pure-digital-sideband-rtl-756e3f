// sbs_sweep_tb: full-band calibration and sideband-rejection sweep of the
// spectrometer at its full size (2048 channels, 1024 calibration constants,
// 8 samples per ADC per clock).
//
// The modelled front end has a frequency-dependent imbalance between Q and I:
// a gain that rises from -1.5 dB to +1.5 dB across the 1 GHz band (3 dB/GHz) and a phase
// error of 10 + 12*sin(2*pi*1.2*f) degrees (f in GHz, at most 90 deg/GHz).
// A USB tone at channel c gives I = A cos(w n), Q = g A sin(w n + e); an LSB
// tone gives Q = -g A sin(w n - e); eight tones are applied at a time and the
// samples are quantised to 8 bits.
//
// Calibration pass: tones at the even channels 2a (one per constant a; for
// a = 0 at channel 1, since a tone at DC has no sideband to tell), USB
// then LSB; the host reads |I|^2 and I*conj(Q) and sets C2[a] = -1/R_usb,
// C4[a] = -1/R_lsb (C1 = C3 = 1). The rejection seen with the power-up ideal
// constants is recorded on the way.
// Measurement pass: tones at the odd channels 2a+1, which lie between
// calibration points, so the 1024-point calibration resolution is included.
// The rejection of every tone in both sidebands is computed from the LSB and
// USB dumps. Pass criteria: average calibrated rejection of at least 45 dB
// and at least 93% of the points above 40 dB in each sideband (the figures
// the analog receiver and spurs limited the real instrument to); average
// uncalibrated rejection below 25 dB.
module sbs_sweep_tb;
  import sbs_pkg::*;

  localparam real PI  = 3.14159265358979323846;
  localparam int  G   = 8;                     // tones at a time
  localparam int  NG  = CAL_POINTS / G;        // groups per pass
  localparam real AMP = 13.0;

  logic clk = 0, rst = 1, arm = 0;
  logic [ADC_BITS-1:0] adc_i [LANES] = '{default: 8'h80};
  logic [ADC_BITS-1:0] adc_q [LANES] = '{default: 8'h80};
  logic [31:0] acc_len = 1;
  cal_wr_t cal_wr = '0;
  acc_dump_t lsb_dump [LANES/2], usb_dump [LANES/2], cal_pow_i [LANES/2], cal_pow_q [LANES/2];
  acc_dump_t cal_cross_re [LANES/2], cal_cross_im [LANES/2];
  logic [31:0] integrations, cal_integrations, frames;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  sbs_top dut (.*);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- Front end -------------------------------------------------------------
  int  tone_ch [G];
  int  mode = 0;          // 0 silence, 1 USB, 2 LSB
  longint n = 0;

  function automatic real fe_gain(int ch);
    return 10.0 ** ((-1.5 + 3.0 * real'(ch) / real'(NCHAN)) / 20.0);
  endfunction
  function automatic real fe_phase(int ch);
    return (10.0 + 12.0 * $sin(2.0 * PI * 1.2 * real'(ch) / real'(NCHAN))) * PI / 180.0;
  endfunction

  // 8-bit converter: round, clip, offset binary.
  function automatic logic [7:0] adc(real v);
    int k;
    k = $rtoi($floor(v + 0.5));
    if (k > 127) k = 127;
    if (k < -128) k = -128;
    return 8'(k + 128);
  endfunction

  always @(posedge clk) begin
    real vi, vq, w, e, g;
    for (int l = 0; l < LANES; l++) begin
      vi = 0.0; vq = 0.0;
      if (mode != 0)
        for (int t = 0; t < G; t++) begin
          w = 2.0 * PI * real'(tone_ch[t]) / real'(NFFT) * real'(n + l);
          e = fe_phase(tone_ch[t]);
          g = fe_gain(tone_ch[t]);
          vi += AMP * $cos(w);
          if (mode == 1) vq += g * AMP * $sin(w + e);
          else           vq -= g * AMP * $sin(w - e);
        end
      adc_i[l] <= adc(vi);
      adc_q[l] <= adc(vq);
    end
    n <= n + LANES;
  end

  // ---- Dump capture: latest completed value per stream and channel -------
  longint done [6][NCHAN];
  int     beats [6] = '{default: 0};
  int     ndone = 0;
  acc_dump_t dumps [6][LANES/2];

  always_comb
    for (int j = 0; j < LANES / 2; j++) begin
      dumps[0][j] = lsb_dump[j];
      dumps[1][j] = usb_dump[j];
      dumps[2][j] = cal_pow_i[j];
      dumps[3][j] = cal_pow_q[j];
      dumps[4][j] = cal_cross_re[j];
      dumps[5][j] = cal_cross_im[j];
    end

  always @(negedge clk)
    for (int s = 0; s < 6; s++) begin
      if (!rst && dumps[s][0].valid && dumps[s][0].first) beats[s] = 0;
      for (int j = 0; j < LANES / 2; j++)
        if (!rst && dumps[s][j].valid) begin
          done[s][dumps[s][j].chan] = dumps[s][j].data;
          beats[s]++;
          if (s == 0 && beats[0] == NCHAN) ndone++;
        end
    end

  // New tone set; wait until the dumps reflect only it (filter history of
  // four frames plus the pipeline).
  task automatic apply(int m);
    int target;
    mode = m;
    target = ndone + 7;
    while (ndone < target) @(negedge clk);
  endtask

  task automatic write_const(int sel, int addr, longint re, longint im);
    @(negedge clk);
    cal_wr = '{we: 1'b1, sel: 2'(sel), addr: $bits(cal_wr.addr)'(addr), re: CW'(re), im: CW'(im)};
    @(negedge clk);
    cal_wr = '0;
  endtask

  function automatic real db(real x);
    return 10.0 * $ln(x) / $ln(10.0);
  endfunction

  localparam longint ONE = 64'sd1 <<< CFRAC;
  real c2r [CAL_POINTS], c2i [CAL_POINTS], c4r [CAL_POINTS], c4i [CAL_POINTS];
  real srr0_u, srr0_l, srr_u [CAL_POINTS], srr_l [CAL_POINTS];

  initial begin
    real su, sl, m, p, xr, xi, mu, ml, mu0, ml0;
    int gu, gl;
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (4) @(posedge clk);
    arm <= 1;
    @(posedge clk);
    arm <= 0;

    // Calibration pass.
    mu0 = 0.0; ml0 = 0.0;
    for (int gidx = 0; gidx < NG; gidx++) begin
      for (int t = 0; t < G; t++) tone_ch[t] = 2 * (gidx + NG * t);
      tone_ch[0] += (gidx == 0);   // channel 0 is DC: calibrate constant 0 at channel 1
      apply(1);
      for (int t = 0; t < G; t++) begin
        automatic int a = tone_ch[t] / 2;
        p = real'(done[2][tone_ch[t]]); xr = real'(done[4][tone_ch[t]]); xi = real'(done[5][tone_ch[t]]);
        m = xr * xr + xi * xi;
        c2r[a] = -p * xr / m; c2i[a] = -p * xi / m;
        mu0 += db(real'(done[1][tone_ch[t]]) / (real'(done[0][tone_ch[t]]) + 1.0));
      end
      apply(2);
      for (int t = 0; t < G; t++) begin
        automatic int a = tone_ch[t] / 2;
        p = real'(done[2][tone_ch[t]]); xr = real'(done[4][tone_ch[t]]); xi = real'(done[5][tone_ch[t]]);
        m = xr * xr + xi * xi;
        c4r[a] = -p * xr / m; c4i[a] = -p * xi / m;
        ml0 += db(real'(done[0][tone_ch[t]]) / (real'(done[1][tone_ch[t]]) + 1.0));
      end
    end
    mu0 /= CAL_POINTS; ml0 /= CAL_POINTS;

    for (int a = 0; a < CAL_POINTS; a++) begin
      write_const(1, a, longint'($rtoi(c2r[a] * real'(ONE))), longint'($rtoi(c2i[a] * real'(ONE))));
      write_const(3, a, longint'($rtoi(c4r[a] * real'(ONE))), longint'($rtoi(c4i[a] * real'(ONE))));
    end

    // Measurement pass, between calibration points.
    for (int gidx = 0; gidx < NG; gidx++) begin
      for (int t = 0; t < G; t++) tone_ch[t] = 2 * (gidx + NG * t) + 1;
      apply(1);
      for (int t = 0; t < G; t++)
        srr_u[tone_ch[t] / 2] = db(real'(done[1][tone_ch[t]]) / (real'(done[0][tone_ch[t]]) + 1.0));
      apply(2);
      for (int t = 0; t < G; t++)
        srr_l[tone_ch[t] / 2] = db(real'(done[0][tone_ch[t]]) / (real'(done[1][tone_ch[t]]) + 1.0));
    end
    mode = 0;

    mu = 0.0; ml = 0.0; gu = 0; gl = 0;
    su = 1000.0; sl = 1000.0;
    for (int a = 0; a < CAL_POINTS; a++) begin
      mu += srr_u[a]; ml += srr_l[a];
      if (srr_u[a] > 40.0) gu++;
      if (srr_l[a] > 40.0) gl++;
      if (srr_u[a] < su) su = srr_u[a];
      if (srr_l[a] < sl) sl = srr_l[a];
    end
    mu /= CAL_POINTS; ml /= CAL_POINTS;
    $display("uncalibrated (ideal hybrid): average rejection USB %0.1f dB, LSB %0.1f dB", mu0, ml0);
    $display("calibrated, %0d tones per sideband: average USB %0.1f dB (min %0.1f, %0.1f%% > 40 dB), LSB %0.1f dB (min %0.1f, %0.1f%% > 40 dB)",
             CAL_POINTS, mu, su, 100.0 * gu / CAL_POINTS, ml, sl, 100.0 * gl / CAL_POINTS);
    checks += 5;
    if (mu0 > 25.0 || ml0 > 25.0) begin failures++; $display("imbalance not visible"); end
    if (mu < 45.0) failures++;
    if (ml < 45.0) failures++;
    if (gu < (CAL_POINTS * 93) / 100) failures++;
    if (gl < (CAL_POINTS * 93) / 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
