// tb_rfims_node: one processor, 16-point frames, end to end.
//
// The testbench keeps its own low-pass reference y = h * x (coefficients
// designed independently with the same recipe) and compares the DAC stream
// with it, output sample m against input sample m:
//   1. thresholds at their maximum: in every frame with no flagged bin the
//      output equals the filtered input within 3 LSB (transform round trip);
//      with 16-point frames some frames still see a false alarm, as a median
//      of 5 noisy bins is sometimes far below the mean;
//   2. a strong tone in bin 3: the spectral threshold flags it and the tone is
//      removed from the output (residual well below the tone);
//   3. a weak persistent line in bin 2: the CUSUM flags it; meanwhile the
//      temporal threshold is set and single spikes of 1900 are added to the
//      own antenna: exactly those samples are blanked;
//   4. noise substitution: bins are replaced by noise, output stays bounded;
//   5. ANC mode (mode switch at a frame boundary): the own antenna carries
//      s + R, the neighbours s + R/2 (sent 2 samples early, undone by delay
//      compensation) and s - R/2; after adaptation the output follows the
//      filtered s with R suppressed by more than 10 dB;
//   6. samples at every clock overflow the input buffer (overrun counted).
// Frame rate: 16 outputs per input frame, with a sample every 5 clocks.
module tb_rfims_node;
  import rfims_pkg::*;
  localparam int N = 16, NT = 15, PER = 5;
  localparam int F1 = 10, F2 = 22, F3 = 42, F4 = 52, F5 = 202;   // phase ends, frames
  localparam int NS = F5 * N;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  node_cfg_t cfg;
  logic adc_valid, dac_valid, ref_ok;
  logic signed [ADC_W-1:0] ap, ao, an;
  logic signed [DAC_W-1:0] dac;
  mode_e mact;
  logic [31:0] frames, overrun, msw, blanks, flags, substs, thrc, cusc;
  rfims_node #(.N(N), .LPF_TAPS(NT), .MED_K(5)) dut (
    .clk, .rst_n, .cfg, .adc_valid, .adc_prev(ap), .adc_own(ao), .adc_next(an),
    .dac_valid, .dac_data(dac), .mode_active(mact), .ref_ok,
    .frame_count(frames), .overrun_count(overrun), .mode_switches(msw), .blank_count(blanks),
    .flag_count(flags), .subst_count(substs), .thr_count(thrc), .cusum_count(cusc));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c [NT];
  int xo [NS], xs [NS], xr [NS];
  int outv [$];

  task automatic design_coef();
    real h [NT];
    real s, m;
    s = 0;
    for (int n = 0; n < NT; n++) begin
      m = n - (NT - 1) / 2.0;
      h[n] = (m == 0.0) ? 0.5 : $sin(2.0 * PI * 0.25 * m) / (PI * m);
      h[n] *= 0.54 - 0.46 * $cos(2.0 * PI * n / (NT - 1));
      s += h[n];
    end
    for (int n = 0; n < NT; n++) c[n] = int'(h[n] / s * 32768.0);
  endtask

  function automatic int lpf(ref int x [NS], input int n);
    longint acc;
    acc = 0;
    for (int k = 0; k < NT; k++) if (n - k >= 0) acc += longint'(c[k]) * x[n - k];
    return int'((acc + 16384) >>> 15);
  endfunction

  function automatic int rnd(input int a);
    return int'($urandom_range(2 * a)) - a;
  endfunction

  always @(posedge clk) if (dac_valid) outv.push_back(int'(dac));
  // flags of the detector, in bin order, so that phase 1 can skip frames in
  // which a bin was (legitimately) flagged, e.g. during start-up
  bit det_flags [$];
  always @(posedge clk) if (dut.det_v && dut.det_rdy) det_flags.push_back(dut.det_flag);
  function automatic bit frame_flagged(input int f);
    for (int b = 0; b < N; b++) if (det_flags[f * N + b]) return 1'b1;
    return 1'b0;
  endfunction

  // RMS of (output - filtered reference) over frames [f0, f1)
  function automatic real rms_err(ref int ref_x [NS], input int f0, input int f1);
    real acc;
    acc = 0;
    for (int n = f0 * N; n < f1 * N; n++) acc += real'((outv[n] - lpf(ref_x, n)) ** 2);
    return $sqrt(acc / ((f1 - f0) * N));
  endfunction

  function automatic real rms_of(ref int ref_x [NS], input int f0, input int f1);
    real acc;
    acc = 0;
    for (int n = f0 * N; n < f1 * N; n++) acc += real'(lpf(ref_x, n) ** 2);
    return $sqrt(acc / ((f1 - f0) * N));
  endfunction

  int maxerr, nclean;
  real e, r;
  int thr_at_f2, cus_at_f2, cus_at_f3;
  int nspk = 0;
  initial begin
    design_coef();
    for (int n = 0; n < NS; n++) begin
      int f;
      f = n / N;
      xs[n] = rnd(200);
      xr[n] = 0;
      xo[n] = rnd(300);
      if (f >= F1 && f < F2) xo[n] += int'(1400.0 * $cos(2.0 * PI * 3 * n / N));
      if (f >= F2 && f < F3) xo[n] += int'(110.0 * $cos(2.0 * PI * 2 * n / N + 0.3));
      if (f >= F2 + 2 && f < F3 - 2 && n % 37 == 5) begin
        xo[n] = (nspk % 2 == 0) ? 1900 : -1900;
        nspk++;
      end
      if (f >= F4) begin xr[n] = rnd(1000); xo[n] = xs[n] + xr[n]; end
    end
    cfg = '0;
    cfg.mode = MODE_EXCISE; cfg.subst = SUBST_ZERO; cfg.noise_amp = 16'd200;
    cfg.thr_h = 8'hFF; cfg.cusum_k = 8'hFF; cfg.cusum_h = 8'hFF;
    cfg.mu_shift = 6'd7; cfg.nbr_en = 2'b11;
    cfg.dly_prev = 6'd2; cfg.dly_own = 6'd0; cfg.dly_next = 6'd0;
    adc_valid = 0; ap = '0; ao = '0; an = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NS; n++) begin
      if (n == F1 * N) begin cfg.thr_h = 8'h40; cfg.cusum_k = 8'h18; cfg.cusum_h = 8'h50; end
      if (n == F2 * N) begin thr_at_f2 = int'(thrc); cus_at_f2 = int'(cusc); end
      if (n == (F2 + 1) * N) cfg.blank_thr = 11'd1500;
      if (n == (F3 - 1) * N) cfg.blank_thr = '0;
      if (n == F3 * N) begin cus_at_f3 = int'(cusc); cfg.subst = SUBST_NOISE; end
      if (n == F4 * N) cfg.mode = MODE_ANC;
      repeat (PER - 1) @(negedge clk);
      adc_valid = 1;
      ao = ADC_W'(xo[n]);
      ap = ADC_W'((n + 2 < NS) ? (xs[n + 2] + xr[n + 2] / 2) : 0);
      an = ADC_W'(xs[n] - xr[n] / 2);
      @(negedge clk);
      adc_valid = 0;
    end
    repeat (20 * N) @(negedge clk);
    checks++;
    if (outv.size() != NS || frames != 32'(F5)) begin
      failures++; $display("outputs %0d frames %0d, expected %0d / %0d", outv.size(), frames, NS, F5);
    end
    checks++;
    $display("temporal threshold: %0d samples blanked, %0d spikes", blanks, nspk);
    if (blanks != 32'(nspk) || nspk == 0) begin failures++; $display("spikes not blanked exactly"); end
    checks++;
    if (overrun != 0) begin failures++; $display("overrun at the nominal rate"); end
    if (outv.size() == NS) begin
      // 1. transparent, in every frame without a flagged bin
      maxerr = 0;
      nclean = 0;
      for (int f = 0; f < F1; f++) begin
        if (frame_flagged(f)) continue;
        nclean++;
        for (int n = f * N; n < (f + 1) * N; n++)
          if ((outv[n] - lpf(xo, n)) ** 2 > maxerr) maxerr = (outv[n] - lpf(xo, n)) ** 2;
      end
      checks++;
      $display("phase 1: %0d unflagged frames, max error %0d", nclean, maxerr);
      if (maxerr > 9 || nclean < 2) begin failures++; $display("phase 1: output differs from filtered input"); end
      // 2. strong tone removed: compare with the noise alone
      for (int n = F1 * N; n < F2 * N; n++) xr[n] = xo[n] - int'(1400.0 * $cos(2.0 * PI * 3 * n / N));
      e = rms_err(xr, F1 + 3, F2 - 1);
      checks++;
      $display("tone frames: residual %f rms (tone 990 rms)", e);
      if (e > 200.0 || thr_at_f2 == 0) begin failures++; $display("phase 2: tone not excised, thr flags %0d", thr_at_f2); end
      // 3. CUSUM fired on the weak line
      checks++;
      $display("CUSUM flags during weak line: %0d", cus_at_f3 - cus_at_f2);
      if (cus_at_f3 - cus_at_f2 < 5) begin failures++; $display("phase 3: CUSUM silent"); end
      // 5. ANC: residual against filtered s
      for (int n = 0; n < NS; n++) if (n / N < F4) xr[n] = 0;
      e = rms_err(xs, F5 - 40, F5);
      r = rms_of(xr, F5 - 40, F5);
      $display("ANC: residual %f rms, interference %f rms", e, r);
      checks++;
      if (e > 0.3 * r) begin failures++; $display("phase 5: interference not cancelled"); end
      checks++;
      if (msw != 1 || mact != MODE_ANC) begin failures++; $display("mode switches %0d", msw); end
      // 4. noise substitution happened and kept the output bounded
      checks++;
      if (substs <= flags / 2 || flags == 0) begin failures++; $display("subst %0d flags %0d", substs, flags); end
    end
    // 6. overrun: a sample every clock for 8 frames
    for (int n = 0; n < 8 * N; n++) begin
      adc_valid = 1; ao = ADC_W'(rnd(300));
      @(negedge clk);
    end
    adc_valid = 0;
    checks++;
    if (overrun == 0) begin failures++; $display("no overrun at full rate"); end
    $display("flags %0d (thr %0d, cusum %0d), substituted %0d, overruns %0d", flags, thrc, cusc, substs, overrun);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
