// tb_rfims_top: the whole subsystem at its default size (14 antennas x 2
// polarisations, 256-point frames), 48 frames end to end.
//
// Polarisation 0 of every antenna runs RFI excision on independent noise;
// antenna 3 gets a strong tone in bin 20 (frames 12-19), antenna 5 a weak
// persistent line in bin 10 (frames 20 on), antennas 8-13 substitute noise
// instead of zeros. Polarisation 1 carries a common astronomical signal s
// plus interference R seen with gain 1 + a/4 by antenna a; its processors
// start in excision mode and switch to ANC from frame 4. The cross-point
// switch sends correlator input 0 the untouched channel 0 (bypass) and every
// other input its processed channel. Antenna 1, polarisation 0 sees single
// spikes of 1900 in frames 30-39 with its temporal threshold at 1500. A final burst at one sample per clock
// overflows the input buffers.
//
// Checks: every processor delivers 48 frames of 256 samples at one sample
// per 6 clocks without overrun; the tone is removed on antenna 3; the ANC
// output of antenna 7 follows the filtered s with R down by more than 10 dB;
// the cross-point outputs match their sources; and each mechanism (spectral
// threshold, CUSUM, temporal blanking of exactly the spikes, zero and noise substitution, mode switch to ANC with the
// end-of-array neighbour switched off, bypass, overrun) happened at least once.
module tb_rfims_top;
  import rfims_pkg::*;
  localparam int NANT = 14, NPOL = 2, NCH = 28, N = 256, NT = 15, PER = 6;
  localparam int NF = 48, NS = NF * N;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  node_cfg_t cfg [NCH];
  logic [5:0] xp_sel [NCH];
  logic adc_valid;
  logic signed [ADC_W-1:0] adc [NCH];
  logic dac_valid [NCH];
  logic signed [DAC_W-1:0] dac [NCH], corr [NCH];
  logic [NCH-1:0] mode_anc, ref_ok;
  logic [31:0] frame_count [NCH], overrun_count [NCH], mode_switches [NCH], flag_count [NCH], blank_count [NCH],
               thr_count [NCH], cusum_count [NCH], subst_count [NCH];

  rfims_top dut (.clk, .rst_n, .cfg, .xp_sel, .adc_valid, .adc_data(adc), .dac_valid, .dac_data(dac),
    .corr_data(corr), .mode_anc, .ref_ok, .frame_count, .overrun_count, .mode_switches,
    .flag_count, .blank_count, .thr_count, .cusum_count, .subst_count);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c [NT];
  int xs [NS], xr [NS], x3 [NS], n3 [NS];
  int out3 [$], out7 [$];
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

  always @(posedge clk) begin
    if (dac_valid[6]) out3.push_back(int'(dac[6]));    // antenna 3, pol 0
    if (dac_valid[15]) out7.push_back(int'(dac[15]));  // antenna 7, pol 1
  end

  // cross-point: compare each output with its source one clock earlier
  logic signed [DAC_W-1:0] dac_d [NCH];
  logic signed [ADC_W-1:0] adc_d [NCH];
  int xp_checks = 0, xp_bad = 0, bypass_seen = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NCH; o++) begin
        int e;
        e = (xp_sel[o] < NCH) ? int'(dac_d[xp_sel[o]]) : int'(adc_d[xp_sel[o] - NCH]);
        xp_checks++;
        if (int'(corr[o]) != e) xp_bad++;
        if (xp_sel[o] >= NCH && adc_d[xp_sel[o] - NCH] != 0) bypass_seen++;
      end
    end
    dac_d <= dac;
    adc_d <= adc;
  end

  real e, r;
  int ntone, ns3;
  int nspk = 0;
  initial begin
    design_coef();
    for (int n = 0; n < NS; n++) begin
      xs[n] = rnd(200);
      xr[n] = rnd(400);
      n3[n] = rnd(300);
      x3[n] = n3[n] + ((n / N >= 12 && n / N < 20) ? int'(1400.0 * $cos(2.0 * PI * 20 * n / N)) : 0);
    end
    for (int a = 0; a < NANT; a++) begin
      for (int p = 0; p < NPOL; p++) begin
        int ch;
        ch = a * NPOL + p;
        cfg[ch] = '0;
        cfg[ch].mode = MODE_EXCISE;
        cfg[ch].subst = (p == 0 && a >= 8) ? SUBST_NOISE : SUBST_ZERO;
        cfg[ch].noise_amp = 16'd1000;
        cfg[ch].thr_h = 8'h80; cfg[ch].cusum_k = 8'h20; cfg[ch].cusum_h = 8'h50;
        cfg[ch].mu_shift = 6'd3;
        cfg[ch].nbr_en = 2'b11;
        cfg[ch].blank_thr = (ch == 2) ? 11'd1500 : 11'd0;
        xp_sel[ch] = 6'(ch);
      end
    end
    xp_sel[0] = 6'(NCH);   // correlator input 0 takes raw channel 0: bypass
    adc_valid = 0;
    for (int ch = 0; ch < NCH; ch++) adc[ch] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NS; n++) begin
      if (n == 4 * N) for (int a = 0; a < NANT; a++) cfg[a * NPOL + 1].mode = MODE_ANC;
      repeat (PER - 1) @(negedge clk);
      adc_valid = 1;
      for (int a = 0; a < NANT; a++) begin
        int v0;
        v0 = rnd(300);
        if (a == 3) v0 = x3[n];
        if (a == 1 && n / N >= 30 && n / N < 40 && n % 41 == 9) begin
          v0 = (nspk % 2 == 0) ? 1900 : -1900;
          nspk++;
        end
        if (a == 5 && n / N >= 20) v0 += int'(20.0 * $cos(2.0 * PI * 10 * n / N));
        adc[a * NPOL]     = ADC_W'(v0);
        adc[a * NPOL + 1] = ADC_W'(xs[n] + ((4 + a) * xr[n]) / 4 + rnd(10));
      end
      @(negedge clk);
      adc_valid = 0;
    end
    repeat (20 * N) @(negedge clk);

    for (int ch = 0; ch < NCH; ch++) begin
      checks++;
      if (frame_count[ch] != 32'(NF) || overrun_count[ch] != 0) begin
        failures++; $display("channel %0d: %0d frames, %0d overruns", ch, frame_count[ch], overrun_count[ch]);
      end
    end
    // tone on antenna 3 removed: compare with its noise alone
    e = 0; ns3 = 0;
    if (out3.size() == NS) for (int n = 14 * N; n < 19 * N; n++) begin e += real'((out3[n] - lpf(n3, n)) ** 2); ns3++; end
    e = (ns3 > 0) ? $sqrt(e / ns3) : 1.0e9;
    $display("antenna 3 tone frames: residual %f rms (tone 990 rms)", e);
    checks++;
    if (e > 250.0) begin failures++; $display("tone not excised"); end
    // ANC on antenna 7, pol 1
    for (int n = 0; n < NS; n++) xr[n] = ((4 + 7) * xr[n]) / 4;
    e = 0; r = 0;
    if (out7.size() == NS) for (int n = (NF - 10) * N; n < NF * N; n++) begin
      e += real'((out7[n] - lpf(xs, n)) ** 2);
      r += real'(lpf(xr, n) ** 2);
    end
    $display("antenna 7 ANC: residual/interference power %f dB", 10.0 * $log10((e + 1.0) / (r + 1.0)));
    checks++;
    if (e > 0.1 * r || out7.size() != NS) begin failures++; $display("interference not cancelled"); end
    // cross-point
    checks++;
    if (xp_bad != 0 || xp_checks == 0) begin failures++; $display("cross-point: %0d of %0d wrong", xp_bad, xp_checks); end

    // burst: one sample per clock overflows the input buffers
    for (int n = 0; n < 4 * N; n++) begin
      adc_valid = 1;
      for (int ch = 0; ch < NCH; ch++) adc[ch] = ADC_W'(rnd(300));
      @(negedge clk);
    end
    adc_valid = 0;

    // mechanisms
    begin
      int m_thr, m_cus, m_zero, m_noise, m_sw, m_ovr;
      m_thr = 0; m_cus = 0; m_zero = 0; m_noise = 0; m_sw = 0; m_ovr = 0;
      for (int a = 0; a < NANT; a++) begin
        m_thr += int'(thr_count[a * NPOL]);
        m_cus += int'(cusum_count[a * NPOL]);
        if (a < 8) m_zero += int'(subst_count[a * NPOL]); else m_noise += int'(subst_count[a * NPOL]);
        m_sw  += int'(mode_switches[a * NPOL + 1]);
        m_ovr += int'(overrun_count[a * NPOL]) + int'(overrun_count[a * NPOL + 1]);
      end
      $display("mechanisms: threshold %0d, cusum %0d, zero subst %0d, noise subst %0d, mode switches %0d, bypass %0d, overruns %0d",
               m_thr, m_cus, m_zero, m_noise, m_sw, bypass_seen, m_ovr);
      $display("temporal blanking: %0d samples blanked on antenna 1, %0d spikes", blank_count[2], nspk);
      checks++; if (int'(blank_count[2]) != nspk || nspk == 0) begin failures++; $display("spikes not blanked exactly"); end
      checks++; if (m_thr == 0)   begin failures++; $display("spectral threshold never fired"); end
      checks++; if (int'(cusum_count[10]) == 0) begin failures++; $display("CUSUM never fired on antenna 5"); end
      checks++; if (m_zero == 0)  begin failures++; $display("no zero substitution"); end
      checks++; if (m_noise == 0) begin failures++; $display("no noise substitution"); end
      checks++; if (m_sw != NANT || mode_anc[NCH-1:0] != {NANT{2'b10}}) begin failures++; $display("mode switch missing"); end
      checks++; if (bypass_seen == 0) begin failures++; $display("bypass never used"); end
      checks++; if (m_ovr == 0)   begin failures++; $display("no overrun in burst"); end
      checks++;
      if (dut.g_ant[0].g_pol[1].c_cfg.nbr_en != 2'b10 || dut.g_ant[NANT-1].g_pol[1].c_cfg.nbr_en != 2'b01) begin
        failures++; $display("end-of-array neighbours not switched off");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
