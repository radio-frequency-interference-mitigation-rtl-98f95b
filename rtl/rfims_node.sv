// rfims_node: one RFI mitigation processor (ADC -> FPGA -> DAC chain) for one
// antenna and polarisation.
//
// Samples of the own antenna i and of its neighbours i-1 and i+1 (delivered
// over the links between adjacent processors) enter together on adc_valid.
// Each stream is delay compensated (delay_line), low-pass filtered (fir_lpf)
// and transformed (fft_core, forward). Between delay and filter the own
// stream passes the temporal-domain threshold (time_blanker), which zeroes
// single samples above cfg.blank_thr; the neighbour streams pass the same
// stage with blanking off, so the three stay in lock step. The own spectrum then feeds two chains:
//   excision: power_spectrum -> rfi_detector (reference from median_filter)
//             -> rfi_excision: flagged time-frequency points are replaced;
//   ANC:      anc_lms with the two neighbour spectra: the interference common
//             to the neighbours is subtracted bin by bin.
// cfg.mode chooses which chain reaches the inverse transform (fft_core,
// inverse, scaled); the other chain is drained. The choice is taken only at a
// frame boundary (after the inverse transform has accepted bin N-1), so a
// mode switch never splices two algorithms into one spectrum. The real part of
// the clean time signal, saturated to DAC_W bits, goes to the DAC.
//
// The paper loads one algorithm at a time into the FPGA; carrying both and
// switching per frame stands in for that reconfiguration (own choice).
//
// Rates: the three forward transforms run in lock step. A transform accepts
// samples only while loading, so the ADC samples of the three antennas are
// first written into one input buffer (sample_fifo), which releases N samples
// per frame. With one butterfly per clock a frame keeps a transform busy for
// about 2*N + N/2*log2(N) clocks; the input stays loss-free as long as the
// sample strobe comes at most once every 2 + log2(N)/2 clocks on average (6
// clocks for N = 256). A sample that finds the buffer full is lost and counted
// in overrun_count.
//
// Interface: adc_* are ADC_W-bit signed samples; dac_valid/dac_data the
// output samples; frame_count counts output frames, mode_switches counts
// mode changes; blank_count counts samples zeroed by the temporal threshold;
// flag_count (flagged bins), thr_count and cusum_count (bins
// flagged by each test) and subst_count (replaced bins) come from the
// excision chain.
module rfims_node
  import rfims_pkg::*;
#(
  parameter int N        = 256,
  parameter int LPF_TAPS = 15,
  parameter int MED_K    = 7,
  parameter int FIFO_DEPTH = N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  node_cfg_t               cfg,
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc_prev,
  input  logic signed [ADC_W-1:0] adc_own,
  input  logic signed [ADC_W-1:0] adc_next,
  output logic                    dac_valid,
  output logic signed [DAC_W-1:0] dac_data,
  output mode_e                   mode_active,
  output logic                    ref_ok,
  output logic [31:0]             frame_count,
  output logic [31:0]             overrun_count,
  output logic [31:0]             mode_switches,
  output logic [31:0]             blank_count,
  output logic [31:0]             flag_count,
  output logic [31:0]             subst_count,
  output logic [31:0]             thr_count,
  output logic [31:0]             cusum_count
);
  localparam int AW = $clog2(N);

  // ---------------- input buffer and frame gating ----------------
  // The three channels share one buffer so that they stay sample aligned.
  // At most N samples are released per frame; the next frame is released when
  // the transforms have unloaded (and are loading again), so no sample in the
  // delay/filter pipeline can reach a transform that is not loading.
  logic [3*ADC_W-1:0] fifo_dout;
  logic               fifo_empty, fifo_full, pop;
  logic [AW:0]        pop_cnt;
  logic               frame_done;

  sample_fifo #(.W(3 * ADC_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(adc_valid), .din({adc_prev, adc_own, adc_next}),
    .pop, .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full));

  assign pop = !fifo_empty && (pop_cnt < (AW+1)'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pop_cnt       <= '0;
      overrun_count <= '0;
    end else begin
      if (frame_done)  pop_cnt <= '0;
      else if (pop)    pop_cnt <= pop_cnt + 1'b1;
      if (adc_valid && fifo_full) overrun_count <= overrun_count + 1;
    end
  end

  // ---------------- delay compensation, low-pass filter ----------------
  logic                    dv [3];
  logic signed [ADC_W-1:0] dd [3];
  logic                    bv [3];
  logic signed [ADC_W-1:0] bd [3];
  logic                    bk [3];
  logic [31:0]             bcnt [3];
  logic                    lv [3];
  logic signed [DW-1:0]    ld [3];
  logic signed [ADC_W-1:0] adc_in [3];
  logic [DLY_W-1:0]        dly [3];
  assign adc_in[0] = fifo_dout[2*ADC_W +: ADC_W];
  assign adc_in[1] = fifo_dout[ADC_W +: ADC_W];
  assign adc_in[2] = fifo_dout[0 +: ADC_W];
  assign dly[0]    = cfg.dly_prev;
  assign dly[1]    = cfg.dly_own;
  assign dly[2]    = cfg.dly_next;

  // ---------------- forward transforms ----------------
  logic          f_in_ready [3];
  logic          f_valid    [3];
  logic          f_ready;
  cplx_t         f_data     [3];
  logic [AW-1:0] f_bin      [3];
  logic          f_last     [3];

  for (genvar c = 0; c < 3; c++) begin : g_chan
    delay_line #(.W(ADC_W), .DMAX(1 << DLY_W)) u_dly (
      .clk, .rst_n, .in_valid(pop), .in_data(adc_in[c]), .delay(dly[c]),
      .out_valid(dv[c]), .out_data(dd[c]));
    time_blanker #(.W(ADC_W)) u_blank (
      .clk, .rst_n, .thr((c == 1) ? cfg.blank_thr : '0), .in_valid(dv[c]), .in_data(dd[c]),
      .out_valid(bv[c]), .out_data(bd[c]), .out_blanked(bk[c]), .blank_count(bcnt[c]));
    fir_lpf #(.NTAPS(LPF_TAPS), .IW(ADC_W), .OW(DW)) u_lpf (
      .clk, .rst_n, .in_valid(bv[c]), .in_data(bd[c]),
      .out_valid(lv[c]), .out_data(ld[c]));
    fft_core #(.N(N), .INVERSE(1'b0), .SCALE(1'b0)) u_fft (
      .clk, .rst_n, .in_valid(lv[c]), .in_ready(f_in_ready[c]),
      .in_data('{re: ld[c], im: '0}),
      .out_valid(f_valid[c]), .out_ready(f_ready), .out_data(f_data[c]),
      .out_bin(f_bin[c]), .out_last(f_last[c]));
  end

  assign frame_done  = f_ready && f_last[1];
  assign blank_count = bcnt[1];

  // A sample leaving the filter always finds its transform loading.
  a_no_lost_sample: assert property (@(posedge clk) disable iff (!rst_n) lv[1] |-> f_in_ready[1]);

  // ---------------- broadcast of the spectra to both chains ----------------
  logic all_v;
  logic ps_ready, anc_ready;
  assign all_v   = f_valid[0] && f_valid[1] && f_valid[2];
  assign f_ready = all_v && ps_ready && anc_ready;

  // excision chain
  logic          ps_v;
  logic          ps_rdy;
  cplx_t         ps_d;
  power_t        ps_p;
  logic [AW-1:0] ps_bin;
  power_spectrum #(.N(N)) u_pow (
    .clk, .rst_n, .in_valid(all_v && anc_ready), .in_ready(ps_ready),
    .in_data(f_data[1]), .in_bin(f_bin[1]),
    .out_valid(ps_v), .out_ready(ps_rdy), .out_data(ps_d), .out_power(ps_p), .out_bin(ps_bin));

  logic          med_v;
  power_t        med_p;
  logic [AW-1:0] med_bin;
  median_filter #(.N(N), .K(MED_K)) u_med (
    .clk, .rst_n, .in_valid(ps_v && ps_rdy), .in_power(ps_p), .in_bin(ps_bin),
    .out_valid(med_v), .out_median(med_p), .out_bin(med_bin));

  logic          det_v, det_rdy, det_flag, det_ft, det_fc;
  cplx_t         det_d;
  logic [AW-1:0] det_bin;
  rfi_detector #(.N(N)) u_det (
    .clk, .rst_n, .thr_h(cfg.thr_h), .cusum_k(cfg.cusum_k), .cusum_h(cfg.cusum_h),
    .ref_we(med_v), .ref_bin(med_bin), .ref_data(med_p),
    .in_valid(ps_v), .in_ready(ps_rdy), .in_data(ps_d), .in_power(ps_p), .in_bin(ps_bin),
    .out_valid(det_v), .out_ready(det_rdy), .out_data(det_d), .out_bin(det_bin),
    .out_flag(det_flag), .out_flag_thr(det_ft), .out_flag_cusum(det_fc),
    .ref_ok(ref_ok), .flag_count(flag_count));

  logic          ex_v, ex_rdy;
  cplx_t         ex_d;
  logic [AW-1:0] ex_bin;
  rfi_excision #(.N(N)) u_exc (
    .clk, .rst_n, .subst(cfg.subst), .noise_amp(cfg.noise_amp),
    .in_valid(det_v), .in_ready(det_rdy), .in_data(det_d), .in_bin(det_bin), .in_flag(det_flag),
    .out_valid(ex_v), .out_ready(ex_rdy), .out_data(ex_d), .out_bin(ex_bin),
    .subst_count(subst_count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr_count   <= '0;
      cusum_count <= '0;
    end else if (det_v && det_rdy) begin
      if (det_ft) thr_count   <= thr_count + 1;
      if (det_fc) cusum_count <= cusum_count + 1;
    end
  end

  // ANC chain
  logic          an_v, an_rdy;
  cplx_t         an_d;
  logic [AW-1:0] an_bin;
  anc_lms #(.N(N)) u_anc (
    .clk, .rst_n, .mu_shift(cfg.mu_shift), .nbr_en(cfg.nbr_en),
    .in_valid(all_v && ps_ready), .in_ready(anc_ready),
    .in_prev(f_data[0]), .in_own(f_data[1]), .in_next(f_data[2]), .in_bin(f_bin[1]),
    .out_valid(an_v), .out_ready(an_rdy), .out_data(an_d), .out_bin(an_bin));

  // ---------------- algorithm selection and inverse transform ----------------
  logic          i_valid, i_ready;
  cplx_t         i_data;
  logic [AW-1:0] i_bin;
  always_comb begin
    if (mode_active == MODE_ANC) begin
      i_valid = an_v;  i_data = an_d;  i_bin = an_bin;
    end else begin
      i_valid = ex_v;  i_data = ex_d;  i_bin = ex_bin;
    end
    an_rdy = (mode_active == MODE_ANC)    ? i_ready : 1'b1;
    ex_rdy = (mode_active == MODE_EXCISE) ? i_ready : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_active   <= MODE_EXCISE;
      mode_switches <= '0;
    end else if (i_valid && i_ready && i_bin == AW'(N - 1) && cfg.mode != mode_active) begin
      mode_active   <= cfg.mode;
      mode_switches <= mode_switches + 1;
    end
  end

  logic          o_valid;
  cplx_t         o_data;
  logic [AW-1:0] o_bin;
  logic          o_last;
  fft_core #(.N(N), .INVERSE(1'b1), .SCALE(1'b1)) u_ifft (
    .clk, .rst_n, .in_valid(i_valid), .in_ready(i_ready), .in_data(i_data),
    .out_valid(o_valid), .out_ready(1'b1), .out_data(o_data), .out_bin(o_bin), .out_last(o_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_valid   <= 1'b0;
      dac_data    <= '0;
      frame_count <= '0;
    end else begin
      dac_valid <= o_valid;
      if (o_valid) dac_data <= DAC_W'(sat_to(64'(o_data.re), DAC_W));
      if (o_valid && o_last) frame_count <= frame_count + 1;
    end
  end

  // The spectrum entering the inverse transform must be complete and in order.
  property p_bins_in_order;
    @(posedge clk) disable iff (!rst_n)
      (i_valid && i_ready && i_bin != AW'(N - 1)) |=> !(i_valid && i_ready) || $past(i_bin) + 1'b1 == i_bin;
  endproperty
  a_bins_in_order: assert property (p_bins_in_order);
endmodule
