// rfi_detector: RFI detection in the time-frequency plane.
//
// Each bin of the running power spectrum p(f) is tested in two ways against
// the reference spectrum ref(f), the median-filtered quiescent noise power:
//   spectral threshold  p > thr_h * ref            (strong RFI, at once)
//   CUSUM along time    S = max(0, S + p - cusum_k*ref),
//                       alarm when S > cusum_h*ref  (weak persistent RFI)
// The paper names thresholding in both domains, a median-filtered reference
// setting the spectral threshold, and a CUSUM procedure for transients; the
// form of the statistic (a one-sided Page CUSUM per bin, reference-scaled
// drift and level, S clipped at twice the level so that it recovers when RFI
// stops) is this design's choice. The factors are Q4.4 numbers. A reference
// below REF_MIN is raised to REF_MIN before use: in the stopband of the
// low-pass filter the median is close to zero and rounding noise alone would
// cross any multiple of it (own choice, the paper does not treat this case).
//
// ref(f) lives in a memory written by the median filter's sweep (ref_we,
// ref_bin, ref_data). Until the first complete reference has been written
// (ref_ok) nothing is flagged and S stays zero. Since the sweep of frame n runs
// while frame n+1 streams in, a frame is judged against the reference of the
// frame before, or partly of its own predecessor; the noise reference changes
// slowly, so this lag is harmless.
//
// Interface: one-deep valid/ready pipeline register, latency one clock. The
// output carries the spectrum bin, the flag and which test fired;
// flag_count counts flagged bins since reset.
module rfi_detector
  import rfims_pkg::*;
#(
  parameter int N       = 256,
  parameter int REF_MIN = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [7:0]           thr_h,
  input  logic [7:0]           cusum_k,
  input  logic [7:0]           cusum_h,
  input  logic                 ref_we,
  input  logic [$clog2(N)-1:0] ref_bin,
  input  power_t               ref_data,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                in_data,
  input  power_t               in_power,
  input  logic [$clog2(N)-1:0] in_bin,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                out_data,
  output logic [$clog2(N)-1:0] out_bin,
  output logic                 out_flag,
  output logic                 out_flag_thr,
  output logic                 out_flag_cusum,
  output logic                 ref_ok,
  output logic [31:0]          flag_count
);
  localparam int AW = $clog2(N);
  localparam int SW = PW + 10;         // CUSUM statistic width
  typedef logic [SW-1:0] stat_t;

  power_t ref_q [N];
  stat_t  s_q   [N];

  stat_t  lvl_thr, lvl_k, lvl_h, s_sum, s_new;
  logic   f_thr, f_cusum;
  always_comb begin
    power_t r;
    r       = (ref_q[in_bin] < power_t'(REF_MIN)) ? power_t'(REF_MIN) : ref_q[in_bin];
    lvl_thr = stat_t'((SW+8)'(r) * thr_h >> 4);
    lvl_k   = stat_t'((SW+8)'(r) * cusum_k >> 4);
    lvl_h   = stat_t'((SW+8)'(r) * cusum_h >> 4);
    s_sum   = s_q[in_bin] + stat_t'(in_power);
    s_new   = (s_sum > lvl_k) ? s_sum - lvl_k : '0;
    if (s_new > (lvl_h << 1)) s_new = lvl_h << 1;
    f_thr   = ref_ok && (stat_t'(in_power) > lvl_thr);
    f_cusum = ref_ok && (s_new > lvl_h);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_ok         <= 1'b0;
      out_valid      <= 1'b0;
      out_data       <= '0;
      out_bin        <= '0;
      out_flag       <= 1'b0;
      out_flag_thr   <= 1'b0;
      out_flag_cusum <= 1'b0;
      flag_count     <= '0;
      for (int i = 0; i < N; i++) begin
        ref_q[i] <= '0;
        s_q[i]   <= '0;
      end
    end else begin
      if (ref_we) begin
        ref_q[ref_bin] <= ref_data;
        if (ref_bin == AW'(N - 1)) ref_ok <= 1'b1;
      end
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_data       <= in_data;
          out_bin        <= in_bin;
          out_flag       <= f_thr || f_cusum;
          out_flag_thr   <= f_thr;
          out_flag_cusum <= f_cusum;
          if (ref_ok) s_q[in_bin] <= s_new;
          if (f_thr || f_cusum) flag_count <= flag_count + 1;
        end
      end
    end
  end
endmodule
