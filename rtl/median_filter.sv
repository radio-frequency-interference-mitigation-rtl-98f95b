// median_filter: reference power spectrum by median filtering across frequency.
//
// Thresholding needs the quiescent noise power in every bin, which differs
// from band to band with the shape of the analogue low-pass filters. The paper
// obtains it without a model by median filtering the power spectrum; narrow
// RFI lines are rejected by the median while the smooth bandpass survives.
// Window length K and the edge rule are this design's choices: a running
// median over K bins, the window index clamped to 0..N-1 at the band edges.
//
// Operation: the power spectrum of a frame is captured in buffer A as it
// streams past (in_valid with in_bin, never stalled). When bin N-1 arrives
// the frame is copied into buffer B and a sweep starts that outputs
// median(B[clamp(f-H)..clamp(f+H)]), H = (K-1)/2, for f = 0..N-1, one bin per
// clock (out_valid, out_bin). Capture of the next frame proceeds meanwhile.
// The median is found by ranking: the window element with fewer than H+1
// smaller values and at least H+1 values not larger.
module median_filter
  import rfims_pkg::*;
#(
  parameter int N = 256,
  parameter int K = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  power_t               in_power,
  input  logic [$clog2(N)-1:0] in_bin,
  output logic                 out_valid,
  output power_t               out_median,
  output logic [$clog2(N)-1:0] out_bin
);
  localparam int H  = (K - 1) / 2;
  localparam int AW = $clog2(N);

  power_t a_q [N];
  power_t b_q [N];
  logic          sweeping;
  logic [AW-1:0] sidx;

  power_t win [K];
  power_t med;
  always_comb begin
    int idx;
    int lt, le;
    for (int j = 0; j < K; j++) begin
      idx = int'(sidx) + j - H;
      if (idx < 0) idx = 0;
      if (idx > N - 1) idx = N - 1;
      win[j] = b_q[idx];
    end
    med = win[H];
    for (int j = K - 1; j >= 0; j--) begin
      lt = 0;
      le = 0;
      for (int m = 0; m < K; m++) begin
        if (win[m] < win[j])  lt++;
        if (win[m] <= win[j]) le++;
      end
      if (lt <= H && le >= H + 1) med = win[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweeping   <= 1'b0;
      sidx       <= '0;
      out_valid  <= 1'b0;
      out_median <= '0;
      out_bin    <= '0;
      for (int i = 0; i < N; i++) begin
        a_q[i] <= '0;
        b_q[i] <= '0;
      end
    end else begin
      out_valid <= sweeping;
      if (sweeping) begin
        out_median <= med;
        out_bin    <= sidx;
        sidx       <= sidx + 1'b1;
        if (sidx == AW'(N - 1)) sweeping <= 1'b0;
      end
      if (in_valid) begin
        a_q[in_bin] <= in_power;
        if (in_bin == AW'(N - 1)) begin
          for (int i = 0; i < N - 1; i++) b_q[i] <= a_q[i];
          b_q[N-1] <= in_power;
          sweeping <= 1'b1;
          sidx     <= '0;
        end
      end
    end
  end

  initial assert (K % 2 == 1 && K <= N) else $error("median_filter: K must be odd and <= N");
endmodule
