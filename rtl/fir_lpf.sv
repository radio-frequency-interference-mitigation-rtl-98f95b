// fir_lpf: low-pass filter at the input of each antenna channel.
//
// Every antenna stream passes a low-pass filter before its spectral transform
// (block diagram of the adaptive canceller). The paper gives no filter
// response, so this design uses the simplest fitting filter: a direct-form FIR
// with NTAPS symmetric taps, a Hamming-windowed sinc with cutoff CUTOFF_PM
// thousandths of the sample rate, normalised to unity DC gain and quantised to
// Q1.(CW-1). The coefficients are computed at elaboration:
//   h[n] = w[n]*sinc(2*fc*(n-(NTAPS-1)/2)) / sum(w*sinc),
//   w[n] = 0.54 - 0.46*cos(2*pi*n/(NTAPS-1)).
//
// Interface: one sample per in_valid; out_valid follows one clock later with
//   y = round(sum_k h[k]*x[n-k] / 2^(CW-1)),
// at the scale of the input, sign-extended to OW bits. The delay line is
// cleared at reset.
module fir_lpf #(
  parameter int NTAPS     = 15,
  parameter int CW        = 16,
  parameter int IW        = 12,
  parameter int OW        = 24,
  parameter int CUTOFF_PM = 250
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_data,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_data
);
  localparam real PI = 3.14159265358979323846;

  function automatic logic [NTAPS*CW-1:0] gen_coef();
    logic [NTAPS*CW-1:0] c;
    real h [NTAPS];
    real s, fc, m;
    fc = CUTOFF_PM / 1000.0;
    s  = 0.0;
    for (int n = 0; n < NTAPS; n++) begin
      m = n - (NTAPS - 1) / 2.0;
      h[n] = (m == 0.0) ? 2.0 * fc : $sin(2.0 * PI * fc * m) / (PI * m);
      h[n] = h[n] * (0.54 - 0.46 * $cos(2.0 * PI * n / (NTAPS - 1)));
      s += h[n];
    end
    c = '0;
    for (int n = 0; n < NTAPS; n++)
      c[n*CW +: CW] = CW'(int'(h[n] / s * (1 << (CW - 1))));
    return c;
  endfunction

  localparam logic [NTAPS*CW-1:0] COEF = gen_coef();

  logic signed [IW-1:0] taps [NTAPS];
  logic signed [IW+CW+$clog2(NTAPS):0] acc;

  always_comb begin
    acc = (IW+CW+$clog2(NTAPS)+1)'(in_data * $signed(COEF[0 +: CW]));
    for (int k = 1; k < NTAPS; k++)
      acc += (IW+CW+$clog2(NTAPS)+1)'(taps[k-1] * $signed(COEF[k*CW +: CW]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int k = 0; k < NTAPS; k++) taps[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        taps[0] <= in_data;
        for (int k = 1; k < NTAPS; k++) taps[k] <= taps[k-1];
        out_data <= OW'((acc + (1 <<< (CW - 2))) >>> (CW - 1));
      end
    end
  end
endmodule
