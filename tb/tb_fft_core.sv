// tb_fft_core: checks the forward and the inverse transform against a
// direct DFT evaluated in double precision.
//
// A 16-point forward core (unscaled) gets random complex frames; every bin must
// match the DFT within a tolerance for twiddle quantisation and rounding. The
// reference spectra, rounded, are then fed to a 16-point inverse core
// (scaled), whose output must give back the time samples. Also checked: the
// latency from the last input to the first output is N/2*log2(N) clocks, and
// in_ready is low while a frame is computed and unloaded. Output back-pressure
// is applied at random.
module tb_fft_core;
  import rfims_pkg::*;
  localparam int N = 16;
  localparam int L = 4;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic f_iv, f_ir, f_ov, f_or, f_last;
  cplx_t f_id, f_od;
  logic [L-1:0] f_bin;
  logic i_iv, i_ir, i_ov, i_or, i_last;
  cplx_t i_id, i_od;
  logic [L-1:0] i_bin;

  fft_core #(.N(N), .INVERSE(1'b0), .SCALE(1'b0)) dut_f (
    .clk, .rst_n, .in_valid(f_iv), .in_ready(f_ir), .in_data(f_id),
    .out_valid(f_ov), .out_ready(f_or), .out_data(f_od), .out_bin(f_bin), .out_last(f_last));
  fft_core #(.N(N), .INVERSE(1'b1), .SCALE(1'b1)) dut_i (
    .clk, .rst_n, .in_valid(i_iv), .in_ready(i_ir), .in_data(i_id),
    .out_valid(i_ov), .out_ready(i_or), .out_data(i_od), .out_bin(i_bin), .out_last(i_last));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit near(input real a, input int b, input real tol);
    real d;
    d = a - real'(b);
    if (d < 0) d = -d;
    return d <= tol;
  endfunction

  int xr [N], xi [N];
  real Xr [N], Xi [N];

  task automatic run_frame(input int amp, input int fr);
    int lat;
    int got;
    for (int n = 0; n < N; n++) begin
      xr[n] = int'($urandom_range(2 * amp)) - amp;
      xi[n] = int'($urandom_range(2 * amp)) - amp;
    end
    for (int k = 0; k < N; k++) begin
      Xr[k] = 0; Xi[k] = 0;
      for (int n = 0; n < N; n++) begin
        Xr[k] += xr[n] * $cos(2 * PI * k * n / N) + xi[n] * $sin(2 * PI * k * n / N);
        Xi[k] += xi[n] * $cos(2 * PI * k * n / N) - xr[n] * $sin(2 * PI * k * n / N);
      end
    end
    // load the forward core
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      checks++;
      if (!f_ir) begin failures++; $display("fwd not ready at load %0d", n); end
      f_iv = 1; f_id.re = sdata_t'(xr[n]); f_id.im = sdata_t'(xi[n]);
    end
    @(negedge clk);
    f_iv = 0;
    lat = 0;  // counts clock edges after the one that took the last sample
    while (!f_ov) begin
      checks++;
      if (f_ir) begin failures++; $display("fwd ready while computing"); end
      @(negedge clk);
      lat++;
    end
    checks++;
    if (lat != N / 2 * L) begin failures++; $display("latency %0d, expected %0d", lat, N / 2 * L); end
    // unload with random back-pressure
    got = 0;
    while (got < N) begin
      f_or = ($urandom_range(3) != 0);
      @(posedge clk);
      if (f_ov && f_or) begin
        checks++;
        if (int'(f_bin) != got || f_last != (got == N - 1) ||
            !near(Xr[got], int'(f_od.re), 6.0) || !near(Xi[got], int'(f_od.im), 6.0)) begin
          failures++;
          $display("frame %0d bin %0d: got %0d,%0d expected %f,%f", fr, got, f_od.re, f_od.im, Xr[got], Xi[got]);
        end
        got++;
      end
      @(negedge clk);
    end
    f_or = 0;
    // inverse of the rounded reference spectrum
    for (int k = 0; k < N; k++) begin
      checks++;
      if (!i_ir) begin failures++; $display("inv not ready"); end
      i_iv = 1; i_id.re = sdata_t'(int'(Xr[k])); i_id.im = sdata_t'(int'(Xi[k]));
      @(negedge clk);
    end
    i_iv = 0;
    got = 0;
    i_or = 1;
    while (got < N) begin
      @(posedge clk);
      if (i_ov) begin
        checks++;
        if (!near(real'(xr[got]), int'(i_od.re), 3.0) || !near(real'(xi[got]), int'(i_od.im), 3.0)) begin
          failures++;
          $display("inverse frame %0d n %0d: got %0d,%0d expected %0d,%0d", fr, got, i_od.re, i_od.im, xr[got], xi[got]);
        end
        got++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    f_iv = 0; f_or = 0; f_id = '0; i_iv = 0; i_or = 0; i_id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_frame(100, 0);
    for (int fr = 1; fr < 12; fr++) run_frame(2000, fr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
