// power_spectrum: running power spectrum of the own antenna.
//
// For every spectrum the FFT produces, each bin X(f) is turned into its power
// p(f) = re^2 + im^2. The spectrum is passed on unchanged beside its power, so
// that the excision stage can still replace the complex bin. "Running" here
// means one power spectrum per FFT frame, with no averaging over frames: the
// detector works on the time-frequency plane at full FFT time resolution
// (own reading; the paper gives no integration length).
//
// Interface: a one-deep valid/ready pipeline register; in_ready is high when
// the register is empty or being read. Latency one clock.
module power_spectrum
  import rfims_pkg::*;
#(
  parameter int N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                in_data,
  input  logic [$clog2(N)-1:0] in_bin,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                out_data,
  output power_t               out_power,
  output logic [$clog2(N)-1:0] out_bin
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_power <= '0;
      out_bin   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data  <= in_data;
        out_bin   <= in_bin;
        out_power <= power_t'(in_data.re * in_data.re) + power_t'(in_data.im * in_data.im);
      end
    end
  end
endmodule
