// rfi_excision: replaces spectral bins flagged as RFI.
//
// In real time the flagged points of the time-frequency plane cannot simply be
// left out of the stream to the correlator, so they are substituted. The paper
// discusses deletion (here: SUBST_ZERO) and, as the better option for a
// correlator, substitution by noise-like numbers whose variance matches the
// system noise (SUBST_NOISE). This design draws the noise from a 32-bit
// Galois LFSR (polynomial x^32+x^22+x^2+x+1): re and im are two signed
// 8-bit fields of the register, scaled by noise_amp/128. Matching the amplitude
// to the system noise of the bin is left to the host through noise_amp (own
// choice; the paper does not say how the variance is set).
//
// Interface: one-deep valid/ready pipeline register, latency one clock;
// subst_count counts replaced bins since reset.
module rfi_excision
  import rfims_pkg::*;
#(
  parameter int N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  subst_e               subst,
  input  logic [15:0]          noise_amp,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                in_data,
  input  logic [$clog2(N)-1:0] in_bin,
  input  logic                 in_flag,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                out_data,
  output logic [$clog2(N)-1:0] out_bin,
  output logic [31:0]          subst_count
);
  logic [31:0] lfsr;
  cplx_t noise;
  always_comb begin
    logic signed [7:0]  nr, ni;
    logic signed [24:0] pr, pi_;
    nr  = $signed(lfsr[7:0]);
    ni  = $signed(lfsr[15:8]);
    pr  = nr * $signed({1'b0, noise_amp});
    pi_ = ni * $signed({1'b0, noise_amp});
    noise.re = sdata_t'(pr >>> 7);
    noise.im = sdata_t'(pi_ >>> 7);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr        <= 32'hACE1_2468;
      out_valid   <= 1'b0;
      out_data    <= '0;
      out_bin     <= '0;
      subst_count <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_bin <= in_bin;
        lfsr    <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
        if (in_flag) begin
          out_data    <= (subst == SUBST_NOISE) ? noise : '0;
          subst_count <= subst_count + 1;
        end else begin
          out_data <= in_data;
        end
      end
    end
  end
endmodule
