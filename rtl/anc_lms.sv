// anc_lms: adaptive noise cancellation of antenna i with its two neighbours,
// one complex LMS canceller per frequency bin.
//
// The 14 antennas form a linear array; no separate reference antenna exists,
// so the reference for antenna i is built from the delay-compensated spectra
// of antennas i-1 and i+1. Differences of coherent spectra remove the
// astronomical signal and keep the (partly uncorrelated) interference:
//   r(f)  = [ sp_i(f) - sp_{i-1}(f) ,  sp_{i+1}(f) - sp_i(f) ]^T
//   e(f)  = sp_i(f) - w(f)^T r(f)                 ("clean" output, error signal)
//   w(f) <= w(f) + mu * e(f) * conj(r(f))         (LMS update, once per frame)
// The paper writes the error with sp_i at step n-1 and the update with the
// error of step n-1; this design uses the usual LMS form above, in which the
// error of frame n uses the weights of frame n and updates them for frame n+1.
// nbr_en clears the reference component of an absent neighbour (array ends).
//
// Number formats (own choice): weights are signed WW-bit with WFRAC fraction
// bits, saturated; mu = 2^-mu_shift applied to e*conj(r) in weight LSBs, so the
// effective gain is 2^(WFRAC-mu_shift) per unit of power. Weights reset to 0,
// so the output equals the input until the canceller adapts.
//
// Interface: the three spectra arrive together, bin by bin (in_valid, in_bin).
// One-deep valid/ready pipeline register, latency one clock.
module anc_lms
  import rfims_pkg::*;
#(
  parameter int N     = 256,
  parameter int WW    = 32,
  parameter int WFRAC = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [5:0]           mu_shift,
  input  logic [1:0]           nbr_en,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                in_prev,
  input  cplx_t                in_own,
  input  cplx_t                in_next,
  input  logic [$clog2(N)-1:0] in_bin,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                out_data,
  output logic [$clog2(N)-1:0] out_bin
);
  typedef logic signed [WW-1:0] wdata_t;
  typedef struct packed {
    wdata_t re;
    wdata_t im;
  } wcplx_t;
  typedef logic signed [63:0] acc_t;

  wcplx_t w0_q [N];
  wcplx_t w1_q [N];

  function automatic wdata_t wsat(input acc_t v);
    acc_t hi, lo;
    hi = (64'sd1 <<< (WW - 1)) - 1;
    lo = -(64'sd1 <<< (WW - 1));
    if (v > hi) return wdata_t'(hi);
    if (v < lo) return wdata_t'(lo);
    return wdata_t'(v);
  endfunction

  acc_t r0r, r0i, r1r, r1i, yr, yi, er, ei;
  cplx_t  e;
  wcplx_t w0n, w1n;
  always_comb begin
    wcplx_t w0, w1;
    acc_t u0r, u0i, u1r, u1i;
    w0  = w0_q[in_bin];
    w1  = w1_q[in_bin];
    r0r = nbr_en[0] ? acc_t'(in_own.re) - acc_t'(in_prev.re) : '0;
    r0i = nbr_en[0] ? acc_t'(in_own.im) - acc_t'(in_prev.im) : '0;
    r1r = nbr_en[1] ? acc_t'(in_next.re) - acc_t'(in_own.re) : '0;
    r1i = nbr_en[1] ? acc_t'(in_next.im) - acc_t'(in_own.im) : '0;
    // y = w0*r0 + w1*r1
    yr  = (acc_t'(w0.re) * r0r - acc_t'(w0.im) * r0i + acc_t'(w1.re) * r1r - acc_t'(w1.im) * r1i) >>> WFRAC;
    yi  = (acc_t'(w0.re) * r0i + acc_t'(w0.im) * r0r + acc_t'(w1.re) * r1i + acc_t'(w1.im) * r1r) >>> WFRAC;
    er  = acc_t'(sat_to(acc_t'(in_own.re) - yr, DW));
    ei  = acc_t'(sat_to(acc_t'(in_own.im) - yi, DW));
    e.re = sdata_t'(er);
    e.im = sdata_t'(ei);
    // e * conj(r)
    u0r = (er * r0r + ei * r0i) >>> mu_shift;
    u0i = (ei * r0r - er * r0i) >>> mu_shift;
    u1r = (er * r1r + ei * r1i) >>> mu_shift;
    u1i = (ei * r1r - er * r1i) >>> mu_shift;
    w0n.re = wsat(acc_t'(w0.re) + u0r);
    w0n.im = wsat(acc_t'(w0.im) + u0i);
    w1n.re = wsat(acc_t'(w1.re) + u1r);
    w1n.im = wsat(acc_t'(w1.im) + u1i);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_bin   <= '0;
      for (int i = 0; i < N; i++) begin
        w0_q[i] <= '0;
        w1_q[i] <= '0;
      end
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data     <= e;
        out_bin      <= in_bin;
        w0_q[in_bin] <= w0n;
        w1_q[in_bin] <= w1n;
      end
    end
  end
endmodule
