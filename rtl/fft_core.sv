// fft_core: frame-based radix-2 FFT, forward ("spectral transform") or inverse
// ("inverse spectral transform").
//
// The processor takes a short-time Fourier transform of each baseband stream,
// works on the spectra and transforms back to the time domain. This core does
// one N-point transform per frame in three phases:
//   LOAD    accepts N complex samples (in_valid/in_ready) and stores sample n at
//           the bit-reversed address of n;
//   COMPUTE runs log2(N) decimation-in-time stages of N/2 butterflies, one
//           butterfly per clock, in place in a register array: N/2*log2(N) clocks;
//   UNLOAD  presents bins 0..N-1 in natural order (out_valid/out_ready,
//           out_bin, out_last on bin N-1).
// in_ready is high only in LOAD. A frame therefore occupies the core for
// N + N/2*log2(N) + N clocks at full input and output rate.
//
// Twiddles are Q2.14, computed at elaboration from cos/sin. The forward
// transform uses W = exp(-j2pi k/N), the inverse exp(+j2pi k/N). With
// SCALE = 1 every stage halves its results, so the inverse returns x, not N*x,
// for a spectrum produced by the unscaled forward transform.
// The paper names a real-time FFT; length, radix, word length and scaling
// are choices of this design.
module fft_core
  import rfims_pkg::*;
#(
  parameter int N       = 256,
  parameter bit INVERSE = 1'b0,
  parameter bit SCALE   = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output cplx_t                out_data,
  output logic [$clog2(N)-1:0] out_bin,
  output logic                 out_last
);
  localparam int L     = $clog2(N);
  localparam int TW    = 16;
  localparam int TFRAC = 14;
  localparam real PI   = 3.14159265358979323846;

  typedef logic signed [TW-1:0] tw_t;
  typedef logic [L-1:0]         idx_t;

  function automatic logic [N/2*TW-1:0] gen_twiddle(input bit sine);
    logic [N/2*TW-1:0] t;
    real a;
    t = '0;
    for (int k = 0; k < N/2; k++) begin
      a = 2.0 * PI * k / N;
      t[k*TW +: TW] = tw_t'(int'((sine ? $sin(a) : $cos(a)) * (1 << TFRAC)));
    end
    return t;
  endfunction

  localparam logic [N/2*TW-1:0] COS_T = gen_twiddle(1'b0);
  localparam logic [N/2*TW-1:0] SIN_T = gen_twiddle(1'b1);

  function automatic idx_t bitrev(input idx_t v);
    idx_t r;
    for (int i = 0; i < L; i++) r[i] = v[L-1-i];
    return r;
  endfunction

  typedef enum logic [1:0] {S_LOAD, S_COMP, S_UNLOAD} state_e;
  state_e state;

  cplx_t mem [N];
  idx_t  cnt;
  logic [$clog2(L+1)-1:0] stage;
  logic [L-2:0]           bfly;

  // Butterfly addressing and arithmetic for (stage, bfly).
  idx_t a_idx, b_idx, k_idx;
  cplx_t new_a, new_b;
  always_comb begin
    logic [L-1:0] half, pos, grp;
    logic signed [TW-1:0] wr, wi;
    logic signed [DW+TW:0] pr, pi_;
    logic signed [DW:0] tr, ti, sr0, si0, sr1, si1;
    half  = idx_t'(1) << stage;
    pos   = idx_t'(bfly) & (half - 1'b1);
    grp   = idx_t'(bfly) >> stage;
    a_idx = idx_t'((grp << (stage + 1)) | pos);
    b_idx = a_idx | half;
    k_idx = idx_t'(pos << (L - 1 - stage));
    wr    = COS_T[k_idx[L-2:0]*TW +: TW];
    wi    = INVERSE ? SIN_T[k_idx[L-2:0]*TW +: TW] : -SIN_T[k_idx[L-2:0]*TW +: TW];
    // t = W * b
    pr  = (DW+TW+1)'(mem[b_idx].re * wr) - (DW+TW+1)'(mem[b_idx].im * wi) + (DW+TW+1)'(1 <<< (TFRAC-1));
    pi_ = (DW+TW+1)'(mem[b_idx].re * wi) + (DW+TW+1)'(mem[b_idx].im * wr) + (DW+TW+1)'(1 <<< (TFRAC-1));
    tr  = (DW+1)'(pr >>> TFRAC);
    ti  = (DW+1)'(pi_ >>> TFRAC);
    sr0 = (DW+1)'(mem[a_idx].re) + tr;
    si0 = (DW+1)'(mem[a_idx].im) + ti;
    sr1 = (DW+1)'(mem[a_idx].re) - tr;
    si1 = (DW+1)'(mem[a_idx].im) - ti;
    if (SCALE) begin
      new_a.re = DW'((sr0 + 1) >>> 1);  new_a.im = DW'((si0 + 1) >>> 1);
      new_b.re = DW'((sr1 + 1) >>> 1);  new_b.im = DW'((si1 + 1) >>> 1);
    end else begin
      new_a.re = DW'(sr0);  new_a.im = DW'(si0);
      new_b.re = DW'(sr1);  new_b.im = DW'(si1);
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_data  = mem[cnt];
  assign out_bin   = cnt;
  assign out_last  = (state == S_UNLOAD) && (cnt == idx_t'(N-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      bfly  <= '0;
      for (int i = 0; i < N; i++) mem[i] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          mem[bitrev(cnt)] <= in_data;
          cnt <= cnt + 1'b1;
          if (cnt == idx_t'(N-1)) state <= S_COMP;
        end
        S_COMP: begin
          mem[a_idx] <= new_a;
          mem[b_idx] <= new_b;
          bfly <= bfly + 1'b1;
          if (&bfly) begin
            if (stage == L-1) begin
              stage <= '0;
              state <= S_UNLOAD;
            end else begin
              stage <= stage + 1'b1;
            end
          end
        end
        S_UNLOAD: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == idx_t'(N-1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  initial assert (N >= 4 && (1 << L) == N) else $error("fft_core: N must be a power of two >= 4");
endmodule
