// rfims_pkg: types and constants shared by the RFI mitigation processor.
//
// Sample widths follow the converters of the subsystem: a 12-bit ADC in front
// of the FPGA and a 14-bit DAC behind it. Spectral data are complex words of
// DW bits per component; DW = 24 leaves room for the 9 bits of growth of an
// unscaled 256-point forward FFT of 12-bit data plus filter headroom (a choice
// of this design, the paper gives no internal word length). Powers |X|^2 are
// PW = 2*DW+1 bits wide.
package rfims_pkg;
  localparam int ADC_W = 12;   // ADC resolution (paper: 12-bit ADC)
  localparam int DAC_W = 14;   // DAC resolution (paper: 14-bit DAC)
  localparam int DW    = 24;   // spectral component width (own choice)
  localparam int PW    = 2*DW + 1;

  typedef logic signed [DW-1:0] sdata_t;
  typedef logic [PW-1:0]        power_t;

  typedef struct packed {
    sdata_t re;
    sdata_t im;
  } cplx_t;

  // Algorithm configuration loaded into a processor: RFI excision in the
  // time-frequency plane, or adaptive noise cancellation with neighbour antennas.
  typedef enum logic {
    MODE_EXCISE = 1'b0,
    MODE_ANC    = 1'b1
  } mode_e;

  // What replaces a spectral bin flagged as RFI.
  typedef enum logic {
    SUBST_ZERO  = 1'b0,
    SUBST_NOISE = 1'b1
  } subst_e;

  localparam int DLY_W = 6;    // delay compensation range, 0..63 samples (own choice)

  // Per-processor configuration written by the host.
  typedef struct packed {
    mode_e              mode;
    subst_e             subst;
    logic [15:0]        noise_amp;  // amplitude of substituted noise, LSBs of sdata_t
    logic [7:0]         thr_h;      // spectral threshold factor on the reference, Q4.4
    logic [7:0]         cusum_k;    // CUSUM drift allowance factor on the reference, Q4.4
    logic [7:0]         cusum_h;    // CUSUM decision level factor on the reference, Q4.4
    logic [5:0]         mu_shift;   // LMS gain mu = 2^-mu_shift (in weight LSBs)
    logic [1:0]         nbr_en;     // [0] antenna i-1 present, [1] antenna i+1 present
    logic [DLY_W-1:0]   dly_prev;   // delay compensation of antenna i-1, samples
    logic [DLY_W-1:0]   dly_own;    // delay of antenna i, samples
    logic [DLY_W-1:0]   dly_next;   // delay compensation of antenna i+1, samples
    logic [ADC_W-2:0]   blank_thr;  // time-domain blanking level on |x|, ADC LSBs, 0 = off
  } node_cfg_t;

  // Saturate a wide signed value to `w` bits (w <= 32).
  function automatic logic signed [31:0] sat_to(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w-1)) - 1;
    lo = -(64'sd1 <<< (w-1));
    if (v > hi) return 32'(hi);
    if (v < lo) return 32'(lo);
    return 32'(v);
  endfunction
endpackage
