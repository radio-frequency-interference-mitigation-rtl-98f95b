// rfims_top: the RFI mitigation subsystem of a 14-antenna, dual-polarisation
// linear array: one processor per antenna and polarisation (28 in all) and the
// cross-point switch that lets every correlator input take either a cleaned or
// an untouched channel.
//
// Channel c = 2*a + p carries antenna a (0..NANT-1), polarisation p. The
// processor of channel c also receives the samples of the same polarisation of
// antennas a-1 and a+1, standing for the links between adjacent processors;
// at the two ends of the array the missing neighbour is switched off in the
// processor's nbr_en, whatever the host writes.
//
// Interface: adc_valid strobes one sample of every channel (all converters
// share the sample clock). The ADCs, DACs and the analogue correlator are not
// part of this RTL: adc_data holds the ADC_W-bit ADC words, dac_* the DAC_W-bit
// words given to the DACs, corr_data the words the cross-point switch passes
// to each correlator input (sel as in crosspoint_switch). cfg is the
// per-processor configuration. Status counters are reported per processor.
module rfims_top
  import rfims_pkg::*;
#(
  parameter int NANT     = 14,
  parameter int NPOL     = 2,
  parameter int N        = 256,
  parameter int LPF_TAPS = 15,
  parameter int MED_K    = 7,
  localparam int NCH     = NANT * NPOL
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  node_cfg_t                  cfg       [NCH],
  input  logic [$clog2(2*NCH)-1:0]   xp_sel    [NCH],
  input  logic                       adc_valid,
  input  logic signed [ADC_W-1:0]    adc_data  [NCH],
  output logic                       dac_valid [NCH],
  output logic signed [DAC_W-1:0]    dac_data  [NCH],
  output logic signed [DAC_W-1:0]    corr_data [NCH],
  output logic [NCH-1:0]             mode_anc,
  output logic [NCH-1:0]             ref_ok,
  output logic [31:0]                frame_count   [NCH],
  output logic [31:0]                overrun_count [NCH],
  output logic [31:0]                mode_switches [NCH],
  output logic [31:0]                flag_count    [NCH],
  output logic [31:0]                blank_count   [NCH],
  output logic [31:0]                thr_count     [NCH],
  output logic [31:0]                cusum_count   [NCH],
  output logic [31:0]                subst_count   [NCH]
);
  for (genvar a = 0; a < NANT; a++) begin : g_ant
    for (genvar p = 0; p < NPOL; p++) begin : g_pol
      localparam int C = a * NPOL + p;
      node_cfg_t c_cfg;
      mode_e     m;
      always_comb begin
        c_cfg = cfg[C];
        if (a == 0)        c_cfg.nbr_en[0] = 1'b0;
        if (a == NANT - 1) c_cfg.nbr_en[1] = 1'b0;
      end
      rfims_node #(.N(N), .LPF_TAPS(LPF_TAPS), .MED_K(MED_K)) u_node (
        .clk, .rst_n, .cfg(c_cfg), .adc_valid,
        .adc_prev((a > 0)        ? adc_data[(a > 0 ? C - NPOL : C)] : '0),
        .adc_own (adc_data[C]),
        .adc_next((a < NANT - 1) ? adc_data[(a < NANT - 1 ? C + NPOL : C)] : '0),
        .dac_valid(dac_valid[C]), .dac_data(dac_data[C]),
        .mode_active(m), .ref_ok(ref_ok[C]),
        .frame_count(frame_count[C]), .overrun_count(overrun_count[C]),
        .mode_switches(mode_switches[C]), .flag_count(flag_count[C]),
        .subst_count(subst_count[C]), .blank_count(blank_count[C]), .thr_count(thr_count[C]), .cusum_count(cusum_count[C]));
      assign mode_anc[C] = (m == MODE_ANC);
    end
  end

  crosspoint_switch #(.NCH(NCH)) u_xp (
    .clk, .rst_n, .sel(xp_sel), .proc_in(dac_data), .raw_in(adc_data), .corr_out(corr_data));
endmodule
