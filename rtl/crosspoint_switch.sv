// crosspoint_switch: routes any of the processed or unprocessed baseband
// channels to any correlator input.
//
// The mitigation subsystem can be bypassed completely with a cross-point
// switch that sits beside it: the IVC outputs reach it directly, the DAC
// outputs of the processors reach it too, and each correlator input can be
// connected to either. The real switch routes analogue signals; this design
// models it on sample words (DAC scale, DAC_W bits), which is how it appears to
// the digital part. Each output o takes source sel[o]: 0..NCH-1 are the
// processed channels, NCH..2*NCH-1 the unprocessed inputs, sign-extended from
// ADC_W bits. The selection is registered with the data; latency one clock.
// The bypass path has no processing delay; equalising it is left to the
// correlator's delay tracking (not described in the paper).
module crosspoint_switch
  import rfims_pkg::*;
#(
  parameter int NCH = 28
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(2*NCH)-1:0]      sel       [NCH],
  input  logic signed [DAC_W-1:0]       proc_in   [NCH],
  input  logic signed [ADC_W-1:0]       raw_in    [NCH],
  output logic signed [DAC_W-1:0]       corr_out  [NCH]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NCH; o++) corr_out[o] <= '0;
    end else begin
      for (int o = 0; o < NCH; o++) begin
        if (int'(sel[o]) < NCH)
          corr_out[o] <= proc_in[sel[o]];
        else if (int'(sel[o]) < 2 * NCH)
          corr_out[o] <= DAC_W'(raw_in[int'(sel[o]) - NCH]);
        else
          corr_out[o] <= '0;
      end
    end
  end
endmodule
