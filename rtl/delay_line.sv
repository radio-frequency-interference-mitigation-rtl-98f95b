// delay_line: programmable integer-sample delay for delay compensation.
//
// Before the reference signal is formed, the signals of the neighbouring
// antennas must be shifted in time so that the astronomical signal is coherent
// in all three streams (the arrows over sp_{i-1} and sp_{i+1} in the reference
// equation). The paper says the shifts are precalculated per source-array
// geometry and set by computer; it does not say where they are applied. This
// design applies them to the time-domain samples, before filtering and FFT,
// as a whole number of samples from 0 to DMAX-1.
//
// Interface: one sample per in_valid. out_valid follows in_valid one clock
// later; out_data is then the sample accepted `delay` valid strobes before
// the current one (delay = 0: the current sample). The buffer is cleared at
// reset, so the first outputs after reset are zeros.
module delay_line #(
  parameter int W    = 12,
  parameter int DMAX = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [W-1:0]       in_data,
  input  logic [$clog2(DMAX)-1:0]   delay,
  output logic                      out_valid,
  output logic signed [W-1:0]       out_data
);
  localparam int AW = $clog2(DMAX);
  logic signed [W-1:0] buf_q [DMAX];
  logic [AW-1:0]       wp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int i = 0; i < DMAX; i++) buf_q[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        buf_q[wp] <= in_data;
        wp        <= wp + 1'b1;
        out_data  <= (delay == '0) ? in_data : buf_q[AW'(wp - delay)];
      end
    end
  end
endmodule
