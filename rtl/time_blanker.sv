// time_blanker: RFI thresholding in the temporal domain.
//
// Strong impulsive interference (radar pulses, sparks) is short in time and
// wide in frequency; it is best caught on the baseband samples themselves,
// before the spectral transform spreads it over every bin of a frame. The
// paper states that thresholding is applied in both the temporal and the
// frequency domain; this block is the temporal part. A sample whose magnitude
// exceeds thr is replaced by zero, i.e. deleted from the time-frequency plane
// at full time resolution. thr = 0 switches blanking off. The threshold is an
// absolute sample level set by the host (own choice: the paper gives no rule).
//
// Interface: one sample per in_valid; out_valid follows one clock later;
// out_blanked marks a replaced sample; blank_count counts them since reset.
module time_blanker #(
  parameter int W = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [W-2:0]        thr,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W-1:0] out_data,
  output logic                out_blanked,
  output logic [31:0]         blank_count
);
  logic [W-1:0] mag;
  logic         hit;
  always_comb begin
    mag = in_data[W-1] ? W'(-in_data) : W'(in_data);
    hit = (thr != '0) && (mag > W'(thr));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_data    <= '0;
      out_blanked <= 1'b0;
      blank_count <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data    <= hit ? '0 : in_data;
        out_blanked <= hit;
        if (hit) blank_count <= blank_count + 1;
      end
    end
  end
endmodule
