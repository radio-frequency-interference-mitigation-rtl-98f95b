// sample_fifo: synchronous first-in first-out buffer for ADC sample words.
//
// The frame-based FFT accepts samples only while it loads a frame; the ADC
// delivers them without pause. This buffer holds the samples that arrive while
// the transform computes and unloads. Show-ahead: dout is the oldest word
// whenever empty is low; pop removes it. A push into a full buffer is dropped
// (the caller counts it). DEPTH must be a power of two. Memory cleared at reset.
module sample_fifo #(
  parameter int W     = 36,
  parameter int DEPTH = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push && !full) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1'b1;
      end
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  initial assert ((1 << AW) == DEPTH) else $error("sample_fifo: DEPTH must be a power of two");
endmodule
