// tb_crosspoint_switch: random selections of processed and raw channels;
// each output must show, one clock later, the selected source (raw inputs
// sign-extended), and zero for a selection outside the sources.
module tb_crosspoint_switch;
  import rfims_pkg::*;
  localparam int NCH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] sel [NCH];
  logic signed [DAC_W-1:0] pin [NCH], cout [NCH];
  logic signed [ADC_W-1:0] rin [NCH];
  crosspoint_switch #(.NCH(NCH)) dut (.clk, .rst_n, .sel, .proc_in(pin), .raw_in(rin), .corr_out(cout));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int e [NCH];
  initial begin
    for (int o = 0; o < NCH; o++) begin sel[o] = '0; pin[o] = '0; rin[o] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      for (int o = 0; o < NCH; o++) begin
        pin[o] = DAC_W'($urandom);
        rin[o] = ADC_W'($urandom);
        sel[o] = 4'($urandom_range(i < 450 ? 2 * NCH - 1 : 15));
      end
      for (int o = 0; o < NCH; o++)
        e[o] = (sel[o] < NCH) ? int'(pin[sel[o]]) : (sel[o] < 2 * NCH) ? int'(rin[sel[o] - NCH]) : 0;
      @(negedge clk);
      for (int o = 0; o < NCH; o++) begin
        checks++;
        if (int'(cout[o]) != e[o]) begin
          failures++;
          if (failures < 10) $display("out %0d sel %0d: got %0d expected %0d", o, sel[o], cout[o], e[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
