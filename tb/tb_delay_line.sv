// tb_delay_line: random samples at random valid gaps through the delay line,
// with the delay changed now and then; every output is compared with the
// sample history kept by the testbench.
module tb_delay_line;
  localparam int W = 12, DMAX = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ov;
  logic signed [W-1:0] id, od;
  logic [3:0] dly;
  delay_line #(.W(W), .DMAX(DMAX)) dut (.clk, .rst_n, .in_valid(iv), .in_data(id), .delay(dly),
    .out_valid(ov), .out_data(od));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist [$];
  int expct, hidx;
  initial begin
    iv = 0; id = '0; dly = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (i % 97 == 0) dly = 4'($urandom_range(DMAX - 1));
      iv = ($urandom_range(2) != 0);
      id = W'($urandom);
      if (iv) begin
        hist.push_back(int'(id));
        hidx = hist.size() - 1 - int'(dly);
        expct = (hidx >= 0) ? hist[hidx] : 0;
      end
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (ov != iv || (iv && int'(od) != expct)) begin
        failures++;
        if (failures < 10) $display("i=%0d delay=%0d got %0d expected %0d", i, dly, od, expct);
      end
      iv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
