// tb_time_blanker: random samples, including full-scale ones, against random
// thresholds (and 0 = off); every output and the blank counter are compared
// with the rule |x| > thr -> 0.
module tb_time_blanker;
  localparam int W = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-2:0] thr;
  logic iv, ov, ob;
  logic signed [W-1:0] id, od;
  logic [31:0] cnt;
  time_blanker #(.W(W)) dut (.clk, .rst_n, .thr, .in_valid(iv), .in_data(id),
    .out_valid(ov), .out_data(od), .out_blanked(ob), .blank_count(cnt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nb = 0;
  initial begin
    int m, e;
    bit h;
    iv = 0; id = '0; thr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (i % 200 == 0) thr = (i % 600 == 0) ? '0 : (W-1)'($urandom_range(2047));
      iv = ($urandom_range(3) != 0);
      id = (i % 50 == 7) ? -12'sd2048 : W'($urandom);
      m = (int'(id) < 0) ? -int'(id) : int'(id);
      h = iv && thr != 0 && m > int'(thr);
      e = h ? 0 : int'(id);
      if (h) nb++;
      @(negedge clk);
      checks++;
      if (ov != iv || (iv && (int'(od) != e || ob != h))) begin
        failures++;
        if (failures < 10) $display("x=%0d thr=%0d: got %0d expected %0d", id, thr, od, e);
      end
      iv = 0;
    end
    checks++;
    if (cnt != 32'(nb)) begin failures++; $display("blank_count %0d expected %0d", cnt, nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
