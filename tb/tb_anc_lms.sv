// tb_anc_lms: adaptive cancellation of interference seen by three antennas.
//
// Every frame each bin carries an astronomical signal s, identical (after
// delay compensation) in the three antennas, and interference R that reaches
// antenna i-1 with gain 0.5 and antenna i+1 with gain -0.3+0.4j. Checks:
//   - with zero initial weights the first frame passes unchanged;
//   - after adaptation the residual interference |e - s|^2 is at least 20 dB
//     below |R|^2 while s is kept;
//   - with both neighbours disabled the output always equals the input;
//   - back-pressure holds the output.
module tb_anc_lms;
  import rfims_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0] mu;
  logic [1:0] en;
  logic iv, ir, ov, orr;
  cplx_t xp, xo, xn, od;
  logic [1:0] ib, ob;
  anc_lms #(.N(N)) dut (.clk, .rst_n, .mu_shift(mu), .nbr_en(en), .in_valid(iv), .in_ready(ir),
    .in_prev(xp), .in_own(xo), .in_next(xn), .in_bin(ib),
    .out_valid(ov), .out_ready(orr), .out_data(od), .out_bin(ob));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(input int a);
    return int'($urandom_range(2 * a)) - a;
  endfunction

  real pres, prfi;
  task automatic run(input int frames, input bit expect_pass, input bit measure_from_40);
    int sr, si, rr, ri;
    for (int fr = 0; fr < frames; fr++) begin
      for (int b = 0; b < N; b++) begin
        sr = rnd(300); si = rnd(300);
        rr = rnd(3000); ri = rnd(3000);
        @(negedge clk);
        iv = 1; ib = 2'(b);
        xo.re = sdata_t'(sr + rr);                       xo.im = sdata_t'(si + ri);
        xp.re = sdata_t'(sr + rr / 2);                   xp.im = sdata_t'(si + ri / 2);
        xn.re = sdata_t'(sr + int'(-0.3 * rr - 0.4 * ri)); xn.im = sdata_t'(si + int'(-0.3 * ri + 0.4 * rr));
        orr = ($urandom_range(4) != 0);
        while (!ir) @(negedge clk);
        @(posedge clk);
        @(negedge clk);
        iv = 0;
        if (!orr) begin
          checks++;
          if (!ov) begin failures++; $display("output lost under back-pressure"); end
          orr = 1;
          @(negedge clk);
          @(negedge clk);
        end
        @(posedge clk);
        // output was presented after the accepting edge; check the held value
        checks++;
        if (int'(ob) != b) begin failures++; $display("bin %0d out of order", b); end
        if (expect_pass || fr == 0) begin
          checks++;
          if (od != xo) begin failures++; if (failures < 10) $display("frame %0d bin %0d not passed: %0d vs %0d", fr, b, od.re, xo.re); end
        end
        if (measure_from_40 && fr >= frames - 40) begin
          pres += real'((int'(od.re) - sr) ** 2 + (int'(od.im) - si) ** 2);
          prfi += real'(rr ** 2 + ri ** 2);
        end
      end
    end
  endtask

  initial begin
    mu = 6'd7; en = 2'b11;
    iv = 0; orr = 1; xp = '0; xo = '0; xn = '0; ib = '0;
    pres = 0; prfi = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(300, 1'b0, 1'b1);
    checks++;
    $display("residual interference %f dB", 10.0 * $log10(pres / prfi));
    if (pres > 0.01 * prfi) begin failures++; $display("insufficient suppression"); end
    rst_n = 0;
    en = 2'b00;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(30, 1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
