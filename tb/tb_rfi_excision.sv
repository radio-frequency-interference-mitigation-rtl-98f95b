// tb_rfi_excision: unflagged bins must pass unchanged; flagged bins must
// become zero (SUBST_ZERO) or the scaled LFSR noise (SUBST_NOISE), which the
// testbench regenerates from the same polynomial. Also checks that the noise
// is not constant and the replacement counter. Output back-pressure at random.
module tb_rfi_excision;
  import rfims_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  subst_e subst;
  logic [15:0] amp;
  logic iv, ir, ov, orr, ifl;
  cplx_t id, od;
  logic [3:0] ib, ob;
  logic [31:0] scount;
  rfi_excision #(.N(N)) dut (.clk, .rst_n, .subst, .noise_amp(amp), .in_valid(iv), .in_ready(ir),
    .in_data(id), .in_bin(ib), .in_flag(ifl), .out_valid(ov), .out_ready(orr), .out_data(od),
    .out_bin(ob), .subst_count(scount));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] lf;
  int nsub = 0, ndiff = 0;
  cplx_t last_noise;
  initial begin
    cplx_t e;
    lf = 32'hACE1_2468;
    subst = SUBST_ZERO; amp = 16'd300;
    iv = 0; orr = 1; id = '0; ib = '0; ifl = 0;
    last_noise = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      if (i == 300) subst = SUBST_NOISE;
      iv = 1; ifl = ($urandom_range(2) == 0);
      id.re = sdata_t'($urandom); id.im = sdata_t'($urandom); ib = 4'(i);
      if (!ifl) e = id;
      else if (subst == SUBST_ZERO) e = '0;
      else begin
        e.re = sdata_t'((longint'($signed(lf[7:0])) * amp) >>> 7);
        e.im = sdata_t'((longint'($signed(lf[15:8])) * amp) >>> 7);
      end
      if (ifl) nsub++;
      orr = 0;
      @(posedge clk);            // the output register is empty: accepted here
      lf = lf[0] ? ((lf >> 1) ^ 32'h8020_0003) : (lf >> 1);
      @(negedge clk);
      iv = 0;
      repeat ($urandom_range(3)) begin   // back-pressure: output must hold
        @(negedge clk);
        checks++;
        if (!ov || ir) begin failures++; $display("i=%0d output not held", i); end
      end
      orr = 1;
      checks++;
      if (od != e || ob != 4'(i)) begin
        failures++;
        if (failures < 10) $display("i=%0d flag=%b got %0d,%0d expected %0d,%0d", i, ifl, od.re, od.im, e.re, e.im);
      end
      if (ifl && subst == SUBST_NOISE) begin
        if (od != last_noise) ndiff++;
        last_noise = od;
      end
      @(negedge clk);
    end
    checks++;
    if (scount != 32'(nsub)) begin failures++; $display("subst_count %0d expected %0d", scount, nsub); end
    checks++;
    if (ndiff < 50) begin failures++; $display("noise hardly varies: %0d changes", ndiff); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
