// tb_rfi_detector: writes a reference spectrum, then streams power spectra
// with strong lines (for the spectral threshold) and weak persistent excess
// in some bins (for the CUSUM). A testbench model of both tests decides every
// flag. Also checked: nothing is flagged before the reference is complete,
// the flag counter, and that the CUSUM catches a weak line the threshold
// misses.
module tb_rfi_detector;
  import rfims_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] thr_h, ck, chh;
  logic rwe, iv, ir, ov, orr, of, oft, ofc, rok;
  logic [2:0] rbin, ib, ob;
  power_t rdata, ip;
  cplx_t id, od;
  logic [31:0] fcount;
  rfi_detector #(.N(N), .REF_MIN(1100)) dut (.clk, .rst_n, .thr_h, .cusum_k(ck), .cusum_h(chh),
    .ref_we(rwe), .ref_bin(rbin), .ref_data(rdata),
    .in_valid(iv), .in_ready(ir), .in_data(id), .in_power(ip), .in_bin(ib),
    .out_valid(ov), .out_ready(orr), .out_data(od), .out_bin(ob), .out_flag(of),
    .out_flag_thr(oft), .out_flag_cusum(ofc), .ref_ok(rok), .flag_count(fcount));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint refv [N];
  longint s [N];
  int nflag = 0, n_cusum_only = 0;

  task automatic send(input longint p, input int b, input bit ref_ready);
    longint lt, lk, lh, sn, rf;
    bit et, ec;
    rf = (refv[b] < 1100) ? 1100 : refv[b];   // reference floor
    lt = rf * thr_h >> 4;
    lk = rf * ck >> 4;
    lh = rf * chh >> 4;
    sn = s[b] + p;
    sn = (sn > lk) ? sn - lk : 0;
    if (sn > 2 * lh) sn = 2 * lh;
    et = ref_ready && p > lt;
    ec = ref_ready && sn > lh;
    if (ref_ready) s[b] = sn;
    @(negedge clk);
    iv = 1; ip = power_t'(p); ib = 3'(b); id.re = sdata_t'(b * 3 + 1); id.im = sdata_t'(-b);
    @(negedge clk);
    iv = 0;
    checks++;
    if (!ov || of != (et || ec) || oft != et || ofc != ec || int'(ob) != b || od.re != sdata_t'(b * 3 + 1)) begin
      failures++;
      if (failures < 10) $display("bin %0d p=%0d: flag %b/%b expected %b/%b", b, p, oft, ofc, et, ec);
    end
    if (et || ec) nflag++;
    if (ec && !et) n_cusum_only++;
  endtask

  initial begin
    thr_h = 8'h40; ck = 8'h14; chh = 8'h50;   // 4.0, 1.25, 5.0
    rwe = 0; iv = 0; orr = 1; rbin = '0; rdata = '0; ip = '0; ib = '0; id = '0;
    for (int b = 0; b < N; b++) begin refv[b] = 0; s[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // before any reference: nothing flagged
    for (int b = 0; b < N; b++) send(1000000, b, 1'b0);
    checks++;
    if (rok) begin failures++; $display("ref_ok too early"); end
    for (int b = 0; b < N; b++) begin
      @(negedge clk);
      refv[b] = 1000 + 100 * b;
      rwe = 1; rbin = 3'(b); rdata = power_t'(refv[b]);
    end
    @(negedge clk);
    rwe = 0;
    checks++;
    if (!rok) begin failures++; $display("ref_ok missing"); end
    for (int fr = 0; fr < 40; fr++) begin
      for (int b = 0; b < N; b++) begin
        longint p;
        p = refv[b] / 2 + $urandom_range(int'(refv[b]));             // noise around ref
        if (b == 2 && fr % 7 == 3) p = refv[b] * 20;                 // strong burst
        if (b == 5 && fr >= 10 && fr < 30) p = refv[b] * 2 + $urandom_range(int'(refv[b])); // weak line
        send(p, b, 1'b1);
      end
    end
    checks++;
    if (fcount != 32'(nflag)) begin failures++; $display("flag_count %0d expected %0d", fcount, nflag); end
    checks++;
    if (n_cusum_only == 0) begin failures++; $display("CUSUM never flagged alone"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
