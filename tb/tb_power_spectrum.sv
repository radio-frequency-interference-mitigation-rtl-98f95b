// tb_power_spectrum: random bins with random input gaps and output
// back-pressure; every output must carry the bin unchanged and its power
// re^2+im^2, in order and with none lost or repeated.
module tb_power_spectrum;
  import rfims_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, orr;
  cplx_t id, od;
  power_t op;
  logic [3:0] ib, ob;
  power_spectrum #(.N(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id), .in_bin(ib),
    .out_valid(ov), .out_ready(orr), .out_data(od), .out_power(op), .out_bin(ob));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t q [$];
  int sent = 0, got = 0;
  bit pending = 0;
  initial begin
    iv = 0; id = '0; ib = '0; orr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got < 1000) begin
      @(negedge clk);
      if (!pending) begin
        iv = (sent < 1000) && ($urandom_range(3) != 0);
        id.re = sdata_t'($urandom); id.im = sdata_t'($urandom);
        ib = 4'(sent);
        pending = iv;
      end
      orr = ($urandom_range(2) != 0);
      @(posedge clk);
      if (iv && ir) begin q.push_back(id); sent++; pending = 0; end
      if (ov && orr) begin
        cplx_t e;
        longint pre, pim;
        e = q.pop_front();
        pre = longint'(e.re) * e.re;
        pim = longint'(e.im) * e.im;
        checks++;
        if (od != e || op != power_t'(pre + pim) || ob != 4'(got)) begin
          failures++;
          if (failures < 10) $display("out %0d: power %0d expected %0d", got, op, pre + pim);
        end
        got++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
