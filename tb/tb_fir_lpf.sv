// tb_fir_lpf: compares the filter with a convolution computed by the
// testbench from coefficients it designs itself (Hamming-windowed sinc,
// unity DC gain, Q1.15), and checks the low-pass behaviour: a constant input
// comes out unchanged after NTAPS samples and a tone at 0.45 of the sample
// rate is attenuated at least tenfold.
module tb_fir_lpf;
  localparam int NTAPS = 15, CW = 16, IW = 12, OW = 24, CPM = 250;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ov;
  logic signed [IW-1:0] id;
  logic signed [OW-1:0] od;
  fir_lpf #(.NTAPS(NTAPS), .CW(CW), .IW(IW), .OW(OW), .CUTOFF_PM(CPM)) dut (
    .clk, .rst_n, .in_valid(iv), .in_data(id), .out_valid(ov), .out_data(od));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c [NTAPS];
  int x [$];
  task automatic design_coef();
    real h [NTAPS];
    real s, m;
    s = 0;
    for (int n = 0; n < NTAPS; n++) begin
      m = n - (NTAPS - 1) / 2.0;
      h[n] = (m == 0.0) ? 2.0 * CPM / 1000.0 : $sin(2.0 * PI * CPM / 1000.0 * m) / (PI * m);
      h[n] *= 0.54 - 0.46 * $cos(2.0 * PI * n / (NTAPS - 1));
      s += h[n];
    end
    for (int n = 0; n < NTAPS; n++) c[n] = int'(h[n] / s * 32768.0);
  endtask

  function automatic longint ref_out();
    longint acc;
    acc = 0;
    for (int k = 0; k < NTAPS; k++)
      if (x.size() > k) acc += longint'(c[k]) * x[x.size() - 1 - k];
    return (acc + 16384) >>> 15;
  endfunction

  task automatic push(input int v);
    longint e;
    @(negedge clk);
    iv = 1; id = IW'(v);
    x.push_back(v);
    e = ref_out();
    @(negedge clk);
    iv = 0;
    checks++;
    if (!ov || longint'(od) != e) begin
      failures++;
      if (failures < 10) $display("sample %0d: got %0d expected %0d", x.size(), od, e);
    end
  endtask

  real pk;
  initial begin
    iv = 0; id = '0;
    design_coef();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) push(int'($urandom_range(4095)) - 2048);
    for (int i = 0; i < 40; i++) push(1000);
    checks++;
    if (od < 998 || od > 1002) begin failures++; $display("DC gain: %0d for 1000", od); end
    pk = 0;
    for (int i = 0; i < 200; i++) begin
      push(int'(1500.0 * $cos(2.0 * PI * 0.45 * i)));
      if (i > NTAPS && (od > pk || -od > pk)) pk = (od > 0) ? od : -od;
    end
    checks++;
    if (pk > 150.0) begin failures++; $display("stop band: peak %f for amplitude 1500", pk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
