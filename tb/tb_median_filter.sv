// tb_median_filter: random power spectra (with some strong single-bin lines,
// which a median must reject) are streamed frame by frame; each sweep must
// output, for every bin, the median of the window clamped to the band, found
// here by sorting. Also checks that the sweep starts one clock after the last
// bin and takes N clocks.
module tb_median_filter;
  import rfims_pkg::*;
  localparam int N = 16, K = 5, H = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ov;
  power_t ip, om;
  logic [3:0] ib, ob;
  median_filter #(.N(N), .K(K)) dut (.clk, .rst_n, .in_valid(iv), .in_power(ip), .in_bin(ib),
    .out_valid(ov), .out_median(om), .out_bin(ob));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint p [N];
  longint expct [N];
  task automatic compute_ref();
    longint w [K];
    longint t;
    int idx;
    for (int f = 0; f < N; f++) begin
      for (int j = 0; j < K; j++) begin
        idx = f + j - H;
        if (idx < 0) idx = 0;
        if (idx > N - 1) idx = N - 1;
        w[j] = p[idx];
      end
      for (int a = 0; a < K; a++)
        for (int b = 0; b < K - 1 - a; b++)
          if (w[b] > w[b+1]) begin t = w[b]; w[b] = w[b+1]; w[b+1] = t; end
      expct[f] = w[H];
    end
  endtask

  initial begin
    int got, wait_c;
    iv = 0; ip = '0; ib = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 30; fr++) begin
      for (int f = 0; f < N; f++) begin
        p[f] = 1000 + $urandom_range(200);
        if ($urandom_range(5) == 0) p[f] = 100000 + $urandom_range(100000);
        if (fr % 3 == 0 && $urandom_range(3) == 0) p[f] = 1000;   // ties
      end
      compute_ref();
      for (int f = 0; f < N; f++) begin
        @(negedge clk);
        iv = 1; ip = power_t'(p[f]); ib = 4'(f);
      end
      @(negedge clk);
      iv = 0;
      got = 0;
      wait_c = 0;
      while (got < N) begin
        @(posedge clk);
        #1;
        if (ov) begin
          checks++;
          if (om != power_t'(expct[got]) || int'(ob) != got) begin
            failures++;
            if (failures < 10) $display("frame %0d bin %0d: got %0d expected %0d", fr, got, om, expct[got]);
          end
          got++;
        end else begin
          wait_c++;
        end
      end
      checks++;
      if (wait_c != 0) begin failures++; $display("sweep gaps %0d", wait_c); end
      repeat ($urandom_range(5)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
