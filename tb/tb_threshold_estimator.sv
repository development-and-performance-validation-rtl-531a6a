// tb_threshold_estimator: sends near-Gaussian samples (sum of 4 uniform
// values) in windows of 2^6 samples, changing the amplitude every few
// windows, and checks after every window that the threshold equals
// floor(floor(sqrt(mean(x^2))) * 942 / 1024), computed by the testbench with
// floating-point square root from its own copy of the samples. Also checks
// that the threshold follows an amplitude change within one window, and
// that H/sigma is close to 0.92 for a large input.
module tb_threshold_estimator;
  import vlbi_pkg::*;
  localparam int W = 6, WN = 1 << W, NWIN = 24;
  logic clk = 0, rst = 1;
  logic in_valid = 0, update;
  bb_t x = '0;
  logic [BB_W-1:0] thresh, vref;
  logic [2*BB_W-1:0] power;
  int checks = 0, failures = 0;
  longint sumsq;
  int nwin_done = 0;
  int exp_th [NWIN];

  threshold_estimator #(.WIN_LOG2(W), .INIT_THRESH(256)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst && update) begin
    checks++;
    if (int'(thresh) != exp_th[nwin_done]) begin
      failures++;
      $display("window %0d: thresh %0d exp %0d", nwin_done, thresh, exp_th[nwin_done]);
    end
    nwin_done++;
  end

  initial begin
    int amp, s;
    checks++;
    repeat (2) @(posedge clk);
    if (thresh != 256) begin failures++; $display("initial threshold %0d", thresh); end
    rst <= 0;
    for (int w = 0; w < NWIN; w++) begin
      amp = (w / 4) % 2 ? 6000 : 400;
      sumsq = 0;
      for (int i = 0; i < WN; i++) begin
        s = 0;
        for (int u = 0; u < 4; u++) s += int'($urandom_range(2*amp)) - amp;
        sumsq += longint'(s) * s;
        @(posedge clk);
        in_valid <= 1;
        x <= bb_t'(s);
        @(posedge clk);
        in_valid <= 0;
      end
      exp_th[w] = int'($floor($floor($sqrt(real'(sumsq / WN))) * 942.0 / 1024.0));
    end
    repeat (60) @(posedge clk);
    checks++;
    if (nwin_done != NWIN) begin failures++; $display("updates %0d", nwin_done); end
    // sigma of the sum of 4 uniforms on [-a,a] is a*sqrt(4/3)
    checks++;
    if (real'(thresh) < 0.8 * 0.92 * 6000.0 * $sqrt(4.0/3.0) ||
        real'(thresh) > 1.2 * 0.92 * 6000.0 * $sqrt(4.0/3.0)) begin
      failures++; $display("threshold %0d far from 0.92 sigma", thresh);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
