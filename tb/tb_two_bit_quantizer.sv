// tb_two_bit_quantizer: near-Gaussian samples (sum of 4 uniforms), one per
// 2 clocks, windows of 2^6 samples. The testbench computes the optimal
// threshold of every window itself (floor(sqrt(mean power)) * 942 / 1024)
// and checks that
//  - the exported threshold is always the initial value or one of the
//    values computed for a finished window (the latest or the one before),
//  - every output pair is {|x| > H, x >= 0} for the threshold in force,
//  - with the threshold settled, the share of magnitude-1 samples is close
//    to the 36% expected when H = 0.92 sigma (Gaussian: P(|x| > 0.92 s)),
//    and the signs are balanced.
module tb_two_bit_quantizer;
  import vlbi_pkg::*;
  localparam int W = 6, WN = 1 << W, NWIN = 60;
  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  bb_t x = '0;
  logic [1:0] q;
  logic [BB_W-1:0] thresh;
  int checks = 0, failures = 0;
  int th_prev = 256, th_last = 256;
  int nmag = 0, npos = 0, ncount = 0;

  two_bit_quantizer #(.WIN_LOG2(W), .INIT_THRESH(256)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int amp, s, h;
    longint sumsq;
    repeat (2) @(posedge clk);
    rst <= 0;
    amp = 3000;
    for (int w = 0; w < NWIN; w++) begin
      sumsq = 0;
      for (int i = 0; i < WN; i++) begin
        s = 0;
        for (int u = 0; u < 4; u++) s += int'($urandom_range(2*amp)) - amp;
        sumsq += longint'(s) * s;
        @(posedge clk);
        in_valid <= 1;
        x <= bb_t'(s);
        h = int'(thresh);            // threshold in force for this sample
        @(posedge clk);
        in_valid <= 0;
        @(negedge clk);
        checks++;
        if (h != th_last && h != th_prev) begin
          failures++; $display("threshold %0d is none of %0d, %0d", h, th_last, th_prev);
        end
        checks++;
        if (!out_valid || q != {((s < 0 ? -s : s) > h), s >= 0}) begin
          failures++;
          if (failures < 10) $display("x=%0d H=%0d got q=%b", s, h, q);
        end
        if (w >= 2) begin ncount++; nmag += q[1]; npos += q[0]; end
      end
      th_prev = th_last;
      th_last = int'($floor($floor($sqrt(real'(sumsq / WN))) * 942.0 / 1024.0));
    end
    checks++;
    if (real'(nmag) / ncount < 0.30 || real'(nmag) / ncount > 0.42) begin
      failures++; $display("magnitude-1 share %f", real'(nmag) / ncount);
    end
    checks++;
    if (real'(npos) / ncount < 0.45 || real'(npos) / ncount > 0.55) begin
      failures++; $display("positive share %f", real'(npos) / ncount);
    end
    $display("magnitude-1 share %f, positive share %f", real'(nmag) / ncount, real'(npos) / ncount);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
