// tb_ddc: end-to-end test of one digital baseband converter with tones.
// For each case a cosine at IF frequency K0*32 - 16 + FBB MHz (1024 Msps,
// 8 lanes per clock) is applied; after the filter history has filled,
// 256 output samples of channel K0 are collected and the testbench checks
//  - the outputs come one per 2 clocks (64 Msps),
//  - the tone appears in channel K0 at baseband frequency FBB (upper
//    sideband, not mirrored at 32 - FBB): more than 90% of the channel's
//    energy is in the FBB bin of a 256-point correlation,
//  - the neighbouring channels carry less than 1% of channel K0's energy.
// Odd and even channels are both tested (the odd ones need the 180 degree
// correction of the DOWN bank).
module tb_ddc;
  import vlbi_pkg::*;
  localparam int L = 8, N = 32, NS = 256, SKIP = 24;
  logic clk = 0, rst = 1;
  logic in_valid = 0, bb_valid;
  adc_t x [L];
  bb_t  bb [16];
  int checks = 0, failures = 0;
  int cyc = 0, last_v = -1, nsamp = 0;
  real sig [3][NS];

  ddc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int k0_cur;
  always @(negedge clk) if (!rst && bb_valid) begin
    if (last_v >= 0) begin
      checks++;
      if (cyc - last_v != 2) begin failures++; $display("output spacing %0d", cyc - last_v); end
    end
    last_v = cyc;
    if (nsamp >= SKIP && nsamp < SKIP + NS)
      for (int d = -1; d <= 1; d++) sig[d+1][nsamp - SKIP] = real'(bb[k0_cur + d]);
    nsamp++;
  end

  task automatic run_case(int k0, int fbb);
    real pi = 3.14159265358979;
    real fif, cr, ci, e0, em, ep, coh;
    k0_cur = k0;
    nsamp  = 0;
    last_v = -1;
    rst <= 1;
    in_valid <= 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    fif = real'(k0 * 32 - 16 + fbb);
    for (int c = 0; c < (SKIP + NS) * 2 + 40; c++) begin
      @(posedge clk);
      in_valid <= 1;
      for (int l = 0; l < L; l++)
        x[l] <= adc_t'($rtoi(100.0 * $cos(2.0*pi*fif*(c*L + l)/1024.0)));
    end
    @(posedge clk) in_valid <= 0;
    cr = 0; ci = 0; e0 = 0; em = 0; ep = 0;
    for (int n = 0; n < NS; n++) begin
      cr += sig[1][n] * $cos(2.0*pi*fbb*n/64.0);
      ci -= sig[1][n] * $sin(2.0*pi*fbb*n/64.0);
      e0 += sig[1][n] ** 2;
      em += sig[0][n] ** 2;
      ep += sig[2][n] ** 2;
    end
    coh = (cr*cr + ci*ci) / (e0 * NS / 2.0);
    checks++;
    if (coh < 0.9 || e0 < 1000.0) begin
      failures++;
      $display("ch %0d fbb %0d: coherence %f energy %f", k0, fbb, coh, e0);
    end
    checks++;
    if (em > 0.01 * e0 || ep > 0.01 * e0) begin
      failures++;
      $display("ch %0d: neighbour energy %f %f vs %f", k0, em, ep, e0);
    end
    $display("ch %0d fbb %0d MHz: coherence %f, neighbours %f %f of %f", k0, fbb, coh, em, ep, e0);
  endtask

  initial begin
    foreach (x[l]) x[l] = 0;
    run_case(5, 10);
    run_case(2, 25);
    run_case(8, 8);
    run_case(13, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
