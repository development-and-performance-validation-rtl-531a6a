// tb_pfb_casper: feeds a real tone at the centre of channel K0 (K0*32 MHz
// at 1024 Msps, 8 lanes per clock) into the filter bank and checks, once
// the 4-frame filter history is full, that
//  - a frame of channels appears every NFFT/LANES = 4 clocks,
//  - channel K0 holds almost all the power (every other channel at least
//    30 dB lower),
//  - in every frame, channel K0 (a tone at a channel centre gives the same
//    complex value each frame) equals sum_n x[n] g[n] exp(-j*2*pi*K0*n/32)
//    with g[n] the window
//    folded onto the 32 branches (computed here in floating point from the
//    integer samples sent and the testbench's own window).
module tb_pfb_casper;
  import vlbi_pkg::*;
  localparam int L = 8, N = 32, G = N / L, K = N / 2, K0 = 6, FR = 40;
  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  logic [1:0] in_phase = 0;
  adc_t x [L];
  cplx_t chan [K];
  int checks = 0, failures = 0;
  int cyc = 0, last_out = -1, nout = 0;
  int xin [N];          // one frame of the (periodic) input
  real g [N];           // folded window

  pfb_casper #(.LANES_P(L), .NFFT_P(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst && out_valid) begin
    real p0, pk;
    if (last_out >= 0) begin
      checks++;
      if (cyc - last_out != G) begin failures++; $display("frame spacing %0d", cyc - last_out); end
    end
    last_out = cyc;
    nout++;
    if (nout > 5) begin
      p0 = real'(chan[K0].re) ** 2 + real'(chan[K0].im) ** 2;
      for (int k = 0; k < K; k++) if (k != K0) begin
        pk = real'(chan[k].re) ** 2 + real'(chan[k].im) ** 2;
        checks++;
        if (pk * 1000.0 > p0) begin failures++; $display("frame %0d ch %0d power %f vs %f", nout, k, pk, p0); end
      end
      begin
        automatic real er = 0, ei = 0, pi = 3.14159265358979;
        for (int n = 0; n < N; n++) begin
          er += xin[n] * g[n] * $cos(2.0*pi*K0*n/N);
          ei -= xin[n] * g[n] * $sin(2.0*pi*K0*n/N);
        end
        checks++;
        if (er - chan[K0].re > 8.0 || chan[K0].re - er > 8.0 ||
            ei - chan[K0].im > 8.0 || chan[K0].im - ei > 8.0) begin
          failures++; $display("frame %0d channel %0d value %0d,%0d expected %f,%f",
                               nout, K0, $signed(chan[K0].re), $signed(chan[K0].im), er, ei);
        end
      end
    end
  end

  initial begin
    real pi = 3.14159265358979;
    foreach (x[l]) x[l] = 0;
    for (int n = 0; n < N; n++) begin
      xin[n] = $rtoi(100.0 * $cos(2.0*pi*K0*n/N + 0.3));
      g[n] = 0;
      for (int t = 0; t < 4; t++) begin
        automatic int i = t*N + n;
        automatic real a = (i - 4*N/2.0) * 0.875 / N;
        automatic real sn = (i == 4*N/2) ? 1.0 : $sin(pi*a) / (pi*a);
        g[n] += real'($rtoi(32768.0 * 0.99 * sn * (0.54 - 0.46 * $cos(2.0*pi*i/(4*N-1))))) / 32768.0;
      end
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < FR; m++)
      for (int p = 0; p < G; p++) begin
        @(posedge clk);
        in_valid <= 1;
        in_phase <= 2'(p);
        for (int l = 0; l < L; l++)
          x[l] <= adc_t'(xin[p*L + l]);
      end
    @(posedge clk) in_valid <= 0;
    repeat (12) @(posedge clk);
    checks++;
    if (nout != FR) begin failures++; $display("frames out %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
