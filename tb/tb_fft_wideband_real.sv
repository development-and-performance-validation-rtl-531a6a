// tb_fft_wideband_real: sends 30 random frames of 12-bit samples back to
// back (one lane group per clock) and compares every bin with a
// floating-point DFT (tolerance 4 LSB for Q14 twiddle rounding and the
// floor shift). Also checks that out_valid arrives exactly NFFT/LANES+1
// clocks after the last group of each frame, i.e. one frame per 4 clocks.
module tb_fft_wideband_real;
  import vlbi_pkg::*;
  localparam int L = 8, N = 32, G = N / L, K = N / 2, FR = 30;
  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  logic [1:0] in_phase = 0;
  fir_t y [L];
  cplx_t chan [K];
  int checks = 0, failures = 0;
  int xs [FR][N];
  int cyc = 0, last_grp_cyc [FR];
  int nout = 0;

  fft_wideband_real #(.LANES_P(L), .NFFT_P(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return v < 0 ? -v : v; endfunction

  // checker
  always @(negedge clk) if (!rst && out_valid) begin
    real pi = 3.14159265358979;
    checks++;
    if (cyc - last_grp_cyc[nout] != G + 1) begin
      failures++;
      $display("frame %0d latency %0d", nout, cyc - last_grp_cyc[nout]);
    end
    for (int k = 0; k < K; k++) begin
      real er, ei;
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        er += xs[nout][n] * $cos(2.0*pi*k*n/N);
        ei -= xs[nout][n] * $sin(2.0*pi*k*n/N);
      end
      checks++;
      if (rabs(er - chan[k].re) > 4.0 || rabs(ei - chan[k].im) > 4.0) begin
        failures++;
        if (failures < 10) $display("frame %0d bin %0d got %0d,%0d exp %f,%f", nout, k, chan[k].re, chan[k].im, er, ei);
      end
    end
    nout++;
  end

  initial begin
    for (int m = 0; m < FR; m++)
      for (int n = 0; n < N; n++) xs[m][n] = $signed(12'($urandom));
    xs[0][0] = 2047; for (int n = 1; n < N; n++) xs[0][n] = 2047;   // full-scale DC
    foreach (y[l]) y[l] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < FR; m++)
      for (int p = 0; p < G; p++) begin
        @(posedge clk);
        in_valid <= 1;
        in_phase <= 2'(p);
        for (int l = 0; l < L; l++) y[l] <= fir_t'(xs[m][p*L + l]);
        if (p == G - 1) last_grp_cyc[m] = cyc + 1;
      end
    @(posedge clk) in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != FR) begin failures++; $display("got %0d frames, expected %0d", nout, FR); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
