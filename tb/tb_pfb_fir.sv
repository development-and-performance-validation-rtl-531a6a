// tb_pfb_fir: checks the polyphase FIR against a direct evaluation of the
// branch sums. Random 8-bit samples are sent for 40 frames; the expected
// output of every lane is formed from the testbench's own copy of all past
// samples and its own evaluation of the Hamming-weighted sinc window.
// One output per clock with one clock of latency is also checked.
module tb_pfb_fir;
  import vlbi_pkg::*;
  localparam int L = 8, N = 32, T = 4, G = N / L, FR = 40;
  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  logic [1:0] in_phase = 0, out_phase;
  adc_t x [L];
  fir_t y [L];
  int checks = 0, failures = 0;
  adc_t xs [FR][N];
  int h [T*N];

  pfb_fir #(.LANES_P(L), .NFFT_P(N), .TAPS_P(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_y(int m, int n);
    longint acc = 0;
    longint s;
    for (int t = 0; t < T; t++)
      if (m - t >= 0) acc += longint'(xs[m-t][n]) * h[(T-1-t)*N + n];
    s = acc >>> 15;
    if (s > 2047) s = 2047;
    if (s < -2048) s = -2048;
    return int'(s);
  endfunction

  initial begin
    real pi = 3.14159265358979;
    for (int i = 0; i < T*N; i++) begin
      real a, sn, hw;
      a  = (i - T*N/2.0) * 0.875 / N;
      sn = (i == T*N/2) ? 1.0 : $sin(pi*a) / (pi*a);
      hw = 0.54 - 0.46 * $cos(2.0*pi*i/(T*N-1));
      h[i] = $rtoi(32768.0 * 0.99 * sn * hw);
    end
    for (int m = 0; m < FR; m++)
      for (int n = 0; n < N; n++) xs[m][n] = adc_t'($urandom);
    foreach (x[l]) x[l] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < FR; m++)
      for (int p = 0; p < G; p++) begin
        @(posedge clk);
        in_valid <= 1;
        in_phase <= 2'(p);
        for (int l = 0; l < L; l++) x[l] <= xs[m][p*L + l];
        @(negedge clk);
        // output of the previous lane group
        if (m*G + p > 0) begin
          automatic int pm = (p == 0) ? m - 1 : m;
          automatic int pp = (p == 0) ? G - 1 : p - 1;
          checks++;
          if (!out_valid || out_phase != 2'(pp)) begin
            failures++;
            $display("valid/phase wrong at frame %0d group %0d", pm, pp);
          end
          for (int l = 0; l < L; l++) begin
            checks++;
            if (int'(y[l]) != expect_y(pm, pp*L + l)) begin
              failures++;
              if (failures < 10) $display("frame %0d n %0d: got %0d exp %0d", pm, pp*L+l, y[l], expect_y(pm, pp*L+l));
            end
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
