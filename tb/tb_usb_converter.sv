// tb_usb_converter: drives random complex frames on the UP and DOWN inputs
// every 4 clocks and checks the real outputs against
//     r[n] = Re(z[n] * exp(j*pi*n/2)),  z[2m] = (-1)^k * D_m[k], z[2m+1] = U_m[k],
// evaluated with floating-point rotation. Also checks that outputs come
// evenly spaced, one per 2 clocks (64 Msps at 128 MHz).
module tb_usb_converter;
  import vlbi_pkg::*;
  localparam int K = 16, FR = 50;
  logic clk = 0, rst = 1;
  logic in_valid = 0, bb_valid;
  cplx_t up [K], dn [K];
  bb_t bb [K];
  int checks = 0, failures = 0;
  int cyc = 0, last_v = -1, nsamp = 0;
  int ur [FR][K], ui [FR][K], dr [FR][K], di [FR][K];

  usb_converter #(.NCH(K), .OUT_GAP(2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rotate_re(int re, int im, int n);
    real pi = 3.14159265358979;
    return $rtoi($floor(re * $cos(pi*n/2.0) - im * $sin(pi*n/2.0) + 0.5));
  endfunction

  always @(negedge clk) if (!rst && bb_valid) begin
    int m, e;
    if (last_v >= 0) begin
      checks++;
      if (cyc - last_v != 2) begin failures++; $display("output spacing %0d", cyc - last_v); end
    end
    last_v = cyc;
    m = nsamp / 2;
    for (int k = 0; k < K; k++) begin
      if (nsamp % 2 == 0) e = rotate_re((k % 2 ? -1 : 1) * dr[m][k], (k % 2 ? -1 : 1) * di[m][k], nsamp);
      else                e = rotate_re(ur[m][k], ui[m][k], nsamp);
      checks++;
      if (int'(bb[k]) != e) begin
        failures++;
        if (failures < 10) $display("sample %0d ch %0d got %0d exp %0d", nsamp, k, bb[k], e);
      end
    end
    nsamp++;
  end

  initial begin
    for (int m = 0; m < FR; m++)
      for (int k = 0; k < K; k++) begin
        ur[m][k] = $signed(17'($urandom)); ui[m][k] = $signed(17'($urandom));
        dr[m][k] = $signed(17'($urandom)); di[m][k] = $signed(17'($urandom));
      end
    foreach (up[k]) begin up[k] = '0; dn[k] = '0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < FR; m++) begin
      @(posedge clk);
      in_valid <= 1;
      for (int k = 0; k < K; k++) begin
        up[k].re <= BIN_W'(ur[m][k]); up[k].im <= BIN_W'(ui[m][k]);
        dn[k].re <= BIN_W'(dr[m][k]); dn[k].im <= BIN_W'(di[m][k]);
      end
      @(posedge clk) in_valid <= 0;
      repeat (2) @(posedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (nsamp != 2 * FR) begin failures++; $display("samples %0d", nsamp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
