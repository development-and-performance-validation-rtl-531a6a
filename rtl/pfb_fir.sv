// pfb_fir: polyphase FIR front end of a critically sampled polyphase filter
// bank (the FIR half of the PFB_CASPER blocks).
//
// A frame is NFFT consecutive input samples; it arrives as NFFT/LANES clock
// cycles of LANES parallel samples, the cycle's position in the frame given
// by in_phase. Sample n of a frame belongs to branch n. For every branch the
// filter keeps the samples of the previous TAPS-1 frames and forms
//     y_m[n] = sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*NFFT + n] * x_{m-t}[n]
// so the oldest frame meets the start of the window h. h is a Hamming-
// weighted sinc of length TAPS*NFFT in Q15 (vlbi_pkg::win_coef); the sum is
// shifted right by 15 and saturated to FIR_W bits.
//
// Timing: one clock of latency; out_phase/out_valid follow the input by one
// cycle. The filter accepts a new lane group every clock (1024 Msps at
// 8 lanes and 128 MHz).
//
// Following the paper: the PFB is the CASPER polyphase structure fed by
// 8 parallel ADC samples. Own choices: 4 taps, the window, the widths.
module pfb_fir
  import vlbi_pkg::*;
#(
  parameter int LANES_P = vlbi_pkg::LANES,
  parameter int NFFT_P  = vlbi_pkg::NFFT,
  parameter int TAPS_P  = vlbi_pkg::TAPS,
  localparam int PH_W   = $clog2(NFFT_P / LANES_P)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [PH_W-1:0]  in_phase,
  input  adc_t             x   [LANES_P],
  output logic             out_valid,
  output logic [PH_W-1:0]  out_phase,
  output fir_t             y   [LANES_P]
);
  localparam int LEN = TAPS_P * NFFT_P;
  typedef logic signed [COEF_W-1:0] coef_arr_t [LEN];

  function automatic coef_arr_t make_coefs();
    coef_arr_t c;
    for (int i = 0; i < LEN; i++)
      c[i] = COEF_W'($rtoi(32768.0 * win_coef_real(i, TAPS_P, NFFT_P, PB_FACTOR_PERMILLE)));
    return c;
  endfunction
  localparam coef_arr_t H = make_coefs();

  localparam int ACC_W = ADC_W + COEF_W + $clog2(TAPS_P) + 1;

  adc_t hist [TAPS_P-1][NFFT_P];

  function automatic fir_t sat(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> 15;
    if (s > ACC_W'((1 <<< (FIR_W-1)) - 1))  return fir_t'((1 <<< (FIR_W-1)) - 1);
    if (s < -ACC_W'(1 <<< (FIR_W-1)))       return fir_t'(-(1 <<< (FIR_W-1)));
    return fir_t'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_phase <= '0;
      for (int t = 0; t < TAPS_P-1; t++)
        for (int n = 0; n < NFFT_P; n++) hist[t][n] <= '0;
      for (int l = 0; l < LANES_P; l++) y[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_phase <= in_phase;
        for (int l = 0; l < LANES_P; l++) begin
          automatic int n = int'(in_phase) * LANES_P + l;
          automatic logic signed [ACC_W-1:0] acc;
          acc = ACC_W'(x[l]) * ACC_W'(H[(TAPS_P-1)*NFFT_P + n]);
          for (int t = 1; t < TAPS_P; t++)
            acc += ACC_W'(hist[t-1][n]) * ACC_W'(H[(TAPS_P-1-t)*NFFT_P + n]);
          y[l] <= sat(acc);
          hist[0][n] <= x[l];
          for (int t = 1; t < TAPS_P-1; t++) hist[t][n] <= hist[t-1][n];
        end
      end
    end
  end

  initial begin
    assert (NFFT_P % LANES_P == 0) else $error("NFFT must be a multiple of LANES");
  end
endmodule
