// vlbi_pkg: constants, types and helper functions shared by the dual-IF VLBI
// digital backend.
//
// The numbers follow the backend's specification: two IF inputs sampled at
// 1024 MHz with 8-bit samples delivered as 8 parallel lanes per fabric clock
// (128 MHz), 16 real baseband channels of 32 MHz per IF, a 32-to-16 channel
// selection, 2-bit requantisation and Mark5B framing (16-byte header,
// 10000-byte data section, sync word 0xABADDEED). Internal word widths, the
// polyphase window and the CRCC polynomial are this design's own choices.
package vlbi_pkg;

  // ---------------- sampling / channelisation ----------------
  localparam int ADC_W    = 8;    // ADC sample width (8-bit sampling)
  localparam int LANES    = 8;    // parallel samples per clock, x(0)..x(7)
  localparam int NFFT     = 32;   // real transform length: 16 channels of 32 MHz
  localparam int NCHAN    = NFFT / 2;
  localparam int TAPS     = 4;    // polyphase taps per branch (own choice)
  localparam int COEF_W   = 16;   // window coefficient width, Q15
  localparam int FIR_W    = 12;   // polyphase FIR output width
  localparam int BIN_W    = 18;   // complex channel sample width
  localparam int BB_W     = 18;   // real baseband sample width
  localparam int TW_W     = 16;   // twiddle width, Q14
  localparam int NUM_IF   = 2;
  localparam int NOUT     = 16;   // channels after selection (Mark5B limit)
  localparam int SEL_W    = $clog2(NUM_IF * NCHAN);

  // pass-band factor of the prototype low-pass, in 1/1000 (0.875)
  localparam int PB_FACTOR_PERMILLE = 875;

  // ---------------- Mark5B ----------------
  localparam logic [31:0] M5B_SYNC   = 32'hABAD_DEED;
  localparam int M5B_HDR_WORDS       = 4;       // 16 bytes
  localparam int M5B_DATA_WORDS      = 2500;    // 10000 bytes
  localparam int M5B_FRAMES_PER_SEC  = 25600;   // 64 Msps x 32 bit / 80000 bit
  localparam logic [15:0] CRCC_POLY  = 16'h8005; // x^16+x^15+x^2+1 (own choice)

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef logic signed [FIR_W-1:0] fir_t;
  typedef logic signed [BB_W-1:0]  bb_t;

  typedef struct packed {
    logic signed [BIN_W-1:0] re;
    logic signed [BIN_W-1:0] im;
  } cplx_t;

  // Fields of the Mark5B header that come from the host and the time keeper.
  typedef struct packed {
    logic [3:0]  years;      // years from 2000
    logic [11:0] user;       // user-specified data
    logic        tflag;      // T flag
  } m5b_cfg_t;

  typedef struct packed {
    logic [31:0] jjjsssss;   // BCD: 3 digits of MJD, 5 digits of second of day
    logic [15:0] frac;       // BCD: .SSSS fractional second
    logic [14:0] frame;      // frame number within the second
  } m5b_time_t;

  // ---------------- helper functions ----------------

  // Polyphase window: Hamming window times a sinc whose main lobe spans
  // PB_FACTOR of one channel, length TAPS*NFFT, Q15, peak scaled to 0.99.
  function automatic real win_coef_real(int i, int ntaps, int nfft, int pb_permille);
    real pi, x, s, hm;
    int  len;
    pi  = 3.14159265358979;
    len = ntaps * nfft;
    x   = (real'(i) - real'(len) / 2.0) * real'(pb_permille) / 1000.0 / real'(nfft);
    if (x == 0.0) s = 1.0;
    else          s = $sin(pi * x) / (pi * x);
    hm  = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / real'(len - 1));
    return 0.99 * s * hm;
  endfunction

  function automatic logic signed [COEF_W-1:0] win_coef(int i);
    return COEF_W'($rtoi(32768.0 * win_coef_real(i, TAPS, NFFT, PB_FACTOR_PERMILLE)));
  endfunction

  // Twiddle factor exp(-j*2*pi*idx/NFFT), Q14.
  function automatic logic signed [TW_W-1:0] tw_cos(int idx);
    return TW_W'($rtoi($floor(16384.0 * $cos(2.0 * 3.14159265358979 * real'(idx) / real'(NFFT)) + 0.5)));
  endfunction
  function automatic logic signed [TW_W-1:0] tw_msin(int idx);
    return TW_W'($rtoi($floor(-16384.0 * $sin(2.0 * 3.14159265358979 * real'(idx) / real'(NFFT)) + 0.5)));
  endfunction

  // CRC-16 over the 48 bits of the VLBA BCD time code (MSB first, init 0).
  function automatic logic [15:0] crcc16(logic [47:0] data);
    logic [15:0] c;
    logic        fb;
    c = '0;
    for (int i = 47; i >= 0; i--) begin
      fb = c[15] ^ data[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ CRCC_POLY;
    end
    return c;
  endfunction

  // Binary to 4-digit BCD (value below 10000), shift-and-add-3.
  function automatic logic [15:0] bin2bcd4(logic [13:0] b);
    logic [29:0] s;
    s = {16'd0, b};
    for (int i = 0; i < 14; i++) begin
      for (int d = 0; d < 4; d++)
        if (s[14 + 4*d +: 4] >= 4'd5) s[14 + 4*d +: 4] = s[14 + 4*d +: 4] + 4'd3;
      s = s << 1;
    end
    return s[29:14];
  endfunction

endpackage
