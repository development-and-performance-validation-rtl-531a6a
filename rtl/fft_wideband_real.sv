// fft_wideband_real: real-input NFFT-point transform of the polyphase FIR
// frames, giving NCHAN = NFFT/2 complex channels (bins 0..NFFT/2-1).
//
// Frames arrive as NFFT/LANES lane groups (in_phase 0..NFFT/LANES-1). When
// the last group of a frame arrives the whole frame is latched into a work
// buffer and the bins are computed directly,
//     X[k] = sum_n w[n] * exp(-j*2*pi*k*n/NFFT),
// BPC = NCHAN/(NFFT/LANES) bins per clock, so a frame is transformed in the
// same number of cycles it takes to arrive and the engine keeps up with the
// input without stalling. Twiddles are Q14 constants; each sum is shifted
// right by 14 (floor). When all bins of a frame are ready they are presented
// together on chan[] with a one-cycle out_valid pulse.
//
// Timing: out_valid comes NFFT/LANES+1 cycles after the frame's last group;
// one output frame per NFFT/LANES cycles.
//
// The paper takes the transform from the CASPER library (fft_wideband_real)
// and does not describe its insides; this direct-DFT engine is the simplest
// structure with the same function and rate.
module fft_wideband_real
  import vlbi_pkg::*;
#(
  parameter int LANES_P = vlbi_pkg::LANES,
  parameter int NFFT_P  = vlbi_pkg::NFFT,
  localparam int NCH    = NFFT_P / 2,
  localparam int NGRP   = NFFT_P / LANES_P,
  localparam int BPC    = NCH / NGRP,
  localparam int PH_W   = $clog2(NGRP)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [PH_W-1:0] in_phase,
  input  fir_t            y   [LANES_P],
  output logic            out_valid,
  output cplx_t           chan [NCH]
);
  typedef logic signed [TW_W-1:0] tw_arr_t [NFFT_P];
  function automatic tw_arr_t mk_cos();
    tw_arr_t a;
    for (int i = 0; i < NFFT_P; i++)
      a[i] = TW_W'($rtoi($floor(16384.0 * $cos(2.0 * 3.14159265358979 * real'(i) / real'(NFFT_P)) + 0.5)));
    return a;
  endfunction
  function automatic tw_arr_t mk_msin();
    tw_arr_t a;
    for (int i = 0; i < NFFT_P; i++)
      a[i] = TW_W'($rtoi($floor(-16384.0 * $sin(2.0 * 3.14159265358979 * real'(i) / real'(NFFT_P)) + 0.5)));
    return a;
  endfunction
  localparam tw_arr_t TWC = mk_cos();
  localparam tw_arr_t TWS = mk_msin();

  localparam int ACC_W = FIR_W + TW_W + $clog2(NFFT_P) + 1;

  fir_t  fbuf [NFFT_P];      // frame being collected
  fir_t  work [NFFT_P];      // frame being transformed
  cplx_t obuf [NCH];         // bins of the frame being transformed
  logic  busy;
  logic [PH_W-1:0] grp;      // bin group computed this cycle

  // bins of the current group, combinational
  cplx_t grp_bins [BPC];
  always_comb begin
    for (int b = 0; b < BPC; b++) begin
      automatic int k = int'(grp) * BPC + b;
      automatic logic signed [ACC_W-1:0] ar, ai;
      ar = '0;
      ai = '0;
      for (int n = 0; n < NFFT_P; n++) begin
        ar += ACC_W'(work[n]) * ACC_W'(TWC[(k * n) % NFFT_P]);
        ai += ACC_W'(work[n]) * ACC_W'(TWS[(k * n) % NFFT_P]);
      end
      grp_bins[b].re = BIN_W'(ar >>> 14);
      grp_bins[b].im = BIN_W'(ai >>> 14);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      grp       <= '0;
      out_valid <= 1'b0;
      for (int n = 0; n < NFFT_P; n++) begin fbuf[n] <= '0; work[n] <= '0; end
      for (int k = 0; k < NCH; k++) begin obuf[k] <= '0; chan[k] <= '0; end
    end else begin
      out_valid <= 1'b0;
      // collect
      if (in_valid) begin
        for (int l = 0; l < LANES_P; l++) fbuf[int'(in_phase) * LANES_P + l] <= y[l];
      end
      // compute
      if (busy) begin
        for (int b = 0; b < BPC; b++) obuf[int'(grp) * BPC + b] <= grp_bins[b];
        grp <= grp + 1'b1;
        if (grp == PH_W'(NGRP - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          for (int k = 0; k < NCH; k++)
            chan[k] <= (k / BPC == NGRP - 1) ? grp_bins[k % BPC] : obuf[k];
        end
      end
      // frame complete: start a transform
      if (in_valid && in_phase == PH_W'(NGRP - 1)) begin
        for (int n = 0; n < NFFT_P; n++)
          work[n] <= (n / LANES_P == NGRP - 1) ? y[n % LANES_P] : fbuf[n];
        busy <= 1'b1;
        grp  <= '0;
      end
    end
  end

  initial begin
    assert (NCH % NGRP == 0) else $error("NFFT/2 must be a multiple of NFFT/LANES");
  end
endmodule
