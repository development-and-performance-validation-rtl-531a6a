// pfb_casper: critically sampled polyphase filter bank for one real
// wideband stream (the PFB_CASPER_UP / PFB_CASPER_DOWN blocks).
//
// A polyphase FIR (pfb_fir) followed by a real-input transform
// (fft_wideband_real) splits the 512 MHz IF, sampled at 1024 MHz and
// delivered as LANES samples per clock, into NFFT/2 = 16 complex channels
// of 32 MHz spacing. Each channel gets one complex sample per frame of NFFT
// input samples (32 Msps); all channels of a frame are presented together
// with an out_valid pulse every NFFT/LANES clocks.
//
// in_phase gives the position of the current lane group inside the frame;
// the parent counts it so that two filter banks fed from the same clock keep
// the same frame alignment.
//
// Timing: out_valid follows the last lane group of a frame by NFFT/LANES+2
// cycles (1 FIR + NFFT/LANES+1 transform).
module pfb_casper
  import vlbi_pkg::*;
#(
  parameter int LANES_P = vlbi_pkg::LANES,
  parameter int NFFT_P  = vlbi_pkg::NFFT,
  parameter int TAPS_P  = vlbi_pkg::TAPS,
  localparam int NCH    = NFFT_P / 2,
  localparam int PH_W   = $clog2(NFFT_P / LANES_P)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [PH_W-1:0] in_phase,
  input  adc_t            x    [LANES_P],
  output logic            out_valid,
  output cplx_t           chan [NCH]
);
  logic            fir_valid;
  logic [PH_W-1:0] fir_phase;
  fir_t            fir_y [LANES_P];

  pfb_fir #(.LANES_P(LANES_P), .NFFT_P(NFFT_P), .TAPS_P(TAPS_P)) u_fir (
    .clk, .rst, .in_valid, .in_phase, .x,
    .out_valid(fir_valid), .out_phase(fir_phase), .y(fir_y)
  );

  fft_wideband_real #(.LANES_P(LANES_P), .NFFT_P(NFFT_P)) u_fft (
    .clk, .rst, .in_valid(fir_valid), .in_phase(fir_phase), .y(fir_y),
    .out_valid, .chan
  );
endmodule
