// ddc: digital baseband converter for one IF input.
//
// The 8-lane, 1024 Msps IF stream feeds two polyphase filter banks. The UP
// bank sees it directly; the DOWN bank sees it through a delay of
// DOWN_DELAY clocks (DOWN_DELAY*LANES samples = half a frame at the default
// sizes). Both banks share one frame-phase counter so their outputs are
// frame aligned, and the usb_converter merges them into NCHAN real baseband
// channels of 32 MHz bandwidth sampled at 64 Msps (one sample per channel
// every 2 clocks at 128 MHz).
//
// Channel k covers IF frequencies k*32-16 .. k*32+16 MHz; baseband 0 Hz
// corresponds to k*32-16 MHz (upper sideband).
//
// Timing: first valid output after TAPS frames of input; latency from the
// last lane group of a frame to its DOWN-derived output is NFFT/LANES+3
// clocks.
//
// The structure (delayed DOWN path, two CASPER-style banks, USB converter)
// follows the paper's block diagram. The figure prints a Z^-4 delay on each
// DOWN input; with 8 lanes per clock and a 32-point transform half a frame is
// 2 clocks, which is what the default uses (see DOWN_DELAY).
module ddc
  import vlbi_pkg::*;
#(
  parameter int LANES_P    = vlbi_pkg::LANES,
  parameter int NFFT_P     = vlbi_pkg::NFFT,
  parameter int TAPS_P     = vlbi_pkg::TAPS,
  parameter int DOWN_DELAY = vlbi_pkg::NFFT / 2 / vlbi_pkg::LANES,
  localparam int NCH       = NFFT_P / 2,
  localparam int NGRP      = NFFT_P / LANES_P,
  localparam int PH_W      = $clog2(NGRP)
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  adc_t x  [LANES_P],
  output logic bb_valid,
  output bb_t  bb [NCH]
);
  logic [PH_W-1:0] phase;
  adc_t            dly [DOWN_DELAY][LANES_P];
  logic            up_valid, dn_valid;
  cplx_t           up_ch [NCH];
  cplx_t           dn_ch [NCH];

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= '0;
      for (int d = 0; d < DOWN_DELAY; d++)
        for (int l = 0; l < LANES_P; l++) dly[d][l] <= '0;
    end else if (in_valid) begin
      phase  <= (phase == PH_W'(NGRP - 1)) ? '0 : phase + 1'b1;
      dly[0] <= x;
      for (int d = 1; d < DOWN_DELAY; d++) dly[d] <= dly[d-1];
    end
  end

  pfb_casper #(.LANES_P(LANES_P), .NFFT_P(NFFT_P), .TAPS_P(TAPS_P)) u_pfb_up (
    .clk, .rst, .in_valid, .in_phase(phase), .x(x),
    .out_valid(up_valid), .chan(up_ch)
  );

  pfb_casper #(.LANES_P(LANES_P), .NFFT_P(NFFT_P), .TAPS_P(TAPS_P)) u_pfb_down (
    .clk, .rst, .in_valid, .in_phase(phase), .x(dly[DOWN_DELAY-1]),
    .out_valid(dn_valid), .chan(dn_ch)
  );

  usb_converter #(.NCH(NCH), .OUT_GAP(NGRP / 2)) u_usb (
    .clk, .rst, .in_valid(up_valid), .up(up_ch), .dn(dn_ch),
    .bb_valid, .bb
  );

  assert property (@(posedge clk) disable iff (rst) up_valid == dn_valid)
    else $error("ddc: UP and DOWN banks lost frame alignment");
endmodule
