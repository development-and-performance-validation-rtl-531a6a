// usb_converter: turns the complex channels of the UP and DOWN filter banks
// into real upper-sideband baseband channels at twice the complex rate.
//
// The DOWN bank sees the input delayed by half a frame, so its frames sit
// half-way between those of the UP bank. Interleaving D_m, U_m gives each
// channel a complex stream at 2/NFFT of the input rate (64 Msps). Relative to
// the UP frames, a half-frame offset turns channel k by (-1)^k, so odd
// channels of the DOWN bank are negated first (the 180 degree difference
// between the two banks). The complex stream z[n] is then shifted up by a
// quarter of its sample rate (half the channel bandwidth) and only its real
// part kept, r[n] = Re(z[n] * j^n):
//     n = 2m   (DOWN): r =  Re(d'),  m even;  -Re(d'), m odd
//     n = 2m+1 (UP):   r = -Im(u),   m even;   Im(u),  m odd
// This is the sum of the up- and down-shifted copies of the complex signal,
// a real signal occupying 0..32 MHz at 64 Msps.
//
// Interface: in_valid marks a frame of both banks (they are frame aligned).
// The DOWN-derived sample leaves one cycle later, the UP-derived sample
// OUT_GAP cycles after that, so with OUT_GAP = NFFT/LANES/2 the real outputs
// are evenly spaced (one per 2 clocks at the default sizes).
//
// The way of combining the two banks follows the paper's description;
// the negation of odd DOWN channels is derived from the half-frame offset.
module usb_converter
  import vlbi_pkg::*;
#(
  parameter int NCH     = vlbi_pkg::NCHAN,
  parameter int OUT_GAP = vlbi_pkg::NFFT / vlbi_pkg::LANES / 2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cplx_t up [NCH],
  input  cplx_t dn [NCH],
  output logic  bb_valid,
  output bb_t   bb [NCH]
);
  logic                       odd_m;     // parity of the frame index m
  bb_t                        held [NCH];
  logic [$clog2(OUT_GAP+1):0] wait_cnt;
  logic                       pending;

  always_ff @(posedge clk) begin
    if (rst) begin
      odd_m    <= 1'b0;
      pending  <= 1'b0;
      wait_cnt <= '0;
      bb_valid <= 1'b0;
      for (int k = 0; k < NCH; k++) begin held[k] <= '0; bb[k] <= '0; end
    end else begin
      bb_valid <= 1'b0;
      if (pending) begin
        if (wait_cnt == 1) begin
          pending  <= 1'b0;
          bb_valid <= 1'b1;
          bb       <= held;
        end
        wait_cnt <= wait_cnt - 1'b1;
      end
      if (in_valid) begin
        odd_m    <= ~odd_m;
        bb_valid <= 1'b1;
        pending  <= 1'b1;
        wait_cnt <= ($bits(wait_cnt))'(OUT_GAP);
        for (int k = 0; k < NCH; k++) begin
          automatic bb_t dre = (k % 2 == 1) ? -bb_t'(dn[k].re) : bb_t'(dn[k].re);
          bb[k]   <= odd_m ? -dre : dre;
          held[k] <= odd_m ? bb_t'(up[k].im) : -bb_t'(up[k].im);
        end
      end
    end
  end

  // the UP sample must have left before the next frame arrives
  assert property (@(posedge clk) disable iff (rst) in_valid |-> !pending || wait_cnt == 1)
    else $error("usb_converter: frames closer than OUT_GAP cycles");
endmodule
