// time_formatter: keeps the VLBA BCD time code carried in every Mark5B
// frame header and synchronises it to the station's 1 PPS.
//
// The host writes the time of the second that will start at the next PPS as
// a 32-bit BCD word 'JJJSSSSS' (last three digits of the MJD, second of the
// day) and then arms the unit. On the first rising edge of the PPS after
// arming, the time is loaded, the frame counter is cleared and a one-cycle
// start pulse tells the Mark5B formatter to open frame 0 with the next
// sample. From then on time advances from the data: each frame_tick (end of
// a frame) advances the frame number; after FRAMES_PER_SEC frames the second
// advances (BCD, wrapping at 86399 into the next day, days modulo 1000).
//
// Outputs, all valid in the cycle after the event that changed them:
//   tcode.jjjsssss  BCD day and second
//   tcode.frac      BCD '.SSSS' = floor(frame * 10000 / FRAMES_PER_SEC)
//   tcode.frame     frame number within the second, from 0
//
// The PPS input is asynchronous: two flip-flops resynchronise it, so the
// start pulse comes 3 clocks after the PPS edge.
//
// Following the paper: host-written initial time, PPS rising edge as the
// trigger for time synchronisation and formatter start, BCD JJJSSSSS and
// .SSSS fields. Own choices: the arm bit, the resynchroniser, advancing the
// second from the frame count.
module time_formatter
  import vlbi_pkg::*;
#(
  parameter int FRAMES_PER_SEC = vlbi_pkg::M5B_FRAMES_PER_SEC
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        pps,          // hydrogen-maser 1 PPS, asynchronous
  input  logic        arm,          // one-cycle pulse from the host register
  input  logic [31:0] time_word,    // BCD JJJSSSSS of the next second
  input  logic        frame_tick,   // a frame has been completed
  output logic        start,        // one-cycle pulse: time loaded
  output logic        armed,
  output logic        synced,
  output m5b_time_t   tcode
);
  logic [2:0]  pps_sr;
  logic        pps_rise;
  logic [11:0] jjj;
  logic [19:0] sssss;
  logic [14:0] frame;

  always_comb pps_rise = pps_sr[1] & ~pps_sr[2];

  // BCD increment of an n-digit number; returns carry out in bit 4*n
  function automatic logic [20:0] bcd_inc5(logic [19:0] v);
    logic [20:0] r;
    logic        c;
    c = 1'b1;
    r = '0;
    for (int d = 0; d < 5; d++) begin
      if (c && v[4*d +: 4] == 4'd9) begin r[4*d +: 4] = 4'd0; c = 1'b1; end
      else if (c)                   begin r[4*d +: 4] = v[4*d +: 4] + 4'd1; c = 1'b0; end
      else                                r[4*d +: 4] = v[4*d +: 4];
    end
    r[20] = c;
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sr <= '0;
      start  <= 1'b0;
      armed  <= 1'b0;
      synced <= 1'b0;
      jjj    <= '0;
      sssss  <= '0;
      frame  <= '0;
    end else begin
      pps_sr <= {pps_sr[1:0], pps};
      start  <= 1'b0;
      if (arm) armed <= 1'b1;
      if (armed && pps_rise) begin
        armed  <= 1'b0;
        synced <= 1'b1;
        start  <= 1'b1;
        jjj    <= time_word[31:20];
        sssss  <= time_word[19:0];
        frame  <= '0;
      end else if (synced && frame_tick) begin
        if (frame == 15'(FRAMES_PER_SEC - 1)) begin
          frame <= '0;
          if (sssss == 20'h86399) begin
            sssss <= '0;
            jjj   <= (jjj == 12'h999) ? 12'h000 : 12'(bcd_inc5({8'h00, jjj}));
          end else begin
            sssss <= 20'(bcd_inc5(sssss));
          end
        end else begin
          frame <= frame + 1'b1;
        end
      end
    end
  end

  logic [13:0] frac_bin;
  always_comb begin
    frac_bin       = 14'((28'(frame) * 28'd10000) / 28'(FRAMES_PER_SEC));
    tcode.jjjsssss = {jjj, sssss};
    tcode.frac     = bin2bcd4(frac_bin);
    tcode.frame    = frame;
  end
endmodule
