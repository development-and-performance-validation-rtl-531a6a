// tb_time_formatter: synchronisation and time keeping.
//  - a PPS edge before arming must not load the time;
//  - after arming, the next PPS rising edge loads 'JJJSSSSS', clears the
//    frame counter and gives one start pulse (3 clocks after the edge);
//  - frame ticks advance the frame number, FRAMES_PER_SEC = 4 ticks
//    advance the BCD second, second 86399 wraps to 00000 of the next day
//    and day 999 wraps to 000;
//  - .SSSS equals floor(frame * 10000 / FRAMES_PER_SEC) in BCD;
// A second instance with the full 25600 frames per second checks the
// fractional field at frames 3, 12800 and 25599 (.0001, .5000, .9999).
module tb_time_formatter;
  import vlbi_pkg::*;
  logic clk = 0, rst = 1;
  logic pps = 0, arm = 0, frame_tick = 0, frame_tick2 = 0;
  logic [31:0] time_word = 32'h998_86398;
  logic start, armed, synced, start2, armed2, synced2;
  m5b_time_t tcode, tcode2;
  int checks = 0, failures = 0;
  int nstart = 0;

  time_formatter #(.FRAMES_PER_SEC(4)) dut (.*);
  time_formatter dut2 (.clk, .rst, .pps, .arm, .time_word, .frame_tick(frame_tick2),
                       .start(start2), .armed(armed2), .synced(synced2), .tcode(tcode2));

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && start) nstart++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse_pps();
    @(posedge clk) pps <= 1;
    repeat (10) @(posedge clk);
    pps <= 0;
    repeat (4) @(posedge clk);
  endtask

  task automatic tick(int n);
    repeat (n) begin
      @(posedge clk) frame_tick <= 1;
      @(posedge clk) frame_tick <= 0;
    end
    @(negedge clk);
  endtask

  function automatic logic [15:0] frac_exp(int f, int fps);
    int v = f * 10000 / fps;
    return {4'(v / 1000), 4'((v / 100) % 10), 4'((v / 10) % 10), 4'(v % 10)};
  endfunction

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst <= 0;
    pulse_pps();
    check(!synced && nstart == 0, "PPS without arm must not synchronise");
    @(posedge clk) arm <= 1;
    @(posedge clk) arm <= 0;
    @(negedge clk);
    check(armed, "armed after arm pulse");
    @(posedge clk) pps <= 1;
    t0 = 0;
    @(negedge clk);
    while (!start) begin @(negedge clk); t0++; end
    check(t0 == 3, $sformatf("start %0d clocks after the PPS edge", t0));
    @(negedge clk);
    check(synced && !armed, "synced after PPS");
    check(tcode.jjjsssss == 32'h998_86398 && tcode.frame == 0 && tcode.frac == 16'h0000, "time loaded at PPS");
    repeat (20) @(posedge clk);
    pps <= 0;
    repeat (5) @(posedge clk);
    pulse_pps();
    check(nstart == 1, "later PPS edges do not resynchronise");
    for (int f = 1; f < 4; f++) begin
      tick(1);
      check(tcode.frame == 15'(f) && tcode.frac == frac_exp(f, 4), $sformatf("frame %0d frac %h", f, tcode.frac));
    end
    tick(1);
    check(tcode.jjjsssss == 32'h998_86399 && tcode.frame == 0, $sformatf("second advance %h", tcode.jjjsssss));
    tick(4);
    check(tcode.jjjsssss == 32'h999_00000, $sformatf("day rollover %h", tcode.jjjsssss));
    tick(4 * 86400);
    check(tcode.jjjsssss == 32'h000_00000, $sformatf("day 999 wraps %h", tcode.jjjsssss));
    tick(4 * 11);
    check(tcode.jjjsssss == 32'h000_00011, $sformatf("BCD seconds %h", tcode.jjjsssss));
    // full-rate fractional field
    for (int f = 1; f <= 25599; f++) begin
      frame_tick2 = 1;
      @(posedge clk);
      #1 frame_tick2 = 0;
      if (f == 3 || f == 12800 || f == 25599) begin
        check(tcode2.frame == 15'(f) && tcode2.frac == frac_exp(f, 25600), $sformatf("full rate frame %0d frac %h", f, tcode2.frac));
      end
    end
    frame_tick2 = 1;
    @(posedge clk);
    #1 frame_tick2 = 0;
    check(tcode2.frame == 0 && tcode2.jjjsssss == 32'h998_86399,
          $sformatf("full rate second after 25600 frames: %h frame %0d", tcode2.jjjsssss, tcode2.frame));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
