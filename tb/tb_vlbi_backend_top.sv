// tb_vlbi_backend_top: end-to-end run of the dual-IF backend at reduced
// sizes (power window 2^6 samples, 64 data words per frame, 4 frames per
// second). IF1 carries a tone at 5*32-16+10 MHz (channel 5, 10 MHz baseband)
// and IF2 a tone at 1*32-16+20 MHz (channel 1, 20 MHz baseband), both with
// added uniform noise. The host programs the header, the time and a channel
// map like the X/S set-up of the test observation (outputs 0..12 from IF1
// channels 0..12, outputs 13..15 from IF2 channels 0..2), arms, and a PPS
// edge starts formatting. The testbench then
//  - parses every Mark5B frame: sync word, years/user/T, frame number
//    counting 0..3, BCD time advancing one second per 4 frames across the
//    day boundary (JJJ 601 86399 -> 602 00000), .SSSS and CRCC;
//  - rebuilds each output channel from the 2-bit data and checks that
//    output 5 holds the 10 MHz tone, output 14 the 20 MHz tone and output 7
//    neither;
//  - switches output 5 to IF2 channel 1 and checks the 20 MHz tone moves
//    there; re-arms with a new time and checks the frame count restarts;
//  - reads the thresholds back and checks they were updated.
// Mechanisms counted (each must occur): PPS synchronisation, frame
// completion, second advance, day rollover, threshold update, both
// magnitude levels, IF2 channel through the selection, selection change,
// re-synchronisation.
module tb_vlbi_backend_top;
  import vlbi_pkg::*;
  localparam int DW = 64, FPS = 4, NS = 256;
  logic clk = 0, rst = 1;
  logic adc_valid = 0;
  adc_t adc_if1 [LANES], adc_if2 [LANES];
  logic pps = 0;
  logic reg_wr_en = 0;
  logic [7:0] reg_wr_addr = 0, reg_rd_addr = 0;
  logic [31:0] reg_wr_data = 0, reg_rd_data;
  logic m5b_valid, m5b_sof, m5b_eof;
  logic [31:0] m5b_data;
  int checks = 0, failures = 0;

  vlbi_backend_top #(.QWIN_LOG2(6), .DATA_WORDS(DW), .FRAMES_PS(FPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC stimulus ----------------
  longint sample_no = 0;
  always @(posedge clk) begin
    real pi = 3.14159265358979;
    adc_valid <= !rst;
    for (int l = 0; l < LANES; l++) begin
      adc_if1[l] <= adc_t'($rtoi(50.0 * $cos(2.0*pi*(5*32-16+10)*(sample_no + l)/1024.0)) + int'($urandom_range(40)) - 20);
      adc_if2[l] <= adc_t'($rtoi(50.0 * $cos(2.0*pi*(1*32-16+20)*(sample_no + l)/1024.0)) + int'($urandom_range(40)) - 20);
    end
    sample_no <= sample_no + LANES;
  end

  // ---------------- frame parser ----------------
  int widx = -1, nframes = 0, exp_frame = 0;
  logic [31:0] exp_time;
  logic [31:0] w1, w2;
  logic [31:0] data_q [$];
  int n_second_adv = 0, n_day_roll = 0, n_mag_hi = 0, n_mag_lo = 0;

  function automatic logic [15:0] crc_ref(logic [47:0] d);
    logic [63:0] r = {d, 16'h0};
    for (int i = 63; i >= 16; i--)
      if (r[i]) r[i -: 17] = r[i -: 17] ^ 17'h18005;
    return r[15:0];
  endfunction

  function automatic logic [31:0] bcd_next_second(logic [31:0] t);
    int d = (t[31:28]*100 + t[27:24]*10 + t[23:20]);
    int s = t[19:16]*10000 + t[15:12]*1000 + t[11:8]*100 + t[7:4]*10 + t[3:0];
    s++;
    if (s == 86400) begin s = 0; d = (d + 1) % 1000; end
    return {4'(d/100), 4'((d/10)%10), 4'(d%10), 4'(s/10000), 4'((s/1000)%10), 4'((s/100)%10), 4'((s/10)%10), 4'(s%10)};
  endfunction

  function automatic logic [15:0] frac_ref(int f);
    int v = f * 10000 / FPS;
    return {4'(v/1000), 4'((v/100)%10), 4'((v/10)%10), 4'(v%10)};
  endfunction

  task automatic check(logic c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (!rst && m5b_valid) begin
    if (m5b_sof) widx = 0;
    if (widx >= 0) begin
      case (widx)
        0: check(m5b_data == 32'hABADDEED, $sformatf("sync word %h", m5b_data));
        1: begin
             w1 = m5b_data;
             check(m5b_data == {4'd5, 12'h123, 1'b0, 15'(exp_frame)},
                   $sformatf("word1 %h frame expected %0d", m5b_data, exp_frame));
           end
        2: begin
             w2 = m5b_data;
             if (exp_frame == 0 && nframes > 0 && m5b_data != exp_time) begin
               if (m5b_data == bcd_next_second(exp_time)) n_second_adv++;
               if (m5b_data[31:20] != exp_time[31:20]) n_day_roll++;
               exp_time = bcd_next_second(exp_time);
             end
             check(m5b_data == exp_time, $sformatf("time code %h exp %h", m5b_data, exp_time));
           end
        3: check(m5b_data == {frac_ref(exp_frame), crc_ref({w2, frac_ref(exp_frame)})},
                 $sformatf("word3 %h frame %0d", m5b_data, exp_frame));
        default: begin
             data_q.push_back(m5b_data);
             for (int c = 0; c < 16; c++) if (m5b_data[2*c+1]) n_mag_hi++; else n_mag_lo++;
           end
      endcase
      check(m5b_eof == (widx == 3 + DW), "eof flag");
      if (widx == 3 + DW) begin
        nframes++;
        exp_frame = (exp_frame + 1) % FPS;
        widx = -1;
      end else widx++;
    end
  end

  // ---------------- host helpers ----------------
  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    @(posedge clk);
    reg_wr_en <= 1; reg_wr_addr <= a; reg_wr_data <= d;
    @(posedge clk) reg_wr_en <= 0;
  endtask

  task automatic pps_pulse();
    @(posedge clk) pps <= 1;
    repeat (20) @(posedge clk);
    pps <= 0;
  endtask

  // coherence of an output channel's 2-bit stream at baseband frequency f
  function automatic real coherence(int ch, real fmhz, int first);
    real pi = 3.14159265358979;
    real cr = 0, ci = 0, e = 0, v;
    for (int n = 0; n < NS; n++) begin
      logic [1:0] b = 2'(data_q[first + n] >> (2*ch));
      v = (b[1] ? 3.3 : 1.0) * (b[0] ? 1.0 : -1.0);
      cr += v * $cos(2.0*pi*fmhz*n/64.0);
      ci -= v * $sin(2.0*pi*fmhz*n/64.0);
      e  += v * v;
    end
    return (cr*cr + ci*ci) / (e * NS / 2.0);
  endfunction

  initial begin
    int n_sync = 0, n_sel_change = 0, n_resync = 0, n_thr = 0, n_if2 = 0;
    real c5, c14, c7, c5b;
    foreach (adc_if1[l]) begin adc_if1[l] = 0; adc_if2[l] = 0; end
    repeat (4) @(posedge clk);
    rst <= 0;
    reg_write(8'h02, {4'd5, 12'h123, 16'h0});
    reg_write(8'h01, 32'h601_86399);
    for (int i = 0; i < 16; i++) reg_write(8'h10 + 8'(i), i < 13 ? 32'(i) : 32'(16 + i - 13));
    repeat (300) @(posedge clk);
    exp_time = 32'h601_86399;
    reg_write(8'h00, 32'h1);
    pps_pulse();
    repeat (10) @(posedge clk);
    reg_rd_addr = 8'h03; #1;
    check(reg_rd_data[1] == 1'b1, "synced status");
    if (reg_rd_data[1]) n_sync++;
    // 6 frames
    wait (nframes == 6);
    check(data_q.size() >= NS + 64, "enough data");
    c5  = coherence(5, 10.0, 64);
    c14 = coherence(14, 20.0, 64);
    c7  = coherence(7, 10.0, 64);
    $display("coherence: out5@10MHz %f, out14@20MHz %f, out7@10MHz %f", c5, c14, c7);
    check(c5 > 0.3, "output 5 carries the IF1 channel 5 tone");
    check(c14 > 0.3, "output 14 carries the IF2 channel 1 tone");
    check(c7 < 0.05, "output 7 has no tone");
    if (c14 > 0.3) n_if2++;
    for (int i = 0; i < 16; i++) begin
      reg_rd_addr = 8'h20 + 8'(i); #1;
      if (reg_rd_data != 32'd256) n_thr++;
    end
    check(n_thr == 16, $sformatf("thresholds updated: %0d of 16", n_thr));
    // selection change: output 5 <- IF2 channel 1 (input 17)
    reg_write(8'h15, 32'd17);
    n_sel_change++;
    begin
      automatic int base = data_q.size() + 16;
      wait (data_q.size() >= base + NS);
      c5b = coherence(5, 20.0, base);
      $display("after remap: out5@20MHz %f", c5b);
      check(c5b > 0.3, "output 5 follows the new selection");
    end
    // re-synchronisation with a new time
    wait (widx == 10);
    reg_write(8'h01, 32'h602_00100);
    reg_write(8'h00, 32'h1);
    @(posedge clk) pps <= 1;
    wait (dut.u_time.start == 1'b1);
    @(negedge clk);
    exp_frame = 0;
    exp_time  = 32'h602_00100;
    widx = -1;
    n_resync++;
    repeat (25) @(posedge clk);
    pps <= 0;
    begin
      automatic int nf0 = nframes;
      wait (nframes == nf0 + 5);
    end
    check(!dut.u_fmt.overflow, "no formatter overflow");
    check(n_sync > 0,       "mechanism: PPS synchronisation");
    check(nframes > 0,      "mechanism: frames completed");
    check(n_second_adv > 0, "mechanism: second advance");
    check(n_day_roll > 0,   "mechanism: day rollover");
    check(n_thr > 0,        "mechanism: threshold update");
    check(n_mag_hi > 0 && n_mag_lo > 0, "mechanism: both magnitude levels");
    check(n_if2 > 0,        "mechanism: IF2 channel selected");
    check(n_sel_change > 0, "mechanism: selection change");
    check(n_resync > 0,     "mechanism: re-synchronisation");
    $display("frames %0d, second advances %0d, day rollovers %0d, thresholds updated %0d, mag hi/lo %0d/%0d, resync %0d",
             nframes, n_second_adv, n_day_roll, n_thr, n_mag_hi, n_mag_lo, n_resync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
