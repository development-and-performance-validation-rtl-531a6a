// tb_mark5b_formatter: random 16-channel 2-bit samples, one per 2 clocks.
// Samples sent before the start pulse must be dropped. After start the
// output must be a sequence of frames of 4 header words and DATA_WORDS = 8
// data words:
//   sync 0xABADDEED; {years, user, T, frame#}; BCD JJJSSSSS;
//   {.SSSS, CRCC}, the CRCC being the remainder of the 48 time-code bits
//   times x^16 divided by x^16+x^15+x^2+1 (computed here by long division);
// each data word must be ch15..ch0 of one sample, 2 bits per channel, in
// arrival order; out_sof/out_eof must mark the first and last word; the
// frame number in word 1 must count up with frame_tick; no overflow.
// The testbench plays the time formatter (frame counter, time code).
module tb_mark5b_formatter;
  import vlbi_pkg::*;
  localparam int DW = 8, NSAMP = 200;
  logic clk = 0, rst = 1;
  logic start = 0, in_valid = 0;
  logic [1:0] q [16];
  m5b_cfg_t cfg;
  m5b_time_t tcode;
  logic out_valid, out_sof, out_eof, frame_tick, overflow;
  logic [31:0] out_data;
  int checks = 0, failures = 0;
  logic [31:0] sent [$];
  int widx = 0, nframes = 0, frame_no = 0;

  mark5b_formatter #(.DATA_WORDS(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time formatter stand-in
  always @(posedge clk) begin
    if (start) tcode.frame <= 0;
    else if (frame_tick) tcode.frame <= tcode.frame + 1'b1;
  end
  always_comb begin
    tcode.jjjsssss = 32'h123_45678;
    tcode.frac     = {4'(tcode.frame / 1000), 4'((tcode.frame / 100) % 10), 4'((tcode.frame / 10) % 10), 4'(tcode.frame % 10)};
  end

  function automatic logic [15:0] crc_ref(logic [47:0] d);
    logic [63:0] r = {d, 16'h0};
    for (int i = 63; i >= 16; i--)
      if (r[i]) r[i -: 17] = r[i -: 17] ^ 17'h18005;
    return r[15:0];
  endfunction

  always @(negedge clk) if (!rst && out_valid) begin
    automatic int pos = widx % (4 + DW);
    logic [31:0] e;
    case (pos)
      0: e = 32'hABADDEED;
      1: e = {cfg.years, cfg.user, cfg.tflag, 15'(frame_no)};
      2: e = 32'h123_45678;
      3: e = {tcode.frac, crc_ref({32'h123_45678, tcode.frac})};
      default: e = sent.size() > 0 ? sent.pop_front() : 32'hx;
    endcase
    checks++;
    if (out_data !== e) begin
      failures++;
      if (failures < 10) $display("word %0d (pos %0d): got %h exp %h", widx, pos, out_data, e);
    end
    checks++;
    if (out_sof != (pos == 0) || out_eof != (pos == 3 + DW)) begin failures++; $display("sof/eof wrong at word %0d", widx); end
    if (pos == 3 + DW) begin nframes++; frame_no++; end
    widx++;
  end

  initial begin
    cfg = '{years: 4'd9, user: 12'hABC, tflag: 1'b1};
    foreach (q[i]) q[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 2 * NSAMP; t++) begin
      @(posedge clk);
      start <= (t == 21);
      in_valid <= (t % 2 == 0);
      if (t % 2 == 0) begin
        logic [31:0] w = $urandom;
        for (int i = 0; i < 16; i++) q[i] <= w[2*i +: 2];
        if (t > 21) sent.push_back(w);
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    // (NSAMP - 11) samples after start, DW per frame
    if (nframes != (NSAMP - 11) / DW) begin failures++; $display("frames %0d expected %0d", nframes, (NSAMP - 11) / DW); end
    checks++;
    if (overflow) begin failures++; $display("overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
