// tb_vlbi_backend_full: the backend at its full default sizes (2500-word
// Mark5B frames, 25600 frames per second, power window of 2^16 samples).
// IF1 carries a tone in channel 5 (10 MHz baseband) plus noise, IF2 a tone
// in channel 1 (20 MHz baseband). After programming and a PPS edge the
// testbench runs until the first power window has closed and 3 complete
// frames have been sent after it, checking:
//  - every header: sync word, years/user, frame number 0,1,2,..., the BCD
//    time, .SSSS = floor(frame*10000/25600) and the CRCC;
//  - 2500 data words per frame, at 2 clocks per word on average;
//  - all 16 thresholds updated from their initial value;
//  - output 5 (IF1 ch5) shows the 10 MHz tone in its 2-bit data and
//    output 14 (IF2 ch1) the 20 MHz tone.
module tb_vlbi_backend_full;
  import vlbi_pkg::*;
  localparam int DW = 2500, NS = 1024;
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

  vlbi_backend_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  task automatic check(logic c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] crc_ref(logic [47:0] d);
    logic [63:0] r = {d, 16'h0};
    for (int i = 63; i >= 16; i--)
      if (r[i]) r[i -: 17] = r[i -: 17] ^ 17'h18005;
    return r[15:0];
  endfunction

  function automatic logic [15:0] frac_ref(int f);
    int v = f * 10000 / 25600;
    return {4'(v/1000), 4'((v/100)%10), 4'((v/10)%10), 4'(v%10)};
  endfunction

  int widx = -1, nframes = 0, cyc = 0, sof_cyc = 0;
  logic [31:0] data_q [$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (!rst && m5b_valid) begin
    if (m5b_sof) begin
      if (nframes > 0) check(cyc - sof_cyc == 2 * DW, $sformatf("frame period %0d clocks", cyc - sof_cyc));
      sof_cyc = cyc;
      widx = 0;
    end
    if (widx >= 0) begin
      case (widx)
        0: check(m5b_data == 32'hABADDEED, "sync word");
        1: check(m5b_data == {4'd6, 12'h0AB, 1'b0, 15'(nframes)}, $sformatf("word1 %h", m5b_data));
        2: check(m5b_data == 32'h123_45678, $sformatf("time %h", m5b_data));
        3: check(m5b_data == {frac_ref(nframes), crc_ref({32'h123_45678, frac_ref(nframes)})}, $sformatf("word3 %h", m5b_data));
        default: if (data_q.size() < 4 * DW) data_q.push_back(m5b_data);
      endcase
      check(m5b_eof == (widx == 3 + DW), "eof flag");
      if (widx == 3 + DW) begin nframes++; widx = -1; end
      else widx++;
    end
  end

  task automatic reg_write(logic [7:0] a, logic [31:0] d);
    @(posedge clk);
    reg_wr_en <= 1; reg_wr_addr <= a; reg_wr_data <= d;
    @(posedge clk) reg_wr_en <= 0;
  endtask

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
    int n_thr = 0, nf0;
    real c5, c14;
    foreach (adc_if1[l]) begin adc_if1[l] = 0; adc_if2[l] = 0; end
    repeat (4) @(posedge clk);
    rst <= 0;
    reg_write(8'h02, {4'd6, 12'h0AB, 16'h0});
    reg_write(8'h01, 32'h123_45678);
    for (int i = 0; i < 16; i++) reg_write(8'h10 + 8'(i), i < 13 ? 32'(i) : 32'(16 + i - 13));
    repeat (200) @(posedge clk);
    reg_write(8'h00, 32'h1);
    @(posedge clk) pps <= 1;
    repeat (50) @(posedge clk);
    pps <= 0;
    // first power window: 2^16 samples at one per 2 clocks
    repeat (2 * 65536 + 200) @(posedge clk);
    for (int i = 0; i < 16; i++) begin
      reg_rd_addr = 8'h20 + 8'(i); #1;
      if (reg_rd_data != 32'd256) n_thr++;
    end
    check(n_thr == 16, $sformatf("thresholds updated: %0d of 16", n_thr));
    nf0 = nframes;
    data_q.delete();
    wait (nframes == nf0 + 3);
    c5  = coherence(5, 10.0, DW);
    c14 = coherence(14, 20.0, DW);
    $display("frames %0d, coherence out5@10MHz %f out14@20MHz %f", nframes, c5, c14);
    check(c5 > 0.3 && c14 > 0.3, "tones in the selected channels");
    check(!dut.u_fmt.overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
