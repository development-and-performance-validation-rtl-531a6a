// tb_sw_regs: register map of the shared registers.
// Checks reset values (channel map i -> i), write/read-back of TIME, HDR
// and every CHSEL, that ARM gives exactly one arm pulse and reads back 0,
// the T flag, the status and threshold read-back, and that unmapped
// addresses read 0.
module tb_sw_regs;
  import vlbi_pkg::*;
  logic clk = 0, rst = 1;
  logic wr_en = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic st_armed = 0, st_synced = 0, st_overflow = 0;
  logic [BB_W-1:0] st_thresh [16];
  logic arm;
  logic [31:0] time_word;
  m5b_cfg_t cfg;
  logic [4:0] chan_sel [16];
  int checks = 0, failures = 0, narm = 0;
  logic [4:0] map [16];

  sw_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && arm) narm++;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(posedge clk);
    wr_en <= 1; wr_addr <= a; wr_data <= d;
    @(posedge clk) wr_en <= 0;
    @(negedge clk);
  endtask

  task automatic rd_check(logic [7:0] a, logic [31:0] e, string what);
    rd_addr = a;
    #1;
    checks++;
    if (rd_data !== e) begin failures++; $display("%s: read %h exp %h", what, rd_data, e); end
  endtask

  initial begin
    foreach (st_thresh[i]) st_thresh[i] = BB_W'(1000 + 7 * i);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (chan_sel[i] != 5'(i)) begin failures++; $display("reset map %0d = %0d", i, chan_sel[i]); end
    end
    wr(8'h01, 32'h601_43210);
    rd_check(8'h01, 32'h601_43210, "TIME");
    checks++; if (time_word != 32'h601_43210) begin failures++; $display("time_word out"); end
    wr(8'h02, 32'h5DEF_1234);
    rd_check(8'h02, 32'h5DEF_0000, "HDR");
    checks++; if (cfg.years != 4'h5 || cfg.user != 12'hDEF) begin failures++; $display("cfg out"); end
    wr(8'h00, 32'h3);
    @(posedge clk); @(negedge clk);
    checks++; if (narm != 1 || !cfg.tflag) begin failures++; $display("arm pulses %0d tflag %b", narm, cfg.tflag); end
    repeat (3) @(posedge clk);
    checks++; if (narm != 1) begin failures++; $display("arm not self-clearing"); end
    rd_check(8'h00, 32'h2, "CTRL");
    for (int i = 0; i < 16; i++) begin
      map[i] = 5'($urandom);
      wr(8'h10 + 8'(i), 32'(map[i]) | 32'hFFFF_FFE0);
    end
    for (int i = 0; i < 16; i++) begin
      rd_check(8'h10 + 8'(i), 32'(map[i]), "CHSEL");
      checks++; if (chan_sel[i] != map[i]) begin failures++; $display("chan_sel %0d", i); end
      rd_check(8'h20 + 8'(i), 32'(1000 + 7 * i), "THR");
    end
    st_synced = 1; st_overflow = 1;
    rd_check(8'h03, 32'h6, "STATUS");
    rd_check(8'h7F, 32'h0, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
