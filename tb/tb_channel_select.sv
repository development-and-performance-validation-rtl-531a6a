// tb_channel_select: random 32-channel input vectors and random selection
// maps (including repeated inputs); each output must equal the selected
// input one clock later, and out_valid must follow in_valid.
module tb_channel_select;
  import vlbi_pkg::*;
  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  bb_t din [32], dout [16];
  logic [4:0] sel [16];
  bb_t exp_d [16], prev_d [16];
  logic exp_v, prev_v;
  int checks = 0, failures = 0;

  channel_select dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_v = 0;
    foreach (exp_d[i]) exp_d[i] = '0;
    foreach (din[i]) din[i] = '0;
    foreach (sel[i]) sel[i] = 5'(i);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 300; t++) begin
      @(posedge clk);
      prev_v = exp_v;
      prev_d = exp_d;
      exp_v = t % 3 != 2;
      in_valid <= exp_v;
      for (int i = 0; i < 32; i++) din[i] <= bb_t'($urandom);
      for (int i = 0; i < 16; i++) sel[i] <= 5'($urandom);
      #1;
      for (int i = 0; i < 16; i++) exp_d[i] = din[sel[i]];
      @(negedge clk);
      if (t == 0) continue;
      checks++;
      if (out_valid != prev_v) begin failures++; $display("valid wrong at %0d", t); end
      if (prev_v)
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (dout[i] != prev_d[i]) begin failures++; $display("t %0d out %0d got %0d exp %0d", t, i, dout[i], prev_d[i]); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
