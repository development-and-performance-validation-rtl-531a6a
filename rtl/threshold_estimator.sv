// threshold_estimator: optimal 2-bit quantisation threshold of one baseband
// channel, tracked continuously.
//
// With a zero-mean Gaussian input of standard deviation V_ref, the 2-bit
// threshold H for which 32% of the probability lies between 0 and H (and
// between -H and 0) is H = 0.92 * V_ref. Because the signal mean is zero,
// V_ref^2 is the average power. The estimator
//   1. accumulates x^2 over a window of 2^WIN_LOG2 valid samples,
//   2. takes P = sum >> WIN_LOG2 (average power),
//   3. computes V_ref = floor(sqrt(P)) with a sequential square root,
//   4. sets H = (V_ref * COEF_Q10) >> 10, COEF_Q10 = 942 (0.9199).
// H is refreshed at the end of every window, so it follows changes of the
// input power with one window of delay. Until the first window is done H is
// INIT_THRESH. vref and power are exported for monitoring.
//
// Timing: the square root takes about BB_W clocks, so the window must be at
// least that many samples long (checked by an assertion).
//
// Following the paper: the 0.92 V_ref rule and V_ref from the average power,
// updated in real time. Own choices: window length, Q10 coefficient,
// initial threshold.
module threshold_estimator
  import vlbi_pkg::*;
#(
  parameter int   WIN_LOG2    = 16,
  parameter int   COEF_Q10    = 942,
  parameter int   INIT_THRESH = 256,
  localparam int  PW_W        = 2 * BB_W,
  localparam int  ACC_W       = PW_W + WIN_LOG2,
  localparam int  RT_W        = BB_W
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  bb_t             x,
  output logic [BB_W-1:0] thresh,
  output logic [PW_W-1:0] power,
  output logic [RT_W-1:0] vref,
  output logic            update      // pulses when thresh changes
);
  logic [ACC_W-1:0]    acc;
  logic [WIN_LOG2-1:0] cnt;
  logic                sq_start, sq_done, sq_busy;
  logic [RT_W-1:0]     root;
  logic [PW_W-1:0]     sq;

  always_comb sq = PW_W'(x * x);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc      <= '0;
      cnt      <= '0;
      sq_start <= 1'b0;
      power    <= '0;
    end else begin
      sq_start <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt == '1) begin
          power    <= PW_W'((acc + ACC_W'(sq)) >> WIN_LOG2);
          acc      <= '0;
          sq_start <= 1'b1;
        end else begin
          acc <= acc + ACC_W'(sq);
        end
      end
    end
  end

  isqrt #(.IN_W(PW_W)) u_sqrt (
    .clk, .rst, .start(sq_start), .operand(power),
    .busy(sq_busy), .done(sq_done), .root
  );

  logic [RT_W+10:0] scaled;
  always_comb scaled = (RT_W+11)'(root) * (RT_W+11)'(COEF_Q10);

  always_ff @(posedge clk) begin
    if (rst) begin
      thresh <= BB_W'(INIT_THRESH);
      vref   <= '0;
      update <= 1'b0;
    end else begin
      update <= sq_done;
      if (sq_done) begin
        vref   <= root;
        thresh <= BB_W'(scaled >> 10);
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) sq_start |-> !sq_busy)
    else $error("threshold_estimator: window shorter than the square root");
endmodule
