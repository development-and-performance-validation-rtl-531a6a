// two_bit_quantizer: 2-bit requantisation of one real baseband channel.
//
// Each valid sample x is mapped to a sign bit and a magnitude bit,
//   sign = 1 when x >= 0,   mag = 1 when |x| > H,
// giving the four levels -high, -low, +low, +high. H is the optimal
// threshold tracked by threshold_estimator from the channel's own power.
// The output pair is q = {mag, sign}: the magnitude (amplitude) bit in front,
// the sign bit behind it, as the channel's two bits are laid out in a Mark5B
// data word.
//
// Timing: q and out_valid one clock after the sample. The threshold used is
// the one in force when the sample arrives.
//
// Own choices: sign = 1 for non-negative samples, magnitude = 1 above H
// (strictly greater).
module two_bit_quantizer
  import vlbi_pkg::*;
#(
  parameter int WIN_LOG2    = 16,
  parameter int INIT_THRESH = 256
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  bb_t             x,
  output logic            out_valid,
  output logic [1:0]      q,
  output logic [BB_W-1:0] thresh
);
  logic [BB_W-1:0]   mag_x;

  threshold_estimator #(.WIN_LOG2(WIN_LOG2), .INIT_THRESH(INIT_THRESH)) u_thr (
    .clk, .rst, .in_valid, .x, .thresh, .power(), .vref(), .update()
  );

  always_comb mag_x = x[BB_W-1] ? BB_W'(-x) : BB_W'(x);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      q         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) q <= {mag_x > thresh, ~x[BB_W-1]};
    end
  end
endmodule
