// channel_select: 32-to-16 selection of real baseband channels.
//
// The two DDCs deliver NIN = 2 x 16 channels (IF1 channels 0..15 are inputs
// 0..15, IF2 channels 0..15 are inputs 16..31). Output channel i carries
// input sel[i]; sel is written by the host through the shared registers, so
// any 16 of the 32 channels can be recorded, in any order, and one input may
// feed several outputs. The outputs are registered: one clock of latency,
// out_valid follows in_valid.
//
// The 32-to-16 selection and its software control follow the paper; the
// input numbering is this design's choice.
module channel_select
  import vlbi_pkg::*;
#(
  parameter int NIN   = vlbi_pkg::NUM_IF * vlbi_pkg::NCHAN,
  parameter int NOUT_P = vlbi_pkg::NOUT,
  localparam int SW   = $clog2(NIN)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  bb_t           din  [NIN],
  input  logic [SW-1:0] sel  [NOUT_P],
  output logic          out_valid,
  output bb_t           dout [NOUT_P]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NOUT_P; i++) dout[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < NOUT_P; i++) dout[i] <= din[sel[i]];
    end
  end
endmodule
