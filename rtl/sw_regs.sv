// sw_regs: the shared registers through which the embedded control system
// configures the FPGA and reads its status.
//
// The host writes 32-bit words over a simple synchronous bus (wr_en,
// wr_addr, wr_data, one write per clock) and reads combinationally
// (rd_addr -> rd_data). Register map (word addresses):
//   0x00 CTRL    W  bit0 ARM (self-clearing: a write of 1 gives one arm
//                   pulse to the time formatter), bit1 T flag of the header
//   0x01 TIME    RW BCD 'JJJSSSSS' of the second starting at the next PPS
//   0x02 HDR     RW [31:28] years from 2000, [27:16] user-specified data
//   0x03 STATUS  R  bit0 armed, bit1 synced, bit2 formatter overflow
//   0x10+i CHSEL RW [4:0] input (0..31) routed to output channel i (0..15)
//   0x20+i THR   R  current 2-bit threshold of output channel i
// Unmapped addresses read 0. After reset CHSEL i = i (IF1 channels 0..15),
// TIME, HDR and T are 0.
//
// Following the paper: the host writes a 32-bit time register and sets the
// channel selection and header through shared registers. The addresses and
// bit positions are this design's own.
module sw_regs
  import vlbi_pkg::*;
#(
  parameter int NOUT_P = vlbi_pkg::NOUT,
  localparam int SW    = vlbi_pkg::SEL_W
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            wr_en,
  input  logic [7:0]      wr_addr,
  input  logic [31:0]     wr_data,
  input  logic [7:0]      rd_addr,
  output logic [31:0]     rd_data,
  // status in
  input  logic            st_armed,
  input  logic            st_synced,
  input  logic            st_overflow,
  input  logic [BB_W-1:0] st_thresh [NOUT_P],
  // configuration out
  output logic            arm,
  output logic [31:0]     time_word,
  output m5b_cfg_t        cfg,
  output logic [SW-1:0]   chan_sel [NOUT_P]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      arm       <= 1'b0;
      time_word <= '0;
      cfg       <= '0;
      for (int i = 0; i < NOUT_P; i++) chan_sel[i] <= SW'(i);
    end else begin
      arm <= 1'b0;
      if (wr_en) begin
        if (wr_addr == 8'h00) begin
          arm       <= wr_data[0];
          cfg.tflag <= wr_data[1];
        end
        if (wr_addr == 8'h01) time_word <= wr_data;
        if (wr_addr == 8'h02) begin
          cfg.years <= wr_data[31:28];
          cfg.user  <= wr_data[27:16];
        end
        for (int i = 0; i < NOUT_P; i++)
          if (wr_addr == 8'(8'h10 + i)) chan_sel[i] <= wr_data[SW-1:0];
      end
    end
  end

  always_comb begin
    rd_data = '0;
    if (rd_addr == 8'h00) rd_data = {30'd0, cfg.tflag, 1'b0};
    if (rd_addr == 8'h01) rd_data = time_word;
    if (rd_addr == 8'h02) rd_data = {cfg.years, cfg.user, 16'd0};
    if (rd_addr == 8'h03) rd_data = {29'd0, st_overflow, st_synced, st_armed};
    for (int i = 0; i < NOUT_P; i++) begin
      if (rd_addr == 8'(8'h10 + i)) rd_data = 32'(chan_sel[i]);
      if (rd_addr == 8'(8'h20 + i)) rd_data = 32'(st_thresh[i]);
    end
  end
endmodule
