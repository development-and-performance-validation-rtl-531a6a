// vlbi_backend_top: FPGA part of a dual-IF VLBI digital backend.
//
// Two IF signals, each sampled at 1024 MHz with 8 bits and delivered as
// 8 samples per 128 MHz clock, are each split by a digital baseband
// converter (ddc) into 16 real baseband channels of 32 MHz (64 Msps). Of the
// 32 channels, 16 are chosen by channel_select, requantised to 2 bits with a
// power-tracking optimal threshold (two_bit_quantizer) and packed into
// Mark5B frames (mark5b_formatter) time-stamped by time_formatter, which is
// synchronised to the 1 PPS. The result is a 32-bit word stream of
// 2.048 Gbps plus 0.16% header, for the 10GbE transmitter.
//
// Ports outside the FPGA logic are brought out: the ADC sample lanes, the
// PPS, the host register bus of the embedded control system, and the
// formatted word stream towards the 10GbE core.
//
// Timing: all logic on one clock (the ADC's 128 MHz fabric clock);
// synchronous active-high reset. The DDCs of both IFs run in lock step, so
// their channel samples are aligned.
module vlbi_backend_top
  import vlbi_pkg::*;
#(
  parameter int QWIN_LOG2  = 16,                         // power window 2^N samples
  parameter int DATA_WORDS = vlbi_pkg::M5B_DATA_WORDS,   // Mark5B data words per frame
  parameter int FRAMES_PS  = vlbi_pkg::M5B_FRAMES_PER_SEC
) (
  input  logic            clk,
  input  logic            rst,
  // ADC, dual-IF mode
  input  logic            adc_valid,
  input  adc_t            adc_if1 [LANES],
  input  adc_t            adc_if2 [LANES],
  // hydrogen maser 1 PPS
  input  logic            pps,
  // embedded control system register bus
  input  logic            reg_wr_en,
  input  logic [7:0]      reg_wr_addr,
  input  logic [31:0]     reg_wr_data,
  input  logic [7:0]      reg_rd_addr,
  output logic [31:0]     reg_rd_data,
  // Mark5B word stream to the 10GbE core
  output logic            m5b_valid,
  output logic [31:0]     m5b_data,
  output logic            m5b_sof,
  output logic            m5b_eof
);
  // ---- digital baseband conversion, one DDC per IF ----
  logic bb_valid [NUM_IF];
  bb_t  bb1 [NCHAN];
  bb_t  bb2 [NCHAN];
  bb_t  bb_all [NUM_IF * NCHAN];

  ddc u_ddc_if1 (.clk, .rst, .in_valid(adc_valid), .x(adc_if1), .bb_valid(bb_valid[0]), .bb(bb1));
  ddc u_ddc_if2 (.clk, .rst, .in_valid(adc_valid), .x(adc_if2), .bb_valid(bb_valid[1]), .bb(bb2));

  always_comb
    for (int k = 0; k < NCHAN; k++) begin
      bb_all[k]         = bb1[k];
      bb_all[NCHAN + k] = bb2[k];
    end

  // ---- shared registers ----
  logic            arm, armed, synced, overflow;
  logic [31:0]     time_word;
  m5b_cfg_t        cfg;
  logic [SEL_W-1:0] chan_sel [NOUT];
  logic [BB_W-1:0] thresh [NOUT];

  sw_regs u_regs (
    .clk, .rst,
    .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .rd_addr(reg_rd_addr), .rd_data(reg_rd_data),
    .st_armed(armed), .st_synced(synced), .st_overflow(overflow), .st_thresh(thresh),
    .arm, .time_word, .cfg, .chan_sel
  );

  // ---- 32-to-16 channel selection ----
  logic sel_valid;
  bb_t  sel_bb [NOUT];

  channel_select u_sel (
    .clk, .rst, .in_valid(bb_valid[0]), .din(bb_all), .sel(chan_sel),
    .out_valid(sel_valid), .dout(sel_bb)
  );

  // ---- 2-bit requantisation ----
  logic       q_valid [NOUT];
  logic [1:0] q [NOUT];

  for (genvar i = 0; i < NOUT; i++) begin : g_q
    two_bit_quantizer #(.WIN_LOG2(QWIN_LOG2)) u_q (
      .clk, .rst, .in_valid(sel_valid), .x(sel_bb[i]),
      .out_valid(q_valid[i]), .q(q[i]), .thresh(thresh[i])
    );
  end

  // ---- time keeping and Mark5B formatting ----
  logic      start, frame_tick;
  m5b_time_t tcode;

  time_formatter #(.FRAMES_PER_SEC(FRAMES_PS)) u_time (
    .clk, .rst, .pps, .arm, .time_word, .frame_tick,
    .start, .armed, .synced, .tcode
  );

  mark5b_formatter #(.DATA_WORDS(DATA_WORDS)) u_fmt (
    .clk, .rst, .start, .in_valid(q_valid[0]), .q, .cfg, .tcode,
    .out_valid(m5b_valid), .out_data(m5b_data), .out_sof(m5b_sof), .out_eof(m5b_eof),
    .frame_tick, .overflow
  );

  assert property (@(posedge clk) disable iff (rst) bb_valid[0] == bb_valid[1])
    else $error("vlbi_backend_top: the two DDCs lost alignment");
endmodule
