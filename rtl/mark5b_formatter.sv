// mark5b_formatter: packs the 16 requantised channels into Mark5B frames.
//
// Every sample time the 16 channels give 2 bits each, one 32-bit data word:
// channel 15 in bits 31:30 down to channel 0 in bits 1:0, each channel as
// {magnitude, sign}. A frame is a 4-word (16-byte) header followed by
// DATA_WORDS = 2500 data words (10000 bytes):
//   word 0  sync word 0xABADDEED
//   word 1  years from 2000 [31:28] | user data [27:16] | T [15] |
//           frame number within the second [14:0]
//   word 2  VLBA BCD time code 'JJJSSSSS'
//   word 3  BCD '.SSSS' [31:16] | CRCC [15:0] over the 48 BCD bits
// Data words arrive every second clock at the default rates; they are
// written into a small FIFO so that the 4 header words can be sent while the
// next frame's first samples arrive. The output side sends one word per clock
// when it has one: header words back to back, then data words as the FIFO
// provides them. out_sof marks word 0 and out_eof the last data word of each
// frame; frame_tick is a combinational pulse in the cycle the last data word
// is sent, so the time code has advanced when the next header starts.
//
// Formatting starts at the start pulse of the time formatter (PPS edge);
// samples before it are discarded. With 64 Msps per channel, 2500 words
// per frame give 25600 frames per second and 2.048 Gbps of data.
//
// Following the paper: descending channel order ch15..ch0, amplitude bit in
// front of the sign bit, the header fields and sizes. Own choices: the
// header bit positions (taken from the usual Mark5B layout), the CRC
// polynomial and the FIFO.
module mark5b_formatter
  import vlbi_pkg::*;
#(
  parameter int NCH_P      = vlbi_pkg::NOUT,
  parameter int DATA_WORDS = vlbi_pkg::M5B_DATA_WORDS,
  parameter int FIFO_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic        in_valid,
  input  logic [1:0]  q [NCH_P],
  input  m5b_cfg_t    cfg,
  input  m5b_time_t   tcode,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic        out_sof,
  output logic        out_eof,
  output logic        frame_tick,
  output logic        overflow      // sticky: a data word was lost
);
  localparam int AW = $clog2(FIFO_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_t;
  state_t state;

  logic [31:0]               fifo [FIFO_DEPTH];
  logic [AW-1:0]             wp, rp;
  logic [AW:0]               cnt;
  logic [1:0]                hidx;
  logic [$clog2(DATA_WORDS)-1:0] dcnt;
  logic [31:0]               in_word;
  logic                      push, pop;
  logic [31:0]               hdr_word;

  always_comb begin
    for (int i = 0; i < NCH_P; i++) in_word[2*i +: 2] = q[i];
  end

  always_comb begin
    unique case (hidx)
      2'd0: hdr_word = M5B_SYNC;
      2'd1: hdr_word = {cfg.years, cfg.user, cfg.tflag, tcode.frame};
      2'd2: hdr_word = tcode.jjjsssss;
      default: hdr_word = {tcode.frac, crcc16({tcode.jjjsssss, tcode.frac})};
    endcase
  end

  always_comb begin
    push       = in_valid && state != S_IDLE && !start && cnt != (AW+1)'(FIFO_DEPTH);
    pop        = state == S_DATA && cnt != 0;
    frame_tick = pop && dcnt == ($bits(dcnt))'(DATA_WORDS - 1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      wp        <= '0;
      rp        <= '0;
      cnt       <= '0;
      hidx      <= '0;
      dcnt      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
      overflow  <= 1'b0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
      if (in_valid && state != S_IDLE && !start && cnt == (AW+1)'(FIFO_DEPTH))
        overflow <= 1'b1;
      if (push) begin
        fifo[wp] <= in_word;
        wp       <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);

      unique case (state)
        S_IDLE: ;
        S_HDR: begin
          out_valid <= 1'b1;
          out_data  <= hdr_word;
          out_sof   <= hidx == 2'd0;
          hidx      <= hidx + 1'b1;
          if (hidx == 2'd3) begin
            state <= S_DATA;
            dcnt  <= '0;
          end
        end
        S_DATA: if (pop) begin
          out_valid <= 1'b1;
          out_data  <= fifo[rp];
          dcnt      <= dcnt + 1'b1;
          if (frame_tick) begin
            out_eof <= 1'b1;
            state   <= S_HDR;
            hidx    <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase

      // (re)synchronisation: open frame 0, drop anything buffered
      if (start) begin
        state <= S_HDR;
        hidx  <= '0;
        dcnt  <= '0;
        wp    <= '0;
        rp    <= '0;
        cnt   <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(in_valid && state != S_IDLE && !start && cnt == (AW+1)'(FIFO_DEPTH)))
    else $error("mark5b_formatter: FIFO overflow");
endmodule
