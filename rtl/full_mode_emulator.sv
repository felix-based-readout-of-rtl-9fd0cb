// full_mode_emulator -- FULL mode emulator: a stand-in WIB link.
//
// Generates a continuous stream of WIB frames in the same decoded-word form
// as the link-side ToHost path, so that the whole firmware behind the
// emulator multiplexer can be run without detector electronics.
//
// Each frame is 120 words (see felix_pkg for the layout): SOF, WIB header
// with the configured crate/slot/fiber identifiers and a 63-bit timestamp,
// four COLDATA blocks, the CRC-20 of the 116 payload words, EOF and one
// idle word. The timestamp steps by 25 (20 ns ticks) per frame and the
// COLDATA convert count by one, as the paper expects of real WIB data.
// One frame is sent every CLK_PER_FRAME cycles: with the default 125 at a
// 250 MHz fabric clock this is the paper's 2 MHz frame rate; the 120 words
// go out on 120 consecutive cycles, followed by CLK_PER_FRAME-120 empty ones.
//
// ADC channel c (0..255 over the four blocks) carries (ts[11:0] + 13*c) mod
// 4096, packed as 12-bit fields back to back, little-endian, across the 24
// data words of its block (so values straddle word boundaries). The
// COLDATA error and checksum fields are sent as zero. The paper names the
// emulator only; frame contents and timing beyond the rates above are this
// design's choices.
//
// Interface: enable starts/stops frame generation at a frame boundary;
// ts_load loads ts_init as the timestamp of the next frame.
module full_mode_emulator
  import felix_pkg::*;
#(
  parameter int CLK_PER_FRAME = 125
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,
  input  logic               ts_load,
  input  logic [TS_BITS-1:0] ts_init,
  input  logic [2:0]         fiber,
  input  logic [4:0]         slot,
  input  logic [7:0]         crate,
  output logic               out_valid,
  output link_word_t         out_word
);

  localparam int PW = $clog2(CLK_PER_FRAME);

  logic [PW-1:0]        pos;      // slot within the frame period
  logic                 running;  // a frame is being sent
  logic [TS_BITS-1:0]   ts;
  logic [15:0]          conv_cnt;
  logic [19:0]          crc;

  link_word_t           w;
  logic [CD_CHANNELS*ADC_BITS-1:0] blk;
  int unsigned          p, b, o;

  // ADC values of the block holding payload word p
  always_comb begin
    p = 32'(pos) - 1;
    b = (p >= WIB_HDR_WORDS) ? (p - WIB_HDR_WORDS) / CD_WORDS : 0;
    o = (p >= WIB_HDR_WORDS) ? (p - WIB_HDR_WORDS) % CD_WORDS : 0;
    for (int j = 0; j < CD_CHANNELS; j++)
      blk[ADC_BITS*j +: ADC_BITS] = ts[11:0] + 12'(13 * (CD_CHANNELS * b + j));
  end

  always_comb begin
    w = '0;
    if (pos == 0) begin
      w.k = 4'b0001; w.data[7:0] = K_SOF;
    end else if (32'(pos) <= PAYLOAD_WORDS) begin
      if (p == P_ID)          w.data = {8'h00, crate, slot, fiber, 8'h01};
      else if (p == P_ERR)    w.data = '0;
      else if (p == P_TS_LO)  w.data = ts[31:0];
      else if (p == P_TS_HI)  w.data = {1'b0, ts[62:32]};
      else if (o == 0)        w.data = {16'h0000, conv_cnt};
      else if (o < CD_HDR_WORDS) w.data = '0;
      else                    w.data = blk[32*(o - CD_HDR_WORDS) +: 32];
    end else if (pos == PW'(CRC_POS)) begin
      w.data = {12'h000, crc};
    end else if (pos == PW'(EOF_POS)) begin
      w.k = 4'b0001; w.data[7:0] = K_EOF;
    end else begin
      w.k = 4'b0001; w.data[7:0] = K_IDLE;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pos       <= '0;
      running   <= 1'b0;
      ts        <= '0;
      conv_cnt  <= '0;
      crc       <= CRC20_SEED;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= running && 32'(pos) < FRAME_WORDS;
      out_word  <= w;
      if (running && 32'(pos) >= 1 && 32'(pos) <= PAYLOAD_WORDS) crc <= crc20_word(crc, w.data);
      if (!running) begin
        pos     <= '0;
        running <= enable;
        crc     <= CRC20_SEED;
      end else if (pos == PW'(CLK_PER_FRAME - 1)) begin
        pos      <= '0;
        running  <= enable;
        ts       <= ts + TS_BITS'(TS_STEP);
        conv_cnt <= conv_cnt + 16'd1;
        crc      <= CRC20_SEED;
      end else begin
        pos <= pos + 1'b1;
      end
      if (ts_load) ts <= ts_init;
    end
  end

endmodule
