// central_router_tohost -- one Central Router ToHost channel (one of 12).
//
// Chains the frame checker and the block buffer: frames arriving from the
// link multiplexer are checked (length, CRC-20, timestamp step), stripped of
// SOF/CRC/EOF/idle, and their 116 payload words are stored. After every 6
// complete frames a block of 87 256-bit beats is released to the channel's
// DMA. Frames with a CRC or timestamp error are kept (the WIB keeps sending
// fixed-size frames even when a front-end board fails, and the host relies on
// a fixed block layout) and only counted; frames with a length error, or that
// do not fit in the buffer, are discarded whole. This policy is this
// design's choice: the paper says only that the CRC is checked and dropped.
//
// Interface: in_valid/in_word is the decoded word stream; beat_* is the
// valid/ready stream towards the DMA; ev_* are monitor pulses. Latency from
// the last payload word to release of a completed block is 3 cycles.
module central_router_tohost
  import felix_pkg::*;
#(
  parameter int DEPTH_WORDS    = 2048,
  parameter int FRAMES_PER_BLK = FRAMES_PER_BLOCK
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 enable,
  input  logic                 in_valid,
  input  link_word_t           in_word,
  output logic                 beat_valid,
  input  logic                 beat_ready,
  output logic [BEAT_BITS-1:0] beat_data,
  output logic [$clog2(DEPTH_WORDS/WORDS_PER_BEAT):0] avail_beats,
  output ch_events_t           ev
);

  logic        p_valid, p_sof, done, len_ok, crc_ok, ts_ok;
  logic [31:0] p_data;

  wib_frame_checker u_chk (
    .clk, .rst, .in_valid, .in_word,
    .out_valid(p_valid), .out_sof(p_sof), .out_data(p_data),
    .frame_done(done), .len_ok, .crc_ok, .ts_ok
  );

  tohost_block_fifo #(.DEPTH_WORDS(DEPTH_WORDS), .FRAMES_PER_BLK(FRAMES_PER_BLK)) u_fifo (
    .clk, .rst, .enable,
    .in_valid(p_valid), .in_sof(p_sof), .in_data(p_data),
    .frame_done(done), .frame_len_ok(len_ok),
    .beat_valid, .beat_ready, .beat_data, .avail_beats,
    .ev_frame_ok(ev.frame_ok), .ev_overflow(ev.overflow), .ev_block(ev.block)
  );

  always_comb begin
    ev.code_err = 1'b0;   // filled in at the link decoder
    ev.crc_err  = done && len_ok && !crc_ok && enable;
    ev.len_err  = done && !len_ok && enable;
    ev.ts_err   = done && len_ok && !ts_ok && enable;
  end

endmodule
