// tohost_block_fifo -- frame-committing, block-releasing buffer of one
// Central Router ToHost channel.
//
// Payload words (32 bit) are written one per cycle; the DMA side reads them
// eight at a time as 256-bit beats. Three pointers are kept, in words:
//   wp  - write pointer, moves with every stored word;
//   cp  - commit pointer, set to wp when a frame completes with a correct
//         length; a frame that breaks off rolls wp back to cp, so only whole
//         frames are ever stored;
//   relp- release pointer, moved to cp after every FRAMES_PER_BLOCK committed
//         frames. The DMA side sees only released data, so it always moves
//         whole blocks of 6 x 116 words = 87 beats: the DMA block size is
//         matched to a multiple of the frame size, as the paper describes.
// A frame is accepted at its first word only if the channel is enabled and
// there is room for a whole frame; otherwise the whole frame is discarded
// (overflow pulse when enabled). The memory is 8 banks of 32-bit words, one
// per word of a beat, with combinational read at the read row.
//
// Interface: in_* from wib_frame_checker; beat_valid/beat_ready/beat_data is
// a valid/ready stream of 256-bit beats; avail_beats is the number of
// released beats not yet read (used by the DMA to size its bursts).
module tohost_block_fifo
  import felix_pkg::*;
#(
  parameter int DEPTH_WORDS      = 2048,   // power of two, >= one block
  parameter int FRAMES_PER_BLK   = FRAMES_PER_BLOCK
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 enable,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [31:0]          in_data,
  input  logic                 frame_done,
  input  logic                 frame_len_ok,
  output logic                 beat_valid,
  input  logic                 beat_ready,
  output logic [BEAT_BITS-1:0] beat_data,
  output logic [$clog2(DEPTH_WORDS/WORDS_PER_BEAT):0] avail_beats,
  output logic                 ev_frame_ok,
  output logic                 ev_overflow,
  output logic                 ev_block
);

  localparam int AW   = $clog2(DEPTH_WORDS);       // word address bits
  localparam int ROWS = DEPTH_WORDS / WORDS_PER_BEAT;
  localparam int RW   = $clog2(ROWS);

  logic [31:0] mem [WORDS_PER_BEAT][ROWS];

  logic [AW:0] wp, cp, relp, rp;      // one extra bit for full/empty
  logic        storing;                // current frame is being stored
  logic [$clog2(FRAMES_PER_BLK+1)-1:0] nframes;

  wire [AW:0] used_c  = cp - rp;
  wire        room    = (DEPTH_WORDS - 32'(used_c)) >= PAYLOAD_WORDS;
  wire        accept  = in_valid && in_sof && enable && room;
  wire [AW:0] wa      = in_sof ? cp : wp;   // a frame always starts at cp
  wire        wr_en   = in_valid && (in_sof ? accept : storing);
  wire [AW:0] rel_words = relp - rp;   // always a multiple of 8

  assign avail_beats = rel_words[AW:$clog2(WORDS_PER_BEAT)];
  assign beat_valid  = avail_beats != 0;

  always_comb begin
    for (int k = 0; k < WORDS_PER_BEAT; k++)
      beat_data[32*k +: 32] = mem[k][rp[AW-1:$clog2(WORDS_PER_BEAT)]];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa[$clog2(WORDS_PER_BEAT)-1:0]][wa[AW-1:$clog2(WORDS_PER_BEAT)]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp          <= '0;
      cp          <= '0;
      relp        <= '0;
      rp          <= '0;
      storing     <= 1'b0;
      nframes     <= '0;
      ev_frame_ok <= 1'b0;
      ev_overflow <= 1'b0;
      ev_block    <= 1'b0;
    end else begin
      ev_frame_ok <= 1'b0;
      ev_overflow <= 1'b0;
      ev_block    <= 1'b0;
      if (in_valid && in_sof) begin
        storing     <= accept;
        ev_overflow <= enable && !room;
      end
      if (wr_en) wp <= wa + 1'b1;
      if (frame_done && storing) begin
        storing <= 1'b0;
        if (frame_len_ok) begin
          cp          <= wp;
          ev_frame_ok <= 1'b1;
          if (32'(nframes) == FRAMES_PER_BLK - 1) begin
            nframes  <= '0;
            relp     <= wp;
            ev_block <= 1'b1;
          end else begin
            nframes <= nframes + 1'b1;
          end
        end else begin
          wp <= cp;
        end
      end
      if (beat_valid && beat_ready) rp <= rp + (AW+1)'(WORDS_PER_BEAT);
    end
  end

  // a block must always fill whole beats, or the DMA would read past it
  initial assert ((FRAMES_PER_BLK * PAYLOAD_WORDS) % WORDS_PER_BEAT == 0)
    else $error("block size must be a whole number of 256-bit beats");
  initial assert (DEPTH_WORDS >= FRAMES_PER_BLK * PAYLOAD_WORDS + PAYLOAD_WORDS)
    else $error("buffer smaller than a block plus a frame");

endmodule
