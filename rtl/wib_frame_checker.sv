// wib_frame_checker -- frame delineation and integrity check of one link.
//
// Follows the decoded word stream of a link (or of the emulator), finds each
// frame by its SOF K character and checks it:
//   * length: 116 payload words, then the CRC word, then EOF. A K character
//     inside the frame, a new SOF before EOF, or a word other than EOF in the
//     EOF slot ends the frame with len_ok = 0;
//   * CRC-20 of the payload words against the CRC word (crc_ok);
//   * the 63-bit timestamp (payload words 2 and 3) against the previous
//     complete frame's timestamp plus 25 (ts_ok; the first frame after reset
//     passes).
// The payload words leave as they arrive (out_valid/out_data, out_sof on the
// first one); SOF, CRC, EOF and idle words are removed, so the CRC never
// reaches the host. The verdict comes as a one-cycle frame_done pulse with
// len_ok/crc_ok/ts_ok, on the cycle after the EOF word (or after the word
// that broke the frame). All outputs are registered: one cycle of latency.
//
// From the paper: 120-word frames, CRC-20 checked and then discarded, the
// timestamp step of 25. The word layout and what counts as a length error
// are this design's choices; the paper does not say what FELIX does with a
// bad frame (see central_router_tohost for that).
module wib_frame_checker
  import felix_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  link_word_t  in_word,
  output logic        out_valid,
  output logic        out_sof,
  output logic [31:0] out_data,
  output logic        frame_done,
  output logic        len_ok,
  output logic        crc_ok,
  output logic        ts_ok
);

  logic               in_frame;
  logic [6:0]         cnt;        // payload words seen in this frame
  logic [19:0]        crc;
  logic               crc_match;
  logic [TS_BITS-1:0] ts, prev_ts;
  logic               have_prev;

  wire is_k   = |in_word.k;
  wire is_sof = in_word.k == 4'b0001 && in_word.data[7:0] == K_SOF;
  wire is_eof = in_word.k == 4'b0001 && in_word.data[7:0] == K_EOF;
  wire ts_step_ok = !have_prev || ts == prev_ts + TS_BITS'(TS_STEP);

  always_ff @(posedge clk) begin
    if (rst) begin
      in_frame   <= 1'b0;
      cnt        <= '0;
      crc        <= CRC20_SEED;
      crc_match  <= 1'b0;
      ts         <= '0;
      prev_ts    <= '0;
      have_prev  <= 1'b0;
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_data   <= '0;
      frame_done <= 1'b0;
      len_ok     <= 1'b0;
      crc_ok     <= 1'b0;
      ts_ok      <= 1'b0;
    end else begin
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      frame_done <= 1'b0;
      if (in_valid) begin
        if (is_sof) begin
          if (in_frame) begin          // previous frame never ended
            frame_done <= 1'b1;
            len_ok     <= 1'b0;
            crc_ok     <= 1'b0;
            ts_ok      <= 1'b0;
          end
          in_frame <= 1'b1;
          cnt      <= '0;
          crc      <= CRC20_SEED;
        end else if (in_frame) begin
          if (32'(cnt) < PAYLOAD_WORDS) begin
            if (is_k) begin
              frame_done <= 1'b1;
              len_ok     <= 1'b0;
              crc_ok     <= 1'b0;
              ts_ok      <= 1'b0;
              in_frame   <= 1'b0;
            end else begin
              out_valid <= 1'b1;
              out_sof   <= cnt == 0;
              out_data  <= in_word.data;
              crc       <= crc20_word(crc, in_word.data);
              if (32'(cnt) == P_TS_LO) ts[31:0]  <= in_word.data;
              if (32'(cnt) == P_TS_HI) ts[62:32] <= in_word.data[30:0];
              cnt <= cnt + 1'b1;
            end
          end else if (32'(cnt) == PAYLOAD_WORDS) begin   // CRC word
            if (is_k) begin
              frame_done <= 1'b1;
              len_ok     <= 1'b0;
              crc_ok     <= 1'b0;
              ts_ok      <= 1'b0;
              in_frame   <= 1'b0;
            end else begin
              crc_match <= in_word.data[19:0] == crc;
              cnt       <= cnt + 1'b1;
            end
          end else begin                                   // EOF slot
            frame_done <= 1'b1;
            in_frame   <= 1'b0;
            len_ok     <= is_eof;
            crc_ok     <= is_eof && crc_match;
            ts_ok      <= is_eof && ts_step_ok;
            if (is_eof) begin
              prev_ts   <= ts;
              have_prev <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
