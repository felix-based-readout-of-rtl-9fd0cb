// tb_central_router_tohost -- one Central Router ToHost channel.
//
// Sends reference frames (some broken) and reads the 256-bit beats with a
// random ready. Checks: the beats carry exactly the payload words of the
// stored frames, in order, without SOF/CRC/EOF; nothing is released until 6
// frames are stored, and then exactly 87 beats (one block); a CRC-damaged
// frame is stored and counted; a cut-short frame is dropped; a full buffer
// drops whole frames (overflow); a disabled channel stores nothing.
module tb_central_router_tohost;
  import felix_pkg::*;
  import tb_wib_pkg::*;

  localparam int DEPTH = 2048;
  localparam int BLOCK_BEATS = FRAMES_PER_BLOCK * PAYLOAD_WORDS / WORDS_PER_BEAT;  // 87

  logic clk = 0, rst = 1, enable = 0;
  logic in_valid = 0;
  link_word_t in_word = '0;
  logic beat_valid, beat_ready;
  logic [255:0] beat_data;
  logic [$clog2(DEPTH/8):0] avail_beats;
  ch_events_t ev;
  int checks = 0, failures = 0;

  central_router_tohost dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  // expected payload words of stored frames, and words read
  logic [31:0] exp_q [$];
  int n_read_words = 0;
  bit reading = 0;
  int n_ok = 0, n_crc = 0, n_len = 0, n_ovf = 0, n_blk = 0, n_ts = 0;

  always @(negedge clk) beat_ready = reading && ($urandom % 4 != 0);

  always @(posedge clk) if (!rst) begin
    if (beat_valid && beat_ready) begin
      for (int k = 0; k < 8; k++) begin
        logic [31:0] e;
        e = exp_q.size() > 0 ? exp_q.pop_front() : 32'hDEAD_BEEF;
        checks++;
        if (beat_data[32*k +: 32] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d: got %h exp %h", n_read_words,
                                      beat_data[32*k +: 32], e);
        end
        n_read_words++;
      end
    end
    n_ok  += ev.frame_ok; n_crc += ev.crc_err; n_len += ev.len_err;
    n_ovf += ev.overflow; n_blk += ev.block;   n_ts  += ev.ts_err;
  end

  logic [62:0] ts = 63'd5000;
  int conv = 0;

  task automatic send(input frame_t f, input int n = FRAME_WORDS);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_word = f[i];
    end
    repeat (5) begin @(negedge clk); in_valid = 0; end
  endtask

  task automatic send_good(input bit stored);
    frame_t f = ref_frame(ts, 16'(conv), 3'd0, 5'd1, 8'd6);
    send(f);
    if (stored) for (int i = 1; i <= PAYLOAD_WORDS; i++) exp_q.push_back(f[i].data);
    ts += 25; conv++;
  endtask

  initial begin
    frame_t f;
    repeat (3) @(negedge clk);
    rst = 0;
    // disabled: nothing stored
    send_good(0);
    repeat (5) @(negedge clk);
    check(n_ok == 0 && avail_beats == 0, "disabled channel stored a frame");
    enable = 1;
    // five frames: still nothing released
    for (int i = 0; i < 5; i++) send_good(1);
    repeat (5) @(negedge clk);
    check(avail_beats == 0 && !beat_valid, "released before a block was complete");
    // a cut-short frame, then a CRC-damaged sixth frame
    f = ref_frame(ts, 16'(conv), 3'd0, 5'd1, 8'd6);
    send(f, 40);
    f[10].data ^= 32'h0000_0100;
    send(f);
    for (int i = 1; i <= PAYLOAD_WORDS; i++) exp_q.push_back(f[i].data);
    ts += 25; conv++;
    repeat (5) @(negedge clk);
    check(avail_beats == BLOCK_BEATS, $sformatf("one block = %0d beats, avail %0d",
                                                  BLOCK_BEATS, avail_beats));
    // read the first block while more frames arrive
    reading = 1;
    for (int i = 0; i < 6; i++) send_good(1);
    repeat (200) @(negedge clk);
    check(n_read_words == 2 * 6 * PAYLOAD_WORDS, $sformatf("read %0d words", n_read_words));
    check(avail_beats == 0, "beats left after two blocks");
    // stop reading: the buffer fills, later frames are dropped whole
    reading = 0;
    for (int i = 0; i < 20; i++) begin
      int n_before;
      frame_t g;
      n_before = n_ovf;
      g = ref_frame(ts, 16'(conv), 3'd0, 5'd1, 8'd6);
      send(g);
      repeat (2) @(negedge clk);
      // 17 frames of 116 words fit in 2048 words
      if (n_ovf == n_before) for (int j = 1; j <= PAYLOAD_WORDS; j++) exp_q.push_back(g[j].data);
      ts += 25; conv++;
    end
    check(n_ovf == 20 - 17, $sformatf("overflow drops %0d", n_ovf));
    // drain: only whole blocks come out (17 frames = 2 blocks + 5 frames)
    reading = 1;
    repeat (800) @(negedge clk);
    check(n_read_words == 4 * 6 * PAYLOAD_WORDS, $sformatf("after drain read %0d words",
                                                         n_read_words));
    check(n_ok == 6 + 6 + 17, $sformatf("frames stored %0d", n_ok));
    check(n_crc == 1, $sformatf("crc errors %0d", n_crc));
    check(n_len == 1, $sformatf("length errors %0d", n_len));
    check(n_blk == 4, $sformatf("blocks %0d", n_blk));
    check(n_ts == 0, $sformatf("timestamp errors %0d", n_ts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
