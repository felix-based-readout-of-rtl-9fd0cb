// tb_wib_frame_checker -- drives reference frames, some of them damaged,
// into the frame checker and checks the payload words passed on (CRC word
// and K words removed) and each frame's verdict:
//   good frame; a flipped payload bit (CRC error); a timestamp jump
//   (timestamp error); a frame cut short by a new SOF and one broken by a
//   K character (length errors); a wrong word in the EOF slot.
module tb_wib_frame_checker;
  import felix_pkg::*;
  import tb_wib_pkg::*;

  logic clk = 0, rst = 1;
  logic in_valid = 0;
  link_word_t in_word = '0;
  logic out_valid, out_sof, frame_done, len_ok, crc_ok, ts_ok;
  logic [31:0] out_data;
  int checks = 0, failures = 0;

  wib_frame_checker dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  // monitor: collect payload words and verdicts
  logic [31:0] got [$];
  int nsof = 0;
  typedef struct { bit len, crc, ts; } verdict_t;
  verdict_t verd [$];
  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      got.push_back(out_data);
      if (out_sof) nsof++;
    end
    if (frame_done) verd.push_back('{len_ok, crc_ok, ts_ok});
  end

  task automatic send(input frame_t f, input int n = FRAME_WORDS, input int gap = 5);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_word = f[i];
    end
    for (int i = 0; i < gap; i++) begin
      @(negedge clk); in_valid = (i % 2) == 0; in_word = '{k: 4'b0001, data: 32'hBC};
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic expect_frame(input frame_t f, input bit len, input bit crc, input bit ts,
                              input string name);
    repeat (3) @(negedge clk);
    check(verd.size() == 1, $sformatf("%s: %0d verdicts", name, verd.size()));
    if (verd.size() > 0) begin
      verdict_t v = verd.pop_front();
      check(v.len == len && v.crc == crc && v.ts == ts,
            $sformatf("%s: verdict len/crc/ts %0d%0d%0d exp %0d%0d%0d", name, v.len, v.crc,
                      v.ts, len, crc, ts));
    end
    if (len) begin
      check(got.size() == PAYLOAD_WORDS, $sformatf("%s: %0d payload words", name, got.size()));
      for (int i = 0; i < PAYLOAD_WORDS && i < got.size(); i++)
        check(got[i] == f[1+i].data, $sformatf("%s: payload %0d", name, i));
    end
    verd.delete();
    got.delete();
  endtask

  initial begin
    frame_t f;
    logic [62:0] ts = 63'd1000;
    repeat (3) @(negedge clk);
    rst = 0;
    // good frames
    for (int n = 0; n < 3; n++) begin
      f = ref_frame(ts, 16'(n), 3'd1, 5'd2, 8'd6);
      send(f);
      expect_frame(f, 1, 1, 1, "good");
      ts += 25;
    end
    check(nsof == 3, "out_sof count");
    // flipped payload bit
    f = ref_frame(ts, 16'd3, 3'd1, 5'd2, 8'd6);
    f[50].data[7] ^= 1'b1;
    send(f);
    expect_frame(f, 1, 0, 1, "crc");
    ts += 25;
    // timestamp jumps by 50
    ts += 25;
    f = ref_frame(ts, 16'd4, 3'd1, 5'd2, 8'd6);
    send(f);
    expect_frame(f, 1, 1, 0, "tsjump");
    ts += 25;
    // back in step
    f = ref_frame(ts, 16'd5, 3'd1, 5'd2, 8'd6);
    send(f);
    expect_frame(f, 1, 1, 1, "resync");
    ts += 25;
    // cut short: 60 words then a fresh good frame
    f = ref_frame(ts, 16'd6, 3'd1, 5'd2, 8'd6);
    send(f, 60, 0);
    repeat (3) @(negedge clk);
    check(verd.size() == 0, "no verdict before the next SOF");
    send(f);
    repeat (3) @(negedge clk);
    check(verd.size() == 2, $sformatf("short+good: %0d verdicts", verd.size()));
    if (verd.size() == 2) begin
      check(!verd[0].len, "short frame not flagged");
      check(verd[1].len && verd[1].crc && verd[1].ts, "frame after short one");
    end
    check(got.size() == 59 + PAYLOAD_WORDS, $sformatf("short+good words %0d", got.size()));
    verd.delete(); got.delete();
    ts += 25;
    // K character inside the payload
    f = ref_frame(ts, 16'd7, 3'd1, 5'd2, 8'd6);
    f[30] = '{k: 4'b0001, data: 32'hBC};
    send(f);
    expect_frame(f, 0, 0, 0, "kchar");
    // wrong word in the EOF slot
    f = ref_frame(ts, 16'd7, 3'd1, 5'd2, 8'd6);
    f[118] = '{k: 4'b0000, data: 32'h1234};
    send(f);
    expect_frame(f, 0, 0, 0, "eof");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
