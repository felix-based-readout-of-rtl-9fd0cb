// tb_full_mode_emulator -- checks the emulator's frames word by word against
// the reference frame model, the 125-cycle frame period (2 MHz at 250 MHz),
// the timestamp step of 25, the convert count step of 1, a timestamp load
// and stopping at a frame boundary.
module tb_full_mode_emulator;
  import felix_pkg::*;
  import tb_wib_pkg::*;

  logic clk = 0, rst = 1;
  logic enable = 0, ts_load = 0;
  logic [62:0] ts_init = '0;
  logic [2:0] fiber = 3'd5;
  logic [4:0] slot = 5'd3;
  logic [7:0] crate = 8'd6;
  logic out_valid;
  link_word_t out_word;
  int checks = 0, failures = 0;

  full_mode_emulator dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    frame_t f;
    int sof_cycle [8];
    int nf = 0;
    logic [62:0] t0 = 63'h4000_0000_1234_5678;
    repeat (3) @(negedge clk);
    rst = 0;
    ts_init = t0; ts_load = 1;
    @(negedge clk); ts_load = 0;
    enable = 1;
    // collect 4 frames
    while (nf < 4) begin
      @(negedge clk);
      if (out_valid && out_word.k == 4'b0001 && out_word.data[7:0] == 8'h3C) begin
        sof_cycle[nf] = cyc;
        f = ref_frame(t0 + 63'(25 * nf), 16'(nf), fiber, slot, crate);
        for (int i = 0; i < FRAME_WORDS; i++) begin
          check(out_valid && out_word == f[i],
                $sformatf("frame %0d word %0d got %b/%h exp %b/%h", nf, i, out_word.k,
                          out_word.data, f[i].k, f[i].data));
          @(negedge clk);
        end
        // the gap before the next frame carries no words
        check(!out_valid, "valid in the inter-frame gap");
        nf++;
      end
    end
    for (int i = 1; i < 4; i++)
      check(sof_cycle[i] - sof_cycle[i-1] == 125, $sformatf("frame period %0d",
            sof_cycle[i] - sof_cycle[i-1]));
    // stop: the current frame finishes, then nothing more
    enable = 0;
    repeat (300) @(negedge clk);
    check(!out_valid, "still sending after disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
