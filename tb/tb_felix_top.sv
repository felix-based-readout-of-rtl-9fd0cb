// tb_felix_top -- end-to-end test of the FELIX firmware at its default size
// (12 lanes, 2 Wupper engines, 2048-word channel buffers).
//
// Lanes 0-7 and 10-11 receive reference WIB frames through a real 8b/10b
// encoder, one frame per 125 cycles (2 MHz at 250 MHz); lanes 8-9 are
// switched to the FULL mode emulator. Injected faults: a CRC-damaged frame
// on lane 1, a cut-short frame on lane 2, a timestamp jump on lane 3, an
// invalid code group on lane 4. The host model gives every lane a 4 KiB
// circular buffer, checks each DMA write against the expected payload
// stream of its lane (whole blocks of 6 frames only), and releases what it
// has read through PC_PTR -- except on lane 10, whose buffer is never
// released, so that its DMA stalls and its channel buffer overflows. Lane 11
// is left disabled. At the end the monitor counters are read back through
// the configuration registers and compared, the data must be complete
// within a fixed number of cycles after the last frame (the firmware keeps
// up with 10 links), and every mechanism must have happened at least once.
module tb_felix_top;
  import felix_pkg::*;
  import tb_wib_pkg::*;

  localparam int NCH = 12, NW = 2;
  localparam int N_FR = 30;                   // frames per link
  localparam int BUFB = 4096;                 // host buffer bytes per lane
  localparam longint BASE = 64'h2_0000_0000;
  localparam int PERIOD = 125;

  logic clk = 0, rst = 1;
  logic [NCH-1:0] rx_valid = '0;
  logic [39:0]    rx_data [NCH];
  reg_req_t       reg_req [NW];
  logic [63:0]    reg_rdata [NW];
  logic [NW-1:0]  wr_valid;
  dma_wr_t        wr [NW];
  logic [NW-1:0]  wr_ready = '0;
  int checks = 0, failures = 0;

  felix_top dut (.*);
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
      if (failures < 15) $display("FAIL %s", msg);
    end
  endtask

  // ---- register access --------------------------------------------------------
  task automatic reg_write(input int w, input logic [15:0] a, input logic [63:0] d);
    @(negedge clk); reg_req[w] = '{wr: 1, rd: 0, addr: a, wdata: d};
    @(negedge clk); reg_req[w] = '0;
  endtask
  task automatic reg_read(input int w, input logic [15:0] a, output logic [63:0] d);
    @(negedge clk); reg_req[w] = '{wr: 0, rd: 1, addr: a, wdata: 0};
    @(negedge clk); reg_req[w] = '0; d = reg_rdata[w];
  endtask

  // ---- expected data -------------------------------------------------------------
  logic [31:0] exp_q [NCH][$];     // payload words of stored frames, in order
  int          exp_frames [NCH];
  logic [31:0] recv [NCH][$];
  longint      nxt [NCH];
  int          beats [NCH];
  int          wraps = 0, stall_cycles = 0, bp_cycles = 0, emu_frames_seen = 0;
  int          link_frames_sent = 0;
  bit          releasing = 0;

  function automatic logic [62:0] ts0(int c); return 63'h100_0000 + 63'(c) * 63'h10_0000; endfunction

  // ---- host memory model -----------------------------------------------------------
  always @(negedge clk) for (int w = 0; w < NW; w++) wr_ready[w] = ($urandom % 20) != 0;

  always @(posedge clk) if (!rst) begin
    for (int w = 0; w < NW; w++) begin
      if (wr_valid[w] && !wr_ready[w]) bp_cycles++;
      if (wr_valid[w] && wr_ready[w]) begin
        int c;
        c = int'((wr[w].addr - BASE) >> 16);
        if (c < w * 6 || c >= w * 6 + 6) check(0, $sformatf("ep%0d write to %h", w, wr[w].addr));
        else begin
          checks++;
          if (wr[w].addr != 64'(nxt[c])) begin
            failures++;
            $display("FAIL lane %0d address %h expected %h", c, wr[w].addr, nxt[c]);
          end
          for (int k = 0; k < 8; k++) recv[c].push_back(wr[w].data[32*k +: 32]);
          beats[c]++;
          if (nxt[c] + 32 == BASE + 64'(c) * 64'h1_0000 + BUFB) begin
            nxt[c] = BASE + 64'(c) * 64'h1_0000;
            wraps++;
          end else nxt[c] += 32;
        end
      end
    end
    // lane 10 has data waiting but its host buffer is full
    if (dut.avail[10] != 0 && !releasing_l10) stall_cycles++;
  end
  bit releasing_l10 = 0;

  // host software: release everything read so far (not lane 10)
  for (genvar w = 0; w < NW; w++) begin : g_rel
    initial begin
      wait (releasing);
      while (releasing) begin
        for (int d = 0; d < 6; d++) begin
          int c;
          longint b, p;
          c = w * 6 + d;
          if (c != 10) begin
            b = longint'(beats[c]) * 32;
            p = BASE + 64'(c) * 64'h1_0000 + b % BUFB;
            reg_write(w, 16'(32 * d + 16), {((b / BUFB) % 2 == 1), 63'(p)});
          end
        end
      end
    end
  end

  // ---- links -------------------------------------------------------------------------
  int t_last_frame = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  for (genvar c = 0; c < NCH; c++) begin : g_link
    initial begin
      link_encoder enc;
      frame_t f;
      logic [62:0] ts;
      enc = new();
      ts = ts0(c);
      exp_frames[c] = 0;
      rx_data[c] = '0;
      wait (!rst);
      repeat (200) @(negedge clk);
      for (int n = 0; n < N_FR; n++) begin
        bit store;
        f = ref_frame(ts, 16'(n), 3'(c % 8), 5'(c), 8'd6);
        store = 1;
        if (c == 1 && n == 7) f[40].data ^= 32'h0001_0000;          // CRC error
        if (c == 3 && n == 9) begin                                 // timestamp jump
          ts += 63'd1000;
          f = ref_frame(ts, 16'(n), 3'(c % 8), 5'(c), 8'd6);
        end
        for (int i = 0; i < FRAME_WORDS; i++) begin
          @(negedge clk);
          rx_valid[c] = 1;
          rx_data[c] = enc.encode(f[i]);
          if (c == 2 && n == 11 && i == 60) break;                 // cut short
        end
        if (c == 2 && n == 11) store = 0;
        for (int i = 0; i < PERIOD - FRAME_WORDS; i++) begin
          @(negedge clk);
          rx_valid[c] = (i % 2 == 0);
          rx_data[c] = enc.encode('{k: 4'b0001, data: 32'hBC});
          if (c == 4 && n == 5 && i == 2) rx_data[c][9:0] = 10'b0000000000;  // bad code group
        end
        if (store && c != 11 && c != 8 && c != 9) begin
          for (int i = 1; i <= PAYLOAD_WORDS; i++) exp_q[c].push_back(f[i].data);
          exp_frames[c]++;
        end
        if (c == 0) link_frames_sent++;
        ts += 25;
      end
      @(negedge clk);
      rx_valid[c] = 0;
      if (c == 0) t_last_frame = cyc;
    end
  end

  // emulator frames, as the lanes selecting it must see them
  localparam logic [62:0] EMU_T0 = 63'h7_0000_0000;
  always @(posedge clk)
    if (!rst && dut.u_emu.out_valid && dut.u_emu.out_word.k == 4'b0001 &&
        dut.u_emu.out_word.data[7:0] == K_SOF) emu_frames_seen++;

  // ---- test sequence -------------------------------------------------------------------
  initial begin
    logic [63:0] r;
    for (int w = 0; w < NW; w++) reg_req[w] = '0;
    for (int c = 0; c < NCH; c++) begin
      nxt[c] = BASE + 64'(c) * 64'h1_0000;
      beats[c] = 0;
    end
    repeat (4) @(negedge clk);
    rst = 0;
    // DMA buffers
    for (int c = 0; c < NCH; c++) begin
      reg_write(c / 6, 16'(32 * (c % 6)),     BASE + 64'(c) * 64'h1_0000);
      reg_write(c / 6, 16'(32 * (c % 6) + 8), BASE + 64'(c) * 64'h1_0000 + BUFB);
    end
    reg_write(0, 16'h00C0, 64'h3F);
    reg_write(1, 16'h00C0, 64'h3F);
    // lanes 8 and 9 from the emulator; lanes 0-10 enabled
    reg_write(0, 16'h1008, 64'h300);
    reg_write(0, 16'h1000, 64'h7FF);
    reg_write(0, 16'h1018, 64'(EMU_T0));
    reg_write(0, 16'h1010, {47'b0, 8'd6, 5'd8, 3'd0, 1'b1});
    reg_read(0, 16'h1008, r);
    check(r == 64'h300, "EMU_SELECT read through endpoint 0");
    releasing = 1;
    wait (t_last_frame != 0);
    // stop the emulator after the same time
    reg_write(0, 16'h1010, 64'h0);
    // everything complete shortly after the last frame: no backlog builds up
    repeat (600) @(negedge clk);
    releasing = 0;
    repeat (20) @(negedge clk);

    // ---- data checks
    for (int c = 0; c < NCH; c++) begin
      int whole, n;
      if (c == 8 || c == 9) begin
        // emulator lanes: whole blocks of the emulator's frame sequence
        whole = (emu_frames_seen / 6) * 6;
        check(recv[c].size() == whole * PAYLOAD_WORDS,
              $sformatf("lane %0d: %0d words, expected %0d frames", c, recv[c].size(), whole));
        for (int k = 0; k < whole && k * PAYLOAD_WORDS < recv[c].size(); k++) begin
          frame_t f;
          bit ok;
          f = ref_frame(EMU_T0 + 63'(25 * k), 16'(k), 3'd0, 5'd8, 8'd6);
          ok = 1;
          for (int i = 0; i < PAYLOAD_WORDS; i++)
            if (recv[c][k * PAYLOAD_WORDS + i] !== f[1+i].data) ok = 0;
          check(ok, $sformatf("lane %0d emulated frame %0d", c, k));
        end
      end else if (c == 10) begin
        // never released: exactly one buffer's worth, then stalled
        check(beats[c] == BUFB / 32, $sformatf("lane 10 wrote %0d beats", beats[c]));
        n = 0;
        for (int i = 0; i < recv[c].size(); i++) if (recv[c][i] !== exp_q[c][i]) n++;
        check(n == 0, $sformatf("lane 10: %0d wrong words", n));
      end else begin
        whole = (exp_frames[c] / 6) * 6;
        check(recv[c].size() == whole * PAYLOAD_WORDS,
              $sformatf("lane %0d: %0d words, expected %0d", c, recv[c].size(),
                        whole * PAYLOAD_WORDS));
        n = 0;
        for (int i = 0; i < recv[c].size(); i++) if (recv[c][i] !== exp_q[c][i]) n++;
        check(n == 0, $sformatf("lane %0d: %0d wrong words", c, n));
      end
    end
    // ---- monitor counters (ch c, event e at 0x1100 + 0x40 c + 8 e)
    begin
      int frames_ok [NCH];
      for (int c = 0; c < NCH; c++) begin
        reg_read(0, 16'(16'h1100 + 16'h40 * c), r);
        frames_ok[c] = int'(r);
      end
      check(frames_ok[0] == N_FR && frames_ok[2] == N_FR - 1 && frames_ok[11] == 0,
            $sformatf("frames stored %0d %0d %0d", frames_ok[0], frames_ok[2], frames_ok[11]));
      reg_read(0, 16'h1100 + 16'h40 * 1 + 8 * 1, r); check(r == 1, $sformatf("lane 1 CRC errors %0d", r));
      reg_read(0, 16'h1100 + 16'h40 * 2 + 8 * 2, r); check(r == 1, $sformatf("lane 2 length errors %0d", r));
      reg_read(0, 16'h1100 + 16'h40 * 3 + 8 * 3, r); check(r == 1, $sformatf("lane 3 timestamp errors %0d", r));
      reg_read(0, 16'h1100 + 16'h40 * 4 + 8 * 6, r); check(r == 1, $sformatf("lane 4 code errors %0d", r));
      reg_read(0, 16'h1100 + 16'h40 * 10 + 8 * 4, r);
      check(r > 0, $sformatf("lane 10 overflow drops %0d", r));
      check(frames_ok[10] + int'(r) == N_FR, "lane 10 stored + dropped");
      reg_read(0, 16'h1100 + 16'h40 * 0 + 8 * 5, r); check(r == N_FR / 6, $sformatf("lane 0 blocks %0d", r));
      reg_read(0, 16'h1100 + 16'h40 * 0 + 8 * 1, r); check(r == 0, "lane 0 CRC errors");
    end
    // DMA write pointer of lane 0 read back through endpoint 0
    reg_read(0, 16'h0018, r);
    check(r[62:0] == 63'(nxt[0]), $sformatf("FW_PTR lane 0 %h exp %h", r, nxt[0]));
    // ---- every mechanism happened
    check(wraps > 0, "no host buffer wrap-around");
    check(stall_cycles > 0, "no DMA stall on a full host buffer");
    check(bp_cycles > 0, "no PCIe back-pressure");
    check(emu_frames_seen >= 24, "emulator sent too few frames");
    $display("mechanisms: wraps=%0d dma_full_stall_cycles=%0d backpressure=%0d emu_frames=%0d",
             wraps, stall_cycles, bp_cycles, emu_frames_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
