// tb_wupper_dma -- six-channel DMA engine against a host-memory model.
//
// Each channel is fed numbered beats; buffers of 16 beats (512 bytes) are
// set up through the register map. The host model checks every write: it
// lies in its channel's buffer, follows on from the previous write of that
// channel (wrapping from END to START), carries the next beat of that
// channel, and bursts are at most 8 beats at consecutive addresses with
// 'last' on the final one. The host first does not release anything, so
// every channel must stop after exactly 16 beats (buffer full); it then
// consumes and releases data through PC_PTR, and all 6 x 100 beats must
// arrive. FW_PTR read-back and wrap parity are checked as well.
module tb_wupper_dma;
  import felix_pkg::*;

  localparam int N = 6, AVW = 9;
  localparam int BUF = 512;   // bytes per channel buffer

  logic clk = 0, rst = 1;
  logic [AVW-1:0] ch_avail [N];
  logic [255:0]   ch_data  [N];
  logic [N-1:0]   ch_ready;
  reg_req_t       reg_req = '0;
  logic [63:0]    reg_rdata;
  logic           wr_valid;
  dma_wr_t        wr;
  logic           wr_ready = 0;
  int checks = 0, failures = 0;

  wupper_dma dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
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

  function automatic logic [63:0] start_of(int c); return 64'h1_0000_0000 + 64'(c) * 64'h1000; endfunction

  // channel sources: beat n of channel c = {c, n} replicated
  int produced [N];   // beats made available
  int sent [N];       // beats taken by the DMA
  always_comb
    for (int c = 0; c < N; c++) begin
      ch_avail[c] = AVW'(produced[c] - sent[c] > 255 ? 255 : produced[c] - sent[c]);
      ch_data[c]  = {8{8'(c), 24'(sent[c])}};
    end

  // host model
  longint nxt [N];       // next expected address per channel
  int     got [N];       // beats received
  int     consumed [N];  // beats released by the host
  int     burst_len = 0, burst_ch = -1;
  longint burst_addr;

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < N; c++) if (ch_ready[c]) sent[c]++;
    if (wr_valid && wr_ready) begin
      int c;
      c = int'((wr.addr - 64'h1_0000_0000) >> 12);
      if (c < 0 || c >= N) begin
        check(0, $sformatf("write to %h outside all buffers", wr.addr));
      end else begin
        check(wr.addr == 64'(nxt[c]), $sformatf("ch%0d addr %h exp %h", c, wr.addr, nxt[c]));
        check(wr.data == {8{8'(c), 24'(got[c])}}, $sformatf("ch%0d beat %0d data %h", c,
              got[c], wr.data[31:0]));
        if (burst_len > 0)
          check(c == burst_ch && wr.addr == 64'(burst_addr) + 32, "burst not contiguous");
        burst_ch = c; burst_addr = longint'(wr.addr);
        burst_len = wr.last ? 0 : burst_len + 1;
        check(burst_len < 8, "burst over 8 beats");
        got[c]++;
        nxt[c] = (nxt[c] + 32 == longint'(start_of(c)) + BUF) ? longint'(start_of(c)) : nxt[c] + 32;
      end
    end
  end

  task automatic reg_write(input logic [15:0] a, input logic [63:0] d);
    @(negedge clk); reg_req = '{wr: 1, rd: 0, addr: a, wdata: d};
    @(negedge clk); reg_req = '0;
  endtask
  task automatic reg_read(input logic [15:0] a, output logic [63:0] d);
    @(negedge clk); reg_req = '{wr: 0, rd: 1, addr: a, wdata: 0};
    @(negedge clk); reg_req = '0; d = reg_rdata;
  endtask

  always @(negedge clk) wr_ready = ($urandom % 5) != 0;

  initial begin
    logic [63:0] r;
    for (int c = 0; c < N; c++) begin produced[c] = 0; sent[c] = 0; got[c] = 0; consumed[c] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < N; c++) begin
      reg_write(16'(32 * c), start_of(c));
      reg_write(16'(32 * c + 8), start_of(c) + BUF);
      nxt[c] = longint'(start_of(c));
    end
    reg_read(16'h0048, r);
    check(r == start_of(2) + BUF, "END read-back");
    reg_write(16'h00C0, 64'h3F);
    for (int c = 0; c < N; c++) produced[c] = 100;
    // no release by the host: every channel stops when its buffer is full
    repeat (400) @(negedge clk);
    for (int c = 0; c < N; c++)
      check(got[c] == BUF / 32, $sformatf("ch%0d wrote %0d beats into a full buffer", c, got[c]));
    reg_read(16'h0018, r);
    check(r == {1'b1, start_of(0)[62:0]}, $sformatf("FW_PTR after one lap %h", r));
    // host consumes in steps of 4 beats per channel, round robin
    while (1) begin
      bit all_done;
      all_done = 1;
      for (int c = 0; c < N; c++) begin
        if (consumed[c] + 4 <= got[c]) begin
          longint p;
          consumed[c] += 4;
          p = longint'(start_of(c)) + (consumed[c] * 32) % BUF;
          reg_write(16'(32 * c + 16), {((consumed[c] * 32 / BUF) % 2 == 1), 63'(p)});
        end
        if (got[c] < 100) all_done = 0;
      end
      if (all_done) break;
      @(negedge clk);
    end
    repeat (50) @(negedge clk);
    for (int c = 0; c < N; c++)
      check(got[c] == 100 && sent[c] == 100, $sformatf("ch%0d got %0d sent %0d", c, got[c], sent[c]));
    check(!wr_valid, "writes after all data was sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
