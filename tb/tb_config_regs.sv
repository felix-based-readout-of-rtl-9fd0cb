// tb_config_regs -- control register write/read-back, the emulator
// timestamp-load pulse, per-channel event counting with read-back at the
// documented addresses, counter clear, and zero from unmapped addresses.
module tb_config_regs;
  import felix_pkg::*;

  localparam int N = 12;
  logic clk = 0, rst = 1;
  reg_req_t reg_req = '0;
  logic [63:0] reg_rdata;
  logic [N-1:0] ch_enable, emu_select;
  logic emu_run, emu_ts_load;
  logic [2:0] emu_fiber;
  logic [4:0] emu_slot;
  logic [7:0] emu_crate;
  logic [62:0] emu_ts;
  ch_events_t ev [N];
  int checks = 0, failures = 0;

  config_regs dut (.*);
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
  task automatic reg_write(input logic [15:0] a, input logic [63:0] d);
    @(negedge clk); reg_req = '{wr: 1, rd: 0, addr: a, wdata: d};
    @(negedge clk); reg_req = '0;
  endtask
  task automatic reg_read(input logic [15:0] a, output logic [63:0] d);
    @(negedge clk); reg_req = '{wr: 0, rd: 1, addr: a, wdata: 0};
    @(negedge clk); reg_req = '0; d = reg_rdata;
  endtask

  int exp_cnt [N][N_EVENTS];
  int ts_loads = 0;
  always @(posedge clk) if (!rst && emu_ts_load) ts_loads++;

  initial begin
    logic [63:0] r;
    for (int c = 0; c < N; c++) begin
      ev[c] = '0;
      for (int e = 0; e < N_EVENTS; e++) exp_cnt[c][e] = 0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    reg_write(16'h000, 64'h3FF);
    reg_write(16'h008, 64'h0F0);
    reg_write(16'h010, {47'b0, 8'd6, 5'd17, 3'd5, 1'b1});
    reg_write(16'h018, 64'h0123_4567_89AB_CDEF);
    check(ch_enable == 12'h3FF && emu_select == 12'h0F0, "enable/select outputs");
    check(emu_run && emu_fiber == 5 && emu_slot == 17 && emu_crate == 6, "emulator control outputs");
    reg_read(16'h000, r); check(r == 64'h3FF, "CH_ENABLE read-back");
    reg_read(16'h008, r); check(r == 64'h0F0, "EMU_SELECT read-back");
    reg_read(16'h010, r); check(r == {47'b0, 8'd6, 5'd17, 3'd5, 1'b1}, "EMU_CTRL read-back");
    reg_read(16'h050, r); check(r == 0, "unmapped address");
    check(emu_ts == 63'h0123_4567_89AB_CDEF && ts_loads == 1, "timestamp load");
    // random event pulses
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        logic [N_EVENTS-1:0] b;
        b = N_EVENTS'($urandom);
        ev[c] = ch_events_t'(b);
        // struct order, msb first: code_err frame_ok crc_err len_err ts_err overflow block
        if (b[5]) exp_cnt[c][0]++;
        if (b[4]) exp_cnt[c][1]++;
        if (b[3]) exp_cnt[c][2]++;
        if (b[2]) exp_cnt[c][3]++;
        if (b[1]) exp_cnt[c][4]++;
        if (b[0]) exp_cnt[c][5]++;
        if (b[6]) exp_cnt[c][6]++;
      end
    end
    @(negedge clk);
    for (int c = 0; c < N; c++) ev[c] = '0;
    for (int c = 0; c < N; c++)
      for (int e = 0; e < N_EVENTS; e++) begin
        reg_read(16'(32'h100 + 32'h40 * c + 8 * e), r);
        check(r == 64'(exp_cnt[c][e]), $sformatf("counter ch%0d ev%0d = %0d exp %0d", c, e,
                                                 r, exp_cnt[c][e]));
      end
    reg_write(16'h020, 64'h1);
    reg_read(16'h100 + 16'h40 * 3 + 8 * 2, r);
    check(r == 0, "counter clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
