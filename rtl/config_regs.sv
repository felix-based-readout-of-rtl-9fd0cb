// config_regs -- configuration registers (control) and monitor counters.
//
// Control registers steer the datapath; monitor counters count the
// per-channel event pulses of the link decoders and Central Router channels.
// Register map (64-bit registers, byte offsets within this block):
//   0x000  CH_ENABLE   (rw)  bit c enables Central Router channel c
//   0x008  EMU_SELECT  (rw)  bit c feeds channel c from the FULL mode
//                            emulator instead of its link
//   0x010  EMU_CTRL    (rw)  [0] emulator run, [3:1] fiber, [8:4] WIB slot,
//                            [16:9] crate (APA) written into emulated frames
//   0x018  EMU_TS      (wo)  load [62:0] as the emulator's timestamp
//   0x020  CNT_CLEAR   (wo)  any write clears all monitor counters
//   0x100 + 0x40*c + 8*e     (ro) 32-bit counter of event e on channel c:
//            e = 0 frames stored, 1 CRC errors, 2 length errors (dropped),
//                3 timestamp-step errors, 4 overflow drops, 5 blocks
//                released to DMA, 6 8b/10b code errors
// Reads return data on the cycle after reg_req.rd; unmapped addresses read 0.
//
// The paper shows a "configuration registers: control and monitor" block
// spanning the firmware, without its contents; the registers and counters
// here are this design's choice of what the blocks built here need.
module config_regs
  import felix_pkg::*;
#(
  parameter int N_CH = 12
) (
  input  logic               clk,
  input  logic               rst,
  input  reg_req_t           reg_req,
  output logic [63:0]        reg_rdata,
  output logic [N_CH-1:0]    ch_enable,
  output logic [N_CH-1:0]    emu_select,
  output logic               emu_run,
  output logic [2:0]         emu_fiber,
  output logic [4:0]         emu_slot,
  output logic [7:0]         emu_crate,
  output logic               emu_ts_load,
  output logic [TS_BITS-1:0] emu_ts,
  input  ch_events_t         ev [N_CH]
);

  logic [31:0] cnt [N_CH][N_EVENTS];

  function automatic logic [N_EVENTS-1:0] ev_bits(input ch_events_t e);
    return {e.code_err, e.block, e.overflow, e.ts_err, e.len_err, e.crc_err, e.frame_ok};
  endfunction

  wire [11:0] a = reg_req.addr[11:0];
  wire        clear = reg_req.wr && a == 12'h020;
  wire [11:0] off   = a - 12'h100;
  wire [$clog2(N_CH)-1:0] rch = off[6 +: $clog2(N_CH)];

  always_ff @(posedge clk) begin
    if (rst) begin
      ch_enable   <= '0;
      emu_select  <= '0;
      emu_run     <= 1'b0;
      emu_fiber   <= '0;
      emu_slot    <= '0;
      emu_crate   <= '0;
      emu_ts_load <= 1'b0;
      emu_ts      <= '0;
      reg_rdata   <= '0;
    end else begin
      emu_ts_load <= 1'b0;
      if (reg_req.wr) begin
        unique case (a)
          12'h000: ch_enable  <= reg_req.wdata[N_CH-1:0];
          12'h008: emu_select <= reg_req.wdata[N_CH-1:0];
          12'h010: {emu_crate, emu_slot, emu_fiber, emu_run} <= reg_req.wdata[16:0];
          12'h018: begin emu_ts <= reg_req.wdata[62:0]; emu_ts_load <= 1'b1; end
          default: ;
        endcase
      end
      if (reg_req.rd) begin
        reg_rdata <= '0;
        if (a == 12'h000)      reg_rdata <= 64'(ch_enable);
        else if (a == 12'h008) reg_rdata <= 64'(emu_select);
        else if (a == 12'h010) reg_rdata <= 64'({emu_crate, emu_slot, emu_fiber, emu_run});
        else if (a >= 12'h100 && a < 12'h100 + 12'(N_CH * 'h40) && a[5:3] < 3'(N_EVENTS))
          reg_rdata <= 64'(cnt[rch][a[5:3]]);
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      logic [N_EVENTS-1:0] b;
      b = ev_bits(ev[c]);
      for (int e = 0; e < N_EVENTS; e++) begin
        if (rst || clear) cnt[c][e] <= '0;
        else if (b[e])    cnt[c][e] <= cnt[c][e] + 32'd1;
      end
    end
  end

endmodule
