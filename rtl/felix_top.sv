// felix_top -- FELIX I/O card firmware, ProtoDUNE FULL mode.
//
// Data flow, one lane per link (N_CH = 12 lanes; ProtoDUNE uses 10):
//   transceiver word (40 bit, 8b/10b)  -> dec8b10b_word (link ToHost path)
//   -> multiplexer: link or FULL mode emulator (EMU_SELECT bit)
//   -> central_router_tohost: frame check (length, CRC-20, timestamp),
//      CRC stripped, payload packed into 256-bit beats, released to DMA in
//      blocks of 6 frames
//   -> wupper_dma: lanes 0-5 on Wupper 0, lanes 6-11 on Wupper 1; each lane
//      has its own DMA channel and circular buffer in host memory
//   -> memory-write beats to the two PCIe Gen3 x8 endpoints (ports).
// The configuration registers (control and monitor counters) sit behind
// endpoint 0 at byte addresses 0x1000-0x1FFF; below that each endpoint
// reaches its own Wupper register map.
//
// All logic runs on one fabric clock. Link words arrive with rx_valid as a
// clock enable (240 M words/s per 9.6 Gb/s link, so a fabric clock of at
// least 240 MHz, 250 MHz intended). The transceivers, comma alignment and the
// PCIe hard blocks are outside: their parallel sides are this module's ports.
//
// From the paper (Fig. 3): the emulator multiplexed with the link path, 12
// Central Router ToHost paths, 2 Wupper engines with 6 DMA channels each, 2
// PCIe Gen3 x8 interfaces, configuration registers for control and monitor.
// The single clock domain, the register address split and all widths not
// named in felix_pkg are this design's choices.
module felix_top
  import felix_pkg::*;
#(
  parameter int N_WUPPER      = 2,
  parameter int N_DMA         = 6,
  parameter int N_CH          = N_WUPPER * N_DMA,
  parameter int DEPTH_WORDS   = 2048,
  parameter int CLK_PER_FRAME = 125
) (
  input  logic        clk,
  input  logic        rst,
  // transceivers
  input  logic [N_CH-1:0] rx_valid,
  input  logic [39:0]     rx_data   [N_CH],
  // PCIe endpoints: register access in, DMA memory writes out
  input  reg_req_t        reg_req   [N_WUPPER],
  output logic [63:0]     reg_rdata [N_WUPPER],
  output logic [N_WUPPER-1:0] wr_valid,
  output dma_wr_t         wr        [N_WUPPER],
  input  logic [N_WUPPER-1:0] wr_ready
);

  localparam int AVW = $clog2(DEPTH_WORDS / WORDS_PER_BEAT) + 1;

  // ---- configuration registers --------------------------------------------------
  logic [N_CH-1:0]    ch_enable, emu_select;
  logic               emu_run, emu_ts_load;
  logic [2:0]         emu_fiber;
  logic [4:0]         emu_slot;
  logic [7:0]         emu_crate;
  logic [TS_BITS-1:0] emu_ts;
  ch_events_t         ev [N_CH];
  reg_req_t           cfg_req;
  logic [63:0]        cfg_rdata;
  logic               cfg_rd_q;

  always_comb begin
    cfg_req    = reg_req[0];
    cfg_req.wr = reg_req[0].wr && reg_req[0].addr[12];
    cfg_req.rd = reg_req[0].rd && reg_req[0].addr[12];
  end

  config_regs #(.N_CH(N_CH)) u_cfg (
    .clk, .rst, .reg_req(cfg_req), .reg_rdata(cfg_rdata),
    .ch_enable, .emu_select, .emu_run, .emu_fiber, .emu_slot, .emu_crate,
    .emu_ts_load, .emu_ts, .ev
  );

  // ---- FULL mode emulator ---------------------------------------------------------
  logic       emu_valid;
  link_word_t emu_word;

  full_mode_emulator #(.CLK_PER_FRAME(CLK_PER_FRAME)) u_emu (
    .clk, .rst, .enable(emu_run), .ts_load(emu_ts_load), .ts_init(emu_ts),
    .fiber(emu_fiber), .slot(emu_slot), .crate(emu_crate),
    .out_valid(emu_valid), .out_word(emu_word)
  );

  // ---- link lanes ---------------------------------------------------------------------
  logic [AVW-1:0]       avail [N_CH];
  logic [BEAT_BITS-1:0] bdata [N_CH];
  logic [N_CH-1:0]      bready;

  for (genvar c = 0; c < N_CH; c++) begin : g_lane
    logic       dvalid, mvalid;
    link_word_t dword, mword;
    logic [3:0] cerr;
    ch_events_t cev;
    logic       bvalid;

    dec8b10b_word u_dec (
      .clk, .rst, .rx_valid(rx_valid[c]), .rx_data(rx_data[c]),
      .out_valid(dvalid), .out_word(dword), .code_err(cerr)
    );

    // emulator / link multiplexer
    assign mvalid = emu_select[c] ? emu_valid : dvalid;
    assign mword  = emu_select[c] ? emu_word  : dword;

    central_router_tohost #(.DEPTH_WORDS(DEPTH_WORDS)) u_cr (
      .clk, .rst, .enable(ch_enable[c]), .in_valid(mvalid), .in_word(mword),
      .beat_valid(bvalid), .beat_ready(bready[c]), .beat_data(bdata[c]),
      .avail_beats(avail[c]), .ev(cev)
    );

    // the DMA sizes its bursts from avail; beat_valid must agree with it
    a_avail: assert property (@(posedge clk) disable iff (rst) bvalid == (avail[c] != 0));

    always_comb begin
      ev[c]          = cev;
      ev[c].code_err = dvalid && |cerr;
    end
  end

  // ---- Wupper engines ---------------------------------------------------------------
  logic [63:0] wup_rdata [N_WUPPER];

  for (genvar w = 0; w < N_WUPPER; w++) begin : g_wupper
    logic [AVW-1:0]       wav [N_DMA];
    logic [BEAT_BITS-1:0] wdt [N_DMA];
    logic [N_DMA-1:0]     wrd;
    reg_req_t             wreq;

    for (genvar d = 0; d < N_DMA; d++) begin : g_ch
      assign wav[d] = avail[w * N_DMA + d];
      assign wdt[d] = bdata[w * N_DMA + d];
      assign bready[w * N_DMA + d] = wrd[d];
    end

    always_comb begin
      wreq = reg_req[w];
      if (w == 0) begin
        wreq.wr = reg_req[w].wr && !reg_req[w].addr[12];
        wreq.rd = reg_req[w].rd && !reg_req[w].addr[12];
      end
    end

    wupper_dma #(.N_DMA(N_DMA), .AVW(AVW)) u_wupper (
      .clk, .rst, .ch_avail(wav), .ch_data(wdt), .ch_ready(wrd),
      .reg_req(wreq), .reg_rdata(wup_rdata[w]),
      .wr_valid(wr_valid[w]), .wr(wr[w]), .wr_ready(wr_ready[w])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) cfg_rd_q <= 1'b0;
    else if (reg_req[0].rd) cfg_rd_q <= reg_req[0].addr[12];
  end

  always_comb begin
    for (int w = 0; w < N_WUPPER; w++) reg_rdata[w] = wup_rdata[w];
    if (cfg_rd_q) reg_rdata[0] = cfg_rdata;
  end

endmodule
