// wupper_dma -- Wupper DMA engine with its register map (one per PCIe x8
// endpoint; the card has two).
//
// Each of the N_DMA channels writes one Central Router channel continuously
// into its own circular buffer in host memory, so every link lands in a
// separate memory area. A channel's buffer is [START, END) (byte addresses,
// 32-byte aligned). The engine keeps a write pointer FW_PTR; host software
// announces how far it has read with PC_PTR. Bit 63 of both pointers is a
// wrap parity that toggles each time the pointer wraps from END to START:
// equal parities mean FW_PTR is ahead of PC_PTR in the same lap, so
//   free = (END-START) - (FW-PC)  if parities are equal, else  PC - FW.
// The engine never overwrites data the host has not released.
//
// A round-robin arbiter picks the next channel that has released beats and
// room, and sends a burst of
//   min(MAX_BURST, beats available, beats to END, free beats)
// 256-bit beats at consecutive addresses, the last marked 'last' (one PCIe
// memory-write request). The wr stream is valid/ready; while wr_valid is
// high and wr_ready low the beat is held.
//
// Register map (64-bit registers, byte offsets, c = channel 0..N_DMA-1):
//   0x20*c + 0x00  START   (rw)
//   0x20*c + 0x08  END     (rw)
//   0x20*c + 0x10  PC_PTR  (rw)  host read pointer, bit 63 = wrap parity
//   0x20*c + 0x18  FW_PTR  (ro)  firmware write pointer, bit 63 = parity
//   0xC0           ENABLE  (rw)  bit c enables channel c; a 0->1 change
//                                sets FW_PTR and PC_PTR to START, parity 0
// Reads return data on the cycle after reg_req.rd.
//
// From the paper: Wupper does continuous DMA into host memory, 6 DMA
// channels per engine, one memory area per link, and has a register map.
// The pointer scheme, the register offsets, the 256-bit data path and the
// 256-byte burst limit are this design's choices. The PCIe hard block and
// the forming of PCIe transaction packets are not part of this module.
module wupper_dma
  import felix_pkg::*;
#(
  parameter int N_DMA     = 6,
  parameter int AVW       = 9,    // width of ch_avail
  parameter int MAX_BURST = 8     // beats per PCIe write (256 bytes)
) (
  input  logic                 clk,
  input  logic                 rst,
  // from the Central Router channels
  input  logic [AVW-1:0]       ch_avail [N_DMA],
  input  logic [BEAT_BITS-1:0] ch_data  [N_DMA],
  output logic [N_DMA-1:0]     ch_ready,
  // register access from the PCIe engine
  input  reg_req_t             reg_req,
  output logic [63:0]          reg_rdata,
  // memory writes towards the PCIe engine
  output logic                 wr_valid,
  output dma_wr_t              wr,
  input  logic                 wr_ready
);

  localparam int CW = $clog2(N_DMA);
  localparam int BW = $clog2(MAX_BURST + 1);
  localparam logic [15:0] ENABLE_ADDR = 16'h00C0;

  logic [63:0]      start_a [N_DMA];
  logic [63:0]      end_a   [N_DMA];
  logic [62:0]      pc      [N_DMA];
  logic [N_DMA-1:0] pc_par;
  logic [62:0]      fw      [N_DMA];
  logic [N_DMA-1:0] fw_par;
  logic [N_DMA-1:0] enable;

  logic [BW-1:0]    blen    [N_DMA];   // burst length each channel could send
  logic [N_DMA-1:0] eligible;

  logic             busy;
  logic [CW-1:0]    cur, last_ch;
  logic [BW-1:0]    rem;

  // ---- burst sizing -------------------------------------------------------
  always_comb begin
    for (int c = 0; c < N_DMA; c++) begin
      logic [63:0] size, free, to_end, n;
      size   = end_a[c] - start_a[c];
      free   = (fw_par[c] == pc_par[c]) ? size - ({1'b0, fw[c]} - {1'b0, pc[c]})
                                        : {1'b0, pc[c]} - {1'b0, fw[c]};
      to_end = end_a[c] - {1'b0, fw[c]};
      n = 64'(MAX_BURST);
      if (64'(ch_avail[c]) < n) n = 64'(ch_avail[c]);
      if ((to_end >> 5) < n)    n = to_end >> 5;
      if ((free >> 5) < n)      n = free >> 5;
      blen[c]     = BW'(n);
      eligible[c] = enable[c] && n != 0;
    end
  end

  // ---- round-robin choice: first eligible channel after last_ch -------------
  logic          found;
  logic [CW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = 1; i <= N_DMA; i++) begin
      int c;
      c = (int'(last_ch) + i) % N_DMA;
      if (!found && eligible[c]) begin
        found = 1'b1;
        pick  = CW'(c);
      end
    end
  end

  // ---- write stream ----------------------------------------------------------
  assign wr_valid = busy;
  assign wr.addr  = {1'b0, fw[cur]};
  assign wr.data  = ch_data[cur];
  assign wr.last  = rem == 1;

  always_comb begin
    ch_ready = '0;
    ch_ready[cur] = busy && wr_ready;
  end

  wire beat_go = busy && wr_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      cur     <= '0;
      last_ch <= CW'(N_DMA - 1);
      rem     <= '0;
    end else if (!busy) begin
      if (found) begin
        busy    <= 1'b1;
        cur     <= pick;
        last_ch <= pick;
        rem     <= blen[pick];
      end
    end else if (beat_go) begin
      rem <= rem - 1'b1;
      if (rem == 1) busy <= 1'b0;
    end
  end

  // ---- registers and pointers --------------------------------------------------
  wire        reg_sel_ch = reg_req.addr[15:8] == 8'h00 && reg_req.addr[7:5] < 3'(N_DMA)
                           && reg_req.addr < ENABLE_ADDR;
  wire [CW-1:0] reg_ch   = CW'(reg_req.addr[7:5]);
  wire [1:0]    reg_off  = reg_req.addr[4:3];

  always_ff @(posedge clk) begin
    if (rst) begin
      enable <= '0;
      pc_par <= '0;
      fw_par <= '0;
      for (int c = 0; c < N_DMA; c++) begin
        start_a[c] <= '0;
        end_a[c]   <= '0;
        pc[c]      <= '0;
        fw[c]      <= '0;
      end
      reg_rdata <= '0;
    end else begin
      // host writes
      if (reg_req.wr) begin
        if (reg_req.addr == ENABLE_ADDR) begin
          enable <= reg_req.wdata[N_DMA-1:0];
          for (int c = 0; c < N_DMA; c++)
            if (reg_req.wdata[c] && !enable[c]) begin
              fw[c]     <= start_a[c][62:0];
              fw_par[c] <= 1'b0;
              pc[c]     <= start_a[c][62:0];
              pc_par[c] <= 1'b0;
            end
        end else if (reg_sel_ch) begin
          unique case (reg_off)
            2'd0: start_a[reg_ch] <= {reg_req.wdata[63:5], 5'b0};
            2'd1: end_a[reg_ch]   <= {reg_req.wdata[63:5], 5'b0};
            2'd2: begin
              pc[reg_ch]     <= {reg_req.wdata[62:5], 5'b0};
              pc_par[reg_ch] <= reg_req.wdata[63];
            end
            default: ;
          endcase
        end
      end
      // write pointer advance
      if (beat_go) begin
        if ({1'b0, fw[cur]} + 64'(BEAT_BYTES) == end_a[cur]) begin
          fw[cur]     <= start_a[cur][62:0];
          fw_par[cur] <= ~fw_par[cur];
        end else begin
          fw[cur] <= fw[cur] + 63'(BEAT_BYTES);
        end
      end
      // host reads
      if (reg_req.rd) begin
        if (reg_req.addr == ENABLE_ADDR) reg_rdata <= 64'(enable);
        else if (reg_sel_ch)
          unique case (reg_off)
            2'd0: reg_rdata <= start_a[reg_ch];
            2'd1: reg_rdata <= end_a[reg_ch];
            2'd2: reg_rdata <= {pc_par[reg_ch], pc[reg_ch]};
            default: reg_rdata <= {fw_par[reg_ch], fw[reg_ch]};
          endcase
        else reg_rdata <= '0;
      end
    end
  end

  // ---- stream rules -------------------------------------------------------------
  // a beat that is offered stays offered, unchanged, until it is taken
  property p_hold;
    @(posedge clk) disable iff (rst) wr_valid && !wr_ready |=> wr_valid && $stable(wr.addr);
  endproperty
  a_hold: assert property (p_hold) else $error("DMA beat withdrawn before it was taken");
  // writes stay inside the channel's buffer
  a_inside: assert property (@(posedge clk) disable iff (rst)
    wr_valid |-> wr.addr >= start_a[cur] && wr.addr < end_a[cur])
    else $error("DMA write outside its buffer");

endmodule
