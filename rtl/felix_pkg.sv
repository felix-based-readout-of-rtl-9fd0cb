// felix_pkg -- constants, types and functions shared by the FELIX ProtoDUNE
// FULL mode firmware.
//
// WIB frame on the link (one 32-bit word per link word slot, byte 0 first):
//   word 0        SOF   : K28.1 (8'h3C) in byte 0, K flag on byte 0
//   words 1..116  payload: WIB header (4 words) + 4 COLDATA blocks of
//                 4 header words and 24 ADC words (64 x 12-bit channels)
//   word 117      CRC-20 in bits [19:0] over the 116 payload words
//   word 118      EOF   : K28.6 (8'hDC) in byte 0
//   word 119      idle  : K28.5 (8'hBC) in byte 0
// The frame length (120 words), the 2 MHz frame rate, the 63-bit timestamp
// stepping by 25 ticks of 20 ns, the four COLDATA blocks of 64 channels of
// 12 bits and the presence of a CRC-20 follow the paper. The position of each
// word and field, the K characters, and the CRC-20 polynomial and seed are
// this design's own choices, since the paper does not give them.
package felix_pkg;

  // ---- frame geometry -------------------------------------------------
  localparam int FRAME_WORDS      = 120;  // words per frame on the link
  localparam int WIB_HDR_WORDS    = 4;
  localparam int CD_BLOCKS        = 4;    // COLDATA blocks per frame
  localparam int CD_HDR_WORDS     = 4;
  localparam int CD_CHANNELS      = 64;   // ADC values per COLDATA block
  localparam int ADC_BITS         = 12;
  localparam int CD_DATA_WORDS    = CD_CHANNELS * ADC_BITS / 32;  // 24
  localparam int CD_WORDS         = CD_HDR_WORDS + CD_DATA_WORDS; // 28
  localparam int PAYLOAD_WORDS    = WIB_HDR_WORDS + CD_BLOCKS * CD_WORDS; // 116
  localparam int CRC_POS          = PAYLOAD_WORDS + 1;  // 117
  localparam int EOF_POS          = PAYLOAD_WORDS + 2;  // 118
  localparam int TS_STEP          = 25;   // 20 ns ticks per 500 ns frame
  localparam int TS_BITS          = 63;

  // payload word indices (0 = first word after SOF)
  localparam int P_ID    = 0;  // [7:0] version, [10:8] fiber, [15:11] WIB slot, [23:16] crate (APA)
  localparam int P_ERR   = 1;  // [15:0] WIB error flags
  localparam int P_TS_LO = 2;  // timestamp[31:0]
  localparam int P_TS_HI = 3;  // timestamp[62:32] in [30:0]
  // COLDATA header word 0: [15:0] convert count, [31:16] error flags
  // COLDATA header word 1: [15:0] checksum A, [31:16] checksum B

  // ---- K characters ---------------------------------------------------
  localparam logic [7:0] K_SOF  = 8'h3C;  // K28.1
  localparam logic [7:0] K_EOF  = 8'hDC;  // K28.6
  localparam logic [7:0] K_IDLE = 8'hBC;  // K28.5

  // ---- DMA side ---------------------------------------------------------
  localparam int BEAT_BITS        = 256;  // Wupper data path width
  localparam int WORDS_PER_BEAT   = BEAT_BITS / 32;  // 8
  localparam int BEAT_BYTES       = BEAT_BITS / 8;   // 32
  localparam int FRAMES_PER_BLOCK = 6;    // "a multiple of 6 being preferred"

  // Decoded link word: 32 data bits, one K flag per byte.
  typedef struct packed {
    logic [3:0]  k;
    logic [31:0] data;
  } link_word_t;

  // Register bus from the PCIe engine: one access per cycle, read data
  // returned on the following cycle.
  typedef struct packed {
    logic        wr;
    logic        rd;
    logic [15:0] addr;   // byte address, 64-bit registers (addr[2:0] ignored)
    logic [63:0] wdata;
  } reg_req_t;

  // One DMA write beat towards the PCIe engine.
  typedef struct packed {
    logic [63:0]          addr;  // host byte address, 32-byte aligned
    logic [BEAT_BITS-1:0] data;
    logic                 last;  // last beat of a burst (one PCIe write)
  } dma_wr_t;

  // Per-channel monitor events, one-cycle pulses counted by config_regs.
  typedef struct packed {
    logic code_err;   // an invalid 8b/10b code group on the link
    logic frame_ok;   // a complete frame was stored for DMA
    logic crc_err;    // a complete frame with a CRC-20 mismatch
    logic len_err;    // a frame cut short or over-long: discarded
    logic ts_err;     // timestamp did not step by 25 from the previous frame
    logic overflow;   // a frame discarded because the buffer had no room
    logic block;      // a block of FRAMES_PER_BLOCK frames released to DMA
  } ch_events_t;
  localparam int N_EVENTS = 7;

  // ---- CRC-20 -----------------------------------------------------------
  // Polynomial x^20+x^15+x^9+x^8+x^7+x^4+x^3+x^2+x+1 (0x8359F), seed
  // 0xFFFFF, data bits fed MSB first, no final inversion.
  localparam logic [19:0] CRC20_POLY = 20'h8359F;
  localparam logic [19:0] CRC20_SEED = 20'hFFFFF;

  function automatic logic [19:0] crc20_word(input logic [19:0] crc,
                                             input logic [31:0] d);
    logic [19:0] c;
    c = crc;
    for (int i = 31; i >= 0; i--) begin
      if (c[19] ^ d[i]) c = (c << 1) ^ CRC20_POLY;
      else              c = c << 1;
    end
    return c;
  endfunction

endpackage
