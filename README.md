# FELIX FULL-mode readout firmware for a ProtoDUNE-SP anode plane

One anode plane assembly (APA) of the ProtoDUNE single-phase liquid-argon
TPC has 2560 wires, digitised at 2 MHz. Its warm interface boards (WIBs)
send the samples over ten 9.6 Gb/s optical links, each link carrying one
fixed-size frame of 256 channels every 500 ns: 76.8 Gb/s of payload in all.
FELIX is a PCIe card that does as little as possible with this stream: it
checks each frame, strips the link framing and streams the data, link by
link, into circular buffers in the memory of its host PC, where software
does trigger matching and compression.

This repository holds synthesizable SystemVerilog for that card-side data
path: 8b/10b decoding, a frame emulator, frame checking, packing into DMA
blocks, and a six-channel continuous DMA engine per PCIe endpoint, plus
control and monitor registers. The transceivers, the PCIe hard blocks and all
host software are outside the RTL.

## Data path

```
            +-----------------+     +--------+     +-----------------------+     +-----------+
 rx_data -->| dec8b10b_word   |---->|  mux   |---->| central_router_tohost |---->|           |
 (40 bit)   | (per lane)      |     |(per    |     |  wib_frame_checker    |     | wupper_dma|--> wr (256-bit
            +-----------------+     | lane)  |     |  tohost_block_fifo    |     | 6 channels|    beats + host
            +-----------------+     |        |     +-----------------------+     | per       |    address)
            |full_mode_emulator|--->|        |         x 12 lanes                | endpoint  |
            +-----------------+     +--------+                                   +-----------+ x 2
                     config_regs: lane enables, emulator control, monitor counters
```

`felix_top` instantiates 12 lanes (the card's capacity; ProtoDUNE uses 10),
one emulator, two `wupper_dma` engines (lanes 0-5 and 6-11; 2 x PCIe Gen3 x8
= 16 lanes of PCIe) and one `config_regs`. Everything runs on one clock,
meant to be 250 MHz. A link delivers 240 M words/s, so link words come with a
valid strobe rather than on a clock of their own.

## The WIB frame

Every link word is 32 bits plus one K (control character) flag per byte. A
frame is 120 words, one every 500 ns:

| word    | contents |
|---------|----------|
| 0       | SOF: K28.1 (0x3C) in byte 0 |
| 1-4     | WIB header: `[7:0]` version, `[10:8]` fiber, `[15:11]` WIB slot, `[23:16]` crate (APA); error flags; 63-bit timestamp in two words |
| 5-116   | four COLDATA blocks, each 4 header words (`[15:0]` convert count, error flags, checksums) + 24 words holding 64 ADC values of 12 bits packed back to back |
| 117     | CRC-20 of words 1-116 in `[19:0]` |
| 118     | EOF: K28.6 (0xDC) |
| 119     | idle: K28.5 (0xBC) |

The timestamp counts 20 ns ticks, so it rises by 25 from one frame to the
next. The CRC-20 uses polynomial 0x8359F, seed 0xFFFFF, bits fed MSB first,
no final inversion (`felix_pkg::crc20_word`).

What comes from the source: 120 words per frame, 2 MHz, 63-bit timestamp
stepping by 25, four COLDATA blocks of 64 twelve-bit values with headers
holding a convert count and checksums, a CRC-20 checked on the card and not
passed on. The word positions, the K characters, the CRC polynomial and seed
and the ADC bit packing are this design's own; a real WIB may differ, and
`felix_pkg` is the one place to change them. The COLDATA checksum algorithm is
unknown, so it is neither generated (the emulator sends zero) nor checked.

## Checking frames and forming DMA blocks

This is the part with the most subtle behaviour.

`wib_frame_checker` locks onto SOF, passes the 116 payload words on as they
arrive and drops SOF, CRC, EOF and idle words. One cycle after the EOF slot
it gives a verdict: `len_ok` (exactly 116 data words, then a data word, then
EOF; a K character inside the frame or a new SOF first breaks it), `crc_ok`,
and `ts_ok` (timestamp = previous complete frame's + 25; the first frame
after reset passes).

`tohost_block_fifo` writes the payload words of a frame into a 2048-word
buffer while they stream, before the verdict is known, and keeps three
pointers:

* the write pointer moves with each word;
* the commit pointer catches up with it when a frame ends with `len_ok`;
  when a frame breaks, the write pointer falls back to the commit pointer,
  so the frame disappears as if it had never been written;
* the release pointer catches up with the commit pointer after every sixth
  committed frame.

The DMA side sees only released words. Six frames of 116 words are 696
words, exactly 87 beats of 256 bits, so the host always receives whole
blocks of six time slices at fixed offsets and never has to parse frame
boundaries. Frames with a CRC or timestamp error are kept (the host relies on
the fixed layout, and a failed front-end board still yields fixed-size
frames) and only counted. A frame is refused at its first word, whole, if the
channel is disabled or the buffer lacks room for it; the refusal is counted as
an overflow when the channel is enabled.

## Continuous DMA (`wupper_dma`)

Each lane has a circular buffer `[START, END)` in host memory. The engine
writes at `FW_PTR`; host software reports how far it has read in `PC_PTR`.
Bit 63 of both pointers is a wrap parity that flips whenever the pointer
wraps. With equal parities the free space is `(END-START) - (FW-PC)`, with
different ones `PC - FW`; the engine never writes into unreleased data, so a
slow host stalls its lane, and the lane's block buffer then overflows.

A round-robin arbiter picks a lane that has released beats and room and
sends a burst of `min(8, beats available, beats to END, free beats)` beats
to consecutive addresses, `last` on the final one (one PCIe memory write of
up to 256 bytes). `wr_valid/wr_ready` is a valid/ready stream; assertions
check that an offered beat is held until taken and lies inside its buffer.
Between bursts the engine spends one idle cycle.

Register map of each endpoint (64-bit registers, byte offsets):

| offset | register |
|--------|----------|
| 0x20*c + 0x00 | START of lane c's buffer (32-byte aligned) |
| 0x20*c + 0x08 | END |
| 0x20*c + 0x10 | PC_PTR, host read pointer, bit 63 = parity |
| 0x20*c + 0x18 | FW_PTR (read only) |
| 0xC0 | ENABLE, bit c per lane; turning a lane on sets both pointers to START, parity 0 |
| 0x1000-0x1FFF (endpoint 0 only) | `config_regs` |

`config_regs` (offsets from 0x1000): 0x000 lane enables, 0x008 emulator
select per lane, 0x010 emulator run/fiber/slot/crate, 0x018 emulator
timestamp load, 0x020 clear counters, 0x100 + 0x40*lane + 8*e the 32-bit
counters of e = 0 frames stored, 1 CRC errors, 2 length errors, 3 timestamp
errors, 4 overflow drops, 5 blocks released, 6 8b/10b code errors. Reads
return data one cycle after the request.

## Emulator and link decoder

`full_mode_emulator` sends the frame above every 125 cycles (2 MHz at
250 MHz): the 120 words back to back, then 5 empty cycles. It takes its
identifiers and a start timestamp from `config_regs`; ADC channel c (0-255)
carries `(ts[11:0] + 13*c) mod 4096`. Any lane can be switched to it.

`dec8b10b_word` decodes four aligned 10-bit groups per word with the
standard 8b/10b tables (all twelve K characters) and flags groups that are
not codes. It does not check running disparity and does not align: the
transceiver is expected to deliver group 0 in bits [9:0], first bit on the
line in bit 0.

## Throughput

Per endpoint, six lanes deliver 6 x 116 x 32 bit x 2 MHz = 44.5 Gb/s. The
256-bit path at 250 MHz carries 64 Gb/s, 56.9 Gb/s after the idle cycle
between 8-beat bursts, within the ~63 Gb/s of a PCIe Gen3 x8 link. The
end-to-end test checks that with ten busy lanes and 5% PCIe back-pressure,
all data is in host memory within 600 cycles after the last frame.

## Departures and open points

* No clock-domain crossing: the link words are assumed to be brought onto
  the fabric clock by the transceiver interface.
* The Wupper PCIe engine (transaction-packet forming for the vendor's PCIe
  block, register request decoding) is not included; the DMA emits
  address/data beats and takes simple register requests.
* Channel count 12 follows the card's block diagram; the detector uses 10.
* Buffer sizes, register layout, burst length, the bad-frame policy and all
  frame field positions are choices of this design.
* Block memories read combinationally; an FPGA build would prefer a
  registered read and one more pipeline stage.

## Files and simulation

`rtl/felix_pkg.sv` holds the shared constants, types and the CRC function;
each other file in `rtl/` is one module. Each testbench in `tb/` is
self-checking and prints `TB_RESULT checks=N failures=M`; `tb/tb_wib_pkg.sv`
holds the reference frame model and an 8b/10b encoder used by them.

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/felix_pkg.sv tb/tb_wib_pkg.sv tb/tb_felix_top.sv --top-module tb_felix_top
./obj_dir/Vtb_felix_top
```

`tb_felix_top` runs the whole design at its default size: ten lanes of
8b/10b-encoded frames and two emulator lanes, with a CRC error, a cut-short
frame, a timestamp jump and a bad code group injected, host buffers that
wrap, and one lane whose host never reads so that its DMA stalls and its
buffer overflows. It compares every word that reaches host memory and the
monitor counters. The block testbenches are `tb_dec8b10b_word`,
`tb_full_mode_emulator`, `tb_wib_frame_checker`, `tb_central_router_tohost`,
`tb_wupper_dma` and `tb_config_regs`.
