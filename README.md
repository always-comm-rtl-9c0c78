# always_comm — a camera-and-microphone streamer in logic

always_comm takes frames from a small parallel camera and samples from a microphone and sends
them as UDP packets over 100 Mbit/s Ethernet. Nothing runs in software on the sending side.
The video is coded as Motion-JPEG, so each frame is an independent JPEG image. The coding is
done on a fixed-point pipeline, sixteen by sixteen pixels at a time. The audio is raw 8-bit
samples at 8 kHz.

The receiving side is a PC. It decodes the packets. It gets, per video packet, the coded
coefficients of two 16x16 superblocks and their position in the frame. It gets, per audio
packet, 0.1 s of sound.

The RTL here is SystemVerilog (IEEE 1800-2017). It is written to be synthesised on an FPGA with
three clocks:
- 100 MHz for the codec and audio;
- a faster camera-side clock (200 MHz);
- the 50 MHz RMII clock of the Ethernet PHY.

## 1. The data flow

```
 camera bus ──> pixel_reconstruct ──> frame_buffer (320x180 RGB565, dual clock)
 (clk_camera)                              │ addr_b / bram_pixel (clk_100mhz)
                                           v
        ┌────────────────────── mjpeg_codec ───────────────────────────────┐
        │ jpeg_signal_generator -> ycrcb_converter -> dct_2d (dct_1d)      │
        │   -> quantizer -> zigzag -> entropy_coder (huffman_rom)          │
        │   -> data_aligner -> serializer ──> 32-bit words, valid_block    │
        └──────────────────────────────────────────────────────────────────┘
                                           v                ^ next_packet
                                    video_accumulator (300 x 32 bit)
                                           │ video_ready / ack   (4-phase, to clk_net)
 MCP3008 ADC <─SPI─ spi_con <─ audio_sample_timer (8 kHz)
                      │ 8-bit sample
                      v
                audio_buffer (1024 x 8 bit ring) ── audio_ready / ack ──┐
                                                                        v
                             write_scheduler ──bytes──> tx_scheduler (+crc32) ──> RMII PHY
                                                     (clk_net, 2 bits per cycle)
```

The camera writes the frame buffer at its own pace. The codec reads the frame buffer one
superblock pair at a time. The frame buffer is not locked: a pair can see parts of two
consecutive frames, as with any plain dual-port memory.

The codec does not free-run. It codes one pair, then stops until the network has sent that
pair's packet. When the packet's handshake ends, the video register pulses `next_packet` and the
codec starts on the next pair. So the network paces the frame rate: one pair is coded while
nothing is sent, then sent while nothing is coded. This is simple and needs only one 300-word
register. Section 6 shows that it still gives far more than 30 frames per second.

## 2. Superblock pairs and the block order

A 320x180 frame is padded at the bottom to 192 rows. That gives 20 x 12 superblocks of 16x16
pixels. Superblocks are taken two at a time in raster order, which makes 120 pairs per frame.
The pair index (0..119) is sent with each packet as its sequence byte, so a receiver can place
the pair without counting packets.

Each superblock gives six 8x8 blocks, in this order:
1. Y top-left
2. Y top-right
3. Y bottom-left
4. Y bottom-right
5. Cr
6. Cb

So a packet holds twelve blocks. Chroma is 4:2:0. For each chroma sample, `jpeg_signal_generator`
reads the four pixels of its 2x2 group one after the other. `ycrcb_converter` averages them with
rounding. A Y block is therefore 64 memory reads and a chroma block 256.

Padding rows (row 180 and below) are not read. They are sent as black RGB pixels (0x0000), which
becomes Y = 0 and Cr = Cb = 128 before the level shift.

Only one block is in flight at a time. The generator starts a block only when the serializer
has flushed the previous one (`valid_block`). Because of this, the DCT, the quantiser and the
zigzag unit never see two blocks overlap. Each of those units also asserts that its input
arrives only when it is ready.

## 3. The coding pipeline

### 3.1 Colour conversion

RGB565 is widened to 8 bits per component by repeating the top bits. It is converted with the
JFIF equations in 8-bit fixed point, for example `Y = (77R + 150G + 29B + 128) >> 8`, with the
result clamped. The result is then level-shifted to [-128, 127]. Only the component that the
current block needs is computed.

### 3.2 The DCT

`dct_1d` is an eight-point DCT built as a Chen-style butterfly in five pipeline stages. It takes
eight samples per cycle and returns eight coefficients five cycles later.

The stages are:
1. the even/odd split;
2. the even half;
3. the rotations by C4;
4. the two odd-half rotations;
5. the final output scaling.

The constants are C_k/2 = cos(kπ/16)/2 with 14 fractional bits. The output carries five more
fractional bits than the input.

The output scaling is the JPEG one: ½·C(u)·Σ, with C(0) = 1/√2. Applied in both dimensions this
gives the ¼·C(u)·C(v) of the JPEG 2-D DCT. The paper writes the 2-D formula with a different
normalisation in one place, but its butterfly figure uses the JPEG one, and that is what is
built here.

`dct_2d` runs a single `dct_1d` twice. It takes 64 level-shifted samples in raster order
(64 cycles), then does the rows (8 issues, then the pipeline drains), then the columns. It
streams the 64 coefficients out in raster order. The internal row results are 16 bits wide and
the output is 24 bits with 10 fractional bits.

The testbench checks that one block takes at most 160 cycles from its first input sample to
its last output coefficient.

### 3.3 Quantisation and zigzag

`quantizer` divides each coefficient by the standard JPEG luminance table (for Y) or the
chrominance table (for Cr/Cb). It does this as a multiplication by a rounded 16-bit reciprocal,
rounds to the nearest integer and saturates to 11 bits.

`zigzag` collects the 64 quantised values and reads them out in zigzag order. The zigzag table
in the package is the printed one. The testbench checks it against its own walk of the
anti-diagonals.

### 3.4 Entropy coding

This is where the design departs most from baseline JPEG, on purpose, to keep the coder a
single pass with no look-ahead:

- **DC is coded raw.** The category and value of the DC coefficient itself are sent, with no
  difference from the previous block's DC. Every block is therefore independent, which suits
  packet loss.
- **ZRL on every 16th zero.** The symbol 0xF0 goes out the moment a run reaches sixteen zeros,
  even if only zeros follow. A baseline JPEG coder would hold back trailing ZRLs.
- **EOB is always sent.** If the last coefficient (index 63) is zero, EOB takes its place. If it
  is nonzero, it is coded and EOB follows.
- **Negative values** are sent as the low `category` bits of V−1 (one's complement), as in JPEG.

The code words come from the four standard JPEG tables (DC and AC, luminance and chrominance).
The package holds them in their BITS/HUFFVAL form and builds the code words by the canonical
construction. `huffman_rom` is a 1024-entry ROM indexed by {table, symbol} with a registered
read.

The coder is two cycles deep: a decision stage, then the ROM. Each output carries:
- a Huffman code word (up to 16 bits, left aligned) with its length;
- a value field (up to 11 bits) with its length;
- an end-of-block flag.

A receiver needs the same four tables and the three rules above to decode.

### 3.5 Alignment and serialisation

`data_aligner` packs the code word and the value field into one left-aligned 27-bit word.
`serializer` appends each word to a 64-bit buffer and emits 32-bit words whenever 32 bits or
more are held. At each end of block it flushes what is left as one more word, padded with
zeros. So **every block starts on a 32-bit boundary** in the packet. A receiver decodes block by
block and skips the padding.

The serializer never stalls its input. If a block ends just as a full word goes out, its tail
goes out in the next cycle, and a word arriving in that cycle already starts the next buffer.

## 4. The two registers and their handshakes

`video_accumulator` is the 300 x 32-bit video register. Words are written at the next free
index. After twelve `valid_block`s it raises `video_ready` and holds `num_words` and `seq`.
Words past the 300th are dropped and counted in `video_overflow`.

Three hundred words (1200 bytes) hold the paper's worst case of twelve blocks of 64 raw 11-bit
values (1100 bytes). They do not hold the coded worst case: with long Huffman codes, a block of
pure noise needs more than 25 words. Such a packet is cut short, and the receiver should drop
it. The end-to-end test forces this on purpose.

`audio_buffer` is a 1024-byte ring. Audio is packed 800 bytes (0.1 s) per packet. The other
224 bytes let sampling go on while a packet is being sent. A sample arriving with the ring full
is dropped and counted.

Both registers cross into the 50 MHz network domain by the same four-phase handshake:
1. `*_ready` rises. It is synchronised in the network domain.
2. The write scheduler sends the packet and raises `*_ack`.
3. The register sees the synchronised ack, lowers ready and frees the space. The video register
   also pulses `next_packet`.
4. The scheduler sees ready low and drops ack.

Ready cannot rise again while the old ack is still high. While ready is high, the register
contents and `num_words`/`seq` stay still, so the network side reads them through a plain
synchronous read port.

## 5. The network side

Each packet is one Ethernet frame:

| Field | Bytes | RMII cycles |
|---|---|---|
| Preamble 7 x 0x55 + SFD 0xD5 | 8 | 32 |
| Ethernet header (dst MAC, src MAC, 0x0800) | 14 | 56 |
| IPv4 header (no options, DF set, TTL 64, protocol 17, checksum) | 20 | 80 |
| UDP header (ports, length, checksum 0) | 8 | 32 |
| Tag (0 = audio, 1 = video) and sequence byte | 2 | 8 |
| Payload: 800 audio bytes, or 4 x num_words video bytes (each word MSB first) | ≤ 1470 | ≤ 5880 |
| FCS (CRC-32, least significant byte first) | 4 | 16 |
| Interframe gap | — | 48 |

`write_scheduler` is the frame-building state machine. Its states are:
idle → Ethernet header → IPv4 header → UDP header → tag/sequence → data → wait for ready low.

It produces one byte at a time. It computes the IPv4 header checksum from the packet length.
The addresses and ports are parameters, and the defaults are local addresses for a
point-to-point cable. When both registers are ready at once, audio goes first. An audio packet
carries a running packet count as its sequence byte. A video packet carries its pair index.

`tx_scheduler` turns the bytes into RMII dibits, low pair first, four cycles per byte. It sends
the preamble, then asks for each byte with a one-cycle `tx_ack`. It feeds the bytes to `crc32`
(a 256-entry table, one byte per cycle) and appends the complemented CRC. Then it keeps
`eth_txen` low for the 48-cycle gap.

It also drives the PHY's housekeeping pins:
- `eth_rstn` is held low for 20,000 cycles after reset, and no frame starts before it is
  released;
- `eth_mdc` runs at 50 MHz / 32;
- `eth_mdio` idles at 1, because no management frames are sent.

## 6. Rates and sizes

At the default parameters:

- **Video coding.** A chroma block costs more than a Y block, because it makes 256 frame
  buffer reads instead of 64. A pair of superblocks (8 Y + 4 chroma blocks) takes a few
  thousand cycles at 100 MHz, some tens of microseconds.
- **Video sending.** A 135-byte payload, which the paper reports as its average, is 187 bytes
  on the wire with the gap included. That is about 800 RMII cycles (16 µs).
- **Frame rate.** Coding and sending alternate. With a smooth image (packets of at most
  34 words), the full-size simulation sends 2,124 video packets in 100 ms. That is
  17.7 frames of 120 pairs, or about 177 frames per second, close to the paper's figure of
  about 180. Busier images give longer packets, which take longer to code and
  send. For the smooth image the margin over the 30 frames per second target is almost
  sixfold.
- **Audio.** The ADC clock is 1 MHz. One conversion takes 17 µs against the 125 µs sample
  period. Audio is one 800-byte packet every 0.1 s, or 64 kbit/s.
- **Link load.** At 177 frames per second of 187-byte packets, the link carries about
  32 Mbit/s. It is idle the rest of the time, because sending waits for coding.

## 7. Where this RTL makes its own choices

The paper describes the blocks, their order, the tables, the frame layout and most sizes. The
following are choices made here. Each file's opening comment says the same for its block.

- **Memory interfaces.** The frame buffer and both registers are synchronous one-cycle
  memories. The registers use four-phase handshakes across clock domains, with two-flop
  synchronisers.
- **Block pacing.** The codec handles one block at a time and one pair per `next_packet`. The
  first `next_packet` comes automatically after reset.
- **Colour conversion.** The JFIF coefficients in 8-bit fixed point, and the rounding of the
  chroma mean.
- **DCT arithmetic.** The 14-bit constants, the word widths (16 bits between the passes,
  24-bit output with 10 fractional bits) and the reciprocal quantiser.
- **Flush granularity.** The flush happens at every block, not once per packet.
- **Overflow handling.** Video words past 300 and audio samples arriving at a full ring are
  dropped and counted.
- **Header contents.** The header constants (addresses, ports, identification 0, DF set,
  TTL 64) and the tag values.
- **Arbitration.** Audio goes first when both registers are ready.
- **PHY start-up.** No frame is sent while the PHY is held in reset.
- **Camera bus.** The camera byte order (high byte first) and the line and frame handling of
  href/vsync.
- **ADC transfer.** The SPI clock (1 MHz) and bit timing come from the MCP3008 data sheet.
- **CRC table size.** The CRC table is 256 x 32 bits. The paper describes it as 8 by 255, which
  cannot hold a byte-wise CRC-32.

Not in the RTL:
- the camera, its register set-up ROM and its I2C/SCCB configuration;
- the microphone and its amplifier;
- the ADC itself (a behavioural model of its SPI side is in `tb/`);
- the Ethernet PHY;
- the FPGA clock generators (their clocks are inputs of the top level);
- the receiving PC's software.

## 8. Verification

Every block has a self-checking testbench, `tb/tb_<block>.sv`. Each compares the block against
a model written independently in the testbench. Some examples:
- a real-valued DCT;
- a bit-by-bit serializer;
- the bit-serial CRC-32;
- a Huffman decoder;
- an MCP3008 model.

Each testbench also checks the cycle counts the design depends on. Some checks worth naming:
- `tb_mjpeg_codec` decodes the codec's output and compares every coefficient with a
  floating-point JPEG reference, allowing one quantisation step.
- `tb_always_comm_top` runs the whole streamer at a reduced size. It uses a 32x20 image, short
  audio packets and a 64-word video register. It decodes every Ethernet frame from the RMII pins
  and counts each mechanism of the design, failing if any never happens.
- `tb_always_comm_top_full` runs the streamer at its real size with no parameter changes. It
  covers the first 100 ms of operation: one full audio packet and about 17 full frames of video
  packets (2,124 packets, more than 60,000 checks). It takes about 20 s of wall time.

To run a testbench with plain Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/jpeg_pkg.sv rtl/net_pkg.sv tb/tb_mjpeg_codec.sv --top-module tb_mjpeg_codec
./obj_dir/Vtb_mjpeg_codec +verilator+rand+reset+2
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.

## 9. Files

- `rtl/jpeg_pkg.sv` holds the codec constants, zigzag order, quantisation tables, Huffman
  BITS/HUFFVAL lists and table builders.
- `rtl/net_pkg.sv` holds the frame sizes, state types and CRC table entry.
- Each other file in `rtl/` is one block. `sync_2ff` is the shared two-flop synchroniser.
- `tb/top_checks.svh` is the environment shared by the two system testbenches: camera model,
  ADC model hook-up, RMII receiver, JPEG decoder and reference coder.
