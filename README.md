# Spike-timing cipher for hiding audio in RGBA images — SystemVerilog RTL

This is RTL for the programmable-logic half of *SteganoSNN* ("SteganoSNN: SNN-Based
Audio-in-Image Steganography with Encryption", Sahoo, Machado, Oikonomou, Ihianle, Boppu).
The scheme hides 16-bit PCM audio inside a four-channel (RGBA) image. It takes 8 bits from
every pixel: the two least significant bits of each of R, G, B and A. Before a bit reaches the
image it is encrypted with a code book built from the firing times of a leaky
integrate-and-fire (LIF) neuron. A separate KEY stream is produced alongside the image, and
the receiver needs it to decode.

The design has two stream cores:

* **Encryptor** (`steg_encryptor`): takes audio samples and cover pixels and produces stego
  pixels plus KEY words.
* **Decryptor** (`steg_decryptor`): takes stego pixels plus KEY words and gives back the audio,
  bit for bit.

`steganosnn_top` places both cores side by side. In a system, DMA engines connect the cores
to memory, under control of a host processor.

## From a sample to 24 hidden bits

Each audio sample in −32768…32767 becomes six 4-bit symbols. The first is the sign (0 for
positive, 1 for negative), followed by the five decimal digits of the magnitude, most
significant first. So +12345 becomes 0,1,2,3,4,5 and −32768 becomes 1,3,2,7,6,8. The
digits come from a double-dabble binary-to-BCD converter (`digit_extractor`).

Each symbol is then encrypted through the spike code book. Digit *d* is the LIF neuron driven
by the *d*-th constant current level, which fires *d* times in a 61-step (0…60 ms) window.
For each digit one spike was chosen so that its time modulo 16 is non-zero and differs from
that of every other digit:

| digit | spike times (ms)                   | chosen | cipher = chosen mod 16 | KEY = index of chosen spike |
|-------|------------------------------------|--------|------------------------|-----------------------------|
| 0     | –                                  | –      | 0                      | 0                           |
| 1     | 59                                 | 59     | 11                     | 0                           |
| 2     | 39 59                              | 39     | 7                      | 0                           |
| 3     | 31 45 59                           | 45     | 13                     | 1                           |
| 4     | 26 37 48 60                        | 37     | 5                      | 1                           |
| 5     | 23 32 41 50 59                     | 50     | 2                      | 3                           |
| 6     | 20 28 36 44 52 59                  | 44     | 12                     | 3                           |
| 7     | 18 25 32 39 46 52 59               | 52     | 4                      | 5                           |
| 8     | 17 23 29 35 41 47 53 59            | 41     | 9                      | 4                           |
| 9     | 15 21 26 32 37 43 48 54 59         | 54     | 6                      | 7                           |

The spike trains and chosen times are constants in `spike_pattern_rom`. `spike_key_mapper`
derives each digit's code from them:

* the cipher is the low four bits of the chosen time;
* the KEY is the number of spikes before the chosen one.

The sign symbol goes through the same map, so a negative sign is enciphered as digit 1.

The six ciphers, sign first, form a 24-bit string. For +12345 it is
`0000 1011 0111 1101 0101 0010`. The six KEYs form a second 24-bit string, which leaves the
Encryptor as a separate word.

## Dither and embedding

The string is written into three pixels, two bits per channel, in the order R, G, B, A of
pixel 0, then pixel 1, then pixel 2 (`lsb_embedder`). Before the two LSBs of a channel are
overwritten, a small offset is added to it. The offset comes from `pn_dither`, which cycles
0, 1, 2, 0, … once per pixel and applies the same value to all four channels. This
"dithering" breaks up the flat steps that plain bit substitution leaves. A channel that would
pass 255 saturates.

A stego channel therefore differs from its cover by −3…+5. On random cover pixels the RGB
PSNR is 42.2 dB; the publication reports 40.4–41.35 dB on natural images.

Worked example (first pixel of +12345; its payload bits are 00 00 10 11, dither offset 1):

| channel | cover | + offset | LSBs | stego |
|---------|-------|----------|------|-------|
| R       | 150   | 151      | 00   | 148   |
| G       | 200   | 201      | 00   | 200   |
| B       | 75    | 76       | 10   | 78    |
| A       | 253   | 254      | 11   | 255   |

The publication prints 74 for B. Replacing the two LSBs of 76 (01001100) with 10 gives
01001110 = 78. The RTL follows the replacement rule, and its testbench expects 78.

## Decoding and why KEY alone is not enough

The Decryptor reads the two LSBs of each channel back, which gives the six ciphers. Each
cipher then goes with its KEY to a `spike_digit_decoder`. A cipher *r* can only come from a
spike at time *r*, *r*+16, *r*+32 or *r*+48 inside the 0…60 window. For every digit 1–9 and
every such candidate time, the decoder asks three questions:

1. Does the digit's neuron fire at that time?
2. Is that spike number KEY in the digit's train?
3. Is that time the digit's chosen time, i.e. is it in the digit-key map?

Exactly one digit must pass all three. Cipher 0 is digit 0. All 9 × 4 tests run in parallel,
once for each of the six symbols.

The third test matters. With the first two tests alone, three cipher/KEY pairs from the table
are ambiguous:

| pair (cipher, KEY) | correct digit | also matches                          |
|--------------------|---------------|---------------------------------------|
| (7, 0)             | 2             | digit 5, first spike at 23            |
| (5, 1)             | 4             | digit 9, second spike at 21           |
| (12, 3)            | 6             | digit 4, fourth spike at 60           |

In the last case, picking the lowest matching digit would even choose wrongly. The third
test is the "KEY + map" lookup the publication uses in its software decoder, and with it
every pair in the table decodes to exactly one digit. A pair that matches no digit raises
the Decryptor's sticky `decode_error` flag. This happens, for example, when a KEY word is
corrupted. `decode_error` is also raised by a sign symbol other than 0 or 1, and by digits
whose value no 16-bit sample has.

`sample_reassembler` computes sign × Σ dᵢ·10ⁱ and returns the sample.

The publication speaks of the KEY both as "pre-shared" and as values that the Encryptor
outputs and stores for later decoding. This RTL follows the second reading: every sample has
its own KEY word, which travels next to the image.

Two properties of the code book matter when judging its security:

* A digit's KEY depends only on the digit. Anyone who holds the code book can read the
  digits from the KEY words alone.
* The cipher of a digit is fixed, so the cipher stream is a plain substitution of the
  decimal digits.

The secrecy of the scheme therefore rests on keeping the code book and the KEY stream away
from an observer of the image.

## Stream formats and timing

All streams are 32-bit AXI-Stream (`tdata`, `tvalid`, `tready`, `tlast`). A sample occupies
four words on both sides of the Encryptor and on the Decryptor's input. Each master output is a register that holds its word until the word
is taken; an assertion in each core checks this.

| stream            | words per sample                                          |
|-------------------|-----------------------------------------------------------|
| Encryptor in      | sample (two's complement in [15:0]), pixel 0, pixel 1, pixel 2 |
| Encryptor out     | stego pixel 0, 1, 2, KEY word                             |
| Decryptor in      | stego pixel 0, 1, 2, KEY word (the Encryptor's output, unchanged) |
| Decryptor out     | sample, sign-extended to 32 bits                          |

Word layouts:

* **Pixel word:** `{R[31:24], G[23:16], B[15:8], A[7:0]}`.
* **KEY word:** `{8'h00, k0, k1, k2, k3, k4, k5}`, with k0 (the sign's KEY) in [23:20].

`tlast` on any input word of a group is passed on with that group's last output word.

The Encryptor counts the pixels of a frame, from reset or from the word after a `tlast`. When
a frame exceeds `IMG_W`×`IMG_H` pixels (default 1920×1080), it sets its sticky
`frame_overflow` flag.

Timing with no stalls:

* **Encryptor:** one sample every 22 cycles. The audio word takes 1 cycle, the double-dabble
  conversion 16, the hand-over 1, and the three pixels and the KEY word 1 each. Its input
  `tready` is low during the conversion.
* **Decryptor:** one sample every 5 cycles.

Real-time stereo 48 kHz audio (96,000 samples/s) therefore needs a clock of only about
2.2 MHz.

A full-HD frame holds 691,200 samples, i.e. 7.2 s of stereo 48 kHz audio, because each
sample takes three pixels. The publication's figure of "roughly 11 seconds" counts one byte
of audio per pixel, and does not fit this format.

## Files

| file | role |
|------|------|
| `rtl/steg_pkg.sv` | constants (window 61, modulus 16, 6 symbols, 3 pixels per sample), `rgba_t` |
| `rtl/spike_pattern_rom.sv` | spike trains and chosen times of digits 0–9 |
| `rtl/spike_key_mapper.sv` | digit → (cipher, KEY) |
| `rtl/digit_extractor.sv` | sign and five BCD digits, sequential double dabble |
| `rtl/pn_dither.sv` | cyclic 0…`DITHER_MAX` offset |
| `rtl/lsb_embedder.sv` | dither, saturate and replace two LSBs per channel |
| `rtl/steg_encryptor.sv` | Encryptor core |
| `rtl/spike_digit_decoder.sv` | (cipher, KEY) → digit by candidate search |
| `rtl/sample_reassembler.sv` | sign and digits → 16-bit sample |
| `rtl/steg_decryptor.sv` | Decryptor core |
| `rtl/steganosnn_top.sv` | both cores with their stream ports |

Parameters:

* `IMG_W`, `IMG_H`: frame limit, default 1920 × 1080.
* `DITHER_MAX`: dither range, default 2. The publication found 0…3 acceptable as well.
* `SAMPLE_W`, `N_DIGITS`: the digit extractor and reassembler are written for 16-bit samples
  and five digits.

## What is the publication's and what is this design's

These come from the publication:

* the six-symbol digitisation and the double-dabble digit extractor;
* the spike table, the modulo-16 cipher and the index KEY;
* the 0–2 cyclic dither, followed by 2-LSB substitution in R, G, B, A;
* three pixels per sample;
* the candidate search *r* + 16*k*;
* 32-bit streams and the full-HD limit.

The publication describes these cores only by function, so the following are choices made
here:

* the word order and layout of the streams, including the KEY word;
* the handshakes and the cycle timing;
* saturation of dithered channels;
* the dither offset being per pixel and restarting at 0 after reset;
* the frame-capacity flag and the decode-error flag;
* the KEY for digit 0 being 0;
* the map check in the decoder, described above.

In the original system, the spike patterns are produced by a NEST simulation on the host
processor and kept in memory. Here they are fixed in logic, because the publication does not
describe how the cores would load them. The neuron itself is not in the RTL: the publication
runs it in software, and does not give the input current for each digit. The host processor,
the DMA engines and DRAM are also outside the RTL. The publication loads Encryptor and
Decryptor as two separate FPGA configurations; here they share one top.

## Simulation

Each module has a self-checking testbench in `tb/`. Each ends with a line of the form
`TB_RESULT checks=N failures=M`. The reference model the testbenches compare against is
`tb/tb_ref_pkg.sv`. It types the code book in directly and splits samples by integer
division, so it does not reuse the RTL's method.

| testbench | what it shows |
|-----------|---------------|
| `tb_spike_pattern_rom` | every spike of every train, chosen times, distinct non-zero remainders |
| `tb_spike_key_mapper` | the (cipher, KEY) of all digits |
| `tb_digit_extractor` | extremes and 500 random samples; done exactly 16 cycles after start |
| `tb_pn_dither` | offset sequence for ranges 0…2 and 0…3 |
| `tb_lsb_embedder` | the worked example, saturation corners, 2000 random pixels |
| `tb_spike_digit_decoder` | all 256 (cipher, KEY) pairs, including the three ambiguous ones |
| `tb_sample_reassembler` | all 65,536 samples and out-of-range inputs |
| `tb_steg_encryptor` | every output word under random stalls, 22-cycle period, +12345 bit string, frame overflow |
| `tb_steg_decryptor` | 600 random samples under stalls, 5-cycle period, corrupted KEY |
| `tb_steganosnn_top` | end to end at a 6×4 frame: recovered audio, stego bounds, and a count of every mechanism (stalls, back-pressure, each dither offset, saturation, tlast, overflow, decode error) |
| `tb_steganosnn_full` | one full 1920×1080 frame (691,200 samples, 15.2 M cycles, about a minute) at default parameters; prints MSE and PSNR |

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_steganosnn_top -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/steg_pkg.sv tb/tb_ref_pkg.sv tb/tb_steganosnn_top.sv -o sim
./obj_dir/sim
```

All testbenches pass. `verilator --lint-only -Wall` reports only three kinds of warning:

* package constants that a module does not use;
* the two dithered LSBs that `lsb_embedder` overwrites and never reads;
* `rst_n` appearing both in the asynchronous reset and in the `disable iff` of the stream
  assertions. It also elaborates with the slang front end of yosys.
