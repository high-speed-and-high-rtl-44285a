# Spike-camera reconstruction engine (SSR/FSR)

A spike camera does not take exposures. Each pixel integrates light and fires a 1-bit
spike each time its integrator crosses a threshold, and the sensor reads all pixels out
20,000 times a second. The brightness of a pixel is the firing rate. It can be recovered
as 255 divided by the mean number of frames between spikes, but only over a stretch of
time where the light did not change. This engine finds those stretches in hardware, one
pixel at a time, and turns a 400x250 spike stream into 8-bit images.

## Stability segmentation

The time axis of a pixel is cut into segments that are *stable*.

- **Zero-order stability.** A stream of numbers is stable if it contains only one value,
  or two values that differ by exactly 1. An integrate-and-fire pixel under constant
  light produces intervals of either floor or ceil of 1000/rate, so the intervals of a
  constant stretch pass this test.
- **First-order stability (FSR).** The interval stream S1 (frames between successive
  spikes) of the segment is zero-order stable.
- **Second-order stability (SSR, the default, `ORDER = 2`).** In addition, for each of the
  two interval values, the positions at which it occurs (counted in intervals) are spaced
  in a zero-order stable way. This catches a slowly drifting light level: its intervals
  still alternate between two neighbouring values, but the pattern of alternation changes.

Each new interval is tested against the open segment. If the segment stays stable, the
interval joins it. Otherwise the segment is closed and emitted as a 16-bit record
{duration = sum of its intervals in frames, intensity = floor(255·N/duration)}, and the
interval opens the next segment. The engine adds its own rule: a segment is also closed
when its duration would exceed 255, the range of the 8-bit duration field. The FSR/SSR
tests and the record format are those of the method. The cap, and the treatment of a
pixel that stays dark for 255 frames (it yields an interval of 255), are this
implementation's choices.

The SSR test is incremental. For the two admissible interval values e1 and e2, the module
keeps:

- the index of the value's last occurrence;
- the first one or two distances seen between its occurrences (f1, f2).

A new interval v with distance d from the last v must satisfy d ∈ {f1, f2}, or d must
be the second distance, one away from f1. This is exactly the whole-segment check, done
in constant state. The testbench's reference re-checks every segment from scratch and
agrees on every record.

## Data flow

```
camera, 16 spikes/clock
  -> spike_input_mux -> spike_seq_buffer (32 frame memories x 2 halves, ping-pong)
  -> batch_ctrl (starts a batch every 32 frames)
  -> 7 x uram_reader (share one read port via uram_read_arbiter)
  -> 100 x stability_module (1000 pixels each)
  -> rec_router (record of pixel p goes to writer p mod 4)
  -> 4 x rec_writer (per-pixel record rings, 2 banks each)
  -> 8 x recon_decoder -> frame_out_ctrl (8 pixels per output word, raster order)
```

**Batching.** Spikes arrive in raster order, 16 pixels per clock, so one frame is 6,250
words. Frame t of a batch is written to memory t (of 32), in the half that is filling.
When 32 frames are in, the readers are started on that half while the other half fills.
One read of a word address returns, from all 32 memories at once, 32 consecutive frames
of 16 pixels. So each pixel's 32-frame history comes out as one 32-bit sequence.

**Readers and modules.** Reader r < 6 owns words 1000r..1000r+999 and gives lane j of
each word to module 16r+j, so each of its 16 modules gets one pixel per word. The
seventh reader owns the last 250 words and gives four lanes to each of its four modules.
The seven readers, with 16 modules each except the last with 4, follow the paper's FPGA
design; the exact pixel-to-module mapping is this implementation's own. A module keeps
the segment state of its 1000 pixels in a local memory. It walks the 32 frames of a
sequence in 32 clocks (interval calculator → 4-entry FIFO → stability processor), so a
batch takes about 1000 × 35 clocks. That is far below the 240,000 clocks (1.6 ms at
150 MHz) that the next batch takes to arrive. A batch that arrives while the previous
one is still being read is counted as an overrun.

**Record rings and decoding.** Records enter per-pixel rings of DEPTH = 16 entries. A
record that finds its ring full is dropped and counted. Decoder d rebuilds pixels
p ≡ d (mod 8) and walks them in raster order. For each pixel it:

- shows the current intensity while the current record's duration lasts;
- then pops the next record.

If a frame is due before its record has been written (an *underrun*), the decoder repeats
the last value and remembers a *debt* of one frame. It subtracts the debt from the
duration of the record when that record arrives. Each pixel therefore stays on the true
time axis even after a late record. `frame_out_ctrl` starts output frame f only once
input frame f + LAG (64) has arrived. This is the time a segment needs to close and
pass through a batch. It then packs the eight decoders' values into one output word per
clock, with start-of-frame and end-of-row flags.

## Interface of `spike_recon_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | single clock; asynchronous active-low reset |
| `spk_valid`, `spk_data[15:0]` | in | 16 spikes of consecutive pixels, raster order, bit i = pixel 16·word + i |
| `pix_valid`, `pix_ready`, `pix_data[7:0][7:0]` | out/in/out | 8 reconstructed pixels per word, raster order |
| `pix_sof`, `pix_eol` | out | first word of a frame, last word of a row |
| `status` | out | `recon_status_t`: frames in/out, batches, overruns, last batch time, break counts per rule, dropped records, underruns |

Parameters: `IMG_W`, `IMG_H`, `PIX_PER_MOD`, `BATCH`, `ORDER` (2 = SSR, 1 = FSR),
`DEPTH` (ring size) and `LAG`. The readers are derived from the geometry. The pixels
left after the full readers must split into modules whose lane count divides 16.

After reset, the state memories clear themselves by sweeping through their addresses.
This takes at most 12,500 clocks, and spikes may arrive meanwhile.

## Where this departs from, or goes beyond, the published design

- **Pixel count.** The FPGA description says the 100 modules cover "10,000 (400×250)"
  pixels, but 400×250 = 100,000. This engine follows 400×250, the camera's resolution.
  With 100 modules that gives 1000 pixels per module. It also gives exactly seven
  readers, six of 16 modules and one of 4, as the FPGA description has.
- **Record storage.** 16 records per pixel across 100,000 pixels is 25.6 Mb. That is more
  than the three URAMs per writer the published design gives (about 3.5 Mb in all), so
  a smaller DEPTH with more drops would be needed on that FPGA.
- **Output rate.** A decoder takes three clocks per pixel. A full frame therefore takes
  37,500 clocks, about 4,000 displayed frames/s at 150 MHz, while segmentation keeps up
  with the full 20,000 frames/s. The published design does not state its decoder rate.
- **Own mechanisms.** The following are not taken from the published design:
  - the debt and underrun handling;
  - the ring drop policy;
  - the output lag;
  - the shared buffer read port with round-robin arbitration;
  - the 255-frame segment cap.
- **Not included.** The camera itself, the board's clocking, and the vendor URAM
  primitives. Buffers and rings are plain memory arrays that synthesis maps to RAM.

## Verification

Each block in `rtl/` has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=… failures=…`. The stability module is compared record-by-record with
an independent whole-segment model for both orders; it also checks the break counters
and the clocks per pixel.

`tb_spike_recon_top` runs two reduced engines (16×10 pixels) on integrate-and-fire
stimulus:

- **Engine A** is paced and checked pixel-by-pixel against a reference segmentation.
  Its counts match the reference exactly: 1167 first-order breaks, 413 second-order
  breaks and 106 cap closings. It also checks the batch deadline and the output frame
  rate.
- **Engine B** runs at full rate with tiny rings and a short lag. It must show overruns,
  dropped records and underruns.

`tb_spike_recon_full` runs the engine at its default size (400×250, 100 modules) on a
pattern with a known answer. It streams 66 frames and compares two full output frames,
200,000 pixels. A batch took 36,877–50,193 clocks and an output frame 37,502 clocks.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_spike_recon_top \
    rtl/ssr_pkg.sv tb/tb_spike_recon_top.sv && ./obj_dir/Vtb_spike_recon_top
```

The same works for any other testbench. The full-size build takes about two minutes;
its simulation takes seconds.
