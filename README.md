# Entropy-coded event compression for a TDC readout FPGA

A tracking detector read out by time-to-digital converters (TDCs) produces, for
every particle passing through it, a handful of digital pulses on a few of its
channels. The TDC reports each pulse edge as a 32-bit word: 10 bits of fine time
(10 ps units), 11 bits of coarse time (5 ns units), a 7-bit channel number and an
edge bit, plus an extra 32-bit word carrying a 28-bit epoch counter whenever the
epoch changes. For the reference data set (48 channels) this costs about 1170
bits per event, most of it redundant: the channel number is repeated for every
edge, absolute times are written although only differences matter, and
every field gets a fixed width whatever its distribution.

This RTL removes that redundancy inside the readout FPGA itself, so that
links and storage only ever see compressed data:

1. **Relative times.** Every edge time is made relative to the event's earliest
   edge, and each channel's pulses are described by differences: the *start*
   of its first pulse, the *width* of each pulse (rising to falling edge) and the
   *distance* from one pulse's falling edge to the next pulse's rising edge.
2. **Grouping by channel.** Instead of a channel number per edge, the frame
   holds, for every channel in turn, its number of *pulses* followed by its
   values: `start, width, distance, width, distance, width, ...`.
3. **Adaptive binning.** Each value is split into a *bin* (coded by the entropy
   coder) and the offset inside the bin (written as plain bits). Bins have
   power-of-two sizes chosen from recorded statistics: narrow where values are
   frequent, wide where they are rare.
4. **tANS entropy coding.** Bin numbers are coded with tabled asymmetric numeral
   systems (tANS), an entropy coder that reaches fractional bits per symbol
   using only table look-ups, shifts and additions, no multiplier.

Published figures for this scheme, measured on the 48-channel sample data, are
about 455 bits/event with adaptive bins and an accurate entropy coder, against
552 bits/event for fixed bins with Huffman codes and 1170 for the original format. This
implementation was verified on synthetic events. With the sample's pulse-count
statistics it produces about 500 bits/event, where the same events take about
1010 bits/event in the original format.

A diagnostic mode bypasses all of this and sends the unfiltered measurements in the
original word format.

## Block diagram

```
            mode ─┐
 TDC hits ──►(select at event start)─┬─► tdc_time_calc ─► pulse_builder ─► channel_buffer ─► adaptive_binner ─► tans_encoder ─► bit_packer ─┐
 (time sorted,                       │   fine/coarse/     ref, pairing,     group by channel   value -> bin +     tANS bits +     32-bit    ├─► out words
  + end-of-event)                    │   epoch -> t       filter            reversed read-out  low bits           low bits        words     │   (last, nbits,
                                     └─► raw_formatter (diagnostic: original 32-bit words) ─────────────────────────────────────────────────┘    diag)
 cfg port ─► bin tables (adaptive_binner), symbol counts L_s (tans_table_builder ─tbl_wr_if─► tans_encoder tables)
```

| File | Role |
|---|---|
| `rtl/daq_pkg.sv` | field widths, value types, stream structs |
| `rtl/tdc_time_calc.sv` | `t = fine + 500*(coarse + 2048*epoch)` |
| `rtl/pulse_builder.sv` | reference time, rising/falling pairing, start/width/distance, filtering |
| `rtl/channel_buffer.sv` | per-channel storage, reversed read-out of the event's values |
| `rtl/adaptive_binner.sv` | value → (bin, offset, offset width) |
| `rtl/tans_table_builder.sv` | symbol spread and encoding tables from counts L_s |
| `rtl/tbl_wr_if.sv` | write bus builder → encoder |
| `rtl/tans_encoder.sv` | tANS coding step, frame start/end |
| `rtl/bit_packer.sv` | bit fields → 32-bit words |
| `rtl/raw_formatter.sv` | diagnostic-mode words |
| `rtl/daq_compressor.sv` | top level, mode control |

## From edges to values

Input items are TDC hits, sorted in time, followed by an end-of-event marker
(`in_item.eoe = 1`). `tdc_time_calc` turns each hit into one 48-bit time in
10 ps units: because 2048 is a power of two, `coarse + 2048*epoch` is just the
concatenation `{epoch, coarse}`, and `×500` is `(v<<9) - (v<<3) - (v<<2)`.

`pulse_builder` takes the first hit of the event as the reference time `ref`.
Since hits arrive sorted, that is the event's smallest time, so every *start*
is non-negative and one start per event is usually zero. All later arithmetic is
done on 32-bit relative times. For each channel it keeps a pending rising edge
and the falling edge of the last accepted pulse. A falling edge completes a
pulse and produces one record: `width = fall - rise` and either
`start = rise - ref` (the channel's first pulse) or `distance = rise - previous
fall`.

Filtering is part of this stage, because the compressed format can only express
clean rising/falling pairs. Each discarded edge raises one bit of the `drop`
strobe:

| `drop` bit | situation | action |
|---|---|---|
| 0 | rising edge while another is pending | the older rising edge is forgotten |
| 1 | falling edge with no pending rising edge | edge discarded |
| 2 | width above `MAX_WIDTH` (default 2^27−1, about 1.3 ms) | pulse discarded; the next distance is measured from the last *accepted* pulse |
| 3 | channel number ≥ `N_CHANNELS` | edge discarded |

A rising edge still pending at the end of the event is dropped silently.
A channel with more than `MAX_PULSES` (8) pulses keeps its first 8. The others
are dropped in `channel_buffer` and flagged on `overflow`.

## Frame format

Each event becomes one frame: a bit string sent MSB first in 32-bit words.
`out_last` marks the frame's last word and `out_nbits` gives its number of valid
bits. The rest of that word is zero. There is no header: building packets from
frames is left to the next stage of the readout.

**Value order.** Decoded, a frame reads

```
pulses(0), [start, width, {distance, width}...](0), pulses(1), [...](1), ..., pulses(N-1), [...](N-1)
```

with the bracket present only when the pulse count is non-zero. Value types
are pulses, start, width and distance.

**Why the hardware emits it backwards.** A tANS decoder runs in the opposite
direction to the encoder: it starts from the encoder's final state and gets the
symbols last-to-first. The FPGA encodes as data arrive and the decoder (software
on the readout computer) works backwards through the frame. A decoder must know
the type of the next value before decoding it, and that type depends on
pulse counts that come earlier in the order above. So `channel_buffer` reads the
event out in exactly the reverse order:
channel N−1 first, its last pulse first (width, then distance, or start for
pulse 0), then its pulse count. The backward decoder thus sees the order
above.

**Bit fields.** For each value, in coding order, the encoder appends

```
[ tANS state bits : nbBits ][ offset inside the bin : binWidth ]
```

and after the frame's last value (the pulse count of channel 0) also
`[ final state − L : R bits ]`. Every frame starts coding from state `x = L`, so
a correct decode ends in state `L` with all bits consumed.

**Decoding a frame** (the `decode_event` function in `tb/tans_model_pkg.sv` does exactly this):

```
pos = frame bit length;  read(n) = the n bits just before pos, as an MSB-first number; pos -= n
X = read(R)                                   # final state - L
for c in 0..N-1:
    for each value of channel c (pulses first; its count tells how many follow):
        t   = decodingTable[type][X]            # symbol, nbBits, newX
        v   = binStart[type][t.symbol] + read(binWidth[type][t.symbol])
        X   = t.newX + read(t.nbBits)
check pos == 0 and X == 0
```

The four value types share one coder state but use their own tables, so they
interleave freely in one stream.

## tANS in this design

The coder has `L = 2^R` states, `x ∈ [L, 2L)`. The state holds between R and
R+1 bits of information not yet written. A frequent symbol can therefore cost
less than one bit: it often just moves the state without writing anything.
Encoding symbol `s` (one cycle in `tans_encoder`):

```
nbBits = (x + nb[s]) >> (R+1)             # k[s] or k[s]-1 bits
write the nbBits low bits of x
x      = encodingTable[start[s] + (x >> nbBits)]
```

The tables follow from the symbol counts `L_s ≈ L·Pr(s)` (`ΣL_s = L`):

```
k[s]     = R - floor(log2 L_s)
nb[s]    = (k[s] << (R+1)) - (L_s << k[s])
start[s] = -L_s + Σ_{s'<s} L_s'
spread:   X = 0, step = 5L/8 + 3;  for s, L_s times: symbol[X] = s; X = (X + step) mod L
fill:     for x = L..2L-1: s = symbol[x-L]; encodingTable[start[s] + next[s]++] = x   (next[s] from L_s)
```

`tans_table_builder` computes these in hardware, one table entry per cycle.
Building all four value types takes `4·(2M + 2L)` cycles, which is 18 432 at the
defaults. The decoder must rebuild the same spread from the same counts.
Symbols with `L_s = 0` have no states and cannot be coded. The bin tables must
give every value that can occur a bin whose count is not zero.

A small worked example, which the encoder testbench reproduces: `L = 4`, Pr(a)=3/4, Pr(b)=1/4,
`nb = {2, 12}`, `start = {−3, 2}`, `encodingTable = {4, 6, 7, 5}`. Encoding
`baaaabb` from `x = 4` writes `00 · 1 · 0 · 00 · 01` = `00100001` and ends in
`x = 5`.

Defaults: `R = 11` (`L = 2048`) and alphabets of up to `M = 256` symbols. That
keeps at least 8 states per symbol for alphabets of up to 256 symbols, the ratio the
FSE coder uses; 168 adaptive bins give 12 states per symbol. The encoder tables
take 4 × 2048 × 12 bits plus 2 × 4 × 256 small entries.

## Adaptive binning

Bin `i` of a value type covers `binStart[i] … binStart[i] + 2^binWidth[i] − 1`.
Bins are contiguous and sorted. `adaptive_binner` compares the value with every
`binStart` of its type at once. The bin is the number of starts (excluding bin 0)
that are ≤ the value. The offset is `value − binStart[bin]`, written with
`binWidth[bin]` bits. Useful table shapes:

* pulse counts: one zero-width bin per count 0..8;
* start: a zero-width bin holding only 0 (about one start per event is 0),
  then bins growing with the value, and a wide bin at the end for rare large values;
* width: narrow bins around the typical widths;
* simple binning (fixed number of low bits) is the case of equal widths.

A value below bin 0 or beyond the last bin raises `bin_miss`. Its frame then
cannot be decoded, so the tables should end with a catch-all bin (binWidth 32).

## Configuration

All tables are written through one port (`cfg_we`, `cfg_sel`, `cfg_vtype`,
`cfg_addr`, `cfg_data`) while no event is in the compressed path:

| `cfg_sel` | meaning |
|---|---|
| `CFG_BIN_START` (0) | `binStart[vtype][addr] = data` |
| `CFG_BIN_WIDTH` (1) | `binWidth[vtype][addr] = data` (0..32) |
| `CFG_NBINS` (2) | number of bins of `vtype` |
| `CFG_LS` (3) | `L_s[vtype][addr] = data` |

After the counts are written, pulse `build_start`. The input stalls while
`build_busy` is high. `build_err` reports a value type whose counts do not sum to `L`. The bin
boundaries and counts are computed offline from recorded data. A simple rule for
the bins: sort the observed values, then grow each bin's width until it holds at
least a chosen minimum number of values.

## Timing and flow control

All stages are connected by valid/ready streams and run one item per cycle.
Every stage has a registered output except the channel buffer's read side, which
reads its arrays combinationally. An event enters at one hit per cycle. On its
end marker `channel_buffer` reads it out at one value per cycle:
`N_CHANNELS + 2·(accepted pulses)` cycles, about 70 for a typical event of the
reference data. New hits are stalled during this read-out (there is no second buffer).
The packer takes fields of up to 64 bits and sends one word per cycle. A value
rarely needs more than 32 bits, so it keeps up with the encoder.

## Diagnostic mode

With `mode = 1` (sampled at the first item of each event) hits bypass the
compressor. `raw_formatter` sends each measurement unfiltered as a main word, preceded
by an epoch word at the first hit of an event and whenever the epoch changes:

```
main : [31:29]=100 [28:22]=channel [21]=rising [20:10]=coarse [9:0]=fine
epoch: [31:29]=011 [28]=0 [27:0]=epoch
```

`out_diag` marks these words. A mode change waits until the other path has sent
everything it holds. An event without hits produces no words in this mode.

## Choices made here, and limits

The coding step, the table construction, the value types, the binning tables
and the time formula follow the published method. The following are this
implementation's own:

* a frame is one event, starting in state `L` and ending with the final state (R bits);
* values are read out in reverse, as explained above;
* reference time = first hit of the event;
* the exact filtering rules and `MAX_WIDTH`;
* bin search by parallel comparison (a table indexed by the value's top bits,
  with a second level where a bin is not unique, would use fewer comparators);
* `L = 2048` states and up to 256 bins per type;
* the raw word bit layout and its type headers;
* stalling the input during read-out and during table builds.

Not included:

* exception coding for more than 8 pulses on a channel (such pulses are dropped and flagged);
* per-channel or per-channel-class tables, which were found to save about 4% but
  need many table sets;
* pointing at the channel whose start is 0 instead of coding that zero;
* the event's reference time itself is not sent; the frame holds only times relative to it, and a system that needs absolute times must add it (about 3 bytes) in the packet around the frame;
* edges rejected by the filter are not appended to the frame in the original format, only counted on `drop`;
* the final state is always sent in full; no information is carried in the initial state to pay for it;
* checksums or forward error correction;
* packet headers;
* the decoder, which runs in software; a SystemVerilog model of it is in `tb/tans_model_pkg.sv`.

The compression ratio has only been measured on synthetic events, not on detector data.

## Simulating

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. `tb/tans_model_pkg.sv` is an independent model of
table construction, encoding step, bin search and backward decoding, used by
several of them.

| Testbench | What it checks |
|---|---|
| `tb_tdc_time_calc` | time formula on random and extreme inputs, latency 1 |
| `tb_pulse_builder` | start/distance/width against generated pulses, each filter rule counted |
| `tb_channel_buffer` | reversed read-out order, overflow, input stall, one value per cycle |
| `tb_adaptive_binner` | bin/offset against a linear search, miss strobe, latency 1 |
| `tb_tans_table_builder` | nb, start and encoding table equal to the model; build cycle count; error flag |
| `tb_tans_encoder` | the 4-state `baaaabb` example; 5000 random values against the model at L = 2048 |
| `tb_bit_packer` | bit-exact frames, padding, last word and bit count under back-pressure |
| `tb_raw_formatter` | word layout, epoch words, last flag |
| `tb_daq_compressor` | full-size end to end, below |
| `tb_workload_binning` | full size: start values with 237 simple 20-bit bins, then about 168 adaptive bins from the minimal-count rule; frame length equals a software encoder's, every frame decodes |

`tb_daq_compressor` runs the top level with default parameters. It generates 160 events with the
reference pulse-count frequencies, with injected anomalies and 20% of the
events in diagnostic mode. It rebuilds the tables once while events are
waiting. Every compressed frame is decoded backwards by the model and compared value
by value with what was generated. The test also requires each of these to happen
at least once: every filter rule, channel overflow, the stall during a build,
the stall during read-out, output back-pressure, and mode switches both ways. It
runs in under a minute.

`tb_workload_binning` compares the two ways of binning start values. Both run
on the same synthetic events. It prints the average cost of a start value:
about 23.8 bits with 237 simple bins and about 20.8 bits with 170 adaptive bins.
On the detector's own data the published figures are 24.85 and 21.06.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_daq_compressor \
    rtl/daq_pkg.sv rtl/tbl_wr_if.sv rtl/tdc_time_calc.sv rtl/pulse_builder.sv \
    rtl/channel_buffer.sv rtl/adaptive_binner.sv rtl/tans_table_builder.sv \
    rtl/tans_encoder.sv rtl/bit_packer.sv rtl/raw_formatter.sv rtl/daq_compressor.sv \
    tb/tans_model_pkg.sv tb/tb_daq_compressor.sv
./obj_dir/Vtb_daq_compressor
```

For the other testbenches, replace the top module and the last file. The package and
interface files must come first.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `N_CHANNELS` | 48 | top, pulse_builder, channel_buffer | channels handled by one FPGA |
| `MAX_PULSES` | 8 | top, channel_buffer | pulses stored per channel and event |
| `MAX_WIDTH` | 2^27−1 | top, pulse_builder | longest accepted width (10 ps units) |
| `MAX_BINS` | 256 | top, adaptive_binner | bins per value type |
| `R` | 11 | top, tans_table_builder, tans_encoder | L = 2^R coder states |
| `M` | 256 | top, tans_table_builder, tans_encoder | alphabet size (≥ number of bins used) |

The encoder's longest field is `2R + 32` bits and must fit the packer's 64-bit
fields (checked by an assertion), so `R ≤ 16`.
