# In-place Burrows–Wheeler transform core

This core computes the Burrows–Wheeler transform (BWT) of fixed-size text
blocks. The block buffer is its only storage. The core keeps no suffix array
and no separate output array. It spends exactly six clock cycles on every
character, whatever the text contains. A block of `N` positions therefore
takes `6*N` cycles. While one block is being transformed, the finished
transform of the previous block streams out of the same buffer.

The RTL follows a published architecture for in-place BWT computation
(Stangherlin and Kennings, "Hardware Architecture for Inplace Compute of
Burrows-Wheeler Transform in a Single Iteration"). That architecture builds on
the in-place BWT algorithm of Crochemore, Grossi, Kärkkäinen and Landau. The
block diagram, the six-cycle schedule, the two-stage adder and the default
block size of 128 come from the publication. The stream handshakes, block
framing, marker code and reset are choices made for this RTL. The section
"Where this RTL departs from or adds to the architecture" lists them.

## The transform, and why it can be done in place

The BWT of a text `T` with a unique, smallest end marker `$` is formed in
three steps:

1. Take all cyclic rotations of `T$`.
2. Sort the rotations.
3. Read off the last character of each sorted rotation.

For example, `banana$` becomes `annb$aa`. Characters that share a following
context end up next to each other in the output, which makes the output easy
to compress. bzip2 is built on this transform.

The in-place algorithm builds the transform of ever longer suffixes of the
text, from right to left. Suppose the buffer holds the BWT of a suffix `X`,
with the marker sitting where `$` belongs. Prepending a character `c` gives
the BWT of `cX` in three steps:

* **Find `p`**, the marker's position. In the new transform, `c` takes
  exactly the place of the old `$`: the rotation that used to end in `$` now
  ends in `c`.
* **Compute the rank `r`** of the new suffix `cX` among all suffixes. It is
  the number of characters smaller than `c` in the whole transform, plus the
  number of `c`s that come before position `p`. Written as one count, it is
  the number of characters `<= c` before `p` plus the number of characters
  `< c` from `p` onwards.
* **Reposition.** Write `c` at `p`. Close the gap at the front by moving
  positions `1 .. r` one place towards position 0. Then put the marker at
  `r`, because the new suffix `cX` is now the rotation that ends in `$`.

Each step is a count or a shift over the whole buffer. In hardware, all
positions do their part at once. The cost per character is constant, and the
cost per block grows linearly.

## Buffer frame of reference

Hardware position 0 always holds the character being inserted. The buffer is
a shift register. A new character enters at position 0, and everything moves
one place towards `N-1`. So at slot `k` of a block (k = 0 .. N-1), the block
being built occupies positions `0 .. k`:

```
position:  0      1 .. k                         k+1 .. N-1
           c      BWT of the suffix so far       previous block's finished BWT,
                  (contains one marker)          leaving at N-1, one per slot
```

In this frame, with `k` the last position of the current block, the rank is

```
r = #{ i in [0, p)  : buf[i] <= c }  +  #{ i in [p, k] : buf[i] < c }
```

The first range includes position 0, where `c` compares equal to itself and
adds one. This accounts for the one shift step that the frame change
introduces. The second range starts at the marker. The marker's own compare
must never count, even though the marker sorts as the smallest symbol. The
marker is therefore coded as `8'hFF`, the largest byte, and the plain
unsigned `<` comparator never counts it. With that code the two ranges are
exactly "0 to p-1" and "p onwards", and `r` needs no correction term. The
price is that text bytes may take only the values `8'h00 .. 8'hFE`.

## Six cycles per character

| cycle | step (`step_e`) | what happens |
|---|---|---|
| 1 | `STEP_LOAD` | The chain shifts right and the new character enters position 0. Position `N-1` (the previous block) is presented on `out_char` and leaves. This is the only cycle that waits for the streams. |
| 2 | `STEP_FIND_P` | The equality comparators flag marker positions. The encoder turns the flags in positions `0 .. k` into the index `p`, which is registered. |
| 3 | `STEP_SUM_LE` | The decoder selects range `[0, p)` on the `<=` flags. The adder forms two partial population counts (low half, high half of the positions) and registers them. |
| 4 | `STEP_SUM_LT` | The adder adds the two `<=` partials into its accumulator, which restarts from zero. The decoder selects `[p, k]` on the `<` flags, and the adder forms and registers their partials. |
| 5 | `STEP_STORE` | The adder adds the `<` partials to the accumulator, giving `r`. The buffer copies position 0 (`c`) to position `p`. |
| 6 | `STEP_SHIFT` | Positions `0 .. r-1` take the value of their right neighbour, and position `r` takes the marker. `k` advances. After slot `N-1`, `block_done` pulses. |

The population count is split into two registered halves. Counting `N` bits
in one cycle is the critical path, so the sum is pipelined. Cycle 4 overlaps
the second half of the `<=` count with the first half of the `<` count.

## Blocks and streams

* **Framing.** Slot 0 of every block loads the marker itself, not an input
  character. A block is therefore `N-1` text bytes plus the marker, and it
  yields `N` output bytes. The marker's place in the output is the primary
  index that an inverse BWT needs. Slot 0 runs the full six cycles. With
  `c` equal to the marker, every step leaves the buffer unchanged, so slot 0
  needs no special case beyond the input multiplexer.
* **Order.** The algorithm runs right to left. The text must therefore
  arrive **last character first**: `banana` is sent as `a n a n a b`. The
  transform also leaves **last position first**: position `N-1` first,
  position 0 last. `out_first` flags the first output byte of each block.
* **Draining.** A finished block leaves only while the next block is
  loaded. To flush the last block, feed one more block of any `N-1` bytes.
  The outputs during the very first block are not flagged valid.
* **Handshakes.** Both streams use valid/ready. A transfer happens on a
  clock edge where both signals are high. In cycle 1 the core loads only
  when it can take an input byte (or it is the marker slot) and can hand
  over an output byte (or there is no previous block). Input and output
  move on the same edge. As a result, `in_ready` depends combinationally on
  `out_ready`, and `out_valid` on `in_valid`. Do not close a combinational
  loop between them outside the core. With both sides always ready the core
  runs at its fixed rate: one byte in and one byte out every 6 cycles.

## Module map

| file | role |
|---|---|
| `rtl/bwt_pkg.sv` | byte type, `END_MARKER = 8'hFF`, step and buffer-operation enums |
| `rtl/bwt_inplace.sv` | top level: wiring, marker insertion, and assertions (no marker code on input, marker found in cycle 2, `r <= k`, output held while stalled) |
| `rtl/bwt_control.sv` | six-step sequencer, slot counter `k`, `p` register, decoder ranges, adder and buffer controls, handshakes |
| `rtl/char_shift_register.sv` | `N` byte registers. Operations: load (shift right), store `c` at `p`, shift `0..r-1` left with the marker at `r` |
| `rtl/comparator_array.sv` | per position: `== marker`, `< c`, `<= c` |
| `rtl/marker_encoder.sv` | one-hot to binary over positions `0 .. k` |
| `rtl/range_decoder.sv` | `[begin, end)` range to per-position selects for the `<=` or `<` flag |
| `rtl/compare_mux_array.sv` | per-position AND-OR mux: selected flag or zero |
| `rtl/popcount_adder.sv` | two half-width population counts, registered, then accumulated |

Every module takes the block length `N` as a parameter. The default is 128,
the size of the published ASIC.

## Cost and rate

At `N = 128` the core has 1070 flip-flops: 1024 buffer bits plus the
controller and adder. That is in line with the about 1.1 k registers the
publication reports for its 128-byte FPGA build. Logic grows linearly with
`N`. Each position has three byte comparators, two range comparators in the
decoder, a shift-select in the buffer, and a share of the adder tree. The
largest fan-outs are `c`, from position 0 to every comparator, and `r`, to
every position's shift enable.

A block always takes `6*N` cycles:

| N | cycles |
|---|---|
| 128 | 768 |
| 1024 | 6144 |
| 4096 | 24576 |
| 8192 | 49152 |

The throughput is `f_clk / 6` bytes per second. For orientation, the
publication reports 345 MHz on a Virtex UltraScale+ device at N = 128,
falling to 69 MHz at N = 8192, and 843 MHz for a 65 nm ASIC at N = 128.
Those reported throughputs are about 15 % above `f_clk / 6`: 66 MB/s at
345 MHz, where `f_clk / 6` gives 57.5 MB/s. The publication does not explain
the difference. This RTL moves exactly one byte per six cycles, and it has
not been put through timing closure.

## Where this RTL departs from or adds to the architecture

* **Marker code.** The code `8'hFF` and the resulting restriction of the
  text to `8'h00 .. 8'hFE` are choices made here. The register count
  reported for the original suggests that it also stores the marker
  in-band in 8 bits.
* **Encoder mask.** The encoder looks only at positions `0 .. k`. Beyond
  `k` the buffer still holds the previous block's transform, and that
  transform contains a marker of its own. The published diagram wires the
  equality flags straight into the encoder.
* **Range ends.** The `<` range ends at `k`, the current end of the block,
  not at `N-1`. The decoder uses end-exclusive ranges, so an empty range
  (`p = 0`) needs no special case.
* **Split of the population count.** The count is split into the low and
  high halves of the positions.
* **Interface choices.** The handshakes, the stall in cycle 1, marker
  insertion by the core, the stream order and draining by the next block
  are all choices made here. So is the asynchronous active-low reset, which
  clears the buffer to zero.
* **Not modelled.** The placed-and-routed 65 nm layout of the publication
  is a physical implementation of the same logic. It is not a separate
  block.

## Verification

Each testbench checks its results on its own and prints
`TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog.

| testbench | what it shows |
|---|---|
| `tb/tb_bwt_inplace.sv` | Full size (N = 128, no parameter override). Nine blocks are checked byte for byte against a brute-force BWT computed in the testbench by sorting all rotations. The texts cover a single repeated byte, two and four symbols, periodic text, the full byte range, the extreme codes `00`/`FE`, and letters. Some phases add random input gaps and output back-pressure. The test checks 768 cycles per block and 6 per character when nothing waits. It counts marker insertions, input stalls, output stalls, marker moves, stores at `p > 0`, and non-zero `<=` and `<` counts, and fails if any of them never happens. |
| `tb/tb_bwt_table1.sv` | `banana` with N = 7 gives `annb$aa`, and a block takes 42 cycles. |
| `tb/tb_bwt_blocksizes.sv` | One random block each at N = 256 and N = 512, against the brute-force BWT, with the `6*N`-cycle block time checked. The helper `tb/bwt_block_runner.sv` takes any `N`. The evaluated sizes 1 kB, 4 kB and 8 kB were not simulated: at N = 1024 the C++ compile of the Verilator model alone takes more than five minutes, because one generated function becomes very large. N = 512 is the largest size simulated. |
| `tb/tb_bwt_control.sv` | The controller compared every cycle with a cycle model of the six steps, under random handshakes. |
| `tb/tb_char_shift_register.sv`, `tb_comparator_array.sv`, `tb_marker_encoder.sv`, `tb_range_decoder.sv`, `tb_compare_mux_array.sv`, `tb_popcount_adder.sv` | Each datapath block against an independent model, with random and corner-case stimulus. |

Run one with Verilator (5.x) from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/bwt_pkg.sv tb/tb_bwt_inplace.sv --top-module tb_bwt_inplace
./obj_dir/Vtb_bwt_inplace
```

The testbenches use only two-state semantics and `$urandom`. All RTL passes
`verilator --lint-only -Wall` with warnings only, none of them about
latches, multiple drivers or loops. It also elaborates with the slang front
end of yosys.

## Changing it

* **Block size.** Set `N` on `bwt_inplace`; any `N >= 2` works. Counter
  widths follow from `$clog2(N)`. Verilator models get slow to build from
  about N = 1024 on. The logic itself scales linearly.
* **Marker code.** `END_MARKER` in `bwt_pkg` must stay the largest byte
  value. Otherwise the `<` count from `p` onwards would count the marker,
  and the ranges in `bwt_control` would have to start at `p+1`.
* **Several blocks in parallel.** The core is self-contained, so several
  instances can take turns on a stream, each handling every m-th block.
