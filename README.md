# PIRM tile: computing inside racetrack memory by transverse read

Racetrack (domain-wall) memory stores bits as magnetic domains along a nanowire and
moves them past fixed access ports by pushing current through the wire. A normal read
senses the one domain under a port. A *transverse read* (TR) senses along the wire
between two ports instead. The resistance it sees depends on how many of those domains
are magnetised one way, so a multi-level sense amplifier can report the **number of
ones** in that stretch. If the ports are seven domains apart, seven rows stored in one
nanowire group can be combined in a single sense:

* OR, NOR, AND, NAND, XOR and XNOR of up to seven operands;
* the sum bit S, carry C and "super carry" C' (bits 0, 1 and 2 of the count). With
  these, one TR per bit position adds five operands: two of the seven domains stay free
  for the carries coming in from lower bits.

This RTL models one PIM-enabled memory tile built this way, at the published size:
16 domain block clusters (DBCs) of 512 nanowires, each wire 57 domains long, with ports
at positions 14 and 20. On top of the raw operations it runs packed multi-operand
addition, multiplication, the maximum used for CNN pooling, and ReLU.

## Structure

```
pirm_tile                      top: one PIM tile
 ├─ pim_sequencer              command port -> one control word per cycle
 ├─ racetrack_dbc  x NDBC      storage: NW nanowires x LEN domains, ports L and R
 └─ tile_periphery             shared by all DBCs of the tile
     ├─ tr_sense_amp  x NW     read / transverse read, 7-level thermometer output
     ├─ pim_column    x NW     PIM gates + selector tree of one bitline
     │   └─ pim_logic          gates that turn the 7 levels into logic, S, C, C'
     ├─ group_or      x 3      per-word OR used for predicates
     └─ local row buffer       NW bits
pirm_pkg                       sizes, enums, the control word and the command
```

Each `rtl/<name>.sv` holds one module or package. Each file opens with a comment on its
behaviour and timing.

## The nanowire and its two ports (`racetrack_dbc`)

A DBC is NW nanowires that always shift together. Position 0 is the left end and
position LEN-1 the right end. Port L sits at position 14 and port R at 20. The seven
domains 14..20, both ports included, form the *segment*. The DBC exposes the segment of
every wire to the sense amplifiers. It does one of these per cycle:

| operation | effect on each enabled wire |
|---|---|
| DW shift left / right | the whole wire moves one position; a zero enters at the open end and the domain at the other end is lost |
| write at L / at R | the domain under that port takes the driver value |
| transverse write (TW) | the driver value is written under L and domains L..R-1 move one place toward R in the same cycle. The old domain under R is pushed out. The rest of the wire stays still. |

A transverse write is how operands get stacked into the segment. Seven TWs in a row
leave the seven most recent rows between the ports, newest under L and oldest under R.
A shift and a write in the same cycle are not allowed, and an assertion checks this.

The DBC is written as plain flip-flops: 16 x 512 x 57 = 466,944 of them in the full tile.
It clears to zero on reset, which the real non-volatile memory would not do.

## Sensing and the PIM gates (`tr_sense_amp`, `pim_logic`)

The sense amplifier turns a count of ones into a thermometer code SA[1..7], with
SA[j] = 1 when at least j ones are in the path. A normal read has only one domain in the
path, so SA[1] is the stored bit. The amplifier is analog in silicon; here it is a
**behavioural model** that counts digitally and latches the code at the clock edge. The
code is held until the next sense, so one TR can feed several result cycles.

The gates are then just decoders of the thermometer code:

```
OR  = SA1             AND  = SA7          XOR (S) = SA1&~SA2 | SA3&~SA4 | SA5&~SA6 | SA7
C   = SA2&~SA4 | SA6  C'   = SA4          NOR, NAND, XNOR = complements
```

S, C and C' are exactly bits 0, 1 and 2 of the count (0..7).

## One bitline: the selector tree (`pim_column`)

Each bitline i has the tree that routes a value to the row buffer and to its own write
driver:

1. A four-input selector chooses one of:
   * the direct value of bitline i-1 (a logical left shift by one bitline);
   * C of bitline i-1;
   * C' of bitline i-2;
   * one of the five local results (NOR, AND, NAND, XOR, XNOR).
2. A two-input selector chooses the direct sense value (the OR, or the read bit) or the
   tree output. The result is **R_i**, which goes to the row buffer and the read port.
3. The driver of bitline i writes either W_i (the row-buffer bit), R_i, or a constant 0.
   The 0 is the "precharged" driver that multiplication uses.

In rows made of packed words, the neighbour inputs simply follow the bitlines. The
tile decides with write enables which bitlines actually take the value.

## The periphery and its predicates (`tile_periphery`)

All DBCs of a tile share one sense amplifier, PIM block, tree and driver per bitline,
plus a 512-bit local row buffer. Rows hold packed words of 2^`word_log2` bits. Bit j of
a word is bitline i with j = i mod 2^`word_log2`. The periphery turns the control word
into per-bitline write enables. Three modes depend on the position inside a word.

**Addition window.** In step k of an addition, after a TR:
* bit k of every word writes S_k under port L;
* bit k+1 writes C_k under port R;
* bit k+2 writes C'_k under port L.

This is the "window of three nanowires" of the carry-save scheme. The carries land in
the two free domains, so the next TR of wire k+1 (or k+2) counts them with the operands.
A carry that would leave the word is dropped.

**Predicated write.** With `wr_pred`, a word is written only where its row-buffer bit
`bit_k` is 0. Multiplication uses this to zero the shifted copies of A where the
multiplier bit b_k is 0. ReLU uses it to zero negative words: first it loads NOT x into
the row buffer.

**Predicated row-buffer reset.** `pred_latch` records, for each word, whether the TR of
its bit `bit_k` saw any one. `RB_PRED` then loads R_i, but clears a whole word when that
flag is set and the word's own bit `bit_k` is 0. That word has lost the race for the
maximum. The flag is kept in one flip-flop per bitline. Another design could compute it
with an AND in a spare DBC; the result is the same.

All three use `group_or`, a log-depth OR over aligned groups of bitlines that
broadcasts its result back to every bitline of the group.

## Commands and timing (`pim_sequencer`, `pirm_tile`)

The tile takes commands on a valid/ready port. Ready is high whenever the sequencer is
idle.

| command | what it does | cycles |
|---|---|---|
| `CMD_PRIM` | applies the `ctrl` word in the accept cycle | 1 |
| `CMD_ADD` | for k = 0..nbits-1: TR of DBC `dbc`, then the add-window write | 2·nbits (16 for 8 bits) |
| `CMD_MAX` | for each bit, MSB first: TR with `pred_latch`, then 7 x (read at R with `RB_PRED`, TW back at L); finally a TR whose OR goes into the row buffer | nbits·(1+3·7)+2 (178 for 8 bits) |

`done_o` pulses in the last cycle of a macro. A primitive cycle names three DBCs:
* `rd_dbc`, the DBC that is sensed;
* `wr_dbc`, the DBC that is written;
* `sh_dbc`, the DBC that is DW-shifted.

So a result read from one DBC can be written into another in the same cycle. Sense
levels are latched at the edge, and the results drawn from them are used from the next
cycle on. Row-buffer loads appear on `rb_o` one cycle later.

### Programs built from primitives

*Bulk-bitwise:* 7 x (load the row buffer, TW), then one TR, then one capture per result
wanted.

*Addition of five packed operands:*
1. TW a zero row, then the five operands, then a zero row. This is 14 cycles
   including the row-buffer loads.
2. `CMD_ADD` with nbits = 8 (16 cycles). The sum ends up in the segment.
3. A read at L returns it.

*Multiplication, 8 x 8 bits in 16-bit fields:*
1. Write A under L. Then seven times: read it, take the logical-shift path into the row
   buffer, DW-shift right, write again. This leaves A<<0..A<<7 in adjacent domains.
2. Load B into the row buffer. Walk back with DW shifts left, doing a predicated zero
   write of copy k where b_k = 0.
3. Shift copies 0..6 into the segment and do one TR. Write S, C and C' into a second
   DBC by TW, using the XOR, carry and super-carry paths.
4. Shift copy 7 under L, read it, and TW it into the second DBC as a fourth operand.
5. Run a 16-bit `CMD_ADD` there.

This takes 99 cycles in the test. The published figure is 64 cycles. Most of the gap is
the one-domain-per-cycle DW shifts of this placement.

*ReLU:* write x at L, read it through the NOR path (NOT x) into the row buffer,
predicated zero write keyed on bit 7, read back.

## Where it departs from the published design

* **One tile only.** The subarray, bank and chip levels are not built: row decoders,
  global wordlines, the hierarchical row buffer and inter-bank copies. The tile's `ext_i`
  and `rb_o` ports stand where the shared row buffer connects. The full memory is 8 GB,
  32 banks x 64 subarrays x 16 tiles, normally with one PIM tile per subarray.
* **Operand loading** takes 14 cycles here: a row-buffer load and a TW per row. The
  published addition counts 10 cycles for it, so the 8-bit five-operand add totals 30
  cycles here against 26 published. The 16 compute cycles match.
* **Multiplication** is a controller program, not a hardware macro. It takes 99 cycles
  against 64 published.
* **The max predicate** is a flip-flop per bitline rather than a value computed in a
  second DBC.
* **Shift and segment conventions** are this design's own. These include which end a
  zero enters on a shift, which domain a TW pushes out (the one under R), and the
  encodings of commands and control.
* **The 2-operand add with TR distance 4** is a different configuration and is not built.
  A TRD=7 tile runs a 2-operand add as a 5-operand add with zero rows.
* **The sense amplifier** is a behavioural model.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pim_logic` | every legal sense code (counts 0..7), each output against count arithmetic |
| `tb_tr_sense_amp` | random segments in every mode, latch hold |
| `tb_group_or` | the per-word OR for every group width, against a direct loop |
| `tb_pim_column` | random selector settings against a reference |
| `tb_racetrack_dbc` | random shifts, port writes and TWs against a reference model (16 wires) |
| `tb_tile_periphery` | the add window, predicated write and predicated reset (32 bitlines) |
| `tb_pim_sequencer` | control words of the macros cycle by cycle, and their lengths |
| `tb_pirm_tile` | end to end on 4 DBCs x 64 wires: bitwise ops, add (16 cycles), logical shift, max (178 cycles), multiply, ReLU; counts every mechanism and fails if one never occurred |
| `tb_bitmap_query` | a bitmap-index query (male AND active in each of the last w weeks, w = 2..4) over 16 slices of 64 users: one 3- to 5-operand AND per slice by a single TR, result rows and the user count checked |
| `tb_pirm_tile_full` | the tile at its default size: 7-operand XOR, a 5-operand add of 64 packed 8-bit words (16 cycles), and a max over seven rows (178 cycles) |

To simulate one with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/pirm_pkg.sv tb/tb_pirm_tile.sv \
          --top-module tb_pirm_tile -Mdir obj && ./obj/Vtb_pirm_tile
```

The full-size tile builds in about 15 s and runs in well under a second. The smaller
testbenches override `NW` and `NDBC` only to keep the output readable. The design is
parameterised in `NDBC`, `NW`, `LEN`, `PORT_L` and `PORT_R`. The port distance must
stay at TRD-1 = 6, which the DBC checks at elaboration.
