# Range-matching CAM and voterless TMR for a defective nanotube RAM

Memories built from nanodevices such as carbon-nanotube RAM (NRAM) come out
of fabrication with many defective cells, and the defects come in two kinds.
Some are local: a fabrication disturbance spoils a patch of the array, and
the patch is densely defective. The rest are scattered uniformly. Neither
usual repair copes well with both kinds at once. A defect table that lists
single bad cells grows with the random defect rate. Plain redundancy cannot
mask a dense patch.

This design splits the two jobs:

* **Clusters** are covered by rectangles. Each rectangle is held as four
  bounds (lowest and highest row, lowest and highest column) in a
  *range-matching CAM* (RM-CAM). Any address inside the rectangle is moved, by
  a fixed row and column offset, into a healthy window of the same size. One
  rectangle costs four CAM words, however many defects it holds.
* **Random defects** are masked by triple modular redundancy (TMR) across
  columns. A logical column is stored in three physical columns. The three
  bits of an access are read together, and their majority is returned. A
  row can hold one bad cell among the three and still read correctly.
  The majority is formed without a separate voter gate: three inverters
  drive one shared node, and a final inverter restores the value.

Finding the rectangles and choosing the column triples is done offline on the
tester's defect map. The chip only holds the result in its tables: the CAMs,
a *two-columns ROM* of offsets and a *three-columns ROM* of column triples.
This RTL is that on-chip mapping structure: tables, address path, memory
model and voter.

## The access path

A bit-wide access passes through five phases, one clock cycle each:

```
           phi1              phi2                phi3                  phi4             phi5
row ──┬─> lower/upper ─┐                   ┌─> Adder 0 ─> DEC 0 ──────────────────────> NRAM ─> voter ─> data
      │   row CAM      ├─ AND ─> two-      │    (row+rvec)  word line                   3 bits  (majority)
col ──┼─> lower/upper ─┘  hit[n] columns ──┤                                              ^
      │   column CAM           ROM         └─> Adder 1 ─> DEC 1 ─> three-columns ROM ─────┘
      │                       (rvec,cvec)       (col+cvec)  word line   column selects i, j, k
      └──────── primary row / column address into the adders ────────────────────────────
```

| phase | block | what happens |
|---|---|---|
| phi1 | `cluster_match` (4 × `rmcam_array`) | Both addresses are searched in all four CAMs. `hit[n]` = address lies in rectangle n. |
| phi2 | `two_col_rom` | The hit line selects the cluster's row and column offset. With no hit, both offsets are zero. |
| phi3 | `addr_adder` ×2, `addr_decoder` ×2 | mapped = address + offset (mod 2^ADDR_W), decoded one-hot. |
| phi4 | `three_col_rom` | The mapped column's word gives three one-hot column selects. |
| phi5 | `nram_array`, `inherent_voter` | The three selected cells of the mapped row are read, and their majority is returned. A write stores the bit in all three. |

`phase_gen` produces the five phases as one-hot, one-cycle enables. Each
clocked block captures its result on the edge that ends its phase and then
holds it. The adders and the voter are combinational.

## The range-matching CAM (`rmcam_cell`, `rmcam_entry`, `rmcam_array`)

An ordinary CAM matches on equality. This one has two kinds of word. A lower
word reports `key >= bound`, and an upper word reports `key <= bound`. A
rectangle `[r_lo, r_hi] × [c_lo, c_hi]` is one word in each of four CAMs:
lower row, upper row, lower column and upper column. Its hit line is the AND
of the four match lines, a wired AND in the circuit.

The comparison is a bit-serial chain, most significant bit first:

* Every cell gets `pin`, which says that all more significant bits of key and
  bound are equal. It passes on `pout = pin & (a XNOR b)`. The top cell's
  `pin` is tied to 1.
* All cells of a word share one precharged match line. A cell discharges it
  when it is the first differing bit and the key is on the wrong side:
  * lower cell: `pin & ~a & b`, meaning key < bound;
  * upper cell: `pin & a & ~b`, meaning key > bound.
* If no cell discharges the line, the key satisfies the bound. Equality
  satisfies both kinds of bound, so the ranges are inclusive.

In `rmcam_entry` the shared line is the NOR of the cells' `pull_down`
outputs. `rmcam_array` holds the stored bounds. It writes them like SRAM and
registers the match lines on phi1. After reset a lower word holds all ones
and an upper word all zeros. An unprogrammed rectangle therefore has an
empty range and never hits.

## Placement vectors (`two_col_rom`, `addr_adder`)

The offset ROM has one word per rectangle, with the hit lines as its word
lines. It must output zero when nothing hits. To do that, it stores each
offset *inverted*. Its bit lines are precharged to 1, and a selected cell
that holds 0 pulls its line low. An inverter on each bit line gives the
output. With no word selected, all lines stay high and the inverters output
zero. Configuration writes take the true offset, and the module stores the
complement.

The adders wrap modulo 2^ADDR_W, so an offset can also move a rectangle to
lower addresses. For example, in a 64-column array, +34 moves columns 50..55
to 20..25.

## TMR column triples (`three_col_rom`, `inherent_voter`)

DEC 1 drives the word lines of the three-columns ROM directly, so the ROM has
one word per column. No decoder follows the ROM, so each word holds three
one-hot column-select vectors. These are the RAM's column lines for copies i,
j and k. A column without TMR holds `(c, c, c)`, which is also the reset
value. Its single cell is then read three times, and the vote returns it
unchanged. A configuration write gives three binary column numbers, and the
ROM stores them one-hot.

`inherent_voter` models the analog majority. Three inverters fight over one
node, so the node carries the inverted majority, and a final inverter
restores it. The RTL computes `~node` with `node = ~maj(b0,b1,b2)`.

## Interface and timing (`rmcam_tmr_top`)

* **Access:** a request is taken in cycle t when `req_valid && req_ready`.
  The phases run in cycles t+1..t+5. `rsp_valid` is high for one cycle, in
  cycle t+6. `req_ready` is high when the pipeline is idle and also in the
  phi5 cycle, so back-to-back accesses complete one every five cycles. Along
  with a read's voted bit (`rsp_rdata`), the response carries:
  * the three raw bits (`rsp_bits`);
  * whether a rectangle was hit (`rsp_cluster_hit`);
  * the mapped row and column.
* **Configuration:** `cfg_we` with `cfg_target` (`rmcam_pkg::cfg_target_e`),
  `cfg_idx` and `cfg_data`. Configuration writes are allowed only while no
  access is in flight, and an assertion checks this.

| `cfg_target` | `cfg_idx` | `cfg_data` |
|---|---|---|
| `CFG_LOWER_ROW`, `CFG_UPPER_ROW`, `CFG_LOWER_COL`, `CFG_UPPER_COL` | rectangle | bound in `[ADDR_W-1:0]` |
| `CFG_VEC_ROM` | rectangle | `{row_offset, col_offset}` in `[2*ADDR_W-1:0]` |
| `CFG_TMR_ROM` | logical column | `{i, j, k}` in `[3*ADDR_W-1:0]` |

* **Rules for the tables:** the hardware does not enforce any of these, so
  the offline analysis must keep to them:
  * Rectangles must not overlap. An assertion checks for more than one hit.
  * The healthy target windows must never be used as logical addresses.
  * The spare columns that hold TMR copies must never be used as logical
    addresses.
  * A spare column may serve only one logical column.
* **Defects:** `defect_mask` / `defect_value` (2^ADDR_W × 2^ADDR_W each)
  feed the NRAM model. Where a mask bit is set, that cell reads the stuck
  value. These ports stand in for the physical defects. A real array would
  not have them.

## Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `ADDR_W` | 6 | row and column address width; the array is 2^ADDR_W × 2^ADDR_W bits. 6 gives the 64×64 RAM, 5 the 32×32 RAM; these are the two sizes the structure was characterised for. |
| `CLUSTERS` | 4 | rectangles, i.e. words per CAM (four CAM words per rectangle). No count is given for these sizes; 4 is this design's choice. |

At the defaults the top synthesises to about 1,700 word-level cells and
17,000 flip-flop bits. Most of the flip-flops are the 64×64 array model and
the 64-word × 192-bit column ROM.

## What follows the published structure and what is chosen here

The following come from the published structure:

* the block chain and which phase clocks which block;
* the four CAMs with a wired AND;
* the cell gates, the propagate chain and the shared match line;
* the inverted offset ROM with output inverters;
* the offset adders and the phi3 decoders;
* the three-columns ROM feeding the RAM's three column lines;
* the inverter-based majority.

The following are choices made here where the description is silent:

* one clock cycle per phase, with registered outputs;
* the request/response handshake, pipelining from the phi5 cycle, and the
  configuration port;
* the write path, which writes all three TMR copies;
* reset values;
* wrap-around in the adders;
* one-hot storage in the three-columns ROM;
* decoder cells taking all address bits (the drawn cell has two);
* `CLUSTERS = 4`.

Known departures:

* **Size of the three-columns ROM.** The structure counts *n* ROM words for
  *n* TMR columns. Because DEC 1 drives the ROM's word lines, every column
  needs a word here (2^ADDR_W words), and non-TMR columns hold identity
  triples.
* **Inclusive bounds.** The cell description says the lower cell's result is
  1 when the input is "greater" than the stored value. The drawn gates also
  keep the line high on equality, and the RTL follows the gates.
* **Precharge polarity.** The precharge transistor is drawn with an inverted
  gate, but the text says the line is precharged while the clock pulse is
  high. The RTL models only the evaluated result, so this polarity does not
  matter at this level.
* **No transistor-level behaviour.** Precharge, charge sharing, the inverter
  fight in the voter and the CNT cell's resistance are not modelled. The
  reported figures for the structure (5.6 ns and 6,138 transistors for
  32×32; 6.9 ns and 12,356 transistors for 64×64) are not reproduced by this
  RTL.
* **Not in hardware.** The offline algorithms are not part of this RTL:
  * finding rectangles with a sliding mask, a defect threshold and
    stretching;
  * ranking column triples by "bad rows" (rows where two or more copies are
    defective) and defect count.

  Recovery-rate results for a 256×256 array depend on those algorithms and
  cannot be reproduced here. The RTL itself takes `ADDR_W = 8` for a 256×256
  array.

## Files

* `rtl/rmcam_pkg.sv`: the configuration target and phase encodings.
* `rtl/rmcam_cell.sv`, `rtl/rmcam_entry.sv`, `rtl/rmcam_array.sv`,
  `rtl/cluster_match.sv`: the range-matching CAM.
* `rtl/two_col_rom.sv`, `rtl/addr_adder.sv`, `rtl/addr_decoder.sv`,
  `rtl/three_col_rom.sv`: the mapping path.
* `rtl/nram_array.sv`: a behavioural model of the NRAM array with stuck-at
  defects.
* `rtl/inherent_voter.sv`, `rtl/phase_gen.sv`, `rtl/rmcam_tmr_top.sv`.
* `tb/<module>_tb.sv`: one self-checking testbench per module.
* `tb/rmcam_tmr_32x32_tb.sv`: the whole structure at 32×32.
* `tb/rmcam_tmr_256_tb.sv`: the whole structure at 256×256 with realistic
  defect densities.

## Verification

Every testbench compares against values computed independently inside the
testbench and ends with `TB_RESULT checks=N failures=M`:

* The cell, entry, adder and voter tests are exhaustive. The entry test
  covers all 64×64 key/bound pairs at both 6 and 5 bits.
* The CAM array, rectangle matcher, ROMs, decoder, phase generator and array
  model tests cover every address or word and the hold-without-evaluate
  behaviour.
* `rmcam_tmr_top_tb` runs the whole structure at its default size (64×64).
  * It builds a defect map with two dense clusters (60 % stuck cells) and
    single random defects in four TMR-protected columns.
  * Without repair tables, it shows that reads are corrupted.
  * It then loads two rectangles (one of whose column offsets wraps) and
    four TMR triples. It writes and reads every logical address.
  * It checks each response against a reference model: the mapped address,
    the hit flag, the three raw bits, the voted bit and the 6-cycle latency.
    It also checks that every read returns the written bit.
  * It counts cluster hits, wrapped offsets, pass-through accesses, votes
    that outvoted a bad copy, back-to-back accesses and reads corrupted
    without repair. It fails if any of these counts is zero.
* `rmcam_tmr_32x32_tb` repeats this with `ADDR_W = 5`.
* `rmcam_tmr_256_tb` builds the structure as a 256×256 array (`ADDR_W = 8`).
  * About 7.4 % of the cells are scattered stuck cells, and three
    Gaussian-shaped clusters add about 1.7 %.
  * Logical columns 0..63 are TMR-protected, using physical columns 0..191.
    Logical columns 192..255 are plain.
  * The three clusters are covered by 21×21 rectangles. These are moved
    into windows inside the TMR region, one of them across the column wrap.
  * Every access is checked against the reference model. The test prints
    the share of reads that return the written bit, with TMR only and with
    TMR plus cluster remapping.
  * With the clusters remapped, the share must rise. In one run it was
    15,484 → 15,523 of 15,607 reads on TMR columns and 15,632 → 15,678 of
    16,384 on plain columns.
  * The plain columns keep their scattered defects. That is what the TMR
    columns are for.
  * These shares depend on hand-placed tables, not on the offline search,
    so they are not a repair-rate figure. The run takes about 20 s.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
          --top-module rmcam_tmr_top_tb rtl/rmcam_pkg.sv tb/rmcam_tmr_top_tb.sv
./obj_dir/Vrmcam_tmr_top_tb
```

Replace the top module and file to run another testbench. The full-size
end-to-end test runs in well under a second.
