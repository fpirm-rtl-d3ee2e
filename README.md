# FPIRM subarray: integer and floating-point arithmetic inside racetrack memory

Racetrack memory (RM) stores bits as magnetic domains along a nanowire. To read
or write a domain, the wire is shifted until that domain sits under an access
port. If a second access port is placed a few domains away from the first, a
current can be driven through every domain between them. The resistance then
says how many of those domains hold a '1'. This *transverse read* (TR) gives a
ones-count over several stacked rows in one access. That count is enough to
form multi-operand OR, AND and XOR. It also gives the sum and two carries of a
column addition with up to seven inputs.

This RTL builds one memory subarray around that idea. Fifteen tiles are plain
storage. The sixteenth tile has a second access port on every nanowire and a
row-wide compute unit in front of its rowbuffer. A memory controller drives
the subarray with a small command set. With those commands it can run:

- multi-operand bulk logic;
- addition of up to five operands per pass;
- carry-save reduction of seven rows to three;
- integer multiplication from predicated shifted partial products;
- on top of these, IEEE single-precision multiplication and multi-operand
  addition, as used to train a CNN.

A 512-bit row holds eight independent 64-bit words, so each command works on
eight words at once (SIMD).

The design is synthesizable SystemVerilog. Its default parameters are the
full-size organisation: 16 tiles of 512 × 512 bits, a transverse read
distance of 7, and 32 data domains per nanowire.

## 1. Storage organisation

| Level | Contents | RTL |
|---|---|---|
| nanowire | 32 data domains + TRD−1 = 6 overhead domains, so every data row can reach either port | row of `dbc` |
| domain-block cluster (DBC) | 512 nanowires that always shift together; one *row* = the same domain on every wire | `dbc` |
| tile | 16 DBCs × 32 rows = 512 rows of 512 bits | `rm_tile`, `cim_tile` |
| subarray | tiles 0–14 plain, tile 15 compute-capable, plus one global rowbuffer | `fpirm_subarray` |

A DBC remembers its position `pos`, which is the domain under access port
AP0. A shift moves the whole cluster by one domain per clock.

- In the compute tile, AP1 sits TRD−1 = 6 domains further along. The domains
  from AP0 to AP1, seven rows in all, form the *TR window*.
- The transverse read returns a 3-bit count per nanowire (0–7).
- Writes go through either port, with a per-bit mask.
- The domains are not reset, because the memory is non-volatile. Only `pos`
  returns to 0.

Plain tiles (`rm_tile`) have a single port. A row request first shifts the
addressed DBC until the row is under AP0, one domain per cycle, and then
reads or writes. The DBC stays where it was left, so the next access to a
nearby row is short. A request takes |pos − row| + 1 cycles after it is
accepted.

## 2. From a ones-count to logic and arithmetic

`tr_sense_amp` turns the count into seven threshold bits, `ones[k] = (count > k)`.
`cim_logic` derives everything else from those bits with three small
multiplexers. Think of the count as `S + 2·C + 4·C'`:

| count | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| OR = ones0 | 0 | 1 | 1 | 1 | 1 | 1 | 1 | 1 |
| AND = ones6 | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 1 |
| SUM (XOR, S) | 0 | 1 | 0 | 1 | 0 | 1 | 0 | 1 |
| C | 0 | 0 | 1 | 1 | 0 | 0 | 1 | 1 |
| C' = ones3 | 0 | 0 | 0 | 0 | 1 | 1 | 1 | 1 |

The multiplexers are built as follows:

```
M0  = ones1 ? ones2 : ones0        -- parity of counts 0..3
M1  = ones5 ? ones6 : ones4        -- parity of counts 4..7
SUM = ones3 ? M1 : M0
C   = ones3 ? ones5 : ones1
```

Bulk operations with fewer than seven operands work by padding the unused
window rows:

- AND pads with rows of ones.
- OR and XOR pad with rows of zeros.

## 3. The compute unit and the rowbuffer path

The compute unit (`cim_unit`) has one `cim_slice` per nanowire. Each slice
selects what goes into the local rowbuffer from these sources:

| source | meaning |
|---|---|
| `SRC_BYPASS` | plain read of the addressed port (the fast path) |
| `SRC_OR`, `SRC_AND`, `SRC_SUM` | bulk logic of the own TR window |
| `SRC_C` | carry C of nanowire i−1 |
| `SRC_CP` | super carry C' of nanowire i−2 |
| `SRC_NP1`, `SRC_NM1` | plain bit of nanowire i+1 / i−1: logical shift right / left by one |
| `SRC_NP8`, `SRC_NM8` | plain bit of nanowire i+8 / i−8: logical shift by eight |

Bits are numbered so that nanowire i holds bit i of the row, and bit 0 of
each word is its least significant bit. Paths that leave the row read '0'.
When the command sets `lane_iso`, paths that cross a 64-bit word boundary
also read '0'. This keeps the eight packed words independent: a shift
brings in zeros, and a carry out of bit 63 is dropped. A bulk command gives
every slice the same source. The Add step (next section) gives neighbouring
slices different sources.

## 4. Addition along the carry chain, and CSA reduction

This is the least obvious part of the design. An **Add** over bits
`l … l+w−1` of every word works on the seven rows of the TR window of one
DBC:

- row 0 (AP0) starts at zero and ends up holding the sum;
- rows 1–5 hold up to TRD−2 = 5 operands;
- row 6 (AP1) starts at zero and collects carries.

Step b, one clock cycle, reads the transverse count of column b. That column
holds the five operand bits, plus a carry C written into row 6 by step b−1
and a super carry C' written into row 0 by step b−2. So it holds at most
seven ones. The step then makes three writes in the same cycle:

- S_b to row 0 of nanowire b, through AP0;
- C_b to row 6 of nanowire b+1, through AP1;
- C'_b to row 0 of nanowire b+2, through AP0. Row 0 at that bit has not been
  written yet, and it only ever holds C' before its own step runs.

Writes that would go past the top bit `u = l + w` of the word are suppressed.
Each step's write mask selects bit b (and b+1, b+2) of all eight words.
The per-slice source select therefore sets up SUM at b, C at b+1 and C' at
b+2 of every word together. The Add walks the carry chain once, in exactly
w cycles. `cim_sequencer` unrolls one `OP_ADD` command into w `OP_ADD_STEP`
commands, one per cycle. Meanwhile it holds the host off with `cmd_ready`.

**CSA-Reduction** reduces seven rows to three in constant time. Put seven
operands in the window and do three row reads, each written to a free row:

1. SUM gives the bitwise sum.
2. C, taken from nanowire i−1, gives the carry already shifted up one place.
3. C', taken from i−2, gives the super carry shifted up two places.

The three results add up to the same total. This repeats until five or fewer
rows remain, and one Add finishes the job.

## 5. Predication

Each of the eight words has one predication bit (`predication_bits`). It is
loaded from the local rowbuffer at bit 0, 31 or 47 of the word. Two commands
can be predicated, so that only words whose bit is set are affected:

- `OP_WRITE` writes a row;
- `OP_RB_RESET` clears the rowbuffer.

This is the only data-dependent control in the design. Loops, branches and
row placement belong to the controller and are fully unrolled. A word whose
predicate is clear simply keeps its old value.

## 6. Command interface and timing

The host interface is `cmd_valid` / `cmd_ready` / `cmd` (`fpirm_pkg::cmd_t`).
A command is taken on a clock edge where both valid and ready are high.
`grb_q`, `rb_q` and `pred_q` expose the global rowbuffer, the compute tile's
local rowbuffer and the predicates.

| command | effect | cycles |
|---|---|---|
| `OP_SHIFT` | shift compute-tile DBC `dbc` one domain (`dir` 1 = towards higher rows) | 1 |
| `OP_ROW` | local RB ← compute-unit output for source `src` at port `ap` | 1 |
| `OP_WRITE` | row under port `ap` ← local RB (optionally predicated) | 1 |
| `OP_ADD` | Add over `width` bits from `bitpos` in DBC `dbc` | `width` |
| `OP_ADD_STEP` | one carry-chain step (normally issued by the sequencer) | 1 |
| `OP_PRED_LOAD` | predicates ← local RB bit 0 / 31 / 47 (`psrc`) | 1 |
| `OP_RB_RESET` | local RB ← 0 (optionally predicated) | 1 |
| `OP_RB_FROM_G`, `OP_G_FROM_RB` | copy between local and global rowbuffer | 1 |
| `OP_G_LOAD` | global RB ← `cmd.data` (host write) | 1 |
| `OP_TILE_READ`, `OP_TILE_WRITE` | global RB ↔ row `row` of DBC `dbc` in plain tile `tile` | \|shift\| + 2 |

Results are visible one clock edge after a command is accepted. A plain-tile
access holds `cmd_ready` low while its DBC shifts. The host sees this as a
stall. Only one plain-tile access is in flight at a time.

Compute-tile commands take no tile or row address. The host first aligns the
DBC with `OP_SHIFT` commands, so that the wanted row (or window) sits under
AP0. It tracks each DBC's position itself. This mirrors the physical device,
where every shift is an explicit operation that costs time and energy.

## 7. Programs built from the commands

The host programs below live in the testbenches. They are written as
ordinary SystemVerilog tasks (`rd`, `wr`, `copy`, `bulk2`, `add_window`) and
run on the full-size subarray.

**Integer multiply** (`tb_fpirm_subarray`, 8-bit operands in eight words):

1. For each bit j of A, load the predicate from bit 0 of A, shifted right by
   j.
2. Under that predicate, keep a copy of B shifted left by j as a partial
   product. Otherwise write zero.
3. Reduce the partial products 7 → 3 with CSA-Reduction until at most five
   remain.
4. Sum them with one Add.

Taking the predicate from bit 0 keeps the predicate source fixed.

**FP32 multiply** (`tb_fp_multiply`, eight products per row):

1. Extract the mantissas with bulk AND / OR: `(x AND 0x7FFFFF) OR 0x800000`.
2. Multiply the mantissas with a 24-bit integer Multiply. This gives a 48-bit
   product.
3. Load the predicate from bit 47 of the product. Under it, shift the product
   right by one.
4. Compute the exponent with one 8-bit Add from bit 23. It adds both exponent
   fields, the constant 0xC0800000 (−127 in that field) and 0x800000 when
   step 3 shifted.
5. Compute the sign as the XOR of the two sign bits.

The product stays decomposed into sign, exponent and mantissa rows, ready for
the reduction that follows in a convolution.

**FP32 multi-operand add** (`tb_fp_add`, seven operands per word):

1. *FindMax*, eight rounds.
   - Each round ORs all exponents with one transverse read.
   - For each exponent, the predicate `any AND NOT own` is tested at bit 31.
   - The exponent is rewritten shifted left by one. Under the predicate, the
     rewritten row is cleared instead.
   - At the end, the OR of the survivors, shifted back by eight, is the
     largest exponent.
2. *NormMantissa*.
   - `Max − E` is computed by an Add of Max, `E XOR 0xFF800000` and 0x800000.
   - The bits of the difference drive predicated shifts right, by 8 (×4, ×2,
     ×1) and by 1 (×4, ×2, ×1).
   - Differences of 64 or more zero the mantissa.
3. *Two's complement*.
   - Negative mantissas are inverted under their sign predicate.
   - A row holding 1 is written beside each one.
4. *Reduce and Add*: CSA-Reduction, then a 64-bit Add.
5. *NormSum*.
   - The sign (bit 63) is moved to bit 31 by four shifts right by eight. It
     predicates the inversion and +1.
   - A scan from bit 62 down keeps `seenOne` / `seenThisOne` / `seenOneFirst`
     rows.
   - The first one found records the exponent offset.
   - The mantissa is shifted one place per step until its leading one is at
     bit 23.
   - The offset is added to the exponent, the hidden bit is masked off, and
     sign, exponent and mantissa are ORed together.

**Kernel rotation by 180°** (`tb_weight_rotate`). Back-propagation needs
rotated weight kernels. Kernels of K × K bytes, one kernel row per memory row
and one kernel per word, are rotated in place:

1. The vertical mirror is just a choice of destination row.
2. For the horizontal mirror, each byte j is isolated by a bulk AND with a
   mask row.
3. The byte is moved K−1−2j byte positions with repeated shifts by eight.
4. The K pieces are recombined with one K-row transverse-read OR.

A 7 × 7 rotation of eight kernels takes about 2 000 command cycles.

Both FP programs are checked against an integer model of the same steps.
The add is also checked against the exact real-valued sum; the relative error
is below 1e-5, since the steps truncate instead of rounding. One FP add of
seven operands in all eight words takes about 10 800 command cycles.

## 8. Where this RTL departs from, or chooses for, the source description

Several choices fill gaps in the source description:

- **Command set, encoding and handshake.** The description leaves the
  controller–subarray interface open. Every command here, its one-cycle
  timing and the `cmd_t` layout are this design's own. So is the
  valid/ready stall during plain-tile shifts.
- **Shift speed.** A DBC shifts one domain per clock.
- **Word isolation.** `lane_iso` separates the eight packed words.
- **Plain tiles.** They are accessed one at a time through the global
  rowbuffer, and a DBC is not shifted back after an access.
- **Add bounds.** The upper bound u = l + w is applied to the carry writes,
  which keeps carries from leaking into the next field of a word.

The description also contradicts itself in a few places. This RTL resolves
each case as follows:

- **Direction of the multiply operand shifts.** The text says both operands
  are shifted left. The algorithm shifts A right, so its bits reach bit 0 in
  turn, and B left. The algorithm is followed.
- **Exponent bias constant.** It is written both as 2^8−1 and as 127, and the
  constant added is given as 0xC0800000 and, elsewhere, as "0x7F800000
  (−127)". Here the exponent fields are added over 8 bits with 0xC0800000,
  which is −127 modulo 256 in that field.
- **Position of the product's leading one.** The text says the mantissa is
  normalised to bit 47. After a 24×24-bit multiply the leading one is at bit
  47 or bit 46. The normalisation predicate is therefore taken from bit 47,
  and the exponent offset is measured from bit 46.
- **NormMantissa bit indices.** The loop indices are off by one against the
  text. The text is followed: difference bits 7 and 6 zero the mantissa,
  bits 5–3 give shifts by 8, and bits 2–0 give shifts by 1.
- **NormSum predicate position.** The algorithm reads a predicate at bit 63,
  while the hardware only offers bits 0, 31 and 47. The sign is shifted down
  to bit 31, and the leading-one scan works on a copy shifted so that the
  tested bit sits at 47.
- **NormSum left shifts.** They use `seenOne` as it was before the current
  bit is examined, so the shift stops exactly when the leading one reaches
  bit 23.

**Not built.** The following parts are outside this RTL:

- the bank and rank levels above a subarray, and the parallel use of many
  subarrays;
- the memory controller that sequences the programs;
- the analog nanowire, port and sense circuits.

The sense amplifier is modelled at the level of its digital output: a 3-bit
ones-count per nanowire.

## 9. Capacity against CNN workloads

One subarray holds 16 × 512 × 512 bits = 512 KiB, and its compute tile
holds 32 KiB. Parameter counts below are common published figures, not
taken from the source description:

- **Lenet-5** has about 62 k weights. It fits in one subarray with ternary
  weights (about 15 KiB) or 8-bit weights (about 60 KiB).
- **AlexNet** (about 61 M weights) and **VGG-16** (about 138 M weights) need
  tens to hundreds of megabytes, so they need many subarrays. Training in
  FP32 needs four bytes per weight, plus gradients.
- **Lenet-10**: no size is available.

The arithmetic these networks need runs on the subarray as built. What is
missing for full networks is the surrounding memory hierarchy.

## 10. Files

| file | role |
|---|---|
| `rtl/fpirm_pkg.sv` | constants, enums, command struct |
| `rtl/tr_sense_amp.sv` | count → threshold bits |
| `rtl/cim_logic.sv` | threshold bits → OR / AND / SUM / C / C' |
| `rtl/cim_slice.sv` | one nanowire's sense amp, logic and source mux |
| `rtl/cim_unit.sv` | 512 slices and their neighbour wiring |
| `rtl/dbc.sv` | domain-block cluster with one or two ports and TR |
| `rtl/predication_bits.sv` | eight per-word predicates |
| `rtl/local_rowbuffer.sv` | compute tile rowbuffer with predicated clear |
| `rtl/cim_tile.sv` | compute tile: 16 two-port DBCs + unit + RB + predicates |
| `rtl/rm_tile.sv` | plain tile with shift-then-access control |
| `rtl/global_rowbuffer.sv` | subarray rowbuffer facing the host |
| `rtl/cim_sequencer.sv` | command forwarding and Add unrolling |
| `rtl/fpirm_subarray.sv` | top level |

Each block has `tb/tb_<module>.sv`, a self-checking testbench that prints
`TB_RESULT checks=… failures=…`. Four testbenches run the full-size top with
no parameter overrides:

- `tb_fpirm_subarray` is the end-to-end test. It runs an 8-word integer
  multiply through plain tiles, predication, CSA-Reduction and Add, plus
  logical shifts. It counts stalls, DBC shifts, predicated-true and
  predicated-false words, shifts by 1 and 8, TR operations, Add steps and
  tile accesses, and fails if any of them never happened.
- `tb_fp_multiply`, `tb_fp_add` and `tb_weight_rotate` run the programs of
  section 7.

## 11. Simulating

With Verilator 5, for any testbench `tb_X`:

```
verilator --binary --timing --assert -Irtl rtl/fpirm_pkg.sv \
    $(ls rtl/*.sv | grep -v fpirm_pkg) tb/tb_X.sv --top-module tb_X
./obj_dir/Vtb_X
```

The package must be compiled first. The full-size testbenches finish in
seconds once built. Building them takes about a minute, most of it for the
512-slice compute unit.

To change the geometry, edit the constants in `fpirm_pkg` or override the
parameters of `fpirm_subarray` (`W`, `D`, `NDBC`, `NTILES`). The packing of
64-bit words is fixed by `LANE_W`.
