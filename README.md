# STT-CiM: a spin-transfer-torque MRAM that computes while it reads

An STT-MRAM bit-cell is a magnetic tunnel junction (MTJ) in series with an
access transistor. The junction has low resistance when its two magnetic
layers are parallel (P, stored 1 here) and high resistance when they are
anti-parallel (AP, stored 0). A normal read turns on one wordline, applies a
small bias across the column, and compares the column's source-line current
with a reference current.

This design turns on **two** wordlines of the same array at once. Each
column's source-line current then carries the sum of two cell currents, which
can take only three values: `I_AP-AP < I_AP-P < I_P-P`. Every column gets two
sense amplifiers with different references, so one access gives a bitwise
logic function of two stored words:

| reference between          | sense amp output (positive) | meaning |
|----------------------------|-----------------------------|---------|
| `I_AP-AP` and `I_AP-P`     | 1 unless both cells are 0   | OR      |
| `I_AP-P` and `I_P-P`       | 1 only if both cells are 1  | AND     |

The negative outputs give NOR and NAND. `XOR = NOR(AND, NOR)` comes from one
extra gate per column. Adding one XOR gate and a carry gate per column, with
the carry rippling from column to column, gives a full adder. So an in-memory
ADD of two words costs one array access.

Around that array the design adds the pieces a processor needs to use it as
a 1 MB scratchpad:

- an error-correcting code that still works on in-memory results;
- vector operations with a reduce unit;
- a bus that carries the operation type;
- a custom instruction that issues CiM requests.

## Block map

```
 processor data master ─┐                         ┌── cim_ci_unit ◄── custom instruction
                        ▼                         ▼
                    avalon_cim_bus (2 masters, round robin, + 3-bit CIMType)
                        │
                 stt_cim_memory  (1 MB, 4 banks, Avalon slave)
   ┌────────────────────┼───────────────────────────────────────────────┐
   │ cim_controller ── cim_decoder (Table of reference/mux controls)    │
   │ ecc_encoder ──► stt_cim_bank × 4                                   │
   │                   ├ stt_bitcell_array  (8192 rows × 408 columns)   │
   │                   ├ ref_gen            (two reference stacks)      │
   │                   └ per column: 2 × sense_amp + cim_sense_logic    │
   │ bank mux ─► edc_unit (8 × bch_decoder) ─► nm_compute (fallback)    │
   │            ─► reduce_unit ─► column_mux ─► readdata                │
   └────────────────────────────────────────────────────────────────────┘
```

The top module `stt_cim_system` has plain ports. The `dm_*` ports are the
processor's data master; the processor itself is not included. The `ci_*`
ports are the custom-instruction handshake. `fail_mask` injects sensing
failures, and `events` pulses once for each mechanism.

## The sensing column (`cim_decoder`, `ref_gen`, `sense_amp`, `cim_sense_logic`)

Each reference is a small stack of reference cells; enabling cells in a stack
adds their currents. The stack elements are:

- `[0]` a cell at the mid resistance between P and AP;
- `[1]` an AP cell;
- `[2]` a P cell.

A normal read enables `[0]` alone. For OR, the left stack enables `[0]+[1]`,
which lands between `I_AP-AP` and `I_AP-P`. For AND, it enables `[0]+[2]`,
which lands between `I_AP-P` and `I_P-P`.

`cim_decoder` holds the paper's control table cell by cell. It gives the left
stack enables `rwl`, the right stack enables `rwr` and three output-mux selects
`sel`:

| op   | rwl | rwr | sel0 sel1 sel2 | output |
|------|-----|-----|----------------|--------|
| READ | 100 | 000 | 1 1 x | left positive |
| NOT  | 000 | 100 | 0 1 x | right negative |
| AND  | 101 | 000 | 1 1 x | left positive |
| OR   | 110 | 000 | 1 1 x | left positive |
| NAND | 000 | 101 | 0 1 x | right negative |
| NOR  | 000 | 110 | 0 1 x | right negative |
| XOR  | 110 | 101 | 0 0 1 | XOR gate |
| ADD  | 110 | 101 | 0 0 0 | sum |

Bits are listed in element order `[0][1][2]`; the "x" entries are driven 0.
The mux data inputs are not printed in the paper's circuit figure. This design
reads them from the table:

- `sel0` picks the left positive output (1) or the right negative output (0);
- `sel2` picks XOR (1) or sum (0);
- `sel1` picks between those two muxes.

With the left stack at the OR reference and the right stack at the AND
reference:

- `XOR = ~(AND | NOR)`;
- `sum = XOR ^ carry_in`;
- `carry_out = (XOR & carry_in) | AND`.

The currents come from the device table: RA product 18 Ω·µm², TMR 124 %,
40 nm × 40 nm junctions, so `R_P = 11.25 kΩ` and `R_AP = 25.2 kΩ`. The read
bias of 100 mV and the 2 kΩ access transistor are this design's assumptions.
Currents are integers in nA. The array, the references and the sense
amplifiers are **behavioural models** of analog circuits. They compute
currents and ideal comparisons, and model no timing or offsets.

## Word layout and the 3EC4ED code (`ecc_encoder`, `edc_unit`, `bch_decoder`)

Sensing two cells at once narrows the current margins, so in-memory results
fail more often than reads. The design therefore protects each 32-bit word
with a code that corrects 3 errors and detects 4. That code is this design's
choice; the paper names only the strength:

- a binary BCH(63,45) code over GF(2⁶) (primitive polynomial x⁶+x+1, generator
  octal 1701317), shortened to 32 data bits;
- plus one overall parity bit.

A codeword is 51 bits, laid out as:

| bits  | contents     |
|-------|--------------|
| 0–17  | check bits   |
| 18–49 | data         |
| 50    | parity       |

A row holds 8 codewords (408 columns).

The code is linear, so the XOR of two codewords is the codeword of the XOR of
the data. An in-memory XOR therefore yields a valid codeword whenever the
sensing made no mistake. `bch_decoder` works as follows:

1. Compute syndromes S1, S3 and S5.
2. Solve for the error locator with Peterson's formulas:
   - σ1 = S1;
   - σ2 = (S1²S3+S5)/(S1³+S3);
   - σ3 = S1³+S3+S1σ2.
3. Search for roots over the 50 used positions.
4. Use the parity bit to separate 3 errors from 4.

The result is flagged uncorrectable when the root count does not match the
locator degree, or when the parity disagrees with an odd error count of 3.

The paper checks **every** CiM operation through the XOR output. Its control
table, however, turns on only one reference stack for AND, OR, NAND and NOR,
so no XOR exists during those operations. This design follows the table. The
EDC therefore checks these operations:

- **READ, NOT:** the single-row codeword is corrected. An uncorrectable word
  returns an Avalon SLVERROR response.
- **XOR:** the XOR tap is checked. 1–3 errors are corrected in place, with no
  extra latency. An uncorrectable word falls back to near-memory recomputation.
- **ADD:** the XOR tap is checked. Any error falls back to near-memory
  recomputation.
- **AND, OR, NAND, NOR:** returned as sensed, unchecked.

Near-memory recomputation (`nm_compute`) makes two conventional reads of the
operands, corrects each with the EDC, and computes the result in logic.
Together with the failed CiM access, that is three array accesses.

## Vector operations (`reduce_unit`, `column_mux`)

All 8 words of a row are sensed together, so a CiM access produces 8 results.
A reduce unit in front of the column mux can fold them into one 32-bit
answer:

- `SUM` adds the words.
- `ZCMP` returns bit *j* = 1 when the *j*-th word of the vector is non-zero.

The vector length is 8 or 4. With length 4, the aligned half of the row that
holds the addressed word is used. The reduce operations and their encoding
are this design's choices; the paper fixes only the vector lengths.

## Memory organisation and the controller (`stt_cim_memory`, `cim_controller`)

Capacity: 4 banks × 8192 rows × 8 words × 4 bytes = 1 MB. The byte address is
split as follows:

| bits  | field      |
|-------|------------|
| 1:0   | byte       |
| 4:2   | word slot  |
| 6:5   | bank       |
| 19:7  | row        |

Consecutive rows alternate between banks, which supports the row-interleaved
data placement. Two words can be combined in the array only if they are in the
same bank, in the same word slot, and in different rows. Otherwise the
controller reads both and computes near memory ("misaligned" path). The bank
count and the address split are assumptions.

Bus protocol (Avalon-MM with `waitrequest`, extended with a 3-bit CIMType):

- **Write:** `cimtype` selects the write mode:
  - 0: one word;
  - 1: the word replicated across the whole row (column replication);
  - 2: that row filled in **all banks** at once (the "special write" that fills
    spare rows).
- **Read:** `cimtype` is the operation (0 = plain read). `writedata` carries:
  - `[19:0]`: the second operand's address;
  - `[31:30]`: the reduce operation (0 none, 1 SUM, 2 ZCMP);
  - `[29]`: half vector length.
- **Response:** `response` = 2'b10 (SLVERROR) marks an uncorrectable read.

Latency in clock cycles until `waitrequest` drops (`S` = `SENSE_CYCLES`,
default 1):

| transaction                           | cycles   |
|---------------------------------------|----------|
| write (any mode)                      | 2        |
| read or CiM operation                 | S + 2    |
| CiM with an ECC fallback              | 3S + 5   |
| CiM on misaligned operands            | 2S + 4   |

These cycle counts are the design's own. The paper gives no cycle-level
timing for the memory.

## Processor side (`avalon_cim_bus`, `cim_ci_unit`, `avalon_cim_if`)

`avalon_cim_if` bundles one Avalon link plus CIMType. It carries assertions:
a master never reads and writes at once, and it holds a request steady while
`waitrequest` is high.

`avalon_cim_bus` shares the memory between two masters, the processor data
master and the custom-instruction unit, with round-robin arbitration.

`cim_ci_unit` turns a custom instruction into one bus read:

- `dataa` is the first address.
- `datab[28:0]` is the second address.
- `n[2:0]` is the CIMType.
- `n[4:3]` is the reduce operation.
- `n[5]` is the half-vector bit.

`done` pulses with the result one cycle after the bus transfer completes.

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv` that compares
against independently computed values. For example, `tb_gf_pkg` builds its own
GF(2⁶) tables for the ECC tests.

End to end:

- **`tb_stt_cim_system`** runs the system reduced to 2 banks × 16 rows. It
  drives both masters concurrently and injects sensing failures. It counts
  every mechanism and fails any that never occurred:
  - each write mode, reads, all eight CiM operations;
  - SUM and ZCMP, half vectors;
  - direct ECC correction, near-memory fallback, misaligned operands;
  - bus contention;
  - three small workloads, one per data-placement pattern: a vector sum of
    A[i]+B[i]; a shared row written to all banks and compared; a string
    search that replicates a key across a row and uses XOR + zero-compare.
- **`tb_stt_cim_system_full`** runs the same test on the full 1 MB
  configuration, with no parameter overrides.

Simulate with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cim_pkg.sv tb/tb_gf_pkg.sv \
    tb/tb_stt_cim_system_full.sv --top-module tb_stt_cim_system_full -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

## Limits and departures

- **Not included:** the processor core, its instruction memory and the analog
  bias circuit. The processor's data-master and custom-instruction ports are
  the top's ports.
- **Unchecked logic operations:** AND, OR, NAND and NOR are not ECC-checked,
  because the control table provides no XOR during them (see above).
- **Decision failures** are injected only on two-row accesses, through
  `fail_mask`. With this injection, single-row ECC corrections and the
  uncorrectable-read response never occur in the system test. They are tested
  at the controller level instead.
- **Wordline decoder:** the bank model addresses its array through the two row
  inputs of the enhanced decoder. The one-hot wordline decoder
  (`addr_decoder`) is a separate block with its own test and is not
  instantiated in the bank.
- **Assumptions:** the sensing currents, latencies, bus encodings, address map
  and ECC construction are assumptions, chosen as described above.
