# A block-parallel GA-MS-3 decoder for 5G NR LDPC codes

This is synthesizable SystemVerilog for a layered LDPC decoder that handles every 5G NR
code: both base graphs, every code rate, and every lifting size up to 384. The
check-node rule is *generalized adjusted min-sum* (GA-MS) with γ = 3:

- Each check node keeps its three smallest incoming magnitudes.
- It combines them with a small lookup table that approximates the exact
  belief-propagation "box-plus" operation.
- It stores one critical and one non-critical magnitude per row, plus one sign per edge.

The decoder processes one base-graph block per clock: 384 node units work in parallel on
the Z rows of one block row, and a cyclic shifter aligns each column with the rows.

The numbers follow the published GA-MS decoder in 28 nm:

- Quantization (7,5,1):
  - 7-bit variable-node (Q/T) messages.
  - 5-bit check-node (R) messages, that is, a sign plus a 4-bit magnitude.
  - One fractional bit.
- A 16×16 table of 4-bit entries with offset β = 0.25.
- 384 node units in 16 groups of 24.
- Q and T memories of 68 columns, an R memory for 46 layers and 316 edges.
- An instruction memory of 332 words.

Everything marked below as *own choice* fills a gap the published description leaves open.

## 1. The algorithm in the hardware

Layered decoding walks through the block rows ("layers") of the base graph. For layer c, and
for every variable v connected to it, each lane k (row c·Z+k) does the following:

```
MIN phase (one block per cycle)         SEL phase (one block per cycle)
  t_v  = sat(q_v − r_cv)                  m    = (v == vmin) ? crit : ncrit
  s   ^= sign(t_v)                        r_cv = (s ^ sign(t_v)) ? −m : +m
  insert min(|t_v|,15) into m1 ≤ m2 ≤ m3  q_v  = sat(t_v + r_cv)
  vmin = column of the strict minimum      ppc ^= HD(q_v)
```

`sat` clips symmetrically to ±63. The box-plus table is

```
LUT(a,b) = max(0, min(a,b) − floor( |ln(1+e^−(A+B)) − ln(1+e^−|A−B|)| / δ + β + 0.5 ))
A = a·δ, B = b·δ, δ = 0.5, β = 0.25
```

It is computed when the module is elaborated (`boxplus_lut`), so changing `BETA`
regenerates it. The value 0.1 is the published choice for base graph 2.

With γ = 3 the two magnitudes of a layer are:

- non-critical = LUT(LUT(m1, m2), m3), for every edge except the one that carried m1;
- critical = LUT(m2, m3), for the edge that carried m1.

**Why the LUT chain is split.** The first γ−1 stored minima of a row can never be
pushed out of the final set by the row's last block. So the MIN unit evaluates the γ−2
LUTs on those minima before the last block arrives, and carries the partial results
(`pre`, `cpre`) into the pipeline register. The SEL unit needs only one more LUT
level. Its partner is `x = min(m3_before, |t_last|)`, except for the critical value when the
last block is itself the new minimum; then the partial result is already the answer.

Consequence: the order in which the box-plus is applied is fixed by block arrival. The
plain algorithm instead chains the table over the final sorted minima, (m1 ⊞ m2) ⊞ m3. The
two differ only when a row's last block falls below its second minimum. Even then they
disagree for about 9 % of minima triples, because the quantized table is not exactly
associative. This design follows the split-pipeline form, and the reference models in the
testbenches use the same arrival-order definition.

## 2. Datapath and pipeline

```
          +-----------+   +-------+   +-----+   +-------+   +-----------------+
 Q read ->| Q-memory  |-->|  reg  |-->| CSU |-->|  reg  |-->| NCU MIN (t,min) |--> T-memory
          | 16 SRAMs  |   +-------+   +-----+   +-------+   +-----------------+
          | + 2 fwd   |        R-sign/R-mag read -> expand -> reg --^
          +-----------+
 T read -> T-memory -> reg -> NCU SEL (r, q=t+r, PPC) -> Q-memory, R-sign, R-mag
```

One instruction word is issued per cycle. Each word carries one MIN operation (a column of
the layer being gathered) and one SEL operation (a column of the previous layer being written
back). Stage by stage, with c0 the issue cycle:

| op  | c0 | c1 | c2 | c3 |
|-----|----|----|----|----|
| MIN | Q read | data (forwarded if needed) → reg; R read | shift by the relative rotation → reg; R expanded → reg | t = q − r, sort, sign; t → T-memory |
| SEL | T read | data (forwarded) → reg | r, q = t + r; q → Q-memory; sign → R-sign; on the last block, magnitudes → R-mag | |

**Rotation bookkeeping.** Q-messages are never rotated back. A column stays rotated by the
shift of the last layer that used it. A MIN operation rotates by the difference
`(Z + H[c][v] − H[c_prev][v]) mod Z`, where c_prev is the previous layer containing v. LLRs
are rotated on the way in by the shift of the last layer containing each column. Hard
decisions are rotated back on the way out through the same shifter, by `Z − that shift`.
The shifter (`csu`) rotates the first Z of 384 lanes for any Z. It uses two full-width
logarithmic rotators, by w and by w + 384 − Z, and a per-lane select (own choice; the
inside is not published).

**Forwarding.** The Q and T memories are 16 dual-port SRAMs of 68 words × (24 lanes × 7 bits)
each, with a shared address. An SRAM returns the old word when it is read and written in the
same cycle. Two forwarding paths keep the read data current:

- a write in the cycle the data comes out is passed straight through;
- a write in the read cycle itself is passed from a register holding the last write.

**Compressed R.** Within a layer every R magnitude is either the critical or the
non-critical value, so the R memory stores two things:

- *R-sign*: one 24-bit word per group and edge (316 words);
- *R-mag*: one word per group and layer (46 words) with, per lane, {critical, non-critical,
  5-bit index of the critical column}.

The 5-bit index is the column's position within its row; the largest row degree is 19. The
instructions carry it (own choice: the published design uses a separate index-compression
table). On a read, the magnitude is chosen by comparing the reading block's index with the
stored one. In the first iteration all R values read as zero.

**Node units.** `ncu` = `min_unit` → pipeline register → `sel_unit`. The register loads on the
last MIN block of a layer, so MIN can already gather layer c+1 while SEL writes back layer c.

The 384 units form 16 groups of 24. Group g is enabled only when Z > 24·g. Its registers and
SRAM ports are then idle, which stands in for the gated clocks of the original.

## 3. The instruction program and its hazards

The controller holds no knowledge of the base graph. It replays a program of P ≤ 332 words
once per iteration. Each 56-bit word (`gams_pkg::instr_t`, own layout; the published word
has 59 bits, fields unknown) holds:

| bits  | field | meaning |
|-------|-------|---------|
| 55    | min_en    | MIN op valid |
| 54:48 | min_col   | column (Q/T address) |
| 47:39 | min_shift | relative rotation |
| 38:30 | min_edge  | R-sign address |
| 29:25 | min_slot  | position of the column in its row |
| 24    | min_last  | last block of the layer |
| 23    | sel_en    | SEL op valid |
| 22:16 | sel_col   | column |
| 15:7  | sel_edge  | R-sign address |
| 6:2   | sel_slot  | position in row |
| 1     | sel_last  | last block of the layer |
| 0     | sel_prev  | SEL op belonging to the previous pass |

A program must respect three rules. Stalls are simply words without a MIN op; the hardware
does not detect hazards.

1. A SEL op on column v is issued at least one cycle before the next MIN op on v. With the
   forwarding paths, the MIN read then sees the new value.
2. The SEL ops of a layer start no earlier than two cycles after its last MIN op (the
   T-memory write).
3. The last SEL op of layer L is issued at most one cycle after the last MIN op of layer L+1.
   Otherwise the pipeline register would be overwritten.

The SEL ops of the last layer spill into the first words of the next pass and are marked
`sel_prev`:

- In the first pass they are suppressed.
- After the last iteration the controller runs one more pass in which only they execute.

With the visiting order "MIN takes the columns shared with the previous layer last, SEL takes
those shared with the next layer first", rule 1 rarely stalls. Ordering the rows with the
dense core rows first and then by descending degree makes the row-synchronisation stalls of
rule 3 add up to d_max − d_min. The program length is then Σd_c + d_max − d_min:

- For a 46×68 graph with 316 blocks and degree-19 core rows this is the 332-word
  instruction memory.
- For the BG1 R=8/9 shape it is 95 cycles per iteration, which is 24.42 Gbps at 895 MHz
  for four iterations. That matches the published peak figure.

The end-to-end testbenches contain a scheduler that builds such programs from any base matrix
(`make_program` in `tb/dec_tb_common.svh`). It is the reference for writing programs for the
real 5G tables.

## 4. Control, early termination and I/O

`controller` states: IDLE → LOAD → LWAIT → RUN → FLUSH → OUT → OWAIT → IDLE.

Configuration happens in IDLE:

- `cfg_we` with `cfg_io = 0` writes program word `cfg_addr`.
- `cfg_we` with `cfg_io = 1` writes the rotation of column `cfg_addr`.
- `start` latches Z, M_p, N_p, I_max, the program length and the early-termination enable.

The decode then proceeds:

- **LOAD**: one LLR column per cycle with `llr_valid && llr_ready`, columns 0 … N_p−1 in
  order. Lane k of column j carries bit j·Z+k.
- **LWAIT** (4 cycles): the last loads drain through the shifter. The node units' minima and
  parity registers are cleared.
- **RUN**: one word per cycle. Within a layer, each SEL lane XORs the hard decisions of its
  updated Q values: a *partial parity check* (PPC). When the last layer of an iteration has
  been written back, one of two things happens:
  - If early termination is on and no enabled lane saw a failing PPC in that iteration,
    the run halts.
  - Otherwise, if I_max iterations are done, the run halts.

  On a halt, SEL ops still in the pipeline are dropped (`sel_kill`). The run lasts exactly
  (I − 1)·P + j_last + 3 cycles, where j_last is the issue slot of the final SEL op.
- **FLUSH** (5 cycles), then **OUT**: N_p hard-decision columns, `out_valid` three cycles
  after each read, rotated back. Then **OWAIT** (4 cycles), and a one-cycle `done` pulse
  with `iters` and `ppc_ok`.

Loading and output are not overlapped with decoding (own choice). The published throughput
counts decoding cycles only, and so do the figures above.

## 5. Files

The files are in `rtl/`, one unit per file. `ldpc_decoder` is the top.

| module | role |
|---|---|
| `gams_pkg` | constants, `instr_t`, `layer_t`, saturation |
| `boxplus_lut` | 16×16 box-plus table |
| `sorter` | inserts a magnitude into the three ascending minima |
| `min_unit`, `sel_unit`, `ncu` | node unit phases and the pipeline register |
| `ncu_pool` | 384 node units in 16 enable groups |
| `csu` | cyclic shifter for any Z ≤ 384 |
| `dp_sram` | dual-port SRAM model (array), 1-cycle read |
| `qt_mem` | Q or T memory: 16 SRAMs and the two forwarding paths |
| `r_mem` | compressed R memory and the R expansion |
| `controller` | program sequencing, iterations, early termination, load/output |
| `ldpc_decoder` | top |

Parameters default to the published sizes: `Z_P = 384`, `G_P = 24`, `GAMMA_P = 3`,
`BETA = 0.25`, `SEQ_D = 332`, `NP = 68`, `NL = 46`, `NE = 316`. `GAMMA_P` above 3 lengthens
the LUT chains, but the compressed R word and the instruction slot width are sized for γ = 3.

## 6. Verification

Each testbench in `tb/` is self-checking. It has a watchdog and ends with a `TB_RESULT checks=…
failures=…` line. The reference arithmetic (`tb/gams_ref.svh`, and the model in
`tb/dec_tb_common.svh`) is written from the algorithm: the table comes from its formula, and
a check node is updated in plain integer code.

- `tb_boxplus_lut`: all 256 entries and symmetry.
- `tb_sorter`: random insertions against full sorting; tie handling.
- `tb_min_unit`, `tb_sel_unit`, `tb_ncu`: layers of degree 2–19, saturating values,
  overlapped MIN/SEL, clears and disabled enables.
- `tb_ncu_pool`: a disabled group keeps its state while another group advances.
- `tb_csu`: random lifting sizes of the 5G set and random shifts at 384 lanes.
- `tb_dp_sram`, `tb_qt_mem`, `tb_r_mem`: memory models with collisions. Both forwarding
  paths must be hit. Group disables are checked, as is the two-cycle R latency.
- `tb_controller`: a hand-written 3-layer program with wrapped SEL ops. It checks load,
  issue streams, termination by I_max and by PPC, the halt timing, output rotations and
  `done`.
- `tb_ldpc_decoder`: 72 lanes, random 5G-style graphs (Z = 52 and 72), six decodes. It checks
  the result bit-exactly, plus the iteration count, the PPC flag and the exact run length.
  It also counts every mechanism and fails if one never occurs: dependency stalls, sync
  stalls, wrapped SEL ops, both Q forwarding paths, T forwarding, early termination,
  full-length runs, killed SEL ops, disabled groups, and a last block that becomes the new
  minimum.
- `tb_ldpc_decoder_full`: the top with no parameter changes, on a 46×68 graph with 316
  blocks and Z = 384 (P = 332). One decode uses early termination, one a fixed 4 iterations.
- `tb_ldpc_workloads`: default size, the BG1 R=8/9, BG2 R=1/5 and BG2 R=2/3 shapes with 4
  iterations. It checks that the program length equals Σd + d_max − d_min.

The graphs are random matrices with the 5G structure (dense core rows, one new parity column
per extension row) and random shifts. The 5G shift tables themselves were not used.

To simulate, for example:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/gams_pkg.sv tb/tb_ldpc_decoder_full.sv \
          --top-module tb_ldpc_decoder_full
./obj_dir/Vtb_ldpc_decoder_full
```

The full-size build takes about 20 s; the simulation takes under a second.

## 7. Where this departs from the published decoder

- **Clock gating** is modelled as per-group enables. A clock-gating cell is a library cell.
- **I/O** is a plain column-per-cycle interface, not overlapped with decoding. The
  original's I/O interfaces are not described.
- **Instruction word**: 56 bits of own layout instead of 59 bits. The column index
  compression is carried in the instructions, not in a separate table. Layer numbers for the
  R-mag memory are counted by the controller.
- **Programs**: hazard-free programs are generated off-line, here by the testbench
  scheduler. The hardware has no stall logic, as in the original, where stalls are part of
  the program.
- **Pipeline depths** are this design's. The order Q-memory → register → shifter → register →
  node unit, and MIN and SEL on consecutive layers, follow the published structure.
- **β is fixed at build time.** Base graph 2 at its preferred β = 0.1 needs a build with
  `BETA = 0.1`.
- **SRAMs** are written as arrays. Read-during-write returns the old word.
