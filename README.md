# SR-NCL: a selectively redundant, upset-tolerant NCL adder

Null Convention Logic (NCL) is a clockless, quasi-delay-insensitive circuit
style. Duplicating an entire NCL circuit (dual modular redundancy, DMR) makes
it immune to single-event upsets (SEUs): a particle strike that flips a node
for a while. But the duplicate roughly doubles area and energy. **SR-NCL
duplicates only the part whose errors matter.** In an adder, a wrong low-order
bit is a small numeric error, while a wrong high-order bit is a large one. So the
adder is cut into:

* a **most significant unit (MSU)**, which is duplicated and fully protected;
* a **least significant unit (LSU)**, which is built once and left
  unprotected. An upset there can give a wrong result, but never an illegal
  one. The only link from the LSU into the MSU is the carry signal **Q**.

The registers, merge gates and completion detectors around the adder stay
fully duplicated, so that a single upset in the control path neither corrupts
the handshake nor deadlocks it (in every upset scenario tested here; see
section 3).

This repository holds a SystemVerilog model of that architecture: an NB-bit
carry look-ahead adder between two pipeline stages. The default is 8 bits
split 5|3 (5-bit MSU, 3-bit LSU), the smallest design in the published
evaluation. It also holds testbenches that inject every upset case the
architecture claims to handle. The design follows the SR-NCL paper by Ziad,
Bodoh and Sakib. Where that paper leaves a detail open, the choice made here
is stated below.

## 1. NCL in one page

Every bit is **dual-rail**: two wires `{r1, r0}`.

| `{r1,r0}` | meaning |
|---|---|
| `00` | NULL: the spacer between two data items |
| `01` | DATA0 |
| `10` | DATA1 |
| `11` | illegal; called DATAX here. An upset can produce it. |

Data moves as alternating wavefronts: DATA, NULL, DATA, NULL. The only
storage is **threshold gates with hysteresis**. The basic one is THnn, an
n-input Muller C-element: its output rises when all inputs are 1, falls
when all are 0, and otherwise holds.

A pipeline stage consists of three parts:

* a register: one C-element per rail, joining the rail with the stage's
  `Ki` input;
* the combinational logic;
* a **completion detector (CD)**. Its `Ko` output is **rfn** ("request for
  NULL", 0) once every output of the stage is DATA. It is **rfd** ("request
  for data", 1) once every output is NULL.

A stage's `Ko` drives the previous stage's `Ki`. This is the four-phase
handshake: a register lets the next wavefront through only after the
following stage has taken the previous one.

## 2. What SR-NCL adds

```
              copy (a)                                                 copy (a)
 prev (a) -> Reg_i(a) --+--> TH22(a) -+-[MSU bits]-> CL_MSU(a) ------> Reg_i+1(a) --+--> TH22(a) --> s_a
                        |             |                  ^ Q                         |       |
                        |             +-[LSU bits]-> CL_LSU --> ISC(a) ---+          |     CD_i+1(a) -> Ko1(a)
                        |             |                     \--> ISC(b) --+--+       |
                        X             CD_i(a) -> ko_a                        |       X
                        |                                                    v       |
 prev (b) -> Reg_i(b) --+--> TH22(b) -+-[MSU bits]-> CL_MSU(b) ------> Reg_i+1(b) --+--> TH22(b) --> s_b
              copy (b)                |                  ^ Q from ISC(b)                     |
                                      CD_i(b) -> ko_b                                      CD_i+1(b) -> Ko1(b)

 Reg_i(a), Reg_i(b), ISC(a), ISC(b): Ki1 = Ko1(a), Ki2 = Ko1(b)
 Reg_i+1(a), Reg_i+1(b):             Ki1 = ki_a,  Ki2 = ki_b   (from the next stage)
 "X": each TH22 layer takes both Reg(a) and Reg(b)
```

Compared with a plain NCL pipeline:

1. **Duplicated registration.** Every register and every completion detector
   exists twice, copy (a) and copy (b).
2. **Two Ki per register** (`ncl_reg2ki`). Each rail is a TH33 gate: the data
   rail, `Ki1` and `Ki2`. A wavefront passes only when *both* completion
   detectors of the next stage agree. So one upset detector cannot release
   a NULL or a DATA early.
3. **TH22 merge layers** (`ncl_th22_layer`). At each register output, every
   rail goes through a C-element that joins copy (a) and copy (b). A value
   appears only when both copies carry it:
   * a DATAX on one copy collapses to the rail both copies agree on;
   * a spurious DATA on one copy during NULL is held back.

   There are two layers per stage, one feeding each copy. The completion
   detectors sit behind these layers.
4. **Partitioned adder.**
   * `CL_LSU`: one `ncl_cla` of width LW, fed from copy (a).
   * `CL_MSU(a)` and `CL_MSU(b)`: two `ncl_cla` of width NB−LW, one per copy.
5. **Two ISC units** (`ncl_isc`, *illegal state correction*). All LSU outputs
   pass through them: the LW sum bits and the carry Q. There is one ISC per
   copy, and each feeds both its copy's output register and its copy's MSU
   (through Q). An ISC passes DATA while the output stage requests data. It
   goes back to NULL while the output stage requests null. It turns DATAX
   into DATA0. The LSU is not duplicated, so both copies see the same
   corrupted value, and the TH22 layers could not filter it. The ISC makes
   that value at least legal.

## 3. How each upset is handled

"Stage i" is the operand register with the adder behind it. "Stage i+1" is
the sum register. The testbench `tb_srncl_cla` injects each of these cases and
checks the stated outcome.

| where the upset hits | when | what happens | result |
|---|---|---|---|
| CL_MSU(a) output (case I) | DATA phase | DATAX reaches Reg_i+1(a) only; Reg_i+1(b) holds correct DATA; the TH22 layer keeps the agreed rail | exact |
| CL_LSU sum bit (case II) | DATA phase | both ISCs force DATA0; both copies agree, so the value passes | legal; the bit is 0 even when it should be 1 |
| CL_LSU carry Q (case II) | DATA phase | both ISCs force Q to DATA0; both MSUs add without the carry | legal; the sum is 2^LW too small when the true carry was 1 |
| ISC(a) output (case III) | DATA phase | like case I: DATAX on copy (a) only | exact |
| CL_MSU(a) | NULL phase | a spurious DATA on copy (a); TH22 layer holds; flushed by NULL | outputs unchanged |
| CL_LSU | NULL phase | the ISCs stay NULL because both Ki are rfn | outputs unchanged |
| ISC(a) | NULL phase | spurious DATA on copy (a) only; TH22 layer holds | outputs unchanged |
| CD_i+1(a) says rfn too early | stage i still computing | Reg_i needs both Ki at rfn to take NULL, so it keeps its DATA; the ISCs still pass data on CD(b)'s rfd | exact, no deadlock |
| CD_i+1(a) says rfd too early | stage i+1 still returning to NULL | Reg_i needs both Ki at rfd, so it stays NULL until CD(b) agrees | exact, no deadlock |

For a Q upset, the error is therefore bounded by 2^LW. For an LSU sum-bit
upset, it is bounded by 2^(LW−1). The width of the LSU trades area and
energy against this bound.

## 4. The ISC unit in detail

Of the gate structures chosen here, the ISC's matters most for fault
behaviour. Its behaviour is fixed by the architecture. Its gates are not. Each rail is a
state-holding gate controlled by the two `Ko` signals of stage i+1:

* **false rail h0.** It rises when `d.r0=1` and *either* Ko is rfd. It falls
  when `d.r0=0` and *both* Ko are rfn. This is the NCL TH23w2 gate with
  `d.r0` at weight 2.
* **true rail h1.** It rises when `d.r1=1`, `d.r0=0` and either Ko is rfd.
  It falls when `d.r1=0` and both Ko are rfn, **or as soon as `d.r0` rises**.
  A DATAX whose true rail arrived first therefore still ends as DATA0.

Three decisions are worth knowing:

* **Which handshake controls it.** The ISC in stage i takes the Ko of stage
  i+1, the same signals that drive Reg_i. If it took the Ko of stage i+2
  instead, an upset in the LSU during the NULL phase would go straight into
  both copies of Reg_i+1.
* **"Either rfd" to open.** If each copy's ISC listened only to its own
  copy's CD, or needed both CDs to request data, then a premature rfn from
  CD_i+1(a) would hold ISC(a) closed. Copy (a) could then never complete,
  and the pipeline would deadlock.
* **No output masking.** The output is the state of the two gates, taken
  as it is. An upset *inside* ISC(a) therefore shows up as DATAX on copy (a),
  which the TH22 layer removes (case III). It does not show up as a wrong
  legal value, which the TH22 layer could never resolve.

**A timing window that is not covered.** Suppose CD_i+1(a) flips to rfd
before Reg_i and the ISCs have returned to NULL, that is, while their inputs
are still DATA. Those gates need both Ko at rfn to clear, so they keep the
old DATA. Stage i+1 then cannot finish its NULL wavefront, and the stage
stalls. The premature-rfd case tested here strikes after stage i is already
NULL, which is the situation the architecture describes.

## 5. How the gates are modelled

* **Threshold gates are latches.** `ncl_thnn` (THnn) is written as an
  `always_latch`: set when all inputs are 1, clear when all are 0, hold
  otherwise. Reset forces 0, so every register resets to NULL and every CD
  to rfd. This gives C-element behaviour with no combinational feedback
  loop in the gate itself. Synthesis sees one latch bit per gate.
* **Zero delay.** Each input change settles the whole circuit in the same
  time step. Timing figures such as the delays of the transistor-level
  designs have no meaning in this model. Where a test needs a slow gate
  (premature-request cases), it holds an internal net at its old value with
  `force` for a few time units.
* **Combinational logic is DIMS.** The adder is built from `ncl_dims2`
  (delay-insensitive minterm synthesis). Each two-input dual-rail gate is
  four C-elements, one per input minterm, plus an OR on each output rail.
  This style is input complete: an output becomes DATA only after all its
  inputs are DATA, and returns to NULL only after all are NULL. A
  transistor-level NCL adder would use larger threshold gates (TH24comp and
  similar) for the same functions.
* **The adder** (`ncl_cla`) is a Kogge–Stone parallel-prefix carry
  look-ahead. The carry-in is prefix element 0. Group propagates are only
  built for spans that do not reach it.
* **The completion detector** is a single N-input C-element over the
  per-signal OR of the two rails, followed by an inverter. A transistor
  implementation would use a TH44 tree with the same behaviour.
* **Lint reports a circular path.** Verilator treats latches as
  combinational logic. Its UNOPTFLAT report is the self-timed handshake
  loop (data → CD → Ki → register → data). That loop is the nature of NCL.
  Simulation still converges, because the latches close it.
* **Synthesis must keep the copies.** A generic logic optimiser sees that
  copy (a) and copy (b) compute the same function, and merges them. After
  that merge, the latch count of `srncl_cla` is lower than the RTL holds:
  346 latch bits in a quick synthesis, not the 600-odd written. A real
  implementation must mark the duplicated instances keep / don't-touch.

## 6. Files

| file | content |
|---|---|
| `rtl/ncl_pkg.sv` | `dr_t` dual-rail type; NULL/DATA0/DATA1/DATAX constants; rfd/rfn; DIMS truth tables |
| `rtl/ncl_thnn.sv` | THnn C-element with reset |
| `rtl/ncl_dims2.sv` | dual-rail 2-input gate (AND/OR/XOR by truth table) |
| `rtl/ncl_cla.sv` | dual-rail carry look-ahead adder, width `W`; used as CL_MSU and CL_LSU |
| `rtl/ncl_reg2ki.sv` | N-bit register with two Ki (TH33 per rail) |
| `rtl/ncl_th22_layer.sv` | TH22 merge of the two copies |
| `rtl/ncl_cd.sv` | completion detector |
| `rtl/ncl_isc.sv` | illegal state correction unit |
| `rtl/srncl_stage.sv` | one stage's duplicated registration: 2 registers, 2 TH22 layers, 2 CDs |
| `rtl/srncl_cla.sv` | **top**: input stage, partitioned adder with ISCs, output stage |

### Top-level interface, `srncl_cla #(NB = 8, LW = 3)`

| port | dir | type | meaning |
|---|---|---|---|
| `rst` | in | 1 | asynchronous reset: all NULL, all Ko rfd |
| `a_a`, `b_a`, `cin_a` | in | `dr_t [NB-1:0]`, `dr_t` | operands and carry-in from the previous stage's copy (a) |
| `a_b`, `b_b`, `cin_b` | in | same | the same from copy (b) |
| `ko_a`, `ko_b` | out | 1 | input stage CD(a)/(b), to the previous stage (1 = rfd) |
| `s_a`, `s_b` | out | `dr_t [NB:0]` | sum with the carry-out in bit NB, after the output stage's TH22 layers (a)/(b) |
| `ki_a`, `ki_b` | in | 1 | Ko of the next stage's CD(a)/(b) |

LW must lie between 1 and NB−1.

The input register holds `{cin, B, A}`. The output register holds
`{carry-out, MSU sum, LSU sum}`.

**One operation** is one four-phase cycle, in this order:

1. The previous stage waits for `ko_a = ko_b = rfd`.
2. It drives DATA on both copies.
3. The next stage raises `ki_a = ki_b = rfd`.
4. `s_a`/`s_b` become complete DATA.
5. `ko_a`/`ko_b` go rfn.
6. The previous stage drives NULL.
7. The next stage drives `ki = rfn`.
8. The outputs return to NULL and `ko` to rfd.

## 7. Simulating

Any testbench builds and runs with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
          rtl/ncl_pkg.sv tb/tb_srncl_cla.sv --top-module tb_srncl_cla
./obj_dir/Vtb_srncl_cla
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_srncl_cla` | full design at default size. 400+ random operations; each one also injects one of the ten mechanisms of section 3 (none, case I, case II sum, case II carry, case III, three NULL-phase upsets, premature rfn, premature rfd). Compares every sum with A+B+Cin, or with the predicted legal-but-wrong value. Counts each mechanism and fails if one never occurred. Also confirms that each upset reached its target (for example, DATAX latched in Reg_i+1(a) only). Ends with 200 streamed operations: the previous and next stage run as concurrent processes with random delays, and the results are checked in order, including back-pressure stalls. |
| `tb_srncl_cla_workloads` | the widths and partitions of the published evaluation, run in parallel: 8-bit 5\|3; 16-bit 11\|5 and 10\|6; 32-bit 24\|8, 22\|10, 20\|12, 19\|13 and 18\|14. Half of the operations have the LSU carry corrupted. The result must be exact when the true carry is 0, and exactly 2^LW too small when it is 1. |
| `tb_ncl_reg2ki`, `tb_ncl_th22_layer`, `tb_ncl_cd` | random rail and Ki patterns against a reference C-element model, plus directed cases |
| `tb_ncl_isc` | pass, hold, clear, DATAX→DATA0 (including true rail first), single-Ki behaviour; never emits DATAX |
| `tb_ncl_cla` | 5- and 3-bit adders: sums, input completeness in both directions |
| `tb_srncl_stage` | two-Ki gating, DATAX correction on one copy, one-copy-only data never completes |

Upsets are injected with `force`/`release` on nets inside `srncl_cla`:
`msu_s_a`, `lsu_s`, `lsu_q`, `isc_a`, `msu_s_b` and `ko1_a`. When renaming
those nets, update the testbench.

## 8. Where this model departs from, or adds to, the source

* **Not modelled:** transistor-level area, power and delay. Fig.-3-style
  image quality (PSNR/SSIM) is not computed either; the workload testbench
  checks only the arithmetic error that drives it.
* **Adder structure, gate style, CD structure and ISC gates** are this
  design's own. The source gives the function of these blocks, not their
  gates.
* **Added:** a dual-rail carry-in operand, the register bit ordering, and the
  reset behaviour.
* **ISC control follows the text, not the figure.** The text says the next
  stage's CD drives the ISC units. A label in the architecture figure reads
  as the stage after that. The text was followed, for the reason given in
  section 4.
* **Default size:** 8 bits, 5|3. The 16- and 32-bit configurations are the
  same RTL with `NB`/`LW` overridden.
* **Gate count:** the source counts "N TH22 gates" per stage. This model
  uses one TH22 per rail (2 per dual-rail signal) and two such layers per
  stage, as the architecture drawing shows one in each copy.
