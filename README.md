# HFS-box: a pipelined AES S-box that corrects transient faults with duplication and stall

The AES S-box is the largest and most fault-sensitive part of an AES datapath. A transient
upset in it gives a wrong ciphertext byte, and fault-injection attacks can exploit that.
Triple modular redundancy (TMR) hides such upsets but triples the area. This design
duplicates the logic and makes up for the missing third vote with time:

* The S-box is built in composite-field arithmetic and cut into five pipeline stages. This
  keeps the clock fast at one byte per cycle.
* Each stage exists twice, an *original* and a *redundant* replica, each with its own
  pipeline register.
* A comparator per stage flags any difference between the two registers. A control unit
  combines the flags into a single global signal, **Err**.
* Each register stage has two *voters*, one for each replica. While Err is inactive, a voter
  passes the value both replicas agree on. While Err is active, every voter in the
  pipeline holds its last output. The whole pipeline then recomputes from its last correct
  state. This goes on until the transient fault has gone, however long it lasts. After
  that the stream resumes, in order and with no byte lost or repeated.

The cost is one stalled cycle for each cycle in which a fault is present. In return, a
fault in one replica of any stage is corrected, whether it hits the logic or the register.

This RTL follows the design described by M. Taheri, S. Sheikhpour, M. S. Ansari and
A. Mahani in "DMR-based Technique for Fault Tolerant AES S-box Architecture" (called
HFS-box there, with FC-DMR for the fault-correction scheme). The publication leaves some
details open. Where it does, the choices made here are stated below and in each file's
header.

## 1. The arithmetic: S-box in a composite field

The S-box is `y = A·x⁻¹ + 0x63`, with the inverse taken in GF(2⁸) modulo
x⁸+x⁴+x³+x+1 (0 maps to 0). The inversion is done in an isomorphic tower field:

| level | field | defining polynomial | element |
|---|---|---|---|
| 1 | GF(2²) | w² + w + 1 | `{b1,b0}` |
| 2 | GF((2²)²) | y² + y + φ, φ = `{10}` | `{ah[1:0], al[1:0]}` |
| 3 | GF(((2²)²)²) | z² + z + λ, λ = `{1100}` | `{ξh[3:0], ξl[3:0]}` |

The polynomial shapes come from the publication. The constants φ and λ do not: they are
the usual pair for this decomposition, chosen here. Under them, the inverse of
`ξ = ξh·z + ξl` is

```
d   = (ξh + ξl)·ξl + λ·ξh²        (GF((2²)²))
σh  = d⁻¹ · ξh
σl  = d⁻¹ · (ξh + ξl)
```

The isomorphism δ maps a GF(2⁸) byte into the tower field. It sends bit k of the byte to
βᵏ, where β = `0x5f` (tower encoding) is a root of the AES polynomial. That gives the
matrix below. Row i lists the input bits XORed into output bit i, with input bit 7 on the
left.

```
out7 10100000   out3 11000110
out6 11011110   out2 10011110
out5 10101100   out1 01010010
out4 10101110   out0 01000011
```

On the way back, δ⁻¹ and the AES affine matrix are merged into one XOR matrix
(`INV_AFF_ROW` in `hfs_pkg`), and 0x63 is added after it. The affine map is the one from
the AES standard. The publication prints its own version of the affine equation, with a
short last row and a constant that is not 0x63. That version does not reproduce the AES
S-box and is not used.

Blocks (all combinational):

| module | function | form |
|---|---|---|
| `iso_map` | δ | 8×8 XOR matrix |
| `gf4_sq` | a² in GF((2²)²) | `{a3, a3^a2, a2^a1, a3^a1^a0}` |
| `gf4_mul_lambda` | a·λ | `{a2^a0, a3^a2^a1^a0, a3, a2}` |
| `gf4_mul` | a·b | Karatsuba: 3 GF(2²) products + one ·φ |
| `gf4_inv` | a⁻¹ | same tower trick one level down; in GF(2²), d⁻¹ = d² |
| `inv_iso_affine` | A·δ⁻¹·σ + 0x63 | 8×8 XOR matrix + constant |

## 2. The five-stage cut

Six register lines cut the S-box into five stages. The first line is the input register.
`hfs_stage_logic #(STAGE)` holds the logic of one stage. Each register stage carries a
`stage_t`: a valid bit plus a 16-bit field, whose layout per stage is given in `hfs_pkg`
(`s0_t` … `s5_t`).

| stage | logic | register contents after the stage |
|---|---|---|
| input reg | — | x |
| 1 | δ; s = ξh ⊕ ξl | ξh, ξl, s |
| 2 | λ·ξh² (square, then ·λ); s·ξl | ξh, s, λξh², s·ξl |
| 3 | d = s·ξl ⊕ λξh²; d⁻¹ | ξh, s, d⁻¹ |
| 4 | σh = d⁻¹·ξh; σl = d⁻¹·s | σh, σl |
| 5 | δ⁻¹ and affine | y |

ξh and s are carried through stages 2 and 3 to the two stage-4 multipliers, as 4-bit side
paths. The XOR that forms d is placed at the start of stage 3, just before the inversion.

## 3. Fault correction in DMR (FC-DMR)

One protected stage (`fcdmr_stage`) contains:

```
 v1[i-1] -> logic_i (original)  -> reg i,1 --+--> voter 1 (a = reg i,2, b = reg i,1) -> v1[i]
 v2[i-1] -> logic_i (redundant) -> reg i,2 --+--> voter 2 (a = reg i,1, b = reg i,2) -> v2[i]
                                             +--> DU_i:  err[i] = (reg i,1 != reg i,2)
 CU:  err_n = ~|err[0..5]   --> every voter of every stage
```

Replica 1 of stage i+1 reads only voter 1 of stage i, and replica 2 reads only voter 2.
So the two replicas stay independent from input to output. The voter's only cross term is
the agreement check.

### The voter (`dmr_voter`)

Each bit works like a Muller C-element gated by Err:

```
c = err_n ? (a & b) | (hold & (a | b))  : hold         hold <= c  (every clock)
```

If both inputs are 1 the output becomes 1, and if both are 0 it becomes 0. If they differ,
or while Err is active, the output keeps its last value. The published gate-level voter
gets this from a flip-flop with D tied high. That flop is clocked by (delayed A) ∧ B ∧ ERR
and reset by ¬(A ∨ B) ∧ ERR, and a delay element in it deals with asynchronous timing.
Here the behaviour is written synchronously. The output is combinational from the
registers, and a clocked `hold` register keeps the last output. The delay element has
nothing to do in a synchronous design and is left out.

### What happens on a fault

The registers load on every clock edge, even while Err is active. The voters, though, hold
the previous state. So every stage recomputes exactly what it computed the cycle before,
and the clean result overwrites a corrupted register. For example, a 1-cycle fault enters
replica 1 of stage 3 at edge E, while byte n is in stage 3:

| cycle after | stage-3 regs | err_n | voters (all stages) | stage-3 regs load | in_ready |
|---|---|---|---|---|---|
| E−1 | agree | 1 | pass (n−1 in v3) | f(v2) = byte n, replica 1 hit | 1 |
| E | differ | 0 | hold (n−1 in v3) | f(held v2) = byte n again, clean | 0 |
| E+1 | agree | 1 | pass (n in v3) | byte n+1 | 1 |

A fault lasting k cycles keeps err_n low for k cycles, and the pipeline stalls for exactly
k cycles. Nothing else changes.

### Input stage (`hfs_input_stage`)

The input register is also a DMR pair, with a comparator and two voters. During a stall
it must reload the byte it took last, not a new one. Since the DMR pair cannot say which
of its copies is good, a single `replay` register keeps the last accepted input word, and
the pair reloads from it while Err is active. Towards the source, `in_ready = err_n`. The
replay register and the handshake are this design's own: the publication only shows a
register at the S-box input.

### Output

`out_data` comes from voter 1 of stage 5. `out_valid = err_n & valid`. During a stall the
held output was already delivered, so it is not flagged again.

## 4. Interface and timing of `hfs_sbox`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears all registers and voter states) |
| `in_valid`, `in_data`, `in_ready` | in/in/out | 1/8/1 | valid/ready input; a byte is taken at a rising edge with `in_valid & in_ready` |
| `out_valid`, `out_data` | out | 1/8 | one S-box result per valid cycle; no back-pressure |
| `err_n` | out | 1 | Err: low while any stage's replicas differ |
| `fi1`, `fi2` | in | 6 × `stage_t` | fault injection masks, XORed into the register inputs of replica 1 / 2 of register stage 0 (input) … 5; tie to 0 in use |
| `fi_du` | in | 6 | flips the mismatch flag of a stage's detection unit before the control unit (a false alarm); tie to 0 in use |

* Throughput: one byte per clock without faults. For comparison, the publication reports
  492 MHz in a 180 nm process, or 3936 Mbit/s.
* Latency: 6 clock edges from acceptance to `out_valid` (input register plus five
  stages), plus one for every stalled cycle in between.
* Stall: `in_ready` is low, and `out_valid` too, in every cycle in which `err_n` is low.

The fault-injection ports are a test hook of this design, not part of the published
circuit. Synthesis removes them when they are tied to zero.

A transient fault inside a detection unit shows up as a false alarm: one stalled cycle per
faulty cycle, and the data are unaffected.

## 5. What is and is not covered

Corrected: any transient fault, of any duration, that corrupts one replica of one stage,
in its logic or in its register. That includes a fault that moves from stage to stage, as
long as only one replica is wrong at a time.

Not covered, as in the publication's own analysis:

* A permanent fault. It keeps Err active forever, and the pipeline stalls for good.
* A fault that corrupts both replicas of a stage in the same way. It is not detected.

Not covered by this implementation:

* A comparator that misses a real mismatch while one replica is also wrong. That is a
  double fault. A comparator raising a false alarm is harmless (section 4).
* Faults in the control unit or the replay register. These are single copies.
* A flip of a voter's `hold` register while a stall is in progress. Outside a stall,
  `hold` is rewritten every cycle and such a flip has no effect.

## 6. Where this RTL departs from or adds to the publication

* δ, φ, λ and the merged δ⁻¹/affine matrix are derived here (section 1). The printed
  affine equation is replaced by the AES standard one.
* The voter is synchronous, and its delay element is left out (section 3).
* Err polarity: the per-stage flags are active high. The global Err (`err_n`) is active
  low, because the control unit "resets" it on a fault and the voter's set and reset paths
  are enabled by it.
* The input replay register, the valid/ready input, the valid bit carried with the data,
  reset values and fault-injection ports are additions.
* All register stages share one 17-bit width, and the unused bits are zero. Coarse
  synthesis counts 408 flip-flop bits: 6 stages × (2 registers + 2 voter holds) × 17. Only
  70 of the 102 register bits per replica carry data, so 280 bits plus the replay register
  remain once the constant bits are removed. Even that is more than fits in the 503 gate
  equivalents the publication reports for its version. The area figures were not
  reproduced, and the source of the gap is unknown.
* The TMR and TTR versions that the publication compares against are not included.

## 7. Files and simulation

`rtl/` (one module or package per file):

* `hfs_pkg.sv`: field constants, matrices, `stage_t` and per-stage layouts, GF(2²) helpers
* `iso_map.sv`, `gf4_sq.sv`, `gf4_mul_lambda.sv`, `gf4_mul.sv`, `gf4_inv.sv`,
  `inv_iso_affine.sv`: arithmetic
* `hfs_stage_logic.sv`: logic of stage 1…5
* `dmr_voter.sv`, `dmr_cmp.sv` (detection unit), `fcdmr_cu.sv` (control unit),
  `fcdmr_reg_stage.sv` (register pair with two voters)
* `fcdmr_stage.sv`: one protected stage
* `hfs_input_stage.sv`: protected input register with replay
* `hfs_sbox.sv`: top level

`tb/` holds a self-checking testbench `tb_<module>.sv` for every module, plus
`tb_ref_pkg.sv`. That package is an independent reference: tower-field arithmetic written
out term by term, and the AES S-box computed from its definition. Each testbench prints
`TB_RESULT checks=N failures=M`.

* The arithmetic testbenches are exhaustive.
* The FC-DMR testbenches close the loop: the testbench plays the control unit and the
  neighbouring stages, and injects faults of random length.
* `tb_hfs_sbox` streams every byte value eight times, with random gaps. It injects
  1–8-cycle faults into both replicas of all six register stages, plus one 40-cycle
  fault, and false alarms into every detection unit. It checks the data, the order and
  the latency of every result. It checks that stall cycles equal faulty cycles, and that
  a 300-byte fault-free burst comes out back to back. It runs the top level with its
  default configuration.

Run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/hfs_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_hfs_sbox.sv --top tb_hfs_sbox -Mdir obj_tb
./obj_tb/Vtb_hfs_sbox
```

Replace `tb_hfs_sbox` by any other `tb_<module>` to test that block. Lint the design with
`verilator --lint-only -Wall -Irtl rtl/hfs_pkg.sv rtl/hfs_sbox.sv`.

To change the field constants, φ and λ in `hfs_pkg` must be changed together with
`DELTA_ROW`, `INV_AFF_ROW` and the closed forms in `gf4_sq` and `gf4_mul_lambda`. The
matrices follow from a new root β of the AES polynomial, as described in section 1. The
testbench reference in `tb_ref_pkg` must be updated to match.
