# SeqL scan locking in SystemVerilog

Logic locking hides a circuit's function behind key gates. With the wrong key, the circuit computes something else. Oracle-guided attacks, SAT-based ones in particular, can recover that key. The attacker needs a working chip (the oracle) and the reverse-engineered netlist, and must be able to apply chosen inputs and observe the outputs. A sequential IP buried in an SoC gives no direct access to its inputs and outputs, but its scan chains do. With scan, the attacker can load any state, clock the circuit once (or a few times), and shift the next state out. Scan therefore turns the sequential IP into a combinational circuit that the SAT attack can work on.

SeqL ("secure scan locking"; S. Potluri, A. Aysu, A. Kumar) changes which key the attack finds. The attack still succeeds in finding a key that is consistent with everything scan can show, but that key is very likely to be wrong for normal operation. Two things achieve this:

1. **Functional isolation.** A locked flip-flop has two outputs. The functional output `FQ` feeds the logic and is never key-gated. The scan output `SQ` feeds the next cell of the scan chain and passes an XOR/XNOR key gate (the *SQ key gate*). The SQ key therefore changes what scan shows and nothing else.
2. **FI locking.** The same flip-flop's functional input (`FI`, its D pin) passes a second key gate (the *FI key gate*). The FI key changes what the flip-flop stores, and hence the function.

Through scan, an attacker sees a locked flip-flop's captured value only after both gates. So the attacker learns the parity of the FI key bit together with the SQ key bits on the way to the scan output, but not the FI bit itself. Many keys satisfy the scan view, and only one of them has all FI bits right.

Only flip-flops **without feedback** are locked, that is, flip-flops whose output does not return to their own input through the logic. For a flip-flop with feedback, a multi-cycle scan test would propagate the FI inversion into the next state and expose it.

This repository gives RTL for the locked cells and for the locked flip-flop boundary of an IP. Testbenches reproduce the scheme's key-space properties.

## The locked flip-flop (`seql_ff`)

```
            SE
             |
 D  --|0\    |               +------------------------------ FQ
      |  |--[ master-slave ]-+
 SD --|1/    FF, rising edge  +--[ SE gate ]--( XOR/XNOR )-- SQ
                                                  |
                                                 sqk
```

- **Front end.** A normal mux-D scan flip-flop: `D` when `SE = 0`, `SD` when `SE = 1`.
- **`FQ`.** The stored bit, with no gate in its path.
- **`SQ`.** The stored bit after a transmission gate controlled by `SE`, then after the SQ key gate.
- **Why the transmission gate.** It stops `SQ` and the key gate from toggling during functional operation, which saves switching energy.
  - In RTL it is a latch: transparent while `SE = 1`, holding its value while `SE = 0`. That latch is intended.
  - An assertion in the module checks that `SQ` stays quiet while `SE` is low and the key is steady.
  - While shifting, `SQ` follows the stored bit combinationally. The next cell of the chain samples it at the next edge, the same timing as a plain scan chain.
- **Reset.** There is none, as in a library scan flip-flop. State is loaded by scan or by a capture.

The cell's published transistor-level figures are not modelled: 50 transistors, against 48 for an output-locked (EFF) cell and 38 for a plain scan flip-flop, and a 127 ps clock-to-Q.

## Key gates and what "correct" means

`key_gate` is `y = a ^ k` (XOR type) or `y = ~(a ^ k)` (XNOR type). It is the `kg_t` enum in `seql_pkg`.

- An XOR-type gate is transparent for key bit 0, an XNOR-type gate for key bit 1.
- Define the gate's *inversion* as key bit XOR gate kind. Correctness is then about inversions, not raw key bits.
- Each locked pair has an FI gate and an SQ gate, each of either kind, so there are four kinds of pair. The scheme's analysis labels them 00, 01, 10 and 11.

## A locked FI-SQ pair (`seql_fisq_cell`) and the parity rule

`seql_fisq_cell` is an FI key gate in front of a `seql_ff`. Its ports are those of `seql_ff` plus `fik`, the FI key bit.

The scan chain carries these pairs at its end. Number the locked pairs 0 … n−1, with pair n−1 nearest the scan output. Write `f_j` for the inversion of pair j's FI gate and `s_j` for the inversion of its SQ gate. Then:

- **What scan shows.** A value captured by pair j reaches the scan output inverted by `f_j ^ s_j ^ s_(j+1) ^ … ^ s_(n-1)`.
- **Scan-correct.** A key is scan-correct, meaning indistinguishable from the real key by any scan test, when that parity is 0 for every j.
- **Functionally correct.** A key is functionally correct when every `f_j` is 0. The `s_j` never matter functionally.

Counting the keys:

- For any choice of the n SQ inversions there is exactly one scan-correct choice of FI inversions. So there are 2^n scan-correct keys.
- Only one of them has all `f_j = 0`.
- The key the attack returns is therefore functionally wrong with probability 1 − 2^−n. That is 3/4 for n = 2, and 0.999 for n = 10, the value most of the evaluated benchmarks used.

Exhaustive simulation of the worked example (FI gates XOR/XOR, SQ gates XOR for pair 0 and XNOR for pair 1). The key is written {fik1, sqk1', fik0, sqk0}, where sqk1' = 0 means the XNOR gate is transparent:

| key  | scan-correct | functionally correct |
|------|:---:|:---:|
| 0000 | yes | yes |
| 0011 | yes | no  |
| 1101 | yes | no  |
| 1110 | yes | no  |
| 0001, 0100, 0101 | no | yes |
| all other 9 keys | no | no |

This matches the scheme's published truth table row for row.

**One caution about chain layout.** The rule above assumes that nothing else scans out through the locked cells. An unlocked flip-flop placed *ahead of* the locked pairs in the same chain has its value inverted by every SQ gate, `s_0 ^ … ^ s_(n-1)`. That adds one more constraint and halves the scan-correct keys to 2^(n−1). The same holds for the feedback flip-flops 1 and 2 if they share the chain, as one drawing of the worked example shows. In that case keys 0011 and 1110 would no longer be scan-correct.

This design therefore puts the flip-flops without feedback (the set R_wof) on a scan chain of their own by default, with the locked pairs at its end, as the benchmark evaluation did. Setting `JOIN_CHAINS = 1` builds the single chain instead. `tb_seql_joined_chain` then finds only 0000 and 1101 scan-correct. The workload testbench checks both counts: 16 scan-correct keys for n = 4 with only locked cells in the chain, and 8 with two unlocked cells in front.

## The locked boundary (`seql_top`)

`seql_top` holds all the scan flip-flops of an IP. The IP's combinational logic stays outside, connected through ports, so any netlist can be wrapped:

| group | cells | chain | locked |
|---|---|---|---|
| flip-flops with feedback | `NFB` × `scan_ff` | `si_fb` → fb[0] → … → fb[NFB−1] → `so_fb` | never |
| flip-flops without feedback (input/output registers, pipeline outputs) | `NWOF` cells | `si_wof` → wof[0] → … → wof[NWOF−1] → `so_wof` | the last `NLOCK`; pair j is wof[NWOF−NLOCK+j] |

| parameter | default | meaning |
|---|---|---|
| `NFB` | 2 | flip-flops with feedback |
| `NWOF` | 2 | flip-flops without feedback |
| `NLOCK` | 2 | locked FI-SQ pairs, 1 … `NWOF` |
| `FI_XNOR` | `2'b00` | bit j = 1: pair j's FI gate is XNOR type |
| `SQ_XNOR` | `2'b10` | bit j = 1: pair j's SQ gate is XNOR type |
| `JOIN_CHAINS` | 0 | 1: a single chain, `si_fb` → fb → wof → `so_wof`; `si_wof` is unused |

The defaults are the scheme's worked example: two feedback flip-flops and two locked output flip-flops.

Ports:

- `fb_d` / `fb_q` and `wof_d` / `wof_q` connect to the logic: `*_d` are next-state (FI) inputs, `*_q` are functional outputs.
- `fik[j]` and `sqk[j]` are pair j's key bits. The correct key is `fik = FI_XNOR`, `sqk = SQ_XNOR`. In a chip they come straight from a tamper-proof key store, with no scan-accessible key register in between. That is why shift-and-leak style attacks, which move key-register contents into the chain, have nothing to move.

Operation:

- `se = 1` shifts both chains by one bit per rising `clk` edge.
- `se = 0` is a functional clock (capture).
- The scan output `so_wof` is valid between edges, once `se` is high.

To lock an IP:

1. Classify its flip-flops by feedback.
2. Connect them to the two groups.
3. Choose n and the gate kinds.

The scheme's own flow adds locked pairs one at a time, from the scan-output end, until a SAT attack on the scan-unrolled netlist returns a functionally wrong key, within a budget on key size. That flow is design-time software and is not part of this RTL.

## Sizes the scheme was evaluated at

The sequential evaluation locked n = 6 … 10 pairs:

| benchmark | flip-flops | flip-flops without feedback | locked pairs |
|---|---|---|---|
| b14 | 245 | 54 | 8 |
| b15 | 449 | 70 | 9 |
| b17 | 1,415 | 97 | 6 |
| b18 | 3,320 | 23 | 10 |
| b19 | 6,642 | 30 | 10 |
| b20 and b21 | 490 | 22 | 10 |
| b22 | 735 | 22 | 10 |
| a RISC-V core | 2,031 | 226 | 10 |

`tb/tb_seql_workloads.sv` builds `seql_top` at each of these sizes. Their combinational logic is unknown, so a generated stand-in surrounds the flip-flops. On each configuration the testbench checks:

- the correct key;
- three keys built by the parity rule with wrong FI bits, which are scan-correct and functionally wrong;
- a key with one wrong SQ bit, which is functionally correct and scan-wrong;
- 1, 2 and 5 capture cycles per scan test, the multi-cycle tests of the evaluation.

The pipelined combinational benchmarks (ISCAS/MCNC) were locked by moving existing combinational key gates to the pipeline boundary. Their register widths are not published, so they have no configuration here.

## Verification

| testbench | what it shows |
|---|---|
| `tb_key_gate` | both gate kinds, exhaustively |
| `tb_scan_ff` | mux-D capture and shift, random stimulus |
| `tb_seql_ff` | `FQ` ignores the key; `SQ` is the key-gated bit while shifting and holds while `SE = 0` |
| `tb_seql_fisq_cell` | all four gate-kind combinations with random keys |
| `tb_seql_top` | the default configuration end to end, checked against a cycle model. All 16 keys, every scan test (all states × inputs) at 1, 2 and 5 captures, plus functional sequences against the unlocked circuit. It reproduces the truth table above and counts each mechanism: shift, capture, multi-cycle capture, scan-locked mismatch, functional corruption, isolation |
| `tb_seql_joined_chain` | the worked example on one chain: the reduced set of scan-correct keys |
| `tb_seql_workloads` | the benchmark sizes above, plus exhaustive key enumeration for n = 4 |

Every testbench prints `TB_RESULT checks=N failures=M`. Run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/seql_pkg.sv \
          tb/tb_seql_top.sv --top-module tb_seql_top
./obj_dir/Vtb_seql_top
```

Replace `tb_seql_top` with any other testbench name.

- The two-state simulator starts undriven state at random values, so the testbenches flush the chains before they check anything.
- `tb_seql_workloads` builds the large benchmark-sized configurations: compiling takes about two minutes, simulating a few seconds.

## Where this RTL departs from or goes beyond the published scheme

- **Separate scan chain for the flip-flops without feedback by default.** The benchmark setup specifies it. One drawing of the worked example shows a single chain instead (`JOIN_CHAINS = 1`), and with a single chain the published truth table would not hold (see above).
- **One chain for all feedback flip-flops.** The evaluated designs had 3 to 67 chains; how they were stitched is not published.
- **The transmission gate is a level-sensitive latch.** Its conducting polarity (`SE = 1`) follows from its purpose; it is not stated.
- **No reset** in any cell.
- **One `se` for both chains.**
- **No combinational key gates (K_c).** The sequential flow leaves the logic unlocked, so the logic and any key gates in it stay outside `seql_top`.
- **No tamper-proof key store, no EDT compressor/decompressor.** The attacks are run in EDT bypass, so they are not modelled. No design-time locking flow either.
- **No timing, area or energy.** Setup, clock-to-Q and energy per toggle come from transistor-level simulation of the cells and have no RTL equivalent.

## Files

- `rtl/seql_pkg.sv`: gate-kind type and helpers.
- `rtl/key_gate.sv`, `rtl/scan_ff.sv`, `rtl/seql_ff.sv`, `rtl/seql_fisq_cell.sv`: the cells.
- `rtl/seql_top.sv`: the locked boundary.
- `tb/`: one testbench per module, the workload testbench, and its harness `seql_workload_harness.sv`.
