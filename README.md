# A complex-gate, strongly indicating QDI majority voter for TMR

Triple modular redundancy (TMR) runs three copies of a function block and
takes the majority of their outputs, so one wrong block is outvoted. In a
clocked design the voter is a single majority gate. In a **quasi delay
insensitive (QDI)** asynchronous design it is harder. There is no clock to say
when the three inputs are valid, so the voter must itself work out when they
have *all* arrived. If it does not, a late input can change an internal gate
that nothing downstream ever acknowledges (a "gate orphan"), and the circuit is
no longer delay insensitive.

This RTL implements the voter proposed by P. Balasubramanian, D.L. Maskell and
N.E. Mastorakis in "Area Optimized Quasi Delay Insensitive Majority Voter for
TMR Applications" (called CG_MV there). It puts the voter in the circuit that
paper evaluates: one QDI stage made of an input register bank and a TMR full
adder. The voter uses one complex gate per output rail. An internal completion
detector and two C-elements then hold the voted result back until every input
is present. The design is written for both 4-phase protocols, return-to-zero
(RTZ) and return-to-one (RTO). A single parameter selects the protocol.

## Dual-rail codes and the two handshakes

Every bit `X` travels on two wires `(X1, X0)`, the `dr_t` struct in
`qdi_pkg` (fields `r1`, `r0`):

| protocol | X = 1  | X = 0  | spacer (no data) | illegal |
|----------|--------|--------|------------------|---------|
| RTZ      | (1,0)  | (0,1)  | (0,0)            | (1,1)   |
| RTO      | (0,1)  | (1,0)  | (1,1)            | (0,0)   |

Data and spacer alternate. Under RTZ a transaction is data, then spacer. Under
RTO it is spacer, then data. Each wave is paced by an acknowledge. A stage's
completion detector raises `ACKOT` once its register bank holds a complete
wave. The previous stage receives it inverted, as `ACKIT = ~ACKOT`.

Every RTO rail is the complement of the corresponding RTZ rail. So an RTO
circuit is the RTZ circuit with every gate replaced by its dual (AND↔OR,
AO222↔OA222). The C-elements stay as they are, since they are self-dual. Every
module here has a `PROTOCOL` parameter (`qdi_pkg::RTZ` by default, or `RTO`)
that makes exactly this swap. Nothing else changes between the two versions.

## The C-element

The C-element is the memory of QDI logic. Its output `L` copies its inputs when
they agree and holds while they disagree: `L = JK + JL + KL`
(`rtl/c_element.sv`). It is written as a latch that is transparent while
`J == K`. That is the same next-state function without a combinational loop.
Synthesis therefore reports one latch per C-element; this is intended. The
variant `c_element_r` adds an active-low reset and is used only in the register
bank.

## The voter, `cg_mv` (the hard part)

The voted output must satisfy

    M1 = P1·Q1 + Q1·R1 + P1·R1        M0 = P0·Q0 + Q0·R0 + P0·R0

where `P`, `Q`, `R` are the same output of the three function blocks. The
voter has three layers:

1. **Majority gates.** Each rail's majority is one AO222 complex gate under
   RTZ, or one OA222 under RTO. Its three pairs are wired to (P,Q), (Q,R) and
   (P,R), and the outputs are called `NM1` and `NM0`. A single complex gate
   has no internal nodes between its product terms. This is why the
   sum-of-products needs no conversion to disjoint form, and it is where the
   area saving over earlier QDI voters comes from.
2. **Internal completion detector.** The gates above are *early output*. Once
   `P1 = Q1 = 1`, `NM1` rises no matter where `R` is, and `R`'s later arrival
   goes unacknowledged. So the voter ORs the two rails of each input (AND under
   RTO) and joins the three results with two C-elements. The result, `NCD`,
   changes only when all three inputs hold data, or all three hold the spacer.
3. **Output C-elements.** The outputs are `M1 = C(NM1, NCD)` and
   `M0 = C(NM0, NCD)`. `M` therefore switches to data only after every input
   has data, and back to spacer only after every input is spacer. This is
   *strong indication*, and it makes every input transition visible at the
   output.

Consequences a user should know:

* **A wrong value is outvoted.** A block that delivers valid data with the
  wrong value (for example, its two rails swapped) is masked in the normal
  way.
* **A silent block stalls the voter.** A block that stops handshaking stalls
  the voter, because the voter is strongly indicating. This holds for a block
  stuck at spacer, and for a block stuck at data that never returns to spacer.
  The voter then waits indefinitely, as a short simulation confirms. It
  tolerates faults that corrupt *values*, not faults that break the handshake.
* **Latency is that of the slowest block.** The voter cannot answer before
  all three blocks have answered. This is the price of strong indication. In
  the paper, forward and reverse latency are therefore equal, and the cycle
  time is twice the forward latency.
* **Illegal output is asserted against.** An immediate assertion checks that
  `M` never takes the illegal codeword.

## The evaluated stage, `qdi_tmr_fa` (top)

```
 in_i[0..2] ──► input register bank ──┬─► full adder 1 ─┐ sum   ┌─► cg_mv ─► sum_o
 (A,B,Cin)      (6 C-elements, ACKIT) ├─► full adder 2 ─┼───────┤
                        │             └─► full adder 3 ─┘ carry └─► cg_mv ─► carry_o
                completion detector ─► ack_o (ACKOT to the sender)
 ack_i (ACKIT from the receiver) ──► every register C-element
```

| port         | dir | width     | meaning |
|--------------|-----|-----------|---------|
| `rst_ni`     | in  | 1         | active-low reset of the input register bank to spacer |
| `in_i`       | in  | 3 × dr_t  | dual-rail A (`[0]`), B (`[1]`), Cin (`[2]`) |
| `ack_o`      | out | 1         | ACKOT of the input bank: all data latched (RTZ 1 / RTO 0) or all spacer |
| `ack_i`      | in  | 1         | ACKIT from the receiver: 1 lets rails rise, 0 lets them fall |
| `sum_o`      | out | dr_t      | voted sum |
| `carry_o`    | out | dr_t      | voted carry |
| `fb_sum_o`   | out | 3 × dr_t  | each adder's own sum (observation) |
| `fb_carry_o` | out | 3 × dr_t  | each adder's own carry (observation) |

One RTZ transaction runs as follows:

1. After reset, `ack_o = 0` and `ack_i = 1`.
2. The sender puts data on `in_i`. Each rail is captured as it arrives.
3. Once all three bits are captured, `ack_o` rises and the sender may return
   to spacer; the bank keeps holding the data.
4. Both voted outputs become data. The receiver takes them and drives
   `ack_i = 0`.
5. The bank passes the spacer and `ack_o` falls.
6. The outputs return to spacer, and the receiver drives `ack_i = 1`.

RTO is the same sequence, with spacer first and data second.

**Timing assumption.** The function blocks are early output. In particular, an
adder's sum already returns to spacer when one input does. A voted spacer
therefore does not prove that every register rail has seen the sender's
spacer. If the receiver re-opened the bank (`ack_i` back to the rising phase)
before the sender's whole spacer wave had reached `in_i`, a rail could stay
latched, and the stage would deadlock. The sender must present its complete
spacer before the receiver's return acknowledge. This is the usual relative
timing condition of early-output QDI stages. The environment in
`tb/qdi_tmr_env.sv` meets it by bounding the sender's skew and delaying the
receiver for longer.

**Synthesis.** The three adders are identical and share their inputs.
Ordinary logic optimisation merges them, and then the voters see three copies
of one signal. A real flow must keep the instances apart, with keep-hierarchy
or don't-touch attributes.

## The function block, `qdi_full_adder`

The paper uses an early-output QDI full adder from earlier work and does not
describe its gates. This module is the simplest gate network with the same
character, so it is this design's own construction and not a copy of that
adder:

* The carry rails are rail-wise majorities. A carry rail can therefore appear
  as soon as two inputs agree (early output).
* The sum rails are ORs of the four full minterms of each polarity
  (`sum1 = a1b1c1 + a1b0c0 + a0b1c0 + a0b0c1`, and `sum0` likewise). The sum
  therefore waits for all three inputs.
* The RTO version is the gate dual of the RTZ version.

The module contains no state.

## Register bank and completion detector

`qdi_register_bank` has one C-element per rail. The rail from the sender is
one input and `ack_i` is the other. With `ack_i = 1` rising rails pass and are
held. With `ack_i = 0` falling rails pass. An assertion rejects an input
holding the illegal codeword. The reset is this design's own addition; the
paper does not discuss initialisation.

`completion_detector` reduces each dual-rail input to one wire (an OR under
RTZ, an AND under RTO) and chains the wires through 2-input C-elements:
`C(…C(C(g0,g1),g2)…)`. With `N = 3` this is exactly the voter's internal
detector. The stage's input detector uses the same module.

## Where this RTL departs from, or goes beyond, the paper

* **Full adder.** Its internals are this design's own (see above).
* **Reset.** The reset on the input register bank was added. The observation
  ports `fb_sum_o`/`fb_carry_o` were also added.
* **C-element modelling.** The C-element is modelled as a latch. The paper
  uses a custom static transistor-level cell.
* **Detector chains for N > 3.** The chain shape of the completion detector
  for more than three inputs is a choice. The paper draws two and three
  inputs.
* **Receiver placement.** The receiver is outside the stage. The paper's
  evaluated circuit also has only an input register bank.
* **Physical results not reproduced.** The paper's results are from a
  32/28 nm standard-cell implementation: cycle times of about 1.9 ns, a stage
  area of 218.31 µm², and a voter area of 25.92 µm² against 37.11 µm² for the
  smallest earlier QDI voter, in both protocols. RTL simulation here is zero
  delay, so it checks function, ordering and handshake behaviour, not timing,
  area or power.
* **Baseline voters omitted.** The four earlier voters the paper compares
  against are not included.

## Verification

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_c_element` | 2000 random input pairs against a hold/update reference |
| `tb_completion_detector` | RTZ/RTO, 2 and 3 inputs; acknowledge moves only on the last input of a wave, inputs in random order |
| `tb_qdi_register_bank` | random legal codewords and ACKIT against per-rail reference C-elements; ordered RTZ and RTO transactions (pass, hold, release) |
| `tb_qdi_full_adder` | all 8 vectors, random arrival order: sum waits for all inputs, carry appears once two inputs agree, spacer returns |
| `tb_cg_mv` | all 8 input combinations (6 of them with a dissenting block), random arrival order: `M` stays spacer until the last input, equals the majority, holds until the last spacer |
| `tb_qdi_tmr_fa` | RTZ and RTO stages side by side, 240 handshake transactions each (see below) |
| `tb_qdi_tmr_fa_full` | the top at its default parameters (RTZ), 64 transactions, the first 8 covering every input combination |

The two stage-level testbenches use `qdi_tmr_env`, which acts as sender,
receiver and checker:

* **Words and checking.** It sends words under the full 4-phase handshake. The
  rails of each word arrive in random order with random gaps. Each voted word
  is checked against integer addition.
* **Fault modes.** In about two thirds of the transactions one adder is made
  faulty. "Wrong" swaps the block's rails. "Late" delays the block's output.
  The fault is applied with `force` on that block's output net inside the top.
* **Monitors.** On every output change, a monitor checks strong indication: a
  voted output may become data only when all three of its inputs are data, and
  may become spacer only when all are spacer.
* **Coverage counts.** It counts outvoted wrong blocks, voters held back by a
  late block, early carries, and the register bank holding data after the
  sender's spacer. The run fails if any count stays at zero.

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/qdi_pkg.sv tb/tb_qdi_tmr_fa.sv --top-module tb_qdi_tmr_fa
./obj_dir/Vtb_qdi_tmr_fa
```

The same command runs any other testbench. Change both the file name and
`--top-module`.

A simulator note for anyone extending the testbenches: in Verilator 5, an
executed `#0` can keep latch-based logic from re-evaluating in that time step.
The environment therefore skips zero waits instead of executing them.

## Files

* `rtl/qdi_pkg.sv` holds the dual-rail type, the protocol enum, and the
  encode/decode helpers.
* Primitives:
  * `rtl/c_element.sv` is the C-element.
  * `rtl/c_element_r.sv` is the C-element with reset.
  * `rtl/ao222.sv` and `rtl/oa222.sv` are the complex gates.
* Blocks:
  * `rtl/completion_detector.sv` is the completion detector.
  * `rtl/qdi_register_bank.sv` is the register bank.
  * `rtl/qdi_full_adder.sv` is the full adder.
  * `rtl/cg_mv.sv` is the voter.
* `rtl/qdi_tmr_fa.sv` is the top: the TMR full-adder stage.
* `tb/` holds one testbench per block, the stage environment
  `qdi_tmr_env.sv`, and the two stage-level testbenches.
