# A row-layered offset min-sum LDPC decoder for quasi-synchronous operation

This RTL implements the processing datapath of a low-density parity-check (LDPC)
decoder. It was designed to be run *quasi-synchronously*: with a clock period or supply
voltage at which some paths sometimes miss timing, and with no circuit that detects or
corrects such misses. The decoder is iterative and tolerates noise, so an occasional
wrong message costs a little convergence speed instead of a wrong result, and the energy
saved by lowering the supply voltage outweighs it. The per-iteration voltage and clock
schedule is chosen offline from density-evolution analysis. The logic itself is an
ordinary synchronous circuit, and that is what these files describe. It contains:

* a processing unit that computes every message to and from one check node in each
  clock cycle (`oms_processor`);
* the same unit reduced to one full variable-node processor. This is the small "test
  circuit" used to characterise timing violations and energy in place of the whole
  decoder;
* a complete single-processor decoder around it (`ldpc_decoder`), with belief and
  message memories and a layer sequencer.

The datapath (message format, check-node algorithm, minimum-finding tree, register
placement, 3-cycle latency) follows the published architecture. The parity-check code,
the memory organisation, the layer-to-layer pipeline stall and the load/read ports are
this design's own choices. The architecture description leaves all of these out.

## The algorithm

The parity-check matrix H (m rows, n columns, column weight DV, row weight DC) is split
into L = DV *layers*. Each column has exactly one non-zero in each layer. Every
variable node (VN) i keeps a belief total Λ_i, initialised to its channel belief
μ⁽⁰⁾_i. Every edge keeps the last check-to-variable message λ_{i,j}, initially 0. One
iteration visits the layers in order, and for each check node j of a layer:

1. every neighbour forms its extrinsic message μ_i = Λ_i − λ_{i,j};
2. the check node finds the smallest and second-smallest magnitude |μ| (m1, m2), subtracts
   the offset C from both (floored at 0), and takes the product s of all signs;
3. neighbour i receives λ_{i,j} = s·sgn(μ_i)·(m2−C if |μ_i| = m1, else m1−C), where
   sgn(0) = +1;
4. Λ_i = μ_i + λ_{i,j}, and the hard decision is the sign of Λ_i.

All messages are 6-bit two's-complement numbers, saturated to ±31. The symmetric range
lets every message also be written in sign-and-magnitude form with a 5-bit magnitude,
which is the form the check node works in. Belief totals are one bit wider (7 bits).
Since |μ| ≤ 31 and |λ| ≤ 30, the sum Λ = μ + λ always fits and is never clipped; only
μ = Λ − λ is saturated back to 6 bits. This width is a choice of this design: the
message width is the only one the source fixes. It matters. With Λ clipped to ±31, a
node whose other layers all agree strongly can come out of Λ − λ with the wrong sign.
On short codes this was seen to turn whole frames into the all-(−1) codeword. The default offset is C = 1 and
the default code is a (3,30) regular code (rate 0.9).

## The processing unit (`oms_processor`)

```
            input reg          pipeline reg                    output reg
Λ'_i, λ_i ─► [ ] ─► VNP front ─┬─► [extr] ─────────────► VNP back ─► [ ] ─► Λ_i, λ_i
  (×DC)           μ = Λ'−λ     │                         to 2's, +
                  to S&M       └─► CNP sign: XOR ─► [sign ×DC] ───┘
                                   CNP min : MIN1,2 ─► [min1][min2] ─► −C ─┐
                                             =min1? ─► [eq ×DC] ─► select ─┘
```

* **VNP front** (`vnp_front`): the subtractor (7-bit Λ' minus 6-bit λ, saturated to
  6 bits) and the conversion to sign and magnitude. μ also goes into the `extr` register for the VNP back.
* **CNP** (`cnp`): XOR of all input signs, XOR-ed again with each input's own sign; the
  MIN1,2 tree; and one "equal to min1" comparator per input. These feed the pipeline
  register, which holds min1, min2, DC equality flags and DC output signs. After the
  register, C is subtracted from both minima, and a multiplexer per output picks
  min2−C for the input that held the minimum and min1−C for all others.
* **VNP back** (`vnp_back`): back to two's complement, the exact 7-bit add
  Λ = μ + λ, and the hard decision.
* **MIN1,2 tree** (`min12_tree`, `sort2`, `merge4`, `merge3`). It uses fewer comparators
  than a plain comparison tree. A *Sort* block (one comparator, two multiplexers)
  orders each pair of inputs. *Merge* blocks (two comparators, four multiplexers) then
  combine sorted pairs. The first comparator of a Merge picks the overall min1. Its
  loser is compared with the second minimum of the winning pair, chosen by the same
  comparator, to give min2. If DC is odd, the leftover input goes with a pair into a
  3-input Merge: the 4-input block without the min2b input and the bottom multiplexer.
  For DC = 30 the tree has 15 Sort and 14 Merge blocks in five levels.

**Timing.** The unit has three registers: input, pipeline and output. A result therefore
appears three rising edges after its inputs, marked by `out_valid`. It accepts a new
check node every cycle and never stalls. Only the valid bits are reset.

**Decoder unit or test circuit.** Parameter `NB` sets how many VNPs have a back part.
With `NB = DC` (default) every neighbour's Λ and λ are updated; this is the unit of the
full decoder. With `NB = 1`, input 0 is a full VNP and the other DC−1 are fronts only.
This is the test circuit used to measure how timing violations distort the output. In
that use the head VN starts a computation tree with Λ' = 0 and λ = 0. Its belief output
is fed back as its own Λ' for DV−1 successive check nodes, while the other inputs are
random beliefs. Because the latency is 3 cycles, three independent trees are
interleaved to keep the pipeline full. `tb/oms_processor_tb.sv` does exactly this.

## The decoder (`ldpc_decoder`)

**Code.** H is a quasi-cyclic array code built from Z×Z circulant permutation matrices
(default Z = 31, so n = DC·Z = 930 and m = DV·Z = 93). Row r of layer l is connected to
VN `k·Z + ((r + l·k) mod Z)` of every block column k = 0…DC−1. The shift is computed in
`ldpc_pkg::qc_shift`; replace that function to use another code with the same
block-column structure. Each row has exactly one VN in each block column, and
consecutive layers use different shifts. Two consecutive rows therefore never share a
VN, which the timing-violation model assumes.

**Memories.** `belief_mem` has one bank per block column, so VNP k always works on
bank k. Routing between VNPs and CNP is fixed, and the code is realised only through
the addresses. `cmsg_mem` holds one word of DC messages per check node. Both have
asynchronous reads and synchronous writes. Hard decisions are kept in a separate
one-bit-per-VN register array.

**Schedule and the layer stall** (`layer_ctrl`). One row is issued per cycle. Its
results are written back on the edge that ends the third cycle after issue. Rows within
a layer touch disjoint VNs, so they stream back to back. The next layer may read a VN
that one of the last rows of this layer is still updating. The controller therefore
idles for 3 cycles after every layer. A decode of T iterations takes exactly
`T · DV · (Z + 3)` cycles: 1 020 cycles for 10 iterations at the defaults. In
iteration 1 the message inputs are forced to zero instead of clearing `cmsg_mem`.

**Interface.**

| signal | dir | meaning |
|---|---|---|
| `ld_en, ld_bank, ld_addr, ld_llr` | in | while idle, write the channel belief of VN `ld_bank·Z + ld_addr` |
| `start, n_iter` | in | start a decode of `n_iter` iterations (0 counts as 1) |
| `busy, done` | out | decode running; one-cycle pulse at the end |
| `cur_iter` | out | iteration in progress, for an external voltage/clock controller |
| `rd_bank, rd_addr` → `rd_belief, rd_hard` | in/out | while idle, combinational read-out of Λ and the hard decision (1 = −1) |

Channel beliefs are expected as round(α·y/σ²) for a received value y and noise
variance σ². The testbench uses α = 4, the value given for the (3,30) decoder.

## What is not here

* **Voltage and clock control.** The energy savings come from changing the supply
  voltage and clock period from one iteration to the next. That belongs to clock
  generation and power delivery, not to this logic; `cur_iter` is the hook for it.
* **Timing violations themselves.** Zero-delay RTL simulation cannot show them. They
  appear only in a gate-level simulation with back-annotated delays at a lowered
  voltage or shortened clock.
* **More than one check-node processor.** The architecture allows 1 to m/L processors
  working in parallel. Only the single-processor decoder is built.
* **Random tie-break.** The algorithm picks a random decision when Λ = 0; here Λ = 0 is
  decided as +1.
* **Other ensembles at full length.** The (3,6), (4,8) and (4,40) decoders need other
  parameters (`DV`, `DC`, `C`, with Z ≥ DC and prime for a well-behaved array code).
  They are simulated only as short array codes (n = 42, 88 and 1640). At such lengths
  the decoding quality says little about the long-code behaviour that the ensemble
  thresholds describe.

## Files and parameters

`rtl/ldpc_pkg.sv` holds the defaults: `MSG_W = 6`, `BEL_W = 7`, `CODE_DV = 3`, `CODE_DC = 30`,
`CODE_Z = 31`, `OMS_C = 1`, `PROC_LAT = 3`. Every module takes them as overridable
parameters. The module hierarchy is:

```
ldpc_decoder
├── layer_ctrl
├── belief_mem
├── cmsg_mem
└── oms_processor
    ├── vnp_front ×DC
    ├── cnp ── min12_tree ── sort2, merge4, merge3
    └── vnp_back ×NB
```

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come from
`tb/oms_ref_pkg.sv`, a reference written from the algorithm above and not from the RTL
structure:

* Sort, Merge and the VNP halves are tested exhaustively or near-exhaustively.
* The MIN1,2 tree is tested at 2, 3, 5, 7, 11 and 30 inputs.
* The CNP is tested cycle by cycle with many duplicate minima and results floored at
  zero.
* The processing unit is tested in both configurations, including the 3-cycle latency
  and the interleaved computation trees of the test circuit.
* The controller is tested against the address formula and the exact cycle count.
* `ldpc_decoder_tb` runs the full-size decoder: six frames at channel error rates of
  0.015, 0.019 and 0.05 with 1 to 13 iterations. Every belief total and hard decision
  is compared bit for bit with the reference layered decoder, and the decode time is
  checked. It also requires that each mechanism occurs: layer stalls, first-iteration
  zero messages, second-minimum selections, offset flooring, saturation of μ, and a
  frame fully corrected. One run counts 369 stall cycles, 558 first-iteration rows,
  25824 second-minimum outputs, 26198 floored outputs and 12325 saturated μ; two of the
  six frames end fully corrected.
* `ensembles_tb` (with the helper `ensemble_runner`) runs the same bit-exact comparison
  for the other three ensembles, each as a short array code: (3,6) with Z = 7 and
  11 iterations; (4,8) with Z = 11, α = 2 and 10 iterations; (4,40) with Z = 41, C = 2
  and 9 iterations. It checks the decode time T·DV·(Z+3) and the final beliefs and
  decisions of four frames per ensemble.

The decoder also carries concurrent assertions, active when simulating with `--assert`.
Write-back happens only during a decode, and issue and stall never coincide. Two rows
issued in consecutive cycles never read the same address in any bank. That last one is
the property that makes the processor's successive inputs statistically independent.

Any testbench runs with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module ldpc_decoder_tb \
    rtl/ldpc_pkg.sv tb/oms_ref_pkg.sv tb/ldpc_decoder_tb.sv rtl/*.sv
# ensembles_tb also needs tb/ensemble_runner.sv
./obj_dir/Vldpc_decoder_tb
```

All testbenches finish in well under a second. The simulator has no X state, so
everything that is read is either reset or written first (memories are loaded before
they are read).
