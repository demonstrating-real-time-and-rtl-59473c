# Real-time decoding path for a stability experiment on a superconducting QPU

A quantum error-correction experiment that branches on its own outcome
needs a decoder's answer *while the qubits are still coherent*. A
sequencer on a control card must collect the ancilla measurements of every
round from readout cards that can sit in other chassis. It then hands them to
a hardware decoder and waits for the verdict ("did the errors flip the
logical observable?"). Only then can it play or skip a conditional gate. The
time from the last measurement to that gate is the *full decoding response
time*. It has three parts:

* the time for the last results to travel through the control system's
  results network,
* the control logic that packs measurements and talks to the decoder,
* the decoding itself.

This repository holds synthesizable SystemVerilog for the digital path
around the decoder in such a system. That path carries classified readout
results from readout receivers through a low-latency results crossbar and a
star of chassis. It delivers them to a gate-drive card. It moves a
sequencer's I/O-port instructions from the 250 MHz sequencer clock onto a
32-bit WISHBONE bus at 156.25 MHz. It turns the raw measurements of a
stability experiment into detectors, runs a decoding engine, and brings the
engine's status and result back.

The design targets the *stability-8* experiment. A 2×2 patch of the
rotated surface code has four ancillas (qubits 36, 38, 50 and 52 of an
84-qubit device). They measure four weight-2 Z⊗Z stabilizers every round and
are **not reset** between rounds. Runs have up to 25 decoding rounds.

The decoding engine itself, a Collision Clustering decoder, is **not**
here. Its algorithm is published separately and is not described in enough
detail to rebuild. The RTL stops at a clean engine port (`eng_*`). A
behavioural stand-in in `tb/cc_engine_model.sv` drives that port in the
tests.

```
 readout-RX cards          hub chassis, clk_seq = 250 MHz
 ---------------       +--------------------------------------------+
 rx_ser[5:0] --------->| result_link_rx x6 --+                       |
                       |                     v                       |
 other chassis         |              results_crossbar --> readout_to_seq --> res_rd_* (sequencer)
 node_in_ser[1:0] ---->| result_link_rx x2 --^   |  (round robin,            |
 node_out_ser[1:0] <---| result_link_tx x2 <-----+   single hop)             |
                       |                                             |
 sequencer I/O port    |                                             |
 io_* --------------->| seq_wb_bridge ==WISHBONE==> decoder_wb_regs ----> eng_* (engine)
 status_seq <---------| status_sync <------------- status  |  (clk_dec = 156.25 MHz)
                       |                          syndrome_builder   |
                       +--------------------------------------------+
```

| File | Role |
|---|---|
| `rtl/qec_dec_pkg.sv` | sizes, result-message struct, register map, status bits |
| `rtl/result_link_tx.sv`, `rtl/result_link_rx.sv` | one-bit serial result links |
| `rtl/results_crossbar.sv` | per-chassis results crossbar, round-robin, single-hop forwarding |
| `rtl/readout_to_seq.sv` | gate card's table of latest results per qubit |
| `rtl/seq_wb_bridge.sv` | I/O-port instruction → WISHBONE cycle, 250 → 156.25 MHz and back |
| `rtl/status_sync.sv` | decoder status bitfield into the sequencer clock |
| `rtl/syndrome_builder.sv` | measurements without ancilla reset → detectors |
| `rtl/decoder_wb_regs.sv` | WISHBONE register file, decode sequencing, cycle metric |
| `rtl/qec_decoder_top.sv` | the hub chassis's path, all of the above wired together |

## Detectors when ancillas are never reset

This is the least obvious part of the design. Everything downstream depends
on getting it right.

An ancilla that is measured and not reset starts the next round in the state
it was measured in. The stabilizer circuit then adds (mod 2) the current
stabilizer value to whatever the ancilla holds. So the raw outcome of ancilla
*i* in round *r* is a running sum:

    m_r = m_(r-1) xor s_r          (m_(-1) = 0: ancillas start in |0>)

The stabilizer value is `s_r = m_r xor m_(r-1)`. A detector asks whether a
stabilizer changed between consecutive rounds:

    d_r = s_(r+1) xor s_r = m_(r+1) xor m_(r-1)

The detector compares outcomes **two** rounds apart, not adjacent ones. This
has two consequences worth knowing before you change anything:

* A single misread outcome `m_r` flips both `d_(r-1)` and `d_(r+1)`. The
  decoding graph therefore has edges between detector layers two apart, and
  a decoder built for the usual "compare with the previous round" detectors
  would be wrong here.
* *R* measurement rounds give *R − 1* detector layers. "25 decoding rounds"
  means 26 measurement rounds.

`syndrome_builder` computes all layers in parallel in one clock. It uses the
bit order below, which the register file, the test models and the engine
port share:

| vector | bit | meaning |
|---|---|---|
| `meas` | `4*r + i` | outcome of ancilla *i* in measurement round *r* (0-based) |
| `det`  | `4*k + i` | detector of stabilizer *i* in layer *k* = `m[k+1] xor m[k-1]` |

Layer 0 uses `m_(-1) = 0`. Layers at and above `num_layers = R − 1` are
forced to 0, so the unused tail of the 100-bit vector is always clean.
`num_defects` (the number of detectors that fired) is computed at the same
time. It is reported through the DEFECTS register because decoding time
grows with it.

Ancilla order *i* = 0..3 is Q36, Q38, Q50, Q52. With 26 rounds × 4 ancillas =
104 measurement bits, a shot is four 32-bit WISHBONE words. The first word
carries rounds 0–7, with round 0 ancilla 0 in bit 0.

## A decode, seen from the sequencer program

The decoder is only reachable through I/O-port instructions. Each one
becomes a single WISHBONE classic cycle. The register map (word addresses)
is this design's own:

| addr | name | access | content |
|---|---|---|---|
| 0 | CTRL | W | bit0 start, bit1 clear stored measurements and error flags |
| 1 | ROUNDS | RW | measurement rounds, legal 2 … 26; ignored while busy |
| 2 | OBS_MASK | RW | 4-bit mask of the stabilizers that form the logical observable; ignored while busy |
| 3 | MEAS_DATA | W | next 32 measurement bits (auto-incrementing, at most 4 words) |
| 4 | STATUS | R | bit0 busy, bit1 done, bit2 result, bit3 overflow, bit4 bad rounds |
| 5 | RESULT | R | bit0: observable flipped |
| 6 | CYCLES | R | decoder clocks from the start write to done |
| 7 | DEFECTS | R | detectors that fired in the last syndrome |

A shot runs like this:

1. Once per experiment, write ROUNDS and OBS_MASK.
2. Each round, the program waits until the four ancilla results are fresh in
   the result table (`res_rd_*`) and buffers them.
3. After the last round, write the packed measurement words to MEAS_DATA.
4. Write CTRL.start. The register file then:
   * builds the detectors (one clock),
   * pulses `eng_start` with `eng_det`, `eng_num_layers` and `eng_obs_mask`,
   * waits for `eng_done`,
   * registers the result, and raises done **one clock later**.

   The stored measurements are cleared as soon as the detectors are built.
   The next shot's words can therefore be written while the engine is still
   working.
5. Poll STATUS, or watch `status_seq`, until done. Read RESULT, then play the
   conditional gate or not.

A start with an illegal round count sets the bad-rounds flag and does not
start the engine. A fifth measurement word, or a word written while the
syndrome is being built, sets the overflow flag and is dropped. CTRL.clear
resets both flags and the write pointer. CYCLES starts at 1 on the start
write and counts every decoder clock while busy. It is the decoder's own
timing metric and does not include the bus crossing.

In the end-to-end test, the program's time from the last round to reading
the result, minus the decode itself, is at most 107 sequencer clocks
(430 ns). That covers 20 idle clocks, the configuration and four measurement
writes, the start, the status polls and the result read, each one a bridged
WISHBONE access. The original system spent 250–370 sequencer clocks on the
same steps. Most of those went on program instructions that pack the
measurements, which this RTL does not model. The test fails if the overhead
exceeds 370 clocks.

## Crossing from 250 MHz to 156.25 MHz

The sequencer and the decoder run on unrelated clocks. Two crossings are
needed.

**Instructions (`seq_wb_bridge`).** A toggle handshake carries the
instruction:

* `io_valid` while not `io_busy` latches the address, data and direction into
  holding registers. These stay still until the transaction ends, so they
  need no synchronization. The same edge flips a request toggle.
* The request toggle passes through two flops into `clk_dec`. Its edge opens
  a WISHBONE cycle (`cyc = stb = 1`). All transfers are whole 32-bit words,
  so the optional byte-select signal is not used.
* On `ack` the read data is latched and an acknowledge toggle flips. That
  toggle is synchronized back into `clk_seq`. There it produces a one-clock
  `io_rsp_valid` with `io_rdata` and drops `io_busy`.

Only one instruction is in flight at a time. Against a slave that acks in
the next clock, an access takes about 3 decoder clocks plus 3 sequencer
clocks, roughly 35 ns. The testbench bounds it at 20 sequencer clocks.
Assertions check that `stb` stays up until `ack`, and that no instruction is
issued while busy.

**Status (`status_sync`).** Each status bit has its own two-flop
synchronizer. That is normally unsafe for a multi-bit value. Here it is safe
for two reasons:

* Each bit is a level that changes at most once per decode.
* The register file writes the result bit one decoder clock **before** it
  raises done.

So a program that sees done in the sequencer domain reads a settled result
on the same or the next clock. Any change to the done/result ordering in
`decoder_wb_regs` breaks this argument.

## The results network

Every readout receiver classifies a qubit's measurement and publishes
`{qubit[6:0], value}` to the chassis's results crossbar. The crossbar
broadcasts every message to the cards of the chassis. The experiment's
ancillas are spread over several chassis. These are joined in a **star**
around the hub chassis that hosts the decoder. Any result reaches the hub
in a single hop.

* **Serial links** (`result_link_tx`/`rx`). The line idles at 0. A frame is a
  start bit 1 followed by the 8 message bits, LSB first: the result bit, then
  the qubit index. A frame is 9 clocks long (36 ns at 250 MHz), and frames may
  follow back to back. The receiver's `msg_valid` pulses 9 clocks after the
  transmitter accepted the message.
* **Crossbar** (`results_crossbar`). Each input (6 local readout links, then
  2 inter-chassis links) has a one-message holding register. A round-robin
  arbiter moves one held message per clock to a registered broadcast. An
  uncontended message takes 2 clocks from input to broadcast. A link
  delivers at most one message per 9 clocks, so with up to 9 inputs no
  holding register can overflow under legal traffic.
* **Single-hop rule.** A message from a local readout is also queued for
  every inter-chassis link. A message that arrived from another chassis is
  delivered locally and never forwarded again. Each outgoing link has a
  16-entry FIFO. A serial link drains one message per 9 clocks, while six
  local inputs can produce six in that time, and the FIFO absorbs one
  round's burst. Any dropped message, at a holding register or a FIFO, is
  counted in `xbar_overflow_count`.
* **Result table** (`readout_to_seq`). The gate card keeps the latest value
  of each of the 84 qubits, plus a "fresh since last clear" flag. A stored
  message is visible on the combinational read port one clock after it
  arrived. The program clears the table per round or per shot.

A program must know the worst case before it reads a result. Within a
chassis, that worst case is bounded. A result can wait for at most the
other 7 inputs in the round-robin. It therefore reaches the table about
9 + 7 + 2 + 1 = 19 clocks after its frame starts, at the latest. Traffic
between chassis is limited by the serial link, which carries one result per 9 clocks. A burst
of *k* results from one chassis in the same round therefore needs about
9·*k* clocks to cross, plus the far crossbar and table. Programs that wait
for results from another chassis should budget for the largest burst one
measurement round produces.

The design's latencies are much shorter than the measured ones in the
original system. That system's figures include cable and transceiver
delays and card-to-card transport that have no RTL here:

| hop | original system | this RTL at 250 MHz |
|---|---|---|
| classify + serialize at readout card | 120 ns | not modelled (readout card) |
| readout card → crossbar | 120–160 ns | 9 clocks, 36 ns (link) |
| crossbar handling | 40 ns | 2 clocks, 8 ns |
| crossbar → card, readout-to-sequencer | 120–160 + 40–90 ns | 1 clock, 4 ns (parallel path to table) |
| between chassis | 240–260 ns | FIFO wait + 9-clock link + other crossbar |

The end-to-end testbench requires each result to reach the hub's result
table within 112 clocks (450 ns), the budget of the three hub-side hops in
the original figures. In that test the slowest round needed 17 clocks (68 ns)
from publication until all four ancilla results were fresh in the table. The
remote results are driven straight onto the hub's inter-chassis inputs, so
this figure leaves out the remote chassis's own crossbar.

`tb_star_two_chassis` joins two copies of the top, a hub and a satellite,
link 0 to link 0. Each chassis reads out two of the four ancillas. Over
200 rounds, a result reached the result table of its own chassis within
15 clocks (60 ns). It reached the other chassis within 35 clocks (140 ns),
counted from the readout link through both crossbars and the inter-chassis
link. Each link carried exactly the sending chassis's own results, and no
result came back.

## How far this follows the original design

Taken from the description of the system:

* the roles of the blocks and how they connect;
* the two clock frequencies and the need for crossing logic both ways;
* the 32-bit WISHBONE bus driven by sequencer READ/WRITE I/O instructions;
* the status bitfield exported to the sequencer;
* the star topology with single-hop inter-chassis traffic;
* 84 qubits and the four ancillas;
* no ancilla reset, and *R* rounds giving *R − 1* detector layers;
* up to 25 decoding rounds;
* a decoder-side timing metric.

This design's own choices, where the description is silent:

* the frame format of the serial links and the width of the crossbar→card
  path, which is parallel here;
* the round-robin arbiter, the holding registers and the FIFO depth;
* the number of crossbar inputs (6 readout links, 2 inter-chassis links);
* the register map, status encoding, error flags and measurement bit order;
* the toggle handshake of the bridge, and the per-bit synchronizer with
  result-before-done ordering;
* an observable given as a mask over the four stabilizers.

Left out on purpose:

* In the experiment the data qubits are also measured in the last round.
  Nothing in the description says those outcomes reach the decoder, and
  "8 rounds of syndrome measurements" is equated with 7 detector layers.
  The syndrome here is therefore built from ancilla outcomes only, with no
  final layer from data-qubit outcomes.

Where the description disagrees with itself:

* One passage says decoding begins once the allocated number of measurements
  has arrived. Another says an explicit write starts it. The RTL uses the
  explicit start write, so the word count is not used as a trigger.

Not built:

* the decoding engine;
* the sequencer processor, its assembly language and waveform generation;
* readout classification;
* the physical links between cards and chassis.

These appear only as ports of `qec_decoder_top`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `MAX_ROUNDS` | 25 | detector layers held (26 measurement rounds, 4 words) |
| `NUM_ANC` (package) | 4 | ancillas / stabilizers |
| `NUM_QUBITS` | 84 | entries of the result table |
| `QW` (package) | 7 | qubit index width |
| `NUM_SRC` | 6 | local readout links into the crossbar |
| `NUM_REMOTE` | 2 | inter-chassis links |
| `FIFO_DEPTH` | 16 | per outgoing inter-chassis link |

Widths that follow from these are derived by the modules themselves: the
detector vector, the measurement word count and the round-count width. A
larger `MAX_ROUNDS` only makes the syndrome builder and the measurement
store wider.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if
something hangs. `tb_qec_decoder_top` runs the complete hub path at the
default parameters:

* shots of 2, 9 and 26 measurement rounds, one of every length from 5 to 25
  decoding rounds, and a few random ones (about 900 local and 900 remote
  results);
* decodes ending in a conditional X and in an idle;
* a busy status seen while polling;
* the overflow and bad-round flags.

It checks latencies, forwarding, decoder results, defect counts and cycle
counts against its own model, and fails if any of these mechanisms never
happens. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/qec_dec_pkg.sv tb/tb_qec_decoder_top.sv --top-module tb_qec_decoder_top
./obj_dir/Vtb_qec_decoder_top
```

Replace the testbench name to run another one, e.g. `tb_syndrome_builder`,
`tb_results_crossbar` or `tb_star_two_chassis`. `--timescale` gives the
RTL, which has no time unit of its own, the testbenches' 1 ns unit. Every testbench also passes when the design starts
from random register contents (`+verilator+rand+reset+2`).

The behavioural engine in `tb/cc_engine_model.sv` takes
`BASE + PER_DEFECT × defects` clocks and answers with the parity of the
first-layer detectors in the observable mask. That rule is only there so the
test can predict the answer: it is not a decoder. To use a real engine,
connect it to the `eng_*` ports. `eng_start` is a one-clock pulse with the
detector vector valid. The engine answers with a one-clock `eng_done` and
`eng_result`, in the `clk_dec` domain.
