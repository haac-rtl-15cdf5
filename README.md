# HAAC: a streaming gate-engine accelerator for garbled circuits

Garbled circuits let two parties compute a function of their private inputs. One party, the
Garbler, turns every wire of a Boolean circuit into a pair of random 128-bit labels and every
AND gate into a small encrypted table. The other party, the Evaluator, runs the circuit on one
label per wire without ever learning the bits. With the FreeXOR and Half-Gate techniques:

* an XOR gate costs one 128-bit XOR;
* an AND gate costs four AES encryptions to garble (two tables rows) and two to evaluate.

The circuits are huge (millions of gates), branch-free and known in advance. So the machine
here has no caches and no control flow. A compiler turns the circuit into per-engine streams:

* instructions;
* garbled tables;
* addresses of old wires.

Many gate engines (GEs) then consume those streams at one gate per cycle each. On chip they
share a scratchpad of recent wire labels, the *sliding wire window* (SWW).

This repository is the RTL of that machine, written in SystemVerilog. It includes self-checking
testbenches with an independent reference model of the cryptography.

## The program model

An instruction is 37 bits:

| bits | field |
|------|-------|
| 36:35 | opcode: `01` XOR, `10` AND, `00`/`11` NOP |
| 34:18 | input wire A: SWW entry, or 0 |
| 17:1  | input wire B: SWW entry, or 0 |
| 0     | live: also write the output to DRAM |

The output wire has no address field. Outputs are numbered in issue order. All `NUM_GE`
engines issue together, one instruction each per cycle, as a bundle. In bundle `c`,
engine `g` produces global wire `cfg_wire_base + c*NUM_GE + g`.

Global wire `w` lives in SWW entry `1 + ((w-1) mod (NWIRES-1))`. Entry 0 is never written.
An input address of 0 means the operand is an *out-of-range* (OoR) wire. Its label comes from
the engine's OoRW queue, which is filled in advance from DRAM. Operand A is taken first when
both operands are 0.

The global wire number serves three purposes:

* it is the Half-Gate gate index `i`, which keys the hash;
* it is the DRAM address of a live wire;
* it is the DRAM address an OoR fetch reads.

The compiler (not part of this RTL; the testbench plays it) has to obey four rules:

1. Pad every engine's stream to the same length with NOPs. A NOP still consumes a wire number
   and an SWW entry.
2. Never put a gate and a consumer of its output in the same bundle.
3. An operand `u` may be read from the SWW by a bundle whose highest output wire is `M` only if
   `u + NWIRES - 1 > M`. Otherwise its entry has already been handed to a newer wire. Such an
   operand must be encoded as 0 and `u` put on that engine's OoR address stream. The producer of
   `u` must then be marked live so that it reaches DRAM.
4. For the Evaluator, queue each AND gate's table on the engine that runs it, in program order.

## Inside a gate engine

`gate_engine` is an in-order pipeline with these stages:

* **Fetch/decode** (1 stage). The head of the instruction queue is decoded. The engine reports
  `fd_ready` when everything the instruction needs is already queued:
  * the instruction itself;
  * its table, for an Evaluator AND;
  * one or two OoR labels, if it has OoR operands.

  On `issue` the engine:
  * pops what it used;
  * stamps the instruction with its output wire and entry;
  * clears that entry's valid bit.

* **Read wires R1–R3.** Timing matches the paper's three read stages:
  * R1 sends the SWW read request through the crossbar;
  * the bank reads;
  * the label returns by R3.

  A request the crossbar refuses because the bank is busy (a *bank conflict*) is repeated, and
  the engines hold.

  Every stage watches the forwarding network. If the label came back with its valid bit clear,
  the producer is still computing. The operand is then taken from the forwarding network when
  the producer writes it. R3 waits until both operands are present (a *forwarding wait*).

* **Compute.** The two units run side by side:
  * the FreeXOR unit, 1 cycle;
  * the Half-Gate unit: 18 stages for the Evaluator (`halfgate_eval`) or 21 for the Garbler
    (`halfgate_garble`), fully pipelined.

* **Write back.** Each unit's result asks the crossbar for an SWW write. The granted write is
  also the forwarding broadcast. A live result is queued for the DRAM write port in the same
  cycle. A Garbler also queues the AND gate's two table rows on `tout`.

**Lockstep.** The read stages of all engines advance together. The front end holds
(`fe_hold`) in three cases:

* an R1 request was refused;
* an R3 operand is missing;
* the back end stalls.

The back end stalls when a result cannot be written, either because the write was not granted
or because the live or table-out queue is full. A stall freezes only the compute units. The
front end never freezes the back end, so a reader waiting for a forwarded label can always get
it.

The lockstep also keeps the SWW consistent. A newer bundle can only issue, and so clear its
entries, after every older reader has been granted its read.

**Half-Gate with re-keying.** `aes_rekey_pipe` is an 11-stage AES-128 pipeline (stages 0–10).
Each stage expands the next round key next to the data, so every input can carry its own key.
The keys follow Fig. 2 of the paper: `2i` for wire A and `2i+1` for wire B, laid out as the
128-bit value `{95'b0, i[31:0], 0/1}`. The hash `H(X, k)` is the AES output of `X` under key
`k`.

The Garbler computes the following, with colour bits `pa`/`pb` being the label LSBs and R
having LSB 1:

```
T_G = H(A0,2i) ^ H(A0^R,2i) ^ pb·R
T_E = H(B0,2i+1) ^ H(B0^R,2i+1) ^ A0
C0  = H(A0,2i) ^ pa·T_G ^ H(B0,2i+1) ^ pb·(T_E ^ A0)
```

The Evaluator computes:

```
C = H(A,2i) ^ sa·T_G ^ H(B,2i+1) ^ sb·(T_E ^ A)
```

The Garbler runs two AES datapaths per input off one key expansion. The Evaluator runs one.
Register stages in front of the AES pipeline pad the units to the paper's 18 and 21 stages.

## Around the engines (`haac_top`)

* **SWW.** `NUM_BANKS` banks (`sww_bank`) behind `sww_crossbar`. The bank is the wire address
  mod `NUM_BANKS`. Each bank allows two accesses per cycle. This stands in for the paper's
  single-port SRAM clocked at twice the engine clock. Writes are served before reads. Each
  entry's valid bit is a flip-flop beside the array, so an issuing gate can clear it without
  using a port.
* **Forwarding network** (`fwd_network`). Compares all granted writes against the six pending
  operand addresses of every engine.
* **OoR fetch** (`oorw_fetch`, one per engine). Takes the engine's stream of 32-bit OoR wire
  addresses. It reads DRAM through a round-robin-arbitrated port (`mrd_*`, with an id for
  out-of-order responses). It repeats a read whose valid bit is clear, and pushes the label into
  the engine's OoRW queue.
* **Live write-back.** All live queues share one round-robin-arbitrated DRAM write port
  (`mwr_*`, address = global wire number).
* **Queues** (`haac_fifo`). Per engine:
  * instruction queue, 128 × 37 b;
  * table queue, 64 × 256 b;
  * OoRW queue, 64 × 128 b;
  * two live queues, 8 deep.

  The first three add up to about 64 KB for 16 engines.
* **Counters.** `perf` counts:
  * issue cycles;
  * AND and XOR gates;
  * forwarded and OoR operands;
  * bank conflicts;
  * forwarding waits;
  * back-end stalls;
  * OoR retries;
  * live writes.

### Using it

1. Hold reset, then release it.
2. Write the program's input wires into their SWW entries through `pl_*`.
3. Pulse `start` with these set:
   * `cfg_wire_base`: the first output wire number;
   * `cfg_phys_base`: its entry;
   * `cfg_r`: the FreeXOR offset R, for a Garbler.
4. Stream the queues.

`busy` drops when all in-flight gates have been written.

The defaults are the paper's main configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_GE` | 16 | gate engines |
| `NWIRES` | 131072 | 2 MB of 16-byte labels, 17-bit addresses |
| `NUM_BANKS` | 64 | 4 per engine |
| `GARBLER` | 0 | Evaluator role |

## Where this differs from the paper

* **Issue.** The paper's simulator assigns gates to whichever engine is free. Here issue is a
  lockstep bundle. The compiler pads with NOPs and keeps producer and consumer out of one
  bundle.
* **Window.** The paper slides the SWW by half its size. Here the window slides by one entry per
  output wire, so a wire stays readable for the next `NWIRES-2` outputs.
* **Clocking.** The 2 GHz SWW / 1 GHz GE clocking is modelled as two ports per bank in one clock
  domain.
* **Not part of the RTL.** The instruction/table/address stream controllers, DRAM and the HBM2
  PHY are outside. They are reached through valid/ready ports.
* **Hash layout.** The hash key's bit layout, and the use of the global wire number as gate
  index, are this design's choices. Interoperating with a software garbling library would need
  both to match that library.
* **Half-Gate stage split.** The Half-Gate latencies match the paper. Their internal division
  (11 AES stages plus padding) is this design's own.

## Testbenches and how far to trust them

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb_ref_pkg` is an independent software model: AES from a
generator-walk S-box and full key schedule, Half-Gate garbling and evaluation. AES is checked
against the FIPS-197 test vector.

End to end, `haac_bench` plays compiler, host and DRAM. It does the following:

* builds a random program;
* garbles it in software;
* runs it on `haac_top`;
* checks every live label and every garbled table;
* checks the gate, operand and issue counters;
* checks that forwarding, OoR reads and retries, bank conflicts, forwarding waits, back-end
  stalls, SWW wrap-around and NOPs all happened.

The end-to-end testbenches run at three sizes:

| Testbench | Engines | SWW | Roles |
|---|---|---|---|
| `tb_gate_engine` | 2 | 32 entries | Garbler and Evaluator |
| `tb_haac_top` | 4 | 64 entries, 8 banks, 600 slots | Garbler and Evaluator |
| `tb_haac_full` | defaults (16) | full size | Evaluator, 960 slots |

Build and run one with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/haac_pkg.sv tb/tb_ref_pkg.sv tb/tb_haac_top.sv --top-module tb_haac_top
obj_dir/Vtb_haac_top
```

The full-size build is slow: the sixteen unrolled AES pipelines take about 15 minutes of C++
compilation on four cores. The simulation itself takes well under a second.

Not verified:

* timing closure;
* the real DRAM interface;
* programs from a real compiler.

The full-size synthesis has not been run to completion.
