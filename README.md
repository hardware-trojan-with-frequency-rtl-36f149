# A hardware Trojan in frequency-modulated logic

This is synthesizable SystemVerilog for a hardware Trojan whose trigger logic is never
idle and whose power draw does not depend on the data it holds. It is written to evade
two classes of Trojan detection:

* **Unused-circuit identification** flags nets that stay constant during normal
  operation. Here the nets of the FM trigger logic never stay constant. A bit is not stored as
  a voltage level. It is stored as the *frequency* of a pulse train that circulates in a
  shift-register ring, so every node toggles all the time, whatever the bit is.
* **Side-channel analysis** looks for the extra power drawn by hidden logic. Each ring has
  three replicas, which make the number of stored 1s and the number of transitions per
  clock the same for every data value.

The Trojan fires on a rare sequence of events: four particular opcodes issued by the host
processor on consecutive cycles. Each opcode alone is an ordinary instruction that
functional tests exercise. Once the Trojan is active, its payload switches off some of
the replicas. From then on the power drawn by the rings follows the data they hold, which
includes a secret bit. The Trojan drives no output pin.

Everything is plain RTL: flip-flops with synchronous reset and clock enable, and small
combinational functions. It maps onto FPGA LUTs and D flip-flops (FDRE/FDSE), and it can
also be built as an ASIC.

## 1. FM logic: a bit as a frequency

Every FM signal comes from a **circular shift register** (CSR) of `N` stages (`N = 8` by
default; four is the minimum). On every clock each stage passes its value to the next,
and the last stage feeds the first. Stages are numbered 1..N, and in the RTL stage `s` is
bit `s` of a `[N:1]` vector. Seen at the moment SYNC is high, every ring holds:

| stage         | 1 | 2 | 3 | 4        | 5 | 6 | 7 | 8            | frequency on stage 4 |
|---------------|---|---|---|----------|---|---|---|--------------|----------------------|
| FM '0'        | 0 | 0 | 0 | **0**    | 0 | 0 | 0 | 1 (marker)   | f_CLK / 8            |
| FM '1'        | 0 | 0 | 0 | **1**    | 0 | 0 | 0 | 1 (marker)   | f_CLK / 4            |

Stage 8 always holds a **frame marker**, so even a '0' pulses once per turn. Stage 4 is
the **data slot**. With the data slot at `N/2` and the marker at `N`, the signal toggles
in 1/N of the cycles for a '0' and 2/N for a '1': 12.5 % / 25 % for eight stages and
25 % / 50 % for four.

**SYNC** (`fm_sync_gen`) is a ring of the same length that holds one '1'. Reset puts it
in stage 4 (a set-type flip-flop; all the others are reset-type), and SYNC is the output
of stage 4. SYNC is therefore high for one cycle in eight, starting with the first cycle
after reset. In that cycle every FM ring of the design has its data bit in stage 4.

**Writing a value** (`fm_encoder`). Stage 5 takes its input from a 2:1 multiplexer. The
multiplexer selects the previous stage when SYNC is low and the new value `d` when SYNC
is high. In a SYNC cycle the old data bit, which is leaving stage 4, is dropped and `d`
enters stage 5. The marker is untouched. Seven clocks later the new bit reaches stage 4,
just as SYNC comes round again. The ring's FM output is stage 4.

```
 cycle after SYNC   0     1     2     3     4     5     6     7     0 (next SYNC)
 stage 4 (FM '0')   0     0     0     0     1     0     0     0     d
 stage 4 (FM '1')   1     0     0     0     1     0     0     0     d
                    ^data             ^marker                       ^value written at the last SYNC edge
```

So a value sampled at the end of a SYNC cycle is readable on `fm_out` in the next SYNC
cycle, **N = 8 cycles later**. In any SYNC cycle, `fm_out` is the stored bit.

## 2. FM gates

An **FM gate** (`fm_gate`) applies an ordinary logic function to FM inputs and writes the
result into its own ring through the SYNC multiplexer. The available functions are BUF,
AND, NAND, OR, NOR, XOR and XNOR. In a SYNC cycle all the inputs show their data bits, so
the function's value in that cycle is the result. In the other cycles the function sees
frame markers and zeros: its value there is meaningless, but it keeps toggling. The
function and the multiplexer fit one LUT (SYNC, the inputs and the gate's own stage 4).

Latency: a standard value goes through a converter ring and then one gate. It is sampled
at SYNC edge *t*, its FM copy is read at *t+8*, and the gate result is readable at
*t+16*. Every further gate level adds 8 cycles.

Where a function has more inputs than one LUT takes, split it into several FM gates,
each with its own ring. Do not cascade plain LUTs. An intermediate LUT output such as
`A xor B` with `A = B` is constant, and a constant net is exactly what unused-circuit
analysis looks for.

**Locking AND gate** (`fm_lock_and`). Sometimes the trigger has to stay set. This gate
computes `X = AND(inputs)` and `Y = X | S4`, where S4 is its own data slot, and writes Y
at SYNC. While the stored bit is '0' it behaves like an AND gate. Once a SYNC cycle sees
all inputs at '1', it stores '1' and writes it back at every later SYNC, whatever the
inputs do, until reset. X and Y are never constant: the inputs' markers make them pulse
in every frame.

## 3. The trigger path

```
 opcode ──► opcode_event_decode ──► event_sync ──► 4 × FM cell (A..D) ──► trigger gate ──► active
 (host)      α β γ δ strobes         delays 4,3,2,1   writes at SYNC        A·B·C·D (locking)  (read at SYNC)
```

* `opcode_event_decode` raises event *i* when the processor issues opcode `OPCODES[i]`
  (`opcode_valid` high). The default opcodes are α = 0x17, β = 0xB3, γ = 0x2A and
  δ = 0x4C.
* `event_sync` passes α through 4 flip-flops, β through 3, γ through 2 and δ through 1.
  If α, β, γ and δ come on four consecutive cycles, A, B, C and D are all high in one
  cycle: the cycle after δ is registered. Any other order or spacing does not line them
  up.
* Each of A..D is converted to FM. The trigger gate computes A·B·C·D.

**The SYNC alignment problem.** The converters sample A..D only in SYNC cycles, so the
string is caught only when the cycle with A..D high is a SYNC cycle. That is the case
when δ is issued in the cycle just before a SYNC cycle. Nothing in the hardware lines the
two up. There are two ways to do it:

* read `sync`, which the top exports, and issue the string in step with it;
* repeat the string at varying intervals until it lines up by chance, about one attempt
  in eight. `tb_fm_trojan_top_retry` does this.

Timing from the SYNC cycle *t* in which A..D are high:

| cycle   | event                                                        |
|---------|--------------------------------------------------------------|
| *t*     | A..D high; the converters write them                         |
| *t+8*   | the converters show '1'; the trigger gate writes '1'         |
| *t+16*  | the trigger gate shows '1' on `fm_trigger`; `active` is set on this edge |
| *t+17*… | the payload is on (for good with `LOCK = 1`, for 8 cycles with `LOCK = 0`) |

`active` is the only standard-level (non-FM) flag of the Trojan. It is loaded from the
trigger gate's data slot in every SYNC cycle.

Not every net is frequency-modulated. The opcode comparators, the event chains, `active`
and the replicas' clock enables are ordinary level signals. The comparators and chains
toggle whenever their opcodes occur in normal code. `active` and the clock enables,
however, stay constant until the Trojan fires. The original description does not say how
the payload switches the replicas off, and this design does not hide these few nets.

## 4. Hiding the power: four rings per bit

Every FM ring of the Trojan sits in a **concealed cell** (`fm_conceal`). This covers the
four converters, the trigger gate and the secret cells. A cell has four rings:

| ring | role                               | contents after reset (stages 1..8) |
|------|------------------------------------|------------------------------------|
| (a)  | the value *f*                      | 0000 0001                          |
| (b)  | dual: the value ¬*f*               | 0001 0001                          |
| (c)  | swapped (a): bitwise complement    | 1111 1110                          |
| (d)  | swapped (b): bitwise complement    | 1110 1110                          |

* (a) and (b) always hold opposite bits. One of them runs at f_CLK/8 and the other at
  f_CLK/4, so both frequencies are always present in the spectrum.
* (c) and (d) mirror (a) and (b) bit for bit, so a cell always holds 16 ones and 16
  zeros. This balances the static (leakage) power.
* Every clock the cell makes exactly **six 0→1 and six 1→0 transitions**. This is true in
  steady state and also on a SYNC edge where the stored value changes. It balances the
  dynamic power.

The testbenches check these counts cycle by cycle. For the whole top with default
parameters (one SYNC ring and six cells) the count is 97 ones and 37 rising and 37
falling transitions in every cycle, for any opcode stream and any secret.

This needs no precharge and evaluation phases, unlike dual-rail logic, because a shift
register switches in the same way on every cycle.

## 5. The payload

When `active` is set, the replicas of **every** cell are frozen (clock enable low). The
`scen` input chooses which ones:

* `SCEN_SINGLE`: (b), (c) and (d) are frozen. Only ring (a) of each cell switches, so
  every cell adds 2 transitions per cycle for a '0' and 4 for a '1'.
* `SCEN_DOUBLE`: (c) and (d) are frozen, and (b) is written with *f* instead of ¬*f*. From
  the next SYNC on, (a) and (b) hold the same value, which doubles the signal: 4 or 8
  transitions per cycle.

The **secret cells** (`SECRET_W` of them, one by default) are concealed cells whose value
is the `secret` input, for instance a key bit of the host design. Once the Trojan is
active, the secret is readable from the supply current. In the end-to-end test, the
transitions over two frames with `secret = 1` exceed those with `secret = 0` by 32 in
`SCEN_SINGLE` and by 64 in `SCEN_DOUBLE`.

**Why the timing of `active` matters.** A frozen ring misses shifts. If it missed a
number of shifts that is not a multiple of N, its marker and data slot would fall out of
step with SYNC when it is released. For this reason `active` and the registered copy of
`scen` change only on the edge that ends a SYNC cycle, and `fm_conceal` asserts this
rule. Freezes therefore always last whole frames.

One consequence: a replica released at a SYNC edge has missed the write on that edge.
For one frame it may hold a stale complement, and the balance returns at the next SYNC
write. `tb_fm_trojan_top_nolock` shows this with the non-locking trigger: the side channel
is constant before activation, visibly different for the 8 active cycles, and constant
again once the SYNC write that follows the release has refreshed the replicas.

## 6. Top level: `fm_trojan_top`

| parameter  | default            | meaning                                                   |
|------------|--------------------|-----------------------------------------------------------|
| `N`        | 8                  | ring length (even, ≥ 4)                                   |
| `N_EV`     | 4                  | events in the trigger string                              |
| `OPC_W`    | 8                  | opcode width                                              |
| `OPCODES`  | `{4C,2A,B3,17}`    | packed, `OPCODES[0]` is α                                 |
| `LOCK`     | 1                  | 1: locking trigger gate; 0: ordinary FM AND (one frame)   |
| `SECRET_W` | 1                  | secret bits, one concealed cell each                      |

| port           | dir | width       | meaning                                                       |
|----------------|-----|-------------|---------------------------------------------------------------|
| `clk`, `rst`   | in  | 1           | clock; synchronous active-high reset                          |
| `opcode`, `opcode_valid` | in | OPC_W, 1 | opcode issued by the host processor                     |
| `secret`       | in  | SECRET_W    | data that the payload leaks                                   |
| `scen`         | in  | 1           | payload scenario (`payload_scen_e`), taken at SYNC edges       |
| `sync`         | out | 1           | SYNC, for an issuer that aligns the trigger string            |
| `fm_trigger`   | out | 1           | FM signal of the trigger gate (its data bit in SYNC cycles)   |
| `ring_state`   | out | R × N       | every ring's contents: [0] SYNC ring, then (a)..(d) of the A..D cells, the trigger gate and the secret cells; R = 1 + 4·(N_EV + 1 + SECRET_W) = 25 by default |

`ring_state` is not part of an attack. In simulation it stands in for the power supply:
the testbenches count its 1s and transitions. `fm_trigger` lets a testbench see the
trigger. Neither port is needed in a real device. At default parameters the top has 212
flip-flops: 200 in 25 rings, 10 in the event chains, plus `active` and the registered
`scen`.

## 7. Files

| file                         | contents                                                        |
|------------------------------|-----------------------------------------------------------------|
| `rtl/fm_pkg.sv`              | ring length, stage positions, gate-function and scenario enums  |
| `rtl/fm_sync_gen.sv`         | SYNC ring                                                       |
| `rtl/fm_encoder.sv`          | one FM ring with its SYNC multiplexer (plain, dual and swapped variants) |
| `rtl/fm_conceal.sv`          | four-ring concealed cell with payload freezing                  |
| `rtl/fm_gate.sv`             | FM logic gate (function + concealed cell)                       |
| `rtl/fm_lock_and.sv`         | locking FM AND gate                                             |
| `rtl/event_sync.sv`          | event delay chains                                              |
| `rtl/opcode_event_decode.sv` | opcode comparators                                              |
| `rtl/fm_trojan_top.sv`       | the complete Trojan                                             |

Each testbench `tb/tb_<module>.sv` checks its block against a model of its own. The ring
testbenches predict every stage from the cycle's position in the frame. Each testbench
prints one line `TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog
if it hangs. There are three end-to-end testbenches:

* `tb_fm_trojan_top` runs at default parameters. It covers concealment under random
  opcodes, rejection of misaligned and misordered strings, trigger latency, both payload
  scenarios, locking, and reset.
* `tb_fm_trojan_top_nolock` uses `LOCK = 0`: the activation lasts one frame.
* `tb_fm_trojan_top_retry` issues the string blindly until it triggers.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/fm_pkg.sv tb/tb_fm_trojan_top.sv \
          --top-module tb_fm_trojan_top -o sim && obj_dir/sim
```

Replace the testbench name to run another. Every testbench finishes in well under a
second.

## 8. What follows the original design, and what is this design's own

**Taken from the original description:**

* the ring structure, the stage encoding and the SYNC ring with its reset state;
* the position of the SYNC multiplexer (into stage 5) and the data slot in stage 4;
* the 8-cycle gate latency;
* the gate + multiplexer per FM gate;
* the locking gate's X/Y equations;
* the 4/3/2/1 event delay chains;
* the four-ring concealment with its contents and its 6 + 6 transitions;
* the two payload scenarios.

**Choices made here** where the description is silent:

* **How a replica is "disabled".** It is frozen by clock enable. The description only
  says disabled.
* **When disabling happens.** Freezes start and end only at SYNC edges, and `scen` is
  registered at SYNC edges.
* **Reset values of the replicas.** They are taken from the pictured ring contents.
* **Concealment covers every ring** of the Trojan, the converters included, not only
  chosen gates.
* **The opcode decoder.** Its width, opcode values and valid strobe are this design's.
* **The secret.** Its nature and width, and the idea of one concealed cell per secret
  bit, are this design's.
* **`active`.** It is read from the trigger gate in each SYNC cycle.
* **Parameters.** The ring length `N`, the number of events `N_EV` and the number of
  inputs `N_IN` can be changed; the original fixes 8, 4 and 2.
* **The observation ports** `sync`, `fm_trigger` and `ring_state`.

**Not built:**

* *Multi-level logic in stages 2 and 6.* It is only mentioned as possible: no encoding is
  given.
* *The defender's "counter-Trojan".* It would need an on-chip power-spectrum sensor, and
  its circuit is not described.
* *The host processor* and any physical power measurement.
* *A primitive-level netlist.* The original advises instantiating LUT6/FDRE/FDSE
  primitives and pinning their placement, so that routing imbalance does not undo the
  power balance. This RTL is behavioural, so the balance shown here holds at the
  flip-flop level only. Wire and LUT power are not modelled.
