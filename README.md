# SerIOS: a security unit for silicon-photonic sub-systems

A chip that combines CMOS electronics with a silicon-photonic (SiPh) circuit, such as a mesh of
Mach-Zehnder interferometers (MZIs) used as an optical matrix multiplier or switch, is open to
attacks that purely electronic defences do not see. A hardware trojan or a hostile neighbouring IP
can heat the waveguides, drop or redirect light, or flood a channel. Every one of these changes the
optical power that reaches the output photodetectors.

SerIOS is a small digital unit that sits beside the photonic circuit and uses only the circuit's
existing controls: the phase drive of each node, the laser inputs and the converted photodetector
readings. Its work has two parts:

* **Initialisation.** The unit first tunes every node to cancel the die's fabrication-process
  variation. It then records how the compensated circuit answers a few fixed test patterns, which
  are its *golden values*. Last, it turns the per-node tuning values into cryptographic keys. Those
  tuning values come from random fabrication deviations, so they are unique to the die, in the way a
  physically unclonable function (PUF) is.
* **Runtime.** At fixed intervals, or back to back, the unit replays the test patterns and compares
  each output with its golden value. A difference larger than a threshold raises an alarm. Between
  rounds the application's own node settings reach the circuit with the tuning values added, so the
  compensation also serves normal traffic.

Sorting out which nodes to tune in which order, and which test patterns to use, is done offline
from the circuit's netlist. Its result is loaded into the unit as a table, so the hardware only
steps through lists.

This RTL implements that unit in SystemVerilog. The default sizes fit the paper's main example: a
4-input, 4-output optical multiplier of 12 MZIs, tuned over 629 phase steps, with 4 baseline
patterns and a 4 ns clock.

## Block structure

```
                      host load (seq_wr_*)
                             |
                        +---------+   tuning sequence, patterns, configurations
                        | seq_mem |-----------------------------------------+
                        +---------+                                         |
       init_start           |                                               |
           |        +-------+--------+------------------+                   |
   +-------v-----+  |                |                  |                   |
   | sequencer   |->bcm -------> ref_finder -------> key_gen --> key_store --> key_rd_*
   | (serios_top)|  |  tuning        |  golden          ^ tuning values
   +-------------+  |  values        |  values          |
                    v                v                  |
                 +-------------------------------------------+
                 | ref_db: tuning[12], golden[4] (2-cycle read)|
                 +-------------------------------------------+
                    |                              ^ golden
                    v tuning                       |
             online_detector  (rounds) ------------+--> alarm, fail_mask
                    |
   bcm, ref_finder, online_detector each request measurements from
                    v
               siph_probe --> node_code[12], laser_en[4], oe_conv
                    ^     <-- pd_reading[4]
                    | while idle: app_node_code + tuning, app_laser_en
```

| File | Role |
|---|---|
| `rtl/serios_pkg.sv` | sizes, timing constants, entry and request structs |
| `rtl/seq_mem.sv` | the Input Sequence: results of the offline analysis |
| `rtl/siph_probe.sv` | the one measurement engine: drives the codes, lights an input, waits, reads an output |
| `rtl/bcm.sv` | Bias Control and Mitigation: per-node tuning loop |
| `rtl/ref_finder.sv` | captures the golden values |
| `rtl/ref_db.sv` | the Reference database: tuning values and golden values |
| `rtl/key_gen.sv` | one key per communicating pair, one per clock cycle |
| `rtl/key_store.sv` | the isolated key storage |
| `rtl/online_detector.sv` | runtime detection rounds |
| `rtl/serios_top.sv` | sequencer and wiring |

## What the unit sees of the photonic circuit

All measurements go through `siph_probe`, and every measurement is the same action:

1. put one phase code on every node (`node_code`);
2. light one optical input (`laser_en`, one-hot);
3. wait `STAB_CYCLES` for the nodes to settle;
4. hold `oe_conv` high for `CONV_CYCLES` while the converter samples;
5. take `pd_reading[out_port]`.

The paper gives a 6 ns MZI switch time and a 4 ns conversion at a 4 ns clock. In whole cycles this
design uses 2 + 1, so one measurement takes 3 cycles (12 ns). A client that keeps its request high
and changes its codes on the acknowledge edge gets a new reading every 3 cycles with no gap, so the
control logic works in the shadow of the settle and conversion time, as the paper intends. Three
units share the probe. The top-level sequencer lets only one of them run at a time, and an
assertion in the probe checks that.

While no unit measures, the probe passes the application's drive through: `node_code[n]` is
`app_node_code[n]` plus node *n*'s tuning value (modulo 2^10), and `laser_en` is `app_laser_en`.
A measurement takes the circuit over for its 3 cycles. So the application controller keeps its own
settings, and the process-variation compensation found at initialisation applies to them as well.

## Initialisation

### The Input Sequence

The offline analysis produces two lists, which are written through `seq_wr_*` before `init_start`:

| `seq_wr_kind` | `seq_wr_idx` | `seq_wr_node` | `seq_wr_data` |
|---|---|---|---|
| `WR_SEQ` | position in the tuning order | – | `seq_entry_t`: `valid`, `node`, `in_port`, `out_port`, `use_target`, `target` |
| `WR_PAT` | pattern | – | `pattern_t`: `in_port`, `out_port` |
| `WR_CFG` | pattern | node | the node's configuration code for that pattern |

A tuning-sequence entry pairs a node with the input that excites it and the output where its effect
is visible. The nodes are listed in the order they must be tuned. Process-variation errors build up
along a light path, so the analysis orders the nodes from the output side back to the input side.
Entries whose `valid` bit is clear are skipped, which lets a circuit with fewer than 12 nodes use the
same hardware.

### Node tuning (`bcm`)

This is the core of the initialisation. For each valid entry, in order:

```
ref  = use_target ? target : reading(out_port)      -- with the current codes
tv[node] = tv[node] + 1
while ref < reading(out_port) and tv[node] < 628:
    tv[node] = tv[node] + 1
store tv[node] in the Reference database
```

The loop keeps stepping the node's phase code while the output reads *above* the reference, and
stops at the first step where it reads at or below it. With the reference taken from the first
reading, a node whose response first rises and then falls stops where the response comes back down
to its starting level. So the stopping point moves with the node's fabrication offset, and that
offset is what the tuning value records. A stored target instead of the first reading (`use_target`)
gives the other stop rule the paper mentions: stop at a predetermined power level. The bound of
628 (629 values, -π to π in 0.1 rad) stops a node whose condition is never met. All codes start at
zero, and a node keeps its tuning value while later nodes are tuned.

Timing: a node that ends at tuning value *k* has used *k*+1 measurements, that is 3(*k*+1) cycles. In
the worst case, 12 × 629 steps take 22 680 cycles (90.7 µs). The paper's 75.48 µs comes from 10 ns
per step, which is not a whole number of 4 ns cycles.

### Golden values (`ref_finder`)

Each pattern is played once. The drive of node *n* is the pattern's configuration code plus node
*n*'s tuning value (modulo 2^10), so the golden values describe the compensated circuit. The output
reading is written to `ref_db`. This takes 4 × 3 = 12 cycles.

### Keys (`key_gen`, `key_store`)

Pattern *p* has a seed built from the tuning values of the nodes associated with *p*'s output. Each
value is placed at bit `node*10` of a 120-bit word, the other nodes contribute zeros, and the word is
XOR-folded to 128 bits. The pattern's mixing function rotates the seed left by 13·*p* bits and then
applies

    h(x): for every bit i with b[i] != b[i+1]:  key[i + (b[i] | b[i+1])] |= b[i] ^ b[i-1]

with indices wrapping around. Wherever b[i] and b[i+1] differ their OR is 1, so in effect key bit
*i*+1 takes b[i] XOR b[i−1]. The paper gives h in a compressed notation, and this reading of it is an
interpretation. The functions use only shifts and bit logic. One key is produced per clock cycle and
written into `key_store`, which only `key_gen` can write. An IP reads a key with `key_rd_en` /
`key_rd_idx`, and the key appears one cycle later. The whole initialisation takes

    BCM cycles + 4·3 (golden values) + 4 (keys) + 6 hand-over cycles

which is about 13 000 cycles (52 µs) for the test die in `tb_serios_top`.

The keys can be made again at runtime with `key_regen`. Once no detection round is running, the
sequencer reruns only the key step from the stored tuning values, which takes `N_PAT` + 2 cycles.
`init_done` drops for those cycles and detection waits.

## Runtime detection (`online_detector`)

After initialisation (`init_done`), a detection round starts every `INTERVAL` cycles while
`det_enable` is high, or at once on `det_trigger`. With `det_continuous` also high, rounds run back
to back, each starting one cycle after the previous one ends. For each pattern the detector:

1. reads the golden value (2 cycles);
2. applies the pattern's configuration plus the tuning values, lights its input and reads its
   output (3 cycles; the request goes out in the cycle the golden value arrives);
3. flags the pattern if |reading − golden| > `threshold`.

A round of 4 patterns therefore takes 4 × (2 + 3) = 20 cycles (80 ns). `fail_mask` then holds the
round's result, and `alarm` stays set until `alarm_clr`. The detector reports *that* the circuit is
disturbed, not *which* node is. Locating the node would need different routes through the circuit,
which is the job of the application's controller.

The paper works its latency example as 228 ns (57 cycles) for the same four patterns. Its own
formula, Σ(ι+υ+ς) with ι = 8 ns, υ = 6 ns and ς = 4 ns, gives 72 ns. This design follows the formula,
rounded to whole cycles.

`INTERVAL` defaults to 2500 cycles (10 µs), a value of this design; the paper does not give one. The
threshold is one global value set by the integrator. The paper leaves it to the application (for
example, tolerated precision loss of a multiplier or output SNR of a link).

## Sizes

| Parameter (top) | Default | Meaning |
|---|---|---|
| `N_NODES` | 12 | tunable nodes |
| `N_IOS` | 4 | optical inputs = outputs (4-bit port fields allow up to 16) |
| `N_PAT` | 4 | baseline patterns = keys |
| `S_MAX` | 629 | tuning steps per node |
| `INTERVAL` | 2500 | cycles between detection rounds |
| `serios_pkg::TUNE_W / PWR_W / KEY_W` | 10 / 16 / 128 | code, reading and key widths (this design's choices) |
| `serios_pkg::STAB_CYCLES / CONV_CYCLES / REF_LAT` | 2 / 1 / 2 | settle, convert and golden-read cycles |

With the defaults the unit holds the 4×4 switches and accelerators of up to 12 nodes that the paper
evaluates: a Spanke 4×4 (5 nodes), a Beneš 4×4 (6), the 12-MZI multiplier and a 10-node 4×4 processor.
The 6×6 and 12×12 Beneš switches and the 9×9 Clements mesh need `N_IOS`/`N_NODES`/`N_PAT` raised.
The RTL is written for that: port fields allow up to 16 I/Os and 256 nodes, and the key seed is
folded to 128 bits whatever the node count. `tb_serios_sizes` runs a whole session at all seven sizes,
with the parameters set to each circuit's node and I/O count and one pattern per input:

| Circuit | I/Os | Nodes | Initialisation (cycles, test die) | Detection round (cycles) |
|---|---|---|---|---|
| Spanke 4×4 switch | 4 | 5 | 6 151 | 20 |
| Beneš 4×4 switch | 4 | 6 | 4 456 | 20 |
| 12-MZI multiplier | 4 | 12 | 8 026 | 20 |
| 10-node 4×4 processor | 4 | 10 | 11 038 | 20 |
| Beneš 6×6 switch | 6 | 12 | 7 398 | 30 |
| Clements 9×9 mesh | 9 | 36 | 31 194 | 45 |
| Beneš 12×12 switch | 12 | 28 | 27 792 | 60 |

Initialisation time depends on where each node's offset lies, so those figures belong to the random
dies of the test. A round always takes 5 cycles per pattern.

Table 4 of the paper reports FPGA results for its own implementation. This RTL was not measured
against them.

## How far to trust it, and where it departs from the paper

The paper gives the two loops (node tuning and detection), the key-function example, the block
structure and the timing model. It gives no widths, encodings, handshakes or memory organisation,
and these are this design's own choices:

* the shared measurement engine and its fixed-priority sharing;
* whole-cycle timing (3 cycles per measurement instead of the paper's 10 ns);
* the 628-step bound in the tuning loop;
* per-entry choice between the listing's stop rule and a stored target;
* node drive = configuration + tuning value;
* seed assembly and the per-pair rotation in key generation, and the reading of h given above;
* register storage everywhere, the Input Sequence write format, the `valid` bit;
* the detection interval, the single threshold and the sticky alarm;
* continuous mode as back-to-back rounds: each round still takes the circuit for its measurements
  rather than measuring alongside traffic;
* how SerIOS and the application's controller share the node drives (the pass-through above).

Things the paper mentions that are not built:

* phase readings for golden values (only power is read);
* detection that watches live traffic without taking over the circuit;
* encrypting transmissions with the keys (the paper does not name the cipher);
* a node associated with more than one output (each sequence entry names one output);
* the offline order finder itself: its tables are loaded from outside.

## Simulation

Each block has a self-checking testbench in `tb/`. Every testbench prints one line
`TB_RESULT checks=N failures=M` and has a watchdog. The photonic circuit is replaced by a behavioural
model, `tb/siph_model.sv` with `tb/siph_ref_pkg.sv`, in which:

* each node adds a single-peaked response, PEAK − SLOPE·|code − offset|, to its associated output;
* the offset stands for the node's fabrication variation;
* attacks add a signed offset to an output or blank it.

The testbenches compute their expected values from this model on their own, not through the RTL.

`tb_serios_top` runs the whole unit at its default sizes (it takes well under a second). It:

1. loads the sequence;
2. initialises, and checks the initialisation time and every key;
3. runs the five attack kinds with the output shifts of the paper's attack table (black-hole,
   sink-hole, flooding, rerouting, IP hijacking) and a sub-threshold drift;
4. runs periodic rounds and continuous rounds, and checks their spacing;
5. checks the application drive pass-through and its compensation;
6. regenerates the keys at runtime and checks the time it takes;
7. re-calibrates after the offsets move.

It counts each of these mechanisms and fails if one never occurred.

`tb_serios_sizes` runs the same kind of session (initialisation, keys, application drive, four
detection rounds) at the seven circuit sizes above, side by side, using the helper `tb/serios_sized_run.sv`.

With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/serios_pkg.sv tb/siph_ref_pkg.sv tb/tb_serios_top.sv --top-module tb_serios_top
./obj_dir/Vtb_serios_top
```

For the other testbenches, replace `tb_serios_top` with `tb_serios_sizes`, `tb_bcm`, `tb_ref_finder`,
`tb_online_detector`, `tb_key_gen`, `tb_key_store`, `tb_ref_db`, `tb_seq_mem` or `tb_siph_probe`.
