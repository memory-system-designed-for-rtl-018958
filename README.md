# A stochastic-code memory system for a mixed-signal MAC engine

Stochastic computing (SC) encodes a number as the fraction of 1s in a bit
string. A product is then a bitwise AND of two strings. The catch in a
conventional SC accelerator is the memory. Data are stored in binary, so every
value passes through converters: an ADC from the sensor, a binary-to-stochastic
converter (LFSR and comparator) before the logic, and a counter after it. These
converters use most of the energy.

This design stores the stochastic numbers themselves in an ordinary digital
SRAM, which removes the ADC and both binary/stochastic converters:

```
 sensor voltage ─┐
                 ├─► ASC ──(thermometer code)──► activation SRAM ──┐
 MAC voltage ────┘    ▲                                            ├─► MAC module ──► MAC voltage
                      │            weight SRAM (signed codes) ─────┘       │
                      └────────────────────────────────────────────────────┘
```

* The **analog-to-stochastic converter (ASC)** digitises a voltage straight
  into a thermometer code, using comparators against fixed references.
* The **stochastic SRAM** holds those codes. They are plain bits, so the
  memory is a standard SRAM.
* The **mixed-signal MAC module** multiplies with AND gates and adds by
  charge sharing on a capacitor array. Its output is a voltage, which goes
  back through the same ASC. A layer's results are therefore stored as the
  next layer's stochastic inputs, with no binary step anywhere.

The default configuration is the 15-bit, 300-input system: each number is a
15-bit thermometer code (4-bit precision, 2^4 − 1 = 15 levels), and one MAC
accumulates N = 300 signed products.

The capacitor arrays, the comparators and the reference divider are analog
circuits. In this RTL they are behavioural models that reproduce their charge
arithmetic exactly. The gate arrays, the memories and the sequencer are
synthesizable logic.

## Number formats

| Quantity | Format |
|---|---|
| Input IN_i | M-bit thermometer code. Value k/M is held as k ones from bit 0 upward (`0000…0111`). |
| Weight W_i | M-bit thermometer magnitude plus a sign bit. In memory the element is `{SIGN, W[M-1:0]}`. SIGN = 1 means a positive weight. |
| Voltage | `sc_pkg::vcode_t`: an unsigned fixed-point fraction of VDD, with 20 fractional bits. 2^20 is exactly VDD. |

The thermometer code is deterministic, not random. For thermometer codes the
AND of a k-ones code and an l-ones code has exactly min(k, l) ones. This is
the scaled product rounded down to the code's resolution. The tests use this
fact to build their reference values.

Voltages are carried as integers because synthesis front ends do not accept
`real` signals. The fixed-point grid is exact at every comparator threshold
when M + 1 is a power of two, which holds for M = 15. The MAC voltages are
truncated onto that grid. So a comparison at a threshold gives the same answer
as the exact rational value would.

## The mixed-signal MAC module (`sc_mac`)

This is the core of the design. Each side of the module has M·N unit
capacitors C_U: 4500 per side at the defaults.

**Gate arrays (`sc_mac_gates`, logic).** Each bit position j of each pair i
forms the stochastic product `IN_i[j] & W_i[j]`. The sign bit steers it to
one of two arrays:

* Upper (positive) array: `dp = EN & IN & W & SIGN`. This capacitor sits at
  VDD when the product is 1 and the weight is positive.
* Lower (negative) array: `dn = EN & ~(IN & W & ~SIGN)`. This capacitor sits
  at VDD unless the product is 1 and the weight is negative.

Let n_p be the number of positive products and n_n the number of negative
products. Then M·N − n_n lower capacitors are at VDD. With EN low, every
drive is 0.

**Phase 1 — S1 closed, S2 open (voltage division).** Each array shares its
node with a grounded tail capacitor C_U. The node settles at the charge-weighted
mean of the drive levels:

```
VP = n_p / (M·N + 1) · VDD            VN = (M·N − n_n) / (M·N + 1) · VDD
```

**Phase 2 — S2 closed, S1 open (charge sharing).** The two equal tail
capacitors are shorted together, so both reach the mean:

```
VP = VN = ½ · (M·N + n_p − n_n) / (M·N + 1) · VDD
```

The result is a signed dot product. Its zero lies at VDD/2, and it moves by
VDD / (2(M·N + 1)) per unit of n_p − n_n. For example, with M = 15 and N = 300,
n_p = 1200 and n_n = 800 give VP = VN = 4900 / 9002 · VDD ≈ 0.544 VDD.

**Model (`sc_cap_array`).** The model samples S1 and S2 at each rising clock
edge. It keeps the tail charges as integers in units of
C_U·VDD / (2(M·N + 1)), so sharing is exact, and truncates only when it
produces the output codes. With both switches open the tails hold their
charge. Closing both switches at once is forbidden and asserted against. Reset
discharges the tails. Parasitics, mismatch and noise are not modelled.

## The analog-to-stochastic converter (`asc`, `sense_amp`)

Comparator i (a sense amplifier) compares the input with
VREF_i = (i + 1) / (M + 1) · VDD. A capacitor divider produces these references;
the model uses exact constants for them. Output bit i is 1 when the input is
at or above VREF_i. An input in the band [VREF_{k−1}, VREF_k) therefore
produces k ones. For M = 3:

| Input | Code y[2:0] |
|---|---|
| 0 … VDD/4 | 000 |
| VDD/4 … VDD/2 | 001 |
| VDD/2 … 3VDD/4 | 011 |
| 3VDD/4 … VDD | 111 |

**Power-down chain.** In a thermometer code a 0 at bit i−1 implies 0 at every
higher bit. So:

* Comparator 0 is always on.
* Comparator i (i > 0) is enabled only by y[i−1].
* A 2:1 multiplexer, selected by y[i−1], passes either comparator i's output
  or ground to y[i].

A low input therefore powers only the first one or two comparators. This pays
off because CNN layer values cluster near zero. `sa_en` reports which
comparators were powered, so a testbench can count the savings.

The chain is written as per-bit signals inside a generate loop, so no vector
depends on itself. In this ideal, unclocked model, y is combinational in the
input.

## Stochastic memories (`sc_sram`)

There are two instances: activation memory (elements of M bits) and weight
memory (M + 1 bits). Each has ROWS rows of N elements. One row is one MAC
operand vector, so a MAC reads a whole row in one access. The ASC fills the
memory one element per write.

The array is built as N column banks of ROWS × element bits, each with one
write port and one read port:

* A read latches the row into `rdata` one clock later and holds it until the
  next read.
* A read and a write of the same row in one cycle return the old data.
* Reset does not clear the array.

A thermometer code needs 2^n − 1 bits for n-bit precision, where binary
storage needs n bits. At n = 4 that is 15 bits instead of 4, a memory 3.75
times larger. The design trades this memory for the converters it removes.
For binary (0/1) or ternary (0/±1) networks the two storage formats have the
same size.

## Operation sequencing (`sc_ctrl`) and timing

Requests use a valid/ready handshake. While `req_valid` waits for `req_ready`,
the request must stay unchanged; an assertion checks this.

| Cycle | OP_CONVERT | OP_MAC |
|---|---|---|
| 0 (IDLE) | accepted; ASC digitises `sensor_v`; code written | accepted; input row and weight row read |
| 1 (EVAL) | — | EN = 1, S1 closed |
| 2 (SHARE) | — | S2 closed |
| 3 (CONV) | — | ASC input switched to the MAC voltage; code written to (dst_row, dst_col) |

A conversion takes 1 clock, and a MAC takes 4 clocks. At a 40 MHz clock this
gives 10 MHz, the output rate the design was characterised at. `req_ready`
is low during cycles 1 to 3. The top's `res_*` outputs report every code
written: the code, the voltage converted, the comparator enables and whether
it was a MAC result.

## Top level (`sc_mem_system`)

| Parameter | Default | |
|---|---|---|
| `N` | 300 | products per MAC = elements per memory row |
| `M` | 15 | thermometer code length |
| `ROWS` | 16 | rows per memory (this design's choice) |

Ports:

* `sensor_v`: the analog sensor voltage.
* `req_*`: operation requests.
* `wt_*`: the host's weight write port. Weights arrive already coded as
  `{SIGN, thermometer}`.
* `res_*`: the stored results.

The sensor itself lies outside the design.

## Files

| File | Contents |
|---|---|
| `rtl/sc_pkg.sv` | default sizes, the `vcode_t` voltage type, opcodes, FSM states, the reference formula |
| `rtl/sense_amp.sv` | comparator model |
| `rtl/asc.sv` | converter: references, comparators, power-down MUX chain |
| `rtl/sc_sram.sv` | banked stochastic SRAM |
| `rtl/sc_mac_gates.sv` | AND/sign/EN gate arrays |
| `rtl/sc_cap_array.sv` | capacitor arrays, S1/S2, tail capacitors (model) |
| `rtl/sc_mac.sv` | MAC module = gate arrays + capacitor model |
| `rtl/sc_ctrl.sv` | request handshake and phase sequencer |
| `rtl/sc_mem_system.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops by
itself. Each has a watchdog. For example, for the end-to-end test at full size:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sc_mem_system \
    rtl/sc_pkg.sv rtl/*.sv tb/tb_sc_mem_system.sv -o sim
./obj_dir/sim
```

The other tests replace the testbench file and the top module name in the
same command. `tb_sc_mem_system` runs everything at the default sizes and
finishes in a few seconds. It does the following:

* Loads two weight rows.
* Converts 600 sensor voltages, most of them low, and checks each code.
* Runs 310 MACs. It checks each result voltage against the closed-form
  equation, checks each code and checks the 4-cycle latency.
* Feeds MAC results back in as inputs of further MACs.

It also counts each mechanism: conversions, comparator power-down, positive
and negative results, stalled requests and MACs on MAC results. The test
fails if any of them never occurred.

The unit tests check these properties:

* The exact band edges of the converter, for M = 3 and M = 15.
* The S1, hold and S2 voltages of the capacitor model.
* Every gate-array drive bit and the n_p / M·N − n_n counts.
* SRAM read/write ordering.
* The cycle-by-cycle control schedule.

## Departures, assumptions and limits

* **Analog parts are ideal models.** Comparators have no offset or noise.
  References are exact. Switches and capacitors are ideal and charge sharing
  is instantaneous at the clock edge. None of the energy figures are modelled.
* **Fixed-point voltages.** Voltages are 21-bit fractions of VDD. MAC voltages
  are truncated, which is exact at every threshold for M = 15.
* **Choices made by this design**, which the circuit description does not fix:
  * the memory organisation (row = operand vector, banked columns, one-cycle
    read, 16 rows);
  * the weight element layout `{SIGN, W}`;
  * the request interface and the 4-state sequencer;
  * the 40 MHz clock needed to reach 10 MHz output;
  * drives at 0 while EN is low;
  * the generalisation of the 3-comparator example to
    VREF_i = (i + 1) / (M + 1) · VDD, with comparator i enabled and its MUX
    selected by y[i−1].
* **The MAC result is centred at VDD/2.** When it re-enters the ASC, a zero dot
  product becomes a code with about M/2 ones. Nothing rescales or rectifies
  the voltage before it is reconverted, because the description gives no such
  step. The layer-to-layer loop is built exactly as drawn.
* The comparator power-down helps most for inputs near 0 V, as with raw sensor
  data. For re-converted MAC results, which sit near VDD/2, roughly half the
  comparators are powered.
* Not included: the image sensor (an external analog source, which enters as
  `sensor_v`), and the conventional ADC-based reference structure that the
  design is compared with.
