# Mixed-signal stochastic-computing MAC engine

This is a multiply-accumulate engine for convolution layers. It multiplies in
the stochastic-computing (SC) domain, where a product takes one AND gate, and it
adds in the analog domain, where the sum of a thousand AND outputs takes one
shared capacitor node instead of a wide digital adder tree. One operation
computes the signed dot product of 26 input pairs (a 5x5 kernel plus a bias).
The engine adds the results of 6 successive input feature maps in an analog
integrator and then digitises the total with a flash ADC:

    Y = ADC( sum over 6 maps  sum over i = 0..25  S_i * |A_i| * |B_i| )

`A_i` is a feature-map value of 0..11 and `B_i` a weight of 0..4. `S_i` is the
sign of the pair.

The architecture follows a published 28 nm design: "An Energy-Efficient
Mixed-Signal Parallel Multiply-Accumulate (MAC) Engine Based on Stochastic
Computing" (Zhang et al., Peking University). That design reports 5.03 pJ per
26-input MAC at 1 V and 25 MHz. The RTL here is an independent implementation.
Its digital parts are synthesizable. Its analog parts (capacitor array,
voltage-to-time converters, integrator and ADC) are behavioural models with
real-valued voltages and time delays, so the whole chain can be simulated end
to end. Where the published description stops, this implementation makes its
own choices. Each one is listed in "Departures and own choices" below.

## 1. Numbers as deterministic bit streams

In SC a value is the fraction of ones in a bit stream. The engine uses the
*deterministic* form of SC, and the whole stream is available at once on
parallel wires, so one MAC needs no stream clock.

* **Decoder-A** (`sc_decoder`, `LEN = 11`) turns `|A|` into an 11-bit
  thermometer code: the lowest `|A|` bits are 1.
* **Decoder-B** (same module, `LEN = 4`) turns `|B|` into a 4-bit
  thermometer code.
* **AND gate array** (`and_gate_array`) repeats both codes to 44 = 11 x 4 bits
  and ANDs them bit by bit:

      DIN_i[j] = codeA_i[j mod 11] & codeB_i[j mod 4],   j = 0..43

Because 11 and 4 are coprime, every `(j mod 11, j mod 4)` pair occurs exactly
once in 44 positions (Chinese remainder theorem). So every bit of one stream
meets every bit of the other exactly once. The product stream therefore holds
exactly `|A_i| * |B_i|` ones, with no random error. The array has
26 x 44 = 1144 AND gates, and the largest possible sum is 1144.

## 2. Adding by charge sharing: the SAC

The stochastic-to-analog converter (SAC) has one unit capacitor per product
bit, 1144 in all, with one shared top plate, `VSAC`. The bottom plate of each
capacitor goes to ground through a switch driven by

    D_i[j] = ((S_i ? SIGN : SIGP) & DIN_i[j]) | PUP        (sac_switch_logic)

A MAC is done in two **stages**, NEG and then POS. Each stage has three
phases:

| phase  | RST | ION (active low) | PUP | effect                                                   |
|--------|-----|------------------|-----|----------------------------------------------------------|
| RESET  | 1   | off              | 1   | both plates grounded, all capacitors empty               |
| CHARGE | 0   | on               | 0   | top plate at VDD; capacitors of this stage's sign with a 1 bit charge |
| SHARE  | 0   | off              | 1   | all bottom plates grounded, charge spreads over the array |

In the NEG stage only `SIGN` is high, so only negative pairs (`S_i = 1`) can
charge. In the POS stage only `SIGP` is high, so only positive pairs can.
After SHARE, `VSAC` is linear in the number `n` of charged capacitors. The
published array gives 0.41 V at `n = 0` and 1.0 V when all capacitors are
charged. This keeps `VSAC` above the 0.35 V that the next stage needs to stay
linear. The model (`sac_cap_array`) produces the offset with a top-node
capacitance of `NP` unit capacitors, which charges to VDD with the others:

    VSAC = VDD * (n + NP) / (1144 + NP),   NP = 1144 * 0.41 / 0.59 (about 795)

One array serves both stages. After the two stages the engine has held
`VSACN` (negative sum) and then `VSACP` (positive sum).

## 3. Subtracting in time: VTC, reference pulse and PP

Two voltages taken at different times cannot be subtracted directly. The
engine turns each voltage into a pulse width and does the arithmetic on
pulses. This part of the design is the hardest to follow.

* **VTCN** and **VTCP** (`vtc`, two instances) sample `VSAC` while their
  enable (`SIGN_VTC`, `SIGP_VTC`) is high. When the enable falls, each emits a
  pulse of width `k * VSAC`. The model uses `k` = 10 ns/V, so a pulse is
  4.1 ns to 10 ns long.
* **VPUL** is a reference pulse from outside the engine. It rises together with
  VPULN and lasts `k * VDD` = 10 ns, the width of the longest VTC pulse.
* **PP** (`pulse_processor`) computes `VPP = (VPUL ^ VPULN) | VPULP`. Since
  VPULN starts with VPUL and is never longer, the XOR is high for
  `w(VPUL) - w(VPULN)`. VPULP comes at another time, so the OR adds its width.

The width of VPP is then

    w(VPP) = k*VDD - k*VSACN + k*VSACP
           = k*VDD + k*VDD*(nP - nN)/(1144 + NP)

The 0.41 V offsets of the two stages cancel. A zero result gives exactly the
reference width, and every unit of the signed sum adds or removes
`k*VDD/(1144+NP)`, about 5.2 ps. The width never goes below `k*0.41 V`, so the
signed result always stays a valid positive pulse.

## 4. Accumulating over feature maps and digitising

The **integrator** (`int_circuit`) charges its capacitor with a constant
current while VPP is high, so each pulse adds `g * w(VPP)` to `VINT`. The model
uses `g` = 4 mV/ns. `INTRST` clears it once, at the start of a group, and the
6 operations of a group add up:

    VINT = g * (6 * 10 ns + 10 ns * sum / (1144 + NP))

A zero total gives `VMID = 240 mV`. One unit of the sum is worth about
20.6 uV.

The **flash ADC** (`flash_adc`) has `2^8 - 1` comparators on a uniform
ladder. It rounds to the nearest level and saturates at both ends. In the top
level its range is `VMID +- 6*1144` units, so code 128 is a zero sum and each
code step is about 54 units of the sum. That resolution is this
implementation's choice: the published design names a flash ADC but gives
neither its width nor its range.

## 5. The phase sequence

`ace_sequencer` spends one clock on each phase. A feature map takes 8 clocks,
which is 320 ns at 25 MHz:

| clock | phase    | active signals                                                    |
|-------|----------|-------------------------------------------------------------------|
| 0     | N_RESET  | RST, PUP                                                          |
| 1     | N_CHARGE | SIGN_SAC; ION low in the clock-low half; INTRST if first map      |
| 2     | N_SHARE  | PUP; INTRST if first map                                          |
| 3     | N_SAMPLE | PUP; SIGN_VTC in the clock-low half; INTRST if first map          |
| 4     | P_RESET  | RST, PUP; the VTCN pulse and VPUL run at the start of this clock  |
| 5     | P_CHARGE | SIGP_SAC; ION low in the clock-low half                           |
| 6     | P_SHARE  | PUP                                                               |
| 7     | P_SAMPLE | PUP; SIGP_VTC in the clock-low half                               |

The VTCP pulse runs at the start of the following clock. That clock is either
the next map's N_RESET or, after the last map, the cycle in which the ADC
samples `VINT`. The result `y` is registered 49 clocks after the start edge.
If `start` stays high, groups follow each other with no gap, one result every
48 clocks.

ION and the VTC enables are half-clock windows gated by `clk`. ION opens half
a clock after the switches have settled, and it closes at the clock edge,
before the registered phase moves the switches. A VTC stops sampling at the
edge, before the SAC is reset. This keeps every analog event away from a
switching instant, both in simulation and as a timing rule for a real array.
The sequencer carries assertions for these rules. The published design gives
the order of the signals as a sequence diagram. The clock count per phase is
this implementation's own.

## 6. Top-level interface (`sc_mac_engine`)

| port        | dir | width     | meaning                                                      |
|-------------|-----|-----------|--------------------------------------------------------------|
| `clk`, `rst_n` | in | 1      | clock (25 MHz nominal), asynchronous active-low reset        |
| `start`     | in  | 1         | start a group of `N_MAPS` maps; if still high at the end, start the next |
| `s`         | in  | 26        | pair sign, 1 = negative product                              |
| `a`         | in  | 26 x 4    | `|A_i|`, 0..11 (larger values saturate to 11)                |
| `b`         | in  | 26 x 3    | `|B_i|`, 0..4 (larger values saturate to 4)                  |
| `vpul`      | in  | 1         | reference pulse: rise when `sign_vtc` falls, width `VPUL_NS` = 10 ns |
| `sign_vtc`  | out | 1         | VTCN enable, the timing reference for `vpul`                 |
| `map_idx`   | out | 3         | feature map whose `s`/`a`/`b` are wanted now                  |
| `din_hold`  | out | 1         | `s`/`a`/`b` must not change while high                       |
| `busy`, `phase` | out | 1, 4  | sequencer state                                              |
| `y`, `y_valid` | out | 8, 1   | ADC code, valid for one clock                                |
| `vint`      | out | real      | integrator voltage, for observation                          |

A 5x5 kernel uses pairs 0..24. The bias takes pair 25 as one more product,
for example with `|A_25|` set to the bias and `|B_25|` set to 1.

The source of the data should switch to the next map, or the next group, at
the clock edge that ends a P_SAMPLE phase. The inputs are only used from
N_CHARGE onward.

## 7. Departures and own choices

Taken from the published design: the block structure, the sizes (26 pairs,
11- and 4-bit codes, 44-bit products, 6 maps), the switch logic of the SAC, the
RESET/CHARGE/SHARE phases, the NEG-then-POS order, the PP gates, the
integrator's constant-current charging, VDD = 1 V, the 0.41..1.0 V SAC range
and the 25 MHz clock.

Own choices or departures:

* **PP gate.** The published text names an XNOR for `VPUL - VPULN`. With pulses
  that idle low, an XNOR would hold VPP high between pulses. The XOR used here
  is the same gate for active-low pulses, and only it gives the described
  subtraction.
* **Sign input.** The published text gives each operand its own sign bit, but
  the block diagram feeds one sign `S_i` per pair. The RTL takes `S_i`
  (`S_i = sign(A_i) xor sign(B_i)`).
* **Decoders.** The published design calls them "simple" parallel decoders.
  The thermometer code, ones first, is the simplest such decoder and matches
  the drawn example codes.
* **Analog constants** are round values of the right order: VTC gain 10 ns/V,
  integrator gain 4 mV/ns, reference pulse 10 ns. The real circuits'
  nonlinearity (up to 0.2 mV at the integrator output in the published
  simulations), noise and offsets are not modelled. The models are exactly
  linear.
* **Sequencer timing** (one clock per phase, half-clock windows, the ADC sample
  one clock after the last POS stage, the `start`/`map_idx`/`din_hold`
  handshake) is this implementation's own. At 8 clocks per map, the throughput
  at 25 MHz is 3.1 M MAC/s. The published power and energy figures imply about
  4 M MAC/s, so the real chip probably overlaps some phases.
* **ADC**: 8 bits, range centred on a zero sum. The published design gives
  neither.
* Power and energy are not modelled.

## 8. Files

| file | kind | content |
|------|------|---------|
| `rtl/sc_mac_pkg.sv` | package | sizes (26, 11, 4, 44, 6) and the phase enum |
| `rtl/sc_decoder.sv` | RTL | Decoder-A / Decoder-B |
| `rtl/and_gate_array.sv` | RTL | 44-bit extension and 1144 AND gates |
| `rtl/sac_switch_logic.sv` | RTL | capacitor switch drive |
| `rtl/pulse_processor.sv` | RTL | PP gates |
| `rtl/ace_sequencer.sv` | RTL | phase sequencer |
| `rtl/sac_cap_array.sv` | behavioural | SAC capacitor array |
| `rtl/vtc.sv` | behavioural | voltage-to-time converter |
| `rtl/int_circuit.sv` | behavioural | integrator |
| `rtl/flash_adc.sv` | behavioural | flash ADC |
| `rtl/sc_mac_engine.sv` | top | everything wired together |
| `tb/tb_<module>.sv` | testbench | one self-checking bench per module |
| `tb/tb_mac_transfer.sv` | testbench | transfer-characteristic sweep, input number 0..1144 |

The behavioural models use `real` ports and `#` delays and need a simulator
with timing support. All files use `timescale 1ns / 1fs`: one unit of the sum
is only about 5 ps of pulse width, so picosecond resolution would not be
enough.

## 9. Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/sc_mac_pkg.sv \
        tb/tb_sc_mac_engine.sv --top-module tb_sc_mac_engine -o sim
    ./obj_dir/sim

Replace the testbench name to run another bench; the `-Irtl` search path finds
the modules. Every bench prints `TB_RESULT checks=N failures=M` and stops
itself through a watchdog.

* `tb_sc_mac_engine` runs the full-size engine with no parameter overrides:
  30 groups of 6 maps (all-zero, full positive, full negative, out-of-range
  inputs and random data). The last 10 groups run back to back. For each group
  it checks `VINT` to within 0.05 units of the exact integer sum, the ADC code
  and the latency (49 clocks, or 48 between back-to-back results). It also
  counts the NEG and POS pulses, the reference-pulse subtraction, the
  integrator resets, accumulation over several maps, back-to-back operation
  and ADC saturation, and fails if any of them never happens.
* `tb_mac_transfer` uses one map per operation and sweeps the input number
  0..1144 in steps of 44, for positive and for negative pairs. It checks `VSAC`
  and `VINT` against the formulas above and checks linearity.
* The block benches check each module against values computed independently,
  exhaustively where the input space is small.

## 10. How far to trust it

The digital path is exact and fully checked: decoding, multiplication, switch
selection, pulse logic and sequencing. With the ideal analog models, the
integrator voltage reproduces the exact integer dot product. The analog models
show what each circuit does, not how well it does it. Use them to check
sequencing, sign handling and scaling, not to predict accuracy or power.
Replacing them with circuit-level models keeps the same ports.
