# Quad-core 1024-bit RSA processor with a jitter-based power-noise source

This is synthesizable SystemVerilog for an RSA coprocessor that computes
`C = P^key mod M` for 1024-bit operands. It follows the architecture described
by Bagherzadeh, Bothra, Gujar, Gupta and Shah in "Quad-Core RSA Processor with
Countermeasure Against Power Analysis Attacks". Where that description leaves
something open, this code makes its own choice, and it says so. The RTL is an
independent implementation. It is not the authors' code.

The main idea is to speed up the processor's one expensive operation, the
Montgomery modular multiplication. The multiplier operand `X` is split into
four interleaved partitions, and four identical *cores* work on them in
parallel. Each core takes one radix-4 digit (2 bits) of `X` per clock, so
together the cores retire 8 bits of `X` per clock. A full 1024-bit Montgomery
product then takes 128 clocks. The four partial products are added and
reduced modulo `M` at the end.

The design protects against power analysis in two ways:

- **A key-independent schedule.** The multiply step is computed for every
  key bit, whether the bit is 0 or 1, so the sequence of operations does not
  depend on the key.
- **A random power source.** A true random number generator based on a
  jitter amplifier draws randomly varying current while the processor runs.

## 1. Exponentiation in the Montgomery domain

Let `R = 2^1024`. The Montgomery product is `Mont(a, b) = a*b*R^-1 mod M`. The
processor runs a right-to-left binary exponentiation entirely on Montgomery
residues. The host supplies the constant `e = R^2 mod M`.

| step  | operation            | purpose                                     |
|-------|----------------------|---------------------------------------------|
| MONT1 | `P = Mont(e, plain)` | message into Montgomery form, `P = plain*R` |
| MONT2 | `R = Mont(1, e)`     | Montgomery form of 1, `R = R mod M`         |
| MONT3 | `T = Mont(R, P)`     | multiply; `R = T` only if key bit i is 1    |
| MONT4 | `P = Mont(P, P)`     | square                                      |
| MONT5 | `C = Mont(1, R)`     | back to normal representation               |

MONT3 and MONT4 repeat for i = 0 … 1023, starting at the least significant
key bit. MONT3 is always computed, and only the write-back depends on the key
bit. One exponentiation is therefore always 2 + 2·1024 + 1 = **2051**
Montgomery products.

## 2. The partitioned radix-4 Montgomery multiplier

This section covers the part of the design that takes the most explanation:
`mont`, `mont_core` and `pp_adder`.

### 2.1 Digit interleaving

Write `X` as 512 radix-4 digits `d_0 … d_511`, where `d_t = X[2t+1:2t]`.
Core `j` (j = 0…3) owns the digits with `t mod 4 = j`:

```
X bits:   ... [15:14][13:12][11:10][9:8] [7:6][5:4][3:2][1:0]
core:     ...    3      2      1     0     3    2    1    0
```

Let `X_j` be `X` with every digit that core j does not own cleared to zero.
Then `X = X_0 + X_1 + X_2 + X_3`, and because the Montgomery product is linear
in `X`:

```
Mont(X, Y) = sum_j  X_j * Y * 2^-1024   (mod M)
```

The cores compute one term each, independently.

### 2.2 One core step

`mont` loads `X` into the shift register `Xm`, which moves right by 8 bits
every clock. Core `j` is permanently wired to `Xm[2j+1:2j]`. In WORK cycle `i`
it therefore sees digit `x = X[8i+2j+1 : 8i+2j]` and performs:

```
op1 = x * Y                  (4:1 mux of 0, Y, 2Y, 3Y; 3Y is computed once in mont)
Sn1 = Sn + op1 * 4^j         (4^j: the digit's position inside its 8-bit group)
Qi  = (Sn1[7:0] * Mprime) mod 256          Mprime = -M^-1 mod 256
Sn  = (Sn1 + Qi * M) / 256   (the low 8 bits of the sum are zero by construction)
```

After 128 steps, `Sn ≡ X_j * Y * 2^-1024 (mod M)`.

Each step adds at most `192·Y` and `255·M`, and then divides by 256. So with
`X, Y < M` the accumulator stays below `1.75·M`. That is why `Sn` is
1025 bits wide. The wider intermediate sum `Sn1 + Qi*M` uses N+10 bits.

### 2.3 Reduction of the partial products

Each core result (< 2M) is brought below `M` by one conditional subtraction
(`cond_sub`). `pp_adder` then adds the four values, giving a sum below 4M. It
then applies three conditional subtractions, which bring the result into
`[0, M)`.

The result has to be fully reduced. It becomes `X` or `Y` of the next
product, and the `Sn < 2M` bound above holds only for operands below `M`.

### 2.4 Timing of one product

`start_mont` is sampled while the block is in INIT or DONE. At that edge `X`
enters `Xm` and all cores clear `Sn`. Then follow exactly 128 WORK cycles, and
the block enters DONE. `done_mont` and the combinational result `m_out` stay
valid until the next start or `clr`.

`Y`, `M` and `Mprime` are not copied inside the block. They must stay stable
for the whole product, and the operand registers `X_reg` and `Y_reg` in the
register file ensure that.

## 3. Host interface

| pin           | dir | meaning                                                         |
|---------------|-----|-----------------------------------------------------------------|
| `clk`         | in  | clock                                                           |
| `sys_reset_n` | in  | asynchronous reset, active low                                  |
| `sel[1:0]`    | in  | 00 idle, 01 load key, 10 load message, 11 run                   |
| `data_in`     | in  | 32-bit data pin, pad to core                                    |
| `data_out`    | out | 32-bit data pin, core to pad                                    |
| `data_oe`     | out | drive the pad with `data_out`                                   |
| `finish`      | out | one-cycle pulse after the last word of a load                   |
| `ready`       | out | high for the 32 cycles of the result output                     |
| `rng_osc_in`  | in  | waveform sampled by the random number generator                 |
| `rng_bit`     | out | random bit stream                                               |

The chip has a single bidirectional 32-bit data pin. This RTL stops at the
pad, so the pin appears as `data_in`, `data_out` and `data_oe`. A pad cell
joins them.

Each item below is a separate transaction. The loads can be repeated in any
order. For example, a new message can be loaded under the same key.

1. **Key load (96 words).** Drive `sel = 01` in IDLE. One cycle later the
   controller starts taking one word per cycle. Send key words 0…31, then
   `M` words 0…31, then `e = 2^2048 mod M` words 0…31, each value least
   significant word first. Hold `sel = 01`. `finish` pulses in the cycle
   after the 96th word. Then return `sel` to 00.
2. **Message load (32 words).** Do the same with `sel = 10`. The message must
   be below `M`.
3. **Run.** Drive `sel = 11` and keep it until `ready` rises. Then drive 00
   before the 32 output cycles end, or the controller starts again. `ready`
   rises 268,683 cycles after the cycle in which `sel = 11` was first seen.
   From the next cycle, `data_oe` is high for 32 consecutive cycles. In those
   cycles `data_out` carries the result, low word first.

`Mprime = -M^-1 mod 256` is not loaded. The register file computes it from
`M[7:0]` with two Newton steps, `inv = inv*(2 - M*inv)`.

## 4. Controller

`rsa_ctrl` has these states: IDLE, LOAD_KEY, LOAD_DATA, MONT1 … MONT5 and
DONE. One counter serves all states:

| state     | what the counter counts |
|-----------|-------------------------|
| LOAD_KEY  | the 96 key words        |
| LOAD_DATA | the 32 message words    |
| MONT3/4   | key bits, up to 1024    |
| DONE      | the 32 output words     |

Inside every MONTx state there are three phases:

1. load `X_reg` and `Y_reg` from the operand sources;
2. pulse `start_mont`;
3. wait for `done_mont`, then write `M_out` to `P`, `R` or `cipher_text`.

One product therefore takes 1 + 1 + 128 + 1 = 131 cycles. When the key-bit
counter reaches 1024, MONT3 hands over to MONT5 without computing. After
MONT5, the Montgomery block is cleared.

## 5. Power-analysis countermeasure: the jitter-amplifier RNG

The random number generator is an analog block: a chain of delay cells in
the clock path. `rtl/jitter_trng.sv` is a **behavioural model** with
`#` delays. It cannot be synthesized, and it should be replaced by the
custom cell in a real implementation. It works as follows:

- The system clock passes through four delay cells. A control bit `RAN`
  switches each cell between a short and a long delay.
- The `RAN` bits come from a four-stage register chain. The chain is fed by
  the generator's own output bit, with an exclusive-or at each stage. The
  delayed clock `SYSTEM_CLK_JAMP` therefore has a randomly varying phase,
  which amplifies the jitter.
- A flip-flop clocked by `SYSTEM_CLK_JAMP` samples a free-running waveform.
  Its output is the random bit.
- The switching of the delay cells also draws random supply current, which
  is the power-noise countermeasure. In the model, `pwr_activity` counts
  `RAN` toggles and stands in for that current.

The physical thermal noise is modelled with `$urandom`. The delay values
(150 + 60 units per cell, plus 0…20 units of noise) are this model's own.
They are not fitted to the real circuit.

The generator has no data connection to the RSA datapath.

## 6. Files

| file                  | contents                                                         |
|-----------------------|------------------------------------------------------------------|
| `rtl/rsa_pkg.sv`      | widths, sel and FSM encodings, the `mprime8` function            |
| `rtl/rsa_top.sv`      | top level: controller, pin mux, register file, Montgomery, RNG   |
| `rtl/rsa_ctrl.sv`     | top state machine                                                |
| `rtl/pin_mux.sv`      | steering of the data pin, `data_out` register                    |
| `rtl/rsa_regfile.sv`  | key, M, Mprime, e, plain_text, P, R, X_reg, Y_reg, cipher_text   |
| `rtl/mont.sv`         | Montgomery multiplier: Xm shifter, 3Y, four cores, reduction     |
| `rtl/mont_core.sv`    | one partition (core)                                             |
| `rtl/pp_adder.sv`     | sum of the four partial products mod M                           |
| `rtl/cond_sub.sv`     | `a >= m ? a - m : a`                                             |
| `rtl/jitter_trng.sv`  | behavioural model of the jitter-amplifier RNG                    |
| `tb/tb_ref_pkg.sv`    | reference arithmetic (bit-serial Montgomery, `%`-based modexp)   |
| `tb/tb_*.sv`          | one self-checking testbench per module, plus `tb_rsa_top`        |

Every module takes the operand width `N` as a parameter (default 1024). `N`
must be a multiple of 32. All testbenches run at the default width.

## 7. Simulation

All testbenches are self-checking. Each one prints a final line
`TB_RESULT checks=<n> failures=<n>`. For example, to run the end-to-end test
(three full 1024-bit exponentiations under two keys, about 20 s):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rsa_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_rsa_top.sv \
    --top-module tb_rsa_top -o sim
./obj_dir/sim
```

The same command with another `tb/tb_<module>.sv` and `--top-module` runs a
unit test. The reference values never come from the design's own algorithm:

- Montgomery products are checked against a bit-serial radix-2 Montgomery
  loop.
- Exponentiations are checked against square-and-multiply with a 2049-bit
  `%` operator.

| testbench        | what it checks                                                                       |
|------------------|--------------------------------------------------------------------------------------|
| `tb_mont_core`   | each core's partial product mod M, the bound Sn < 2M, 128-cycle timing, zero output before done |
| `tb_pp_adder`    | random sums and the worst case 4(M-1)                                                |
| `tb_mont`        | random and extreme operands; latency of exactly 129 cycles; back-to-back starts      |
| `tb_rsa_regfile` | load order, Mprime, operand selection, result shift-out                              |
| `tb_pin_mux`     | steering for every sel value, output timing                                          |
| `tb_rsa_ctrl`    | exactly 2051 products, the operand sequence, R written only on 1 key bits, load lengths |
| `tb_jitter_trng` | widened clock-period spread, balanced and changing bit stream                        |
| `tb_rsa_top`     | full RSA results under two keys, equal cycle counts for both keys, the output burst, and that every mechanism occurs |

The mechanisms counted by `tb_rsa_top` are: key and message loads, finish
pulses, kept and discarded MONT3 products, the loop exit, the Montgomery
clear, the output words and RNG activity.

## 8. Performance

At 131 cycles per product, one exponentiation takes 268,683 cycles from
start to `ready`. The loads add 128 cycles and the result output 32.

| clock                         | exponentiation time | published figure          |
|-------------------------------|---------------------|---------------------------|
| 222 MHz (processor clock)     | 1.21 ms             | 1.2 ms (conclusions)      |
| 277 MHz (core-only synthesis) | 0.97 ms             | 0.945 ms                  |

The published description also gives 0.8 ms in its comparison table. That
figure does not match its own other numbers.

## 9. Where this RTL departs from, or fills in, the published description

- **Digit weight.** Each core multiplies its digit product by `4^j`. The
  partition algorithm includes this weight, but the core's block diagram
  does not draw it. Without it the partial products would not add up to the
  product.
- **Three final subtractions.** The block diagram shows two subtract-M stages
  after the adder, but a sum of four values below M needs three to reach
  `[0, M)`. The comparisons use `>=` where the diagram prints `Sn > M`.
- **Mprime.** The text says key, M, Mprime and e are all loaded in 96 cycles,
  but 96 words hold only three 1024-bit values. Here key, M and e are loaded,
  and the 8-bit Mprime is computed from M.
- **Word and bit order.** Values travel least significant word first. Key
  bits are used least significant first.
- **Digit sequence.** The core timing diagram prints a digit sequence
  (X[1:0], X[9:8], …, X[113:112], X[121:120]) whose last entries do not fit
  the 8-bit shift per cycle that the text describes. The RTL follows the
  text.
- **Handshakes.** The three phases per product, the one-cycle gaps around
  loads and output, the `data_out` register delay, the reset polarity and
  the `clr` of the Montgomery block are this design's choices. The published
  description gives only the states and their cycle counts.
- **Not modelled.** The I/O pads are process-specific cells and are not
  modelled. The RNG is a behavioural model only. The alternative
  countermeasures that the published work considered and rejected are not
  part of this design: the switched-capacitor equalizer, the op-amp current
  equalizer and the constant-current supply.
