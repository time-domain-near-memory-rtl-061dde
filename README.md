# Time-domain near-memory MAC engine (cascaded delay-line accumulation)

This engine computes a small dot product, four 4-bit inputs times four 4-bit
weights, with no ADC or DAC in the voltage sense. Instead it encodes the numbers as
time and charge:

* an **input** code `x` becomes a burst of `x` clock pulses;
* a **weight** code `w` becomes a current `w * I_LSB` from a current-steering DAC,
  and the weight sits in a small store next to the DAC;
* while the pulses last, the current charges a capacitor, so the capacitor voltage
  is proportional to `x * w`. This is the **multiplication**;
* each capacitor voltage starves a chain of inverters and so slows it. The chains
  of all four products are put in series, and one rising edge travels through all
  of them. The delay of the whole chain is the **sum** of the products;
* a counter clocked at 40 MHz measures that delay. The count is the digital
  result.

The interface stays digital (codes in, a count out), while the arithmetic happens
in the analog and time domains. The structure follows the "Architecture I"
(cascaded delay-cell) macro of the paper *Time Domain Near Memory Computing
Engine* (S. Antal, S. Enosh). The paper also studies a counter-based variant that
measures each cell on its own. That variant is not part of this RTL.

The RTL comes in two kinds. The digital parts are synthesizable SystemVerilog:
the pulse generator, the weight store, the phase controller and the
delay-measurement unit. The analog parts are behavioural models that use `real`
signals and delays: the DAC, the capacitor and the delay cell. A behavioural model
simulates and elaborates, but it is not a netlist. It stands in for a transistor
circuit.

## One operation

An operation runs through three phases, driven by `mac_ctrl`:

| phase | cycles at 40 MHz | what happens |
|---|---|---|
| multiplication | 18 | The pulse generators leave reset (cycle 1) and load their codes (cycle 2). Each then emits `x_i` pulses. `phi_multiply` is closed, so each pulse steers the DAC current `w_i * I_LSB` onto capacitor `i` for one clock-high time (12.5 ns). |
| accumulation | 1 + about `dout` + 3 | `phi_accumulate` connects every capacitor to the gate of its delay cell. One cycle later the chain input rises, half a clock period after a rising edge. The counter runs until the chain output rises. |
| reset | at least 5 | The capacitors are discharged, the pulse generators return to reset and the chain input falls. The phase ends once the chain is empty. Then `done` pulses. |

From the cycle in which `start` is high to the `done` pulse, one operation
takes `dout + 29` clock cycles. At the default settings
`dout` lies between 800 and 1700, so an operation takes 21 to 43 µs. The delay
cells work in microseconds, as do the current-starved cells of the original
circuit. The "40 MHz" of the design is its clock, not its rate of operations.

`x_in` is sampled by the pulse generators two cycles after `start`. Hold it
stable until then. The weights are read continuously from the store, so do not
write them during an operation.

## From codes to counts: the scale of each stage

These are the default values. They all live in `tdnmc_pkg` and can be overridden
through parameters.

| stage | law | default | per product LSB |
|---|---|---|---|
| DAC | `I = w * I_LSB` | I_LSB = 11.1 nA (166.5 nA full scale) | |
| pulse burst | `T = x * T_high` | T_high = 12.5 ns (half of 25 ns) | |
| capacitor | `V = I * T / C` | C = 200 fF | 0.694 mV; 15×15 → 156 mV |
| delay cell | `t = T0 + α V + β V² + γ V³` | T0 = 5 µs, α = 36 ns/mV, β = γ = 0 | 24.98 ns |
| chain | `t_acc = Σ t_i` | 4 cells → 20 µs offset | |
| counter | `dout = round(t_acc / 25 ns)` | 12 bits | ≈ 1 count |

So with the defaults, `dout = 800 + x·w` exactly for every input. The α value
is chosen to make one LSB about one count, and the 800 counts come from the
zero-voltage delay of the four cells, `4 × 5 µs / 25 ns`. The engine does not
remove this offset. Subtract it, or calibrate it, downstream.

The capacitor stays below the 300 mV limit with room to spare. Above that
voltage, the DAC current sources and the starving PMOS leave their linear region.
The `over_range` output flags an operation in which some capacitor went above
300 mV. The model itself keeps integrating linearly, so above 300 mV the real
circuit would deviate from the model.

## Why the result is what it is

**Rounding, not truncation.** The delay-measurement unit brings both chain
signals into the clock domain through identical two-flop synchronisers, so
their latency cancels. The count is then the number of rising clock edges
between the chain's input edge and its output edge. The controller launches
the input edge on a falling clock edge, so that count is the delay rounded to
the nearest clock period. If an external source launched the edge at an
arbitrary time, the result would be within one count of `t / T_clk`.

**Nonlinearity adds up.** A real current-starved cell is not linear in its
control voltage. Set `BETA` or `GAMMA` to model that. Because the four cells are in
series, their distortion terms `β ΣV²` and `γ ΣV³` add to the signal, and the
error grows with the size of the result. `tb_mac_sweep` shows this directly: it
sweeps the ideal code from 0 to 16 on a linear engine and a nonlinear one. This
loss of linearity is the known weakness of the cascaded approach. Its strength
is that the whole sum comes out of a single propagation event.

**Saturation.** The counter stops at all ones and raises `overflow` for that
operation. With the default 12 bits, that happens only if the delay-cell
coefficients are raised a lot.

## Blocks

| file | kind | what it is | follows the paper / own choice |
|---|---|---|---|
| `tdnmc_pkg.sv` | package | sizes, model constants, phase enum | values from the paper where it gives them |
| `npulse_gen.sv` | RTL | N-pulse generator: 4-bit input register, 4-bit counter, comparator, sticky window, clock gate | Register, counter, comparator, valid flag and port names are the paper's. The one-time load and the latch-based clock gate are own choices. |
| `weight_sram.sv` | RTL | one 4-bit word per macro; host port plus parallel read-out to the DACs | The paper only says "SRAM". Size and ports are own choices. |
| `csdac.sv` | behavioural | binary-weighted current-steering DAC (bits B, B1, B2, B3) | structure from the paper; ideal current sources |
| `acc_cap.sv` | behavioural | exact piecewise-constant integration `V = ∫I dt / C`, discharge, 300 mV flag | Law and values from the paper. The flag is own. |
| `mult_macro.sv` | behavioural (contains RTL) | pulse generator + DAC + capacitor + the two phase switches | structure from the paper |
| `delay_cell.sv` | behavioural | eight-inverter current-starved cell as a polynomial delay | The polynomial form is the paper's. The coefficients are own. |
| `accum_unit.sv` | behavioural | N delay cells in series, with a tap after each | from the paper |
| `delay_meas.sv` | RTL | control logic + counter measuring input-to-output edge delay | Function from the paper. Synchronisers, capture and saturation are own. |
| `mac_ctrl.sv` | RTL | three-phase sequencer | Phases from the paper. Cycle counts and handshakes are own. |
| `tdnmc_top.sv` | behavioural (contains RTL) | the whole engine | from the paper's block diagram |

`npulse_gen` has the design's only latch, which is intentional: the clock-gating
cell holds the window enable while the clock is high, so the gated clock never
carries a runt pulse. Its exact timing: the code loads on the first rising edge
after `rst_n` rises, and the window then covers the high phases of the next `x`
cycles. Code 0 gives no pulse at all. A valid flag keeps the reset values
(counter 0, register 0) from counting as a match.

## Where this RTL departs from, or had to interpret, the paper

* **How many products.** The paper calls its prototype a "4 × 4 MAC" without
  saying more. Here that reads as four products of 4-bit × 4-bit, so `N = 4`.
  The parameter `N` changes it.
* **Input vs. weight.** The paper's block diagram labels the pulse generator
  "weight" and the DAC "input". Its text and timing diagram say the opposite.
  This RTL follows the text: inputs become pulses and weights become currents.
* **Pulses for code 15.** One sentence says code 1111 gives 16 pulses. The
  pulse-width formula and the simulated example (7 pulses for code 0111) give
  N pulses for code N. This RTL gives N, so 15 at most.
* **DAC unit current.** The paper states 11.5 nA per LSB and also a full scale
  of 165–166 nA, which do not agree for 15 LSBs. Its simulation shows 166.5 nA.
  This RTL uses 11.1 nA, which gives that full scale.
* **Product voltage.** The paper scales the largest product to about 256 mV.
  With its own current, capacitor and a 12.5 ns pulse (the clock-high time at
  40 MHz), 15 × 15 gives 156 mV. About 250 mV would need a 20 ns unit pulse,
  which the paper names as the upper limit. This RTL keeps the 40 MHz clock.
* **Delay-cell numbers.** The paper shows delays of a few microseconds that
  rise with the gate voltage, but gives no coefficients. T0 and α here are of
  that order and are picked so that one product LSB is about one count. β and γ
  default to zero.
* **Offset.** The raw count includes the chain's zero-input delay, which is not
  removed.
* **Not modelled:** the bias generator of the DAC mirrors (its effect is
  `I_LSB_NA`), the finite output resistance of the DAC, the noise and mismatch
  of any analog part, and power. The paper's 42 µW and 7.62 TOPS/W cannot be
  checked with this model.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/tdnmc_pkg.sv tb/tb_tdnmc_full.sv \
  --top-module tb_tdnmc_full -o sim
obj_dir/sim
```

Swap in any other testbench name. `--assert` turns on the concurrent
assertions in the RTL: the pulse window of `npulse_gen` never reopens within an
operation, the two phase switches of `mac_ctrl` are never closed together, the
chain edge is launched only in the accumulation phase, and `tdnmc_top` sees no
`start` or weight write while `busy` is high. `-Wno-fatal` is needed because Verilator
warns that the delay cell's delay is only known at run time. `--timing` is
needed for the behavioural models.

| testbench | what it runs |
|---|---|
| `tb_tdnmc_full` | The whole engine at its default size. It runs 19 operations (corners, an all-zero input, full scale, back-to-back starts) against a model of the physics, checks `dout = 800 + dot product` and checks the cycle count of each operation. |
| `tb_tdnmc_top` | The engine with a 10-bit counter, an 80 fF capacitor and nonlinear cells. It drives over-range, counter overflow and visible distortion, and checks each against the model. |
| `tb_mac_sweep` | A linearity sweep over MAC codes 0 to 16, on a linear and a nonlinear engine side by side. |
| `tb_npulse_gen` … `tb_mac_ctrl` | One per block. See each file's header. |

Each run takes a few seconds.

## Changing it

* Input and weight width: `IN_BITS` and `W_BITS` on `tdnmc_top`. The
  multiplication phase stretches to `2^IN_BITS + 2` cycles.
* Number of products: `N`. The counter must then hold `N*T0/T_clk` plus the
  signal. Widen `CNT_W` if needed.
* Analog behaviour: `I_LSB_NA`, `C_FF`, `T0_NS`, `ALPHA`, `BETA`, `GAMMA`.
  If you change the clock period, change the constant `T_CLK_NS` in
  `tdnmc_pkg` to match. The models are written in ns, nA, fF and mV, and
  nA·ns/fF = mV.
* To replace a behavioural model with a real analog view in a mixed-signal
  flow, keep its port list. The digital blocks only see `pulse`, the phase
  switches, `chain_in` and `chain_out`.
