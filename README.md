# An 8-bit resistive in-memory multiply-accumulate core with passive charge-domain neurons

This design computes 32 dot products of 256 eight-bit inputs with 256 eight-bit
weights in one operation, inside a 256 x 256 array of binary RRAM cells. It
needs no operational amplifiers and no multi-level cells, for two reasons:

* **Weights as bit planes.** Each weight bit sits in its own bit line, as one
  cell in the low-resistance state (LRS, 1) or the high-resistance state (HRS,
  0). Eight adjacent bit lines form one neuron, so 256 bit lines give 32
  neurons.
* **Arithmetic in capacitors.** Inputs are applied one bit plane at a time,
  least significant bit first. Each bit line charges its own integrating
  capacitor. The capacitors are sized in powers of two, so connecting them
  together weights every bit line's charge by its bit position. A sampling
  capacitor then averages the result with the previous one, which halves the
  older bit planes. After eight input bits the output voltage holds the
  whole product sum, and an ADC turns it into an 8-bit code.

An RRAM cell's LRS resistance is never exactly its nominal value. To handle
that, the core can also measure the resistance of single cells. A mapping
engine then uses those measurements to choose which physical bit line holds
which weight bit, and which cells stay in LRS. This is "bit line weight
mapping" with a "pseudo-binary" code.

The analog parts are behavioural models: the array, the passive neurons and
the ADCs. Everything that decides when and where things happen is
synthesizable RTL: the phase and switch sequencer, the word-line driver, the
bit-line multiplexer, the mapping engine and the apply logic of the top.

## Files

| file | kind | what it is |
|---|---|---|
| `rtl/cim_pkg.sv` | package | sizes, fixed-point formats, timing constants, phase/mode enums, switch struct |
| `rtl/phase_sequencer.sv` | RTL | per-bit reset / integrate / redistribute schedule, read schedule, switches S1-S4, ADC start |
| `rtl/wl_driver.sv` | RTL | input register and bit-plane word-line drive; one-hot row in read mode |
| `rtl/rram_array.sv` | model | 1R1T crossbar: binary state and LRS conductance per cell, bit-line current sums |
| `rtl/bl_mux.sv` | RTL | per-neuron 8:1 selection of bit line for each integrator (MUXn) |
| `rtl/passive_neuron.sv` | model | integrators, charge redistribution, sampling capacitor; exact integer charge model |
| `rtl/adc.sv` | model | 8-bit conversion of the neuron output with a run-time full scale |
| `rtl/blwm_mapper.sv` | RTL | pseudo-binary quantization and greedy bit-line assignment for one weight column |
| `rtl/cim_core.sv` | RTL (top) | everything wired together, plus the pass that writes a mapping into mux and array |
| `tb/tb_<module>.sv` | testbench | one self-checking testbench per module |
| `tb/tb_cim_core_full.sv` | testbench | the top at its default size, 256 x 256, 8 bits |

## How a multiply-accumulate works in charge

Let `S_(j,k)` be the current of integrator `k` during input bit `j`. That is
the sum of the LRS conductances of the cells on bit line `k` whose word line
carries a 1 in bit `j`. Integrator `k` has capacitance `C_k = C_f / 2^(n-k)`,
with `n = 8`. Integrating for a fixed time gives it a voltage drop
proportional to `S_(j,k) / C_k`.

**Redistribution.** Joining the integrators into one node adds their charges
over their total capacitance, which is about `C_f`. So the node's drop is
`V_S = 2^-n * sum_k 2^k S_(j,k)`, which is the input bit plane `j` times the
binary weight. The ADC's sampling capacitor `C_S = C_f` holds the previous
output. Closing it onto the node gives the new output
`V_out = (V_S + V_out_prev) / 2`. Every earlier bit plane is therefore
halved once more for each later one. After `n` bit planes, LSB first,
`V_init - V_out` is proportional to `sum_j 2^j * sum_k 2^k S_(j,k)`, which
is `sum_i X_i W_i`.

**The integer model.** `passive_neuron` keeps this arithmetic exact in
integers. It uses the unit "charge of one nominal LRS cell in one tick,
divided by `2^GFRAC`". With `acc` the output drop times `2^(2n)`, each
redistribution does:

    acc <- (acc + (sum_k S_k << k) << n) >> 1

Every partial sum is a multiple of `2^n`, so the shift never drops a bit.
After the eighth bit, `acc` equals the product sum exactly.

**From drop to volts.** To get volts, multiply by the physical step per
nominal cell. With one input line and nominal cells, the sequence of
`V_init - acc/2^16 * step` matches the published waveform for input
`8'b10111010` and weight `8'b11101100`. That waveform reads 1.001, 0.884,
0.944, 0.855, 0.811, 0.789, 0.896, 0.831 V. The model matches it within 3 mV
at a step of 0.234 V; the step was fitted.

**The ADC.** The ADC gives `floor(vin * 256 / fs)`, saturating at 255. With
`fs = 2^16` nominal cell charges of one integration (the full-scale of one
row), that operand pair gives code 171 = `8'b10101011`.

**What the model leaves out.** The passive integrator's nonlinearity is not
modelled. The drop is exactly proportional to charge, because the model
treats the bit-line regulator as ideal. The regulator is the part of the
real circuit that holds the cell drain voltage constant so that current
does not depend on how far the capacitor has discharged. Neither are noise,
PVT or the regulator's transistors.

## Phases, switches and timing

Everything runs on one 100 MHz clock; one tick is 10 ns. Six ticks make one
16.7 MHz system clock.

| phase | ticks | closed switches | what happens |
|---|---|---|---|
| reset | 1 | S1 | integrators back to `V_init`; the first reset of an operation also sets `C_S` to `V_init` |
| integrate | 2 (20 ns) | S2 | word lines carry bit `j` of every input; each integrator takes its bit line's current |
| redistribute | 3 | S3, S4 | integrators joined with each other and with `C_S` (the text does not say which switch does which) |
| convert | 6 | none | the ADC samples `V_out` and converts it |

**MAC operation.** There are eight (reset, integrate, redistribute) rounds, one
per input bit from LSB to MSB, and then one conversion. That is 9 system
clocks: 54 ticks = 540 ns, or 1.85 M operations/s. Counting every one of the
65,536 cells as a MAC, this is 121.4 GMAC/s.

**Resistance read.** Reset and then a 110 ns integration (11 ticks). Only word
line `read_row` is high, and only integrator `read_integ` is charged. Then
follow 3 ticks of sampling with S2, S3 and S4 closed, and the conversion;
21 ticks in all. The result is `acc = q << (2n-1)`, which is
`V_out = (V_init + V_S)/2`. Because the integration is 5.5 times longer than
in a MAC, the reading resolves the cell's conductance more finely than one
MAC bit does. With a suitable `fs`, the ADC code is the cell's normalised
LRS value.

**Handshake.** `start` is taken while idle, `busy` covers the operation, and
`done` pulses for one tick after conversion. `y_code` then holds the 32
codes. All ADCs convert together; the sequencer waits for neuron 0's `done`.

## Pseudo-binary quantization

A cell in LRS on a bit line used for weight bit `i` adds `r * 2^i` to the
stored weight, where `r` is the cell's measured normalised value (mean 1.0).
The code is still binary in its bit weights, but its value depends on the
cells it uses.

For one weight `w`, the mapping engine decides its bits from MSB to LSB. It
keeps the remainder `w_res` that the lower bits still have to supply, and
sets a bit (keeps the cell in LRS) unless one of these holds:

* `r * 2^i - w_res > 0.5`: setting it would overshoot by more than half an
  LSB;
* `r <= 0.5`: the cell is too weak to be worth using;
* `r * 2^i > 2 * w_res`: the overshoot would be larger than what is left.

If none holds, `w_res -= r * 2^i`. Example: the weight 13.4 on cells 1.05,
1.1, 1.125, 0.93 (MSB first). In that order the states come out 1, 1, 0, 1
and the stored value is 13.73, an error of -0.33; plain binary 1101 would be
off by 0.4. Moving the 1.125 cell to the MSB gives 1, 1, 0, 0 and exactly
13.4 (9.0 + 4.4). That reordering is what the mapping below searches for.

## Bit line weight mapping

Each neuron has eight bit lines, and the eight weight bits can be placed on
them in any order. The engine is greedy, MSB first. For each weight bit it
tries every bit line not yet taken and quantizes all 256 rows with it. It
then scores the remainders by `max_j |w_res,j| * sum_j w_res,j^2`, which
covers both the worst and the average row, and keeps the best bit line.
Ties go to the lowest index. With `remap_en` low, bit `i` simply uses bit
line `i`; only the quantization then adapts to the cells.

**Hardware form.** The engine works one row per tick, on its own copies of the
weights and the measured values:

* a copy pass: 256 ticks;
* per bit, `N_ROWS + 1` ticks for each candidate bit line, and then a commit
  pass.

For 8 bits the done pulse comes `45 * N_ROWS + 37` ticks after start with
remapping (11,557 ticks, 116 us at 256 rows). Without remapping it comes
after `9 * N_ROWS + 1` ticks.

**Outputs.** The results are `perm[i]`, the bit line of weight bit `i`;
`q_bits[row][i]`, the state of the cell of bit `i` in `row`; and the
remainder of each row.

**Applying a result.** `cim_core` applies a result when the engine finishes:

1. It writes `perm` into the neuron's multiplexer, one integrator per tick,
   so that integrator `i`, weighted `2^i`, listens to bit line `perm[i]`.
2. It programs the cell states row by row, one row per tick, putting
   `q_bits[row][i]` on bit line `perm[i]`.

`map_done` then pulses. Host writes to the mux and the array are overridden
during this pass. In the paper's flow, every cell is first formed to LRS
(`form_all_lrs`) and measured, and the unused ones are then set to HRS; the
apply pass performs that second step.

**Weight format.** Weights are unsigned with 6 fractional bits (`WW = 14`).
Measured values are 8 bits with 6 fractional bits (1.0 = 64), the same
format the array model uses for LRS conductance.

## Interface of the top (`cim_core`)

* **Inputs and operations:** `x_load`/`x_in[256][8]`, `start`, `mode`
  (`MODE_MAC` / `MODE_READ`), `read_row`, `read_integ`, `adc_fs`.
  Results come back on `busy`, `done`, `y_code[32]` and `vout_drop[32]`
  (exact model drops). `sw` and `phase` are brought out for observation.
* **Array:** `form_all_lrs`, and `prog_we` / `prog_row` / `prog_group` /
  `prog_lrs[8]` to write one row of one neuron's bit lines.
  `var_we` / `var_row` / `var_col` / `var_g` load a cell's LRS conductance
  into the model, which is how device spread is introduced in simulation.
* **Multiplexer:** `cfg_we` / `cfg_group` / `cfg_integ` / `cfg_bl`;
  `perm_ok` flags that every neuron's selection is a permutation;
  `mux_sel` shows the selections.
* **Mapping:** `map_r_*` loads measured values, `map_w_*` loads weights.
  `map_start`, `map_remap` and `map_group` run the engine on a neuron's
  column. `map_busy` and `map_done` report progress, and
  `map_res_row` / `map_res` read the remainders.

## Where this departs from the paper, and what it assumes

* **Reset switch.** The text gives the switch states for integration,
  redistribution and read sampling, but not which switch resets the
  integrators. S1 is used. The paper's schematic labels S5 and S6 are
  never described and are not built.
* **Per-phase durations.** Only the 20 ns integration and the 110 ns read
  integration are given. The reset (1 tick), redistribution (3 ticks) and
  ADC latency (6 ticks) were chosen so that an 8-bit operation is 9 periods
  of 16.7 MHz, which reproduces the stated 1.85 M operations/s.
* **Precision modes.** The paper reports 2-bit and 4-bit modes with 16.7 M/s
  and 8.3 M/s per cell. Here the precision is the elaboration parameter
  `N_BITS`, at `n + 1` system clocks per operation. The reported 2- and
  4-bit rates do not follow from that schedule, and the paper does not say
  how those modes are timed. At `N_BITS = 8`, narrower operands are simply
  zero-extended.
* **Conversion.** The ADC architecture, its range and one-ADC-per-neuron
  are assumptions. The full scale is a run-time input.
* **Quantization indexing.** The condition prints the bit importance as
  `2^(i-1)`. The worked example only works with `2^i` and bits counted from
  0, which is what is built.
* **Loss sign.** The loss is printed with a plain `max` of signed
  remainders. The magnitude is used, since a signed max would favour
  undershooting.
* **Weights and cell values.** Weights are unsigned; signed weights are
  not described. Cell values are carried as normalised conductance, the
  quantity that adds in the bit line. The paper calls it normalised
  resistance but uses it in the same role.
* **Neuron grouping.** Neurons are 8 adjacent bit lines, and the mux
  chooses within a neuron only.
* **Where mapping runs.** The paper gives the mapping as an algorithm. Here
  it is a sequential engine beside the array, and the apply pass is this
  design's own.
* **Not built.** The bit-line regulator and the 1R1T transistor-level cell
  are analog and are assumed ideal. There is no network-level control:
  layer tiling, reloading, activation or pooling. One core holds 8192
  weights, far fewer than LeNet, AlexNet or VGG16 need.

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. With plain Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/cim_pkg.sv rtl/*.sv tb/tb_cim_core.sv --top-module tb_cim_core
    ./obj_dir/Vtb_cim_core

Replace `tb_cim_core` with any other testbench name.

**What the testbenches check:**

* **`tb_phase_sequencer`:** switch patterns per phase, LSB-first order, 54
  busy ticks per MAC and 21 per read.
* **`tb_passive_neuron`:** the published V_out sequence, random MACs against
  an independent sum, and read mode.
* **`tb_adc`:** the paper's example code and the latency.
* **`tb_blwm_mapper`:** the worked example on a 2-row, 4-bit instance, and
  32-row random columns against a software reference of both mapping
  modes. It also checks the cycle counts, and that remapping lowers the
  total error.
* **`tb_cim_core`:** runs the whole flow at 32 x 32: form, read every cell,
  map with and without remapping, apply, and MAC. It counts each mechanism
  (read, MAC, remap, plain mapping, host permutation, ADC saturation) and
  fails if one never happened.
* **`tb_cim_core_full`:** the same flow at the default 256 x 256 size. It
  takes about a minute and a half.

**Changing sizes.** Change sizes through `cim_core`'s `N_ROWS`, `N_COLS` and
`N_BITS`. `N_COLS` must be a multiple of `N_BITS`, and `N_BITS` a power of
two.

**Fixed-point widths.** The widths are in `cim_pkg`. `GFRAC` (6) sets the
conductance resolution; `ACC_W` (56) is wide enough for `2^(2n)` times the
largest product sum at 256 rows.
