# ELM neural decoder: a 128-channel mixed-signal co-processor for motor-intention decoding

This design decodes movement intentions from the spike trains of up to 128
recorded neurons. It does this with an *extreme learning machine* (ELM), a
neural network with one hidden layer. The ELM's first-layer weights are
random and never trained. Only the linear output layer is trained. The
central idea is to make the random first layer free: every weight is a
single, minimum-size current-mirror transistor, and its gain is whatever the
fabrication mismatch of that transistor happens to be. Each hidden neuron
is a current-controlled oscillator (CCO) that drives a digital counter, so
the hidden layer's outputs arrive as ordinary integers. The trained second
layer needs precision and reprogrammability, so it stays digital, outside
the analog array.

This RTL covers the whole chain:

* the co-processor chip (`mlcp`): spike input, moving-window feature
  extraction, DACs, the random mirror array, the CCO neurons, the counters
  and the read-out;
* the controller side (`timing_control`, `elm_output_stage`, `onset_fsm`),
  which on the published prototype is firmware on a microcontroller;
* the top (`elm_decoder`), which joins the two.

The analog parts are behavioural models with real-valued currents. All
digital parts are synthesizable SystemVerilog.

## The algorithm in hardware terms

For an input vector **x** of D window spike counts, hidden node *i* produces

    h_i = g( sum_j w_ij * x_j )        w_ij = exp(dVt_ij / U_T), dVt_ij ~ N(0, 16.5 mV)

Here g() is "count CCO pulses for a fixed time, but stop at a programmable
ceiling". The output layer computes `o_k = sum_i beta_ki * h_i` for C = M + 1
outputs:

* the first M = 12 outputs score the movement classes, and the class is
  `s = argmax o_1..o_M`;
* the last output is trained by regression to rise at movement onset.
  Thresholding it gives `G = (o_{M+1} > theta)`.

A post-processing step turns G into `G_track`. `G_track` fires when G was
high at least LAMBDA times in the last TAU classification periods. After a
firing, a refractory period of TR periods blocks the next one. The decoded
output is `F = G_track * s`: the class at a detected onset, and 0 at all
other times. A classification is produced every t_s = 20 ms.

Training is not part of the hardware. A host computes beta from recorded
hidden-layer outputs and loads it, together with the f_max ceilings. Because
training sees the real chip's counts, it absorbs the analog
non-idealities.

## Input rows: moving-window counts and time-delayed dimensions (`wincnt`)

This is the most intricate digital block. Each of the D = 128 rows has:

* a 4-bit counter that counts the row's spikes within one sub-window (one
  CLK_in period, t_s). It saturates at 15;
* a 4-bit register that receives the count at each CLK_in rising edge;
* a 2:1 select, controlled by the row's `S_ext` bit, that picks the value
  entering the window. The choices are `D_n`, the row's own registered
  count (`S_ext = 0`), or `D_i`, a delayed count from the row above
  (`S_ext = 1`);
* a chain of five 4-bit registers holding `D_{n-1} .. D_{n-5}`;
* a running sum `Q_n = Q_{n-1} + D_n - D_{n-5}`. The sum is the spike count
  of the last five sub-windows, a 100 ms moving window with a 20 ms step;
* a tap multiplexer controlled by `SDL<2:0>`. Code k sends `D_{n-1-k}` to the
  next row as its `D_i`. That is a delay of 1 to 5 sub-windows (20 to 100 ms).

The chain that the window needs anyway also supplies the delayed copies.
Setting `S_ext = 1` on a row turns it into a time-delayed copy of the row
above. A delayed row can in turn feed the row below it, so delays add up.
This implements *time-delay based dimension increase* (TDBDI). When
electrodes die, the surviving channels enter the network several times, at
different delays, which recovers accuracy. For example, with 15 channels and
one earlier sample (p = 2), rows 2k hold channel k and rows 2k+1 hold the
same channel 20 ms earlier.

Timing. Spikes counted in sub-window n reach Q at the second CLK_in edge
after the sub-window closes. Counted from the start of the spikes, Q first
moves after 40 ms. A row delayed with SDL = 000 follows its source by one
more sub-window, and SDL = 001 adds two (40 ms, as measured on the
prototype). With 14 spikes per sub-window, Q steps 14, 28, 42, 56 and then
sits at 63. The published waveform shows the same staircase (14, 28, 43, 57,
63), including the saturation.

Q is 6 bits. Five 4-bit values can sum to 75, so the running sum is kept in
7 bits and the output saturates at 63. The exact recurrence is therefore
never corrupted.

## Analog signal path (behavioural models)

| block | model |
|---|---|
| `reference_model` | I_ref = code × 1 nA (6-bit code, 1–63 nA) |
| `dac_model` | I_DAC = I_ref × Q / 64 (6-bit current-splitting ladder; DNL not modelled) |
| `mirror_array_model` | I_in,i = Σ_j w_ij I_DAC,j, with w_ij = exp(dVt/U_T) and dVt ~ N(0, 16.5 mV) drawn once from `SEED`; U_T = 25.85 mV |
| `cco_model` | while NEU is high: a pulse every T = C_f·DVDD/I_in + C_f·DVDD/(I_rst − I_in); C_f = 100 fF, DVDD = 0.6 V, I_rst = 200 nA |

The mirror weights are log-normal with a median of 1. The spread is large:
one sigma of mismatch is a factor of about 1.9. Different `SEED` values give
different "chips". A testbench can read the drawn weights as
`<mirror instance>.w[i][j]`. In the same way, the published weights were
obtained by measurement.

The CCO runs only while NEU is high. NEU low resets the membrane node, so
the model drops a half-finished integration phase, and the next NEU window
starts a fresh period. The CCO's `v_o` is high during the fast reset phase. I_rst is not
published. It is set to 200 nA so that this pulse (about 300 ns) can be
sampled by a 10 MHz system clock. The price is that the approximation
f ≈ I_in/(C_f·DVDD) holds only for input currents well below 200 nA. To
stay in that range, choose I_ref so that the largest column current stays
below about 150 nA. With 128 active rows that means about 1 nA.

## Hidden neurons and read-out

`hidden_counter` counts rising edges of its CCO while NEU is high, up to the
stop value `2^(7+f_max) − 1`: f_max = 7 gives the full 14-bit range, and
f_max = 0 stops at 127. This ceiling is the activation nonlinearity. A large
code leaves a node effectively linear. RN_cnt (active low) clears the
counter.

When NEU falls, `column_scanner` latches all L counts and points at column
1. C<13:0> shows h_1 immediately, and each CLK_out rising edge moves on to
the next column. The controller samples C just before each CLK_out rise.
The counters can then be cleared and can count again while the latched
words are still being read.

## One classification period (`timing_control`)

At the defaults (10 MHz clock, `TS_CYC` = 200 000 cycles = 20 ms):

| cycle | event |
|---|---|
| 0 | CLK_in rises: every row's window advances (Q valid 2 cycles later) |
| 16 | NEU rises: the CCOs run and the counters count |
| 16 + 100 000 | NEU falls: the scanner latches the counts |
| then | L CLK_out pulses, 4 cycles low and 4 high each; `h_valid`/`h_idx` in the last low cycle |
| after the last word | `frame_done` and one cycle of RN_cnt low |
| 100 000 | CLK_in falls (50 % duty) |

RN_in is pulled low for 4 cycles once, when `run` first rises. RN_cnt is
also held low while the controller is idle, so the first period counts from
zero. The period
must satisfy `NEU_DLY + NEU_CYC + 8·L + 2 ≤ TS_CYC`; an assertion checks this.

## Output layer and onset post-processing

`elm_output_stage` keeps beta as an L × 13 array of signed 16-bit words,
written through `beta_we`/`beta_addr_i`/`beta_addr_k`/`beta_wdata`. As each
word arrives, it does all 13 multiply-accumulates in one cycle. Column 0
restarts the sums. On `frame_done` it registers the 40-bit outputs `o`, the
1-based class `s` (ties go to the lower class) and `G = o_13 > theta`.
`out_valid` pulses one cycle after `frame_done`.

`onset_fsm` implements the LAMBDA-of-TAU rule with refractory period TR.
The defaults are LAMBDA = 6 and TR = 7 (140 ms). TAU = 6 makes the rule
"six positives in a row". When `G_track` fires, the G history is cleared,
and during the refractory period the history refills without firing.

## Interface of `elm_decoder`

| port | dir | meaning |
|---|---|---|
| `clk`, `por_n` | in | 10 MHz system clock, active-low power-on reset |
| `run` | in | start (and keep) the classification periods |
| `spk`, `addr[6:0]` | in | spike event: `spk` high for ≥ 2 cycles, `addr` stable meanwhile; low ≥ 2 cycles between events |
| `sdl[2:0]` | in | delay of the TDBDI taps (k+1 sub-windows) |
| `sclk`, `mosi`, `cs_n`, `miso` | in/out | configuration, see below |
| `beta_*` | in | output-weight write port |
| `theta[39:0]` | in | onset threshold, in the units of `o` |
| `o[13]`, `s`, `g`, `g_track`, `refractory`, `f`, `out_valid` | out | results, updated once per period |
| `clk_in`, `neu`, `c[13:0]` | out | chip pins, for observation |

Configuration frame (SPI mode 0, MSB first, D + 3L + 6 = 518 bits, taken
when `cs_n` rises): `iref_code[5:0]`, then `fmax[L-1]` … `fmax[0]` (3 bits
each), then `s_ext[D-1]` … `s_ext[0]`. `sclk` must be slower than a quarter
of `clk`. Reset values: all S_ext = 0, f_max = 7, I_ref code = 32. With
I_ref = 32 nA and many active rows, the column currents exceed the CCO
model's range, so program I_ref before use.

Spikes sent within two cycles of a CLK_in rising edge count in the new
sub-window.

## What follows the published design and what does not

Taken from the published design: the block structure and pin names of the
chip; 128 rows and 128 nodes; the widths (4-bit sub-window counts, 6-bit
window, 7-bit address, 3-bit SDL with five delay steps, 14-bit counters,
3-bit f_max, 6-bit I_ref); the window recurrence and its 40 ms latency; the
S_ext/SDL delay chaining; the log-normal weight statistics; the CCO period
equation with C_f and DVDD; the read-out order (count with NEU high, read
with CLK_out while NEU is low); the ELM output equations, argmax and
threshold; and LAMBDA = 6 and Tr = 140 ms.

Choices of this design, where the published description is silent:

* One synchronous system clock. SPK, CLK_in, NEU, CLK_out, sclk and the CCO
  output are sampled and edge-detected. The chip itself clocks its counters
  with the spikes and with the CCO.
* Reset polarity (RN_* active low) and reset values.
* The mapping of the f_max code to a stop value.
* The SPI frame format. The chip only has an unnamed serial port.
* I_rst = 200 nA and U_T = 25.85 mV.
* The timing of the control sequence inside a period.
* beta as 16-bit signed values, 40-bit accumulators, and tie-breaking.
* Clearing the history on detection, and a one-period G_track pulse.
* A controller realized in hardware. On the prototype it is MCU firmware.

Where the published description contradicts itself:

* The text says the oscillation frequency is set by the 400 fF integration
  capacitor, but the period equation uses C_f = 100 fF. The model follows
  the equation.
* The text asks for LAMBDA positives out of the last TAU points, while the
  flow chart asks for LAMBDA positives in a row. The RTL implements the
  text's rule; with the default TAU = LAMBDA the two rules agree.

Not modelled or not built:

* DAC non-linearity, mirror noise and output-conductance error, CCO
  jitter, and supply dependence.
* The hidden-layer normalization against supply variation. It is a
  post-processing option that needs the sum of the inputs, which the chip
  does not output.
* The radio link and the training software.
* The top's output stage is sized for 12 classes + onset. The 18-class
  combined-movement data set would need `N_OUT = 19` in `elm_pkg`.

## Files

`rtl/`

* `elm_pkg.sv`: shared sizes and the f_max stop function.
* Chip blocks: `spk_demux.sv`, `wincnt.sv`, `hidden_counter.sv`,
  `column_scanner.sv`, `spi_config.sv`.
* Behavioural models: `reference_model.sv`, `dac_model.sv`,
  `mirror_array_model.sv`, `cco_model.sv`.
* The chip, `mlcp.sv`, and the controller side: `timing_control.sv`,
  `elm_output_stage.sv`, `onset_fsm.sv`.
* The top, `elm_decoder.sv`.

Each file opens with a description of its function, timing and
assumptions.

`tb/`

* One self-checking bench per block, `tb_<module>.sv`.
* `tb_ref_pkg.sv`: a reference model of the rows and of the CCO counts,
  used by `tb_mlcp` and by the decoder benches.
* `elm_decoder_tb_body.svh`: the shared body of the end-to-end benches.
* `tb_elm_decoder.sv`: the end-to-end bench at 16 rows and 8 nodes. It runs
  in under a second.
* `tb_elm_decoder_full.sv`: the end-to-end bench with every parameter at
  its default, 18 classification periods of 20 ms. It takes about 7 to 8
  minutes.

Every bench prints `TB_RESULT checks=N failures=M`. The end-to-end benches
predict every hidden word from the spikes they send, the drawn weights and
the CCO equation, to within one pulse. They check the outputs exactly, and
they require each mechanism to occur at least once: TDBDI input, window
saturation, the f_max ceiling, G high and low, onset detection, a detection
blocked by the refractory period, a non-zero F, and the start-up RN_in clear. Before each trial the bench
reloads the movement columns of beta so that a different class must win,
so a class lost between the output stage and F is caught.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/elm_pkg.sv tb/tb_ref_pkg.sv tb/tb_elm_decoder.sv \
        --top-module tb_elm_decoder -o sim
    ./obj_dir/sim

For another bench, change the top module and the file. For example, a block
bench: `rtl/elm_pkg.sv tb/tb_wincnt.sv --top-module tb_wincnt`. `cco_model`
needs `--timing` because it uses delays. Everything else is cycle based.
Because the analog models use `real`, only the digital blocks can be
synthesized, and `mlcp` and `elm_decoder` are simulation models as a whole.
