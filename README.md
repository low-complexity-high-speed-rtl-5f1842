# LC-LSDNN: DNN-refined least-square channel estimation for IEEE 802.11p

An 802.11p receiver estimates the channel once per frame from the two long
training symbols (LTS) of the preamble. The cheap estimate is least squares
(LS): divide what was received by what was sent, one subcarrier at a time.
LS is noisy at low SNR. The LC-LSDNN scheme ("low-complexity LS augmented by a
deep neural network") keeps LS and cleans it up with a small fully connected
network. Its key idea is to use **two separate networks**, one for the real
part and one for the imaginary part of the LS estimate, instead of one network
on the concatenated vector. Each network is then 52 → 26 → 52 instead of
104 → 52 → 104. That halves the parameters and multiply-accumulates (MACs):
5564 parameters and 5408 MACs instead of 10972 and 10816. It also gives two
short, independent datapaths.

This repository is synthesizable SystemVerilog for that estimator. It follows
the architecture published by Haq, Singh, Tanaji and Darak ("Low Complexity
High Speed Deep Neural Network Augmented Wireless Channel Estimation"). Where
that description is silent, the design choices are our own; each is listed
below. The authors did not write this code.

## Data flow

```
            +--------------+   +---------------+   +--------- lc_dnn (COMP=0) ----------+   +---------------+
 s_axis --> | ls_estimator |-->| axis_splitter |-->| normalizer -> hidden -> ReLU ->     |-->| axis_combiner |--> m_axis
 (LTS)      |  y/x, avg    |   |  re  |  im    |   |   output layer -> denormalizer      |   |  {im, re}     |   (H est.)
            +--------------+   +------+--------+   +------------------------------------+   +---------------+
                                      |            +--------- lc_dnn (COMP=1) ----------+          ^
                                      +----------->| same structure, own parameters     |----------+
                                                   +------------------------------------+
 s_axil --> axil_config --> weights, biases, mean, std of both lc_dnn; status read-back
```

| Module | Role |
|---|---|
| `lc_lsdnn_top` | The whole estimator: AXI-stream in and out, AXI-Lite configuration. |
| `axil_config` | AXI-Lite slave: parameter writes into both networks, status read. |
| `ls_estimator` | LS estimate per subcarrier, averaged over the two LTS. |
| `axis_splitter` | Sends the real part to one DNN and the imaginary part to the other. |
| `lc_dnn` | One network: normalize, hidden layer, ReLU, output layer, de-normalize, with a frame controller. |
| `dnn_layer` | A fully connected layer: N_OUT PEs in parallel plus their enable sequencing. |
| `dnn_pe` | One neuron: a serial MAC over its inputs, bias add, output register. |
| `relu_unit`, `normalizer`, `denormalizer` | Small combinational stages. |
| `axis_combiner` | Rejoins the two parts into complex estimates. |
| `lcls_pkg` | Types, sizes, the parameter-write struct, fixed-point helpers. |

## Number formats

All data use `<24,8>`: 24-bit two's complement with 8 integer bits (sign
included) and 16 fractional bits. This covers LTS samples, estimates,
activations, mean and standard deviation. Weights and biases use `<18,2>`:
18 bits with 16 fractional bits. These are the word lengths the published
fixed-point study found sufficient. A data × weight product has 32 fractional
bits; a PE accumulates products in 48 bits.

Every conversion back to `<24,8>` truncates (arithmetic right shift) and
saturates. Quotients truncate toward zero, and a zero divisor gives 0. These
rounding rules are our choice. The helpers are `sat_data` and `fx_div` in
`lcls_pkg`.

## LS estimation

Each input beat carries one active subcarrier:

- `y1`: the first received LTS value (complex);
- `y2`: the second received LTS value (complex);
- `x`: the reference LTS value (complex).

The block averages the two received values, `y = (y1 + y2) / 2`, and forms
`H = y / x`. It has two builds:

- `LS_BPSK = 1` (the default): the 802.11p LTS is BPSK, so x is +1 or −1 and
  the division becomes "keep or negate y". The sign of `x.re` decides.
- `LS_BPSK = 0`: the general complex divider, with six multipliers, three
  adders and two dividers.

## The PE and layer timing

This is the part to understand before changing anything.

**Layer shape and cost.** All PEs of a layer run in parallel. Each PE walks
through the whole input vector one element per cycle, so a layer costs N_IN
cycles however many PEs it has:

- hidden layer: 26 PEs, 52 cycles;
- output layer: 52 PEs, 26 cycles.

**Inside a PE.** A counter drives the input multiplexer and addresses the
PE's weight memory. While `pe_en` is high:

- the product `in_vec[cnt] * weight[cnt]` is added into the accumulator;
- the counter advances.

While `pe_en` is low, the accumulator is forced to 0 and the counter is held
at 0. When the counter passes its last value, the next edge loads
`acc + bias` (saturated) into the output register, and `out_valid` pulses for
one cycle. The rest of the time the output register holds its value.

**Sequencing.** `dnn_layer` raises `pe_en` for exactly N_IN cycles after a
`start` pulse. `done` follows N_IN + 2 cycles after `start`.

```
cycle       0      1      2   ...  N_IN   N_IN+1  N_IN+2
start      _/^\___________________________________________
pe_en      ______/^^^^^^^^^^^^^^^^^^^^^\___________________
MAC of         in[0]  in[1] ... in[N-1]
out_data   ==================================< acc+bias >==
done       ___________________________________________/^\_
```

**Frame phases.** `lc_dnn` runs one frame in four phases, one after another:

1. LOAD: takes 52 beats, normalizes each and writes it into an input buffer.
2. HID: runs the hidden layer on the buffer.
3. OUT: runs the output layer on the ReLU outputs.
4. SEND: streams the 52 outputs, each de-normalized on the way out.

Without back-pressure one frame takes 3K + K/2 + 6 = 188 cycles from its
first input beat to its last output beat. The LS and splitter registers add
2, so the whole estimator takes 190 cycles: 0.95 µs at 200 MHz, the clock
the published fixed-point design reached. A new frame is accepted only after
the previous one has been sent.

## Interfaces

`lc_lsdnn_top` has these ports:

- `s_axis_*`: `lts_beat_t` payload (144 bits: `y1`, `y2`, `x`), 52 beats per
  frame, `tlast` on beat 52. An assertion checks the frame length.
- `m_axis_*`: `cplx_t` payload (48 bits, real part in bits 23:0), 52 beats per
  frame, `tlast` on beat 52. Both streams follow AXI-stream valid/ready rules,
  and assertions check that an offered beat stays stable.
- `s_axil_*`: AXI-Lite slave (20-bit byte address, 32-bit data) for
  configuration, handled by `axil_config`. Every write stores one value in one
  of the networks. The word address (byte address >> 2) is
  `{comp, kind[2:0], row[6:0], col[6:0]}`:
  - `comp`: 0 for the real network, 1 for the imaginary one;
  - `kind`: 0 hidden weight, 1 hidden bias, 2 output weight, 3 output bias,
    4 mean, 5 std;
  - `row`: the PE index;
  - `col`: the input index, for weights.

  Write data bits 23:0 hold the value. Parameters are `<18,2>` in bits 17:0,
  mean and std are `<24,8>`. Writes with `kind` 6 or 7, or outside the layer
  sizes, are ignored. Reading any address with `kind` = 7 returns the status
  word (bit 0 = busy); other reads return 0. `WSTRB` is not used, and every
  response is OKAY. A write is taken when `AWVALID` and `WVALID` are both high.
  Reset sets mean = 0 and std = 1.0; weights and biases must be written before
  the first frame. All 5564 values are written once after reset.
- `busy`: high while a frame is inside.
- `rst_n`: synchronous, active low.

In the reference system a DMA engine feeds and drains the streams, and the
processor configures the IP over AXI-Lite. No register map is published for
that link; the one above is this design's own.

## Where this RTL departs from, or adds to, the published description

- **PE counter.** The published PE schematic labels its counter "Mod 2K" with
  an "=2K" compare, while its multiplexer has K inputs. Here the counter
  counts the N_IN inputs of the PE.
- **Output-layer size.** The schematic labels the output-layer PEs "PE #K/2",
  while the text and parameter count give 52 output neurons. 52 are built.
- **Normalization.** One scalar mean and one scalar standard deviation per
  network, as the schematic's single `m_r`/`v_r` (`m_i`/`v_i`) boxes suggest.
  Both are stored as `<24,8>`. The divider is a true fixed-point divide.
- **Our own choices**, not in the published description: averaging both LTS
  in one beat, the beat packing, the layer controller, the sequential frame
  phases with no overlap between frames, the AXI-Lite register map, and the
  reset values.
- **Not built.** The processor system, the DMA engines and the AXI
  interconnect. The MMSE estimators (Gauss-Jordan, QR and LU
  inversion), the plain LS IP and the single 104-52-104 network are
  comparison baselines, not part of this design.
- **One subcarrier per cycle.** LS could be parallelized over subcarriers
  when FPGA resources allow. Here LS and the stream interfaces handle one
  subcarrier per cycle, which keeps LS far shorter than the DNN phases.
- **Only the DMA-facing build.** A memory-mapped variant, where the IP reads
  and writes memory itself without a DMA, was also evaluated. It is not built:
  this RTL has AXI-stream ports for a DMA, the configuration used for the
  fastest results.
- **No trained weights.** Trained weights are not published, so the
  testbenches load random ones. The estimation quality (NMSE/BER) reported
  for the trained networks cannot be reproduced from this repository alone.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
compares the module's outputs with `tb_ref_pkg`, a separately written
128-bit integer model of the same arithmetic, and prints
`TB_RESULT checks=N failures=M`.

`tb_lc_lsdnn_top` runs the whole estimator at its default size (52
subcarriers, BPSK LS, 200 MHz clock). It:

- loads different random parameters into the two networks over AXI-Lite,
  and reads the status register while busy and when idle;
- builds frames from the 802.11 LTS sequence through a random channel, with
  two independently noisy copies;
- checks every output beat bit-exactly;
- checks the 190-cycle frame time;
- requires each of these to happen at least once: LS keep and negate, ReLU
  clipping in both networks, input and output back-pressure, and a frame
  offered while the previous one is still in flight.

Two more full-size runs:

- `tb_lc_lsdnn_general` repeats the end-to-end test on the build with the
  general complex-division LS (`LS_BPSK = 0`).
- `tb_lc_lsdnn_channels` runs the estimator on frequency-selective channels.
  Three tapped-delay-line profiles of our own choosing are each run at 10, 20
  and 30 dB SNR. The outputs are checked bit-exactly, and the LS stage is
  checked against the true channel: its NMSE must be within a factor of 2 of
  1/(2·SNR), the value for an average of two LTS. The measured values are
  within 2 dB.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/lcls_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_lc_lsdnn_top.sv \
  --top-module tb_lc_lsdnn_top -o sim && ./obj_dir/sim
```

(Verilator warns with MODDUP that `lcls_pkg.sv` is listed twice; that is harmless.)
Replace the testbench name to run the others. The full-size end-to-end run
takes a few seconds.

## Changing it

- `K` on `lc_lsdnn_top` / `lc_dnn` sets the number of active subcarriers. The
  hidden layer is K/2. The address `row`/`col` fields are 7 bits, so K ≤ 128.
- `LS_BPSK` selects the LS build.
- The word lengths live in `lcls_pkg` (`DW`, `DFR`, `PW`, `PFR`, `AW`).
- Each PE keeps its weights in a small array read combinationally by the
  counter. To map them onto block RAM, register the read address and delay
  the accumulator by one cycle.
