# A binarized neural-network layer computed inside a 2T2R resistive memory

A binarized neural network (BNN) uses weights and activations of +1 or -1. Each neuron then
reduces to

    y = sign( popcount( XNOR(w_j, x_j) ) - b )

where the XNOR of two signs replaces a multiplication, popcount counts the ones, and `b` is a
learned threshold. The weights are single bits, so a whole layer fits in a small non-volatile
memory. If the XNOR can be done where the weight is read, weights never travel to a processor.

This RTL models such a layer built around a 32 × 32 array of hafnium-oxide resistive memory
(RRAM) synapses: 1K synapses in 2K devices. It follows the organisation of a fabricated 130 nm
test array. Three ideas carry the design:

* **Differential storage (2T2R).** Each weight uses two devices, each with its own access
  transistor. One device sits on bit line BL and the other on BLb. The pair BL low-resistance /
  BLb high-resistance means +1. The opposite pair means -1. A read compares the two devices
  with each other, not one device with a fixed reference. A device that drifts towards the
  wrong state is therefore still read correctly, as long as it has not crossed its partner.
  This is how the design keeps bit errors low without an error-correcting code.
* **XNOR in the sense amplifier.** A precharge sense amplifier (PCSA) decides which of the two
  devices has the lower resistance. Four extra transistors, driven by the input bit X and its
  complement, connect BL and BLb to the amplifier either straight or crossed. The amplifier's
  output is therefore XNOR(w, X) directly.
* **Popcount and threshold in logic.** The 32 amplifier outputs of one row read are counted.
  The count is compared with the neuron's threshold.

## Block diagram

```
                 prog_*                        thr_*, x_*            start, cfg_*
                   |                               |                      |
            +------v-------+               +-------v--------+     +-------v--------+
            |  memory      |               | threshold regs |     |   sequencer    |
            |  controller  |               | input buffer   |     | (in the top)   |
            +--+---+----+--+               +---+--------+---+     +--+----------+--+
   row addr    |   |    | SET/RESET pulse     | x chunk | b          | row, SEN   |
            +--v---v-+  |                     |         |            |            |
            | row    |  |  +------------------+         |            |            |
            | decoder|  |  |                            |            |            |
            +---+----+  |  |                            |            |            |
             WL |       |  |                            |            |            |
        +-------v-------v--v--+  r_BL, r_BLb   +--------+---+        |            |
        | 2T2R RRAM array     |--------------->| 32 x PCSA  |<-------+ SEN        |
        | 32 rows x 32 pairs  |                |  + XNOR    |                     |
        +---------^-----------+                +--+------+--+                     |
                  | column select                 | 32   | 32                     |
         +--------+--------+   out (test read)    |      v                        |
         | column decoder  |<---------------------+  +----------+   +-----------+ |
         +-----------------+                         | popcount |-->| sign /    |<+
                                                     +----------+   | threshold |--> out_y
                                                                    +-----------+
```

## Files

| File | What it is |
|---|---|
| `rtl/bnn_pkg.sv` | default sizes, resistance encoding, device and mode enums |
| `rtl/rram_2t2r_array.sv` | **behavioural model** of the 2T2R array: one resistance value per device |
| `rtl/pcsa_xnor.sv` | **behavioural model** of the sense amplifier with XNOR |
| `rtl/row_decoder.sv` | row address to one-hot word line |
| `rtl/column_decoder.sv` | column select for programming, and a 32:1 multiplexer of the amplifier outputs |
| `rtl/popcount.sv` | count of ones among the 32 XNOR outputs |
| `rtl/sign_activation.sv` | sums the popcounts of a neuron's rows; `y = (sum >= b)` |
| `rtl/memory_controller.sv` | writes weights as a SET pulse and a RESET pulse per synapse |
| `rtl/bnn_fc_layer.sv` | top: the layer, its sequencer and its register files |

The array and the sense amplifier are analog circuits. Here they are modelled by what they
decide, not by currents and voltages. Everything else is synthesizable RTL.

## How a layer is mapped onto the array

A neuron's weights lie along a row, so one row read gives all 32 of its XNOR products in
parallel. A neuron with more than 32 inputs takes `cfg_chunks` consecutive rows. Neuron `n`
uses rows `n*cfg_chunks` to `n*cfg_chunks + cfg_chunks - 1`. Row `k` of every neuron sees input
chunk `k`, that is inputs `32k` to `32k+31`. The popcounts of a neuron's rows are added before
the threshold is applied. `cfg_chunks * cfg_neurons` must not exceed 32. Otherwise `cfg_err`
pulses and nothing starts.

If the number of inputs is not a multiple of 32, fill the unused positions of the last row with
weight +1 and input +1. Each such position adds exactly 1 to the count. Add the number of padding
positions to the threshold you write.

Encoding everywhere: bit 1 = +1, bit 0 = -1. `y = 1` means the neuron outputs +1. Sign(0) counts
as +1, so `y = (popcount >= b)`.

## Operating the layer

All of the following starts only when the layer is idle. If several requests arrive in the same
cycle, `start` wins over `prog_valid`, which wins over `rd_valid`.

1. **Program weights.** Hold `prog_valid` with `prog_row` and `prog_weights` (32 bits) until
   `prog_ready`. The memory controller then works through the row column by column. It pulses the
   BL device first (SET for +1, RESET for -1) and then the BLb device (the opposite). Each pulse
   keeps its address for `PULSE_CYCLES` cycles (default 4). The array changes state in the last of
   those cycles. A row takes `2 × 32 × PULSE_CYCLES` = 256 cycles, and `prog_busy` is high
   meanwhile. In the device model every device starts in the high-resistance state, so each row
   must be programmed before use.
2. **Load thresholds and inputs.** Write the threshold of neuron `n` with `thr_we`, `thr_addr=n` and
   `thr_data`. Write input chunk `k` with `x_we`, `x_addr=k` and `x_data`. Both are plain
   registers and can be written at any time.
3. **Run.** Pulse `start` with `cfg_chunks` and `cfg_neurons`. Each row takes two cycles:
   * a precharge cycle: the word line is up, the inputs are applied, and SEN is low;
   * a sense cycle: SEN is high, the amplifiers resolve, and the popcount is added.

   After the last row of a neuron comes one output cycle. In it `out_valid` is high, with
   `out_neuron`, `out_y` and the accumulated popcount `out_acc`. A layer takes
   `cfg_neurons × (2·cfg_chunks + 1)` cycles. `done` is high together with the last output.
4. **Test read.** Pulse `rd_valid` with `rd_row` and `rd_col`. Two cycles later, `rd_data_valid` is
   high for one cycle, and `rd_data` carries the stored weight. The read uses the same sense
   amplifier with X held at +1, passed through the column decoder. This is the single-bit read
   path of the test array.

`mode` reports idle, programming, inference or test read. Two assertions in the top check that
the amplifiers never sense while a row is being programmed, and that the two outputs of a
resolved amplifier are complementary.

## The sense amplifier model

While `sen` is low, the amplifier precharges and both outputs read 1. At the rising edge of `sen`,
it compares the two resistances after the straight or crossed steering set by `x`. It holds the
result for as long as `sen` stays high. Changes on the bit lines after the edge do not disturb
it. If the resistances are exactly equal (both devices in the same state, which is a programming
error), the model resolves to 0. A real amplifier would resolve at random.

## What follows the source design, and what is this design's own

Taken from the design being modelled:

* the 32 × 32 array of 2T2R synapses, with word and source lines per row and a BL/BLb pair per
  column;
* one sense amplifier per column;
* the row decoder, and column decoders on the output side and the bit-line side;
* the differential weight convention;
* the XNOR built into the sense amplifier by steering BL and BLb with X;
* popcount and threshold as added logic, with `y = sign(popcount - b)`;
* weights programmed before inference by a memory controller.

Chosen here, because the source gives no detail:

* resistance values (5 and 100, in arbitrary units; only their order matters) and the initial
  state (all devices high-resistance);
* programming abstracted to one event per pulse, held for `PULSE_CYCLES` cycles; the pulse order
  is BL device, then BLb device, column by column;
* the two-cycle precharge/sense timing and the one-cycle output;
* the mapping of several rows to one neuron, and the padding rule;
* register files for thresholds and inputs, the handshakes, and the `cfg_err` check;
* both column decoders merged into one module with a shared address;
* sign(0) = +1.

Not built:

* Combining several arrays into layers larger than 1024 synapses. The architecture figure for
  that is not available.
* Mapping convolutional layers onto arrays.
* Device variability, cycling wear and programming voltages. The array model has a
  `force_dev` task that a testbench can use to set a device to any resistance, to emulate drift
  or errors.

## What fits

The array holds 1024 binary weights.

* **Fits:** the output layers of the two medical-signal classifiers: the EEG motor-imagery
  network's 80 → 2 layer and the ECG electrode-inversion network's 75 → 2 layer. Each uses 6 rows.
* **Does not fit:** the hidden classifier layers. These are EEG 2520 → 80, about 202K weights,
  and ECG 5152 → 75, about 386K weights; one neuron alone would need 79 or 161 rows. A binarized
  MobileNet V1 classifier (5.7M weights) does not fit either. These need many arrays, which is
  not built.

## Verification

Every module has a self-checking testbench in `tb/`:

| Testbench | What it checks |
|---|---|
| `tb_row_decoder` | all addresses, enable on and off |
| `tb_column_decoder` | every address, with random amplifier outputs |
| `tb_popcount` | edge cases and random vectors against a bit count |
| `tb_sign_activation` | random row sums, including the boundary sum = threshold |
| `tb_pcsa_xnor` | both weights × both inputs, precharge level, holding after the edge, random resistance pairs |
| `tb_rram_2t2r_array` | 3000 random programming pulses, then every row read back |
| `tb_memory_controller` | pulse order, SET/RESET values, pulse length, 256-cycle row time |
| `tb_bnn_fc_layer` | see below |
| `tb_fc_output_layers` | see below |

`tb_bnn_fc_layer` runs the top at its default size, with no parameter overrides. It programs all
rows and reads weights back. It runs layers with 1, 2 and 4 rows per neuron and checks every
output and the latency. It triggers `cfg_err`. It lets devices drift and checks that the
differential read still returns the right weight. It reprograms a row between two inferences.
It counts each of these events and fails if one never happened.

`tb_fc_output_layers` runs the 80 → 2 and 75 → 2 output layers with padding, using random weights
and inputs (trained weights are not available).

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bnn_pkg.sv tb/tb_bnn_fc_layer.sv \
          --top-module tb_bnn_fc_layer -o sim && ./obj_dir/sim
```

Replace `tb_bnn_fc_layer` with any other testbench name. Every run takes well under a second.

## Changing the size

`ROWS` and `COLS` are parameters of every module, with defaults in `bnn_pkg`. The accumulator
width follows as `clog2(ROWS·COLS + 1)`. `PULSE_CYCLES` sets the programming pulse length. The
testbenches assume the default 32 × 32 size.
