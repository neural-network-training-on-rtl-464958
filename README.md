# An in-memory-computing macro for the three training MVMs, with radix-4 gradients

Training a neural network takes three matrix-vector multiplies (MVMs) per layer:

- the **forward MVM**: activations times weights;
- the **backward MVM**: gradients times weights;
- the **weight-update MVM**: activations times gradients.

Each of the three does about the same number of multiply-accumulates. A charge-domain in-memory-computing (IMC) array
computes a whole column of binary products at once. Each bit cell forms an XNOR between its row input and its stored bit. The
capacitors of a column are then shorted together, and an ADC digitises the result. This is very efficient, but the column can
take 2305 values (0..2304 matching rows) and the ADC has only 8 bits (256 levels). The quantisation this adds is tolerable for
inference, but not for 8-bit integer gradients.

The design here applies gradients in a **radix-4 format with a one-hot exponent**. A gradient is a sign times a power of four,
4^-3 .. 4^3, or zero. Its 8-bit on-chip form has a sign bit and seven mask bits, and at most one mask bit is set. The array is
run once per exponent bit (7 serial operations). In each operation only the rows whose gradient has that power take part, and
they drive their sign. Gradients are sparse, so in most operations only a few hundred of the 2304 rows are active. The ADC
range can then shrink to cover just those rows. When no more than 255 rows are active, the 8-bit ADC adds no quantisation at
all. The column reference VRef,p is therefore chosen per operation from the active-row count. Three policies are provided:
fixed, variable, and dual (two levels).

The RTL describes one macro: a 2304 x 256 array, 256 column SAR ADCs, the reference selection, the near-memory datapath that
rebuilds multi-bit results, an input buffer and a sequencer. The array and the analog half of the ADC are behavioural models.
Everything else is synthesizable.

## Number formats

**+/-1 words (activations, weights).** A K-bit word holds K digits, each +1 (bit = 1) or -1 (bit = 0).

- Bits 0 and 1 (b0-, b0+) weigh 1/2 each.
- Bit p >= 2 weighs 2^(p-2).

A 6-bit word covers [-16, 16], used for activations 0..16. A 5-bit word covers [-8, 8], used for weights. All values come out
doubled in the datapath, so the weights become integers: 1, 1, 2, 4, 8, 16. `imc_pkg::pm1_encode` converts an integer;
`pm1_value2` returns the doubled value. The meaning of each bit follows the paper. The order of bits 0 and 1 is this design's
choice.

**One-hot radix-4 gradients.** The on-chip element is 8 bits:

- Bit 7 is the sign (1 = +1 on the row, 0 = -1).
- Bit i (0..6) is the mask for 4^(i-3).
- An all-zero mask is the value 0.

`imc_pkg::radix4_onehot` converts a 4-bit radix-4 code {neg, e}. In that code e = 0 is zero and e = 1..7 is 4^(e-4). The paper
does this conversion off-chip, and this code assignment is this design's choice.

**Analog quantities in row units.** The array and ADC models work in integers: one unit is the column voltage of one matching
row, VRef,pmax / 2304. The maximum reference 0.8 V is 2304 units. The lossless reference V_prec = 0.8 V x 255/2304 = 0.089 V
is 255 units, and 0.4 V is 1152.

## One serial IMC operation

For step s of a run, the input reshape buffer (`input_reshape_buffer`) registers two row vectors:

- `drive`: bit s of every element for +/-1 inputs, or the sign bit for radix-4 inputs;
- `active`: every used row for +/-1 inputs, or mask bit s for radix-4 inputs. Rows at or beyond `cfg.vec_len` are always
  masked.

The buffer also counts the active rows, n.

The array (`cima`) then gives every column c a voltage

    v_c = #{ active rows r : stored bit (r, c) == drive[r] }

A masked row does no XNOR and leaves its capacitor at 0. In the +/-1 domain, that row therefore counts as -1.

`vref_select` picks VRef,p from n:

| mode | VRef,p (row units) |
|---|---|
| fixed | `cfg.r_fixed` |
| variable | n clamped to [255, 2304]: the smallest range that cannot clip, never below V_prec |
| dual | 255 if n <= 255, otherwise `cfg.r_high` (2304 = 0.8 V for the forward/backward pair, 1152 = 0.4 V for the weight-update pair) |

VRef,n is always 0. The 256 ADCs share one reference, because n is the same for every column.

Each column ADC (`sar_adc` = `sar_logic` + `sar_adc_afe`) samples v_c and runs an MSB-first search. The result is

    code_c = min(255, floor(255 * v_c / VRef,p))

so codes clip at 255 when the reference is too low. In dual mode with at most 255 active rows, code = v_c exactly.

## Rebuilding the result: the near-memory datapath

This is the least obvious part; `nmc_datapath` does it in three stages.

**1. Back to an inner product.** A gain G = round(VRef,p x 256 / 255), which equals VRef,p + round(VRef,p / 255), turns the
code into row units with 8 fraction bits: pop = code x G. The column's +/-1 inner product over the active rows is
2 pop - n. The paper states this as an offset by the masked-row count (every masked row reads as -1), and the hardware
computes it that way:

    part_c = 2 * code_c * G  -  2304 * 2^8  +  n_masked * 2^8

**2. Serial weighting.** Each step's partial is shifted by the weight of the input bit it came from. For +/-1 inputs that is
0, 0, 1, 2, ... (the doubled digit weights). For radix-4 step e it is 2e (4^e; the 4^-3 goes into the output scale). The
result is added into a 44-bit accumulator per column.

**3. Parallel (bit-column) weighting.** A stored element of `cfg.cim_bits` = BW bits occupies columns kBW .. kBW+BW-1, bit j
in column kBW+j. Output k is

    out_k = sum_j acc_(kBW+j) << pm1_shift(j)

One output is read per cycle, floor(256 / BW) in all: 51 for 5-bit weights, 42 for 6-bit activations.

**Output scale.** `out_data` is the MVM result times 2^8 x 2 x S_in, where S_in = 2 for +/-1 inputs and 64 for radix-4
inputs. Without ADC loss it is exactly

- `out = 1024 * sum_r x_r w_rk` for +/-1 inputs;
- `out = 32768 * sum_r g_r w_rk` for radix-4 inputs.

The testbenches check this identity. Rescaling into the training framework's format (gradient scaling, activation clipping)
belongs to the host.

## Running an MVM on `imc_top`

1. **Load the array.** Pulse `cim_wr_en` with `cim_wr_row`, `cim_wr_word` (0..7) and `cim_wr_data`. Bit j of doubleword w is
   column 32w+j. The host decides the layout:
   - forward MVM: one filter per column group;
   - backward MVM: weights transposed;
   - weight-update MVM: activations of one input across the batch, BW = 6.

   `cim_rd_*` reads a doubleword back one cycle later.
2. **Stream the input vector.** Use `in_valid`/`in_ready`/`in_data`, four elements per doubleword with element 4w+j in byte j,
   filling from row 0. While a run is in progress `in_ready` stays low. A held word must stay stable; an assertion checks this.
3. **Start.** Set `cfg` (`imc_pkg::cfg_t`): input mode, `in_bits` (serial planes for +/-1 inputs), `cim_bits`, `vec_len`,
   `vref_mode`, `r_fixed` and `r_high`. Then pulse `start`. `cfg` must be held while `busy`.
4. **Collect the results.** The results come out on `out_valid`/`out_idx`/`out_data`, and `done` pulses with the last one.
   The input buffer is then empty and ready for the next vector. `hi_steps` counts the dual-mode operations that needed the
   high reference (the quantity the paper tracks across training). `vref_p`/`vref_n` show the present selection, where an
   analog reference generator would be steered.

**Timing.** Each serial operation takes 12 cycles: apply 1, compute 1, ADC start 1, then 8 SAR decisions and the EOC cycle,
in which the datapath accumulates. A run lasts 12 x steps + outputs cycles from the cycle after `start` to `done`:

- radix-4 gradients against 5-bit weights: 12 x 7 + 51 = 135 cycles;
- 6-bit activations against 5-bit weights: 12 x 6 + 51 = 123 cycles.

Operations do not overlap.

## Sizes against the evaluated networks

One array load holds a tile of 2304 inner-product terms and 256 bit-columns. Using the VGG-lite network of the evaluation
(3x3 convolutions, 128-256 filters, 1024-wide dense layers, batch 128):

- **Forward and backward MVMs.** Inner dimensions are 1152 or 2304, which is one row tile. The first dense layer has 4096
  inputs and needs two row tiles.
- **Weight-update MVMs.** Inner dimension is the batch times the feature-map size, up to 131072: 57 tiles.
- **ResNet-18.** The 512-filter stack (inner dimension 4608) needs two row tiles.

Tiling, summing partial tiles, and sending the first, last and residual layers to an FP32 processor are all host tasks. They
are outside this RTL.

## What is modelled, and where the RTL departs from the paper

- `cima` and `sar_adc_afe` are **behavioural models** of analog circuits. They compute the ideal charge-sharing count and the
  ideal quantiser with integers. Capacitor mismatch, comparator offset, reference noise and additive ADC input noise are not
  modelled. The real array is a mixed-signal macro, not the loop nest in `cima.sv`, which a synthesis tool would expand into
  an enormous adder tree.
- The analog reference generator is not described. Only its digital selection is built.
- The paper's input reshape buffer also aligns convolution windows and reuses data between them. No scheme is given, so only
  a plain vector buffer is built, and the host must form the im2col vector.
- Quantisation (activation clipping, weight binning, gradient scaling) and the format conversion are off-chip, as in the
  paper. The conversion functions in `imc_pkg` exist for the testbenches.
- The following are this design's own choices: the one-byte-per-element packing, the handshake, the masked-row level of 0,
  the fixed-point gain with 8 fraction bits, the 12-cycle schedule without overlap, and one shared reference for all ADCs.
- In variable mode the paper says the reference is set "for every input vector". Here it is set per serial operation,
  because each exponent step has its own active rows.
- The paper's Eq. 1 sums b_i for i = 1..K-2 with weight 2^(i-1). With b0+ and b0- that gives K digits, and the stated ranges
  ([-16, 16] for 6 bits, [-8, 8] for 5) fit this reading. The design uses weights 2^(p-2) for bit p >= 2, which is the same
  thing with bits numbered from the two half-weight digits.

## Files and simulation

`rtl/`:

| file | contents |
|---|---|
| `imc_pkg.sv` | sizes, `cfg_t`, the enums, and the format helpers |
| `imc_top.sv` | the macro |
| `imc_controller.sv` | the run sequencer |
| `input_reshape_buffer.sv` | the input buffer |
| `cima.sv` | the array model |
| `sar_adc.sv`, `sar_logic.sv`, `sar_adc_afe.sv` | the column ADC |
| `vref_select.sv` | the reference selection |
| `nmc_datapath.sv` | the near-memory datapath |

`tb/`: every testbench is self-checking and ends with a `TB_RESULT checks=N failures=M` line.

- `tb_<module>.sv` tests each block on its own.
- `tb_imc_top.sv` is the end-to-end test at 576 x 64. It covers forward, backward and weight-update runs, all three reference
  modes, clipping, lossy and lossless steps, short vectors, input stalls and mode switches, compared with an independent
  model and with the exact MVM.
- `tb_imc_full.sv` is the same test on the macro at its full 2304 x 256 size. It runs in about a second.
- `tb_vgg_lite_layer.sv` runs one tile of a VGG-lite 3x3 convolution with 256 input channels (2304 inner-product terms)
  through the forward, backward and weight-update MVMs at full size. It has no bit-exact ADC model. Instead it compares every
  output with the exact MVM and requires the error to stay inside the quantizer's bound: per step and column at most
  2 x (256 x VRef,p / 255 + 128) output units, and zero for a step at V_prec with at most 255 active rows. On one gradient
  vector it also checks that the summed error falls from fixed to dual to variable reference. The gradient statistics are the
  test's own: 60 % zeros, the rest log-normal with log4|g| ~ N(-1.5, 1). On that vector two of the seven exponent steps
  need more than 255 rows. The relative RMS error of the backward MVM is then about 4 at a fixed 0.8 V, 0.24 with dual
  references, and 0.04 with a variable reference.

With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/imc_pkg.sv tb/tb_imc_full.sv \
              --top-module tb_imc_full -Mdir obj && obj/Vtb_imc_full

Replace the testbench file and the top module to run any other testbench. `imc_pkg.sv` is named first; `-y rtl` finds the modules.
