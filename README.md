# SPW: SECDED correction with word masking for neural-network parameters

Weights and biases of a neural network sit in memory for a long time, and a
particle strike can flip their bits. A flipped high-order bit of a single
weight can be enough to change a classification. A plain SECDED code
(single-error correction, double-error detection) repairs one flipped bit
per word. On two flipped bits it can only raise a flag, and the
corrupted value still goes into the computation.

SPW adds one step. Whenever the decoder *detects* an uncorrectable
(double) error in a parameter, it replaces the whole parameter by zero
before the neuron uses it ("word masking"). A zero weight removes one input
from the sum. That usually hurts the result far less than a weight that may
have become huge or changed sign. The hardware cost is the usual SECDED
check bits plus a small decoder and one zero-forcing selector in front of
each neuron's arithmetic.

This repository holds synthesizable SystemVerilog for the SPW decoder, its
encoder, and a complete fault-tolerant neuron built around them, with
self-checking testbenches.

## The code: 16 data bits, 5 Hamming bits, 1 overall parity bit

Parameters are 16-bit fixed-point numbers. They are protected by an
extended Hamming code of 22 bits. Number the code positions from 1. The
powers of two (1, 2, 4, 8, 16) hold the check bits C1..C5. The other
positions hold the data bits in order. A 22nd bit, p, makes the whole
word even parity.

| position | 1  | 2  | 3  | 4  | 5  | 6  | 7  | 8  | 9  | 10 | 11 | 12 | 13 | 14 | 15 | 16 | 17 | 18 | 19 | 20 | 21 | 22 |
|----------|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|----|
| content  | C1 | C2 | d0 | C3 | d1 | d2 | d3 | C4 | d4 | d5 | d6 | d7 | d8 | d9 | d10| C5 | d11| d12| d13| d14| d15| p  |

Check bit Ci is the XOR of every data bit whose position has bit i-1 set.
For example, C1 covers the odd positions, and C5 covers positions 16 to 21
(d11..d15). Here `dk` is bit k of the parameter, LSB first.

In memory, a word is `{p, C5, C4, C3, C2, C1, d15..d0}`: data in bits 15:0,
C1..C5 in bits 20:16 and p in bit 21. The code layout is the scheme's. The
bit order in the stored word is this implementation's choice.

The layout is computed, not tabulated. `spw_pkg::data_pos()` applies the
position rule at elaboration time, and the modules take a `DATA_W`
parameter. Other widths elaborate too, but only 16 bits has been simulated.

## Decoding in four stages

The decoder (`secded_decoder`) is split into the four stages of the
scheme. All of them are combinational, so a word read from memory is
decoded in the same cycle.

1. **Computation** (`spw_computation`) recomputes C1..C5 from the 16 data
   bits as read. It also forms **P**, the XOR of all 22 stored bits
   (including p itself). P is 0 for an intact word. To do this, the stage
   also needs the stored check bits, not only the data.
2. **Comparison** (`spw_comparison`) forms the syndrome
   C = recomputed checks XOR stored checks. After a single flip, C is the
   position of the flipped bit.
3. **SEC** (`spw_sec`) flips the data bit at position C. It looks at C
   only. A C that points at a check bit or past position 21 changes nothing.
4. **DED** (`spw_ded`) classifies the word from C and P:

   |            | P = 0        | P = 1        |
   |------------|--------------|--------------|
   | **C = 0**  | no fault     | p is faulty  |
   | **C ≠ 0**  | double fault | single fault |

   Its output `ded` is 1 for a double fault only.

The reasoning behind the table is as follows. A single flip anywhere
changes the parity of the word, so P = 1. If the flip is in the Hamming
part, C also names its position. If only p flipped, C stays 0. Two flips
restore the parity (P = 0) but leave a non-zero syndrome, because two
distinct positions never XOR to zero.

`spw_unit` adds the masking selector after the decoder. Its two inputs are
SEC's output and constant 0, and `ded` selects between them:

    CPar = ded ? 0 : sec

So on a double fault the neuron sees 0. SEC may also have flipped a wrong
bit in that case, but that value is discarded.

**Three or more flips** are outside what SECDED promises. The same table
classifies them by the parity of the flip count. An odd count looks like a
single fault and may be "corrected" into a wrong value. An even count looks
like a double fault and is masked. The testbenches reproduce this
behaviour exactly through an independent reference model, but they do not
claim it is good behaviour. At high bit-error rates it is the main source
of corrupted parameters that get through.

## Encoding

`secded_encoder` computes `{p, C5..C1}` when a parameter is written. It
reuses the Computation stage with the stored-parity input tied to zero.
That gives the check bits and the XOR of the data bits. p is then chosen
so that the 22-bit word has even parity.

## The fault-tolerant neuron (`ft_neuron`, top)

```
 par_wdata ─► secded_encoder ─► param_memory (FAN_IN+1 words x 22 bits)
                                   │ rdata = {parity, Par}
                                   ▼
                               spw_unit ── CPar ──► neuron_arith ──► y
                                   │                    ▲
                           spw_fault/spw_valid        x_data (valid/ready)
```

* **Storage.** Addresses 0..FAN_IN-1 hold the weights, address FAN_IN
  holds the bias. Writes go through the encoder. The memory has a
  synchronous read port: data appears one clock after the address.
  Parameters should be written only while the neuron is idle (an
  assertion checks this).
* **Protection.** Every parameter goes through the SPW unit each time it is
  read. Corrections are not written back to memory, so a corrected error
  stays in the memory and is corrected again on every read. A second flip
  in the same word later turns it into a masked word.
* **Arithmetic.** `neuron_arith` computes
  `y = ReLU(sum_i CPar_i * x_i + CPar_bias)`.
  - Numbers are two's-complement Q8.8.
  - Products go into a 48-bit accumulator without rounding.
  - The result is shifted back by 8 bits (truncating), saturated to
    16 bits and clamped at zero.
* **Sequencing.**
  - A `start` pulse while idle begins an evaluation.
  - On the next cycle `x_ready` rises, and the neuron takes one input per
    cycle in which `x_valid` is high (inputs in index order).
  - When `x_valid` is low the neuron waits, and the memory keeps
    presenting the same weight.
  - After the last input, one cycle adds the bias and one cycle applies
    ReLU. Then `y_valid` pulses for one cycle with the result.
  - With `x_valid` held high, `y_valid` is high in the (FAN_IN+3)-th cycle
    after the cycle in which `start` was sampled.
* **Status.** `spw_valid` is high in each cycle in which a parameter enters
  the arithmetic. `spw_fault` then gives its class from the table above
  (`spw_pkg::fault_type_e`).
* **Soft-error injection.** `flip_en/flip_addr/flip_mask` XOR a mask into
  one stored word: data in bits 15:0, C1..C5 in bits 20:16, p in bit 21.
  This port models bit flips in the memory cells for testing. It is not
  part of the protection scheme. Tie `flip_en` to 0 in a real use.

`FAN_IN` defaults to 576. That is the largest fan-in of a LeNet-style MNIST
network with 8 and 16 convolution filters and three fully connected layers
(69120 first-layer weights = 576 inputs x 120 neurons). The smaller layers
(120, 84 inputs; convolution filters of 16 and 32 weights) fit in the same
memory.

## What is taken from the scheme and what is this design's

Taken from the scheme:

* The 16-bit parameters and the 16+5+1 code layout.
* The four decoder stages and the fault table.
* Correction of single errors and zeroing of the parameter on a double
  error, through a selector between the corrected value and 0.
* One protection unit per neuron, between parameter storage and the
  neuron's arithmetic.
* ReLU activation and fixed-point arithmetic.

This design's own choices:

* The order of the bits in the stored word.
* Feeding the stored parity bits into the Computation stage, which is
  needed to form P.
* All timing: a combinational decoder and a one-cycle memory read.
* The neuron's sequential organisation, memory map and handshake.
* The Q8.8 format, the accumulator width, truncation and saturation.
* The default fan-in and the injection port.

Two points where the original description is loose:

* One sentence speaks of a 26-bit data word for the code example, while
  the example itself has 16 data bits. 16 is used.
* The SEC stage is drawn with only the syndrome as input. This design keeps
  it that way and relies on the masking selector for double faults.

Not built:

* The network-level accelerator. No architecture is given for it: no PE
  array, buffers, pooling or layer scheduling.
* The statistical fault-injection campaign, which is a software method.

Storage overhead is 6 check bits per 16 data bits (37.5 %). Logic area has
not been measured against any reference.

## Files

| file | contents |
|------|----------|
| `rtl/spw_pkg.sv` | widths, position rule, fault-class enum |
| `rtl/spw_computation.sv`, `spw_comparison.sv`, `spw_sec.sv`, `spw_ded.sv` | the four decoder stages |
| `rtl/secded_decoder.sv` | the four stages chained |
| `rtl/spw_unit.sv` | decoder + zero-forcing selector (CPar) |
| `rtl/secded_encoder.sv` | parity generation on write |
| `rtl/param_memory.sv` | parameter store with injection port |
| `rtl/neuron_arith.sv` | MAC, bias, ReLU, saturation |
| `rtl/ft_neuron.sv` | top: the fault-tolerant neuron |
| `tb/tb_secded_ref_pkg.sv` | reference code model |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_ft_neuron.sv` | end-to-end test at fan-in 24 |
| `tb/tb_ft_neuron_full.sv` | full-size neuron, bit-error-rate sweep |
| `tb/tb_ft_neuron_layers.sv`, `tb_neuron_driver.sv` | neurons at the other layers' fan-ins |

The reference model `tb_secded_ref_pkg` does not reuse the position rule of
the RTL. It uses the explicit coverage masks of the 16-bit code
(C1 = 0xAD5B, C2 = 0x366D, C3 = 0xC78E, C4 = 0x07F0, C5 = 0xF800 over d15..d0)
and an explicit position list.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog if it hangs.

* **Stage and encoder tests.**
  - Exhaustive tests: all 65536 data values for the encoder, all
    syndrome/P combinations for DED, all syndromes for SEC.
  - Randomised tests with 0, 1 or 2 flips at random stored positions for
    the decoder and the SPW unit. Each of the four fault classes must
    occur.
* **`tb_ft_neuron`** (fan-in 24) is the end-to-end test.
  - It loads parameters and injects single flips in data and check bits,
    flips of p alone, and double flips.
  - It runs evaluations with random input stalls.
  - It compares every output with an integer model and checks the class
    of every parameter as it is consumed.
  - It checks the FAN_IN+3 latency.
  - It requires that correction, p-only faults, masking, stalls, the ReLU
    clamp and saturation each occur at least once.
* **`tb_ft_neuron_layers`** runs four neurons side by side, sized for the
  network's other layers: fan-in 16, 32, 84 and 120. Each gets random
  parameters, a fault-free evaluation and four evaluations after
  injections at p = 0.001 and 0.01, with and without the two-flip limit.
  The faults accumulate in memory between these injections. The stimulus
  for each neuron comes from `tb_neuron_driver`.
* **`tb_ft_neuron_full`** runs the default-size neuron (576 inputs) through
  a bit-error-rate sweep.
  - The rates are p = 0.1, 0.01, 0.001 and 0.0001 per stored bit. Each
    rate runs with unlimited flips and with at most two flips per
    parameter.
  - There are 20 parameter sets per case. Each set gets a fault-free
    evaluation, then an evaluation of the same inputs after injection.
  - Every output is checked against the model. The testbench prints how
    often the faulty output equalled the fault-free one. Many outputs are
    0 after ReLU, so that share overstates robustness.
  - It measures nothing like network accuracy, which would need the whole
    network and a dataset.

Running a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ft_neuron \
  -y rtl -y tb +libext+.sv -Irtl \
  rtl/spw_pkg.sv tb/tb_secded_ref_pkg.sv tb/tb_ft_neuron.sv -o sim
./obj_dir/sim
```

Substitute any other `tb_*.sv`. Testbenches that do not use the reference
package need only `rtl/spw_pkg.sv` and their own file. The simulator is
two-state, so every register that is read is either reset or written
first. Memory words in particular must be written before they are read.

## Changing the design

* **Fan-in.** Set `ft_neuron #(.FAN_IN(n))`. The memory depth and the
  address widths follow from it.
* **Number format.** Change `FRAC` (fractional bits) and `ACC_W`
  (accumulator width) on `ft_neuron` or `neuron_arith`.
* **Parameter width.** The SPW modules accept other `DATA_W` values, and
  the check-bit count follows. `ft_neuron` also passes `DATA_W` through.
  The testbenches, however, are written for 16 bits.
* **Other arithmetic.** A neuron with different arithmetic (a convolution
  window, another activation) can reuse `spw_unit` unchanged. Put it on
  the parameter read path and feed its CPar output to the new arithmetic.
