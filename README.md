# A memristive SoC that classifies blood Raman spectra

This design is a system-on-chip that diagnoses three conditions: healthy,
heart attack (acute myocardial infarction) and liver cancer. Its input is a
Raman spectrum of a blood sample, reduced off chip by principal component
analysis (PCA) to 128 signed 8-bit values. The classifier is a small
multilayer perceptron. All of its multiply-accumulate work happens inside
analog memristor crossbars, where the weights are stored as cell conductances.
The rest of the chip is digital. It moves vectors into the crossbars'
wordline DACs, reads the bitline ADCs back, removes offsets, applies ReLU,
and passes each layer's result on to the next.

The RTL follows the architecture of a published memristor/CMOS SoC. That chip
has ten neural processing units (NPUs). Each NPU holds a 256 x 256 array of
one-transistor-one-memristor cells with 256 conductance levels, an 8-bit DAC
on every wordline and an 8-bit ADC on every bitline. The chip also has a
RISC-V core, a DMA engine, 512 KB of instruction/data SRAM and 1 MB of
system SRAM, all joined by an AXI4 interconnect. It runs a four-layer
classifier: 128 inputs, 240 units in the first hidden layer, then two more
hidden layers, then 3 outputs. The RTL builds the digital blocks, plus a
behavioural model of the crossbar. The CPU and the I/O peripherals (JTAG,
SPI, I2C, UART, GPIO) are not built: they attach at a host bus port.

## 1. Block diagram

```
             host port (CPU / I/O attach here)
                    |
   +----------------+----------------+
   | master 0       | master 1       | master 2
   |            +---+---+      +-----+--------+
   |            |  dma  |      | mlp_sequencer|
   |            +---+---+      +-----+--------+
   +----------------+----------------+
                    |
            axil_xbar (AXI4-Lite, shared, round robin)
   +--------+-------+-------+-------+-- ... --+
   |        |       |       |                 |
 axil_sram  dma    npu 0   npu 1    ...     npu 9
 (1 MB)     regs   (each: axil_slave_port -> npu -> npu_xbar + npu_prog_verify)

 CPU side, ports of the top:  iram (256 KB)   dram (256 KB)     (sram)
```

| Address                  | Slave                        |
|--------------------------|------------------------------|
| `0x0000_0000`-`0x000F_FFFF` | system SRAM, 1 MB          |
| `0x1000_0000`-`0x1000_0FFF` | DMA registers              |
| `0x2000_0000 + n*0x1000`    | NPU n registers, n = 0..9  |
| anything else               | DECERR from the interconnect |

The instruction and data RAMs connect to the CPU directly, as in the
original block diagram, so the top only brings their ports out. The original
gives 512 KB for instructions and data together. Here that is split 256 KB +
256 KB.

## 2. What one crossbar computes

`npu_xbar` models the analog array. Cell (r, c) holds an 8-bit conductance
code `g[r][c]`. A VMM drives wordline r with DAC code `x[r]` (0..255). By
Ohm's law every cell passes a current of `x[r]*g[r][c]`, and by Kirchhoff's
law the bitline sums these currents. The 8-bit ADC then converts the sum:

```
I[c]   = sum_r x[r] * g[r][c]                  (up to 256*255*255, 24 bits)
adc[c] = min(255, I[c] >> adc_shift)
```

`adc_shift` (register ADCSH) stands for the ADC's full-scale setting. The
original says only that each bitline has an 8-bit ADC, so this law is an
assumption. It makes the ADC the tightest spot for precision. An ADC LSB is
`2^adc_shift` current units, and anything above `255 * 2^adc_shift` clips.
Software must choose the shift per layer to suit the expected currents.
The model is ideal otherwise: it has no read noise, no nonlinearity, no
IR drop. By default it also has no stuck cells. The real array does have
stuck-on and stuck-off cells, and `STUCK_PPM` adds them (section 8).

The result appears `VMM_LATENCY` = 4 clocks after the start, an assumed
figure. The model computes the whole array in one evaluation, so simulating
it costs 65,536 multiply-adds per VMM.

## 3. Writing weights: closed-loop write-verify

A memristor cannot be written to an exact level in one step. The original
chip reaches each of its 256 levels with trains of identical SET pulses
(conductance up) and RESET pulses (conductance down), each 50 ns wide,
inside a closed loop. `npu_prog_verify` is that loop, in its simplest form:

```
read cell -> inside target +/- tol ?  yes: done, ok=1
                   | no
             pulses == budget ?        yes: done, ok=0
                   | no
             code < window: SET pulse, else RESET pulse  (PULSE_CYCLES wide)
                   +--> read again
```

`PULSE_CYCLES` = 5 is 50 ns at an assumed 100 MHz clock. In the crossbar
model, each pulse moves the code by a random 1..`SET_STEP_MAX` (8) in its
direction. This stands in for device variation. Because a step is never
wider than the window (tolerance 4 means a window 9 codes wide), the loop
always lands in the window. The final code is what the cell really holds.
The NPU latches it in the CELL register, so software can use the true
weights. The original finishes tuning a matrix when its RMS error is below
5 codes. That is a criterion on the whole matrix. The hardware applies a
per-cell tolerance, and the end-to-end benches check the matrix-wide RMS
on top of it.

The original shows all 256 levels written across a full 256 x 256 array.
`tb_npu_levels` repeats that test on one default-size NPU: cell (r, c) gets
level (r + c) mod 256, so every level is written 256 times. With the model's
random steps, all 65,536 cells converged. The RMS error was about 2.6
codes and the mean error about -1.7 codes. A cell took 28 pulses on
average and 69 at most. The mean error is negative because cells start at
code 0 and climb into the window from below.

Weights are kept in the conductance range [50, 200]. That leaves margin so
that programming error does not push a cell past the ends of the [0, 255]
readout. At the default size, programming the 70,259 weight cells of the
classifier took about 19 M clocks in simulation (about 270 clocks per cell,
bus traffic included).

## 4. Mapping the classifier onto two crossbars

This section covers the part of the design that takes the most care.

**Bias as a weight row.** Each layer computes `y = W x + b`. Writing it as
`y = [W b] [x; 1]` turns the bias into one more wordline. The sequencer
drives that wordline with the constant code `BIAS_CODE` (255), so the stored
bias weights must be scaled to match.

**Placement.** Layer 1 (129 rows x 240 columns, bias row included) sits on
NPU 0. Layers 2, 3 and 4 sit side by side on NPU 1, in columns `[0,H2)`,
`[H2,H2+H3)` and `[H2+H3,H2+H3+3)`, and all start at wordline 0. When one of
them runs, the sequencer drives only that layer's input rows and bias row;
every other wordline gets 0, so the other layers' cells add no current.
Columns outside the layer are ignored. H2 = 128 and H3 = 64 are this
design's choice, because the original does not give the hidden widths of
layers 2 and 3. NPU 1 then needs 241 rows and 195 columns, which fit in 256.

**Signed inputs on unsigned DACs.** The PCA values are signed, but a DAC only
takes 0..255. So layer 1 runs twice on the same array: once with
`X+ = max(X,0)` and once with `X- = max(-X,0)`. The two results are
subtracted: `Y = W X+ - W X-`. An input of -128 is applied as code 128, so the
input effectively has 9 bits. The bias row is driven only in the X+ pass, so
the bias is counted once.

**Signed weights in positive conductances.** The way signed weights are
stored is this design's choice. A weight w is stored as the code
`g = W_ZERO + w`, with W_ZERO = 125, the middle of [50, 200]. A bitline then
carries `sum(w*x) + W_ZERO*sum(x)`. The sequencer has the sum of its own
wordline codes, so it removes the second term digitally:

```
y[j] = (adc[c0+j] << adc_shift) - W_ZERO * sum_r x[r]         (32-bit signed)
```

For layer 1 this is done in both passes, and `y = y(X+) - y(X-)`.

**Between layers.** ReLU, then requantisation back to an unsigned 8-bit
input code:

```
a[j] = 0                              if y[j] <= 0
     = min(255, y[j] >>> rq_shift)    otherwise
```

`rq_shift` is chosen per layer, and the requantisation rule is this design's
choice. The last layer's three `y` values are the scores. `class_id` is the
index of the largest score: 0 healthy, 1 heart attack, 2 liver cancer. On a
tie the lower index wins.

**Precision.** A bitline sum reaches about 4 M at full scale, and the ADC
keeps 8 bits of it. The zero-point term `W_ZERO*sum(x)` is usually larger
than the signed result, so the value after subtraction holds only a few
ADC LSBs of information. This is why the ADC range matters so much. It is
also one reason why a chip of this kind loses a few percent of accuracy
against software.

## 5. The sequencer's run

`mlp_sequencer` is an AXI4-Lite master. On the original chip this flow is
software on the RISC-V core. Here it is a hardware state machine, because the
core is not built. The machine has these steps:

1. LOAD: read the 32 words of the sample (4 int8 values per word, little endian).
2. For each of the five VMMs (L1 with X+, L1 with X-, L2, L3, L4):
   PREP builds the 256 wordline codes and their sum (one per clock).
   It then writes ADCSH and the 64 input-buffer words, writes CTRL to start
   the VMM, and polls STATUS until the VMM is done. It reads the 64
   output-buffer words, and POST computes the n outputs of the layer (one
   per clock).
3. ARGMAX, then `done` pulses with `class_id` and `score`.

At the default size, one classification takes 5,788 clocks. The bus moves
130 words per VMM, and this dominates; the crossbar's own latency is 4
clocks. Three counters are kept since reset: outputs zeroed by ReLU,
requantisation saturations, and ADC codes read at full scale. They help in
choosing the shifts.

## 6. Register maps

NPU (4 KB window; byte offsets):

| Offset | Name   | Meaning |
|--------|--------|---------|
| 0x000-0x0FF | IN  | wordline DAC codes; row 4k+i is byte i of word k |
| 0x100-0x1FF | OUT | bitline ADC codes, same packing, read only |
| 0x200 | CTRL   | write bit0 = start VMM (ignored while busy) |
| 0x204 | STATUS | bit0 VMM busy, bit1 write-verify busy, bit2 last write-verify ok |
| 0x208 | ADCSH  | ADC range, 5 bits |
| 0x210 | PADDR  | `{col[15:8], row[7:0]}` of the cell to program or read |
| 0x214 | PTGT   | `{max_pulses[31:16], tol[15:8], target[7:0]}` |
| 0x218 | PCMD   | write bit0 = write-verify, bit1 = single read |
| 0x21C | CELL   | code from the last read (final code of a write-verify) |
| 0x220 | PCOUNT | pulses used by the last write-verify |

DMA: 0x00 SRC, 0x04 DST (byte addresses), 0x08 LEN (words), 0x0C CTRL
(write bit0 = start), 0x10 STATUS (bit0 busy, bit1 bus error, bits 31:16
transfers completed). `irq_done` pulses at the end of each transfer. The DMA
copies one word at a time and stops on a bus error.

## 7. Bus and timing conventions

* Clock `clk`, reset `rst_n`: synchronous and active low. Reset never
  changes cell conductances, which start at code 0.
* The interconnect is AXI4-Lite, a single-beat subset of AXI4 with no IDs
  or bursts. `axil_req_t` and `axil_rsp_t` in `mx100_pkg` bundle the five
  channels. One transaction is in flight in the whole interconnect at a time.
  The interconnect spends one clock on arbitration, and an SRAM or NPU read
  then takes 2 more. A host register write followed by a status read costs
  about 8-10 clocks.
* Slaves accept a write when AW and W are both valid. Assertions check that
  VALID is held until READY and that a SET and a RESET pulse never overlap.

## 8. What follows the original design and what does not

Taken from the original: ten NPUs of 256 x 256 cells with 8-bit DACs and
ADCs and 256 levels; the 50 ns SET/RESET pulses in a closed loop; the
[50, 200] weight range; the RAM and SRAM sizes; the AXI4 interconnect
joining the CPU, memory, DMA, I/O and NPUs; the 128 -> 240 -> ... -> 3 ReLU
classifier on two NPUs, with layers 2-4 side by side; the bias row; and the
X+/X- split of layer 1.

Choices of this design, where the original is silent: the ADC law and range
register; the random step model of the device; the write-verify algorithm;
the VMM latency; the 100 MHz clock; AXI4-Lite instead of full AXI4; the
address and register maps; the hidden widths 128 and 64; the zero-point
weight encoding; the requantisation rule; BIAS_CODE = 255; the 256 + 256 KB
RAM split; and running the flow in a hardware sequencer instead of CPU
firmware.

Not built: the RISC-V core and the I/O peripherals, which are reached
through the host port. Also not built: the depthwise-convolution features of
the tenth NPU, because the original does not say what they are, so that NPU
is a plain VMM unit here. The original names stuck-on and stuck-off cells
as a main source of programming error but gives no rate. The crossbar model
has them as an option: `STUCK_PPM` on `npu_xbar`, `npu` and `mx100_top` sets
the share of stuck cells in parts per million. It defaults to 0, so the
default design has none. A stuck cell sits at code 255 or 0 and ignores
pulses; write-verify then runs out of pulses and reports failure. Read
noise, drift and other analog effects are not modelled. The model cannot reproduce the reported accuracy
(91.82 %), because that needs the trained weights and the measured spectra.

## 9. Simulating

Every testbench checks its results against values worked out inside the
testbench, and prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/mx100_pkg.sv \
          tb/tb_mx100_top.sv --top-module tb_mx100_top
./obj_dir/Vtb_mx100_top
```

| Testbench | What it runs |
|-----------|--------------|
| `tb_npu_xbar` | pulses, readback and VMMs on an 8 x 6 array, against sums computed in the bench; stuck cells on a second array |
| `tb_npu_prog_verify` | write-verify up and down, pulse widths and counts, budget exhaustion |
| `tb_npu` | register-level programming and VMMs on a 16 x 16 NPU |
| `tb_sram`, `tb_axil_sram` | masked writes, reads, AXI handshakes with random stalls |
| `tb_axil_xbar` | three masters at once, DECERR, round-robin fairness |
| `tb_dma` | random copies, irq, transfer counter, bus error |
| `tb_mlp_sequencer` | the full five-VMM flow on two 32 x 32 NPUs against a bench model |
| `tb_mx100_top` | the whole SoC at 32 x 32: programming, DMA, classification, and a count of every mechanism |
| `tb_npu_levels` | all 256 levels written across one 256 x 256 array: convergence, tolerance, RMS error, level ordering |
| `tb_mx100_full` | the same as `tb_mx100_top` at the default size: ten 256 x 256 NPUs, 128-240-128-64-3, 1 MB SRAM, 514 samples |

The two end-to-end benches share `tb/tb_mx100_body.svh`. In that flow the
host programs the weights, stages the sample with the DMA and starts the
sequencer. Meanwhile the host keeps using the bus, and a bench model
predicts every score. The model uses the conductances the cells actually
reached, so programming error is part of what is checked.

To change the classifier, edit the `IN_DIM`, `H1`, `H2` and `H3`
parameters of `mx100_top`. Elaboration stops with an error if the layers no
longer fit the arrays. New weights are loaded through the NPU registers in
section 6.
