# A linear-SVM classifier IP for melanoma detection

A clinical image of a skin lesion, reduced to 27 colour features, is
classified as melanoma (+1) or benign (-1) by a trained binary support vector
machine (SVM) with a linear kernel. This block performs that classification in
hardware. The design
follows a published hardware/software co-design on a Xilinx Zynq-7000 device
(S. Afifi, H. GholamHosseini, R. Sinha, "A system on chip for melanoma
detection using FPGA-based SVM classifier"). In that design, the ARM processor
reads a trained model and a test vector from an SD card. It starts the
classifier block in the programmable logic, and a DMA engine streams the data
into the block. The processor then polls the block until it is done and reads
the class. The SystemVerilog here is that classifier block, written directly
in RTL. The authors produced theirs with a high-level-synthesis tool.

All arithmetic is IEEE-754 single precision. The summation order is the same
as in the sequential C reference. So for the same data, the distance value the
block computes is bit-identical to the software value.

## The decision function and how it is rearranged

A linear-kernel SVM with `SV` support vectors `x_i`, weights `alpha_i*y_i` and
bias `b` classifies a vector `x` as

    F(x) = sign( sum_i alpha_i*y_i * (x_i . x) - b )

Evaluated as written, this takes one dot product per support vector. Because
the kernel is linear, the sum can be pulled inside:

    AC = sum_i (alpha_i*y_i) * x_i          (a vector of 27 floats)
    D  = AC . x
    F  = +1 if D - b >= th, else -1

`th` is a threshold fixed during validation; `th = 0` gives the plain sign
function. The block still receives the full list of support vectors and forms
`AC` itself, once per classification. This costs `SV*27` multiply-adds, then
`27` more for `D`. The model is always sent in the form the training tool
produces, so no precomputed weight vector is needed.

## Where the block sits

```
  processor (ARM) --AXI-Lite--> interconnect --+--> DMA (configuration)
                                               +--> timer
                                               +--> svm_hls_ip control bus  (s_axi_*)
  processor memory --ACP--> DMA --AXI4-Stream-------> svm_hls_ip stream bus (s_axis_*)
```

Only `svm_hls_ip` and what it contains are RTL. The processor, its coherent
port (ACP), the memory controller, the SD interface, the AXI interconnect, the
DMA engine and the timer are standard parts of the device or of the vendor's
IP library. The block's two bus ports are where they connect. The testbenches
play the processor and the DMA.

Top-level ports (`rtl/svm_hls_ip.sv`):

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | single clock, active-low asynchronous reset |
| `s_axi_aw*`, `s_axi_w*`, `s_axi_b*` | 6-bit address, 32-bit data | AXI4-Lite write channels of the control bus |
| `s_axi_ar*`, `s_axi_r*` | 6-bit address, 32-bit data | AXI4-Lite read channels |
| `s_axis_tdata`, `s_axis_tvalid`, `s_axis_tready` | 32, 1, 1 | AXI4-Stream input, one float per word |

Parameters: `N_SV` (default 248) and `N_FEAT` (default 27). The defaults are
the 248-SV model that the source identifies as its tuned melanoma classifier.
Like the original, the block is built for one model size. Any model with the
same sizes can be loaded at run time. A model with fewer SVs can run on a
larger build if it is padded with SVs whose `alpha*y` is zero. Adding a signed
zero leaves every sum unchanged, so the result is bit-identical.

## Host sequence

1. Optionally write the threshold `th` (offset `0x18`, a float).
2. Write 1 to `CTRL` (offset `0x00`) to start.
3. Stream the model and the test vector (next section). The block accepts
   words only after step 2; before that, `tready` is low.
4. Poll `CTRL` until bit 1 (done) is set. Reading `CTRL` clears done.
5. Read `RETURN` (`0x10`, +1 or -1 as a 32-bit integer). Optionally read
   `DISTANCE` (`0x20`, the float `D - b`).

| offset | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | R/W | bit 0 start: write 1 to request a run; reads 1 until the core takes it. Bit 1 done: set at the end of a run, cleared when CTRL is read. Bit 2 idle. |
| 0x10 | RETURN | R | class of the last run: 1 or 0xFFFFFFFF |
| 0x18 | THRESHOLD | R/W | `th`, float, reset value +0.0, byte strobes honoured |
| 0x20 | DISTANCE | R | `D - b` of the last run, float |

Every response is OKAY. Unmapped reads return 0, and unmapped writes are
ignored. There is no interrupt. A start written during a run stays pending
and starts the next run when the block is idle again.

## Stream format

One continuous sequence of `N_SV*N_FEAT + N_SV + 1 + N_FEAT` 32-bit words,
each an IEEE-754 single. TLAST is not used; the block counts words.

| words | contents | stored in |
|---|---|---|
| `N_SV*N_FEAT` | support vectors, SV 0 features 0..26, then SV 1, ... | `array_SVs[sv*N_FEAT + f]` |
| 1 | `b` | `array_ay[0]` |
| `N_SV` | `alpha_i*y_i` for SV 0..N_SV-1 | `array_ay[1..N_SV]` |
| `N_FEAT` | the test vector | `array_test[0..N_FEAT-1]` |

This matches the three DMA transfers of the host program: SVs, then the
`alpha*y` file with `b` first, then the test data. At the defaults this is
6,972 words.

## Inside the block: the compute pipeline

`svm_core` is a sequencer over the phases of the reference pseudo code. The
phases are LOAD, CLEAR, ACCUM, DOT, SUB_B, DECIDE and DONE. The datapath has
**one** float multiplier and **one** float adder, shared by every phase. This
is the low-area "pipelined" variant the source prefers. Its FPGA build uses 5
DSP blocks, which fits one float multiplier and one float adder. The faster unrolled
and array-partitioned variants it also reports are not built here.

The two nested loops run at one iteration per clock through three stages:

| stage | ACCUM (Eq. for AC) | DOT (Eq. for D) |
|---|---|---|
| 0 | issue read of `array_SVs[sv*27+f]` and `array_ay[sv+1]` | issue read of `array_test[f]` |
| 1 | RAM data arrives; multiply; register product and `f` | `array_test[f]` arrives, `AC[f]` read from registers; multiply |
| 2 | `AC[f] <= AC[f] + product` | `D <= D + product` |

Stalls are never needed, for these reasons:

* In ACCUM, element `AC[f]` is read and written in the same stage-2 cycle.
  The next access to the same element is `N_FEAT` cycles later, so no
  read-after-write hazard can arise.
* In DOT, the adder finishes in one cycle, so `D` can feed itself every cycle.
  With a multi-cycle adder, this loop-carried sum would need several partial
  sums or an initiation interval equal to the adder latency.
* `array_AC` (27 words) is a register array, so it can be read
  asynchronously. The other three arrays are block-RAM-style memories with a
  registered read port, hence stage 0 and stage 1.

After DOT, SUB_B reads `b` from `array_ay[0]` and adds it with its sign bit
flipped. DECIDE compares `D - b` with `th` (`svm_decide`, an IEEE-754 `>=` on
the bit patterns) and registers +1 or -1. DONE pulses done.

Cycle count with an unbroken stream, counted from the clock edge that accepts
the start write to the edge that raises done:

    LOAD_WORDS + N_SV*N_FEAT + 2*N_FEAT + 12,   LOAD_WORDS = N_SV*N_FEAT + N_SV + 1 + N_FEAT

| model | SVs | cycles here | latency reported for the original pipelined IP |
|---|---|---|---|
| Model 1 (default build) | 248 | 13,734 | 14,138 |
| Model 2 | 346 | 19,124 | 19,626 |
| Model S | 61 | 3,449 | 3,830 (3,693 measured on the board including DMA) |

The small gap comes from the schedule of the original generated design, which
is not published. Gaps in the stream add one cycle per missing word.

## Floating-point behaviour

`fp32_mul` and `fp32_add` are combinational, so each costs no clock cycle of
its own. Both round to nearest, ties to even, so they match C `float`
arithmetic on the processor bit for bit. Simplifications, all common in FPGA
float cores:

* subnormal inputs are read as zero; results below the normal range become a
  signed zero;
* overflow gives infinity; NaN inputs, `inf*0` and `inf-inf` give the quiet
  NaN `0x7FC00000`;
* an exact cancellation in the adder gives +0.

For real melanoma features and SVM weights, no value comes near the subnormal
range. Because the summation order is fixed (SV-major in ACCUM, feature order
in DOT), a software model that loops in the same order reproduces `DISTANCE`
exactly.

Combinational float units are the main thing to revisit before using this on
an FPGA. At the 100–250 MHz the original design ran at, the multiplier and the
adder would each need to be split into several pipeline stages. ACCUM has no
hazard as long as the pipeline is shorter than `N_FEAT`. DOT would need
partial sums.

## Departures from the source and own choices

* The source does not publish the register map, the stream width, the
  handling of TLAST, how `th` reaches the block, or reset behaviour. The
  choices above (HLS-style control register, 32-bit stream, word counting,
  threshold register, asynchronous reset of control state only) are this
  design's own.
* The DISTANCE register is an addition for checking results against software.
  The source compared this value during verification.
* The source's pseudo code declares its arrays one entry larger than the
  counts (`features+1`, `SVs+1`). Here only `array_ay` has the extra entry,
  which holds `b`.
* The source gives conflicting sizes for its "Model 1": 346 SVs in one passage,
  248 in its result tables and elsewhere in the text. The defaults follow the
  tables (248).
* The unrolled and array-partitioned variants, the DMA engine, the
  interconnect, the timer and the processor software are not part of this RTL.
* The RTL has not been synthesised for timing on an FPGA. Resource and power
  figures of the source do not carry over.

## Files

| file | contents |
|---|---|
| `rtl/svm_pkg.sv` | float word type, class constants, register offsets, phase enum |
| `rtl/svm_hls_ip.sv` | top: control bus, loader, three arrays, core |
| `rtl/svm_axil_ctrl.sv` | AXI4-Lite control registers |
| `rtl/svm_stream_loader.sv` | AXI4-Stream word counter and array write steering |
| `rtl/svm_ram.sv` | simple dual-port memory with registered read |
| `rtl/svm_core.sv` | sequencer, `array_AC`, shared multiplier and adder |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | single-precision multiply and add |
| `rtl/svm_decide.sv` | `D - b >= th` comparison, +1/-1 |
| `tb/fp_ref_pkg.sv` | float reference for the testbenches (double precision, rounded by hand) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_svm_models` |
| `tb/svm_ip_harness.sv` | one IP build with a processor/DMA model, used by `tb_svm_models` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5, from the folder holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb --top-module tb_svm_hls_ip \
        rtl/svm_pkg.sv tb/fp_ref_pkg.sv tb/tb_svm_hls_ip.sv
    ./obj_dir/Vtb_svm_hls_ip

Swap in any other `tb_*` name; `svm_pkg` and `fp_ref_pkg` must come first on
the command line. Every testbench runs in a few seconds.

What the testbenches check:

* `tb_fp32_mul`, `tb_fp32_add`: 25,000 and 50,000 random and directed cases,
  compared with a double-precision reference rounded to single. The cases
  include ties, carries, cancellation, zeros, infinities and NaN.
* `tb_svm_decide`: random pairs and pairs one unit in the last place apart,
  signed zeros, and NaN.
* `tb_svm_ram`, `tb_svm_stream_loader`, `tb_svm_axil_ctrl`: read latency and
  hold; word routing with and without stream gaps; no words taken while
  idle; register behaviour, byte strobes, clear-on-read, and response hold
  under back-pressure.
* `tb_svm_core`: 30 random 5-SV models. The distance is checked bit for bit,
  the class at a threshold equal to and just above the distance, and the
  compute cycle count.
* `tb_svm_hls_ip`: the default 248×27 build, end to end, following the host
  sequence. It covers an unbroken stream with the cycle count checked, both
  classes, a stream with random gaps, a 61-SV model padded with zero weights,
  and words offered before start.
* `tb_svm_models`: separate builds for 248, 346 and 61 SVs, plus the padded
  61-SV case. It checks each against the reference and prints the cycle
  counts in the table above.

The trained models of the source are not published, so every test uses
random data with the models' sizes. Classification accuracy therefore cannot
be re-measured here. The testbenches only show that the block computes the
same value as the reference software.
