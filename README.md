# A linear-SVM melanoma classifier in RTL

This is synthesizable SystemVerilog for the classification stage of a skin-lesion
diagnosis pipeline. Image pre-processing, lesion segmentation and colour-feature
extraction run in software. They reduce a lesion image to a vector X of 27
single-precision features. The hardware then decides between melanoma (+1) and
benign (−1) with a linear support vector machine:

    F(X) = sign( Σ_i αᵢyᵢ (X · SVᵢ) − b )   compared with a threshold th:
    F = +1 if (D − b) ≥ th,  F = −1 if (D − b) < th

The design follows the architecture in "SVM Classifier on Chip for Melanoma
Detection" (Afifi, GholamHosseini, Sinha). That work built the classifier with
high-level synthesis on a Zynq-7000 device. The RTL here is an independent,
hand-written rendering of it. Where the publication is silent, the choices are
this design's own, and each is listed below.

## The central idea: fold the support vectors before the sample arrives

With a linear kernel the sum over support vectors can be regrouped:

    Σ_i αᵢyᵢ (X · SVᵢ) = X · ( Σ_i αᵢyᵢ SVᵢ ) = X · Z

Z depends only on the trained model, not on the sample. The classifier therefore
has three successive blocks:

| block | module | work | cycles |
|---|---|---|---|
| SVs summation | `svs_summation` | Z[j] = Σ_i αᵢyᵢ·SVᵢ[j] | N_SV·N_FEAT + 3 |
| distance calculation | `distance_calc` | D = Σ_j X[j]·Z[j] | N_FEAT + 3 |
| classification decision | `class_decision` | D − b, compared with th | 1 |

The first block holds almost all the work (6696 multiply-adds for 248 SVs of 27
features), but its result does not depend on X. The two-stage cascade
(`svm_cascade`) exploits this. Its stages compute Z offline, keep it as a
constant, and run only the last two blocks: 27 multiply-adds per sample.

## The full classifier (`svm_hls_ip`)

### Input arrays and their layout

Three single-port, read-only memory ports connect the classifier to three
dual-port block RAMs (`dp_bram`). Each memory returns data one cycle after the
address.

| RAM | contents | words | layout |
|---|---|---|---|
| BRAM 1, SVs | support-vector features | N_SV·N_FEAT | SV i, feature j at word i·N_FEAT + j |
| BRAM 2, Parameters | bias and weights | N_SV + 1 | b at word 0, αᵢyᵢ at word i + 1 |
| BRAM 3, X | test sample | N_FEAT | feature j at word j |

The host fills the RAMs through their second ports. To run a new model of the
same size, reload BRAM 1 and BRAM 2. A model with fewer SVs runs if the unused
rows hold αᵢyᵢ = 0 and finite SV words, such as zeros. A NaN or infinity there
would poison Z, because 0·∞ is NaN.

### Pipeline

`svs_summation` walks the SV memory one word per cycle. In every cycle it reads
SVᵢ[j] and αᵢyᵢ: the Parameters address is simply i + 1, re-read on each cycle of
a row. Stage 1 multiplies the two words into a product register. Stage 2 adds the
product into Z[j], which lives in N_FEAT registers. Features are the inner loop,
so two consecutive additions never touch the same Z word. One multiply-add
therefore issues per cycle, with no stall.

`distance_calc` reads X one word per cycle, multiplies each word by Z[j] and adds
the product into D. Each addition finishes in the cycle it starts, so the sum
carried from one step to the next does not stall this pipeline either.

`class_decision` subtracts b and compares the result with th in one registered
step. b is read from Parameters word 0 before the summation starts.

The three blocks never run at the same time, so they share one single-precision
multiplier and one adder. The multiplier and adder are instantiated in
`svm_hls_ip`. Each block only drives operands (`mul_a/mul_b`, `add_a/add_b`) and
takes the results (`mul_y`, `add_y`). A priority multiplexer gives the operators
to the summation while it is busy, then to the distance block, and otherwise to
the decision. An assertion checks that no two blocks claim the operators at once.
This matches the published design's operator budget of one multiplier and one
adder per classifier. Each cascade stage likewise has one of each.

End to end, from the accepted start write to `done`:

    N_SV·N_FEAT + N_FEAT + 10 cycles   (6733 at 248 × 27)

### Control registers (AXI4-Lite, byte addresses)

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W: bit 0 = 1 starts (ignored while busy). R: bit 0 busy, bit 1 done, bit 2 idle | done is set at completion and cleared by reading CTRL |
| 0x10 | RETURN | R | F(X) as a 32-bit integer: 0x00000001 (+1) or 0xFFFFFFFF (−1); 0 after reset |
| 0x18 | TH | R/W | threshold th, fp32; 0.0 after reset |

`axil_slave` is the bus front end. It accepts the write address and write data
together, and keeps at most one write and one read outstanding. Every response
is OKAY. Assertions in it check the AXI rule that a raised valid, with its
payload, holds until ready.

A run from the host's side:

1. Write BRAM 1, BRAM 2 (once per model) and BRAM 3 (once per sample).
2. Write TH.
3. Write 1 to CTRL.
4. Poll CTRL until bit 1 is set.
5. Read RETURN.

## Number format

All data are IEEE-754 single precision, rounded to nearest, ties to even
(`fp32_mul`, `fp32_add`). This design's choices, which the source does not
specify:

* **Subnormals are flushed to zero.** A subnormal input reads as zero, and a
  result below 2⁻¹²⁶ becomes a signed zero.
* **NaN** results are 0x7FC00000.
* **A NaN difference** D − b gives −1.
* **Each operation is rounded**, in a fixed order: Z accumulates over i = 0…N_SV−1
  for each feature, and D over j = 0…N_FEAT−1. A software model that keeps this
  order reproduces the hardware bit for bit, and the testbenches do exactly that.
  A reference that sums in another order, or in double precision, can differ in
  the last bits of D − b. That difference matters only when D − b lies within a
  few ULP of th.
* **The operators are combinational.** The datapath places one register after
  each multiplier, and the adders feed registers directly. This is simple and
  exact in simulation, but it will not reach a 250 MHz clock on an FPGA.
  Retiming them means deepening the pipelines. The Z accumulation tolerates an
  adder latency of up to N_FEAT cycles. The D accumulation would need partial
  sums, which changes the order of additions and hence the rounding.

## The two-stage cascade (`svm_cascade`, `svm_lite_ip`)

Each stage, `svm_lite_ip`, holds a model as build-time parameters: Z_MODEL
(N_FEAT words), B_MODEL and TH_MODEL. It keeps the sample in a small register
file and runs `distance_calc` and `class_decision`.

* **Stage 1** is the melanoma-sensitive classifier. A +1 from it is final, and is
  meant to be confirmed by a specialist.
* **A −1 from stage 1** makes it stream the N_FEAT words of X into stage 2's
  register file, one per cycle.
* **Stage 2**, the benign-sensitive classifier, then decides, and its result is
  final.

The purpose is to re-check negative results, so that fewer melanomas are missed.
The hand-over is a plain valid/address/data stream. A longer chain would connect
the same way.

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | as for the full classifier | |
| 0x10 | RETURN | R | final F(X) |
| 0x14 | STAGE | R | 1 or 2: the stage that decided |
| 0x80 + 4j | X[j] | W | sample features (full-word writes only) |

Timing from the accepted start write:

* A stage-1 decision: N_FEAT + 6 cycles.
* Through stage 2: 3·N_FEAT + 11 cycles.

The default models are all zero, so with them every sample decides +1 at stage 1.
Set IP1_Z/IP1_B/IP1_TH and IP2_Z/IP2_B/IP2_TH on `svm_soc_pl`, or on
`svm_cascade`, to the precomputed values of a trained model.

## The system (`svm_soc_pl`)

The top holds the full classifier with its three RAMs, and the cascade as a
second classifier core. The host processor, its AXI interconnect, the
AXI-to-BRAM bridges and the cycle timer of the original system are vendor parts.
The top brings out their connection points instead:

* `s_axi_svm_req/rsp`: control bus of the full classifier.
* `s_axi_cas_req/rsp`: control bus of the cascade.
* `bramK_en/we/addr/wdata/rdata` for K = 1, 2, 3: port B of each RAM. These are
  word addressed, with byte write enables and one cycle of read latency.

AXI4-Lite travels as two packed structs from `svm_pkg`: `axil_req_t`, master to
slave, and `axil_rsp_t`, slave to master. The address width is 12 bits. The two
cores are independent and can run at the same time.

Parameters and their defaults:

* N_SV = 248 and N_FEAT = 27, the larger model of the source.
* The cascade models, all zero.

The source's small model (61 SVs) runs on the default build with zero-padded rows,
but still takes the full 6733 cycles. Building with N_SV = 61 gives
61·27 + 37 = 1684 cycles.

## How this compares with the published implementation

| quantity | published (HLS, Zynq, 250 MHz) | this RTL |
|---|---|---|
| 248 × 27 model, IP latency | 8091 cycles (synthesis estimate); 39.3 µs measured on the board | 6733 cycles |
| 61 × 27 model | 2865 cycles (11.46 µs) measured | 1684 cycles if built with N_SV = 61 |
| cascade | 1.8 µs | 33 / 92 cycles (stage 1 / stage 2) |
| floating-point operators | 5 DSPs per classifier, 10 for the cascade | one fp32 multiplier and one fp32 adder per classifier, shared by its blocks; one of each per cascade stage |

These cycle counts are the RTL's own. They are not calibrated against the HLS
schedule. The published measurements include host-side overhead that is not
modelled here.

## Where this design departs from, or adds to, the source

* The register map, the TH register, the STAGE register and the encoding of
  ±1 as a 32-bit integer are this design's own.
* The cascade is sequenced in hardware behind one control bus. In the original it
  was driven by host software over each IP's own bus.
* The cascade sits in the same top as the full classifier. The original built
  them as separate systems, and noted that more classifier cores can share one
  device.
* Subnormal flushing, NaN handling, the order of operations and the
  combinational operators are described in "Number format".
* There is no interrupt output.
* Reset is asynchronous and active low (`rst_n`). Everything that is read is
  reset, except the RAM contents, which the host must load.
* RAM collisions are resolved one way: when both ports write the same word in one
  cycle, port B wins, and each port reads the old word (read-first).

## Simulation

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`. Build and run any of them with plain Verilator
from the repository root, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/svm_pkg.sv tb/fp_ref_pkg.sv tb/tb_svm_soc_pl.sv --top-module tb_svm_soc_pl
    ./obj_dir/Vtb_svm_soc_pl

| testbench | covers |
|---|---|
| `tb_fp32_mul`, `tb_fp32_add` | 25k / 35k random and special operands against a double-precision reference rounded once to single |
| `tb_svs_summation`, `tb_distance_calc`, `tb_class_decision` | each block against the same equations with per-operation rounding; latencies |
| `tb_axil_slave` | random register traffic with partial strobes and stalled responses |
| `tb_dp_bram` | random traffic on both ports, collisions, out-of-range words |
| `tb_svm_hls_ip` | 40 random models at 6 × 5; both classes, the equality edge at th, flags, latency |
| `tb_svm_lite_ip`, `tb_svm_cascade` | fixed stage models, random samples; X hand-over, deciding stage, latencies |
| `tb_svm_soc_pl` | end to end at 8 × 6: model reloads through the RAM ports, both cores running at once, and each class from each path |
| `tb_svm_soc_full` | the default 248 × 27 build with no parameter changed: two classifications and one cascade run |
| `tb_workloads` | the evaluated configurations at their published sizes on the default build: a 61-SV model (zero-padded) and a 248-SV model on the full classifier, and a cascade folded from 61-SV and 139-SV models; stage 1 must agree exactly with the full classifier on the same 61-SV model |

`tb/fp_ref_pkg.sv` holds the reference arithmetic. It converts fp32 to a real,
computes, and rounds back to nearest even, flushing subnormals to zero.
`tb/axil_master_tasks.svh` holds the bus-master tasks.

The testbenches use random data and synthetic models, not a trained melanoma model, because the trained
model data are not published. Their results check that the hardware computes the
SVM function exactly. They say nothing about classification accuracy.

## Files

* `rtl/svm_pkg.sv`: fp32 and bus types, class codes, register offsets, fp32
  comparison.
* `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`: single-precision operators.
* `rtl/svs_summation.sv`, `rtl/distance_calc.sv`, `rtl/class_decision.sv`: the
  three classifier blocks.
* `rtl/axil_slave.sv`: AXI4-Lite front end.
* `rtl/svm_hls_ip.sv`: the full classifier.
* `rtl/dp_bram.sv`: dual-port RAM.
* `rtl/svm_lite_ip.sv`, `rtl/svm_cascade.sv`: the cascade stage and the cascade.
* `rtl/svm_soc_pl.sv`: the top.
