# Dynamic two-stage cascade SVM classifier for melanoma detection

This RTL classifies a skin lesion from 27 colour features. It uses two linear
support-vector machines in a cascade. The first is tuned to be sensitive to
melanoma. When it answers "melanoma" (+1), that answer stands. When it answers
"non-melanoma" (-1), a second, benign-sensitive SVM looks at the same features
and gives the final answer. Most malignant cases are settled in one pass.
Every benign verdict is confirmed twice.

The hardware does not hold both classifiers at once. It has one classifier
slot, a *reconfigurable partition*, and the software swaps the model in that
slot between the two stages. On an FPGA with dynamic partial reconfiguration
this costs the area and power of a single classifier. The price is a
reconfiguration between the stages.

The design follows the published dynamic cascade SVM system for Zynq-7000
devices (Afifi, GholamHosseini and Sinha, "Dynamic hardware system for
cascade SVM classification of melanoma"). That system was produced with a
high-level synthesis tool, and this RTL is an independent hand-written
rendering of it. The section "Departures and gaps" lists where the two
differ.

## The decision function and the folded coefficient array

A linear SVM classifies a feature vector `x` as

    F(x) = sign( sum_i alpha_i * y_i * (x_i . x) - b )

where the `x_i` are the support vectors. The sum over support vectors does
not depend on `x`, so it is folded offline into a single vector

    AC = sum_i alpha_i * y_i * x_i

and the hardware evaluates only

    F(x) = +1 if (AC . x - b) >= 0, else -1.

The cost is therefore set by the number of features, not by the number of
support vectors. The melanoma-sensitive model (61 support vectors) and the
benign-sensitive model (139 support vectors) both reduce to the same 28-word
array, plus one bias word.

The array has `F = 27 + 1 = 28` elements. Element 0 is a padding slot, which
matches the 1-based feature numbering of SVM-Light model files. The loop
still visits it, so give it a zero coefficient. All values are IEEE-754
single precision. The hardware adds the products in index order,
`((0 + AC[0]*X[0]) + AC[1]*X[1]) + ... - b`, and rounds after each
operation. The distance is therefore bit-identical to a C loop with `float`
variables that sums in the same order.

## The accumulation loop: why 148 cycles

`svm_core` runs the loop above with one fp32 multiplier (2-cycle pipeline) and
one fp32 adder (5-cycle pipeline). The products do not depend on each other.
The sums do: each addition needs the previous partial sum. So the adder
accepts a new element only every 5 cycles, and the loop is built around that
constraint:

* Element `i` is read from the X array and the coefficient memory at cycle
  `5*i`, counted from the cycle in which start is accepted. Element 0 is
  read in that cycle itself.
* The read data arrive one cycle later and enter the multiplier. The product
  comes out at cycle `5*i + 3`.
* Partial sum `i-1` leaves the adder at the same cycle, `5*(i-1) + 3 + 5`.
  The product and the running sum therefore meet at the adder input with no
  buffering. An assertion in `svm_core` checks this alignment.
* After element 27, the bias is read from address 28 of the coefficient
  memory. It is subtracted in the same adder as soon as the last partial sum
  appears.
* The difference leaves the adder at cycle `28*5 + 1 + 2 + 5 = 148`. In that
  cycle `done` pulses, and `class_out` and `distance` are valid.

The general formula is `core_latency = N_ELEMS*ADD_LAT + 1 + MUL_LAT + ADD_LAT`,
given in `svm_pkg`. The published design reports 148 cycles for its
pipelined 27-feature loop, which is 1.48 µs at 100 MHz. The unit depths
here were chosen so that this RTL has the same latency. If you change
`ADD_LAT` or `MUL_LAT`, the schedule still holds because it is derived from
them. The testbenches, however, check for 148.

The comparison is `>= 0`, so a distance of exactly +0 or -0 classifies as +1.
A NaN distance (only possible with NaN or infinite inputs) compares false and
gives -1, as the C comparison does.

## Floating-point units

`fp32_mul` and `fp32_add` are IEEE-754 single-precision units with these
conventions:

* They round to nearest, ties to even.
* They flush subnormals to zero on input and output, as common FPGA
  floating-point cores do. Scaled melanoma features and trained coefficients
  stay far from the subnormal range.
* Overflow gives infinity. `inf - inf`, `0 * inf` and NaN inputs give the
  quiet NaN `0x7FC00000`.
* `x - x` gives `+0`.

The adder's stages are:

1. Order the operands by magnitude.
2. Align the smaller one, keeping guard, round and sticky bits.
3. Add or subtract.
4. Normalise.
5. Round and pack.

Both units accept one operation per cycle.

## Software view of the classifier

The classifier IP (`svm_hls_ip`) is an AXI-lite slave with 8-bit addresses
and 32-bit data. Its layout is the usual one for an HLS-generated control
bus:

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | R/W | bit 0 `ap_start` (write 1 to start; clears when the core takes it), bit 1 `ap_done` (sticky, cleared by reading CTRL), bit 2 `ap_idle`, bit 3 `ap_ready` (sticky, cleared by reading CTRL) |
| 0x10 | RETURN | R | class of the last run as a C `int`: `0x00000001` (+1, melanoma) or `0xFFFFFFFF` (-1) |
| 0x80 + 4*i | X[i] | R/W | feature `i` as an fp32 word, i = 0..27; byte strobes are honoured |

Other addresses read as zero, and writes to them are ignored. The IP answers
with OKAY. While the partition is empty or being reconfigured, the decoupler
answers with SLVERR (see below).

To classify one instance:

1. Write X[0..27].
2. Write 1 to CTRL.
3. Poll CTRL until bit 1 is set.
4. Read RETURN.

X keeps its contents between runs in the same module, but not across a
reconfiguration.

## Swapping the classifier: configuration images

On the FPGA, each stage's classifier is a separate reconfigurable module.
RM-M is the melanoma-sensitive module and RM-N the benign-sensitive one. A
partial bitstream loads one of them through the device configuration port
(JTAG or the processor's configuration port). The two modules are identical
except for their coefficients. This RTL therefore models a module by its
coefficients, and a partial bitstream by a short *configuration image*
delivered on a 32-bit word stream (`cfg_valid`, `cfg_data`, `cfg_ready`):

    word 0      { 16'h5356, rm_id[7:0], n_words[7:0] = 29 }
    words 1-28  AC[0] .. AC[27]      (fp32)
    word 29     b                    (fp32)

`pr_loader` checks the header and then writes the 29 words into the
partition's coefficient memory, one word per cycle, with gaps allowed. The
status outputs behave as follows:

* `reconfiguring` is high from the header to the last word.
* `rm_loaded` is low from the header until the load completes.
* `rm_id` takes the image's identifier when the load completes.
* A header with the wrong marker or length sets `cfg_error` and changes
  nothing else. A later valid header clears `cfg_error`.

After reset the partition is empty. The FPGA would come up with RM-M from its
full bitstream, so load RM-M first.

While no complete module is loaded, the partition is held in reset. Its
reset is released one cycle after `rm_loaded` rises. `pr_decoupler` then
keeps the bus away from it:

* Every access during that time is answered with SLVERR.
* Reads return zero.
* The partition sees no request.

A module that has just been loaded starts idle, with no done flag and with
undefined X. Rewrite X after every swap. Start a reconfiguration only when
no AXI-lite access to the classifier is outstanding, which is normal for a
single in-order processor.

## Running the cascade

The cascade order lives in software, as on the original platform:

    load RM-M (once, or again if RM-N is in the slot)
    classify x                      -> +1 : melanoma, done
                                    -> -1 :
    load RM-N; write x again; classify x  -> final answer

Core time is 148 cycles (1.48 µs at 100 MHz) for an instance settled in
stage 1, and 296 cycles (2.96 µs) for one that needs stage 2. The published
figures are 1.5 µs and 3 µs. On top of that come about 29 AXI-lite
transactions per stage, plus the reconfiguration itself. Here that is 30
configuration words. On a real device it is the partial-bitstream load,
which takes milliseconds.

## Module map

| file | role |
|---|---|
| `rtl/svm_pkg.sv` | sizes, pipeline depths, register map, AXI-lite structs, image header |
| `rtl/fp32_mul.sv` | fp32 multiplier, 2 cycles |
| `rtl/fp32_add.sv` | fp32 adder/subtractor, 5 cycles |
| `rtl/ac_memory.sv` | AC[0..27] and b, one RAM with a write port for reconfiguration |
| `rtl/svm_core.sv` | the pipelined decision loop |
| `rtl/svm_axil_ctrl.sv` | AXI-lite control bus and X array |
| `rtl/svm_hls_ip.sv` | one classifier: control bus + core + coefficient memory |
| `rtl/pr_loader.sv` | receives configuration images and writes the partition |
| `rtl/pr_decoupler.sv` | isolates the partition from the bus while it is empty |
| `rtl/svm_dpr_top.sv` | top: the static side with the partition inside |

The top's ports are:

* `s_axil_req` and `s_axil_rsp`: an AXI-lite slave, as packed structs from
  `svm_pkg`. The system interconnect would drive this port.
* The configuration stream `cfg_*`.
* The partition status outputs.

The processor system, AXI interconnect, cycle-count timer and configuration
port of the original platform are vendor blocks and are not part of this
RTL.

## Departures and gaps

* **Coefficients in RAM, not in logic.** An HLS-built module carries its
  coefficients as constants, and swapping modules replaces logic. Here both
  modules share one datapath, and a swap rewrites a 29-word RAM. The
  function is the same, but real partial reconfiguration (and its timing)
  cannot be expressed in RTL.
* **Configuration image format, decoupler, status outputs.** All three are
  this design's own. The published work names only partial bitstreams and a
  static region around the partition.
* **Latency.** 148 cycles is matched by choosing the floating-point pipeline
  depths. The published 148 comes from the HLS scheduler, whose unit depths
  are not known. The unpipelined 278-cycle variant is not built.
* **Register map.** The register map mirrors HLS conventions. The exact
  offsets are not published. Interrupt registers are left out because the
  software polls.
* **Trained models.** The trained coefficients of the two models are not
  published. The testbenches generate random stand-in models, so the
  accuracy figures (97.9 % and 72.5 %) cannot be reproduced here.
* **Not built.** The two-core, non-reconfigurable cascade and the single
  monolithic classifier systems appear in the original work only as points
  of comparison.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/fp_ref_pkg.sv` is the shared fp32 reference. It does each operation in
double precision and rounds once to single precision (ties to even). This is
exact for products and sums of fp32 values, so the reference does not depend
on the RTL's arithmetic.

| testbench | what it shows |
|---|---|
| `fp32_mul_tb`, `fp32_add_tb` | thousands of random and special-case operations, bit-exact, with latency 2 / 5 |
| `ac_memory_tb` | write, read-back, read-during-write |
| `svm_core_tb` | 60 random models and instances: distance bit-exact, class, 148-cycle latency, zero distance, NaN, back-to-back starts |
| `svm_axil_ctrl_tb` | X read/write with strobes, start/done/idle protocol, clear-on-read, RETURN |
| `svm_hls_ip_tb` | whole IP driven over AXI-lite: class against reference, 148-cycle latency |
| `pr_loader_tb` | image loading, status, rejected headers, reloading |
| `pr_decoupler_tb` | pass-through versus SLVERR isolation, switching with a response pending |
| `svm_dpr_top_tb` | 40 instances through the full cascade at default sizes |
| `svm_table1_models_tb` | stand-in models with the published sizes (61 and 139 support vectors, 27 features), folded into AC in the testbench, run through the cascade; classes also checked against the unfolded decision function in double precision |

`svm_dpr_top_tb` also counts the system-level events: stage-1 decisions,
stage-2 decisions of each sign, swaps in both directions, refused accesses
and rejected images. It fails if any of them never happens. It also checks
148 and 296 core cycles per decision.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/svm_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv tb/svm_dpr_top_tb.sv \
      --top svm_dpr_top_tb -o sim
    ./obj_dir/sim

Verilator warns about `svm_pkg.sv` being named twice on that command line
and about reset signals used in assertions. Neither warning matters. To
change the model size, override `N_ELEMS` on `svm_dpr_top` (or on the lower
modules) and `N_FEATURES`/`F` in `svm_pkg`. The X window at 0x80 holds at
most 32 words with 8-bit addresses.
