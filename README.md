# Smart-Infinity near-storage optimizer kernel in SystemVerilog

When a large language model is trained with its optimizer states offloaded to SSDs,
the update phase streams the FP32 parameters, momenta and variances (twelve bytes per
parameter) from storage to the host and back, and that traffic crosses one shared host
interconnect. A computational SSD holds an FPGA behind the same PCIe switch as its
flash. If the update runs on that FPGA, the optimizer states move only inside the
device. The host then only has to send each device the gradients of its share of the
model and read back the new parameters. Bandwidth grows with the number of devices
because every device has its own internal link.

This RTL is the FPGA kernel of such a device. It does two jobs:

* **Near-storage update.** It runs Adam, SGD with momentum or AdaGrad on one
  *subgroup*, meaning the slice of the device's parameters that the host has staged
  into device DRAM.
* **Near-storage decompression.** The GPU can send only the Top-K largest gradients
  as (index, value) pairs. The kernel rebuilds the dense gradient array from these
  pairs before the update. The GPU does the expensive selection and the FPGA only
  scatters.

The host software that moves data between flash, device DRAM and host memory (the
peer-to-peer transfer handler) is not hardware and is not part of this RTL.

## Block structure

```
                      smart_infinity_kernel
   start/args ──► sequencer ──► topk_decompressor ──┐ master 0
                      │                              │
                      └──► updater_pe[0..NUM_PE-1] ──┤ masters 1..NUM_PE
                                                     ▼
                                               mem_arbiter ──► device DRAM port
```

| file | contents |
|---|---|
| `rtl/fp32_pkg.sv` | IEEE-754 single-precision add, multiply, divide and square root as functions |
| `rtl/si_pkg.sv` | widths (16 lanes, 512-bit words), optimizer enum, coefficient and address structs |
| `rtl/mem_if.sv` | memory request/response bundle used between masters and arbiter |
| `rtl/axpby_simd.sv` | 16-lane `y = alpha*a + beta*b` |
| `rtl/update_unit.sv` | two-stage parameter update, `p' = p - step * num / den` |
| `rtl/chunk_buffer.sv` | simple dual-port on-chip buffer (block RAM) |
| `rtl/updater_pe.sv` | one updater PE: buffers, two AXPBYs, squarer, update unit, load/compute/store control |
| `rtl/topk_decompressor.sv` | zero fill, chunked loading of pairs, range-checked scatter |
| `rtl/mem_arbiter.sv` | round-robin arbiter with in-order read-response routing |
| `rtl/smart_infinity_kernel.sv` | top: instantiates everything and sequences decompression then update |

## Data layout in device DRAM

Memory is addressed in 512-bit words, each holding 16 FP32 elements. The host passes
the base word address of six arrays in `region_t`:

* `param`, `mmt`, `var_`, `grad`: `n_words` words each, one subgroup.
* `cidx`, `cval`: the compressed gradient, `nnz` 32-bit indices and `nnz` FP32
  values, packed 16 per word.

A subgroup is the element range `[sub_lo, sub_lo + 16*n_words - 1]`. For subgroup `i`
with size `D` this is `[i*D, (i+1)*D - 1]`. The indices in `cidx` count elements of
the device's whole share of the model, so one pair list can serve several subgroups.
The decompressor keeps only the pairs that fall inside the current subgroup.

## The updater PE (hardest part)

Each PE owns four buffers (momentum, gradient, variance, parameter) of `S = CHUNK`
elements. It works through the subgroup in chunks of `S` elements. PE `k` of `N`
takes chunks `k, k+N, k+2N, ...`, so the PEs interleave over the subgroup and finish
together. The last chunk may be partial. For each chunk, a PE goes through four
phases:

1. **Load.** The PE issues one read per word for the arrays the optimizer needs, in
   the order m, g, v, p. AdaGrad skips m and SGD skips v. Reads are issued back to
   back without waiting, and each response is written straight into its buffer
   word. The PE counts responses, so it never needs to know the memory latency.
2. **Compute.** Once per cycle the PE reads one word (16 lanes) from every buffer and
   sends it through the datapath:
   * `m' = AXPBY(alpha_m, m, beta_m, g)`
   * `v' = AXPBY(alpha_v, v, beta_v, g*g)`
   * `p' = update(p, m', v', g)`

   The AXPBY stage is registered. `m'` and `v'` are written back into their buffers
   two cycles after the read, and `p'` four cycles after (two more in the update
   unit). Each buffer word is read once and written once per pass, so the write-back
   never collides with a read that still needs the old value. A chunk of `W = S/16`
   words takes `W` compute cycles plus a 4-cycle drain.
3. **Store.** The PE writes the parameter first, because the host wants it back
   soonest. Then it writes the optimizer states that changed.
4. The PE moves to its next chunk, or drops `busy`.

### Optimizer mapping

All three optimizers use the same datapath. Only the coefficients and two multiplexers
change:

| optimizer | alpha_m | beta_m | alpha_v | beta_v | numerator | denominator |
|---|---|---|---|---|---|---|
| Adam | b1 | 1-b1 | b2 | 1-b2 | m' | sqrt(v')*denom_scale + eps |
| SGD + momentum | mu | 1 (or 1-dampening) | unused | unused | m' | 1 (no divide) |
| AdaGrad | unused | unused | 1 | 1 | g | sqrt(v')*denom_scale + eps |

For Adam with bias correction at step `t`, use `step = lr / (1 - b1^t)` and
`denom_scale = 1 / sqrt(1 - b2^t)`. The host computes these scalars once per step.
Weight decay is not built in. Decoupled (AdamW) decay can be folded in by the host
through `step`, or added as a third AXPBY.

### Arithmetic

The FP32 functions round to nearest-even and flush subnormal inputs and results to
zero. Infinity and NaN are propagated, and any NaN result is the canonical quiet NaN.
The testbenches compute every operation in double precision and round once to
single. For `+ - * / sqrt` this gives exactly the correctly rounded single-precision
result, so the RTL is checked bit for bit. The operation order matches the RTL:
`alpha*a` and `beta*b` are each rounded, then added.

The functions are written plainly, as combinational logic. A real FPGA build would
pipeline them or map them onto DSP slices. The update unit's divider and square root
are the longest paths.

## The Top-K decompressor

The decompressor works in three steps:

1. **Zero fill.** Writes zeros over the subgroup's gradient array, one full word per
   cycle.
2. **Load.** Reads up to `S` indices into the index buffer, then the same number of
   values into the value buffer.
3. **Scatter.** Walks the buffered pairs, one per cycle. A pair inside the subgroup
   becomes a one-lane write: the word address is `grad + (idx - sub_lo)/16`, and a
   write strobe enables lane `(idx - sub_lo) % 16` only. A pair outside the subgroup
   is skipped and counted in `n_dropped`.

Steps 2 and 3 repeat until all `nnz` pairs are used.

The single-lane strobe lets the dense gradient stay in DRAM. That matters because a
subgroup is far larger than the on-chip memory. If an index appears twice, the later
pair wins. A cycle of priming separates load from scatter, because the first buffer
word must be read before the first pair is known.

## Memory port and arbitration

Each master has a valid/ready request channel:

* `we`: write enable.
* `addr`: word address.
* `wdata`: 512 bits.
* `wstrb`: one bit per 32-bit lane.

Read responses come back in request order. They carry only `rsp_valid` and
`rsp_data`, with no back-pressure. Writes are posted.

The arbiter grants one request per cycle in round-robin order. For every granted read
it pushes the master's number into a FIFO. Because responses arrive in order, each
response goes to the master at the FIFO's head. While the FIFO is full (`OUTST`
reads in flight) no read is granted. `n_conflict` counts cycles in which more than
one master requested.

This stands in for the AXI interconnect of the FPGA shell. AXI's separate read and
write channels and its burst transfers are simplified to one word per request. The
top brings the port out as plain signals so it can be attached to an AXI master
bridge.

## Kernel control and arguments

To start an operation, pulse `start` with these arguments held stable until `done`:

* `compressed`: run the decompressor first.
* `opt`, `coef`: optimizer and its coefficients.
* `region`: array base addresses.
* `n_words`: subgroup size in words.
* `sub_lo`: first element index of the subgroup.
* `nnz`: number of compressed pairs.

The kernel then runs as follows:

1. In compressed mode it runs the decompressor and waits for it to finish.
2. It starts all PEs together and waits until every PE is idle.
3. It pulses `done` for one cycle.

Status outputs:

* `busy`.
* `cycles`: length of the last operation.
* `n_dropped`.
* `n_conflict`.

Default sizes:

* 16 lanes of FP32 (the figure's "16 AXPBYs" in each AXPBY unit).
* 4 updater PEs.
* `S = 1024` elements per buffer.
* 64 outstanding reads.

## Performance

The kernel is bound by the DRAM port, as the real device is bound by flash bandwidth.
A dense Adam update touches seven words per element word: four reads and three
writes. With four PEs and a zero-latency memory, a 600-word (9600-element) subgroup
took 4432 cycles, against 4200 word transfers. At 250 MHz and 64 bytes per cycle, one
port moves 16 GB/s, well above the few GB/s that the flash inside a device delivers.
So the kernel keeps up with storage, which is the point of the design. In compressed
mode, decompression adds `n_words` cycles of zero fill plus about three cycles per
16 pairs loaded and one cycle per pair scattered.

## Departures from the paper and open points

* The paper does not give a buffer size `S`, a PE count, or the FPGA clock. This
  design uses `S = 1024`, 4 PEs and 16 lanes, which matches the printed "16 AXPBYs".
* The drawing shows a third element-wise operator after the squarer. It is read here
  as the AXPBY feeding the variance, as the text's description of Adam requires.
* Memory is one word per request, not AXI bursts. The control sequence, load/store
  order and arbitration are this design's own.
* Subnormals flush to zero. A GPU or CPU optimizer keeps them, so results can differ
  in the last place for tiny values.
* Not built:
  * the device DRAM itself (a behavioural model is in `tb/accel_mem_model.sv`);
  * the PCIe switch and SSD;
  * the host-side transfer handler, which overlaps the transfers of consecutive
    subgroups;
  * the GPU-side Top-K selection.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_axpby_simd`, `tb_update_unit`: random and special FP32 values against the
  double-precision reference in `tb/fp_ref_pkg.sv`. These also check the update
  unit's latency of 2.
* `tb_chunk_buffer`: random reads and writes, including read-during-write to the same
  address.
* `tb_mem_arbiter`: three random masters against a random-latency memory. Checks
  routing, the outstanding limit and fairness.
* `tb_updater_pe`: a small PE (`S = 64`, PE 1 of 2) over a partial last chunk, for
  all three optimizers. Checks every element and the read count, and that compute
  takes exactly one cycle per word.
* `tb_topk_decompressor`: several chunks of pairs, with out-of-range indices on
  both sides of the subgroup, with and without memory stalls. Checks that scatter takes one cycle per
  pair.
* `tb_smart_infinity_kernel`: the top at its default parameters, through five
  operations:
  * Adam with 1 % Top-K;
  * Adam with 12 % Top-K, more than one chunk of pairs;
  * SGD;
  * AdaGrad;
  * dense Adam without stalls, with a cycle bound.

  It checks every element and counts each mechanism: both modes, all optimizers,
  dropped pairs, multi-chunk decompression, partial chunks, all PEs active, memory
  stalls and arbitration conflicts. It takes under a minute.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_smart_infinity_kernel \
  -Irtl -Itb -y rtl -y tb \
  rtl/fp32_pkg.sv tb/fp_ref_pkg.sv rtl/si_pkg.sv tb/tb_smart_infinity_kernel.sv
./obj_dir/Vtb_smart_infinity_kernel
```

Substitute another testbench name for the block testbenches. Verilator finds the
remaining modules through `-y`.
