# DataGuard RTL: hardware-enforced differential privacy for accelerator training

In federated learning, a third party's training application runs on a data
owner's accelerator. The owner wants only differentially private (DP)
results to leave the device: gradients clipped to an l2-norm bound `C_th`,
with Gaussian noise added, and no more training rounds than the privacy
budget allows. The owner cannot check the application's code. DataGuard
moves that check into hardware. The application may compute anything it
likes. The accelerator keeps a small tag next to every block of data, and a
block can earn a "noised" tag only by going through a dedicated noising
instruction. A trusted host program, the *privacy manager*, lets a block
leave the device only if its tag shows that the block was noised, and that
the clipping check for that round passed within the budget.

This repository is SystemVerilog for the DataGuard additions to a
systolic-array accelerator with a 128-lane FP32 vector unit. It follows the
architecture described in the DataGuard paper (Sanjaya et al., "DataGuard:
Guaranteeing Private Training in Systolic-array Based Accelerators"). The
paper gives the mechanisms and the main sizes. Interfaces, encodings,
pipelining and the floating-point datapath are this implementation's own.
Those choices are listed in "Departures and own choices" below.

## 1. The guarantee in one page

Three quantities carry the whole argument:

* **epoch**: an 8-bit counter. The privacy manager sets it to 1 before the
  application starts. Each `audit` instruction adds one, so the epoch counts
  the training rounds that were checked.
* **tag**: one byte per 512-byte block (128 FP32 values, exactly one vector
  register's worth). A tag of 0 means *sensitive*. A non-zero tag is the
  epoch in which the block was noised.
* **CStatus**: 0 while every check has passed. When a check first fails,
  CStatus is set to the epoch in which it failed. After that it does not
  change until the privacy manager clears it.

The application must use two instructions:

* `add-noise`: adds one fresh vector of noise to a vector operand. The noise
  was sampled on the host and read from a protected memory region. The
  instruction also accumulates the operand's squares into the l2-norm
  registers. The result is tagged with the current epoch.
* `audit`: adds up the accumulated squares (`P_agg`) and checks
  `sqrt(P_agg) <= C_th`. On a failure with CStatus at 0, it writes the
  current epoch into CStatus. It then clears the accumulators and advances
  the epoch.

Any other result gets tag 0, with one exception. A `vadd` whose two source
tags are both non-zero gets the larger of the two tags, so noised gradients
from several iterations can be summed. Results of the systolic array always
get tag 0.

The privacy manager releases a block with tag `t` only if all of these hold:

```
t != 0                        (it was produced by add-noise)
t <  epoch                    (an audit followed the noising)
CStatus == 0  or  t < CStatus (no audit failed in or before t's round)
cost(epoch - 1) <= budget     (the number of audited rounds is within budget)
```

How this stops the obvious attacks:

| attempt                                 | what the hardware leaves behind                | release rule that fails |
|-----------------------------------------|------------------------------------------------|-------------------------|
| share raw data or any computation on it | tag 0 (loads, ALU results, systolic array)     | `t != 0`                |
| mix raw data into a noised sum (`vadd`) | tag 0                                           | `t != 0`                |
| noise but skip the audit                | `t == epoch`                                    | `t < epoch`             |
| noise unclipped gradients               | audit fails, `CStatus = t`                      | `t < CStatus`           |
| run more rounds than allowed            | epoch grows with every audit                    | budget                  |
| branch on sensitive data                | CStatus set to the epoch                        | `t < CStatus`           |

The privacy manager, the noise sampling and the budget arithmetic are host
software. They are not part of this RTL. The testbench `tb_dataguard`
contains a model of the release rule.

## 2. Block structure

```
             host registers (C_th, epoch, CStatus, noise-br, tag-br)
                          |
 VPU decoder --> dataguard ----------------------------------------------+
 (vpu_*)          |                                                      |
                  +-- dg_noising_module                                  |
                  |     +-- dg_noise_fetch    noise partition refills ---+--> DMA (nxfer_*)
                  |     +-- dg_noise_add      128 x FP32 add           <-+-- noise partition (noise_rd_*)
                  |     +-- dg_l2_norm        128 x FMA, P_0..P_127,     |
                  |     |                     audit sum, C_th, CStatus   |
                  |     +-- dg_epoch          8-bit epoch                |
                  +-- dg_tagging_module       tag rules, cf_fail --------+ (sets CStatus)
                  +-- dg_tag_buffer           32768 x 8-bit, 2 ports     |
                  +-- dg_mtu                  tags <-> device memory ----+--> mem_* (tag region)
```

`fp32_fma` is the single floating-point primitive. The lane FMAs, the noise
adders (with the multiplicand tied to 1.0) and the audit summation all use
it. `dg_pkg` holds the opcodes, MTU commands and register map.

The accelerator's own blocks are not in this RTL: the systolic array, the
vector ALU and decoder, the 24 MB of data buffers, the DMA, device memory
and the PCIe link. The `dataguard` top meets them at its ports. The vector
ALU computes the data of a `vadd`, for example, and DataGuard only sets its
tag.

## 3. The noising module

### add-noise datapath

```
issue clock      : operand latched, noise vector index presented (noise_rd_idx, noise_rd_en)
issue + 1 clock  : noise vector arrives from the on-chip buffer;
                   P_i <= operand_i * operand_i + P_i           (one rounding, 128 lanes)
                   result_i <= operand_i + noise_i              (registered)
issue + 2 clock  : res_valid / res_data
```

The accumulate FMA sits in the feedback path of `P_i` and completes in one
clock. `add-noise` can therefore issue every clock with no forwarding
logic. The noise read is modelled as a synchronous SRAM read with one
clock of latency.

### audit sequence

`audit` is accepted only when no audit is running. Once it is accepted, the
unit spends 128 clocks adding `P_0 ... P_127` in lane order through one FP32
adder. It spends one more clock on the check. In that clock it writes
CStatus if needed, clears all `P_i`, pulses `audit_done` with `audit_pass`,
and exposes `P_agg`. The epoch advances on the following edge. The epoch
value written into CStatus is therefore the one in which the checked data
was tagged. `add-noise` waits while an audit runs. An `add-noise` issued
just before the audit still lands in the partial sums, because `P_i` is
updated on the same edge that starts the audit.

### The clipping comparison

The check `sqrt(P_agg) <= C_th` is done without a square root and without
rounding. `C_th` has a 24-bit significand. Its square is computed exactly
as a 48-bit product and compared with `P_agg` after aligning the
exponents. The decision is exact at the boundary. For example, squares
summing to 25.0 pass at `C_th = 5.0` and fail at the next smaller FP32
value. A NaN or infinite `P_agg` fails. So does a negative or NaN `C_th`.

### Noise supply

The host writes sampled noise into a protected region of device memory
starting at `noise-br`. A quarter of the on-chip buffers (6 MB = 12288
vectors) is reserved for noise. The first `add-noise` finds the partition
empty. `dg_noise_fetch` then requests one 6 MB transfer (`nxfer_*`) and
stalls `add-noise` until `nxfer_done`. After that it hands out vector
indices 0, 1, 2, ... with one per `add-noise`, so no noise vector is ever
used twice. After the 12288th vector the partition counts as empty again,
and the next `add-noise` fetches the following 6 MB of the region. A write
to `noise-br` starts over at the new base.

## 4. Tags in motion

`dg_tagging_module` is a two-stage pipeline. In the issue clock it reads the
source tags from port 0 of the tag buffer. One clock later it writes the
result tag. A tag written by one instruction can be read by the very next
one, because the tag buffer forwards a port-0 write to a same-clock port-0
read. The result tag of `add-noise` is written one clock before its data
arrives. That is harmless, because the data buffer is written later in the
same order.

Tag writes for systolic-array results (`sa_wr_*`) share port 0 with VPU
results. When both occur in the same clock, the VPU result wins and
`sa_wr_ready` holds the systolic-array write for a clock. A control-flow
instruction (`VOP_BRANCH`) checks the tag of source A. If that tag is 0,
`cf_fail` pulses and CStatus is set if it was 0.

`dg_mtu` follows each DMA block transfer with the tags. The tag of the block
at device byte address `A` lives at `tag-br + (A >> 9)`.

| command           | per 512-byte block                                     | memory traffic |
|-------------------|--------------------------------------------------------|----------------|
| `MTU_LOAD`        | on-chip tag := 0                                       | none, 1 block/clock |
| `MTU_LOAD_TAGGED` | on-chip tag := memory tag (`load-tagged` instruction)  | 1 byte read    |
| `MTU_STORE`       | memory tag := on-chip tag (every write-back)           | 1 byte write   |

Because a plain load always yields tag 0, ordinary loads never fetch tags
from memory. The tag buffer is not reset. Every block that holds data was
written by a load, a VPU result or a systolic-array result, and each of
those writes its tag.

## 5. Top-level interface (`dataguard`)

| group | signals | notes |
|-------|---------|-------|
| host registers | `cfg_we, cfg_addr (cfg_addr_e), cfg_wdata[63:0]`; outputs `epoch, cstatus, cth, noise_br, tag_br` | `CFG_CTH` (FP32), `CFG_EPOCH`, `CFG_CSTATUS` (any write clears), `CFG_NOISE_BR`, `CFG_TAG_BR` |
| VPU issue | `vpu_valid/vpu_ready, vpu_op (vop_e), vpu_src_a, vpu_src_b, vpu_dst` (block indices), `vpu_operand[128*32]` | `vpu_ready` drops only for add-noise/audit while an audit runs or noise is being fetched |
| noised result | `res_valid, res_data` | two clocks after issue |
| audit | `audit_done, audit_pass, p_agg`, `cf_fail` | |
| noise partition | `noise_rd_en, noise_rd_idx[13:0]` out, `noise_rd_data` in (next clock) | |
| noise transfer | `nxfer_valid/ready, nxfer_src, nxfer_bytes, nxfer_done` | |
| systolic array | `sa_wr_valid/ready, sa_wr_blk` | sets tag 0 |
| MTU | `mtu_cmd_valid/ready, mtu_cmd_op, mtu_cmd_dev_addr, mtu_cmd_blk, mtu_cmd_nblk, mtu_cmd_done` | |
| tag memory | `mem_req_valid/ready/we/addr/wdata, mem_rsp_valid/rdata` | one byte, one outstanding request |

Opcodes (`vop_e`): `VOP_OTHER` (any other result-producing VPU op),
`VOP_VADD`, `VOP_ADD_NOISE`, `VOP_AUDIT`, `VOP_BRANCH`. Lane `i` of a
vector is bits `[32*i +: 32]`.

## 6. Sizes

| parameter | default | source |
|-----------|---------|--------|
| vector lanes / partial-sum registers / lane FMAs | 128 | paper |
| block size per tag | 512 B (128 x 4 B) | paper |
| tag width | 8 bits | paper |
| epoch width | 8 bits | paper |
| tag buffer | 32768 tags (32 KB) | paper (tag SRAM added per accelerator) |
| noise partition | 6 MB = 12288 vectors (1/4 of 24 MB buffers) | paper |
| device address | 35 bits (32 GB) | own choice, from the 32 GB device memory the paper mentions |
| MTU command length | up to 65535 blocks | own choice |

All RTL defaults are the paper's numbers. Nothing was scaled down.

Workload reach: nothing in this hardware grows with the model. An iteration
of VGG16 (about 138 M parameters, 553 MB of FP32 gradients) needs about
1.08 M `add-noise` vectors. That is about 88 refills of the noise partition,
followed by one audit. BERT-large (about 340 M parameters) needs about
2.66 M vectors. The 8-bit epoch allows up to 254 audits after the initial 1.
That is far beyond the 10-iteration rounds the paper evaluates.

## 7. Floating point

`fp32_fma` computes `a*b + c` with one round-to-nearest-even. The exact
48-bit product and the addend are aligned in a 52-bit window with a sticky
bit, then added. The sum is normalised with a leading-one search and
rounded once. Subnormal inputs are treated as zero and subnormal results
are flushed to zero. Overflow gives infinity. Invalid operations give the
quiet NaN `0x7FC00000`. Gradients and noise are far from the subnormal
range, so flushing does not affect the noising. It does mean that squares
of values below about 1e-19 add nothing to `P_agg`, which can only make the
norm smaller. A design that must bound the norm of such tiny values should
add subnormal support.

The unit is combinational. `dg_noise_add` registers its output. The lane
FMAs close a one-clock loop through `P_i`. At a high clock rate this loop
would need the FMA split into a multiply stage and an accumulate stage,
with hazard handling for back-to-back `add-noise`. The paper pipelines
its units (HardFloat-based) but does not describe how.

## 8. Departures and own choices

Following the paper: the tag semantics and all tag rules; add-noise/audit
semantics; the 128 FMAs with partial-sum registers; C_th and CStatus and
the first-failure rule; the 8-bit epoch that the host sets to 1; tags for
systolic-array results and plain loads set to 0; `load-tagged` and tag
write-back through the MTU with a `tag-br` register; the noise partition,
its 6 MB batch transfer and `noise-br`; a separate tag SRAM bank with its
own ports.

Chosen here, where the paper is silent:

* The epoch saturates at 255 instead of wrapping back to 0.
* The clipping check is an exact comparison of `P_agg` with `C_th^2`. The
  paper writes the check both as "less than" and as `<=`; the `<=` form is
  used.
* The audit sums the partial sums sequentially in lane order, taking 128+1
  clocks.
* Noise refills continue with the following 6 MB of the noise region. Noise
  is never reused. `add-noise` stalls during a refill.
* Control-flow instructions check only operand A.
* The tag buffer has two reads and one write on the tagging side, plus one
  read and one write for the MTU. A write is forwarded to a same-clock read
  of the same block on the tagging side. On a same-block collision the
  tagging side wins.
* A systolic-array tag write yields to a VPU tag write in the same clock.
* The MTU makes one-byte tag requests with one outstanding. A production
  design would burst 64 tags per 32-byte access.
* The opcode encodings, the host register map and the port handshakes are
  this design's own.
* FP32 details (Section 7).

Not implemented:

* **The DataGuard_ex extension** (per-example clipping with subsampling).
  It would need 16-bit tags `{s[15], depoch[14:8], rid[7:0]}`, the
  `acc-grad` and `load-record` instructions, the per-record l2 sums held in
  secure scratch memory, and the MTU's `depoch == epoch` check on scratchpad
  loads.
* Protection of the noise and tag regions against direct application
  access. The paper requires it but does not say where it is enforced; it
  would be an address check in the DMA.
* The accelerator itself and the host software (Section 2).

## 9. Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The floating-point reference
(`tb/fp_ref_pkg.sv`) computes in double precision and rounds to FP32 once.
For additions and products that is exact, because double carries more than
twice FP32's precision.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp32_fma` | 8000 random fma/add/square cases, cancellation, ties, zero/inf/NaN |
| `tb_dg_noise_add` | 128-lane noised vectors against the reference, 1-clock latency |
| `tb_dg_epoch` | reset value, host load, +1 per audit, saturation |
| `tb_dg_l2_norm` | partial sums, P_agg, verdict, exact boundary (25 vs 5.0), audit latency, CStatus rules |
| `tb_dg_noise_fetch` | lazy first fetch, chunk addresses, in-order indices, refill, restart (full 6 MB chunk) |
| `tb_dg_noising_module` | add-noise + audit streams with a small partition (refills, stalls) |
| `tb_dg_tagging_module` | every tag rule on random instruction streams, systolic-array arbitration, cf_fail |
| `tb_dg_tag_buffer` | both ports, read latency, bypass, collision priority (full depth) |
| `tb_dg_mtu` | plain/tagged loads and stores, tag addresses, throughput |
| `tb_dataguard` | end to end at the default sizes (see below) |

`tb_dataguard` runs the whole design with every parameter at its default.
It plays one federated round: raw loads and systolic-array results; ten
iterations of add-noise, audit, store and tagged reload; vadd aggregation.
It then replays every attack in the table in Section 1. It also pushes
12296 add-noise vectors through, which forces a noise refill, and counts
that each mechanism occurred. The mechanisms counted are add-noise, audit
pass and fail, refill, stall, noised and mixed vadd, control-flow failure,
systolic-array write and wait, the three MTU commands, tag bypass, release
and rejection. It runs in under a minute.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl \
    rtl/dg_pkg.sv tb/fp_ref_pkg.sv tb/tb_dataguard.sv --top-module tb_dataguard
./obj_dir/Vtb_dataguard
```

Replace `tb_dataguard` with any other testbench name. Verilator has two
states. The testbenches initialise everything they read, and the design
resets every register that is read before it is written.

What the tests do not establish: timing closure at 1 GHz (the lane
FMA loop is one combinational FMA), area and power, and bit-exact agreement
with a HardFloat-based unit in the subnormal range.
