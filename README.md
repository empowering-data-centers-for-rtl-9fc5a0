# Tenant isolation inside shared data-center devices

A single accelerator card or SSD is often shared by several cloud tenants at once, and the tenants
do not trust each other. This RTL adds the small amount of hardware a device needs for that. The
device's cores, or its storage, are cut into **FDUs**. An FDU is the smallest piece of a device
that can be given to a tenant's job. A trusted piece of firmware on the device, the **security
monitor (SM)**, decides which job owns which FDU. The hardware then makes sure that nothing crosses
an FDU boundary:

* a **mapping table** holds, for every FDU, whether it is allocated, the job that owns it, that job's
  encryption key and the FDU's address range;
* **access filters** sit on every path out of a core, or between the host interface and the SSD
  controller. Each filter checks every request against the table;
* a **secure deallocator** remembers which memory a job used and zeroes that memory when the FDU is
  taken back, so the next tenant finds nothing.

The design covers two devices, side by side under one top (`dsa_tee_top`):

* an AI accelerator of 32 cores (DaVinci style, as in the Ascend 910): `ai_tee`. Its host
  interface also has an AES-256-GCM engine, `mpe_gcm`, which encrypts what an FDU sends to the
  host with that FDU's key;
* an SSD, where the check works on block commands and namespaces: `ssd_eml`.

Attestation, the SM firmware, the SSD's encryption engine, and the cores and controllers
themselves are not part of this RTL. They meet it at ports, listed [below](#what-sits-outside).

## Files

| file | module | role |
|---|---|---|
| `rtl/tee_pkg.sv` | package | widths, table entry, request and command structs, opcodes |
| `rtl/fmt.sv` | `fmt` | FDU mapping table, one write port, all entries readable |
| `rtl/acu_mem.sv` | `acu_mem` | DDR access filter of one core |
| `rtl/acu_core.sv` | `acu_core` | inter-core message filter of one core |
| `rtl/sda.sv` | `sda` | secure deallocator of one core |
| `rtl/ai_tee.sv` | `ai_tee` | the accelerator's protection module: table, per-core filters and deallocators, SM sequencer |
| `rtl/aes_pkg.sv` | package | AES-256 round functions, S-box, GF(2^128) multiply |
| `rtl/mpe_gcm.sv` | `mpe_gcm` | AES-256-GCM engine of the accelerator's host interface |
| `rtl/ssd_acu.sv` | `ssd_acu` | block-command filter of the SSD |
| `rtl/ssd_eml.sv` | `ssd_eml` | SSD mapping layer: table plus filter, between host interface and controller |
| `rtl/dsa_tee_top.sv` | `dsa_tee_top` | top: `ai_tee`, `mpe_gcm` and `ssd_eml` |
| `tb/tb_<module>.sv` | | self-checking testbench of each module |

## The mapping table (`fmt`)

Each entry holds `{valid, job, key, base, size}` (`fmt_entry_t`). The table has one write port
with two operations:

* `FMT_ASSIGN` fills a free entry. It is refused if the entry is already valid, if the size is zero,
  or if `base+size` overflows the region width. The refusal of an allocated FDU is the rule that
  keeps one tenant from taking over another's FDU.
* `FMT_RELEASE` clears a valid entry completely, key included.

`wr_ok` is combinational and tells the caller, in the same cycle, whether the write will happen.
The write takes effect at the next clock edge. All entries come out as registers (`table_o`), so
every filter can read every entry with no arbitration.

The region is this design's own addition. The job id and key are what the source design keeps in
the table. A region is needed so that a DDR filter has something to check an address against.

## The accelerator (`ai_tee`)

```
              SM commands (MAP_CORE / ASSIGN / RELEASE)
                         |
                  +------v------+        key lookup for the host-side
                  |  sequencer  |------> encryption engine (mpe_*)
                  |  core->FDU  |
                  |     fmt     |
                  +------+------+
                         | table, map (read by all)
   per core c:           v
   core c DDR req --> [hold] --> acu_mem --+--> broadcast unit / DDR (bu_*)
                                           ^
   sda c (tensor table, zeroing writes) ---+  (mux: sda first while it is busy)
   core c message --------> acu_core ---------> interconnect (noc_*)
   core c tensor report --> [hold] --> sda c
```

### Partitioning and allocation

At start-up the SM gives each core an FDU with `SM_MAP_CORE`. Several cores may share one FDU. A
core may only change FDU when its old FDU and its new FDU are both free and it tracks no tensors,
so a running job's cores cannot be moved under it. `SM_ASSIGN` then allocates an FDU to a job.

### The two filters

* **`acu_mem`** passes a 32-byte request only if the core's FDU is allocated and the whole beat
  `[addr, addr+32)` lies inside the FDU's region. Otherwise it drops the request and pulses
  `deny_o` with the address.
* **`acu_core`** passes a message from core `SRC` to core `dst` only if both cores' FDUs are
  allocated to the same job. One job may span several FDUs, and messages between them pass.

Both have one registered output stage. `in_ready = !out_valid || out_ready`, so a filter adds one
cycle of latency and keeps full throughput. The source design places these filters in each core's
front end, and so does this RTL: one of each per core. Cores never queue behind each other.

### Teardown: the hardest part

What has to be guaranteed: once the SM is told an FDU has been released, every byte the old job
left in DDR is zero. No write of the old job may land after that, and the next job cannot see
anything either.

1. **Tracking.** A job's runtime reports each tensor it allocates on the core's `alloc_*` port
   (base aligned to 32 bytes, length in bytes). That core's `sda` stores the tensor in a table of
   `TENSORS` = 16 entries. If the table is full, `alloc_ready` drops and the report waits; a tensor
   is never silently lost. Nothing is cleared while the job runs. This follows the source design,
   which clears tensor memory only at teardown.
2. **Release accepted.** When `SM_RELEASE` for FDU *f* is accepted, the sequencer pulses
   `scrub_start` to every core mapped to *f*. From that cycle on, those cores are **held**: their DDR
   requests and tensor reports see `ready` low. Without the hold, a core could write after its
   zeroing had passed that address.
3. **Zeroing.** Each deallocator walks its table. For each tensor it issues one all-zero write per
   32-byte beat, `ceil(len/32)` writes. The writes share the core's DDR path and pass through its
   `acu_mem`, which still holds the old entry, so a bad tensor report cannot be used to zero
   another tenant's memory. While a deallocator is busy, the mux in front of `acu_mem` gives it the
   port.
4. **Finish.** The sequencer keeps a pending bit per core and clears it on that core's
   `scrub_done`. When every bit is clear, it clears the table entry (job, region and key) and
   answers `sm_resp_ok`. Only then is the hold released. From then on the FDU's cores are
   refused everything until the FDU is allocated again.

Timing: a deallocator with T tensors totalling B beats, with no back-pressure, raises `scrub_done`
B + T + 2 cycles after `scrub_start`. The release answer comes one cycle after the slowest core of
the FDU finishes. `sm_ready` stays low meanwhile. For example, 2 tensors of 6 beats give an answer
11 cycles after acceptance (`tb_ai_tee` checks this).

One subtlety: the answer can come while a core's last zeroing write still sits in its `acu_mem`
output register. That write leaves the port before anything the core sends later, so no later
reader sees the old data. A design whose memory system can reorder writes from one port would need
to wait for the write acknowledgement instead.

The source design does not say how the deallocator learns about tensors. A report port from the
core's runtime is this design's choice. It also describes the zeroing once as clearing "the FDU's
reserved memory" and once as clearing tensor memory only. This RTL clears the tracked tensors. To
clear a whole region, report the region as one tensor.

### Host-side encryption (`mpe_gcm`)

Everything an FDU sends to the host is encrypted and authenticated with AES-256-GCM, using the key
its owner set up through attestation. The top selects an FDU on `ai_mpe_fdu`. `ai_tee` returns
that FDU's entry (`mpe_key_valid`, `mpe_job`, `mpe_key`), and the key goes straight into the
engine, so keys never appear on the top's ports.

* A message begins with `start`, which carries a 96-bit IV and the direction. If the selected FDU
  is not allocated, the start is refused with `start_err`. A released FDU cannot send anything,
  because its key is gone.
* The engine copies the key and expands it into 15 round keys, four words per cycle. It then
  computes H = E(0) and E(J0). After 42 cycles it takes 128-bit blocks: first the additional
  authenticated data, then the payload, with a byte count for a short final block. `in_last`
  ends the message, and the tag follows one cycle later.
* Each payload block is XORed with E(counter) and leaves on `out_*` 15 cycles after it was taken
  (one AES round per cycle). The ciphertext is folded into GHASH with a one-cycle GF(2^128)
  multiplier. Decryption is the same pass with the input hashed instead of the output.
* The S-box is computed, not tabulated: the inverse in GF(2^8) by an addition chain for x^254,
  then the affine map.

At 16 bytes per 15 cycles, a 4 KB transfer takes about 3.9 µs at 1 GHz. That is slower than the
source design's software figure (about 1.5 µs on one ARM core). Unrolling rounds or pipelining
the counter blocks would close the gap; neither is done here.

## The SSD (`ssd_eml`, `ssd_acu`)

The SSD has no cores to partition, only storage. An FDU here is a namespace with an LBA range. The
mapping layer sits between the host interface layer (HIL) and the SSD controller:

* the SM programs the layer's own `fmt` (`NUM_FDU` = 8) with `FMT_ASSIGN` / `FMT_RELEASE`. The
  answer comes one cycle later on `sm_resp_valid`/`sm_resp_ok`;
* each block command `{op, tag, nsid, lba, nblk}` from the HIL passes `ssd_acu`. The namespace id
  selects the FDU. `READ`, `WRITE` and `TRIM` pass only if the FDU is allocated and
  `[lba, lba+nblk)` lies inside its range with `nblk != 0`. `FLUSH` needs only an allocated FDU.
  A namespace id beyond the table is refused;
* an allowed command leaves on `ctl_*` together with its FDU's key (`ctl_key`), for the encryption
  engine in front of the controller. A refused one is dropped, and `deny_o` pulses with its tag.

The SSD controller itself is unchanged. One block is 4 KB, a unit of `lba` only; no data passes
through this layer.

## Interfaces and conventions

* One clock, and an asynchronous active-low reset `rst_n`. All tables reset to empty.
* Every stream is valid/ready. A transfer happens on a clock edge with both high. Assertions in
  the filters and the deallocator check that a stalled output stays stable.
* SM commands on `ai_tee`: `sm_valid`/`sm_ready` to issue. The answer is a one-cycle
  `sm_resp_valid` with `sm_resp_ok`. `MAP_CORE` and `ASSIGN` answer one cycle after acceptance.
* Widths (`tee_pkg`): job id 16 bits, key 256 bits, DDR address 40 bits, beat 256 bits (32 bytes),
  region fields 48 bits, LBA 48 bits, block count 16 bits, tag 8 bits. None of these are given by
  the source design.
* Parameters: `NUM_CORES` = 32 (the Ascend 910 core count), `NUM_FDU` = 32 (at most one FDU per
  core), `TENSORS` = 16 per core, `SSD_FDU` = 8. Apart from the core count, these are this
  design's own choices.

## What sits outside

These are not in the RTL. They connect through the top's ports:

* **The SSD's encryption engine**. It takes `ctl_key` with each allowed command. The source design
  models it only as a timing cost. `mpe_gcm` could serve, with one message per 4 KB block.
* **The host DMA** that feeds `ai_mpe_*`.
* **Security monitor** firmware: it drives `ai_sm_*` and `ssd_sm_*`.
* **Attestation** (a hardware security module).
* The AI cores, the broadcast unit and DDR: `core_*`, `bu_*` and `noc_*`.
* The SSD's HIL, controller and flash: `hil_*` and `ctl_*`.
* The rack-level security controller that shields devices without a TEE. It is software in the
  source design.

## Sizes against real workloads

* **Synthetic im2col kernels** and **1, 2 or 4 concurrent tenants**: fit easily. Each needs a few
  tensors per core and at most four FDUs. `tb_tenant_scaling` runs both kernels.
* **CNN inference on one core** (ResNet-34/50, RetinaNet, SSD300-VGG16, UNet, YOLOv3): these have
  23 to 106 layers. If each layer's weights were reported as its own tensor, a 16-entry table would
  be too small. The core would then stall on its next report until teardown. Either report the
  runtime's memory pool as a few large tensors, or raise `TENSORS` to at least the layer count.
  The table is flat registers, so its cost grows linearly.
* **Teardown time** is one cycle per 32 bytes. For a 103 MB compiled ResNet-34 that is about
  3.2 M cycles, roughly 3 ms at 1 GHz. The source design reports 2.2 ms, with a wider memory path.
* **SSD**: 16 GB of 4 KB blocks is 2^22 blocks, well within 48-bit LBAs. Four concurrent tenants
  fit into 8 namespaces.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops, or a watchdog stops it. With
plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_dsa_tee_top \
    rtl/tee_pkg.sv rtl/aes_pkg.sv tb/tb_dsa_tee_top.sv rtl/*.sv
obj_dir/Vtb_dsa_tee_top
```

Replace the top module and testbench file to run the others. The testbenches initialise
everything they read, so no X handling is needed.

* `tb_fmt`, `tb_acu_mem`, `tb_acu_core`, `tb_ssd_acu`, `tb_sda`, `tb_ssd_eml`: random stimulus
  against a reference model of the rule. `tb_sda` also checks the B + T + 2 cycle latency with no
  back-pressure, and the write contents with random back-pressure.
* `tb_mpe_gcm`: eight AES-256-GCM vectors, three of them test cases of the GCM specification
  (13, 14 and 16) and five random ones with partial blocks. Each is run encrypting and decrypting,
  with and without output back-pressure. It also checks the 42- and 15-cycle latencies and the
  refused start.
* `tb_ai_tee`: directed sequences for every SM command, refusal, hold and latency, on a small
  instance.
* `tb_tenant_scaling`: the im2col stress kernels, run by 1, 2 and 4 tenants at once on `ai_tee` at
  its default sizes. Each tenant's core reports three tensors (4 KB, 16 KB and 4 KB) and streams
  640 requests. Memory-bound, they come back to back and every stream takes 641 cycles.
  Compute-bound, they come one every 8 cycles and every stream takes 5114 cycles. This holds
  whatever the number of tenants: each core has its own filter, so tenants never wait on each other here. Contention for
  DDR bandwidth lies beyond these blocks. A cross-tenant read is refused. Each release takes
  768 + 3 + 3 = 774 cycles and issues exactly 768 zeroing writes.
* `tb_dsa_tee_top`: the whole design at its default sizes, with no parameter overrides. It runs
  three rounds of partitioning, allocation, random traffic from all 32 cores, and teardown, with the
  SSD layer running alongside. It predicts every outcome from a reference copy of the tables, and
  after teardown it checks that the memory model reads zero for every reported tensor. It also
  sends GCM test case 16 through the host-side engine, under an FDU that holds that key. It counts
  20 mechanisms and fails if any of them never happened: allowed and refused access, allowed and
  refused message, allocation and refused allocation, refused re-partitioning, release and refused
  release, zeroing write, teardown stall, full tensor table, key hit and miss, allowed, refused and
  flush SSD commands, a refused SSD allocation, an encrypted message, and a refused encryption
  start. It takes well under a second.

## Where this departs from the source design

* The source design says both that the accelerator's encryption runs in software on its ARM core,
  and that it was written in SystemVerilog. Here it is hardware (`mpe_gcm`).
* The source design's silicon numbers (2786 µm², 0.38 µW at 1 GHz in 28 nm) are for a single
  filter unit. This RTL instantiates the filters and deallocators for all 32 cores, plus the
  encryption engine. The two are not comparable. Coarse synthesis of the whole top gives about
  28 k cells and 82 k flip-flop bits. Most of the flip-flops are in the 32 per-core tensor tables
  (about 44 k bits) and the mapping table (about 12 k bits).
* The source design lists the mapping table among the units in each core's front end. Here one
  table serves all 32 cores. Its entries are registers that every filter reads directly, which
  gives the same result as 32 copies kept identical.
* Partitioning is a run-time SM command (`MAP_CORE`), with guards. The source design says only
  that the provider divides the cores into FDUs at start-up.
* The deallocator zeroes reported tensors, not a whole region (see above). Its latency is not
  tuned to the source design's measured 1901 and 2125 cycles, which depend on tensor sizes and
  memory bandwidth it does not give.
* On the SSD, the FDUs exist in the table from reset, as empty entries. The SM does not register
  them one by one at start-up.
* Refused requests are dropped and reported on `deny` outputs. The source design does not say how a
  refusal is signalled.
