# An FPGA accelerator for sparse, low-bit LLM inference

Generating text with a large language model is dominated by two costs: multiplying by
weight matrices that are far too large for on-chip memory, and moving the activations
between the layers. This accelerator targets a three-die FPGA with HBM (the Alveo U280 class
of device) and attacks both costs:

- **Weights are pruned to N:16 block sparsity and quantised to 2-8 bits.** They stream from
  HBM, are expanded to INT8 on the fly, and feed a DSP chain that skips the pruned positions
  instead of multiplying by zero.
- **During decoding, activations never leave the chip.** The special function unit writes
  each result straight into the activation buffer that the next layer reads. A ring between
  the cores' SFUs gives every core the whole vector.
- **A single instruction stream serves every token length.** A small table picks the
  instruction file by token length. Per-core base registers let all three cores share one
  file.

The RTL in `rtl/` is parameterised. Its defaults describe the full device: 3 cores, 64
matrix units per core, and 8 HBM channels per core.

## Structure

```
flightllm_top
├── task_scheduler          host registers, length table, start, barrier, interrupt
├── memory_controller       HBM channels split statically per core, DDR arbiter
└── computing_core  x N_CORES  (ring: core c-1 -> core c)
    ├── instruction_scheduler   fetch from DDR, decode, wait masks, issue, SYS
    ├── mmu                     buffers + LD/ST DMA over HBM_CH channels + dequant_unit
    │   └── onchip_buffer x4    activation / weight / index / global
    ├── mpe                     tile controller + N_MPU x mpu
    │   └── mpu                 VPUS x vpu + accumulators
    │       └── vpu             8 x dsp_group (the CSD chain)
    │           └── dsp_group   2 x dsp48_dual_mac, Z-mux, OAU, reduction node
    ├── sfu                     LUT loader, micro-op controller, MISC ALU
    └── remote_sfu_link         one stop of the SFU ring
```

Shared types are in `flightllm_pkg`: the instruction word `inst_t`, the memory request and
response structs, and the ring packet.

## The sparse DSP chain (hardest part)

A **VPU** is a cascade of 16 DSP48 slices, arranged as 8 **DSP groups** of two. Each slice
computes two INT8 products that share one weight: it forms `w * (A*2^18 + B)`, where A and
B are the same element in two activation rows. So one chain serves two rows at once. Each
slice has a sparse multiplexer. A 4-bit index chooses which of the 16 activations in the
block meets the stored weight. Only the N kept weights of an N:16 block are stored.

- **Dense (N = 16).** The chain forms one 16-term dot product per row.
- **Sparse (N = 2, 4 or 8).** The chain is cut into segments of N/2 groups. The
  **Z-mux** at the start of each segment selects zero instead of the cascade input. The
  **reduction node** at the end of the segment decodes the two packed lanes:
  `res_b = low + MSP` and `res_a = (sum - low) >>> 18`.
- **Overflow adjust unit (OAU).** Lane B holds only 18 bits inside the 48-bit cascade. A
  sum of more than 8 products can spill into lane A. For segments longer than 8 slices, the
  OAU in each group keeps the low 16 bits (LSP) in the cascade and passes the rest (MSP)
  along a side path to the reduction node. Short segments switch the OAU off.

The VPU has 2 cycles of latency: an input register, then the chain, then an output register.

An **MPU** holds 2 VPUs and their accumulators. The **MPE** holds 64 MPUs and has two modes:

- **MM** (prefill): MPU m takes activation slice m; all MPUs share one weight word.
- **MV** (decode): every MPU takes the same vector (slice 0, row A); MPU m takes weight
  slice m. Only VPU 0 of each MPU works.

The tile controller loops over `cnt` output words and `len` reduction steps. The weight
address is `w_addr + n*len + k`. Each result is `sat16(acc >>> shift)`, written to the
global buffer. An instruction takes `len*cnt + 5` cycles.

## Buffer word layouts

| buffer | word width | contents of one word |
|---|---|---|
| activation | N_MPU*256 | slice m = rows 2m, 2m+1; 16 INT8 each |
| weight | N_MPU*VPUS*128 | 16 INT8 weights per VPU |
| index | N_MPU*VPUS*64 | 16 4-bit indices per VPU |
| global | N_MPU*VPUS*8*2*16 | element ((m*VPUS+v)*8+g)*2+lane, Q8.8 |

The SFU addresses the activation buffer in bytes and the global buffer in 16-bit elements.

## Memory management and dequantisation

One LD or ST moves `len` buffer words. Each beat is `HBM_CH x 512` bits, one 512-bit word
per channel, at byte address `ext + 64*beat` on every channel of the core. Words wider than a
beat take several beats.

Weights arrive compressed. A beat holds 4 groups of 2-bit weights, 2 groups of 3- or 4-bit
weights, or 1 group of 8-bit weights. Each group holds `BEAT_W/8` weights. The
`dequant_unit` sign-extends each field and multiplies it by a Q4.4 scale. It then
saturates the result to INT8.

Activation-buffer writes have a fixed priority: DMA, then ring, then SFU. The SFU waits
while its write is blocked.

## Special function unit

The SFU runs Eltwise ADD and MUL, SiLU, Softmax and LayerNorm on Q8.8 elements read from
the global buffer. Source element i is at `a_addr + i*cnt`; the second operand is at
`w_addr + i*cnt`. The three lookup tables (768 x 16 bit) are loaded from DDR with
`MISC LDLUT`:

- `E(k) = exp(-k/32)` in Q0.16;
- SiLU on `x/8`, indexed by `clamp((x>>>5)+128)`;
- `1/sqrt(v)`, indexed by `min(255, var>>12)`.

Softmax makes two passes. The first builds a running maximum and an online sum of E. The
second outputs `E(M-x) * (2^24/S) >>> 16`. Every result is `sat8(y >>> scale)` and goes to
activation element `o_addr + i`.

With `bcast` set, core c writes its result to `o_addr + c*len + i` and also sends it over
the ring. Each other core writes it at the same address, so every core ends up with the
whole vector. A ring stop forwards traffic first and lets its own SFU send only when it has
nothing to forward.

## Instructions and control

`inst_t` is 145 bits, one per 512-bit DDR word, fetched from `inst_base + 64*pc`. It holds:

- `op`: LD, ST, MM, MV, MISC or SYS;
- `sub`: the buffer, MISC function or SYS kind;
- `wait_mask`: bit 0 MMU, bit 1 MPE, bit 2 SFU — the units that must be idle before issue;
- the parameters `nm_n`, `qbits`, `scale`, `shift`, `bcast`, `ext_addr`, `a_addr`,
  `w_addr`, `o_addr`, `len` and `cnt`.

Without waits, MMU, MPE and SFU work overlap. LD and ST add the core's base register to the
HBM address. `SYS BARRIER` holds a core until every core has reached it. `SYS END` finishes
the core.

Task-scheduler registers (32-bit word addresses):

| addr | meaning |
|---|---|
| 0 | write `{1, token_len}` to start |
| 1 | status: bit 0 busy, bit 1 length not covered |
| 2+c | base address of core c |
| 16+3e | entry e: largest token length it covers |
| 17+3e | entry e: instruction base |
| 18+3e | entry e: `{valid, instruction count}` |

Start uses the first valid entry whose limit is at least the token length. `irq` pulses
when all cores have ended.

## What follows the paper and what does not

Taken from the source description:

- the CSD chain: DSP groups of two DSP48s, sparse multiplexers, Z-mux, OAU and reduction
  node; N:16 sparsity with N in {2, 4, 8, 16};
- MM and MV modes of the MPE;
- the instruction set LD, ST, MM, MV, MISC, SYS;
- lookup tables kept in DDR;
- the SFU's parts: instruction control, micro-op controller, MISC ALU, remote SFU access;
- the length-threshold table and per-core base registers;
- three cores.

Chosen here, not given by the source:

- all widths and encodings;
- the 2^18 packing of two products per DSP and the 16-bit LSP;
- 64 MPUs x 2 VPUs per core, derived from the 6144 DSPs of the matrix engine;
- 8 HBM channels per core;
- buffer depths and word layouts;
- the ring topology;
- round-robin DDR arbitration with one outstanding read;
- Q4.4 dequantisation scales.

Departures:

- **Number format.** The SFU uses Q8.8 fixed point. The source computes Softmax and
  LayerNorm in fp16.
- **LayerNorm.** It has no gamma or beta.
- **GELU.** There is no GELU table.
- **Compiler.** The compiler that produces instruction files is not included.

## Simulating

Any test builds with plain verilator. Put the package first:

```
verilator --binary --timing --assert -y rtl -y tb rtl/flightllm_pkg.sv tb/tb_mpe.sv --top-module tb_mpe
obj_dir/Vtb_mpe
```

Each test prints `TB_RESULT checks=<n> failures=<n>`. The tests are:

- `tb_dsp_group`, `tb_vpu`, `tb_mpe`: the DSP chain and the matrix engine, checked against
  reference dot products in every sparsity mode.
- `tb_flightllm_top`: the whole accelerator at reduced size (3 cores, 4 MPUs, 2 HBM
  channels). It runs one program on all cores:
  - load the LUTs;
  - load activations, 4-bit weights and indices;
  - two MVs, with a SiLU overlapping the second;
  - a barrier, then a broadcast ADD gathered through the ring;
  - a 4:16-sparse MM, then a Softmax;
  - stores.

  Every stored value is compared with a model inside the test. The test also counts
  dequantisation, MV and MM chunks, OAU use, overlapped issue, ring packets, barriers and
  the length-table miss. It fails if any of them is zero.
- `tb_flightllm_full`: the same program with the top at its default sizes (3 cores x 64
  MPUs x 2 VPUs, 8 HBM channels per core): 500 checks. It takes about two minutes to build
  and about one second to run.

In these programs the three cores leave the barrier in a fixed order. Their broadcasts then
interleave on the ring without colliding. So they never trigger the ring stop's back-pressure path, where a local send waits behind
forwarded traffic. They report its cycle count without requiring it. `tb_remote_sfu_link`
covers that path instead: it joins three ring stops and feeds them dense random traffic.
It checks that every packet reaches each other core exactly once, one cycle per hop, and
that local sends stall.
- `mem_model`: a behavioural memory port used for DDR.
