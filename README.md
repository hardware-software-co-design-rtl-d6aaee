# Helios HB-Device logic die in SystemVerilog

## Design idea

An HB-Device puts compute under the DRAM. The logic die is split into a
4 x 4 array of processing engines (PEs). Each PE sits below its own bank
partition and sees only that local memory. Decoding attention for one KV head
is spread over all sixteen PEs:

1. The KV cache of a request is cut into blocks of 64 tokens.
2. The host's block allocator places each block on some PE.
3. Each PE runs tiled (flash-style) attention over its own blocks.
4. The sixteen partial results (running max `m`, running sum `l`, output
   vector `o`) are merged over an on-die mesh. The merge uses a
   reduce-scatter followed by a row all-gather.
5. At the end, every PE in mesh row x holds the x-th quarter of the attention
   output. That is the layout the following projection needs.

New KV rows enter through a device router. They travel over a second mesh to
the PE that owns the block. A transfer buffer in that PE holds them until
they can be written to DRAM without disturbing the attention reads.

The top module is `hb_device`. The HB controllers, the DRAM dies, the
auxiliary die and the bonding are outside the RTL. Each PE's DRAM port is a
port of the top module.

## Number format

The paper computes in FP16. This design uses fixed point throughout:

- stored q, K and V elements are Q8.8 (16 bits). A KV row of 128 elements
  is therefore 2048 bits.
- scores, softmax statistics and outputs are Q16.16 (32 bits).
- the value `0x80000000` stands for minus infinity. It marks an empty
  partial, for example a PE that holds no block.
- `exp` is computed as `2^(x·log2 e)`. The fractional part comes from a
  16-entry table of `2^(-k/16)` with linear interpolation. It is shared by
  the softmax, the merge factors and SiLU (`helios_pkg::fx_exp`).
- the `1/sqrt(d)` factor is folded into q by the host.

## Processing engine (`pe`)

| Part | Module | What it does |
|---|---|---|
| Sequencer | `pe_controller` | Holds the block table (MAX_BLK = 64 entries of block id and token count). Loads K/V tiles and steps the units. |
| Matrix unit | `matrix_unit` | 512 FPUs of 16 MACs. Operand `a` is broadcast; each FPU does a 16-wide dot product per cycle. `clear` starts a new GEMM. |
| Softmax | `online_softmax_unit` | One block of 64 scores per call. Computes the new max, `exp`, the new sum, the rescale factor `alpha` and the probabilities `p`. The two divisions share one reciprocal `1/l`. Lanes beyond the block's token count are masked. |
| Reduction | `reduction_unit` | 128 lanes. It has three modes: plain add, `alpha`-scaled accumulate (local tiles), and FGU-weighted merge (collective). |
| FGU | `fgu` | Combinational. Turns two partials `(m1,l1)` and `(m2,l2)` into the two merge weights of Eq. (1)–(2). |
| Compute buffer | `sram_buffer` | 160 words of 64 rows × 2048 bits (2.5 MB). Has a row-granular write and a whole-word read. It holds the K and V tiles in two slots for double buffering. |
| Transfer buffer | `transfer_buffer` | A FIFO of 10240 rows (2.5 MB) with the address of each row. |
| Collectives | `collective_unit` | Does the reduce-scatter and all-gather of attention partials over the inter-PE NoC. |
| Vector unit | `vector_unit` | 32 lanes, working on the gathered chunk `a_x`. Ops: add, multiply, ReLU, SiLU, `(a−s0)·s1`, sum and sum of squares, and the pairwise mean/variance merge. |
| Routers | 2 × `noc_router` | One for each NoC. |

### Tiled attention timing

Per block, the controller goes through these steps:

1. Load 64 K rows and 64 V rows, one DRAM row per beat, into the free
   compute-buffer slot.
2. Compute `q·K^T` in 8 beats.
3. Run the online softmax in 1 cycle.
4. Compute `p·V` in 4 beats.
5. Accumulate into the running output in 1 cycle.

The compute part takes `6 + H/16 + B/16` cycles, which is 18 cycles at the
default sizes. The next block's load overlaps it. The busy time is
`stalls + 18·nblocks + 1`, and the testbench checks this formula. The block
row address is `base + (block·64 + slot)`, counted in rows of H elements.
This is the paper's fixed-base layout `base + (i·b + j)·H`.

### Transfer buffer and DRAM arbitration

The attention loader always has the DRAM port first. The transfer buffer then
writes in one of two modes:

- **Fine mode:** it writes one row in every cycle the loader leaves free.
  This is the paper's fine-grained storing in the time slack.
- **Coarse mode:** rows accumulate until the count reaches a threshold. Then
  the buffer takes priority and writes until it is empty.

The host sets the mode and the threshold. `CMD_DRAIN` flushes what is left
below the threshold.

## Collectives (`collective_unit`)

The output vector of H elements is cut into 16 chunks. Chunk
`k = x·MESH + y` belongs to PE(x, y). Each attention run has two phases:

1. **Reduce-scatter.** Each PE sends every other PE that PE's chunk of its
   local partial `(o_k, l, m)`. The owner merges the arriving partials one at
   a time, using the FGU and the reduction unit, then divides by `l`.
2. **All-gather along Y.** Each PE sends its finished chunk to the other PEs
   in its row x. Afterwards every PE of that row holds `a_x`, the x-th
   quarter of the output.

Incoming flits are always accepted and parked per source, so the exchange
cannot deadlock.

The inter-PE flit is `{data, l, m, type, src y, src x, dst y, dst x}`.

## Networks on chip (`noc_router`)

There are two independent 2D meshes of the same router:

- five ports (local, north, south, west, east);
- XY dimension-order routing;
- 2-entry input FIFOs;
- round-robin output arbitration;
- valid/ready handshakes.

A router learns its position from the strap inputs `pos_x`/`pos_y`. This
keeps all sixteen PE tiles identical.

The router-NoC flit is `{row, DRAM address, dst y, dst x}`. The device router
feeds it in at PE(0,0)'s north port.

## Device router (`device_router`)

For each incoming KV row, the host gives the target PE, the block, the slot,
and whether the row is a key or a value. The device router forms the DRAM
address `k_base/v_base + block·64 + slot` and sends one flit per cycle into
the router NoC. A one-entry output register absorbs NoC back-pressure:
`kv_ready` goes low while the register is full and blocked.

## Global controller and host commands (`global_controller`)

The host sends one command at a time with `cmd_valid`/`cmd_ready`.

| Command | Effect |
|---|---|
| `CMD_TABLE` | Write block-table entry `cmd_idx` of PE `cmd_pe` (block id, token count). |
| `CMD_NBLK` | Set how many blocks PE `cmd_pe` holds for the request. |
| `CMD_BASE` | Set the K and V tensor base addresses. |
| `CMD_XFER` | Set the transfer-buffer mode (fine/coarse) and the threshold. |
| `CMD_DRAIN` | Flush all transfer buffers. Completes when all are empty. |
| `CMD_ATTN` | Run distributed attention. Completes when every PE has finished its collective exchange. |
| `CMD_VEC` | Apply a vector-unit operation on every PE's `a_x`. |

`evt_done` pulses when a `CMD_DRAIN`, `CMD_ATTN` or `CMD_VEC` completes.

## Parameters (defaults)

| Parameter | Value | Meaning |
|---|---|---|
| `MESH` | 4 | PEs per side |
| `H` | 128 | Head dimension |
| `B` | 64 | Tokens per block |
| `NUM_FPU` × `MACS` | 512 × 16 | Matrix unit size |
| `MAX_BLK` | 64 | Block-table entries per PE |
| `CB_WORDS` | 160 | Compute-buffer words |
| `TB_DEPTH` | 10240 | Transfer-buffer rows |
| `AW` | 32 | DRAM row address width |

With these values, one request can hold up to 64 blocks per PE, which is
65 536 tokens per device.

These models fit:

- OPT 66B at batch 32 and 4K context;
- LLaMA3 70B, Mixtral 8x22B and Qwen3 30B-A3B at batch 64 and 16K context.

The batch and context sizes are the paper's. Each request needs 4 blocks per
PE at 4K context, or 16 at 16K.

DeepSeek 236B (batch 32, 4K context) does not fit at the defaults. Its MLA
latent vector has 576 elements, which needs `H = 576`, a legal value but not
the default.

## Departures from the paper

- Fixed point (Q8.8 / Q16.16) instead of FP16.
- The two-group overlap of matrix and vector work inside a macro block
  (Fig. 9) is not built. The steps of a block run one after another; only
  the loads overlap compute.
- The collective exchange is point to point, not the TidalMesh schedule.
- Only the attention flow is sequenced. The FC, MoE and FFN operator flows
  (Figs. 11–13(b)) and MoE expert selection are not. The vector unit and the
  matrix unit can serve them, but no controller drives them.
- The transfer buffer's threshold is a host setting. The paper adapts it
  dynamically; that policy is left to the host.
- The device router carries only KV ingress. TP/PP/EP traffic and the
  external links are not modelled.
- The DRAM port is one 2048-bit row per cycle per PE. That is narrower than
  the bandwidth of the stacks.
- The query is broadcast from a top-level port. The block allocator
  (Algorithm 2) runs on the host; the `tb_hb_device` testbenches contain a
  model of it to place blocks.
- Not in the RTL: HB controllers, DRAM dies, the auxiliary die, hybrid
  bonding and TSVs, the host, and the NIC/NVLink.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends with `TB_RESULT checks=N failures=M`. The testbenches compare against
behavioural models of the fixed-point arithmetic. To run one:

```
verilator --binary --timing -Irtl -y rtl rtl/helios_pkg.sv tb/tb_pe.sv --top-module tb_pe
```

### `tb_hb_device`

This testbench works on a reduced device: MESH 4, H 32, B 16, 32 FPUs,
MAX_BLK 8. It streams KV rows for several requests and places the blocks
with the allocator model. It covers:

- empty PEs;
- multi-block PEs;
- partially filled blocks;
- fine and coarse storing;
- drains;
- ingress back-pressure;
- a vector op.

### `tb_hb_device_full`

This testbench runs the top at the default, paper-size parameters:

- 4 x 4 PEs, H 128, B 64;
- 512 × 16 MACs;
- 2.5 MB buffers.

It passes 1563 checks. Building it takes about 4 minutes; the simulation
itself takes under a second.

### `tb_hb_device_workloads`

This testbench also runs at the default parameters. It drives one KV head
of a single request at each of the two evaluated context lengths:

| Context | Blocks | Blocks per PE | Models |
|---|---|---|---|
| 4096 tokens | 64 | 4 | OPT 66B (also the context of DeepSeek 236B) |
| 16384 tokens | 256 | 16 | LLaMA3 70B, Mixtral 8x22B, Qwen3 30B-A3B |

The 4K request is written in coarse mode. The 16K request is streamed in
fine mode while attention over the 4K request runs. Both attention results
are checked. Other heads, batch entries and layers repeat the same per-head
work, so they are not simulated. The run passes 1560 checks.
