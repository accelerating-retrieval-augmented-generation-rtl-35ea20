# Appendix: RTL of the IKS near-memory accelerators

This appendix describes a SystemVerilog version of the digital part of the
Intelligent Knowledge Store (IKS). It covers the eight near-memory
accelerators (NMAs), their context buffers, the control unit, the broadcast
network-on-chip and the 64 processing engines of each NMA. The CXL
controller, PCIe uplinks, LPDDR5X memory controllers, PHYs and packages are
not built. Their places are taken by plain ports.

## Structure

| Module | Role |
|---|---|
| `iks_top` | Device: 8 NMAs. Routes host accesses by address bits [20:18]. |
| `nma` | One NMA: context buffers, control unit, broadcast stage, 64 engines. |
| `context_buffer` | 64 context buffers of 4 KB each, the offload registers and the doorbell. |
| `nma_control_unit` | Offload FSM. Generates DRAM row reads and controls the engines. |
| `broadcast_noc` | One register stage that hands each DRAM row to all active engines. |
| `processing_engine` | Query scratchpad, dot-product unit, top-K unit and output scratchpad. |
| `query_scratchpad` | 2 KB (1024 FP16 elements), with a host port and an engine port. |
| `dot_product_unit` | 68 MAC lanes, score registers, and a 68-cycle read-out through SEL. |
| `mac_array` | The 68 FP16 MAC units with their MAC REG and Score REG. |
| `topk_unit` | Ordered list of 32 (score, address) pairs. Takes one insertion per cycle. |
| `output_scratchpad` | Copy of the final list, readable by the host. |
| `sync_fifo` | Tag queue for outstanding DRAM reads. |
| `iks_pkg` | Sizes, types and the FP16 arithmetic. |

All parameter defaults are the paper's sizes:

- 8 NMAs
- 64 engines
- 68 lanes
- K = 32
- 1024-element query scratchpad

## Offload flow

The offload follows the doorbell protocol of the paper.

1. The host writes one query vector into the query scratchpad of each context buffer it uses.
2. The host writes the offload registers:
   - base address B of the first embedding vector
   - vector dimension VD
   - number of vectors N
   - number of queries NQ
3. The host writes a non-zero value to the doorbell.
4. The control unit sees the doorbell. It clears the top-K lists and enables engines 0..NQ-1.
5. The control unit reads VD x ceil(N/68) rows of 136 bytes.
6. The control unit waits for the last scores to drain.
7. The control unit copies every list into its output scratchpad and writes the doorbell back to 0.
8. The host sees the doorbell change and reads the 32 entries of each output scratchpad.
9. The host merges the eight partial lists itself.

The coherent doorbell cache line of the paper is modelled as a register that both sides can access. The paper's step of moving the context from the CXL cache into the NMA is folded into the host writing the scratchpads directly.

## Host address map (own choice)

| Address bits | Meaning |
|---|---|
| [20:18] | NMA |
| [17:12] | context buffer (engine) |
| [11:0] | offset inside the buffer |

Offsets inside a context buffer:

| Offset | Content |
|---|---|
| 0x000–0x7FF | query elements, at offset 2·j |
| 0x800–0xBFF | output entries: 32 words of 64 bits, `{valid, 0, score[15:0], addr[35:0]}` |
| 0xC00 | B |
| 0xC08 | VD |
| 0xC10 | N |
| 0xC18 | NQ |
| 0xC20 | doorbell |

The registers belong to the NMA. They are visible in every context buffer.

## Data layout

The embedding vectors follow the paper's column-major blocks of 68.

- Row j of block b is at B + b·136·VD + 136·j.
- Byte offset 2·l within a row is lane l, which is vector 68·b + l.

The rows of an offload are therefore consecutive 136-byte steps from B. The paper's figure prints the last rows as "B + (N−67)·136·VD". That does not match its own formula for block indices. The RTL follows the first rows of the figure.

Each score is reported with the address of its vector's first element: block base + 2·l. If N is not a multiple of 68, the last block is partly filled. Its unused lanes are never sent to the top-K unit.

## Dot-product timing

Each accepted row carries dimension j of 68 vectors. All 68 lanes multiply it by the query element j of their engine.

- The broadcast stage presents the query-scratchpad address one cycle ahead, so the synchronous SRAM read lines up with the row.
- The first dimension of a block starts a new sum.
- After the last dimension, the 68 sums are loaded into the score registers in the next cycle.
- The score registers are then streamed to the top-K unit, one per cycle, over 68 cycles.

When VD ≥ 68 the read-out overlaps the next block and costs nothing. The paper only covers this case.

When VD < 68, the last row of the next block is held back until the read-out is far enough along (own choice). This shows up as a stall. With VD = 70 and three blocks, a dot-product unit is idle after 3·VD + 69 cycles. The testbench checks this exactly.

An NMA at full memory rate takes about ceil(N/68)·VD + 68 + a few cycles per offload.

At that rate a 64 GB package takes 64 GB / 136 B/cycle at 1 GHz = 0.47 s. This matches the 470.6 ms the paper gives for the 512 GB corpus.

## Top-K

Each top-K unit is a shift-and-compare list of 32 entries. An incoming score is compared with all entries in parallel. Entries below the insertion point move down by one and the last entry drops out. This takes one score per cycle, which equals the read-out rate.

The paper's text says a larger incoming score is ignored. Retrieval, however, keeps the largest inner products. The default (`KEEP_LARGEST = 1`) keeps the largest scores. `KEEP_LARGEST = 0` gives the literal wording. On equal scores, the earlier entry stays first.

## Number format (own choice)

The paper only says FP16 multiply-accumulate. The RTL uses the following:

- IEEE binary16.
- Multiply, then add, each rounded to nearest-even (not fused).
- Subnormal results and inputs are flushed to zero.
- Exponent 31 is treated as infinity. There is no NaN handling.
- The accumulator is FP16, because the paper's MAC figure shows a 2-byte score register.

The testbenches compute the same rounding independently, using real numbers.

## Deviations and gaps

- The following are not built: the CXL controller, PCIe controllers, memory controllers, LPDDR5X PHYs and the packages. The host-side merge of the partial lists and multi-device operation are also not built.
- The memory port is a valid/ready read request with in-order responses. Up to 32 reads can be outstanding.
- Memory-expander mode is not modelled. In that mode the host reads the LPDDR5X directly through CXL.mem.
- Reset is asynchronous and active-low for control state. Scratchpad SRAMs have no reset.
- The 68 MAC lanes are written as one loop in one module rather than as 68 instances. The hardware is the same.

## Verification

Each module has a self-checking testbench in `tb/` that compares against a reference model.

The behavioural memory model (`tb/lpddr_model.sv`) returns rows after a fixed latency with random gaps.

The end-to-end tests run whole offloads and count every mechanism seen. A mechanism that never occurs counts as a failure. The mechanisms are:

- broadcast stalls
- ignored scores
- partly filled blocks
- several queries per pass
- memory gaps

The tests also check offload duration against the formula above.

`tb_iks_top` uses a reduced device: 2 NMAs × 4 engines. That is the largest whole device simulated. `tb_nma` runs one NMA with 4 engines.

The default-size device has 8 × 64 × 68 FP16 MAC lanes. Compiling it with Verilator took more than 10 minutes of C++ compilation, so no default-size simulation is included. The default sizes are linted and elaborated only.

Simulation with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/iks_pkg.sv tb/iks_tb_pkg.sv \
  rtl/*.sv tb/lpddr_model.sv tb/tb_nma.sv --top-module tb_nma
./obj_dir/Vtb_nma +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.
