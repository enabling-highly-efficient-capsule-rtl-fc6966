# PIM-CapsNet logic layer in SystemVerilog

This is RTL for the logic layer of a Hybrid Memory Cube that runs the
dynamic-routing procedure of capsule networks. It follows "Enabling Highly
Efficient Capsule Networks Processing Through A PIM-Based Architecture
Design" (HPCA 2020). The host GPU keeps the convolution layers. The routing
steps are u_hat = u·W, s = Σ c·u_hat, v = squash(s), b += v·u_hat and
c = softmax(b). They run on processing elements (PEs) placed in every vault.

## Structure (rtl/)

| File | Role |
|---|---|
| `pim_pkg.sv` | Shared types: 34-bit address, 16-byte block, PE command, micro-op, FP32 constants |
| `fp32_mul.sv`, `fp32_add.sv`, `pe_shifter.sv` | The three PE units: multiplier (1), adder (2), shifter (3) |
| `pe_op_controller.sv` | Steps the mux/unit flows. MAC 1-2. Exponential: BS(log2e·x + Avg + b − 1) and one recovery multiply. Inverse square root: shift-seed + Newton. Reciprocal: seed + two Newton steps |
| `pe.sv` | PE: 32-entry data buffer, operand muxes, unit chain, block load/store port |
| `addr_map.sv` | PIM-CapsNet address mapping (vault ID on top; bank/block split set by the 3-bit sub-page indicator) |
| `sub_mem_ctrl.sv` | Vault memory controller: per-bank round-robin, host/remote port, requests to other vaults, queue length Q |
| `sync_fifo.sv` | Per-PE command queue |
| `vault.sv` | 16 PEs and the sub-memory controller |
| `vault_crossbar.sv` | Switch between the host link and the vaults; also carries traffic between vaults |
| `rmas.sv` | Runtime memory access scheduler: n_h = sqrt(n_max·γh/(Q̄·γv)), given to the vaults with the shortest queues |
| `pim_capsnet_top.sv` | NV vaults, crossbar, RMAS and command dispatch |

The compiler decides off-line how work is spread over the B, L or H
dimension. The host issues PE commands that name a vault and a PE. It waits
for `vault_busy` to fall between routing phases.

## What follows the paper, and what is this design's own

- **From the paper:**
  - 16 PEs and 16 banks per vault.
  - 16-byte blocks.
  - The Fig 12(b) address layout.
  - The PE units and flows of Fig 10.
  - The exponential approximation with the Avg term and a one-multiply accuracy recovery.
  - The RMAS cost model.
- **This design's choices:**
  - Command encoding.
  - Data-buffer depth.
  - Command-queue depth.
  - Rounding behaviour.
  - The one-outstanding-request rules.
  - Crossbar arbitration.
  - The way Q is counted.
  - The recovery constant (1.0000574): the mean shortfall of the approximation over [-8, 8).
- **Size:** The top's default vault count is 2, not 32. Synthesising 32 flattened vaults ran out of memory. The RTL accepts NV = 32.
- **Not built:**
  - DRAM dies, TSVs and SerDes links.
  - The host GPU.
  - The off-line execution-score distributor.
  - The default HMC address mapping (the baseline).

## Verification (tb/)

- **Per-block testbenches:** each block has a self-checking testbench. Most compare against a reference model on random inputs.
- **DRAM model:** `hmc_dram_model.sv` is a behavioural model of the DRAM banks. It models latency and bank busy time.
- **End-to-end test:** `tb_pim_capsnet_top` runs a full small routing problem on the top at its default size: 4 input sets, 4 + 2 capsules, 3 iterations, over 2 vaults. It checks:
  - v against a double-precision model, within 1 %;
  - that bank conflicts, crossbar traffic, host traffic, both RMAS outcomes, every PE operation and two sub-page sizes all occurred.
- **Fault copies:** each module also has a deliberately broken copy. The module's own testbench catches each one.
