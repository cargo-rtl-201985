# CARGO: critical region offload hardware

CARGO speeds up network-bound server code by running the small part of it that misses in the caches early, on the network card (NIC). It does this while a packet is still being handled by the NIC, before the CPU core sees it. The code in question is typically a hash-table or index lookup. The NIC walks the lookup with the packet's own key. It reads each piece of memory over PCIe with a *steering tag*, so the data lands in the private cache of the core that will process the packet. When that core runs the same lookup, its loads hit.

The design has two halves:

* **Identification hardware beside the CPU core** (`cri_unit`). It watches committed instructions and learns the *critical region*: the loads that miss in the L2 cache, the instructions that compute their addresses, and the branches and compares that steer them. It also learns where each input register of that region gets its value. Once per epoch of 4096 L2 misses, it ships the region and the register context to the NIC.
* **Offload hardware on the NIC**:
  * a packet scheduler (`pkt_scheduler`);
  * a 256 KB, 4-bank scratch-pad (`nic_scratchpad`);
  * a region executor (`region_executor`), which replays the region for every packet. Each load is issued as a PCIe memory read whose header (`tlp_st_former`) carries the steering tag of the packet's core.

`cargo_top` wires both halves together. The CPU core, caches, DRAM, PCIe link, NIC processor cores and descriptor rings are not part of the design; they appear as ports.

## How the region is learned

All of these live inside `cri_unit`.

| Block | What it keeps | Rule |
|---|---|---|
| `reg_pc_map` | For each of 16 registers, the producer of its current value. A producer is a PC, DEAD, INVALID, or NONE for an unused operand. | When the lowest-PC instruction of the region commits, one *invocation* starts. At that point RBP, RSP, RSI, RDI, RCX, RDX, R8 and R9 become DEAD, meaning "must come from outside". All other registers become INVALID. |
| `ctx_icache` | 256 entries, 16 ways. Each entry holds PC, decoded op, PRED1, PRED2, READY, VALID and #ACCESS. | An L2-missing instruction is allocated with the producers from the map. A producer that is not cached yet is put on an 8-entry pending list and allocated the next time it commits. Branches are allocated READY when their PC or target is inside the region's PC span. TEST/CMP inside the span are kept so the NIC has the flags. A background sweep marks an entry READY when each producer is DEAD/NONE or is itself READY. Replacement takes the least-accessed way. |
| `bwd_edge_tracker` | One register checkpoint | A taken backward branch that jumps from above the region to below it is remembered, together with the register values at that moment. If the region is re-entered and the registers it reads still hold those values, the branch is added to the region. |
| `reg_value_predictor` | IN table with 48 entries and GEN table with 132 entries | An IN value is the first value an input register has in an invocation. A GEN value is a later value written to that register inside the region. Each register keeps up to 8 IN values; when all 8 are used, the least-seen one is replaced. A value is *valid* when 8·GEN > IN, i.e. GEN/IN is above 1/8. The prediction is the valid value with the most GEN uses. |
| `reg_state_table` | Per register: NONE, TRACK, READY (with a value) or READY_DYN (with an argument number) | Each new IN value is compared with the recent results of the NIC's user routines, such as a key hash. A match means the register is filled per packet from that argument (READY_DYN). Otherwise a valid prediction makes it READY. |
| `region_builder` | Miss counter | After 4096 L2 misses it sweeps the cache, sends every valid READY instruction, sends one beat with the register context, and then flushes all tables. |

Which register is a candidate for an input value:

* If neither producer of a cached instruction is known (both DEAD or unused), its destination is the candidate. In the paper's example this is RAX from a PC-relative load.
* Otherwise, a DEAD source is the candidate. In the paper's example this is RDX, the index of the bucket load.

## How the NIC runs it

`region_executor` holds one active region of up to 32 instructions. A new region is staged and swapped in between packets. Instructions beyond 32 are dropped.

When a region is installed, its READY register values are written to the top 4 KB of the scratch-pad.

For each packet from the scheduler, the executor:

1. sets READY_DYN registers from the packet's arguments;
2. reads READY registers back from the scratch-pad;
3. runs the region from its lowest PC:
   * LOAD computes `base + (index << scale) + disp`, or `PC + disp` for a PC-relative load. It sends one PCIe read and waits for the completion. Loads are 8 bytes, or 1 byte zero-extended.
   * MOV and ADD update registers; TEST and CMP set a zero flag.
   * JMP, JE and JNE continue at the lowest region PC at or after the target. Without a branch, execution continues at the next higher PC.
   * An instruction that reads an unknown register is skipped, and its result becomes unknown.
   * A conditional branch on an unknown flag ends the run.
   * A run ends after 64 steps.

When the run finishes, the packet is handed on with the number of its destination core.

PCIe read headers follow the PCIe 3.0 layout:

* TH = 1.
* The 8-bit steering tag is the core number, placed in the byte that normally holds the byte enables.
* A 3-DW header is used below 4 GB and a 4-DW header above.
* Each read is one 64-byte block (Length 16 DW).
* Requester ID is 0x0100 and the processing hint is 00.

## Parameters (defaults)

| Parameter | Value | From the paper? |
|---|---|---|
| Context cache | 256 entries, 16 ways | yes |
| Register map | 16 entries | yes |
| IN / GEN tables | 48 / 132 entries, 8 IN values per register, valid above 1/8 | yes |
| Epoch | 4096 L2 misses | yes |
| Scratch-pad | 256 KB, 4 banks, crossbar, 2-cycle latency, 6 ports (6 NIC cores) | yes |
| Pending list | 8 | own choice |
| Argument buffer | 8 | own choice |
| Counter width | 16 bits | own choice |
| Scheduler | 16 deep, 4 cores, 2 arguments per packet | own choice |
| Region buffer | 32 instructions | own choice |
| Step bound | 64 | own choice |
| PCIe request | 64-byte block size, requester ID, hint | own choice |

## Interfaces of `cargo_top`

* `cm_valid`, `cm` (`commit_t`): one committed instruction per cycle. Each carries its PC, its decoded micro-op, the source and destination values, an L2-miss flag, and the branch outcome.
* `arg_valid`, `arg_id`, `arg_val`: results of the NIC user routines, reported to the identification side.
* `pkt_valid`, `pkt_ready`, `pkt_args`: packets entering the NIC, with their user-routine results. `pkt_queue_len` is the scheduler occupancy.
* `mem_req_*`: PCIe reads, giving the header, the 4-DW flag and the address.
* `mem_rsp_valid`, `mem_rsp_data`: completions, one at a time, in order.
* `nc_*`: scratch-pad ports 1 to 5 for the other NIC cores. Port 0 belongs to the executor.
* `rx_valid`, `rx_core`, `rx_offloaded`: a packet is finished and handed to the receive ring of `rx_core`.
* `gen_rd_*`: observes the first and latest GEN value of one register.
* `ev` (`ev_t`): one pulse per mechanism, for counting. The mechanisms are allocation, pending allocation, branch allocation, backward-edge add, eviction, root, argument match, epoch, region load, executed, skipped, load, step limit, region drop and packet stall.

Timing: every table updates on the clock edge of the commit that changes it. The region appears a sweep of 256 cycles after the 4096th miss. Scratch-pad reads return 2 cycles after the grant. Each NIC load costs the PCIe round trip.

## Differences from the paper and open points

* Producers are stored as full PCs, as the paper's worked example prints them. The paper's storage estimate instead assumes 4-bit producer links, so this cache is larger than its estimate of just over 7 KB.
* A missing producer is allocated on its next execution, as the text says. The worked example instead allocates it at once.
* Keeping compares, refreshing an INVALID producer on a later hit, the micro-op set, and the executor's walking order are this design's choices. The paper does not describe them.
* The paper gives no register-level definition of "used values" for the backward-edge check. Here they are the registers read by the first commit inside the region.
* There is a single executor on the NIC. The other NIC cores, which run the protocol stack and user routines, are outside the design.
* The paper's configurations range from 1 to 16 cores and 10 to 40 Gbps. The design is built and tested with 4 cores. Line rate is set by parts outside the design.

## Verification

Each testbench in `tb/` checks itself and prints `TB_RESULT checks=N failures=M`.

* `tb_reg_pc_map`, `tb_ctx_icache`, `tb_bwd_edge_tracker`, `tb_reg_value_predictor`, `tb_reg_state_table`, `tb_tlp_st_former`, `tb_pkt_scheduler`, `tb_nic_scratchpad` and `tb_region_builder` test single blocks. Among them they cover the paper's worked example, replacement, the 1/8 threshold, the READY_DYN match, the header layout, scheduler order and core rotation, and scratch-pad bank conflicts, latency and read-after-write, and the epoch sweep handshake.
* `tb_cargo_top` runs the whole design at the default sizes, in three phases:
  1. An epoch of unrelated misses overflows a cache set and the NIC's region buffer.
  2. An epoch of memcached-style hash lookups runs at the paper's example PCs: table base, bucket load, chain walk with key compare, and value read. A backward jump bypasses the region.
  3. A burst of 60 packets fills the scheduler.

  For every packet, the NIC's PCIe read addresses must begin with the addresses the lookup really reads, and every read must carry the steering tag of the packet's core. Every `ev` mechanism must fire at least once.
* `cri_unit` and `region_executor` have no testbench of their own. They are checked through `tb_cargo_top`.

## Simulating

All files are plain SystemVerilog. `rtl/cargo_pkg.sv` must come first. For example, the whole-design test:

```
verilator --binary -j 0 --top-module tb_cargo_top rtl/cargo_pkg.sv \
  $(ls rtl/*.sv | grep -v cargo_pkg) tb/tb_cargo_top.sv
./obj_dir/Vtb_cargo_top
```

It finishes in well under a second of simulation time and prints the count of every mechanism. A block test is built the same way with its own top, e.g. `tb_ctx_icache`. Block parameters such as `EPOCH_MISSES` can be lowered through `-G` or a `#()` override to reach an epoch sooner.
