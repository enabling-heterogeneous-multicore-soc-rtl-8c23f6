# A coherent 4-core RISC-V tile SoC on a 3x3 mesh: RTL model

This is a SystemVerilog model of the memory system of a heterogeneous
multicore SoC in the ESP style. It has four processor tiles, two memory tiles
and one auxiliary tile. They sit on a 3x3 grid and are joined by six
physical network-on-chip (NoC) planes. The model covers:

- the coherence protocol, a directory-based MESI with an extra Valid state;
- RISC-V atomics (AMOs, and LR/SC) carried over AXI5 atomic transactions;
- invalidation of the core's write-through L1 from the L2 over the ACE snoop channel;
- cache flushing through memory-mapped socket registers;
- DMA into the last-level cache.

The CPU pipelines, the instruction caches, the DDR controllers and the
auxiliary-tile peripherals are not modelled. Each of them connects at
top-level ports.

## 1. The design

### Floorplan and NoC

```
      x=0        x=1        x=2
y=0   empty      cpu 0      cpu 1
y=1   aux        cpu 2      cpu 3
y=2   mem 0      empty      mem 1
```

Tile index = 3*y + x. Each plane is a mesh with one 5-port router per tile
(`noc_router`, `noc_mesh`).

- **Routing is lookahead, dimension-ordered (X then Y).** A flit arrives
  already carrying the output port (`flit.la`) it takes at this router. The
  router switches on that field and computes `la` for the next router in
  parallel. One hop costs one cycle. A lone flit is measured at 1 cycle plus
  1 cycle per hop.
- **Every packet is a single flit.** Each flit is about 190 bits and carries
  a whole 16-byte line.
- **Buffering and arbitration.** Each input has a 2-entry FIFO. Each output
  uses round-robin arbitration.

| plane | traffic |
|-------|---------|
| 1 | coherence requests L2 -> LLC (GETS, GETM, PUTS, PUTM) |
| 2 | coherence forwards LLC -> L2 (FWD_GETS, FWD_GETM, FWD_INV) |
| 3 | coherence responses (data, acks), both ways |
| 4 | DMA requests to the LLC (burst read/write) |
| 5 | DMA responses |
| 6 | socket register writes, their acks, interrupts |

Two address regions each have a home memory tile:

- memory tile 0 is home for addresses with bit 28 = 0;
- memory tile 1 is home for addresses with bit 28 = 1.

### Processor tile (`proc_tile`)

```
core data port -> l1_dcache --AXI--> axi_ifetch_mux --AXI--> riscv_amo_adapter --AXI--> l2_cache <-> NoC planes 1-3
core fetch port -------------------^                                                       |  ACE AC (MakeInvalid)
                                                                                            v
                     l1_dcache <-- dcache_inval <-- ace_inval_demux --> instruction-cache invalidation port
socket_io (plane 6): L2 flush register, interrupt line
```

- **`l1_dcache`: the L1 data cache.** It is write-through, with
  32 KiB = 2048 lines of 16 bytes. Its organisation:
  - Loads hit in one cycle. A missed load reads the line over AR/R.
  - Stores write through and complete on B.
  - An AMO drops the line from the L1 and leaves as one AW whose AXI5 ATOP
    field is non-zero.
  - LR is a locked AR with `ar.user = 1`.
  - SC is a locked AW. `bresp = EXOKAY` means success; `OKAY` means failure.

  The cache has a lookup port used by the invalidation unit. It also has a
  `flush` / `flush_done` pair.
- **`axi_ifetch_mux`** merges instruction-line reads into the data AXI port
  with round-robin arbitration. Instruction reads are marked `prot[2] = 1`.
- **`riscv_amo_adapter`** turns an AMO into two locked downstream
  transactions: a locked AR (`user = 0`) and a locked AW. Between them, an
  ALU computes the new value. It handles ADD, CLR, EOR, SET, SMAX, SMIN,
  UMAX, UMIN and SWAP on 32- or 64-bit operands. LR/SC pass through
  unchanged. The SC's `bresp` is forwarded from the L2 rather than invented
  by the adapter.
- **`l2_cache`** is the private L2. It is 64 KiB = 4096 lines and direct
  mapped. It has one miss register and takes one CPU request at a time.
  Coherence forwards are handled alongside. States:
  - stable: I, S, E, M;
  - transient: IS_D and IM_AD (waiting for data), MI_A (eviction waiting for
    its ack; forwards are answered from the eviction buffer), and the lock
    state XMW.
  - **AMO.** The locked AR of an AMO takes the line in M and enters XMW.
    Forwards to that line stall until the locked AW completes.
  - **LR.** An LR also takes the line in M and opens a reservation.
    - An SC that finds the reservation open writes and answers EXOKAY.
      Otherwise it does not write and answers OKAY.
    - A forward to the reserved line is served, and that closes the
      reservation, but only after it has been held for up to `LR_HOLD` = 32
      cycles (see departures).
    - Any data read or write from the core that reaches the L2 also closes
      the reservation. An instruction fetch (`prot[2] = 1`) does not.
  - **Eviction.** When a line leaves the L2 (replacement or an incoming
    FWD_GETM/FWD_INV), the L2 drives a MakeInvalid on the ACE AC channel.
    The AC carries the line's `prot` bits. `ace_inval_demux` sends it to
    the instruction-cache port if `prot[2] = 1`. Otherwise it goes to
    `dcache_inval`. That unit looks the line up through the L1's dedicated
    port and clears it on a hit. A miss is ignored.
- **L2 flush.** A write to socket register 1 (plane 6) first flushes the L1
  and waits for `flush_done`. It then writes back every L2 line with PUTM
  or PUTS. The register write is acknowledged only when the flush is
  complete.

### Memory tile (`mem_tile`, `llc`)

- **`llc`** is a 512 KiB slice of 32768 lines, direct mapped. Each line
  keeps a directory entry: a state (I, V, S, EM), an owner and a 9-bit
  sharer vector.
- **Blocking.** One request is processed at a time. The others wait in the
  NoC.
- **Coherence requests.**
  - GETS to a line in M or E forwards FWD_GETS to the owner.
  - GETM invalidates sharers (FWD_INV, invalidation acks collected by the
    LLC) or forwards FWD_GETM to the owner.
  - PUTS and PUTM update the directory.
  - A victim that is still cached above is recalled before it is replaced.
    Dirty victims are written to DRAM; clean ones are not.
- **DMA.** A DMA request (plane 4) carries a start address and a length in
  lines. It is processed one line at a time. Each line is first recalled
  from an owner or sharers and then read or written. It is left in state V,
  which means valid in the LLC and cached nowhere above.
- **LLC flush.** A write to socket register 2 writes back and invalidates
  every line. It is acknowledged on plane 6 when done.

### Top level (`esp_soc`)

| ports | meaning |
|-------|---------|
| `clk`, `rst_n` | single clock, asynchronous active-low reset |
| `core_req_*`, `core_rsp_*` [4] | each core's data port (`core_req_t`: op LD/ST/AMO/LR/SC, addr, wdata, be, atop) |
| `fetch_*` [4] | instruction-line reads (16 B) |
| `ic_inval_*` [4] | MakeInvalid requests routed to each core's instruction cache |
| `irq` [4] | interrupt level of each processor tile (set by IO_IRQ flits on plane 6) |
| `mem_req_*`, `mem_rsp_*` [2] | each memory tile's DRAM channel: line-wide read/write, reads answered in order |
| `aux_tx_*`, `aux_rx_*` [6] | the auxiliary tile's local port on each plane: inject or receive raw flits (register writes, interrupts, DMA) |

All types are in `rtl/esp_pkg.sv`. Parameters `L1_SETS`, `L2_SETS` and
`LLC_SETS` default to the full sizes.

## 2. Simulating

You need Verilator 5 with `--timing`. Each testbench is self-checking and
ends by printing `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl -Itb rtl/esp_pkg.sv tb/tb_esp_soc.sv --top-module tb_esp_soc
./obj_dir/Vtb_esp_soc
```

Replace `tb_esp_soc` with any other `tb/tb_*.sv` to run a unit test. Notes:

- The package must come first on the command line.
- Other modules are found through `-Irtl -Itb`.
- `tb_esp_soc` instantiates the SoC at full size (1 MiB total LLC). It runs
  in about a second.

| testbench | what it checks | checks |
|-----------|----------------|--------|
| `tb_noc_router` | every flit leaves on the right port exactly once, in order per flow, with the right next-hop `la`; under random back-pressure | 1227 |
| `tb_noc_mesh` | latency = 1 + hops for all pairs; all-to-all random traffic delivered intact | 704 |
| `tb_l1_dcache` | hits/misses against a memory model, write-through, invalidation port, refill killed by a concurrent invalidation, LR/SC/AMO encodings, flush | 619 |
| `tb_dcache_inval` | only MakeInvalid triggers lookups; hit -> invalidate | ~1000 (random) |
| `tb_ace_inval_demux` | routing by `prot[2]`, no loss or duplication | 1501 |
| `tb_axi_ifetch_mux` | ID/prot routing of responses, fairness | 462 |
| `tb_riscv_amo_adapter` | all nine AMO ops at 32 and 64 bits vs a reference, locked AR/AW, LR `user`, SC bresp forwarded | 1440 |
| `tb_socket_io` | flush ack only after `flush_done`, interrupt set/clear | ~130 (random) |
| `tb_l2_cache` | MESI transitions, forwards in each state, XMW stall, LR/SC success and failure, fetch keeps the reservation, MakeInvalid with prot, flush order | 31 |
| `tb_llc` | directory transitions, forwards and invalidations, victim recall, DRAM write-back only for dirty lines, DMA left in V, flush | 30 |
| `tb_esp_soc` | end to end: sharing, migration, 4-core AMO counter, 4-core LR/SC counter, fetch during LR, L1 invalidation, evictions, DMA, both flushes, interrupts; prints a count per mechanism | 49 |

Each block was also checked against a deliberately broken copy, for example
a wrong lookahead port, no XMW stall, or GETM not invalidating sharers. The
corresponding testbench reports failures on every such copy.

## 3. Departures from the published design

- **Caches are simplified.** Every cache is direct mapped and blocking,
  with a single miss register. ESP's caches are set-associative with
  several MSHRs. Capacities are the published ones: 64 KiB L2 and 512 KiB
  per LLC slice. The line size (16 B) and the L1 size (32 KiB) are
  assumptions.
- **The L1 is a stand-in.** `l1_dcache` replaces the CVA6 write-through
  data cache, so the invalidation behaviour has been shown on this stand-in
  only. It keeps the same interface ideas: an AXI master with ATOP, LR via
  `ar.user`, and SC status via `bresp`, plus a dedicated invalidation
  lookup port and `flush`/`flush_done`.
- **LR holds off forwards briefly.** The published design serves a forward
  to the reserved line immediately and closes the reservation. Here a
  forward is held for up to 32 cycles (`LR_HOLD`; set it to 0 for the
  published behaviour). With four cores looping on LR/SC to one word, the
  immediate policy livelocked in simulation. Each core's GETM stole the line
  between another core's LR and SC.
- **Instruction fetch near an atomic.** A fetch that would evict the line of
  an in-flight AMO waits for the AMO's write. A fetch that evicts an LR line
  is served and ends the reservation.
- **No multi-flit packets or flow-control classes.** A whole line fits in
  one flit. Deadlock freedom rests on the separate planes for request,
  forward and response.
- **Own encodings and address split.** The message encodings, socket
  register indices and the bit-28 address split are choices made for this
  model.
- **DMA coherence modes.** Of the accelerator coherence modes, only
  DMA through the LLC is built. The mode where DMA goes straight to DRAM
  past the LLC is not. The LLC flush register that such a mode relies on is
  built and tested, but nothing in the memory tile routes DMA around the LLC.
- **Not modelled:**
  - the CVA6 pipelines and instruction caches (ports only);
  - the DDR controllers (a behavioural model is in `tb/dram_model.sv`);
  - the auxiliary tile's Ethernet, UART, interrupt controller, boot ROM and
    frame buffer (the aux ports stand in);
  - accelerator tiles;
  - DVFS and monitors.
- **No software results can be reproduced.** Running Linux SMP and the
  CRONO graph benchmarks (SSSP, APSP, BC, BFS, DFS, TSP, CC, TC, PR, CD on
  1, 2 and 4 cores) needs real cores. The published speed-ups are 2 cores
  53-70% (geomean 58%) and 4 cores 26-42% (geomean 34%). The hardware here
  has the four coherent tiles and the published cache sizes those runs
  used, but the input sizes were not published.

## 4. How far to trust it

- **Well exercised.** The NoC (exhaustive latency, random traffic) and the
  atomics adapter (reference model) are well exercised.
- **Checked directed and by random mixes, not formally.** This covers the
  coherence protocol in the L2 and LLC:
  - directed tests of each transition;
  - a 4-core random-ish mix end to end;
  - assertions on response counts.

  Corner cases with three or more racing requesters to one line while an
  eviction is in flight are covered only by the end-to-end mix.
- **Not timing-closed.** No synthesis timing results are given. The full
  caches are large flop arrays in this model, not SRAM macros. A real
  implementation would map the `data`/`tags` arrays to memories.
- **Two-state simulation only.** No X-propagation checks.
