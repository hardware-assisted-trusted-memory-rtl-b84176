# TDMem engines in SystemVerilog

This repository holds RTL for the two FPGA engines of TDMem, a trusted
memory-disaggregation scheme:

- A **donee** node swaps pages out.
- A **donor** node lends HBM and host DRAM to hold them.

The host kernel's swap path (frontswap) issues four commands: store, load,
invalidate page and invalidate area. The engines carry out those commands on
their own, without the donor's operating system. The donor places each stored
page at a random free address, which hides the donee's access pattern. It
records which machine (MID) owns each page, and it refuses any load or
invalidate from a machine that does not own the page.

Page encryption (AES-GCM in the donee kernel) and the kernel's translation
table are software. They are not part of this RTL.

## Structure

```
tdmem_top
 ├─ donee_engine
 │   ├─ cmd_parser           host words → generators, by queue ID; per-queue store FIFOs (pkt_fifo)
 │   ├─ donee_hbm_alloc      bitmap allocator, 8 GB / 4 KB = 2,097,152 bits in 32-bit words
 │   ├─ store_req_gen        local HBM store from a pre-allocated page cache, otherwise forward
 │   ├─ load_req_gen         local HBM read, otherwise forward
 │   ├─ inv_page_req_gen     free a local page, otherwise forward
 │   ├─ inv_area_req_gen     clear the bitmap and forward
 │   ├─ mem_ic               HBM interconnect (store and load clients)
 │   ├─ pkt_merger ×2        request merger (to network), response merger (network + local)
 │   ├─ pkt_splitter         response splitter (store / load)
 │   └─ rsp_handler          completions and page data to host memory, round robin
 └─ donor_engine
     ├─ pkt_splitter         request splitter by opcode
     ├─ donor_page_alloc ×2  owner tables (8-bit MID per page) for HBM and host DRAM
     ├─ store_rsp_gen        random pick from free lists, record owner, write page, reply address
     ├─ load_rsp_gen         ownership check, then read the page and reply with it
     ├─ inv_page_rsp_gen     free one page if the requester owns it
     ├─ inv_area_rsp_gen     free every page of the requester in both tiers
     ├─ mem_ic ×2            HBM and DRAM ports
     └─ pkt_merger           response merger
```

`tdmem_pkg` holds the shared types.

## Command format

Every command and response starts with a 64-byte header word (`cmd_hdr_t`):

| Field | Width (bits) |
|---|---|
| opcode | 8 |
| src_mid | 8 |
| dst_mid | 8 |
| tier | 8 |
| target_tier | 8 |
| status | 8 |
| remote_addr | 64 |
| page_dma_addr | 64 |
| poll_dma_addr | 64 |

The MID, tier and address field widths are the paper's. The field order, the
opcode byte, the status byte and their codes are this design's own encoding.

Packet lengths:

- A store request is 65 words: the header, then 64 words of page data.
- A load response is 65 words.
- A store response is 1 word.
- A refused load gets a 1-word response with status DENIED.

Invalidations have no response.

Tier codes:

| Code | Tier |
|---|---|
| 0 | donee HBM |
| 1 | donor HBM |
| 2 | donor DRAM |
| 3 | swap device |

Status codes:

| Code | Status |
|---|---|
| 0 | pending |
| 1 | ok |
| 2 | no space |
| 3 | denied |

### Host side (donee)

The host pushes header and page words into the host-to-card stream, tagged
with a queue ID:

| Queue ID | Command |
|---|---|
| 0, 1 | store (two queues) |
| 8 | load |
| 9 | invalidate page |
| 10 | invalidate area |

When a command finishes, the engine writes the response header to
`poll_dma_addr`. The kernel polls that word until the status is no longer 0.
A load first writes its 64 page words to `page_dma_addr` and then writes the
completion.

## Behaviour and timing (250 MHz clock)

### Donee engine

**Local stores.** They take a page from a cache of 8 pre-allocated pages.

- If the command asks for donee HBM and the cache is empty, the store is
  silently redirected to the donor, with target tier donor HBM.
- If the donor has no free page, it answers with status NOSPACE and tier SWAP.
  The kernel then writes the page to its swap device.

**Local load latency.** A local 4 KB load takes the HBM read latency plus 64
cycles, plus about 25 cycles of overhead.

**Allocator.** The donee allocator needs three cycles per page handed out. It
refills its cache in the background.

### Donor engine

**Page allocation.** The donor keeps two free lists, one per tier, of 16
reserved pages each. Each store picks an entry at random.

The allocators refill the lists. Each reservation scans the owner table from a
random word. Together, these give the random placement of the paper's Fig 5:
re-storing a page after invalidation gives a new address, which the end-to-end
test checks.

**Page read times.** With the test memory latencies (HBM 88 cycles, DRAM 235
cycles), a remote page read inside the donor takes about 152 cycles from HBM
and 299 cycles from DRAM. These match the paper's measured 607.7 ns and
1197.36 ns.

### Start-up

After reset, the allocator tables clear themselves at one table word per
cycle. `busy` stays high until they finish.

At full size this takes:

| Table | Cycles |
|---|---|
| Donee bitmap | 65,536 |
| Donor HBM owner table | 32,552 |
| Donor DRAM owner table | 262,144 |

## Differences from the paper and own choices

- **Donor owner tables are on-chip.** The paper stores donor metadata in the
  low HBM. Here the owner tables are arrays inside `donor_page_alloc`, with 64
  owners per 512-bit word. They are synthesizable as large RAMs: about 16 Mbit
  for HBM and 128 Mbit for DRAM. A real part would need them in HBM, behind a
  cache. The HBM data area starts after the 54 MB that Fig 10 gives to
  metadata.
- **Metadata size.** The paper's text gives 8 bits per page. The 6 MB in
  Fig 10 suggests 3 bytes per page. This design follows the text.
- **Donor DRAM size.** The paper does not state it. This design uses 64 GB,
  from the 48 MB : 6 MB metadata ratio in Fig 10.
- **Load responses carry `page_dma_addr`.** Fig 7 shows only the MIDs and the
  poll address for them. Carrying the page address means the response handler
  needs no table of outstanding loads.
- **MID stamping.** The donee engine overwrites `src_mid` in every outgoing
  header with its own MID. Host software therefore cannot pose as another
  machine. The paper does not say where the MID comes from.
- **Network.** The 100 GbE link is vendor IP. Here it is an ideal lossless
  stream between the engines.
- **DMA and memories.** The QDMA engine, the HBM stacks and host DRAM are not
  modelled in RTL. Their ports are brought out at the top.
- **Invalidate area on the donee** clears the whole bitmap. A donee engine
  serves one machine.
- **Not given by the paper, chosen here:** the cache and free-list sizes, the
  LFSR seeds, the queue IDs, and the round-robin interconnect and mergers.

## Workload sizes

The design at its default sizes offers 8 GB of donee HBM, 8,138 MB of donor
HBM and 64 GB of donor DRAM. The paper's workloads fit:

- the six cloud workloads, from 1.5 GB to 10.3 GB;
- the 4 GB STREAM run;
- the 8 GB and 1 GB microbenchmarks;
- the remote part of a 32 GB guest at 40 % local memory.

## Verification

Each testbench is self-checking and prints a `TB_RESULT` line.

| Testbench | What it checks |
|---|---|
| `tb_pkt_fifo` | order, full, fall-through timing, flush |
| `tb_pkt_merger` | packets kept whole, order per source, round robin, one beat per cycle |
| `tb_pkt_splitter` | routing by opcode, dropping of unknown opcodes |
| `tb_donee_hbm_alloc` | clear time, unique pages, full, free, clear, rate |
| `tb_donor_page_alloc` | clear time, reservations, ownership check, free, invalidate area, random spread |
| `tb_tdmem_top` | end to end at reduced sizes (details below) |
| `tb_tdmem_full` | default sizes: one store and load per tier, refused loads, invalidations |

`tb_tdmem_top` runs the whole design at reduced sizes and counts each of these
mechanisms:

- local store and load;
- donor HBM and DRAM store and load;
- a new address on re-store;
- refused loads;
- refused invalidate;
- invalidate page and invalidate area;
- redirect when donee HBM is full;
- NOSPACE and swap fallback.

It also checks load latencies against the memory latency.

The request and response generators, the parser, the interconnect, the
response handler and the two engines have no unit testbenches of their own.
The two system testbenches exercise them.

`tb/mem_model.sv` is a behavioural memory with a fixed latency. It is used for
HBM and DRAM in the tests.

## Simulating

Each testbench builds with plain Verilator 5 (with timing support). For
example, to run the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_tdmem_top rtl/tdmem_pkg.sv tb/tb_tdmem_top.sv
./obj_dir/Vtb_tdmem_top
```

The run ends with a `TB_RESULT checks=… failures=…` line.

- `tb_tdmem_top` runs in about a second.
- `tb_tdmem_full` runs at the default sizes. It simulates the full table
  clears of about 262,000 cycles and takes a few seconds.

To try a smaller system, override the page counts of `tdmem_top`. The page
counts must be multiples of 64.
