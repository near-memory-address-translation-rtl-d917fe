# DIPTA: near-memory address translation in the DRAM vault

Processing units placed inside a 3D-stacked memory (MPUs) want to use the
same virtual addresses as the host CPU. A conventional TLB plus page-table
walk is a poor fit there: the memory is far larger than any TLB reaches, and
a walk may have to cross the memory network several times. DIPTA
(Distributed Inverted Page Table, from "Near-Memory Address Translation" by
Picorel, Jevdjic and Falsafi) removes translation from the critical path with
two ideas:

* **Set-associative virtual memory.** A virtual page may only live in one of
  `ASSOC` (here 4) page frames, the *memory set* named by some of its VPN
  bits. So the virtual address alone says which vault, which set and, with
  the data layout below, which DRAM row hold the data.
* **An inverted page table next to the data.** Each vault keeps one entry per
  page frame it owns (VPN, ASID, flags). The vault looks it up *while* the
  DRAM row opens, and checks the translation when the data comes back.

This RTL implements the translation logic of one vault: the SRAM inverted
page table, the way predictor, the address mapping of the page-interleaved
layout and the controller that runs translation and data fetch in parallel.
It also gives the address arithmetic of the in-DRAM variant of the table.

## The request path and its timing

```
 MPU request (VA, ASID)
        |
        v
  interleave_mapper --- set ---> dipta_table (8-cycle lookup, 4 ways compared)
        |          \--- set ---> way_predictor (1-cycle read)
        | row
        v
   ACT row ........ tRCD ........ RD column(predicted way) ...... tCAS ...... data
        |                            ^                                   |
        |   translation ready at +8  |  prediction used here             v
        +----------------------------+---------------------- check hit / way
                                                                          |
              hit, predicted way  -> return block (no extra time)         |
              hit, other way      -> RD column(true way), same open row, +tCAS
              no entry            -> page-fault response to the MPU
```

All times are cycles of the 2 GHz logic clock. The DRAM values are the
nanosecond timings of the evaluated HMC-like stack rounded up: tRCD = tCAS =
tRP = 23 (11.2 ns), tRAS = 45 (22.4 ns), tWR = 29 (14.4 ns). With the
defaults a read that hits the predicted way is answered 1 + tRCD + tCAS = 47
cycles after it is accepted, which is exactly what the fetch would take with
no translation at all: the 8-cycle table lookup is completely hidden. A
misprediction costs one more column access (tCAS) to the row that is still
open, and never a second activation. A page fault is reported at the time
the data would have arrived.

Writes are not described by the proposal. Here a write never uses the
prediction (a wrong guess would corrupt another page): it waits for the
translation, which is done long before tRCD has elapsed, and writes the
translated way, so writes cost nothing extra either; a write to an unmapped
page faults.

## Address layout: why the row is known before the translation

`interleave_mapper` splits the 48-bit virtual address as

| bits     | field                                               |
|----------|-----------------------------------------------------|
| 47..31   | upper VPN bits, only checked against the table      |
| 30..16   | memory set inside the vault (15 bits, 32768 sets)   |
| 15..12   | vault (16 vaults)                                   |
| 11..10   | which of the set's 4 DRAM rows                      |
| 9..6     | block within that quarter page                      |
| 5..0     | byte within the 64 B block                          |

The four 4 KB pages of a set share four consecutive 4 KB DRAM rows, but not
one page per row: every page is cut in four quarters, row *j* of the set holds
quarter *j* of all four pages, and way *w* sits in block columns
16w..16w+15. The top two page-offset bits therefore select the row, and only
the column depends on the way. This is the general form of the two-way
picture in the proposal (even rows hold first halves, odd rows second
halves). Which VPN bits select the vault is not specified there; the choice
above (lowest VPN bits) is this design's.

## The way predictor

A tagless table of 1024 two-bit entries (256 B per vault) remembers the last
way used. It is indexed by XOR-folding the 15 set bits onto 10 bits (set bit
*i* goes to index bit *i* mod 10); vault bits are not part of the hash, so
each vault's predictor only sees its own traffic. It is read when the row is
activated and trained with the translated way on every read that hits. The
proposal reports 69-91 % accuracy on pointer-chasing kernels and 96-99 % on
server workloads. `tb_dipta_vault` uses uniformly random ways (about 25 %
accuracy) to exercise the replay path. `tb_kernel_traffic` imitates the
per-vault access pattern of the hash-table, skip-list and BST kernels over a
3000-page node pool plus a 40-page hot segment that conflicts with it in
way 1; it measures about 92 %, 98 % and 98 %. This is an imitation of the
pattern on one vault, not a replay of the real traces, so the numbers only
show the mechanism at work.

## The inverted page table (`dipta_table`)

One entry per page frame: valid bit, 12-bit ASID, 36-bit VPN, 12-bit flags
(61 bits, under 8 B). A vault of an 8 GB, 16-vault chip owns 512 MB = 131072
frames, i.e. 32768 sets of 4 ways, about 1 MB of SRAM per vault (16 MB per
chip, as in the proposal). The four ways are four arrays read in the same
cycle and compared with the request's VPN and ASID; the first valid match is
the hit. The proposal gives an access time of 8 cycles; the model reads in
one cycle and delays the result through 7 registers, and accepts one lookup
per cycle. Flags are returned to the MPU but not interpreted.

The OS writes entries through the update port: after servicing a page fault
it installs the new translation and the MPU retries; on an unmap or
shootdown it writes the entry with `valid = 0`. Because the table is
inverted, an update touches exactly one entry in one vault. Updates are
accepted only between requests.

After reset both the table and the predictor clear themselves, one set (one
entry) per cycle; the vault raises `req_ready` only after that, 32768 cycles
(16 us) at the default size.

## In-DRAM DIPTA layout (`indram_layout_mapper`)

The proposal's second implementation keeps the translations in DRAM itself:
block 0 of every 4 KB row is metadata, and 63 page frames are packed into 64
consecutive rows, each page straddling two rows. The metadata block holds
two entries: the page that ends in the row (first half) and the page that
starts in it (second half). For a data block address *ba* = frame*64 + block:

    row    = ba / 63
    slot   = ba mod 63 + 1
    entry  = second half if row == (frame*64)/63, else first half

`indram_layout_mapper` computes exactly this. It is the direct-mapped layout;
the set-associative in-DRAM layout is only sketched in the proposal (one
metadata block for all ways, wasted blocks for symmetry) without the block
placement, so the 4-way vault uses the SRAM table and this mapper stands
alone.

## Files

| file | contents |
|------|----------|
| `rtl/dipta_pkg.sv` | widths, the entry struct `pte_t`, response kinds, DRAM commands |
| `rtl/dipta_vault.sv` | top: one vault's translation logic |
| `rtl/dipta_vault_ctrl.sv` | request sequencing, DRAM command timing, predictor training |
| `rtl/dipta_table.sv` | SRAM inverted page table |
| `rtl/way_predictor.sv` | way predictor |
| `rtl/interleave_mapper.sv` | address split of the interleaved layout |
| `rtl/indram_layout_mapper.sv` | in-DRAM layout arithmetic |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_kernel_traffic.sv` | the vault under kernel-like access streams |
| `tb/dram_vault_model.sv` | behavioural DRAM of one vault for simulation |

### Top-level ports (`dipta_vault`)

* MPU request: `req_valid/req_ready`, `req_we`, `req_va[47:0]`,
  `req_asid[11:0]`, `req_wdata[511:0]`.
* MPU response, a one-cycle pulse: `resp_valid`, `resp_kind`
  (`RESP_HIT`, `RESP_HIT_REPLAY`, `RESP_FAULT`), `resp_rdata`, `resp_flags`.
* OS update: `upd_valid/upd_ready`, `upd_set`, `upd_way`, `upd_pte`.
* Vault DRAM: `dram_cmd` (ACT, RD, WR, PRE), `dram_row[16:0]`,
  `dram_col[5:0]` (64 B block), `dram_wdata`; read data on `dram_rvalid` /
  `dram_rdata` exactly `T_CAS` cycles after the RD.

Parameters (defaults = evaluated configuration): `ASSOC=4`, `VAULT_BITS=4`,
`SET_BITS=15`, `WP_ENTRIES=1024`, `TBL_LATENCY=8`, `T_RCD=23`, `T_CAS=23`,
`T_RAS=45`, `T_WR=29`, `T_RP=23`. `ASSOC` must be a power of two, at least 2.

## What is outside this RTL

The MPU cores, the vault's DRAM and its low-level controller, the on-chip
router and the chip-to-chip serial links come from existing stacked-memory
designs and are not part of the proposal's design; they connect through the
ports above. A whole chip is 16 copies of `dipta_vault` behind the router.
The page-fault path beyond the vault (the MPU posting the faulting address in
a memory-mapped queue and interrupting the CPU, the OS handler) is software;
the testbench plays that role through the update port.

Simplifications of this design, not of the proposal: one request in flight
per vault, one DRAM bank per vault, closed-row policy (the row is precharged
after every request), DRAM refresh not modelled. The proposal also allows a
direct-mapped table (one way); this RTL needs `ASSOC` >= 2, and only the
address arithmetic of the direct-mapped in-DRAM table is built. Its remarks on
multi-level memories and on synonyms (not supported by DIPTA either) are not
design and have no counterpart here.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
(watchdog included). With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/dipta_pkg.sv \
        tb/tb_dipta_vault.sv --top-module tb_dipta_vault -o sim
    ./obj_dir/sim

Replace `tb_dipta_vault` by any other `tb/tb_*.sv`. `tb_dipta_vault` runs
the top at its full default size (it spends 32768 cycles on the power-on
clear first) and takes well under a second. It installs pages through the
update port, issues about 600 random reads and writes from an MPU, including
unmapped pages and wrong ASIDs, services faults and retries, invalidates
pages, and checks every response against its own model of the page table,
predictor, layout and memory, including the 47 / 70-cycle latencies. It also
requires each mechanism (predicted hit, misprediction replay, fault, fault
service and retry, invalidation, write, read-after-write) to occur, and the
DRAM model to see no timing violation.
