# A temporal fence for the on-core state of a 64-bit RISC-V core

Two programs that take turns on one core can talk to each other without any
shared memory. One of them, the trojan, leaves a footprint in a cache, TLB or
branch predictor. The other, the spy, later times its own accesses to the same
structure. The operating system can separate their memory, but not these
timing effects, unless the hardware lets it put every piece of
history-dependent on-core state back into a fixed condition at each switch
between security domains.

This RTL provides that mechanism for an in-order RV64 core of the Ariane
class. It follows the design in *Prevention of Microarchitectural Covert
Channels on an Open-Source 64-bit RISC-V Core* (Wistoff, Schneider,
Gürkaynak, Benini, Heiser). It contains:

* a new instruction, `fence.t` (temporal fence). It carries a 20-bit bitmap
  that selects which state to reset;
* a controller that carries out the fence when the instruction commits;
* every flushable structure of the evaluated core, at its evaluated size. That
  is a 32 KiB 8-way write-through L1 data cache, a 16 KiB 4-way L1
  instruction cache, a 16-entry fully associative TLB, a 64-entry branch
  history table and a 16-entry branch target buffer. It also includes the
  less obvious state inside them: the replacement LFSRs, the round-robin
  arbiter in front of the L1-D, and the TLB's pseudo-LRU tree.

The central lesson of the original work is built into the design. Clearing
valid bits (*first-order state*) is not enough. The state that decides which
line or entry is replaced next (*second-order state*) also encodes history,
and it leaves a measurable channel unless it is reset too. In this RTL every
such register has its own flush input and its own select bit.

The rest of the core is not part of this RTL: its fetch, decode, issue,
execute and commit stages, its CSRs, its FPU and its page-table walker. Nor
are the off-core L2 and DRAM. They connect through the ports of the top
module, `tp_core`.

## The `fence.t` instruction

```
 31                        12 11     7 6       0
+----------------------------+--------+---------+
|        select[19:0]        | 00000  | 0001011 |
+----------------------------+--------+---------+
            20                   5        7
```

The instruction is U-type. It uses the *custom-0* major opcode with rd = 0,
and the 20-bit immediate is the select bitmap. A custom-0 word with a non-zero
rd field is not treated as `fence.t`. The original work fixes the encoding but
not the meaning of each bit. This design uses:

| bit | resets | kind of state | time |
|-----|--------|---------------|------|
| 0 | L1-D valid bits | first order | 256 cycles |
| 1 | L1-I valid bits | first order | 256 cycles |
| 2 | TLB valid bits | first order | 1 cycle |
| 3 | BHT counters and valid bits | first order | 1 cycle |
| 4 | BTB entries | first order | 1 cycle |
| 5 | L1-D and L1-I replacement LFSRs | second order | 1 cycle |
| 6 | L1-D round-robin arbiter pointer | second order | 1 cycle |
| 7 | TLB pseudo-LRU tree | second order | 1 cycle |
| 8–19 | unused | | |

The original "first attempt" fence corresponds to select `0x0001F`. The
complete fence, which closed all five channels studied, is `0x000FF`.
Software may also simply use `0xFFFFF`.

## What happens during a fence

`flush_ctrl` watches the commit stage (`commit_valid_i`, `commit_instr_i`)
and sequences the fence in four states:

1. **IDLE**: fence.t commits. In that same cycle `flush_pipeline_o` tells
   the core to squash all younger instructions. `fence_stall_o` rises, and
   the select bitmap is latched.
2. **DRAIN**: the controller waits until the L1-D is idle and its write
   buffer is empty. Every committed store has then reached the L2. The
   original work does not say whether the fence waits for stores. This design
   waits, so that a flush can never overlap a store in flight.
3. **FLUSH**: for one cycle every selected structure receives a flush pulse
   (`flush_req_t` in `tp_pkg`). All state except the caches' valid bits is
   reset by that pulse.
4. **WAIT**: the L1 caches clear their valid bits. They hold them together
   with the tags in a single-port SRAM row per set, so they can clear only one
   set per cycle: 256 sets, 256 cycles. When neither cache is busy,
   `fence_done_o` pulses and the stall drops.

With the write buffer already empty, the latency is fixed. `fence_done_o`
comes 3 + 256 = **259 cycles** after the commit cycle when either L1 is
selected, and 3 cycles otherwise. The original work measured about 320
cycles of extra context-switch time for its fence, dominated by the same
256-cycle flush. The fixed latency matters. A flush whose duration depended
on the cache contents would itself be a timing channel, and the OS would have
to pad it to the worst case. With write-through caches nothing is ever dirty,
so the valid-bit walk always takes the same time. The write-buffer drain can
vary. An OS that wants a constant switch time should pad it, or drain stores
before the fence.

## L1 caches

Both caches use 16-byte lines, 256 sets and 56-bit physical addresses (SV39).
That gives 44-bit tags. A tag SRAM row holds one set: valid bit and tag for
every way. A data SRAM row holds all lines of a set. `sram_sp` models both
SRAMs: single port, synchronous read, bit-masked write.

**Access.** A request reads both SRAMs for its set. One cycle later the tags
are compared. A hit answers in that cycle, one cycle after the grant. On a
miss the cache requests the line from the L2. It writes the returned line into
the first invalid way, or else into the way chosen by the low bits of an
8-bit LFSR, and answers from the returned line. The LFSR advances on every
refill.

**L1-D specifics.** The load unit, the store unit and the page-table walker
share the cache (ports 0, 1, 2). A round-robin arbiter picks one request at a
time when the cache is idle. The cache is write-through without allocation on
a store miss. A store updates the line if it hits and is always queued in a
40-entry write buffer, a plain FIFO. The buffer drains to the L2 whenever no
refill owns the L2 port. A store is not granted while the buffer is full. A
load miss waits for the buffer to drain before it refills, so the L2 always
holds the newest data for a refill.

**The LFSR.** Victim selection follows a pseudo-random sequence of period
256. An 8-bit LFSR has at most 255 states, so `lfsr8` uses the de Bruijn form
of the maximal Fibonacci LFSR x⁸+x⁶+x⁵+x⁴+1. The feedback is also inverted
when bits 6:0 are zero, which adds the all-zero state to the cycle. After a
flush the sequence restarts at the seed `0x01`. That is what makes the victim
choice after a fence independent of history, and `tb_l1_dcache` and
`tb_l1_icache` check exactly that. They run different traffic, fence, and
require that the same conflict pattern then evicts the same lines.

**The arbiter.** `rr_arbiter` grants the first requester at or after its
pointer, then moves the pointer past the winner. The pointer records who went
last, so it too is history; a flush sets it to 0.

## TLB, BHT and BTB

* **TLB**: 16 entries, fully associative, one level for instructions and
  data. Each entry holds a 27-bit VPN, a 16-bit ASID, a 44-bit PPN, the page
  size (4 KiB, 2 MiB, 1 GiB) and 8 PTE flag bits. Lookup is combinational.
  For superpages the low PPN bits come from the VPN. Refills go to the first
  free entry, or else to the victim of a 15-node tree pseudo-LRU (`plru_tree`,
  heap-ordered, 0 means "go left"). Lookup hits and refills update the tree.
  Tree PLRU is not true LRU. After accesses 1…15 then 0 it evicts entry 8, not
  entry 1, and `tb_tlb` checks that case. Flushing the tree makes entry 0 the
  next victim regardless of history.
* **BHT**: 64 two-bit saturating counters with valid bits, indexed by
  `pc[6:1]` (2-byte instruction alignment), untagged. It predicts taken when
  the entry is valid and the counter's upper bit is set. An untrained entry
  starts weakly taken or weakly not taken.
* **BTB**: 16 entries of valid bit and 64-bit target, indexed by `pc[4:1]`,
  untagged.

All three reset their whole contents in the flush cycle.

## Top-level interface (`tp_core`)

| group | signals | connects to |
|-------|---------|-------------|
| commit | `commit_valid_i`, `commit_instr_i`, `flush_pipeline_o`, `fence_stall_o`, `fence_done_o` | commit stage and pipeline control |
| fetch | `if_req_valid_i/ready_o/addr_i`, `if_rsp_valid_o/data_o` (64-bit aligned word) | fetch stage |
| L1-D | `dc_req_valid_i[2:0]`, `dc_req_i[2:0]` (`dreq_t`: we, addr, wdata, be), `dc_gnt_o`, `dc_rsp_valid_o`, `dc_rsp_rdata_o` | load unit (0), store unit (1), page-table walker (2) |
| L2, data | `dl2_req_valid_o/ready_i`, `dl2_req_o` (`l2_req_t`), `dl2_rsp_valid_i`, `dl2_rsp_data_i` (128-bit line) | L2 |
| L2, instr | `il2_req_valid_o/ready_i`, `il2_req_addr_o`, `il2_rsp_valid_i/data_i` | L2 |
| TLB | `tlb_lu_*` lookup, `tlb_upd_*` refill | MMU, page-table walker |
| prediction | `bp_pc_i`, `bht_valid_o/taken_o`, `btb_valid_o/target_o`, `bht_upd_*`, `btb_upd_*` | frontend, branch unit |
| events | `dc_hit_o`, `dc_miss_o`, `ic_hit_o`, `ic_miss_o`, `wbuf_full_o` | performance counters |

An L2 request is accepted when valid and ready are both high. A read (line
address, `we` = 0) is answered later by one `rsp_valid` cycle carrying the
line. Writes (`we` = 1, one 64-bit word with byte enables) get no answer.
Each cache has at most one read outstanding. After reset both caches spend
256 cycles clearing their valid bits before they accept requests.

All sizes are parameters of `tp_core`, and their defaults are the evaluated
configuration: `DCACHE_BYTES`=32768, `DCACHE_WAYS`=8, `ICACHE_BYTES`=16384,
`ICACHE_WAYS`=4, `WBUF_DEPTH`=40, `TLB_ENTRIES`=16, `BHT_ENTRIES`=64,
`BTB_ENTRIES`=16. At the defaults the design holds about 537 Kbit of SRAM and
about 5,200 flip-flops.

## Verification

Every module has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.
`tb/l2_mem_model.sv` is a behavioural L2. It has fixed latency and an
optional stall. Memory that was never written reads as a fixed function of
the address, so the testbenches can work out the expected data themselves.

* `tb_tp_core` runs the whole design at its default size. It goes through
  cache hits and misses, three concurrent L1-D clients, a full write buffer,
  TLB eviction and superpages, and branch-predictor training. Then come a
  partial fence (BHT only, 3 cycles) and a full fence with stores pending.
  The fence waits for them, and a second full fence takes exactly 259 cycles.
  After the fence every structure is cold. The test ends with a
  prime-and-probe run on the L1-D, and every mechanism must occur at least
  once.
* `tb_channels` runs the five covert channels of the original evaluation on
  the full design. In each, a spy primes the structure, a trojan touches *s*
  entries, and the spy times its probe. This is done with no fence, with
  the first-order fence (`0x0001F`) and with the full fence (`0xFFFFF`) at
  each domain switch. For the TLB, BTB and BHT the time is a count of
  misses at a fixed penalty (20 cycles per TLB refill, 10 per
  misprediction), because those structures have no timing of their own
  here. Probe times in cycles:

  | channel | fence | s = 0 | s = ¼ | s = ½ | s = ¾ | s = all |
  |---------|-------|------:|------:|------:|------:|--------:|
  | L1-D (256 lines) | none | 256 | 1279 | 1939 | 2082 | 2357 |
  | L1-D | either | 3072 | 3072 | 3072 | 3072 | 3072 |
  | L1-I (256 lines) | none | 512 | 1502 | 2142 | 2372 | 2582 |
  | L1-I | either | 3072 | 3072 | 3072 | 3072 | 3072 |
  | TLB (16) | none | 16 | 216 | 336 | 336 | 336 |
  | TLB | either | 336 | 336 | 336 | 336 | 336 |
  | BTB (16) | none | 16 | 52 | 88 | 124 | 160 |
  | BTB | either | 160 | 160 | 160 | 160 | 160 |
  | BHT (64) | none | 64 | 208 | 352 | 496 | 640 |
  | BHT | either | 640 | 640 | 640 | 640 | 640 |

  Without a fence the spy reads the secret. With either fence at each
  domain switch the probe time does not depend on it, and each fence takes
  259 cycles. The model is deterministic, so one run per secret replaces
  the original's statistical analysis over a million samples. On real
  hardware the first-order fence left a faint residual channel, traced to
  the LFSR, the arbiter and the pseudo-LRU tree. That residual does not
  appear here. After a first-order fence every refill in these probes
  finds an invalid way or entry, and a lone requester is granted at once,
  so the second-order state never decides a victim or a grant. Whatever
  reached the timing on real hardware through the rest of the core is not
  modelled. The second-order resets are checked directly instead: in
  `tb_tp_core`, and in the block testbenches of the LFSR, arbiter and TLB.
* Block testbenches: `tb_fence_t_decoder` (directed and random encodings),
  `tb_flush_ctrl` (pulses per select bit, drain wait, exact latency),
  `tb_lfsr8` (period 256, all states, restart after flush), `tb_rr_arbiter`
  (against a reference model), `tb_write_buffer` (against a queue),
  `tb_bht`, `tb_btb`, `tb_tlb` (against reference tables and PLRU cases),
  `tb_l1_dcache` and `tb_l1_icache` (against a shadow memory, 256-cycle
  flush, history independence after a flush). Every block testbench uses
  the block's default parameters, which are the evaluated sizes.

To simulate with Verilator 5 (two-state; uninitialised state is randomised):

```
verilator --binary --timing --assert -Irtl -Itb rtl/tp_pkg.sv tb/tb_tp_core.sv \
          --top-module tb_tp_core -o sim && ./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_tp_core` with any other testbench name. Each testbench runs in
seconds.

## Where this RTL departs from the original, and what it adds

The original work gives the encoding, the component sizes, the list of state
to reset, and the 256-cycle, one-set-per-cycle valid-bit flush. It modifies
an existing core whose internals it does not describe. The following are this
design's own choices:

* **Select bit assignment.** The split into first- and second-order bits, and
  the use of one bit for both L1 LFSRs.
* **Fence sequence.** The write-buffer drain before the flush, and the exact
  3-cycle overhead around the cache flush.
* **Cache organisation.** The caches are physically indexed and tagged, with
  a simple blocking state machine: 2-cycle hits, one miss at a time, refill
  only after the write buffer drains, invalid-way-first victims. The L1-D and
  L1-I have separate L2 ports.
* **Write buffer.** A plain FIFO with no store merging.
* **LFSR.** The polynomial, the seed and the de Bruijn extension, used to
  reach the stated period of 256.
* **Arbiter and PLRU.** The arbiter's pointer scheme and the PLRU tree
  encoding.
* **Formats and indexing.** The TLB entry format (no global-mapping bit,
  ASID always compared), the BHT and BTB indexing, and the BHT counter start
  values.
* **Fetch width.** 64 bits.
* **Reset.** The caches clear their valid bits after reset with the same
  set-by-set walk.

A write-back L1 is out of scope, as are a PTW or an `sfence.vma` flush of the
TLB, timers, and the L2 cache (off-core, partitioned by page colouring in the
original system).

## Files

`rtl/`: `tp_pkg` (encoding, select bits, shared structs), `tp_core` (top),
`flush_ctrl`, `fence_t_decoder`, `l1_dcache`, `l1_icache`, `write_buffer`,
`rr_arbiter`, `lfsr8`, `sram_sp`, `tlb`, `plru_tree`, `bht`, `btb`.
`tb/`: one `tb_<module>` per module, `tb_channels`, and `l2_mem_model`.
