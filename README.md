# An MSI directory-coherent memory subsystem with AXI/ACE-style channels

This is synthesizable SystemVerilog for the memory side of a small shared-memory multiprocessor.
Up to sixteen cores each get a private 8 kB, 4-way L1 cache. The caches are kept coherent with
the MSI protocol by one on-chip interconnect. The interconnect owns a directory and the
controller of the 1 GB main memory, which is also part of the design.

The caches and the interconnect talk over eight channels named after AMBA AXI and ACE:

- AW, W, B: eviction and write-back.
- AR, R: line reads.
- AC, CR, CD: snoops from the interconnect, with their responses and their data.

The channels keep the AXI/ACE valid/ready handshake and the channel split. The payloads are
reduced to what an MSI protocol needs.

The organisation follows the Rhea framework, which generates such
subsystems for co-simulation with gem5. That work describes the blocks and how they connect.
Most of the behaviour inside each block was designed here. The section
"Relation to the original description" lists what was taken and what was chosen.

```
   core 0          core 1               core N-1         (outside: loads/stores, cpu_* ports)
     |               |                     |
 +---------+     +---------+          +---------+
 | L1 ctrl |     | L1 ctrl |   ...    | L1 ctrl |   MSHR + CPU FSM + AXI FSM + ACE FSM
 | L1 mem  |     | L1 mem  |          | L1 mem  |   tag/state array + 4 data ways
 +---------+     +---------+          +---------+
   AW W AR | B R AC | CR CD   (one set of channels per cache)
 +-----------------------------------------------------------------+
 |  AW+W arbiter        AR arbiter          CR+CD arbiter           |
 |  AW FIFO  W FIFO     AR FIFO             CR FIFO  CD FIFO        |
 |       |                  \                  /                   |
 |  AW+W FSM ---lock---  AR+CR+CD FSM  ---> R, AC to the caches     |
 |   |  B       \          /      \                                |
 |   |        directory arbiter -> directory (state + sharers)      |
 |   +------- memory arbiter ----> memory controller               |
 +-----------------------------------------------------------------+
                                      | word-wide port (mem_*)
                                 main memory (1 GB RAM)
```

## Line states and transactions

A line is 64 bytes. On a 32-bit channel it moves as a burst of 16 beats, and the last beat is
flagged. All channel addresses are line addresses (24 bits for 1 GB).

| channel | opcode | meaning |
|---|---|---|
| AR | `AR_READ_CLEAN` | load miss: the requester wants a shared (S) copy |
| AR | `AR_READ_UNIQUE` | store miss, or store to an S line (upgrade): the requester wants the only copy (M) |
| AW | `AW_WRITEBACK` | the cache drops an M line; 16 W beats of data follow |
| AW | `AW_EVICT` | the cache drops an S line; no data |
| AC | `SNP_READ_SHARED` | owner keeps the line as S and returns its dirty data |
| AC | `SNP_READ_UNIQUE` | owner invalidates the line and returns its dirty data |
| AC | `SNP_MAKE_INVALID` | sharer invalidates its copy |
| CR | `{data_transfer, was_present}` | snoop answer; if `data_transfer` is set, 16 CD beats follow |

Every AW, whether write-back or evict, is answered on B. Every AR is answered with a full
16-beat R burst. Caches and directory use the same three MSI states
(`msi_e` in `rhea_pkg`).

## The L1 cache (`l1_cache_ctrl`, `l1_cache_mem`)

**Cache memory.** The cache memory is a tag/state array next to the data ways. It has two
combinational read ports that return a whole set:

- port `a_*` for the CPU side;
- port `b_*` for snoops.

It has one registered write port. That port updates the tag and state of one way, and the
line data when `wr_data_en` is set. Reset invalidates all lines.

**Controller.** The controller holds one MSHR (miss status holding register). It therefore
serves one core request at a time. Three state machines share the MSHR.

The CPU FSM looks the address up one cycle after the request:

- **Load hit** (S or M): the data are returned.
- **Store hit on M**: the bytes are written in place.
- **Any other case**: the MSHR is filled and the AXI FSM starts. This covers a load miss, a
  store miss, and a store to an S line.

On a hit, `cpu_ack` pulses two cycles after `cpu_req` is first seen.

**Victim choice.** The victim is the first invalid way. If every way is valid, a per-cache
rotating pointer picks it.

**AXI FSM.** It first gets rid of a valid victim:

- A dirty (M) victim goes out as a write-back with its 16 data beats.
- A clean (S) victim goes out as an evict.

The FSM then waits for B. Next it issues the read: read-clean for a load, read-unique for a
store. It collects the 16 R beats. On the last beat it writes the whole line, with the
pending store merged in, into the way in one step. The line's new state is S for a load and
M for a store.

**Victim stays valid until B.** This is the one subtle point of the cache. The victim is
marked invalid only when B arrives, not when the AW is sent. Until then the interconnect may
still see this cache as a sharer or owner and snoop it. A snoop that reaches it in that window
must still find the line, and must return the dirty data if the line was M. The interconnect
then recognises the write-back that follows as stale (see below).

**ACE FSM.** It accepts an AC snoop and reads the set through port `b_*`. It then:

- sets the line to S for ReadShared, or to I for the other two snoops;
- answers on CR;
- sends the 16 CD beats if the line was M.

Snoops have priority on the single write port. While a snoop lookup is in its cycle, the CPU
and AXI FSMs wait. This keeps a snoop and a fill, or a snoop and a store hit, from
overwriting each other.

## The interconnect (`coherent_interconnect`)

### Arbiters and FIFOs

**Arbiters.** Three round-robin arbiters take one request per cycle from the N caches:

- The AW+W arbiter takes write-backs and evicts.
- The AR arbiter takes reads.
- The CR+CD arbiter takes snoop answers.

The two paired arbiters stay on the cache they granted until its burst is complete. After a
write-back AW, that is the last W beat. After a CR with data, it is the last CD beat. Data
bursts from different caches are therefore never interleaved, and the FIFOs can carry beats
without source tags.

**FIFOs.** Each of the five request channels (AW, W, AR, CR, CD) has its own first-word
fall-through FIFO. They are sized so they can never fill, given what a cache can have in
flight:

- AW, AR and CR FIFOs: N_CORES entries each.
- W and CD FIFOs: N_CORES × 16 entries each.

### The two FSMs and the line lock

Two FSMs serve the FIFOs concurrently:

- The **AW+W FSM** handles evicts and write-backs. These never need snoops.
- The **AR+CR+CD FSM** handles reads, with the snoops they cause.

Each FSM reads the directory when it accepts a request. At that moment, in the same
directory-arbiter grant cycle, it also locks the line. A request for a line locked by the
other FSM waits at the head of its FIFO. This lock is what makes concurrent service safe:

- The directory entry that an FSM read stays valid until the FSM writes it back.
- A write-back and a read of the same line are therefore always served one after the other,
  in one order or the other.

**Read-clean:**

- Line I, or S elsewhere: read memory, return R, add the requester to the sharers.
- Line M at another cache: snoop the owner with ReadShared. Its dirty data are written to
  memory (MSI has no Owned state, so memory must be made current) and forwarded on R. The
  directory becomes S with the old owner and the requester.

**Read-unique:**

- Every sharer other than the requester is snooped in parallel:
  - If the line is M, the owner gets ReadUnique. Its data go straight to the requester on R,
    with no memory write.
  - If the line is S, the sharers get MakeInvalid, and the line comes from memory. This is
    also how an S→M upgrade works: the requester is skipped, and it receives the line again.
- The directory becomes M with only the requester.

The FSM issues all snoops of one request together. It waits for one CR from each snooped
cache before it moves on.

**Evict:** the requester is removed from the sharers. An entry with no sharers left is freed.
Then B is sent.

**Write-back:** the FSM takes the 16 W beats. It then checks that the directory still lists
the writer as the only, M, owner:

- If so, the line goes to memory.
- If not, the write-back is **stale**: a read from another cache was served first and has
  already taken the dirty data through a snoop. A read-unique forwards the data to the new
  owner. A read-clean writes them to memory. The write-back's data are dropped.

In both cases the writer is removed from the sharers and gets B.

### Directory

The directory (`directory`) is sparse. It has as many sets as one L1 cache, and N_CORES × 4
ways. One L1 set holds at most four lines, so all caches together hold at most N_CORES × 4
distinct lines with the same set index. The directory can therefore always hold every line
that any cache has. It never needs evictions or back-invalidations.

Each entry holds:

- a valid bit;
- the tag;
- the MSI state;
- an N_CORES-bit sharer vector (for M, the single owner).

Reads are combinational; writes are registered. The directory arbiter alternates
round-robin between the two FSMs, one access per cycle.

### Memory path

The memory arbiter gives one FSM at a time the memory controller for a whole line transfer.
The memory controller (`memory_controller`) turns a line into 16 word accesses on the `mem_*`
port, and collects 16 read words back into a line.

The port works like this:

- `mem_valid`/`mem_ready` is the request handshake. The word address is
  `{line address, beat}`.
- A read returns its word later with `mem_rvalid`/`mem_rdata`.
- One read is outstanding at a time.

## Top level (`rhea_mem_subsys`)

The top instantiates N_CORES pairs of `l1_cache_ctrl` and `l1_cache_mem`, the interconnect
and the main memory. Its ports are plain arrays.

**Per-core CPU port:**

- `cpu_req`, `cpu_we`, `cpu_addr` (30-bit byte address), `cpu_wdata`, `cpu_be` (byte
  enables) go in.
- `cpu_ack`, `cpu_rdata`, `cpu_busy` come out.

The core holds the request stable until `cpu_ack`, a one-cycle pulse, and then must drop
`cpu_req` for at least that cycle. Accesses are 32-bit words with byte enables.

**Main memory** (`main_memory`) sits inside the top, on the `mem_*` port described above. It
is a plain synchronous RAM of `MEM_BYTES` bytes (1 GB by default). It is always ready and
returns read data one cycle after the request. It is not reset.

A 1 GB array costs 1 GB of host memory in simulation, plus a few seconds to initialise. Set
`MEM_BYTES` lower for faster runs: the upper address bits are then ignored.

| parameter | default | meaning |
|---|---|---|
| `N_CORES` | 16 | number of cores / L1 caches (2, 4 and 8 also work) |
| `L1_BYTES` | 8192 | capacity of each L1 |
| `L1_WAYS` | 4 | associativity of each L1 (and directory ways per core) |
| `MEM_BYTES` | 2^30 | main memory size |
| `rhea_pkg::DATA_W` | 32 | interconnect data width |
| `rhea_pkg::ADDR_W` | 30 | byte address width (1 GB) |
| `rhea_pkg::LINE_BYTES` | 64 | line size (16 beats) |

The package constants derive from each other. For example, `BEATS = LINE_BYTES / 4` and the
line-address width is `ADDR_W − log2(LINE_BYTES)`. Changing `DATA_W` is not supported: the
beat counters and byte enables assume 32 bits.

## Relation to the original description

**Taken from the original description:**

- The block list and the connections:
  - L1 controller: MSHR, CPU FSM, AXI FSM, ACE FSM, and a cache memory with a tag array and
    ways.
  - Interconnect: AW+W, AR and CR+CD round-robin arbiters; one FIFO per channel; an AW+W FSM
    for evicts and write-backs; an AR+CR+CD FSM for read-clean and read-unique with their
    snoops; directory and memory arbiters; a directory; a memory controller that serializes
    and deserializes lines.
- The MSI protocol.
- The evaluated sizes: 8 kB 4-way L1s, a 32-bit interconnect, 1 GB of memory, and 2 to 16
  cores.

The original block diagram draws three FIFO symbols, but its text says five, one per
channel. This design builds five.

**Chosen here** (the description does not give them):

- the 64-byte line;
- the reduced opcode and field set of every channel;
- every state sequence in the FSMs;
- snoop targets and snoop types per request;
- write-through of forwarded data on read-clean;
- the sparse directory organisation;
- the per-line lock between the two FSMs;
- stale write-back handling;
- keeping a victim valid until B;
- snoop priority on the cache write port;
- the victim choice;
- the CPU handshake and the main memory's word port;
- all FIFO depths.

**Not built:**

- **The optional second cache level** (two shared 256 kB 8-way L2 caches in the
  two-level configuration). The description says only that L2 controllers resemble the L1
  ones and connect only to the interconnect. It does not say how an L2 takes part in the
  protocol.
- **The CPUs.** In the original work these are simulator models. Here their load/store
  connections are ports.
- **DRAM timing.** Main memory is a single-cycle RAM. The DDR3 timing of the original
  simulated systems is not modelled.

**Left out of the channels:** full AXI/ACE signalling, such as IDs, burst length and size
fields, and the other ACE transaction types. Each cache has at most one transaction per
channel in flight, so IDs are not needed.

**Throughput:** each interconnect FSM serves one request at a time. Throughput is limited to
one read being served (with its snoops) and one write-back being served at once.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog. The block-level tests of the memory
controller and the interconnect use `tb/main_memory_model.sv` instead of the RAM. It is a
sparse associative array with a random ready and a longer read latency, so those tests see
back-pressure.

| testbench | what it exercises |
|---|---|
| `sync_fifo_tb` | random push/pop against a queue model, full/empty/count |
| `ar_arbiter_tb`, `aw_w_arbiter_tb`, `cr_cd_arbiter_tb` | payload routing, round-robin fairness bound, no acceptance when full, burst locking |
| `dir_arbiter_tb`, `mem_arbiter_tb` | grant alternation, grant held for a line transfer |
| `main_memory_tb` | read-after-write data, one-cycle read latency, `mem_rvalid` only for reads |
| `memory_controller_tb` | line write and read-back through the memory model, beat order |
| `directory_tb` | allocate/update/free against a reference model, full sets |
| `l1_cache_mem_tb` | both read ports, partial writes (state only vs. state + data) |
| `l1_cache_ctrl_tb` | hits, misses, upgrades, write-backs, evictions and all three snoops against a bus-level interconnect model |
| `aw_w_fsm_tb` | owner write-back, stale write-back, eviction, lock waits |
| `ar_cr_cd_fsm_tb` | each read case: snoop set and type, R data, memory write of forwarded data, directory result |
| `coherent_interconnect_tb` | directed walk of one line through every directory transition, a stale write-back, concurrent reads, a write-back racing a read |
| `rhea_random_tester_tb` | whole subsystem at full size (16 cores) |

`rhea_random_tester_tb` runs in the style of a Ruby random tester. Checks are spread over 24
lines that map to two cache sets. Each check owns one word. From random cores, it stores four
bytes one at a time, then loads the word and compares it. At the end the testbench reports
how often each mechanism happened:

- hits, misses and upgrades;
- write-backs and evictions;
- snoops with and without data, and invalidations;
- memory reads;
- lock waits;
- stale write-backs.

It fails if any of these never happened, except stale write-backs, which it only reports. It
runs at the default parameters in under half a minute, most of it spent building the model.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rhea_pkg.sv tb/rhea_random_tester_tb.sv \
          --top-module rhea_random_tester_tb -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Any other testbench works the same way. The simulation is two-state: every register that
the design reads is reset.
