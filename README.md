# FOX: memory-controller logic for auditing DAX-mapped files

When a file on byte-addressable non-volatile memory (NVM) is mapped into a process with
direct access (DAX), every later read or write of that file is an ordinary load or store.
After the first page faults the operating system sees nothing more, so the audit trail of
the file ends at the `mmap()` call. FOX closes that gap by letting the memory controller
write the audit log. The kernel marks every physical page of a monitored mapping with a
small tag in otherwise unused high address bits. The memory controller recognises the tag
on each request that reaches it, looks up who owns it, and appends a log record to a
circular buffer in memory.

This repository is a SystemVerilog implementation of the memory-controller side of FOX,
as described in M. Ye, "FOX: Hardware-Assisted File Auditing for Direct Access NVM-Hosted
Filesystems". The description covers the structure and the flow of requests, and much of
this RTL follows it. Many details are not described there: widths, handshakes, counter
addresses, record layout, log placement and cache policy. Those were chosen here, and the
section "Where this RTL goes beyond the description" lists them.

## 1. Tagging addresses: the Metabits

A physical address is 64 bits. FOX takes 9 bits just below the 12-bit sign extension:

| bits    | use                                          |
|---------|----------------------------------------------|
| [63:52] | sign extension, ignored                      |
| [51:43] | **Metabits**: OMFT index, 0 = not monitored |
| [42:0]  | memory address (8 TB)                        |

When a page fault maps a page of a monitored file, the kernel writes the index of the
process-file pair into the Metabits of the page-table entry. All later accesses through
that mapping carry the index. Caches treat the tag as part of the address. Two processes
sharing one file through `MAP_SHARED` therefore get different cache lines for the same
memory block, and each access can be attributed to its own process. The memory controller
drops the Metabits before the request goes to memory (`mem_addr` is 43 bits wide).

Nine bits give 512 values. Value 0 means "untagged", which leaves 511 process-file pairs
that can be monitored at once. The kernel must track any further pairs in software.

## 2. The Open Monitor File Table (`fox_omft`)

The OMFT is a 512-entry, direct-mapped on-chip table indexed by the Metabits. It has no
tag compare. Each entry holds:

| field        | bits | meaning                                                      |
|--------------|------|--------------------------------------------------------------|
| valid        | 1    | entry in use                                                 |
| pid          | 16   | process ID                                                   |
| inode        | 32   | inode of the file                                            |
| mflag        | 2    | monitor flag: bit 0 logs reads, bit 1 logs writes (00 = off) |
| uid          | 32   | user ID                                                      |
| gid          | 31   | group ID                                                     |

Only the kernel writes the table:

* `omft_wr_en/idx/entry` when a DAX fault first maps a monitored pair. The kernel keeps
  the pair in its own table and uses that table's index as the Metabits value.
* `omft_inv_en/idx` once per entry when a process exits.

An invalidate and a write to the same index in the same cycle leave the entry invalid.
Lookups are synchronous: the data appears one cycle after `rd_en` and is held until the
next read.

## 3. Monitor phase 1: deciding what to log (`fox_mpm`)

Every last-level-cache miss enters the Counter Request Queue (`req_*`). In a controller
with counter-mode encryption, this queue is where the request waits while its encryption
counter address is computed. The Metadata Processing Module pops one request per cycle:

1. It loads the address into register **A** and the operation into bit **O** (0 = read,
   1 = write), samples the timestamp, and starts an OMFT read at the Metabits.
2. One cycle later the OMFT line is register **S**. S is all zeros if the Metabits are 0
   or select an invalid (evicted) entry.
   The module then:
   * sends the trimmed address, the operation and the counter address to the memory
     back end (`mem_*`). The counter address is `CTR_BASE + 64 * (addr[42:12])`, one
     64-byte counter block per 4 KB page.
   * pushes `{A, O, S, timestamp}` to the Pre-monitoring Queue if the request is to be
     logged.

A request is logged when `cfg_op_mask[O]` is set and at least one of these holds:

| condition                                                       | scheme                                  |
|-----------------------------------------------------------------|-----------------------------------------|
| Metabits ≠ 0, OMFT entry valid, and `mflag[O]` set              | selective, the main scheme             |
| `cfg_range_en` and `cfg_range_lo ≤ addr[42:0] < cfg_range_hi`   | address-selective, e.g. the NVM region |
| `cfg_full`                                                      | log everything, the reference scheme   |

The published evaluation compares five schemes. They map onto these inputs as follows:

* "Persist(R/W)": range 12–16 GB, mask 11.
* "Persist(W)": range 12–16 GB, mask 10.
* "Full(R/W)" and "Full(W)": `cfg_full` with mask 11 or 10.
* Directory-based monitoring needs no hardware setting. The kernel simply puts only files
  under the chosen directory into the OMFT.

A range or full hit on an untagged address is logged with S = 0, so no process
information is recorded.

**Ordering.** A pre-monitor request is offered only once its memory request has been
accepted, or in the same cycle. The stage does not advance until both have been accepted.
So a monitor write can never overtake the access it records. An assertion in `fox_mpm`
checks this.

## 4. Monitor phase 2: writing the log (`fox_mm`, `fox_monitor_cache`)

A record is 32 bytes, so two records fit in one 64-byte log block (little-endian, slot 0
in bits [255:0]):

| bits      | field                                                  |
|-----------|--------------------------------------------------------|
| [63:0]    | accessed address as requested, Metabits included       |
| [95:64]   | UID                                                    |
| [126:96]  | GID                                                    |
| [127]     | operation (1 = write)                                  |
| [191:128] | timestamp                                              |
| [223:192] | inode                                                  |
| [239:224] | PID                                                    |
| [255:240] | reserved, 0                                            |

The log is one global circular buffer of `LOG_ENTRIES` records starting at `LOG_BASE`.
The index is held in the controller and wraps modulo `LOG_ENTRIES`. The defaults make
the buffer about 1/20 of a 16 GB memory: 26,843,545 records, or 0.8 GB. It ends just
below 12 GB, where the persistent region starts in the evaluated system.

Memory is written in whole 64-byte blocks, but a record fills only half of one. Each
record is therefore a read-modify-write:

```
IDLE   pop PAQ -> register X (address), register M (formatted record); look up block
LOOK   Monitor Cache hit?  yes -> merge M into cached block -> WRITE
                           no  -> RDREQ: read block from memory (lrd_*)
RDWAIT plaintext block arrives -> merge M -> WRITE
WRITE  block -> Monitor Cache and Write Buffer Queue (wb_*); index += 1
```

The Monitor Cache holds plaintext log blocks: 64 KB, 8-way, 64-byte lines, 128 sets,
round-robin replacement. It is write-through, because every updated block is sent to
memory anyway. Its lines are never dirty, so an eviction costs nothing. The log is
written sequentially, so only the first record of each block misses. Costs per record:

* Hit, with `wb_ready` high: 3 cycles.
* Miss: adds the memory read latency.

Records are handled one at a time, in PAQ order.

**Backup.** The module counts the records written since the last `backup_ack`. When the
count reaches `BACKUP_NUM/BACKUP_DEN` of the buffer (half by default), it raises
`backup_req`. Software should then copy the log to secondary storage before it is
overwritten, and pulse `backup_ack`.

## 5. Top level (`fox_top`)

```
req_* -> [Counter Request Queue] -> fox_mpm -> mem_*  (to back end / counter cache)
                                      |  ^
                                      v  | OMFT lookup      fox_timestamp
                            [Pre-monitoring Queue]
                                      v
                   fox_mm <-> fox_monitor_cache ;  lrd_* (log block read)
                                      v
                            [Write Buffer Queue] -> wb_*
```

All three queues are `fox_fifo`, a valid/ready queue with 16 entries by default. The top
also brings out these ports:

* the kernel ports of the OMFT;
* `ts_load_*`, to set the 64-bit timestamp counter, which otherwise counts clock cycles;
* the scheme configuration;
* status: `log_idx`, `mon_fire` (a monitor request left the MPM) and `mc_miss_fire`.

**What sits outside.** The processor and caches feed `req_*`. The regular memory back
end consumes `mem_*`. `lrd_*` returns log blocks in plaintext, and `wb_*` carries
plaintext blocks to be written. On an encrypted NVM, the counter fetch and the AES
engine sit between these ports and the device. On an unencrypted NVM, the ports connect
directly. Neither the encryption nor the kernel is part of this RTL.

### Parameters (defaults)

| parameter     | default          | meaning                                                 |
|---------------|------------------|---------------------------------------------------------|
| `CRQ_DEPTH`, `PAQ_DEPTH`, `WBQ_DEPTH` | 16 | queue depths                               |
| `CTR_BASE`    | 0x4_0000_0000    | base of the encryption counters (above 16 GB)           |
| `LOG_BASE`    | 0x2_CCCC_CCC0    | first log block (64-byte aligned)                       |
| `LOG_ENTRIES` | 26,843,545       | records in the circular log                             |
| `MC_BYTES`, `MC_WAYS` | 65536, 8 | Monitor Cache size and associativity                    |

Shared widths (Metabits position, entry and record layout) are in `fox_pkg`.

## 6. Where this RTL goes beyond the description

The published design specifies these points, and the RTL follows them:

* 9 Metabits in the high address bits, with a 43-bit memory space.
* A 512-entry, direct-mapped OMFT with PID, inode, flag, UID and GID.
* The monitor-flag values 01 (reads) and 10 (writes).
* Registers A, O and S; X and M.
* A Counter Request Queue, a Pre-monitoring Queue and a Write Buffer Queue.
* Read-before-write through a 64 KB, 8-way Monitor Cache.
* A global circular buffer of about 1/20 of memory, with a backup at 50%.
* Each monitor write strictly after its data request.

The following are this implementation's own:

* **Entry 0 and the table size.** The published table figure numbers entries 1 to 512,
  but 9 bits with 0 reserved reach only 511. Entry 0 exists and is never used.
* **Entry and record layout.** The description lists field widths (address up to 8 B,
  UID 4 B, GID 31 bits, operation 1 bit, timestamp 8 B, inode 4 B, PID 2 B). It also
  states 17 bytes per OMFT entry, which those fields do not add up to. The 114-bit entry
  and the 32-byte record above are this design's choices. The optional directory field
  of "rich" records is not stored.
* **Storage plan.** The evaluation uses a "balanced" storage plan that is never defined.
  The global circular buffer, whose overhead the authors expect to be similar, is built
  instead. The buffer's location is this design's choice.
* **Other choices made here:** the counter-address formula, the queue depths, the
  valid/ready handshakes, the write-through and round-robin policies of the Monitor
  Cache, the non-pipelined Monitor Module, and the timestamp source (a loadable cycle
  counter).
* **Scheme inputs.** The address-range, full and op-mask configuration inputs are one
  way to provide the evaluated schemes. The description does not say how software
  selects a scheme.
* **Not built:** the AES engine, the counter cache, and all kernel parts (page-fault
  handler changes, the Primary Map, Monitor Process and backup tables, the directory
  check). The encryption is taken from prior work, and the kernel parts are software.

## 7. Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/fox_pkg.sv rtl/fox_*.sv \
    tb/fox_nvm_model.sv tb/tb_fox_top.sv --top-module tb_fox_top -o sim && obj_dir/sim
```

(list `rtl/fox_pkg.sv` first; unused files do no harm). The testbenches are:

| testbench              | what it checks                                                           |
|------------------------|--------------------------------------------------------------------------|
| `tb_fox_fifo`          | order, occupancy, full/empty against a reference queue                   |
| `tb_fox_timestamp`     | count, load, wrap                                                        |
| `tb_fox_omft`          | fill all 512 entries, read back, evict, write/invalidate collision        |
| `tb_fox_mpm`           | every memory and monitor request against a reference model, all schemes, ordering, one request per cycle |
| `tb_fox_monitor_cache` | hit/miss/data against a model with round-robin replacement, capacity     |
| `tb_fox_mm`            | every log-block write, read-before-write only on a miss, wrap, backup, 3-cycle hit |
| `tb_fox_top`           | end to end, with a small log of 64 records and queues of 4              |
| `tb_fox_top_full`      | one monitored access with every parameter at its default                |
| `tb_fox_schemes`       | one synthetic two-application stream under each evaluated scheme, default parameters |
| `tb_fox_mc_sizes`      | the top with an 8, 32, 64 and 256 KB Monitor Cache, every log line checked |

`tb_fox_top` programs the OMFT with the example rows of the published table. It mixes
tagged and untagged traffic, shares one block between two processes, evicts a process,
switches through the schemes, and compares every record in the log with a scoreboard.
It counts each of these mechanisms and fails if one never occurs:

* flag filtering
* eviction
* range scheme
* full scheme
* operation mask
* cache hit and miss
* wrap
* backup
* back-pressure

`tb_fox_schemes` replays the same 400 requests from three synthetic processes under the
six configurations: no logging, Full(R/W), Full(W), Persist(R/W), Persist(W) and
Directory. The processes are one non-persistent, one persistent in the monitored
directory, and one persistent outside it. The test checks each monitor-write count
against the count predicted from the stream. It also prints total writes normalised to
data writes. This is a property of the synthetic stream, not a reproduction of the
published benchmark results, which came from full-system simulation of real programs.

`tb_fox_mc_sizes` builds the top four times, once for each Monitor Cache size of
the original size study, and runs 64 fully monitored requests through each copy.
The log is one sequential buffer. Each line is therefore missed once, by its
first record, and then hit by its second record. So the miss count is 32 at
every size. With a single writer, the cache size matters only when something else
touches the log between two records, such as a backup reader. This matches the
reported finding that growing the cache beyond 64 KB gained nothing. It does not
explain why the smaller sizes were slower in the original study.

`tb/fox_nvm_model.sv` is a behavioural memory used by these tests. Its read latency
defaults to 60 cycles, a 60 ns PCM read at 1 GHz.
