# ReCXL replication hardware

## The idea

In a CXL cluster, many compute nodes (CNs) share memory that lives on memory
nodes (MNs), and each CN caches lines of that memory. If a CN fails, every
dirty line in its caches is lost, and with it the updates its cores made.
ReCXL keeps those updates alive without writing them through to memory.
Before a store may commit, the store buffer sends a copy of the stored words
in a REPL message to the Logging Units of N_r other CNs (the line's *Replica
Group*, picked by a hash of the line address). Each of them logs the words
and answers with a REPL_ACK. Once the coherence transaction is also done, the
store commits and a VAL message tells the replicas that the logged words are
now real.

Each Logging Unit keeps a small SRAM buffer for words that are not yet
validated. It moves validated words to a large DRAM log in the order the
stores became visible. That order is given by a logical timestamp carried in
every VAL. Every few milliseconds the DRAM logs are copied to the MNs and
cleared.

When a CN dies, the CXL switch notices that its link has gone quiet. It sets
the CN's Viral_Status bit and sends an interrupt (MSI) to a live CN. That CN
pauses the other nodes' Logging Units, so the logs stay still while recovery
software reads them.

This repository holds the RTL of that hardware in its proactive form:
replication starts as soon as a store is followed by another one in the
store buffer. It also holds a testbench for every block and two end-to-end
tests of the whole cluster.

## Blocks

| File | What it is |
|---|---|
| `rtl/recxl_pkg.sv` | Message and log-entry formats, field widths |
| `rtl/replica_select.sv` | Hash from a line address to its Replica Group; which member dumps the line |
| `rtl/store_buffer_repl.sv` | Per-core TSO store buffer with coalescing, REPL/REPL_ACK/VAL and commit |
| `rtl/val_timestamper.sv` | Per-destination 7-bit logical timestamp stamped into outgoing VALs |
| `rtl/rr_arbiter.sv` | Round-robin arbiter (helper) |
| `rtl/sram_log_buffer.sv` | 341-entry (4 KB) SRAM Log Buffer: REPL split, VAL marking, drain in timestamp order |
| `rtl/dram_log_ctrl.sv` | 18 MB circular DRAM log, periodic dump to the MNs, sync and free |
| `rtl/logging_unit.sv` | Logging Unit: the two logs above plus the pause/resume handshake for recovery |
| `rtl/switch_fault_monitor.sv` | Link-activity timeout, sticky Viral_Status bits, MSI to a live CN |
| `rtl/cxl_switch.sv` | CN-to-CN crossbar with the fault monitor; drops traffic to failed CNs |
| `rtl/compute_node.sv` | One CN: NCORE store buffers, its Logging Unit, two link lanes |
| `rtl/recxl_cluster.sv` | Top: NCN compute nodes and one switch |

The defaults are the evaluated system:

- 16 CNs with 4 cores each, and N_r = 3.
- A 72-entry store buffer. The paper gives no store buffer size, so this is
  the store-queue size.
- A 4 KB SRAM Log Buffer, which holds 341 entries of 12 bytes.
- An 18 MB DRAM log, which holds 1,572,864 entries of 12 bytes.
- A dump period of 2.5 ms, which is 1,250,000 cycles at the Logging Units'
  500 MHz.
- A link timeout of 1024 cycles. This value is my own; the paper gives none.

## How it works

### Store buffer

A retiring store joins the youngest entry if all three hold:

- it is to the same line;
- it writes a different word;
- that entry has not sent its REPLs yet.

Otherwise the store takes a new entry.

An entry sends its N_r REPLs in either of two cases:

- as soon as a younger entry exists, because the entry can no longer grow;
- when it reaches the head.

Each REPL carries the word mask and the merged words. The head commits when
two things are true: the L1 reports that it holds the line with write
permission, and all N_r REPL_ACKs are back. It then sends N_r VALs and writes
the line to L1.

Every message also carries two extra fields that are not in the paper's
layouts: the store-buffer slot (a tag) and the replica rank. The REPL_ACK uses
them to find its entry, and the VAL uses them to find its log entries.

### Timestamps

A CN keeps a 7-bit counter for each destination CN. A VAL takes the next value
of its destination's counter when the link accepts it. The first VAL to each
CN therefore carries timestamp 1.

### SRAM Log Buffer

The buffer handles one REPL at a time. It writes one word per cycle into free
entries, then returns the REPL_ACK. A VAL marks every entry of its store as
valid and records the VAL's timestamp.

For each source CN, the buffer tracks the next expected timestamp. Only
entries carrying that timestamp drain to the DRAM log, and the timestamp is
removed on the way. The expected timestamp moves on once no entry with the
old value is left.

### DRAM log and dump

The DRAM log is a circular array. A dump starts every DUMP_PERIOD cycles:

1. It reads the log from the oldest entry up to the tail as it was when the
   dump started.
2. It keeps the entries this CN must save. Within a Replica Group, the member
   of rank `line[7:0] mod N_r` saves the line.
3. It packs five 89-bit entries into each 64-byte message. A 3-bit count sits
   at bits 447:445.
4. It does a sync_req/sync_ack handshake with the MNs.
5. It frees the part it dumped.

### Recovery handshake

On Interrupt, a Logging Unit stops taking REPLs. It finishes the REPL in
progress and drains every entry it can move. It then answers with
InterruptResp and pauses.

While paused, the unit appends nothing to the DRAM log and starts no dump. It
still takes VALs.

On RecovEnd, the unit answers with RecovEndResp and resumes.

### Switch

The switch is a crossbar with a round-robin arbiter and one register per
output. Its fault monitor counts idle cycles on each CN's link. After
TIMEOUT idle cycles it marks that CN failed:

- it sets the CN's Viral_Status bit, which stays set;
- it sends one MSI to the lowest-numbered live CN, naming the failed CN;
- from then on it absorbs every message addressed to that CN.

## Deviations and own choices

- **Two lanes per link.** Each CN link has a request lane for REPLs and a
  response lane for REPL_ACKs and VALs. The receiving CN always accepts the
  response lane. With a single shared lane, a REPL waiting at a full Logging
  Unit can sit in front of the REPL_ACK that would let the sender make
  progress, and the cluster deadlocks. This is modelled on CXL's separate
  message classes; the paper does not discuss it.
- **Replica Group hash.** XOR-fold the line address to 8 bits, take it modulo
  NCN, and use the N_r consecutive CNs from there. A requester that lands in
  its own group is replaced by the next CN. The paper does not give the hash.
- **No compression.** The paper compresses dumps with gzip; dumps here are
  sent uncompressed.
- **Partial free after a dump.** The paper clears the whole log after a dump.
  Here, entries appended while the dump ran are kept for the next dump.
- **Cut-off edges.** The following are ports of the top rather than built
  blocks, because the paper takes them from elsewhere or they are software:
  - the cores, caches and coherence protocol;
  - the MNs and their directories;
  - the DRAM devices;
  - the recovery software: the Configuration Manager, the directory recovery
    handler and the log traversal.

  The fail-stop failure of a CN is the `cn_halt` input.
- **Small buffers can deadlock.** A very small SRAM Log Buffer can in
  principle fill with entries whose VALs wait on other full buffers. The paper
  sizes the buffer at 4 KB so that this does not happen, and nothing here
  handles overflow beyond back-pressure.
- **No reconfiguration after a failure.** A store whose Replica Group holds
  the failed CN waits for good after its REPL is dropped.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against a model written independently inside the testbench and prints
`TB_RESULT checks=N failures=M`.

`tb/tb_recxl_cluster.sv` runs a reduced cluster with these parameters:

| Parameter | Value |
|---|---|
| CNs | 5 |
| Cores per CN | 2 |
| Store buffer entries | 4 |
| SRAM Log Buffer entries | 32 |
| DRAM log slots | 64 |
| Dump period | 700 cycles |

It drives random stores and then fails one CN. It checks:

- program-order commits and coalescing;
- VAL timestamps;
- replica choice;
- the exact content of every DRAM log;
- that the saver rule holds for every dumped entry;
- detection, the MSI, and the pause/resume handshake;
- dropping of traffic to the dead CN.

It also counts each mechanism and fails if any count stays at zero:

- coalescing;
- REPLs sent at the head;
- store buffer full;
- SRAM buffer full;
- an entry held back for timestamp order;
- a dump;
- DRAM log full.

The last run gave 10,619 checks and no failures.

`tb/tb_recxl_cluster_full.sv` builds the top with all defaults: 16 CNs, 4
cores, 72-entry store buffers, 341-entry SRAM buffers, 1.5M-entry DRAM logs
and the 1,250,000-cycle dump period. It takes a few stores through the whole
path:

1. replication to the hashed replicas;
2. commit;
3. timestamp-ordered logging in each replica's DRAM log;
4. the first periodic dump, by the member that must save each line.

It took about four and a half minutes to build and run, with 42 checks and no
failures.

`tb/dram_log_model.sv` is a behavioural DRAM used only by the testbenches.

## Simulating

Each testbench is a top-level module in `tb/` that prints one
`TB_RESULT checks=N failures=M` line and then calls `$finish`. To build and
run one with Verilator 5, pass the package first, then the RTL files, then the
testbench (and `tb/dram_log_model.sv` for the testbenches that use a DRAM):

    verilator --binary --timing -Wno-fatal -Irtl --top-module tb_recxl_cluster \
        rtl/recxl_pkg.sv rtl/*.sv tb/dram_log_model.sv tb/tb_recxl_cluster.sv
    ./obj_dir/Vtb_recxl_cluster

`rtl/recxl_pkg.sv` is matched twice by that command line; if your Verilator
version objects, list the RTL files one by one. The unit testbenches override
parameters to keep runs short. Only `tb_recxl_cluster_full` uses the top's
defaults.

## Sizes of the evaluated workloads

For each application, the paper's figure on DRAM log size shows the largest
DRAM log any CN reached. The largest is ocean_ncp at about 16 MB, below the
18 MB log. The mean is about 5 MB.

At most one entry per cycle enters the DRAM log. Over one 1,250,000-cycle
dump period that is fewer entries than the log's 1,572,864 slots. So a log
that empties at every dump cannot overflow, even at the highest rate.
