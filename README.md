# MEEK: checking an out-of-order core with little in-order cores

A fast out-of-order core can be hit by transient or permanent hardware faults. Running a
second copy of it in lockstep doubles its area. Heterogeneous parallel error detection is a
cheaper way to catch these faults. The big core's execution is cut into short *segments*.
Each segment starts and ends with a snapshot of the architectural registers, called a
*Register Checkpoint* (RCP). Small in-order cores then re-execute the segments in parallel,
each core taking a different segment. A little core loads the segment's start checkpoint. It
replays the instructions, taking every memory value from a log instead of from memory. At the
end it compares its registers with the end checkpoint. If the re-execution matches, the
segment ran correctly on the big core. If it does not match, an interrupt is raised.

This repository holds synthesizable SystemVerilog for the hardware that MEEK adds to such a
system:

* the **extraction unit** at the big core's commit stage;
* the **forwarding fabric** that routes the extracted data to the little cores;
* the **clock-domain crossing**;
* the **per-little-core additions**: the mode switch unit, the load-store log, a small
  decoder and the pipeline multiplexers.

The cores themselves are not included. They are a 4-wide out-of-order core (SonicBOOM class)
and 5-stage in-order cores (Rocket class). Their signals are ports of the top module
`meek_top`.

The reference configuration is:

| Parameter | Value |
|---|---|
| Big core commit width | 4 |
| Register file | 32 architectural / 128 physical 64-bit integer registers |
| Little cores | 4, at half the big core's clock |
| Load-store log | 4 KB per little core |
| Segment limit | at most 5000 instructions |

## The data that has to move

Re-executing a segment needs two kinds of data.

* **Status data** is a checkpoint. It is one header packet followed by 31 register packets
  (x1..x31).
  * The header carries the PC where the next segment starts.
  * It also carries the number of instructions in the segment that just ended.
  * It also carries a "final" flag, set when checking is switched off.
  * One checkpoint is both the *end* checkpoint (ERCP) of one segment and the *start*
    checkpoint (SRCP) of the next.
* **Run-time data** is every value the big core took from outside the register file:
  * the address and data of each committed load;
  * the address and data of each committed store;
  * the CSR number and value of each committed CSR read.

  The little core replays loads and CSR reads from this log. It checks its stores against it.

Every transfer is a packet (`pkt_t` in `rtl/meek_pkg.sv`). A packet has a 3-bit kind and a
5-bit register index as side-band bits, plus a 64-bit address/PC word and a 64-bit data word.
The fabric moves two packets per cycle, which is a 256-bit payload path.

## Big-core side: the Data Extraction Unit (`deu`)

The DEU is purely an observer. It reads committed state and never changes how the core
executes, except that it holds commit while it copies registers.

### Commit detector (`commit_detector`)

The commit detector looks at the opcode and function fields of the up to four instructions
committing each cycle.

* It tags each lane as a load, a store, a CSR read or nothing.
* It executes the two big-core MEEK instructions:
  * `b.hook` attaches a little core to this big core (a hook mask);
  * `b.check` turns checking on or off.
* It counts the instructions in the open segment and the log entries it has produced.

It ends the segment with an RCP at the end of the current commit group in five cases:

* the little core's log would otherwise overflow (256 entries, with one commit group of
  headroom);
* the segment reaches the 5000-instruction timeout;
* a trap into kernel mode commits;
* checking is switched on (the first RCP);
* checking is switched off (the final RCP).

### Register copy (`deu_ctrl`, `prf_ctrl`)

On an RCP, the DEU holds commit and reads x1..x31 from the physical register file.

* It takes three of the file's read ports and reads three registers per cycle, so a checkpoint
  takes 11 cycles.
* The first beat also pushes the header.
* The walk uses a base address that starts at 0x01, steps by 0x03 and stops after the beat
  whose base has reached 0x1D.

The big core's register file is indexed by physical register. `prf_ctrl` therefore keeps a
**commit map table** that maps each architectural register (5 bits) to the physical register
(7 bits) holding its committed value. It is updated from each commit lane's destination, in
lane order. A switch in front of each read port gives the DEU priority. When the DEU takes a
port, `core_preempt_o` tells the core so it can retry. Commit is held during the copy, so the
mapping cannot change underneath it.

### Run-time data and LSQ parity

For each committing load or store, the DEU takes the address and data from the head of the
load-store queue (LSQ). The LSQ entry carries a copy of the cache's per-byte parity. The DEU
recomputes the parity of the forwarded data. A difference raises `parity_err_o`. The LSQ is
the one place where a value is covered by neither the cache's parity nor the re-execution.

A CSR read forwards the value of the named CSR through a CSR read port. Only one CSR read may
commit per cycle.

### Program order

Every packet gets an 8-bit sequence number in program order:

* lanes in order;
* the header before its registers;
* registers in ascending order.

The packets then leave on per-lane FIFOs. Lane *l*'s run-time packet goes to lane *l*'s FIFO.
Status words use lanes 0..2 for the three registers and the last lane for the header. This
lane assignment needs a commit width of at least four.

## Forwarding fabric (`f2` = `dc_buffer` ×4 + `hm_noc`)

Commits come in bursts. Four loads at an RCP boundary produce four run-time packets and a
checkpoint in the same cycle. The fabric is built so that this never holds commit for longer
than the copy itself.

* **Dual-channel buffers.** Each commit lane has two independent FIFOs, one for status and
  one for run-time data (`dc_buffer`, built from `sync_fifo`). A lane can store its run-time
  packet in its commit cycle even while a checkpoint is queued.
* **Re-ordering.** The re-ordering stage in `hm_noc` looks at the heads of all eight FIFOs.
  Each cycle it picks the packet with the expected sequence number and the one after it.
  Up to two packets leave per cycle, in exact program order.
* **Owner and multicast.** The fabric keeps an *owner*: the little core re-executing the
  open segment.
  * Run-time packets go to the owner only.
  * A header closes the owner's segment. The next hooked core that has finished its previous
    segment becomes the owner, in round-robin order.
  * The header and its 31 registers are sent once, to both the old owner (its end
    checkpoint) and the new owner (its start checkpoint).
  * A final header goes only to the old owner.
  * A packet moves only when every destination has room. A header always travels alone in
    the first slot.
* **Back-pressure.** A core reports each finished segment by toggling a done line. The
  fabric synchronises this line with two flops. If no hooked core is free when a header
  arrives, the fabric stalls (`stall_o`). The FIFOs then fill, and finally the DEU holds
  commit. This is the only way the checkers slow the big core.

## Clock-domain crossing (`cdc_fifo`)

Each little core has a dual-clock FIFO.

* One entry holds one packet pair: 2 × 136 bits plus two valid bits, 274 bits in all.
* The pointers cross in Gray code through two flops.
* Full is judged in the write domain and empty in the read domain. Both are conservative.
* The default depth is 8.

## Little-core side (`lc_ext` = `msu` + `lsl` + `mini_dec` + multiplexers)

### Two modes

A little core runs ordinary programs in **application mode**. It runs a checker thread in
**check mode**.

`l.mode(core, on)` sets a mode bit. Check mode is active only while the running thread's ID
equals the checker thread's ID. The MSU learns that ID when the checker executes
`l.record`. An operating system can therefore time-share the little core between checking
and normal work.

In check mode, the MA stage sends every load, store and CSR read to the load-store log
instead of the D-cache. The Mini-Decoder (`mini_dec`) classifies the instruction in MA for
this purpose.

### Load-store log (`lsl`)

The log has two in-order FIFO "ways", filled two packets per cycle from the crossing.

* The **status way** (64 packets) holds the checkpoints.
* The **run-time way** (256 entries of address + data, i.e. 4 KB) holds the memory log.

Each replayed access consumes the head of the run-time way.

* A load or CSR read gets the logged data.
* The LS-Comp comparator checks the access kind and address against the log. For a store,
  it also checks the data.
* A mismatch pulses `err_o`. The MSU passes it straight on to `err_irq_o`, so the error is
  reported within the segment, before the end checkpoint.
* An empty log stalls the access. This keeps the checker behind the big core.

### Mode switch unit (`msu`) and the checker program

The checker thread is a loop of MEEK instructions (custom-0 opcode, funct3 selects the
instruction):

```
l.mode(me, check)
loop:
  l.record(buf)       save x1..x31 to buf (one store per cycle), remember pc+4
  wait until l.rslt reports "start checkpoint waiting"
  l.apply             copy header + 31 registers from the status way into the GPRs
  l.jal(0)            jump to the segment's start PC (taken from the applied header)
  ... re-executed instructions, memory from the log ...
  -- hardware: once the end header is at the head of the status way and the
     retired-instruction count equals its length, retirement is held, the 31
     registers are compared with the GPRs (one per cycle), x1..x31 are
     reloaded from buf, the PC returns to after l.record, done toggles to
     the fabric, and err_irq_o pulses if anything mismatched
  l.rslt              bit0 = no mismatch, bit1 = next start checkpoint waiting
```

The MSU reaches the GPRs through multiplexers at the ID stage. While it owns them,
`gpr_own_o` holds the pipeline.

### Timing of a segment

These figures apply at the reference configuration.

* **Checkpoint copy.** The big core is held for 11 cycles per checkpoint. The fabric then
  needs 32 cycles, because the header travels alone and the 31 registers go two per cycle.
* **Start of a segment on a little core.** `l.apply` takes at least 32 cycles.
* **End of a segment on a little core.** The compare and the restore take at least
  31 + 31 cycles. The restore depends on the D-cache.

## Where this design departs from, or adds to, the description it follows

The source describes most blocks by what they do and not how. The following points are this
design's own:

* **Encodings.**
  * The MEEK instructions use custom-0 with funct3 0..6 (`b.hook`, `b.check`, `l.mode`,
    `l.record`, `l.apply`, `l.jal`, `l.rslt`).
  * The `l.rslt` bits are as listed above.
  * The packet format is this design's own.
* **`l.jal` target.** `l.jal` with rs1 = 0 jumps to the PC of the last applied start
  checkpoint. The original program writes this as jumping to "the new start checkpoint's PC".
* **Source of `l.apply`.** The instruction list of the original gives `l.apply` an address
  operand. Its checker program and its prose apply the registers from the log. This design
  follows the program: `l.apply` reads the log's status way and ignores its operand.
* **Checkpoint contents.** A checkpoint holds the 31 integer registers only. Floating-point
  registers and CSR state are not checkpointed. CSR *reads* are logged and replayed like
  loads.
* **Return address.** `l.record` stores the return point, and the MSU jumps back there after
  the compare. The original only says that execution returns there after checking.
* **Log size.** The 4 KB log is counted as the run-time way only (256 × 16 B). The status
  way is extra.
* **Network.** The multicast network is described as a 1-to-N Manhattan grid. Its routers
  are not described. Here it is a single logical stage with the same ordering, width and
  multicast behaviour. Hop latency across a real grid is not modelled.
* **Owner choice.** Round-robin among hooked, free cores. The original does not say how the
  next core is chosen.
* **Commit hold.** Commit is held for the whole register copy. The original says the DEU
  preempts the register read ports; holding commit is the simplest way to keep the copied
  registers consistent.
* **Buffer depths.** Depth 8 for the lane FIFOs and the crossing. All depths must be powers
  of two.
* **CSR number.** For CSR reads the little core puts the CSR number on the address input, so
  the log compares it in place of an address.
* **Big-core timing.** An RCP is always placed at the end of a commit group. `b.hook` and
  `b.check` are expected to commit alone.
* **Deadlock avoidance.** The checker must never run ahead of the main thread. This design
  enforces it only for data: an empty log stalls the checker. Keeping instruction fetch
  behind (so page faults hit the main thread first) is left to the operating system.
* **Not built:**
  * the cores, caches, memory bus and L2/LLC;
  * the operating-system scheduler and the checker software;
  * physical implementation.

## Files

Each file opens with a comment giving its interface and timing.

| File | Contents |
|---|---|
| `rtl/meek_pkg.sv` | parameters, packet and commit types, opcodes |
| `rtl/commit_detector.sv`, `deu_ctrl.sv`, `prf_ctrl.sv`, `deu.sv` | big-core extraction |
| `rtl/sync_fifo.sv`, `dc_buffer.sv`, `hm_noc.sv`, `f2.sv` | forwarding fabric |
| `rtl/cdc_fifo.sv` | clock-domain crossing |
| `rtl/lsl.sv`, `mini_dec.sv`, `msu.sv`, `lc_ext.sv` | little-core additions |
| `rtl/meek_top.sv` | the whole MEEK hardware, two clock domains |
| `tb/tb_<block>.sv` | self-checking testbench per block |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A watchdog counts a
failure if the test hangs. Stimulus is random (`$urandom`). With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/meek_pkg.sv tb/tb_meek_top.sv \
          --top-module tb_meek_top && ./obj_dir/Vtb_meek_top
```

Replace the testbench name to run another test. `-y rtl` lets Verilator find the modules
by file name. The package is listed first.

`tb_meek_top` instantiates `meek_top` with all defaults: 4 commit lanes, 4 little cores, a
5000-instruction timeout and a 4 KB log. It runs in about ten seconds.

* **Big-core model.** It commits a 20,000-instruction random trace with register renaming.
  The trace includes loads, stores, CSR reads, traps, `b.hook`, `b.check` on and off, and a
  long ALU-only stretch.
* **Little-core models.** Each runs the checker program above. Some segments are replayed
  with an injected fault: a store with the wrong data, or a wrong value in a register that
  the end checkpoint covers.
* **What it checks.**
  * Loads are replayed with the logged values.
  * After each segment the checker returns to the instruction after `l.record` with its own
    registers restored.
  * Exactly the faulty segments raise the interrupt, and `l.rslt` reports the same result.
  * A store fault is caught by the log compare. A register fault is caught at the end
    checkpoint.
  * The big core's own register reads are unaffected when the DEU is idle.
  * Each mechanism happened at least once and was counted. The mechanisms are: each RCP
    cause, commit hold, fabric stall, multicast, dual-packet cycles, parity error, port
    preemption, mode switches, log and register mismatches, and the retirement hold.
* **Hang detection.** A second watchdog fails the test if nothing commits and no segment
  finishes for 60,000 little-core cycles.

## How far to trust it

Each block has its own testbench against an independent reference model. Each testbench
was also run against a copy of its block with one deliberate bug, to show that it fails.

The design has not been run with real BOOM or Rocket RTL. The interfaces to them are this
design's reading of where the original attaches, and they would need adapting to a real
core:

* the commit lanes;
* the LSQ head;
* the register-file read ports;
* the MA-stage and ID-stage signals of the in-order pipeline.
