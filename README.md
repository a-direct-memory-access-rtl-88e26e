# A descriptor-driven DMA controller frontend with speculative prefetching

A plain AXI DMA engine moves one linear block of memory per command. Irregular
transfers (scatter-gather lists, strided tiles, many small network buffers)
need hundreds of such commands. Issuing them one by one from a CPU costs more
than the data movement itself. This design puts a small frontend in front of
such an engine. Software writes a *chain* of 32-byte transfer descriptors into
ordinary memory and hands the DMAC a single pointer to the first one. The
frontend then:

* fetches the descriptors over its own AXI4 manager port and follows the
  chain's `next` pointers;
* hands each descriptor to the DMA engine (the *backend*) as one linear
  transfer;
* marks each descriptor as done in memory by overwriting its first 8 bytes
  with all ones, and optionally raises an interrupt.

With small transfers, the time to fetch the next descriptor dominates. The
frontend hides it by **speculative prefetching**. Chains are usually allocated
back to back, so while descriptor *A* is in flight it also reads *A+32*,
*A+64*, and so on. If the `next` pointer turns out to point elsewhere, the
guesses are thrown away. The correct read then goes out in the same clock
cycle in which the `next` field arrives. A wrong guess therefore costs no more
latency than not guessing at all.

The RTL is SystemVerilog-2017 and synthesizable. It is built for a 64-bit AXI
system, with 64-bit addresses and data. Its defaults allow 4 descriptors in
flight and 4 speculative prefetches.

## Structure

```
                 +--------------------------- dmac_top ----------------------------+
                 |  +---------------------- dmac_frontend -----------------------+ |
 reg_req_i  ---->|  | dmac_regs --> dmac_desc_fetch --+--> backend queue -------+-|--> be_req_*
 reg_rsp_o  <----|  | (launch FIFO)  (AR/R, prefetch) |                       | |
                 |  |                                 +--> dmac_feedback <-----|-|--- be_done_*
                 |  |                                      (ring, AW/W/B) -----|-|--> irq_o
                 |  +---------------- one AXI manager port ------------------+ |
                 |                           | port 1                            |
 be_axi_req_i -->|-------- port 0 ------> axi_rr_arbiter ----------------------|--> axi_req_o
 be_axi_rsp_o <--|                                                             |<-- axi_rsp_i
                 +-------------------------------------------------------------+
```

| File | Contents |
|---|---|
| `rtl/dmac_pkg.sv` | AXI channel structs, descriptor types, register offsets, constants |
| `rtl/dmac_fifo.sv` | generic synchronous FIFO (any type, any depth) |
| `rtl/dmac_regs.sv` | configuration register and chain launch queue |
| `rtl/dmac_desc_fetch.sv` | request logic: descriptor reads, chain following, speculation |
| `rtl/dmac_feedback.sv` | completion write-back and interrupt |
| `rtl/dmac_frontend.sv` | the frontend: the four parts above plus the backend request queue |
| `rtl/axi_rr_arbiter.sv` | fair round-robin merge of two AXI managers |
| `rtl/dmac_top.sv` | frontend + arbiter; the backend attaches through ports |

The backend itself is not part of this RTL. It is an existing AXI DMA engine
that moves `length` bytes from `src` to `dst` and reports completion in order.
`dmac_top` offers it a transfer-request port (`be_req_*`), a completion port
(`be_done_*`) and a slot on the arbiter (`be_axi_req_i`/`be_axi_rsp_o`). The
testbenches use a behavioural stand-in, `tb/dma_backend_model.sv`.

## Descriptor format

Each descriptor is 32 bytes, 32-byte aligned, and read as one 4-beat AXI burst:

| Beat | Bytes | Field | Meaning |
|---|---|---|---|
| 0 | 0..3 | `length` | transfer size in bytes, unsigned 32 bit (up to 4 GiB - 1) |
| 0 | 4..7 | `config` | bit 0: raise an interrupt when done; bits 31:1: passed to the backend unchanged |
| 1 | 8..15 | `next` | address of the next descriptor; `0xFFFF_FFFF_FFFF_FFFF` ends the chain |
| 2 | 16..23 | `source` | source address |
| 3 | 24..31 | `destination` | destination address |

In C this is `struct { u32 length; u32 config; u64 next; u64 source; u64 destination; }`.

All ones is a safe end-of-chain value: no 32-byte descriptor can start there.
When the backend reports a transfer complete, bytes 0..7 of its descriptor
(`length` and `config`) are overwritten with all ones. Software can poll for
that mark instead of taking an interrupt per transfer. The backend in the
tests needs `length`, `source` and `destination` to be multiples of 8.

## Programming model

The configuration port is a simple valid/ready register bus (`reg_req_t` /
`reg_rsp_t` in `dmac_pkg`), with 8-bit offsets and 64-bit data. An SoC
connects it behind an AXI-Lite or similar adapter.

| Offset | Name | Access | Function |
|---|---|---|---|
| 0x00 | `DESC_ADDR` | W | address of a chain's first descriptor; writing it launches the chain (reads return 0) |
| 0x08 | `STATUS` | R | bit 0 busy, bit 1 launch queue full, bits 15:8 chains queued |

Other offsets return `error`.

* **Launch queue.** It holds `CSR_DEPTH` (4) chains. A write to a full queue
  is not dropped: `ready` stays low until a slot frees up. Chains run one
  after the other, in launch order.
* **Completion.** Poll the first word of a descriptor for all ones, or set
  `config[0]`. `irq_o` then pulses high for one cycle once the mark has been
  written and acknowledged. Software therefore always finds the mark already
  in memory when it takes the interrupt.

## Request logic (`dmac_desc_fetch`)

This is the most involved part. Its state is small because of one fact: an
in-order AXI ID (the frontend always reads with ID 0) returns bursts in the
order they were issued. At any time, the stream of descriptor responses
therefore looks like this:

```
[rest of current descriptor] [drop_q discarded descriptors] [committed next] [speculative slots...]
```

Bookkeeping needs only these registers:

* `cur_*`: the descriptor being received, with the beat counter `beat_q`;
* `drop_q`: how many whole descriptors still to be discarded;
* `nxt_*`: the committed next read, with a flag for whether it has been
  issued yet;
* `n_spec_q`: the number of speculative reads outstanding. Slot *k* always
  reads `base + 32*(k+1)`, so a count is enough and no address is stored.

At most one AR is issued per cycle, chosen by priority:

1. **Held request.** A speculative request that AR did not accept stays
   unchanged, as AXI requires. If the slots are discarded while it waits, it is
   marked stale and counted as a drop when it is finally accepted.
2. **Retry.** A committed read that could not be issued earlier.
3. **Miss reissue.** The address comes straight from the R data bus.
4. **Speculation.** The next sequential slot.

The decision happens on beat 1 of the current descriptor, the beat that
carries `next`:

| `next` equals | Action |
|---|---|
| all ones | End of chain. All slots become drops; the next chain may start at once. |
| address of slot 0 (current + 32) | **Hit.** Slot 0 becomes the committed next read; one slot is freed. |
| anything else | **Miss.** All slots become drops; a read of `next` is put on AR in this same cycle (combinational path R data to AR address). |

With `NUM_SPEC = 0`, every `next` takes the miss path. That gives the
non-speculative configuration with the same latency.

Descriptor beats 0..2 and all discarded beats are always accepted. Beat 3
carries `destination`, completes the descriptor and drives `desc_valid_o`
combinationally. It waits only if the backend queue or the completion ring is
full, and the credit rule below prevents that.

### Read credits (in-flight limit)

The frontend and the backend share one memory port. A memory that answers in
order (for example a single DRAM controller) therefore creates a deadlock
risk:

* the frontend holds R low on a descriptor's last beat because the backend
  queue is full;
* the backend cannot finish, because its payload reads are queued behind
  that beat.

The request logic therefore issues a descriptor read (committed or
speculative) only while this sum is below `NUM_INFLIGHT`:

* reads it has issued and will use, including the outstanding speculative
  slots;
* plus the descriptor currently being received;
* plus descriptors handed over and not yet written back (the ring occupancy,
  `inflight_i`).

A fetched descriptor then always finds room, and R is never held. On a miss,
the freed slots are credited in the same cycle, so the reissue still goes out
without delay when a place is free.

The rule has a cost. Speculative reads and descriptors in the backend draw on
the same budget, and a descriptor holds its place until its completion write
is acknowledged. With the default of 4, this bounds how much memory latency
can be hidden (see *Performance*). A larger `NUM_INFLIGHT` removes the bound.

## Feedback logic (`dmac_feedback`)

When a descriptor enters the backend queue, its address and interrupt flag are
recorded in a ring of `NUM_INFLIGHT` entries. Five pointers walk the ring:

* recorded;
* completed (advanced by `be_done_*`, in order);
* AW sent;
* W sent;
* B received.

The AW and W channels therefore advance independently, and several completion
writes can be outstanding. Each write is a single 8-byte beat of all ones
with full strobes. `irq_o` pulses in the cycle after the B handshake if the
entry's flag is set. A backend completion in cycle *t* can put AW and W on the
bus in cycle *t+1*. Write and read error responses are not reported.

## Round-robin arbiter (`axi_rr_arbiter`)

The arbiter merges two managers onto one AXI port: port 0 is the backend and
port 1 the frontend.

* **AW and AR** are each arbitrated round-robin. After every accepted request,
  priority passes to the other port. A request that is offered but not yet
  accepted keeps its grant.
* **Responses.** The port number is prepended to the ID, so R and B responses
  are routed back statelessly.
* **W beats** follow the AW order. A `W_FIFO_DEPTH`-entry FIFO holds the port
  order, and AW is stopped while that FIFO is full.
* **Latency.** The arbiter adds no cycles: all of the above is combinational.

Verilator's lint reports `UNOPTFLAT` on `ar_sel`. That loop exists only at the
granularity of the response struct. The frontend's `ar_valid` depends on R
data (the zero-latency miss reissue) but never on `ar_ready`.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NUM_INFLIGHT` | 4 | top, frontend, fetch, feedback | descriptors between read issue and completion write-back; backend queue and ring depth |
| `NUM_SPEC` | 4 | top, frontend, fetch | speculative prefetch slots; 0 disables prefetching |
| `CSR_DEPTH` | 4 | top, frontend | launch queue depth |
| `W_FIFO_DEPTH` | 4 | top, arbiter | write-order FIFO of the arbiter |

The three configurations usually compared are:

* *base*: 4 in flight, no prefetching (`NUM_SPEC = 0`);
* *speculation*: 4 and 4, the default;
* *scaled*: 24 and 24.

All three are parameter settings of the same RTL. The AXI widths are fixed
in `dmac_pkg` (64-bit address and data, 2-bit manager ID).

## Performance

Utilization is the number of payload read beats the backend receives per
clock cycle, in steady state. Every transfer of *n* bytes also costs its
32-byte descriptor on the same port, so the upper bound is `n / (n + 32)`.

Measured with `tb_dmac_util` on contiguous chains (all prefetches hit) and a
memory of fixed latency. There are three configurations: the default 4/4
(in flight / prefetch), 4/0 with prefetching off, and 24/24. Latencies are
in cycles:

| n [B] | bound | 4/4, 1 | 4/4, 13 | 4/4, 100 | 4/0, 1 | 4/0, 13 | 4/0, 100 | 24/24, 1 | 24/24, 13 | 24/24, 100 |
|---:|---:|---:|---:|---:|---:|---:|---:|---:|---:|---:|
| 8 | 0.200 | 0.167 | 0.065 | 0.010 | 0.200 | 0.053 | 0.008 | 0.192 | 0.193 | 0.038 |
| 16 | 0.333 | 0.286 | 0.127 | 0.019 | 0.333 | 0.105 | 0.016 | 0.319 | 0.335 | 0.083 |
| 32 | 0.500 | 0.444 | 0.246 | 0.039 | 0.500 | 0.205 | 0.031 | 0.486 | 0.509 | 0.176 |
| 64 | 0.667 | 0.615 | 0.405 | 0.077 | 0.667 | 0.390 | 0.062 | 0.655 | 0.669 | 0.275 |
| 128 | 0.800 | 0.762 | 0.577 | 0.151 | 0.800 | 0.610 | 0.122 | 0.802 | 0.808 | 0.732 |
| 256 | 0.889 | 0.865 | 0.731 | 0.290 | 0.889 | 0.762 | 0.237 | 0.867 | 0.866 | 0.884 |
| 512 | 0.941 | 0.928 | 0.845 | 0.454 | 0.941 | 0.865 | 0.447 | 0.931 | 0.929 | 0.932 |
| 1024 | 0.970 | 0.962 | 0.916 | 0.624 | 0.970 | 0.928 | 0.705 | 0.969 | 0.963 | 0.963 |
| 2048 | 0.985 | 0.980 | 0.955 | 0.780 | 0.985 | 0.962 | 0.827 | 0.985 | 0.981 | 0.981 |
| 4096 | 0.992 | 0.992 | 0.983 | 0.907 | 0.992 | 0.986 | 0.932 | 0.993 | 0.990 | 0.990 |
| 8192 | 0.996 | 0.996 | 0.994 | 0.954 | 0.996 | 0.996 | 0.976 | 0.996 | 0.996 | 0.996 |

With a 1-cycle memory and prefetching off, every size reaches the bound.
With 4/4, each transfer costs its four descriptor beats plus one idle cycle,
i.e. `n / (n + 40)`. Speculative reads take places from the same 4-entry
budget, and after four descriptors the frontend waits for a write-back.

With deeper memories, the 4-entry budget limits throughput more than
speculation does. 4/4 beats 4/0 only up to 64 B at 13 cycles and up to
512 B at 100 cycles. At 13 cycles and 64 B, the hit rate moves 4/4 only
between 0.36 and 0.41.

With 24/24, the budget no longer binds:
* at 13 cycles it comes within about 3 % of the bound from 64 B;
* at 100 cycles it does so from 256 B.

For the 24/24 configuration, the testbench's backend model accepts 16 jobs
instead of 4. Launch latency, measured with a 1-cycle memory in
`tb_dmac_top`:

* from the `DESC_ADDR` write to the frontend's first AR: 2 cycles;
* from that AR to the backend's first payload AR: 6 cycles.

## Where this RTL departs from the published design

* **In-flight accounting.** The read-credit rule above is this design's own.
  The reference results reach the `n/(n+32)` bound at 64 B and 13 cycles with
  4 descriptors in flight and 4 prefetches. This RTL needs a larger
  `NUM_INFLIGHT` for that. With 24/24 at 100 cycles, the reference reaches
  the bound from 128 B; this RTL reaches it from 256 B (0.73 against 0.80 at
  128 B). The published text does not describe the
  frontend/backend interlock, so how its numbers avoid the in-order-memory
  deadlock is unknown here.
* **Configuration port.** A register bus instead of an AXI subordinate port,
  and a register map (offsets, STATUS) of this design's own.
* **Config bits.** Only bit 0 (interrupt) is interpreted. The other bits are
  forwarded to the backend with no defined meaning.
* **Bus width.** Only 64-bit data is implemented. The original is
  configurable from 16 to 512 bits.
* **Interrupt.** The interrupt is a one-cycle pulse after the write response.
  An SoC interrupt controller with edge triggering or a level latch is
  expected.
* **Alignment.** Descriptors must be 32-byte aligned, so that a burst never
  crosses a 4 KiB boundary.
* **Errors.** AXI error responses are ignored.
* **Not included.** The backend, the SoC around the DMAC, the interrupt
  controller and the Linux `dmaengine` driver.

## Verification

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| Testbench | What it covers |
|---|---|
| `tb_dmac_regs` | launch order, stall on full queue, STATUS fields, error on unknown offsets |
| `tb_dmac_desc_fetch` | contiguous, scattered, mixed and single-descriptor chains in a 5-cycle memory, random AR throttling and sink back-pressure; every descriptor delivered once and in order; hit count against the layout; same-cycle miss reissue; in-flight limit never exceeded, also with slow retirement |
| `tb_dmac_feedback` | 3-cycle memory, random completion times: one all-ones 8-byte write per completion at the right address, neighbouring word untouched, interrupt only for flagged descriptors and only after B, recording back-pressured at the in-flight limit |
| `tb_axi_rr_arbiter` | two random managers: data integrity, ID routing, W order, round-robin fairness under back-to-back requests |
| `tb_dmac_frontend` | frontend with a 4-cycle memory and a stub backend: transfers received in order, marks, untouched fields, interrupt count, launch stalls, STATUS busy/idle |
| `tb_dmac_top` | end-to-end at default parameters, with 13-cycle and 1-cycle memories (see below) |
| `tb_dmac_util` | the utilization sweep above: 3 configurations × 3 latencies × 11 sizes, data and marks checked for every point, and hit rates 0-100 % at 13 cycles |

`tb_dmac_top` checks:

* every destination holds the source data;
* every descriptor is marked done;
* the interrupt count is correct;
* the launch latencies above;
* every mechanism occurred at least once: prefetch hit, miss reissue,
  discard at chain end, held speculative request, full launch queue, in-flight
  limit, arbiter contention and interrupt.

The models in `tb/` are `axi_mem_model`, `dma_backend_model` and
`dmac_system_tb_pkg`:

* **`axi_mem_model`** is an AXI memory with a fixed latency that answers in
  order. It is sparse, and unwritten words read as a pattern derived from
  their address.
* **`dma_backend_model`** is the backend stand-in. It splits transfers at
  256 beats and at 4 KiB boundaries, and completes them in order.
* **`dmac_system_tb_pkg`** holds helpers shared by the system testbenches.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb rtl/dmac_pkg.sv tb/tb_dmac_top.sv --top-module tb_dmac_top
./obj_dir/Vtb_dmac_top
```

`--timescale` matters: the testbenches use `#` delays in nanoseconds.
`-Wno-fatal` keeps warnings from stopping the build. The warnings are the
`UNOPTFLAT` note explained under the arbiter, plus style warnings in the
testbenches. Each
run takes a few seconds; `tb_dmac_util` takes about 20 s. Configurations
are chosen with `dmac_top`'s parameters, for example
`dmac_top #(.NUM_INFLIGHT(24), .NUM_SPEC(24))`, as `tb_dmac_util` does.
