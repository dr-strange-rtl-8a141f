# DR-STRaNGe memory-controller extension in SystemVerilog

DRAM can be used as a true random number generator (TRNG). Mechanisms such as D-RaNGe read
reserved DRAM rows with deliberately violated timing and collect the bits that fail at
random. The raw throughput is high, but producing a random number occupies a whole channel
for a long time: about 40 memory cycles for 8 bits, and about 198 cycles (990 ns) for a
64-bit number. A memory controller that knows nothing about this ("RNG-oblivious") stalls
every regular request behind each random number request. That slows other programs and is
unfair to them.

DR-STRaNGe makes the controller aware of random number generation in three ways:

* **Random number buffering.** The controller predicts which channel idle periods are long
  enough to be useful. It uses them to produce random bits in small 8-bit batches ahead of
  demand and keeps the bits in a small buffer. A request that finds a whole number in the
  buffer is answered in one cycle.
* **RNG-aware scheduling.** Random number (RNG) requests wait in their own queue. A
  scheduler decides between that queue and the regular read queue using the priorities
  the operating system gives applications, and a stall counter prevents starvation.
* **An application interface.** Memory-mapped registers sit behind the operating system's
  `getrandom()` call. The first request an application makes marks it as an RNG
  application.

This repository holds synthesizable RTL for all three, around four DDR3 channel
controllers, plus a self-checking testbench for every module. The default configuration
has:

* 4 channels, 8 banks and 64K rows per bank;
* 32-entry read, write and RNG queues per channel;
* FR-FCFS scheduling with a column cap of 16;
* a 16-entry buffer of 64-bit random numbers;
* 256-entry predictor tables, a 40-cycle period threshold and a low-utilisation threshold
  of 4;
* a starvation stall limit of 100 cycles.

## Block structure

```
             csr_* (getrandom, OS)               mem_req_* (from the last-level cache)
                    |                                         |
             +--------------+                      routed by the address's channel bits
             | app_interface|--prio, RNG marks-------------+  |
             +--------------+                              |  |
                    | 64-bit requests                      v  v
          +---------------------+   8-bit RNG requests  +--------------------+ x4
rn_resp <-| rng_request_handler |---------------------->| channel_controller |--> cmd_*   (DDR3 backend)
          +---------------------+<------fill_req--------|  read/write/RNG    |--> trng_start
             |  pop / reserve  |   ------fill_gnt------>|  queues, predictor,|<-- trng_done, trng_bits
          +---------------------+                       |  scheduler, modes  |
          |      rn_buffer      |<======= trng_bits (8 bits per batch per channel) ======
          +---------------------+
```

| File | Module | Role |
|---|---|---|
| `rtl/drs_pkg.sv` | package | Sizes, address layout, request and event types |
| `rtl/dr_strange_top.sv` | `dr_strange_top` | Top level: wires everything and routes requests to channels |
| `rtl/app_interface.sv` | `app_interface` | Register map, priorities, RNG-application marks |
| `rtl/rng_request_handler.sv` | `rng_request_handler` | Serves random number requests from the buffer or by on-demand generation; grants buffer space to fill batches |
| `rtl/rn_buffer.sv` | `rn_buffer` | Random number buffer with space reservation |
| `rtl/channel_controller.sv` | `channel_controller` | One channel: three queues, the predictor, the scheduler, open-row tracking and the two execution modes |
| `rtl/idleness_predictor.sv` | `idleness_predictor` | Predictor with a table of 2-bit counters and low-utilisation detection |
| `rtl/rng_aware_scheduler.sv` | `rng_aware_scheduler` | Chooses between the read queue and the RNG queue |
| `rtl/req_queue.sv` | `req_queue` | Age-ordered queue; removal from any slot |
| `rtl/frfcfs_picker.sv` | `frfcfs_picker` | FR-FCFS selection with a per-bank column cap |

Each file begins with a comment giving its interface, its timing, and which parts follow
the published design and which are local choices.

## What is outside the RTL

Three parts are not included. Each is brought out as ports:

* **The TRNG engine** (`trng_start`, `trng_done`, `trng_bits` per channel). This is the
  reduced-timing command sequence that reads the reserved rows. It depends on the DRAM
  TRNG mechanism chosen, and the design does not rely on how it works. One batch delivers
  8 random bits (one bit per bank) with a `trng_done` pulse. `tb/trng_model.sv` models it
  with a 40-cycle latency.
* **The DDR3 command and timing backend** (`cmd_valid`, `cmd_write`, `cmd_addr`, `cmd_app`
  and `cmd_ready` per channel). The channel presents one regular request at a time and
  treats it as issued when `cmd_ready` is high. Activate, precharge and tRCD timing, and
  the read data return path, are the baseline controller's job. DR-STRaNGe does not
  change them.
* **Cores and operating system.** The testbenches drive the register interface in their
  place.

## The request path: buffer first, then on-demand generation

A read of the `RNG_DATA` register becomes one 64-bit request, tagged with the id of the
calling application. In `rng_request_handler`:

1. If no earlier request is waiting and the buffer holds 64 bits, the request pops them.
   The answer appears on `rn_resp_*` in the next cycle.
2. Otherwise the request joins a pending FIFO of 32 entries.
3. While the bits buffered plus the bits in flight are fewer than the pending requests
   need, the handler issues one 8-bit RNG request per cycle. The requests go round robin
   to channels whose RNG queue has room. Each carries the id of the oldest pending request
   it will help serve, so the channel's scheduler can see that application's priority.
4. Pending requests are answered in arrival order as soon as the buffer holds a whole
   number.

So a 64-bit request that misses becomes eight 8-bit batches spread over the four channels.
Generated bits always pass through the buffer, whatever caused them to be generated.

### Buffer organisation and reservation

`rn_buffer` is a FIFO of 8-bit batch slots: 16 × 64 / 8 = 128 slots. A 64-bit number is
formed from the eight oldest slots, with the oldest slot in the least significant byte.
Each served byte is cleared, so no random bit is handed out twice.

Batches from different channels finish at unpredictable times, so space is claimed before
a batch starts rather than when its bits arrive:

* `reserve` takes one slot.
* `inflight` counts reserved slots that have not been filled yet.
* `space` says whether another reservation fits.

An on-demand batch always reserves its slot. A fill batch starts only after the handler
grants it (`fill_gnt`). The grant is given at most once per cycle, round robin, and only
when no on-demand batch is reserving in that cycle. A full buffer therefore stops all
filling until a number is served, and it cannot overflow. An assertion checks that no
batch arrives without a reservation.

## A channel: two modes and one decision per cycle

A channel is in **Regular Execution Mode** or in **RNG Mode**. A channel in RNG Mode
issues no regular commands, because the violated timing could corrupt data in other rows.
Whenever no batch is running, the channel makes one decision per cycle, in this order:

1. **On-demand RNG.** A request from the RNG queue, if the RNG-aware scheduler selects it.
2. **Fill.** A batch for the buffer. All of these must hold:
   * the predictor raises `fill_go`;
   * the RNG queue is empty;
   * the handler grants buffer space;
   * no regular read has interrupted filling since the last read was issued.
3. **Read.** The read the FR-FCFS picker chooses, when the scheduler selects the read
   queue and the write queue is not full.
4. **Write.** A write from the write queue, when no read is chosen or the write queue is
   full.

Starting a batch moves the channel to RNG Mode. `trng_done` moves it back, unless the next
batch starts in the same cycle. An idle channel therefore keeps filling the buffer, batch
after batch, until one of three things happens:

* the buffer is full;
* the predictor no longer expects a long period;
* a regular read arrives. A batch that has started always completes its 8 bits.

After a batch all open rows are treated as closed, because the reserved rows of every bank
have been accessed.

### Idleness predictor

Each channel has its own predictor (`idleness_predictor`), with:

* a table of 256 two-bit saturating counters;
* a register holding the last accessed address;
* an idle-length counter.

While the read and write queues are both empty, the counter counts cycles. When a regular
request arrives, the table entry of the *previous* address is updated. The entry counts up
if the idle period just ended lasted at least 40 cycles, and down otherwise. The new
request's address then becomes the last accessed address.

The prediction reads the entry of the last accessed address. It is "long" when the
counter is 2 or 3. Filling is allowed (`fill_go`) when the prediction is long and fewer
than 4 reads are waiting. An empty channel meets this condition, and so does a lightly
used one ("low utilisation"). In the second case the few waiting reads are held back
while a batch runs. The extension exists because, in a busy system, truly empty periods
of 40 cycles or more are rare.

The table index is an XOR of the 8-bit slices of the cache-line address. Counters reset
to 1, which means "short, weakly held".

## RNG-aware scheduling

This is the part of the design that is hardest to get right. The rules apply only when
both the read queue and the RNG queue hold requests. Two priorities are compared:

* **pR** is the highest priority among the applications with a request in the RNG queue.
* **pN** is the highest priority among *non-RNG* applications with a read in the read
  queue. Reads issued by RNG applications do not count towards pN.

| Case | Choice |
|---|---|
| pR > pN (RNG prioritised) | The RNG queue. It stays chosen until it is empty (a burst), so the channel does not switch modes back and forth. |
| pR == pN | Same as above: equal priority favours the RNG requests. |
| pN > pR (non-RNG prioritised) | The read queue. Exception: if the oldest read belongs to an RNG application and arrived after the oldest RNG request, the RNG queue goes first until that is no longer true. |
| No non-RNG application has a read waiting | The older of the two queue heads. |

Within the RNG queue requests are taken oldest first. Within the read queue FR-FCFS
applies: the oldest row hit first, then the oldest request. A bank's row hits stop being
favoured after 16 have been served since the row was opened.

**Starvation prevention.** A stall counter counts every cycle in which a priority decision
keeps the other queue waiting. When it reaches 100, one request from the held-back queue
is scheduled. The counter clears:

* when a request from the held-back queue is scheduled;
* when any priority register is written;
* when no queue is being held back;
* when the favoured queue changes.

The testbench checks that the forced pick comes exactly 100 cycles after the stall
begins.

The scheduler reports why it chose each time: priority for RNG, priority for reads,
age, or starvation. These reasons appear in the per-channel event outputs `ch_ev`.

## Register map

All accesses are 64 bits wide. `csr_app` identifies the application making the access.

| Address | Name | Access |
|---|---|---|
| `0x00` | `RNG_DATA` | Read: request a random number. The value arrives later on `rn_resp_*`, tagged with `csr_app`. `csr_ready` is low while the pending FIFO is full. |
| `0x01` | `RNG_APPS` | Read: bit *a* set means application *a* is an RNG application. Write: writing a one clears that bit, for when an application exits. |
| `0x10 + a` | `PRIO[a]` | Read/write: the 3-bit priority of application *a* (a larger value wins). A write clears the stall counters. |

There are 16 application ids. Bits 63:16 of a register read are always zero.

## Timing summary

| Event | Latency |
|---|---|
| Request served from the buffer | Answer in the cycle after it is accepted |
| One 8-bit batch | The engine's latency: 40 cycles in the model, plus queueing |
| Number generated on demand | Eight batches spread over four channels, so about two batch times when the channels are free |
| Regular request | Queued the cycle it is accepted. The earliest issue is the next cycle. |

Generation rate with the 40-cycle model: 4 channels × 8 bits / 40 cycles × 800 MHz =
640 Mb/s. The serving path can hand out one 64-bit number per cycle.

## Where this RTL departs from the published design, or fills gaps

* The reinforcement-learning idleness predictor, which was proposed as an alternative, is
  not built. Neither is the "simple buffering" variant that fills on every idle cycle
  with no prediction. Only the simple predictor with the low-utilisation extension, the
  main configuration, is built.
* The TRNG engine and the DDR3 timing backend are ports, as described above. The RNG
  mechanism evaluated with this design (D-RaNGe) delivers about 563 Mb/s. Throughput is
  set by the engine connected to the ports, not by this RTL.
* These are local choices:
  * splitting a request into 8-bit batches spread round robin over channels;
  * answering pending requests in order;
  * reserving buffer space before a batch;
  * the order of the per-channel decisions;
  * the write-drain rule;
  * closing all rows after a batch;
  * the predictor hash and reset value;
  * the register map;
  * the 16-bit wrap-safe arrival time stamps, which compare correctly for requests less
    than 32768 cycles apart.
* Low utilisation is judged on the read queue, because that is the queue a fill batch
  stalls.
* Fill batches start only when the RNG queue is empty, so on-demand requests always go
  first.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one compares the module against
a reference model written independently in the testbench. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/drs_pkg.sv tb/tb_dr_strange_top.sv --top-module tb_dr_strange_top -Mdir obj_top
./obj_top/Vtb_dr_strange_top
```

Replace `tb_dr_strange_top` with `tb_req_queue`, `tb_frfcfs_picker`,
`tb_idleness_predictor`, `tb_rng_aware_scheduler`, `tb_rn_buffer`, `tb_app_interface`,
`tb_rng_request_handler` or `tb_channel_controller` to run the other testbenches.

`tb_dr_strange_top` runs the whole design with every parameter at its default. It uses
four TRNG models and command ports that are ready at random. The run includes:

* quiet phases, in which the buffer fills up;
* bursts of random number requests from two RNG applications;
* mixed read and write traffic from three other applications;
* priority changes made through the registers.

It checks that:

* every random number request is answered, in order and to the right application, with
  the next 64 bits the engines produced;
* every regular request is issued exactly once, on its own channel;
* no channel issues a command during a batch;
* the RNG applications are marked.

It also counts how often each mechanism occurred, and fails if any count is zero. In one
run:

| Mechanism | Count |
|---|---|
| Buffer serves | 96 |
| Pending enqueues | 534 |
| Serves after generation | 534 |
| Cycles with the buffer full | 5590 |
| Fill batches | 794 |
| Low-utilisation fills | 597 |
| Fills stopped by a read | 199 |
| Mode switches | 1419 |
| On-demand batches | 4246 |
| RNG-priority picks | 2953 |
| Read-priority picks | 869 |
| Age picks | 1154 |
| Starvation picks | 960 |

All 630 random number requests and all 5640 memory requests completed in well under a
second of simulation time.

Most sizes are parameters of `dr_strange_top`:

* `RNBUF_ENTRIES`
* `QUEUE_DEPTH`
* `RNG_QUEUE_DEPTH`
* `PRED_ENTRIES`
* `PERIOD_THRESHOLD`
* `LOW_UTIL_THRESHOLD`
* `STALL_LIMIT`
* `COLUMN_CAP`

The channel, bank and row counts, the address layout {row, bank, channel, column} and the
number of applications are set in `drs_pkg`. A generic synthesis of the default top level
gives about 18k word-level cells and 23k flip-flop bits. The queues dominate: four
channels × three queues × 32 entries of 48 bits each.
