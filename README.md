# SpeedMalloc offload hardware

In a multi-threaded program every thread calls `malloc()` and `free()`.
Each thread's allocator metadata shares the caches with user data and has
to be synchronised with the other threads. SpeedMalloc sends all of these
calls to one small support core instead. That core runs the allocator
software and keeps all of the metadata in its own L1 caches. The main
cores only send a short packet and get the address back. Metadata never
pollutes their caches, and there are no cross-core locks, because a single
core owns the allocator.

This repository holds the hardware added for that offload, written as
synthesizable SystemVerilog:

- the main-core side of the new `mallocstart()` and `freestart()`
  instructions;
- the 8-cycle packet path between the main cores and the support core;
- the support core's hardware message queues (HMQ);
- the support-core side of the `mallocend()` and `freeend()` instructions.

The main cores, the support core's pipeline and caches, the coherent
network, the LLC and DRAM are existing parts. They are not built here; they
connect at the ports of `speedmalloc_top`.

## Signal packet (`smalloc_pkg`)

Every start and end signal carries one 96-bit packet:

| bits  | field        | start signal         | end signal            |
|-------|--------------|----------------------|-----------------------|
| 0-31  | PID          | process ID           | process ID            |
| 32-79 | data         | size (malloc) or pointer (free) | returned address |
| 80    | type         | 0 = malloc, 1 = free | 0 (malloc)            |
| 81-95 | main core ID | sender               | destination           |

The paper's drawing prints only the bit numbers 0, 31, 79, 80 and 95.
Using a single bit for the type, and 15 bits for the core ID, is this
design's reading of it. The first request of a process also carries a
128-bit image of the system control and segment registers that are needed
for address translation (`start_req_t.sysreg`). Its width is this design's
choice.

## Main-core invocation (`mc_invoke`)

There is one instance per main core. It is driven by the core's execute
stage (`ex_*`) and commit stage (`cm_*`).

- **Execute.** `mallocstart()` and `freestart()` send the start packet in
  the cycle they execute. They can do so only if a dispatcher slot credit is
  left. A second `mallocstart()` must also wait while one is still
  outstanding.
- **Registers.** The translation registers are attached when the PID
  differs from the last PID this core sent. This covers a process's first
  request and any request after a context switch.
- **Commit, malloc.** `mallocstart()` retires only once its end signal has
  arrived. The address goes to Rd (`cm_rd`). If the end signal arrived
  earlier, it is held until commit. While commit waits, `waiting` and
  `irq_mask` are high, so interrupts and exceptions are masked.
- **Commit, free.** `freestart()` retires at once.

Between execute and commit, the core keeps running independent
instructions.

## Packet path (`sig_link`)

Start requests, slot credits and end packets each pass through an
8-stage register pipe, matching the 8-cycle main/support core latency. The
end pipe is shared. At its exit, an end packet raises `end_valid` only for
the core named in its core-ID field. `net_ready` stands for the network
accepting a new end packet.

## Hardware message queues (`hmq`)

- **Dispatcher (`hmq_dispatcher`).** Each main core has its own 2-entry
  input slot. Each cycle, the dispatcher moves at most one request out of
  the slots. It picks round-robin among cores, skipping any request whose
  destination queue is full. The request goes into the malloc() queue or
  the free() queue according to its type. Carried registers are written to
  the register buffer. A slot credit is returned for every request moved.
- **malloc() queue, free() queue, response queue (`hmq_fifo`).** These are
  128-entry first-word-fall-through FIFOs.
- **Free() queue overflow (`hmq_spill`).** Sits between the dispatcher and
  the free() queue. While the queue has room and nothing is parked, a free
  goes straight in, adding no delay. Once the queue is full, further frees
  are written to a 1024-slot ring in a reserved memory region through the
  `spill_mem_*` port. As long as anything is parked there, every new free
  takes the same path. This keeps first-in first-out order. Whenever the
  queue has room beyond the reads already in flight, the oldest parked
  free is read back. The port holds each request until `spill_mem_gnt`.
  Read data may return any number of cycles later, in request order. The
  slot index is given, and the region's base address is added outside.
  The malloc() queue needs no such path. Each core has at most one
  malloc outstanding, so that queue never holds more than 16 entries. An
  assertion in the top level checks this.
- **Register buffer (`hmq_regbuf`).** A 16-line direct-mapped cache. It is
  indexed by the low PID bits and tagged with the rest of the PID.
- **Scheduler (`hmq_scheduler`).** Offers the head of the malloc() queue.
  If that queue is empty, it offers the head of the free() queue. The
  offer comes with the register-buffer answer for the request's PID.
  Serving malloc first shortens the time main cores wait at commit, since
  frees never block a core.
- **Response queue.** Holds finished malloc() results. Its head is sent as
  the end signal whenever the path accepts one.

## Support-core controller (`sc_ctrl`)

Two registers hold the entry PCs of the malloc and free handlers. They are
written through `cfg_*`.

- **Idle.** With no request pending, the controller holds `stall` high:
  the support core's pipeline stalls to save energy.
- **Start.** When a request is offered, the controller takes it. It pulses
  `redirect_valid` with the handler PC and shows the request (and its
  registers) on `arg_*`.
- **End.** When the handler's `mallocend()` or `freeend()` retires
  (`end_valid`), the next pending request is taken in the same cycle. The
  core is redirected one cycle later, with no stall in between.
  `mallocend()` pushes the end packet, holding the returned address, into
  the response queue. If that queue is full, it is held with `end_ready`
  low. `freeend()` returns nothing.

## Top level (`speedmalloc_top`) and timing

The top level connects 16 `mc_invoke` units, `sig_link`, `hmq` and
`sc_ctrl`. The overflow memory port is brought out at the top. Its defaults are the evaluated system: 16 main cores, 128-entry
queues and an 8-cycle path.

With all queues empty, a malloc's result reaches its core 20 cycles plus
the handler's run time after `mallocstart()` executes. Those 20 cycles are:

- 8 cycles on the path;
- 1 cycle in the slot;
- 1 cycle in the queue;
- 1 cycle for the redirect;
- 1 cycle in the response queue;
- 8 cycles back.

Synthesised with the default parameters, the design is about 1500 cells
and 2200 flip-flops. It also has 76 kbit of queue and buffer memory.

## Departures from the paper and open points

- **Handler PC.** The instruction format gives `mallocstart()` a register
  holding the PC of the support core's handler. The packet drawing,
  however, has no PC field. The packet is kept as drawn, and the two
  handler PCs are loaded once into `sc_ctrl`.
- **Metadata update.** The invocation figure draws the metadata update
  after the end signal. The instruction description, however, has the end
  instruction start the next pending request. This design follows the
  instruction description: the handler finishes its metadata work before
  `mallocend()`.
- **Round-robin placement.** The paper gives round-robin service among
  cores to the scheduler. Here it is done by the dispatcher, where requests
  enter the FIFO queues. The queues then preserve that order.
- **Full queues.** The paper only suggests buffering extra requests in
  reserved memory when a queue is full. Here that is built for the free()
  queue alone, because the malloc() queue cannot fill. The ring size, the
  port handshake and the order-keeping rule are this design's. If the ring
  is full too, the free waits in its dispatcher slot and the core runs out
  of credits.
- **Parameters not in the paper.** The paper does not give these values;
  they are this design's choices:
  - the 2-entry slots and the credit flow control;
  - one outstanding `mallocstart()` per core;
  - 16 register-buffer lines;
  - the 128-bit register image;
  - the 1024-slot overflow ring.
- **Dispatch queue.** The paper gives a "128-entry dispatch queue" but
  draws separate malloc() and free() queues. Each of them has 128 entries
  here.
- **Not built.** The support core's in-order pipeline, its 16 KB L1
  caches, the main cores, the network, the LLC and memory (including the
  reserved overflow region). The allocator
  software is modelled only in the testbench.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

`tb_speedmalloc_top` runs the top level at its default size. Sixteen cores
run random malloc/free traffic against `sc_core_model`, a behavioural
support core running a 64/128/256-byte size-class allocator. The test
checks:

- every returned block;
- the isolated malloc latency;
- that every call is executed exactly once.

It also counts each mechanism and fails if any never happened:

- free() queue full;
- malloc served ahead of waiting frees;
- register-buffer hit and miss;
- idle stall;
- back-to-back handler starts;
- waiting at commit;
- a result that arrived before commit;
- credit exhaustion;
- several pending end packets;
- the allocator slow path;
- free() overflow into reserved memory (answered by `spill_mem_model`).

`tb_workloads` runs two patterns of multi-threaded programs on the
full-size top, at 1, 2, 4, 8 and 16 threads:

- server-client: each thread repeatedly replaces random blocks of its own
  pool;
- producer-consumer: each thread frees blocks that another thread
  allocated.

Besides checking correctness, it prints the cycles of each run. With the
model's handler times of 20 cycles (malloc) and 12 cycles (free), two or
more threads keep the support core busy. The hardware then adds about one
cycle per call: the redirect after the end instruction. At 16 threads,
2176 calls take 37005 cycles.

Example run with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/smalloc_pkg.sv rtl/hmq_fifo.sv \
  rtl/hmq_regbuf.sv rtl/hmq_spill.sv rtl/hmq_dispatcher.sv rtl/hmq_scheduler.sv rtl/hmq.sv \
  rtl/sig_link.sv rtl/mc_invoke.sv rtl/sc_ctrl.sv rtl/speedmalloc_top.sv \
  tb/sc_core_model.sv tb/spill_mem_model.sv \
  tb/tb_speedmalloc_top.sv --top-module tb_speedmalloc_top
./obj_dir/Vtb_speedmalloc_top
```
