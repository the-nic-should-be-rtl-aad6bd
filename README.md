# Lauberhorn: a NIC that hands RPCs to stalled CPU loads

A conventional server receives a remote procedure call in many steps. The NIC
DMAs the packet into a ring, an interrupt or a polling thread finds it, the
kernel or a bypass library strips the headers, finds the destination process
and unmarshals the arguments, and then someone schedules that process. This
design moves all of that into the NIC. It relies on a cache-coherent link
between NIC and CPU, on which the NIC can be the *home* of some cache lines:

* A core that wants work issues an ordinary load of a cache line owned by the
  NIC. The NIC does not answer that load until it has a request for the core.
  Until then the core is stalled in the memory system, not spinning.
* The answer is a 128-byte line that already holds everything the core needs:
  * the address of the handler to jump to (the code pointer),
  * its data pointer,
  * the transaction id,
  * the arguments.
* The core runs the handler and writes the result into that same line. It then
  loads the endpoint's *other* control line to ask for the next request. That
  load tells the NIC the result is ready. The NIC pulls the line back with a
  fetch-exclusive and sends the result to the client as a UDP reply.
* The NIC knows which core runs which service, because the kernel tells it on
  every context switch. It can therefore send a request straight to a core
  already waiting in that service's user-mode loop. If no core runs the
  service, the request goes to a kernel thread, which then schedules the
  service.

The RTL here implements the NIC side of this scheme:
* the receive datapath, from Ethernet frames to ready-to-load messages;
* the scheduler that picks a core;
* the per-endpoint protocol engine that stalls, answers and reclaims lines;
* the home agent for the NIC's lines;
* the reply path back to Ethernet;
* the register interface the kernel uses.

The Ethernet MAC, the coherent interconnect and the CPU cores are outside the
design. Their signals are ports of the top module `lauberhorn_nic`.

```
 rx_* ──► rx_hdr_decoder ──► rpc_decoder ──► msg_buffer (SRAM slots)
                                  │                ▲  │
                                  ▼                │  ▼
                             scheduler ──grant──► endpoint_2f2f ×2C ◄──► home_agent ◄──► cpu_* (coherent link)
                          (queue per service)                              │
                                                                 TX queue (sync_fifo)
                                                                           ▼
 tx_* ◄────────────────────────── tx_encoder ◄─────────────────────────────┘
 cfg_* ◄──► os_ctrl (tables, core bindings, kick / retire, load statistics)
```

## Endpoints and their lines

There are two endpoints per core (C = `NUM_CORES`, 48 by default):

* endpoints `0..C-1` are **kernel endpoints**, which kernel threads poll;
* endpoints `C..2C-1` are **user endpoints**, which the process currently
  running on that core polls from its user-mode loop.

Each endpoint owns `2 + AUX_LINES` lines (4 by default):

* lines 0 and 1 are the two **control lines**;
* the remaining lines are **auxiliary lines**, for arguments that do not fit
  in the control line.

A line address on the `cpu_*` channels is `{endpoint, line}`, so the address
alone tells the NIC which core is polling and whether it is in kernel or user
mode.

### Control line as the core receives it

| bytes  | field |
|--------|-------|
| 0      | message type: 1 = RPC, 2 = TryAgain, 3 = Retire |
| 1      | service index |
| 2–3    | argument length in bytes |
| 4–7    | transaction id |
| 8–15   | code pointer of the procedure |
| 16–23  | data pointer of the service |
| 24–127 | first 104 argument bytes |

* The next argument bytes are in auxiliary line 2, then line 3, and so on.
  With two auxiliary lines a request carries up to 360 bytes of arguments.
* A TryAgain or Retire line has only byte 0 set.
* Multi-byte fields are little endian.

### Control line as the core leaves it

The handler writes its result into the same control line:
* bytes 0–1 hold the result length;
* bytes 8–127 hold the result, so at most 120 bytes.

## The life of an endpoint (`endpoint_2f2f`)

This is the core of the design. Each endpoint is a small state machine. It
follows the core's use of the two control lines, which alternate strictly:
0, 1, 0, 1, …

1. **Load of control line *k*.**
   * If the endpoint still has a previous request outstanding, the core has
     finished it. The endpoint first issues a fetch-exclusive for control
     line *k̄*, the line that holds the result. The fetched line goes to the
     TX queue, tagged with its message slot.
   * It then fetch-exclusives each auxiliary line it handed out, so that the
     core cannot keep a stale copy of the old arguments in its cache.
   * Only then does it consider answering the new load.
2. **Waiting.**
   * The endpoint tells the scheduler it can take a request.
   * When the scheduler grants it one, it answers the load with the
     message's control line, read from the message buffer.
   * It then serves loads of the auxiliary lines from the same message.
3. **Timeout.**
   * If nothing arrives for `TIMEOUT_CYCLES`, the endpoint answers with
     TryAgain. This keeps the coherence protocol from timing out the stalled
     load. The default, 3,750,000 cycles, is 15 ms at 250 MHz.
   * A TryAgain carries no result, so the core's next load fetches nothing.
4. **Kick.**
   * The kernel writes a kick register for the endpoint, for example after
     sending an IPI to preempt the process.
   * A stalled load is then answered with TryAgain at once.
   * If the core is busy in a handler, the kick is remembered and answers its
     next load.
5. **Retire.**
   * On a kernel endpoint, a retire command answers the next or current load
     with Retire, which ends that kernel thread's use of the core.
   * User endpoints ignore retire.

The answer to a load and the fetch-exclusives share the home agent:
* round robin across endpoints;
* registered valid/ready outputs;
* at most one fetch-exclusive outstanding per endpoint.

A reply frame is sent only after the result line is back from the CPU's cache.
The message slot is freed when the last beat of the reply frame leaves.

## Who gets a request (`scheduler`)

Decoded requests wait in one FIFO per service. Each cycle at most one request
is handed out:

1. **Fast path.** If a core is bound to the service at the head of a queue
   and its user endpoint is waiting, that endpoint gets the request. No
   software runs between the load and the jump to the handler.
2. **Kernel path.** Otherwise, a waiting kernel endpoint takes the request of
   a service that *no* core runs. The kernel thread can then switch its core
   to that service.

Notes on the two levels:
* Requests for a service that some core runs stay queued for that service's
  cores. They are never diverted to the kernel.
* The kernel must therefore keep at least one core polling a kernel endpoint.
  Otherwise requests for unbound services wait until one does.
* Ties are broken round robin, among endpoints and among unserved services.

For the kernel's scheduling decisions, the NIC exposes for each service:
* its queue length;
* a *hot* flag, raised when the queue length reaches `HOT_THRESH`;
* a *running* flag;
* an *unserved* flag.

The NIC does not preempt anyone by itself. Acting on these statistics
(kicking a process, giving a service another core, retiring a kernel thread)
is left to the kernel.

## Kernel interface (`os_ctrl`)

The register port has 64-bit words and 16-bit word addresses. Writes take
effect on the clock edge; reads are combinational.

| address | access | meaning |
|---------|--------|---------|
| 0x0000 / 0x0001 | W/R | local MAC / local IPv4 address |
| 0x0002 / 0x0003 | W | staged code / data pointer for the next function-table write |
| 0x0100+s | W | service s: [15:0] UDP port, [16] enable |
| 0x1000+(s<<4)+p | W | procedure p of service s: [0] enable, pointers from the staged registers |
| 0x0300+c | W/R | core c binding: [7:0] service, [8] a process of it runs in the user loop |
| 0x0400+e | W | kick endpoint e (TryAgain) |
| 0x0500+e | W | retire endpoint e |
| 0x0600+e | R | [0] a core is stalled on endpoint e |
| 0x0700+s | R | [15:0] queued requests, [16] running, [17] hot, [18] unserved |
| 0x0800–0x0804 | R | requests accepted, frames dropped, replies sent, bad line addresses, free message slots |

A core's binding must be written whenever it switches into or out of a
service's user-mode loop. The fast path is only as good as this state.

## Frames

**Request.** Ethernet II, then IPv4 (no options), then UDP, then an 8-byte RPC
header:
* bytes 0–3: transaction id;
* bytes 4–5: procedure number;
* bytes 6–7: reserved;
* then the arguments.

**Checks on receive.** `rx_hdr_decoder` checks:
* the destination MAC (or broadcast);
* the ethertype;
* IPv4 version and header length;
* that the packet is not fragmented;
* that the protocol is UDP;
* the IP header checksum;
* the destination IP;
* the lengths.

The UDP checksum is not checked.

**Drops.** `rpc_decoder` looks the UDP destination port up in the service table
and the procedure in that service's function table. It drops and counts:
* frames that fail the header checks;
* unknown ports;
* disabled procedures;
* requests with more arguments than the lines hold.

**Reply.** Built from the addresses and ports of the request:
* IPv4 with DF set and TTL 64;
* UDP with checksum 0;
* an RPC header of transaction id, procedure and two zero status bytes;
* the result bytes;
* padding to 60 bytes.

**Stream format.** Both streams are AXI-stream-like:
* beats of `DATA_BYTES` (64) bytes;
* `tkeep` byte enables and `tlast`;
* byte *b* of beat *n* is frame byte 64·*n*+*b*;
* no FCS.

**Throughput.** The receive side takes one cycle per beat plus one cycle per
frame to commit the message.

## Parameters (top level)

| parameter | default | origin |
|-----------|---------|--------|
| `NUM_CORES` | 48 | the target platform's core count |
| `TIMEOUT_CYCLES` | 3,750,000 | 15 ms TryAgain timeout at an assumed 250 MHz |
| line size (`lh_pkg::CL_BYTES`) | 128 | the platform's cache line |
| `AUX_LINES` | 2 | own choice ("multiple" auxiliary lines) |
| `NUM_SERVICES`, `NUM_PROCS` | 16, 16 | own choice |
| `NUM_SLOTS` | 64 | own choice: requests in flight |
| `QDEPTH`, `TXQ_DEPTH` | 16, 8 | own choice |
| `HOT_THRESH` | 8 | own choice |
| `DATA_BYTES` | 64 | own choice: stream width |
| `ADDR_W` | 32 | own choice: line address width on the coherent link |

Because the register map has 8-bit indices, at most 128 cores are addressable.

## How far to trust it, and where it departs from the original scheme

* **Stages not built.** The decoder pipeline of the original design includes
  decryption and decompression stages. No algorithm is specified for them, so
  they are not built.
* **Coherence protocol.** The coherent link is reduced to four valid/ready
  channels:
  * load;
  * load data;
  * fetch-exclusive;
  * fetch-exclusive write-back.

  A real protocol (ECI, CXL) adds its own message types, ordering rules and
  credits. Mapping these channels onto one is future work.
* **Transmit lines.** Results are taken from the same control line the request
  came in. The original design also mentions a separate set of transmit
  lines; that variant is not built. Results longer than 120 bytes are not
  supported.
* **Message size.** Requests are limited to 360 argument bytes. Larger
  messages are better served by DMA anyway, and there is no DMA path here.
* **Throughput.** With 64-byte RPCs, a frame is 114 bytes (2 beats) and needs
  3 cycles. At 250 MHz that is 83 M requests/s, about 89% of 100 Gb/s line
  rate at that frame size. A frame of *n* full beats needs *n*+1 cycles, so
  the rate is 128 Gb/s × *n*/(*n*+1). Line rate is held from about four full
  beats (256 bytes) upward.
* **Misbehaving cores.** A core that takes a request and never loads again
  keeps its message slot forever. A core that reads the same control line
  twice in a row breaks the alternation rule, which an assertion reports.
* **Preemption policy.** The NIC only gathers load statistics. Any preemption
  policy lives in the kernel.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Example with
plain verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/lh_pkg.sv tb/tb_net_pkg.sv tb/tb_lauberhorn_nic.sv \
    --top-module tb_lauberhorn_nic -Mdir obj && obj/Vtb_lauberhorn_nic
```

Substitute any other testbench name for `tb_lauberhorn_nic`.

| testbench | what it exercises |
|-----------|-------------------|
| `tb_rx_hdr_decoder`, `tb_rpc_decoder` | good and spoiled frames, argument placement, drops |
| `tb_msg_buffer`, `tb_sync_fifo` | storage, allocation order, FIFO order and flags |
| `tb_scheduler` | fast path versus kernel path, sharing, per-service order, statistics |
| `tb_endpoint_2f2f` | load/fetch-exclusive order, exact TryAgain timing, kick, retire |
| `tb_home_agent` | address decoding, line contents, arbitration, TX backpressure |
| `tb_tx_encoder` | reply frames byte by byte, clipping, padding, slot release |
| `tb_os_ctrl` | the register map |
| `tb_lauberhorn_nic` | whole NIC, 4 cores, timeout 3000 cycles |
| `tb_lauberhorn_full` | whole NIC at its defaults: 48 cores, 15 ms timeout, about 8 M cycles, about 80 s |

The two end-to-end tests share `tb_lauberhorn_env`, which contains:
* a model of the CPU cores (kernel threads and user loops);
* a model of the coherent link (with per-core caches for result lines);
* an RPC client.

The environment checks every delivered request and every reply frame. It also
counts each mechanism and fails if any never happened:
* fast-path and kernel-path delivery;
* auxiliary line loads;
* TryAgain on timeout (never earlier than the timeout);
* TryAgain on kick;
* Retire;
* kernel-to-user and user-to-kernel switches of a core;
* a dropped frame;
* a hot service.

In the environment, the kernel's policy for handing cores to services is the
test's own. It is not part of the design.
