# OffRAC request fabric: reassembling network requests into accelerator calls

This is RTL for the layer that lets clients on the network call FPGA
accelerators directly, with no host CPU involved. It follows the OffRAC
design ("Offloading Through Remote Accelerator Calls").

A client's request often spans several TCP segments. The segments of
different clients' requests arrive interleaved. A hardware accelerator
cannot pause halfway through one request to serve another. If it is fed
fragments as they arrive, it sits idle between them and blocks every
other client meanwhile. This fabric therefore sits between a TCP/IP stack
and a set of accelerator slots, and does three things:

- It collects the fragments of each request into a complete request in
  on-chip memory.
- It hands complete requests to the queue of a slot that hosts the
  requested accelerator, balancing over slots of the same kind.
- It runs each accelerator on one request at a time and returns the
  response tagged with the client's connection.

The client and the accelerator both see whole requests. Neither needs any
reassembly logic of its own.

## The request on the wire

The client library puts a 64-byte header in front of every request:

| bytes | field       | meaning                                             |
|-------|-------------|-----------------------------------------------------|
| 0-1   | Accelerator | type code of the function to call                   |
| 2-3   | Size        | payload bytes that follow the header                |
| 4-63  | Parameters  | opaque to the fabric, passed to the accelerator     |

The fabric moves data as 512-bit beats (64 bytes), so the header is exactly
one beat. A request occupies `1 + ceil(Size/64)` beats. This is
`req_beats()` in `offrac_pkg`.

The connection ID (32 bits) is not in the header. The TCP stack supplies it
beside every fragment, and the fabric carries it with the request all the
way to the response.

The source fixes the field sizes and their order. Several details are
choices of this design:

- the byte positions;
- little-endian order;
- Size counting payload bytes only;
- the type codes.

The type codes are:

| code | accelerator |
|------|-------------|
| 0    | empty slot  |
| 1    | echo        |
| 2    | Top-K       |
| 3    | logit       |
| 4    | min-max     |
| 5    | CNN         |
| FFFF | reconfiguration request (handled by the Dispatcher) |

## Path of a request

```
 TCP stack ──frag──▶ dispatcher ──┬─▶ reassembly_buffer ×4 (0.25 MB each) ─┐
  (payload,             │         └─▶ single_frag_buffer (1 MB) ───────────┤
   conn ID,             │                                                 ▼
   length)              ▼                                             selector
                 drop / notify                                           │
                                           ┌──────────── per type RR ────┘
                                           ▼
                     accel_queue ×5 ─▶ accel_wrapper ─▶ accelerator (Top-K / logit /
                                           │                  echo / min-max)
                                           │
 TCP stack ◀──rsp── response_mux ◀─────────┘ (data, conn ID, response bytes)
```

`offrac_top` wires this together:

- the Dispatcher;
- four reassembly buffers and the single-fragment buffer;
- the Selector;
- five slots, each a queue plus a wrapper plus an accelerator;
- the response merge.

The parameter `SLOT_KIND` fixes which accelerator each slot holds. The
default is Top-K, logit, echo, min-max, Top-K.

## Admitting a request: the Dispatcher and its buffers

Most of the design's subtlety is here.

The Dispatcher decides what to do with a fragment in the cycle its first
beat arrives. Every later beat of the fragment follows that decision.
Fragments are never back-pressured. Instead, a buffer reserves room for a
whole request at the moment it accepts the request's first fragment.

1. **Continuation.** The fragment's connection ID is compared with the
   connection of every busy reassembly buffer. On a match, the fragment is
   appended to that buffer. A buffer serves one request at a time, so the
   request's beats stay contiguous.
2. **Rest of a dropped request.** If the connection's current request was
   dropped earlier, a small table says how many beats of it are still
   coming. The fragment is discarded and the count decremented. The table
   has `DROP_ENTRIES` entries and reuses the oldest when full.
3. **New request.** Otherwise the first beat is a header, and the
   Dispatcher compares the request's beat count with the fragment's length.
   - If the whole request fits in this fragment, it goes to the
     single-fragment buffer. Small requests then never wait for a
     reassembly buffer that is busy with a large request.
   - Otherwise it goes to an eligible reassembly buffer, chosen by round
     robin over eligible buffers only ("Eligible RR").
   - A buffer is eligible if it is not in the middle of a request, has
     free space for every beat of the new request, and has a free
     descriptor entry.
   - If no buffer qualifies, the request is dropped. `drop_valid` pulses
     with the connection and accelerator, so the client can be told, and
     the rest of the request's fragments are discarded (step 2).

The TCP stack delivers the fragment length (`frag_beats`) with the first
beat of each fragment. It knows each segment's payload length, so the
Dispatcher does not need a fixed size limit to recognise a single-fragment
request. A fixed limit would not work anyway: the same 4096-byte request
may arrive in one 8 KB segment or in four 1 KB segments, and only the
second needs reassembly.

A header whose Accelerator field holds the reserved value FFFF is a
reconfiguration request. The source reserves such a value so the Dispatcher
can keep these requests out of the standard buffers and pass them to the
reconfiguration controller. Here the request enters no buffer and does not
move the round-robin pointer. For one cycle `reconf_valid` presents the
connection and the header's 60-byte Parameters field on `reconf_conn` and
`reconf_params`. The rest of the request is discarded through the drop
table without raising `drop_valid`. The value FFFF, and the rule that only
the Parameters field is passed on, are choices of this design.

Clients are assumed to:

- start each request on a fragment boundary;
- fill every fragment of a request but its last with whole beats.

**Buffers as commit FIFOs.** Each buffer is a `commit_fifo` with three
pointers:

- the write pointer advances with every beat written;
- the commit pointer jumps to the write pointer when a request is
  complete;
- the read pointer is where the Selector reads.

The reader sees only committed beats. A half-assembled request is
therefore invisible downstream, with no extra flag per beat.

If the TCP stack reports that a connection has closed (`close_valid`)
while that connection's request is half assembled, the write pointer
returns to the commit pointer. This frees the space at once and garbage
collects the partial request. It is possible because a buffer never holds
beats of more than one incomplete request.

Beside the beat RAM, each buffer keeps a small descriptor FIFO. It holds
one entry of (connection, type, beats) per complete request.

The RAM is read synchronously, like block RAM, into an output register
that serves as the head of a first-word-fall-through stream. A committed
beat appears on the read side two cycles after the commit.

**Single-fragment buffer.** It has the same structure. It commits on the
fragment's last beat and so is never "busy". It stores no more beats than
the header announced, so a malformed fragment cannot overrun its
reservation.

## From buffers to slots: the Selector

The Selector watches the descriptor outputs of all five buffers. It takes
complete requests round robin over the buffers and moves one request at a
time, one beat per cycle, into a slot queue.

Each slot queue advertises the type of accelerator its slot holds. This
gives the Selector its map from type to slots. When several slots host the
requested type, a round-robin pointer kept per type picks the next of
them. The choice does not depend on queue length or request size.

A request for a type that no slot hosts is read out, discarded and
reported on `unroutable_valid`. It cannot block the buffer it sits in.

Writing `ACC_EMPTY` into a slot's type (`slot_cfg_*`) takes the slot out of
service. A reconfiguration controller would do this before loading a new
accelerator into the slot.

## A slot: queue, wrapper, accelerator

`accel_queue` stores beats with their last flag and connection ID. It
holds only complete requests, so once the accelerator starts a request
its input arrives at full rate.

`accel_wrapper` is the fixed shell every accelerator plugs into:

- It streams the request to the accelerator: the header beat first, then
  the payload, so the accelerator can read its Parameters.
- It feeds nothing of the next request until the last beat of the current
  response has left, which enforces run-to-completion.
- It attaches the connection ID to the response.
- It pairs the response's last beat with the accelerator's 32-bit
  metadata beat, which carries the response size in bytes.

An accelerator only has to meet this interface:

| stream       | width   | direction | content                              |
|--------------|---------|-----------|--------------------------------------|
| `s_*`        | 512 bit | in        | header beat, then payload            |
| `m_*`        | 512 bit | out       | response data                        |
| `meta_*`     | 32 bit  | out       | response size, with the last beat    |

### Accelerators of other widths

An accelerator whose streams are narrower than 512 bits sits behind a pair
of `width_adapter`s. The first cuts each 512-bit beat into R narrow beats,
least significant part first. The second gathers the accelerator's output
back into 512-bit beats. Least-significant-first keeps the byte order, so a
64-bit accelerator sees the header as eight beats, with Accelerator and Size
in the first. A wide beat carrying last becomes R narrow beats, and only
the final one carries last. When the output's last flag arrives early, the
partial wide beat is sent with its unwritten parts zero.

The accelerator's size report comes out with its last narrow beat, before
the gathered wide beat exists. A one-entry register in the slot holds the
report until that last wide beat reaches the wrapper. Run-to-completion
guarantees the register is free by then.

Each adapter buffers a single beat. A 512-to-64 adapter delivers one narrow
beat per cycle, so the accelerator runs at an eighth of the fabric's rate.
The echo slot is built this way with width `ECHO_W`. By default
`ECHO_W` is 512: the adapters become plain wires, and the report passes
straight through in the cycle of the last beat. That default keeps the echo
at the full rate, since its job is to measure the fabric. Setting
`ECHO_W` = 64 puts the conversion in use, and `tb_offrac_top_narrow` tests
the whole design that way.

`response_mux` merges the slot outputs round robin. It holds the grant
until a response's last beat, so responses are never interleaved.

## Accelerators included

All accelerators answer with results only, with no header. They report the
response size in bytes on the metadata stream.

**Echo** (`echo_accel`) returns the request, header included, through one
register stage, and reports 64 + Size bytes. Its width `W` is a parameter,
and it sits behind width adapters (see above). It isolates the cost of the
fabric itself.

**Top-K** (`topk_accel`) returns the K largest payload values, largest
first.

- The payload is read as 32-bit signed integers, sixteen per beat.
- K is read from the first four bytes of Parameters and clamped to `KMAX`
  (64).
- The design is an insertion sorter. `KMAX` registers hold the sorted list
  so far, and each cycle one value is compared with all of them at once
  and inserted.
- A beat of sixteen values therefore takes 17 cycles (one to accept, 16
  to insert).
- A request of P payload beats produces its first output beat about
  17·P + 1 cycles after its header.

This is one simple way to do it, not a copy of any published Top-K core.

**Min-max normalisation** (`minmax_accel`) maps each binary32 element x to
(x − min)/(max − min) over its block. Every output depends on both
extremes of the whole block, so the block must be held.

1. The payload is written into a local store of `MAX_BEATS` = 512 beats,
   enough for 32 KB. Meanwhile all sixteen lanes of each arriving beat are
   compared against the running minimum and maximum.
2. One cycle forms the range.
3. Each stored beat is read back, and one element per cycle is reduced by
   the minimum and divided by the range.

A block of equal values maps to zeros.

**Logit transform** (`logit_accel`) maps each binary32 p to
ln(p/(1 − p)), one beat at a time.

1. **Ratio** (16 cycles). One shared subtractor and divider forms
   q = p/(1 − p) for each lane.
2. **Logarithm** (23 cycles, all sixteen lanes in parallel). log2 of
   q's significand is found one fraction bit per cycle by repeated
   squaring: square m, and if the square is 2 or more, emit a 1 and halve
   it. Together with q's exponent, this gives log2 q as a fixed-point
   number.
3. **Scale** (16 cycles). Each lane's result is converted to binary32 and
   multiplied by ln 2.

Inputs p ≤ 0 give −∞ and inputs p ≥ 1 give +∞.

**Shared arithmetic.** The floating-point operations live in `fp32_pkg`:

- comparison, add/subtract, divide, multiply, and fixed-point to float
  conversion;
- all combinational;
- results truncated rather than rounded;
- subnormals flushed to zero.

Against a double-precision reference, results fall within about 1e-5.

**Timing.** The source reports the latencies of its own cores at 250 MHz.
At the same clock, for a 1 KB block:

| accelerator | cycles | time at 250 MHz | source's core |
|-------------|--------|-----------------|---------------|
| Top-K       | 273    | 1.1 µs          | 1.6 µs        |
| Top-K, 4 KB | 1089   | 4.4 µs          | 6.0 µs        |
| min-max     | ~290   | 1.2 µs          | 5.4 µs        |
| logit       | ~910   | 3.6 µs          | 2.3 µs        |

## Parameters

| parameter          | default | where                          | origin                          |
|--------------------|---------|--------------------------------|---------------------------------|
| `NUM_RB`           | 4       | top, dispatcher                | source                          |
| `RB_DEPTH`         | 4096 beats (0.25 MB) | top, reassembly_buffer | source                      |
| `SF_DEPTH`         | 16384 beats (1 MB)   | top, single_frag_buffer | source                     |
| `NUM_SLOTS`        | 5       | top, selector, response_mux    | source                          |
| `ACCQ_DEPTH`       | 1024 beats (64 KB)   | top, accel_queue       | this design                     |
| `DESC_DEPTH`       | 16 / 64 | reassembly / single-fragment buffer | this design                |
| `DROP_ENTRIES`     | 8       | dispatcher                     | this design                     |
| `NUM_TYPES`        | 8       | selector (per-type RR pointers)| this design                     |
| `KMAX`             | 64      | top, topk_accel                | this design                     |
| `ECHO_W`           | 512     | top (echo slot width)          | this design                     |
| `MAX_BEATS`        | 512 (32 KB) | minmax_accel               | source's largest input          |
| `SLOT_KIND`        | Top-K, logit, echo, min-max, Top-K | top | this design                  |

The defaults set the capacity:

- A request can be at most 65535 payload bytes, which is what the 2-byte
  Size field allows.
- Requests the source evaluates, up to 32 KB of Top-K input or a
  24 KB CNN image in six fragments, fit one reassembly buffer many times
  over.
- A 4 KB single-fragment request takes 65 beats, so the single-fragment
  buffer holds 252 of them. Only 64 can be queued there, because that is
  the descriptor limit.
- Media frames of hundreds of KB do not fit. Neither the buffers nor the
  Size field allow them.

## Where this departs from the source, and what is missing

Choices made here where the source is silent:

- the header layout within the beat;
- the fragment-length sideband;
- the descriptor FIFOs and their limits;
- the drop table;
- discarding unroutable requests;
- the queue depth;
- the response arbitration;
- the internals of all accelerators;
- binary32 as the number format;
- the reserved reconfiguration code FFFF;
- the width adapters' one-beat buffering and part order, and their place
  around the echo;
- an active-low asynchronous reset of all control state.

RAM contents are not reset.

The source describes a buffer as eligible when the request is "less than"
its free space, and elsewhere says "sufficient capacity". This design
reads both as "fits".

The source's prototype floorplan has five slots, and one block diagram
draws four. Five are used here.

Not included:

- **The TCP/IP stack.** It comes from other work. Its fragment,
  connection-close and response streams are ports of `offrac_top`.
- **Partial reconfiguration of slots** from bitstreams in DRAM. The slot
  type map it would update is exposed as `slot_cfg_*` and `slot_type`.
- **The reconfiguration controller** that would act on reconfiguration
  requests. The Dispatcher filters them out and hands their Parameters
  over on `reconf_*`, but nothing in the fabric consumes them.
- **The CNN accelerator.** Its input (six 4 KB fragments) reassembles and
  queues, but there is no CNN to run it. A `SLOT_KIND` naming it stops
  elaboration.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. For example, with
Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/offrac_pkg.sv \
          rtl/fp32_pkg.sv tb/tb_offrac_top.sv --top-module tb_offrac_top -o sim
./obj_dir/sim
```

`tb_offrac_top` runs the whole fabric at its default sizes. Its
scenarios are:

- single-fragment requests;
- multi-fragment requests interleaved across connections;
- all buffers busy, so a request is dropped and its later fragment
  discarded;
- a connection closing mid-request;
- a request for an unhosted accelerator;
- a slot taken out of service;
- a reconfiguration request;
- response back-pressure;
- logit and min-max requests, both single-fragment and in four 1 KB
  fragments.

`tb_offrac_top_narrow` runs the same test on a build with `ECHO_W` = 64,
so every echo request crosses the width adapters.

It checks every response beat against an independent model of all four
accelerators. It also counts how often each mechanism occurred and fails if one
never did. It finishes in a few seconds.

`tb_offrac_workloads` runs the evaluation workloads at the default sizes:

- 28 clients each sending a 4096-byte echo request as a single fragment.
  All 1820 beats come back at 0.95 beat per cycle, which is 121 Gbps at
  250 MHz, and the test requires at least 0.9.
- Top-K on 1 KB and 4 KB inputs over both Top-K instances.
- Logit and min-max on 1, 4, 16 and 32 KB inputs.
- Requests of 1, 2 and 4 fragments of 1 KB from four interleaved clients.

The unit testbenches check, among other things:

- eligibility and rollback in the buffers;
- Eligible round robin and the drop table;
- per-type round robin in the Selector;
- run-to-completion in the wrapper;
- non-interleaving in the merge;
- the width adapters' part order, last flags and zero fill, in a 512-to-64-to-512
  round trip with random stalls;
- Top-K results against a reference sort, and its cycle count;
- logit and min-max results against double-precision arithmetic in the
  testbench, including infinities, equal-valued blocks and partial beats,
  and their cycle counts.
