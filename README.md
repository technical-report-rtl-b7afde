# Chained crosspoint-queued switch with round-robin counter alignment (CCQ-RR)

A crosspoint-queued (CQ) switch puts one small buffer at every crossing of an
input line and an output line, all on one chip. Scheduling is local: each
output picks among the N buffers of its own column. It needs no speedup and
no input/output negotiation. The weak point is buffer fragmentation. A burst
aimed at one output fills the single crosspoint on its input's row and is
dropped there, while the other N-1 buffers of the same column stay empty.

This design spreads each column's load over all its buffers with two
mechanisms:

- **Load balancing.** A first stage rotates inputs over the crosspoint rows.
  In slot t, input i feeds row (i + t) mod N. The cells of one flow therefore
  land on successive rows.
- **Deflection.** The crosspoints of a column form a ring, called the daisy
  chain. Each slot, a crosspoint that holds more cells than its predecessor
  pushes its head cell one step back along the ring.

Both mechanisms scatter the cells of one flow over different buffers, which
would break the order of the flow. The order is restored without timestamps
or sorting:

- every cell carries a **wait-counter**;
- every output arbiter polls its ring round-robin, keeping an **RR-counter**;
- crosspoints exchange **counter-alignment notifications** along the ring.

The result is a switch that keeps per-flow order and is work-conserving. Its
buffer use comes close to that of one shared output queue.

The RTL is parameterised. Its defaults are a 32 x 32 switch with 40-cell
crosspoint buffers, 64-byte (512-bit) cells and 16-bit counters.

## Structure

```
ccq_switch                     top: N inputs, N outputs, one clock = one time slot
 ├─ lb_stage                   load balancer, input i -> row (i + t) mod N
 └─ ccq_chain  x N             one column (output j): ring of N crosspoints + arbiter
     ├─ ccq_rr_arbiter         exhaustive batch round-robin polling with RR-counter
     └─ ccq_crosspoint x N     one buffer: arrival, notification, departure, deflection
         ├─ xp_wc_queue        cell order: (wait-counter, slot pointer) tags, kept sorted
         └─ xp_cell_mem        cell storage: B x DATA_W, 2 writes + 2 reads per slot
ccq_pkg                        default sizes
```

The columns share nothing. Output j depends only on column j, plus the
load-balancer slot counter that all columns share.

## Time slot

One clock is one time slot. Within it, four phases run as one combinational
path, in a fixed order. Every register updates at the clock edge that ends
the slot.

1. **Arrival.** Input i's cell reaches crosspoint ((i+t) mod N, dest).
   - If the buffer holds fewer than B cells, the cell is accepted. It is
     tagged with the crosspoint's *anticipatory wait-counter* W_ant. Then
     W_ant becomes tag + 1.
   - Otherwise the cell is dropped.
   - `in_accept` / `in_drop` report the result to the input in the same
     slot.
2. **Notification.** Each crosspoint sends at most one message {CA, SN} to
   its successor (row + 1), in this priority:
   - If it accepted a cell this slot, it sends its own message, with
     CA = tag of that cell and SN = its own row.
   - Otherwise, if it holds a pending message received last slot, it relays
     that message.

   The last row (N-1) adds 1 to CA on everything it sends, because row 0
   belongs to the arbiter's next round. A receiver compares the message with
   its own W_ant:
   - If SN is not its own row and CA >= W_ant, it sets W_ant = CA and keeps
     the message to relay in the next slot. A cell of its own accepted in
     that next slot cancels the relay.
   - Otherwise it discards the message.
3. **Departure.** The arbiter of the column polls the crosspoints and serves
   at most one cell (see the next section). Polls of empty crosspoints raise
   their W_ant.
4. **Deflection.** Each crosspoint reports its occupancy after arrival and
   departure to its successor.
   - If its own occupancy is larger than its predecessor's, it sends its head
     cell to the predecessor, together with the cell's wait-counter. Row 0
     subtracts 1 from the counter, because row N-1 lies in the previous round.
   - Exception: the crosspoint the arbiter now points at keeps its head cell
     if that cell is eligible (its counter equals the RR-counter).
   - The receiver inserts the cell behind every cell whose counter is smaller
     than or equal to it.
   - If the deflected counter is >= the receiver's W_ant, the receiver sets
     W_ant = counter + 1.

Because arrival comes first, a cell can leave in the slot it arrives
(cut-through).

## Wait-counters, RR-counter and polling

Each output keeps two values:

- its position A, the crosspoint it served or polled last;
- its RR-counter R, the number of times its polling has wrapped from row N-1
  to row 0.

A head cell is *eligible* when its wait-counter equals the RR-counter of the
poll that visits it. The arbiter behaves as follows:

- **Polling.** It starts at A itself, so that a batch of cells with the same
  counter in one buffer leaves back to back. Moving onto row 0 adds 1 to the
  poll's counter. It stops at the first eligible crosspoint, or stays put if
  every crosspoint is empty.
- **Empty crosspoints.** An empty crosspoint passed on the way gets its W_ant
  raised to (counter of that poll) + 1. A later cell there must then wait for
  the next round.

The three rules together guarantee the ordering invariant. The cells of a
flow land on successive rows. Each cell's counter is at least that of its
predecessor in the flow, and larger whenever it sits on an earlier row. So
the round-robin scan meets them in arrival order.

- Notifications carry this invariant forward when the successor row is
  behind.
- The CA increment at row N-1 and the decrement at row 0 account for the wrap
  of the rings.
- Deflection moves cells toward the arbiter. It keeps their counters, and
  inserts them behind equal counters.

The polling is not sequential in hardware. All 2N (crosspoint, round)
candidates are compared with R or R+1 in parallel, and a priority encoder,
rotated to start at A, picks the first match. With at most K = N-1
deflections per cell, N + K + 1 = 2N polls always reach the next eligible
cell. The `miss` output flags the case where the arbiter would need more
polls; it never occurred in simulation.

## Counter arithmetic

Counters are WC_W bits wide and wrap. Two kinds of comparison are used:

- **Queue order.** The sorted tag list orders counters by their offset from
  the current R, which never exceeds any live counter.
- **Notifications and deflected cells.** These are compared with W_ant by the
  sign of the wrapped difference.

The difference is needed because a relayed notification can be stale: its CA
may already lie below R. The sign test is correct while live counters span
less than 2^(WC_W-1). The largest span in a ring is N*B + ceil(K/N):

| Configuration | Span | Fits with WC_W = 16? |
|---|---|---|
| N=32, B=40 | 1281 | yes |
| N=128, B=180 | 23041 | yes |
| N=128, B=455 | 58241 | no; needs WC_W = 17 |

## Crosspoint buffer

A crosspoint keeps its cells in `xp_cell_mem` and their order in
`xp_wc_queue`.

**`xp_cell_mem`** is a B-entry array with a free-slot bitmap. A cell is
written once and never moves.

- Writes: the arrival takes the lowest free slot. The deflected-in cell takes
  the lowest slot that is free or released in this slot.
- Reads: one for the departure and one for the outgoing deflection. A read of
  the slot being written by the arrival is forwarded, which gives the
  cut-through path.
- This is the memory speedup of two in each direction that deflection costs.

**`xp_wc_queue`** is a sorted list of B tags, each {wait-counter, slot
pointer}. In one slot it does:

- a tail append;
- up to two head pops (departure, deflection);
- one sorted insert, with the position found by a parallel compare.

The list replaces the balanced search tree suggested for the ordered queue.
Both give O(1) operations per slot.

## Where this RTL departs from the paper or fills gaps

- **Phase timing.** One slot is one clock, and the four phases are one
  combinational path. Deflection uses the position and RR-counter after this
  slot's polling.
- **Counter comparison.** Signed-difference comparison needs one more counter
  bit than the paper's span bound at the largest size, 128 x 128 with
  B = 455.
- **Raising an empty crosspoint's counter.** The paper sets W_ant = R + 1
  when the arbiter polls an empty crosspoint. Here it becomes
  max(W_ant, R_poll + 1), so a notification received earlier in the slot is
  not undone.
- **All-empty column.** When every crosspoint is empty, the arbiter keeps A
  and R.
- **Poll budget.** The budget is fixed at 2N polls, the value N + K + 1 with
  K = N - 1.
- **Cell storage.** Storage is a slot memory with a sorted tag list, not a
  search tree.
- **Interfaces.** The destination arrives as a separate port, not in a cell
  header. Accept and drop are reported to the input in the same slot.
- **Reset.** All counters reset to zero, all buffers start empty, and every
  arbiter starts at row 0.

Not built, as they lie outside the switch core or are alternatives only
compared with:

- the input and output line cards (segmentation into cells, reassembly);
- the oldest-cell-first variant with timestamps;
- the plain longest-queue-first CQ switch;
- the output-queued reference;
- buffer pooling with matching-based contention resolution.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | DUT | What it checks |
|---|---|---|
| `tb_lb_stage` | lb_stage | connection pattern and wrap of the slot counter |
| `tb_xp_cell_mem` | xp_cell_mem | against a reference model: slot choice, slot reuse in the same slot, reads, forwarding |
| `tb_xp_wc_queue` | xp_wc_queue, 8-bit counters that wrap | against a reference list: append, pops, insert behind equals |
| `tb_ccq_crosspoint` | ccq_crosspoint | directed cases for every rule of the four phases, at rows N-1 and 0 |
| `tb_ccq_rr_arbiter` | ccq_rr_arbiter | the parallel encoder against a sequential poll-by-poll model |
| `tb_ccq_chain` | one column, N=4, B=4 | bursty random arrivals |
| `tb_ccq_switch` | whole switch, N=8, B=4 | on/off bursts to random outputs |
| `tb_ccq_switch_traffic` | whole switch, N=8, B=10 | three traffic patterns in turn: uniform bursts (load about 0.7), hot spot where half of input i's bursts go to output i (load about 0.85), and bursts four times longer; prints the drop rate of each |
| `tb_ccq_switch_full` | whole switch at its defaults (32 x 32, B=40, 512-bit cells) | a hot spot that overflows one column, then random bursts |

The column and switch testbenches check all of the following:

- every delivered cell is the oldest outstanding cell of its flow;
- an output is busy in every slot its column holds a cell;
- everything drains.

The column and reduced-size switch testbenches also require that every
mechanism occurs at least once:

- tail drop;
- deflection;
- notification relay and discard;
- insertion behind an equal counter;
- batch service;
- cut-through;
- RR-round advance.

The full-size testbench requires tail drop, deflection and notification
relay.

To simulate with Verilator (5.x), for example the reduced-size switch:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ccq_pkg.sv tb/tb_ccq_switch.sv \
          --top-module tb_ccq_switch
./obj_dir/Vtb_ccq_switch
```

Replace the testbench name for the others. No file includes another.
Verilator finds each module by its name in `rtl/` through the `-Irtl` search
path. The full-size testbench takes a few minutes to build and run. To resize the whole design, edit `ccq_pkg.sv`, or override N, B,
DATA_W and WC_W on `ccq_switch`.

Assertions in the RTL check the following:

- a grant goes only to a non-empty crosspoint;
- a deflection has room at its target;
- the slot map matches the tag count;
- grants are one-hot and eligible;
- the queue neither overflows nor underflows;
- the tail stays in order.
