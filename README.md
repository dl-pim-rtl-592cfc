# DL-PIM in SystemVerilog: moving data next to the vault that uses it

In a 3D-stacked memory with processing-in-memory (PIM), every vault has its own
small core, its own DRAM slice and a logic base, and the vaults talk over an
on-stack network. An address is homed in exactly one vault (here the low five
bits of the 64-byte block address pick one of 32 vaults). A core that keeps
touching data homed far away pays network hops on every access.

DL-PIM removes that cost by letting a vault *subscribe* to a remote block: the
home vault sends the block to the vault that uses it, which keeps the copy in a
reserved area of its own DRAM and from then on serves its core locally. The home
keeps an entry saying where the block went, so anybody else's request is
redirected there. At any time there is exactly one valid location for a block;
it is a move, not a copy, so there is no coherence problem, only a hand-over
protocol. Because moving data can also hurt (a block shared by many vaults would
ping-pong), a simple epoch-based policy turns subscription on or off for the
whole stack.

This RTL implements the logic base of each vault (subscription table,
subscription buffer, protocol engine, policy registers), the mesh network
between the vaults, and a top level with 32 vaults on a 6x6 mesh. The PIM cores
and the DRAM dies are not part of it: their ports are brought out of the top.

## The system at a glance

```
          core[v] req/rsp             DRAM[v] (home data + reserved area)
                 |                                 |
        +--------+---------------------------------+--------+
        |                 vault_controller (vault v)         |
        |  subscription_table  subscription_buffer           |
        |  adaptive_policy     8-entry output queue           |
        +-------------------------+---------------------------+
                                  | local port
                             mesh_router (node v)  -- N/E/S/W links --
```

* 36 mesh nodes, numbered row by row (`x = n % 6`, `y = n / 6`). Vault `v` sits on
  node `v`; nodes 32..35 are routers with nothing attached.
* Vault 14, at (2,2), is the *central vault* that collects statistics and
  decides the policy.
* A block address is 31 bits (128 GB of 64-byte blocks). The home vault is
  `addr[4:0]`. The table set is the next `log2(SETS)` bits.

## Packets and the network

All traffic is one packet type, `pkt_t` (in `dlpim_pkg`), with a type, source,
destination, original requester, block address, dirty flag, forward flag, hop
count, time stamp and an optional 512-bit block. Flits are 128 bits, so a packet
that carries a block is k = 5 flits (four of data plus a header) and all other
packets are one flit.

Each router has five ports and a 16-entry input buffer on each (one entry holds
a whole packet). Routing is X then Y with round-robin output arbitration. A
packet moves as one word, but it holds the output link for as many cycles as it
has flits. So the head of a packet advances one hop per cycle, while a link
passes at most one data packet every five cycles. This gives the cost model the
design is built around: about one cycle per hop for latency and k cycles per
hop of link occupancy for a data transfer. Packets between a given pair of
vaults never overtake each other. The protocol relies on that.

## The subscription table and its states

Each vault has a 4-way, 2048-set table (8192 entries). One table serves two
roles:

* In the **home** vault, an entry records that one of its own blocks now lives
  in vault `sub_vault`.
* In the **subscribing** vault, an entry records that a foreign block lives in
  the local reserved area. The location in that area is the entry's own slot
  (`set * WAYS + way`), so no second address has to be stored.

An entry is in one of five states:

| state | meaning |
|---|---|
| Invalid | free |
| Pending Subscription | a move has been requested and the data has not arrived or been acknowledged |
| Subscribed | the move is complete |
| Pending Resubscription | the block is being handed from one subscriber to another (home side) |
| Pending Unsubscription | the block is being sent back home |

A dirty bit records that the local copy was written. Only then does
unsubscription carry data back; otherwise a header-only acknowledgement is
enough.

When a set is full, the victim is the Subscribed way with the lowest 8-bit use
counter, and on a tie the least recently used (2-bit ages). Pending entries are
never evicted.

## The hand-over protocol

All of it is in `vault_controller`. The controller takes one event per cycle.
In priority order these are: a policy broadcast (central vault only), its own
end-of-epoch report, a packet from the network, a subscription-buffer retry,
and a core request. An event that needs a DRAM read waits for the data and then
finishes the event (answering the core or sending a packet). Every event may
queue up to three packets, so a new event starts only while three slots of the
8-entry output queue are free.

**Plain access.**
* A core access to a block subscribed here is a local DRAM access to the
  reserved area. A write sets the dirty bit.
* An access to a block homed here and not subscribed away is a local DRAM access
  to home data.
* Anything else is sent to the home vault.

**Redirection.** The home looks the block up. If it is subscribed elsewhere,
the home forwards the request to the subscriber, which answers the original
requester directly. If the subscriber no longer holds the block (it is on its
way home), the subscriber sends the request back to the home with the `fwd`
flag. The home then serves it from home memory once it has the block back.

**Subscription.** While subscriptions are enabled, an access to a remote
block also sends a subscription request (SUB_REQ) to the home. Both sides move to
Pending Subscription. The home reads the block and sends it (SUB_DATA). The
requester stores it in its reserved area, becomes Subscribed and acknowledges
(SUB_ACK). The home then becomes Subscribed too. A core access to a block whose
own subscription is still pending is held until the data arrives. Without this
hold, a later local access could overtake an earlier remote one.

**Resubscription.** If the block is already subscribed by a third vault, the
home marks its entry Pending Resubscription and redirects the request to the
current holder. The holder gives up its entry and sends the data (with its
dirty bit) straight to the new subscriber. The new subscriber acknowledges to
the home, and the home records the new location.

**Negative acknowledgement (NACK).** A request for a block in a pending state
is refused, and so is a request when the home's table set is full and its
subscription buffer is full too. The requester frees its own pending entry and
keeps using the home. If a resubscription fails at the old holder, the NACK
also goes to the home, so the home leaves Pending Resubscription.

**Full set.** When the home's set is full, the request waits in the 32-entry
subscription buffer. Meanwhile the set's victim is unsubscribed. When an entry
of that set frees, every waiting request of the set is marked ready, and the
lowest ready one is retried. If the set is full again by then, the retry is
refused with a NACK. The same applies in the requesting vault: making room
there also unsubscribes a victim.

**Unsubscription.** Either side can start it:
* The subscriber starts it when it evicts the block. It sends UNSUB_REQ with
  the data if the block is dirty, without data otherwise.
* The home starts it when its own core touches the block while subscriptions
  are on (otherwise the access is simply forwarded). A home that would
  "subscribe to itself" unsubscribes instead. It sends UNSUB_REQ to the
  subscriber, which answers with the (dirty) data.

The home writes dirty data back before it frees its entry.

## The on/off policy

Each vault counts four things per epoch (10^6 cycles):
* a feedback register, +1 when a completed read travelled fewer hops than it
  would have without subscription (twice the distance to the home), -1 when
  more;
* a latency register, the sum of read latencies;
* the number of reads;
* the number of accesses.

A vault that served a request forwarded to it, over a longer path than the
home would have needed, also charges -1 to its own feedback.

At the end of an epoch, every vault sends its counters to the central vault in
a PKT_STATS packet and clears them. Once the central vault has all 32 reports,
it decides and broadcasts SUB_ON or SUB_OFF:

* After the first epoch, the sign of the summed feedback decides.
  Non-negative means on.
* After later epochs, the new average read latency is compared with the
  previous epoch's. The current setting is kept unless latency grew by more
  than 2%, in which case it is flipped. The test is done without division:
  `lat * prev_req * 100 > prev_lat * req * 102`.

Subscriptions start enabled. While they are off, no new subscription requests
are made; existing subscriptions stay and keep serving.

## Where this RTL departs from the paper, or fills gaps

* **Network.** The paper's background mentions a crossbar between vaults with
  16-entry input buffers, while its evaluation uses a 6x6 mesh with 32 vaults.
  The mesh is built, with those 16-entry buffers. Routing, arbitration, the
  128-bit flit and one-packet-per-entry buffers are choices made here.
* **Placement.** The vault numbering on the mesh, the four empty nodes and the
  central vault at (2,2) are choices made here. A 6x6 grid has no single
  centre.
* **Set dueling is not built.** The paper also describes a variant that
  samples two "leading sets", one always subscribing and one never, to choose
  the policy. Only the global, central-vault policy is implemented.
* **Decision delay.** The roughly 1000-cycle decision delay the paper mentions
  is not modelled; the decision takes effect when the broadcast arrives.
* **Subscription trigger.** While enabled, every remote access asks to
  subscribe. There is no access-count threshold.
* **Races the paper does not cover** are closed by the choices described in
  the protocol section:
  * the `fwd` bounce back to the home;
  * the home's Pending Resubscription state;
  * the NACK copy to the home;
  * holding core accesses to a pending block;
  * dropping a retried request whose set is still full.
* **Writes are posted.** The core gets no response for a write.
* **Memory.** The DRAM port is a simple request/response port. The `rsv` bit
  selects the reserved area (addressed by table slot) or the home data
  (addressed by block address). Bank timing is whatever the attached memory
  does.

## Sizes

All defaults are the paper's numbers:

| Parameter | Default |
|---|---|
| Vaults | 32 |
| Mesh | 6x6 |
| Table | 4 ways x 2048 sets |
| Subscription buffer | 32 entries |
| Router input buffers | 16 entries |
| Epoch | 10^6 cycles |
| Latency threshold | 2% |

Vault count, mesh size, block size and address width are package constants in
`dlpim_pkg`. Table, buffer, epoch and threshold sizes are parameters of
`dlpim_top`. The table payload is a plain array without reset, so it can map to
SRAM. Its state, counter and age bits are reset.

Two sets of numbers are left as they are:

* **Workload sizes.** The design holds any access trace within the 128 GB
  address space. How much a workload gains depends on its trace, which is not
  part of this design.
* **The HBM setup.** The paper also evaluates an 8-channel HBM system on a 4x2
  network. Running that setup needs `NUM_VAULTS`, `MESH_X` and `MESH_Y`
  changed. It has not been simulated.

## Files

| file | contents |
|---|---|
| `rtl/dlpim_pkg.sv` | constants, packet and table-entry types, address helpers |
| `rtl/subscription_table.sv` | set-associative table, LFU/LRU victim |
| `rtl/subscription_buffer.sv` | waiting subscription requests with ready bits |
| `rtl/adaptive_policy.sv` | per-vault counters and the central decision |
| `rtl/sync_fifo.sv` | router input buffer |
| `rtl/mesh_router.sv` | 5-port XY router with link serialization |
| `rtl/mesh_network.sv` | the 6x6 mesh |
| `rtl/vault_controller.sv` | the per-vault protocol engine |
| `rtl/dlpim_top.sv` | 32 vaults on the mesh |
| `tb/vault_dram_model.sv` | behavioural DRAM (4-cycle reads, sparse storage) |
| `tb/tb_*.sv` | self-checking testbenches, one per block |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. This is
the build for one of them, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/dlpim_pkg.sv tb/tb_dlpim_top.sv --top-module tb_dlpim_top -Mdir obj
./obj/Vtb_dlpim_top
```

* **`tb_subscription_table`, `tb_subscription_buffer`, `tb_adaptive_policy`,
  `tb_mesh_router`, `tb_mesh_network`.** Unit tests against values worked out
  in the testbench. These cover victim choice, ready-bit ordering, the epoch
  decisions, XY routing, hop counts, link serialization and zero-load latency.
* **`tb_vault_controller`.** One vault, with the testbench playing network and
  DRAM. It walks through each protocol case with a tiny table, so sets fill up
  quickly.
* **`tb_dlpim_top`.** The whole stack runs with 4-set x 2-way tables, 2-entry
  buffers and 3000-cycle epochs. Random cores share hot blocks and own private
  ones. Every read is checked against the last value written, and every
  mechanism must occur at least once:
  * local hit, subscription, resubscription, NACK, buffering;
  * unsubscription, dirty unsubscription, home-side unsubscription;
  * forwarding, policy switch.
* **`tb_dlpim_full`.** The top with every parameter at its default. It takes
  one block through remote read, subscription, local hit, local write,
  redirected read, resubscription and home-side unsubscription. It checks the
  data and the remote and local read latencies.

Building the full top takes about a minute and a half. The simulations
themselves take seconds.
