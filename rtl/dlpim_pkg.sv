// dlpim_pkg: types and constants shared by the DL-PIM vault logic and the
// inter-vault network.
//
// The system is a 3D-stacked memory split into vaults; each vault has a PIM
// core, a slice of DRAM and a logic base. Vaults sit on a 6x6 mesh (32 vaults,
// the four remaining mesh positions hold routers only). A block's home
// ("original") vault is given by the low address bits. DL-PIM moves ("subscribes")
// a block into a reserved area of the vault that accesses it and tracks the move
// in a distributed subscription table.
//
// From the paper: 32 vaults on a 6x6 network, 128-bit flits, a data packet of k
// flits (k-1 data flits plus one header flit), the eight subscription packet
// types, the from/to/address/dirty fields of a subscription packet, the five
// subscription-table states (three state bits). Own choices: 64-byte blocks
// (k = 5), the block-interleaved home mapping, the plain memory-request packet
// types, the fields used for forwarding, hop counting, time stamps and
// statistics, and the numeric encodings.
package dlpim_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned NUM_VAULTS = 32;          // Table I
  localparam int unsigned MESH_X     = 6;           // Sec. IV-A: 6x6 network
  localparam int unsigned MESH_Y     = 6;
  localparam int unsigned NUM_NODES  = MESH_X * MESH_Y;
  localparam int unsigned VID_W      = $clog2(NUM_NODES);   // 6
  localparam int unsigned VBITS      = $clog2(NUM_VAULTS);  // 5
  localparam int unsigned CENTRAL_VAULT = 14;       // mesh position (2,2)

  // ------------------------------------------------------------ addressing
  // Block address: 128 GB of 64-byte blocks = 2^31 blocks.
  localparam int unsigned ADDR_W      = 31;
  localparam int unsigned FLIT_BITS   = 128;        // HMC flit, Sec. II-C
  localparam int unsigned BLOCK_FLITS = 4;          // k-1
  localparam int unsigned BLOCK_BITS  = FLIT_BITS * BLOCK_FLITS;
  localparam int unsigned PKT_FLITS_DATA = BLOCK_FLITS + 1; // k

  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [VID_W-1:0]      vid_t;
  typedef logic [BLOCK_BITS-1:0] block_t;

  // ----------------------------------------------------------- packet types
  typedef enum logic [3:0] {
    PKT_RD       = 4'd0,   // memory read request
    PKT_WR       = 4'd1,   // memory write (posted)
    PKT_RD_RSP   = 4'd2,   // read data back to the requester
    SUB_REQ      = 4'd3,   // Subscription Request
    SUB_NACK     = 4'd4,   // Subscription Request Negative Acknowledgement
    SUB_DATA     = 4'd5,   // Subscription Data Transfer
    SUB_ACK      = 4'd6,   // Subscription Transfer Acknowledgement
    UNSUB_REQ    = 4'd7,   // Unsubscription Request
    UNSUB_ACK    = 4'd8,   // Unsubscription Transfer Acknowledgement
    SUB_ON       = 4'd9,   // Turn On Subscription
    SUB_OFF      = 4'd10,  // Turn Off Subscription
    PKT_STATS    = 4'd11   // epoch statistics sent to the central vault
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e   ptype;
    vid_t        src;       // vault that sent this packet
    vid_t        dst;       // destination vault
    vid_t        req;       // requester vault (kept when a packet is forwarded)
    addr_t       addr;      // block address
    logic        dirty;     // dirty bit carried by (un/re)subscription data
    logic        fwd;       // returned to the home vault: serve from home memory
    logic        has_data;  // packet carries a data block (k flits, else 1)
    logic [7:0]  hops;      // mesh hops travelled by this transaction so far
    logic [31:0] tstamp;    // issue cycle of the core request
    block_t      data;
  } pkt_t;

  // -------------------------------------------------- subscription table
  typedef enum logic [2:0] {
    ST_INVALID     = 3'd0,  // Invalid / Unsubscribed
    ST_PEND_SUB    = 3'd1,  // Pending Subscription
    ST_SUBSCRIBED  = 3'd2,  // Subscribed
    ST_PEND_RESUB  = 3'd3,  // Pending Resubscription
    ST_PEND_UNSUB  = 3'd4   // Pending Unsubscription
  } st_state_e;

  // One entry: original address and the subscribed location. For a block
  // homed here, sub_vault names the vault holding it; for a remote block held
  // here, the reserved-area slot is given by the entry's set and way.
  typedef struct packed {
    st_state_e state;
    addr_t     addr;
    vid_t      sub_vault;
    logic      dirty;
  } st_entry_t;

  // One-cycle pulses from a vault controller, one per protocol mechanism.
  typedef struct packed {
    logic local_hit;    // core access served from the local reserved area
    logic sub_done;     // subscription (or resubscription) completed here
    logic resub;        // home redirected a subscription request (resubscription)
    logic nack;         // subscription rolled back after a negative acknowledgement
    logic unsub;        // unsubscription completed at the home vault
    logic unsub_dirty;  // ... and it carried modified data
    logic self_unsub;   // home's own access turned into an unsubscription
    logic buffered;     // request parked in the subscription buffer
    logic forward;      // request forwarded (indirection)
    logic policy;       // subscription turned on or off by a broadcast
  } vault_ev_t;

  // ----------------------------------------------------------- functions
  function automatic vid_t home_of(addr_t a);
    return vid_t'(a[VBITS-1:0]);
  endfunction

  function automatic int unsigned vx(vid_t v);
    return int'(v) % MESH_X;
  endfunction

  function automatic int unsigned vy(vid_t v);
    return int'(v) / MESH_X;
  endfunction

  // Manhattan distance between two mesh nodes.
  function automatic logic [7:0] hop_dist(vid_t a, vid_t b);
    int unsigned dx, dy;
    dx = (vx(a) > vx(b)) ? vx(a) - vx(b) : vx(b) - vx(a);
    dy = (vy(a) > vy(b)) ? vy(a) - vy(b) : vy(b) - vy(a);
    return 8'(dx + dy);
  endfunction

  function automatic int unsigned pkt_flits(pkt_t p);
    return p.has_data ? PKT_FLITS_DATA : 1;
  endfunction

endpackage
