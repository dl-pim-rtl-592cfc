// subscription_table: the per-vault Subscription Table (ST) of DL-PIM.
//
// A set-associative table (default 4 ways x 2048 sets = 8192 entries, as in
// the paper) that maps a block's original address to where it currently lives.
// Each entry holds the original address, the subscribed vault, a dirty bit and
// one of five states (Invalid, Pending Subscription, Subscribed, Pending
// Resubscription, Pending Unsubscription). When a set is full, the victim for
// unsubscription is the least frequently used Subscribed entry, ties broken by
// least recently used, as the paper prescribes.
//
// Interface and timing: one lookup port and one write port on the same set.
// The lookup is combinational on lk_addr (set = address bits just above the
// vault-select bits) and returns the matching way, a free way and the victim.
// wr_en writes wr_entry into way wr_way of the looked-up set at the clock edge;
// touch_en counts a use of way touch_way (frequency +1, made most recent).
// Allocating an Invalid way clears its frequency counter.
//
// Own choices: full-address tags, an 8-bit saturating frequency counter and
// 2-bit age (LRU) counters per way, set index taken from the address bits
// above the vault bits. Pending entries are never chosen as victims.
module subscription_table
  import dlpim_pkg::*;
#(
  parameter int unsigned WAYS  = 4,
  parameter int unsigned SETS  = 2048,
  parameter int unsigned LFU_W = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // lookup
  input  addr_t                    lk_addr,
  output logic [$clog2(SETS)-1:0]  lk_set,
  output logic                     lk_hit,
  output logic [$clog2(WAYS)-1:0]  lk_way,
  output st_entry_t                lk_entry,
  output logic                     lk_free,
  output logic [$clog2(WAYS)-1:0]  lk_free_way,
  output logic                     lk_victim,
  output logic [$clog2(WAYS)-1:0]  lk_victim_way,
  output st_entry_t                lk_victim_entry,
  // update of the looked-up set
  input  logic                     wr_en,
  input  logic [$clog2(WAYS)-1:0]  wr_way,
  input  st_entry_t                wr_entry,
  input  logic                     touch_en,
  input  logic [$clog2(WAYS)-1:0]  touch_way
);
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned WB = $clog2(WAYS);

  // Entry payload and state are kept apart so that only the state is reset.
  typedef struct packed {
    addr_t addr;
    vid_t  sub_vault;
    logic  dirty;
  } payload_t;

  payload_t          pay   [SETS][WAYS];
  st_state_e         state [SETS][WAYS];
  logic [LFU_W-1:0]  freq  [SETS][WAYS];
  logic [WB-1:0]     age   [SETS][WAYS];

  assign lk_set = lk_addr[VBITS +: SB];

  always_comb begin
    lk_hit          = 1'b0;
    lk_way          = '0;
    lk_free         = 1'b0;
    lk_free_way     = '0;
    lk_victim       = 1'b0;
    lk_victim_way   = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (state[lk_set][w] != ST_INVALID && pay[lk_set][w].addr == lk_addr) begin
        lk_hit = 1'b1;
        lk_way = WB'(w);
      end
      if (state[lk_set][w] == ST_INVALID) begin
        lk_free     = 1'b1;
        lk_free_way = WB'(w);
      end
    end
    // LFU victim among Subscribed ways, LRU (largest age) on a tie.
    for (int w = 0; w < WAYS; w++) begin
      if (state[lk_set][w] == ST_SUBSCRIBED) begin
        if (!lk_victim ||
            freq[lk_set][w] <  freq[lk_set][lk_victim_way] ||
            (freq[lk_set][w] == freq[lk_set][lk_victim_way] &&
             age[lk_set][w]  >  age[lk_set][lk_victim_way])) begin
          lk_victim     = 1'b1;
          lk_victim_way = WB'(w);
        end
      end
    end
    lk_entry        = '{state: state[lk_set][lk_way], addr: pay[lk_set][lk_way].addr,
                        sub_vault: pay[lk_set][lk_way].sub_vault,
                        dirty: pay[lk_set][lk_way].dirty};
    lk_victim_entry = '{state: state[lk_set][lk_victim_way],
                        addr: pay[lk_set][lk_victim_way].addr,
                        sub_vault: pay[lk_set][lk_victim_way].sub_vault,
                        dirty: pay[lk_set][lk_victim_way].dirty};
  end

  // Way made most recent by a touch or an allocation.
  logic          mru_en;
  logic [WB-1:0] mru_way;
  logic          alloc;
  assign alloc   = wr_en && state[lk_set][wr_way] == ST_INVALID && wr_entry.state != ST_INVALID;
  assign mru_en  = touch_en || alloc;
  assign mru_way = touch_en ? touch_way : wr_way;

  always_ff @(posedge clk) begin
    if (wr_en)
      pay[lk_set][wr_way] <= '{addr: wr_entry.addr, sub_vault: wr_entry.sub_vault,
                               dirty: wr_entry.dirty};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          state[s][w] <= ST_INVALID;
          freq[s][w]  <= '0;
          age[s][w]   <= WB'(w);
        end
    end else begin
      if (wr_en) state[lk_set][wr_way] <= wr_entry.state;
      if (alloc) freq[lk_set][wr_way] <= '0;
      else if (touch_en && freq[lk_set][touch_way] != '1)
        freq[lk_set][touch_way] <= freq[lk_set][touch_way] + 1'b1;
      if (mru_en)
        for (int w = 0; w < WAYS; w++) begin
          if (WB'(w) == mru_way)                         age[lk_set][w] <= '0;
          else if (age[lk_set][w] < age[lk_set][mru_way]) age[lk_set][w] <= age[lk_set][w] + 1'b1;
        end
    end
  end

endmodule
