// vault_controller: the DL-PIM logic in the logic base of one vault.
//
// It sits between the vault's PIM core, its DRAM and the inter-vault network,
// and decides for every memory request where the block currently lives:
//   * a block homed in another vault but subscribed here is read or written in
//     the local reserved area (slot = table set * WAYS + way), with no network
//     traffic; a write sets the entry's dirty bit;
//   * otherwise the request goes to the home ("original") vault, which serves
//     it from its own DRAM or, if its subscription table says the block is
//     subscribed elsewhere, forwards it to the subscribed vault, which answers
//     the requester directly;
//   * while subscriptions are on, the first access to a remote block also asks
//     the home vault to subscribe (move) the block here (always-subscribe, a
//     zero access threshold).
// The subscription protocol follows the paper: Pending Subscription on both
// sides, data transfer from the home, acknowledgement back; resubscription of
// a block held by a third vault (the home redirects the request, the old
// holder sends the data, the new holder acknowledges to both); negative
// acknowledgement when the block is in a pending state or the subscription
// buffer is full; unsubscription started by either side, sending the data back
// only when dirty (a header-only packet otherwise); and a subscription request
// by the home vault itself turned into an unsubscription. When a table set is
// full the request waits in the subscription buffer while the set's LFU/LRU
// victim is unsubscribed; it is retried once an entry of the set frees up.
//
// Requests that reach a vault no longer holding the block, because it is being
// unsubscribed, are sent back to the home with the 'fwd' flag and served from
// home memory there; during a resubscription the old holder passes them on to
// the new one. Packets between two vaults keep their order (deterministic
// routing, FIFO buffers), which the protocol relies on.
//
// The controller handles one event per cycle: in priority order a policy
// broadcast (central vault only), the end-of-epoch report, a packet from the
// network, a ready subscription-buffer entry, a core request. An event that
// reads DRAM waits for the read data before the next one. Each event may send
// up to three packets, queued in an 8-entry output queue; a new event starts
// only while three queue slots are free.
//
// Interfaces (ready/valid unless stated):
//   core_req_*   request from the PIM core (we, block address, write data).
//   core_rsp_*   read data back to the core, one-cycle pulse, no back-pressure.
//   inj_*/ej_*   packets to and from the local router port.
//   mem_req_*    DRAM request; rsv selects the reserved subscription area
//                (addr = slot) or the vault's home data (addr = block address).
//                Writes complete on acceptance; a read returns mem_rsp_data
//                with mem_rsp_valid some cycles later (one read outstanding).
//   ev_*         one-cycle event pulses counting the protocol's mechanisms.
//
// Own choices (the paper does not give them): single-event-per-cycle
// processing, posted writes, separate request and subscription packets,
// the fwd flag, the old holder's NACK also going to the home during a failed
// resubscription, the home marking its entry Pending Resubscription, and
// dropping a buffered request whose set is still full when retried, and
// holding a core access to a block whose own subscription is pending.
//
// Inside dlpim_top the Verilator lint reports UNOPTFLAT on 'commit'. commit
// depends on the packet offered on ej_valid/ej_pkt, and ej_ready follows from
// commit. The router reads ej_ready only to pop its buffer, and its offer
// never depends on it. So the loop exists only for the lint, which treats the
// whole network output array as one signal. It only costs simulation speed.
module vault_controller
  import dlpim_pkg::*;
#(
  parameter int unsigned WAYS         = 4,
  parameter int unsigned SETS         = 2048,
  parameter int unsigned BUF_DEPTH    = 32,
  parameter int unsigned EPOCH_CYCLES = 1000000,
  parameter int unsigned THRESH_PCT   = 2,
  parameter int unsigned CENTRAL_ID   = CENTRAL_VAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  vid_t        vault_id,     // this vault's number (mesh node)
  // PIM core
  input  logic        core_req_valid,
  output logic        core_req_ready,
  input  logic        core_req_we,
  input  addr_t       core_req_addr,
  input  block_t      core_req_wdata,
  output logic        core_rsp_valid,
  output addr_t       core_rsp_addr,
  output block_t      core_rsp_data,
  // network
  output logic        inj_valid,
  input  logic        inj_ready,
  output pkt_t        inj_pkt,
  input  logic        ej_valid,
  output logic        ej_ready,
  input  pkt_t        ej_pkt,
  // vault DRAM
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic        mem_req_rsv,
  output addr_t       mem_req_addr,
  output block_t      mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  block_t      mem_rsp_data,
  // status
  output logic        sub_enable,
  output logic        ev_local_hit,
  output logic        ev_sub_done,
  output logic        ev_resub,
  output logic        ev_nack,
  output logic        ev_unsub,
  output logic        ev_unsub_dirty,
  output logic        ev_self_unsub,
  output logic        ev_buffered,
  output logic        ev_forward,
  output logic        ev_policy
);
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned WB = $clog2(WAYS);
  localparam vid_t CENTRAL = vid_t'(CENTRAL_ID);
  localparam int unsigned OQ = 8;
  vid_t ME;
  assign ME = vault_id;

  // ------------------------------------------------------------ time
  logic [31:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0; else now <= now + 1'b1;

  // ------------------------------------------------------------ state
  typedef enum logic [0:0] {S_IDLE, S_MEM} fsm_e;
  fsm_e fsm;

  typedef enum logic [1:0] {C_NONE, C_CORE, C_SEND} cont_e;
  cont_e cont_kind;
  pkt_t  cont_pkt;
  logic [7:0] cont_hops_est;

  // output queue
  pkt_t          oq     [OQ];
  logic [2:0]    oq_rd, oq_wr;
  logic [3:0]    oq_cnt;
  logic          oq_room;
  assign oq_room   = (oq_cnt <= 4'(OQ - 3));
  assign inj_valid = (oq_cnt != '0);
  assign inj_pkt   = oq[oq_rd];

  // policy broadcast (central vault)
  logic        bc_active, bc_on;
  logic [VID_W-1:0] bc_idx;
  logic        rpt_pending;
  logic signed [31:0] rpt_fb_q;
  logic [47:0] rpt_lat_q;
  logic [31:0] rpt_req_q, rpt_acc_q;

  // ------------------------------------------------------------ submodules
  // event chosen this cycle
  typedef enum logic [2:0] {EV_NONE, EV_BCAST, EV_RPT, EV_NET, EV_BUF, EV_CORE} ev_src_e;
  ev_src_e ev_src;
  pkt_t    ev_pkt;
  vid_t    ev_pkt_req;
  addr_t          lk_addr;
  logic [SB-1:0]  lk_set;
  logic           lk_hit, lk_free, lk_victim;
  logic [WB-1:0]  lk_way, lk_free_way, lk_victim_way;
  st_entry_t      lk_entry, lk_victim_entry;
  logic           st_wr_en, st_touch;
  logic [WB-1:0]  st_wr_way;
  st_entry_t      st_wr_entry;

  subscription_table #(.WAYS(WAYS), .SETS(SETS)) u_st (
    .clk, .rst_n,
    .lk_addr, .lk_set, .lk_hit, .lk_way, .lk_entry,
    .lk_free, .lk_free_way, .lk_victim, .lk_victim_way, .lk_victim_entry,
    .wr_en(st_wr_en), .wr_way(st_wr_way), .wr_entry(st_wr_entry),
    .touch_en(st_touch), .touch_way(lk_way));

  logic  sb_push, sb_full, sb_pop_valid, sb_pop;
  vid_t  sb_pop_req;
  addr_t sb_pop_addr;
  logic  sb_free;
  logic [$clog2(BUF_DEPTH):0] sb_count;

  subscription_buffer #(.DEPTH(BUF_DEPTH), .SETS(SETS)) u_sb (
    .clk, .rst_n,
    .push_valid(sb_push), .push_req(ev_pkt_req), .push_addr(lk_addr),
    .full(sb_full), .count(sb_count),
    .free_valid(sb_free), .free_set(lk_set),
    .pop_valid(sb_pop_valid), .pop_req(sb_pop_req), .pop_addr(sb_pop_addr),
    .pop_ready(sb_pop));

  logic        ap_access, ap_rd_done, ap_fb_dec, ap_epoch_end;
  logic [31:0] ap_lat;
  logic [7:0]  ap_hops, ap_est;
  logic signed [31:0] ap_rep_fb;
  logic [47:0] ap_rep_lat;
  logic [31:0] ap_rep_req, ap_rep_acc;
  logic        ap_rpt_valid, ap_decide_valid, ap_decide_on;

  adaptive_policy #(
    .EPOCH_CYCLES(EPOCH_CYCLES), .THRESH_PCT(THRESH_PCT)) u_ap (
    .clk, .rst_n, .is_central(vault_id == CENTRAL),
    .access_valid(ap_access), .rd_done_valid(ap_rd_done), .rd_latency(ap_lat),
    .hops_actual(ap_hops), .hops_est(ap_est), .fb_dec_valid(ap_fb_dec),
    .epoch_end(ap_epoch_end), .rep_feedback(ap_rep_fb), .rep_latency(ap_rep_lat),
    .rep_requests(ap_rep_req), .rep_accesses(ap_rep_acc),
    .rpt_valid(ap_rpt_valid),
    .rpt_feedback(ev_pkt.data[31:0]), .rpt_latency(ev_pkt.data[79:32]),
    .rpt_requests(ev_pkt.data[111:80]), .rpt_accesses(ev_pkt.data[143:112]),
    .decide_valid(ap_decide_valid), .decide_on(ap_decide_on));

  // ------------------------------------------------------------ event select
  assign ev_pkt_req = ev_pkt.req;

  always_comb begin
    ev_src = EV_NONE;
    ev_pkt = '0;
    if (fsm == S_IDLE && oq_room) begin
      if (bc_active)          ev_src = EV_BCAST;
      else if (rpt_pending)   ev_src = EV_RPT;
      else if (ej_valid) begin
        ev_src = EV_NET;
        ev_pkt = ej_pkt;
      end else if (sb_pop_valid) begin
        ev_src        = EV_BUF;
        ev_pkt.ptype  = SUB_REQ;
        ev_pkt.src    = sb_pop_req;
        ev_pkt.req    = sb_pop_req;
        ev_pkt.addr   = sb_pop_addr;
      end else if (core_req_valid) begin
        ev_src        = EV_CORE;
        ev_pkt.ptype  = core_req_we ? PKT_WR : PKT_RD;
        ev_pkt.src    = ME;
        ev_pkt.req    = ME;
        ev_pkt.addr   = core_req_addr;
        ev_pkt.data   = core_req_wdata;
        ev_pkt.has_data = core_req_we;
        ev_pkt.tstamp = now;
      end
    end
  end

  assign lk_addr = ev_pkt.addr;

  // ------------------------------------------------------------ event decode
  // Outcome of the selected event, committed at the clock edge.
  logic        a_mem, a_mem_we, a_mem_rsv;
  addr_t       a_mem_addr;
  block_t      a_mem_wdata;
  logic        a_wait;          // DRAM read: wait for data, then continuation
  cont_e       a_cont;
  pkt_t        a_cont_pkt;
  logic        a_push [3];
  pkt_t        a_pkt  [3];
  logic        a_core_rsp;
  logic        a_rd_done;
  logic [7:0]  a_hops;
  logic        a_fb_dec;
  logic        a_sub_en_set, a_sub_en_val;
  logic        a_st_wr, a_touch, a_sb_push, a_victim, a_stall;
  logic [WB-1:0] a_st_way;
  st_entry_t   a_st_entry;
  logic        a_ev_local, a_ev_sub, a_ev_resub, a_ev_nack, a_ev_unsub, a_ev_unsub_d,
               a_ev_self, a_ev_buf, a_ev_fwd;

  vid_t        home;
  logic        is_home;
  logic [7:0]  est_hops;
  logic [WB+SB-1:0] hit_slot, vic_slot;
  logic        commit;
  logic        sub_en;

  assign home     = home_of(ev_pkt.addr);
  assign is_home  = (home == ME);
  assign est_hops = 8'(2 * hop_dist(ev_pkt.req, home));
  assign hit_slot = {lk_set, lk_way};
  assign vic_slot = {lk_set, lk_victim_way};

  function automatic pkt_t mk(pkt_type_e t, vid_t dst, pkt_t base);
    pkt_t p;
    p          = base;
    p.ptype    = t;
    p.src      = ME;
    p.dst      = dst;
    p.fwd      = 1'b0;
    p.has_data = 1'b0;
    p.dirty    = 1'b0;
    return p;
  endfunction

  // Start the unsubscription of the set's victim (set full).

  always_comb begin
    a_mem = 1'b0; a_mem_we = 1'b0; a_mem_rsv = 1'b0; a_mem_addr = '0; a_mem_wdata = '0;
    a_wait = 1'b0; a_cont = C_NONE; a_cont_pkt = '0;
    for (int i = 0; i < 3; i++) begin a_push[i] = 1'b0; a_pkt[i] = '0; end
    a_core_rsp = 1'b0; a_rd_done = 1'b0; a_hops = '0; a_fb_dec = 1'b0;
    a_sub_en_set = 1'b0; a_sub_en_val = 1'b0;
    a_ev_local = 1'b0; a_ev_sub = 1'b0; a_ev_resub = 1'b0; a_ev_nack = 1'b0;
    a_ev_unsub = 1'b0; a_ev_unsub_d = 1'b0; a_ev_self = 1'b0; a_ev_buf = 1'b0;
    a_ev_fwd = 1'b0;
    a_st_wr = 1'b0; a_st_way = lk_way; a_st_entry = lk_entry; a_touch = 1'b0;
    a_sb_push = 1'b0;
    a_victim = 1'b0;
    a_stall  = 1'b0;
    ap_rpt_valid = 1'b0;

    unique case (ev_src)
      EV_BCAST: begin
        a_push[0] = 1'b1;
        a_pkt[0]  = mk(bc_on ? SUB_ON : SUB_OFF, bc_idx, '0);
      end
      EV_RPT: begin
        a_push[0] = 1'b1;
        a_pkt[0]  = mk(PKT_STATS, CENTRAL, '0);
        a_pkt[0].data[31:0]    = rpt_fb_q;
        a_pkt[0].data[79:32]   = rpt_lat_q;
        a_pkt[0].data[111:80]  = rpt_req_q;
        a_pkt[0].data[143:112] = rpt_acc_q;
        a_pkt[0].has_data      = 1'b1;
      end
      EV_NET, EV_BUF, EV_CORE: begin
        unique case (ev_pkt.ptype)
          // ------------------------------------------------ reads and writes
          PKT_RD, PKT_WR: begin
            if (!is_home && lk_hit && lk_entry.state == ST_SUBSCRIBED) begin
              // block subscribed here: serve from the reserved area
              a_mem      = 1'b1;
              a_mem_rsv  = 1'b1;
              a_mem_addr = addr_t'(hit_slot);
              a_touch   = 1'b1;
              if (ev_src == EV_CORE) a_ev_local = 1'b1;
              if (ev_src == EV_NET && ev_pkt.req != ME &&
                  8'(hop_dist(ev_pkt.req, home) + hop_dist(home, ME) + hop_dist(ME, ev_pkt.req))
                    > est_hops)
                a_fb_dec = 1'b1;
              if (ev_pkt.ptype == PKT_WR) begin
                a_mem_we    = 1'b1;
                a_mem_wdata = ev_pkt.data;
                a_st_wr    = 1'b1;
                a_st_entry.dirty = 1'b1;
              end else begin
                a_wait = 1'b1;
                if (ev_pkt.req == ME) begin
                  a_cont = C_CORE;
                end else begin
                  a_cont = C_SEND;
                  a_cont_pkt = mk(PKT_RD_RSP, ev_pkt.req, ev_pkt);
                  a_cont_pkt.has_data = 1'b1;
                end
              end
            end else if (!is_home && lk_hit && lk_entry.state == ST_PEND_RESUB &&
                         ev_src == EV_NET) begin
              // data already on its way to the new holder: follow it
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(ev_pkt.ptype, lk_entry.sub_vault, ev_pkt);
              a_pkt[0].has_data = ev_pkt.has_data;
              a_ev_fwd  = 1'b1;
            end else if (!is_home && ev_src == EV_NET) begin
              // not (or no longer) held here: back to the home memory
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(ev_pkt.ptype, home, ev_pkt);
              a_pkt[0].fwd      = 1'b1;
              a_pkt[0].has_data = ev_pkt.has_data;
              a_ev_fwd  = 1'b1;
            end else if (!is_home && lk_hit && lk_entry.state == ST_PEND_SUB) begin
              // our own subscription of this block is under way: hold the
              // core access until the data (or a NACK) arrives, so that it
              // cannot overtake or be overtaken by the data transfer
              a_stall = 1'b1;
            end else if (!is_home) begin
              // core access to a remote block: go to the original vault
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(ev_pkt.ptype, home, ev_pkt);
              a_pkt[0].has_data = ev_pkt.has_data;
              if (sub_en && !lk_hit) begin
                if (lk_free) begin
                  a_st_wr    = 1'b1;
                  a_st_way   = lk_free_way;
                  a_st_entry = '{state: ST_PEND_SUB, addr: ev_pkt.addr, sub_vault: ME, dirty: 1'b0};
                  a_push[1]   = 1'b1;
                  a_pkt[1]    = mk(SUB_REQ, home, ev_pkt);
                end else if (!sb_full) begin
                  a_sb_push  = 1'b1;
                  a_ev_buf = 1'b1;
                  a_victim = lk_victim;
                end
              end
            end else if (lk_hit && !ev_pkt.fwd) begin
              // home vault, block subscribed elsewhere: forward
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(ev_pkt.ptype, lk_entry.sub_vault, ev_pkt);
              a_pkt[0].has_data = ev_pkt.has_data;
              a_ev_fwd  = 1'b1;
              if (ev_src == EV_CORE && sub_en && lk_entry.state == ST_SUBSCRIBED) begin
                // the home itself wants the block: unsubscribe it
                a_st_wr  = 1'b1;
                a_st_entry.state = ST_PEND_UNSUB;
                a_push[1] = 1'b1;
                a_pkt[1]  = mk(UNSUB_REQ, lk_entry.sub_vault, ev_pkt);
                a_ev_self = 1'b1;
              end
            end else begin
              // home vault, block at home
              a_mem      = 1'b1;
              a_mem_addr = ev_pkt.addr;
              if (ev_pkt.ptype == PKT_WR) begin
                a_mem_we    = 1'b1;
                a_mem_wdata = ev_pkt.data;
              end else begin
                a_wait = 1'b1;
                if (ev_pkt.req == ME) begin
                  a_cont = C_CORE;
                end else begin
                  a_cont = C_SEND;
                  a_cont_pkt = mk(PKT_RD_RSP, ev_pkt.req, ev_pkt);
                  a_cont_pkt.has_data = 1'b1;
                end
              end
            end
          end
          PKT_RD_RSP: begin
            a_core_rsp = 1'b1;
            a_rd_done  = 1'b1;
            a_hops     = ev_pkt.hops;
          end
          // ------------------------------------------------ subscription
          SUB_REQ: begin
            if (is_home) begin
              if (lk_hit) begin
                if (lk_entry.state == ST_SUBSCRIBED && lk_entry.sub_vault != ev_pkt.req) begin
                  // resubscription: redirect to the subscribed vault
                  a_st_wr  = 1'b1;
                  a_st_entry.state = ST_PEND_RESUB;
                  a_push[0] = 1'b1;
                  a_pkt[0]  = mk(SUB_REQ, lk_entry.sub_vault, ev_pkt);
                  a_ev_resub = 1'b1;
                end else begin
                  a_push[0] = 1'b1;
                  a_pkt[0]  = mk(SUB_NACK, ev_pkt.req, ev_pkt);
                end
              end else if (lk_free) begin
                a_st_wr    = 1'b1;
                a_st_way   = lk_free_way;
                a_st_entry = '{state: ST_PEND_SUB, addr: ev_pkt.addr,
                                sub_vault: ev_pkt.req, dirty: 1'b0};
                a_mem      = 1'b1;
                a_mem_addr = ev_pkt.addr;
                a_wait     = 1'b1;
                a_cont     = C_SEND;
                a_cont_pkt = mk(SUB_DATA, ev_pkt.req, ev_pkt);
                a_cont_pkt.has_data = 1'b1;
              end else if (ev_src == EV_NET && !sb_full) begin
                a_sb_push  = 1'b1;
                a_ev_buf = 1'b1;
                a_victim = lk_victim;
              end else begin
                a_push[0] = 1'b1;
                a_pkt[0]  = mk(SUB_NACK, ev_pkt.req, ev_pkt);
              end
            end else if (ev_src == EV_BUF) begin
              // retry of our own subscription once the set has room
              if (!lk_hit && lk_free && sub_en) begin
                a_st_wr    = 1'b1;
                a_st_way   = lk_free_way;
                a_st_entry = '{state: ST_PEND_SUB, addr: ev_pkt.addr, sub_vault: ME, dirty: 1'b0};
                a_push[0]   = 1'b1;
                a_pkt[0]    = mk(SUB_REQ, home, ev_pkt);
                a_pkt[0].req = ME;
              end
            end else if (lk_hit && lk_entry.state == ST_SUBSCRIBED) begin
              // we are the subscribed vault of a resubscription: hand over
              a_st_wr  = 1'b1;
              a_st_entry.state     = ST_PEND_RESUB;
              a_st_entry.sub_vault = ev_pkt.req;
              a_mem      = 1'b1;
              a_mem_rsv  = 1'b1;
              a_mem_addr = addr_t'(hit_slot);
              a_wait     = 1'b1;
              a_cont     = C_SEND;
              a_cont_pkt = mk(SUB_DATA, ev_pkt.req, ev_pkt);
              a_cont_pkt.has_data = 1'b1;
              a_cont_pkt.dirty    = lk_entry.dirty;
            end else begin
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(SUB_NACK, ev_pkt.req, ev_pkt);
              a_push[1] = 1'b1;
              a_pkt[1]  = mk(SUB_NACK, home, ev_pkt);
            end
          end
          SUB_NACK: begin
            if (lk_hit && !is_home && lk_entry.state == ST_PEND_SUB) begin
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_INVALID;
              a_ev_nack = 1'b1;
            end else if (lk_hit && is_home && lk_entry.state == ST_PEND_RESUB) begin
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_SUBSCRIBED;
            end
          end
          SUB_DATA: begin
            if (!is_home) begin
              if (lk_hit && lk_entry.state == ST_PEND_SUB) begin
                a_mem       = 1'b1;
                a_mem_we    = 1'b1;
                a_mem_rsv   = 1'b1;
                a_mem_addr  = addr_t'(hit_slot);
                a_mem_wdata = ev_pkt.data;
                a_st_wr    = 1'b1;
                a_st_entry.state = ST_SUBSCRIBED;
                a_st_entry.dirty = ev_pkt.dirty;
                a_push[0] = 1'b1;
                a_pkt[0]  = mk(SUB_ACK, home, ev_pkt);
                if (ev_pkt.src != home) begin
                  a_push[1] = 1'b1;
                  a_pkt[1]  = mk(SUB_ACK, ev_pkt.src, ev_pkt);
                end
                a_ev_sub = 1'b1;
              end
            end else if (lk_hit && lk_entry.sub_vault == ev_pkt.src) begin
              // unsubscription data (or clean acknowledgement) back home
              if (ev_pkt.dirty) begin
                a_mem       = 1'b1;
                a_mem_we    = 1'b1;
                a_mem_addr  = ev_pkt.addr;
                a_mem_wdata = ev_pkt.data;
                a_ev_unsub_d = 1'b1;
              end
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_INVALID;
              a_push[0] = 1'b1;
              a_pkt[0]  = mk(UNSUB_ACK, ev_pkt.src, ev_pkt);
              a_ev_unsub = 1'b1;
            end
          end
          SUB_ACK: begin
            if (is_home && lk_hit &&
                (lk_entry.state == ST_PEND_SUB || lk_entry.state == ST_PEND_RESUB)) begin
              a_st_wr  = 1'b1;
              a_st_entry.state     = ST_SUBSCRIBED;
              a_st_entry.sub_vault = ev_pkt.src;
            end else if (!is_home && lk_hit && lk_entry.state == ST_PEND_RESUB) begin
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_INVALID;
            end
          end
          UNSUB_REQ: begin
            if (!is_home && lk_hit && lk_entry.state == ST_SUBSCRIBED) begin
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_PEND_UNSUB;
              if (lk_entry.dirty) begin
                a_mem      = 1'b1;
                a_mem_rsv  = 1'b1;
                a_mem_addr = addr_t'(hit_slot);
                a_wait     = 1'b1;
                a_cont     = C_SEND;
                a_cont_pkt = mk(SUB_DATA, home, ev_pkt);
                a_cont_pkt.has_data = 1'b1;
                a_cont_pkt.dirty    = 1'b1;
              end else begin
                a_push[0] = 1'b1;
                a_pkt[0]  = mk(SUB_DATA, home, ev_pkt);
              end
            end
          end
          UNSUB_ACK: begin
            if (!is_home && lk_hit && lk_entry.state == ST_PEND_UNSUB) begin
              a_st_wr  = 1'b1;
              a_st_entry.state = ST_INVALID;
            end
          end
          SUB_ON, SUB_OFF: begin
            a_sub_en_set = 1'b1;
            a_sub_en_val = (ev_pkt.ptype == SUB_ON);
          end
          PKT_STATS: begin
            ap_rpt_valid = (ev_src == EV_NET) && commit;
          end
          default: ;
        endcase
      end
      default: ;
    endcase
    // start the unsubscription of the victim of a full set
    if (a_victim) begin
      a_st_wr    = 1'b1;
      a_st_way   = lk_victim_way;
      a_st_entry = lk_victim_entry;
      a_st_entry.state = ST_PEND_UNSUB;
      if (home_of(lk_victim_entry.addr) == ME) begin
        // we are the original vault: ask the subscribed vault for the data
        a_push[2] = 1'b1;
        a_pkt[2]  = mk(UNSUB_REQ, lk_victim_entry.sub_vault, '0);
        a_pkt[2].addr = lk_victim_entry.addr;
        a_pkt[2].req  = ME;
      end else if (lk_victim_entry.dirty) begin
        // we hold it and it was written: send the block back
        a_mem      = 1'b1;
        a_mem_rsv  = 1'b1;
        a_mem_addr = addr_t'(vic_slot);
        a_wait     = 1'b1;
        a_cont     = C_SEND;
        a_cont_pkt = mk(SUB_DATA, home_of(lk_victim_entry.addr), '0);
        a_cont_pkt.addr     = lk_victim_entry.addr;
        a_cont_pkt.req      = ME;
        a_cont_pkt.dirty    = 1'b1;
        a_cont_pkt.has_data = 1'b1;
      end else begin
        // clean: an acknowledgement-sized packet is enough
        a_push[2] = 1'b1;
        a_pkt[2]  = mk(SUB_DATA, home_of(lk_victim_entry.addr), '0);
        a_pkt[2].addr = lk_victim_entry.addr;
        a_pkt[2].req  = ME;
      end
    end
  end

  assign commit        = (ev_src != EV_NONE) && !a_stall && (!a_mem || mem_req_ready);
  assign mem_req_valid = (ev_src != EV_NONE) && a_mem;
  assign mem_req_we    = a_mem_we;
  assign mem_req_rsv   = a_mem_rsv;
  assign mem_req_addr  = a_mem_addr;
  assign mem_req_wdata = a_mem_wdata;

  assign ej_ready       = commit && ev_src == EV_NET;
  assign core_req_ready = commit && ev_src == EV_CORE;
  assign sb_pop         = commit && ev_src == EV_BUF;
  assign sb_free        = commit && a_st_wr && a_st_entry.state == ST_INVALID;

  // table and buffer updates take effect only when the event commits
  assign st_wr_en    = commit && a_st_wr;
  assign st_wr_way   = a_st_way;
  assign st_wr_entry = a_st_entry;
  assign st_touch    = commit && a_touch;
  assign sb_push     = commit && a_sb_push;

  // ------------------------------------------------------------ sequential
  // Completion of a core read (network response or local DRAM data).
  logic mem_done;
  assign mem_done = (fsm == S_MEM) && mem_rsp_valid;

  always_comb begin
    core_rsp_valid = 1'b0;
    core_rsp_addr  = ev_pkt.addr;
    core_rsp_data  = ev_pkt.data;
    ap_rd_done     = 1'b0;
    ap_lat         = '0;
    ap_hops        = '0;
    ap_est         = '0;
    if (mem_done && cont_kind == C_CORE) begin
      core_rsp_valid = 1'b1;
      core_rsp_addr  = cont_pkt.addr;
      core_rsp_data  = mem_rsp_data;
      ap_rd_done     = 1'b1;
      ap_lat         = now - cont_pkt.tstamp;
      ap_hops        = cont_pkt.hops;
      ap_est         = cont_hops_est;
    end else if (commit && a_core_rsp) begin
      core_rsp_valid = 1'b1;
      ap_rd_done     = 1'b1;
      ap_lat         = now - ev_pkt.tstamp;
      ap_hops        = a_hops;
      ap_est         = est_hops;
    end
  end
  assign ap_access = commit && ev_src == EV_CORE;
  assign ap_fb_dec = commit && a_fb_dec;

  assign sub_enable     = sub_en;
  assign ev_local_hit   = commit && a_ev_local;
  assign ev_sub_done    = commit && a_ev_sub;
  assign ev_resub       = commit && a_ev_resub;
  assign ev_nack        = commit && a_ev_nack;
  assign ev_unsub       = commit && a_ev_unsub;
  assign ev_unsub_dirty = commit && a_ev_unsub_d;
  assign ev_self_unsub  = commit && a_ev_self;
  assign ev_buffered    = commit && a_ev_buf;
  assign ev_forward     = commit && a_ev_fwd;
  assign ev_policy      = commit && a_sub_en_set && (a_sub_en_val != sub_en);

  // output queue pushes
  logic       p_v [4];
  pkt_t       p_d [4];
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      p_v[i] = commit && a_push[i];
      p_d[i] = a_pkt[i];
    end
    p_v[3] = mem_done && cont_kind == C_SEND;
    p_d[3] = cont_pkt;
    p_d[3].data = mem_rsp_data;
  end

  always_ff @(posedge clk) begin
    automatic logic [2:0] w;
    w = oq_wr;
    for (int i = 0; i < 4; i++)
      if (p_v[i]) begin
        oq[w] <= p_d[i];
        w = w + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fsm         <= S_IDLE;
      cont_kind   <= C_NONE;
      cont_pkt    <= '0;
      cont_hops_est <= '0;
      oq_rd       <= '0;
      oq_wr       <= '0;
      oq_cnt      <= '0;
      sub_en      <= 1'b1;
      bc_active   <= 1'b0;
      bc_on       <= 1'b1;
      bc_idx      <= '0;
      rpt_pending <= 1'b0;
      rpt_fb_q    <= '0;
      rpt_lat_q   <= '0;
      rpt_req_q   <= '0;
      rpt_acc_q   <= '0;
    end else begin
      automatic logic [3:0] n_push;
      automatic logic       pop;
      n_push = '0;
      for (int i = 0; i < 4; i++) n_push = n_push + (p_v[i] ? 4'd1 : 4'd0);
      pop = inj_valid && inj_ready;
      oq_wr  <= oq_wr + 3'(n_push);
      oq_rd  <= oq_rd + (pop ? 3'd1 : 3'd0);
      oq_cnt <= oq_cnt + n_push - (pop ? 4'd1 : 4'd0);

      if (commit && a_wait) begin
        fsm           <= S_MEM;
        cont_kind     <= a_cont;
        cont_pkt      <= (a_cont == C_CORE) ? ev_pkt : a_cont_pkt;
        cont_hops_est <= est_hops;
      end else if (mem_done) begin
        fsm <= S_IDLE;
      end

      if (commit && a_sub_en_set) sub_en <= a_sub_en_val;

      // end of epoch: latch the report for the central vault
      if (ap_epoch_end) begin
        rpt_pending <= 1'b1;
        rpt_fb_q    <= ap_rep_fb;
        rpt_lat_q   <= ap_rep_lat;
        rpt_req_q   <= ap_rep_req;
        rpt_acc_q   <= ap_rep_acc;
      end else if (commit && ev_src == EV_RPT) begin
        rpt_pending <= 1'b0;
      end

      // central vault: broadcast the decision to every vault
      if (ap_decide_valid) begin
        bc_active <= 1'b1;
        bc_on     <= ap_decide_on;
        bc_idx    <= '0;
      end else if (commit && ev_src == EV_BCAST) begin
        bc_idx <= bc_idx + 1'b1;
        if (bc_idx == vid_t'(NUM_VAULTS - 1)) bc_active <= 1'b0;
      end
    end
  end

endmodule
