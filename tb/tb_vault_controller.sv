// Self-checking test of vault_controller (vault 7, a 4-set x 2-way table, a
// 2-entry subscription buffer). The testbench plays the network and a DRAM
// model and walks through the protocol: home access, remote access with
// subscription request, subscription data and acknowledgement, local hit,
// serving a forwarded request, clean and dirty unsubscription, negative
// acknowledgement, home-side subscription and resubscription, the home's own
// access turned into an unsubscription, a full set (buffer + victim), and
// the turn-off broadcast.
module tb_vault_controller;
  import dlpim_pkg::*;
  localparam int ME = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic core_req_valid = 0, core_req_ready, core_req_we = 0;
  addr_t core_req_addr = '0;
  block_t core_req_wdata = '0;
  logic core_rsp_valid;
  addr_t core_rsp_addr;
  block_t core_rsp_data;
  logic inj_valid, inj_ready, ej_valid = 0, ej_ready;
  pkt_t inj_pkt, ej_pkt = '0;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_req_rsv, mem_rsp_valid;
  addr_t mem_req_addr;
  block_t mem_req_wdata, mem_rsp_data;
  logic sub_enable, ev_local_hit, ev_sub_done, ev_resub, ev_nack, ev_unsub, ev_unsub_dirty,
        ev_self_unsub, ev_buffered, ev_forward, ev_policy;

  vid_t vault_id = vid_t'(ME);
  vault_controller #(.WAYS(2), .SETS(4), .BUF_DEPTH(2),
                     .EPOCH_CYCLES(100000)) dut (.*);
  vault_dram_model #(.LATENCY(3)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_rsv(mem_req_rsv), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  int n_local = 0, n_sub = 0, n_resub = 0, n_nack = 0, n_unsub = 0, n_dirty = 0,
      n_self = 0, n_buf = 0, n_pol = 0;
  pkt_t sentq[$];
  block_t last_rsp;
  int rsp_cnt = 0;

  assign inj_ready = 1'b1;
  always @(posedge clk) begin
    if (inj_valid) sentq.push_back(inj_pkt);
    if (core_rsp_valid) begin last_rsp = core_rsp_data; rsp_cnt++; end
    n_local += ev_local_hit; n_sub += ev_sub_done; n_resub += ev_resub; n_nack += ev_nack;
    n_unsub += ev_unsub; n_dirty += ev_unsub_dirty; n_self += ev_self_unsub;
    n_buf += ev_buffered; n_pol += ev_policy;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic addr_t mka(int home, int set, int tag);
    return addr_t'((tag << 7) | (set << 5) | home);
  endfunction
  function automatic block_t pat(addr_t a);   // the DRAM model's initial contents
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {1'b0, a} ^ (i * 32'h9e37_79b9);
    return b;
  endfunction

  task automatic core(bit we, addr_t a, block_t d = '0);
    @(negedge clk);
    core_req_we = we; core_req_addr = a; core_req_wdata = d; core_req_valid = 1;
    #1; while (!core_req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 core_req_valid = 0;
  endtask
  task automatic core_read(addr_t a, output block_t d);
    int n0 = rsp_cnt;
    core(0, a);
    for (int i = 0; i < 50 && rsp_cnt == n0; i++) @(posedge clk);
    #1 d = last_rsp;
  endtask
  task automatic net(pkt_type_e t, int src, int req, addr_t a, bit dirty = 0, block_t d = '0);
    @(negedge clk);
    ej_pkt = '0; ej_pkt.ptype = t; ej_pkt.src = vid_t'(src); ej_pkt.dst = vid_t'(ME);
    ej_pkt.req = vid_t'(req); ej_pkt.addr = a; ej_pkt.dirty = dirty; ej_pkt.data = d;
    ej_pkt.has_data = (d != '0);
    ej_valid = 1;
    #1; while (!ej_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ej_valid = 0;
  endtask
  task automatic expect_pkt(pkt_type_e t, int dst, addr_t a, string what, output pkt_t p);
    for (int i = 0; i < 30 && sentq.size() == 0; i++) @(posedge clk);
    #1;
    if (sentq.size() == 0) begin
      chk(0, {what, ": no packet"}); p = '0;
    end else begin
      p = sentq.pop_front();
      chk(p.ptype == t && p.dst == vid_t'(dst) && p.addr == a && p.src == vid_t'(ME),
          $sformatf("%s: got %s to %0d", what, p.ptype.name(), p.dst));
    end
  endtask
  task automatic expect_quiet(string what);
    repeat (10) @(posedge clk);
    #1 chk(sentq.size() == 0, {what, ": no packet sent"});
    sentq.delete();
  endtask

  initial begin
    addr_t a, b, c, h, x1, x2, x3;
    block_t d, w;
    pkt_t p;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    chk(sub_enable, "subscriptions on after reset");

    // 1. read of a block homed here: served from home DRAM
    h = mka(ME, 1, 5);
    core_read(h, d);
    chk(d == pat(h), "home read returns home data");
    expect_quiet("home read");

    // 2. read of a remote block: request + subscription request to its home
    a = mka(3, 2, 1);
    core(0, a);
    expect_pkt(PKT_RD, 3, a, "remote read goes to home", p);
    expect_pkt(SUB_REQ, 3, a, "subscription request to home", p);
    // home answers the read, then sends the subscription data
    net(PKT_RD_RSP, 3, ME, a, 0, pat(a));
    repeat (2) @(posedge clk);
    #1 chk(last_rsp == pat(a), "read response delivered to core");
    net(SUB_DATA, 3, ME, a, 0, pat(a));
    expect_pkt(SUB_ACK, 3, a, "subscription acknowledged to home", p);
    chk(n_sub == 1, "subscription completed");
    // 3. the block is now local
    core_read(a, d);
    chk(d == pat(a) && n_local == 1, "local hit from the reserved area");
    expect_quiet("local hit");
    // 4. a request from vault 9 forwarded by the home is answered directly
    net(PKT_RD, 3, 9, a);
    expect_pkt(PKT_RD_RSP, 9, a, "forwarded read answered to requester", p);
    chk(p.data == pat(a), "forwarded read data");
    // 5. clean unsubscription on request of the home: header-only packet
    net(UNSUB_REQ, 3, 3, a);
    expect_pkt(SUB_DATA, 3, a, "clean data return", p);
    chk(!p.has_data && !p.dirty, "clean return carries no data");
    net(UNSUB_ACK, 3, 3, a);
    core(0, a);
    expect_pkt(PKT_RD, 3, a, "after unsubscription the read is remote again", p);
    expect_pkt(SUB_REQ, 3, a, "and subscription is requested again", p);
    // 6. negative acknowledgement rolls the entry back
    net(SUB_NACK, 3, ME, a);
    chk(n_nack == 1, "NACK counted");
    core(0, a);
    expect_pkt(PKT_RD, 3, a, "read after NACK", p);
    expect_pkt(SUB_REQ, 3, a, "entry was removed, new subscription request", p);
    // 7. subscribe, write locally, dirty unsubscription returns the data
    w = {16{32'hdead_beef}};
    net(SUB_DATA, 3, ME, a, 0, pat(a));
    expect_pkt(SUB_ACK, 3, a, "ack", p);
    core(1, a, w);
    expect_quiet("local write");
    net(UNSUB_REQ, 3, 3, a);
    expect_pkt(SUB_DATA, 3, a, "dirty data return", p);
    chk(p.has_data && p.dirty && p.data == w, "dirty return carries the written block");
    net(UNSUB_ACK, 3, 3, a);

    // 8. home side: vault 9 subscribes to block b homed here
    b = mka(ME, 0, 3);
    net(SUB_REQ, 9, 9, b);
    expect_pkt(SUB_DATA, 9, b, "home sends subscription data", p);
    chk(p.has_data && p.data == pat(b), "subscription data is the home block");
    net(SUB_ACK, 9, 9, b);
    // a read from vault 12 is forwarded to the subscribed vault
    net(PKT_RD, 12, 12, b);
    expect_pkt(PKT_RD, 9, b, "home forwards read to subscribed vault", p);
    chk(p.req == 5'd12, "forwarded read keeps the requester");
    // 9. resubscription: vault 12 asks for b
    net(SUB_REQ, 12, 12, b);
    expect_pkt(SUB_REQ, 9, b, "home redirects to subscribed vault", p);
    chk(n_resub == 1 && p.req == 5'd12, "resubscription counted");
    // a third request while pending: NACK
    net(SUB_REQ, 20, 20, b);
    expect_pkt(SUB_NACK, 20, b, "pending entry: NACK", p);
    net(SUB_ACK, 12, 12, b);     // new holder acknowledges
    net(PKT_WR, 20, 20, b, 0, w);
    expect_pkt(PKT_WR, 12, b, "writes now go to the new holder", p);
    // 10. the home's own core accesses b: forward + unsubscription
    core(0, b);
    expect_pkt(PKT_RD, 12, b, "home read forwarded", p);
    expect_pkt(UNSUB_REQ, 12, b, "home access turned into unsubscription", p);
    chk(n_self == 1, "self unsubscription counted");
    net(SUB_DATA, 12, 12, b, 1, w);
    expect_pkt(UNSUB_ACK, 12, b, "home acknowledges returned data", p);
    chk(n_unsub == 1 && n_dirty == 1, "dirty unsubscription at home");
    net(PKT_RD_RSP, 12, ME, b, 0, w);
    core_read(b, d);
    chk(d == w, "home memory holds the returned dirty block");

    // 11. full set: subscribe two blocks of set 3, a third waits in the buffer
    x1 = mka(4, 3, 1); x2 = mka(5, 3, 2); x3 = mka(6, 3, 3);
    core(0, x1); expect_pkt(PKT_RD, 4, x1, "x1", p); expect_pkt(SUB_REQ, 4, x1, "x1 sub", p);
    net(SUB_DATA, 4, ME, x1, 0, pat(x1)); expect_pkt(SUB_ACK, 4, x1, "x1 ack", p);
    core(0, x2); expect_pkt(PKT_RD, 5, x2, "x2", p); expect_pkt(SUB_REQ, 5, x2, "x2 sub", p);
    net(SUB_DATA, 5, ME, x2, 0, pat(x2)); expect_pkt(SUB_ACK, 5, x2, "x2 ack", p);
    core_read(x2, d);  // x2 used again: x1 is the LFU victim
    sentq.delete();
    core(0, x3);
    expect_pkt(PKT_RD, 6, x3, "x3 read goes remote", p);
    expect_pkt(SUB_DATA, 4, x1, "victim x1 returned to its home", p);
    chk(n_buf == 1, "x3 subscription parked in the buffer");
    net(UNSUB_ACK, 4, 4, x1);
    expect_pkt(SUB_REQ, 6, x3, "buffered subscription retried once x1 left", p);

    // 12. turn-off broadcast: no more subscription requests
    net(SUB_OFF, CENTRAL_VAULT, CENTRAL_VAULT, '0);
    chk(!sub_enable && n_pol == 1, "subscription turned off");
    c = mka(2, 1, 9);
    core(0, c);
    expect_pkt(PKT_RD, 2, c, "read still goes to home", p);
    expect_quiet("no subscription request while off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
