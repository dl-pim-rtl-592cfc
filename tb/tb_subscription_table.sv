// Self-checking test of subscription_table: lookup, allocation, free-way
// search, LFU victim choice with LRU tie-break, invalidation.
// Uses a small table (16 sets x 4 ways, the paper's 4 ways); the expected victim is worked out
// from the access counts the testbench itself applied.
module tb_subscription_table;
  import dlpim_pkg::*;
  localparam int WAYS = 4, SETS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  addr_t lk_addr;
  logic [3:0] lk_set;
  logic lk_hit, lk_free, lk_victim;
  logic [1:0] lk_way, lk_free_way, lk_victim_way;
  st_entry_t lk_entry, lk_victim_entry;
  logic wr_en = 0, touch_en = 0;
  logic [1:0] wr_way = 0, touch_way = 0;
  st_entry_t wr_entry = '0;
  int checks = 0, failures = 0;

  subscription_table #(.WAYS(WAYS), .SETS(SETS)) dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // address in set s with tag t (set bits sit above the 5 vault bits)
  function automatic addr_t mka(int s, int t, int v = 3);
    return addr_t'((t << 9) | (s << 5) | v);
  endfunction

  task automatic write_entry(addr_t a, int way, st_state_e st, int sv);
    lk_addr  = a;
    wr_way   = 2'(way);
    wr_entry = '{state: st, addr: a, sub_vault: vid_t'(sv), dirty: 1'b0};
    wr_en    = 1;
    @(posedge clk); #1 wr_en = 0;
  endtask

  task automatic touch(addr_t a, int n);
    lk_addr = a; #1;
    for (int i = 0; i < n; i++) begin
      touch_way = lk_way; touch_en = 1;
      @(posedge clk); #1;
    end
    touch_en = 0;
  endtask

  initial begin
    lk_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // empty table
    lk_addr = mka(5, 1); #1;
    chk(!lk_hit && lk_free && !lk_victim, "empty set: miss, free, no victim");
    chk(lk_set == 4'd5, "set index from address bits above the vault bits");
    // fill set 5 with four subscribed entries
    for (int w = 0; w < 4; w++) write_entry(mka(5, w+1), w, ST_SUBSCRIBED, w+10);
    for (int w = 0; w < 4; w++) begin
      lk_addr = mka(5, w+1); #1;
      chk(lk_hit && lk_way == 2'(w) && lk_entry.sub_vault == vid_t'(w+10) &&
          lk_entry.state == ST_SUBSCRIBED, $sformatf("hit way %0d", w));
    end
    lk_addr = mka(5, 9); #1;
    chk(!lk_hit && !lk_free, "full set: miss and no free way");
    // way 0 was allocated first and never used since: LRU among equal counts
    chk(lk_victim && lk_victim_way == 2'd0, "tie on frequency: least recent (way 0)");
    // make ways 0,1,3 used more often: way 2 becomes least frequent
    touch(mka(5, 1), 3); touch(mka(5, 2), 2); touch(mka(5, 4), 1);
    lk_addr = mka(5, 9); #1;
    chk(lk_victim && lk_victim_way == 2'd2, "least frequently used victim (way 2)");
    touch(mka(5, 3), 1);  // ways 2 and 3 now both used once; way 2 more recent
    lk_addr = mka(5, 9); #1;
    chk(lk_victim && lk_victim_way == 2'd3, "frequency tie broken by LRU (way 3)");
    // pending entries are not victims
    write_entry(mka(5, 4), 3, ST_PEND_UNSUB, 13);
    lk_addr = mka(5, 9); #1;
    chk(lk_victim && lk_victim_way == 2'd2, "pending way skipped as victim");
    // invalidate way 1: becomes free, address misses
    write_entry(mka(5, 2), 1, ST_INVALID, 0);
    lk_addr = mka(5, 2); #1;
    chk(!lk_hit && lk_free && lk_free_way == 2'd1, "freed way is reported free");
    // re-allocation resets the frequency counter
    write_entry(mka(5, 7), 1, ST_PEND_SUB, 20);
    lk_addr = mka(5, 7); #1;
    chk(lk_hit && lk_entry.state == ST_PEND_SUB, "allocated pending entry hits");
    // other sets untouched
    lk_addr = mka(6, 1); #1;
    chk(!lk_hit && lk_free && lk_free_way == 2'd0, "set 6 still empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
