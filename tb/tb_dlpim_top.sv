// End-to-end test of dlpim_top: 32 vaults on the 6x6 mesh with a small
// subscription table (4 sets x 2 ways), a 2-entry subscription buffer and
// 3000-cycle epochs, so that every mechanism happens within a short run.
//
// Each PIM core is a traffic generator with one read outstanding:
//   phase 1 (first epoch): all cores read a few shared "hot" blocks, which
//     makes blocks move from vault to vault (resubscription, NACKs,
//     indirection) and lets the home's own accesses pull them back;
//   phase 2: each core re-reads a private group of remote blocks (local hits)
//     and keeps writing blocks it alone owns (dirty unsubscription when they
//     are evicted).
// Read-only blocks must always read back as the DRAM model's initial pattern;
// an owned block must read back as the owner's last write. After the traffic
// stops and the network drains, each owner reads all its blocks once more.
// Every mechanism (local hit, subscription, resubscription, NACK,
// unsubscription, dirty unsubscription, home-side unsubscription, buffering,
// forwarding, policy switch) must have happened at least once.
module tb_dlpim_top;
  import dlpim_pkg::*;
  localparam int NV = NUM_VAULTS;
  localparam int EPOCH = 3000;
  localparam int RUN_CYCLES = 4 * EPOCH;
  localparam int NOWN = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   core_req_valid [NV], core_req_ready [NV], core_req_we [NV];
  addr_t  core_req_addr  [NV];
  block_t core_req_wdata [NV];
  logic   core_rsp_valid [NV];
  addr_t  core_rsp_addr  [NV];
  block_t core_rsp_data  [NV];
  logic   mem_req_valid [NV], mem_req_ready [NV], mem_req_we [NV], mem_req_rsv [NV];
  addr_t  mem_req_addr [NV];
  block_t mem_req_wdata [NV];
  logic   mem_rsp_valid [NV];
  block_t mem_rsp_data [NV];
  logic   sub_enable [NV];
  vault_ev_t events [NV];

  dlpim_top #(.WAYS(2), .SETS(4), .BUF_DEPTH(2), .EPOCH_CYCLES(EPOCH)) dut (.*);

  for (genvar v = 0; v < NV; v++) begin : g_mem
    vault_dram_model #(.LATENCY(4)) u_mem (
      .clk, .req_valid(mem_req_valid[v]), .req_ready(mem_req_ready[v]),
      .req_we(mem_req_we[v]), .req_rsv(mem_req_rsv[v]), .req_addr(mem_req_addr[v]),
      .req_wdata(mem_req_wdata[v]), .rsp_valid(mem_rsp_valid[v]), .rsp_data(mem_rsp_data[v]));
  end

  int checks = 0, failures = 0, cyc = 0;
  int n_ev [10];
  int n_reads = 0, n_rsp = 0;
  bit  waiting [NV];
  addr_t wait_addr [NV];
  block_t expect_data [NV];
  block_t owned_val [NV][NOWN];
  bit     owned_written [NV][NOWN];
  longint lat_sum = 0;
  int     t_issue [NV];
  string ev_name [10] = '{"local_hit", "sub_done", "resub", "nack", "unsub", "unsub_dirty",
                          "self_unsub", "buffered", "forward", "policy"};

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic block_t pat(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {1'b0, a} ^ (i * 32'h9e37_79b9);
    return b;
  endfunction
  function automatic addr_t mka(int home, int set, int tag);
    return addr_t'((tag << 7) | (set << 5) | home);
  endfunction
  function automatic addr_t owned_addr(int v, int k);
    return mka((v * 7 + 3 + k) % NV, (v + k) % 4, 1000 + v * NOWN + k);
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int v = 0; v < NV; v++) begin
      n_ev[0] += events[v].local_hit;  n_ev[1] += events[v].sub_done;
      n_ev[2] += events[v].resub;      n_ev[3] += events[v].nack;
      n_ev[4] += events[v].unsub;      n_ev[5] += events[v].unsub_dirty;
      n_ev[6] += events[v].self_unsub; n_ev[7] += events[v].buffered;
      n_ev[8] += events[v].forward;    n_ev[9] += events[v].policy;
      if (core_rsp_valid[v]) begin
        n_rsp++;
        chk(waiting[v] && core_rsp_addr[v] == wait_addr[v], $sformatf("vault %0d: response address", v));
        chk(core_rsp_data[v] == expect_data[v],
            $sformatf("vault %0d: data of block %h", v, core_rsp_addr[v]));
        lat_sum += cyc - t_issue[v];
        waiting[v] = 0;
      end
    end
  end

  task automatic issue(int v, bit we, addr_t a, block_t d);
    @(negedge clk);
    core_req_valid[v] = 1; core_req_we[v] = we; core_req_addr[v] = a; core_req_wdata[v] = d;
    if (!we) begin
      waiting[v] = 1; wait_addr[v] = a; t_issue[v] = cyc; n_reads++;
    end
    #1; while (!core_req_ready[v]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 core_req_valid[v] = 0;
    if (!we) while (waiting[v]) begin @(posedge clk); #1; end
  endtask

  task automatic core_gen(int v);
    while (cyc < RUN_CYCLES) begin
      int r = $urandom_range(0, 99);
      addr_t a;
      if (r < 15) begin
        // owned block: write a new value, sometimes read it back
        int k = $urandom_range(0, NOWN - 1);
        block_t d = {16{$urandom()}};
        owned_val[v][k] = d; owned_written[v][k] = 1;
        issue(v, 1, owned_addr(v, k), d);
        if ($urandom_range(0, 1) == 0) begin
          expect_data[v] = d;
          issue(v, 0, owned_addr(v, k), '0);
        end
      end else begin
        if (cyc < EPOCH || r < 30) a = mka($urandom_range(0, NV - 1) & 7, 1, $urandom_range(0, 3));   // shared hot
        else a = mka((v + 1 + $urandom_range(0, 2) * 5) % NV, $urandom_range(0, 3), 200 + v);        // private
        expect_data[v] = pat(a);
        issue(v, 0, a, '0);
      end
      repeat ($urandom_range(0, 6)) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    for (int v = 0; v < NV; v++) begin
      core_req_valid[v] = 0; core_req_we[v] = 0; core_req_addr[v] = '0; core_req_wdata[v] = '0;
      waiting[v] = 0;
      for (int k = 0; k < NOWN; k++) owned_written[v][k] = 0;
    end
    for (int i = 0; i < 10; i++) n_ev[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      automatic int vv = v;
      fork core_gen(vv); join_none
    end
    wait fork;
    repeat (3000) @(posedge clk);
    #1;
    // final read-back of every owned block by its owner
    for (int v = 0; v < NV; v++) begin
      automatic int vv = v;
      fork
        for (int k = 0; k < NOWN; k++)
          if (owned_written[vv][k]) begin
            expect_data[vv] = owned_val[vv][k];
            issue(vv, 0, owned_addr(vv, k), '0);
          end
      join_none
    end
    wait fork;
    chk(n_rsp == n_reads, $sformatf("every read answered (%0d of %0d)", n_rsp, n_reads));
    for (int i = 0; i < 10; i++) begin
      $display("mechanism %-12s happened %0d times", ev_name[i], n_ev[i]);
      chk(n_ev[i] > 0, {"mechanism never happened: ", ev_name[i]});
    end
    $display("reads %0d, mean read latency %0d cycles", n_reads, lat_sum / (n_rsp > 0 ? n_rsp : 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN_CYCLES + 40000) @(posedge clk);
    failures++;
    $display("watchdog: reads %0d answered %0d", n_reads, n_rsp);
    for (int v = 0; v < NV; v++) if (waiting[v]) $display("  vault %0d waits for %h", v, wait_addr[v]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
