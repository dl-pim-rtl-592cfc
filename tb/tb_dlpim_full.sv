// Full-size test of dlpim_top with every parameter at its default (8192-entry
// subscription tables, 32-entry buffers, 16-entry router buffers, 10^6-cycle
// epochs). It takes a few blocks through complete subscription life cycles:
//   1. vault 0 reads a block homed in vault 31 (6 hops away):
//      remote read plus subscription; its read latency is checked against the
//      zero-load network model;
//   2. vault 0 reads it again: local hit, latency of a DRAM access only;
//   3. vault 0 writes it locally (dirty), vault 9 reads it through the home's
//      indirection and must see the new data;
//   4. vault 9 subscribes to it (resubscription away from vault 0) and then
//      hits locally;
//   5. vault 31, its home, reads it: the home's own access unsubscribes it and
//      the dirty data returns home.
module tb_dlpim_full;
  import dlpim_pkg::*;
  localparam int NV = NUM_VAULTS;
  localparam int MEM_LAT = 4;
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

  dlpim_top dut (.*);

  for (genvar v = 0; v < NV; v++) begin : g_mem
    vault_dram_model #(.LATENCY(MEM_LAT)) u_mem (
      .clk, .req_valid(mem_req_valid[v]), .req_ready(mem_req_ready[v]),
      .req_we(mem_req_we[v]), .req_rsv(mem_req_rsv[v]), .req_addr(mem_req_addr[v]),
      .req_wdata(mem_req_wdata[v]), .rsp_valid(mem_rsp_valid[v]), .rsp_data(mem_rsp_data[v]));
  end

  int checks = 0, failures = 0, cyc = 0;
  int n_local = 0, n_sub = 0, n_resub = 0, n_self = 0, n_dirty = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int v = 0; v < NV; v++) begin
      n_local += events[v].local_hit; n_sub += events[v].sub_done;
      n_resub += events[v].resub; n_self += events[v].self_unsub;
      n_dirty += events[v].unsub_dirty;
    end
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask
  function automatic block_t pat(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {1'b0, a} ^ (i * 32'h9e37_79b9);
    return b;
  endfunction

  task automatic rd(int v, addr_t a, output block_t d, output int lat);
    int t0;
    @(negedge clk); t0 = cyc;
    core_req_valid[v] = 1; core_req_we[v] = 0; core_req_addr[v] = a;
    #1; while (!core_req_ready[v]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 core_req_valid[v] = 0;
    while (!core_rsp_valid[v]) begin @(posedge clk); #1; end
    d = core_rsp_data[v];
    lat = cyc - t0;
    @(posedge clk); #1;
  endtask
  task automatic wr(int v, addr_t a, block_t d);
    @(negedge clk);
    core_req_valid[v] = 1; core_req_we[v] = 1; core_req_addr[v] = a; core_req_wdata[v] = d;
    #1; while (!core_req_ready[v]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 core_req_valid[v] = 0;
  endtask

  initial begin
    addr_t a;
    block_t d, w;
    int lat, h0;
    for (int v = 0; v < NV; v++) begin
      core_req_valid[v] = 0; core_req_we[v] = 0; core_req_addr[v] = '0; core_req_wdata[v] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    a = addr_t'((31'd12345 << 5) | 31);   // homed in vault 31
    // 1. remote read + subscription
    rd(0, a, d, lat);
    chk(d == pat(a), "remote read data");
    // 6 hops each way at one cycle per hop, plus DRAM and buffer stages
    chk(lat >= 12 + MEM_LAT && lat <= 40, $sformatf("remote read latency %0d cycles", lat));
    repeat (100) @(posedge clk);
    chk(n_sub == 1, "block subscribed to vault 0");
    // 2. local hit
    rd(0, a, d, lat);
    chk(d == pat(a) && n_local == 1, $sformatf("local hit (data ok %0d, hits %0d)", d == pat(a), n_local));
    chk(lat <= MEM_LAT + 3, $sformatf("local hit latency %0d cycles", lat));
    // 3. local write, read by vault 9 through the home
    w = {16{32'h1234_5678}};
    wr(0, a, w);
    repeat (5) @(posedge clk);
    rd(9, a, d, lat);
    chk(d == w, "vault 9 reads the data written in vault 0's reserved area");
    // 4. vault 9's read also asked to subscribe: resubscription from vault 0
    repeat (200) @(posedge clk);
    chk(n_resub == 1 && n_sub == 2, "resubscribed to vault 9");
    h0 = n_local;
    rd(9, a, d, lat);
    chk(d == w && n_local == h0 + 1, $sformatf("vault 9 hits locally with the dirty data (hits %0d)", n_local - h0));
    // 5. the home reads it: unsubscription brings the dirty block home
    rd(31, a, d, lat);
    chk(d == w && n_self == 1, "home read forwarded and turned into unsubscription");
    repeat (200) @(posedge clk);
    chk(n_dirty == 1, "dirty data returned home");
    rd(31, a, d, lat);
    chk(d == w, "home memory holds the block");
    chk(sub_enable[0] && sub_enable[31], "subscriptions on in the first epoch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
