// dlpim_top: a DL-PIM memory stack, 32 vault controllers on a 6x6 mesh.
//
// Every vault's logic base (vault_controller: subscription table,
// subscription buffer, adaptive-policy registers) is attached to the local
// port of mesh node v; the four mesh nodes without a vault are routers only.
// Vault CENTRAL_VAULT (mesh position (2,2)) also holds the global policy
// registers and broadcasts the per-epoch on/off decision.
//
// The PIM cores and the vault DRAM dies are outside this design: each vault's
// core request/response port and DRAM port are ports of this module, indexed
// by vault number. Timing is that of the parts: one cycle per mesh hop plus
// link serialization (k = 5 cycles for a data packet), one event per cycle in
// each vault controller, DRAM latency as given by the attached memory.
//
// From the paper: 32 vaults, 6x6 network, per-vault subscription table,
// buffer and registers, central vault for the global decision. Own choices:
// which mesh positions are left without a vault and the central position.
//
// The Verilator lint reports UNOPTFLAT (a combinational loop) on ej_ready.
// It tracks the array as one signal: a vault's ej_ready is formed from the
// packet its router offers (ej_valid, ej_pkt), and the routers' pop logic
// reads ej_ready in the same cycle. Element by element there is no loop: a
// router's out_valid and out_pkt depend only on its buffers and link
// counters, never on out_ready. The warning only costs simulation speed and
// is left standing.
module dlpim_top
  import dlpim_pkg::*;
#(
  parameter int unsigned WAYS          = 4,
  parameter int unsigned SETS          = 2048,
  parameter int unsigned BUF_DEPTH     = 32,
  parameter int unsigned NET_BUF_DEPTH = 16,
  parameter int unsigned EPOCH_CYCLES  = 1000000,
  parameter int unsigned THRESH_PCT    = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  // PIM cores
  input  logic      core_req_valid [NUM_VAULTS],
  output logic      core_req_ready [NUM_VAULTS],
  input  logic      core_req_we    [NUM_VAULTS],
  input  addr_t     core_req_addr  [NUM_VAULTS],
  input  block_t    core_req_wdata [NUM_VAULTS],
  output logic      core_rsp_valid [NUM_VAULTS],
  output addr_t     core_rsp_addr  [NUM_VAULTS],
  output block_t    core_rsp_data  [NUM_VAULTS],
  // vault DRAM
  output logic      mem_req_valid  [NUM_VAULTS],
  input  logic      mem_req_ready  [NUM_VAULTS],
  output logic      mem_req_we     [NUM_VAULTS],
  output logic      mem_req_rsv    [NUM_VAULTS],
  output addr_t     mem_req_addr   [NUM_VAULTS],
  output block_t    mem_req_wdata  [NUM_VAULTS],
  input  logic      mem_rsp_valid  [NUM_VAULTS],
  input  block_t    mem_rsp_data   [NUM_VAULTS],
  // status
  output logic      sub_enable     [NUM_VAULTS],
  output vault_ev_t events         [NUM_VAULTS]
);
  logic inj_valid [NUM_NODES];
  logic inj_ready [NUM_NODES];
  pkt_t inj_pkt   [NUM_NODES];
  logic ej_valid  [NUM_NODES];
  logic ej_ready  [NUM_NODES];
  pkt_t ej_pkt    [NUM_NODES];

  mesh_network #(.NX(MESH_X), .NY(MESH_Y), .BUF_DEPTH(NET_BUF_DEPTH)) u_net (
    .clk, .rst_n,
    .inj_valid, .inj_ready, .inj_pkt, .ej_valid, .ej_ready, .ej_pkt);

  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    vault_controller #(
      .WAYS(WAYS), .SETS(SETS), .BUF_DEPTH(BUF_DEPTH),
      .EPOCH_CYCLES(EPOCH_CYCLES), .THRESH_PCT(THRESH_PCT),
      .CENTRAL_ID(CENTRAL_VAULT)) u_vc (
      .clk, .rst_n, .vault_id(vid_t'(v)),
      .core_req_valid(core_req_valid[v]), .core_req_ready(core_req_ready[v]),
      .core_req_we(core_req_we[v]), .core_req_addr(core_req_addr[v]),
      .core_req_wdata(core_req_wdata[v]),
      .core_rsp_valid(core_rsp_valid[v]), .core_rsp_addr(core_rsp_addr[v]),
      .core_rsp_data(core_rsp_data[v]),
      .inj_valid(inj_valid[v]), .inj_ready(inj_ready[v]), .inj_pkt(inj_pkt[v]),
      .ej_valid(ej_valid[v]), .ej_ready(ej_ready[v]), .ej_pkt(ej_pkt[v]),
      .mem_req_valid(mem_req_valid[v]), .mem_req_ready(mem_req_ready[v]),
      .mem_req_we(mem_req_we[v]), .mem_req_rsv(mem_req_rsv[v]),
      .mem_req_addr(mem_req_addr[v]), .mem_req_wdata(mem_req_wdata[v]),
      .mem_rsp_valid(mem_rsp_valid[v]), .mem_rsp_data(mem_rsp_data[v]),
      .sub_enable(sub_enable[v]),
      .ev_local_hit(events[v].local_hit), .ev_sub_done(events[v].sub_done),
      .ev_resub(events[v].resub), .ev_nack(events[v].nack),
      .ev_unsub(events[v].unsub), .ev_unsub_dirty(events[v].unsub_dirty),
      .ev_self_unsub(events[v].self_unsub), .ev_buffered(events[v].buffered),
      .ev_forward(events[v].forward), .ev_policy(events[v].policy));
  end

  // mesh positions without a vault: routers only
  for (genvar n = NUM_VAULTS; n < NUM_NODES; n++) begin : g_empty
    assign inj_valid[n] = 1'b0;
    assign inj_pkt[n]   = '0;
    assign ej_ready[n]  = 1'b1;
  end

endmodule
