// mesh_router: one node of the inter-vault mesh network.
//
// Each vault acts as a router that forwards non-local packets towards their
// destination vault. The router has five ports (0 local, 1 north, 2 east,
// 3 south, 4 west), a 16-entry input buffer on every input port (the paper's
// input-buffer size) and no output buffers. Packets are routed dimension-order,
// X first then Y, which is deadlock-free on a mesh. Each output picks among the
// inputs whose head packet wants it in round-robin order.
//
// A whole packet moves as one word, but a link is then held for as many cycles
// as the packet has flits (1 for a header-only packet, k = 5 for one carrying a
// data block), so a data transfer over h hops costs about k*h cycles, as in
// the paper's latency model. The hop field of a packet is incremented on every
// mesh link it crosses (not on the local port).
//
// Interface: ready/valid per port; in_ready is "input buffer not full", a
// packet moves on out_valid && out_ready. Latency: one cycle through the
// buffer plus one for the output register-free crossbar, i.e. a packet pushed
// into an input appears at the chosen output on the next cycle at the earliest.
//
// From the paper: the per-vault router, mesh links between neighbours (Fig. 8),
// 16-entry input buffers, one cycle per hop, k-flit data packets. Own choices:
// XY routing, round-robin arbitration, no virtual channels.
module mesh_router
  import dlpim_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [2:0] my_x,       // this router's mesh column
  input  logic [2:0] my_y,       // and row
  input  logic in_valid  [5],
  output logic in_ready  [5],
  input  pkt_t in_pkt    [5],
  output logic out_valid [5],
  input  logic out_ready [5],
  output pkt_t out_pkt   [5]
);
  localparam int P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic       hd_valid [5];
  pkt_t       hd_pkt   [5];
  logic       hd_pop   [5];
  logic [2:0] hd_route [5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.T(pkt_t), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_pkt[i]),
      .out_valid(hd_valid[i]), .out_ready(hd_pop[i]), .out_data(hd_pkt[i]));
  end

  // XY route of every head packet.
  always_comb begin
    for (int i = 0; i < 5; i++) begin
      int unsigned dx, dy;
      dx = vx(hd_pkt[i].dst);
      dy = vy(hd_pkt[i].dst);
      if      (dx > int'(my_x)) hd_route[i] = 3'(P_E);
      else if (dx < int'(my_x)) hd_route[i] = 3'(P_W);
      else if (dy > int'(my_y)) hd_route[i] = 3'(P_S);
      else if (dy < int'(my_y)) hd_route[i] = 3'(P_N);
      else                hd_route[i] = 3'(P_L);
    end
  end

  logic [2:0] rr    [5];   // last input granted per output
  logic [2:0] busy  [5];   // remaining cycles the output link is held
  logic       gnt_v [5];
  logic [2:0] gnt_i [5];

  always_comb begin
    for (int i = 0; i < 5; i++) hd_pop[i] = 1'b0;
    for (int o = 0; o < 5; o++) begin
      gnt_v[o]     = 1'b0;
      gnt_i[o]     = '0;
      for (int k = 1; k <= 5; k++) begin
        int unsigned i;
        i = (int'(rr[o]) + k) % 5;
        if (!gnt_v[o] && hd_valid[i] && hd_route[i] == 3'(o)) begin
          gnt_v[o] = 1'b1;
          gnt_i[o] = 3'(i);
        end
      end
      out_valid[o] = gnt_v[o] && (busy[o] == '0);
      out_pkt[o]   = hd_pkt[gnt_i[o]];
      if (o != P_L) out_pkt[o].hops = hd_pkt[gnt_i[o]].hops + 8'd1;
      if (out_valid[o] && out_ready[o]) hd_pop[gnt_i[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) begin
        rr[o]   <= 3'(o);
        busy[o] <= '0;
      end
    end else begin
      for (int o = 0; o < 5; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          rr[o]   <= gnt_i[o];
          busy[o] <= 3'(pkt_flits(hd_pkt[gnt_i[o]]) - 1);
        end else if (busy[o] != '0) begin
          busy[o] <= busy[o] - 1'b1;
        end
      end
    end
  end

endmodule
