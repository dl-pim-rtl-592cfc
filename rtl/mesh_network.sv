// mesh_network: the MESH_X x MESH_Y inter-vault network (6x6 by default).
//
// Node n sits at column n % MESH_X, row n / MESH_X, numbered row by row as in
// the paper's network figure; each node is a mesh_router linked to its four
// neighbours. Vault v uses node v's local port; with 32 vaults on a 6x6 mesh
// the last four nodes are routers with nothing on their local port. Ports on
// the edge of the mesh are tied off.
//
// Interface: per node, an injection port (inj_*) into the router's local
// input and an ejection port (ej_*) from its local output, ready/valid.
// A packet crosses one link per cycle plus the link's serialization time.
//
// From the paper: 32 vaults on a 6x6 network (its Fig. 8a) with 16-entry input
// buffers. The paper also speaks of a crossbar between vaults in its
// background section; the mesh of its evaluation is what is built here. Own
// choices: the row-by-row numbering and which four nodes have no vault.
//
// The Verilator lint reports UNOPTFLAT (a combinational loop) on the ov array.
// It treats the array of all router outputs as one signal: a router's pop
// logic reads its neighbour's in_ready, and that neighbour's outputs are in
// the same array. There is no loop per element: a router's out_valid and
// out_pkt come only from its buffers and link counters, never from
// out_ready. The warning only costs simulation speed and stands.
module mesh_network
  import dlpim_pkg::*;
#(
  parameter int unsigned NX        = MESH_X,
  parameter int unsigned NY        = MESH_Y,
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic inj_valid [NX*NY],
  output logic inj_ready [NX*NY],
  input  pkt_t inj_pkt   [NX*NY],
  output logic ej_valid  [NX*NY],
  input  logic ej_ready  [NX*NY],
  output pkt_t ej_pkt    [NX*NY]
);
  localparam int N = NX * NY;

  logic iv [N][5];
  logic ir [N][5];
  pkt_t ip [N][5];
  logic ov [N][5];
  logic orr[N][5];
  pkt_t op [N][5];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int n = y * NX + x;
      mesh_router #(.BUF_DEPTH(BUF_DEPTH)) u_rtr (
        .clk, .rst_n, .my_x(3'(x)), .my_y(3'(y)),
        .in_valid(iv[n]), .in_ready(ir[n]), .in_pkt(ip[n]),
        .out_valid(ov[n]), .out_ready(orr[n]), .out_pkt(op[n]));

      // local port
      assign iv[n][0]    = inj_valid[n];
      assign ip[n][0]    = inj_pkt[n];
      assign inj_ready[n] = ir[n][0];
      assign ej_valid[n] = ov[n][0];
      assign ej_pkt[n]   = op[n][0];
      assign orr[n][0]   = ej_ready[n];

      // north input comes from the south output of the node above
      if (y > 0) begin : g_n
        assign iv[n][1]  = ov[n-NX][3];
        assign ip[n][1]  = op[n-NX][3];
        assign orr[n][1] = ir[n-NX][3];
      end else begin : g_nt
        assign iv[n][1]  = 1'b0;
        assign ip[n][1]  = '0;
        assign orr[n][1] = 1'b0;
      end
      if (x < NX-1) begin : g_e
        assign iv[n][2]  = ov[n+1][4];
        assign ip[n][2]  = op[n+1][4];
        assign orr[n][2] = ir[n+1][4];
      end else begin : g_et
        assign iv[n][2]  = 1'b0;
        assign ip[n][2]  = '0;
        assign orr[n][2] = 1'b0;
      end
      if (y < NY-1) begin : g_s
        assign iv[n][3]  = ov[n+NX][1];
        assign ip[n][3]  = op[n+NX][1];
        assign orr[n][3] = ir[n+NX][1];
      end else begin : g_st
        assign iv[n][3]  = 1'b0;
        assign ip[n][3]  = '0;
        assign orr[n][3] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign iv[n][4]  = ov[n-1][2];
        assign ip[n][4]  = op[n-1][2];
        assign orr[n][4] = ir[n-1][2];
      end else begin : g_wt
        assign iv[n][4]  = 1'b0;
        assign ip[n][4]  = '0;
        assign orr[n][4] = 1'b0;
      end
    end
  end

endmodule
