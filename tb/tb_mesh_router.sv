// Self-checking test of mesh_router at mesh position (1,1): XY route choice,
// hop counting, k-flit link serialization, input-buffer depth.
// Packets are driven straight into the input ports; the expected output port
// and timing come from the XY rule and the one-cycle-per-hop, k-flit link
// model, written out independently in the testbench.
module tb_mesh_router;
  import dlpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  pkt_t in_pkt [5], out_pkt [5];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [2:0] my_x = 3'd1, my_y = 3'd1;
  mesh_router #(.BUF_DEPTH(16)) dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pkt_t mkp(int dst, bit data, int tag);
    pkt_t p = '0;
    p.ptype = PKT_RD; p.dst = vid_t'(dst); p.has_data = data; p.hops = 8'd3;
    p.addr = addr_t'(tag);
    return p;
  endfunction

  // expected output port for a destination (independent of the router)
  function automatic int exp_port(int dst);
    int x = dst % 6, y = dst / 6;
    if (x > 1) return 2; if (x < 1) return 4;
    if (y > 1) return 3; if (y < 1) return 1;
    return 0;
  endfunction

  task automatic send(int port, pkt_t p);
    in_pkt[port] = p; in_valid[port] = 1;
    @(posedge clk); #1 in_valid[port] = 0;
  endtask

  // wait for a packet on port o, return the cycle it left
  task automatic expect_out(int o, int tag, int exp_hops, output int at);
    int n = 0;
    while (!(out_valid[o] && out_ready[o]) && n < 50) begin @(posedge clk); #1; n++; end
    chk(out_valid[o] && out_pkt[o].addr == addr_t'(tag) && out_pkt[o].hops == 8'(exp_hops),
        $sformatf("packet %0d on port %0d with %0d hops", tag, o, exp_hops));
    at = cyc;
    @(posedge clk); #1;
  endtask

  initial begin
    int t0, t1;
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; in_pkt[i] = '0; out_ready[i] = 1; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // route choice for every destination in a 6x6 mesh
    for (int d = 0; d < 36; d++) begin
      send(0, mkp(d, 0, 100 + d));
      expect_out(exp_port(d), 100 + d, exp_port(d) == 0 ? 3 : 4, t0);
    end
    // two data packets to the east: second leaves k = 5 cycles after the first
    in_pkt[0] = mkp(3, 1, 1); in_pkt[4] = mkp(9, 1, 2);
    in_valid[0] = 1; in_valid[4] = 1;
    @(posedge clk); #1 in_valid[0] = 0; in_valid[4] = 0;
    chk(out_valid[2], "first data packet leaves one cycle after arrival");
    t0 = cyc;
    if (out_pkt[2].addr == addr_t'(1)) expect_out(2, 1, 4, t0); else expect_out(2, 2, 4, t0);
    t1 = 0;
    while (!out_valid[2] && t1 < 20) begin @(posedge clk); #1; t1++; end
    t1 = cyc;
    chk(out_valid[2] && t1 - t0 == PKT_FLITS_DATA,
        $sformatf("second data packet 5 cycles after the first (%0d)", t1 - t0));
    @(posedge clk); #1;
    // packets for different outputs cross in the same cycle
    in_pkt[1] = mkp(13, 0, 3); in_pkt[3] = mkp(1, 0, 4);
    in_valid[1] = 1; in_valid[3] = 1;
    @(posedge clk); #1 in_valid[1] = 0; in_valid[3] = 0;
    chk(out_valid[3] && out_pkt[3].addr == addr_t'(3) && out_pkt[3].hops == 8'd4, "north input to south output");
    chk(out_valid[1] && out_pkt[1].addr == addr_t'(4) && out_pkt[1].hops == 8'd4, "south input to north output");
    @(posedge clk); #1;
    // back-pressure: a blocked output fills the 16-entry input buffer
    out_ready[2] = 0;
    for (int i = 0; i < 16; i++) begin
      chk(in_ready[0], $sformatf("buffer accepts packet %0d", i));
      send(0, mkp(5, 0, 200 + i));
    end
    chk(!in_ready[0], "input buffer full after 16 packets");
    out_ready[2] = 1;
    for (int i = 0; i < 16; i++) expect_out(2, 200 + i, 4, t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
