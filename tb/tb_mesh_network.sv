// Self-checking test of mesh_network (6x6): every injected packet reaches its
// destination's local port with hop count equal to the Manhattan distance,
// packets between one pair of nodes stay in order, and the zero-load latency
// of a header-only packet is one cycle per hop plus the buffer stages.
// Random traffic from every node to random destinations at default sizes;
// the expected hop count is recomputed from the node coordinates.
module tb_mesh_network;
  import dlpim_pkg::*;
  localparam int N = 36;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inj_valid [N], inj_ready [N], ej_valid [N], ej_ready [N];
  pkt_t inj_pkt [N], ej_pkt [N];
  int checks = 0, failures = 0, cyc = 0, received = 0, sent = 0;
  int last_seq [N][N];
  always @(posedge clk) cyc <= cyc + 1;

  mesh_network dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int mdist(int a, int b);
    int dx = a % 6 - b % 6, dy = a / 6 - b / 6;
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy);
  endfunction

  // ejection checker
  always @(posedge clk) begin
    for (int n = 0; n < N; n++)
      if (rst_n && ej_valid[n] && ej_ready[n]) begin
        int s, q;
        s = int'(ej_pkt[n].src);
        q = int'(ej_pkt[n].tstamp);
        received++;
        chk(int'(ej_pkt[n].dst) == n, $sformatf("packet for %0d ejected at %0d", ej_pkt[n].dst, n));
        chk(int'(ej_pkt[n].hops) == mdist(s, n), $sformatf("hops %0d->%0d", s, n));
        chk(q > last_seq[s][n], "in order between a pair of nodes");
        last_seq[s][n] = q;
      end
  end

  initial begin
    int t0;
    for (int i = 0; i < N; i++) begin
      inj_valid[i] = 0; inj_pkt[i] = '0; ej_ready[i] = 1;
      for (int j = 0; j < N; j++) last_seq[i][j] = -1;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // zero-load latency corner to corner (10 hops)
    inj_pkt[0] = '0; inj_pkt[0].src = 0; inj_pkt[0].dst = 35; inj_pkt[0].tstamp = 0;
    inj_valid[0] = 1; t0 = cyc; @(posedge clk); #1 inj_valid[0] = 0; sent++;
    while (!ej_valid[35]) begin @(posedge clk); #1; end
    chk(cyc - t0 == 11, $sformatf("zero-load latency 0->35 = %0d cycles", cyc - t0));
    @(posedge clk); #1;
    // random traffic from all nodes
    for (int r = 1; r <= 60; r++) begin
      for (int i = 0; i < N; i++) begin
        inj_valid[i] = ($urandom_range(0, 2) == 0);
        inj_pkt[i] = '0;
        inj_pkt[i].src = vid_t'(i);
        inj_pkt[i].dst = vid_t'($urandom_range(0, N-1));
        inj_pkt[i].has_data = $urandom_range(0, 1);
        inj_pkt[i].tstamp = r;
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) if (inj_valid[i] && inj_ready[i]) sent++;
      #1;
    end
    for (int i = 0; i < N; i++) inj_valid[i] = 0;
    repeat (2000) @(posedge clk);
    chk(received == sent, $sformatf("all %0d packets delivered (%0d)", sent, received));
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
