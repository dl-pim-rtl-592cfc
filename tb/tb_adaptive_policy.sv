// Self-checking test of adaptive_policy: epoch timing, feedback from hop
// counts, latency/request registers, the central decision (hops-based first
// epoch, then latency-based with the 2% threshold).
// Uses a 40-cycle epoch and 2 reporting vaults; expected values are worked
// out in the testbench from the inputs it drives. The hops-based first epoch
// and the 2% threshold follow the paper; the epoch length is shortened.
module tb_adaptive_policy;
  import dlpim_pkg::*;
  localparam int EPOCH = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic access_valid = 0, rd_done_valid = 0, fb_dec_valid = 0, rpt_valid = 0;
  logic [31:0] rd_latency = 0;
  logic [7:0] hops_actual = 0, hops_est = 0;
  logic epoch_end;
  logic signed [31:0] rep_feedback, rpt_feedback = 0;
  logic [47:0] rep_latency, rpt_latency = 0;
  logic [31:0] rep_requests, rep_accesses, rpt_requests = 0, rpt_accesses = 0;
  logic decide_valid, decide_on;
  logic is_central = 1'b1;
  int checks = 0, failures = 0, cyc = 0, end_cyc = -1;

  adaptive_policy #(.EPOCH_CYCLES(EPOCH), .THRESH_PCT(2), .N_REPORTS(2)) dut (.*);

  int rst_cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic rd(int lat, int act, int est);
    rd_done_valid = 1; rd_latency = lat; hops_actual = 8'(act); hops_est = 8'(est);
    access_valid = 1;
    @(posedge clk); #1 rd_done_valid = 0; access_valid = 0;
  endtask
  task automatic report(int fb, int lat, int req);
    rpt_valid = 1; rpt_feedback = fb; rpt_latency = lat; rpt_requests = req; rpt_accesses = req;
    @(posedge clk); #1 rpt_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1; rst_cyc = cyc;
    rd(10, 0, 6);   // local hit: fewer hops, +1
    rd(20, 8, 4);   // indirection made it longer, -1
    rd(30, 2, 6);   // +1
    rd(40, 4, 4);   // equal, 0
    fb_dec_valid = 1; @(posedge clk); #1 fb_dec_valid = 0;  // -1
    wait (epoch_end); #1; end_cyc = cyc - rst_cyc;
    chk(rep_feedback == 0, "feedback = +1 -1 +1 +0 -1 = 0");
    chk(rep_latency == 100 && rep_requests == 4 && rep_accesses == 4, "latency and request registers");
    chk(end_cyc == EPOCH - 1, $sformatf("epoch ends after EPOCH cycles (%0d)", end_cyc));
    @(posedge clk); #1;
    chk(rep_feedback == 0 && rep_latency == 0 && rep_requests == 0, "registers cleared for next epoch");
    // central decision 1: hops-based, global feedback negative -> off
    report(3, 1000, 10);
    chk(!decide_valid, "no decision before all vaults report");
    report(-5, 1000, 10);
    chk(decide_valid && !decide_on, "negative global feedback turns subscriptions off");
    // decision 2: average latency 100 -> 101 (+1%) keeps the policy
    report(0, 1010, 10); report(0, 1010, 10);
    chk(decide_valid && !decide_on, "+1% latency keeps the policy");
    // decision 3: 101 -> 103.5 (+2.5%) reverses it
    report(9, 1035, 10); report(9, 1035, 10);
    chk(decide_valid && decide_on, "+2.5% latency reverses the policy (on)");
    // decision 4: 103.5 -> 90 keeps it on
    report(0, 900, 10); report(0, 900, 10);
    chk(decide_valid && decide_on, "lower latency keeps the policy");
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
