// adaptive_policy: the registers that decide, epoch by epoch, whether DL-PIM
// subscriptions are on or off.
//
// Every vault has a feedback ("performance") register, a latency register, a
// request register and an access counter. A completed read adds its latency
// to the latency register and counts one request; it also compares the hops it
// actually travelled with the hops it would have travelled without
// subscription (twice the distance to the home vault): fewer hops increment the
// feedback register, more hops decrement it. The subscribed vault that served
// a forwarded request also decrements its own feedback when that request
// travelled further than without subscription (the paper's answer to the
// "subscription away" problem). At the end of each epoch (10^6 cycles by
// default) the vault hands its four registers to the caller, which sends them
// to the central vault, and clears them.
//
// The central vault sums the reports into its global registers. When all
// vaults have reported it decides: in the first epoch(s) by the sign of the
// global feedback (non-negative: subscriptions on); afterwards by comparing the
// global average read latency with that of the previous epoch, keeping the
// policy unless the latency grew by more than THRESH_PCT percent (2%), in which
// case the policy is reversed. The comparison is done without division:
//   lat * prev_req * 100 > prev_lat * req * (100 + THRESH_PCT).
//
// Interface and timing: all inputs are single-cycle pulses. epoch_end pulses
// for one cycle with the rep_* values valid; the registers restart from zero
// at the next edge (an event arriving in that same cycle is still counted into
// the new epoch). decide_valid pulses one cycle after the last report with
// decide_on. Only the instance with is_central set uses the rpt_* inputs.
//
// Own choices: register widths, the number of hops-based epochs (1), using
// reads only for the latency average (writes are posted), and keeping the
// policy when an epoch served no reads.
module adaptive_policy
  import dlpim_pkg::*;
#(
  parameter int unsigned EPOCH_CYCLES = 1000000,
  parameter int unsigned THRESH_PCT   = 2,
  parameter int unsigned HOPS_EPOCHS  = 1,
  parameter int unsigned N_REPORTS    = NUM_VAULTS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               is_central,     // this vault holds the global registers
  // local events
  input  logic               access_valid,   // a core request was accepted
  input  logic               rd_done_valid,  // a core read completed
  input  logic [31:0]        rd_latency,
  input  logic [7:0]         hops_actual,
  input  logic [7:0]         hops_est,
  input  logic               fb_dec_valid,   // subscription-away penalty
  // end of epoch report
  output logic               epoch_end,
  output logic signed [31:0] rep_feedback,
  output logic [47:0]        rep_latency,
  output logic [31:0]        rep_requests,
  output logic [31:0]        rep_accesses,
  // central vault: reports received from all vaults
  input  logic               rpt_valid,
  input  logic signed [31:0] rpt_feedback,
  input  logic [47:0]        rpt_latency,
  input  logic [31:0]        rpt_requests,
  input  logic [31:0]        rpt_accesses,
  output logic               decide_valid,
  output logic               decide_on
);
  // ------------------------------------------------------ per-vault registers
  logic [$clog2(EPOCH_CYCLES+1)-1:0] ecnt;
  logic signed [31:0] feedback;
  logic [47:0]        latency;
  logic [31:0]        requests;
  logic [31:0]        accesses;

  assign epoch_end    = (ecnt == EPOCH_CYCLES - 1);
  assign rep_feedback = feedback;
  assign rep_latency  = latency;
  assign rep_requests = requests;
  assign rep_accesses = accesses;

  logic signed [31:0] fb_delta;
  always_comb begin
    fb_delta = '0;
    if (rd_done_valid) begin
      if (hops_est > hops_actual)      fb_delta = fb_delta + 1;
      else if (hops_actual > hops_est) fb_delta = fb_delta - 1;
    end
    if (fb_dec_valid) fb_delta = fb_delta - 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ecnt     <= '0;
      feedback <= '0;
      latency  <= '0;
      requests <= '0;
      accesses <= '0;
    end else begin
      ecnt <= epoch_end ? '0 : ecnt + 1'b1;
      if (epoch_end) begin
        feedback <= fb_delta;
        latency  <= rd_done_valid ? 48'(rd_latency) : '0;
        requests <= rd_done_valid ? 32'd1 : '0;
        accesses <= access_valid  ? 32'd1 : '0;
      end else begin
        feedback <= feedback + fb_delta;
        if (rd_done_valid) begin
          latency  <= latency + 48'(rd_latency);
          requests <= requests + 1'b1;
        end
        if (access_valid) accesses <= accesses + 1'b1;
      end
    end
  end

  // ------------------------------------------------- central vault registers
  logic signed [31:0] g_feedback;
  logic [47:0]        g_latency, prev_latency;
  logic [31:0]        g_requests, prev_requests, g_accesses;
  logic [$clog2(N_REPORTS+1)-1:0] n_rpt;
  logic [7:0]         epochs_done;
  logic               policy_on;

  logic        last_rpt;
  logic        latency_up;
  logic        next_on;
  logic [47:0] lat_tot;
  logic [31:0] req_tot;
  logic signed [31:0] fb_tot;
  logic [127:0] lhs, rhs;

  assign last_rpt = is_central && rpt_valid && (n_rpt == N_REPORTS - 1);
  assign lat_tot  = g_latency  + rpt_latency;
  assign req_tot  = g_requests + rpt_requests;
  assign fb_tot   = g_feedback + rpt_feedback;

  always_comb begin
    lhs        = 128'(lat_tot) * 128'(prev_requests) * 128'd100;
    rhs        = 128'(prev_latency) * 128'(req_tot) * 128'(100 + THRESH_PCT);
    latency_up = lhs > rhs;
    if (epochs_done < 8'(HOPS_EPOCHS))
      next_on = (fb_tot >= 0);
    else if (req_tot == '0 || prev_requests == '0)
      next_on = policy_on;
    else
      next_on = latency_up ? !policy_on : policy_on;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_feedback    <= '0;
      g_latency     <= '0;
      g_requests    <= '0;
      g_accesses    <= '0;
      prev_latency  <= '0;
      prev_requests <= '0;
      n_rpt         <= '0;
      epochs_done   <= '0;
      policy_on     <= 1'b1;   // first epoch: subscriptions on everywhere
      decide_valid  <= 1'b0;
      decide_on     <= 1'b1;
    end else begin
      decide_valid <= 1'b0;
      if (is_central && rpt_valid) begin
        if (last_rpt) begin
          g_feedback    <= '0;
          g_latency     <= '0;
          g_requests    <= '0;
          g_accesses    <= '0;
          n_rpt         <= '0;
          prev_latency  <= lat_tot;
          prev_requests <= req_tot;
          if (epochs_done != '1) epochs_done <= epochs_done + 1'b1;
          policy_on     <= next_on;
          decide_valid  <= 1'b1;
          decide_on     <= next_on;
        end else begin
          g_feedback <= fb_tot;
          g_latency  <= lat_tot;
          g_requests <= req_tot;
          g_accesses <= g_accesses + rpt_accesses;
          n_rpt      <= n_rpt + 1'b1;
        end
      end
    end
  end

endmodule
