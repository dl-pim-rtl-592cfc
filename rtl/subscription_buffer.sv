// subscription_buffer: the per-vault Subscription Buffer of DL-PIM.
//
// A fully-associative buffer (default 32 entries, as in the paper) that holds
// subscription requests which found their subscription-table set full. Each
// entry keeps the requesting vault and the block address (its set follows from
// the address) and a valid ("ready") bit. The ready bit is set when an entry of
// the same table set is freed; every cycle the lowest-numbered ready entry is
// offered for processing.
//
// Interface and timing: push_valid stores a request in a free slot at the next
// clock edge (refused while full). free_valid/free_set mark every waiting
// entry of that set ready at the next edge. pop_valid/pop_* present the ready
// entry combinationally; pop_ready removes it at the edge.
//
// Own choices: the ready bit starts clear (the set was full when the request
// arrived) and the lowest index wins among ready entries.
module subscription_buffer
  import dlpim_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned SETS  = 2048
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    push_valid,
  input  vid_t                    push_req,
  input  addr_t                   push_addr,
  output logic                    full,
  output logic [$clog2(DEPTH):0]  count,
  input  logic                    free_valid,
  input  logic [$clog2(SETS)-1:0] free_set,
  output logic                    pop_valid,
  output vid_t                    pop_req,
  output addr_t                   pop_addr,
  input  logic                    pop_ready
);
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned DB = $clog2(DEPTH);

  logic  used  [DEPTH];
  logic  ready [DEPTH];
  vid_t  req   [DEPTH];
  addr_t addr  [DEPTH];

  logic          have_free;
  logic [DB-1:0] free_idx, pop_idx;

  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    pop_valid = 1'b0;
    pop_idx   = '0;
    count     = '0;
    for (int i = DEPTH-1; i >= 0; i--) begin
      if (!used[i]) begin
        have_free = 1'b1;
        free_idx  = DB'(i);
      end
      if (used[i] && ready[i]) begin
        pop_valid = 1'b1;
        pop_idx   = DB'(i);
      end
      count = count + (used[i] ? 1'b1 : 1'b0);
    end
    full     = !have_free;
    pop_req  = req[pop_idx];
    pop_addr = addr[pop_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        used[i]  <= 1'b0;
        ready[i] <= 1'b0;
      end
    end else begin
      for (int i = 0; i < DEPTH; i++)
        if (free_valid && used[i] && addr[i][VBITS +: SB] == free_set)
          ready[i] <= 1'b1;
      if (pop_valid && pop_ready) begin
        used[pop_idx]  <= 1'b0;
        ready[pop_idx] <= 1'b0;
      end
      if (push_valid && have_free) begin
        used[free_idx]  <= 1'b1;
        ready[free_idx] <= free_valid && push_addr[VBITS +: SB] == free_set;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid && have_free) begin
      req[free_idx]  <= push_req;
      addr[free_idx] <= push_addr;
    end
  end

endmodule
