// Self-checking test of subscription_buffer: fill to full, ready bits set only
// by a free of the matching set, lowest ready entry popped first.
// Uses 4 entries and 16 sets (the paper's buffer has 32); the expected pop
// order is written out from the pushes and frees the testbench applies.
module tb_subscription_buffer;
  import dlpim_pkg::*;
  localparam int DEPTH = 4, SETS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push_valid = 0, free_valid = 0, pop_ready = 0;
  vid_t push_req = '0;
  addr_t push_addr = '0;
  logic full, pop_valid;
  logic [2:0] count;
  logic [3:0] free_set = '0;
  vid_t pop_req;
  addr_t pop_addr;
  int checks = 0, failures = 0;

  subscription_buffer #(.DEPTH(DEPTH), .SETS(SETS)) dut (.*);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic addr_t mka(int s, int t);
    return addr_t'((t << 9) | (s << 5) | 1);
  endfunction
  task automatic push(int req, addr_t a);
    push_req = vid_t'(req); push_addr = a; push_valid = 1;
    @(posedge clk); #1 push_valid = 0;
  endtask
  task automatic free(int s);
    free_set = 4'(s); free_valid = 1;
    @(posedge clk); #1 free_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(!full && count == 0 && !pop_valid, "empty after reset");
    push(3, mka(2, 1));
    push(4, mka(7, 1));
    push(5, mka(2, 2));
    chk(count == 3 && !full && !pop_valid, "three waiting, none ready");
    push(6, mka(9, 1));
    chk(full && count == 4, "full at DEPTH entries");
    push(7, mka(1, 1));
    chk(count == 4, "push refused while full");
    free(7);
    chk(pop_valid && pop_req == 5'd4 && pop_addr == mka(7, 1), "free of set 7 readies its entry");
    free(2);
    chk(pop_valid && pop_req == 5'd3, "lowest ready entry offered first");
    pop_ready = 1; @(posedge clk); #1;
    chk(pop_valid && pop_req == 5'd4, "next ready entry after pop");
    @(posedge clk); #1;
    chk(pop_valid && pop_req == 5'd5 && pop_addr == mka(2, 2), "second set-2 entry");
    @(posedge clk); #1 pop_ready = 0;
    chk(!pop_valid && count == 1 && !full, "set-9 entry still waiting");
    free(3);
    chk(!pop_valid, "free of an unrelated set readies nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
