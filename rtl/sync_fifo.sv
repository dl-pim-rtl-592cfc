// sync_fifo: single-clock first-in first-out queue used as a router input
// buffer. Ready/valid on both sides; a word pushed is visible at the output
// one cycle later. in_ready is low when full; out_valid is low when empty.
// Storage is an array without reset; only the pointers are reset.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AB = $clog2(DEPTH);
  T              mem [DEPTH];
  logic [AB-1:0] rd_ptr, wr_ptr;
  logic [AB:0]   cnt;
  logic          do_wr, do_rd;

  assign in_ready  = (cnt != (AB+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) if (do_wr) mem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AB'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AB'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      cnt <= cnt + (do_wr ? 1'b1 : 1'b0) - (do_rd ? 1'b1 : 1'b0);
    end
  end
endmodule
