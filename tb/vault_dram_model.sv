// vault_dram_model: behavioural model of one vault's DRAM for testbenches.
//
// Not synthesizable and not part of the design: it stands in for the stacked
// DRAM dies. Two sparse regions: the vault's home data (keyed by block
// address; a block never written reads as init_pattern(addr)) and the reserved
// subscription area (keyed by slot). Requests are always accepted; writes take
// effect at once, a read returns its data LATENCY cycles later. One read is
// outstanding at a time, which is all the vault controller issues.
module vault_dram_model
  import dlpim_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic   clk,
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_we,
  input  logic   req_rsv,
  input  addr_t  req_addr,
  input  block_t req_wdata,
  output logic   rsp_valid,
  output block_t rsp_data
);
  block_t home [addr_t];
  block_t rsv  [addr_t];
  int     cnt;
  block_t pend;

  function automatic block_t init_pattern(addr_t a);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++) b[i*32 +: 32] = {1'b0, a} ^ (i * 32'h9e37_79b9);
    return b;
  endfunction

  assign req_ready = 1'b1;
  initial begin
    cnt       = 0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (cnt > 0) begin
      cnt = cnt - 1;
      if (cnt == 0) begin
        rsp_valid <= 1'b1;
        rsp_data  <= pend;
      end
    end
    if (req_valid) begin
      if (req_we) begin
        if (req_rsv) rsv[req_addr] = req_wdata;
        else         home[req_addr] = req_wdata;
      end else begin
        if (req_rsv) pend = rsv.exists(req_addr) ? rsv[req_addr] : '0;
        else         pend = home.exists(req_addr) ? home[req_addr] : init_pattern(req_addr);
        cnt = LATENCY;
      end
    end
  end
endmodule
