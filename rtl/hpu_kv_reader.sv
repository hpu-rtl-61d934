// hpu_kv_reader -- one read engine of the DMA: streams a run of consecutive
// 64-byte blocks from memory into a buffer (the key buffer or the value
// buffer of the processing unit).
//
// A job (base byte address, number of blocks) is taken with job_valid/
// job_ready while the engine is idle.  The engine then issues one read per
// cycle at base, base+64, ... as long as the buffer has room for every block
// in flight: `used` counts blocks issued and not yet taken from the buffer,
// and never exceeds BUF_DEPTH, so returning data always fits.  Data leaves
// the buffer on out_valid/out_ready in request order (the interconnect keeps
// the order).  The next job can start as soon as all reads of the current
// one are issued.  The buffer depth is this design's choice.
module hpu_kv_reader
  import hpu_pkg::*;
#(
  parameter int BUF_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     job_valid,
  output logic     job_ready,
  input  addr_t    job_base,
  input  logic [31:0] job_blocks,
  // memory side
  output logic     mem_valid,
  input  logic     mem_ready,
  output mem_req_t mem_req,
  input  logic     rsp_valid,
  output logic     rsp_ready,
  input  blk_t     rsp_data,
  // buffer output
  output logic     out_valid,
  input  logic     out_ready,
  output blk_t     out_data
);
  logic        busy;
  addr_t       addr;
  logic [31:0] left;
  localparam int UW = $clog2(BUF_DEPTH + 1);
  logic [UW-1:0] used;
  logic        issue, take;

  assign job_ready     = !busy;
  assign mem_valid     = busy && (32'(used) < BUF_DEPTH);
  assign mem_req.we    = 1'b0;
  assign mem_req.addr  = addr;
  assign mem_req.wdata = '0;
  assign issue         = mem_valid && mem_ready;
  assign take          = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      addr <= '0;
      left <= '0;
      used <= '0;
    end else begin
      if (job_valid && job_ready && job_blocks != 0) begin
        busy <= 1'b1;
        addr <= job_base;
        left <= job_blocks;
      end else if (issue) begin
        addr <= addr + addr_t'(BLK_BYTES);
        left <= left - 1;
        if (left == 1) busy <= 1'b0;
      end
      used <= used + UW'(issue) - UW'(take);
    end
  end

  hpu_fifo #(.WIDTH(BLK_BITS), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (rsp_valid), .in_ready (rsp_ready), .in_data (rsp_data),
    .out_valid, .out_ready, .out_data,
    .count    ()
  );

endmodule
