// hpu_dma -- the DMA of the processing unit ("HBM Load", "Key Buf" and
// "Value Buf" in the block diagram): fetches the key cache of a head for the
// Q.K unit and its value cache for the S.V unit.
//
// The two stages work on different heads at the same time, so there are two
// independent read engines (hpu_kv_reader), each with its own buffer and its
// own port on the interconnect.  A request carries the head's command; the
// DMA turns it into a block run over the seq_len+1 vectors of the head
// (HEAD_DIM*2 bytes each, 4 blocks at the default size):
//   keys   from kv_base
//   values from kv_base + MAX_SEQ*HEAD_DIM*2
// matching where the parser stores them.  The paper says the cache is laid
// out contiguously by sequence position per head; the offset of the value
// cache is this design's choice.  Output is one 64-byte block per cycle per
// buffer when memory keeps up.
module hpu_dma
  import hpu_pkg::*;
#(
  parameter int D         = HEAD_DIM,
  parameter int SEQ_CAP   = MAX_SEQ,
  parameter int BUF_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // key stream
  input  logic     k_req_valid,
  output logic     k_req_ready,
  input  cmd_t     k_req_cmd,
  output logic     k_mem_valid,
  input  logic     k_mem_ready,
  output mem_req_t k_mem_req,
  input  logic     k_rsp_valid,
  output logic     k_rsp_ready,
  input  blk_t     k_rsp_data,
  output logic     k_out_valid,
  input  logic     k_out_ready,
  output blk_t     k_out_data,
  // value stream
  input  logic     v_req_valid,
  output logic     v_req_ready,
  input  cmd_t     v_req_cmd,
  output logic     v_mem_valid,
  input  logic     v_mem_ready,
  output mem_req_t v_mem_req,
  input  logic     v_rsp_valid,
  output logic     v_rsp_ready,
  input  blk_t     v_rsp_data,
  output logic     v_out_valid,
  input  logic     v_out_ready,
  output blk_t     v_out_data
);
  localparam int     VEC_BEATS = D * 2 / BLK_BYTES;
  localparam longint V_OFFSET  = longint'(SEQ_CAP) * D * 2;

  logic [31:0] k_blocks, v_blocks;
  assign k_blocks = (k_req_cmd.seq_len + 1) * VEC_BEATS;
  assign v_blocks = (v_req_cmd.seq_len + 1) * VEC_BEATS;

  hpu_kv_reader #(.BUF_DEPTH(BUF_DEPTH)) u_key (
    .clk, .rst_n,
    .job_valid (k_req_valid), .job_ready (k_req_ready),
    .job_base  (addr_t'(k_req_cmd.kv_base)), .job_blocks (k_blocks),
    .mem_valid (k_mem_valid), .mem_ready (k_mem_ready), .mem_req (k_mem_req),
    .rsp_valid (k_rsp_valid), .rsp_ready (k_rsp_ready), .rsp_data (k_rsp_data),
    .out_valid (k_out_valid), .out_ready (k_out_ready), .out_data (k_out_data)
  );

  hpu_kv_reader #(.BUF_DEPTH(BUF_DEPTH)) u_value (
    .clk, .rst_n,
    .job_valid (v_req_valid), .job_ready (v_req_ready),
    .job_base  (addr_t'(v_req_cmd.kv_base + 64'(V_OFFSET))), .job_blocks (v_blocks),
    .mem_valid (v_mem_valid), .mem_ready (v_mem_ready), .mem_req (v_mem_req),
    .rsp_valid (v_rsp_valid), .rsp_ready (v_rsp_ready), .rsp_data (v_rsp_data),
    .out_valid (v_out_valid), .out_ready (v_out_ready), .out_data (v_out_data)
  );

endmodule
