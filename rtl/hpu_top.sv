// hpu_top -- the processing unit of the HPU: a co-processor that computes the
// generation-stage attention of an LLM next to a GPU, with the KV cache held
// in its own HBM.
//
// Data path (block diagram and execution pipeline of the paper):
//   host stream -> parser -+-> query buffer -> Q.K -> Find Max -> Softmax -> S.V -> result buffer -> host
//                          +-> KV writes --.                ^                  ^
//                                          interconnect <- DMA key reader     DMA value reader
//                                          (64-byte interleaving over the HBM ports)
// Every host entry is one KV head with its G query heads: command, queries,
// the new key and value.  The parser stores key and value at position seq_len
// of the head's cache; the four attention stages then work on the head one
// after another, each holding a whole head in its buffer, so several heads
// are in flight at once (the paper's "fully pipelined execution" at head
// granularity).  Q.K and Softmax have two buffer banks each, so neither
// waits for the stage after it to finish reading; the pipeline then runs at
// the rate of its two 64-byte streams, one head of L tokens every
// L*HEAD_DIM/32 cycles.  Results leave as G*HEAD_DIM*2/64 beats tagged with
// the command's tag.
//
// Ports: host_in_* is the stream side of the PCIe/QDMA endpoint and res_* the
// result stream back to it; hbm_* are NCH memory ports (user side of the HBM
// controllers), 64-byte wide, address local to the port, answering reads in
// order with a fixed or variable delay.  The PCIe endpoint and the HBM
// controllers are bought-in parts and not part of this RTL.  busy_* show
// which stage holds a head; chunk_done pulses after every CHUNK (256) heads parsed.
module hpu_top
  import hpu_pkg::*;
#(
  parameter int G       = GQA_GROUP,
  parameter int D       = HEAD_DIM,
  parameter int SEQ_CAP = MAX_SEQ,
  parameter int NCH     = N_CH,
  parameter int QDEPTH  = 2,
  parameter int RDEPTH  = 2,
  parameter int KVBUF   = 16,
  parameter int CHUNK   = CHUNK_HEADS
) (
  input  logic             clk,
  input  logic             rst_n,
  // host input stream (from PCIe QDMA)
  input  logic             host_in_valid,
  output logic             host_in_ready,
  input  blk_t             host_in_data,
  // results (to PCIe QDMA)
  output logic             res_valid,
  input  logic             res_ready,
  output blk_t             res_data,
  output logic [TAG_W-1:0] res_tag,
  output logic             res_last,
  // HBM ports
  output logic [NCH-1:0]   hbm_req_valid,
  input  logic [NCH-1:0]   hbm_req_ready,
  output logic [NCH-1:0]   hbm_req_we,
  output addr_t            hbm_req_addr  [NCH],
  output blk_t             hbm_req_wdata [NCH],
  input  logic [NCH-1:0]   hbm_rsp_valid,
  input  blk_t             hbm_rsp_data  [NCH],
  // status
  output logic             chunk_done,
  output logic [3:0]       busy_stage
);
  localparam int TW = $clog2(SEQ_CAP);

  // parser -> query buffer
  logic              pq_valid, pq_ready;
  cmd_t              pq_cmd;
  logic [G*D*16-1:0] pq_data;
  // query buffer -> Q.K
  logic              qk_valid, qk_ready;
  cmd_t              qk_cmd;
  logic [G*D*16-1:0] qk_data;
  // requesters of the interconnect: 0 parser, 1 key reader, 2 value reader
  logic [2:0]        m_req_valid, m_req_ready, m_rsp_valid, m_rsp_ready;
  mem_req_t          m_req [3];
  blk_t              m_rsp_data [3];
  // DMA
  logic              kreq_valid, kreq_ready, vreq_valid, vreq_ready;
  cmd_t              kreq_cmd, vreq_cmd;
  logic              k_valid, k_ready, v_valid, v_ready;
  blk_t              k_data, v_data;
  // stage buffers
  logic              s_valid, s_release, m_valid, m_release, p_valid, p_release;
  cmd_t              s_cmd, m_cmd, p_cmd;
  logic [31:0]       s_len, m_len, p_len;
  logic [TW-1:0]     s_addr, m_addr, p_addr;
  logic [G*32-1:0]   s_data, m_data, m_max, p_data;
  // S.V -> result buffer
  logic              r_valid, r_ready;
  cmd_t              r_cmd;
  logic [G*D*16-1:0] r_data;

  hpu_parser #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP), .CHUNK(CHUNK)) u_parser (
    .clk, .rst_n,
    .in_valid (host_in_valid), .in_ready (host_in_ready), .in_data (host_in_data),
    .q_valid  (pq_valid), .q_ready (pq_ready), .q_cmd (pq_cmd), .q_data (pq_data),
    .mem_valid(m_req_valid[0]), .mem_ready (m_req_ready[0]), .mem_req (m_req[0]),
    .chunk_done
  );
  assign m_rsp_ready[0] = 1'b1;

  hpu_query_buf #(.G(G), .D(D), .DEPTH(QDEPTH)) u_qbuf (
    .clk, .rst_n,
    .in_valid (pq_valid), .in_ready (pq_ready), .in_cmd (pq_cmd), .in_q (pq_data),
    .out_valid(qk_valid), .out_ready (qk_ready), .out_cmd (qk_cmd), .out_q (qk_data),
    .level    ()
  );

  hpu_interconnect #(.NM(3), .NCH(NCH), .OUTST(KVBUF)) u_ic (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req,
    .m_rsp_valid, .m_rsp_ready, .m_rsp_data,
    .c_req_valid (hbm_req_valid), .c_req_ready (hbm_req_ready), .c_req_we (hbm_req_we),
    .c_req_addr  (hbm_req_addr),  .c_req_wdata (hbm_req_wdata),
    .c_rsp_valid (hbm_rsp_valid), .c_rsp_data  (hbm_rsp_data)
  );

  hpu_dma #(.D(D), .SEQ_CAP(SEQ_CAP), .BUF_DEPTH(KVBUF)) u_dma (
    .clk, .rst_n,
    .k_req_valid (kreq_valid), .k_req_ready (kreq_ready), .k_req_cmd (kreq_cmd),
    .k_mem_valid (m_req_valid[1]), .k_mem_ready (m_req_ready[1]), .k_mem_req (m_req[1]),
    .k_rsp_valid (m_rsp_valid[1]), .k_rsp_ready (m_rsp_ready[1]), .k_rsp_data (m_rsp_data[1]),
    .k_out_valid (k_valid), .k_out_ready (k_ready), .k_out_data (k_data),
    .v_req_valid (vreq_valid), .v_req_ready (vreq_ready), .v_req_cmd (vreq_cmd),
    .v_mem_valid (m_req_valid[2]), .v_mem_ready (m_req_ready[2]), .v_mem_req (m_req[2]),
    .v_rsp_valid (m_rsp_valid[2]), .v_rsp_ready (m_rsp_ready[2]), .v_rsp_data (m_rsp_data[2]),
    .v_out_valid (v_valid), .v_out_ready (v_ready), .v_out_data (v_data)
  );

  hpu_qk_unit #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP)) u_qk (
    .clk, .rst_n,
    .q_valid (qk_valid), .q_ready (qk_ready), .q_cmd (qk_cmd), .q_data (qk_data),
    .k_req_valid (kreq_valid), .k_req_ready (kreq_ready), .k_req_cmd (kreq_cmd),
    .k_valid, .k_ready, .k_data,
    .s_valid, .s_cmd, .s_len, .s_rd_addr (s_addr), .s_rd_data (s_data), .s_release,
    .busy (busy_stage[0])
  );

  hpu_find_max #(.G(G), .SEQ_CAP(SEQ_CAP)) u_max (
    .clk, .rst_n,
    .in_valid (s_valid), .in_cmd (s_cmd), .in_len (s_len),
    .in_rd_addr (s_addr), .in_rd_data (s_data), .in_release (s_release),
    .out_valid (m_valid), .out_cmd (m_cmd), .out_len (m_len), .out_max (m_max),
    .out_rd_addr (m_addr), .out_rd_data (m_data), .out_release (m_release),
    .busy (busy_stage[1])
  );

  hpu_softmax #(.G(G), .SEQ_CAP(SEQ_CAP)) u_sm (
    .clk, .rst_n,
    .in_valid (m_valid), .in_cmd (m_cmd), .in_len (m_len), .in_max (m_max),
    .in_rd_addr (m_addr), .in_rd_data (m_data), .in_release (m_release),
    .out_valid (p_valid), .out_cmd (p_cmd), .out_len (p_len),
    .out_rd_addr (p_addr), .out_rd_data (p_data), .out_release (p_release),
    .busy (busy_stage[2])
  );

  hpu_sv_unit #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP)) u_sv (
    .clk, .rst_n,
    .p_valid, .p_cmd, .p_len, .p_rd_addr (p_addr), .p_rd_data (p_data), .p_release,
    .v_req_valid (vreq_valid), .v_req_ready (vreq_ready), .v_req_cmd (vreq_cmd),
    .v_valid, .v_ready, .v_data,
    .r_valid, .r_ready, .r_cmd, .r_data,
    .busy (busy_stage[3])
  );

  hpu_result_buf #(.G(G), .D(D), .DEPTH(RDEPTH)) u_res (
    .clk, .rst_n,
    .in_valid (r_valid), .in_ready (r_ready), .in_cmd (r_cmd), .in_data (r_data),
    .out_valid (res_valid), .out_ready (res_ready), .out_data (res_data),
    .out_tag (res_tag), .out_last (res_last)
  );

endmodule
