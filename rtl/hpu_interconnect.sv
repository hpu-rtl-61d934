// hpu_interconnect -- connects the requesters of the processing unit (the
// parser's KV writes and the DMA's key and value reads) to the HBM ports,
// interleaving the address space over the ports in 64-byte blocks.
//
// Interleaving (from the paper): consecutive 64-byte blocks go to consecutive
// ports, so one 256-byte key vector is read from four ports at once.  Port
// = addr[6 +: log2(NCH)]; the port sees the address with those bits removed.
//
// How it works (this design's choice, the paper gives only the function):
//  * Every port has a round-robin arbiter over the requesters that address
//    it.  A request is accepted in the cycle the port accepts it (no queue
//    in between), so accepted requests reach a port in acceptance order.
//  * Each read is tagged: the port remembers which requester each read came
//    from (tag queue per port), the requester remembers which port each of
//    its reads went to (order queue per requester).  Read data is sorted into
//    a small queue per requester and port and handed back in the order the
//    requester issued its reads, although ports answer independently.
//  * A requester may have at most OUTST reads outstanding; with response
//    queues of OUTST entries this means a port response is always accepted,
//    so the HBM side needs no ready signal.
//  * Writes are posted: no response.
// HBM ports must answer reads in the order they accepted them.
module hpu_interconnect
  import hpu_pkg::*;
#(
  parameter int NM    = 3,      // requesters
  parameter int NCH   = N_CH,   // HBM ports
  parameter int OUTST = 16      // reads in flight per requester
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // requesters
  input  logic     [NM-1:0]     m_req_valid,
  output logic     [NM-1:0]     m_req_ready,
  input  mem_req_t              m_req       [NM],
  output logic     [NM-1:0]     m_rsp_valid,
  input  logic     [NM-1:0]     m_rsp_ready,
  output blk_t                  m_rsp_data  [NM],
  // HBM ports (address local to the port)
  output logic     [NCH-1:0]    c_req_valid,
  input  logic     [NCH-1:0]    c_req_ready,
  output logic     [NCH-1:0]    c_req_we,
  output addr_t                 c_req_addr  [NCH],
  output blk_t                  c_req_wdata [NCH],
  input  logic     [NCH-1:0]    c_rsp_valid,
  input  blk_t                  c_rsp_data  [NCH]
);
  localparam int CB = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int MB = (NM > 1) ? $clog2(NM) : 1;
  localparam int LB = $clog2(BLK_BYTES);
  localparam addr_t OFS_MASK = {{(ADDR_W - LB){1'b0}}, {LB{1'b1}}};  // byte within a block

  // ------------------------------------------------ decode
  logic [CB-1:0] m_ch       [NM];
  logic [NM-1:0] order_ready;   // room for one more read
  logic [NM-1:0] eligible;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_ch[m]     = (NCH > 1) ? CB'(m_req[m].addr >> LB) : '0;
      eligible[m] = m_req_valid[m] && (m_req[m].we || order_ready[m]);
    end
  end

  // ------------------------------------------------ arbitration per port
  logic [MB-1:0] rr    [NCH];
  logic [MB-1:0] gnt   [NCH];
  logic [NCH-1:0] has_gnt;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      has_gnt[c] = 1'b0;
      gnt[c]     = '0;
      for (int k = 0; k < NM; k++) begin
        automatic int m = (int'(rr[c]) + k) % NM;
        if (!has_gnt[c] && eligible[m] && int'(m_ch[m]) == c) begin
          has_gnt[c] = 1'b1;
          gnt[c]     = MB'(m);
        end
      end
      c_req_valid[c] = has_gnt[c];
      c_req_we[c]    = m_req[gnt[c]].we;
      c_req_wdata[c] = m_req[gnt[c]].wdata;
      c_req_addr[c]  = (NCH > 1)
                     ? addr_t'(((m_req[gnt[c]].addr >> (LB + CB)) << LB) |
                               (m_req[gnt[c]].addr & OFS_MASK))
                     : m_req[gnt[c]].addr;
    end
  end

  always_comb begin
    m_req_ready = '0;
    for (int c = 0; c < NCH; c++)
      if (has_gnt[c] && c_req_ready[c]) m_req_ready[gnt[c]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) rr[c] <= '0;
    end else begin
      for (int c = 0; c < NCH; c++)
        if (has_gnt[c] && c_req_ready[c])
          rr[c] <= (int'(gnt[c]) == NM - 1) ? '0 : gnt[c] + 1'b1;
    end
  end

  // ------------------------------------------------ read tagging
  logic [NCH-1:0] tag_valid;
  logic [MB-1:0]  tag_head [NCH];
  logic [NCH-1:0] tag_push;
  logic [NM-1:0]  rq_in_ready  [NCH];
  logic [NM-1:0]  rq_out_valid [NCH];
  logic [NM-1:0]  rq_pop       [NCH];
  blk_t           rq_data      [NCH][NM];

  for (genvar c = 0; c < NCH; c++) begin : g_port
    assign tag_push[c] = has_gnt[c] && c_req_ready[c] && !m_req[gnt[c]].we;

    hpu_fifo #(.WIDTH(MB), .DEPTH(NM * OUTST)) u_tag (
      .clk, .rst_n,
      .in_valid (tag_push[c]), .in_ready (), .in_data (gnt[c]),
      .out_valid(tag_valid[c]), .out_ready(c_rsp_valid[c]), .out_data(tag_head[c]),
      .count    ()
    );

    for (genvar m = 0; m < NM; m++) begin : g_rsp
      hpu_fifo #(.WIDTH(BLK_BITS), .DEPTH(OUTST)) u_rsp (
        .clk, .rst_n,
        .in_valid (c_rsp_valid[c] && int'(tag_head[c]) == m),
        .in_ready (rq_in_ready[c][m]),
        .in_data  (c_rsp_data[c]),
        .out_valid(rq_out_valid[c][m]),
        .out_ready(rq_pop[c][m]),
        .out_data (rq_data[c][m]),
        .count    ()
      );
    end

    always_ff @(posedge clk) begin
      if (rst_n && c_rsp_valid[c]) begin
        assert (tag_valid[c])
          else $error("port %0d returned read data nobody asked for", c);
        assert (rq_in_ready[c][tag_head[c]])
          else $error("port %0d response queue overflow", c);
      end
    end
  end

  // ------------------------------------------------ in-order return
  logic [NM-1:0] ord_valid;
  logic [CB-1:0] ord_head [NM];

  for (genvar m = 0; m < NM; m++) begin : g_req
    logic ord_push;
    assign ord_push = m_req_valid[m] && m_req_ready[m] && !m_req[m].we;

    hpu_fifo #(.WIDTH(CB), .DEPTH(OUTST)) u_order (
      .clk, .rst_n,
      .in_valid (ord_push), .in_ready (order_ready[m]), .in_data (m_ch[m]),
      .out_valid(ord_valid[m]),
      .out_ready(m_rsp_valid[m] && m_rsp_ready[m]),
      .out_data (ord_head[m]),
      .count    ()
    );

    assign m_rsp_valid[m] = ord_valid[m] && rq_out_valid[ord_head[m]][m];
    assign m_rsp_data[m]  = rq_data[ord_head[m]][m];
  end

  always_comb begin
    for (int c = 0; c < NCH; c++)
      for (int m = 0; m < NM; m++)
        rq_pop[c][m] = m_rsp_valid[m] && m_rsp_ready[m] && int'(ord_head[m]) == c;
  end

endmodule
