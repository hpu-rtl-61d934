// tb_hpu_interconnect -- unit test of the interleaving interconnect (3
// requesters, 4 HBM ports, 4 reads in flight per requester).
//
// Requester 0 writes 64 random blocks to random block addresses; the
// testbench then checks that each block landed in the HBM model at the
// port and port address the 64-byte interleaving prescribes.  Requesters 1
// and 2 then read random blocks of that set at the same time, while the
// ports stall at random and answer after different delays (port c after
// 4+3c cycles), so data comes back from the ports out of order.  Each
// requester must get its data in the order it asked.  Also counted: reads on
// every port, requests held back by the limit of reads in flight, and
// port back-pressure.
`timescale 1ns/1ps
module tb_hpu_interconnect;
  import hpu_pkg::*;

  localparam int NM = 3, NCH = 4, OUTST = 4, NW = 64, NR = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [NM-1:0]  m_req_valid, m_req_ready, m_rsp_valid, m_rsp_ready;
  mem_req_t       m_req [NM];
  blk_t           m_rsp_data [NM];
  logic [NCH-1:0] c_req_valid, c_req_ready, c_req_we, c_rsp_valid;
  addr_t          c_req_addr [NCH];
  blk_t           c_req_wdata [NCH];
  blk_t           c_rsp_data [NCH];

  hpu_interconnect #(.NM(NM), .NCH(NCH), .OUTST(OUTST)) dut (.*);

  hbm_model #(.NCH(NCH), .LAT(4), .STALL_PCT(25), .LAT_STEP(3)) u_hbm (
    .clk, .rst_n,
    .req_valid (c_req_valid), .req_ready (c_req_ready), .req_we (c_req_we),
    .req_addr (c_req_addr), .req_wdata (c_req_wdata),
    .rsp_valid (c_rsp_valid), .rsp_data (c_rsp_data)
  );

  int     checks = 0, failures = 0;
  addr_t  waddr [NW];
  blk_t   wdata [NW];
  int     wr_done = 0;
  int     issued [NM], got [NM];
  int     exp_idx [NM][$];
  int     port_reads [NCH];
  int     limit_hold = 0, port_stall = 0;
  logic   phase_read = 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < NW; i++) begin
      bit dup;
      do begin
        waddr[i] = addr_t'($urandom_range(0, 4095)) << 6;
        dup = 0;
        for (int j = 0; j < i; j++) if (waddr[j] == waddr[i]) dup = 1;
      end while (dup);
      for (int k = 0; k < BLK_BITS / 32; k++) wdata[i][k*32 +: 32] = $urandom;
    end
    for (int m = 0; m < NM; m++) begin issued[m] = 0; got[m] = 0; end
    for (int c = 0; c < NCH; c++) port_reads[c] = 0;
  end

  // requester 0 writes, 1 and 2 read
  int ridx [NM];
  always @(posedge clk) begin
    if (!rst_n) begin
      m_req_valid <= '0;
      m_rsp_ready <= '0;
      for (int m = 0; m < NM; m++) begin m_req[m] <= '0; ridx[m] = 0; end
    end else begin
      // requester 0
      if (m_req_valid[0] && m_req_ready[0]) wr_done++;
      if (!m_req_valid[0] || m_req_ready[0]) begin
        int n;
        n = wr_done + ((m_req_valid[0] && m_req_ready[0]) ? 0 : 0);
        m_req_valid[0] <= (n < NW);
        m_req[0].we    <= 1'b1;
        m_req[0].addr  <= (n < NW) ? waddr[n] : '0;
        m_req[0].wdata <= (n < NW) ? wdata[n] : '0;
      end
      for (int m = 1; m < NM; m++) begin
        if (m_req_valid[m] && m_req_ready[m]) begin
          exp_idx[m].push_back(ridx[m]);
          issued[m]++;
        end
        if (m_req_valid[m] && !m_req_ready[m] && dut.order_ready[m] == 1'b0) limit_hold++;
        if (!m_req_valid[m] || m_req_ready[m]) begin
          int n2;
          n2 = issued[m] + ((m_req_valid[m] && m_req_ready[m]) ? 0 : 0);
          ridx[m] = $urandom_range(0, NW - 1);
          m_req_valid[m] <= phase_read && (issued[m] < NR) && ($urandom_range(0, 4) != 0);
          m_req[m].we    <= 1'b0;
          m_req[m].addr  <= waddr[ridx[m]];
          m_req[m].wdata <= '0;
        end
        if (m_rsp_valid[m] && m_rsp_ready[m]) begin
          check(exp_idx[m].size() > 0 && m_rsp_data[m] == wdata[exp_idx[m][0]],
                $sformatf("requester %0d read %0d data/order", m, got[m]));
          if (exp_idx[m].size() > 0) void'(exp_idx[m].pop_front());
          got[m]++;
        end
        m_rsp_ready[m] <= ($urandom_range(0, 3) != 0);
      end
      for (int c = 0; c < NCH; c++) begin
        if (c_req_valid[c] && c_req_ready[c] && !c_req_we[c]) port_reads[c]++;
        if (c_req_valid[c] && !c_req_ready[c]) port_stall++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (wr_done == NW);
    repeat (20) @(posedge clk);
    // interleaving: block address a lives at port (a>>6)%NCH, port address
    // ((a>>8)<<6); the model keys its array by the global block number
    for (int i = 0; i < NW; i++)
      check(u_hbm.mem.exists(longint'(waddr[i] >> 6)) && u_hbm.mem[longint'(waddr[i] >> 6)] == wdata[i],
            $sformatf("block %0d not where interleaving puts it", i));
    phase_read = 1'b1;
    wait (got[1] == NR && got[2] == NR);
    for (int c = 0; c < NCH; c++) check(port_reads[c] > 0, $sformatf("no reads on port %0d", c));
    check(limit_hold > 0, "reads-in-flight limit never reached");
    check(port_stall > 0, "no port back-pressure");
    $display("limit holds %0d, port stalls %0d", limit_hold, port_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
