// hbm_model -- behavioural model of the HBM controllers and DRAM behind the
// processing unit's memory ports (not synthesizable, testbench only).
//
// NCH ports, each taking one 64-byte request per cycle when ready.  Ready is
// dropped at random in STALL_PCT percent of the cycles.  Reads are answered
// in request order per port after LAT + port*LAT_STEP cycles (plus the random wait of a
// busy port).  The contents are one sparse array indexed by the global
// 64-byte block number, rebuilt from the port number and the port-local
// address with the interleaving of the interconnect; a testbench preloads
// it through mem[].  Unwritten blocks read as zero.
module hbm_model
  import hpu_pkg::*;
#(
  parameter int NCH       = N_CH,
  parameter int LAT       = 8,
  parameter int STALL_PCT = 0,
  parameter int LAT_STEP  = 0    // port c answers after LAT + c*LAT_STEP
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] req_valid,
  output logic [NCH-1:0] req_ready,
  input  logic [NCH-1:0] req_we,
  input  addr_t          req_addr  [NCH],
  input  blk_t           req_wdata [NCH],
  output logic [NCH-1:0] rsp_valid,
  output blk_t           rsp_data  [NCH]
);
  localparam int CB = (NCH > 1) ? $clog2(NCH) : 0;

  blk_t        mem [longint unsigned];
  longint unsigned cycle;
  blk_t        pend_d [NCH][$];
  longint unsigned pend_t [NCH][$];
  longint unsigned reads, writes, stalls;

  function automatic longint unsigned gblock(int c, addr_t a);
    return ((longint'(a) >> 6) << CB) | longint'(c);
  endfunction

  initial begin
    cycle  = 0;
    reads  = 0;
    writes = 0;
    stalls = 0;
    req_ready = '1;
    rsp_valid = '0;
    for (int c = 0; c < NCH; c++) rsp_data[c] = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int c = 0; c < NCH; c++) begin
      if (rst_n && req_valid[c] && req_ready[c]) begin
        if (req_we[c]) begin
          mem[gblock(c, req_addr[c])] = req_wdata[c];
          writes++;
        end else begin
          pend_d[c].push_back(mem.exists(gblock(c, req_addr[c])) ? mem[gblock(c, req_addr[c])] : '0);
          pend_t[c].push_back(cycle + longint'(LAT + c * LAT_STEP));
          reads++;
        end
      end
      if (pend_t[c].size() > 0 && pend_t[c][0] <= cycle) begin
        rsp_valid[c] <= 1'b1;
        rsp_data[c]  <= pend_d[c].pop_front();
        void'(pend_t[c].pop_front());
      end else begin
        rsp_valid[c] <= 1'b0;
      end
      req_ready[c] <= ($urandom_range(0, 99) >= STALL_PCT);
      if (req_valid[c] && !req_ready[c]) stalls++;
    end
  end

endmodule
