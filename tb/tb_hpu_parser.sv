// tb_hpu_parser -- unit test of the input parser (2 query heads per group,
// 64-token cache, 3-head chunks).
//
// Sends three head entries (command, 8 query beats, 4 key beats, 4 value
// beats) with random gaps while the memory port and the query buffer apply
// random back-pressure.  Checks every KV write (address from kv_base and
// seq_len, data = the key/value beat), that the command and queries reach the
// query buffer unchanged and only after all eight writes of the entry, and
// that chunk_done pulses once after the third entry.
`timescale 1ns/1ps
module tb_hpu_parser;
  import hpu_pkg::*;

  localparam int G = 2, D = HEAD_DIM, SEQ_CAP = 64, CHUNK = 3, NE = 3;
  localparam int VB = D * 2 / BLK_BYTES;
  localparam longint V_OFF = longint'(SEQ_CAP) * D * 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_ready, q_valid, q_ready, mem_valid, mem_ready, chunk_done;
  blk_t in_data;
  cmd_t q_cmd;
  logic [G*D*16-1:0] q_data;
  mem_req_t mem_req;

  hpu_parser #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP), .CHUNK(CHUNK)) dut (.*);

  int   checks = 0, failures = 0;
  blk_t beats [$];
  cmd_t cmds [NE];
  blk_t qb [NE][G*VB];
  blk_t kb [NE][VB];
  blk_t vb [NE][VB];
  int   wr_n = 0, q_n = 0, chunks = 0;

  function automatic blk_t rblk();
    blk_t x;
    for (int i = 0; i < BLK_BITS / 32; i++) x[i*32 +: 32] = $urandom;
    return x;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int e = 0; e < NE; e++) begin
      blk_t x;
      cmds[e].tag     = 32'(77 + e);
      cmds[e].seq_len = 32'($urandom_range(0, SEQ_CAP - 1));
      cmds[e].kv_base = 64'(longint'(e) * 64'h100_0000 + 64'h4000);
      x = rblk();
      x[$bits(cmd_t)-1:0] = cmds[e];
      beats.push_back(x);
      for (int b = 0; b < G*VB; b++) begin qb[e][b] = rblk(); beats.push_back(qb[e][b]); end
      for (int b = 0; b < VB; b++) begin kb[e][b] = rblk(); beats.push_back(kb[e][b]); end
      for (int b = 0; b < VB; b++) begin vb[e][b] = rblk(); beats.push_back(vb[e][b]); end
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_data  <= '0;
      mem_ready <= 1'b0;
      q_ready  <= 1'b0;
    end else begin
      if (in_valid && in_ready) void'(beats.pop_front());
      in_valid  <= (beats.size() > 0) && ($urandom_range(0, 4) != 0);
      in_data   <= (beats.size() > 0) ? beats[0] : '0;
      mem_ready <= ($urandom_range(0, 2) != 0);
      q_ready   <= ($urandom_range(0, 2) != 0);
      if (mem_valid && mem_ready) begin
        int e, k;
        longint a;
        e = wr_n / (2 * VB);
        k = wr_n % (2 * VB);
        a = longint'(cmds[e].kv_base) + longint'(cmds[e].seq_len) * D * 2 + (k % VB) * 64
          + ((k >= VB) ? V_OFF : 0);
        check(mem_req.we, "write flag");
        check(mem_req.addr == addr_t'(a), $sformatf("write %0d address %h, want %h", wr_n, mem_req.addr, a));
        check(mem_req.wdata == ((k >= VB) ? vb[e][k % VB] : kb[e][k]), $sformatf("write %0d data", wr_n));
        wr_n++;
      end
      if (q_valid && q_ready) begin
        check(wr_n == (q_n + 1) * 2 * VB, "query buffer written before the KV writes finished");
        check(q_cmd == cmds[q_n], "command");
        for (int b = 0; b < G*VB; b++)
          check(q_data[b*BLK_BITS +: BLK_BITS] == qb[q_n][b], $sformatf("query beat %0d", b));
        q_n++;
      end
      if (chunk_done) begin
        chunks++;
        check(q_n == NE, "chunk_done before the chunk's last head");
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (q_n == NE);
    repeat (5) @(posedge clk);
    check(wr_n == NE * 2 * VB, "number of KV writes");
    check(chunks == 1, $sformatf("chunk_done pulses %0d", chunks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
