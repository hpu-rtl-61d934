// tb_hpu_dma -- unit test of the DMA (key and value read engines, 16-block
// buffers, 64-token cache).
//
// The testbench answers the two memory ports itself, 5 cycles after each
// request, with data that encodes the address, and takes the key and value
// streams.  Phase 1: three heads per engine with random consumer
// back-pressure; every block must be the one at kv_base (keys) or kv_base +
// 64*128*2 (values) plus 64 per block, (seq_len+1)*4 blocks per head, and no
// response may arrive while the buffer cannot take it.  The buffer must fill
// (reads held back by the credit limit) at least once.  Phase 2: a
// 16-token head with no back-pressure must stream one block per cycle after
// the first (64 blocks within 64 + latency + 4 cycles).
`timescale 1ns/1ps
module tb_hpu_dma;
  import hpu_pkg::*;

  localparam int D = HEAD_DIM, SEQ_CAP = 64, BUF = 16, LAT = 5;
  localparam int VB = D * 2 / BLK_BYTES;
  localparam longint V_OFF = longint'(SEQ_CAP) * D * 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic k_req_valid, k_req_ready, k_mem_valid, k_mem_ready, k_rsp_valid, k_rsp_ready, k_out_valid, k_out_ready;
  logic v_req_valid, v_req_ready, v_mem_valid, v_mem_ready, v_rsp_valid, v_rsp_ready, v_out_valid, v_out_ready;
  cmd_t k_req_cmd, v_req_cmd;
  mem_req_t k_mem_req, v_mem_req;
  blk_t k_rsp_data, v_rsp_data, k_out_data, v_out_data;

  hpu_dma #(.D(D), .SEQ_CAP(SEQ_CAP), .BUF_DEPTH(BUF)) dut (.*);

  int checks = 0, failures = 0, credit_hold = 0;
  bit free_run = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic blk_t pattern(addr_t a);
    return {8{~a[31:0], 6'd0, a[ADDR_W-1:32], a[31:0]}};
  endfunction

  // memory: fixed latency, always ready
  addr_t ka [$], va [$];
  longint unsigned kt [$], vt [$];
  longint unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && k_mem_valid && k_mem_ready) begin ka.push_back(k_mem_req.addr); kt.push_back(cyc + LAT); end
    if (rst_n && v_mem_valid && v_mem_ready) begin va.push_back(v_mem_req.addr); vt.push_back(cyc + LAT); end
    k_rsp_valid <= 1'b0;
    v_rsp_valid <= 1'b0;
    if (kt.size() > 0 && kt[0] <= cyc) begin
      k_rsp_valid <= 1'b1; k_rsp_data <= pattern(ka.pop_front()); void'(kt.pop_front());
    end
    if (vt.size() > 0 && vt[0] <= cyc) begin
      v_rsp_valid <= 1'b1; v_rsp_data <= pattern(va.pop_front()); void'(vt.pop_front());
    end
    if (rst_n && k_rsp_valid) check(k_rsp_ready, "key response refused");
    if (rst_n && v_rsp_valid) check(v_rsp_ready, "value response refused");
    if (dut.u_key.busy && !k_mem_valid) credit_hold++;
    k_out_ready <= free_run || ($urandom_range(0, 2) == 0);
    v_out_ready <= free_run || ($urandom_range(0, 2) == 0);
  end
  assign k_mem_ready = 1'b1;
  assign v_mem_ready = 1'b1;

  // expected streams
  addr_t kexp [$], vexp [$];
  always @(posedge clk) begin
    if (rst_n && k_out_valid && k_out_ready) begin
      check(kexp.size() > 0 && k_out_data == pattern(kexp[0]), $sformatf("key block %h want %h at %0d", k_out_data[37:0], kexp[0], cyc));
      void'(kexp.pop_front());
    end
    if (rst_n && v_out_valid && v_out_ready) begin
      check(vexp.size() > 0 && v_out_data == pattern(vexp[0]), $sformatf("value block %h want %h", v_out_data[37:0], vexp[0]));
      void'(vexp.pop_front());
    end
  end

  task automatic send(bit is_v, cmd_t c);
    for (int i = 0; i < (int'(c.seq_len) + 1) * VB; i++)
      if (is_v) vexp.push_back(addr_t'(c.kv_base + 64'(V_OFF) + 64'(i * 64)));
      else      kexp.push_back(addr_t'(c.kv_base + 64'(i * 64)));
    if (is_v) begin
      @(negedge clk);
      while (!v_req_ready) @(negedge clk);
      v_req_cmd = c; v_req_valid = 1'b1;
      @(negedge clk);
      v_req_valid = 1'b0;
    end else begin
      @(negedge clk);
      while (!k_req_ready) @(negedge clk);
      k_req_cmd = c; k_req_valid = 1'b1;
      @(negedge clk);
      k_req_valid = 1'b0;
    end
  endtask

  initial begin
    cmd_t c;
    longint unsigned t0;
    k_req_valid = 0; v_req_valid = 0; k_req_cmd = '0; v_req_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    fork
      for (int h = 0; h < 3; h++) begin
        cmd_t ck;
        ck.tag = 32'(h); ck.seq_len = 32'($urandom_range(0, 20)); ck.kv_base = 64'(h * 64'h4_0000);
        send(0, ck);
      end
      for (int h = 0; h < 3; h++) begin
        cmd_t cv;
        cv.tag = 32'(h); cv.seq_len = 32'($urandom_range(0, 20)); cv.kv_base = 64'(h * 64'h8_0000 + 64'h1000);
        send(1, cv);
      end
    join
    wait (kexp.size() == 0 && vexp.size() == 0);
    check(credit_hold > 0, "buffer never full");
    // phase 2: rate
    free_run = 1;
    repeat (4) @(posedge clk);
    c.tag = 0; c.seq_len = 15; c.kv_base = 64'h20_0000;
    t0 = cyc;
    send(0, c);
    wait (kexp.size() == 0);
    check(cyc - t0 <= 64 + LAT + 4, $sformatf("64 key blocks took %0d cycles", cyc - t0));
    $display("64 blocks in %0d cycles, credit holds %0d", cyc - t0, credit_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: %0d key and %0d value blocks missing, busy %b%b", kexp.size(), vexp.size(), dut.u_key.busy, dut.u_value.busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
