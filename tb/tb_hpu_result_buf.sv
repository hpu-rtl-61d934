// tb_hpu_result_buf -- unit test of the result buffer (2 query heads per
// group, depth 2).
//
// Pushes 6 random results with random gaps while the host side takes beats
// with random back-pressure.  Every result must leave as 2*128*2/64 = 8 beats,
// lowest elements first, with the result's tag on each beat and out_last on
// the eighth only, in the order pushed.  The buffer must refuse a push while
// it holds two results, and stream one beat per cycle when the host is
// always ready.
`timescale 1ns/1ps
module tb_hpu_result_buf;
  import hpu_pkg::*;

  localparam int G = 2, D = HEAD_DIM, DEPTH = 2, N = 6;
  localparam int W = G * D * 16, BEATS = W / BLK_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  cmd_t in_cmd;
  logic [W-1:0] in_data;
  blk_t out_data;
  logic [TAG_W-1:0] out_tag;

  hpu_result_buf #(.G(G), .D(D), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, pushed = 0, beat = 0, done = 0, refused = 0;
  logic [W-1:0] dq [$];
  logic [TAG_W-1:0] tq [$];
  bit   fast = 0;
  longint unsigned cyc = 0, tfirst = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      in_valid <= 1'b0;
      out_ready <= 1'b0;
      in_cmd <= '0;
      in_data <= '0;
    end else begin
      if (in_valid && in_ready) begin
        dq.push_back(in_data);
        tq.push_back(in_cmd.tag);
        pushed++;
      end
      if (in_valid && !in_ready) refused++;
      if (!in_valid || in_ready) begin
        logic [W-1:0] x;
        for (int i = 0; i < W / 32; i++) x[i*32 +: 32] = $urandom;
        in_valid <= (pushed + ((in_valid && in_ready) ? 1 : 0) < N) && ($urandom_range(0, 2) != 0);
        in_cmd   <= cmd_t'({$urandom, 96'd0});
        in_data  <= x;
      end
      if (out_valid && out_ready) begin
        check(dq.size() > 0 && out_data == dq[0][beat*BLK_BITS +: BLK_BITS], $sformatf("result %0d beat %0d", done, beat));
        check(out_tag == tq[0], "tag");
        check(out_last == (beat == BEATS - 1), "last flag");
        if (fast && beat == 0) tfirst = cyc;
        if (fast && beat == BEATS - 1) check(cyc - tfirst == BEATS - 1, "not one beat per cycle");
        if (beat == BEATS - 1) begin
          beat = 0;
          void'(dq.pop_front());
          void'(tq.pop_front());
          done++;
        end else beat++;
      end
      out_ready <= fast || ($urandom_range(0, 2) == 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done == N - 2);
    fast = 1;
    wait (done == N);
    check(refused > 0, "never full");
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
