// tb_hpu_query_buf -- unit test of the query buffer (2 query heads per
// group, depth 2).
//
// Pushes 40 random entries (command plus queries) with random valid and
// ready on the two sides and checks that they come out unchanged and in
// order, that the buffer refuses a third entry while two are held and no pop
// happens, that level follows the number held, and that a push and a pop in
// the same cycle work when full.
`timescale 1ns/1ps
module tb_hpu_query_buf;
  import hpu_pkg::*;

  localparam int G = 2, D = HEAD_DIM, DEPTH = 2, N = 40;
  localparam int W = G * D * 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  cmd_t in_cmd, out_cmd;
  logic [W-1:0] in_q, out_q;
  logic [$clog2(DEPTH+1)-1:0] level;

  hpu_query_buf #(.G(G), .D(D), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, sent = 0, rcvd = 0, held = 0, full_seen = 0, both_full = 0;
  cmd_t cq [$];
  logic [W-1:0] qq [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [W-1:0] rq();
    logic [W-1:0] x;
    for (int i = 0; i < W / 32; i++) x[i*32 +: 32] = $urandom;
    return x;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid  <= 1'b0;
      out_ready <= 1'b0;
      in_cmd    <= '0;
      in_q      <= '0;
    end else begin
      check(int'(level) == held, $sformatf("level %0d, want %0d", level, held));
      if (held == DEPTH && !out_ready) check(!in_ready, "accepts while full");
      if (held == DEPTH) full_seen++;
      if (held == DEPTH && in_valid && out_ready) both_full++;
      if (in_valid && in_ready) begin
        cq.push_back(in_cmd);
        qq.push_back(in_q);
        sent++;
      end
      if (out_valid && out_ready) begin
        check(cq.size() > 0 && out_cmd == cq[0] && out_q == qq[0], $sformatf("entry %0d", rcvd));
        void'(cq.pop_front());
        void'(qq.pop_front());
        rcvd++;
      end
      held = held + ((in_valid && in_ready) ? 1 : 0) - ((out_valid && out_ready) ? 1 : 0);
      if (!in_valid || in_ready) begin
        in_valid <= (sent + ((in_valid && in_ready) ? 1 : 0) < N) && ($urandom_range(0, 3) != 0);
        in_cmd   <= cmd_t'({$urandom, $urandom, $urandom, $urandom});
        in_q     <= rq();
      end
      out_ready <= ($urandom_range(0, 2) == 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (rcvd == N);
    check(full_seen > 0, "never full");
    check(both_full > 0, "never pushed and popped while full");
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
