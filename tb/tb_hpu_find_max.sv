// tb_hpu_find_max -- unit test of the Find Max stage (2 query heads, 64-token
// buffers).
//
// The testbench plays the Q.K score buffer with random binary32 scores of
// both signs (head 1 all negative) and checks: the maxima (bit-exact, found
// by comparing the real values), the copy of every score in the stage's own
// buffer, one in_release pulse at the end of the scan, L+1 cycles from start
// to out_valid, that a second head waits while the own buffer is full, and
// that it runs after out_release.
`timescale 1ns/1ps
module tb_hpu_find_max;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G = 2, SEQ_CAP = 64, TW = $clog2(SEQ_CAP);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_release, out_valid, out_release, busy;
  cmd_t in_cmd, out_cmd;
  logic [31:0] in_len, out_len;
  logic [TW-1:0] in_rd_addr, out_rd_addr;
  logic [G*32-1:0] in_rd_data, out_rd_data, out_max;
  logic [G*32-1:0] src [SEQ_CAP];

  assign in_rd_data = src[in_rd_addr];

  hpu_find_max #(.G(G), .SEQ_CAP(SEQ_CAP)) dut (.*);

  int checks = 0, failures = 0, releases = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_release) releases++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [31:0] rscore(bit neg);
    logic [31:0] f;
    f = {neg ? 1'b1 : 1'($urandom_range(0, 1)), 8'($urandom_range(120, 133)), 23'($urandom)};
    return f;
  endfunction

  task automatic run_head(int L, int tag);
    longint unsigned t0;
    int r0;
    logic [31:0] want [G];
    for (int t = 0; t < L; t++)
      for (int g = 0; g < G; g++) src[t][g*32 +: 32] = rscore(g == 1);
    for (int g = 0; g < G; g++) begin
      want[g] = src[0][g*32 +: 32];
      for (int t = 1; t < L; t++)
        if (f32_real(src[t][g*32 +: 32]) > f32_real(want[g])) want[g] = src[t][g*32 +: 32];
    end
    r0 = releases;
    @(negedge clk);
    in_cmd = cmd_t'({32'(tag), 32'(L - 1), 64'(tag)});
    in_len = 32'(L);
    in_valid = 1'b1;
    t0 = cyc;
    while (!out_valid) @(negedge clk);
    in_valid = 1'b0;
    check(cyc - t0 == longint'(L + 1), $sformatf("scan of %0d took %0d cycles", L, cyc - t0));
    check(releases == r0 + 1, "in_release pulses");
    check(out_cmd == in_cmd && out_len == 32'(L), "command/length");
    for (int g = 0; g < G; g++)
      check(out_max[g*32 +: 32] == want[g], $sformatf("max g=%0d got %h want %h", g, out_max[g*32 +: 32], want[g]));
    for (int t = 0; t < L; t++) begin
      out_rd_addr = TW'(t);
      #0.1;
      check(out_rd_data == src[t], $sformatf("copy t=%0d", t));
    end
  endtask

  initial begin
    in_valid = 0; out_release = 0; out_rd_addr = '0; in_cmd = '0; in_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_head(37, 1);
    @(negedge clk);
    in_valid = 1'b1;
    repeat (4) begin
      @(negedge clk);
      check(!busy, "started while its buffer is full");
    end
    in_valid = 1'b0;
    out_release = 1'b1;
    @(negedge clk);
    out_release = 1'b0;
    run_head(SEQ_CAP, 2);
    out_release = 1'b1;
    @(negedge clk);
    out_release = 1'b0;
    run_head(1, 3);
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
