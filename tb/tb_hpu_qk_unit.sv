// tb_hpu_qk_unit -- unit test of the Q.K stage (2 query heads per group,
// 64-token score buffer).
//
// The testbench plays the query buffer and the DMA.  Head A (40 tokens) is
// fed one key block every cycle; its scores must equal (q.k)/sqrt(128),
// computed in real arithmetic, and the buffer must be full 40*4 cycles after
// the first key block (one 64-byte block per cycle).  While A's scores are
// held in one bank, the unit must take head B (64 tokens, the whole bank,
// fed with random gaps) into the other bank and keep presenting A.  With
// both banks full it must refuse head C.  After A is released the unit
// presents B, whose scores are checked the same way, and after B's release
// it has nothing to present.  The key request must carry the head's command.
`timescale 1ns/1ps
module tb_hpu_qk_unit;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G = 2, D = HEAD_DIM, SEQ_CAP = 64;
  localparam int VB = D * 2 / BLK_BYTES;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic q_valid, q_ready, k_req_valid, k_req_ready, k_valid, k_ready, s_valid, s_release, busy;
  cmd_t q_cmd, k_req_cmd, s_cmd;
  logic [G*D*16-1:0] q_data;
  blk_t k_data;
  logic [31:0] s_len;
  logic [$clog2(SEQ_CAP)-1:0] s_rd_addr;
  logic [G*32-1:0] s_rd_data;

  hpu_qk_unit #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] q [2][G][D];          // per bank: head A in 0, head B in 1
  logic [15:0] k [2][SEQ_CAP][D];
  cmd_t        hc [2];
  int          hl [2];
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run_head(int L, int gap_pct, int tag, int n);
    cmd_t c;
    longint unsigned t0;
    for (int g = 0; g < G; g++) for (int i = 0; i < D; i++) q[n][g][i] = rand_f16(12, 15);
    for (int t = 0; t < L; t++) for (int i = 0; i < D; i++) k[n][t][i] = rand_f16(11, 15);
    c.tag = 32'(tag); c.seq_len = 32'(L - 1); c.kv_base = 64'(tag * 4096);
    @(negedge clk);
    q_cmd = c;
    for (int g = 0; g < G; g++) for (int i = 0; i < D; i++) q_data[(g*D+i)*16 +: 16] = q[n][g][i];
    hc[n] = c;
    hl[n] = L;
    q_valid = 1'b1;
    while (!q_ready) @(negedge clk);
    @(negedge clk);
    q_valid = 1'b0;
    while (!k_req_valid) @(negedge clk);
    check(k_req_cmd == c, "key request command");
    k_req_ready = 1'b1;
    @(negedge clk);
    k_req_ready = 1'b0;
    t0 = 0;
    for (int t = 0; t < L; t++)
      for (int b = 0; b < VB; b++) begin
        while (gap_pct > 0 && $urandom_range(0, 99) < gap_pct) begin
          k_valid = 1'b0;
          @(negedge clk);
        end
        k_valid = 1'b1;
        for (int i = 0; i < LANES; i++) k_data[i*16 +: 16] = k[n][t][b*LANES + i];
        if (t == 0 && b == 0) t0 = cyc;
        @(negedge clk);
        if (n == 0) check(!(s_valid && !(t == L - 1 && b == VB - 1)), "scores marked ready too early");
        else        check(s_valid && s_cmd == hc[0], "first head no longer presented");
      end
    k_valid = 1'b0;
    check(!busy, "unit still busy after the last key block");
    if (n == 0) check(s_valid, "scores not ready after the last key block");
    if (gap_pct == 0) check(cyc - t0 == longint'(L * VB), $sformatf("%0d key blocks took %0d cycles", L * VB, cyc - t0));
  endtask

  task automatic check_scores(int n);
    int L;
    L = hl[n];
    check(s_valid && s_len == 32'(L) && s_cmd == hc[n], "score buffer valid/length/command");
    for (int t = 0; t < L; t++) begin
      s_rd_addr = t[$clog2(SEQ_CAP)-1:0];
      #0.1;
      for (int g = 0; g < G; g++) begin
        real want;
        want = 0.0;
        for (int i = 0; i < D; i++) want += f16_real(q[n][g][i]) * f16_real(k[n][t][i]);
        want = want / $sqrt(real'(D));
        check(close(f32_real(s_rd_data[g*32 +: 32]), want, 1e-4),
              $sformatf("score t=%0d g=%0d got %f want %f", t, g, f32_real(s_rd_data[g*32 +: 32]), want));
      end
    end
  endtask

  initial begin
    q_valid = 0; k_req_ready = 0; k_valid = 0; k_data = '0; s_release = 0; s_rd_addr = '0;
    q_cmd = '0; q_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_head(40, 0, 1, 0);
    check_scores(0);
    // A held: B goes to the second bank
    run_head(SEQ_CAP, 30, 2, 1);
    // both banks full: head C must wait
    @(negedge clk);
    q_valid = 1'b1;
    repeat (5) begin
      @(negedge clk);
      check(!q_ready && !k_req_valid, "took a head while both banks are full");
    end
    q_valid = 1'b0;
    check_scores(0);
    s_release = 1'b1;
    @(negedge clk);
    s_release = 1'b0;
    check_scores(1);
    s_release = 1'b1;
    @(negedge clk);
    s_release = 1'b0;
    check(!s_valid, "release did not free the buffer");
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
