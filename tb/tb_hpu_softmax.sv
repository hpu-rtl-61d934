// tb_hpu_softmax -- unit test of the Softmax stage (2 query heads, 64-token
// buffers).
//
// The testbench plays the Find Max buffer: random scores in about [-8, 8]
// and their true maximum.  It checks every weight against exp(s-max)/sum
// computed in real arithmetic (relative tolerance 1e-3), that the weights of
// each head add up to 1, that the Find Max buffer is freed after the
// exponent pass (L cycles after the start) and that the weights are ready
// 2L+2 cycles after the start.  Heads of 50, 1 and 64 tokens.  Then the two
// output banks: with head 4 held by S.V the unit must still take head 5 and
// finish it, must refuse head 6 while both banks are full, and must present
// head 5 once head 4 is released.
`timescale 1ns/1ps
module tb_hpu_softmax;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G = 2, SEQ_CAP = 64, TW = $clog2(SEQ_CAP);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_release, out_valid, out_release, busy;
  cmd_t in_cmd, out_cmd;
  logic [31:0] in_len, out_len;
  logic [TW-1:0] in_rd_addr, out_rd_addr;
  logic [G*32-1:0] in_rd_data, out_rd_data, in_max;
  logic [G*32-1:0] src [SEQ_CAP];

  assign in_rd_data = src[in_rd_addr];

  hpu_softmax #(.G(G), .SEQ_CAP(SEQ_CAP)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0, t_rel = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_release) t_rel <= cyc;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run_head(int L, int tag);
    longint unsigned t0;
    for (int g = 0; g < G; g++) begin
      logic [31:0] mx;
      for (int t = 0; t < L; t++)
        src[t][g*32 +: 32] = {1'($urandom_range(0, 1)), 8'($urandom_range(118, 129)), 23'($urandom)};
      mx = src[0][g*32 +: 32];
      for (int t = 1; t < L; t++)
        if (f32_real(src[t][g*32 +: 32]) > f32_real(mx)) mx = src[t][g*32 +: 32];
      in_max[g*32 +: 32] = mx;
    end
    @(negedge clk);
    in_cmd = cmd_t'({32'(tag), 32'(L - 1), 64'(0)});
    in_len = 32'(L);
    in_valid = 1'b1;
    t0 = cyc;
    while (!out_valid) @(negedge clk);
    in_valid = 1'b0;
    check(cyc - t0 == longint'(2 * L + 2), $sformatf("softmax of %0d took %0d cycles", L, cyc - t0));
    check(t_rel - t0 == longint'(L), $sformatf("input freed after %0d cycles", t_rel - t0));
    check(out_cmd == in_cmd && out_len == 32'(L), "command/length");
    for (int g = 0; g < G; g++) begin
      real sum, mx, tot;
      mx = f32_real(in_max[g*32 +: 32]);
      sum = 0.0;
      for (int t = 0; t < L; t++) sum += $exp(f32_real(src[t][g*32 +: 32]) - mx);
      tot = 0.0;
      for (int t = 0; t < L; t++) begin
        real got, want;
        out_rd_addr = TW'(t);
        #0.1;
        got  = f32_real(out_rd_data[g*32 +: 32]);
        want = $exp(f32_real(src[t][g*32 +: 32]) - mx) / sum;
        tot += got;
        check(close(got, want, 1e-3) && (got - want <= 1e-3 * want && want - got <= 1e-3 * want),
              $sformatf("p t=%0d g=%0d got %g want %g", t, g, got, want));
      end
      check(close(tot, 1.0, 1e-3), $sformatf("weights of g=%0d add up to %f", g, tot));
    end
    out_release = 1'b1;
    @(negedge clk);
    out_release = 1'b0;
  endtask

  initial begin
    in_valid = 0; out_release = 0; out_rd_addr = '0; in_cmd = '0; in_len = '0; in_max = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_head(50, 1);
    run_head(1, 2);
    run_head(SEQ_CAP, 3);
    // two banks: head 4 held, head 5 computed behind it
    for (int h = 4; h <= 6; h++) begin
      int n_rel;
      @(negedge clk);
      in_cmd   = cmd_t'({32'(h), 32'(9), 64'(0)});
      in_len   = 32'd10;
      in_valid = 1'b1;
      n_rel    = 0;
      repeat (30) begin
        @(negedge clk);
        if (in_release) n_rel++;
        if (n_rel > 0) in_valid = 1'b0;
      end
      in_valid = 1'b0;
      if (h < 6) check(n_rel == 1 && !busy, $sformatf("head %0d not taken with a bank free", h));
      else       check(n_rel == 0, "head taken while both banks are full");
      check(out_valid && out_cmd.tag == 32'd4, "oldest bank not presented");
    end
    out_release = 1'b1;
    @(negedge clk);
    out_release = 1'b0;
    check(out_valid && out_cmd.tag == 32'd5, "second bank not presented after release");
    out_release = 1'b1;
    @(negedge clk);
    out_release = 1'b0;
    check(!out_valid, "both banks still full");
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
