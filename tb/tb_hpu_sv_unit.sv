// tb_hpu_sv_unit -- unit test of the S.V stage (2 query heads per group,
// 64-token buffers).
//
// The testbench plays the softmax buffer (random weights that add up to 1 per
// head), the DMA and the result buffer.  It checks the value request command,
// that the softmax buffer is freed with the last value block, that the
// output o[g][i] = sum_t p[g][t] v[t][i] matches real arithmetic (FP16
// output, tolerance 2e-3), that L*4 value blocks fed back to back take L*4
// cycles, and that the result is held until the result buffer takes it.
// Heads of 33 tokens (no gaps) and 64 tokens (random gaps).
`timescale 1ns/1ps
module tb_hpu_sv_unit;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G = 2, D = HEAD_DIM, SEQ_CAP = 64, TW = $clog2(SEQ_CAP);
  localparam int VB = D * 2 / BLK_BYTES;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic p_valid, p_release, v_req_valid, v_req_ready, v_valid, v_ready, r_valid, r_ready, busy;
  cmd_t p_cmd, v_req_cmd, r_cmd;
  logic [31:0] p_len;
  logic [TW-1:0] p_rd_addr;
  logic [G*32-1:0] p_rd_data;
  blk_t v_data;
  logic [G*D*16-1:0] r_data;
  logic [G*32-1:0] pm [SEQ_CAP];
  logic [15:0] vv [SEQ_CAP][D];

  assign p_rd_data = pm[p_rd_addr];

  hpu_sv_unit #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP)) dut (.*);

  int checks = 0, failures = 0, rel = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && p_release) rel++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // binary32 bits of a real in (0, 1)
  function automatic logic [31:0] to_f32(real x);
    int e;
    real m;
    e = 127;
    m = x;
    while (m < 1.0) begin m = m * 2.0; e--; end
    return {1'b0, 8'(e), 23'(longint'((m - 1.0) * 8388608.0))};
  endfunction

  task automatic run_head(int L, int gap_pct, int tag);
    cmd_t c;
    longint unsigned t0;
    int r0;
    for (int g = 0; g < G; g++) begin
      real w [SEQ_CAP];
      real s;
      s = 0.0;
      for (int t = 0; t < L; t++) begin w[t] = 0.05 + real'($urandom_range(0, 1000)) / 1000.0; s += w[t]; end
      for (int t = 0; t < L; t++) pm[t][g*32 +: 32] = to_f32(w[t] / s);
    end
    for (int t = 0; t < L; t++) for (int i = 0; i < D; i++) vv[t][i] = rand_f16(10, 15);
    c.tag = 32'(tag); c.seq_len = 32'(L - 1); c.kv_base = 64'(tag * 8192);
    r0 = rel;
    @(negedge clk);
    p_cmd = c; p_len = 32'(L); p_valid = 1'b1;
    while (!v_req_valid) @(negedge clk);
    check(v_req_cmd == c, "value request command");
    v_req_ready = 1'b1;
    @(negedge clk);
    v_req_ready = 1'b0;
    t0 = cyc;
    for (int t = 0; t < L; t++)
      for (int b = 0; b < VB; b++) begin
        while (gap_pct > 0 && $urandom_range(0, 99) < gap_pct) begin
          v_valid = 1'b0;
          @(negedge clk);
        end
        v_valid = 1'b1;
        for (int i = 0; i < LANES; i++) v_data[i*16 +: 16] = vv[t][b*LANES + i];
        @(negedge clk);
      end
    v_valid = 1'b0;
    p_valid = 1'b0;
    if (gap_pct == 0) check(cyc - t0 == longint'(L * VB), $sformatf("%0d value blocks took %0d cycles", L * VB, cyc - t0));
    check(rel == r0 + 1, "softmax buffer not freed once");
    check(r_valid && r_cmd == c, "result offered with its command");
    repeat (3) begin
      @(negedge clk);
      check(r_valid, "result dropped before it was taken");
    end
    for (int g = 0; g < G; g++)
      for (int i = 0; i < D; i++) begin
        real want;
        want = 0.0;
        for (int t = 0; t < L; t++) want += f32_real(pm[t][g*32 +: 32]) * f16_real(vv[t][i]);
        check(close(f16_real(r_data[(g*D+i)*16 +: 16]), want, 2e-3),
              $sformatf("o g=%0d i=%0d got %f want %f", g, i, f16_real(r_data[(g*D+i)*16 +: 16]), want));
      end
    r_ready = 1'b1;
    @(negedge clk);
    r_ready = 1'b0;
    check(!r_valid, "result still offered after it was taken");
  endtask

  initial begin
    p_valid = 0; v_req_ready = 0; v_valid = 0; r_ready = 0; p_cmd = '0; p_len = '0; v_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_head(33, 0, 1);
    run_head(SEQ_CAP, 30, 2);
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
