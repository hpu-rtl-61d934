// tb_hpu_decode_llama -- workload test: generation-stage attention of a
// Llama-2-7B-shaped model at a 2K context, on the processing unit with every
// parameter at its default (8-query GQA engine, 128-element heads, 2048-token
// buffers, 4 HBM ports).
//
// The model has 32 heads of 128 per layer and uses multi-head attention, so
// every query head has its own KV head.  The host runs it on the GQA engine
// by filling query slot 0 of each entry and leaving slots 1..7 zero; the
// result of slot 0 is the head's output (a zero query gives the plain mean of
// the values, which is checked too).  Eight heads are sent, one from each
// sequence of a batch-8 decode step, at cache positions between 1024 and
// 2047 (1K prompt plus up to 1K generated tokens); one is at the last
// position, 2047, so its attention covers the full 2048 tokens.
//
// HBM answers after a fixed latency without stalls and the host side never
// stalls, so the run also measures throughput.  The first head has to pass
// Q.K (4L cycles), Find Max (L+1) and Softmax (2L+2) before S.V starts; from
// then on S.V, the slowest stage with Q.K, should finish one head every 4*L
// cycles (one 64-byte value block per cycle) without waiting.  The test
// requires the whole run to take no more than 7*L of the first head plus
// sum(4*L) plus 200 cycles per head for memory latency, and prints the HBM
// read utilisation of the two 64-byte streams.
`timescale 1ns/1ps
module tb_hpu_decode_llama;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G       = GQA_GROUP;
  localparam int D       = HEAD_DIM;
  localparam int SEQ_CAP = MAX_SEQ;
  localparam int NCH     = N_CH;
  localparam int NH      = 8;             // one head from each of 8 sequences
  localparam int VB      = D * 2 / BLK_BYTES;
  localparam longint V_OFF = longint'(SEQ_CAP) * D * 2;
  localparam int OVERHEAD = 200;          // allowed fill/drain cycles per head
  localparam int TIMEOUT  = 400000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic             host_in_valid, host_in_ready;
  blk_t             host_in_data;
  logic             res_valid, res_ready, res_last;
  blk_t             res_data;
  logic [TAG_W-1:0] res_tag;
  logic [NCH-1:0]   hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid;
  addr_t            hbm_req_addr  [NCH];
  blk_t             hbm_req_wdata [NCH];
  blk_t             hbm_rsp_data  [NCH];
  logic             chunk_done;
  logic [3:0]       busy_stage;

  hpu_top dut (.*);

  hbm_model #(.NCH(NCH), .LAT(8), .STALL_PCT(0)) u_hbm (
    .clk, .rst_n,
    .req_valid (hbm_req_valid), .req_ready (hbm_req_ready), .req_we (hbm_req_we),
    .req_addr (hbm_req_addr), .req_wdata (hbm_req_wdata),
    .rsp_valid (hbm_rsp_valid), .rsp_data (hbm_rsp_data)
  );

  int unsigned seq [NH];
  longint      base [NH];
  real         ref_o [NH][2][D];   // [.][0] = slot 0, [.][1] = a zero-query slot
  int          checks = 0, failures = 0, got_heads = 0;
  blk_t        beats [$];

  // FP16 data as a hash of (kind, head, token, element): kind 0 query, 1 key,
  // 2 value.  Magnitudes as in a trained model's attention inputs, |x| < 4.
  function automatic logic [15:0] hval(int kind, int h, int t, int i);
    int unsigned x;
    x = 32'(kind + 1) * 32'h9E37_79B1 ^ 32'(h) * 32'h85EB_CA77 ^ 32'(t) * 32'hC2B2_AE3D ^ 32'(i) * 32'h27D4_EB2F;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    return {x[31], 5'(11 + int'(x[20:16]) % 5), x[9:0]};
  endfunction

  function automatic blk_t vec_blk(int kind, int h, int t, int b);
    blk_t x;
    for (int i = 0; i < LANES; i++) x[i*16 +: 16] = hval(kind, h, t, b*LANES + i);
    return x;
  endfunction

  task automatic compute_ref();
    real s [];
    for (int h = 0; h < NH; h++) begin
      real mx, sum;
      int  L;
      L = seq[h] + 1;
      s = new[L];
      for (int t = 0; t < L; t++) begin
        s[t] = 0.0;
        for (int i = 0; i < D; i++) s[t] += f16_real(hval(0, h, 0, i)) * f16_real(hval(1, h, t, i));
        s[t] = s[t] / $sqrt(real'(D));
      end
      mx = s[0];
      for (int t = 1; t < L; t++) if (s[t] > mx) mx = s[t];
      sum = 0.0;
      for (int t = 0; t < L; t++) begin
        s[t] = $exp(s[t] - mx);
        sum += s[t];
      end
      for (int i = 0; i < D; i++) begin
        ref_o[h][0][i] = 0.0;
        ref_o[h][1][i] = 0.0;
        for (int t = 0; t < L; t++) begin
          ref_o[h][0][i] += s[t] / sum * f16_real(hval(2, h, t, i));
          ref_o[h][1][i] += f16_real(hval(2, h, t, i)) / real'(L);
        end
      end
    end
  endtask

  task automatic setup();
    for (int h = 0; h < NH; h++) begin
      cmd_t c;
      blk_t x;
      seq[h]  = (h == 0) ? SEQ_CAP - 1 : $urandom_range(1024, SEQ_CAP - 1);
      base[h] = longint'(h) * 2 * V_OFF;
      // cache of the earlier tokens, as left by the prompt and earlier steps
      for (int t = 0; t < int'(seq[h]); t++)
        for (int b = 0; b < VB; b++) begin
          u_hbm.mem[longint'((base[h] + t * D * 2 + b * 64) >> 6)]         = vec_blk(1, h, t, b);
          u_hbm.mem[longint'((base[h] + V_OFF + t * D * 2 + b * 64) >> 6)] = vec_blk(2, h, t, b);
        end
      c.tag     = 32'(h);
      c.seq_len = seq[h];
      c.kv_base = 64'(base[h]);
      x = '0;
      x[$bits(cmd_t)-1:0] = c;
      beats.push_back(x);
      for (int b = 0; b < VB; b++) beats.push_back(vec_blk(0, h, 0, b));
      for (int b = 0; b < (G - 1) * VB; b++) beats.push_back('0);
      for (int b = 0; b < VB; b++) beats.push_back(vec_blk(1, h, seq[h], b));
      for (int b = 0; b < VB; b++) beats.push_back(vec_blk(2, h, seq[h], b));
    end
  endtask

  // host: always ready to send and to receive
  always @(posedge clk) begin
    if (!rst_n) begin
      host_in_valid <= 1'b0;
      host_in_data  <= '0;
      res_ready     <= 1'b0;
    end else begin
      if (host_in_valid && host_in_ready) void'(beats.pop_front());
      host_in_valid <= (beats.size() > 0);
      host_in_data  <= (beats.size() > 0) ? beats[0] : '0;
      res_ready     <= 1'b1;
    end
  end

  int   rbeat;
  blk_t rbuf [G*VB];
  always @(posedge clk) begin
    if (!rst_n) begin
      rbeat <= 0;
    end else if (res_valid && res_ready) begin
      rbuf[rbeat] = res_data;
      if (res_last) begin
        int h, bad;
        h   = int'(res_tag);
        bad = 0;
        checks++;
        if (rbeat != G * VB - 1 || h < 0 || h >= NH) begin
          failures++;
          $display("FAIL result framing: beat %0d tag %0d", rbeat, res_tag);
        end else
          for (int g = 0; g < G; g++)
            for (int i = 0; i < D; i++) begin
              real got;
              got = f16_real(rbuf[(g*D + i) / LANES][((g*D + i) % LANES)*16 +: 16]);
              checks++;
              if (!close(got, ref_o[h][(g == 0) ? 0 : 1][i], 4e-3)) begin
                failures++;
                if (bad++ < 4)
                  $display("FAIL head %0d slot %0d i %0d: got %f want %f", h, g, i, got, ref_o[h][(g == 0) ? 0 : 1][i]);
              end
            end
        got_heads++;
        rbeat <= 0;
      end else begin
        rbeat <= rbeat + 1;
      end
    end
  end

  longint cycles = 0, reads = 0;
  always @(posedge clk) if (rst_n && got_heads < NH) begin
    cycles++;
    for (int c = 0; c < NCH; c++) if (hbm_req_valid[c] && hbm_req_ready[c] && !hbm_req_we[c]) reads++;
  end

  initial begin
    longint budget;
    setup();
    compute_ref();
    budget = 7 * (seq[0] + 1);
    for (int h = 0; h < NH; h++) budget += 4 * (seq[h] + 1) + OVERHEAD;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (got_heads == NH);
    repeat (2) @(posedge clk);
    checks++;
    $display("%0d heads in %0d cycles (limit %0d); %0d blocks read, %.1f%% of two 64-byte streams",
             NH, cycles, budget, reads, 100.0 * real'(reads) / (2.0 * real'(cycles)));
    if (cycles > budget) begin
      failures++;
      $display("FAIL throughput below one head per 4*L cycles");
    end
    for (int h = 0; h < NH; h++)
      for (int b = 0; b < VB; b++) begin
        checks += 2;
        if (u_hbm.mem[longint'((base[h] + seq[h] * D * 2 + b * 64) >> 6)] != vec_blk(1, h, seq[h], b)) begin
          failures++;
          $display("FAIL key of head %0d not in cache", h);
        end
        if (u_hbm.mem[longint'((base[h] + V_OFF + seq[h] * D * 2 + b * 64) >> 6)] != vec_blk(2, h, seq[h], b)) begin
          failures++;
          $display("FAIL value of head %0d not in cache", h);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TIMEOUT) @(posedge clk);
    failures++;
    $display("FAIL watchdog: %0d of %0d heads done", got_heads, NH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
