// tb_hpu_top -- end-to-end test of the HPU processing unit at reduced sizes
// (2 query heads per group, 64-token score buffers, 4-head chunks).
//
// The testbench plays the host and the HBM: it preloads the KV cache of every
// head (the summarization stage) into the behavioural HBM model, then sends
// one entry per head (command, queries, new key, new value) with random gaps,
// takes the result beats with random back-pressure, and compares every result
// element with scaled-dot-product attention computed in real arithmetic from
// the same FP16 numbers.  It also checks that the new key and value were
// written to the cache, and counts the mechanisms of the design: KV writes
// by the parser, reads on every HBM port (interleaving), HBM back-pressure,
// key and value streams running at once, two stages busy on different heads at once
// (pipelining), host and result back-pressure and chunk completion.  A
// mechanism that never happened counts as a failure.
`timescale 1ns/1ps
module tb_hpu_top;
  import hpu_pkg::*;
  import tb_fp_pkg::*;

  localparam int G       = 2;
  localparam int D       = HEAD_DIM;
  localparam int SEQ_CAP = 64;
  localparam int NCH     = N_CH;
  localparam int CHUNK   = 4;
  localparam int NH      = 8;        // heads sent
  localparam int LONG_SEQ  = SEQ_CAP - 1;  // cached tokens of head 1
  localparam int SHORT_SEQ = 40;           // others: 1..SHORT_SEQ
  localparam int VB      = D * 2 / BLK_BYTES;
  localparam int STALL   = 20;       // HBM ready-low percentage
  localparam longint V_OFF = longint'(SEQ_CAP) * D * 2;
  localparam int TIMEOUT = 200000;

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

  hpu_top #(.G(G), .D(D), .SEQ_CAP(SEQ_CAP), .NCH(NCH), .CHUNK(CHUNK)) dut (.*);

  hbm_model #(.NCH(NCH), .LAT(6), .STALL_PCT(STALL)) u_hbm (
    .clk, .rst_n,
    .req_valid (hbm_req_valid), .req_ready (hbm_req_ready), .req_we (hbm_req_we),
    .req_addr (hbm_req_addr), .req_wdata (hbm_req_wdata),
    .rsp_valid (hbm_rsp_valid), .rsp_data (hbm_rsp_data)
  );

  // ------------------------------------------------------------ test data
  // Queries, keys and values are a fixed hash of (kind, head, token, element),
  // so nothing has to be stored: kind 0 query (group member g in the token
  // slot), 1 key, 2 value.
  int unsigned   seq [NH];
  longint        base [NH];
  real           ref_o [NH][G][D];
  int            checks = 0, failures = 0;
  int            got_heads = 0;
  blk_t          beats [$];

  function automatic logic [15:0] hval(int kind, int h, int t, int i);
    int unsigned x;
    int          emin, emax;
    x = 32'(kind + 1) * 32'h9E37_79B1 ^ 32'(h) * 32'h85EB_CA77 ^ 32'(t) * 32'hC2B2_AE3D ^ 32'(i) * 32'h27D4_EB2F;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    emin = (kind == 0) ? 12 : (kind == 1) ? 11 : 10;
    emax = (kind == 2) ? 14 : 15;
    return {x[31], 5'(emin + int'(x[20:16]) % (emax - emin + 1)), x[9:0]};
  endfunction

  function automatic blk_t vec_blk(int kind, int h, int t, int b);
    blk_t x;
    for (int i = 0; i < LANES; i++) x[i*16 +: 16] = hval(kind, h, t, b*LANES + i);
    return x;
  endfunction

  task automatic make_data();
    for (int h = 0; h < NH; h++) begin
      seq[h]  = (h == 0) ? 0 : (h == 1) ? LONG_SEQ : $urandom_range(1, SHORT_SEQ);
      base[h] = longint'(h) * 2 * V_OFF + 64'h10_0000;
    end
  endtask

  task automatic compute_ref();
    real s [];
    for (int h = 0; h < NH; h++)
      for (int g = 0; g < G; g++) begin
        real mx, sum;
        int  L;
        L = seq[h] + 1;
        s = new[L];
        for (int t = 0; t < L; t++) begin
          s[t] = 0.0;
          for (int i = 0; i < D; i++) s[t] += f16_real(hval(0, h, g, i)) * f16_real(hval(1, h, t, i));
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
          ref_o[h][g][i] = 0.0;
          for (int t = 0; t < L; t++) ref_o[h][g][i] += s[t] / sum * f16_real(hval(2, h, t, i));
        end
      end
  endtask

  // cache of past tokens (summarization stage), written straight into the HBM model
  task automatic preload();
    for (int h = 0; h < NH; h++)
      for (int t = 0; t < int'(seq[h]); t++)
        for (int b = 0; b < VB; b++) begin
          u_hbm.mem[longint'((base[h] + t * D * 2 + b * 64) >> 6)]         = vec_blk(1, h, t, b);
          u_hbm.mem[longint'((base[h] + V_OFF + t * D * 2 + b * 64) >> 6)] = vec_blk(2, h, t, b);
        end
  endtask

  task automatic build_stream();
    for (int h = 0; h < NH; h++) begin
      cmd_t c;
      blk_t x;
      c.tag     = 32'(1000 + h);
      c.seq_len = seq[h];
      c.kv_base = 64'(base[h]);
      x = '0;
      x[$bits(cmd_t)-1:0] = c;
      beats.push_back(x);
      for (int g = 0; g < G; g++)
        for (int b = 0; b < VB; b++) beats.push_back(vec_blk(0, h, g, b));
      for (int b = 0; b < VB; b++) beats.push_back(vec_blk(1, h, seq[h], b));
      for (int b = 0; b < VB; b++) beats.push_back(vec_blk(2, h, seq[h], b));
    end
  endtask

  // ------------------------------------------------------------ host side
  always @(posedge clk) begin
    if (!rst_n) begin
      host_in_valid <= 1'b0;
      host_in_data  <= '0;
    end else begin
      if (host_in_valid && host_in_ready) void'(beats.pop_front());
      host_in_valid <= (beats.size() > 0) && ($urandom_range(0, 9) != 0);
      host_in_data  <= (beats.size() > 0) ? beats[0] : '0;
    end
  end

  // result collection
  int   rbeat;
  blk_t rbuf [G*VB];
  always @(posedge clk) begin
    if (!rst_n) begin
      res_ready <= 1'b0;
      rbeat     <= 0;
    end else begin
      res_ready <= ($urandom_range(0, 3) != 0);
      if (res_valid && res_ready) begin
        rbuf[rbeat] = res_data;
        if (res_last) begin
          int h;
          h = int'(res_tag) - 1000;
          checks++;
          if (rbeat != G * VB - 1 || h < 0 || h >= NH) begin
            failures++;
            $display("FAIL result framing: beat %0d tag %0d", rbeat, res_tag);
          end else begin
            int bad;
            bad = 0;
            for (int g = 0; g < G; g++)
              for (int i = 0; i < D; i++) begin
                real got;
                got = f16_real(rbuf[(g*D + i) / LANES][((g*D + i) % LANES)*16 +: 16]);
                checks++;
                if (!close(got, ref_o[h][g][i], 4e-3)) begin
                  failures++;
                  if (bad++ < 4)
                    $display("FAIL head %0d g %0d i %0d: got %f want %f", h, g, i, got, ref_o[h][g][i]);
                end
              end
          end
          got_heads++;
          rbeat <= 0;
        end else begin
          rbeat <= rbeat + 1;
        end
      end
    end
  end

  // ------------------------------------------------------------ mechanisms
  int n_kvwrite = 0, n_hbm_stall = 0, n_kbuf_stall = 0, n_vbuf_stall = 0;
  int n_overlap = 0, n_host_stall = 0, n_res_stall = 0, n_chunk = 0;
  int n_port_reads [NCH];
  initial for (int c = 0; c < NCH; c++) n_port_reads[c] = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (hbm_req_valid[c] && hbm_req_ready[c] && hbm_req_we[c]) n_kvwrite++;
      if (hbm_req_valid[c] && hbm_req_ready[c] && !hbm_req_we[c]) n_port_reads[c]++;
      if (hbm_req_valid[c] && !hbm_req_ready[c]) n_hbm_stall++;
    end
    if (dut.m_req_valid[1] && dut.m_req_valid[2]) n_kbuf_stall++;
    if (dut.k_valid && dut.v_valid) n_vbuf_stall++;
    if ($countones(busy_stage) >= 2) n_overlap++;
    if (host_in_valid && !host_in_ready) n_host_stall++;
    if (res_valid && !res_ready) n_res_stall++;
    if (chunk_done) n_chunk++;
  end

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", name);
    end
  endtask

  // ------------------------------------------------------------ run
  initial begin
    make_data();
    compute_ref();
    preload();
    build_stream();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (got_heads == NH);
    repeat (4) @(posedge clk);
    // the new key/value of every head must be in the cache
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
    mech("parser KV writes", n_kvwrite);
    for (int c = 0; c < NCH; c++) mech($sformatf("reads on HBM port %0d", c), n_port_reads[c]);
    mech("HBM back-pressure", n_hbm_stall);
    mech("key and value reads together", n_kbuf_stall);
    mech("key and value streams together", n_vbuf_stall);
    mech("stages overlapped", n_overlap);
    mech("host input stalled", n_host_stall);
    mech("result back-pressure", n_res_stall);
    mech("chunk completed", n_chunk);
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
