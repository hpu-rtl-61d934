// hpu_qk_unit -- the Q.K stage: a narrow GEMM unit that computes the scaled
// dot products s[g][t] = (q_g . k_t) / sqrt(HEAD_DIM) of the G query heads of
// a GQA group with every key t = 0..seq_len of that group's KV head, and
// keeps them in its score buffer.
//
// From the paper: the GEMM engine serves up to 8 query heads that share one
// key (GQA), so every key byte fetched is used G times: G*LANES multiply-adds
// per 64-byte block, 8 FLOP per byte at G = 8.  The buffer after the unit
// ("Buf") hands the scores to the Find Max stage.
//
// How it works: a head is taken from the query buffer when a score bank is
// free; the unit asks the DMA for the head's keys and consumes one 64-byte
// key block per cycle.  Each block gives LANES FP16 products per query head,
// added by a binary32 adder tree and accumulated over the HEAD_DIM/LANES
// blocks of the key; the last block writes the scaled score of token t.  A
// head of L = seq_len+1 tokens thus takes L*HEAD_DIM/LANES cycles once keys
// flow.  The bank is then marked full; the next stage sees the oldest full
// bank (s_valid, s_cmd, s_len), reads it through s_rd_addr/s_rd_data (no read
// latency) and frees it with s_release.
//
// The score buffer has two banks of SEQ_CAP tokens (this design's choice):
// while Find Max reads one head the unit already computes the next, so the
// stage runs at its full rate of one head per L*HEAD_DIM/LANES cycles, as
// the paper's fully pipelined execution needs.  SCALE is 1/sqrt(128) in
// binary32 for the default head size.
module hpu_qk_unit
  import hpu_pkg::*;
#(
  parameter int    G       = GQA_GROUP,
  parameter int    D       = HEAD_DIM,
  parameter int    SEQ_CAP = MAX_SEQ,
  parameter fp32_t SCALE   = 32'h3DB5_04F3
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the query buffer
  input  logic              q_valid,
  output logic              q_ready,
  input  cmd_t              q_cmd,
  input  logic [G*D*16-1:0] q_data,
  // key request to the DMA and key stream from it
  output logic              k_req_valid,
  input  logic              k_req_ready,
  output cmd_t              k_req_cmd,
  input  logic              k_valid,
  output logic              k_ready,
  input  blk_t              k_data,
  // score buffer towards Find Max
  output logic              s_valid,
  output cmd_t              s_cmd,
  output logic [31:0]       s_len,
  input  logic [$clog2(SEQ_CAP)-1:0] s_rd_addr,
  output logic [G*32-1:0]   s_rd_data,
  input  logic              s_release,
  output logic              busy
);
  localparam int NB = D / LANES;   // blocks per key vector
  localparam int TW = $clog2(SEQ_CAP);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RUN} state_t;
  state_t state;

  fp16_t       q   [G][D];
  fp32_t       acc [G];
  logic [$clog2(NB+1)-1:0] blk;
  logic [TW-1:0] t;
  logic [31:0]   len;
  cmd_t          cmd;
  logic [G*32-1:0] sbuf [2 << TW];     // bank b, token t at {b, t}
  logic [1:0]    full;
  logic          wb, rb;               // bank being written, oldest full bank
  cmd_t          bcmd [2];
  logic [31:0]   blen [2];

  fp32_t part  [G];
  fp32_t total [G];
  fp32_t score [G];

  // one block: LANES products per head, summed by a tree
  always_comb begin
    for (int g = 0; g < G; g++) begin
      fp32_t lvl [LANES];
      for (int i = 0; i < LANES; i++)
        lvl[i] = f32_mul(f16_to_f32(q[g][32'(blk) * LANES + i]),
                         f16_to_f32(k_data[i*16 +: 16]));
      for (int w = LANES / 2; w >= 1; w = w / 2)
        for (int i = 0; i < w; i++)
          lvl[i] = f32_add(lvl[2*i], lvl[2*i+1]);
      part[g]  = lvl[0];
      total[g] = f32_add(acc[g], part[g]);
      score[g] = f32_mul(total[g], SCALE);
    end
  end

  assign q_ready     = (state == S_IDLE) && !full[wb];
  assign k_req_valid = (state == S_REQ);
  assign k_req_cmd   = cmd;
  assign k_ready     = (state == S_RUN);
  assign s_valid     = full[rb];
  assign s_cmd       = bcmd[rb];
  assign s_len       = blen[rb];
  assign s_rd_data   = sbuf[{rb, s_rd_addr}];
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      full  <= '0;
      wb    <= 1'b0;
      rb    <= 1'b0;
      bcmd  <= '{default: '0};
      blen  <= '{default: '0};
      blk   <= '0;
      t     <= '0;
      len   <= '0;
      cmd   <= '0;
      for (int g = 0; g < G; g++) acc[g] <= F32_ZERO;
    end else begin
      if (s_release) begin
        full[rb] <= 1'b0;
        rb       <= ~rb;
      end
      unique case (state)
        S_IDLE: if (q_valid && q_ready) begin
          cmd   <= q_cmd;
          len   <= q_cmd.seq_len + 1;
          blk   <= '0;
          t     <= '0;
          state <= S_REQ;
        end
        S_REQ: if (k_req_ready) state <= S_RUN;
        S_RUN: if (k_valid) begin
          if (32'(blk) == NB - 1) begin
            blk <= '0;
            for (int g = 0; g < G; g++) acc[g] <= F32_ZERO;
            if (32'(t) == len - 1) begin
              full[wb] <= 1'b1;
              bcmd[wb] <= cmd;
              blen[wb] <= len;
              wb       <= ~wb;
              state    <= S_IDLE;
            end
            t <= t + 1'b1;
          end else begin
            blk <= blk + 1'b1;
            for (int g = 0; g < G; g++) acc[g] <= total[g];
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && q_valid && q_ready)
      for (int g = 0; g < G; g++)
        for (int i = 0; i < D; i++) q[g][i] <= q_data[(g*D + i)*16 +: 16];
    if (state == S_RUN && k_valid && 32'(blk) == NB - 1)
      for (int g = 0; g < G; g++) sbuf[{wb, t}][g*32 +: 32] <= score[g];
  end

  always_ff @(posedge clk) begin
    if (rst_n && state == S_IDLE && q_valid && q_ready)
      assert (q_cmd.seq_len < SEQ_CAP)
        else $error("sequence of %0d tokens exceeds the score buffer", q_cmd.seq_len + 1);
  end

endmodule
