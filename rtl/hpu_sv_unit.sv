// hpu_sv_unit -- the S.V stage: a narrow GEMM unit that forms the attention
// output o[g] = sum_t p[g][t] * v_t of every query head g of a group from the
// softmax weights and the value vectors of the group's KV head.
//
// As for Q.K, every value block fetched is used by the G query heads of the
// group: G*LANES multiply-adds per 64-byte block.  How it works here: when
// the softmax buffer is full, the unit asks the DMA for the head's values and
// consumes one 64-byte value block per cycle.  Block b of token t updates the
// binary32 accumulators o[g][b*LANES .. b*LANES+LANES-1] with p[g][t] times
// the block's FP16 elements.  After the last block the softmax buffer is
// freed and the G*HEAD_DIM results, rounded to FP16 (truncation), are offered
// to the result buffer (r_valid/r_ready); the unit takes the next head once
// they are accepted.  A head of L tokens takes L*HEAD_DIM/LANES cycles once
// values flow.
module hpu_sv_unit
  import hpu_pkg::*;
#(
  parameter int G       = GQA_GROUP,
  parameter int D       = HEAD_DIM,
  parameter int SEQ_CAP = MAX_SEQ
) (
  input  logic              clk,
  input  logic              rst_n,
  // softmax buffer
  input  logic              p_valid,
  input  cmd_t              p_cmd,
  input  logic [31:0]       p_len,
  output logic [$clog2(SEQ_CAP)-1:0] p_rd_addr,
  input  logic [G*32-1:0]   p_rd_data,
  output logic              p_release,
  // value request to the DMA and value stream from it
  output logic              v_req_valid,
  input  logic              v_req_ready,
  output cmd_t              v_req_cmd,
  input  logic              v_valid,
  output logic              v_ready,
  input  blk_t              v_data,
  // result towards the result buffer
  output logic              r_valid,
  input  logic              r_ready,
  output cmd_t              r_cmd,
  output logic [G*D*16-1:0] r_data,
  output logic              busy
);
  localparam int NB = D / LANES;
  localparam int TW = $clog2(SEQ_CAP);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RUN, S_OUT} state_t;
  state_t state;

  fp32_t         acc [G][NB][LANES];
  fp32_t         nxt [G][LANES];
  localparam int BW = (NB > 1) ? $clog2(NB) : 1;
  logic [BW-1:0] blk;
  logic [TW-1:0] t;
  logic [31:0]   len;
  cmd_t          cmd;

  always_comb begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < LANES; i++)
        nxt[g][i] = f32_add(acc[g][blk][i],
                            f32_mul(p_rd_data[g*32 +: 32], f16_to_f32(v_data[i*16 +: 16])));
  end

  always_comb begin
    for (int g = 0; g < G; g++)
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < LANES; i++)
          r_data[(g*D + b*LANES + i)*16 +: 16] = f32_to_f16(acc[g][b][i]);
  end

  assign p_rd_addr   = t;
  assign p_release   = (state == S_RUN) && v_valid && (32'(blk) == NB - 1) && (32'(t) == len - 1);
  assign v_req_valid = (state == S_REQ);
  assign v_req_cmd   = cmd;
  assign v_ready     = (state == S_RUN);
  assign r_valid     = (state == S_OUT);
  assign r_cmd       = cmd;
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk   <= '0;
      t     <= '0;
      len   <= '0;
      cmd   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (p_valid) begin
          cmd   <= p_cmd;
          len   <= p_len;
          blk   <= '0;
          t     <= '0;
          state <= S_REQ;
        end
        S_REQ: if (v_req_ready) state <= S_RUN;
        S_RUN: if (v_valid) begin
          if (32'(blk) == NB - 1) begin
            blk <= '0;
            t   <= t + 1'b1;
            if (32'(t) == len - 1) state <= S_OUT;
          end else begin
            blk <= blk + 1'b1;
          end
        end
        S_OUT: if (r_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && p_valid) begin
      for (int g = 0; g < G; g++)
        for (int b = 0; b < NB; b++)
          for (int i = 0; i < LANES; i++) acc[g][b][i] <= F32_ZERO;
    end else if (state == S_RUN && v_valid) begin
      for (int g = 0; g < G; g++)
        for (int i = 0; i < LANES; i++) acc[g][blk][i] <= nxt[g][i];
    end
  end

endmodule
