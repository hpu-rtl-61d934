// hpu_softmax -- the Softmax stage (SM unit and buffer): turns the scores of
// each query head into attention weights p[t] = exp(s[t]-max) / sum_u
// exp(s[u]-max).
//
// The paper names the unit and its place between Find Max and S.V.  How it
// works here, in three phases over the head's L tokens:
//   EXP  : one token per cycle, G heads in parallel: e = exp(s - max) is
//          written to this stage's buffer and added to a running sum.  At the
//          end the Find Max buffer is freed.
//   RECIP: one cycle, r = 1/sum per head.
//   NORM : one token per cycle, p = e * r written back in place.
// The bank is then presented to the S.V stage (out_valid) and freed by it
// with out_release.  A head of L tokens takes 2L+2 cycles.  exp and 1/x are
// the binary32 approximations of hpu_pkg.
//
// The buffer has two banks of SEQ_CAP tokens (this design's choice): S.V
// needs 4L cycles to read a head's weights, and with a single bank the
// softmax of the next head could only start after that, so S.V would wait
// 2L+2 cycles per head.  With two banks the unit works on the next head while
// S.V reads the previous one; S.V always sees the oldest full bank.
module hpu_softmax
  import hpu_pkg::*;
#(
  parameter int G       = GQA_GROUP,
  parameter int SEQ_CAP = MAX_SEQ
) (
  input  logic              clk,
  input  logic              rst_n,
  // Find Max buffer
  input  logic              in_valid,
  input  cmd_t              in_cmd,
  input  logic [31:0]       in_len,
  input  logic [G*32-1:0]   in_max,
  output logic [$clog2(SEQ_CAP)-1:0] in_rd_addr,
  input  logic [G*32-1:0]   in_rd_data,
  output logic              in_release,
  // weights towards S.V
  output logic              out_valid,
  output cmd_t              out_cmd,
  output logic [31:0]       out_len,
  input  logic [$clog2(SEQ_CAP)-1:0] out_rd_addr,
  output logic [G*32-1:0]   out_rd_data,
  input  logic              out_release,
  output logic              busy
);
  localparam int TW = $clog2(SEQ_CAP);

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_RECIP, S_NORM} state_t;
  state_t state;

  logic [1:0]      full;
  logic            wb, rb;        // bank being written, oldest full bank
  cmd_t            bcmd [2];
  logic [31:0]     blen [2];
  logic [TW-1:0]   t;
  cmd_t            cmd;
  logic [31:0]     len;
  logic [G*32-1:0] mx, sum, rcp;
  logic [G*32-1:0] pbuf [2 << TW];     // bank b, token t at {b, t}
  logic [G*32-1:0] e_now, sum_next, rcp_next, p_now, p_rd;

  assign p_rd = pbuf[{wb, t}];

  always_comb begin
    for (int g = 0; g < G; g++) begin
      e_now[g*32 +: 32]    = f32_exp(f32_add(in_rd_data[g*32 +: 32], f32_neg(mx[g*32 +: 32])));
      sum_next[g*32 +: 32] = f32_add(sum[g*32 +: 32], e_now[g*32 +: 32]);
      rcp_next[g*32 +: 32] = f32_recip(sum[g*32 +: 32]);
      p_now[g*32 +: 32]    = f32_mul(p_rd[g*32 +: 32], rcp[g*32 +: 32]);
    end
  end

  assign in_rd_addr  = t;
  assign in_release  = (state == S_EXP) && (32'(t) == len - 1);
  assign out_valid   = full[rb];
  assign out_cmd     = bcmd[rb];
  assign out_len     = blen[rb];
  assign out_rd_data = pbuf[{rb, out_rd_addr}];
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      full  <= '0;
      wb    <= 1'b0;
      rb    <= 1'b0;
      bcmd  <= '{default: '0};
      blen  <= '{default: '0};
      t     <= '0;
      cmd   <= '0;
      len   <= '0;
      mx    <= '0;
      sum   <= '0;
      rcp   <= '0;
    end else begin
      if (out_release) begin
        full[rb] <= 1'b0;
        rb       <= ~rb;
      end
      unique case (state)
        S_IDLE: if (in_valid && !full[wb]) begin
          cmd   <= in_cmd;
          len   <= in_len;
          mx    <= in_max;
          sum   <= '0;
          t     <= '0;
          state <= S_EXP;
        end
        S_EXP: begin
          sum <= sum_next;
          if (32'(t) == len - 1) begin
            t     <= '0;
            state <= S_RECIP;
          end else begin
            t <= t + 1'b1;
          end
        end
        S_RECIP: begin
          rcp   <= rcp_next;
          state <= S_NORM;
        end
        S_NORM: begin
          if (32'(t) == len - 1) begin
            full[wb] <= 1'b1;
            bcmd[wb] <= cmd;
            blen[wb] <= len;
            wb       <= ~wb;
            state    <= S_IDLE;
          end else begin
            t <= t + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_EXP)  pbuf[{wb, t}] <= e_now;
    if (state == S_NORM) pbuf[{wb, t}] <= p_now;
  end

endmodule
