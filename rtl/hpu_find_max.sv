// hpu_find_max -- the Find Max stage: finds, for each of the G query heads of
// a group, the largest score over the head's tokens, so that the softmax can
// subtract it before exponentiating.
//
// The paper names the stage (a compare unit with a buffer) and its place in
// the pipeline between Q.K and Softmax.  How it works here: when the Q.K
// score buffer is full and this stage's own buffer is free, the stage reads
// one token's G scores per cycle, copies them into its own buffer and keeps a
// running maximum per head.  After the last token it frees the Q.K buffer
// (in_release, so Q.K can start the next head) and presents its buffer, the
// command, the length and the maxima to the Softmax stage, which frees it
// with out_release.  A head of L tokens takes L cycles plus one.
module hpu_find_max
  import hpu_pkg::*;
#(
  parameter int G       = GQA_GROUP,
  parameter int SEQ_CAP = MAX_SEQ
) (
  input  logic              clk,
  input  logic              rst_n,
  // score buffer of the Q.K stage
  input  logic              in_valid,
  input  cmd_t              in_cmd,
  input  logic [31:0]       in_len,
  output logic [$clog2(SEQ_CAP)-1:0] in_rd_addr,
  input  logic [G*32-1:0]   in_rd_data,
  output logic              in_release,
  // own buffer towards Softmax
  output logic              out_valid,
  output cmd_t              out_cmd,
  output logic [31:0]       out_len,
  output logic [G*32-1:0]   out_max,
  input  logic [$clog2(SEQ_CAP)-1:0] out_rd_addr,
  output logic [G*32-1:0]   out_rd_data,
  input  logic              out_release,
  output logic              busy
);
  localparam int TW = $clog2(SEQ_CAP);

  logic            run, full;
  logic [TW-1:0]   t;
  logic [G*32-1:0] mx;
  logic [G*32-1:0] buf_q [SEQ_CAP];
  cmd_t            cmd;
  logic [31:0]     len;
  logic [G*32-1:0] mx_next;

  always_comb begin
    for (int g = 0; g < G; g++)
      mx_next[g*32 +: 32] = (t == '0) ? in_rd_data[g*32 +: 32]
                          : f32_max(mx[g*32 +: 32], in_rd_data[g*32 +: 32]);
  end

  assign in_rd_addr  = t;
  assign in_release  = run && (32'(t) == len - 1);
  assign out_valid   = full;
  assign out_cmd     = cmd;
  assign out_len     = len;
  assign out_max     = mx;
  assign out_rd_data = buf_q[out_rd_addr];
  assign busy        = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      full <= 1'b0;
      t    <= '0;
      mx   <= '0;
      cmd  <= '0;
      len  <= '0;
    end else begin
      if (out_release) full <= 1'b0;
      if (!run) begin
        if (in_valid && !full) begin
          run <= 1'b1;
          t   <= '0;
          cmd <= in_cmd;
          len <= in_len;
        end
      end else begin
        mx <= mx_next;
        t  <= t + 1'b1;
        if (32'(t) == len - 1) begin
          run  <= 1'b0;
          full <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (run) buf_q[t] <= in_rd_data;
  end

endmodule
