// hpu_query_buf -- the query buffer: holds parsed heads (command plus the G
// query vectors) until the Q.K unit takes them.
//
// The paper stores the received command and query in internal buffers while
// key and value go to HBM.  Here the buffer is a queue of DEPTH entries (the
// depth is this design's choice), so the parser can take in the next heads
// while the attention stages work.  Handshakes are valid/ready on both
// sides; an entry written in one cycle can be read in the next.
module hpu_query_buf
  import hpu_pkg::*;
#(
  parameter int G     = GQA_GROUP,
  parameter int D     = HEAD_DIM,
  parameter int DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  cmd_t              in_cmd,
  input  logic [G*D*16-1:0] in_q,
  output logic              out_valid,
  input  logic              out_ready,
  output cmd_t              out_cmd,
  output logic [G*D*16-1:0] out_q,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int W = $bits(cmd_t) + G * D * 16;

  hpu_fifo #(.WIDTH(W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data({in_cmd, in_q}),
    .out_valid, .out_ready, .out_data({out_cmd, out_q}),
    .count(level)
  );

endmodule
