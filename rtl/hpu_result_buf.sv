// hpu_result_buf -- the result buffer: holds finished attention outputs and
// sends them to the host interface as 64-byte beats.
//
// The paper shows one result R per head leaving through PCIe after the S.V
// stage.  Here a queue of DEPTH results (command plus G*HEAD_DIM FP16 values)
// decouples the S.V unit from the host link; the oldest result is sent as
// G*HEAD_DIM*2/64 beats, lowest element first, each beat carrying the head's
// tag and out_last on its final beat.  One beat per cycle while out_ready is
// high.  Depth and beat order are this design's choices.
module hpu_result_buf
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
  input  logic [G*D*16-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output blk_t              out_data,
  output logic [TAG_W-1:0]  out_tag,
  output logic              out_last
);
  localparam int BEATS = G * D * 16 / BLK_BITS;
  localparam int W     = $bits(cmd_t) + G * D * 16;

  logic              f_valid, f_pop;
  cmd_t              f_cmd;
  logic [G*D*16-1:0] f_data;
  logic [$clog2(BEATS+1)-1:0] beat;

  hpu_fifo #(.WIDTH(W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data({in_cmd, in_data}),
    .out_valid(f_valid), .out_ready(f_pop), .out_data({f_cmd, f_data}),
    .count    ()
  );

  assign out_valid = f_valid;
  assign out_data  = f_data[32'(beat) * BLK_BITS +: BLK_BITS];
  assign out_tag   = f_cmd.tag;
  assign out_last  = (32'(beat) == BEATS - 1);
  assign f_pop     = out_valid && out_ready && out_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) beat <= '0;
    else if (out_valid && out_ready) beat <= out_last ? '0 : beat + 1'b1;
  end

endmodule
