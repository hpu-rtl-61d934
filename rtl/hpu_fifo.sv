// hpu_fifo -- synchronous first-in first-out queue with a valid/ready
// handshake on both sides, used for the buffers of the HPU.
//
// DEPTH entries of WIDTH bits are held in a register array addressed by a
// read and a write pointer.  in_ready is high while an entry is free; out_valid
// is high while one is held, and out_data shows the oldest entry without a
// cycle of read latency.  A push and a pop can happen in the same cycle, also
// when the queue is full.  count gives the number of entries held.  Reset
// empties the queue; the storage itself is not reset.
module hpu_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (32'(count) < DEPTH) || out_ready;
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

endmodule
