// hpu_parser -- splits the host's per-head input stream into work for the
// attention stages and writes to the KV cache.
//
// The host sends, for every head (every KV head of a GQA group), one entry of
// 64-byte beats: a command beat C, the G query vectors Q (G*HEAD_DIM FP16
// numbers, 4*G beats at the default sizes), the new key vector K and the new
// value vector V (4 beats each).  Following the paper, the parser sends the
// command and the queries on to the query buffer and stores the key and value
// in HBM, at addresses computed from the command's KV-cache base address and
// sequence length:
//   key   : kv_base + seq_len * HEAD_DIM*2            (+ 64 per beat)
//   value : kv_base + V_OFFSET + seq_len * HEAD_DIM*2 (+ 64 per beat)
// V_OFFSET = MAX_SEQ*HEAD_DIM*2 places the value cache right behind the key
// cache of the head; this layout is a choice of this design.
//
// Timing: one beat per cycle when nothing stalls.  K and V beats pass straight
// through to the memory port, so the host stream stalls while memory does not
// accept them.  The command and queries go to the query buffer only after the
// last value beat has been accepted by the memory port, so the stages never
// read a cache line before it is written.  The paper groups 256 heads into one
// host transfer; chunk_done pulses after every CHUNK_HEADS entries.
module hpu_parser
  import hpu_pkg::*;
#(
  parameter int G           = GQA_GROUP,
  parameter int D           = HEAD_DIM,
  parameter int SEQ_CAP     = MAX_SEQ,
  parameter int CHUNK       = CHUNK_HEADS
) (
  input  logic             clk,
  input  logic             rst_n,
  // host stream
  input  logic             in_valid,
  output logic             in_ready,
  input  blk_t             in_data,
  // command + queries to the query buffer
  output logic             q_valid,
  input  logic             q_ready,
  output cmd_t             q_cmd,
  output logic [G*D*16-1:0] q_data,
  // KV writes to memory
  output logic             mem_valid,
  input  logic             mem_ready,
  output mem_req_t         mem_req,
  // status
  output logic             chunk_done
);
  localparam int VEC_BEATS = D * 2 / BLK_BYTES;   // beats per vector
  localparam int Q_BEATS   = G * VEC_BEATS;
  localparam int BTW       = (Q_BEATS > 1) ? $clog2(Q_BEATS) : 1;  // beat counter width
  localparam longint VEC_BYTES = longint'(D) * 2;
  localparam longint V_OFFSET  = longint'(SEQ_CAP) * VEC_BYTES;

  typedef enum logic [2:0] {S_CMD, S_Q, S_K, S_V, S_PUSH} state_t;
  state_t state;

  logic [BTW-1:0]               beat;
  logic [$clog2(CHUNK+1)-1:0]   heads;
  blk_t                         qbeats [Q_BEATS];
  addr_t                        kaddr, vaddr;

  // queries assembled from the beats
  always_comb begin
    for (int i = 0; i < Q_BEATS; i++) q_data[i*BLK_BITS +: BLK_BITS] = qbeats[i];
  end

  always_comb begin
    in_ready      = 1'b0;
    mem_valid     = 1'b0;
    mem_req.we    = 1'b1;
    mem_req.wdata = in_data;
    mem_req.addr  = kaddr + addr_t'(32'(beat) * BLK_BYTES);
    q_valid       = (state == S_PUSH);
    unique case (state)
      S_CMD, S_Q: in_ready = 1'b1;
      S_K: begin
        mem_valid = in_valid;
        in_ready  = mem_ready;
      end
      S_V: begin
        mem_valid    = in_valid;
        in_ready     = mem_ready;
        mem_req.addr = vaddr + addr_t'(32'(beat) * BLK_BYTES);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_CMD;
      beat       <= '0;
      heads      <= '0;
      q_cmd      <= '0;
      kaddr      <= '0;
      vaddr      <= '0;
      chunk_done <= 1'b0;
    end else begin
      chunk_done <= 1'b0;
      unique case (state)
        S_CMD: if (in_valid) begin
          q_cmd <= cmd_t'(in_data[$bits(cmd_t)-1:0]);
          kaddr <= addr_t'(in_data[63:0] + 64'(in_data[95:64]) * 64'(VEC_BYTES));
          vaddr <= addr_t'(in_data[63:0] + 64'(V_OFFSET) + 64'(in_data[95:64]) * 64'(VEC_BYTES));
          beat  <= '0;
          state <= S_Q;
        end
        S_Q: if (in_valid) begin
          if (32'(beat) == Q_BEATS - 1) begin
            beat  <= '0;
            state <= S_K;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_K: if (in_valid && mem_ready) begin
          if (32'(beat) == VEC_BEATS - 1) begin
            beat  <= '0;
            state <= S_V;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_V: if (in_valid && mem_ready) begin
          if (32'(beat) == VEC_BEATS - 1) begin
            beat  <= '0;
            state <= S_PUSH;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_PUSH: if (q_ready) begin
          state <= S_CMD;
          if (32'(heads) == CHUNK - 1) begin
            heads      <= '0;
            chunk_done <= 1'b1;
          end else begin
            heads <= heads + 1'b1;
          end
        end
        default: state <= S_CMD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_Q && in_valid) qbeats[beat] <= in_data;
  end

endmodule
