// hpu_pkg -- types, sizes and floating-point arithmetic shared by the HPU
// processing unit.
//
// Sizes that come from the paper: a 128-element attention head in FP16,
// 64-byte interleaving blocks, up to 8 query heads per grouped-query (GQA)
// group, 256 heads grouped into one host transfer, and an address space large
// enough for 144 GB of HBM (38 bits).  Choices of this design: four HBM ports
// (one per HBM controller in the block diagram), a 2048-token score buffer
// (the 2K context used in the evaluation), the command layout and the
// placement of the value cache behind the key cache of the same head.
//
// Arithmetic.  Operands and results on the host side are IEEE-754 binary16.
// Inside the attention stages the design works in binary32: a product of two
// binary16 numbers is exact in binary32, and sums over thousands of tokens
// keep their precision.  The functions below are combinational, flush
// subnormals to zero, truncate instead of rounding, saturate on overflow and
// do not model Inf/NaN.  f32_exp uses 2^x = 2^n * 2^f with a cubic polynomial
// for 2^f (relative error below 2e-4); f32_recip divides the mantissa.
package hpu_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int HEAD_DIM    = 128;   // elements per head (paper)
  localparam int BLK_BYTES   = 64;    // interleaving block (paper)
  localparam int BLK_BITS    = BLK_BYTES * 8;
  localparam int LANES       = BLK_BYTES / 2;  // FP16 elements per block
  localparam int GQA_GROUP   = 8;     // query heads sharing one KV head (paper: up to 8)
  localparam int MAX_SEQ     = 2048;  // tokens held by the score buffers
  localparam int N_CH        = 4;     // HBM ports
  localparam int ADDR_W      = 38;    // byte address, 144 GB needs 38 bits
  localparam int CHUNK_HEADS = 256;   // heads grouped into one transfer (paper)
  localparam int TAG_W       = 32;

  typedef logic [15:0]         fp16_t;
  typedef logic [31:0]         fp32_t;
  typedef logic [BLK_BITS-1:0] blk_t;
  typedef logic [ADDR_W-1:0]   addr_t;

  // Command of one attention head (group), carried in the low 128 bits of
  // the first 64-byte beat of every entry the host sends.
  //   seq_len : number of tokens already in the KV cache; the new key and
  //             value are stored at position seq_len and attention runs over
  //             seq_len+1 tokens
  //   kv_base : byte address of key vector 0 of this head in HBM
  typedef struct packed {
    logic [TAG_W-1:0] tag;      // returned with the result
    logic [31:0]      seq_len;
    logic [63:0]      kv_base;
  } cmd_t;

  // One 64-byte request to memory.
  typedef struct packed {
    logic  we;
    addr_t addr;
    blk_t  wdata;
  } mem_req_t;

  // ---------------------------------------------------------------- FP
  localparam fp32_t F32_ZERO  = 32'h0000_0000;
  localparam fp32_t F32_LOG2E = 32'h3FB8_AA3B;   // 1/ln(2)

  function automatic fp32_t f16_to_f32(fp16_t h);
    if (h[14:10] == 5'd0) return {h[15], 31'd0};
    return {h[15], 8'(h[14:10]) + 8'd112, h[9:0], 13'd0};
  endfunction

  function automatic fp16_t f32_to_f16(fp32_t f);
    logic signed [9:0] e;
    e = 10'(f[30:23]) - 10'sd112;
    if (f[30:23] == 8'd0 || e <= 0) return {f[31], 15'd0};
    if (e >= 31) return {f[31], 15'h7BFF};
    return {f[31], e[4:0], f[22:13]};
  endfunction

  function automatic fp32_t f32_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic signed [9:0] e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 10'(a[30:23]) + 10'(b[30:23]) - 10'sd127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 10'sd1;
    end else begin
      m = p[45:23];
    end
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hFE, 23'h7FFFFF};
    return {s, e[7:0], m};
  endfunction

  function automatic fp32_t f32_add(fp32_t a, fp32_t b);
    fp32_t x, y;
    logic [7:0]  d;
    logic [26:0] mx, my;
    logic [27:0] sum;
    logic signed [9:0] e;
    int lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? F32_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 8'd26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    e  = 10'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = sum >> 1;
        e   = e + 10'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return F32_ZERO;
      // normalise: shift the leading one up to bit 26 in five steps
      lz = 0;
      if (sum[26:11] == 16'd0) begin sum = sum << 16; lz = lz + 16; end
      if (sum[26:19] == 8'd0)  begin sum = sum << 8;  lz = lz + 8;  end
      if (sum[26:23] == 4'd0)  begin sum = sum << 4;  lz = lz + 4;  end
      if (sum[26:25] == 2'd0)  begin sum = sum << 2;  lz = lz + 2;  end
      if (!sum[26])            begin sum = sum << 1;  lz = lz + 1;  end
      e   = e - 10'(lz);
    end
    if (e <= 0) return {x[31], 31'd0};
    if (e >= 255) return {x[31], 8'hFE, 23'h7FFFFF};
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  function automatic fp32_t f32_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // a > b
  function automatic logic f32_gt(fp32_t a, fp32_t b);
    logic az, bz;
    az = (a[30:23] == 8'd0);
    bz = (b[30:23] == 8'd0);
    if (az && bz) return 1'b0;
    if (az) return b[31];
    if (bz) return !a[31];
    if (a[31] != b[31]) return b[31];
    if (!a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t f32_max(fp32_t a, fp32_t b);
    return f32_gt(a, b) ? a : b;
  endfunction

  // e^x, 2^(x*log2e) = 2^n * 2^f, 2^f ~ 1 + c1 f + c2 f^2 + c3 f^3
  function automatic fp32_t f32_exp(fp32_t x);
    localparam logic [63:0] C1 = 64'd5831581;   // 0.6951786 * 2^23
    localparam logic [63:0] C2 = 64'd1896719;   // 0.2261065 * 2^23
    localparam logic [63:0] C3 = 64'd660045;    // 0.0786835 * 2^23
    fp32_t y;
    logic signed [9:0]  ue;
    logic [63:0]        mag;
    logic signed [63:0] fx;
    logic signed [63:0] n;
    logic [63:0]        f, p;
    logic signed [9:0]  re;
    y  = f32_mul(x, F32_LOG2E);
    if (y[30:23] == 8'd0) return 32'h3F80_0000;          // e^0 = 1
    ue = 10'(y[30:23]) - 10'sd127;                        // unbiased exponent
    if (ue >= 7) return y[31] ? F32_ZERO : 32'h7F7F_FFFF; // |y| >= 128
    // |y| as fixed point with 23 fraction bits
    if (ue >= 0) mag = 64'({1'b1, y[22:0]}) << ue;
    else         mag = 64'({1'b1, y[22:0]}) >> (-ue);
    fx = y[31] ? -$signed(mag) : $signed(mag);
    n  = fx >>> 23;
    f  = 64'(fx[22:0]);
    p  = (C3 * f) >> 23;
    p  = ((C2 + p) * f) >> 23;
    p  = ((C1 + p) * f) >> 23;
    p  = 64'd8388608 + p;                                 // 1.0 in Q1.23
    if (p >= 64'd16777216) p = 64'd16777215;
    re = 10'(n) + 10'sd127;
    if (re <= 0) return F32_ZERO;
    if (re >= 255) return 32'h7F7F_FFFF;
    return {1'b0, re[7:0], p[22:0]};
  endfunction

  // 1/x for a normal x
  function automatic fp32_t f32_recip(fp32_t x);
    logic [47:0] q;
    logic signed [9:0] e;
    if (x[30:23] == 8'd0) return {x[31], 8'hFE, 23'h7FFFFF};
    q = 48'h8000_0000_0000 / 48'({1'b1, x[22:0]});
    if (q[24]) begin
      e = 10'sd254 - 10'(x[30:23]);
      if (e <= 0) return {x[31], 31'd0};
      return {x[31], e[7:0], 23'd0};
    end
    e = 10'sd253 - 10'(x[30:23]);
    if (e <= 0) return {x[31], 31'd0};
    return {x[31], e[7:0], q[22:0]};
  endfunction

  // ---------------------------------------------------------------- misc
  function automatic int unsigned clog2(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
