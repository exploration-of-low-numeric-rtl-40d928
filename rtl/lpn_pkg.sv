// lpn_pkg: types, constants and arithmetic shared by the low-numeric-precision
// CNN accelerator.
//
// Weight kinds. A processing element (PE) is built for one activation width and
// one weight representation, the four families of the PE table:
//   WK_INT     : signed WGT_W-bit weights, a real multiply (8x8, 4x4, 3x3, 2x2 PEs)
//   WK_TERNARY : 2-bit two's complement weight in {-1,0,+1} (01=+1, 11=-1, 00=0;
//                10 is not a legal code and counts as 0)
//   WK_BINARY  : 1-bit weight, 0 means -1 and 1 means +1 (sign-flip mux)
//   WK_XNOR    : 1-bit activation and 1-bit weight, both read as -1/+1; the
//                multiply is an XNOR and the sum a population count
// The scale alpha of a ternary/binary network ({+-alpha,0}) is not applied in the
// PE: it is folded into the per-feature batch-norm scale gamma.
//
// Single precision helpers. The fused batch-norm/scale stage works in IEEE-754
// binary32. The functions below convert an integer to binary32, multiply and add
// with round-to-nearest-even. Subnormal inputs and results are flushed to zero;
// infinities and NaNs are not produced by this datapath and are not handled
// (an exponent overflow saturates to infinity). These limits are this design's
// choice; the paper only says that scale and shift are single precision.
package lpn_pkg;

  typedef enum logic [1:0] {WK_INT, WK_TERNARY, WK_BINARY, WK_XNOR} wkind_e;

  // Width of address fields in the layer descriptor.
  localparam int ADDR_W = 20;

  // Layer descriptor written by the host before a layer starts. The output
  // sizes are those after pooling; the host computes them so that the
  // controller needs no divider:
  //   conv_h = (in_h + 2*pad - kh)/stride + 1
  //   out_h  = (conv_h - pool)/pool_stride + 1
  // pool = pool_stride gives ordinary non-overlapping pooling; pool = 3 with
  // pool_stride = 2 gives overlapping pooling, at the price of computing the
  // convolution outputs shared by neighbouring windows more than once.
  typedef struct packed {
    logic [11:0]       in_w;      // input map width  (pixels)
    logic [11:0]       in_h;      // input map height (pixels)
    logic [7:0]        cg;        // input channel groups (WORDS channels each)
    logic [7:0]        kg;        // output feature groups (NUM_FEAT features each)
    logic [3:0]        kw;        // filter width
    logic [3:0]        kh;        // filter height
    logic [2:0]        stride;    // convolution stride (>=1)
    logic [2:0]        pad;       // zero padding on every side
    logic [2:0]        pool;      // max-pool window size (1 = no pooling)
    logic [2:0]        pool_stride; // max-pool window step (>=1)
    logic [11:0]       out_w;     // pooled output width
    logic [11:0]       out_h;     // pooled output height
    logic              src_bank;  // feature-buffer bank read; the other is written
    logic [ADDR_W-1:0] in_base;   // first word of the input map
    logic [ADDR_W-1:0] out_base;  // first word of the output map
  } layer_cfg_t;

  // ---------------------------------------------------------------- binary32
  // Round m * 2^e (m an unsigned integer) to binary32, sign s.
  function automatic logic [31:0] fp32_pack(input logic s, input int e,
                                            input logic [63:0] m);
    int          p;
    int          sh;
    int          ex;
    logic [63:0] kept;
    logic [63:0] rem;
    logic [63:0] half;
    p = -1;
    for (int i = 0; i < 64; i++) if (m[i]) p = i;
    if (p < 0) return {s, 31'd0};
    ex = p + e + 127;
    if (p > 23) begin
      sh   = p - 23;
      kept = m >> sh;
      rem  = m & ((64'd1 << sh) - 64'd1);
      half = 64'd1 << (sh - 1);
      if (rem > half || (rem == half && kept[0])) kept = kept + 64'd1;
      if (kept[24]) begin
        kept = kept >> 1;
        ex   = ex + 1;
      end
    end else begin
      kept = m << (23 - p);
    end
    if (ex <= 0) return {s, 31'd0};
    if (ex >= 255) return {s, 8'hFF, 23'd0};
    return {s, ex[7:0], kept[22:0]};
  endfunction

  // Signed integer to binary32 (exact up to 24 significant bits).
  function automatic logic [31:0] fp32_from_int(input logic signed [31:0] v);
    logic [63:0] mag;
    mag = (v < 0) ? 64'(-64'(v)) : 64'(v);
    return fp32_pack(v < 0, 0, mag);
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    return fp32_pack(s, int'(a[30:23]) + int'(b[30:23]) - 300,
                     64'({1'b1, a[22:0]}) * 64'({1'b1, b[22:0]}));
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0]        x;
    logic [31:0]        y;
    int                 d;
    logic signed [65:0] mx;
    logic signed [65:0] my;
    logic signed [65:0] sum;
    if (b[30:23] == 8'd0) return (a[30:23] == 8'd0) ? 32'd0 : a;
    if (a[30:23] == 8'd0) return b;
    // x has the larger exponent
    if (a[30:23] >= b[30:23]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d = int'(x[30:23]) - int'(y[30:23]);
    // y is below half an ulp of x (a quarter when x is a power of two)
    if (d >= 26) return x;
    mx  = 66'(64'({1'b1, x[22:0]}) << d);
    my  = 66'({1'b1, y[22:0]});
    if (x[31]) mx = -mx;
    if (y[31]) my = -my;
    sum = mx + my;
    if (sum == 0) return 32'd0;
    return fp32_pack(sum < 0, int'(y[30:23]) - 150,
                     (sum < 0) ? 64'(-sum) : 64'(sum));
  endfunction

endpackage
