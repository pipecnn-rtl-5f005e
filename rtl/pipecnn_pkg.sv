// pipecnn_pkg -- types, layer configuration and IEEE-754 single precision
// arithmetic shared by all kernels of the accelerator.
//
// The accelerator computes in 32-bit floating point throughout, as the
// design it follows does. The arithmetic here is this design's own: fp_mul and
// fp_add are combinational, round to nearest even, flush subnormal inputs and
// results to zero and saturate overflow to infinity. NaN and infinity inputs
// are not treated specially (their exponent field is used as is).
//
// Memory layout used by every data mover: a feature volume of C channels,
// H rows and W columns is stored as C/VEC_SIZE "vector planes", each a raster
// of W*H vectors of VEC_SIZE consecutive 32-bit words. Vector address of
// channel group c, row y, column x is base + (c*H + y)*W + x.
package pipecnn_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  // Width of the dimension and address fields of the layer configuration.
  localparam int DIM_W  = 16;
  localparam int ADDR_W = 32;

  typedef enum logic [0:0] {POOL_MAX = 1'b0, POOL_AVG = 1'b1} pool_mode_e;

  // One layer as programmed by the host before a pipeline launch.
  // A fully connected layer is a convolution with k = 1 over a batch laid out
  // as an in_w x in_h grid of input vectors (e.g. 8 x 8 for 64 images).
  typedef struct packed {
    logic [DIM_W-1:0]  in_w;      // W: input width  (columns)
    logic [DIM_W-1:0]  in_h;      // H: input height (rows)
    logic [DIM_W-1:0]  in_cv;     // C' = C / VEC_SIZE, input vector planes
    logic [7:0]        k;         // K: kernel size (1 in FC mode)
    logic [7:0]        s;         // S: convolution stride
    logic [DIM_W-1:0]  conv_w;    // (W-K)/S+1, computed by the host
    logic [DIM_W-1:0]  conv_h;    // (H-K)/S+1, computed by the host
    logic [DIM_W-1:0]  out_m;     // M: output feature maps, multiple of CU_NUM
    logic              pool_on;   // pooling kernel enabled (else bypass)
    pool_mode_e        pool_mode; // max or average
    logic [7:0]        pool_s;    // pooling stride
    logic [DIM_W-1:0]  pool_w;    // pooled width  (written dims when pool_on)
    logic [DIM_W-1:0]  pool_h;    // pooled height
    logic [ADDR_W-1:0] in_base;   // feature base, vector address
    logic [ADDR_W-1:0] w_base;    // weight base, vector address
    logic [ADDR_W-1:0] out_base;  // result base, word address
  } layer_cfg_t;

  // LRN kernel launch: one feature volume normalised across channels.
  typedef struct packed {
    logic [DIM_W-1:0]  in_w;      // width
    logic [DIM_W-1:0]  in_h;      // height
    logic [DIM_W-1:0]  in_cv;     // channel planes C / VEC_SIZE
    logic [ADDR_W-1:0] in_base;   // source, vector address
    logic [ADDR_W-1:0] out_base;  // destination, vector address
    logic [15:0]       seg_base;  // lowest segment code covered by LUT entry 1
  } lrn_cfg_t;

  // ---------------------------------------------------------------------
  // Floating point helpers
  // ---------------------------------------------------------------------

  // Round a normalised mantissa (hidden bit at bit 23) with guard and sticky
  // bits to nearest even and pack it. exp is the biased exponent, signed.
  function automatic fp32_t fp_pack(input logic sign, input logic signed [10:0] exp_in,
                                    input logic [23:0] man, input logic guard,
                                    input logic sticky);
    logic [24:0] r;
    logic signed [10:0] e;
    e = exp_in;
    r = {1'b0, man} + {24'd0, guard & (sticky | man[0])};
    if (r[24]) begin
      r = r >> 1;
      e = e + 11'sd1;
    end
    if (e <= 0)        return {sign, 31'h0};
    else if (e >= 255) return {sign, 8'hFF, 23'h0};
    else               return {sign, e[7:0], r[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic sign;
    logic [47:0] p;
    logic signed [10:0] e;
    sign = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {sign, 31'h0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (p[47]) return fp_pack(sign, e + 11'sd1, p[47:24], p[23], |p[22:0]);
    else       return fp_pack(sign, e,          p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t x, y;
    logic [7:0]  d;
    logic [27:0] mx, my, sum, shifted;
    logic        st;
    logic signed [10:0] e;
    int lz;
    // x gets the larger magnitude; zero (or subnormal) operands drop out
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? (a[31] & b[31] ? 32'h8000_0000 : 32'h0) : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) begin
      shifted = 28'd1; // only sticky survives
    end else begin
      shifted = my >> d;
      st = |(my & ((28'd1 << d) - 28'd1));
      shifted[0] = shifted[0] | st;
    end
    if (x[31] == y[31]) sum = mx + shifted;
    else                sum = mx - shifted;
    if (sum == 28'd0) return 32'h0;
    e = 11'(x[30:23]);
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e = e + 11'sd1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - 11'(lz);
    end
    // sum[26] is the hidden bit, sum[2] guard, sum[1:0] sticky
    return fp_pack(x[31], e, sum[26:3], sum[2], |sum[1:0]);
  endfunction

  // a > b for two floats (sign-magnitude order, -0 == +0)
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    if (a[31] != b[31]) return !a[31] && (a[30:0] != 0 || b[30:0] != 0);
    if (!a[31])         return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t fp_max(input fp32_t a, input fp32_t b);
    return fp_gt(b, a) ? b : a;
  endfunction

endpackage
