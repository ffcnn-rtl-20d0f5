// ffcnn_pkg: types, constants and single-precision floating-point arithmetic
// shared by every kernel of the accelerator.
//
// All feature values, weights and biases are IEEE-754 single-precision floats
// (32 bits), as the accelerator computes in full precision. The arithmetic
// functions here are combinational and synthesizable:
//   fp_mul  - product, rounded to nearest even
//   fp_add  - sum, rounded to nearest even (three guard bits plus sticky)
//   fp_max  - larger of two values (used by max pooling)
//   fp_relu - max(x, 0)
// Design choices of this implementation, not of the paper: subnormal inputs
// and results are flushed to zero, overflow gives infinity, NaN is not
// propagated (an infinite operand is returned as it is).
//
// layer_cfg_t is the layer descriptor the host writes into the layer
// configuration table. Its fields are this design's own; all addresses count
// VEC-float vectors of global memory, not bytes.
package ffcnn_pkg;

  typedef logic [31:0] fp32_t;

  localparam int unsigned ADDR_W = 32;

  typedef struct packed {
    // input feature map: in_h x in_w pixels, in_cv vectors per pixel in memory,
    // of which in_cv_n starting at in_cv_off belong to this layer (channel groups)
    logic [11:0]       in_h;
    logic [11:0]       in_w;
    logic [9:0]        in_cv;
    logic [9:0]        in_cv_off;
    logic [9:0]        in_cv_n;
    // convolution window, stride and zero padding
    logic [3:0]        k;
    logic [2:0]        stride;
    logic [2:0]        pad;
    // convolution output size and number of LANE-wide output feature groups
    logic [11:0]       conv_h;
    logic [11:0]       conv_w;
    logic [9:0]        groups;
    logic              relu_en;
    // max pooling (pool_size 2 or 3); pool_h x pool_w is the pooled size
    logic              pool_en;
    logic [1:0]        pool_size;
    logic [2:0]        pool_stride;
    logic [11:0]       pool_h;
    logic [11:0]       pool_w;
    // local response normalization: b = a * (lrn_k + lrn_alpha_n * sum a^2)^(-beta)
    logic              lrn_en;
    logic [2:0]        lrn_n;       // window size in channels (odd, up to 7)
    fp32_t             lrn_k;
    fp32_t             lrn_alpha_n; // alpha / n
    logic [15:0]       lrn_beta;    // unsigned fixed point, 14 fraction bits
    // global memory layout of the output
    logic [9:0]        out_cv;      // vectors per output pixel
    logic [9:0]        out_cv_off;  // first output vector of this layer
    // base addresses (in vectors)
    logic [ADDR_W-1:0] base_in;
    logic [ADDR_W-1:0] base_w;
    logic [ADDR_W-1:0] base_b;
    logic [ADDR_W-1:0] base_out;
  } layer_cfg_t;


  // ---------------------------------------------------------------------
  // floating point helpers
  // ---------------------------------------------------------------------

  // Round a normalised 24-bit mantissa (hidden bit at 23) with guard bit g and
  // sticky bit s to nearest even and pack it with exponent e (biased, may be
  // out of range) and sign.
  function automatic fp32_t fp_pack(input logic sign, input int e,
                                    input logic [23:0] m, input logic g,
                                    input logic s);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m} + 25'((g & (s | m[0])) ? 1 : 0);
    er = e;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255)    return {sign, 8'hFF, 23'd0};
    else if (er <= 0) return {sign, 31'd0};
    else              return {sign, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        sign;
    logic [47:0] p;
    int          e;
    sign = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {sign, 8'hFF, 23'd0};
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0)   return {sign, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(sign, e + 1, p[47:24], p[23], |p[22:0]);
    else       return fp_pack(sign, e,     p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;   // hidden bit, 23 fraction bits, 3 guard bits
    logic [27:0] s;
    int          d, e, lz;
    logic        st;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'd0) return b;
    if (b[30:23] == 8'd0) return a;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 27) begin
      my = 27'd1;                         // only the sticky bit survives
    end else if (d > 0) begin
      st = |(my & ((27'd1 << d) - 27'd1));
      my = (my >> d) | {26'd0, st};
    end
    if (x[31] == y[31]) s = {1'b0, mx} + {1'b0, my};
    else                s = {1'b0, mx} - {1'b0, my};
    if (s == 28'd0) return 32'd0;
    e = int'(x[30:23]);
    if (s[27]) begin
      s = (s >> 1) | {27'd0, s[0]};
      e = e + 1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - lz;
    end
    return fp_pack(x[31], e, s[26:3], s[2], s[1] | s[0]);
  endfunction

  // a > b for finite floats, both zeros equal
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    logic az, bz;
    az = (a[30:23] == 8'd0);
    bz = (b[30:23] == 8'd0);
    if (az && bz)       return 1'b0;
    if (az)             return b[31];
    if (bz)             return !a[31];
    if (a[31] != b[31]) return b[31];
    if (!a[31])         return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t fp_max(input fp32_t a, input fp32_t b);
    return fp_gt(b, a) ? b : a;
  endfunction

  function automatic fp32_t fp_relu(input fp32_t a);
    return (a[31] || a[30:23] == 8'd0) ? 32'd0 : a;
  endfunction

endpackage
