// gbu_pkg -- types, constants and floating-point helpers shared by the
// Gaussian Blending Unit.
//
// Number formats.  The per-fragment datapath of the Row PEs works in IEEE
// half precision (FP16), as the design's 16-bit floating point tile engine
// calls for.  Quantities that are absolute screen-space offsets (the
// transform ThetaA / ThetaB of a Gaussian, its mean) are carried in single
// precision (FP32): in FP16 the term m00*x + v0 of a pixel a thousand columns
// from the origin would cancel to a few significant bits.  That split is a
// choice of this implementation.
//
// All arithmetic is done on one unpacked float type, uf_t, with a 24-bit
// normalised mantissa, and rounded once when packed back to FP16 (round half
// up) or FP32 (truncate).  Subnormals flush to zero, overflow saturates to the
// largest finite value, and there is no NaN or infinity handling: none of the
// values the design produces can reach them.  Every function is a plain
// combinational function and synthesizes.
package gbu_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned TILE      = 16;  // tile edge in pixels
  localparam int unsigned TILE_LG   = 4;
  localparam int unsigned COL_W     = 4;   // column index inside a tile

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;

  // ------------------------------------------------------- unpacked float
  typedef struct packed {
    logic              sign;
    logic              zero;
    logic signed [9:0] exp;   // unbiased exponent
    logic [23:0]       man;   // 1.23 fixed point, man[23] = 1 unless zero
  } uf_t;

  localparam uf_t UF_ZERO = '{sign: 1'b0, zero: 1'b1, exp: '0, man: '0};

  function automatic uf_t unpack16(input fp16_t a);
    uf_t r;
    r.sign = a[15];
    r.zero = (a[14:10] == 5'd0);
    r.exp  = 10'(signed'({1'b0, a[14:10]})) - 10'sd15;
    r.man  = {1'b1, a[9:0], 13'd0};
    return r;
  endfunction

  function automatic uf_t unpack32(input fp32_t a);
    uf_t r;
    r.sign = a[31];
    r.zero = (a[30:23] == 8'd0);
    r.exp  = 10'(signed'({2'b0, a[30:23]})) - 10'sd127;
    r.man  = {1'b1, a[22:0]};
    return r;
  endfunction

  function automatic fp16_t pack16(input uf_t a);
    logic [11:0]       m;
    logic signed [9:0] e;
    m = {1'b0, a.man[23:13]} + {11'd0, a.man[12]};
    e = a.exp + 10'sd15;
    if (m[11]) begin
      m = m >> 1;
      e = e + 10'sd1;
    end
    if (a.zero || e <= 0) return FP16_ZERO;
    if (e >= 31)          return {a.sign, 15'h7BFF};
    return {a.sign, e[4:0], m[9:0]};
  endfunction

  function automatic fp32_t pack32(input uf_t a);
    logic signed [9:0] e;
    e = a.exp + 10'sd127;
    if (a.zero || e <= 0) return 32'd0;
    if (e >= 255)         return {a.sign, 31'h7F7FFFFF};
    return {a.sign, e[7:0], a.man[22:0]};
  endfunction

  function automatic uf_t uneg(input uf_t a);
    uf_t r = a;
    r.sign = ~a.sign;
    return r;
  endfunction

  function automatic uf_t umul(input uf_t a, input uf_t b);
    uf_t         r;
    logic [47:0] p;
    p      = a.man * b.man;
    r.sign = a.sign ^ b.sign;
    r.zero = a.zero | b.zero;
    if (p[47]) begin
      r.man = p[47:24];
      r.exp = a.exp + b.exp + 10'sd1;
    end else begin
      r.man = p[46:23];
      r.exp = a.exp + b.exp;
    end
    if (r.zero) r = UF_ZERO;
    return r;
  endfunction

  // Magnitude of a is at least that of b.
  function automatic logic mag_ge(input uf_t a, input uf_t b);
    if (b.zero) return 1'b1;
    if (a.zero) return 1'b0;
    if (a.exp != b.exp) return a.exp > b.exp;
    return a.man >= b.man;
  endfunction

  function automatic uf_t uadd(input uf_t a, input uf_t b);
    uf_t         big, sml, r;
    logic [27:0] mb, ms, s;       // 1 carry bit, 24 mantissa bits, 3 guard bits
    int unsigned d;
    if (a.zero) return b;
    if (b.zero) return a;
    if (mag_ge(a, b)) begin big = a; sml = b; end
    else              begin big = b; sml = a; end
    d  = 32'(big.exp - sml.exp);
    mb = {1'b0, big.man, 3'd0};
    ms = (d > 27) ? 28'd0 : ({1'b0, sml.man, 3'd0} >> d);
    r.sign = big.sign;
    r.zero = 1'b0;
    r.exp  = big.exp;
    if (big.sign == sml.sign) s = mb + ms;
    else                        s = mb - ms;
    if (s == 28'd0) return UF_ZERO;
    if (s[27]) begin
      s     = s >> 1;
      r.exp = r.exp + 10'sd1;
    end else begin
      for (int i = 0; i < 27; i++) begin
        if (!s[26]) begin
          s     = s << 1;
          r.exp = r.exp - 10'sd1;
        end
      end
    end
    r.man = s[26:3];
    return r;
  endfunction

  function automatic uf_t usub(input uf_t a, input uf_t b);
    return uadd(a, uneg(b));
  endfunction

  // a < b as real numbers (+0 and -0 compare equal).
  function automatic logic ult(input uf_t a, input uf_t b);
    if (a.zero && b.zero) return 1'b0;
    if (a.zero) return !b.sign;
    if (b.zero) return a.sign;
    if (a.sign != b.sign) return a.sign;
    if (!a.sign) return !mag_ge(a, b);
    return !mag_ge(b, a);
  endfunction

  // Division on 16 mantissa bits: used only for the per-Gaussian transform.
  function automatic uf_t udiv(input uf_t a, input uf_t b);
    uf_t         r;
    logic [31:0] q;
    q      = {a.man[23:8], 16'd0} / {16'd0, b.man[23:8]};
    r.sign = a.sign ^ b.sign;
    r.zero = a.zero;
    if (q[16]) begin
      r.man = {q[16:0], 7'd0};
      r.exp = a.exp - b.exp;
    end else begin
      r.man = {q[15:0], 8'd0};
      r.exp = a.exp - b.exp - 10'sd1;
    end
    if (a.zero) r = UF_ZERO;
    return r;
  endfunction

  // Square root of |a| on 16 result mantissa bits (bit-serial integer root).
  function automatic uf_t usqrt(input uf_t a);
    uf_t         r;
    logic [33:0] rad;
    logic [16:0] root;
    logic [33:0] rem, trial;
    logic signed [9:0] e;
    if (a.zero) return UF_ZERO;
    e = a.exp;
    // value = man/2^23 * 2^e ; make e even, radicand = man * 2^(9 or 10)
    if (e[0]) begin
      rad = {a.man, 10'd0};
      e   = e - 10'sd1;
    end else begin
      rad = {1'b0, a.man, 9'd0};
    end
    root = '0;
    rem  = '0;
    for (int i = 16; i >= 0; i--) begin
      rem   = (rem << 2) | 34'((rad >> (2 * i)) & 34'd3);
      trial = 34'({root, 2'b01});
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root << 1) | 17'd1;
      end else begin
        root = root << 1;
      end
    end
    // root in [2^16, 2^17) represents sqrt(value) * 2^16 / 2^(e/2)
    r.sign = 1'b0;
    r.zero = 1'b0;
    r.exp  = e >>> 1;
    r.man  = {root[16:0], 7'd0};
    if (!root[16]) begin
      r.man = {root[15:0], 8'd0};
      r.exp = r.exp - 10'sd1;
    end
    return r;
  endfunction

  // Small non-negative integer (pixel coordinate) to unpacked float.
  function automatic uf_t ufrom_uint(input logic [15:0] v);
    uf_t         r;
    logic [23:0] m;
    if (v == 16'd0) return UF_ZERO;
    m      = {v, 8'd0};
    r.sign = 1'b0;
    r.zero = 1'b0;
    r.exp  = 10'sd15;
    for (int i = 0; i < 16; i++) begin
      if (!m[23]) begin
        m     = m << 1;
        r.exp = r.exp - 10'sd1;
      end
    end
    r.man = m;
    return r;
  endfunction

  // FP16 conveniences for the Row PE datapath.
  function automatic fp16_t h_mul(input fp16_t a, input fp16_t b);
    return pack16(umul(unpack16(a), unpack16(b)));
  endfunction
  function automatic fp16_t h_add(input fp16_t a, input fp16_t b);
    return pack16(uadd(unpack16(a), unpack16(b)));
  endfunction
  function automatic fp16_t h_sub(input fp16_t a, input fp16_t b);
    return pack16(usub(unpack16(a), unpack16(b)));
  endfunction
  function automatic logic h_lt(input fp16_t a, input fp16_t b);
    return ult(unpack16(a), unpack16(b));
  endfunction

  // ------------------------------------------------------ shared records
  // Gaussian feature as kept in the reuse cache (Fig. "RD | Tag | Input
  // Features": c, o, ThetaA, ThetaB) plus its truncation threshold.
  // ThetaA is upper triangular: [m00 m01; 0 m11].  With it a pixel P maps to
  // P'' = ThetaA * P + ThetaB and one pixel step right moves P'' by (m00, 0).
  typedef struct packed {
    fp16_t [2:0] color;   // r, g, b
    fp16_t       opacity;
    fp16_t       th;      // truncation threshold on |P''|^2
    fp32_t       m00;
    fp32_t       m01;
    fp32_t       m11;
    fp32_t       v0;
    fp32_t       v1;
  } feature_t;            // 240 bits, stored in a 32-byte cache line

  localparam int unsigned FEAT_W = $bits(feature_t);

  // Projected 2D Gaussian as produced by the GPU (rendering steps 1 and 2).
  typedef struct packed {
    fp32_t       mean_x;
    fp32_t       mean_y;
    fp32_t       conic_a;   // inverse 2D covariance [a b; b c]
    fp32_t       conic_b;
    fp32_t       conic_c;
    fp16_t [2:0] color;
    fp16_t       opacity;
  } gauss2d_t;

  // Work item for one Row PE: one Gaussian on one pixel row, starting at
  // its first covered fragment.
  typedef struct packed {
    logic [TILE_LG-1:0] row_sel;  // which of the PE's rows
    logic [COL_W-1:0]  col;       // column of the first fragment
    fp16_t             x;         // x'' of the first fragment
    fp16_t             dx;        // x'' step per column
    fp16_t             y2;        // y''^2, constant along the row
    fp16_t             th;
    fp16_t             opacity;
    fp16_t [2:0]       color;
  } row_task_t;

  // Accumulated state of one pixel: colour and transmittance T.
  typedef struct packed {
    fp16_t [2:0] rgb;
    fp16_t       t;
  } pixel_t;

  localparam pixel_t PIXEL_INIT = '{rgb: '{FP16_ZERO, FP16_ZERO, FP16_ZERO}, t: FP16_ONE};

  // Reuse distance (in tiles) meaning "never used again".
  localparam logic [15:0] RD_NEVER = 16'hFFFF;

endpackage
