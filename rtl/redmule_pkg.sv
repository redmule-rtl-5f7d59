// redmule_pkg: types, encodings and floating-point helper functions shared by
// the matrix engine.
//
// All arithmetic in the engine is FP16 (1 sign, 5 exponent, 10 mantissa bits,
// IEEE 754 binary16).  Inputs and outputs may also be stored as 8-bit hybrid
// formats: E4M3 {1,4,3} and E5M2 {1,5,2}; both use IEEE-style encodings here
// (bias 2^(E-1)-1, all-ones exponent = Inf/NaN), which is this design's choice.
//
// The functions below compute exactly: an operand is unpacked to a sign and an
// unsigned integer magnitude counted in units of 2^-50 (every FP16 product and
// every FP8/FP16 value is an exact multiple of that), the magnitudes are added
// as integers, and a single round-to-nearest-even packs the result.  This gives
// a correctly rounded fused multiply-add without a normalisation pipeline.
package redmule_pkg;

  localparam int unsigned FPW  = 16;   // internal precision (bits)
  localparam int unsigned MAGW = 84;   // magnitude width, LSB = 2^-50
  localparam int unsigned LSB_EXP = 50;

  localparam logic [15:0] FP16_QNAN = 16'h7E00;
  localparam logic [15:0] FP16_ONE  = 16'h3C00;
  localparam logic [15:0] FP16_NZERO = 16'h8000;

  // Storage format of a tensor in memory
  typedef enum logic [1:0] {
    FMT_FP16 = 2'd0,
    FMT_E4M3 = 2'd1,
    FMT_E5M2 = 2'd2
  } fmt_e;

  // "circle" operator: first CE stage
  typedef enum logic [1:0] {
    OP1_MUL = 2'd0,
    OP1_ADD = 2'd1,
    OP1_MIN = 2'd2,
    OP1_MAX = 2'd3
  } op1_e;

  // "star" operator: second CE stage (ADD means a plain GEMM through the FMA)
  typedef enum logic [1:0] {
    OP2_ADD = 2'd0,
    OP2_MIN = 2'd1,
    OP2_MAX = 2'd2
  } op2_e;

  // Job configuration written by the cores through the register file
  typedef struct packed {
    logic [31:0] x_addr;
    logic [31:0] w_addr;
    logic [31:0] y_addr;
    logic [31:0] z_addr;
    logic [15:0] m;       // rows of X, Y, Z
    logic [15:0] n;       // columns of X, rows of W (reduction)
    logic [15:0] k;       // columns of W, Y, Z
    op1_e        op1;
    op2_e        op2;
    fmt_e        x_fmt;
    fmt_e        w_fmt;
    fmt_e        y_fmt;
    fmt_e        z_fmt;
  } cfg_t;

  // Position of a datapath column in the tile schedule (one per step)
  typedef struct packed {
    logic       valid;   // a tile element is being processed
    logic       first;   // group 0 of the reduction: accumulator comes from Y
    logic       last;    // final group: column H-1 output is a finished Z
    logic       xbank;   // X buffer bank holding this group's X chunk
    logic       xlast;   // last group that reads this X chunk
    logic [7:0] xbase;   // index in the chunk of the X element of column 0
    logic [7:0] rows;    // useful rows of the tile (M leftovers)
    logic [7:0] k;       // output column inside the tile, 0 .. D-1
  } step_t;

  // Tile counts of a job, derived once from the configuration
  typedef struct packed {
    logic [15:0] mt;   // row tiles:     ceil(M / L)
    logic [15:0] kt;   // column tiles:  ceil(K / D), D = H*(P+1)
    logic [15:0] g;    // reduction groups per tile: ceil(N / H)
    logic [15:0] q;    // X chunks per tile: ceil(G / (P+1))
    logic [15:0] gh;   // W rows walked per tile, G*H (rows >= N are leftovers)
  } dims_t;

  function automatic dims_t calc_dims(cfg_t c, int unsigned L, int unsigned H, int unsigned P);
    dims_t d;
    d.mt = 16'((32'(c.m) + L - 1) / L);
    d.kt = 16'((32'(c.k) + H * (P + 1) - 1) / (H * (P + 1)));
    d.g  = 16'((32'(c.n) + H - 1) / H);
    d.q  = 16'((32'(d.g) + P) / (P + 1));
    d.gh = 16'(32'(d.g) * H);
    return d;
  endfunction

  // Useful rows of row tile `mt` (L, or fewer in the last tile)
  function automatic logic [15:0] tile_rows(logic [15:0] m, logic [15:0] mt, int unsigned L);
    int unsigned left;
    left = 32'(m) - 32'(mt) * L;
    return 16'((left < L) ? left : L);
  endfunction

  // Unpacked operand: class flags, sign, exact magnitude in units of 2^-50
  typedef struct packed {
    logic            nan;
    logic            inf;
    logic            sign;
    logic [MAGW-1:0] mag;
  } unp_t;

  function automatic int unsigned fmt_ew(fmt_e f);
    case (f)
      FMT_E4M3: return 4;
      FMT_E5M2: return 5;
      default:  return 5;
    endcase
  endfunction

  function automatic int unsigned fmt_mw(fmt_e f);
    case (f)
      FMT_E4M3: return 3;
      FMT_E5M2: return 2;
      default:  return 10;
    endcase
  endfunction

  function automatic int unsigned fmt_bytes(fmt_e f);
    return (f == FMT_FP16) ? 2 : 1;
  endfunction

  // Unpack an (1, ew, mw) value held in the low bits of `bits`
  function automatic unp_t fp_unpack(logic [15:0] bits, int unsigned ew, int unsigned mw);
    unp_t        u;
    int unsigned e, m, bias, emax;
    int          sh;
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 1;
    e    = (32'(bits) >> mw) & emax;
    m    = 32'(bits) & ((1 << mw) - 1);
    u.sign = bits[ew + mw];
    u.nan  = (e == emax) && (m != 0);
    u.inf  = (e == emax) && (m == 0);
    if (e != 0) m = m | (1 << mw);
    else        e = 1;
    // value = m * 2^(e - bias - mw), in units of 2^-50
    sh    = int'(e) - int'(bias) - int'(mw) + int'(LSB_EXP);
    u.mag = MAGW'(m) << sh;
    return u;
  endfunction

  // Round a magnitude (units of 2^-50) to nearest even and pack as (1, ew, mw)
  function automatic logic [15:0] fp_pack(logic sign, logic [MAGW-1:0] mag,
                                          int unsigned ew, int unsigned mw);
    int unsigned     bias, sublsb, sh, e;
    int              p;
    logic [MAGW-1:0] kept, rem, half;
    logic [31:0]     res, infv;
    bias   = (1 << (ew - 1)) - 1;
    sublsb = 1 - bias - mw + LSB_EXP;       // bit weight of the smallest subnormal
    infv   = ((1 << ew) - 1) << mw;
    p = -1;
    for (int i = 0; i < MAGW; i++) if (mag[i]) p = i;
    if (p < 0) return 16'(sign) << (ew + mw);
    sh   = (p - int'(mw) > int'(sublsb)) ? unsigned'(p - int'(mw)) : sublsb;
    kept = mag >> sh;
    rem  = mag & ((MAGW'(1) << sh) - 1);
    half = MAGW'(1) << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    e   = sh - sublsb + 1;                  // biased exponent for a normal result
    res = ((e - 1) << mw) + 32'(kept);      // carries into the exponent field as needed
    if (res >= infv) res = infv;
    return 16'((32'(sign) << (ew + mw)) | res);
  endfunction

  // Exact sign-magnitude addition
  function automatic unp_t mag_add(unp_t a, unp_t b);
    unp_t r;
    r = '0;
    if (a.sign == b.sign) begin
      r.sign = a.sign;
      r.mag  = a.mag + b.mag;
    end else if (a.mag >= b.mag) begin
      r.sign = a.sign;
      r.mag  = a.mag - b.mag;
    end else begin
      r.sign = b.sign;
      r.mag  = b.mag - a.mag;
    end
    // exact zero of opposite signs is +0 under round-to-nearest
    if (r.mag == '0) r.sign = a.sign & b.sign;
    return r;
  endfunction

  // FP16 fused multiply-add: a * b + c, one rounding
  function automatic logic [15:0] fp16_fma(logic [15:0] a, logic [15:0] b, logic [15:0] c);
    unp_t ua, ub, uc, up, us;
    int   ea, eb;
    ua = fp_unpack(a, 5, 10);
    ub = fp_unpack(b, 5, 10);
    uc = fp_unpack(c, 5, 10);
    if (ua.nan || ub.nan || uc.nan) return FP16_QNAN;
    if ((ua.inf && b[14:0] == '0) || (ub.inf && a[14:0] == '0)) return FP16_QNAN;
    if (ua.inf || ub.inf) begin
      if (uc.inf && (uc.sign != (a[15] ^ b[15]))) return FP16_QNAN;
      return {a[15] ^ b[15], 15'h7C00};
    end
    if (uc.inf) return c;
    // product of two magnitudes: (ma*2^(Ea-25)) * (mb*2^(Eb-25)) = ma*mb*2^(Ea+Eb-50)
    ea = (a[14:10] == 0) ? 1 : int'(a[14:10]);
    eb = (b[14:10] == 0) ? 1 : int'(b[14:10]);
    up.nan  = 1'b0;
    up.inf  = 1'b0;
    up.sign = a[15] ^ b[15];
    up.mag  = (MAGW'({|a[14:10], a[9:0]}) * MAGW'({|b[14:10], b[9:0]})) << (ea + eb);
    us = mag_add(up, uc);
    return fp_pack(us.sign, us.mag, 5, 10);
  endfunction

  // FP16 minimum / maximum (IEEE minNum/maxNum: a single NaN operand is ignored)
  function automatic logic [15:0] fp16_minmax(logic [15:0] a, logic [15:0] b, logic is_max);
    logic a_nan, b_nan, a_lt_b;
    a_nan = (a[14:10] == 5'h1F) && (a[9:0] != 0);
    b_nan = (b[14:10] == 5'h1F) && (b[9:0] != 0);
    if (a_nan && b_nan) return FP16_QNAN;
    if (a_nan) return b;
    if (b_nan) return a;
    // total order on sign-magnitude values, -0 < +0
    if (a[15] != b[15]) a_lt_b = a[15];
    else if (a[15])     a_lt_b = a[14:0] > b[14:0];
    else                a_lt_b = a[14:0] < b[14:0];
    return (a_lt_b ^ is_max) ? a : b;
  endfunction

  // Widening cast of an 8-bit value to FP16 (exact)
  function automatic logic [15:0] fp8_to_fp16(logic [7:0] v, fmt_e f);
    unp_t u;
    u = fp_unpack({8'h00, v}, fmt_ew(f), fmt_mw(f));
    if (u.nan) return FP16_QNAN;
    if (u.inf) return {u.sign, 15'h7C00};
    return fp_pack(u.sign, u.mag, 5, 10);
  endfunction

  // Narrowing cast of FP16 to an 8-bit format, round to nearest even
  function automatic logic [7:0] fp16_to_fp8(logic [15:0] v, fmt_e f);
    unp_t        u;
    int unsigned ew, mw;
    ew = fmt_ew(f);
    mw = fmt_mw(f);
    u  = fp_unpack(v, 5, 10);
    if (u.nan) return 8'((((1 << ew) - 1) << mw) | (1 << (mw - 1)));
    if (u.inf) return 8'((32'(u.sign) << 7) | (((1 << ew) - 1) << mw));
    return 8'(fp_pack(u.sign, u.mag, ew, mw));
  endfunction

endpackage
