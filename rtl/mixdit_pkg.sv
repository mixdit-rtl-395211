// mixdit_pkg -- types, constants and arithmetic helpers shared by the MixDiT
// accelerator RTL.
//
// MX groups. An MX group holds GROUP=16 values that share one 8-bit exponent.
// The group is split into subgroups of SUBGROUP=2 values; each subgroup carries
// a 1-bit microexponent that scales it down by one more power of two. Every
// element has a sign bit and an unsigned mantissa of 4 bits (MX6) or 7 bits
// (MX9). The value of element i is
//
//     (-1)^sign[i] * mant[i] * 2^(exp - 127 - mu[i/2] - (M - 1))
//
// with M = 4 (MX6) or 7 (MX9), so that a mantissa with its top bit set has
// magnitude in [1,2) times 2^(exp-127-mu). The group size, subgroup size and the
// field widths (8b shared exponent, 1b microexponent, 1b sign, 4b/7b mantissa)
// follow the paper; the bias of 127 and the placement of the binary point are
// this design's choice. In storage every mantissa occupies MANT_W=7 bits and an
// MX6 mantissa is held in the low 4 bits.
//
// Accumulators. A PE accumulates group dot products of different shared
// exponents, so its accumulator is a small floating-point number acc_t:
// value = m * 2^e with a 32-bit signed m kept normalised to bit ACC_W-3 after
// every addition. Results leave the array as IEEE-754 binary32 words
// (denormals flushed to zero, overflow saturated), which is what the output
// buffer holds and what the MX converter reads. The accumulator format and the
// binary32 output format are this design's choice; the paper does not give them.
package mixdit_pkg;

  localparam int GROUP     = 16;          // MX group size (paper)
  localparam int SUBGROUP  = 2;           // MX subgroup size (paper)
  localparam int NSUB      = GROUP / SUBGROUP;
  localparam int EXP_W     = 8;           // shared exponent width (paper, Fig. 2)
  localparam int MANT_W    = 7;           // stored mantissa width (MX9 width)
  localparam int MX6_MANT  = 4;           // MX6 mantissa bits (paper, Fig. 2)
  localparam int MX9_MANT  = 7;           // MX9 mantissa bits (paper, Fig. 2)
  localparam int EXP_BIAS  = 127;
  localparam int LANES     = 4;           // 4-bit multipliers per PE (paper)
  localparam int SA_DIM    = 16;          // systolic array is 16x16 PEs (paper)
  localparam int ACC_W     = 32;          // accumulator mantissa width
  localparam int ACC_EXP_W = 12;          // accumulator exponent width
  localparam int TERM_W    = 20;          // signed per-cycle PE term
  localparam int GSUM_W    = 26;          // signed group dot-product sum

  typedef enum logic {MX6 = 1'b0, MX9 = 1'b1} mx_prec_e;

  // One MX group as stored in the operand buffers and produced by the MX converter.
  typedef struct packed {
    mx_prec_e                       prec;
    logic [EXP_W-1:0]               exp;
    logic [NSUB-1:0]                mu;
    logic [GROUP-1:0]               sign;
    logic [GROUP-1:0][MANT_W-1:0]   mant;
  } mx_group_t;

  // One beat on a PE operand port. In narrow mode (MX6 x MX6) a beat carries
  // four elements, one per 4-bit multiplier; in wide mode (any MX9 operand) it
  // carries one element in lane 0.
  typedef struct packed {
    logic                           valid;
    logic                           first;   // first beat of a group
    logic                           last;    // last beat of a group
    logic                           wide;    // 8-bit multiplication mode
    mx_prec_e                       prec;    // format of this operand's group
    logic [EXP_W-1:0]               exp;     // shared exponent of the group
    logic [LANES-1:0]               sign;
    logic [LANES-1:0]               mu;
    logic [LANES-1:0][MANT_W-1:0]   mag;
  } pe_beat_t;

  // Floating accumulator: value = m * 2^e.
  typedef struct packed {
    logic signed [ACC_W-1:0]     m;
    logic signed [ACC_EXP_W-1:0] e;
  } acc_t;

  function automatic int mant_bits(mx_prec_e p);
    return (p == MX9) ? MX9_MANT : MX6_MANT;
  endfunction

  // Bring |m| to have its leading one at bit ACC_W-3 (zero stays zero, e=0).
  function automatic acc_t acc_norm(acc_t a);
    logic [ACC_W-1:0] mag;
    int               p;
    acc_t             r;
    mag = a.m[ACC_W-1] ? ACC_W'(-a.m) : ACC_W'(a.m);
    p = -1;
    for (int i = 0; i < ACC_W; i++)
      if (mag[i]) p = i;
    if (p < 0) begin
      r.m = '0;
      r.e = '0;
    end else if (p > ACC_W - 3) begin
      r.m = a.m >>> (p - (ACC_W - 3));
      r.e = a.e + ACC_EXP_W'(p - (ACC_W - 3));
    end else begin
      r.m = a.m <<< ((ACC_W - 3) - p);
      r.e = a.e - ACC_EXP_W'((ACC_W - 3) - p);
    end
    return r;
  endfunction

  // Floating add of b = bm * 2^be into a. Both operands are normalised, the
  // one with the smaller exponent is shifted right, and the sum (at most
  // 2^(ACC_W-1) in magnitude) cannot overflow.
  function automatic acc_t acc_add(acc_t a, logic signed [ACC_W-1:0] bm,
                                   logic signed [ACC_EXP_W-1:0] be);
    acc_t x, y, r;
    int   d;
    if (bm == '0) return a;
    y.m = bm;
    y.e = be;
    y = acc_norm(y);
    if (a.m == '0) return y;
    x = acc_norm(a);
    if (x.e >= y.e) begin
      d = int'(x.e) - int'(y.e);
      if (d >= ACC_W) y.m = y.m[ACC_W-1] ? '1 : '0;
      else            y.m = y.m >>> d;
      r.e = x.e;
    end else begin
      d = int'(y.e) - int'(x.e);
      if (d >= ACC_W) x.m = x.m[ACC_W-1] ? '1 : '0;
      else            x.m = x.m >>> d;
      r.e = y.e;
    end
    r.m = x.m + y.m;
    return r;
  endfunction

  // Accumulator to IEEE-754 binary32 (truncating; denormals flush to zero,
  // overflow saturates to the largest finite value).
  function automatic logic [31:0] acc_to_fp32(acc_t a);
    logic [ACC_W-1:0] mag;
    logic [ACC_W-1:0] al;
    int               p, fe;
    logic [22:0]      frac;
    mag = a.m[ACC_W-1] ? ACC_W'(-a.m) : ACC_W'(a.m);
    p = -1;
    for (int i = 0; i < ACC_W; i++)
      if (mag[i]) p = i;
    if (p < 0) return 32'h0;
    fe = int'(a.e) + p + EXP_BIAS;
    al = mag << (ACC_W - 1 - p);                // leading one at bit ACC_W-1
    frac = al[ACC_W-2 -: 23];
    if (fe <= 0) return 32'h0;
    if (fe >= 255) return {a.m[ACC_W-1], 8'hFE, 23'h7FFFFF};
    return {a.m[ACC_W-1], 8'(fe), frac};
  endfunction

endpackage
