// vita_pkg: types, constants and small arithmetic functions shared by the
// VitaLLM datapath.
//
// Array geometry (8x8) and the 2-bit ternary code (+1 = 2'b01, 0 = 2'b00,
// -1 = 2'b11) follow the paper. The radix-4 Booth digit table is the standard
// one for windows {y[2i+1], y[2i], y[2i-1]}. The fixed-point formats (raw
// values with 8 fractional bits, scales with 16, exponentials with 15), the
// base-2 exponential approximation and the score bucketing are this design's
// own choices; the paper does not give number formats for the nonlinear path.
package vita_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned ROWS  = 8;   // output rows of every array (Fig. 2/3/4)
  localparam int unsigned COLS  = 8;   // reduction columns of every array
  localparam int unsigned LANES = 8;   // elements per output tile ("8-element chunks")
  localparam int unsigned ACC_W = 32;  // accumulator width

  // ------------------------------------------------------- number formats
  localparam int unsigned RAW_F   = 8;   // fractional bits of dequantized (raw) values
  localparam int unsigned SCALE_W = 32;  // unsigned scale, SCALE_F fractional bits
  localparam int unsigned SCALE_F = 16;
  localparam int unsigned EXP_F   = 15;  // exp() results: 1.0 == 2**15
  localparam int unsigned RECIP_F = 40;  // fractional bits of the 127/absmax reciprocal (|x| <= absmax keeps |x|*recip < 2^47)

  // ---------------------------------------------------- leading-one features
  localparam int unsigned LO_W    = 3;   // LO(x) of an INT8 magnitude is 0..7
  localparam int unsigned SCORE_W = 24;  // signed LOP surrogate score

  typedef logic [1:0] tcode_t;           // ternary weight code

  typedef struct packed {
    logic            nz;   // x != 0 (a zero operand contributes no term)
    logic            neg;  // sgn(x) == -1
    logic [LO_W-1:0] lo;   // floor(log2 |x|), saturated to LO_W bits
  } lo_feat_t;

  typedef enum logic [1:0] {
    NL_ABSMAX  = 2'd0,   // plain absmax re-quantization
    NL_RMSNORM = 2'd1,   // sum of squares, then RMS normalization
    NL_SOFTMAX = 2'd2    // running max and sum of exponentials
  } nl_mode_e;

  typedef enum logic {
    BF_TERNARY = 1'b0,   // one Booth window per operand
    BF_INT8    = 1'b1    // five Booth windows per operand
  } bf_mode_e;

  // Ternary select: sel(w, a) in {0, +a, -a}.
  function automatic logic signed [8:0] tern_sel(input tcode_t w, input logic signed [7:0] a);
    unique case (w)
      2'b01:   return 9'(a);
      2'b11:   return -9'(a);
      default: return '0;   // 2'b00 and the unused 2'b10 both mean 0
    endcase
  endfunction

  // Radix-4 Booth digit of the window {y[2i+1], y[2i], y[2i-1]}.
  function automatic logic signed [2:0] booth_digit(input logic [2:0] win);
    unique case (win)
      3'b000, 3'b111: return 3'sd0;
      3'b001, 3'b010: return 3'sd1;
      3'b011:         return 3'sd2;
      3'b100:         return -3'sd2;
      default:        return -3'sd1;   // 3'b101, 3'b110
    endcase
  endfunction

  // Booth partial product r * m, built from shift and negate only.
  function automatic logic signed [10:0] booth_pp(input logic signed [2:0] r,
                                                  input logic signed [7:0] m);
    logic signed [10:0] mm;
    mm = 11'(m);
    unique case (r)
      3'sd1:   return mm;
      3'sd2:   return mm <<< 1;
      -3'sd1:  return -mm;
      -3'sd2:  return -(mm <<< 1);
      default: return '0;
    endcase
  endfunction

  // Leading-one detector for an INT8 operand: (nz, sgn, floor(log2|x|)).
  function automatic lo_feat_t lod8(input logic signed [7:0] x);
    lo_feat_t   f;
    logic [7:0] mag;
    logic [3:0] pos;
    mag = x[7] ? 8'(-x) : 8'(x);       // |-128| = 128 wraps to 8'h80, still correct
    pos = '0;
    for (int i = 0; i < 8; i++)
      if (mag[i]) pos = 4'(i);
    f.nz  = (x != 0);
    f.neg = x[7];
    f.lo  = (pos > 4'((1 << LO_W) - 1)) ? LO_W'((1 << LO_W) - 1) : LO_W'(pos);
    return f;
  endfunction

  // Position of the leading one of a positive value (0 for 0).
  function automatic logic [5:0] lead_one32(input logic [31:0] v);
    logic [5:0] p;
    p = '0;
    for (int i = 0; i < 32; i++)
      if (v[i]) p = 6'(i);
    return p;
  endfunction

  // 2**(d * log2 e) for d <= 0 given with RAW_F fractional bits; result has
  // EXP_F fractional bits. 2**(-n + f) is approximated by (1 + f) >> n.
  function automatic logic [EXP_F:0] exp_neg(input logic signed [31:0] d);
    logic signed [47:0] t;
    logic signed [39:0] ip;
    logic [RAW_F-1:0]   fr;
    logic [EXP_F:0]     mant;
    t    = (48'(d) * 48'sd23637) >>> 14;          // d * 1.44269 (log2 e)
    ip   = 40'(t >>> RAW_F);                      // floor, <= 0
    fr   = t[RAW_F-1:0];
    mant = (EXP_F+1)'((1 << RAW_F) + fr) << (EXP_F - RAW_F);
    if (d > 0)               return (EXP_F+1)'(1 << EXP_F);
    else if (ip < -40'sd15)  return '0;
    else                     return mant >> (-ip);
  endfunction

endpackage
