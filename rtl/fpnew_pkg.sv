// fpnew_pkg: shared types, configuration and floating-point helper functions
// of the transprecision FPU.
//
// The unit supports five binary formats that all follow the IEEE 754-2008
// binary encoding (sign, biased exponent, fraction; exponent all-zero means
// subnormal/zero, all-one means infinity/NaN): FP64 (11,52), FP32 (8,23),
// FP16 (5,10), FP16alt (8,7, bfloat16-like but with full IEEE semantics) and
// FP8 (5,2). Formats, the list of operations, the operation groups and the
// per-group, per-format implementation choices (parallel slice, merged slice
// or disabled, and pipeline depth) are defined here so that every module
// shares them.
//
// The functions round_pack(), fp_info() and normalize() are the one place
// where packing, classification and IEEE rounding (all five rounding modes,
// gradual underflow, overflow to infinity or largest finite value, and the
// five exception flags) are described. Tininess is detected after rounding,
// as RISC-V requires. NaN results are the RISC-V canonical quiet NaN.
//
// The default configuration DEFAULT_* reproduces the FPU configuration used
// in the 64-bit application core (unit width 64 bit): ADDMUL parallel with
// latencies 4/3/3/3/2 for FP64/FP32/FP16/FP16alt/FP8, DIVSQRT one merged
// iterative scalar lane, COMP parallel with one cycle, CONV merged with two
// cycles. The numeric encodings of the enums are this design's own choice.
package fpnew_pkg;

  // ---------------------------------------------------------------------------
  // Formats
  // ---------------------------------------------------------------------------
  localparam int unsigned NUM_FP_FORMATS  = 5;
  localparam int unsigned NUM_INT_FORMATS = 4;
  localparam int unsigned FMT_BITS        = 3;
  localparam int unsigned INT_FMT_BITS    = 2;
  localparam int unsigned MAX_WIDTH       = 64;   // widest format
  localparam int unsigned SEXP            = 16;   // signed internal exponent width

  typedef enum logic [FMT_BITS-1:0] {
    FP32    = 3'd0,
    FP64    = 3'd1,
    FP16    = 3'd2,
    FP8     = 3'd3,
    FP16ALT = 3'd4
  } fp_format_e;

  typedef enum logic [INT_FMT_BITS-1:0] {
    INT8  = 2'd0,
    INT16 = 2'd1,
    INT32 = 2'd2,
    INT64 = 2'd3
  } int_format_e;

  function automatic int unsigned exp_bits(fp_format_e f);
    case (f)
      FP64:    return 11;
      FP32:    return 8;
      FP16:    return 5;
      FP16ALT: return 8;
      FP8:     return 5;
      default: return 8;
    endcase
  endfunction

  function automatic int unsigned man_bits(fp_format_e f);
    case (f)
      FP64:    return 52;
      FP32:    return 23;
      FP16:    return 10;
      FP16ALT: return 7;
      FP8:     return 2;
      default: return 23;
    endcase
  endfunction

  function automatic int unsigned fp_width(fp_format_e f);
    return 1 + exp_bits(f) + man_bits(f);
  endfunction

  function automatic int unsigned int_width(int_format_e f);
    case (f)
      INT8:    return 8;
      INT16:   return 16;
      INT32:   return 32;
      default: return 64;
    endcase
  endfunction

  function automatic int_format_e int_fmt_of_width(int unsigned w);
    if (w <= 8)  return INT8;
    if (w <= 16) return INT16;
    if (w <= 32) return INT32;
    return INT64;
  endfunction

  function automatic int signed bias(fp_format_e f);
    return (2 ** (exp_bits(f) - 1)) - 1;
  endfunction

  // ---------------------------------------------------------------------------
  // Operations, rounding modes, status flags
  // ---------------------------------------------------------------------------
  typedef enum logic [3:0] {
    FMADD    = 4'd0,  // a*b+c   (op_mod: a*b-c)
    FNMSUB   = 4'd1,  // -a*b+c  (op_mod: -a*b-c)
    ADD      = 4'd2,  // a+b     (op_mod: a-b)
    MUL      = 4'd3,  // a*b
    DIV      = 4'd4,  // a/b
    SQRT     = 4'd5,  // sqrt(a)
    SGNJ     = 4'd6,  // sign injection (rnd_mode selects J/JN/JX, RUP: move)
    MINMAX   = 4'd7,  // RNE: min, RTZ: max
    CMP      = 4'd8,  // RNE: le, RTZ: lt, RDN: eq (op_mod inverts)
    CLASSIFY = 4'd9,  // 10-bit class mask
    F2F      = 4'd10, // FP -> FP (vector: op_mod selects upper half)
    F2I      = 4'd11, // FP -> int (op_mod: unsigned)
    I2F      = 4'd12, // int -> FP (op_mod: unsigned)
    CPKAB    = 4'd13, // cast a,b and pack into elements 0,1
    CPKCD    = 4'd14  // cast a,b and pack into elements 2,3
  } operation_e;

  typedef enum logic [2:0] {
    RNE = 3'b000,
    RTZ = 3'b001,
    RDN = 3'b010,
    RUP = 3'b011,
    RMM = 3'b100
  } roundmode_e;

  typedef struct packed {
    logic NV; // invalid
    logic DZ; // divide by zero
    logic OF; // overflow
    logic UF; // underflow
    logic NX; // inexact
  } status_t;

  typedef enum logic [1:0] {
    ADDMUL  = 2'd0,
    DIVSQRT = 2'd1,
    NONCOMP = 2'd2,
    CONV    = 2'd3
  } opgroup_e;
  localparam int unsigned NUM_OPGROUPS = 4;

  function automatic opgroup_e get_opgroup(operation_e op);
    case (op)
      FMADD, FNMSUB, ADD, MUL:       return ADDMUL;
      DIV, SQRT:                     return DIVSQRT;
      SGNJ, MINMAX, CMP, CLASSIFY:   return NONCOMP;
      default:                       return CONV;
    endcase
  endfunction

  // ---------------------------------------------------------------------------
  // Configuration
  // ---------------------------------------------------------------------------
  typedef enum logic [1:0] {
    DISABLED = 2'd0,
    PARALLEL = 2'd1,
    MERGED   = 2'd2
  } unit_type_e;

  typedef unit_type_e [NUM_FP_FORMATS-1:0]              fmt_unit_types_t;
  typedef fmt_unit_types_t [NUM_OPGROUPS-1:0]           opgrp_fmt_unit_types_t;
  typedef logic [NUM_FP_FORMATS-1:0][7:0]               fmt_unsigned_t;
  typedef fmt_unsigned_t [NUM_OPGROUPS-1:0]             opgrp_fmt_unsigned_t;

  // Index order of the inner arrays is the fp_format_e value:
  //                      FP16ALT FP8   FP16  FP64  FP32
  localparam opgrp_fmt_unsigned_t DEFAULT_PIPE_REGS = '{
    '{8'd2, 8'd2, 8'd2, 8'd2, 8'd2},   // CONV
    '{8'd1, 8'd1, 8'd1, 8'd1, 8'd1},   // NONCOMP
    '{8'd0, 8'd0, 8'd0, 8'd0, 8'd0},   // DIVSQRT (latency set by the iterations)
    '{8'd3, 8'd2, 8'd3, 8'd4, 8'd3}    // ADDMUL
  };

  localparam opgrp_fmt_unit_types_t DEFAULT_UNIT_TYPES = '{
    '{MERGED,   MERGED,   MERGED,   MERGED,   MERGED},    // CONV
    '{PARALLEL, PARALLEL, PARALLEL, PARALLEL, PARALLEL},  // NONCOMP
    '{MERGED,   MERGED,   MERGED,   MERGED,   MERGED},    // DIVSQRT
    '{PARALLEL, PARALLEL, PARALLEL, PARALLEL, PARALLEL}   // ADDMUL
  };

  // Largest pipeline depth of the formats a merged slice holds.
  function automatic int unsigned max_merged_regs(fmt_unit_types_t types, fmt_unsigned_t regs);
    int unsigned r = 0;
    for (int f = 0; f < NUM_FP_FORMATS; f++)
      if (types[f] == MERGED && int'(regs[f]) > r) r = int'(regs[f]);
    return r;
  endfunction

  function automatic logic any_merged(fmt_unit_types_t types);
    for (int f = 0; f < NUM_FP_FORMATS; f++)
      if (types[f] == MERGED) return 1'b1;
    return 1'b0;
  endfunction

  // Number of lanes of a parallel slice: floor(w_fpu / w_f), or one without SIMD.
  function automatic int unsigned num_lanes(int unsigned width, fp_format_e f, logic vectors);
    return vectors ? width / fp_width(f) : 1;
  endfunction

  // Width of lane i (0-based) of a merged slice: the widest format with
  // w_f <= w_fpu/(i+1). With cast-and-pack, lane 1 is as wide as lane 0 so
  // that two scalars of the widest format can be converted at once.
  function automatic int unsigned merged_lane_width(int unsigned width, int unsigned i, logic cpk);
    int unsigned w = 0;
    int unsigned ii = (cpk && i == 1) ? 0 : i;
    for (int f = 0; f < NUM_FP_FORMATS; f++)
      if (fp_width(fp_format_e'(f)) <= width / (ii + 1) && fp_width(fp_format_e'(f)) > w)
        w = fp_width(fp_format_e'(f));
    return w;
  endfunction

  // ---------------------------------------------------------------------------
  // Value helpers (operands are LSB-aligned in a 64-bit word)
  // ---------------------------------------------------------------------------
  typedef struct packed {
    logic        sign;
    logic [10:0] exp;       // biased exponent field
    logic [51:0] man;       // fraction field
    logic        is_zero;
    logic        is_subnormal;
    logic        is_normal;
    logic        is_inf;
    logic        is_nan;
    logic        is_snan;
    logic        is_qnan;
  } fp_info_t;

  function automatic fp_info_t fp_info(fp_format_e f, logic [63:0] v);
    fp_info_t    r;
    int unsigned e = exp_bits(f);
    int unsigned m = man_bits(f);
    logic [63:0] emask = (64'd1 << e) - 64'd1;
    logic [63:0] mmask = (64'd1 << m) - 64'd1;
    logic [63:0] ex    = (v >> m) & emask;
    logic [63:0] mn    = v & mmask;
    r.sign         = v[e + m];
    r.exp          = ex[10:0];
    r.man          = mn[51:0];
    r.is_zero      = (ex == 0) && (mn == 0);
    r.is_subnormal = (ex == 0) && (mn != 0);
    r.is_normal    = (ex != 0) && (ex != emask);
    r.is_inf       = (ex == emask) && (mn == 0);
    r.is_nan       = (ex == emask) && (mn != 0);
    r.is_qnan      = r.is_nan && v[m - 1];
    r.is_snan      = r.is_nan && !v[m - 1];
    return r;
  endfunction

  // Leading zero count of a 64-bit word (64 for zero).
  function automatic logic [6:0] lzc64(logic [63:0] v);
    logic [6:0] n = 7'd64;
    for (int i = 0; i < 64; i++)
      if (v[i]) n = 7'(63 - i);   // the highest set bit is assigned last
    return n;
  endfunction

  typedef struct packed {
    logic signed [SEXP-1:0] exp;  // unbiased exponent of the integer bit
    logic [63:0]            mant; // bit 63 is the integer bit (1 unless zero)
  } norm_t;

  // Finite, non-zero value to (exponent, left-aligned mantissa).
  function automatic norm_t normalize(fp_format_e f, logic [63:0] v);
    norm_t       r;
    fp_info_t    i = fp_info(f, v);
    logic [63:0] fr;
    logic [6:0]  lz;
    // left-align the fraction, then normalise subnormal inputs
    fr = {12'd0, i.man} << (63 - man_bits(f));
    lz = lzc64(fr);
    if (i.exp != 0) begin
      r.mant = fr | (64'd1 << 63);
      r.exp  = SEXP'(signed'({5'd0, i.exp})) - SEXP'(bias(f));
    end else begin
      r.mant = fr << lz;
      r.exp  = SEXP'(1 - bias(f)) - SEXP'(signed'({9'd0, lz}));
    end
    return r;
  endfunction

  function automatic logic [63:0] canonical_nan(fp_format_e f);
    int unsigned e = exp_bits(f);
    int unsigned m = man_bits(f);
    return (((64'd1 << e) - 64'd1) << m) | (64'd1 << (m - 1));
  endfunction

  function automatic logic [63:0] inf_value(fp_format_e f, logic s);
    int unsigned e = exp_bits(f);
    int unsigned m = man_bits(f);
    return (64'(s) << (e + m)) | (((64'd1 << e) - 64'd1) << m);
  endfunction

  // Narrow values inside a wide register have all unused upper bits set.
  function automatic logic [63:0] nan_box(fp_format_e f, logic [63:0] v);
    int unsigned w = fp_width(f);
    logic [63:0] lo = (w >= 64) ? '1 : ((64'd1 << w) - 64'd1);
    return (v & lo) | ~lo;
  endfunction

  function automatic logic round_inc(roundmode_e rm, logic sign, logic lsb, logic rnd, logic stk);
    case (rm)
      RNE:     return rnd & (stk | lsb);
      RTZ:     return 1'b0;
      RDN:     return (rnd | stk) & sign;
      RUP:     return (rnd | stk) & ~sign;
      RMM:     return rnd;
      default: return 1'b0;
    endcase
  endfunction

  typedef struct packed {
    logic [63:0] value;   // LSB-aligned, upper bits zero
    status_t     status;
  } rounded_t;

  // Round a finite non-zero value sign * mant * 2^(exp-63) (mant[63] set, or
  // mant == 0 with sticky set for a value far below the smallest subnormal)
  // into format f.
  // Rounding and packing for format f; md/stk_d/den are the
  // mantissa, sticky bit and underflow flag after gradual denormalisation.
  function automatic rounded_t round_core_c(fp_format_e f, logic sign, logic signed [SEXP-1:0] exp,
                                            logic [63:0] mant, logic [63:0] md, logic stk_d,
                                            logic den, logic sticky_in, roundmode_e rm);
    rounded_t    r;
    int unsigned e      = exp_bits(f);
    int unsigned m      = man_bits(f);
    int signed   b      = bias(f);
    int signed   emin   = 1 - b;
    logic [63:0] emax   = (64'd1 << e) - 64'd1;
    logic        stk;
    logic [63:0] expf;
    logic [63:0] kept;
    logic        rnd, inc;
    logic [63:0] packed_mag, rounded;
    logic        of;
    logic [63:0] kept_f;
    logic        rnd_f, stk_f, inc_f, tiny;
    logic [63:0] maxf;

    expf = den ? 64'd0 : 64'(int'(exp) + b);
    kept = md >> (63 - m);
    rnd  = md[62 - m];
    stk  = stk_d | ((md & ((64'd1 << (62 - m)) - 64'd1)) != 0);
    inc  = round_inc(rm, sign, kept[0], rnd, stk);
    packed_mag = (expf << m) | (kept & ((64'd1 << m) - 64'd1));
    rounded    = packed_mag + 64'(inc);
    of = (expf >= emax) || ((rounded >> m) >= emax);

    // Tininess after rounding: below 2^emin even when rounded to full precision.
    kept_f = mant >> (63 - m);
    rnd_f  = mant[62 - m];
    stk_f  = sticky_in | ((mant & ((64'd1 << (62 - m)) - 64'd1)) != 0);
    inc_f  = round_inc(rm, sign, kept_f[0], rnd_f, stk_f);
    tiny   = den &&
             !((int'(exp) == emin - 1) && inc_f && (kept_f == ((64'd1 << (m + 1)) - 64'd1)));

    maxf = ((emax - 64'd1) << m) | ((64'd1 << m) - 64'd1);
    r.status = '0;
    if (of) begin
      r.status.OF = 1'b1;
      r.status.NX = 1'b1;
      if (rm == RTZ || (rm == RDN && !sign) || (rm == RUP && sign))
        r.value = (64'(sign) << (e + m)) | maxf;
      else
        r.value = inf_value(f, sign);
    end else begin
      r.value     = (64'(sign) << (e + m)) | rounded;
      r.status.NX = rnd | stk;
      r.status.UF = tiny & (rnd | stk);
    end
    return r;
  endfunction

  // Round a value given as sign, unbiased exponent of the integer bit and a
  // 64-bit mantissa (integer bit at 63) plus sticky bit to format f: gradual
  // underflow, all rounding modes, overflow, IEEE flags with tininess detected
  // after rounding.
  function automatic rounded_t round_pack(fp_format_e f, logic sign, logic signed [SEXP-1:0] exp,
                                          logic [63:0] mant, logic sticky_in, roundmode_e rm);
    rounded_t    r;
    int signed   emin = 1 - bias(f);
    int signed   shamt;
    logic [63:0] md;
    logic        stk, den;
    stk = sticky_in;
    den = int'(exp) < emin;
    md  = mant;
    if (den) begin
      shamt = emin - int'(exp);
      if (shamt >= 64) begin
        md  = '0;
        stk = stk | (mant != 0);
      end else begin
        md  = mant >> shamt;
        stk = stk | ((mant & ((64'd1 << shamt) - 64'd1)) != 0);
      end
    end
    r = round_core_c(f, sign, exp, mant, md, stk, den, sticky_in, rm);
    return r;
  endfunction

endpackage
