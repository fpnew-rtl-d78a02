// fpnew_cast_multi: multi-format conversion unit, one lane of the merged CONV
// slice.
//
// Converts between any two of the FP formats (F2F), from a signed or unsigned
// integer (INT8..INT64) to any FP format (I2F) and from any FP format to a
// signed or unsigned integer (F2I); op_mod selects unsigned integers. The
// source value is first brought to a common internal form (sign, unbiased
// exponent, 64-bit left-aligned mantissa; subnormal inputs are normalised by a
// leading-zero count), and a single rounding stage then produces the target:
// round_pack() of fpnew_pkg for FP targets, an integer rounding and saturation
// stage for integer targets. Special cases follow RISC-V: NaN inputs give the
// canonical NaN (FP) or the largest integer, out-of-range conversions saturate
// and raise NV, negative values to unsigned give 0 with NV unless they round
// to zero. Integer results are sign-extended to the lane width (as RISC-V
// does for 32-bit results in 64-bit registers).
//
// LaneWidth is the width of the lane; the formats a lane must serve are those
// no wider than it (the slice never routes wider ones to it). The internal
// datapath is 64 bit for every lane, a simplification of this design: the
// narrow lanes of the architecture would have a narrower datapath.
// Combinational; the slice adds the pipeline registers.
module fpnew_cast_multi #(
  parameter int unsigned LaneWidth = 64
) (
  input  logic [LaneWidth-1:0]    operand_i,
  input  fpnew_pkg::operation_e   op_i,       // F2F, F2I or I2F
  input  logic                    op_mod_i,   // unsigned integer
  input  fpnew_pkg::fp_format_e   src_fmt_i,
  input  fpnew_pkg::fp_format_e   dst_fmt_i,
  input  fpnew_pkg::int_format_e  int_fmt_i,
  input  fpnew_pkg::roundmode_e   rnd_mode_i,
  output logic [LaneWidth-1:0]    result_o,
  output fpnew_pkg::status_t      status_o
);
  import fpnew_pkg::*;

  logic [63:0] v;
  assign v = 64'(operand_i);

  fp_info_t    info;
  norm_t       nrm;
  rounded_t    f2f_r, i2f_r;
  logic [6:0]  iw;
  logic [63:0] imask;
  assign info  = fp_info(src_fmt_i, v);
  assign nrm   = normalize(src_fmt_i, v);
  assign iw    = 7'(int_width(int_fmt_i));
  assign imask = (iw >= 64) ? '1 : ((64'd1 << iw) - 64'd1);

  // Integer source: sign, magnitude, normalisation.
  logic        i_neg;
  logic [63:0] i_val, i_sx, i_mag, i_mant;
  logic [6:0]  i_lz;
  always_comb begin
    i_val  = v & imask;
    i_neg  = !op_mod_i && v[iw-1];
    i_sx   = i_val | (i_neg ? ~imask : 64'd0);
    i_mag  = i_neg ? (~i_sx + 64'd1) : i_val;
    i_lz   = lzc64(i_mag);
    i_mant = i_mag << i_lz;
  end
  assign f2f_r = round_pack(dst_fmt_i, info.sign, nrm.exp, nrm.mant, 1'b0, rnd_mode_i);
  assign i2f_r = round_pack(dst_fmt_i, i_neg, SEXP'(63) - SEXP'(signed'({9'd0, i_lz})), i_mant,
                            1'b0, rnd_mode_i);

  // FP to integer.
  logic [63:0] f_int, f_res;
  logic        f_rnd, f_stk, f_inc, f_big, f_nv;
  logic [64:0] f_mag;
  logic signed [15:0] s;
  always_comb begin
    f_int = '0; f_rnd = 1'b0; f_stk = 1'b0;
    f_big = nrm.exp >= 64;
    s     = 16'sd63 - nrm.exp;
    if (f_big) begin
      f_int = '1;
    end else if (s > 64) begin
      f_stk = 1'b1;
    end else begin
      f_int = (s == 64) ? 64'd0 : (nrm.mant >> s);
      f_rnd = (s >= 1) ? nrm.mant[s-1] : 1'b0;
      f_stk = (s >= 2) ? ((nrm.mant & ((64'd1 << (s - 1)) - 64'd1)) != 0) : 1'b0;
    end
    f_inc = round_inc(rnd_mode_i, info.sign, f_int[0], f_rnd, f_stk);
    f_mag = {1'b0, f_int} + 65'(f_inc);
    f_nv  = 1'b0;
    if (info.is_nan) begin
      f_nv  = 1'b1;
      f_res = op_mod_i ? imask : (imask >> 1);
    end else if (info.is_zero) begin
      f_res = '0;
    end else if (!op_mod_i) begin
      if (info.is_inf || f_big || (!info.sign && f_mag > 65'(imask >> 1)) ||
          (info.sign && f_mag > ({1'b0, imask >> 1} + 65'd1))) begin
        f_nv  = 1'b1;
        f_res = info.sign ? ((imask >> 1) + 64'd1) : (imask >> 1);
      end else begin
        f_res = info.sign ? (~f_mag[63:0] + 64'd1) : f_mag[63:0];
      end
    end else begin
      if (info.sign && (info.is_inf || f_big || f_mag != 0)) begin
        f_nv  = 1'b1;
        f_res = '0;
      end else if (info.is_inf || f_big || f_mag > 65'(imask)) begin
        f_nv  = 1'b1;
        f_res = imask;
      end else begin
        f_res = f_mag[63:0];
      end
    end
    // sign-extend from the integer width
    f_res = (f_res & imask) | ((f_res[iw-1]) ? ~imask : 64'd0);
  end

  logic [63:0] res64;
  always_comb begin
    status_o = '0;
    res64    = '0;
    unique case (op_i)
      I2F: begin
        if (i_mag == 0) res64 = '0;
        else begin
          res64    = i2f_r.value;
          status_o = i2f_r.status;
        end
      end
      F2I: begin
        res64       = f_res;
        status_o.NV = f_nv;
        status_o.NX = !f_nv && !info.is_zero && !info.is_inf && (f_rnd | f_stk);
      end
      default: begin // F2F (also used for cast-and-pack)
        if (info.is_nan) begin
          res64       = canonical_nan(dst_fmt_i);
          status_o.NV = info.is_snan;
        end else if (info.is_inf) begin
          res64 = inf_value(dst_fmt_i, info.sign);
        end else if (info.is_zero) begin
          res64 = 64'(info.sign) << (fp_width(dst_fmt_i) - 1);
        end else begin
          res64    = f2f_r.value;
          status_o = f2f_r.status;
        end
      end
    endcase
  end
  assign result_o = res64[LaneWidth-1:0];

endmodule
