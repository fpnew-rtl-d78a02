// fpnew_noncomp: comparison and bit-manipulation unit of the COMP block for
// one floating-point format (one vector lane of a parallel COMP slice).
//
// A single magnitude/sign comparator feeds selection logic for
//   SGNJ     sign injection: rnd_mode RNE = J (sign of b), RTZ = JN (inverted
//            sign of b), RDN = JX (xor of signs), RUP = plain move of a
//   MINMAX   RNE = minimum, RTZ = maximum; -0 < +0, a single NaN operand is
//            ignored, two NaNs give the canonical NaN, signalling NaN sets NV
//   CMP      RNE = a<=b, RTZ = a<b, RDN = a==b; op_mod inverts the answer;
//            NaN compares false, NV on any NaN for < and <=, on sNaN for ==
//   CLASSIFY 10-bit class mask (bit 0 -inf ... 7 +inf, 8 sNaN, 9 qNaN)
// following the RISC-V definitions of these operations. CMP and CLASSIFY
// produce an integer (int_result_o), the others a value of the format.
// The unit is combinational; the enclosing slice adds its pipeline register.
module fpnew_noncomp #(
  parameter fpnew_pkg::fp_format_e FpFormat = fpnew_pkg::FP64,
  localparam int unsigned W = fpnew_pkg::fp_width(FpFormat)
) (
  input  logic [1:0][W-1:0]      operands_i,
  input  fpnew_pkg::operation_e  op_i,
  input  logic                   op_mod_i,
  input  fpnew_pkg::roundmode_e  rnd_mode_i,
  output logic [W-1:0]           result_o,
  output logic [9:0]             int_result_o,
  output logic                   is_int_o,
  output fpnew_pkg::status_t     status_o
);
  import fpnew_pkg::*;

  logic [W-1:0] a, b;
  assign a = operands_i[0];
  assign b = operands_i[1];

  fp_info_t ia, ib;
  assign ia = fp_info(FpFormat, 64'(a));
  assign ib = fp_info(FpFormat, 64'(b));

  // Shared comparator (valid when neither operand is NaN).
  logic both_zero, mag_lt, a_lt_b, a_eq_b, a_before_b;
  assign both_zero = ia.is_zero && ib.is_zero;
  assign mag_lt    = a[W-2:0] < b[W-2:0];
  assign a_eq_b    = (a == b) || both_zero;
  always_comb begin
    if (ia.sign != ib.sign) a_lt_b = ia.sign && !both_zero;
    else if (!ia.sign)      a_lt_b = mag_lt;
    else                    a_lt_b = !mag_lt && (a != b);
  end
  // Ordering used by MINMAX, where -0 is taken as smaller than +0.
  assign a_before_b = (ia.sign != ib.sign) ? ia.sign : a_lt_b;

  logic any_nan, any_snan;
  assign any_nan  = ia.is_nan || ib.is_nan;
  assign any_snan = ia.is_snan || ib.is_snan;

  always_comb begin
    result_o     = a;
    int_result_o = '0;
    is_int_o     = 1'b0;
    status_o     = '0;
    unique case (op_i)
      SGNJ: begin
        unique case (rnd_mode_i)
          RNE:     result_o = {ib.sign, a[W-2:0]};
          RTZ:     result_o = {~ib.sign, a[W-2:0]};
          RDN:     result_o = {ia.sign ^ ib.sign, a[W-2:0]};
          default: result_o = a;
        endcase
      end
      MINMAX: begin
        status_o.NV = any_snan;
        if (ia.is_nan && ib.is_nan) result_o = W'(canonical_nan(FpFormat));
        else if (ia.is_nan)         result_o = b;
        else if (ib.is_nan)         result_o = a;
        else if (rnd_mode_i == RTZ) result_o = a_before_b ? b : a;   // max
        else                        result_o = a_before_b ? a : b;   // min
      end
      CMP: begin
        is_int_o = 1'b1;
        unique case (rnd_mode_i)
          RNE: begin status_o.NV = any_nan;  int_result_o[0] = !any_nan && (a_lt_b || a_eq_b); end
          RTZ: begin status_o.NV = any_nan;  int_result_o[0] = !any_nan && a_lt_b; end
          default: begin status_o.NV = any_snan; int_result_o[0] = !any_nan && a_eq_b; end
        endcase
        int_result_o[0] = int_result_o[0] ^ op_mod_i;
      end
      CLASSIFY: begin
        is_int_o     = 1'b1;
        int_result_o = {ia.is_qnan, ia.is_snan,
                        ia.is_inf && !ia.sign, ia.is_normal && !ia.sign,
                        ia.is_subnormal && !ia.sign, ia.is_zero && !ia.sign,
                        ia.is_zero && ia.sign, ia.is_subnormal && ia.sign,
                        ia.is_normal && ia.sign, ia.is_inf && ia.sign};
      end
      default: ;
    endcase
  end

endmodule
