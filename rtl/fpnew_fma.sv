// fpnew_fma: fused multiply-add functional unit for one floating-point format.
//
// Computes (a * b) + c with a single rounding step, as required by IEEE
// 754-2008, plus the derived operations (all with one rounding):
//   FMADD  a*b+c   (op_mod: a*b-c)      FNMSUB -(a*b)+c (op_mod: -(a*b)-c)
//   ADD    a+b     (op_mod: a-b)        MUL    a*b
// ADD is computed as a*1.0+b and MUL as a*b+(-0), which gives the IEEE signs of
// zero results. The datapath is the single-path architecture: the exact 2p-bit
// product is kept at a fixed place of a 3p+4 bit adder; the p-bit addend is
// shifted against it (clamped at both ends, the bits shifted out below the
// adder collapse into a sticky bit); after the signed addition a leading-zero
// count normalises the sum, which is then rounded once by round_pack() of
// fpnew_pkg (all five rounding modes, subnormals, overflow, flags). Special
// operands (NaN, infinity, zero products) are handled beside the datapath; all
// NaN results are the canonical quiet NaN.
//
// The module is combinational. The pipeline registers of the ADDMUL block
// (4/3/3/3/2 cycles for FP64/FP32/FP16/FP16alt/FP8) are placed behind it by the
// enclosing slice, relying on register retiming in synthesis, as the FPU
// architecture foresees. Interface: three LSB-aligned operands of the format's
// width, operation, op_mod and rounding mode in; result and status flags out.
module fpnew_fma #(
  parameter fpnew_pkg::fp_format_e FpFormat = fpnew_pkg::FP64,
  localparam int unsigned W = fpnew_pkg::fp_width(FpFormat)
) (
  input  logic [2:0][W-1:0]       operands_i,
  input  fpnew_pkg::operation_e   op_i,
  input  logic                    op_mod_i,
  input  fpnew_pkg::roundmode_e   rnd_mode_i,
  output logic [W-1:0]            result_o,
  output fpnew_pkg::status_t      status_o
);
  import fpnew_pkg::*;

  localparam int          E    = exp_bits(FpFormat);
  localparam int          M    = man_bits(FpFormat);
  localparam int          P    = M + 1;          // precision
  localparam int          FW   = 3 * P + 4;      // adder width
  localparam int          NW   = FW + 1 + 64;    // normalisation window
  localparam int signed   BIAS = bias(FpFormat);

  logic [W-1:0] a, b, c;
  logic neg_prod, neg_c;

  // Operand adaptation per operation.
  always_comb begin
    a = operands_i[0];
    b = operands_i[1];
    c = operands_i[2];
    neg_prod = 1'b0;
    neg_c    = 1'b0;
    unique case (op_i)
      FMADD:  neg_c = op_mod_i;
      FNMSUB: begin neg_prod = 1'b1; neg_c = op_mod_i; end
      ADD: begin
        b     = W'(BIAS) << M;        // 1.0
        c     = operands_i[1];
        neg_c = op_mod_i;
      end
      MUL:    c = W'(1) << (W - 1);   // -0
      default: ;
    endcase
  end

  fp_info_t ia, ib, ic;
  assign ia = fp_info(FpFormat, 64'(a));
  assign ib = fp_info(FpFormat, 64'(b));
  assign ic = fp_info(FpFormat, 64'(c));

  logic sign_p, sign_c, eff_sub;
  assign sign_p  = ia.sign ^ ib.sign ^ neg_prod;
  assign sign_c  = ic.sign ^ neg_c;
  assign eff_sub = sign_p ^ sign_c;

  // ---------------------------------------------------------------------------
  // Datapath
  // ---------------------------------------------------------------------------
  logic [P-1:0]   ma, mb, mc;
  logic [2*P-1:0] prod;
  logic signed [SEXP-1:0] ea, eb, ec, lp, lc, d, sh;

  assign ma = {ia.exp[E-1:0] != 0, ia.man[M-1:0]};
  assign mb = {ib.exp[E-1:0] != 0, ib.man[M-1:0]};
  assign mc = {ic.exp[E-1:0] != 0, ic.man[M-1:0]};
  assign prod = ma * mb;

  // Unbiased exponents of the least significant mantissa bits.
  assign ea = SEXP'((ia.exp[E-1:0] == 0) ? 1 : int'(ia.exp[E-1:0])) - SEXP'(BIAS + M);
  assign eb = SEXP'((ib.exp[E-1:0] == 0) ? 1 : int'(ib.exp[E-1:0])) - SEXP'(BIAS + M);
  assign ec = SEXP'((ic.exp[E-1:0] == 0) ? 1 : int'(ic.exp[E-1:0])) - SEXP'(BIAS + M);
  assign lp = ea + eb;               // product LSB exponent
  assign lc = ec;                    // addend LSB exponent
  assign d  = lc - lp;               // addend position relative to product
  // Addend LSB goes to adder bit 2+d; the extended vector has P extra bits
  // below adder bit 0 for sticky collection.
  assign sh = ((d > SEXP'(2 * P + 2)) ? SEXP'(2 * P + 2) : d) + SEXP'(2 + P);

  // Weight of adder bit 0: the product LSB sits at bit 2, unless the addend
  // was clamped to the top of the adder, which then sets the reference.
  logic signed [SEXP-1:0] base_exp;
  assign base_exp = (d > SEXP'(2 * P + 2)) ? (lc - SEXP'(2 * P + 4)) : (lp - SEXP'(2));

  logic [FW+P-1:0] add_ext;
  logic [FW-1:0]   add_field, prod_field;
  logic            sticky_c;

  always_comb begin
    if (sh < 0) begin
      add_ext  = '0;
      sticky_c = (mc != 0);
    end else begin
      add_ext  = (FW+P)'(mc) << sh;
      sticky_c = (add_ext[P-1:0] != 0);
    end
    add_field  = add_ext[FW+P-1:P];
    prod_field = FW'(prod) << 2;
  end

  logic signed [FW+1:0] sum_s;
  logic [FW:0]          sum_mag;
  logic                 sum_sign;

  always_comb begin
    if (!eff_sub) begin
      sum_s    = (FW+2)'(prod_field) + (FW+2)'(add_field);
      sum_mag  = sum_s[FW:0];
      sum_sign = sign_p;
    end else begin
      sum_s = (FW+2)'(prod_field) - (FW+2)'(add_field) - (FW+2)'(sticky_c);
      if (sum_s < 0) begin
        sum_mag  = (FW+1)'(~sum_s + (FW+2)'(1) - (FW+2)'(sticky_c));
        sum_sign = sign_c;
      end else begin
        sum_mag  = sum_s[FW:0];
        sum_sign = sign_p;
      end
    end
  end

  // Normalisation.
  function automatic logic [7:0] lzc_sum(logic [FW:0] v);
    logic [7:0] n = 8'(FW + 1);
    for (int i = 0; i <= FW; i++)
      if (v[i]) n = 8'(FW - i);   // the highest set bit is assigned last
    return n;
  endfunction

  logic [NW-1:0]          norm_win;
  logic [63:0]            norm_mant;
  logic                   norm_sticky;
  logic signed [SEXP-1:0] norm_exp;
  logic [7:0]             lz;

  always_comb begin
    lz          = lzc_sum(sum_mag);
    norm_win    = {sum_mag, 64'd0} << lz;
    norm_mant   = norm_win[NW-1 -: 64];
    norm_sticky = sticky_c | (norm_win[NW-65:0] != 0);
    // MSB at adder bit FW-lz.
    norm_exp    = (sum_mag == 0) ? SEXP'(-16000) : (SEXP'(FW) - SEXP'(lz) + base_exp);
  end

  rounded_t rnd;
  assign rnd = round_pack(FpFormat, sum_sign, norm_exp, norm_mant, norm_sticky, rnd_mode_i);

  // ---------------------------------------------------------------------------
  // Special cases and result selection
  // ---------------------------------------------------------------------------
  logic prod_zero, prod_inf;
  assign prod_zero = (ia.is_zero || ib.is_zero);
  assign prod_inf  = (ia.is_inf || ib.is_inf);

  always_comb begin
    status_o = '0;
    if (ia.is_nan || ib.is_nan || ic.is_nan) begin
      result_o    = W'(canonical_nan(FpFormat));
      status_o.NV = ia.is_snan | ib.is_snan | ic.is_snan |
                    (prod_inf & prod_zero);
    end else if (prod_inf && prod_zero) begin
      result_o    = W'(canonical_nan(FpFormat));
      status_o.NV = 1'b1;
    end else if (prod_inf) begin
      if (ic.is_inf && eff_sub) begin
        result_o    = W'(canonical_nan(FpFormat));
        status_o.NV = 1'b1;
      end else begin
        result_o = W'(inf_value(FpFormat, sign_p));
      end
    end else if (ic.is_inf) begin
      result_o = W'(inf_value(FpFormat, sign_c));
    end else if (prod_zero) begin
      if (ic.is_zero)
        result_o = {(eff_sub ? (rnd_mode_i == RDN) : sign_p), (W-1)'(0)};
      else
        result_o = {sign_c, c[W-2:0]};
    end else if (sum_mag == 0 && !norm_sticky) begin
      // Exact cancellation.
      result_o = {(rnd_mode_i == RDN), (W-1)'(0)};
    end else begin
      result_o = rnd.value[W-1:0];
      status_o = rnd.status;
    end
  end

endmodule
