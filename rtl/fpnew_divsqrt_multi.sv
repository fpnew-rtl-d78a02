// fpnew_divsqrt_multi: iterative multi-format division and square root, the
// merged scalar slice of the DIVSQRT block.
//
// One datapath serves all five formats. Pre-processing (in the cycle the
// operation is accepted) normalises the operands, scales the dividend so that
// the quotient lies in [1,2) (for square root, the radicand is doubled when the
// exponent is odd), and resolves special operands. The iterative part then
// produces three result bits per clock cycle: division uses a non-restoring
// recurrence (partial remainder +/- divisor, quotient bit = sign of the new
// remainder, final remainder correction), square root the restoring
// digit-by-digit recurrence. ceil(p/3) iterations (p = precision incl. hidden
// bit) give p bits after the leading 1, i.e. the p-bit result and its round
// bit; the remainder gives the sticky bit. Two post-processing cycles
// normalise and round (round_pack of fpnew_pkg). The latency is therefore
// 3 + ceil(p/3) cycles: 21 (FP64), 11 (FP32), 7 (FP16), 6 (FP16alt), 4 (FP8).
// A non-zero iter_override_i smaller than this number stops the iterations
// earlier, trading accuracy for latency (missing bits read as zero).
//
// The unit is blocking: in_ready_o is high only when it is idle or its result
// is being taken. Interface: valid-ready handshake in and out, two operands,
// operation DIV or SQRT, format, rounding mode, a tag that travels with the
// operation; the result is NaN-boxed to 64 bit. The choice of a restoring
// square root next to the non-restoring divider is this design's own.
module fpnew_divsqrt_multi #(
  parameter int unsigned TagWidth = 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [1:0][63:0]       operands_i,
  input  fpnew_pkg::operation_e  op_i,
  input  fpnew_pkg::fp_format_e  fmt_i,
  input  fpnew_pkg::roundmode_e  rnd_mode_i,
  input  logic [4:0]             iter_override_i,
  input  logic [TagWidth-1:0]    tag_i,
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  output logic [63:0]            result_o,
  output fpnew_pkg::status_t     status_o,
  output logic [TagWidth-1:0]    tag_o,
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic                   busy_o
);
  import fpnew_pkg::*;

  localparam int unsigned FR = 56;   // fraction bits of the square-root remainder

  typedef enum logic [2:0] {IDLE, ITER, POST1, POST2, DONE} state_e;
  state_e state_q;

  // Registered operation state.
  logic                   is_sqrt_q, sign_q, spec_q;
  fp_format_e             fmt_q;
  roundmode_e             rm_q;
  logic [TagWidth-1:0]    tag_q;
  logic signed [SEXP-1:0] exp_q;
  logic [63:0]            spec_res_q;
  status_t                spec_st_q;
  logic signed [55:0]     rem_q;      // division partial remainder
  logic [52:0]            div_q;      // divisor
  logic [61:0]            srem_q;     // square-root remainder (FR fraction bits)
  logic [63:0]            q_q;        // result bits, LSB = newest
  logic [4:0]             cnt_q, niter_q;
  logic [63:0]            mant_q;
  logic                   sticky_q;
  logic [63:0]            res_q;
  status_t                st_q;

  // ---------------------------------------------------------------------------
  // Pre-processing (combinational on the inputs)
  // ---------------------------------------------------------------------------
  fp_info_t ia, ib;
  norm_t    na, nb;
  assign ia = fp_info(fmt_i, operands_i[0]);
  assign ib = fp_info(fmt_i, operands_i[1]);
  assign na = normalize(fmt_i, operands_i[0]);
  assign nb = normalize(fmt_i, operands_i[1]);

  logic [52:0]            pa, pb;
  logic                   a_lt_b;
  logic signed [SEXP-1:0] pre_exp;
  logic signed [55:0]     pre_rem;
  logic [61:0]            pre_srem;
  logic                   pre_sign, pre_spec;
  logic [63:0]            pre_spec_res;
  status_t                pre_spec_st;
  logic [4:0]             nfull, pre_niter;

  always_comb begin
    pa     = na.mant[63:11];
    pb     = nb.mant[63:11];
    a_lt_b = pa < pb;
    nfull  = 5'((man_bits(fmt_i) + 1 + 2) / 3);
    pre_niter = (iter_override_i != 0 && iter_override_i < nfull) ? iter_override_i : nfull;
    pre_rem  = '0;
    pre_srem = '0;
    if (op_i == SQRT) begin
      pre_sign = ia.sign;
      pre_exp  = $signed(na.exp - $signed(SEXP'(na.exp[0]))) >>> 1;
      // radicand in [1,4) with FR fraction bits, minus the leading root bit 1
      pre_srem = (na.exp[0] ? (62'(pa) << (FR - 52 + 1)) : (62'(pa) << (FR - 52)))
                 - (62'd1 << FR);
    end else begin
      pre_sign = ia.sign ^ ib.sign;
      pre_exp  = na.exp - nb.exp - SEXP'(a_lt_b);
      pre_rem  = a_lt_b ? (56'(pa) << 1) - 56'(pb) : 56'(pa) - 56'(pb);
    end
    // special operands
    pre_spec     = 1'b1;
    pre_spec_st  = '0;
    pre_spec_res = '0;
    if (op_i == SQRT) begin
      if (ia.is_nan) begin
        pre_spec_res = canonical_nan(fmt_i); pre_spec_st.NV = ia.is_snan;
      end else if (ia.is_zero) begin
        pre_spec_res = operands_i[0];
      end else if (ia.sign) begin
        pre_spec_res = canonical_nan(fmt_i); pre_spec_st.NV = 1'b1;
      end else if (ia.is_inf) begin
        pre_spec_res = inf_value(fmt_i, 1'b0);
      end else pre_spec = 1'b0;
    end else begin
      if (ia.is_nan || ib.is_nan) begin
        pre_spec_res = canonical_nan(fmt_i); pre_spec_st.NV = ia.is_snan | ib.is_snan;
      end else if ((ia.is_inf && ib.is_inf) || (ia.is_zero && ib.is_zero)) begin
        pre_spec_res = canonical_nan(fmt_i); pre_spec_st.NV = 1'b1;
      end else if (ia.is_inf) begin
        pre_spec_res = inf_value(fmt_i, pre_sign);
      end else if (ib.is_zero) begin
        pre_spec_res = inf_value(fmt_i, pre_sign); pre_spec_st.DZ = 1'b1;
      end else if (ia.is_zero || ib.is_inf) begin
        pre_spec_res = 64'(pre_sign) << (fp_width(fmt_i) - 1);
      end else pre_spec = 1'b0;
    end
  end

  // ---------------------------------------------------------------------------
  // Iteration: three result bits per cycle
  // ---------------------------------------------------------------------------
  logic signed [55:0] it_rem;
  logic [61:0]        it_srem, t;
  logic [63:0]        it_q;
  logic [6:0]         i;
  always_comb begin
    it_rem  = rem_q;
    it_srem = srem_q;
    it_q    = q_q;
    i       = 0;
    t       = '0;
    for (int k = 0; k < 3; k++) begin
      if (!is_sqrt_q) begin
        if (it_rem >= 0) it_rem = (it_rem <<< 1) - 56'(div_q);
        else             it_rem = (it_rem <<< 1) + 56'(div_q);
        it_q = {it_q[62:0], it_rem >= 0};
      end else begin
        i = 7'(3 * int'(cnt_q) + k);   // fraction bits of the root so far
        t = (62'(it_q) << (FR - i + 1)) + (62'd1 << (FR - i - 1));
        if ((it_srem << 1) >= t) begin
          it_srem = (it_srem << 1) - t;
          it_q    = {it_q[62:0], 1'b1};
        end else begin
          it_srem = it_srem << 1;
          it_q    = {it_q[62:0], 1'b0};
        end
      end
    end
  end

  // ---------------------------------------------------------------------------
  // Post-processing
  // ---------------------------------------------------------------------------
  logic signed [55:0] rem_fix;
  assign rem_fix = (rem_q < 0) ? rem_q + 56'(div_q) : rem_q;

  rounded_t rnd;
  assign rnd = round_pack(fmt_q, sign_q, exp_q, mant_q, sticky_q, rm_q);

  logic accept;
  assign in_ready_o  = (state_q == IDLE) || (state_q == DONE && out_ready_i);
  assign accept      = in_valid_i && in_ready_o;
  assign out_valid_o = (state_q == DONE);
  assign result_o    = res_q;
  assign status_o    = st_q;
  assign tag_o       = tag_q;
  assign busy_o      = (state_q != IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= IDLE;
    else begin
      unique case (state_q)
        IDLE:  if (accept) state_q <= ITER;
        ITER:  if (cnt_q == niter_q - 5'd1) state_q <= POST1;
        POST1: state_q <= POST2;
        POST2: state_q <= DONE;
        DONE:  if (accept) state_q <= ITER;
                else if (out_ready_i) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (accept) begin
      is_sqrt_q  <= (op_i == SQRT);
      sign_q     <= pre_sign;
      spec_q     <= pre_spec;
      spec_res_q <= pre_spec_res;
      spec_st_q  <= pre_spec_st;
      fmt_q      <= fmt_i;
      rm_q       <= rnd_mode_i;
      tag_q      <= tag_i;
      exp_q      <= pre_exp;
      rem_q      <= pre_rem;
      div_q      <= pb;
      srem_q     <= pre_srem;
      q_q        <= 64'd1;
      cnt_q      <= '0;
      niter_q    <= pre_niter;
    end else if (state_q == ITER) begin
      rem_q  <= it_rem;
      srem_q <= it_srem;
      q_q    <= it_q;
      cnt_q  <= cnt_q + 5'd1;
    end else if (state_q == POST1) begin
      mant_q   <= q_q << (63 - 3 * int'(niter_q));
      sticky_q <= is_sqrt_q ? (srem_q != 0) : (rem_fix != 0);
    end else if (state_q == POST2) begin
      res_q <= nan_box(fmt_q, spec_q ? spec_res_q : rnd.value);
      st_q  <= spec_q ? spec_st_q : rnd.status;
    end
  end

  // Handshake rule: a result stays offered until taken.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(result_o)));

endmodule
