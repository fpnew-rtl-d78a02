// fpnew_opgroup_block: one operation group block of the FPU (ADDMUL, DIVSQRT,
// COMP or CONV).
//
// The block distributes an incoming operation to the slice that hosts its
// format and silences the operands of all other slices (their inputs are held
// at zero). For ADDMUL and COMP every enabled format has its own parallel
// slice (fpnew_opgroup_fmt_slice) with its own pipeline depth; the format is
// taken from dst_fmt_i. The DIVSQRT block consists of the merged iterative
// scalar unit (fpnew_divsqrt_multi), the CONV block of the merged multi-format
// slice (fpnew_opgroup_multifmt_slice), whose depth is the largest one
// configured for its formats. Slice outputs, which may complete in the same
// cycle because their latencies differ, are merged by a fair round-robin
// arbiter (fpnew_rr_arb); a slice that loses arbitration stalls through its
// valid-ready handshake. An operation on a format that is disabled in the
// block is not accepted (in_ready_o stays low).
module fpnew_opgroup_block #(
  parameter fpnew_pkg::opgroup_e        OpGroup       = fpnew_pkg::ADDMUL,
  parameter int unsigned                Width         = 64,
  parameter bit                         EnableVectors = 1'b1,
  parameter fpnew_pkg::fmt_unit_types_t FmtUnitTypes  = fpnew_pkg::DEFAULT_UNIT_TYPES[fpnew_pkg::ADDMUL],
  parameter fpnew_pkg::fmt_unsigned_t   FmtPipeRegs   = fpnew_pkg::DEFAULT_PIPE_REGS[fpnew_pkg::ADDMUL],
  parameter int unsigned                TagWidth      = 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [2:0][Width-1:0]  operands_i,
  input  fpnew_pkg::roundmode_e  rnd_mode_i,
  input  fpnew_pkg::operation_e  op_i,
  input  logic                   op_mod_i,
  input  fpnew_pkg::fp_format_e  src_fmt_i,
  input  fpnew_pkg::fp_format_e  dst_fmt_i,
  input  fpnew_pkg::int_format_e int_fmt_i,
  input  logic                   vectorial_op_i,
  input  logic [4:0]             iter_override_i,
  input  logic [TagWidth-1:0]    tag_i,
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  output logic [Width-1:0]       result_o,
  output fpnew_pkg::status_t     status_o,
  output logic [TagWidth-1:0]    tag_o,
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic                   busy_o
);
  import fpnew_pkg::*;

  typedef struct packed {
    logic [Width-1:0]    result;
    status_t             status;
    logic [TagWidth-1:0] tag;
  } out_t;

  if (OpGroup == ADDMUL || OpGroup == NONCOMP) begin : g_parallel
    logic [NUM_FP_FORMATS-1:0] s_in_ready, s_out_valid, s_out_ready, s_busy;
    out_t                      s_out [NUM_FP_FORMATS];

    for (genvar f = 0; f < NUM_FP_FORMATS; f++) begin : g_fmt
      if (FmtUnitTypes[f] == PARALLEL) begin : g_slice
        logic               sel;
        logic [2:0][Width-1:0] ops;
        assign sel = in_valid_i && (dst_fmt_i == fp_format_e'(f));
        assign ops = sel ? operands_i : '0;
        fpnew_opgroup_fmt_slice #(
          .OpGroup       (OpGroup),
          .FpFormat      (fp_format_e'(f)),
          .Width         (Width),
          .EnableVectors (EnableVectors),
          .NumPipeRegs   (int'(FmtPipeRegs[f])),
          .TagWidth      (TagWidth)
        ) i_slice (
          .clk_i          (clk_i),
          .rst_ni         (rst_ni),
          .operands_i     (ops),
          .rnd_mode_i     (rnd_mode_i),
          .op_i           (op_i),
          .op_mod_i       (op_mod_i),
          .vectorial_op_i (vectorial_op_i),
          .tag_i          (tag_i),
          .in_valid_i     (sel),
          .in_ready_o     (s_in_ready[f]),
          .result_o       (s_out[f].result),
          .status_o       (s_out[f].status),
          .tag_o          (s_out[f].tag),
          .out_valid_o    (s_out_valid[f]),
          .out_ready_i    (s_out_ready[f]),
          .busy_o         (s_busy[f])
        );
      end else begin : g_off
        assign s_in_ready[f]  = 1'b0;
        assign s_out_valid[f] = 1'b0;
        assign s_out[f]       = '0;
        assign s_busy[f]      = 1'b0;
      end
    end

    assign in_ready_o = s_in_ready[dst_fmt_i];

    out_t arb_out;
    logic [$clog2(NUM_FP_FORMATS)-1:0] grant;
    fpnew_rr_arb #(.NumIn(NUM_FP_FORMATS), .T(out_t)) i_arb (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .in_valid_i  (s_out_valid),
      .in_ready_o  (s_out_ready),
      .in_data_i   (s_out),
      .out_valid_o (out_valid_o),
      .out_ready_i (out_ready_i),
      .out_data_o  (arb_out),
      .grant_o     (grant)
    );
    assign result_o = arb_out.result;
    assign status_o = arb_out.status;
    assign tag_o    = arb_out.tag;
    assign busy_o   = |s_busy;

  end else if (OpGroup == DIVSQRT) begin : g_divsqrt
    logic [63:0] res;
    fpnew_divsqrt_multi #(.TagWidth(TagWidth)) i_divsqrt (
      .clk_i           (clk_i),
      .rst_ni          (rst_ni),
      .operands_i      (in_valid_i ? {64'(operands_i[1]), 64'(operands_i[0])} : 128'd0),
      .op_i            (op_i),
      .fmt_i           (dst_fmt_i),
      .rnd_mode_i      (rnd_mode_i),
      .iter_override_i (iter_override_i),
      .tag_i           (tag_i),
      .in_valid_i      (in_valid_i),
      .in_ready_o      (in_ready_o),
      .result_o        (res),
      .status_o        (status_o),
      .tag_o           (tag_o),
      .out_valid_o     (out_valid_o),
      .out_ready_i     (out_ready_i),
      .busy_o          (busy_o)
    );
    assign result_o = Width'(res);

  end else begin : g_conv
    fpnew_opgroup_multifmt_slice #(
      .Width       (Width),
      .NumPipeRegs (max_merged_regs(FmtUnitTypes, FmtPipeRegs)),
      .TagWidth    (TagWidth)
    ) i_slice (
      .clk_i          (clk_i),
      .rst_ni         (rst_ni),
      .operands_i     (in_valid_i ? operands_i : '0),
      .rnd_mode_i     (rnd_mode_i),
      .op_i           (op_i),
      .op_mod_i       (op_mod_i),
      .src_fmt_i      (src_fmt_i),
      .dst_fmt_i      (dst_fmt_i),
      .int_fmt_i      (int_fmt_i),
      .vectorial_op_i (vectorial_op_i),
      .tag_i          (tag_i),
      .in_valid_i     (in_valid_i),
      .in_ready_o     (in_ready_o),
      .result_o       (result_o),
      .status_o       (status_o),
      .tag_o          (tag_o),
      .out_valid_o    (out_valid_o),
      .out_ready_i    (out_ready_i),
      .busy_o         (busy_o)
    );
  end

endmodule
