// fpnew_top: transprecision floating-point unit, top level.
//
// Up to three operands of the unit width (Width, 64 bit by default) enter per
// cycle together with the operation, its modifier, the rounding mode, the
// source/destination FP formats, the integer format, a SIMD flag and a tag.
// The operation selects one of four operation group blocks (ADDMUL: add,
// multiply, FMA; DIVSQRT: divide, square root; COMP: comparisons, min/max,
// sign injection, classify; CONV: conversions and cast-and-pack). Only the
// selected block sees the operands, the others see zeros (datapath silencing;
// with unchanged inputs and handshake-enabled registers, synthesis can gate
// their clocks). Each block returns results through a valid-ready handshake,
// and a fair round-robin arbiter merges the four result streams onto the one
// result output with its IEEE 754 status flags (NV, DZ, OF, UF, NX) and the
// tag of the operation. Because blocks have different latencies, results may
// leave in a different order than operations entered; the tag identifies
// them. busy_o is high while any operation is inside the unit, the hook for
// coarse clock gating of the whole unit.
//
// Configuration: UnitTypes and PipeRegs give, per operation group and format,
// the implementation (parallel slice, merged slice, disabled) and the number
// of cycles; the defaults are the 64-bit configuration of the paper's
// application-class core (ADDMUL parallel 4/3/3/3/2 cycles for
// FP64/FP32/FP16/FP16alt/FP8 with 1/2/4/4/8 lanes, DIVSQRT merged scalar,
// COMP parallel 1 cycle, CONV merged 2 cycles). iter_override_i, when
// non-zero, limits the number of divide/square-root iterations. The tag width
// and the enum encodings are this design's choice.
module fpnew_top #(
  parameter int unsigned                      Width         = 64,
  parameter bit                               EnableVectors = 1'b1,
  parameter fpnew_pkg::opgrp_fmt_unit_types_t UnitTypes     = fpnew_pkg::DEFAULT_UNIT_TYPES,
  parameter fpnew_pkg::opgrp_fmt_unsigned_t   PipeRegs      = fpnew_pkg::DEFAULT_PIPE_REGS,
  parameter int unsigned                      TagWidth      = 8
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

  opgroup_e                group;
  logic [NUM_OPGROUPS-1:0] b_in_ready, b_out_valid, b_out_ready, b_busy;
  out_t                    b_out [NUM_OPGROUPS];

  assign group = get_opgroup(op_i);

  for (genvar g = 0; g < NUM_OPGROUPS; g++) begin : g_block
    logic                  sel;
    logic [2:0][Width-1:0] ops;
    assign sel = in_valid_i && (group == opgroup_e'(g));
    assign ops = sel ? operands_i : '0;
    fpnew_opgroup_block #(
      .OpGroup       (opgroup_e'(g)),
      .Width         (Width),
      .EnableVectors (EnableVectors),
      .FmtUnitTypes  (UnitTypes[g]),
      .FmtPipeRegs   (PipeRegs[g]),
      .TagWidth      (TagWidth)
    ) i_block (
      .clk_i           (clk_i),
      .rst_ni          (rst_ni),
      .operands_i      (ops),
      .rnd_mode_i      (rnd_mode_i),
      .op_i            (op_i),
      .op_mod_i        (op_mod_i),
      .src_fmt_i       (src_fmt_i),
      .dst_fmt_i       (dst_fmt_i),
      .int_fmt_i       (int_fmt_i),
      .vectorial_op_i  (vectorial_op_i),
      .iter_override_i (iter_override_i),
      .tag_i           (tag_i),
      .in_valid_i      (sel),
      .in_ready_o      (b_in_ready[g]),
      .result_o        (b_out[g].result),
      .status_o        (b_out[g].status),
      .tag_o           (b_out[g].tag),
      .out_valid_o     (b_out_valid[g]),
      .out_ready_i     (b_out_ready[g]),
      .busy_o          (b_busy[g])
    );
  end

  assign in_ready_o = b_in_ready[group];

  out_t arb_out;
  logic [1:0] grant;
  fpnew_rr_arb #(.NumIn(NUM_OPGROUPS), .T(out_t)) i_arb (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (b_out_valid),
    .in_ready_o  (b_out_ready),
    .in_data_i   (b_out),
    .out_valid_o (out_valid_o),
    .out_ready_i (out_ready_i),
    .out_data_o  (arb_out),
    .grant_o     (grant)
  );
  assign result_o = arb_out.result;
  assign status_o = arb_out.status;
  assign tag_o    = arb_out.tag;
  assign busy_o   = |b_busy | out_valid_o;

endmodule
