// fpnew_opgroup_multifmt_slice: merged multi-format slice of the CONV block.
//
// All conversions (FP-FP, int-FP, FP-int, cast-and-pack) go through one slice
// whose lanes differ in width. The number of lanes is set by the narrowest
// format, Width/8 = 8 for a 64-bit unit, and lane i (0-based) is as wide as
// the widest format with w_f <= Width/(i+1); lane 1 is widened to the widest
// format so that cast-and-pack can convert two scalars of it at once. For the
// default 64-bit unit this gives lanes of 64, 64, 16, 16, 8, 8, 8, 8 bit.
//
// Vector disassembly (format-dependent): a vectorial conversion handles
// n = Width / max(w_src, w_dst) elements, element i in lane i. When the
// destination is wider (e.g. 4 x FP8 -> FP16), op_mod selects the upper half
// of the source elements; when it is narrower, op_mod places the results in
// the upper half of the destination. Vectorial int conversions use integers
// of the FP element width. Cast-and-pack (CPKAB/CPKCD) converts the scalars a
// and b in lanes 0 and 1 and writes them to destination elements 0,1 or 2,3.
// Destination bits that an operation does not write are taken from operand c
// (the previous destination register). Scalar FP results are NaN-boxed,
// scalar integer results sign-extended. Status flags of active lanes are ORed.
// NumPipeRegs registers with valid-ready handshake follow the lanes.
module fpnew_opgroup_multifmt_slice #(
  parameter int unsigned Width       = 64,
  parameter int unsigned NumPipeRegs = 2,
  parameter int unsigned TagWidth    = 1
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

  localparam int unsigned NumLanes = Width / 8;

  typedef struct packed {
    logic [Width-1:0]    result;
    status_t             status;
    logic [TagWidth-1:0] tag;
  } out_t;

  logic          is_cpk, is_vec;
  logic [7:0]    ws, wd;
  logic [2:0]    wsl, wdl;             // log2 of the element widths (all powers of two)
  logic [3:0]    nelem, src_off, dst_off;
  int_format_e   lane_int_fmt;
  operation_e    lane_op;
  logic [63:0]   wsm, wdm;
  logic [NumLanes-1:0][63:0] lane_in;
  logic [NumLanes-1:0]       lane_act;

  // log2 of an element width (8, 16, 32 or 64 bits)
  function automatic logic [2:0] log2w(logic [7:0] w);
    unique case (w)
      8'd8:    return 3'd3;
      8'd16:   return 3'd4;
      8'd32:   return 3'd5;
      default: return 3'd6;
    endcase
  endfunction

  // Vector disassembly and lane silencing.
  always_comb begin
    is_cpk = (op_i == CPKAB) || (op_i == CPKCD);
    is_vec = vectorial_op_i && !is_cpk;
    if (op_i == I2F) ws = 8'(is_vec ? fp_width(dst_fmt_i) : int_width(int_fmt_i));
    else             ws = 8'(fp_width(src_fmt_i));
    if (op_i == F2I) wd = 8'(is_vec ? fp_width(src_fmt_i) : int_width(int_fmt_i));
    else             wd = 8'(fp_width(dst_fmt_i));
    lane_int_fmt = is_vec ? int_fmt_of_width((op_i == I2F) ? fp_width(dst_fmt_i)
                                                           : fp_width(src_fmt_i))
                          : int_fmt_i;
    lane_op = is_cpk ? F2F : op_i;
    wsl     = log2w(ws);
    wdl     = log2w(wd);
    nelem   = 4'(is_cpk ? 2 : (is_vec ? Width / ((ws > wd) ? ws : wd) : 1));
    src_off = (is_vec && op_i == F2F && ws < wd && op_mod_i) ? nelem : 0;
    dst_off = is_cpk ? ((op_i == CPKCD) ? 2 : 0)
                     : ((is_vec && op_i == F2F && wd < ws && op_mod_i) ? nelem : 0);
    wsm = (ws >= 64) ? '1 : ((64'd1 << ws) - 64'd1);
    wdm = (wd >= 64) ? '1 : ((64'd1 << wd) - 64'd1);
    for (int l = 0; l < NumLanes; l++) begin
      lane_act[l] = in_valid_i && (l < nelem);
      if (!lane_act[l])            lane_in[l] = '0;
      else if (is_cpk)             lane_in[l] = 64'(operands_i[l == 0 ? 0 : 1]) & wsm;
      else                         lane_in[l] = (64'(operands_i[0]) >> (10'(4'(l) + src_off) << wsl)) & wsm;
    end
  end

  logic [NumLanes-1:0][63:0] lane_res;
  status_t [NumLanes-1:0]    lane_st;

  for (genvar l = 0; l < NumLanes; l++) begin : g_lane
    localparam int unsigned LW = merged_lane_width(Width, l, 1'b1);
    logic [LW-1:0] r;
    fpnew_cast_multi #(.LaneWidth(LW)) i_cast (
      .operand_i  (lane_in[l][LW-1:0]),
      .op_i       (lane_op),
      .op_mod_i   (op_mod_i),
      .src_fmt_i  (src_fmt_i),
      .dst_fmt_i  (dst_fmt_i),
      .int_fmt_i  (lane_int_fmt),
      .rnd_mode_i (rnd_mode_i),
      .result_o   (r),
      .status_o   (lane_st[l])
    );
    assign lane_res[l] = 64'(r);
  end

  // Format-dependent vector assembly.
  out_t slice_out;
  always_comb begin
    logic [63:0] res;
    logic [9:0] pos;
    pos = '0;
    if (is_vec || is_cpk) begin
      res = 64'(operands_i[2]);
      for (int l = 0; l < NumLanes; l++) begin
        pos = 10'(4'(l) + dst_off) << wdl;
        if (l < nelem && 11'(pos) + 11'(wd) <= 11'(Width))
          res = (res & ~(wdm << pos)) | ((lane_res[l] & wdm) << pos);
      end
    end else if (op_i == F2I) begin
      res = lane_res[0];
    end else begin
      res = nan_box(dst_fmt_i, lane_res[0]);
    end
    slice_out.result = res[Width-1:0];
    slice_out.status = '0;
    for (int l = 0; l < NumLanes; l++)
      if (lane_act[l]) slice_out.status |= lane_st[l];
    slice_out.tag = tag_i;
  end

  out_t pipe_out;
  fpnew_pipe #(.NumRegs(NumPipeRegs), .T(out_t)) i_pipe (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (in_valid_i),
    .in_ready_o  (in_ready_o),
    .in_data_i   (slice_out),
    .out_valid_o (out_valid_o),
    .out_ready_i (out_ready_i),
    .out_data_o  (pipe_out),
    .busy_o      (busy_o)
  );
  assign result_o = pipe_out.result;
  assign status_o = pipe_out.status;
  assign tag_o    = pipe_out.tag;

endmodule
