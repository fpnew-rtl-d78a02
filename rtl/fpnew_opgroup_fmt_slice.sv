// fpnew_opgroup_fmt_slice: parallel (format-specific) slice of an operation
// group block, for the ADDMUL and COMP groups.
//
// The slice hosts NumLanes = floor(Width / w_f) identical vector lanes of one
// format (one lane without SIMD). Lane i works on bits [i*w_f +: w_f] of the
// operands (fixed wiring). A scalar operation uses lane 0 only; the operands of
// the lanes that do not take part, and of the whole slice when it is not
// selected, are forced to zero so that they do not toggle. The lane results
// are packed back by the same fixed wiring; a scalar FP result is NaN-boxed
// (unused upper bits set), a scalar integer result (compare, classify) is
// zero-extended. Status flags of the active lanes are ORed. The NumPipeRegs
// pipeline registers of the slice sit behind the lanes (fpnew_pipe, valid-ready
// handshake), all lanes share one handshake.
module fpnew_opgroup_fmt_slice #(
  parameter fpnew_pkg::opgroup_e   OpGroup       = fpnew_pkg::ADDMUL,
  parameter fpnew_pkg::fp_format_e FpFormat      = fpnew_pkg::FP32,
  parameter int unsigned           Width         = 64,
  parameter bit                    EnableVectors = 1'b1,
  parameter int unsigned           NumPipeRegs   = 3,
  parameter int unsigned           TagWidth      = 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [2:0][Width-1:0]  operands_i,
  input  fpnew_pkg::roundmode_e  rnd_mode_i,
  input  fpnew_pkg::operation_e  op_i,
  input  logic                   op_mod_i,
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

  localparam int unsigned FW       = fp_width(FpFormat);
  localparam int unsigned NumLanes = num_lanes(Width, FpFormat, EnableVectors);

  typedef struct packed {
    logic [Width-1:0]    result;
    status_t             status;
    logic [TagWidth-1:0] tag;
  } out_t;

  logic [NumLanes-1:0][FW-1:0] lane_res;
  status_t [NumLanes-1:0]      lane_st;
  logic [9:0]                  lane0_int;
  logic                        lane0_is_int;
  logic [NumLanes-1:0][FW-1:0] lane_int;

  for (genvar l = 0; l < NumLanes; l++) begin : g_lane
    logic              active;
    logic [2:0][FW-1:0] ops;
    assign active = in_valid_i && (l == 0 || vectorial_op_i);
    assign ops    = active ? {operands_i[2][l*FW +: FW], operands_i[1][l*FW +: FW],
                              operands_i[0][l*FW +: FW]} : '0;
    if (OpGroup == ADDMUL) begin : g_fma
      status_t st;
      fpnew_fma #(.FpFormat(FpFormat)) i_fma (
        .operands_i (ops),
        .op_i       (op_i),
        .op_mod_i   (op_mod_i),
        .rnd_mode_i (rnd_mode_i),
        .result_o   (lane_res[l]),
        .status_o   (st)
      );
      assign lane_st[l]  = active ? st : '0;
      assign lane_int[l] = lane_res[l];
      if (l == 0) begin : g_l0
        assign lane0_int    = '0;
        assign lane0_is_int = 1'b0;
      end
    end else begin : g_cmp
      status_t    st;
      logic [9:0] ires;
      logic       is_int;
      fpnew_noncomp #(.FpFormat(FpFormat)) i_noncomp (
        .operands_i   (ops[1:0]),
        .op_i         (op_i),
        .op_mod_i     (op_mod_i),
        .rnd_mode_i   (rnd_mode_i),
        .result_o     (lane_res[l]),
        .int_result_o (ires),
        .is_int_o     (is_int),
        .status_o     (st)
      );
      assign lane_st[l]  = active ? st : '0;
      // vectorial compare/classify: each element holds its lane's answer
      assign lane_int[l] = is_int ? FW'(ires) : lane_res[l];
      if (l == 0) begin : g_l0
        assign lane0_int    = ires;
        assign lane0_is_int = is_int;
      end
    end
  end

  out_t slice_out;
  always_comb begin
    slice_out.result = '1;
    if (vectorial_op_i) begin
      for (int l = 0; l < NumLanes; l++) slice_out.result[l*FW +: FW] = lane_int[l];
    end else if (lane0_is_int) begin
      slice_out.result = Width'(lane0_int);
    end else begin
      slice_out.result[FW-1:0] = lane_res[0];
    end
    slice_out.status = '0;
    for (int l = 0; l < NumLanes; l++) slice_out.status |= lane_st[l];
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
