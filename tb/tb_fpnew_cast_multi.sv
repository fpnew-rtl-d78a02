// tb_fpnew_cast_multi: self-checking testbench of the conversion lane.
//
// Directed vectors from an exact reference cover FP-to-FP conversions between
// all five formats, FP-to-integer (INT8..INT64, signed and unsigned, with
// rounding, saturation and NV) and integer-to-FP (with random bits above the
// integer, which must be ignored), in all rounding modes. A 64-bit lane gets
// every vector; a 16-bit lane (as used for the narrow lanes of the merged
// CONV slice) gets those whose formats fit into 16 bits, compared on its
// width. Random round trips FP32 -> FP64 -> FP32 must be exact. The unit is
// combinational: no latency check.
module tb_fpnew_cast_multi;
  import fpnew_pkg::*;

  typedef struct {
    int          op, mod, src, dst, ifmt, rm;
    logic [63:0] a, res;
    logic [4:0]  flags;
  } vec_t;

  localparam int NV = 80;
  vec_t vecs [NV] = '{
    '{11, 1, 4, 4, 3, 4, 64'h000000000000de54, 64'h0000000000000000, 5'd16},
    '{11, 1, 1, 1, 1, 2, 64'h40a9fbb000000000, 64'h0000000000000cfd, 5'd1},
    '{12, 1, 1, 1, 1, 4, 64'hfa38e12b2b8f0000, 64'h0000000000000000, 5'd0},
    '{12, 1, 4, 4, 3, 0, 64'h320094ead7a94ded, 64'h0000000000005e48, 5'd1},
    '{11, 0, 4, 4, 0, 0, 64'h0000000000004000, 64'h0000000000000002, 5'd0},
    '{10, 0, 1, 1, 2, 4, 64'h335d8b9b1b98fbe4, 64'h335d8b9b1b98fbe4, 5'd0},
    '{11, 0, 1, 1, 0, 3, 64'h4042d00000000000, 64'h0000000000000026, 5'd1},
    '{10, 0, 2, 2, 1, 4, 64'h0000000000007c01, 64'h0000000000007e00, 5'd16},
    '{10, 0, 0, 0, 0, 3, 64'h00000000083b8326, 64'h00000000083b8326, 5'd0},
    '{11, 0, 4, 4, 1, 1, 64'h0000000000009135, 64'h0000000000000000, 5'd1},
    '{10, 0, 0, 1, 3, 3, 64'h00000000807cc81d, 64'hb80f320740000000, 5'd0},
    '{12, 0, 0, 0, 0, 2, 64'hb3a3d9a44f576afe, 64'h00000000c0000000, 5'd0},
    '{10, 0, 0, 4, 1, 0, 64'h00000000804e1f65, 64'h000000000000804e, 5'd3},
    '{11, 0, 1, 1, 3, 2, 64'h80003f863e361858, 64'hffffffffffffffff, 5'd1},
    '{11, 0, 0, 0, 3, 4, 64'h00000000de0c998e, 64'hdcd99c8000000000, 5'd0},
    '{12, 1, 4, 4, 1, 4, 64'h85931a953cca1418, 64'h00000000000045a1, 5'd1},
    '{10, 0, 0, 4, 2, 4, 64'h000000008073d146, 64'h0000000000008074, 5'd3},
    '{12, 1, 0, 0, 2, 3, 64'h205bc308b869135c, 64'h000000004f386914, 5'd1},
    '{11, 1, 2, 2, 0, 4, 64'h0000000000005a40, 64'hffffffffffffffc8, 5'd0},
    '{10, 0, 2, 2, 1, 0, 64'h000000000000945e, 64'h000000000000945e, 5'd0},
    '{11, 1, 2, 2, 3, 1, 64'h000000000000fc00, 64'h0000000000000000, 5'd16},
    '{12, 0, 2, 2, 3, 0, 64'h01789a3e8bcce7cd, 64'h0000000000007c00, 5'd5},
    '{12, 1, 1, 1, 2, 1, 64'hdf007dfa7928c6a1, 64'h41de4a31a8400000, 5'd0},
    '{11, 1, 3, 3, 3, 0, 64'h000000000000004c, 64'h0000000000000010, 5'd0},
    '{10, 0, 2, 4, 0, 0, 64'h0000000000007af0, 64'h000000000000475e, 5'd0},
    '{12, 1, 4, 4, 3, 4, 64'h1572c0738a8f7aef, 64'h0000000000005dac, 5'd1},
    '{11, 0, 4, 4, 0, 4, 64'h0000000000004063, 64'h0000000000000004, 5'd1},
    '{11, 0, 2, 2, 0, 2, 64'h00000000000044ad, 64'h0000000000000004, 5'd1},
    '{11, 0, 0, 0, 3, 3, 64'h0000000051b72793, 64'h00000016e4f26000, 5'd0},
    '{10, 0, 0, 3, 3, 1, 64'h0000000011913906, 64'h0000000000000000, 5'd3},
    '{11, 1, 1, 1, 0, 2, 64'hc022800000000000, 64'h0000000000000000, 5'd16},
    '{11, 0, 2, 2, 3, 4, 64'h000000000000891c, 64'h0000000000000000, 5'd1},
    '{10, 0, 2, 3, 2, 2, 64'h0000000000007c00, 64'h000000000000007c, 5'd0},
    '{11, 0, 1, 1, 1, 3, 64'hc0a20bb000000000, 64'hfffffffffffff6fb, 5'd1},
    '{12, 1, 0, 0, 0, 2, 64'hebd52478e2110301, 64'h000000003f800000, 5'd0},
    '{12, 1, 2, 2, 1, 0, 64'h7037f262b76d5882, 64'h0000000000007588, 5'd1},
    '{12, 0, 0, 0, 1, 4, 64'h2556b8edb5e16915, 64'h0000000046d22a00, 5'd0},
    '{10, 0, 0, 1, 3, 3, 64'h00000000d4708d95, 64'hc28e11b2a0000000, 5'd0},
    '{12, 0, 0, 0, 3, 2, 64'hddbc8dddb8d0c65d, 64'h00000000de090dc9, 5'd1},
    '{12, 1, 4, 4, 1, 0, 64'h31f68975fcdb167c, 64'h00000000000045b4, 5'd1},
    '{11, 0, 2, 2, 0, 2, 64'h0000000000004660, 64'h0000000000000006, 5'd1},
    '{10, 0, 4, 1, 0, 1, 64'h0000000000007f81, 64'h7ff8000000000000, 5'd16},
    '{12, 1, 3, 3, 3, 1, 64'h84a991f3b93ba587, 64'h000000000000007b, 5'd5},
    '{11, 1, 0, 0, 0, 4, 64'h00000000ddc7e040, 64'h0000000000000000, 5'd16},
    '{12, 1, 4, 4, 2, 4, 64'h9c03e73bd862ff16, 64'h0000000000004f58, 5'd1},
    '{11, 0, 3, 3, 2, 1, 64'h0000000000000044, 64'h0000000000000004, 5'd0},
    '{10, 0, 3, 4, 0, 4, 64'h00000000000000cc, 64'h000000000000c180, 5'd0},
    '{11, 0, 1, 1, 1, 0, 64'h40cc908000000000, 64'h0000000000003921, 5'd0},
    '{10, 0, 4, 3, 3, 2, 64'h000000000000364f, 64'h0000000000000000, 5'd3},
    '{10, 0, 1, 1, 1, 2, 64'hfff0000000000000, 64'hfff0000000000000, 5'd0},
    '{10, 0, 2, 0, 2, 2, 64'h00000000000042ec, 64'h00000000405d8000, 5'd0},
    '{12, 1, 3, 3, 2, 0, 64'h878354ac0699f7d7, 64'h000000000000007c, 5'd5},
    '{10, 0, 3, 0, 1, 4, 64'h00000000000000ca, 64'h00000000c1400000, 5'd0},
    '{12, 0, 0, 0, 1, 1, 64'he349ec3a74cd9a66, 64'h00000000c6cb3400, 5'd0},
    '{10, 0, 0, 0, 0, 1, 64'h0000000080000000, 64'h0000000080000000, 5'd0},
    '{11, 1, 4, 4, 0, 3, 64'h0000000000001a33, 64'h0000000000000001, 5'd1},
    '{10, 0, 3, 2, 1, 0, 64'h00000000000000b0, 64'h000000000000b000, 5'd0},
    '{12, 1, 0, 0, 2, 4, 64'h0638d57b120fb44e, 64'h000000004d907da2, 5'd1},
    '{12, 0, 0, 0, 3, 4, 64'h00000000001fb08c, 64'h0000000049fd8460, 5'd0},
    '{12, 0, 4, 4, 0, 0, 64'he9db776d2b653f3b, 64'h000000000000426c, 5'd0},
    '{11, 0, 3, 3, 1, 3, 64'h0000000000000077, 64'h0000000000007000, 5'd0},
    '{12, 0, 3, 3, 3, 2, 64'h83372f2a1844ebd1, 64'h00000000000000fc, 5'd5},
    '{10, 0, 3, 3, 1, 3, 64'h00000000000000e5, 64'h00000000000000e5, 5'd0},
    '{11, 1, 4, 4, 1, 0, 64'h000000000000d92f, 64'h0000000000000000, 5'd16},
    '{10, 0, 0, 1, 1, 3, 64'h000000003c8ce915, 64'h3f919d22a0000000, 5'd0},
    '{10, 0, 0, 2, 0, 2, 64'h00000000a6ab3d8a, 64'h0000000000008001, 5'd3},
    '{10, 0, 3, 1, 1, 3, 64'h00000000000000c2, 64'hc008000000000000, 5'd0},
    '{10, 0, 3, 1, 3, 0, 64'h0000000000000080, 64'h8000000000000000, 5'd0},
    '{12, 1, 4, 4, 2, 1, 64'ha5e3f4d00ceabec7, 64'h0000000000004d4e, 5'd1},
    '{10, 0, 2, 2, 2, 0, 64'h000000000000ca08, 64'h000000000000ca08, 5'd0},
    '{11, 1, 4, 4, 0, 4, 64'h000000000000c1b9, 64'h0000000000000000, 5'd16},
    '{11, 1, 3, 3, 3, 1, 64'h00000000000000fc, 64'h0000000000000000, 5'd16},
    '{10, 0, 0, 4, 0, 4, 64'h000000000772e2a8, 64'h0000000000000773, 5'd1},
    '{11, 0, 3, 3, 0, 3, 64'h00000000000000ca, 64'hfffffffffffffff4, 5'd0},
    '{12, 1, 0, 0, 3, 0, 64'h00078cbc74a8039f, 64'h0000000058f1978f, 5'd1},
    '{10, 0, 1, 2, 1, 2, 64'hb5699de7749f265f, 64'h0000000000008001, 5'd3},
    '{11, 1, 2, 2, 3, 4, 64'h0000000000007c00, 64'hffffffffffffffff, 5'd16},
    '{12, 0, 0, 0, 1, 4, 64'h3045aee4438e0070, 64'h0000000042e00000, 5'd0},
    '{12, 0, 2, 2, 0, 0, 64'hf9c6381a3b72a806, 64'h0000000000004600, 5'd0},
    '{12, 1, 0, 0, 0, 2, 64'he80c9d5f88f5d03c, 64'h0000000042700000, 5'd0}
  };

  logic [63:0] opnd, res64;
  logic [15:0] res16;
  operation_e  op;
  logic        mod;
  fp_format_e  src, dst;
  int_format_e ifmt;
  roundmode_e  rm;
  status_t     st64, st16;

  fpnew_cast_multi #(.LaneWidth(64)) dut64 (
    .operand_i(opnd), .op_i(op), .op_mod_i(mod), .src_fmt_i(src), .dst_fmt_i(dst),
    .int_fmt_i(ifmt), .rnd_mode_i(rm), .result_o(res64), .status_o(st64));
  fpnew_cast_multi #(.LaneWidth(16)) dut16 (
    .operand_i(opnd[15:0]), .op_i(op), .op_mod_i(mod), .src_fmt_i(src), .dst_fmt_i(dst),
    .int_fmt_i(ifmt), .rnd_mode_i(rm), .result_o(res16), .status_o(st16));

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic narrow(int i);
    int ws = fp_width(fp_format_e'(vecs[i].src));
    int wd = fp_width(fp_format_e'(vecs[i].dst));
    int wi = int_width(int_format_e'(vecs[i].ifmt));
    if (vecs[i].op == 11) return ws <= 16 && wi <= 16;
    if (vecs[i].op == 12) return wd <= 16 && wi <= 16;
    return ws <= 16 && wd <= 16;
  endfunction

  initial begin
    opnd = '0; op = F2F; mod = 0; src = FP64; dst = FP64; ifmt = INT32; rm = RNE;
    #10;
    for (int i = 0; i < NV; i++) begin
      opnd = vecs[i].a; op = operation_e'(vecs[i].op); mod = vecs[i].mod[0];
      src = fp_format_e'(vecs[i].src); dst = fp_format_e'(vecs[i].dst);
      ifmt = int_format_e'(vecs[i].ifmt); rm = roundmode_e'(vecs[i].rm);
      #1 checks++;
      if (res64 !== vecs[i].res || st64 !== vecs[i].flags) begin
        failures++;
        $display("FAIL vec %0d op %0d mod %0d src %0d dst %0d int %0d rm %0d a=%h: got %h/%b exp %h/%b",
                 i, vecs[i].op, vecs[i].mod, vecs[i].src, vecs[i].dst, vecs[i].ifmt, vecs[i].rm,
                 vecs[i].a, res64, st64, vecs[i].res, vecs[i].flags);
      end
      if (narrow(i)) begin
        checks++;
        if (res16 !== vecs[i].res[15:0] || st16 !== vecs[i].flags) begin
          failures++;
          $display("FAIL lane16 vec %0d: got %h/%b exp %h", i, res16, st16, vecs[i].res[15:0]);
        end
      end
    end
    // FP32 -> FP64 -> FP32 round trip is exact for every non-NaN value
    for (int n = 0; n < 300; n++) begin
      automatic logic [31:0] x = $urandom;
      automatic logic [63:0] y;
      if (x[30:23] == 8'hff && x[22:0] != 0) continue;
      op = F2F; rm = roundmode_e'($urandom_range(0, 4));
      opnd = 64'(x); src = FP32; dst = FP64; #1 y = res64;
      opnd = y; src = FP64; dst = FP32; #1 checks++;
      if (res64[31:0] !== x || st64 !== '0) begin
        failures++; $display("FAIL round trip %h -> %h -> %h", x, y, res64[31:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
