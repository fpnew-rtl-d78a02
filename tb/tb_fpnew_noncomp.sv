// tb_fpnew_noncomp: self-checking testbench of the comparison / sign-injection
// lane, instantiated once per format (FP64, FP32, FP16, FP16alt, FP8).
//
// Directed vectors from an exact reference cover SGNJ (J, JN, JX, move), MIN,
// MAX, the three comparisons with inversion and CLASSIFY, with special values
// (signed zeros, NaNs of both kinds, infinities, subnormals). Random checks
// ($urandom) then test algebraic properties: a comparison and its inverse are
// complementary, min and max of two numbers return the two inputs, and
// CLASSIFY sets exactly one bit. The unit is combinational: no latency check.
module tb_fpnew_noncomp;
  import fpnew_pkg::*;

  typedef struct {
    int          fmt, op, mod, rm;
    logic [63:0] a, b, res;
    logic [4:0]  flags;
  } vec_t;

  localparam int NV = 80;
  vec_t vecs [NV] = '{
    '{1, 8, 0, 0, 64'h536128b20c5c7fd0, 64'h2ed0ed909531985d, 64'h0000000000000000, 5'd0},
    '{1, 9, 0, 0, 64'h8000000000000000, 64'h69e1fb1790c192cf, 64'h0000000000000008, 5'd0},
    '{1, 6, 0, 0, 64'h0663898df9ebdacc, 64'h7ff0000000000000, 64'h0663898df9ebdacc, 5'd0},
    '{1, 8, 0, 2, 64'h97394e3b1a61dbe2, 64'h2fb8c38f18f135d2, 64'h0000000000000000, 5'd0},
    '{1, 9, 0, 0, 64'h6387731a506bf2ef, 64'h2e53f98e4cbd87ad, 64'h0000000000000040, 5'd0},
    '{1, 7, 0, 0, 64'h7ff8000000000000, 64'hac072e6cbabced20, 64'hac072e6cbabced20, 5'd0},
    '{1, 9, 0, 0, 64'h7ff0000000000001, 64'h000fffffffffffff, 64'h0000000000000100, 5'd0},
    '{1, 6, 0, 0, 64'he51d17f9e01f5057, 64'h8009828959a54a7b, 64'he51d17f9e01f5057, 5'd0},
    '{1, 6, 0, 3, 64'h59410a3daa05e11a, 64'h7ff8000000000000, 64'h59410a3daa05e11a, 5'd0},
    '{1, 8, 0, 1, 64'hd5a05c6a58d5563d, 64'h1591df9f9c653938, 64'h0000000000000001, 5'd0},
    '{1, 7, 0, 0, 64'h8007f1b1df1582b0, 64'h000fffffffffffff, 64'h8007f1b1df1582b0, 5'd0},
    '{1, 9, 0, 0, 64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000010, 5'd0},
    '{1, 7, 0, 1, 64'h7ff0000000000000, 64'h7ff0000000000000, 64'h7ff0000000000000, 5'd0},
    '{1, 7, 0, 1, 64'hf9ba7abe9e1a8ef4, 64'h3a8def88e647cb8f, 64'h3a8def88e647cb8f, 5'd0},
    '{1, 9, 0, 0, 64'h000a260c7b45145c, 64'h08a35718fc132d0d, 64'h0000000000000020, 5'd0},
    '{1, 6, 0, 3, 64'h7ff0000000000000, 64'h7ff0000000000000, 64'h7ff0000000000000, 5'd0},
    '{0, 7, 0, 0, 64'h0000000080000000, 64'h000000004735792b, 64'h0000000080000000, 5'd0},
    '{0, 6, 0, 2, 64'h00000000788e0281, 64'h0000000006972fca, 64'h00000000788e0281, 5'd0},
    '{0, 7, 0, 0, 64'h000000007f7fffff, 64'h000000007f7fffff, 64'h000000007f7fffff, 5'd0},
    '{0, 6, 0, 3, 64'h00000000fd98401c, 64'h00000000fd98401c, 64'h00000000fd98401c, 5'd0},
    '{0, 9, 0, 0, 64'h00000000b2fc3332, 64'h000000009c7dc09c, 64'h0000000000000002, 5'd0},
    '{0, 7, 0, 0, 64'h000000007e06f634, 64'h0000000009d00eb0, 64'h0000000009d00eb0, 5'd0},
    '{0, 6, 0, 0, 64'h0000000000000001, 64'h00000000fca41663, 64'h0000000080000001, 5'd0},
    '{0, 9, 0, 0, 64'h000000007fc00000, 64'h000000002f7b1bd2, 64'h0000000000000200, 5'd0},
    '{0, 8, 0, 1, 64'h000000007fc00000, 64'h000000007fc00000, 64'h0000000000000000, 5'd16},
    '{0, 7, 0, 1, 64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000000, 5'd0},
    '{0, 6, 0, 3, 64'h00000000ff800000, 64'h000000007f7fffff, 64'h00000000ff800000, 5'd0},
    '{0, 8, 1, 2, 64'h0000000013a45fe5, 64'h0000000093059ad8, 64'h0000000000000001, 5'd0},
    '{0, 9, 0, 0, 64'h00000000c111d4d4, 64'h00000000c148c3ef, 64'h0000000000000002, 5'd0},
    '{0, 7, 0, 1, 64'h0000000000000000, 64'h000000007f800001, 64'h0000000000000000, 5'd16},
    '{0, 6, 0, 0, 64'h00000000c4d72000, 64'h00000000c4d72000, 64'h00000000c4d72000, 5'd0},
    '{0, 6, 0, 1, 64'h0000000020e7947b, 64'h000000007fc00000, 64'h00000000a0e7947b, 5'd0},
    '{2, 6, 0, 1, 64'h0000000000000001, 64'h000000000000fc00, 64'h0000000000000001, 5'd0},
    '{2, 9, 0, 0, 64'h0000000000007c01, 64'h0000000000005995, 64'h0000000000000100, 5'd0},
    '{2, 6, 0, 2, 64'h000000000000fc00, 64'h00000000000080c6, 64'h0000000000007c00, 5'd0},
    '{2, 6, 0, 1, 64'h00000000000050bf, 64'h0000000000003ba4, 64'h000000000000d0bf, 5'd0},
    '{2, 9, 0, 0, 64'h0000000000000000, 64'h0000000000003835, 64'h0000000000000010, 5'd0},
    '{2, 9, 0, 0, 64'h000000000000aeee, 64'h0000000000008000, 64'h0000000000000002, 5'd0},
    '{2, 7, 0, 1, 64'h000000000000e1de, 64'h0000000000000001, 64'h0000000000000001, 5'd0},
    '{2, 7, 0, 0, 64'h0000000000008000, 64'h0000000000007c01, 64'h0000000000008000, 5'd16},
    '{2, 9, 0, 0, 64'h000000000000813c, 64'h0000000000000c32, 64'h0000000000000004, 5'd0},
    '{2, 9, 0, 0, 64'h0000000000007c01, 64'h0000000000000686, 64'h0000000000000100, 5'd0},
    '{2, 9, 0, 0, 64'h0000000000000000, 64'h000000000000f83f, 64'h0000000000000010, 5'd0},
    '{2, 8, 0, 1, 64'h00000000000003d4, 64'h00000000000026fc, 64'h0000000000000001, 5'd0},
    '{2, 6, 0, 3, 64'h000000000000fb38, 64'h0000000000008c18, 64'h000000000000fb38, 5'd0},
    '{2, 9, 0, 0, 64'h000000000000bb42, 64'h000000000000bb42, 64'h0000000000000002, 5'd0},
    '{2, 8, 0, 2, 64'h000000000000966d, 64'h0000000000007c01, 64'h0000000000000000, 5'd16},
    '{2, 7, 0, 1, 64'h00000000000000fd, 64'h00000000000089ed, 64'h00000000000000fd, 5'd0},
    '{4, 7, 0, 1, 64'h000000000000007f, 64'h0000000000007fc0, 64'h000000000000007f, 5'd0},
    '{4, 6, 0, 1, 64'h0000000000000001, 64'h0000000000007fc0, 64'h0000000000008001, 5'd0},
    '{4, 8, 1, 2, 64'h0000000000007f7f, 64'h0000000000007f81, 64'h0000000000000001, 5'd16},
    '{4, 6, 0, 2, 64'h0000000000007f7f, 64'h0000000000005ee6, 64'h0000000000007f7f, 5'd0},
    '{4, 7, 0, 1, 64'h000000000000800a, 64'h0000000000004f5f, 64'h0000000000004f5f, 5'd0},
    '{4, 8, 1, 2, 64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000000, 5'd0},
    '{4, 9, 0, 0, 64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000010, 5'd0},
    '{4, 8, 1, 2, 64'h000000000000802d, 64'h0000000000004b26, 64'h0000000000000001, 5'd0},
    '{4, 9, 0, 0, 64'h0000000000000000, 64'h0000000000008000, 64'h0000000000000010, 5'd0},
    '{4, 8, 0, 2, 64'h0000000000007c01, 64'h0000000000007f7f, 64'h0000000000000000, 5'd0},
    '{4, 9, 0, 0, 64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000010, 5'd0},
    '{4, 7, 0, 1, 64'h0000000000008000, 64'h0000000000007f7f, 64'h0000000000007f7f, 5'd0},
    '{4, 7, 0, 1, 64'h0000000000008000, 64'h0000000000000000, 64'h0000000000000000, 5'd0},
    '{4, 6, 0, 0, 64'h000000000000005f, 64'h0000000000005f53, 64'h000000000000005f, 5'd0},
    '{4, 8, 1, 2, 64'h0000000000000000, 64'h0000000000007fc0, 64'h0000000000000001, 5'd0},
    '{4, 9, 0, 0, 64'h000000000000c37c, 64'h000000000000c37c, 64'h0000000000000002, 5'd0},
    '{3, 8, 1, 1, 64'h0000000000000003, 64'h0000000000000003, 64'h0000000000000001, 5'd0},
    '{3, 8, 0, 2, 64'h00000000000000bc, 64'h0000000000000036, 64'h0000000000000000, 5'd0},
    '{3, 6, 0, 2, 64'h0000000000000001, 64'h0000000000000000, 64'h0000000000000001, 5'd0},
    '{3, 8, 0, 1, 64'h000000000000007e, 64'h00000000000000c7, 64'h0000000000000000, 5'd16},
    '{3, 7, 0, 0, 64'h0000000000000080, 64'h000000000000009d, 64'h000000000000009d, 5'd0},
    '{3, 8, 0, 1, 64'h00000000000000ef, 64'h000000000000002b, 64'h0000000000000001, 5'd0},
    '{3, 7, 0, 1, 64'h0000000000000080, 64'h0000000000000080, 64'h0000000000000080, 5'd0},
    '{3, 8, 1, 0, 64'h0000000000000080, 64'h0000000000000000, 64'h0000000000000000, 5'd0},
    '{3, 8, 1, 2, 64'h000000000000000f, 64'h000000000000000f, 64'h0000000000000000, 5'd0},
    '{3, 6, 0, 1, 64'h000000000000000e, 64'h0000000000000080, 64'h000000000000000e, 5'd0},
    '{3, 9, 0, 0, 64'h0000000000000000, 64'h00000000000000c8, 64'h0000000000000010, 5'd0},
    '{3, 6, 0, 3, 64'h00000000000000cb, 64'h000000000000001d, 64'h00000000000000cb, 5'd0},
    '{3, 6, 0, 1, 64'h0000000000000038, 64'h0000000000000038, 64'h00000000000000b8, 5'd0},
    '{3, 9, 0, 0, 64'h000000000000007c, 64'h00000000000000e0, 64'h0000000000000080, 5'd0},
    '{3, 9, 0, 0, 64'h00000000000000bd, 64'h00000000000000d8, 64'h0000000000000002, 5'd0},
    '{3, 6, 0, 3, 64'h0000000000000000, 64'h00000000000000af, 64'h0000000000000000, 5'd0}
  };

  localparam fp_format_e FMTS [5] = '{FP32, FP64, FP16, FP8, FP16ALT};

  logic [1:0][63:0] ops;
  operation_e op;
  logic       mod;
  roundmode_e rm;
  logic [63:0] res   [5];
  logic [9:0]  ires  [5];
  logic        isint [5];
  status_t     st    [5];

  for (genvar g = 0; g < 5; g++) begin : g_fmt
    localparam int W = fp_width(FMTS[g]);
    logic [W-1:0] r;
    fpnew_noncomp #(.FpFormat(FMTS[g])) dut (
      .operands_i({ops[1][W-1:0], ops[0][W-1:0]}), .op_i(op), .op_mod_i(mod), .rnd_mode_i(rm),
      .result_o(r), .int_result_o(ires[g]), .is_int_o(isint[g]), .status_o(st[g]));
    assign res[g] = 64'(r);
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_val(int f);
    logic [63:0] v = {$urandom, $urandom};
    int w = fp_width(fp_format_e'(f));
    if ($urandom_range(0, 7) == 0) v = v & ~(64'hffff << (w - 6));   // small / subnormal
    return (w >= 64) ? v : (v & ((64'd1 << w) - 1));
  endfunction

  function automatic logic is_nan_v(int f, logic [63:0] v);
    fp_info_t i = fp_info(fp_format_e'(f), v);
    return i.is_nan;
  endfunction

  initial begin
    logic [9:0] r0;
    logic [63:0] mn, mx;
    ops = '0; op = SGNJ; mod = 0; rm = RNE;
    #10;
    for (int i = 0; i < NV; i++) begin
      automatic int f = vecs[i].fmt;
      ops[0] = vecs[i].a; ops[1] = vecs[i].b; op = operation_e'(vecs[i].op);
      mod = vecs[i].mod[0]; rm = roundmode_e'(vecs[i].rm);
      #1;
      checks++;
      if (isint[f]) begin
        if (64'(ires[f]) !== vecs[i].res || st[f] !== vecs[i].flags) begin
          failures++;
          $display("FAIL vec %0d fmt %0d op %0d rm %0d a=%h b=%h: got %h/%b exp %h/%b", i, f,
                   vecs[i].op, vecs[i].rm, vecs[i].a, vecs[i].b, ires[f], st[f], vecs[i].res, vecs[i].flags);
        end
      end else if (res[f] !== vecs[i].res || st[f] !== vecs[i].flags) begin
        failures++;
        $display("FAIL vec %0d fmt %0d op %0d rm %0d a=%h b=%h: got %h/%b exp %h/%b", i, f,
                 vecs[i].op, vecs[i].rm, vecs[i].a, vecs[i].b, res[f], st[f], vecs[i].res, vecs[i].flags);
      end
    end
    // signed zeros: -0 is below +0 for MIN and MAX, in both operand orders
    for (int f = 0; f < 5; f++) begin
      automatic logic [63:0] pz = 64'd0;
      automatic logic [63:0] nz = 64'd1 << (fp_width(fp_format_e'(f)) - 1);
      for (int sw = 0; sw < 2; sw++) begin
        ops[0] = sw ? pz : nz; ops[1] = sw ? nz : pz; op = MINMAX; mod = 0;
        rm = RNE; #1 checks++;
        if (res[f] !== nz) begin failures++; $display("FAIL min(-0,+0) fmt %0d", f); end
        rm = RTZ; #1 checks++;
        if (res[f] !== pz) begin failures++; $display("FAIL max(-0,+0) fmt %0d", f); end
      end
    end
    // random property checks
    for (int n = 0; n < 300; n++) begin
      automatic int f = $urandom_range(0, 4);
      ops[0] = rnd_val(f); ops[1] = rnd_val(f);
      if (is_nan_v(f, ops[0]) || is_nan_v(f, ops[1])) continue;
      op = CMP; rm = roundmode_e'($urandom_range(0, 2)); mod = 0; #1 r0 = ires[f];
      mod = 1; #1 checks++;
      if ((r0[0] ^ ires[f][0]) !== 1'b1) begin failures++; $display("FAIL cmp inverse %h %h", ops[0], ops[1]); end
      op = MINMAX; mod = 0; rm = RNE; #1 mn = res[f];
      rm = RTZ; #1 mx = res[f];
      checks++;
      if (!((mn == ops[0] && mx == ops[1]) || (mn == ops[1] && mx == ops[0]))) begin
        failures++; $display("FAIL minmax %h %h -> %h %h", ops[0], ops[1], mn, mx);
      end
      op = CLASSIFY; #1 checks++;
      if ($countones(ires[f]) != 1) begin failures++; $display("FAIL classify %h", ops[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
