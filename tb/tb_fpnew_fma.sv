// tb_fpnew_fma: self-checking testbench of the fused multiply-add unit.
//
// One fpnew_fma instance per format (FP64, FP32, FP16, FP16alt, FP8) is
// driven with directed vectors whose expected results and flags were computed
// with an exact rational-arithmetic model of IEEE 754 rounding (random
// operands, operands chosen for cancellation, underflow and overflow, and
// special values; all five rounding modes). A second part checks, on random
// operands, that a*b+c equals b*a+c bit for bit and that MUL equals FMADD
// with c = -0. The unit is combinational, so each vector is applied and
// checked after a short delay.
module tb_fpnew_fma;
  import fpnew_pkg::*;

  typedef struct {
    int          fmt;
    int          op;
    logic        mod;
    int          rm;
    logic [63:0] a, b, c, res;
    logic [4:0]  flags;
  } vec_t;

  localparam int NV = 60;
  vec_t vecs [NV] = '{
    '{1, 0, 1'b0, 1, 64'h0000000000000000, 64'h7fefffffffffffff, 64'h0000000000000000, 64'h0000000000000000, 5'h00},
    '{1, 1, 1'b0, 0, 64'h795a170b39263059, 64'h87f95e6093bd04cf, 64'hfff0000000000000, 64'hfff0000000000000, 5'h00},
    '{1, 3, 1'b1, 4, 64'h0c8b64ce8c38fb29, 64'h0000000000000000, 64'h5726d76b881ed162, 64'h0000000000000000, 5'h00},
    '{1, 0, 1'b1, 2, 64'hc00babce57ee05cd, 64'h3ff9be4b49b64a08, 64'h3fe6b0a1830e07bc, 64'hc01918da98a6f8bb, 5'h01},
    '{1, 2, 1'b1, 2, 64'h3fe7f26198289fcd, 64'hc0174c9dcc011cdd, 64'hbfef1d6917f5e837, 64'h401a4ae9ff0630d6, 5'h01},
    '{1, 0, 1'b0, 2, 64'hc0158d55ab2cd31e, 64'h3ff7631af0ce5835, 64'h4011df9f9c653938, 64'hc00b4214ab8f129c, 5'h01},
    '{1, 1, 1'b0, 4, 64'hbfedd2e16e36aab0, 64'hbfdb4d6647469a4d, 64'hbfdaec6f5bd86d40, 64'hbfea2f4028f200b3, 5'h01},
    '{1, 3, 1'b0, 2, 64'h803a7abe9e1a8ef4, 64'hbe274e690dd27a65, 64'hbfc33ac369c626ad, 64'h0000000004d246c8, 5'h03},
    '{1, 0, 1'b0, 3, 64'h3fd0d75999c94309, 64'h3fc9118b000f49c8, 64'hbf9f2ee419f9919c, 64'h3f95970222d72ab2, 5'h01},
    '{1, 2, 1'b1, 3, 64'h3ff24e4e15fc899e, 64'h3ff57b6fbfeaa155, 64'h3ffb12aad42fddbb, 64'hbfc9690d4f70bdb8, 5'h00},
    '{1, 0, 1'b1, 2, 64'h401d86f4b239f3c7, 64'h4025de0084b5a818, 64'h4033908fc59db916, 64'h404e928abf2eb724, 5'h01},
    '{1, 1, 1'b0, 1, 64'h3fdbb2315b06258e, 64'h4000726efd56a926, 64'h3fe3192b42594052, 64'hbfd2be37afe0e3ac, 5'h01},
    '{0, 0, 1'b0, 3, 64'h00000000ff800000, 64'h0000000000000000, 64'h000000007f800001, 64'h000000007fc00000, 5'h10},
    '{0, 1, 1'b0, 0, 64'h00000000dcb2aad5, 64'h0000000080000000, 64'h00000000108386b8, 64'h00000000108386b8, 5'h00},
    '{0, 3, 1'b1, 1, 64'h0000000080000000, 64'h000000008011d2f7, 64'h00000000ff800000, 64'h0000000000000000, 5'h00},
    '{0, 0, 1'b0, 1, 64'h000000003e72e7f6, 64'h0000000040d4cbf9, 64'h00000000c073bfff, 64'h00000000c00ecb2e, 5'h01},
    '{0, 2, 1'b0, 1, 64'h00000000c0664b37, 64'h000000003e160f75, 64'h000000003e4f3eb5, 64'h00000000c05cea3f, 5'h01},
    '{0, 0, 1'b1, 0, 64'h0000000040187cb8, 64'h000000003e0566c5, 64'h00000000bdb9e0e6, 64'h000000003ecd643f, 5'h01},
    '{0, 1, 1'b0, 2, 64'h00000000bfe757a4, 64'h000000004040fe03, 64'h00000000bfc2f888, 64'h00000000407b5249, 5'h01},
    '{0, 3, 1'b0, 0, 64'h0000000080dba9d0, 64'h00000000b8aedf18, 64'h00000000bfe55159, 64'h00000000000004b0, 5'h03},
    '{0, 0, 1'b0, 1, 64'h000000003eff3dc5, 64'h00000000c0b3b009, 64'h000000003f990e29, 64'h00000000bfcd413f, 5'h01},
    '{0, 2, 1'b1, 2, 64'h00000000407e1735, 64'h00000000be64e914, 64'h00000000be702d9f, 64'h00000000408632e3, 5'h01},
    '{0, 0, 1'b1, 3, 64'h00000000c1791694, 64'h0000000040b3f619, 64'h00000000c1f5a769, 64'h00000000c26360c6, 5'h01},
    '{0, 1, 1'b0, 2, 64'h000000003e669bc4, 64'h00000000408ab813, 64'h00000000c01c77dd, 64'h00000000c05af2c2, 5'h01},
    '{2, 0, 1'b1, 2, 64'h00000000000046d6, 64'h0000000000008000, 64'h00000000000008b9, 64'h00000000000088b9, 5'h00},
    '{2, 1, 1'b0, 2, 64'h0000000000000000, 64'h0000000000009e0e, 64'h00000000000003ff, 64'h00000000000003ff, 5'h00},
    '{2, 3, 1'b1, 1, 64'h0000000000007c00, 64'h0000000000007c01, 64'h000000000000940e, 64'h0000000000007e00, 5'h10},
    '{2, 0, 1'b0, 2, 64'h00000000000030a1, 64'h0000000000003dc8, 64'h0000000000002974, 64'h0000000000003406, 5'h01},
    '{2, 2, 1'b0, 0, 64'h00000000000039e6, 64'h0000000000003e02, 64'h0000000000003604, 64'h000000000000407a, 5'h01},
    '{2, 0, 1'b0, 2, 64'h0000000000003856, 64'h000000000000c7d4, 64'h000000000000cb00, 64'h000000000000cc90, 5'h01},
    '{2, 1, 1'b1, 1, 64'h000000000000b2dc, 64'h000000000000ca0d, 64'h000000000000c2cd, 64'h0000000000003a73, 5'h01},
    '{2, 3, 1'b1, 1, 64'h0000000000008833, 64'h0000000000001e81, 64'h000000000000262a, 64'h000000000000800d, 5'h03},
    '{2, 0, 1'b0, 4, 64'h000000000000b1e5, 64'h000000000000473c, 64'h000000000000b10f, 64'h000000000000bdf6, 5'h01},
    '{2, 2, 1'b0, 4, 64'h000000000000444f, 64'h000000000000c496, 64'h0000000000004e9b, 64'h000000000000b470, 5'h00},
    '{2, 0, 1'b1, 0, 64'h000000000000c5f5, 64'h00000000000036d5, 64'h00000000000045db, 64'h000000000000c833, 5'h01},
    '{2, 1, 1'b1, 3, 64'h000000000000304e, 64'h000000000000ba06, 64'h000000000000b113, 64'h0000000000003429, 5'h01},
    '{4, 0, 1'b0, 1, 64'h000000000000c1a3, 64'h000000000000af1d, 64'h000000000000007f, 64'h0000000000003147, 5'h01},
    '{4, 1, 1'b0, 2, 64'h0000000000007f81, 64'h0000000000007f81, 64'h00000000000078f6, 64'h0000000000007fc0, 5'h10},
    '{4, 3, 1'b1, 3, 64'h00000000000086a3, 64'h0000000000007fc0, 64'h000000000000207c, 64'h0000000000007fc0, 5'h00},
    '{4, 0, 1'b0, 4, 64'h000000000000c00a, 64'h0000000000003ef7, 64'h0000000000003fce, 64'h0000000000003f12, 5'h01},
    '{4, 2, 1'b0, 3, 64'h0000000000003f20, 64'h000000000000bf5e, 64'h0000000000003ed3, 64'h000000000000be78, 5'h00},
    '{4, 0, 1'b1, 3, 64'h0000000000004074, 64'h0000000000003eff, 64'h0000000000003f91, 64'h0000000000003f45, 5'h01},
    '{4, 1, 1'b0, 4, 64'h000000000000beef, 64'h0000000000003e31, 64'h000000000000bdc3, 64'h000000000000bc6e, 5'h01},
    '{4, 3, 1'b0, 4, 64'h00000000000000b3, 64'h0000000000003cb7, 64'h000000000000c190, 64'h0000000000000004, 5'h03},
    '{4, 0, 1'b1, 3, 64'h0000000000004009, 64'h0000000000003ff7, 64'h000000000000c13b, 64'h000000000000417e, 5'h01},
    '{4, 2, 1'b1, 3, 64'h000000000000be05, 64'h0000000000004064, 64'h0000000000003e48, 64'h000000000000c06c, 5'h01},
    '{4, 0, 1'b0, 0, 64'h0000000000003e43, 64'h000000000000be4a, 64'h0000000000003c21, 64'h000000000000bce3, 5'h01},
    '{4, 1, 1'b1, 1, 64'h0000000000003fc6, 64'h0000000000004003, 64'h000000000000c0d3, 64'h000000000000405b, 5'h01},
    '{3, 0, 1'b0, 3, 64'h0000000000000040, 64'h00000000000000b9, 64'h0000000000000007, 64'h00000000000000bc, 5'h01},
    '{3, 1, 1'b0, 2, 64'h0000000000000013, 64'h000000000000009b, 64'h0000000000000001, 64'h0000000000000001, 5'h03},
    '{3, 3, 1'b1, 0, 64'h0000000000000003, 64'h00000000000000ae, 64'h0000000000000080, 64'h0000000000000080, 5'h03},
    '{3, 0, 1'b1, 2, 64'h0000000000000038, 64'h000000000000003c, 64'h0000000000000039, 64'h00000000000000b0, 5'h00},
    '{3, 2, 1'b0, 0, 64'h0000000000000030, 64'h0000000000000046, 64'h000000000000003d, 64'h0000000000000046, 5'h01},
    '{3, 0, 1'b0, 3, 64'h00000000000000b0, 64'h0000000000000048, 64'h00000000000000b6, 64'h00000000000000bd, 5'h01},
    '{3, 1, 1'b1, 2, 64'h000000000000003a, 64'h00000000000000ba, 64'h000000000000002f, 64'h0000000000000037, 5'h01},
    '{3, 3, 1'b1, 3, 64'h000000000000000f, 64'h00000000000000ac, 64'h00000000000000cb, 64'h0000000000000081, 5'h03},
    '{3, 0, 1'b0, 3, 64'h0000000000000049, 64'h0000000000000036, 64'h000000000000003a, 64'h0000000000000045, 5'h01},
    '{3, 2, 1'b1, 3, 64'h0000000000000035, 64'h0000000000000036, 64'h00000000000000aa, 64'h00000000000000ac, 5'h00},
    '{3, 0, 1'b1, 2, 64'h0000000000000034, 64'h000000000000003c, 64'h0000000000000033, 64'h0000000000000028, 5'h00},
    '{3, 1, 1'b0, 0, 64'h00000000000000c4, 64'h000000000000003c, 64'h00000000000000cb, 64'h00000000000000c9, 5'h00}
  };

  localparam fp_format_e FMTS [5] = '{FP32, FP64, FP16, FP8, FP16ALT};

  logic [2:0][63:0]  ops;
  operation_e        op;
  logic              op_mod;
  roundmode_e        rm;
  logic [4:0][63:0]  res;
  status_t [4:0]     st;

  for (genvar g = 0; g < 5; g++) begin : g_fmt
    localparam int unsigned W = fp_width(FMTS[g]);
    logic [W-1:0] r;
    fpnew_fma #(.FpFormat(FMTS[g])) dut (
      .operands_i ({ops[2][W-1:0], ops[1][W-1:0], ops[0][W-1:0]}),
      .op_i       (op),
      .op_mod_i   (op_mod),
      .rnd_mode_i (rm),
      .result_o   (r),
      .status_o   (st[g])
    );
    assign res[g] = 64'(r);
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] mask(int f);
    int unsigned w = fp_width(fp_format_e'(f));
    return (w >= 64) ? '1 : ((64'd1 << w) - 1);
  endfunction

  initial begin
    logic [63:0] r1, r2;
    logic [2:0]  g;
    ops = '0; op = FMADD; op_mod = 0; rm = RNE;
    #1;
    for (int i = 0; i < NV; i++) begin
      ops[0] = vecs[i].a; ops[1] = vecs[i].b; ops[2] = vecs[i].c;
      op = operation_e'(vecs[i].op); op_mod = vecs[i].mod; rm = roundmode_e'(vecs[i].rm);
      #1;
      checks++;
      if (res[vecs[i].fmt] !== vecs[i].res || st[vecs[i].fmt] !== vecs[i].flags) begin
        failures++;
        $display("FAIL vec %0d fmt %0d op %0d rm %0d: a=%h b=%h c=%h got %h/%b exp %h/%b", i,
                 vecs[i].fmt, vecs[i].op, vecs[i].rm, vecs[i].a, vecs[i].b, vecs[i].c,
                 res[vecs[i].fmt], st[vecs[i].fmt], vecs[i].res, vecs[i].flags);
      end
    end
    // Algebraic properties on random operands.
    for (int i = 0; i < 400; i++) begin
      g = 3'(i % 5);
      ops[0] = {$urandom, $urandom} & mask(int'(FMTS[g]));
      ops[1] = {$urandom, $urandom} & mask(int'(FMTS[g]));
      ops[2] = {$urandom, $urandom} & mask(int'(FMTS[g]));
      op_mod = 0; rm = roundmode_e'($urandom_range(0, 4));
      checks++;
      // MUL vs FMADD with c = -0
      op = MUL; #1 r1 = res[g];
      op = FMADD; ops[2] = 64'd1 << (fp_width(FMTS[g]) - 1); #1 r2 = res[g];
      if (r1 !== r2) begin
        failures++;
        $display("FAIL MUL/FMADD fmt %0d a=%h b=%h: %h vs %h", g, ops[0], ops[1], r1, r2);
      end
    end
    for (int i = 0; i < 400; i++) begin
      logic [63:0] x, y, z;
      g = 3'(i % 5);
      x = {$urandom, $urandom} & mask(int'(FMTS[g]));
      y = {$urandom, $urandom} & mask(int'(FMTS[g]));
      z = {$urandom, $urandom} & mask(int'(FMTS[g]));
      op = FMADD; op_mod = 0; rm = roundmode_e'($urandom_range(0, 4));
      ops[0] = x; ops[1] = y; ops[2] = z; #1 r1 = res[g];
      ops[0] = y; ops[1] = x;             #1 r2 = res[g];
      checks++;
      if (r1 !== r2) begin
        failures++;
        $display("FAIL commutativity fmt %0d: %h %h %h", g, x, y, z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
