// tb_fpnew_divsqrt_multi: self-checking testbench of the iterative
// division / square-root unit.
//
// Directed vectors for all five formats (random operands, exact cases,
// special values, all rounding modes) carry results and flags computed with an
// exact rational model. Each operation is sent through the valid-ready
// handshake and the number of cycles from acceptance to a valid result is
// compared with 3 + ceil(p/3) (21, 11, 7, 6, 4 for FP64, FP32, FP16, FP16alt,
// FP8). Further checks: the output is held while out_ready is low, and an
// iteration override shortens the latency to 3 + override.
module tb_fpnew_divsqrt_multi;
  import fpnew_pkg::*;

  typedef struct {
    int          fmt;
    int          op;
    int          rm;
    logic [63:0] a, b, res;
    logic [4:0]  flags;
  } vec_t;

  localparam int NV = 80;
  vec_t vecs [NV] = '{
    '{1, 4, 3, 64'hf657734dc7fde805, 64'hcb32f45e309d6b79, 64'h6b13cb88562f55f0, 5'h01},
    '{1, 5, 4, 64'h659181872fa91425, 64'h0bacf44d89e7d15f, 64'h52c0bc6e096b7a6e, 5'h01},
    '{1, 4, 0, 64'h7b8a767773f778aa, 64'h94303d719f8558a6, 64'hfff0000000000000, 5'h05},
    '{1, 5, 4, 64'h4000000000000000, 64'h3ff0000000000000, 64'h3ff6a09e667f3bcd, 5'h01},
    '{1, 4, 4, 64'h000fffffffffffff, 64'hebe84e55320094ea, 64'h8000000000000000, 5'h03},
    '{1, 5, 1, 64'h4010000000000000, 64'h3428d1feff666589, 64'h4000000000000000, 5'h00},
    '{1, 4, 0, 64'h611834c63acb6266, 64'h000c42b7902a174f, 64'h7ff0000000000000, 5'h05},
    '{1, 5, 0, 64'h254111b862f28d1a, 64'hd7b36a800023b682, 64'h32975f09d3e269d0, 5'h01},
    '{1, 4, 1, 64'h3c3faf8c601e5b45, 64'h096a123f90f5380e, 64'h72c37212f221a415, 5'h01},
    '{1, 5, 1, 64'h2b24fab6164f1513, 64'hb48ec3fbc20ef164, 64'h3589e9036e4d1737, 5'h01},
    '{1, 4, 0, 64'h8000000000000000, 64'h000fffffffffffff, 64'h8000000000000000, 5'h00},
    '{1, 5, 3, 64'h7fefffffffffffff, 64'h7fefffffffffffff, 64'h5ff0000000000000, 5'h01},
    '{1, 4, 1, 64'h90da4ca86b52b08d, 64'h0000000000000001, 64'hd3fa4ca86b52b08d, 5'h00},
    '{1, 5, 3, 64'h229f88ecdd44fd36, 64'ha6fe2868ff769e37, 64'h3146765d888d1e74, 5'h01},
    '{1, 4, 0, 64'h0000000000000001, 64'hd2319af693b3a3d9, 64'h8000000000000000, 5'h03},
    '{1, 5, 0, 64'h38902738421e7a60, 64'h6a562dc04bdbf090, 64'h3c4013902b52455f, 5'h01},
    '{0, 4, 0, 64'h00000000ff800000, 64'h00000000024cf6de, 64'h00000000ff800000, 5'h00},
    '{0, 5, 2, 64'h0000000010fac4ec, 64'h00000000ca115fdc, 64'h0000000028332912, 5'h01},
    '{0, 4, 3, 64'h000000007f800000, 64'h00000000694e230e, 64'h000000007f800000, 5'h00},
    '{0, 5, 1, 64'h0000000040000000, 64'h000000003f800000, 64'h000000003fb504f3, 5'h01},
    '{0, 4, 3, 64'h000000008ab5f24f, 64'h0000000080000000, 64'h000000007f800000, 5'h08},
    '{0, 5, 0, 64'h0000000040800000, 64'h0000000036696f96, 64'h0000000040000000, 5'h00},
    '{0, 4, 4, 64'h0000000096f6f136, 64'h00000000109d3c17, 64'h00000000c5c90735, 5'h01},
    '{0, 5, 3, 64'h000000004f4ea17b, 64'h00000000ff800000, 64'h000000004765fe9a, 5'h01},
    '{0, 4, 1, 64'h0000000022b4a9a0, 64'h0000000006168f7b, 64'h000000005c19976e, 5'h01},
    '{0, 5, 2, 64'h000000007d10d790, 64'h000000007f800000, 64'h000000005e408f7f, 5'h01},
    '{0, 4, 3, 64'h00000000de5879f2, 64'h00000000924b810b, 64'h000000007f800000, 5'h05},
    '{0, 5, 0, 64'h00000000752dc1a4, 64'h000000008482b89e, 64'h000000005a52e81e, 5'h01},
    '{0, 4, 4, 64'h0000000000089c52, 64'h0000000011ffeaf3, 64'h000000002c09d075, 5'h01},
    '{0, 5, 0, 64'h000000007f7fffff, 64'h0000000000000000, 64'h000000005f7fffff, 5'h01},
    '{0, 4, 1, 64'h00000000ac2d08e6, 64'h00000000007fffff, 64'h00000000eb2d08e7, 5'h01},
    '{0, 5, 0, 64'h0000000079653027, 64'h00000000007fffff, 64'h000000005c72392e, 5'h01},
    '{2, 4, 4, 64'h0000000000000001, 64'h0000000000005049, 64'h0000000000000000, 5'h03},
    '{2, 5, 0, 64'h0000000000000000, 64'h000000000000bae9, 64'h0000000000000000, 5'h00},
    '{2, 4, 2, 64'h000000000000de52, 64'h0000000000006e2a, 64'h000000000000ac1a, 5'h01},
    '{2, 5, 0, 64'h0000000000004000, 64'h0000000000003c00, 64'h0000000000003da8, 5'h01},
    '{2, 4, 0, 64'h000000000000dbae, 64'h0000000000008578, 64'h0000000000007c00, 5'h05},
    '{2, 5, 2, 64'h0000000000004400, 64'h000000000000f55e, 64'h0000000000004000, 5'h00},
    '{2, 4, 3, 64'h0000000000002d9e, 64'h00000000000055b9, 64'h00000000000013db, 5'h01},
    '{2, 5, 1, 64'h0000000000002255, 64'h0000000000001489, 64'h0000000000002f1e, 5'h01},
    '{2, 4, 3, 64'h000000000000f029, 64'h000000000000a749, 64'h0000000000007c00, 5'h05},
    '{2, 5, 1, 64'h00000000000003ff, 64'h0000000000000352, 64'h0000000000001ffe, 5'h01},
    '{2, 4, 3, 64'h000000000000c2b0, 64'h000000000000efed, 64'h0000000000000ec1, 5'h01},
    '{2, 5, 4, 64'h0000000000006c20, 64'h000000000000802a, 64'h0000000000005410, 5'h01},
    '{2, 4, 2, 64'h0000000000007e00, 64'h0000000000008013, 64'h0000000000007e00, 5'h00},
    '{2, 5, 1, 64'h000000000000fc00, 64'h0000000000007e00, 64'h0000000000007e00, 5'h10},
    '{2, 4, 1, 64'h0000000000008bef, 64'h000000000000006f, 64'h000000000000d093, 5'h01},
    '{2, 5, 4, 64'h0000000000008179, 64'h0000000000009ccc, 64'h0000000000007e00, 5'h10},
    '{4, 4, 3, 64'h0000000000008001, 64'h000000000000db84, 64'h0000000000000001, 5'h03},
    '{4, 5, 1, 64'h000000000000002c, 64'h000000000000c340, 64'h0000000000001f96, 5'h01},
    '{4, 4, 4, 64'h00000000000032ec, 64'h0000000000009d0b, 64'h000000000000d559, 5'h01},
    '{4, 5, 3, 64'h0000000000004000, 64'h0000000000003f80, 64'h0000000000003fb6, 5'h01},
    '{4, 4, 0, 64'h000000000000d470, 64'h000000000000f92b, 64'h0000000000001ab4, 5'h01},
    '{4, 5, 3, 64'h0000000000004080, 64'h000000000000e6d2, 64'h0000000000004000, 5'h00},
    '{4, 4, 0, 64'h0000000000008031, 64'h000000000000a844, 64'h0000000000001700, 5'h00},
    '{4, 5, 2, 64'h000000000000006d, 64'h0000000000007f7f, 64'h0000000000001fec, 5'h01},
    '{4, 4, 0, 64'h0000000000007f81, 64'h000000000000a3be, 64'h0000000000007fc0, 5'h10},
    '{4, 5, 0, 64'h0000000000000008, 64'h00000000000016c4, 64'h0000000000001f00, 5'h00},
    '{4, 4, 2, 64'h000000000000923c, 64'h0000000000007f7f, 64'h0000000000008001, 5'h03},
    '{4, 5, 4, 64'h00000000000038f9, 64'h000000000000f9d8, 64'h0000000000003c33, 5'h01},
    '{4, 4, 0, 64'h00000000000043c7, 64'h0000000000007f7f, 64'h00000000000003c8, 5'h01},
    '{4, 5, 1, 64'h0000000000007f7f, 64'h0000000000000001, 64'h0000000000005f7f, 5'h01},
    '{4, 4, 4, 64'h0000000000007f80, 64'h000000000000a349, 64'h000000000000ff80, 5'h00},
    '{4, 5, 3, 64'h0000000000007f7f, 64'h0000000000000000, 64'h0000000000005f80, 5'h01},
    '{3, 4, 4, 64'h000000000000008a, 64'h00000000000000eb, 64'h0000000000000000, 5'h03},
    '{3, 5, 4, 64'h0000000000000000, 64'h000000000000007a, 64'h0000000000000000, 5'h00},
    '{3, 4, 3, 64'h00000000000000eb, 64'h0000000000000041, 64'h00000000000000e5, 5'h01},
    '{3, 5, 1, 64'h0000000000000040, 64'h000000000000003c, 64'h000000000000003d, 5'h01},
    '{3, 4, 0, 64'h0000000000000000, 64'h000000000000005f, 64'h0000000000000000, 5'h00},
    '{3, 5, 0, 64'h0000000000000044, 64'h0000000000000081, 64'h0000000000000040, 5'h00},
    '{3, 4, 2, 64'h0000000000000051, 64'h0000000000000080, 64'h00000000000000fc, 5'h08},
    '{3, 5, 4, 64'h000000000000001e, 64'h0000000000000005, 64'h000000000000002d, 5'h01},
    '{3, 4, 3, 64'h000000000000009a, 64'h0000000000000082, 64'h0000000000000056, 5'h00},
    '{3, 5, 1, 64'h000000000000004a, 64'h0000000000000023, 64'h0000000000000042, 5'h01},
    '{3, 4, 2, 64'h0000000000000051, 64'h000000000000001f, 64'h000000000000006d, 5'h01},
    '{3, 5, 1, 64'h0000000000000074, 64'h0000000000000080, 64'h0000000000000058, 5'h00},
    '{3, 4, 2, 64'h0000000000000001, 64'h000000000000004b, 64'h0000000000000000, 5'h03},
    '{3, 5, 1, 64'h0000000000000000, 64'h000000000000007d, 64'h0000000000000000, 5'h00},
    '{3, 4, 2, 64'h000000000000007b, 64'h0000000000000002, 64'h000000000000007b, 5'h05},
    '{3, 5, 1, 64'h0000000000000010, 64'h000000000000007b, 64'h0000000000000025, 5'h01}
  };

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][63:0] ops;
  operation_e op;
  fp_format_e fmt;
  roundmode_e rm;
  logic [4:0] iovr;
  logic [3:0] tag_in, tag_out;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [63:0] res;
  status_t st;

  fpnew_divsqrt_multi #(.TagWidth(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .operands_i(ops), .op_i(op), .fmt_i(fmt), .rnd_mode_i(rm),
    .iter_override_i(iovr), .tag_i(tag_in), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .result_o(res), .status_o(st), .tag_o(tag_out), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .busy_o(busy));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int LAT [5] = '{11, 21, 7, 4, 6};   // indexed by fp_format_e

  function automatic logic [63:0] boxed(int f, logic [63:0] v);
    int w = fp_width(fp_format_e'(f));
    return (w >= 64) ? v : (v | ({64{1'b1}} << w));
  endfunction

  task automatic run(input int i, input logic [4:0] ov, input int exp_lat, input int stall);
    int cyc;
    ops[0] = vecs[i].a; ops[1] = vecs[i].b; op = operation_e'(vecs[i].op);
    fmt = fp_format_e'(vecs[i].fmt); rm = roundmode_e'(vecs[i].rm); iovr = ov;
    tag_in = 4'(i); in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0; ops = '0;
    cyc = 1;   // latency counted from the input cycle
    out_ready = (stall == 0);
    while (!out_valid) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (cyc != exp_lat) begin
      failures++;
      $display("FAIL latency vec %0d: %0d cycles, expected %0d", i, cyc, exp_lat);
    end
    if (stall > 0) begin
      logic [63:0] held;
      held = res;
      repeat (stall) @(posedge clk);
      #1 checks++;
      if (!out_valid || res !== held) begin
        failures++; $display("FAIL hold vec %0d", i);
      end
      out_ready = 1;
    end
    if (ov == 0) begin
      checks++;
      if (res !== boxed(vecs[i].fmt, vecs[i].res) || st !== vecs[i].flags || tag_out !== 4'(i)) begin
        failures++;
        $display("FAIL vec %0d fmt %0d op %0d rm %0d a=%h b=%h: got %h/%b exp %h/%b", i, vecs[i].fmt,
                 vecs[i].op, vecs[i].rm, vecs[i].a, vecs[i].b, res, st,
                 boxed(vecs[i].fmt, vecs[i].res), vecs[i].flags);
      end
    end
    @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    ops = '0; op = DIV; fmt = FP64; rm = RNE; iovr = 0; tag_in = 0;
    in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NV; i++) run(i, 5'd0, LAT[vecs[i].fmt], (i % 9 == 4) ? 3 : 0);
    // iteration override: fewer iterations, shorter latency
    run(0, 5'd5, 3 + 5, 0);
    run(16, 5'd2, 3 + 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
