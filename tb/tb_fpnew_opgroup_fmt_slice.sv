// tb_fpnew_opgroup_fmt_slice: self-checking testbench of the parallel slice.
//
// Two slices are tested side by side with the same random stimulus
// ($urandom): an ADDMUL slice for FP16 (four SIMD lanes, 3 pipeline registers
// as in the main configuration) and a COMP slice for FP32 (two lanes, one
// register). Expected values come from separately instantiated lane units
// (fpnew_fma / fpnew_noncomp, verified by their own testbenches) applied to
// each element, so this bench checks what the slice adds: lane wiring, SIMD
// packing, NaN-boxing of scalar FP results, zero-extension of scalar integer
// results, flag merging, operand silencing of unused lanes (zero operands
// seen by lanes 1..n-1 during scalar operations), tag transport, the latency
// (result NumPipeRegs cycles after the input) and back-pressure (random
// out_ready, results held and delivered in order).
module tb_fpnew_opgroup_fmt_slice;
  import fpnew_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  typedef struct packed {
    logic [63:0] res;
    status_t     st;
    logic [3:0]  tag;
  } exp_t;

  // shared stimulus
  logic [2:0][63:0] ops;
  operation_e op_a, op_c;
  logic       mod_a, mod_c, vec;
  roundmode_e rm_a, rm_c;
  logic [3:0] tag;
  logic       valid, ready_out;

  // ---------------- ADDMUL FP16, 4 lanes, 3 registers ----------------
  logic        a_ready, a_valid, a_busy;
  logic [63:0] a_res;
  status_t     a_st;
  logic [3:0]  a_tag;
  fpnew_opgroup_fmt_slice #(.OpGroup(ADDMUL), .FpFormat(FP16), .Width(64), .EnableVectors(1),
                            .NumPipeRegs(3), .TagWidth(4)) dut_a (
    .clk_i(clk), .rst_ni(rst_n), .operands_i(ops), .rnd_mode_i(rm_a), .op_i(op_a), .op_mod_i(mod_a),
    .vectorial_op_i(vec), .tag_i(tag), .in_valid_i(valid), .in_ready_o(a_ready), .result_o(a_res),
    .status_o(a_st), .tag_o(a_tag), .out_valid_o(a_valid), .out_ready_i(ready_out), .busy_o(a_busy));

  logic [3:0][15:0] ra;
  status_t [3:0]    sa;
  for (genvar l = 0; l < 4; l++) begin : g_ref_a
    fpnew_fma #(.FpFormat(FP16)) r (
      .operands_i({ops[2][l*16 +: 16], ops[1][l*16 +: 16], ops[0][l*16 +: 16]}),
      .op_i(op_a), .op_mod_i(mod_a), .rnd_mode_i(rm_a), .result_o(ra[l]), .status_o(sa[l]));
  end

  // ---------------- COMP FP32, 2 lanes, 1 register ----------------
  logic        c_ready, c_valid, c_busy;
  logic [63:0] c_res;
  status_t     c_st;
  logic [3:0]  c_tag;
  fpnew_opgroup_fmt_slice #(.OpGroup(NONCOMP), .FpFormat(FP32), .Width(64), .EnableVectors(1),
                            .NumPipeRegs(1), .TagWidth(4)) dut_c (
    .clk_i(clk), .rst_ni(rst_n), .operands_i(ops), .rnd_mode_i(rm_c), .op_i(op_c), .op_mod_i(mod_c),
    .vectorial_op_i(vec), .tag_i(tag), .in_valid_i(valid), .in_ready_o(c_ready), .result_o(c_res),
    .status_o(c_st), .tag_o(c_tag), .out_valid_o(c_valid), .out_ready_i(ready_out), .busy_o(c_busy));

  logic [1:0][31:0] rc;
  logic [1:0][9:0]  ic;
  logic [1:0]       isi;
  status_t [1:0]    sc;
  for (genvar l = 0; l < 2; l++) begin : g_ref_c
    fpnew_noncomp #(.FpFormat(FP32)) r (
      .operands_i({ops[1][l*32 +: 32], ops[0][l*32 +: 32]}), .op_i(op_c), .op_mod_i(mod_c),
      .rnd_mode_i(rm_c), .result_o(rc[l]), .int_result_o(ic[l]), .is_int_o(isi[l]),
      .status_o(sc[l]));
  end

  int checks = 0, failures = 0, silenced = 0, stalls = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  exp_t qa [$], qc [$];
  int   ta [$], tc [$];

  function automatic exp_t expect_a();
    exp_t e;
    e.tag = tag; e.st = '0;
    if (vec) begin
      for (int l = 0; l < 4; l++) begin e.res[l*16 +: 16] = ra[l]; e.st |= sa[l]; end
    end else begin
      e.res = {48'hffffffffffff, ra[0]}; e.st = sa[0];
    end
    return e;
  endfunction

  function automatic exp_t expect_c();
    exp_t e;
    e.tag = tag; e.st = '0;
    if (vec) begin
      for (int l = 0; l < 2; l++) begin
        e.res[l*32 +: 32] = isi[l] ? 32'(ic[l]) : rc[l]; e.st |= sc[l];
      end
    end else begin
      e.res = isi[0] ? 64'(ic[0]) : {32'hffffffff, rc[0]}; e.st = sc[0];
    end
    return e;
  endfunction

  // capture on input handshake (both slices are always ready together here
  // only when their pipelines have room, so each is tracked on its own)
  logic a_take, c_take;
  always @(posedge clk) if (rst_n) begin
    if (valid && a_ready) begin qa.push_back(expect_a()); ta.push_back(cycle); end
    if (valid && c_ready) begin qc.push_back(expect_c()); tc.push_back(cycle); end
    if (valid && !vec) begin
      checks++;
      if (dut_a.g_lane[1].ops !== '0 || dut_a.g_lane[3].ops !== '0 || dut_c.g_lane[1].ops !== '0) begin
        failures++; $display("FAIL unused lane not silenced");
      end else silenced++;
    end
    if (!valid) begin
      checks++;
      if (dut_a.g_lane[0].ops !== '0) begin failures++; $display("FAIL idle slice not silenced"); end
    end
    if (a_valid && !ready_out) stalls++;
    if (a_valid && ready_out) begin
      checks++;
      if (qa.size() == 0 || {a_res, a_st, a_tag} !== qa[0]) begin
        failures++; $display("FAIL addmul got %h/%b/%h exp %h/%b/%h", a_res, a_st, a_tag,
                             qa[0].res, qa[0].st, qa[0].tag);
      end else if (ta[0] + 3 > cycle) begin
        failures++; $display("FAIL addmul too early");
      end
      void'(qa.pop_front()); void'(ta.pop_front());
    end
    if (c_valid && ready_out) begin
      checks++;
      if (qc.size() == 0 || {c_res, c_st, c_tag} !== qc[0]) begin
        failures++; $display("FAIL comp got %h/%b/%h exp %h/%b/%h", c_res, c_st, c_tag,
                             qc[0].res, qc[0].st, qc[0].tag);
      end
      void'(qc.pop_front()); void'(tc.pop_front());
    end
  end

  localparam operation_e AOPS [4] = '{FMADD, FNMSUB, ADD, MUL};
  localparam operation_e COPS [4] = '{SGNJ, MINMAX, CMP, CLASSIFY};

  task automatic new_stim();
    ops  = {{$urandom, $urandom}, {$urandom, $urandom}, {$urandom, $urandom}};
    op_a = AOPS[$urandom_range(0, 3)]; mod_a = 1'($urandom);
    rm_a = roundmode_e'($urandom_range(0, 4));
    op_c = COPS[$urandom_range(0, 3)]; mod_c = 1'($urandom);
    rm_c = roundmode_e'($urandom_range(0, 2));
    vec  = 1'($urandom); tag = 4'($urandom);
  endtask

  initial begin
    int t0, lat;
    ops = '0; op_a = FMADD; op_c = SGNJ; mod_a = 0; mod_c = 0; rm_a = RNE; rm_c = RNE;
    vec = 0; tag = 0; valid = 0; ready_out = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // latency: a single operation through an empty pipeline
    new_stim(); valid = 1; t0 = cycle;
    @(posedge clk); #1 valid = 0; lat = 1;
    while (!a_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL ADDMUL latency %0d, expected 3", lat); end
    repeat (4) @(posedge clk);
    // random traffic with back-pressure; both slices see the same input, so
    // valid is held until both have taken it
    for (int n = 0; n < 1500; n++) begin
      logic got_a, got_c;
      #1 new_stim(); valid = 1; ready_out = ($urandom_range(0, 3) != 0);
      got_a = 0; got_c = 0;
      while (!(got_a && got_c)) begin
        @(posedge clk);
        if (a_ready) got_a = 1;
        if (c_ready) got_c = 1;
        #1 ready_out = ($urandom_range(0, 3) != 0);
        if (!(got_a && got_c)) begin
          // the slice that already took the operation must not take it twice
          valid = 0;
          @(posedge clk); #1;
          // re-offer only to complete the other one: count as a new item
          got_a = 1; got_c = 1;
        end
      end
      valid = 0;
      if ($urandom_range(0, 2) == 0) @(posedge clk);
    end
    #1 valid = 0; ready_out = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (qa.size() != 0 || qc.size() != 0) begin failures++; $display("FAIL results lost"); end
    $display("silenced scalar ops %0d, stalled cycles %0d", silenced, stalls);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no back-pressure exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
