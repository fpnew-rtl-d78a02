// tb_fpnew_pipe: self-checking testbench of the valid-ready pipeline.
//
// Instances with 3 registers and with 0 registers (wire) carry 16-bit tokens.
// Phase 1: a free-running stream with the output always ready checks the
// latency (a token leaves exactly NumRegs cycles after it entered) and the
// throughput (one token per cycle). Phase 2: with the output stalled, the
// pipeline must accept exactly NumRegs tokens (bubbles are popped) and then
// hold. Phase 3: random in_valid / out_ready ($urandom) with a scoreboard checks
// that tokens leave in order, unchanged and without loss or duplication.
module tb_fpnew_pipe;
  localparam int unsigned L = 3;
  typedef logic [15:0] tok_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, busy;
  tok_t din, dout;
  logic w_ready, w_valid, w_busy;
  tok_t w_dout;

  fpnew_pipe #(.NumRegs(L), .T(tok_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(din),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(dout), .busy_o(busy));
  fpnew_pipe #(.NumRegs(0), .T(tok_t)) wire_dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(w_ready), .in_data_i(din),
    .out_valid_o(w_valid), .out_ready_i(out_ready), .out_data_o(w_dout), .busy_o(w_busy));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  tok_t exp_q [$];
  int   t_in  [$];
  tok_t next_tok = 0;
  int   lat_check = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin exp_q.push_back(din); t_in.push_back(cycle); end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || dout !== exp_q[0]) begin
        failures++; $display("FAIL token order: got %h", dout);
      end else begin
        if (lat_check && (cycle - t_in[0]) != L) begin
          failures++; $display("FAIL latency %0d", cycle - t_in[0]);
        end
        void'(exp_q.pop_front()); void'(t_in.pop_front());
      end
    end
    // the zero-register instance is a wire
    if (w_valid !== in_valid || w_ready !== out_ready || w_dout !== din || w_busy !== 1'b0) begin
      failures++; $display("FAIL wire instance");
    end
  end

  int got;
  initial begin
    in_valid = 0; out_ready = 1; din = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // phase 1: streaming, latency and throughput
    lat_check = 1;
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; din = next_tok++;
      @(posedge clk); #1;
      checks++;
      if (!in_ready) begin failures++; $display("FAIL throughput"); end
    end
    in_valid = 0;
    repeat (L + 2) @(posedge clk);
    #1 lat_check = 0;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL stream not drained"); end
    // phase 2: stalled output, the pipeline fills with L tokens
    out_ready = 0; got = 0;
    for (int i = 0; i < L + 3; i++) begin
      in_valid = 1; din = next_tok;
      @(posedge clk);
      if (in_ready) begin got++; next_tok++; end
      #1;
    end
    in_valid = 0;
    checks++;
    if (got != L || !busy) begin failures++; $display("FAIL fill: accepted %0d", got); end
    out_ready = 1;
    repeat (L + 2) @(posedge clk);
    // phase 3: random traffic
    for (int i = 0; i < 2000; i++) begin
      #1;
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      if (in_valid) din = next_tok;
      @(posedge clk);
      if (in_valid && in_ready) next_tok++;
    end
    #1 in_valid = 0; out_ready = 1;
    repeat (L + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || busy) begin failures++; $display("FAIL tokens lost: %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
