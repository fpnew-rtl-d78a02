// tb_fpnew_rr_arb: self-checking testbench of the round-robin arbiter.
//
// Four inputs carry 8-bit payloads. A reference model of the round-robin
// rule (first requester at or after the pointer; pointer moves past the
// winner after each output handshake) predicts the grant every cycle, and
// the output data, ready routing and grant lock during a stall are checked.
// Random request and out_ready patterns come from $urandom; requesters keep
// their request until served, as the handshake demands. Fairness: with all
// four inputs requesting all the time, each is served once per four grants.
// The arbiter is combinational from request to output (zero latency).
module tb_fpnew_rr_arb;
  localparam int N = 4;
  typedef logic [7:0] d_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready;
  d_t           in_data [N];
  logic         out_valid, out_ready;
  d_t           out_data;
  logic [1:0]   grant;

  fpnew_rr_arb #(.NumIn(N), .T(d_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_data_i(in_data), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_data_o(out_data), .grant_o(grant));

  int checks = 0, failures = 0;

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] done;
  int ptr = 0, locked = 0, lock_idx = 0, served [N];

  function automatic int predict(logic [N-1:0] req);
    if (locked) return lock_idx;
    for (int k = 0; k < N; k++)
      if (req[(ptr + k) % N]) return (ptr + k) % N;
    return ptr;
  endfunction

  task automatic check_cycle();
    int g;
    g = predict(in_valid);
    checks++;
    if (out_valid !== (|in_valid)) begin failures++; $display("FAIL out_valid"); end
    if (|in_valid) begin
      if (grant !== 2'(g) || out_data !== in_data[g] || in_ready !== (N'(out_ready) << g)) begin
        failures++;
        $display("FAIL req %b ptr %0d: grant %0d exp %0d ready %b", in_valid, ptr, grant, g, in_ready);
      end
    end
  endtask

  // model update on the clock edge
  task automatic step_model();
    int g;
    g = predict(in_valid);
    locked   = (|in_valid) && !out_ready;
    lock_idx = g;
    if ((|in_valid) && out_ready) begin ptr = (g + 1) % N; served[g]++; end
  endtask

  initial begin
    in_valid = '0; out_ready = 1;
    for (int i = 0; i < N; i++) begin in_data[i] = 8'(i); served[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fairness: all inputs request, output always ready
    in_valid = '1;
    for (int c = 0; c < 40; c++) begin
      #1 check_cycle();
      @(posedge clk); step_model();
    end
    checks++;
    for (int i = 0; i < N; i++)
      if (served[i] != 10) begin failures++; $display("FAIL fairness input %0d: %0d", i, served[i]); end
    // random traffic; a request is only withdrawn after it has been served
    for (int c = 0; c < 3000; c++) begin
      #1;
      for (int i = 0; i < N; i++) begin
        if (!in_valid[i] && $urandom_range(0, 2) == 0) begin
          in_valid[i] = 1; in_data[i] = 8'($urandom);
        end
      end
      out_ready = ($urandom_range(0, 3) != 0);
      #1 check_cycle();
      done = in_valid & in_ready;
      @(posedge clk); step_model();
      #1 in_valid = in_valid & ~done;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
