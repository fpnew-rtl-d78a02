// fpnew_pipe: chain of NumRegs pipeline registers with a valid-ready
// handshake on both ends.
//
// Every stage holds a valid token and a payload. A stage accepts new data
// when it is empty or when the stage after it moves on (ready of stage i is
// ready of stage i+1 OR not valid of stage i+1), so a stalled output holds
// the pipeline while bubbles in front of the stall are removed ("popped"):
// later data catches up with the stalled head. Payload registers load only
// with a handshake, which lets synthesis gate their clocks; only the valid
// tokens are unconditionally clocked and reset. With NumRegs = 0 the module
// is a wire. Latency is NumRegs cycles, throughput one item per cycle.
module fpnew_pipe #(
  parameter int unsigned NumRegs = 1,
  parameter type         T       = logic
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o,
  output logic busy_o
);

  if (NumRegs == 0) begin : g_wire
    assign out_valid_o = in_valid_i;
    assign in_ready_o  = out_ready_i;
    assign out_data_o  = in_data_i;
    assign busy_o      = 1'b0;
  end else begin : g_regs
    logic [NumRegs:0] valid, ready;
    T                 data [NumRegs+1];

    assign valid[0] = in_valid_i;
    assign data[0]  = in_data_i;
    assign in_ready_o = ready[0];

    for (genvar i = 0; i < NumRegs; i++) begin : g_stage
      assign ready[i] = ready[i+1] | ~valid[i+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)       valid[i+1] <= 1'b0;
        else if (ready[i]) valid[i+1] <= valid[i];
      end
      always_ff @(posedge clk_i) begin
        if (ready[i] && valid[i]) data[i+1] <= data[i];
      end
    end

    assign ready[NumRegs] = out_ready_i;
    assign out_valid_o    = valid[NumRegs];
    assign out_data_o     = data[NumRegs];
    assign busy_o         = |valid[NumRegs:1];

    // Handshake rule: an offered output stays valid and unchanged until taken.
    property p_hold;
      @(posedge clk_i) disable iff (!rst_ni)
        (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o));
    endproperty
    assert property (p_hold);
  end

endmodule
