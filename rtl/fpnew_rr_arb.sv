// fpnew_rr_arb: fair round-robin arbiter with valid-ready handshake.
//
// Merges NumIn result streams into one. Among the requesting inputs the first
// one at or after the priority pointer is granted; after a completed output
// handshake the pointer moves to the input after the granted one, so every
// requester is served within NumIn handshakes. While an offered output is
// stalled (valid and not ready) the grant is locked, so the output is not
// withdrawn or changed before it is taken. Only the granted input sees ready.
// The arbiter is combinational from request to output; the pointer and the
// lock are the only state.
module fpnew_rr_arb #(
  parameter int unsigned NumIn = 4,
  parameter type         T     = logic
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [NumIn-1:0] in_valid_i,
  output logic [NumIn-1:0] in_ready_o,
  input  T                 in_data_i [NumIn],
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output T                 out_data_o,
  output logic [$clog2(NumIn > 1 ? NumIn : 2)-1:0] grant_o
);
  localparam int unsigned IdxW = $clog2(NumIn > 1 ? NumIn : 2);

  logic [IdxW-1:0] ptr_q, lock_idx_q, sel;
  logic            locked_q, found;

  always_comb begin
    sel   = ptr_q;
    found = 1'b0;
    for (int k = 0; k < NumIn; k++) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % NumIn;
      if (!found && in_valid_i[idx]) begin
        sel   = IdxW'(idx);
        found = 1'b1;
      end
    end
    if (locked_q) sel = lock_idx_q;
  end

  assign grant_o     = sel;
  assign out_valid_o = |in_valid_i;
  assign out_data_o  = in_data_i[sel];
  always_comb begin
    in_ready_o      = '0;
    in_ready_o[sel] = out_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q      <= '0;
      locked_q   <= 1'b0;
      lock_idx_q <= '0;
    end else begin
      locked_q   <= out_valid_o && !out_ready_i;
      lock_idx_q <= sel;
      if (out_valid_o && out_ready_i)
        ptr_q <= IdxW'((int'(sel) + 1) % NumIn);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (out_valid_o && !out_ready_i) |=> out_valid_o && $stable(grant_o));

endmodule
