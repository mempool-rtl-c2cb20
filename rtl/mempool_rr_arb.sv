// Round-robin arbiter with a data multiplexer (valid/ready on both sides).
//
// Among the requesting inputs, the first one at or after the priority
// pointer wins. The pointer moves to the input after the winner each time a
// transfer completes at the output, so every requester is served within
// NumIn transfers. The grant is combinational: an input's ready is the
// output's ready gated by its grant. While the output is stalled the grant
// is locked, so a newly arriving request cannot replace the offered one and
// the output stays stable until it is taken. The pointer resets to input 0.
module mempool_rr_arb #(
  parameter int unsigned NumIn = 4,
  parameter type         T     = logic [31:0],
  localparam int unsigned IdxWidth = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NumIn-1:0]    req_i,
  output logic [NumIn-1:0]    gnt_o,
  input  T     [NumIn-1:0]    data_i,
  output logic                valid_o,
  input  logic                ready_i,
  output T                    data_o,
  output logic [IdxWidth-1:0] idx_o
);
  logic [IdxWidth-1:0] ptr_q;
  logic [IdxWidth-1:0] winner, pick, lock_idx_q;
  logic                found, lock_q;

  always_comb begin
    pick   = '0;
    found  = 1'b0;
    // Two passes over the inputs: first those at or above the pointer,
    // then those below it.
    for (int unsigned k = 0; k < 2 * NumIn; k++) begin
      int unsigned i;
      i = k % NumIn;
      if (!found && req_i[i] && ((k >= NumIn) || (i >= 32'(ptr_q)))) begin
        pick   = IdxWidth'(i);
        found  = 1'b1;
      end
    end
  end

  assign winner  = lock_q ? lock_idx_q : pick;
  assign valid_o = lock_q ? req_i[lock_idx_q] : found;
  assign data_o  = data_i[winner];
  assign idx_o   = winner;

  always_comb begin
    gnt_o = '0;
    if (valid_o && ready_i) gnt_o[winner] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q      <= '0;
      lock_q     <= 1'b0;
      lock_idx_q <= '0;
    end else begin
      lock_q     <= valid_o & ~ready_i;
      lock_idx_q <= winner;
      if (valid_o && ready_i) begin
        ptr_q <= (32'(winner) == NumIn - 1) ? '0 : winner + 1'b1;
      end
    end
  end

endmodule
