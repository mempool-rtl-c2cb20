// Elastic buffer forming a register boundary on a valid/ready channel.
//
// Two registers, A and B. Data entering is captured in A; if A cannot drain
// because the output stalls, the next datum is parked in B. The output is
// always driven from a register and the input ready depends only on the
// buffer's own state, so neither the forward (valid/data) nor the backward
// (ready) path crosses the boundary combinationally. Latency is one cycle
// and throughput is one datum per cycle.
//
// The paper places such boundaries at the tile's master request and response
// ports and at the local groups' master interfaces, and allows one at each
// crossbar output; the two-entry structure is this design's choice.
// Reset empties both registers.
module mempool_spill_reg #(
  parameter type T = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);
  logic a_full_q, b_full_q;
  T     a_data_q, b_data_q;
  logic a_fill, a_drain, b_fill, b_drain;

  // Output is B when it holds something (it is older), else A.
  assign valid_o = a_full_q | b_full_q;
  assign data_o  = b_full_q ? b_data_q : a_data_q;
  // Accept unless both registers hold data.
  assign ready_o = ~a_full_q | ~b_full_q;

  // A drains whenever B is free: to the output if it is ready, else into B.
  assign a_fill  = valid_i & ready_o;
  assign a_drain = a_full_q & ~b_full_q;
  assign b_fill  = a_drain & ~ready_i;
  assign b_drain = b_full_q & ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
      a_data_q <= '0;
      b_data_q <= '0;
    end else begin
      if (a_fill)       a_data_q <= data_i;
      if (a_fill)       a_full_q <= 1'b1;
      else if (a_drain) a_full_q <= 1'b0;
      if (b_fill)       b_data_q <= a_data_q;
      if (b_fill)       b_full_q <= 1'b1;
      else if (b_drain) b_full_q <= 1'b0;
    end
  end

endmodule
