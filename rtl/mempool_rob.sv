// Reorder buffer between a core's load/store port and the L1 interconnect.
//
// The interconnect does not keep order: loads to a bank in the own tile
// return after 1 cycle, to the own local group after 3 and to other groups
// after 5, and contention adds more. The ROB gives each load a slot of a
// circular buffer of Depth entries, in issue order, and sends the slot index
// with the request. A response is written into its slot when it arrives; the
// oldest slot is handed to the core as soon as it is filled. A response for
// the oldest slot bypasses the buffer, so the ROB adds no cycle. Stores get
// no slot and no response. A load is only issued when a slot is free, so the
// network side never has to be stalled (net_rsp_ready_o is always 1).
// Depth bounds the outstanding loads; the paper calls it configurable and
// gives no number, 8 is this design's default.
module mempool_rob
  import mempool_pkg::*;
#(
  parameter int unsigned Depth = RobDepth,
  localparam int unsigned IdBits = $clog2(Depth)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // core side
  input  logic              core_req_valid_i,
  output logic              core_req_ready_o,
  input  core_req_t         core_req_i,
  output logic              core_rsp_valid_o,
  input  logic              core_rsp_ready_i,
  output data_t             core_rsp_data_o,
  // network side
  output logic              net_req_valid_o,
  input  logic              net_req_ready_i,
  output core_req_t         net_req_o,
  output logic [IdBits-1:0] net_req_id_o,
  input  logic              net_rsp_valid_i,
  output logic              net_rsp_ready_o,
  input  data_t             net_rsp_data_i,
  input  logic [IdBits-1:0] net_rsp_id_i
);
  logic [Depth-1:0]  done_q;
  data_t             data_q [Depth];
  logic [IdBits-1:0] head_q, tail_q;
  logic [IdBits:0]   count_q;
  logic              full, is_load, issue, bypass, pop;

  assign full     = (count_q == (IdBits+1)'(Depth));
  assign is_load  = ~core_req_i.wen;

  assign net_req_valid_o  = core_req_valid_i & ~(is_load & full);
  assign core_req_ready_o = net_req_ready_i & ~(is_load & full);
  assign net_req_o        = core_req_i;
  assign net_req_id_o     = tail_q;
  assign issue            = core_req_valid_i & core_req_ready_o & is_load;

  assign net_rsp_ready_o  = 1'b1;
  assign bypass           = net_rsp_valid_i & (net_rsp_id_i == head_q) & ~done_q[head_q];
  assign core_rsp_valid_o = (count_q != '0) & (done_q[head_q] | bypass);
  assign core_rsp_data_o  = done_q[head_q] ? data_q[head_q] : net_rsp_data_i;
  assign pop              = core_rsp_valid_o & core_rsp_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      done_q  <= '0;
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      if (net_rsp_valid_i) begin
        done_q[net_rsp_id_i] <= 1'b1;
      end
      if (pop) begin
        done_q[head_q] <= 1'b0;
        head_q <= (32'(head_q) == Depth - 1) ? '0 : head_q + 1'b1;
      end
      if (issue) begin
        tail_q <= (32'(tail_q) == Depth - 1) ? '0 : tail_q + 1'b1;
      end
      count_q <= count_q + (IdBits+1)'(issue) - (IdBits+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (net_rsp_valid_i) data_q[net_rsp_id_i] <= net_rsp_data_i;
  end

`ifndef SYNTHESIS
  // A response must belong to an outstanding, not yet answered slot.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   net_rsp_valid_i |-> (count_q != '0) && !done_q[net_rsp_id_i])
    else $error("ROB received a response for a free or answered slot");
`endif

endmodule
