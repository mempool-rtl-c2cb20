// Single-stage NumIn x NumOut crossbar switch, the base element of both
// MemPool interconnects.
//
// Each input carries a payload and the index of the output it wants
// (sel_i, computed by the caller from the address or the response metadata:
// the "address decoding" step). Each output has its own round-robin arbiter
// (mempool_rr_arb) choosing among the inputs that select it, so transfers to
// different outputs proceed in parallel and the switch is non-blocking.
// If SpillOutput is set, an elastic buffer (mempool_spill_reg) follows each
// arbiter, breaking all combinational paths through the switch at the cost
// of one cycle; otherwise the switch is purely combinational.
// The switch keeps no ordering between outputs; transfers between one input
// and one output stay in order.
module mempool_xbar #(
  parameter int unsigned NumIn       = 4,
  parameter int unsigned NumOut      = 4,
  parameter type         T           = logic [31:0],
  parameter bit          SpillOutput = 1'b0,
  localparam int unsigned SelWidth   = (NumOut > 1) ? $clog2(NumOut) : 1
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NumIn-1:0]                  valid_i,
  output logic [NumIn-1:0]                  ready_o,
  input  logic [NumIn-1:0][SelWidth-1:0]    sel_i,
  input  T     [NumIn-1:0]                  data_i,
  output logic [NumOut-1:0]                 valid_o,
  input  logic [NumOut-1:0]                 ready_i,
  output T     [NumOut-1:0]                 data_o
);
  logic [NumOut-1:0][NumIn-1:0] req, gnt;
  logic [NumOut-1:0]            arb_valid, arb_ready;
  T     [NumOut-1:0]            arb_data;

  // Address decoding: input i requests output j.
  always_comb begin
    for (int unsigned j = 0; j < NumOut; j++) begin
      for (int unsigned i = 0; i < NumIn; i++) begin
        req[j][i] = valid_i[i] && (NumOut == 1 || 32'(sel_i[i]) == j);
      end
    end
  end

  always_comb begin
    ready_o = '0;
    for (int unsigned j = 0; j < NumOut; j++) ready_o |= gnt[j];
  end

  for (genvar j = 0; j < NumOut; j++) begin : gen_out
    logic [((NumIn > 1) ? $clog2(NumIn) : 1)-1:0] idx;
    mempool_rr_arb #(.NumIn(NumIn), .T(T)) i_arb (
      .clk_i, .rst_ni,
      .req_i   (req[j]),
      .gnt_o   (gnt[j]),
      .data_i  (data_i),
      .valid_o (arb_valid[j]),
      .ready_i (arb_ready[j]),
      .data_o  (arb_data[j]),
      .idx_o   (idx)
    );
    if (SpillOutput) begin : gen_spill
      mempool_spill_reg #(.T(T)) i_spill (
        .clk_i, .rst_ni,
        .valid_i (arb_valid[j]),
        .ready_o (arb_ready[j]),
        .data_i  (arb_data[j]),
        .valid_o (valid_o[j]),
        .ready_i (ready_i[j]),
        .data_o  (data_o[j])
      );
    end else begin : gen_comb
      assign valid_o[j]   = arb_valid[j];
      assign arb_ready[j] = ready_i[j];
      assign data_o[j]    = arb_data[j];
    end
  end

`ifndef SYNTHESIS
  // A stalled input must keep its request until it is served.
  for (genvar i = 0; i < NumIn; i++) begin : gen_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     valid_i[i] && !ready_o[i] |=> valid_i[i])
      else $error("xbar input %0d dropped a pending request", i);
  end
`endif

endmodule
