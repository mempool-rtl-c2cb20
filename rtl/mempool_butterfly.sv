// NumPorts x NumPorts radix-4 butterfly network of 4x4 crossbar switches.
//
// The network has log4(NumPorts) layers of NumPorts/4 switches
// (mempool_xbar, 4x4). Layer l routes on base-4 digit (L-1-l) of the
// destination, most significant digit first, so every input/output pair has
// exactly one path (oblivious routing). Wire position p between layers is
// written as base-4 digits; switch p/4 sees it on its port p%4. A switch
// replaces the lowest digit by the destination digit it routes on; between
// two layers the digits are rotated left by one place (a perfect shuffle),
// so after the last layer the position equals the destination. In the
// 16x16 case output k of switch (0,j) feeds input j of switch (1,k), as
// drawn in the paper's butterfly figure, and output m of switch (1,k) is
// network output 4k+m.
//
// PipeLayer > 0 inserts an elastic buffer on every wire after layer
// PipeLayer-1 (the single 64x64 butterfly the paper compares with has one
// midway); the
// cluster's 16x16 butterflies use none, their register boundary sits at
// the group interface instead. sel_i is the destination output index.
module mempool_butterfly #(
  parameter int unsigned NumPorts  = 16,
  parameter type         T         = logic [31:0],
  parameter int unsigned PipeLayer = 0,
  localparam int unsigned IdxWidth = $clog2(NumPorts)
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NumPorts-1:0]               valid_i,
  output logic [NumPorts-1:0]               ready_o,
  input  logic [NumPorts-1:0][IdxWidth-1:0] sel_i,
  input  T     [NumPorts-1:0]               data_i,
  output logic [NumPorts-1:0]               valid_o,
  input  logic [NumPorts-1:0]               ready_i,
  output T     [NumPorts-1:0]               data_o
);
  localparam int unsigned NumLayers   = IdxWidth / 2;
  localparam int unsigned NumSwitches = NumPorts / 4;

  typedef struct packed {
    logic [IdxWidth-1:0] sel;
    T                    data;
  } flit_t;

  // Wires at the input of each layer, index NumLayers is the network output.
  logic  [NumLayers:0][NumPorts-1:0] w_valid, w_ready;
  flit_t [NumLayers:0][NumPorts-1:0] w_flit;

  for (genvar p = 0; p < NumPorts; p++) begin : gen_io
    assign w_valid[0][p]      = valid_i[p];
    assign ready_o[p]         = w_ready[0][p];
    assign w_flit[0][p].sel   = sel_i[p];
    assign w_flit[0][p].data  = data_i[p];
    assign valid_o[p]         = w_valid[NumLayers][p];
    assign w_ready[NumLayers][p] = ready_i[p];
    assign data_o[p]          = w_flit[NumLayers][p].data;
  end

  for (genvar l = 0; l < NumLayers; l++) begin : gen_layer
    // Switch outputs of this layer, before the rotation to the next layer.
    logic  [NumPorts-1:0] o_valid, o_ready;
    flit_t [NumPorts-1:0] o_flit;

    for (genvar s = 0; s < NumSwitches; s++) begin : gen_switch
      logic [3:0][1:0] sel;
      for (genvar i = 0; i < 4; i++) begin : gen_sel
        // Destination digit (NumLayers-1-l), two bits.
        assign sel[i] = w_flit[l][4*s+i].sel[2*(NumLayers-1-l) +: 2];
      end
      mempool_xbar #(
        .NumIn (4), .NumOut (4), .T (flit_t),
        .SpillOutput ((PipeLayer != 0) && (l == PipeLayer - 1))
      ) i_switch (
        .clk_i, .rst_ni,
        .valid_i (w_valid[l][4*s +: 4]),
        .ready_o (w_ready[l][4*s +: 4]),
        .sel_i   (sel),
        .data_i  (w_flit[l][4*s +: 4]),
        .valid_o (o_valid[4*s +: 4]),
        .ready_i (o_ready[4*s +: 4]),
        .data_o  (o_flit[4*s +: 4])
      );
    end

    // Output k of switch s, position 4s+k, moves to its left-rotated
    // position in the next layer (last layer: straight to output 4s+k).
    for (genvar s = 0; s < NumSwitches; s++) begin : gen_wire
      for (genvar k = 0; k < 4; k++) begin : gen_port
        localparam int unsigned Pos = 4*s + k;
        localparam int unsigned Dst = (l == NumLayers - 1) ? Pos
                                    : (Pos * 4) % NumPorts + Pos / NumSwitches;
        assign w_valid[l+1][Dst] = o_valid[4*s+k];
        assign w_flit[l+1][Dst]  = o_flit[4*s+k];
        assign o_ready[4*s+k]    = w_ready[l+1][Dst];
      end
    end
  end

endmodule
