// One L1 scratchpad bank: a single-ported NumWords x 32-bit SRAM with
// byte-enabled writes and one cycle of read latency.
//
// A request accepted in cycle n is executed at the clock edge ending cycle n.
// A load's data and the request's metadata are presented with rsp_valid_o
// from cycle n+1 and held until rsp_ready_i; the bank accepts no further
// request while a response is waiting, so a stalled response interconnect
// back-pressures the requests. Stores write and return nothing: in the paper
// only read responses travel back. The array is not reset; the response
// register is. The memory is written as an array (the chip uses an SRAM
// macro of the same function, which the paper does not detail).
module mempool_bank #(
  parameter int unsigned NumWords  = 256,
  parameter int unsigned DataWidth = 32,
  parameter type         meta_t    = logic [10:0],
  localparam int unsigned AddrBits = $clog2(NumWords)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   req_valid_i,
  output logic                   req_ready_o,
  input  logic [AddrBits-1:0]    req_addr_i,
  input  logic                   req_wen_i,
  input  logic [DataWidth/8-1:0] req_be_i,
  input  logic [DataWidth-1:0]   req_data_i,
  input  meta_t                  req_meta_i,
  output logic                   rsp_valid_o,
  input  logic                   rsp_ready_i,
  output logic [DataWidth-1:0]   rsp_data_o,
  output meta_t                  rsp_meta_o
);
  logic [DataWidth-1:0] mem [NumWords];
  logic                 rsp_valid_q;
  logic [DataWidth-1:0] rdata_q;
  meta_t                meta_q;
  logic                 req_fire;

  assign req_ready_o = ~rsp_valid_q | rsp_ready_i;
  assign req_fire    = req_valid_i & req_ready_o;

  always_ff @(posedge clk_i) begin
    if (req_fire) begin
      if (req_wen_i) begin
        for (int unsigned i = 0; i < DataWidth/8; i++) begin
          if (req_be_i[i]) mem[req_addr_i][8*i +: 8] <= req_data_i[8*i +: 8];
        end
      end else begin
        rdata_q <= mem[req_addr_i];
        meta_q  <= req_meta_i;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_q <= 1'b0;
    end else if (req_fire) begin
      rsp_valid_q <= ~req_wen_i;
    end else if (rsp_ready_i) begin
      rsp_valid_q <= 1'b0;
    end
  end

  assign rsp_valid_o = rsp_valid_q;
  assign rsp_data_o  = rdata_q;
  assign rsp_meta_o  = meta_q;

endmodule
