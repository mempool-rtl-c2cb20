// Per-tile L1 instruction cache: 2 KiB, 4-way set associative, read-only,
// with a 32-bit AXI4 refill port (read channels only).
//
// NumPorts cores fetch through one lookup port. Each cycle a round-robin
// arbiter picks one fetching core; its address is looked up in all ways of
// its set. On a hit the word is returned in the same cycle (fetch_ready_o
// for that core). On a miss the cache issues one AXI INCR burst of LineWords
// 32-bit beats for the aligned line, fills the victim way (round robin per
// set) and returns to lookup; the waiting core then hits. Only one miss is
// outstanding. A core keeps fetch_valid_i and its address until it is
// served. Reset invalidates all lines.
// The paper gives the size, the 4 ways and the 32-bit AXI refill port; line
// size, replacement, port sharing and the blocking refill are this design's.
module mempool_icache
  import mempool_pkg::*;
#(
  parameter int unsigned NumPorts  = NumCoresPerTile,
  parameter int unsigned SizeBytes = ICacheSizeBytes,
  parameter int unsigned Ways      = ICacheWays,
  parameter int unsigned LineWords = ICacheLineWords
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic  [NumPorts-1:0] fetch_valid_i,
  input  addr_t [NumPorts-1:0] fetch_addr_i,
  output logic  [NumPorts-1:0] fetch_ready_o,
  output data_t [NumPorts-1:0] fetch_data_o,
  // AXI4 refill port, read channels
  output logic                 axi_ar_valid_o,
  input  logic                 axi_ar_ready_i,
  output axi_ar_t              axi_ar_o,
  input  logic                 axi_r_valid_i,
  output logic                 axi_r_ready_o,
  input  axi_r_t               axi_r_i
);
  localparam int unsigned LineBytes = LineWords * 4;
  localparam int unsigned NumSets   = SizeBytes / (LineBytes * Ways);
  localparam int unsigned OffBits   = $clog2(LineBytes);
  localparam int unsigned SetBits   = $clog2(NumSets);
  localparam int unsigned TagBits   = AddrWidth - OffBits - SetBits;
  localparam int unsigned WordBits  = $clog2(LineWords);
  localparam int unsigned WayBits   = $clog2(Ways);
  localparam int unsigned PortBits_ = (NumPorts > 1) ? $clog2(NumPorts) : 1;

  typedef logic [TagBits-1:0] tag_t;
  typedef enum logic [1:0] {Lookup, SendAr, Refill} state_e;

  logic [NumSets-1:0][Ways-1:0] valid_q;
  tag_t                  tags_q [NumSets][Ways];
  data_t                 lines_q[NumSets][Ways][LineWords];
  logic [WayBits-1:0]    victim_q [NumSets];
  state_e                state_q;
  addr_t                 miss_addr_q;
  logic [WordBits-1:0]   beat_q;

  // Arbitration among the fetching cores.
  logic                  sel_valid;
  addr_t                 sel_addr;
  logic [PortBits_-1:0]  sel_idx;
  logic [NumPorts-1:0]   gnt;
  logic                  hit;
  logic [WayBits-1:0]    hit_way;
  logic [SetBits-1:0]    set;
  tag_t                  tag;
  logic [WordBits-1:0]   word;

  mempool_rr_arb #(.NumIn(NumPorts), .T(addr_t)) i_arb (
    .clk_i, .rst_ni,
    .req_i   (fetch_valid_i),
    .gnt_o   (gnt),
    .data_i  (fetch_addr_i),
    .valid_o (sel_valid),
    .ready_i (hit && state_q == Lookup),
    .data_o  (sel_addr),
    .idx_o   (sel_idx)
  );

  assign set  = sel_addr[OffBits +: SetBits];
  assign tag  = sel_addr[AddrWidth-1 -: TagBits];
  assign word = sel_addr[2 +: WordBits];

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned w = 0; w < Ways; w++) begin
      if (valid_q[set][w] && tags_q[set][w] == tag) begin
        hit     = 1'b1;
        hit_way = WayBits'(w);
      end
    end
  end

  assign fetch_ready_o = gnt;
  for (genvar p = 0; p < NumPorts; p++) begin : gen_data
    assign fetch_data_o[p] = lines_q[set][hit_way][word];
  end

  // Refill port.
  assign axi_ar_valid_o = (state_q == SendAr);
  assign axi_ar_o       = '{addr:  {miss_addr_q[AddrWidth-1:OffBits], OffBits'(0)},
                            len:   8'(LineWords - 1),
                            size:  3'd2,
                            burst: 2'b01};
  assign axi_r_ready_o  = (state_q == Refill);

  logic [SetBits-1:0] miss_set;
  logic [WayBits-1:0] miss_way;
  assign miss_set = miss_addr_q[OffBits +: SetBits];
  assign miss_way = victim_q[miss_set];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= Lookup;
      valid_q     <= '0;
      miss_addr_q <= '0;
      beat_q      <= '0;
      for (int unsigned s = 0; s < NumSets; s++) victim_q[s] <= '0;
    end else begin
      unique case (state_q)
        Lookup: if (sel_valid && !hit) begin
          miss_addr_q <= sel_addr;
          state_q     <= SendAr;
        end
        SendAr: if (axi_ar_ready_i) begin
          beat_q  <= '0;
          // The victim way is invalid while it is being refilled.
          valid_q[miss_set][miss_way] <= 1'b0;
          state_q <= Refill;
        end
        Refill: if (axi_r_valid_i) begin
          beat_q <= beat_q + 1'b1;
          if (axi_r_i.last) begin
            valid_q[miss_set][miss_way] <= 1'b1;
            victim_q[miss_set] <= miss_way + 1'b1;
            state_q <= Lookup;
          end
        end
        default: state_q <= Lookup;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == Refill && axi_r_valid_i) begin
      lines_q[miss_set][miss_way][beat_q] <= axi_r_i.data;
      if (axi_r_i.last) tags_q[miss_set][miss_way] <= miss_addr_q[AddrWidth-1 -: TagBits];
    end
  end

endmodule
