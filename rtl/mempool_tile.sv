// MemPool tile: four cores' memory ports, 16 L1 banks, the instruction
// cache, and the tile's share of the interconnect.
//
// Request path. Each core's request passes its ROB (mempool_rob), which tags
// loads, then the scrambler (hybrid address map) and the address decoder.
// A request for a bank of this tile enters the request crossbar on the core's
// own input; any other goes through the remote request crossbar (4 cores to
// K = 4 ports: L, E, N, NE) and a register boundary to the master request
// port. The request crossbar is fully connected, 4 cores + K slave request
// ports to 16 banks, selected by the bank bits of the address.
// Response path. The response crossbar takes the 16 banks to the 4 cores or
// to the K master response ports (through a register boundary): the port is
// the one the request came in on, which the bank keeps next to the metadata
// while it reads. Responses from other tiles arrive on the K slave response ports
// and pass the remote response crossbar (K to 4 cores). Per core a 2:1
// round-robin multiplexer merges local and remote responses into the ROB.
// Zero-load latency: 1 cycle to a bank of the own tile.
// The structure follows the paper's tile figure; the 2:1 merge arbitration
// and the metadata format are this design's choices. The tile index is an
// input so that all 64 tiles are one module.
module mempool_tile
  import mempool_pkg::*;
(
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  tile_id_t                            tile_id_i,
  // core memory ports (the cores are outside this design)
  input  logic      [NumCoresPerTile-1:0]     core_req_valid_i,
  output logic      [NumCoresPerTile-1:0]     core_req_ready_o,
  input  core_req_t [NumCoresPerTile-1:0]     core_req_i,
  output logic      [NumCoresPerTile-1:0]     core_rsp_valid_o,
  input  logic      [NumCoresPerTile-1:0]     core_rsp_ready_i,
  output data_t     [NumCoresPerTile-1:0]     core_rsp_data_o,
  // core instruction fetch ports
  input  logic      [NumCoresPerTile-1:0]     fetch_valid_i,
  input  addr_t     [NumCoresPerTile-1:0]     fetch_addr_i,
  output logic      [NumCoresPerTile-1:0]     fetch_ready_o,
  output data_t     [NumCoresPerTile-1:0]     fetch_data_o,
  // instruction cache refill (AXI4 read channels)
  output logic                                axi_ar_valid_o,
  input  logic                                axi_ar_ready_i,
  output axi_ar_t                             axi_ar_o,
  input  logic                                axi_r_valid_i,
  output logic                                axi_r_ready_o,
  input  axi_r_t                              axi_r_i,
  // master request ports (own cores' requests to other tiles), registered
  output logic      [NumTilePorts-1:0]        mst_req_valid_o,
  input  logic      [NumTilePorts-1:0]        mst_req_ready_i,
  output tcdm_req_t [NumTilePorts-1:0]        mst_req_o,
  // slave response ports (responses to own cores' remote requests)
  input  logic      [NumTilePorts-1:0]        slv_rsp_valid_i,
  output logic      [NumTilePorts-1:0]        slv_rsp_ready_o,
  input  tcdm_rsp_t [NumTilePorts-1:0]        slv_rsp_i,
  // slave request ports (other tiles' requests to this tile's banks)
  input  logic      [NumTilePorts-1:0]        slv_req_valid_i,
  output logic      [NumTilePorts-1:0]        slv_req_ready_o,
  input  tcdm_req_t [NumTilePorts-1:0]        slv_req_i,
  // master response ports (responses to other tiles), registered
  output logic      [NumTilePorts-1:0]        mst_rsp_valid_o,
  input  logic      [NumTilePorts-1:0]        mst_rsp_ready_i,
  output tcdm_rsp_t [NumTilePorts-1:0]        mst_rsp_o
);
  localparam int unsigned NC = NumCoresPerTile;
  localparam int unsigned K  = NumTilePorts;
  localparam int unsigned NB = NumBanksPerTile;

  // ------------------------------------------------------------------
  // Core side: ROB, scrambler, decoder, demultiplexer
  // ------------------------------------------------------------------
  logic      [NC-1:0]                    loc_req_valid, loc_req_ready;
  logic      [NC-1:0]                    rem_req_valid, rem_req_ready;
  tcdm_req_t [NC-1:0]                    core_tcdm_req;
  logic      [NC-1:0][PortBits-1:0]      rem_port;
  logic      [NC-1:0][BankOffsetBits-1:0] loc_bank;
  logic      [NC-1:0]                    rob_rsp_valid;
  tcdm_rsp_t [NC-1:0]                    rob_rsp;

  for (genvar c = 0; c < NC; c++) begin : gen_core
    logic      net_valid, net_ready, is_local;
    core_req_t net_req;
    rob_id_t   net_id;
    addr_t     scr_addr;
    logic      seq;
    logic [TileInGroupBits-1:0] dst_tile;

    mempool_rob i_rob (
      .clk_i, .rst_ni,
      .core_req_valid_i (core_req_valid_i[c]),
      .core_req_ready_o (core_req_ready_o[c]),
      .core_req_i       (core_req_i[c]),
      .core_rsp_valid_o (core_rsp_valid_o[c]),
      .core_rsp_ready_i (core_rsp_ready_i[c]),
      .core_rsp_data_o  (core_rsp_data_o[c]),
      .net_req_valid_o  (net_valid),
      .net_req_ready_i  (net_ready),
      .net_req_o        (net_req),
      .net_req_id_o     (net_id),
      .net_rsp_valid_i  (rob_rsp_valid[c]),
      .net_rsp_ready_o  (),
      .net_rsp_data_i   (rob_rsp[c].data),
      .net_rsp_id_i     (rob_rsp[c].meta.id)
    );

    mempool_scrambler #(
      .AddrWidth (AddrWidth), .ByteOffset (ByteOffsetBits),
      .NumBanksPerTile (NumBanksPerTile), .NumTiles (NumTiles),
      .SeqMemSizePerTile (SeqMemSizePerTile)
    ) i_scrambler (
      .addr_i (net_req.addr),
      .addr_o (scr_addr),
      .seq_o  (seq)
    );

    mempool_addr_decoder i_decoder (
      .addr_i    (scr_addr),
      .tile_id_i (tile_id_i),
      .local_o   (is_local),
      .port_o    (rem_port[c]),
      .bank_o    (loc_bank[c]),
      .tile_o    (dst_tile)
    );

    assign core_tcdm_req[c] = '{addr: scr_addr, wen: net_req.wen, be: net_req.be,
                                data: net_req.data,
                                meta: '{tile: tile_id_i, core: core_id_t'(c), id: net_id}};
    assign loc_req_valid[c] = net_valid &  is_local;
    assign rem_req_valid[c] = net_valid & ~is_local;
    assign net_ready        = is_local ? loc_req_ready[c] : rem_req_ready[c];
  end

  // ------------------------------------------------------------------
  // Remote request crossbar (NC x K) and master request register boundary
  // ------------------------------------------------------------------
  logic      [K-1:0] rem_out_valid, rem_out_ready;
  tcdm_req_t [K-1:0] rem_out;

  mempool_xbar #(.NumIn(NC), .NumOut(K), .T(tcdm_req_t)) i_remote_req_xbar (
    .clk_i, .rst_ni,
    .valid_i (rem_req_valid),
    .ready_o (rem_req_ready),
    .sel_i   (rem_port),
    .data_i  (core_tcdm_req),
    .valid_o (rem_out_valid),
    .ready_i (rem_out_ready),
    .data_o  (rem_out)
  );

  for (genvar k = 0; k < K; k++) begin : gen_mst_req
    mempool_spill_reg #(.T(tcdm_req_t)) i_reg (
      .clk_i, .rst_ni,
      .valid_i (rem_out_valid[k]),
      .ready_o (rem_out_ready[k]),
      .data_i  (rem_out[k]),
      .valid_o (mst_req_valid_o[k]),
      .ready_i (mst_req_ready_i[k]),
      .data_o  (mst_req_o[k])
    );
  end

  // ------------------------------------------------------------------
  // Request crossbar (NC + K) x NB and the banks
  // ------------------------------------------------------------------
  logic      [NC+K-1:0]                     bx_valid, bx_ready;
  logic      [NC+K-1:0][BankOffsetBits-1:0] bx_sel;
  // Each request is tagged with the crossbar input it entered on.
  typedef struct packed {
    logic [$clog2(NC+K)-1:0] src;
    tcdm_req_t               req;
  } bx_req_t;
  bx_req_t   [NC+K-1:0]                     bx_req;
  logic      [NB-1:0]                       bank_req_valid, bank_req_ready;
  bx_req_t   [NB-1:0]                       bank_bx;
  tcdm_req_t [NB-1:0]                       bank_req;
  logic      [NB-1:0]                       bank_rsp_valid, bank_rsp_ready;
  tcdm_rsp_t [NB-1:0]                       bank_rsp;

  for (genvar c = 0; c < NC; c++) begin : gen_bx_core
    assign bx_valid[c]      = loc_req_valid[c];
    assign loc_req_ready[c] = bx_ready[c];
    assign bx_sel[c]        = loc_bank[c];
    assign bx_req[c]        = '{src: ($clog2(NC+K))'(c), req: core_tcdm_req[c]};
  end
  for (genvar k = 0; k < K; k++) begin : gen_bx_slv
    assign bx_valid[NC+k]     = slv_req_valid_i[k];
    assign slv_req_ready_o[k] = bx_ready[NC+k];
    assign bx_sel[NC+k]       = slv_req_i[k].addr[ByteOffsetBits +: BankOffsetBits];
    assign bx_req[NC+k]       = '{src: ($clog2(NC+K))'(NC+k), req: slv_req_i[k]};
  end

  mempool_xbar #(.NumIn(NC+K), .NumOut(NB), .T(bx_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .valid_i (bx_valid),
    .ready_o (bx_ready),
    .sel_i   (bx_sel),
    .data_i  (bx_req),
    .valid_o (bank_req_valid),
    .ready_i (bank_req_ready),
    .data_o  (bank_bx)
  );

  // Bank metadata: the requester's meta plus the tile input it came from, so
  // the response returns through the same port (own core or slave port k).
  typedef struct packed {
    logic  from_slv;
    port_t port;
    meta_t meta;
  } bank_meta_t;
  bank_meta_t [NB-1:0] bank_meta_in, bank_meta_out;

  for (genvar b = 0; b < NB; b++) begin : gen_bank
    assign bank_req[b]     = bank_bx[b].req;
    assign bank_meta_in[b] = '{from_slv: bank_bx[b].src >= ($clog2(NC+K))'(NC),
                               port:     port_t'(bank_bx[b].src - ($clog2(NC+K))'(NC)),
                               meta:     bank_req[b].meta};
    assign bank_rsp[b].meta = bank_meta_out[b].meta;
    mempool_bank #(.NumWords(BankNumWords), .DataWidth(DataWidth), .meta_t(bank_meta_t)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i (bank_req_valid[b]),
      .req_ready_o (bank_req_ready[b]),
      .req_addr_i  (bank_req[b].addr[RowBitsLsb +: RowBits]),
      .req_wen_i   (bank_req[b].wen),
      .req_be_i    (bank_req[b].be),
      .req_data_i  (bank_req[b].data),
      .req_meta_i  (bank_meta_in[b]),
      .rsp_valid_o (bank_rsp_valid[b]),
      .rsp_ready_i (bank_rsp_ready[b]),
      .rsp_data_o  (bank_rsp[b].data),
      .rsp_meta_o  (bank_meta_out[b])
    );
  end

  // ------------------------------------------------------------------
  // Response crossbar NB x (NC + K) and master response register boundary
  // ------------------------------------------------------------------
  localparam int unsigned RspSelBits = $clog2(NC + K);
  logic      [NB-1:0][RspSelBits-1:0] rx_sel;
  logic      [NC+K-1:0]               rx_valid, rx_ready;
  tcdm_rsp_t [NC+K-1:0]               rx_rsp;

  for (genvar b = 0; b < NB; b++) begin : gen_rx_sel
    assign rx_sel[b] = bank_meta_out[b].from_slv
        ? RspSelBits'(NC) + RspSelBits'(bank_meta_out[b].port)
        : RspSelBits'(bank_meta_out[b].meta.core);
  end

  mempool_xbar #(.NumIn(NB), .NumOut(NC+K), .T(tcdm_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .valid_i (bank_rsp_valid),
    .ready_o (bank_rsp_ready),
    .sel_i   (rx_sel),
    .data_i  (bank_rsp),
    .valid_o (rx_valid),
    .ready_i (rx_ready),
    .data_o  (rx_rsp)
  );

  for (genvar k = 0; k < K; k++) begin : gen_mst_rsp
    mempool_spill_reg #(.T(tcdm_rsp_t)) i_reg (
      .clk_i, .rst_ni,
      .valid_i (rx_valid[NC+k]),
      .ready_o (rx_ready[NC+k]),
      .data_i  (rx_rsp[NC+k]),
      .valid_o (mst_rsp_valid_o[k]),
      .ready_i (mst_rsp_ready_i[k]),
      .data_o  (mst_rsp_o[k])
    );
  end

  // ------------------------------------------------------------------
  // Remote response crossbar K x NC, then local/remote merge per core
  // ------------------------------------------------------------------
  logic      [K-1:0][CoreIdBits-1:0] srsp_sel;
  logic      [NC-1:0]                rr_valid, rr_ready;
  tcdm_rsp_t [NC-1:0]                rr_rsp;

  for (genvar k = 0; k < K; k++) begin : gen_srsp_sel
    assign srsp_sel[k] = slv_rsp_i[k].meta.core;
  end

  mempool_xbar #(.NumIn(K), .NumOut(NC), .T(tcdm_rsp_t)) i_remote_rsp_xbar (
    .clk_i, .rst_ni,
    .valid_i (slv_rsp_valid_i),
    .ready_o (slv_rsp_ready_o),
    .sel_i   (srsp_sel),
    .data_i  (slv_rsp_i),
    .valid_o (rr_valid),
    .ready_i (rr_ready),
    .data_o  (rr_rsp)
  );

  for (genvar c = 0; c < NC; c++) begin : gen_merge
    logic [1:0] gnt;
    logic       idx;
    mempool_rr_arb #(.NumIn(2), .T(tcdm_rsp_t)) i_merge (
      .clk_i, .rst_ni,
      .req_i   ({rr_valid[c], rx_valid[c]}),
      .gnt_o   (gnt),
      .data_i  ({rr_rsp[c], rx_rsp[c]}),
      .valid_o (rob_rsp_valid[c]),
      .ready_i (1'b1),
      .data_o  (rob_rsp[c]),
      .idx_o   (idx)
    );
    assign rx_ready[c] = gnt[0];
    assign rr_ready[c] = gnt[1];
  end

  // ------------------------------------------------------------------
  // Instruction cache
  // ------------------------------------------------------------------
  mempool_icache i_icache (
    .clk_i, .rst_ni,
    .fetch_valid_i, .fetch_addr_i, .fetch_ready_o, .fetch_data_o,
    .axi_ar_valid_o, .axi_ar_ready_i, .axi_ar_o,
    .axi_r_valid_i, .axi_r_ready_o, .axi_r_i
  );

endmodule
