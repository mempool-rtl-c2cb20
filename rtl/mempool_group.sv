// MemPool local group: 16 tiles and the interconnect of the TopH topology.
//
// Each tile has four master request ports: L, E, N and NE (index 0..3).
//  - L: a fully connected 16x16 request crossbar to the slave L ports of the
//    tiles of this group, selected by the destination tile; a 16x16 response
//    crossbar routes the answers back by the initiating tile in the metadata.
//    Zero-load latency to a bank of another tile of the group: 3 cycles.
//  - E, N, NE (direction d = 1, 2, 3): a 16x16 radix-4 butterfly
//    (mempool_butterfly) carries the requests to the master interface of
//    direction d, which connects to local group (own index XOR d). The
//    returning responses pass a second 16x16 butterfly to the tiles' slave
//    response ports d. A register boundary (mempool_spill_reg) sits on every
//    lane of the master interfaces, in both directions, which brings the
//    zero-load latency to another group to 5 cycles.
// Requests from other groups enter through the slave interfaces, which wire
// lane j of direction d straight to slave request port d of tile j (and its
// master response port d back).
// Tile j of group g has index 16*g + j. Which direction is called E, N or NE
// for groups 1..3 is this design's reading of the cluster figure.
module mempool_group
  import mempool_pkg::*;
(
  input  logic                                              clk_i,
  input  logic                                              rst_ni,
  input  group_id_t                                         group_id_i,
  // core ports of the 64 cores of this group (core 4*j + c is core c of tile j)
  input  logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  core_req_valid_i,
  output logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  core_req_ready_o,
  input  core_req_t [NumTilesPerGroup*NumCoresPerTile-1:0]  core_req_i,
  output logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  core_rsp_valid_o,
  input  logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  core_rsp_ready_i,
  output data_t     [NumTilesPerGroup*NumCoresPerTile-1:0]  core_rsp_data_o,
  input  logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  fetch_valid_i,
  input  addr_t     [NumTilesPerGroup*NumCoresPerTile-1:0]  fetch_addr_i,
  output logic      [NumTilesPerGroup*NumCoresPerTile-1:0]  fetch_ready_o,
  output data_t     [NumTilesPerGroup*NumCoresPerTile-1:0]  fetch_data_o,
  // instruction cache refill ports, one per tile
  output logic      [NumTilesPerGroup-1:0]                  axi_ar_valid_o,
  input  logic      [NumTilesPerGroup-1:0]                  axi_ar_ready_i,
  output axi_ar_t   [NumTilesPerGroup-1:0]                  axi_ar_o,
  input  logic      [NumTilesPerGroup-1:0]                  axi_r_valid_i,
  output logic      [NumTilesPerGroup-1:0]                  axi_r_ready_o,
  input  axi_r_t    [NumTilesPerGroup-1:0]                  axi_r_i,
  // master interfaces, direction d at index d-1, lane = destination tile
  output logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_req_valid_o,
  input  logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_req_ready_i,
  output tcdm_req_t [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_req_o,
  input  logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_rsp_valid_i,
  output logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_rsp_ready_o,
  input  tcdm_rsp_t [NumDirs-1:0][NumTilesPerGroup-1:0]     mst_rsp_i,
  // slave interfaces, direction d at index d-1, lane = tile of this group
  input  logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_req_valid_i,
  output logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_req_ready_o,
  input  tcdm_req_t [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_req_i,
  output logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_rsp_valid_o,
  input  logic      [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_rsp_ready_i,
  output tcdm_rsp_t [NumDirs-1:0][NumTilesPerGroup-1:0]     slv_rsp_o
);
  localparam int unsigned NT = NumTilesPerGroup;
  localparam int unsigned NC = NumCoresPerTile;
  localparam int unsigned K  = NumTilePorts;

  // Tile-side signals, indexed [port][tile].
  logic      [K-1:0][NT-1:0] t_mreq_valid, t_mreq_ready;
  tcdm_req_t [K-1:0][NT-1:0] t_mreq;
  logic      [K-1:0][NT-1:0] t_srsp_valid, t_srsp_ready;
  tcdm_rsp_t [K-1:0][NT-1:0] t_srsp;
  logic      [K-1:0][NT-1:0] t_sreq_valid, t_sreq_ready;
  tcdm_req_t [K-1:0][NT-1:0] t_sreq;
  logic      [K-1:0][NT-1:0] t_mrsp_valid, t_mrsp_ready;
  tcdm_rsp_t [K-1:0][NT-1:0] t_mrsp;

  // ------------------------------------------------------------------
  // Tiles
  // ------------------------------------------------------------------
  for (genvar j = 0; j < NT; j++) begin : gen_tile
    logic      [K-1:0] mreq_valid, mreq_ready, srsp_valid, srsp_ready;
    logic      [K-1:0] sreq_valid, sreq_ready, mrsp_valid, mrsp_ready;
    tcdm_req_t [K-1:0] mreq, sreq;
    tcdm_rsp_t [K-1:0] srsp, mrsp;

    for (genvar k = 0; k < K; k++) begin : gen_port
      assign t_mreq_valid[k][j] = mreq_valid[k];
      assign mreq_ready[k]      = t_mreq_ready[k][j];
      assign t_mreq[k][j]       = mreq[k];
      assign srsp_valid[k]      = t_srsp_valid[k][j];
      assign t_srsp_ready[k][j] = srsp_ready[k];
      assign srsp[k]            = t_srsp[k][j];
      assign sreq_valid[k]      = t_sreq_valid[k][j];
      assign t_sreq_ready[k][j] = sreq_ready[k];
      assign sreq[k]            = t_sreq[k][j];
      assign t_mrsp_valid[k][j] = mrsp_valid[k];
      assign mrsp_ready[k]      = t_mrsp_ready[k][j];
      assign t_mrsp[k][j]       = mrsp[k];
    end

    mempool_tile i_tile (
      .clk_i, .rst_ni,
      .tile_id_i        ({group_id_i, TileInGroupBits'(j)}),
      .core_req_valid_i (core_req_valid_i[NC*j +: NC]),
      .core_req_ready_o (core_req_ready_o[NC*j +: NC]),
      .core_req_i       (core_req_i      [NC*j +: NC]),
      .core_rsp_valid_o (core_rsp_valid_o[NC*j +: NC]),
      .core_rsp_ready_i (core_rsp_ready_i[NC*j +: NC]),
      .core_rsp_data_o  (core_rsp_data_o [NC*j +: NC]),
      .fetch_valid_i    (fetch_valid_i   [NC*j +: NC]),
      .fetch_addr_i     (fetch_addr_i    [NC*j +: NC]),
      .fetch_ready_o    (fetch_ready_o   [NC*j +: NC]),
      .fetch_data_o     (fetch_data_o    [NC*j +: NC]),
      .axi_ar_valid_o   (axi_ar_valid_o[j]),
      .axi_ar_ready_i   (axi_ar_ready_i[j]),
      .axi_ar_o         (axi_ar_o[j]),
      .axi_r_valid_i    (axi_r_valid_i[j]),
      .axi_r_ready_o    (axi_r_ready_o[j]),
      .axi_r_i          (axi_r_i[j]),
      .mst_req_valid_o  (mreq_valid),
      .mst_req_ready_i  (mreq_ready),
      .mst_req_o        (mreq),
      .slv_rsp_valid_i  (srsp_valid),
      .slv_rsp_ready_o  (srsp_ready),
      .slv_rsp_i        (srsp),
      .slv_req_valid_i  (sreq_valid),
      .slv_req_ready_o  (sreq_ready),
      .slv_req_i        (sreq),
      .mst_rsp_valid_o  (mrsp_valid),
      .mst_rsp_ready_i  (mrsp_ready),
      .mst_rsp_o        (mrsp)
    );
  end

  // Destination tile of a request, initiating tile of a response.
  logic [K-1:0][NT-1:0][TileInGroupBits-1:0] req_dst, rsp_dst;
  for (genvar k = 0; k < K; k++) begin : gen_route
    for (genvar j = 0; j < NT; j++) begin : gen_lane
      assign req_dst[k][j] = t_mreq[k][j].addr[TileBitsLsb +: TileInGroupBits];
    end
  end

  // ------------------------------------------------------------------
  // Local interconnect: 16x16 crossbars on port L
  // ------------------------------------------------------------------
  for (genvar j = 0; j < NT; j++) begin : gen_local_rsp_dst
    assign rsp_dst[PortL][j] = t_mrsp[PortL][j].meta.tile[TileInGroupBits-1:0];
  end

  mempool_xbar #(.NumIn(NT), .NumOut(NT), .T(tcdm_req_t)) i_local_req_xbar (
    .clk_i, .rst_ni,
    .valid_i (t_mreq_valid[PortL]),
    .ready_o (t_mreq_ready[PortL]),
    .sel_i   (req_dst[PortL]),
    .data_i  (t_mreq[PortL]),
    .valid_o (t_sreq_valid[PortL]),
    .ready_i (t_sreq_ready[PortL]),
    .data_o  (t_sreq[PortL])
  );

  mempool_xbar #(.NumIn(NT), .NumOut(NT), .T(tcdm_rsp_t)) i_local_rsp_xbar (
    .clk_i, .rst_ni,
    .valid_i (t_mrsp_valid[PortL]),
    .ready_o (t_mrsp_ready[PortL]),
    .sel_i   (rsp_dst[PortL]),
    .data_i  (t_mrsp[PortL]),
    .valid_o (t_srsp_valid[PortL]),
    .ready_i (t_srsp_ready[PortL]),
    .data_o  (t_srsp[PortL])
  );

  // ------------------------------------------------------------------
  // Directional interconnects E, N, NE: butterflies + register boundary
  // ------------------------------------------------------------------
  for (genvar d = 1; d < K; d++) begin : gen_dir
    logic      [NT-1:0] bq_valid, bq_ready, br_valid, br_ready;
    tcdm_req_t [NT-1:0] bq;
    tcdm_rsp_t [NT-1:0] br;
    logic      [NT-1:0][TileInGroupBits-1:0] br_dst;

    mempool_butterfly #(.NumPorts(NT), .T(tcdm_req_t)) i_req_bfly (
      .clk_i, .rst_ni,
      .valid_i (t_mreq_valid[d]),
      .ready_o (t_mreq_ready[d]),
      .sel_i   (req_dst[d]),
      .data_i  (t_mreq[d]),
      .valid_o (bq_valid),
      .ready_i (bq_ready),
      .data_o  (bq)
    );

    for (genvar j = 0; j < NT; j++) begin : gen_lane
      mempool_spill_reg #(.T(tcdm_req_t)) i_req_reg (
        .clk_i, .rst_ni,
        .valid_i (bq_valid[j]),
        .ready_o (bq_ready[j]),
        .data_i  (bq[j]),
        .valid_o (mst_req_valid_o[d-1][j]),
        .ready_i (mst_req_ready_i[d-1][j]),
        .data_o  (mst_req_o[d-1][j])
      );
      mempool_spill_reg #(.T(tcdm_rsp_t)) i_rsp_reg (
        .clk_i, .rst_ni,
        .valid_i (mst_rsp_valid_i[d-1][j]),
        .ready_o (mst_rsp_ready_o[d-1][j]),
        .data_i  (mst_rsp_i[d-1][j]),
        .valid_o (br_valid[j]),
        .ready_i (br_ready[j]),
        .data_o  (br[j])
      );
      assign br_dst[j] = br[j].meta.tile[TileInGroupBits-1:0];
      // slave interface: straight to tile j's port d
      assign t_sreq_valid[d][j]         = slv_req_valid_i[d-1][j];
      assign slv_req_ready_o[d-1][j]    = t_sreq_ready[d][j];
      assign t_sreq[d][j]               = slv_req_i[d-1][j];
      assign slv_rsp_valid_o[d-1][j]    = t_mrsp_valid[d][j];
      assign t_mrsp_ready[d][j]         = slv_rsp_ready_i[d-1][j];
      assign slv_rsp_o[d-1][j]          = t_mrsp[d][j];
      assign rsp_dst[d][j]              = '0;
    end

    mempool_butterfly #(.NumPorts(NT), .T(tcdm_rsp_t)) i_rsp_bfly (
      .clk_i, .rst_ni,
      .valid_i (br_valid),
      .ready_o (br_ready),
      .sel_i   (br_dst),
      .data_i  (br),
      .valid_o (t_srsp_valid[d]),
      .ready_i (t_srsp_ready[d]),
      .data_o  (t_srsp[d])
    );
  end

endmodule
