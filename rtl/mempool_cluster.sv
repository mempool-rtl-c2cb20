// MemPool cluster (TopH): 256 cores, 64 tiles, 1024 banks, 1 MiB of L1
// scratchpad shared by all cores, built from four local groups.
//
// Group g's master interface of direction d (E = 1, N = 2, NE = 3) drives
// the slave interface of direction d of group g XOR d, and takes that
// interface's responses: groups 0/1 and 2/3 are joined by E, 0/2 and 1/3 by
// N, and the diagonal pairs 0/3 and 1/2 by NE, as in the paper's cluster
// figure. Each group pair is thus joined by two independent channels, one
// per direction of initiation.
// Zero-load round-trip latency from a core's request to its load data:
// 1 cycle to its own tile, 3 to a tile of its group, 5 to any other tile.
// The 256 Snitch cores and the instruction refill network are not part of
// this design: the cores' data ports (request/response through the ROB) and
// fetch ports, and the 64 AXI refill ports, are the cluster's ports.
// Core n sits in tile n/4 (core n%4 of that tile); tile m is in group m/16.
module mempool_cluster
  import mempool_pkg::*;
(
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic      [NumCores-1:0]      core_req_valid_i,
  output logic      [NumCores-1:0]      core_req_ready_o,
  input  core_req_t [NumCores-1:0]      core_req_i,
  output logic      [NumCores-1:0]      core_rsp_valid_o,
  input  logic      [NumCores-1:0]      core_rsp_ready_i,
  output data_t     [NumCores-1:0]      core_rsp_data_o,
  input  logic      [NumCores-1:0]      fetch_valid_i,
  input  addr_t     [NumCores-1:0]      fetch_addr_i,
  output logic      [NumCores-1:0]      fetch_ready_o,
  output data_t     [NumCores-1:0]      fetch_data_o,
  output logic      [NumTiles-1:0]      axi_ar_valid_o,
  input  logic      [NumTiles-1:0]      axi_ar_ready_i,
  output axi_ar_t   [NumTiles-1:0]      axi_ar_o,
  input  logic      [NumTiles-1:0]      axi_r_valid_i,
  output logic      [NumTiles-1:0]      axi_r_ready_o,
  input  axi_r_t    [NumTiles-1:0]      axi_r_i
);
  localparam int unsigned CPG = NumTilesPerGroup * NumCoresPerTile;
  localparam int unsigned NT  = NumTilesPerGroup;

  logic      [NumGroups-1:0][NumDirs-1:0][NT-1:0] mreq_valid, mreq_ready;
  tcdm_req_t [NumGroups-1:0][NumDirs-1:0][NT-1:0] mreq;
  logic      [NumGroups-1:0][NumDirs-1:0][NT-1:0] mrsp_valid, mrsp_ready;
  tcdm_rsp_t [NumGroups-1:0][NumDirs-1:0][NT-1:0] mrsp;
  logic      [NumGroups-1:0][NumDirs-1:0][NT-1:0] sreq_valid, sreq_ready;
  tcdm_req_t [NumGroups-1:0][NumDirs-1:0][NT-1:0] sreq;
  logic      [NumGroups-1:0][NumDirs-1:0][NT-1:0] srsp_valid, srsp_ready;
  tcdm_rsp_t [NumGroups-1:0][NumDirs-1:0][NT-1:0] srsp;

  for (genvar g = 0; g < NumGroups; g++) begin : gen_group
    mempool_group i_group (
      .clk_i, .rst_ni,
      .group_id_i       (group_id_t'(g)),
      .core_req_valid_i (core_req_valid_i[CPG*g +: CPG]),
      .core_req_ready_o (core_req_ready_o[CPG*g +: CPG]),
      .core_req_i       (core_req_i      [CPG*g +: CPG]),
      .core_rsp_valid_o (core_rsp_valid_o[CPG*g +: CPG]),
      .core_rsp_ready_i (core_rsp_ready_i[CPG*g +: CPG]),
      .core_rsp_data_o  (core_rsp_data_o [CPG*g +: CPG]),
      .fetch_valid_i    (fetch_valid_i   [CPG*g +: CPG]),
      .fetch_addr_i     (fetch_addr_i    [CPG*g +: CPG]),
      .fetch_ready_o    (fetch_ready_o   [CPG*g +: CPG]),
      .fetch_data_o     (fetch_data_o    [CPG*g +: CPG]),
      .axi_ar_valid_o   (axi_ar_valid_o[NT*g +: NT]),
      .axi_ar_ready_i   (axi_ar_ready_i[NT*g +: NT]),
      .axi_ar_o         (axi_ar_o      [NT*g +: NT]),
      .axi_r_valid_i    (axi_r_valid_i [NT*g +: NT]),
      .axi_r_ready_o    (axi_r_ready_o [NT*g +: NT]),
      .axi_r_i          (axi_r_i       [NT*g +: NT]),
      .mst_req_valid_o  (mreq_valid[g]),
      .mst_req_ready_i  (mreq_ready[g]),
      .mst_req_o        (mreq[g]),
      .mst_rsp_valid_i  (mrsp_valid[g]),
      .mst_rsp_ready_o  (mrsp_ready[g]),
      .mst_rsp_i        (mrsp[g]),
      .slv_req_valid_i  (sreq_valid[g]),
      .slv_req_ready_o  (sreq_ready[g]),
      .slv_req_i        (sreq[g]),
      .slv_rsp_valid_o  (srsp_valid[g]),
      .slv_rsp_ready_i  (srsp_ready[g]),
      .slv_rsp_o        (srsp[g])
    );

    // Group g, direction d+1, talks to group g ^ (d+1).
    for (genvar d = 0; d < NumDirs; d++) begin : gen_link
      localparam int unsigned Peer = g ^ (d + 1);
      assign sreq_valid[Peer][d] = mreq_valid[g][d];
      assign sreq[Peer][d]       = mreq[g][d];
      assign mreq_ready[g][d]    = sreq_ready[Peer][d];
      assign mrsp_valid[g][d]    = srsp_valid[Peer][d];
      assign mrsp[g][d]          = srsp[Peer][d];
      assign srsp_ready[Peer][d] = mrsp_ready[g][d];
    end
  end

endmodule
