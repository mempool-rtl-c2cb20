// Test of one tile (tile 5, group 0) with its four cores driven by traffic
// models and the rest of the cluster replaced by a behavioural model:
//  - the remote world accepts requests on the master request ports (random
//    back-pressure), checks that each left through the port its destination
//    requires (L for tiles 0-15, E/N/NE for groups 1/2/3), answers loads
//    after 1 to 6 cycles on the matching slave response port with the hash
//    of the address, and checks that stores carry that hash;
//  - "other tiles" first store the hash of the address into rows 64-67 of
//    all 16 banks through the slave request ports, then load from them;
//    each answer must leave through the master response port of the
//    requester's direction, with the right data and metadata.
// Then the cores store and load (25 % to their stacks in the sequential
// region, which the scrambler keeps in this tile) and every load is checked.
// A load to the own tile must take 1 cycle; the instruction cache port is
// exercised with a few fetches.
module tb_mempool_tile;
  import mempool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  localparam tile_id_t Me = 6'd5;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic data_t hash(addr_t a);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_5A5A;
  endfunction

  logic      [3:0] cv, cr, rv, rr, fv, fr;
  core_req_t [3:0] creq;
  data_t     [3:0] rd, fd;
  addr_t     [3:0] fa;
  logic            arv, arr, axrv, axrr;
  axi_ar_t         ar;
  axi_r_t          axr;
  logic      [3:0] mqv, mqr, srv, srr, sqv, sqr, mrv, mrr;
  tcdm_req_t [3:0] mq, sq;
  tcdm_rsp_t [3:0] sr, mr;

  mempool_tile dut (
    .clk_i (clk), .rst_ni (rst_n), .tile_id_i (Me),
    .core_req_valid_i (cv), .core_req_ready_o (cr), .core_req_i (creq),
    .core_rsp_valid_o (rv), .core_rsp_ready_i (rr), .core_rsp_data_o (rd),
    .fetch_valid_i (fv), .fetch_addr_i (fa), .fetch_ready_o (fr), .fetch_data_o (fd),
    .axi_ar_valid_o (arv), .axi_ar_ready_i (arr), .axi_ar_o (ar),
    .axi_r_valid_i (axrv), .axi_r_ready_o (axrr), .axi_r_i (axr),
    .mst_req_valid_o (mqv), .mst_req_ready_i (mqr), .mst_req_o (mq),
    .slv_rsp_valid_i (srv), .slv_rsp_ready_o (srr), .slv_rsp_i (sr),
    .slv_req_valid_i (sqv), .slv_req_ready_o (sqr), .slv_req_i (sq),
    .mst_rsp_valid_o (mrv), .mst_rsp_ready_i (mrr), .mst_rsp_o (mr));

  // ---------------- cores ----------------
  logic [1:0] phase;
  addr_t probe_addr;
  logic [3:0] done;
  int unsigned c_chk [4], c_fail [4], c_loads [4], c_last [4], c_loc [4], c_rem [4], c_grp [4], c_seq [4];
  for (genvar c = 0; c < 4; c++) begin : gen_core
    int unsigned lat, stl;
    tb_core_model #(.CoreId (4 * Me + c), .NumTbCores (256), .NumWrites (4), .NumReads (200),
                    .LoadPermil (400), .LocalPermil (250)) i_core (
      .clk_i (clk), .rst_ni (rst_n), .phase_i ((phase == 3 && c != 0) ? 2'd0 : phase),
      .probe_addr_i (probe_addr),
      .req_valid_o (cv[c]), .req_ready_i (cr[c]), .req_o (creq[c]),
      .rsp_valid_i (rv[c]), .rsp_ready_o (rr[c]), .rsp_data_i (rd[c]),
      .done_o (done[c]), .checks_o (c_chk[c]), .failures_o (c_fail[c]), .loads_o (c_loads[c]),
      .lat_sum_o (lat), .last_lat_o (c_last[c]), .stalls_o (stl),
      .n_local_o (c_loc[c]), .n_group_o (c_grp[c]), .n_remote_o (c_rem[c]), .n_seq_o (c_seq[c]));
  end

  // ---------------- remote world on master request / slave response ----------------
  int unsigned remote_bad = 0, remote_loads = 0, remote_stores = 0;
  for (genvar k = 0; k < 4; k++) begin : gen_world
    tcdm_rsp_t q [$];
    int unsigned due [$];
    int unsigned cyc;
    always @(negedge clk) mqr[k] = ($urandom % 4) != 0;
    assign srv[k] = (q.size() != 0) && due[0] <= cyc;
    assign sr[k]  = (q.size() != 0) ? q[0] : '0;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cyc <= 0;
      else begin
        cyc <= cyc + 1;
        if (srv[k] && srr[k]) begin void'(q.pop_front()); void'(due.pop_front()); end
        if (mqv[k] && mqr[k]) begin
          automatic int unsigned dt = mq[k].addr[11:6];
          automatic int unsigned want = ((dt / 16) == 0) ? 0 : ((dt / 16) ^ 0);
          if (dt == Me || want != k || mq[k].meta.tile != Me) begin
            remote_bad <= remote_bad + 1;
            $display("FAIL: request to tile %0d left on port %0d", dt, k);
          end
          if (mq[k].wen) begin
            remote_stores <= remote_stores + 1;
            if (mq[k].data != hash(mq[k].addr)) begin
              remote_bad <= remote_bad + 1; $display("FAIL: store data");
            end
          end else begin
            remote_loads <= remote_loads + 1;
            q.push_back('{data: hash(mq[k].addr), meta: mq[k].meta});
            due.push_back(cyc + 1 + ($urandom % 6));
          end
        end
      end
    end
  end

  // ---------------- other tiles on slave request / master response ----------------
  int unsigned slv_rsp_seen = 0, slv_bad = 0;
  assign mrr = '1;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) if (rst_n && mrv[k]) begin
      // requester tile was 16*k + (row-free tag) placed in meta: direction must match
      slv_rsp_seen <= slv_rsp_seen + 1;
      if (mr[k].meta.tile[5:4] != 2'(k) || mr[k].meta.id != rob_id_t'(k) ||
          mr[k].data != hash({mr[k].meta.tile, mr[k].meta.core, 2'b00} * 0 + slv_addr_of(mr[k].meta))) begin
        slv_bad <= slv_bad + 1;
        $display("FAIL: slave answer on port %0d tile %0d data %h", k, mr[k].meta.tile, mr[k].data);
      end
    end
  end
  // The slave loads encode their address in the metadata: tile[3:0] = bank,
  // core = row - 64.
  function automatic addr_t slv_addr_of(meta_t m);
    return addr_t'((64 + m.core) * 4096 + Me * 64 + m.tile[3:0] * 4);
  endfunction

  task automatic slave_access(input int kk, input int bank, input int row, input bit wen);
    tcdm_req_t x;
    // a same-group initiator must not be this tile itself
    automatic int k = (kk == 0 && bank == Me) ? 1 : kk;
    x.addr = addr_t'(row * 4096 + Me * 64 + bank * 4);
    x.wen  = wen;
    x.be   = 4'hF;
    x.data = hash(x.addr);
    // an initiator in group k (tile 16k + bank) for direction k (port L: group 0)
    x.meta = '{tile: tile_id_t'(16 * k + bank), core: core_id_t'(row - 64), id: rob_id_t'(k)};
    @(negedge clk);
    sqv[k] = 1; sq[k] = x;
    #1;
    while (!sqr[k]) begin @(negedge clk); #1; end
    @(negedge clk);
    sqv[k] = 0;
  endtask

  // ---------------- instruction refill model ----------------
  logic ab; addr_t aa; logic [7:0] al;
  assign arr = ~ab;
  assign axrv = ab;
  assign axr = '{data: ~aa, resp: 2'b00, last: al == 0};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ab <= 0; aa <= '0; al <= '0; end
    else if (!ab && arv) begin ab <= 1; aa <= ar.addr; al <= ar.len; end
    else if (ab && axrr) begin aa <= aa + 4; al <= al - 1; if (al == 0) ab <= 0; end
  end

  initial begin
    int unsigned tl, tr, tg, ts;
    phase = 0; probe_addr = '0; sqv = '0; sq = '0; fv = '0; fa = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // slave-port stores: rows 64-67 of all banks
    for (int row = 64; row < 68; row++)
      for (int b = 0; b < 16; b++) slave_access((row + b) % 4, b, row, 1'b1);
    repeat (3) @(posedge clk);
    check(slv_rsp_seen == 0, "stores produce no response");
    // slave-port loads, each port
    for (int row = 64; row < 68; row++)
      for (int b = 0; b < 16; b++) slave_access((row * 3 + b) % 4, b, row, 1'b0);
    repeat (5) @(posedge clk);
    check(slv_rsp_seen == 64 && slv_bad == 0, $sformatf("slave answers %0d bad %0d", slv_rsp_seen, slv_bad));
    // cores: fill, probe, read
    phase = 1; repeat (2) @(posedge clk);
    do @(posedge clk); while (!(&done));
    phase = 0; repeat (2) @(posedge clk);
    probe_addr = addr_t'(64 * 4096 + Me * 64 + 7 * 4);
    phase = 3; repeat (2) @(posedge clk);
    do @(posedge clk); while (!(&done));
    check(c_last[0] == 1, $sformatf("own-tile load latency %0d", c_last[0]));
    phase = 0; repeat (2) @(posedge clk);
    phase = 2; repeat (2) @(posedge clk);
    do @(posedge clk); while (!(&done));
    phase = 0;
    // fetches
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      fv[i % 4] = 1; fa[i % 4] = addr_t'(32'h100 + 4 * i);
      #1;
      while (!fr[i % 4]) begin @(negedge clk); #1; end
      check(fd[i % 4] == ~fa[i % 4], "instruction fetch data");
      @(negedge clk);
      fv = '0;
    end
    tl = 0; tr = 0; tg = 0; ts = 0;
    for (int c = 0; c < 4; c++) begin
      checks += c_chk[c]; failures += c_fail[c];
      tl += c_loc[c]; tr += c_rem[c]; tg += c_grp[c]; ts += c_seq[c];
      check(c_loads[c] == 200 + (c == 0), $sformatf("core %0d answered %0d loads", c, c_loads[c]));
    end
    check(remote_bad == 0, "remote requests well routed");
    check(tl > 0 && tr > 0 && tg > 0 && ts > 0 && remote_loads > 0 && remote_stores > 0,
          $sformatf("local %0d group %0d remote %0d seq %0d", tl, tg, tr, ts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: phase %0d done %b loads %0d %0d %0d %0d", phase, done, c_loads[0], c_loads[1], c_loads[2], c_loads[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
