// End-to-end test of the full MemPool cluster at its default size (256
// cores, 1 MiB L1). Every core port is driven by a traffic model
// (tb_core_model); every tile's instruction refill port by an AXI memory
// model whose word at address a is a hash of a.
//  1. Probe: with the cluster idle, loads from core 0 and core 255 to a bank
//     of their own tile, of another tile of their group and of another group
//     must return in 1, 3 and 5 cycles.
//  2. Fill: every core stores its interleaved words and its stack words
//     (sequential region, through the scrambler).
//  3. Read: all cores issue random loads at 0.3 requests/core/cycle, 25 % to
//     their own stack; every datum is checked.
//  4. Fetch: cores fetch instructions; data and refill count are checked.
// Mechanisms counted (each must occur): local, group and remote accesses,
// sequential-region accesses, contention stalls, ROB reordering, full
// register boundaries and instruction cache refills.
module tb_mempool_cluster;
  import mempool_pkg::*;

  localparam int unsigned NumWrites = 4;
  localparam int unsigned NumReads  = 24;
  localparam int unsigned MaxCycles = 40000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      [NumCores-1:0] req_valid, req_ready, rsp_valid, rsp_ready;
  core_req_t [NumCores-1:0] req;
  data_t     [NumCores-1:0] rsp_data;
  logic      [NumCores-1:0] f_valid, f_ready;
  addr_t     [NumCores-1:0] f_addr;
  data_t     [NumCores-1:0] f_data;
  logic      [NumTiles-1:0] ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t   [NumTiles-1:0] ar;
  axi_r_t    [NumTiles-1:0] r;

  mempool_cluster dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_valid_i (req_valid), .core_req_ready_o (req_ready), .core_req_i (req),
    .core_rsp_valid_o (rsp_valid), .core_rsp_ready_i (rsp_ready), .core_rsp_data_o (rsp_data),
    .fetch_valid_i (f_valid), .fetch_addr_i (f_addr), .fetch_ready_o (f_ready), .fetch_data_o (f_data),
    .axi_ar_valid_o (ar_valid), .axi_ar_ready_i (ar_ready), .axi_ar_o (ar),
    .axi_r_valid_i (r_valid), .axi_r_ready_o (r_ready), .axi_r_i (r)
  );

  logic [1:0]  phase;
  int unsigned probe_core;
  addr_t       probe_addr [NumCores];
  logic        [NumCores-1:0] done;
  int unsigned c_checks [NumCores], c_fail [NumCores], c_loads [NumCores], c_lat [NumCores];
  int unsigned c_last [NumCores], c_stall [NumCores], c_loc [NumCores], c_grp [NumCores];
  int unsigned c_rem [NumCores], c_seq [NumCores];

  for (genvar c = 0; c < NumCores; c++) begin : gen_core
    tb_core_model #(
      .CoreId (c), .NumTbCores (NumCores), .NumWrites (NumWrites), .NumReads (NumReads),
      .LoadPermil (300), .LocalPermil (250)
    ) i_core (
      .clk_i (clk), .rst_ni (rst_n), .phase_i ((phase != 3 || c == probe_core) ? phase : 2'd0),
      .probe_addr_i (probe_addr[c]),
      .req_valid_o (req_valid[c]), .req_ready_i (req_ready[c]), .req_o (req[c]),
      .rsp_valid_i (rsp_valid[c]), .rsp_ready_o (rsp_ready[c]), .rsp_data_i (rsp_data[c]),
      .done_o (done[c]), .checks_o (c_checks[c]), .failures_o (c_fail[c]), .loads_o (c_loads[c]),
      .lat_sum_o (c_lat[c]), .last_lat_o (c_last[c]), .stalls_o (c_stall[c]),
      .n_local_o (c_loc[c]), .n_group_o (c_grp[c]), .n_remote_o (c_rem[c]), .n_seq_o (c_seq[c])
    );
  end

  // ---------------- instruction refill memory models ----------------
  function automatic data_t ihash(addr_t a);
    return (a ^ 32'hC0DE_0000) * 32'h0101_0107;
  endfunction

  int unsigned refills;
  for (genvar t = 0; t < NumTiles; t++) begin : gen_axi
    logic  busy;
    addr_t addr;
    logic [7:0] left;
    assign ar_ready[t] = ~busy;
    assign r_valid[t]  = busy;
    assign r[t]        = '{data: ihash(addr), resp: 2'b00, last: (left == 0)};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy <= 1'b0; addr <= '0; left <= '0;
      end else if (!busy && ar_valid[t]) begin
        busy <= 1'b1; addr <= ar[t].addr; left <= ar[t].len;
      end else if (busy && r_ready[t]) begin
        addr <= addr + 4;
        left <= left - 1;
        if (left == 0) busy <= 1'b0;
      end
    end
  end

  // ---------------- instruction fetch traffic ----------------
  int unsigned f_checks, f_fail, f_served;
  logic        fetching;
  for (genvar c = 0; c < NumCores; c++) begin : gen_fetch
    int unsigned n;
    assign f_valid[c] = fetching && n < 12;
    // Fetch n of core c reads 0x8000_0000 + 64*(c%4) + 4*(n%8) + 2048*(n/8)
    // + (c/4) MiB: three lines per core (two sharing a set), distinct for
    // every core, so each tile's cache takes three misses per core and hits
    // on the other fetches.
    assign f_addr[c]  = 32'h8000_0000 + 32'(64 * (c % 4)) + 32'(4 * (n % 8)) + 32'(2048 * (n / 8))
                        + 32'(c / 4) * 32'h0010_0000;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) n <= 0;
      else if (f_valid[c] && f_ready[c]) n <= n + 1;
    end
  end
  always @(negedge clk) begin
    if (fetching) begin
      for (int unsigned c = 0; c < NumCores; c++) begin
        if (f_valid[c] && f_ready[c]) begin
          f_checks++;
          f_served++;
          if (f_data[c] != ihash(f_addr[c])) begin
            f_fail++;
            $display("fetch core %0d addr %h: got %h", c, f_addr[c], f_data[c]);
          end
        end
      end
    end
    for (int unsigned t = 0; t < NumTiles; t++) if (ar_valid[t] && ar_ready[t]) refills++;
  end

  // ---------------- mechanism probes ----------------
  int unsigned rob_reorder, spill_full;
  for (genvar t = 0; t < NumTiles; t++) begin : gen_probe
    for (genvar c = 0; c < NumCoresPerTile; c++) begin : gen_c
      always @(negedge clk) begin
        // A response arriving for a slot that is not the oldest one.
        if (dut.gen_group[t/16].i_group.gen_tile[t%16].i_tile.gen_core[c].i_rob.net_rsp_valid_i &&
            dut.gen_group[t/16].i_group.gen_tile[t%16].i_tile.gen_core[c].i_rob.net_rsp_id_i !=
            dut.gen_group[t/16].i_group.gen_tile[t%16].i_tile.gen_core[c].i_rob.head_q)
          rob_reorder++;
      end
    end
  end
  // A boundary register holding two entries: its output was stalled.
  for (genvar g = 0; g < NumGroups; g++) begin : gen_probe_g
    for (genvar d = 1; d < NumTilePorts; d++) begin : gen_d
      for (genvar j = 0; j < NumTilesPerGroup; j++) begin : gen_j
        always @(negedge clk) begin
          if (dut.gen_group[g].i_group.gen_dir[d].gen_lane[j].i_req_reg.b_full_q) spill_full++;
          if (dut.gen_group[g].i_group.gen_dir[d].gen_lane[j].i_rsp_reg.b_full_q) spill_full++;
        end
      end
    end
  end

  int unsigned checks, failures, cycles;
  initial begin
    checks = 0; failures = 0; refills = 0; f_checks = 0; f_fail = 0; f_served = 0;
    rob_reorder = 0; spill_full = 0; fetching = 1'b0; phase = 0; probe_core = 0;
    for (int c = 0; c < NumCores; c++) probe_addr[c] = '0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wait_done();
    do @(posedge clk); while (!(&done));
  endtask

  // Probe latency from core c to an address; returns the measured cycles.
  task automatic probe(input int unsigned c, input addr_t a, input int unsigned exp, input string what);
    probe_addr[c] = a;
    probe_core = c;
    phase = 3;
    repeat (2) @(posedge clk);
    wait_done();
    check(c_last[c] == exp, $sformatf("%s: latency %0d, expected %0d", what, c_last[c], exp));
    phase = 0;
    repeat (2) @(posedge clk);
  endtask

  // Interleaved address of a word in row r, tile t, bank b.
  function automatic addr_t il(int unsigned r, int unsigned t, int unsigned b);
    return addr_t'(r * 4096 + t * 64 + b * 4);
  endfunction

  initial begin
    int unsigned tot_loads, tot_lat, tot_stall, tot_loc, tot_grp, tot_rem, tot_seq, t0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- 2. fill ----
    phase = 1;
    repeat (2) @(posedge clk);
    wait_done();
    phase = 0;
    repeat (2) @(posedge clk);

    // ---- 1. zero-load probes (data was written in the fill phase) ----
    probe(0,   il(64, 0, 4),  1, "core 0 own tile");
    probe(0,   il(64, 7, 8),  3, "core 0 same group");
    probe(0,   il(64, 20, 0), 5, "core 0 group 1 (E)");
    probe(0,   il(64, 40, 4), 5, "core 0 group 2 (N)");
    probe(0,   il(64, 60, 12), 5, "core 0 group 3 (NE)");
    probe(255, il(64, 63, 4), 1, "core 255 own tile");
    probe(255, il(64, 50, 8), 3, "core 255 same group");
    probe(255, il(64, 1, 0),  5, "core 255 group 0");

    // ---- 3. random reads ----
    t0 = cycles;
    phase = 2;
    repeat (2) @(posedge clk);
    wait_done();
    phase = 0;
    $display("read phase: %0d cycles for %0d loads", cycles - t0, NumCores * NumReads);

    // ---- 4. instruction fetch ----
    fetching = 1'b1;
    wait (f_served == NumCores * 12);
    @(posedge clk);
    fetching = 1'b0;

    tot_loads = 0; tot_lat = 0; tot_stall = 0; tot_loc = 0; tot_grp = 0; tot_rem = 0; tot_seq = 0;
    for (int c = 0; c < NumCores; c++) begin
      checks   += c_checks[c];
      failures += c_fail[c];
      tot_loads += c_loads[c]; tot_lat += c_lat[c]; tot_stall += c_stall[c];
      tot_loc += c_loc[c]; tot_grp += c_grp[c]; tot_rem += c_rem[c]; tot_seq += c_seq[c];
    end
    checks   += f_checks;
    failures += f_fail;
    check(tot_loads == NumCores * NumReads + 8, $sformatf("loads answered %0d", tot_loads));
    check(f_served == NumCores * 12, "all fetches served");
    // 12 fetches over lines of 4 words: 3 lines per core, distinct per core.
    check(refills == NumCores * 3, $sformatf("refills %0d, expected %0d", refills, NumCores * 3));
    $display("average load latency %0d.%02d cycles", tot_lat / tot_loads, (100 * tot_lat / tot_loads) % 100);
    $display("mechanisms: local=%0d group=%0d remote=%0d seq=%0d stalls=%0d rob_reorder=%0d spill_full=%0d refills=%0d",
             tot_loc, tot_grp, tot_rem, tot_seq, tot_stall, rob_reorder, spill_full, refills);
    check(tot_loc > 0, "local accesses happened");
    check(tot_grp > 0, "group accesses happened");
    check(tot_rem > 0, "remote accesses happened");
    check(tot_seq > 0, "sequential-region accesses happened");
    check(tot_stall > 0, "contention stalls happened");
    check(rob_reorder > 0, "ROB reordering happened");
    check(spill_full > 0, "register boundary filled");
    check(refills > 0, "instruction cache refills happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) cycles <= cycles + 1;
  initial cycles = 0;

  initial begin
    repeat (MaxCycles) @(posedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
