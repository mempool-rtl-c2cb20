// Test of one local group (group 0, 16 tiles, 64 cores). Its E, N and NE
// master interfaces are looped back onto its own slave interfaces of the same
// direction, so a request for tile t of another group is served by tile
// t mod 16 of this group after crossing the butterflies and both register
// boundaries, exactly as in the cluster. The traffic models' addresses are
// chosen so that no two words written collide under this aliasing.
// Checks: zero-load latency 1 (own tile), 3 (same group) and 5 (E, N and NE
// directions); all loads of a random read phase at 0.3 requests/core/cycle
// return the right data; local, group and remote accesses, sequential-region
// accesses and contention stalls all occur.
module tb_mempool_group;
  import mempool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  localparam int unsigned NC = 64;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic      [NC-1:0] cv, cr, rv, rr;
  core_req_t [NC-1:0] creq;
  data_t     [NC-1:0] rd, fd;
  logic      [NC-1:0] fr;
  axi_ar_t   [15:0]   ar;
  logic      [15:0]   arv, rrdy;
  logic      [NumDirs-1:0][15:0] qv, qr, pv, pr;
  tcdm_req_t [NumDirs-1:0][15:0] q;
  tcdm_rsp_t [NumDirs-1:0][15:0] p;

  mempool_group dut (
    .clk_i (clk), .rst_ni (rst_n), .group_id_i (2'd0),
    .core_req_valid_i (cv), .core_req_ready_o (cr), .core_req_i (creq),
    .core_rsp_valid_o (rv), .core_rsp_ready_i (rr), .core_rsp_data_o (rd),
    .fetch_valid_i ('0), .fetch_addr_i ('0), .fetch_ready_o (fr), .fetch_data_o (fd),
    .axi_ar_valid_o (arv), .axi_ar_ready_i ('1), .axi_ar_o (ar),
    .axi_r_valid_i ('0), .axi_r_ready_o (rrdy), .axi_r_i ('0),
    .mst_req_valid_o (qv), .mst_req_ready_i (qr), .mst_req_o (q),
    .mst_rsp_valid_i (pv), .mst_rsp_ready_o (pr), .mst_rsp_i (p),
    .slv_req_valid_i (qv), .slv_req_ready_o (qr), .slv_req_i (q),
    .slv_rsp_valid_o (pv), .slv_rsp_ready_i (pr), .slv_rsp_o (p));

  logic [1:0] phase;
  int unsigned probe_core;
  addr_t probe_addr;
  logic [NC-1:0] done;
  int unsigned c_chk [NC], c_fail [NC], c_loads [NC], c_lat [NC], c_last [NC], c_stall [NC];
  int unsigned c_loc [NC], c_grp [NC], c_rem [NC], c_seq [NC];

  for (genvar c = 0; c < NC; c++) begin : gen_core
    tb_core_model #(.CoreId (c), .NumTbCores (NC), .NumWrites (4), .NumReads (24),
                    .LoadPermil (300), .LocalPermil (250)) i_core (
      .clk_i (clk), .rst_ni (rst_n), .phase_i ((phase != 3 || c == probe_core) ? phase : 2'd0),
      .probe_addr_i (probe_addr),
      .req_valid_o (cv[c]), .req_ready_i (cr[c]), .req_o (creq[c]),
      .rsp_valid_i (rv[c]), .rsp_ready_o (rr[c]), .rsp_data_i (rd[c]),
      .done_o (done[c]), .checks_o (c_chk[c]), .failures_o (c_fail[c]), .loads_o (c_loads[c]),
      .lat_sum_o (c_lat[c]), .last_lat_o (c_last[c]), .stalls_o (c_stall[c]),
      .n_local_o (c_loc[c]), .n_group_o (c_grp[c]), .n_remote_o (c_rem[c]), .n_seq_o (c_seq[c]));
  end

  task automatic wait_done();
    do @(posedge clk); while (!(&done));
  endtask

  task automatic probe(input int unsigned c, input addr_t a, input int unsigned exp, input string what);
    probe_core = c; probe_addr = a;
    phase = 3;
    repeat (2) @(posedge clk);
    wait_done();
    check(c_last[c] == exp, $sformatf("%s: latency %0d, expected %0d", what, c_last[c], exp));
    phase = 0;
    repeat (2) @(posedge clk);
  endtask

  function automatic addr_t il(int unsigned r, int unsigned t, int unsigned b);
    return addr_t'(r * 4096 + t * 64 + b * 4);
  endfunction

  initial begin
    int unsigned tl, tg, tr, ts, tst, tld, tlat;
    phase = 0; probe_core = 0; probe_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    phase = 1; repeat (2) @(posedge clk);
    wait_done();
    phase = 0; repeat (2) @(posedge clk);
    probe(0,  il(64, 0, 4),  1, "own tile");
    probe(0,  il(64, 7, 8),  3, "same group");
    probe(0,  il(65, 20, 1), 5, "E (group 1)");
    probe(0,  il(66, 40, 2), 5, "N (group 2)");
    probe(0,  il(67, 50, 3), 5, "NE (group 3)");
    probe(63, il(65, 27, 5), 5, "core 63, E");
    phase = 2; repeat (2) @(posedge clk);
    wait_done();
    phase = 0;
    tl = 0; tg = 0; tr = 0; ts = 0; tst = 0; tld = 0; tlat = 0;
    for (int c = 0; c < NC; c++) begin
      checks += c_chk[c]; failures += c_fail[c];
      tl += c_loc[c]; tg += c_grp[c]; tr += c_rem[c]; ts += c_seq[c]; tst += c_stall[c];
      tld += c_loads[c]; tlat += c_lat[c];
    end
    check(tld == NC * 24 + 6, $sformatf("loads answered %0d", tld));
    $display("average latency x100 = %0d; local=%0d group=%0d remote=%0d seq=%0d stalls=%0d",
             100 * tlat / tld, tl, tg, tr, ts, tst);
    check(tl > 0, "local accesses happened");
    check(tg > 0, "group accesses happened");
    check(tr > 0, "remote accesses happened");
    check(ts > 0, "sequential-region accesses happened");
    check(tst > 0, "contention stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
