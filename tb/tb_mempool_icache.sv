// Test of the instruction cache with an AXI memory model whose word at
// address a is a hash of a (one beat per cycle, random AR delay).
//  - first fetch of a line: one AR burst of 4 beats (len 3, 32-bit, INCR)
//    at the line address; the data returned is correct;
//  - further fetches of resident lines: no refill, served in the cycle they
//    are requested (0 cycles) when no other core competes;
//  - five lines of one set: the fifth evicts the oldest (4 ways), which then
//    misses again, while the others still hit;
//  - four cores fetching random words of a 2 KiB footprint at once: every
//    word correct, every core served.
module tb_mempool_icache;
  import mempool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic  [3:0] fv, fr;
  addr_t [3:0] fa;
  data_t [3:0] fd;
  logic        arv, arr, rv, rr;
  axi_ar_t     ar;
  axi_r_t      r;

  mempool_icache dut (
    .clk_i (clk), .rst_ni (rst_n),
    .fetch_valid_i (fv), .fetch_addr_i (fa), .fetch_ready_o (fr), .fetch_data_o (fd),
    .axi_ar_valid_o (arv), .axi_ar_ready_i (arr), .axi_ar_o (ar),
    .axi_r_valid_i (rv), .axi_r_ready_o (rr), .axi_r_i (r));

  function automatic data_t h(addr_t a);
    return (a * 32'h2545_F491) ^ 32'h1357_9BDF;
  endfunction

  // AXI slave model
  logic busy; addr_t ba; logic [7:0] left;
  int unsigned n_ar = 0, bad_ar = 0;
  logic coin;
  always @(negedge clk) coin = ($urandom % 2) == 0;
  assign arr = ~busy && coin;
  assign rv  = busy;
  assign r   = '{data: h(ba), resp: 2'b00, last: left == 0};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin busy <= 0; ba <= '0; left <= '0; end
    else if (arv && arr) begin
      busy <= 1; ba <= ar.addr; left <= ar.len; n_ar <= n_ar + 1;
      if (ar.len != 3 || ar.size != 2 || ar.burst != 2'b01 || ar.addr[3:0] != 0) bad_ar <= bad_ar + 1;
    end else if (busy && rr) begin
      ba <= ba + 4; left <= left - 1;
      if (left == 0) busy <= 0;
    end
  end

  // single fetch on port p, returns the cycles waited
  task automatic fetch(input int p, input addr_t a, output int unsigned wait_cycles);
    @(negedge clk);
    fv[p] = 1; fa[p] = a; wait_cycles = 0;
    #1;
    while (!fr[p]) begin
      @(negedge clk); #1;
      wait_cycles++;
    end
    check(fd[p] == h(a), $sformatf("fetch %h data %h", a, fd[p]));
    @(negedge clk);
    fv[p] = 0;
  endtask

  initial begin
    int unsigned w, ar0;
    fv = '0; fa = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // miss then hits on one line
    ar0 = n_ar;
    fetch(0, 32'h0000_1000, w);
    check(n_ar == ar0 + 1 && w > 4, $sformatf("cold miss: %0d refills, %0d cycles", n_ar - ar0, w));
    for (int k = 0; k < 4; k++) begin
      fetch(0, 32'h0000_1000 + 4 * k, w);
      check(w == 0, "hit in the same cycle");
    end
    check(n_ar == ar0 + 1, "no refill for hits");
    // five lines of the same set (stride 512 B = sets * line size)
    for (int k = 1; k < 5; k++) fetch(1, 32'h0000_1000 + 512 * k, w);
    check(n_ar == ar0 + 5, "five misses for five lines");
    for (int k = 2; k < 5; k++) begin
      fetch(2, 32'h0000_1000 + 512 * k + 8, w);
      check(w == 0, "resident lines still hit");
    end
    ar0 = n_ar;
    fetch(3, 32'h0000_1000, w);
    check(n_ar == ar0 + 1, "oldest line was evicted");
    // all four ports at once, random words of a 2 KiB footprint
    begin
      int unsigned served [4];
      for (int p = 0; p < 4; p++) served[p] = 0;
      @(negedge clk);
      for (int p = 0; p < 4; p++) begin fv[p] = 1; fa[p] = 32'h0002_0000 + 4 * ($urandom % 512); end
      for (int c = 0; c < 6000; c++) begin
        automatic logic [3:0] took = '0;
        #1;
        for (int p = 0; p < 4; p++) if (fv[p] && fr[p]) begin
          took[p] = 1'b1;
          checks++;
          if (fd[p] != h(fa[p])) begin failures++; $display("FAIL: port %0d %h", p, fa[p]); end
          served[p]++;
        end
        @(negedge clk);
        for (int p = 0; p < 4; p++) if (took[p]) fa[p] = 32'h0002_0000 + 4 * ($urandom % 512);
      end
      fv = '0;
      for (int p = 0; p < 4; p++) check(served[p] > 20, $sformatf("port %0d served %0d", p, served[p]));
    end
    check(bad_ar == 0, "AR bursts well formed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
