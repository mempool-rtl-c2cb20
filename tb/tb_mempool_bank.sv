// Test of the SPM bank against a reference array: random loads and
// byte-enabled stores with random response stalls. A load's data must be
// valid exactly one cycle after the request when the response side is ready,
// must be held while it stalls, and stores must return nothing.
module tb_mempool_bank;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic        req_valid, req_ready, wen, rsp_valid, rsp_ready;
  logic [7:0]  addr;
  logic [3:0]  be;
  logic [31:0] wdata, rdata;
  logic [10:0] meta, rmeta;

  mempool_bank #(.NumWords(256), .DataWidth(32), .meta_t(logic [10:0])) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_valid_i (req_valid), .req_ready_o (req_ready), .req_addr_i (addr), .req_wen_i (wen),
    .req_be_i (be), .req_data_i (wdata), .req_meta_i (meta),
    .rsp_valid_o (rsp_valid), .rsp_ready_i (rsp_ready), .rsp_data_o (rdata), .rsp_meta_o (rmeta));

  logic [31:0] ref_mem [256];
  logic [31:0] exp_q [$];
  logic [10:0] expm_q [$];
  int unsigned stall_holds = 0;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (rsp_valid && rsp_ready) begin
        checks <= checks + 1;
        if (exp_q.size() == 0 || rdata != exp_q[0] || rmeta != expm_q[0]) begin
          failures <= failures + 1;
          $display("FAIL: rsp %h/%h", rdata, rmeta);
        end
        if (exp_q.size() != 0) begin void'(exp_q.pop_front()); void'(expm_q.pop_front()); end
      end
      if (req_valid && req_ready) begin
        if (wen) begin
          for (int i = 0; i < 4; i++) if (be[i]) ref_mem[addr][8*i +: 8] <= wdata[8*i +: 8];
        end else begin
          exp_q.push_back(ref_mem[addr]);
          expm_q.push_back(meta);
        end
      end
    end
  end

  initial begin
    req_valid = 0; wen = 0; addr = 0; be = 0; wdata = 0; meta = 0; rsp_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every word
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      req_valid = 1; wen = 1; addr = 8'(a); be = 4'hF; wdata = 32'($urandom);
    end
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (rsp_valid) begin failures++; $display("FAIL: store produced a response"); end
    // zero-load latency: load, data valid the next cycle
    @(negedge clk);
    req_valid = 1; wen = 0; addr = 8'd17; meta = 11'h5A5;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!rsp_valid || rdata != ref_mem[17]) begin failures++; $display("FAIL: latency 1"); end
    @(negedge clk);
    // random mix
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      rsp_ready = ($urandom % 3) != 0;
      if (!req_valid || req_ready) begin
        req_valid = ($urandom % 4) != 0;
        wen   = ($urandom % 2) != 0;
        addr  = 8'($urandom);
        be    = 4'($urandom);
        wdata = 32'($urandom);
        meta  = 11'($urandom);
      end
      if (rsp_valid && !rsp_ready) stall_holds++;
    end
    @(negedge clk);
    req_valid = 0; rsp_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || stall_holds == 0) begin failures++; $display("FAIL: leftover %0d stalls %0d", exp_q.size(), stall_holds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
