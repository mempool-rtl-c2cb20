// Test of the reorder buffer. A network model returns each load after a
// random delay of 1 to 12 cycles, so responses come back out of order; the
// core side must see every load's data in issue order. Checks also: at most
// Depth loads outstanding (the ROB must stall the core beyond that), stores
// pass without a slot, and a response for the oldest load reaches the core
// in the cycle it arrives (no added latency).
module tb_mempool_rob;
  import mempool_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  localparam int unsigned Depth = 8;

  logic      creq_valid, creq_ready, crsp_valid, crsp_ready;
  core_req_t creq;
  data_t     crsp_data;
  logic      nreq_valid, nreq_ready, nrsp_valid, nrsp_ready;
  core_req_t nreq;
  logic [2:0] nreq_id, nrsp_id;
  data_t     nrsp_data;

  mempool_rob #(.Depth(Depth)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_valid_i (creq_valid), .core_req_ready_o (creq_ready), .core_req_i (creq),
    .core_rsp_valid_o (crsp_valid), .core_rsp_ready_i (crsp_ready), .core_rsp_data_o (crsp_data),
    .net_req_valid_o (nreq_valid), .net_req_ready_i (nreq_ready), .net_req_o (nreq),
    .net_req_id_o (nreq_id), .net_rsp_valid_i (nrsp_valid), .net_rsp_ready_o (nrsp_ready),
    .net_rsp_data_i (nrsp_data), .net_rsp_id_i (nrsp_id));

  function automatic data_t f(addr_t a);
    return a ^ 32'hA5A5_0000;
  endfunction

  // network model: pending responses with a due cycle
  int unsigned cycle = 0;
  int unsigned due [Depth];
  logic [Depth-1:0] busy;
  data_t       rdat [Depth];
  addr_t       exp_q [$];
  int unsigned outstanding = 0, max_out = 0, ooo = 0, full_stalls = 0, bypass_ok = 0, stores = 0;

  // one response per cycle: the first due slot
  always_comb begin
    nrsp_valid = 1'b0; nrsp_id = '0; nrsp_data = '0;
    for (int i = Depth - 1; i >= 0; i--) begin
      if (busy[i] && due[i] <= cycle) begin
        nrsp_valid = 1'b1; nrsp_id = 3'(i); nrsp_data = rdat[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (nreq_valid && nreq_ready) begin
        if (nreq.wen) stores <= stores + 1;
        else begin
          if (busy[nreq_id]) begin failures <= failures + 1; $display("FAIL: slot reused"); end
          busy[nreq_id] <= 1'b1;
          due[nreq_id]  <= cycle + 1 + ($urandom % 12);
          rdat[nreq_id] <= f(nreq.addr);
        end
      end
      if (nrsp_valid) begin
        busy[nrsp_id] <= 1'b0;
        if (nrsp_id != dut.head_q) ooo <= ooo + 1;
        // bypass: the oldest load's response is visible to the core at once
        if (nrsp_id == dut.head_q) begin
          checks <= checks + 1;
          if (!crsp_valid || crsp_data != nrsp_data) begin
            failures <= failures + 1; $display("FAIL: no bypass");
          end else bypass_ok <= bypass_ok + 1;
        end
      end
      if (creq_valid && !creq_ready && !creq.wen) full_stalls <= full_stalls + 1;
      if (creq_valid && creq_ready && !creq.wen) exp_q.push_back(creq.addr);
      if (crsp_valid && crsp_ready) begin
        checks <= checks + 1;
        if (exp_q.size() == 0 || crsp_data != f(exp_q[0])) begin
          failures <= failures + 1;
          $display("FAIL: got %h", crsp_data);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
      if (dut.count_q > Depth) begin failures <= failures + 1; $display("FAIL: count"); end
    end
  end

  int unsigned issued = 0;
  initial begin
    busy = '0;
    creq_valid = 0; creq = '0; crsp_ready = 1; nreq_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      crsp_ready = ($urandom % 5) != 0;
      nreq_ready = ($urandom % 5) != 0;
      if (!creq_valid || dut.core_req_ready_o || 1'b0) begin
        // new request after a handshake (checked at the edge below)
      end
      if (!creq_valid) begin
        creq_valid = ($urandom % 3) != 0;
        creq = '{addr: addr_t'($urandom), wen: ($urandom % 4) == 0, be: 4'hF, data: 32'($urandom)};
      end
      @(posedge clk);
      if (creq_valid && creq_ready) begin
        issued++;
        #1 creq_valid = 0;
      end
    end
    @(negedge clk);
    creq_valid = 0; crsp_ready = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d loads unanswered", exp_q.size()); end
    checks++;
    if (ooo == 0 || full_stalls == 0 || bypass_ok == 0 || stores == 0) begin
      failures++;
      $display("FAIL: ooo=%0d full_stalls=%0d bypass=%0d stores=%0d", ooo, full_stalls, bypass_ok, stores);
    end
    $display("reordered responses %0d, full stalls %0d", ooo, full_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
