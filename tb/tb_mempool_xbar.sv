// Test of the crossbar switch, combinational (8 x 16, as the tile's request
// crossbar) and with output elastic buffers (4 x 4). Random traffic with
// random output stalls: every packet must arrive at the output it selected,
// once, and in order per input/output pair. Directed checks: with all inputs
// hammering one output the round-robin arbiter serves them in turn; packets
// to distinct outputs pass in the same cycle (0 cycles combinational, 1 with
// buffers).
module tb_mempool_xbar;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // payload: {src[7:0], dst[7:0], seq[15:0]}
  typedef logic [31:0] pkt_t;

  // ---------------- DUT A: 8 x 16, combinational ----------------
  localparam int NI = 8, NO = 16;
  logic [NI-1:0]        a_valid, a_ready;
  logic [NI-1:0][3:0]   a_sel;
  pkt_t [NI-1:0]        a_data;
  logic [NO-1:0]        a_ovalid, a_oready;
  pkt_t [NO-1:0]        a_odata;

  mempool_xbar #(.NumIn(NI), .NumOut(NO), .T(pkt_t)) dut_a (
    .clk_i (clk), .rst_ni (rst_n),
    .valid_i (a_valid), .ready_o (a_ready), .sel_i (a_sel), .data_i (a_data),
    .valid_o (a_ovalid), .ready_i (a_oready), .data_o (a_odata)
  );

  // ---------------- DUT B: 4 x 4, with elastic buffers ----------------
  logic [3:0]      b_valid, b_ready;
  logic [3:0][1:0] b_sel;
  pkt_t [3:0]      b_data;
  logic [3:0]      b_ovalid, b_oready;
  pkt_t [3:0]      b_odata;

  mempool_xbar #(.NumIn(4), .NumOut(4), .T(pkt_t), .SpillOutput(1'b1)) dut_b (
    .clk_i (clk), .rst_ni (rst_n),
    .valid_i (b_valid), .ready_o (b_ready), .sel_i (b_sel), .data_i (b_data),
    .valid_o (b_ovalid), .ready_i (b_oready), .data_o (b_odata)
  );

  int unsigned sent [NI][NO], recv [NI][NO];
  int unsigned total_sent = 0, total_recv = 0;
  logic        run_random = 0;

  logic [NI-1:0] acc;
  always_ff @(posedge clk) begin
    acc <= a_valid & a_ready;
    if (rst_n && run_random) begin
      for (int i = 0; i < NI; i++) if (a_valid[i] && a_ready[i]) begin
        sent[i][a_sel[i]]++;
        total_sent++;
      end
      for (int o = 0; o < NO; o++) begin
        if (a_ovalid[o] && a_oready[o]) begin
          automatic int s = a_odata[o][31:24];
          automatic int d = a_odata[o][23:16];
          automatic int q = a_odata[o][15:0];
          total_recv++;
          checks++;
          if (d != o || q != recv[s][o]) begin
            failures++;
            $display("FAIL: out %0d got src %0d dst %0d seq %0d (exp %0d)", o, s, d, q, recv[s][o]);
          end
          recv[s][o]++;
        end
      end
    end
  end

  initial begin
    a_valid = '0; a_sel = '0; a_data = '0; a_oready = '1;
    b_valid = '0; b_sel = '0; b_data = '0; b_oready = '1;
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) begin sent[i][o] = 0; recv[i][o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- directed: all 8 inputs to output 3, output always ready ----
    @(negedge clk);
    for (int i = 0; i < NI; i++) begin a_valid[i] = 1; a_sel[i] = 3; a_data[i] = pkt_t'(i); end
    begin
      automatic logic [NI-1:0] served = '0;
      for (int k = 0; k < NI; k++) begin
        #1;
        check($countones(a_ready) == 1, "exactly one input granted");
        check(a_ovalid[3] && a_odata[3] == pkt_t'(k), $sformatf("round robin turn %0d got %0d", k, a_odata[3]));
        served |= a_ready;
        begin
          automatic logic [NI-1:0] g = a_ready;
          @(negedge clk);
          a_valid &= ~g;
        end
      end
      check(served == '1, "every input served within NumIn grants");
    end
    a_valid = '0;
    // ---- directed: distinct outputs pass in parallel, same cycle ----
    @(negedge clk);
    for (int i = 0; i < NI; i++) begin a_valid[i] = 1; a_sel[i] = 4'(2*i+1); a_data[i] = pkt_t'(100+i); end
    #1;
    check(a_ready == '1, "all inputs accepted in one cycle");
    for (int i = 0; i < NI; i++) check(a_ovalid[2*i+1] && a_odata[2*i+1] == pkt_t'(100+i), "parallel routing");
    @(negedge clk);
    a_valid = '0;
    // ---- directed: buffered crossbar latency 1 ----
    for (int i = 0; i < 4; i++) begin b_valid[i] = 1; b_sel[i] = 2'(3-i); b_data[i] = pkt_t'(200+i); end
    @(negedge clk);
    b_valid = '0;
    check(b_ovalid == '1, "buffered outputs valid after one cycle");
    for (int i = 0; i < 4; i++) check(b_odata[3-i] == pkt_t'(200+i), "buffered routing");
    @(negedge clk);
    check(b_ovalid == '0, "buffered outputs drained");

    // ---- random traffic on A ----
    run_random = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int o = 0; o < NO; o++) a_oready[o] = ($urandom % 4) != 0;
      for (int i = 0; i < NI; i++) begin
        if (!a_valid[i] || acc[i]) begin
          a_valid[i] = ($urandom % 2) != 0;
          a_sel[i]   = 4'($urandom);
        end
      end
      // sequence number = packets this input has already sent to that output
      #1;
      for (int i = 0; i < NI; i++) if (a_valid[i])
        a_data[i] = {8'(i), 8'(a_sel[i]), 16'(sent[i][a_sel[i]])};
    end
    // finish the pending packets
    for (int cyc = 0; cyc < 50; cyc++) begin
      @(negedge clk);
      a_oready = '1;
      for (int i = 0; i < NI; i++) if (acc[i]) a_valid[i] = 0;
    end
    repeat (3) @(negedge clk);
    check(total_sent == total_recv && total_sent > 1000, $sformatf("sent %0d received %0d", total_sent, total_recv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
