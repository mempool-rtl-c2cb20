// Test of the radix-4 butterfly: a 16x16 network (as in each local group)
// and a 64x64 network with a pipeline stage after its middle layer. Random
// traffic with random output stalls: every packet must reach the output it
// addressed, once, in order per input/output pair. Zero-load latency must be
// 0 cycles (16x16) and 1 cycle (64x64, PipeLayer 2). A directed pattern checks
// that each input reaches every output.
module tb_mempool_butterfly;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef logic [31:0] pkt_t;   // {src, dst, seq}

  // 16 x 16
  logic [15:0]      v, r, ov, or_;
  logic [15:0][3:0] sel;
  pkt_t [15:0]      d, od;
  mempool_butterfly #(.NumPorts(16), .T(pkt_t)) dut16 (
    .clk_i (clk), .rst_ni (rst_n), .valid_i (v), .ready_o (r), .sel_i (sel), .data_i (d),
    .valid_o (ov), .ready_i (or_), .data_o (od));

  // 64 x 64 with a register stage midway (after layer 1 of 3)
  logic [63:0]      v6, r6, ov6, or6;
  logic [63:0][5:0] sel6;
  pkt_t [63:0]      d6, od6;
  mempool_butterfly #(.NumPorts(64), .T(pkt_t), .PipeLayer(2)) dut64 (
    .clk_i (clk), .rst_ni (rst_n), .valid_i (v6), .ready_o (r6), .sel_i (sel6), .data_i (d6),
    .valid_o (ov6), .ready_i (or6), .data_o (od6));

  int unsigned sent [16][16], recv [16][16];
  int unsigned n_sent = 0, n_recv = 0;
  logic        run = 0;
  logic [15:0] acc;

  always_ff @(posedge clk) begin
    acc <= v & r;
    if (run) begin
      for (int i = 0; i < 16; i++) if (v[i] && r[i]) begin sent[i][sel[i]]++; n_sent++; end
      for (int o = 0; o < 16; o++) if (ov[o] && or_[o]) begin
        automatic int s = od[o][31:24], t = od[o][23:16], q = od[o][15:0];
        n_recv++;
        checks++;
        if (t != o || q != recv[s][o]) begin
          failures++;
          $display("FAIL: out %0d src %0d dst %0d seq %0d exp %0d", o, s, t, q, recv[s][o]);
        end
        recv[s][o]++;
      end
    end
  end

  initial begin
    v = '0; sel = '0; d = '0; or_ = '1; v6 = '0; sel6 = '0; d6 = '0; or6 = '1;
    for (int i = 0; i < 16; i++) for (int o = 0; o < 16; o++) begin sent[i][o] = 0; recv[i][o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- directed: each input to each output, alone, zero-load ----
    for (int i = 0; i < 16; i++) for (int o = 0; o < 16; o++) begin
      @(negedge clk);
      v[i] = 1; sel[i] = 4'(o); d[i] = pkt_t'({i[7:0], o[7:0], 16'hBEEF});
      #1;
      check(r[i] && ov[o] && od[o] == d[i] && $countones(ov) == 1,
            $sformatf("16x16 %0d -> %0d in 0 cycles", i, o));
      @(negedge clk);
      v[i] = 0;
    end
    for (int k = 0; k < 64; k++) begin
      automatic int i = (k * 7) % 64, o = (k * 13 + 5) % 64;
      @(negedge clk);
      v6[i] = 1; sel6[i] = 6'(o); d6[i] = pkt_t'(1000 + k);
      #1;
      check(r6[i] && ov6 == '0, "64x64 accepted, not yet out");
      @(negedge clk);
      v6[i] = 0;
      #1;
      check(ov6[o] && od6[o] == pkt_t'(1000 + k) && $countones(ov6) == 1,
            $sformatf("64x64 %0d -> %0d after 1 cycle", i, o));
    end
    // ---- random traffic on 16x16 ----
    @(negedge clk);
    run = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int o = 0; o < 16; o++) or_[o] = ($urandom % 4) != 0;
      for (int i = 0; i < 16; i++) if (!v[i] || acc[i]) begin
        v[i] = ($urandom % 2) != 0;
        sel[i] = 4'($urandom);
      end
      #1;
      for (int i = 0; i < 16; i++) d[i] = {8'(i), 8'(sel[i]), 16'(sent[i][sel[i]])};
    end
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      or_ = '1;
      for (int i = 0; i < 16; i++) if (acc[i]) v[i] = 0;
    end
    check(n_sent == n_recv && n_sent > 1000, $sformatf("sent %0d received %0d", n_sent, n_recv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
