// Test of the elastic buffer: random valid and ready for 2000 cycles. Every
// datum must come out once, in order; with the output always ready a datum
// must appear exactly one cycle after it was accepted; the input must keep
// accepting while the output stalls once (B register used).
module tb_mempool_spill_reg;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  int unsigned checks = 0, failures = 0, cycle = 0;
  logic [15:0] q [$];
  int unsigned t_in [$];
  logic        always_ready;
  int unsigned b_used = 0;

  mempool_spill_reg #(.T(logic [15:0])) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .valid_i (in_valid), .ready_o (in_ready), .data_i (in_data),
    .valid_o (out_valid), .ready_i (out_ready), .data_o (out_data)
  );

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        q.push_back(in_data);
        t_in.push_back(cycle);
      end
      if (out_valid && out_ready) begin
        checks <= checks + 1;
        if (q.size() == 0 || q[0] != out_data) begin
          failures <= failures + 1;
          $display("FAIL: out %h", out_data);
        end
        if (always_ready && (cycle - t_in[0]) != 1) begin
          failures <= failures + 1;
          $display("FAIL: latency %0d", cycle - t_in[0]);
        end
        if (q.size() != 0) begin
          void'(q.pop_front());
          void'(t_in.pop_front());
        end
      end
      if (dut.b_full_q) b_used <= b_used + 1;
    end
  end

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0; always_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: output always ready, input random
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      out_ready = 1'b1;
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = 16'($urandom);
      end
    end
    // phase 2: both random
    @(negedge clk);
    always_ready = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      out_ready = ($urandom % 2) != 0;
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = 16'($urandom);
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d data lost", q.size()); end
    checks++;
    if (b_used == 0) begin failures++; $display("FAIL: second register never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
