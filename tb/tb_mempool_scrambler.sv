// Test of the hybrid addressing scheme. The expected physical address is
// computed from the layout, not from bit fields: byte o of the sequential
// region of tile T (o < 4096) is word w = o/4, so it must land in bank w%16,
// row w/16 of tile T, at interleaved address row*4096 + T*64 + bank*4 + o%4.
// Addresses above the 256 KiB of sequential regions must pass unchanged.
// Also checks that consecutive words of a region stay in one tile.
module tb_mempool_scrambler;
  int unsigned checks = 0, failures = 0;
  logic [31:0] a, y;
  logic        seq;

  mempool_scrambler #(.AddrWidth(32), .ByteOffset(2), .NumBanksPerTile(16),
                      .NumTiles(64), .SeqMemSizePerTile(4096)) dut (
    .addr_i (a), .addr_o (y), .seq_o (seq));

  function automatic logic [31:0] expected(logic [31:0] x);
    int unsigned t, o, w;
    if (x >= 64 * 4096) return x;
    t = x / 4096; o = x % 4096; w = o / 4;
    return (w / 16) * 4096 + t * 64 + (w % 16) * 4 + o % 4;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = (i < 10000) ? 32'($urandom % (64 * 4096)) : 32'($urandom);
      if (i < 64) a = 32'(i * 4096 + 4 * i);
      #1;
      checks++;
      if (y != expected(a) || seq != (a < 64 * 4096)) begin
        failures++;
        $display("FAIL: %h -> %h, expected %h", a, y, expected(a));
      end
    end
    // one region stays in one tile
    for (int k = 0; k < 1024; k++) begin
      a = 32'(5 * 4096 + 4 * k);
      #1;
      checks++;
      if (y[11:6] != 6'd5) begin failures++; $display("FAIL: word %0d left tile 5", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
