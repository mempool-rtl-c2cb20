// Test of the address decoder with random addresses and tile indices. The
// destination is worked out arithmetically: tile (a/64)%64, bank (a/4)%16;
// local if the tile is the own one, else port L for the own group, E, N or NE
// for groups differing by 1, 2 or 3 (XOR of group indices).
module tb_mempool_addr_decoder;
  import mempool_pkg::*;
  int unsigned checks = 0, failures = 0;
  addr_t    a;
  tile_id_t t;
  logic     loc;
  port_t    port;
  logic [3:0] bank, tile;

  mempool_addr_decoder dut (.addr_i (a), .tile_id_i (t), .local_o (loc), .port_o (port),
                            .bank_o (bank), .tile_o (tile));

  int unsigned hits [5];
  initial begin
    for (int i = 0; i < 5; i++) hits[i] = 0;
    for (int i = 0; i < 20000; i++) begin
      automatic int unsigned dt, dg, og, ep;
      a = addr_t'($urandom);
      t = tile_id_t'($urandom);
      if (i % 7 == 0) a[11:6] = t;
      #1;
      dt = (a / 64) % 64; dg = dt / 16; og = t / 16;
      ep = (dg == og) ? 0 : ((dg == (og ^ 1)) ? 1 : ((dg == (og ^ 2)) ? 2 : 3));
      checks++;
      if (loc != (dt == t) || bank != (a / 4) % 16 || tile != dt % 16 || (!loc && port != ep)) begin
        failures++;
        $display("FAIL: a=%h t=%0d: local %0d port %0d bank %0d", a, t, loc, port, bank);
      end
      hits[loc ? 4 : port]++;
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (hits[i] == 0) begin failures++; $display("FAIL: case %0d never seen", i); end
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
