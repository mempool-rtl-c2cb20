// Behavioural stand-in for a core's load/store port, used by the group and
// cluster testbenches in place of a Snitch core. It is a synthetic traffic
// generator: in a fill phase it stores NumWrites words, then in a read phase
// it issues NumReads loads, one in any cycle with probability LoadPermil/1000
// (a Bernoulli approximation of a Poisson process), to uniformly random
// words written by any core, or with probability LocalPermil/1000 to its own
// stack words in the sequential region of its tile. Every load's data is
// checked in order against the hash of its address, and its round trip
// (request handshake to response) is measured. A probe load to probe_addr_i
// can be issued alone to measure zero-load latency.
//
// Word k of core c lives at row 64+k of bank 4*(c%4)+(k%4) of tile
// (c/4 + 13k) mod 64, outside the sequential regions; stack word k of core c
// is at byte (c/4)*SeqMemSizePerTile + (c%4)*(SeqMemSizePerTile/4) + 4k.
module tb_core_model
  import mempool_pkg::*;
#(
  parameter int unsigned CoreId      = 0,
  parameter int unsigned NumTbCores  = 256,
  parameter int unsigned NumWrites   = 4,
  parameter int unsigned NumReads    = 16,
  parameter int unsigned LoadPermil  = 300,
  parameter int unsigned LocalPermil = 250
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic [1:0] phase_i,       // 0 idle, 1 fill, 2 read, 3 probe
  input  addr_t     probe_addr_i,
  output logic      req_valid_o,
  input  logic      req_ready_i,
  output core_req_t req_o,
  input  logic      rsp_valid_i,
  output logic      rsp_ready_o,
  input  data_t     rsp_data_i,
  output logic      done_o,
  output int unsigned checks_o,
  output int unsigned failures_o,
  output int unsigned loads_o,
  output int unsigned lat_sum_o,
  output int unsigned last_lat_o,
  output int unsigned stalls_o,
  output int unsigned n_local_o,
  output int unsigned n_group_o,
  output int unsigned n_remote_o,
  output int unsigned n_seq_o
);
  localparam int unsigned Row0 = 64;

  function automatic data_t hash(addr_t a);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_5A5A;
  endfunction

  // Interleaved address of word k written by core c.
  function automatic addr_t wr_addr(int unsigned c, int unsigned k);
    int unsigned tile, bank, row;
    tile = (c / 4 + 13 * k) % 64;
    bank = 4 * (c % 4) + (k % 4);
    row  = Row0 + k;
    return addr_t'(row * 4096 + tile * 64 + bank * 4);
  endfunction

  function automatic addr_t stack_addr(int unsigned c, int unsigned k);
    return addr_t'((c / 4) * SeqMemSizePerTile + (c % 4) * (SeqMemSizePerTile / 4) + 4 * k);
  endfunction

  // Where the request goes, worked out from the address map.
  function automatic int unsigned dst_tile(addr_t a);
    if (a < addr_t'(SeqMemSizePerTile * NumTiles)) return a / SeqMemSizePerTile;
    return (a / 64) % 64;
  endfunction

  int unsigned n_wr, n_rd, n_issued_rd;
  addr_t       exp_addr [$];
  int unsigned exp_time [$];
  int unsigned cycle;
  logic        pending;
  logic        probe_done;
  addr_t       cur_addr;
  logic        cur_wen;

  assign rsp_ready_o = 1'b1;
  assign req_o       = '{addr: cur_addr, wen: cur_wen, be: 4'hF, data: hash(cur_addr)};
  assign req_valid_o = pending;
  assign done_o      = (phase_i == 1) ? (n_wr == 2 * NumWrites && !pending)
                     : (phase_i == 2) ? (n_issued_rd == NumReads && !pending && exp_addr.size() == 0)
                     : (phase_i == 3) ? (probe_done && exp_addr.size() == 0) : 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending     <= 1'b0;
      n_wr        <= 0;
      n_rd        <= 0;
      n_issued_rd <= 0;
      cycle       <= 0;
      checks_o    <= 0;
      failures_o  <= 0;
      loads_o     <= 0;
      lat_sum_o   <= 0;
      last_lat_o  <= 0;
      stalls_o    <= 0;
      n_local_o   <= 0;
      n_group_o   <= 0;
      n_remote_o  <= 0;
      n_seq_o     <= 0;
      probe_done  <= 1'b0;
      cur_addr    <= '0;
      cur_wen     <= 1'b0;
    end else begin
      cycle <= cycle + 1;
      if (phase_i != 3) probe_done <= 1'b0;
      // ---- handshake of the current request ----
      if (pending && req_ready_i) begin
        pending <= 1'b0;
        if (!cur_wen) begin
          exp_addr.push_back(cur_addr);
          exp_time.push_back(cycle);
        end
        if (dst_tile(cur_addr) == CoreId / 4)                 n_local_o  <= n_local_o + 1;
        else if (dst_tile(cur_addr) / 16 == CoreId / 64)      n_group_o  <= n_group_o + 1;
        else                                                  n_remote_o <= n_remote_o + 1;
        if (cur_addr < addr_t'(SeqMemSizePerTile * NumTiles)) n_seq_o    <= n_seq_o + 1;
      end else if (pending) begin
        stalls_o <= stalls_o + 1;
      end
      // ---- new request ----
      if (!pending || req_ready_i) begin
        if (phase_i == 1 && n_wr < 2 * NumWrites) begin
          pending  <= 1'b1;
          cur_wen  <= 1'b1;
          cur_addr <= (n_wr < NumWrites) ? wr_addr(CoreId, n_wr) : stack_addr(CoreId, n_wr - NumWrites);
          n_wr     <= n_wr + 1;
        end else if (phase_i == 2 && n_issued_rd < NumReads && ($urandom % 1000) < LoadPermil) begin
          pending  <= 1'b1;
          cur_wen  <= 1'b0;
          if (($urandom % 1000) < LocalPermil)
            cur_addr <= stack_addr(CoreId, $urandom % NumWrites);
          else
            cur_addr <= wr_addr($urandom % NumTbCores, $urandom % NumWrites);
          n_issued_rd <= n_issued_rd + 1;
        end else if (phase_i == 3 && !probe_done && !pending) begin
          pending    <= 1'b1;
          cur_wen    <= 1'b0;
          cur_addr   <= probe_addr_i;
          probe_done <= 1'b1;
        end
      end
      // ---- response ----
      if (rsp_valid_i) begin
        checks_o <= checks_o + 1;
        if (exp_addr.size() == 0) begin
          failures_o <= failures_o + 1;
          $display("core %0d: response without a pending load", CoreId);
        end else begin
          if (rsp_data_i != hash(exp_addr[0])) begin
            failures_o <= failures_o + 1;
            $display("core %0d: load %h returned %h, expected %h", CoreId,
                     exp_addr[0], rsp_data_i, hash(exp_addr[0]));
          end
          loads_o    <= loads_o + 1;
          lat_sum_o  <= lat_sum_o + (cycle - exp_time[0]);
          last_lat_o <= cycle - exp_time[0];
          void'(exp_addr.pop_front());
          void'(exp_time.pop_front());
        end
      end
    end
  end

endmodule
