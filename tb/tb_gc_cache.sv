// tb_gc_cache: drives a small G-C cache (4 sets x 2 ways) with random
// lookups and fills of partial-aggregation results keyed by a node pair, a
// chunk number and the sum/max flag, and compares against an LRU model kept
// here. Lookups use a random order of the two nodes, so the test also checks
// that (a,b) and (b,a) find the same entry, and that the chunk and the
// sum/max flag keep entries apart.
`timescale 1ns/1ps
module tb_gc_cache;
  import rubik_pkg::*;
  localparam int SETS = 4, WAYS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_done, lk_hit, fill_valid, inv, lk_max, fill_max;
  node_t lk_a, lk_b, fill_a, fill_b;
  logic [CHUNK_W-1:0] lk_chunk, fill_chunk;
  line_t lk_data, fill_data;
  int checks = 0, failures = 0;
  int hits = 0;

  gc_cache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  typedef logic [63:0] key_t;
  key_t  m_key [SETS][$];
  line_t m_data [key_t];

  function automatic key_t key(node_t a, node_t b, int c, bit m);
    node_t lo, hi;
    lo = a < b ? a : b;
    hi = a < b ? b : a;
    return {m, 18'(lo), 18'(hi), 8'(c)};
  endfunction
  function automatic int set_of(node_t a, node_t b, int c);
    return int'((32'(a) ^ 32'(b) ^ 32'(c)) % SETS);
  endfunction
  function automatic int find(int s, key_t k);
    foreach (m_key[s][i]) if (m_key[s][i] == k) return i;
    return -1;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic rnd_key(output node_t a, output node_t b, output int c, output bit m);
    a = node_t'($urandom % 2);
    b = node_t'(4 + $urandom % 2);
    c = $urandom % 2;
    m = ($urandom % 4) == 0;
    if ($urandom % 2) begin node_t t; t = a; a = b; b = t; end
  endtask

  initial begin
    lk_valid = 0; lk_a = 0; lk_b = 0; lk_chunk = 0; lk_max = 0;
    fill_valid = 0; fill_a = 0; fill_b = 0; fill_chunk = 0; fill_max = 0; fill_data = 0; inv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 800; t++) begin
      node_t a, b; int c; bit m;
      int s, i;
      key_t k;
      int r;
      r = $urandom % 10;
      rnd_key(a, b, c, m);
      k = key(a, b, c, m);
      s = set_of(a, b, c);
      i = find(s, k);
      if (r < 5) begin
        lk_valid = 1; lk_a = a; lk_b = b; lk_chunk = CHUNK_W'(c); lk_max = m;
        @(negedge clk);
        lk_valid = 0;
        chk(lk_done && lk_hit == (i >= 0), "hit/miss");
        if (i >= 0) begin
          chk(lk_data == m_data[k], "hit data");
          m_key[s].delete(i);
          m_key[s].push_front(k);
          hits++;
        end
      end else if (r < 9) begin
        line_t d;
        d = {16{$urandom}};
        fill_valid = 1; fill_a = a; fill_b = b; fill_chunk = CHUNK_W'(c); fill_max = m; fill_data = d;
        @(negedge clk);
        fill_valid = 0;
        if (i >= 0) m_key[s].delete(i);
        else if (m_key[s].size() == WAYS) void'(m_key[s].pop_back());
        m_key[s].push_front(k);
        m_data[k] = d;
      end else begin
        inv = 1;
        @(negedge clk);
        inv = 0;
        foreach (m_key[q]) m_key[q].delete();
      end
    end
    chk(hits > 50, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
