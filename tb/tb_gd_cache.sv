// tb_gd_cache: drives a small G-D cache (4 sets x 2 ways) with random
// lookups, fills and occasional invalidations over 16 line addresses and
// compares every hit/miss and every returned line with an LRU model kept
// here. A directed part first checks that a line touched recently survives
// while the least recently used one is evicted.
`timescale 1ns/1ps
module tb_gd_cache;
  import rubik_pkg::*;
  localparam int SETS = 4, WAYS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_done, lk_hit, fill_valid, inv;
  addr_t lk_addr, fill_addr;
  line_t lk_data, fill_data;
  int checks = 0, failures = 0;
  int hits = 0;

  gd_cache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  // model: per set, addresses ordered most recent first
  addr_t m_addr [SETS][$];
  line_t m_data [addr_t];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic int find(addr_t a);
    int s = int'(a % SETS);
    foreach (m_addr[s][i]) if (m_addr[s][i] == a) return i;
    return -1;
  endfunction

  task automatic do_fill(addr_t a, line_t d);
    int s = int'(a % SETS);
    int i = find(a);
    fill_valid = 1; fill_addr = a; fill_data = d;
    @(negedge clk);
    fill_valid = 0;
    if (i >= 0) m_addr[s].delete(i);
    else if (m_addr[s].size() == WAYS) void'(m_addr[s].pop_back());
    m_addr[s].push_front(a);
    m_data[a] = d;
  endtask

  task automatic do_lookup(addr_t a, output bit hit);
    int s = int'(a % SETS);
    int i = find(a);
    lk_valid = 1; lk_addr = a;
    @(negedge clk);
    lk_valid = 0;
    chk(lk_done, "done one cycle after lookup");
    chk(lk_hit == (i >= 0), $sformatf("hit/miss for %0d", a));
    if (i >= 0) begin
      chk(lk_data == m_data[a], "hit data");
      m_addr[s].delete(i);
      m_addr[s].push_front(a);
      hits++;
    end
    hit = lk_hit;
  endtask

  initial begin
    bit h;
    lk_valid = 0; lk_addr = 0; fill_valid = 0; fill_addr = 0; fill_data = 0; inv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // directed LRU: three lines of set 1
    do_lookup(1, h);
    do_fill(1, {16{32'h1111}});
    do_fill(5, {16{32'h5555}});
    do_lookup(1, h); chk(h, "line 1 hit");
    do_fill(9, {16{32'h9999}});     // evicts 5, the least recent
    do_lookup(5, h); chk(!h, "LRU line evicted");
    do_lookup(1, h); chk(h, "recent line kept");
    do_lookup(9, h); chk(h, "new line present");
    for (int t = 0; t < 600; t++) begin
      addr_t a;
      int r;
      a = addr_t'($urandom % 16);
      r = $urandom % 10;
      if (r < 5) do_lookup(a, h);
      else if (r < 9) do_fill(a, {16{$urandom}});
      else begin
        inv = 1;
        @(negedge clk);
        inv = 0;
        foreach (m_addr[s]) m_addr[s].delete();
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
