// gd_cache: the private G-D (graph-level feature data) cache of one PE.
//
// It keeps neighbour feature lines fetched from memory during aggregation so
// that a neighbour shared by nodes processed close together on the same PE
// is read from off-chip memory only once. Because the reordered graph places
// nodes with common neighbours next to each other, a small cache with LRU
// replacement catches most of this reuse.
//
// Organisation (this design's choice; the paper gives only the size and the
// LRU policy): SETS x WAYS lines of 64 bytes, set associative, indexed by the
// low line-address bits and tagged with the rest. Each set keeps an age per
// way (0 = most recent); a hit or fill makes its way age 0 and ages the
// younger ones. A fill takes an invalid way first, otherwise the oldest.
// Default 256 x 4 x 64 B = 64 KB, half of the 128 KB private cache.
//
// Timing: lk_valid/lk_addr in cycle t; lk_done, lk_hit and lk_data in cycle
// t+1 (tag compare in t, synchronous data read). fill_* writes in one cycle
// (a fill of a line already present overwrites it). inv clears every valid
// bit in one cycle. A lookup and a fill must not arrive in the same cycle.
module gd_cache
  import rubik_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lk_valid,
  input  addr_t lk_addr,
  output logic  lk_done,
  output logic  lk_hit,
  output line_t lk_data,
  input  logic  fill_valid,
  input  addr_t fill_addr,
  input  line_t fill_data,
  input  logic  inv
);
  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);
  localparam int unsigned TW = ADDR_W - SW;

  logic [TW-1:0] tag   [SETS][WAYS];
  logic          vld   [SETS][WAYS];
  logic [WW-1:0] age   [SETS][WAYS];
  line_t         data  [SETS*WAYS];

  // lookup
  logic [SW-1:0] l_set;
  logic [TW-1:0] l_tag;
  logic [WW-1:0] l_way;
  logic          l_hit;
  assign l_set = lk_addr[SW-1:0];
  assign l_tag = lk_addr[ADDR_W-1:SW];
  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (vld[l_set][w] && tag[l_set][w] == l_tag && !l_hit) begin
        l_hit = 1'b1;
        l_way = WW'(w);
      end
  end

  // fill: way already holding the line, else first invalid, else oldest
  logic [SW-1:0] f_set;
  logic [TW-1:0] f_tag;
  logic [WW-1:0] f_way;
  assign f_set = fill_addr[SW-1:0];
  assign f_tag = fill_addr[ADDR_W-1:SW];
  always_comb begin
    logic found;
    found = 1'b0;
    f_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (vld[f_set][w] && tag[f_set][w] == f_tag && !found) begin
        found = 1'b1; f_way = WW'(w);
      end
    for (int unsigned w = 0; w < WAYS; w++)
      if (!vld[f_set][w] && !found) begin
        found = 1'b1; f_way = WW'(w);
      end
    for (int unsigned w = 0; w < WAYS; w++)
      if (age[f_set][w] == WW'(WAYS-1) && !found) begin
        found = 1'b1; f_way = WW'(w);
      end
  end

  logic          touch;
  logic [SW-1:0] t_set;
  logic [WW-1:0] t_way;
  always_comb begin
    touch = (lk_valid && l_hit) || fill_valid;
    t_set = fill_valid ? f_set : l_set;
    t_way = fill_valid ? f_way : l_way;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || inv) begin
      for (int unsigned s = 0; s < SETS; s++)
        for (int unsigned w = 0; w < WAYS; w++) begin
          vld[s][w] <= 1'b0;
          age[s][w] <= WW'(w);
        end
    end else begin
      if (fill_valid) begin
        vld[f_set][f_way] <= 1'b1;
        tag[f_set][f_way] <= f_tag;
      end
      if (touch)
        for (int unsigned w = 0; w < WAYS; w++)
          if (WW'(w) == t_way)                    age[t_set][w] <= '0;
          else if (age[t_set][w] < age[t_set][t_way]) age[t_set][w] <= age[t_set][w] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) data[{f_set, f_way}] <= fill_data;
    lk_data <= data[{l_set, l_way}];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
    end else begin
      lk_done <= lk_valid;
      lk_hit  <= lk_valid && l_hit && !inv;
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!(lk_valid && fill_valid)) else $error("gd_cache: lookup and fill in one cycle");
endmodule
