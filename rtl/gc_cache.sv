// gc_cache: the private G-C (graph-level computation) cache of one PE.
//
// It keeps partial aggregates of node pairs: when the pre-processing finds
// that two nodes processed close together share two neighbours (u, v), the
// sum (or max) of u's and v's feature chunks is kept here and reused, so
// the second node adds one line instead of two and the reuse also saves the
// memory traffic of u and v. Reuse is at the granularity of two nodes, as in
// the paper, which also fixes the LRU policy and the 128 KB private cache.
//
// Key and organisation (this design's choice): the key is {operator,
// smaller node id, larger node id, chunk}, so (u,v) and (v,u) are the same
// entry. SETS x WAYS lines of 64 bytes, set associative; the set index is
// the XOR of the two ids and the chunk, the tag is the full key. LRU is kept
// as an age per way exactly as in the G-D cache. Default 256 x 4 x 64 B =
// 64 KB, the other half of the 128 KB private cache.
//
// Timing: lookup in cycle t, lk_done / lk_hit / lk_data in t+1. A fill writes
// in one cycle; inv clears all valid bits. A lookup and a fill must not
// arrive in the same cycle.
module gc_cache
  import rubik_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lk_valid,
  input  node_t lk_a,
  input  node_t lk_b,
  input  logic [CHUNK_W-1:0] lk_chunk,
  input  logic  lk_max,
  output logic  lk_done,
  output logic  lk_hit,
  output line_t lk_data,
  input  logic  fill_valid,
  input  node_t fill_a,
  input  node_t fill_b,
  input  logic [CHUNK_W-1:0] fill_chunk,
  input  logic  fill_max,
  input  line_t fill_data,
  input  logic  inv
);
  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);
  localparam int unsigned TW = 1 + 2*NODE_W + CHUNK_W;  // full key as tag

  function automatic logic [TW-1:0] make_key(node_t a, node_t b, logic [CHUNK_W-1:0] c, logic m);
    return (a < b) ? {m, a, b, c} : {m, b, a, c};
  endfunction
  function automatic logic [SW-1:0] make_set(node_t a, node_t b, logic [CHUNK_W-1:0] c);
    logic [31:0] h;
    h = 32'(a) ^ 32'(b) ^ 32'(c);
    return h[SW-1:0];
  endfunction

  logic [TW-1:0] tag   [SETS][WAYS];
  logic          vld   [SETS][WAYS];
  logic [WW-1:0] age   [SETS][WAYS];
  line_t         data  [SETS*WAYS];

  // lookup
  logic [SW-1:0] l_set;
  logic [TW-1:0] l_tag;
  logic [WW-1:0] l_way;
  logic          l_hit;
  assign l_set = make_set(lk_a, lk_b, lk_chunk);
  assign l_tag = make_key(lk_a, lk_b, lk_chunk, lk_max);
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
  assign f_set = make_set(fill_a, fill_b, fill_chunk);
  assign f_tag = make_key(fill_a, fill_b, fill_chunk, fill_max);
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
    if (rst_n) assert (!(lk_valid && fill_valid)) else $error("gc_cache: lookup and fill in one cycle");
endmodule
