// pe: one processing element of the Rubik array.
//
// A PE runs the graph-level tasks (aggregation over a node's neighbours)
// and the node-level tasks (the node's matrix-vector update) of the nodes
// the mapper assigned to it. Inside:
//   instr_queue  micro-instructions from the scheduler
//   pe_ctrl      executes them (load-f, load-i, comp, store)
//   gd_cache     private cache of neighbour feature lines (G-D)
//   gc_cache     private cache of two-node partial aggregates (G-C)
//   mac_array    4x8 MACs with their register files
//   ld_st_queue  load/store requests toward memory
//   noc_queue    packetises them for the router, buffers read data
// Requests leave on inj_*, read data enters on ej_*; the weight tile is
// read from the global buffer on gb_*. busy is high while the PE holds any
// instruction or request. The parts and their roles are the paper's; the
// queue depths and the interfaces between the parts are this design's.
module pe
  import rubik_pkg::*;
#(
  parameter int unsigned MAC_ROWS   = 4,
  parameter int unsigned MAC_COLS   = 8,
  parameter int unsigned OUT_TILES  = 8,
  parameter int unsigned FRAC       = 8,
  parameter int unsigned GD_SETS    = 256,
  parameter int unsigned GC_SETS    = 256,
  parameter int unsigned CACHE_WAYS = 4,
  parameter int unsigned IQ_DEPTH   = 16,
  parameter int unsigned LSQ_DEPTH  = 8,
  parameter int unsigned NQ_DEPTH   = 4,
  parameter int unsigned MC_SEL_BIT = 0,
  parameter int unsigned GB_AW      = 15
) (
  input  logic     clk,
  input  logic     rst_n,
  input  coord_t   my_pos,
  input  logic     iq_push_valid,
  input  instr_t   iq_push_instr,
  output logic     iq_push_ready,
  output logic     gb_req,
  output logic [GB_AW-1:0] gb_addr,
  input  logic     gb_gnt,
  input  logic     gb_rvalid,
  input  line_t    gb_rdata,
  output logic     inj_valid,
  output noc_pkt_t inj_pkt,
  input  logic     inj_ready,
  input  logic     ej_valid,
  input  noc_pkt_t ej_pkt,
  output logic     ej_ready,
  output logic     busy,
  output perf_t    perf
);
  localparam int unsigned TW = $clog2(OUT_TILES);
  localparam int unsigned JW = $clog2(LANES);

  // instruction queue
  logic   iq_valid, iq_pop, iq_empty;
  instr_t iq_head;
  instr_queue #(.DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n,
    .push_valid(iq_push_valid), .push_instr(iq_push_instr), .push_ready(iq_push_ready),
    .head_valid(iq_valid), .head(iq_head), .pop(iq_pop), .empty(iq_empty)
  );

  // G-D cache
  logic  gd_lk_valid, gd_lk_done, gd_lk_hit, gd_fill_valid, gd_inv;
  addr_t gd_lk_addr, gd_fill_addr;
  line_t gd_lk_data, gd_fill_data;
  gd_cache #(.SETS(GD_SETS), .WAYS(CACHE_WAYS)) u_gd (
    .clk, .rst_n,
    .lk_valid(gd_lk_valid), .lk_addr(gd_lk_addr),
    .lk_done(gd_lk_done), .lk_hit(gd_lk_hit), .lk_data(gd_lk_data),
    .fill_valid(gd_fill_valid), .fill_addr(gd_fill_addr), .fill_data(gd_fill_data),
    .inv(gd_inv)
  );

  // G-C cache
  logic  gc_lk_valid, gc_lk_done, gc_lk_hit, gc_fill_valid, gc_inv, gc_max;
  node_t gc_a, gc_b;
  logic [CHUNK_W-1:0] gc_chunk;
  line_t gc_lk_data, gc_fill_data;
  gc_cache #(.SETS(GC_SETS), .WAYS(CACHE_WAYS)) u_gc (
    .clk, .rst_n,
    .lk_valid(gc_lk_valid), .lk_a(gc_a), .lk_b(gc_b), .lk_chunk(gc_chunk), .lk_max(gc_max),
    .lk_done(gc_lk_done), .lk_hit(gc_lk_hit), .lk_data(gc_lk_data),
    .fill_valid(gc_fill_valid), .fill_a(gc_a), .fill_b(gc_b), .fill_chunk(gc_chunk),
    .fill_max(gc_max), .fill_data(gc_fill_data),
    .inv(gc_inv)
  );

  // MAC array
  logic mac_rf_we, mac_en, mac_clr;
  logic [JW-1:0] mac_rf_row, mac_j;
  line_t mac_rf_wdata;
  elem_t mac_x;
  logic [TW-1:0] mac_tile, mac_rd_tile;
  acc_t mac_acc [LANES];
  mac_array #(.ROWS(MAC_ROWS), .COLS(MAC_COLS), .OUT_TILES(OUT_TILES)) u_mac (
    .clk, .rst_n,
    .rf_we(mac_rf_we), .rf_row(mac_rf_row), .rf_wdata(mac_rf_wdata),
    .en(mac_en), .j(mac_j), .x(mac_x), .tile(mac_tile),
    .clr(mac_clr), .clr_tile(mac_rd_tile), .rd_tile(mac_rd_tile),
    .acc_out(mac_acc)
  );

  // LSQ
  logic  lsq_valid, lsq_we, lsq_ready, lsq_rsp_valid, lsq_busy;
  addr_t lsq_addr;
  line_t lsq_data, lsq_rsp_data;
  logic  lq_out_valid, lq_out_ready, nq_rsp_valid, nq_busy;
  mem_req_t lq_out;
  line_t nq_rsp_data;
  logic [7:0] loads_pending;
  ld_st_queue #(.DEPTH(LSQ_DEPTH)) u_lsq (
    .clk, .rst_n,
    .req_valid(lsq_valid), .req_we(lsq_we), .req_addr(lsq_addr), .req_data(lsq_data),
    .req_ready(lsq_ready),
    .out_valid(lq_out_valid), .out_req(lq_out), .out_ready(lq_out_ready),
    .rsp_in_valid(nq_rsp_valid), .rsp_in_data(nq_rsp_data),
    .rsp_valid(lsq_rsp_valid), .rsp_data(lsq_rsp_data),
    .loads_pending, .busy(lsq_busy)
  );

  // NoC queue
  noc_queue #(.DEPTH(NQ_DEPTH), .MC_SEL_BIT(MC_SEL_BIT)) u_nq (
    .clk, .rst_n, .my_pos,
    .req_valid(lq_out_valid), .req(lq_out), .req_ready(lq_out_ready),
    .inj_valid, .inj_pkt, .inj_ready,
    .ej_valid, .ej_pkt, .ej_ready,
    .rsp_valid(nq_rsp_valid), .rsp_data(nq_rsp_data),
    .busy(nq_busy)
  );

  logic ctrl_busy;
  pe_ctrl #(.OUT_TILES(OUT_TILES), .FRAC(FRAC), .GB_AW(GB_AW)) u_ctrl (
    .clk, .rst_n,
    .iq_valid, .iq_head, .iq_pop,
    .gd_lk_valid, .gd_lk_addr, .gd_lk_done, .gd_lk_hit, .gd_lk_data,
    .gd_fill_valid, .gd_fill_addr, .gd_fill_data, .gd_inv,
    .gc_lk_valid, .gc_a, .gc_b, .gc_chunk, .gc_max, .gc_lk_done, .gc_lk_hit, .gc_lk_data,
    .gc_fill_valid, .gc_fill_data, .gc_inv,
    .mac_rf_we, .mac_rf_row, .mac_rf_wdata, .mac_en, .mac_j, .mac_x, .mac_tile,
    .mac_clr, .mac_rd_tile, .mac_acc,
    .gb_req, .gb_addr, .gb_gnt, .gb_rvalid, .gb_rdata,
    .lsq_valid, .lsq_we, .lsq_addr, .lsq_data, .lsq_ready,
    .lsq_rsp_valid, .lsq_rsp_data,
    .busy(ctrl_busy), .perf
  );

  assign busy = !iq_empty || ctrl_busy || lsq_busy || nq_busy;
endmodule
