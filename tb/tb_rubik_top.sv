// tb_rubik_top: end-to-end test of the accelerator at a reduced size: a 2x2
// PE array with small caches and a 1-entry LSQ, so that cache misses,
// evictions and queue back-pressure all occur. It runs the 8-node example
// graph (windows of two nodes, so each of the four PEs gets one window)
// through two GCN layers; gcn_driver checks every output line against a
// reference model and counts each mechanism.
`timescale 1ns/1ps
module tb_rubik_top;
  import rubik_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, host_cmd_valid, host_cmd_ready, busy;
  host_cmd_t host_cmd;
  logic dram_req_valid [2], dram_req_ready [2], dram_rsp_valid [2];
  mem_req_t dram_req [2];
  mem_resp_t dram_rsp [2];
  perf_t perf;
  logic [31:0] mem_lines [2];

  rubik_top #(
    .PE_ROWS(2), .PE_COLS(2), .GB_DEPTH(2048), .GD_SETS(4), .GC_SETS(4),
    .CACHE_WAYS(2), .LSQ_DEPTH(1), .NQ_DEPTH(1), .OUT_TILES(8)
  ) u_dut (.*);

  gcn_driver #(
    .NPE(4), .GRAPH(0), .NNODES(8), .D_CH(2), .OUT_T(8), .WINDOW(2),
    .READY_PCT(10), .REQ_STALL(1'b1), .MAXCYC(100000)
  ) u_drv (.*);
endmodule
