// tb_rubik_full: one complete two-layer GCN pass through the accelerator at
// its default size (8x8 PEs, 4x8 MACs each, 2 MB global buffer, 64 KB G-D
// and 64 KB G-C cache per PE, two memory controllers). The graph is a
// random 512-node graph with community structure; window mapping gives each
// of the 64 PEs a window of 8 consecutive nodes. gcn_driver checks every
// output line against its reference model and counts each mechanism.
`timescale 1ns/1ps
module tb_rubik_full;
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

  rubik_top u_dut (.*);

  gcn_driver #(
    .NPE(64), .GRAPH(1), .NNODES(512), .D_CH(2), .OUT_T(1), .WINDOW(8),
    .SEED(7), .READY_PCT(100), .REQ_STALL(1'b0), .MAXCYC(2000000)
  ) u_drv (.*);
endmodule
