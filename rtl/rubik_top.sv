// rubik_top: the Rubik graph-learning accelerator.
//
// A PE_ROWS x PE_COLS array of processing elements (default 8x8). Every PE
// sits beside a NoC router; the routers of a row form a chain whose west end
// reaches the left memory controller and whose east end reaches the right
// one. A PE's memory request goes to the controller picked by the address,
// hop by hop along its row, and the read data comes back the same way. The
// two controllers each own one off-chip channel (dram_*[0] left, [1]
// right), which is outside this design. A 2 MB global buffer holds the
// weights and serves all PEs, and the scheduler/mapper takes the driver's
// command stream (weights for the global buffer, micro-instructions for the
// PE queues, with optional window mapping of node tasks onto PEs).
//
// Interface: host_cmd_* is valid/ready; dram_req_* is valid/ready; dram_rsp
// is a valid-only return path (the controller reserves room for each read
// it issues). busy is high while any PE, router or controller has work; a
// driver waits for it to fall between layers. perf sums the event counters
// of all PEs.
//
// The array size, MAC array, cache sizes, global buffer size and memory
// bandwidth default to the paper's configuration. The host port replaces
// the paper's path from the memory controllers into the scheduler.
module rubik_top
  import rubik_pkg::*;
#(
  parameter int unsigned PE_ROWS        = 8,
  parameter int unsigned PE_COLS        = 8,
  parameter int unsigned MAC_ROWS       = 4,
  parameter int unsigned MAC_COLS       = 8,
  parameter int unsigned OUT_TILES      = 8,
  parameter int unsigned FRAC           = 8,
  parameter int unsigned GB_DEPTH       = 32768,
  parameter int unsigned GD_SETS        = 256,
  parameter int unsigned GC_SETS        = 256,
  parameter int unsigned CACHE_WAYS     = 4,
  parameter int unsigned IQ_DEPTH       = 16,
  parameter int unsigned LSQ_DEPTH      = 8,
  parameter int unsigned NQ_DEPTH       = 4,
  parameter int unsigned MC_LINE_CYCLES = 2,
  parameter int unsigned MC_RESP_DEPTH  = 8,
  parameter int unsigned MC_SEL_BIT     = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      host_cmd_valid,
  input  host_cmd_t host_cmd,
  output logic      host_cmd_ready,
  output logic      dram_req_valid [2],
  output mem_req_t  dram_req       [2],
  input  logic      dram_req_ready [2],
  input  logic      dram_rsp_valid [2],
  input  mem_resp_t dram_rsp       [2],
  output logic      busy,
  output perf_t     perf,
  output logic [31:0] mem_lines [2]
);
  localparam int unsigned NPE   = PE_ROWS * PE_COLS;
  localparam int unsigned GB_AW = $clog2(GB_DEPTH);

  // ---------------- scheduler and global buffer ----------------
  logic              gb_we;
  logic [GB_AW-1:0]  gb_waddr;
  line_t             gb_wdata;
  logic [NPE-1:0]    iq_valid, iq_ready;
  instr_t            iq_instr;
  logic [PE_ID_W-1:0] cur_pe;

  scheduler_mapper #(.NPE(NPE), .GB_AW(GB_AW)) u_sched (
    .clk, .rst_n,
    .cmd_valid(host_cmd_valid), .cmd(host_cmd), .cmd_ready(host_cmd_ready),
    .gb_we, .gb_waddr, .gb_wdata,
    .iq_valid, .iq_instr, .iq_ready, .cur_pe
  );

  logic [NPE-1:0]   gb_req, gb_gnt, gb_rvalid;
  logic [GB_AW-1:0] gb_addr [NPE];
  line_t            gb_rdata;

  global_buffer #(.DEPTH(GB_DEPTH), .NPORTS(NPE)) u_gb (
    .clk, .rst_n,
    .wr_en(gb_we), .wr_addr(gb_waddr), .wr_data(gb_wdata),
    .rd_req(gb_req), .rd_addr(gb_addr), .rd_gnt(gb_gnt), .rd_valid(gb_rvalid),
    .rd_data(gb_rdata)
  );

  // ---------------- PE array and routers ----------------
  logic     l_in_v  [PE_ROWS][PE_COLS][4];
  noc_pkt_t l_in_p  [PE_ROWS][PE_COLS][4];
  logic     l_in_r  [PE_ROWS][PE_COLS][4];
  logic     l_out_v [PE_ROWS][PE_COLS][4];
  noc_pkt_t l_out_p [PE_ROWS][PE_COLS][4];
  logic     l_out_r [PE_ROWS][PE_COLS][4];

  // memory controller side of each row
  logic     mcl_req_v [PE_ROWS], mcr_req_v [PE_ROWS];
  noc_pkt_t mcl_req_p [PE_ROWS], mcr_req_p [PE_ROWS];
  logic     mcl_req_r [PE_ROWS], mcr_req_r [PE_ROWS];
  logic     mcl_rsp_v [PE_ROWS], mcr_rsp_v [PE_ROWS];
  noc_pkt_t mcl_rsp_p [PE_ROWS], mcr_rsp_p [PE_ROWS];
  logic     mcl_rsp_r [PE_ROWS], mcr_rsp_r [PE_ROWS];

  logic  pe_busy [NPE];
  logic  rt_busy [NPE];
  perf_t pe_perf [NPE];

  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      localparam int unsigned P = r * PE_COLS + c;
      logic     inj_v, inj_r, ej_v, ej_r;
      noc_pkt_t inj_p, ej_p;
      coord_t   pos;
      assign pos.row = COORD_W'(r);
      assign pos.col = COORD_W'(c);

      pe #(
        .MAC_ROWS(MAC_ROWS), .MAC_COLS(MAC_COLS), .OUT_TILES(OUT_TILES), .FRAC(FRAC),
        .GD_SETS(GD_SETS), .GC_SETS(GC_SETS), .CACHE_WAYS(CACHE_WAYS),
        .IQ_DEPTH(IQ_DEPTH), .LSQ_DEPTH(LSQ_DEPTH), .NQ_DEPTH(NQ_DEPTH),
        .MC_SEL_BIT(MC_SEL_BIT), .GB_AW(GB_AW)
      ) u_pe (
        .clk, .rst_n, .my_pos(pos),
        .iq_push_valid(iq_valid[P]), .iq_push_instr(iq_instr), .iq_push_ready(iq_ready[P]),
        .gb_req(gb_req[P]), .gb_addr(gb_addr[P]), .gb_gnt(gb_gnt[P]),
        .gb_rvalid(gb_rvalid[P]), .gb_rdata,
        .inj_valid(inj_v), .inj_pkt(inj_p), .inj_ready(inj_r),
        .ej_valid(ej_v), .ej_pkt(ej_p), .ej_ready(ej_r),
        .busy(pe_busy[P]), .perf(pe_perf[P])
      );

      noc_router #(.MY_COL(c)) u_rt (
        .clk, .rst_n,
        .in_valid(l_in_v[r][c]), .in_pkt(l_in_p[r][c]), .in_ready(l_in_r[r][c]),
        .out_valid(l_out_v[r][c]), .out_pkt(l_out_p[r][c]), .out_ready(l_out_r[r][c]),
        .inj_valid(inj_v), .inj_pkt(inj_p), .inj_ready(inj_r),
        .ej_valid(ej_v), .ej_pkt(ej_p), .ej_ready(ej_r),
        .busy(rt_busy[P])
      );

      // westbound lanes 0 (requests) and 2 (responses): upstream is east
      for (genvar l = 0; l < 4; l += 2) begin : g_w
        if (c == PE_COLS - 1) begin : g_edge
          if (l == 2) begin : g_rsp
            assign l_in_v[r][c][l] = mcr_rsp_v[r];
            assign l_in_p[r][c][l] = mcr_rsp_p[r];
            assign mcr_rsp_r[r]    = l_in_r[r][c][l];
          end else begin : g_none
            assign l_in_v[r][c][l] = 1'b0;
            assign l_in_p[r][c][l] = '0;
          end
        end else begin : g_link
          assign l_in_v[r][c][l]     = l_out_v[r][c+1][l];
          assign l_in_p[r][c][l]     = l_out_p[r][c+1][l];
          assign l_out_r[r][c+1][l]  = l_in_r[r][c][l];
        end
        if (c == 0) begin : g_wend
          if (l == 0) begin : g_req
            assign mcl_req_v[r]     = l_out_v[r][c][l];
            assign mcl_req_p[r]     = l_out_p[r][c][l];
            assign l_out_r[r][c][l] = mcl_req_r[r];
          end else begin : g_sink
            assign l_out_r[r][c][l] = 1'b1;  // a response never passes column 0
          end
        end
      end

      // eastbound lanes 1 (requests) and 3 (responses): upstream is west
      for (genvar l = 1; l < 4; l += 2) begin : g_e
        if (c == 0) begin : g_edge
          if (l == 3) begin : g_rsp
            assign l_in_v[r][c][l] = mcl_rsp_v[r];
            assign l_in_p[r][c][l] = mcl_rsp_p[r];
            assign mcl_rsp_r[r]    = l_in_r[r][c][l];
          end else begin : g_none
            assign l_in_v[r][c][l] = 1'b0;
            assign l_in_p[r][c][l] = '0;
          end
        end else begin : g_link
          assign l_in_v[r][c][l]     = l_out_v[r][c-1][l];
          assign l_in_p[r][c][l]     = l_out_p[r][c-1][l];
          assign l_out_r[r][c-1][l]  = l_in_r[r][c][l];
        end
        if (c == PE_COLS - 1) begin : g_eend
          if (l == 1) begin : g_req
            assign mcr_req_v[r]     = l_out_v[r][c][l];
            assign mcr_req_p[r]     = l_out_p[r][c][l];
            assign l_out_r[r][c][l] = mcr_req_r[r];
          end else begin : g_sink
            assign l_out_r[r][c][l] = 1'b1;  // a response never passes the last column
          end
        end
      end
    end
  end

  // ---------------- memory controllers ----------------
  logic mc_busy [2];

  mem_ctrl #(.ROWS(PE_ROWS), .LINE_CYCLES(MC_LINE_CYCLES), .RESP_DEPTH(MC_RESP_DEPTH)) u_mc_l (
    .clk, .rst_n,
    .req_valid(mcl_req_v), .req_pkt(mcl_req_p), .req_ready(mcl_req_r),
    .rsp_valid(mcl_rsp_v), .rsp_pkt(mcl_rsp_p), .rsp_ready(mcl_rsp_r),
    .dram_req_valid(dram_req_valid[0]), .dram_req(dram_req[0]), .dram_req_ready(dram_req_ready[0]),
    .dram_rsp_valid(dram_rsp_valid[0]), .dram_rsp(dram_rsp[0]),
    .busy(mc_busy[0]), .lines_issued(mem_lines[0])
  );

  mem_ctrl #(.ROWS(PE_ROWS), .LINE_CYCLES(MC_LINE_CYCLES), .RESP_DEPTH(MC_RESP_DEPTH)) u_mc_r (
    .clk, .rst_n,
    .req_valid(mcr_req_v), .req_pkt(mcr_req_p), .req_ready(mcr_req_r),
    .rsp_valid(mcr_rsp_v), .rsp_pkt(mcr_rsp_p), .rsp_ready(mcr_rsp_r),
    .dram_req_valid(dram_req_valid[1]), .dram_req(dram_req[1]), .dram_req_ready(dram_req_ready[1]),
    .dram_rsp_valid(dram_rsp_valid[1]), .dram_rsp(dram_rsp[1]),
    .busy(mc_busy[1]), .lines_issued(mem_lines[1])
  );

  // ---------------- status ----------------
  always_comb begin
    busy = mc_busy[0] || mc_busy[1];
    perf = '0;
    for (int unsigned p = 0; p < NPE; p++) begin
      busy = busy || pe_busy[p] || rt_busy[p];
      perf.gd_hit    = perf.gd_hit    + pe_perf[p].gd_hit;
      perf.gd_miss   = perf.gd_miss   + pe_perf[p].gd_miss;
      perf.gc_hit    = perf.gc_hit    + pe_perf[p].gc_hit;
      perf.gc_miss   = perf.gc_miss   + pe_perf[p].gc_miss;
      perf.w_load    = perf.w_load    + pe_perf[p].w_load;
      perf.w_reuse   = perf.w_reuse   + pe_perf[p].w_reuse;
      perf.lsq_stall = perf.lsq_stall + pe_perf[p].lsq_stall;
      perf.sat       = perf.sat       + pe_perf[p].sat;
    end
  end
endmodule
