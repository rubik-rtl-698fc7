// mem_ctrl: one of the two memory controllers at the left and right edge of
// the PE array.
//
// Each PE row delivers its requests to the controller on one NoC lane
// (req_*[row]). The controller serves the rows round-robin and issues at most
// one 64-byte line every LINE_CYCLES cycles to its off-chip channel. With the
// default of 2 the two controllers together move 64 B per cycle, the
// 32 GB/s of the paper at 500 MHz. Writes are posted. A read is issued only
// while a slot is free in the response FIFO (RESP_DEPTH credits), so read
// data returned by the channel can always be accepted even when the row's
// response lane is busy. The head of the response FIFO is sent into the
// response lane of the requesting PE's row, addressed to its column.
//
// The channel protocol (valid/ready request carrying the requester's
// coordinates, response returning them) is this design's choice.
module mem_ctrl
  import rubik_pkg::*;
#(
  parameter int unsigned ROWS        = 8,
  parameter int unsigned LINE_CYCLES = 2,
  parameter int unsigned RESP_DEPTH  = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid [ROWS],
  input  noc_pkt_t  req_pkt   [ROWS],
  output logic      req_ready [ROWS],
  output logic      rsp_valid [ROWS],
  output noc_pkt_t  rsp_pkt   [ROWS],
  input  logic      rsp_ready [ROWS],
  output logic      dram_req_valid,
  output mem_req_t  dram_req,
  input  logic      dram_req_ready,
  input  logic      dram_rsp_valid,
  input  mem_resp_t dram_rsp,
  output logic      busy,
  output logic [31:0] lines_issued
);
  localparam int unsigned IW = $clog2(ROWS > 1 ? ROWS : 2);
  localparam int unsigned GW = $clog2(LINE_CYCLES + 1);
  localparam int unsigned CW = $clog2(RESP_DEPTH + 1);

  logic [ROWS-1:0] elig, gnt;
  logic [IW-1:0]   gidx;
  logic [GW-1:0]   gap;
  logic [CW-1:0]   credits;
  logic            issue, slot;

  always_comb
    for (int unsigned r = 0; r < ROWS; r++)
      elig[r] = req_valid[r] && (req_pkt[r].we || credits != '0);

  assign slot  = (gap == '0) && dram_req_ready;
  assign issue = slot && (elig != '0);

  rr_arbiter #(.N(ROWS)) u_arb (.clk, .rst_n, .req(elig), .advance(issue), .gnt, .gnt_idx(gidx));

  always_comb begin
    dram_req_valid = issue;
    dram_req.we    = req_pkt[gidx].we;
    dram_req.addr  = req_pkt[gidx].addr;
    dram_req.data  = req_pkt[gidx].data;
    dram_req.src   = req_pkt[gidx].src;
    for (int unsigned r = 0; r < ROWS; r++) req_ready[r] = slot && gnt[r];
  end

  // response FIFO toward the rows
  mem_resp_t head;
  logic      head_valid, pop, push_ready;
  logic [CW-1:0] cnt;
  sync_fifo #(.T(mem_resp_t), .DEPTH(RESP_DEPTH)) u_rsp (
    .clk, .rst_n,
    .push_valid(dram_rsp_valid), .push_data(dram_rsp), .push_ready(push_ready),
    .pop_valid(head_valid), .pop_data(head), .pop_ready(pop), .count(cnt)
  );

  always_comb
    for (int unsigned r = 0; r < ROWS; r++) begin
      rsp_valid[r]       = head_valid && (head.dst.row == COORD_W'(r));
      rsp_pkt[r]         = '0;
      rsp_pkt[r].dst_col = {1'b0, head.dst.col};
      rsp_pkt[r].data    = head.data;
      rsp_pkt[r].src     = head.dst;
    end

  always_comb begin
    pop = 1'b0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (head_valid && head.dst.row == COORD_W'(r) && rsp_ready[r]) pop = 1'b1;
  end

  wire issue_rd = issue && !req_pkt[gidx].we;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gap          <= '0;
      credits      <= CW'(RESP_DEPTH);
      lines_issued <= '0;
    end else begin
      if (issue)         gap <= GW'(LINE_CYCLES - 1);
      else if (gap != 0) gap <= gap - 1'b1;
      credits <= credits - (issue_rd ? 1'b1 : 1'b0) + (pop ? 1'b1 : 1'b0);
      if (issue) lines_issued <= lines_issued + 1;
    end
  end

  assign busy = head_valid || (credits != CW'(RESP_DEPTH));

  always_ff @(posedge clk)
    if (rst_n) assert (!(dram_rsp_valid && !push_ready)) else $error("mem_ctrl: response FIFO overflow");
endmodule
