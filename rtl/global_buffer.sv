// global_buffer: the on-chip buffer shared by all PEs, holding the layer's
// weight matrices so that every PE reuses them without going off chip.
//
// DEPTH lines of 64 bytes (default 32768 x 64 B = 2 MB). Weights are written
// by the scheduler through a single write port (wr_en, one line per cycle).
// The NPORTS PEs read through one shared read port: each PE holds rd_req
// with its line address until rd_gnt; one PE is granted per cycle in
// round-robin order, and that PE sees rd_valid with the line on the shared
// rd_data bus in the next cycle. A read and a write in the same cycle to the
// same line return the old data.
//
// The 2 MB size and the role (weights shared between PEs) are from the
// paper; the single read port and its arbitration are this design's choice.
module global_buffer
  import rubik_pkg::*;
#(
  parameter int unsigned DEPTH  = 32768,
  parameter int unsigned NPORTS = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  line_t wr_data,
  input  logic [NPORTS-1:0] rd_req,
  input  logic [$clog2(DEPTH)-1:0] rd_addr [NPORTS],
  output logic [NPORTS-1:0] rd_gnt,
  output logic [NPORTS-1:0] rd_valid,
  output line_t rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned IW = $clog2(NPORTS > 1 ? NPORTS : 2);

  line_t mem [DEPTH];
  logic [IW-1:0] gidx;

  rr_arbiter #(.N(NPORTS)) u_arb (
    .clk, .rst_n, .req(rd_req), .advance(1'b1), .gnt(rd_gnt), .gnt_idx(gidx)
  );

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr[gidx]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= '0;
    else        rd_valid <= rd_gnt;
  end
endmodule
