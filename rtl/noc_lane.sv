// noc_lane: one one-way lane of a NoC router (helper of noc_router).
//
// A packet arriving from the upstream neighbour either leaves the lane at
// this PE (its dst_col equals MY_COL and EJECT is set) or competes with the
// local injection for the lane's output register, which drives the
// downstream neighbour. The two contenders are served round-robin, a simple
// stand-in for first-come-first-serve. The output is a 2-entry buffer whose
// ready depends only on its own fill level, so back-pressure never forms a
// combinational path along the row, and a lane still streams one packet per
// cycle. Each hop costs one cycle. Valid/ready on every side: a valid
// packet is held unchanged until taken.
module noc_lane
  import rubik_pkg::*;
#(
  parameter int unsigned MY_COL = 0,
  parameter bit          EJECT  = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  noc_pkt_t in_pkt,
  output logic     in_ready,
  input  logic     loc_valid,
  input  noc_pkt_t loc_pkt,
  output logic     loc_ready,
  output logic     out_valid,
  output noc_pkt_t out_pkt,
  input  logic     out_ready,
  output logic     ej_valid,
  output noc_pkt_t ej_pkt,
  input  logic     ej_ready
);
  logic here, can_load;
  logic [1:0] req, gnt;
  logic gidx;
  logic [1:0] fill;

  assign here     = EJECT && (in_pkt.dst_col == {1'b0, COORD_W'(MY_COL)});
  assign req      = {loc_valid, in_valid && !here};

  rr_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .req, .advance(can_load), .gnt, .gnt_idx(gidx)
  );

  assign ej_valid  = in_valid && here;
  assign ej_pkt    = in_pkt;
  assign in_ready  = here ? ej_ready : (can_load && gnt[0]);
  assign loc_ready = can_load && gnt[1];

  sync_fifo #(.T(noc_pkt_t), .DEPTH(2)) u_buf (
    .clk, .rst_n,
    .push_valid(|gnt), .push_data(gidx ? loc_pkt : in_pkt), .push_ready(can_load),
    .pop_valid(out_valid), .pop_data(out_pkt), .pop_ready(out_ready),
    .count(fill)
  );

  always_ff @(posedge clk)
    if (rst_n) assert (!(loc_valid && loc_pkt.dst_col == {1'b0, COORD_W'(MY_COL)}))
      else $error("noc_lane: local packet addressed to its own column");
endmodule
