// noc_router: the NoC router beside one PE of a row.
//
// Memory traffic in this array only ever moves horizontally: a request
// travels from its PE toward the left or the right memory controller, and
// the read data travels back along the same row. The router therefore has
// four one-way lanes (noc_lane), indexed
//   0 = requests westward   1 = requests eastward
//   2 = responses westward  3 = responses eastward.
// in_*[l] comes from the upstream neighbour of lane l (the east neighbour
// for 0 and 2, the west neighbour for 1 and 3) and out_*[l] goes to its
// downstream neighbour. The PE injects requests (lane 0 if the packet is
// for the left controller, else lane 1) and receives the read data that
// lanes 2 and 3 eject at this column; two simultaneous ejections are served
// round-robin. Requests and responses never share a lane, so read data
// cannot be stuck behind requests. One cycle per hop.
//
// The paper describes a 2D mesh with one-way horizontal routing to the
// controller chosen by the address; vertical links would carry no traffic
// under that routing and are not built.
module noc_router
  import rubik_pkg::*;
#(
  parameter int unsigned MY_COL = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid  [4],
  input  noc_pkt_t in_pkt    [4],
  output logic     in_ready  [4],
  output logic     out_valid [4],
  output noc_pkt_t out_pkt   [4],
  input  logic     out_ready [4],
  input  logic     inj_valid,
  input  noc_pkt_t inj_pkt,
  output logic     inj_ready,
  output logic     ej_valid,
  output noc_pkt_t ej_pkt,
  input  logic     ej_ready,
  output logic     busy
);
  logic     loc_valid [4];
  logic     loc_ready [4];
  logic     lej_valid [4];
  noc_pkt_t lej_pkt   [4];
  logic     lej_ready [4];
  logic     to_left;

  assign to_left      = (inj_pkt.dst_col == DST_MC_L);
  assign loc_valid[0] = inj_valid && to_left;
  assign loc_valid[1] = inj_valid && !to_left;
  assign loc_valid[2] = 1'b0;
  assign loc_valid[3] = 1'b0;
  assign inj_ready    = to_left ? loc_ready[0] : loc_ready[1];

  for (genvar l = 0; l < 4; l++) begin : g_lane
    noc_lane #(.MY_COL(MY_COL), .EJECT(l >= 2)) u_lane (
      .clk, .rst_n,
      .in_valid(in_valid[l]), .in_pkt(in_pkt[l]), .in_ready(in_ready[l]),
      .loc_valid(loc_valid[l]), .loc_pkt(inj_pkt), .loc_ready(loc_ready[l]),
      .out_valid(out_valid[l]), .out_pkt(out_pkt[l]), .out_ready(out_ready[l]),
      .ej_valid(lej_valid[l]), .ej_pkt(lej_pkt[l]), .ej_ready(lej_ready[l])
    );
  end

  // ejection: responses from lanes 2 and 3
  logic [1:0] ereq, egnt;
  logic       eidx;
  assign ereq = {lej_valid[3], lej_valid[2]};
  rr_arbiter #(.N(2)) u_ej_arb (
    .clk, .rst_n, .req(ereq), .advance(ej_ready), .gnt(egnt), .gnt_idx(eidx)
  );
  assign ej_valid     = |ereq;
  assign ej_pkt       = eidx ? lej_pkt[3] : lej_pkt[2];
  assign lej_ready[0] = 1'b0;
  assign lej_ready[1] = 1'b0;
  assign lej_ready[2] = ej_ready && egnt[0];
  assign lej_ready[3] = ej_ready && egnt[1];

  assign busy = out_valid[0] || out_valid[1] || out_valid[2] || out_valid[3];
endmodule
