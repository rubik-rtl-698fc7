// noc_queue: the per-PE NoC queue, between the load-store queue and the
// router.
//
// Outbound, it turns each memory request into a NoC packet: the destination
// is the left or the right memory controller, chosen by line-address bit
// MC_SEL_BIT (line interleaving between the two controllers), and the PE's
// own row/column is attached so the read data can find its way back. The
// packets wait in a DEPTH-entry FIFO for the router. Inbound, read-data
// packets are buffered in a second FIFO and handed to the LSQ one per cycle.
// The paper names the queue and says the address decides the controller;
// the address bit and depths are this design's choices.
module noc_queue
  import rubik_pkg::*;
#(
  parameter int unsigned DEPTH      = 4,
  parameter int unsigned MC_SEL_BIT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  coord_t   my_pos,
  // from the LSQ
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  // to the router (injection)
  output logic     inj_valid,
  output noc_pkt_t inj_pkt,
  input  logic     inj_ready,
  // from the router (ejection)
  input  logic     ej_valid,
  input  noc_pkt_t ej_pkt,
  output logic     ej_ready,
  // read data to the LSQ
  output logic     rsp_valid,
  output line_t    rsp_data,
  output logic     busy
);
  noc_pkt_t pkt;
  logic [$clog2(DEPTH+1)-1:0] c_out, c_in;
  noc_pkt_t rsp_pkt;

  always_comb begin
    pkt.dst_col = req.addr[MC_SEL_BIT] ? DST_MC_R : DST_MC_L;
    pkt.we      = req.we;
    pkt.addr    = req.addr;
    pkt.data    = req.data;
    pkt.src     = my_pos;
  end

  sync_fifo #(.T(noc_pkt_t), .DEPTH(DEPTH)) u_out (
    .clk, .rst_n,
    .push_valid(req_valid), .push_data(pkt), .push_ready(req_ready),
    .pop_valid(inj_valid), .pop_data(inj_pkt), .pop_ready(inj_ready),
    .count(c_out)
  );

  sync_fifo #(.T(noc_pkt_t), .DEPTH(DEPTH)) u_in (
    .clk, .rst_n,
    .push_valid(ej_valid), .push_data(ej_pkt), .push_ready(ej_ready),
    .pop_valid(rsp_valid), .pop_data(rsp_pkt), .pop_ready(1'b1),
    .count(c_in)
  );
  assign rsp_data = rsp_pkt.data;
  assign busy = (c_out != '0) || (c_in != '0);
endmodule
