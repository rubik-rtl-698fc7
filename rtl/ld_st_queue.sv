// ld_st_queue: the per-PE load-store queue (LSQ).
//
// Load and store requests from the PE controller (feature lines for
// aggregation, updated features written back) wait here in program order
// until the NoC queue takes them. The LSQ also counts loads that have left
// but whose data has not come back (loads_pending), and passes returning
// read data to the controller. busy is high while a request is queued or a
// load is outstanding. Stores are posted: there is no write acknowledge,
// matching the paper's write-through stores that go straight to the memory
// controller. Depth 8 is this design's choice.
module ld_st_queue
  import rubik_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // from the PE controller
  input  logic     req_valid,
  input  logic     req_we,
  input  addr_t    req_addr,
  input  line_t    req_data,
  output logic     req_ready,
  // to the NoC queue
  output logic     out_valid,
  output mem_req_t out_req,
  input  logic     out_ready,
  // read data from the NoC queue, to the controller
  input  logic     rsp_in_valid,
  input  line_t    rsp_in_data,
  output logic     rsp_valid,
  output line_t    rsp_data,
  output logic [7:0] loads_pending,
  output logic     busy
);
  mem_req_t in_req;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  always_comb begin
    in_req      = '0;
    in_req.we   = req_we;
    in_req.addr = req_addr;
    in_req.data = req_data;
  end

  sync_fifo #(.T(mem_req_t), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .push_valid(req_valid), .push_data(in_req), .push_ready(req_ready),
    .pop_valid(out_valid), .pop_data(out_req), .pop_ready(out_ready),
    .count(cnt)
  );

  assign rsp_valid = rsp_in_valid;
  assign rsp_data  = rsp_in_data;

  always_ff @(posedge clk) begin
    if (!rst_n) loads_pending <= '0;
    else loads_pending <= loads_pending
                        + ((req_valid && req_ready && !req_we) ? 8'd1 : 8'd0)
                        - (rsp_in_valid ? 8'd1 : 8'd0);
  end

  assign busy = (cnt != '0) || (loads_pending != '0);

  always_ff @(posedge clk)
    if (rst_n) assert (!(rsp_in_valid && loads_pending == '0)) else $error("ld_st_queue: read data with no load pending");
endmodule
