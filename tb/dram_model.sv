// dram_model: behavioural model of one off-chip memory channel, for
// simulation only (not synthesizable).
//
// Requests (valid/ready) are accepted when ready is high; ready is dropped on
// a random READY_PCT share of cycles to stress back-pressure. Writes update
// a sparse line store at once; reads return the line (zero if never
// written) with the requester's coordinates LAT cycles later, in order.
module dram_model
  import rubik_pkg::*;
#(
  parameter int unsigned LAT       = 20,
  parameter int unsigned READY_PCT = 100
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  input  mem_req_t  req,
  output logic      req_ready,
  output logic      rsp_valid,
  output mem_resp_t rsp
);
  line_t mem [addr_t];
  typedef struct { longint due; mem_resp_t r; } pend_t;
  pend_t q [$];
  longint cyc = 0;
  int unsigned reads = 0, writes = 0;

  function automatic line_t peek(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(addr_t a, line_t d);
    mem[a] = d;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      req_ready <= 1'b1;
      rsp_valid <= 1'b0;
      q.delete();
    end else begin
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr] = req.data;
          writes++;
        end else begin
          pend_t p;
          p.due    = cyc + LAT;
          p.r.data = peek(req.addr);
          p.r.dst  = req.src;
          q.push_back(p);
          reads++;
        end
      end
      if (q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp       <= q[0].r;
        void'(q.pop_front());
      end else rsp_valid <= 1'b0;
      req_ready <= (($urandom % 100) < READY_PCT);
    end
  end
endmodule
