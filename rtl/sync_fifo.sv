// sync_fifo: synchronous first-in first-out buffer, a helper used by the
// load-store queue, the NoC queue and the memory controllers.
//
// Storage is a circular array of DEPTH entries of type T with read and write
// pointers and an occupancy count. push is accepted when the FIFO is not full
// (push_ready), pop when it is not empty (pop_valid). The head entry is
// visible on pop_data in the same cycle (first-word fall-through); a pushed
// entry becomes visible the cycle after it is written.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  input  T     push_data,
  output logic push_ready,
  output logic pop_valid,
  output T     pop_data,
  input  logic pop_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] wptr, rptr;

  assign push_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rptr];

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) begin
        mem[wptr] <= push_data;
        wptr <= (wptr == PW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      end
      if (do_pop) rptr <= (rptr == PW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end
endmodule
