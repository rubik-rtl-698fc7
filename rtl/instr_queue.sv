// instr_queue: the per-PE instruction queue.
//
// Buffers micro-instructions (load-f, load-i, comp, store and the CFG/INV
// housekeeping ops) streamed in by the scheduler so that the PE controller
// always finds its next instruction waiting. It is a DEPTH-entry circular
// FIFO: push_ready is low when full; the head instruction is presented on
// head with head_valid and removed by pop. Issue order is program order.
// The paper names the queue and what it holds; its depth (16) is this
// design's choice.
module instr_queue
  import rubik_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  input  instr_t push_instr,
  output logic   push_ready,
  output logic   head_valid,
  output instr_t head,
  input  logic   pop,
  output logic   empty
);
  localparam int unsigned PW = $clog2(DEPTH);
  instr_t q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   n;

  assign push_ready = (n != (PW+1)'(DEPTH));
  assign head_valid = (n != '0);
  assign empty      = (n == '0);
  assign head       = q[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; n <= '0;
    end else begin
      if (push_valid && push_ready) begin
        q[wp] <= push_instr;
        wp    <= wp + 1'b1;
      end
      if (pop && head_valid) rp <= rp + 1'b1;
      n <= n + ((push_valid && push_ready) ? 1'b1 : 1'b0) - ((pop && head_valid) ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!(pop && !head_valid)) else $error("instr_queue: pop while empty");
endmodule
