// rr_arbiter: round-robin arbiter, a helper for the global buffer read port,
// the memory controllers and the NoC lanes.
//
// gnt is one-hot among the asserted req bits, searching upward from the
// position after the last accepted grant. The pointer moves only when the
// caller says the grant was used (advance), so a grant that is stalled
// downstream stays on the same requester. Purely combinational grant.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr;  // highest priority position

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (req[i] && gnt == '0) begin
        gnt[i]  = 1'b1;
        gnt_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (advance && gnt != '0) ptr <= (gnt_idx == IW'(N-1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule
