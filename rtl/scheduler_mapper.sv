// scheduler_mapper: entry point of the driver's command stream.
//
// Commands (host_cmd_t, valid/ready):
//   CMD_GB_WRITE    write one line of weights into the global buffer
//   CMD_PUSH_PE     push a micro-instruction into the queue of PE `pe`
//   CMD_PUSH_MAPPED push it into the queue of the PE chosen by graph-level
//                   window mapping
//   CMD_BCAST       push it into every PE's queue (waits until all have room)
//   CMD_SET_WINDOW  set the mapping window to gb_addr tasks (0 counts as 1)
//                   and restart mapping at PE 0
// Window mapping follows the paper's graph-level mapping: consecutive nodes
// of the reordered order, WINDOW at a time, go to one PE, and the next window
// goes to the next PE. A node's task is the run of instructions that ends
// with task_end set. A command is accepted in the cycle its target queue is
// ready; there is no internal buffering.
//
// The paper names this block and gives the mapping rule; the command set is
// this design's choice.
module scheduler_mapper
  import rubik_pkg::*;
#(
  parameter int unsigned NPE   = 64,
  parameter int unsigned GB_AW = 15
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  input  host_cmd_t  cmd,
  output logic       cmd_ready,
  output logic       gb_we,
  output logic [GB_AW-1:0] gb_waddr,
  output line_t      gb_wdata,
  output logic [NPE-1:0] iq_valid,
  output instr_t     iq_instr,
  input  logic [NPE-1:0] iq_ready,
  output logic [PE_ID_W-1:0] cur_pe
);
  logic [15:0] window, tcount;

  assign gb_waddr = cmd.gb_addr[GB_AW-1:0];
  assign gb_wdata = cmd.gb_data;
  assign iq_instr = cmd.instr;

  always_comb begin
    gb_we     = 1'b0;
    iq_valid  = '0;
    cmd_ready = 1'b0;
    unique case (cmd.kind)
      CMD_GB_WRITE: begin
        gb_we     = cmd_valid;
        cmd_ready = 1'b1;
      end
      CMD_PUSH_PE: begin
        if (int'(cmd.pe) < NPE) begin
          iq_valid[cmd.pe] = cmd_valid;
          cmd_ready        = iq_ready[cmd.pe];
        end else cmd_ready = 1'b1;  // no such PE: dropped
      end
      CMD_PUSH_MAPPED: begin
        iq_valid[cur_pe] = cmd_valid;
        cmd_ready        = iq_ready[cur_pe];
      end
      CMD_BCAST: begin
        cmd_ready = &iq_ready;
        iq_valid  = (cmd_valid && cmd_ready) ? '1 : '0;
      end
      CMD_SET_WINDOW: cmd_ready = 1'b1;
      default:        cmd_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      window <= 16'd1;
      tcount <= '0;
      cur_pe <= '0;
    end else if (cmd_valid && cmd_ready) begin
      if (cmd.kind == CMD_SET_WINDOW) begin
        window <= (cmd.gb_addr[15:0] == '0) ? 16'd1 : cmd.gb_addr[15:0];
        tcount <= '0;
        cur_pe <= '0;
      end else if (cmd.kind == CMD_PUSH_MAPPED && cmd.task_end) begin
        if (tcount + 16'd1 >= window) begin
          tcount <= '0;
          cur_pe <= (int'(cur_pe) == NPE - 1) ? '0 : cur_pe + 1'b1;
        end else tcount <= tcount + 16'd1;
      end
    end
  end
endmodule
