// tb_scheduler_mapper: with 4 PEs and a window of 3 tasks, pushes mapped
// tasks (of one or two instructions each) and checks that tasks 0-2 go to
// PE 0, 3-5 to PE 1 and so on, wrapping after the last PE. It also checks a
// direct push to one PE, that a push waits while the target queue is full,
// that a broadcast waits until every queue has room and then reaches all,
// and that a global buffer write appears on the write port.
`timescale 1ns/1ps
module tb_scheduler_mapper;
  import rubik_pkg::*;
  localparam int NPE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, gb_we;
  host_cmd_t cmd;
  logic [14:0] gb_waddr;
  line_t gb_wdata;
  logic [NPE-1:0] iq_valid, iq_ready;
  instr_t iq_instr;
  logic [PE_ID_W-1:0] cur_pe;
  int checks = 0, failures = 0;

  scheduler_mapper #(.NPE(NPE), .GB_AW(15)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // sends a command and returns the PE mask it was delivered to
  task automatic send(host_cmd_t c, output logic [NPE-1:0] mask);
    cmd_valid = 1; cmd = c;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    mask = iq_valid & iq_ready;
    if (c.kind == CMD_PUSH_PE || c.kind == CMD_PUSH_MAPPED || c.kind == CMD_BCAST)
      chk(iq_instr == c.instr, "instruction passed through");
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    host_cmd_t c;
    logic [NPE-1:0] m;
    cmd_valid = 0; cmd = '0; iq_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    c = '0; c.kind = CMD_SET_WINDOW; c.gb_addr = 3;
    send(c, m);
    for (int t = 0; t < 14; t++) begin
      int len;
      len = 1 + (t % 2);
      for (int k = 0; k < len; k++) begin
        c = '0; c.kind = CMD_PUSH_MAPPED; c.task_end = (k == len - 1);
        c.instr = {$urandom, $urandom};
        send(c, m);
        chk(m == NPE'(1) << ((t / 3) % NPE), $sformatf("task %0d mapped to PE %0d", t, (t / 3) % NPE));
      end
    end
    c = '0; c.kind = CMD_PUSH_PE; c.pe = 2; c.instr = {$urandom, $urandom};
    send(c, m);
    chk(m == 4'b0100, "direct push");
    // full target queue holds the command back
    iq_ready = 4'b1011;
    c = '0; c.kind = CMD_PUSH_PE; c.pe = 2; c.instr = {$urandom, $urandom};
    cmd_valid = 1; cmd = c;
    repeat (3) begin #1 chk(!cmd_ready, "waits for a full queue"); @(negedge clk); end
    iq_ready = '1;
    #1 chk(cmd_ready && iq_valid == 4'b0100, "goes when room");
    @(negedge clk);
    cmd_valid = 0;
    // broadcast waits for all
    iq_ready = 4'b1110;
    c = '0; c.kind = CMD_BCAST; c.instr = {$urandom, $urandom};
    cmd_valid = 1; cmd = c;
    #1 chk(!cmd_ready, "broadcast waits for every queue");
    @(negedge clk);
    iq_ready = '1;
    #1 chk(cmd_ready && iq_valid == '1, "broadcast to all");
    @(negedge clk);
    cmd_valid = 0;
    c = '0; c.kind = CMD_GB_WRITE; c.gb_addr = 32'h1234; c.gb_data = {16{$urandom}};
    cmd_valid = 1; cmd = c;
    #1 chk(cmd_ready && gb_we && gb_waddr == 15'h1234 && gb_wdata == c.gb_data && iq_valid == 0, "global buffer write");
    @(negedge clk);
    cmd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
