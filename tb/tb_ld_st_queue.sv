// tb_ld_st_queue: pushes a mix of loads and stores into a 4-entry LSQ while
// the NoC side is blocked, checks that the fifth is refused, then drains and
// checks order and contents; returns read data and checks it passes through
// and that the pending-load count and busy follow.
`timescale 1ns/1ps
module tb_ld_st_queue;
  import rubik_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_we, req_ready, out_valid, out_ready, rsp_in_valid, rsp_valid, busy;
  addr_t req_addr;
  line_t req_data, rsp_in_data, rsp_data;
  mem_req_t out_req;
  logic [7:0] loads_pending;
  int checks = 0, failures = 0;
  mem_req_t model [$];

  ld_st_queue #(.DEPTH(4)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    req_valid = 0; req_we = 0; req_addr = 0; req_data = 0; out_ready = 0; rsp_in_valid = 0; rsp_in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && loads_pending == 0, "idle after reset");
    for (int i = 0; i < 5; i++) begin
      mem_req_t m;
      req_valid = 1; req_we = (i % 2); req_addr = addr_t'($urandom); req_data = {16{$urandom}};
      #1;
      if (i < 4) begin
        chk(req_ready, "accepts while not full");
        m = '0; m.we = req_we; m.addr = req_addr; m.data = req_data;
        model.push_back(m);
      end else chk(!req_ready, "refuses when full");
      @(negedge clk);
    end
    req_valid = 0;
    chk(loads_pending == 2 && busy, "two loads pending");
    out_ready = 1;
    for (int i = 0; i < 4; i++) begin
      #1 chk(out_valid && out_req == model[0], "order and contents");
      void'(model.pop_front());
      @(negedge clk);
    end
    #1 chk(!out_valid, "drained");
    for (int i = 0; i < 2; i++) begin
      rsp_in_valid = 1; rsp_in_data = {16{$urandom}};
      #1 chk(rsp_valid && rsp_data == rsp_in_data, "read data passes");
      @(negedge clk);
    end
    rsp_in_valid = 0;
    #1 chk(loads_pending == 0 && !busy, "no load pending at end");
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
