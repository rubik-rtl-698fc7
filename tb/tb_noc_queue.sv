// tb_noc_queue: sends requests with even and odd line addresses and checks
// that they leave toward the left and right memory controller respectively,
// in order and carrying the PE's coordinates; then pushes read-data packets
// in and checks they come out to the LSQ in order.
`timescale 1ns/1ps
module tb_noc_queue;
  import rubik_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  coord_t my_pos;
  logic req_valid, req_ready, inj_valid, inj_ready, ej_valid, ej_ready, rsp_valid, busy;
  mem_req_t req;
  noc_pkt_t inj_pkt, ej_pkt;
  line_t rsp_data;
  int checks = 0, failures = 0;
  mem_req_t model [$];

  noc_queue #(.DEPTH(4), .MC_SEL_BIT(0)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    my_pos.row = 4'd3; my_pos.col = 4'd5;
    req_valid = 0; req = '0; inj_ready = 0; ej_valid = 0; ej_pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      req_valid = 1; req = '0; req.we = $urandom % 2; req.addr = addr_t'($urandom); req.data = {16{$urandom}};
      #1 chk(req_ready, "accepts");
      model.push_back(req);
      @(negedge clk);
    end
    req_valid = 0;
    #1 chk(!req_ready && busy, "full and busy");
    inj_ready = 1;
    for (int i = 0; i < 4; i++) begin
      #1;
      chk(inj_valid, "packet out");
      chk(inj_pkt.dst_col == (model[0].addr[0] ? DST_MC_R : DST_MC_L), "controller chosen by address bit");
      chk(inj_pkt.addr == model[0].addr && inj_pkt.data == model[0].data && inj_pkt.we == model[0].we, "contents");
      chk(inj_pkt.src == my_pos, "source coordinates");
      void'(model.pop_front());
      @(negedge clk);
    end
    inj_ready = 0;
    begin
      line_t d [3];
      for (int i = 0; i < 3; i++) begin
        d[i] = {16{$urandom}};
        ej_valid = 1; ej_pkt = '0; ej_pkt.data = d[i]; ej_pkt.dst_col = 5'd5;
        #1 chk(ej_ready, "accepts read data");
        @(negedge clk);
        ej_valid = 0;
        #1 chk(rsp_valid && rsp_data == d[i], "read data out");
        @(negedge clk);
      end
    end
    #1 chk(!busy, "idle at end");
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
