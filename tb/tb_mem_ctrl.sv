// tb_mem_ctrl: a memory controller serving two PE rows, connected to the
// behavioural DRAM channel model. Each row sends a stream of reads and
// writes (tagged with the PE column) while the response lanes accept at
// random. The test checks that the channel sees at most one line every two
// cycles and exactly one every two cycles while both rows keep requesting,
// that every read returns the latest written data to the right row and
// column in request order, and that both rows are served.
`timescale 1ns/1ps
module tb_mem_ctrl;
  import rubik_pkg::*;
  localparam int ROWS = 2, NREQ = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid [ROWS], req_ready [ROWS], rsp_valid [ROWS], rsp_ready [ROWS];
  noc_pkt_t req_pkt [ROWS], rsp_pkt [ROWS];
  logic dram_req_valid, dram_req_ready, dram_rsp_valid, busy;
  mem_req_t dram_req;
  mem_resp_t dram_rsp;
  logic [31:0] lines_issued;
  int checks = 0, failures = 0;

  mem_ctrl #(.ROWS(ROWS), .LINE_CYCLES(2), .RESP_DEPTH(8)) dut (.*);
  dram_model #(.LAT(6), .READY_PCT(100)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req(dram_req), .req_ready(dram_req_ready),
    .rsp_valid(dram_rsp_valid), .rsp(dram_rsp)
  );

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // expected read data per row, in order, and a shadow of memory
  line_t shadow [addr_t];
  line_t exp_q [ROWS][$];
  logic [3:0] exp_col [ROWS][$];
  int sent [ROWS], recv [ROWS];

  // issue-rate monitor
  int last_issue = -10, cyc = 0, gaps_of_two = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dram_req_valid && dram_req_ready) begin
      checks++;
      if (cyc - last_issue < 2) begin failures++; $display("FAIL two lines within two cycles"); end
      if (cyc - last_issue == 2) gaps_of_two++;
      last_issue = cyc;
    end
  end

  // response checker
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++)
      if (rsp_valid[r] && rsp_ready[r]) begin
        checks++;
        if (exp_q[r].size() == 0 || rsp_pkt[r].data != exp_q[r][0] || rsp_pkt[r].dst_col != {1'b0, exp_col[r][0]}) begin
          failures++;
          $display("FAIL response row %0d", r);
        end
        if (exp_q[r].size() != 0) begin void'(exp_q[r].pop_front()); void'(exp_col[r].pop_front()); end
        recv[r]++;
      end
    for (int r = 0; r < ROWS; r++) rsp_ready[r] <= ($urandom % 4) != 0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    initial begin
      req_valid[r] = 0; req_pkt[r] = '0; sent[r] = 0; recv[r] = 0;
      wait (rst_n);
      @(negedge clk);
      for (int n = 0; n < NREQ; n++) begin
        noc_pkt_t p;
        p = '0;
        p.we = ($urandom % 3) == 0;
        p.addr = addr_t'(r * 16 + $urandom % 8);
        p.data = {16{$urandom}};
        p.src.row = 4'(r);
        p.src.col = 4'($urandom % 8);
        p.dst_col = DST_MC_L;
        req_valid[r] = 1; req_pkt[r] = p;
        #1;
        while (!req_ready[r]) begin @(negedge clk); #1; end
        // the request is taken at the coming edge: update the model now,
        // as requests of one row are served in order
        if (p.we) shadow[p.addr] = p.data;
        else begin
          exp_q[r].push_back(shadow.exists(p.addr) ? shadow[p.addr] : u_dram.peek(p.addr));
          exp_col[r].push_back(p.src.col);
        end
        sent[r]++;
        @(negedge clk);
      end
      req_valid[r] = 0;
    end
  end

  initial begin
    for (int r = 0; r < ROWS; r++) rsp_ready[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent[0] == NREQ && sent[1] == NREQ);
    repeat (100) @(posedge clk);
    for (int r = 0; r < ROWS; r++) chk(exp_q[r].size() == 0 && recv[r] > 0, "all reads answered");
    chk(!busy, "idle at end");
    chk(lines_issued == 2 * NREQ, "every request issued once");
    chk(gaps_of_two > NREQ, "back-to-back issue every two cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
