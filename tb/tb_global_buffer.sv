// tb_global_buffer: writes random lines into a small global buffer (64
// lines, 4 read ports), then has all four ports request different lines at
// once. It checks that exactly one port is granted per cycle, that each port
// is granted once in round-robin order within four cycles, that rd_valid
// follows the grant by one cycle, and that the data is the line written.
// A final random phase checks every read against the written contents.
`timescale 1ns/1ps
module tb_global_buffer;
  import rubik_pkg::*;
  localparam int DEPTH = 64, NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [5:0] wr_addr;
  line_t wr_data, rd_data;
  logic [NP-1:0] rd_req, rd_gnt, rd_valid;
  logic [5:0] rd_addr [NP];
  int checks = 0, failures = 0;
  line_t mem [DEPTH];

  global_buffer #(.DEPTH(DEPTH), .NPORTS(NP)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // per-port requester: hold request until granted, expect data next cycle
  logic [NP-1:0] want;
  int served [NP];
  int granted_order [$];
  logic [NP-1:0] last_gnt;
  logic [5:0]    last_addr [NP];
  always @(posedge clk) if (rst_n) begin
    if (rd_gnt != 0) begin
      checks++;
      if ($countones(rd_gnt) != 1) begin failures++; $display("FAIL more than one grant"); end
    end
    for (int p = 0; p < NP; p++) begin
      if (rd_valid[p]) begin
        checks++;
        if (!last_gnt[p] || rd_data != mem[last_addr[p]]) begin failures++; $display("FAIL read data port %0d", p); end
        served[p]++;
      end
      if (rd_gnt[p]) begin
        checks++;
        if (!rd_req[p]) begin failures++; $display("FAIL grant without request"); end
        granted_order.push_back(p);
      end
    end
    last_gnt <= rd_gnt;
    for (int p = 0; p < NP; p++) last_addr[p] <= rd_addr[p];
  end

  initial begin
    logic [NP-1:0] g;
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_req = 0; last_gnt = 0;
    for (int p = 0; p < NP; p++) begin rd_addr[p] = 0; served[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_addr = 6'(i); wr_data = {16{$urandom}}; mem[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int p = 0; p < NP; p++) rd_addr[p] = 6'(p * 7 + 3);
    rd_req = '1;
    for (int c = 0; c < NP; c++) begin
      #1;
      chk($countones(rd_gnt) == 1, "one grant per cycle while all request");
      g = rd_gnt;
      @(negedge clk);
      rd_req &= ~g;
    end
    chk(rd_req == 0, "every port granted within four cycles");
    @(negedge clk);
    for (int p = 0; p < NP; p++) chk(served[p] == 1, "each port served once");
    for (int i = 1; i < granted_order.size(); i++)
      chk(granted_order[i] == (granted_order[i-1] + 1) % NP, "round-robin order");
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < NP; p++)
        if (!rd_req[p] && ($urandom % 2)) begin rd_req[p] = 1; rd_addr[p] = 6'($urandom); end
      #1 g = rd_gnt;
      @(negedge clk);
      rd_req &= ~g;
    end
    rd_req = 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
