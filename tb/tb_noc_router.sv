// tb_noc_router: a row of three routers with the test acting as the PEs and
// as the two memory controllers at the ends. First single packets measure
// the latency from each column to the left controller and check that each
// extra hop costs one cycle. Then every PE injects random requests to both
// controllers while both controllers inject read data for random columns,
// with random back-pressure at the ends. The test checks that every packet
// arrives exactly once, at the right place, in order per source and
// destination, and that no response runs off the end of the row.
`timescale 1ns/1ps
module tb_noc_router;
  import rubik_pkg::*;
  localparam int C = 3, NPER = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic     iv [C][4], ir [C][4], ov [C][4], orr [C][4];
  noc_pkt_t ip [C][4], op [C][4];
  logic     inj_v [C], inj_r [C], ej_v [C], ej_r [C], busy [C];
  noc_pkt_t inj_p [C], ej_p [C];
  logic     sl_ready, sr_ready, src_l_v, src_r_v;
  noc_pkt_t src_l_p, src_r_p;
  int checks = 0, failures = 0;

  for (genvar c = 0; c < C; c++) begin : g_r
    noc_router #(.MY_COL(c)) u (
      .clk, .rst_n,
      .in_valid(iv[c]), .in_pkt(ip[c]), .in_ready(ir[c]),
      .out_valid(ov[c]), .out_pkt(op[c]), .out_ready(orr[c]),
      .inj_valid(inj_v[c]), .inj_pkt(inj_p[c]), .inj_ready(inj_r[c]),
      .ej_valid(ej_v[c]), .ej_pkt(ej_p[c]), .ej_ready(ej_r[c]), .busy(busy[c])
    );
    // lane 0: requests west
    assign iv[c][0] = (c == C-1) ? 1'b0 : ov[(c+1)%C][0];
    assign ip[c][0] = (c == C-1) ? '0 : op[(c+1)%C][0];
    assign orr[c][0] = (c == 0) ? sl_ready : ir[(c+C-1)%C][0];
    // lane 1: requests east
    assign iv[c][1] = (c == 0) ? 1'b0 : ov[(c+C-1)%C][1];
    assign ip[c][1] = (c == 0) ? '0 : op[(c+C-1)%C][1];
    assign orr[c][1] = (c == C-1) ? sr_ready : ir[(c+1)%C][1];
    // lane 2: responses west, entering from the right controller
    assign iv[c][2] = (c == C-1) ? src_r_v : ov[(c+1)%C][2];
    assign ip[c][2] = (c == C-1) ? src_r_p : op[(c+1)%C][2];
    assign orr[c][2] = (c == 0) ? 1'b1 : ir[(c+C-1)%C][2];
    // lane 3: responses east, entering from the left controller
    assign iv[c][3] = (c == 0) ? src_l_v : ov[(c+C-1)%C][3];
    assign ip[c][3] = (c == 0) ? src_l_p : op[(c+C-1)%C][3];
    assign orr[c][3] = (c == C-1) ? 1'b1 : ir[(c+1)%C][3];
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // expected arrival order: requests per (column, side), responses per
  // (side, column); the packet id travels in addr
  addr_t exp_req [C][2][$];
  addr_t exp_rsp [2][C][$];
  int    got = 0, cyc = 0;
  int    t_arrive;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ov[0][0] && sl_ready) begin
      int c; c = int'(op[0][0].src.col);
      checks++;
      if (op[0][0].dst_col != DST_MC_L || exp_req[c][0].size() == 0 || exp_req[c][0][0] != op[0][0].addr) begin
        failures++; $display("FAIL left controller arrival");
      end else void'(exp_req[c][0].pop_front());
      got++; t_arrive = cyc;
    end
    if (ov[C-1][1] && sr_ready) begin
      int c; c = int'(op[C-1][1].src.col);
      checks++;
      if (op[C-1][1].dst_col != DST_MC_R || exp_req[c][1].size() == 0 || exp_req[c][1][0] != op[C-1][1].addr) begin
        failures++; $display("FAIL right controller arrival");
      end else void'(exp_req[c][1].pop_front());
      got++;
    end
    for (int c = 0; c < C; c++) if (ej_v[c] && ej_r[c]) begin
      int s; s = int'(ej_p[c].addr[31]);
      checks++;
      if (ej_p[c].dst_col != 5'(c) || exp_rsp[s][c].size() == 0 || exp_rsp[s][c][0] != ej_p[c].addr) begin
        failures++; $display("FAIL ejection at column %0d", c);
      end else void'(exp_rsp[s][c].pop_front());
      got++;
    end
    if (ov[0][2] || ov[C-1][3]) begin
      checks++; failures++; $display("FAIL response left the row");
    end
  end

  task automatic inject(int c, bit right, int id);
    noc_pkt_t p;
    p = '0;
    p.dst_col = right ? DST_MC_R : DST_MC_L;
    p.addr = addr_t'(id);
    p.src.col = 4'(c);
    inj_v[c] = 1; inj_p[c] = p;
    #1;
    while (!inj_r[c]) begin @(negedge clk); #1; end
    exp_req[c][right].push_back(p.addr);
    @(negedge clk);
    inj_v[c] = 0;
  endtask

  task automatic send_rsp(bit right, int col, int id);
    noc_pkt_t p;
    p = '0;
    p.dst_col = 5'(col);
    p.addr = {right, 31'(id)};
    if (right) begin
      src_r_v = 1; src_r_p = p;
      #1;
      while (!ir[C-1][2]) begin @(negedge clk); #1; end
    end else begin
      src_l_v = 1; src_l_p = p;
      #1;
      while (!ir[0][3]) begin @(negedge clk); #1; end
    end
    exp_rsp[right][col].push_back(p.addr);
    @(negedge clk);
    if (right) src_r_v = 0; else src_l_v = 0;
  endtask

  int lat [C];
  int total = 0;
  initial begin
    for (int c = 0; c < C; c++) begin inj_v[c] = 0; inj_p[c] = '0; ej_r[c] = 1; end
    src_l_v = 0; src_r_v = 0; src_l_p = '0; src_r_p = '0; sl_ready = 1; sr_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency per column to the left controller
    for (int c = 0; c < C; c++) begin
      int t0;
      t0 = cyc;
      inject(c, 0, 1000 + c);
      total++;
      wait (got == total);
      lat[c] = t_arrive - t0;
      @(negedge clk);
    end
    $display("latency to left controller by column: %0d %0d %0d", lat[0], lat[1], lat[2]);
    chk(lat[1] - lat[0] == 1 && lat[2] - lat[1] == 1, "one cycle per hop");
    fork
      for (int c = 0; c < C; c++) begin
        automatic int cc = c;
        fork
          for (int n = 0; n < NPER; n++) inject(cc, $urandom % 2, cc * 1000 + n);
        join_none
      end
      for (int n = 0; n < NPER; n++) send_rsp(0, $urandom % C, n);
      for (int n = 0; n < NPER; n++) send_rsp(1, $urandom % C, n);
      repeat (2000) begin
        @(negedge clk);
        sl_ready = ($urandom % 3) != 0;
        sr_ready = ($urandom % 3) != 0;
        for (int c = 0; c < C; c++) ej_r[c] = ($urandom % 4) != 0;
      end
    join
    sl_ready = 1; sr_ready = 1;
    for (int c = 0; c < C; c++) ej_r[c] = 1;
    repeat (20) @(negedge clk);
    total += C * NPER + 2 * NPER;
    chk(got == total, $sformatf("all packets delivered (%0d of %0d)", got, total));
    for (int c = 0; c < C; c++) chk(!busy[c], "routers idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
