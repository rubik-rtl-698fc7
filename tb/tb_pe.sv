// tb_pe: one processing element (instruction queue, controller, G-D and G-C
// caches, MAC array, LSQ and NoC queue) with the test acting as its NoC
// router (a memory with a fixed latency behind random back-pressure) and as
// the global buffer (random grants, data one cycle after the grant).
//
// A directed micro-program aggregates, multiplies and stores three output
// nodes; it covers G-D misses and hits, a G-C miss (the pair is loaded and
// combined) and later hits with the nodes in the other order, sum and max
// aggregation, saturation, weight-tile loads and reuse, two output tiles,
// ReLU, and invalidation. Every stored line is compared with a reference
// model of the instruction semantics kept here, and every event counter is
// compared with the count this program must produce.
`timescale 1ns/1ps
module tb_pe;
  import rubik_pkg::*;
  localparam int FRAC = 8, LAT = 12;
  localparam addr_t LBASE = 32'h100, LSTRIDE = 2, SBASE = 32'h800, SSTRIDE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  coord_t my_pos;
  logic iq_push_valid, iq_push_ready, gb_req, gb_gnt, gb_rvalid;
  instr_t iq_push_instr;
  logic [14:0] gb_addr;
  line_t gb_rdata;
  logic inj_valid, inj_ready, ej_valid, ej_ready, busy;
  noc_pkt_t inj_pkt, ej_pkt;
  perf_t perf;
  int checks = 0, failures = 0;

  pe #(.GD_SETS(16), .GC_SETS(16), .CACHE_WAYS(2), .LSQ_DEPTH(1), .NQ_DEPTH(1)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // ---------------- memory and global buffer ----------------
  line_t mem [addr_t];
  line_t gbm [int];
  function automatic line_t rd(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  typedef struct { int t; line_t d; } pend_t;
  pend_t pend [$];
  int cyc = 0, writes = 0;
  always @(posedge clk) begin
    cyc++;
    if (inj_valid && inj_ready) begin
      if (inj_pkt.we) begin mem[inj_pkt.addr] = inj_pkt.data; writes++; end
      else begin
        pend_t p;
        p.t = cyc + LAT; p.d = rd(inj_pkt.addr);
        pend.push_back(p);
        checks++;
        if (inj_pkt.dst_col != (inj_pkt.addr[0] ? DST_MC_R : DST_MC_L)) begin
          failures++; $display("FAIL request sent to the wrong controller");
        end
      end
    end
    if (ej_valid && ej_ready) void'(pend.pop_front());
    inj_ready <= (cyc % 16) >= 12;  // long stretches of back-pressure
    gb_rvalid <= gb_req && gb_gnt;
    gb_rdata  <= gbm.exists(int'(gb_addr)) ? gbm[int'(gb_addr)] : '0;
  end
  always_comb begin
    ej_valid = pend.size() != 0 && pend[0].t <= cyc;
    ej_pkt = '0;
    if (ej_valid) begin ej_pkt.data = pend[0].d; ej_pkt.dst_col = {1'b0, my_pos.col}; end
  end
  logic gnt_rand;
  always @(negedge clk) gnt_rand = ($urandom % 2) != 0;
  assign gb_gnt = gb_req && gnt_rand;

  // ---------------- reference model ----------------
  addr_t r_lbase, r_lstride, r_sbase, r_sstride;
  line_t r_agg;
  acc_t  r_out [8][LANES];
  line_t r_mem [addr_t];
  int    r_sat = 0;

  function automatic line_t r_reduce(line_t a, line_t b, bit mx, bit count);
    line_t r;
    for (int i = 0; i < LANES; i++) begin
      int x, y, s;
      x = int'($signed(a[i*ELEM_W +: ELEM_W]));
      y = int'($signed(b[i*ELEM_W +: ELEM_W]));
      if (mx) s = (x > y) ? x : y;
      else begin
        s = x + y;
        if (s > 32767 || s < -32768) begin
          if (count) r_sat++;
          s = (s > 0) ? 32767 : -32768;
        end
      end
      r[i*ELEM_W +: ELEM_W] = ELEM_W'(s);
    end
    return r;
  endfunction

  function automatic line_t r_feat(int node, int chunk);
    return rd(r_lbase + addr_t'(node) * r_lstride + addr_t'(chunk));
  endfunction

  function automatic void r_exec(instr_t in);
    line_t d;
    case (in.op)
      OP_CFG: case (in.node_a[1:0])
        0: r_lbase   = addr_t'({in.node_b, in.idx});
        1: r_lstride = addr_t'({in.node_b, in.idx});
        2: r_sbase   = addr_t'({in.node_b, in.idx});
        3: r_sstride = addr_t'({in.node_b, in.idx});
      endcase
      OP_LOADF, OP_LOADI: begin
        d = r_feat(int'(in.node_a), int'(in.idx));
        if (in.op == OP_LOADI) d = r_reduce(d, r_feat(int'(in.node_b), int'(in.idx)), in.flags[F_MAX], 1);
        r_agg = in.flags[F_FIRST] ? d : r_reduce(r_agg, d, in.flags[F_MAX], 1);
      end
      OP_COMP:
        for (int k = 0; k < LANES; k++) begin
          line_t w;
          w = gbm.exists(int'(in.idx) + k) ? gbm[int'(in.idx) + k] : '0;
          for (int j = 0; j < LANES; j++)
            r_out[in.node_b[2:0]][k] += acc_t'($signed(w[j*ELEM_W +: ELEM_W])) *
                                        acc_t'($signed(r_agg[j*ELEM_W +: ELEM_W]));
        end
      OP_STORE: begin
        line_t l;
        for (int k = 0; k < LANES; k++) begin
          acc_t s;
          s = r_out[in.node_b[2:0]][k] >>> FRAC;
          if (s > 32767) s = 32767;
          if (s < -32768) s = -32768;
          if (in.flags[F_RELU] && s < 0) s = 0;
          l[k*ELEM_W +: ELEM_W] = ELEM_W'(s);
          r_out[in.node_b[2:0]][k] = 0;
        end
        r_mem[r_sbase + addr_t'(in.node_a) * r_sstride + addr_t'(in.node_b)] = l;
      end
      default: ;
    endcase
  endfunction

  // ---------------- program ----------------
  instr_t prog [$];
  function automatic void add(opcode_e op, logic [3:0] fl, int a, int b, int idx);
    instr_t i;
    i.op = op; i.flags = fl; i.node_a = node_t'(a); i.node_b = node_t'(b); i.idx = IDX_W'(idx);
    prog.push_back(i);
  endfunction
  function automatic void cfg(int sel, addr_t v);
    add(OP_CFG, 0, sel, int'(v >> IDX_W), int'(v[IDX_W-1:0]));
  endfunction

  localparam logic [3:0] FF = 4'b0001, FM = 4'b0010, FR = 4'b0100;

  function automatic line_t rand_line(int lo, int span);
    line_t l;
    for (int i = 0; i < LANES; i++) l[i*ELEM_W +: ELEM_W] = ELEM_W'(lo + int'($urandom % span));
    return l;
  endfunction

  initial begin
    int t0;
    my_pos.row = 4'd1; my_pos.col = 4'd2;
    iq_push_valid = 0; iq_push_instr = '0; inj_ready = 0; gb_rvalid = 0; gb_rdata = '0;
    for (int t = 0; t < 8; t++) for (int k = 0; k < LANES; k++) r_out[t][k] = 0;
    // features of nodes 1-4, two chunks each; weights at lines 0 and 32
    for (int n = 1; n <= 4; n++)
      for (int c = 0; c < 2; c++) mem[LBASE + addr_t'(n) * LSTRIDE + addr_t'(c)] = rand_line(-200, 400);
    begin
      line_t l;
      l = mem[LBASE + 1 * LSTRIDE]; l[15:0] = 16'd30000; mem[LBASE + 1 * LSTRIDE] = l;
      l = mem[LBASE + 2 * LSTRIDE]; l[15:0] = 16'd30000; mem[LBASE + 2 * LSTRIDE] = l;
    end
    for (int k = 0; k < 64; k++) gbm[k] = rand_line(-64, 128);

    cfg(0, LBASE); cfg(1, LSTRIDE); cfg(2, SBASE); cfg(3, SSTRIDE);
    // node 0: sum of 1, 2, 3, 4 over two chunks, two output tiles
    add(OP_LOADF, FF, 1, 0, 0);     // G-D miss
    add(OP_LOADF, 0, 2, 0, 0);      // G-D miss, saturates element 0
    add(OP_LOADI, 0, 3, 4, 0);      // G-C miss, two G-D misses
    add(OP_COMP, 0, 0, 0, 0);       // weight load
    add(OP_LOADF, FF, 1, 0, 1);     // G-D miss
    add(OP_LOADI, 0, 4, 3, 1);      // G-C miss, two G-D misses
    add(OP_COMP, 0, 0, 0, 32);      // weight load
    add(OP_COMP, 0, 0, 1, 32);      // weight reuse
    add(OP_STORE, FR, 0, 0, 0);
    add(OP_STORE, 0, 0, 1, 0);
    add(OP_STORE, 0, 0, 4, 0);      // an untouched tile stores zeros
    // node 5: reuses cached lines and the cached pair in the other order
    add(OP_LOADF, FF, 1, 0, 0);     // G-D hit
    add(OP_LOADI, 0, 4, 3, 0);      // G-C hit
    add(OP_LOADF, 0, 2, 0, 0);      // G-D hit
    add(OP_COMP, 0, 0, 0, 32);      // weight reuse
    add(OP_STORE, 0, 5, 0, 0);
    // node 6: max aggregation
    add(OP_LOADF, FF | FM, 1, 0, 1); // G-D hit
    add(OP_LOADI, FM, 3, 4, 1);      // G-C miss (max is a different entry), two G-D hits
    add(OP_COMP, 0, 0, 2, 0);        // weight load
    add(OP_STORE, FR, 6, 2, 0);
    // invalidate, then node 7 misses again
    add(OP_INV, 0, 0, 0, 0);
    add(OP_LOADF, FF, 1, 0, 0);     // G-D miss
    add(OP_COMP, 0, 0, 3, 0);       // weight load
    add(OP_STORE, 0, 7, 3, 0);

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cyc;
    foreach (prog[i]) begin
      r_exec(prog[i]);
      iq_push_valid = 1; iq_push_instr = prog[i];
      #1;
      while (!iq_push_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    iq_push_valid = 0;
    #1;
    while (busy) begin @(negedge clk); #1; end
    $display("program finished in %0d cycles", cyc - t0);
    chk(writes == 6, "six lines stored");
    foreach (r_mem[a]) chk(mem.exists(a) && mem[a] == r_mem[a], $sformatf("stored line %0h", a));
    chk(perf.gd_hit == 5,  $sformatf("G-D hits %0d", perf.gd_hit));
    chk(perf.gd_miss == 8, $sformatf("G-D misses %0d", perf.gd_miss));
    chk(perf.gc_hit == 1,  $sformatf("G-C hits %0d", perf.gc_hit));
    chk(perf.gc_miss == 3, $sformatf("G-C misses %0d", perf.gc_miss));
    chk(perf.w_load == 4,  $sformatf("weight loads %0d", perf.w_load));
    chk(perf.w_reuse == 2, $sformatf("weight reuse %0d", perf.w_reuse));
    chk(perf.sat == 32'(r_sat) && r_sat > 0, $sformatf("saturations %0d expected %0d", perf.sat, r_sat));
    chk(perf.lsq_stall > 0, "LSQ back-pressure seen");
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
