// gcn_driver: end-to-end stimulus and checker for rubik_top (simulation
// only). Instantiated by tb_rubik_top (reduced array) and tb_rubik_full
// (default array).
//
// It builds a graph (GRAPH=0: the 8-node example graph with the execution
// order V2 V6 V4 V5 | V8 V3 V1 V7; GRAPH=1: a random graph with community
// structure of NNODES nodes), random 16-bit features and weights, and runs
// two GCN layers:
//   layer 1 (SAGE style): h' = ReLU(Wself*h_v + Wneigh*AGG(h_u, u in N(v)))
//   layer 2 (GIN style):  h''= ReLU(W2*(h'_v + SUM h'_u))
// For each node it emits the micro-instruction program (LOADF / LOADI /
// COMP / STORE), choosing LOADI pairs from neighbour sets shared with nodes
// up to two places away in the same mapping window, and sends it with
// window mapping. A reference model executes the same instruction stream
// with the documented semantics (saturating 16-bit sum or max, 32-bit
// accumulation, shift by FRAC, saturation, ReLU) and every stored line is
// compared with it. Between layers the driver waits for busy to fall. It
// also checks that each mechanism happened: G-D hits and misses, G-C hits
// and misses, weight tile loads and reuse, saturation, traffic on both
// memory controllers and (if REQ_STALL) LSQ back-pressure.
module gcn_driver
  import rubik_pkg::*;
#(
  parameter int unsigned NPE       = 4,
  parameter int unsigned GRAPH     = 0,
  parameter int unsigned NNODES    = 8,
  parameter int unsigned D_CH      = 2,     // layer-1 input chunks (32 elements each)
  parameter int unsigned OUT_T     = 1,     // layer-1 output tiles = layer-2 input chunks
  parameter int unsigned WINDOW    = 4,
  parameter int unsigned FRAC      = 8,
  parameter int unsigned SEED      = 1,
  parameter int unsigned MAXCYC    = 200000,
  parameter int unsigned DRAM_LAT  = 20,
  parameter int unsigned READY_PCT = 100,
  parameter bit          REQ_STALL = 1'b0
) (
  input  logic      clk,
  output logic      rst_n,
  output logic      host_cmd_valid,
  output host_cmd_t host_cmd,
  input  logic      host_cmd_ready,
  input  logic      dram_req_valid [2],
  input  mem_req_t  dram_req       [2],
  output logic      dram_req_ready [2],
  output logic      dram_rsp_valid [2],
  output mem_resp_t dram_rsp       [2],
  input  logic      busy,
  input  perf_t     perf,
  input  logic [31:0] mem_lines [2]
);
  localparam int unsigned MAXN   = NNODES + 2;
  localparam int unsigned MAXDEG = 24;
  localparam addr_t F_BASE  = 32'h1000;
  localparam addr_t O1_BASE = 32'h4000;
  localparam addr_t O2_BASE = 32'h6000;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  for (genvar i = 0; i < 2; i++) begin : g_dram
    dram_model #(.LAT(DRAM_LAT), .READY_PCT(READY_PCT)) u_dram (
      .clk, .rst_n,
      .req_valid(dram_req_valid[i]), .req(dram_req[i]), .req_ready(dram_req_ready[i]),
      .rsp_valid(dram_rsp_valid[i]), .rsp(dram_rsp[i])
    );
  end

  // ---------------- graph ----------------
  int nbr [MAXN][MAXDEG];
  int deg [MAXN];
  int order [MAXN];
  int nord;

  function automatic bit is_nbr(int v, int u);
    for (int i = 0; i < deg[v]; i++) if (nbr[v][i] == u) return 1;
    return 0;
  endfunction

  function automatic void add_edge(int a, int b);
    if (a == b || is_nbr(a, b) || deg[a] >= MAXDEG || deg[b] >= MAXDEG) return;
    nbr[a][deg[a]++] = b;
    nbr[b][deg[b]++] = a;
  endfunction

  function automatic void build_graph();
    for (int v = 0; v < MAXN; v++) deg[v] = 0;
    if (GRAPH == 0) begin
      // edges of the 8-node example graph
      add_edge(1, 7); add_edge(1, 3); add_edge(3, 7); add_edge(7, 8); add_edge(3, 8);
      add_edge(8, 6); add_edge(6, 5); add_edge(6, 4); add_edge(2, 5); add_edge(2, 4);
      order = '{default: 0};
      order[0] = 2; order[1] = 6; order[2] = 4; order[3] = 5;
      order[4] = 8; order[5] = 3; order[6] = 1; order[7] = 7;
      nord = 8;
    end else begin
      // communities of 8 consecutive nodes; most edges stay inside one
      for (int v = 0; v < int'(NNODES); v++) begin
        for (int k = 0; k < 3; k++) add_edge(v, (v / 8) * 8 + int'($urandom % 8));
        if ($urandom % 4 == 0) add_edge(v, int'($urandom % NNODES));
      end
      for (int v = 0; v < int'(NNODES); v++) order[v] = v;
      nord = NNODES;
    end
  endfunction

  // ---------------- data ----------------
  line_t ref_mem [addr_t];   // features and expected outputs
  line_t gb_img  [int];      // global buffer image

  function automatic line_t rand_line(int lo, int span);
    line_t l;
    for (int i = 0; i < LANES; i++) l[i*ELEM_W +: ELEM_W] = ELEM_W'(lo + int'($urandom % span));
    return l;
  endfunction

  function automatic line_t mem_rd(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : '0;
  endfunction

  // ---------------- reference model of the instruction semantics ----------------
  addr_t r_lbase, r_lstride, r_sbase, r_sstride;
  line_t r_agg;
  acc_t  r_out [8][LANES];

  function automatic line_t r_reduce(line_t a, line_t b, bit mx);
    line_t r;
    for (int i = 0; i < LANES; i++) begin
      int x, y, s;
      x = int'($signed(a[i*ELEM_W +: ELEM_W]));
      y = int'($signed(b[i*ELEM_W +: ELEM_W]));
      if (mx) s = (x > y) ? x : y;
      else begin
        s = x + y;
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
      end
      r[i*ELEM_W +: ELEM_W] = ELEM_W'(s);
    end
    return r;
  endfunction

  function automatic line_t r_feat(int node, int chunk);
    return mem_rd(r_lbase + addr_t'(node) * r_lstride + addr_t'(chunk));
  endfunction

  function automatic void r_exec(instr_t in);
    bit first, mx;
    line_t d;
    first = in.flags[F_FIRST];
    mx    = in.flags[F_MAX];
    case (in.op)
      OP_CFG: case (in.node_a[1:0])
        0: r_lbase   = addr_t'({in.node_b, in.idx});
        1: r_lstride = addr_t'({in.node_b, in.idx});
        2: r_sbase   = addr_t'({in.node_b, in.idx});
        3: r_sstride = addr_t'({in.node_b, in.idx});
      endcase
      OP_LOADF, OP_LOADI: begin
        d = r_feat(int'(in.node_a), int'(in.idx));
        if (in.op == OP_LOADI) d = r_reduce(d, r_feat(int'(in.node_b), int'(in.idx)), mx);
        r_agg = first ? d : r_reduce(r_agg, d, mx);
      end
      OP_COMP: begin
        for (int k = 0; k < LANES; k++) begin
          line_t wrow;
          wrow = gb_img.exists(int'(in.idx) + k) ? gb_img[int'(in.idx) + k] : '0;
          for (int j = 0; j < LANES; j++)
            r_out[in.node_b[2:0]][k] += acc_t'($signed(wrow[j*ELEM_W +: ELEM_W])) *
                                        acc_t'($signed(r_agg[j*ELEM_W +: ELEM_W]));
        end
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
        ref_mem[r_sbase + addr_t'(in.node_a) * r_sstride + addr_t'(in.node_b)] = l;
      end
      default: ;
    endcase
  endfunction

  // ---------------- program generation ----------------
  host_cmd_t cmds [$];

  function automatic instr_t mk(opcode_e op, logic [3:0] fl, int a, int b, int idx);
    instr_t i;
    i.op = op; i.flags = fl; i.node_a = node_t'(a); i.node_b = node_t'(b); i.idx = IDX_W'(idx);
    return i;
  endfunction

  function automatic void push(cmd_e kind, instr_t in, bit task_end);
    host_cmd_t c;
    c = '0;
    c.kind = kind; c.instr = in; c.task_end = task_end;
    cmds.push_back(c);
    r_exec(in);
  endfunction

  function automatic void push_cfg(int sel, addr_t val);
    push(CMD_BCAST, mk(OP_CFG, 4'd0, sel, int'(val >> IDX_W), int'(val[IDX_W-1:0])), 1'b0);
  endfunction

  // neighbour-aggregation instructions of the node at position k
  function automatic void emit_aggr(int k, int chunk, bit first_in, bit mx);
    int v, rem [MAXDEG], nrem;
    bit first;
    v = order[k];
    nrem = deg[v];
    for (int i = 0; i < nrem; i++) rem[i] = nbr[v][i];
    first = first_in;
    for (int dk = -2; dk <= 2; dk++) begin
      int k2, u, sh [MAXDEG], nsh;
      k2 = k + dk;
      if (dk == 0 || k2 < 0 || k2 >= nord || (k2 / int'(WINDOW)) != (k / int'(WINDOW))) continue;
      u = order[k2];
      nsh = 0;
      for (int i = 0; i < deg[v]; i++) if (is_nbr(u, nbr[v][i])) sh[nsh++] = nbr[v][i];
      // sort the shared set so that both nodes form the same pairs
      for (int i = 0; i < nsh; i++)
        for (int j = i + 1; j < nsh; j++)
          if (sh[j] < sh[i]) begin int t; t = sh[i]; sh[i] = sh[j]; sh[j] = t; end
      for (int p = 0; p + 1 < nsh; p += 2) begin
        int ia, ib;
        ia = -1; ib = -1;
        for (int i = 0; i < nrem; i++) begin
          if (rem[i] == sh[p]) ia = i;
          if (rem[i] == sh[p+1]) ib = i;
        end
        if (ia >= 0 && ib >= 0) begin
          push(CMD_PUSH_MAPPED, mk(OP_LOADI, {2'b00, mx, first}, sh[p], sh[p+1], chunk), 1'b0);
          first = 1'b0;
          rem[ia] = -1; rem[ib] = -1;
        end
      end
    end
    for (int i = 0; i < nrem; i++)
      if (rem[i] >= 0) begin
        push(CMD_PUSH_MAPPED, mk(OP_LOADF, {2'b00, mx, first}, rem[i], 0, chunk), 1'b0);
        first = 1'b0;
      end
  endfunction

  function automatic void gen_layer1();
    cmds.delete();
    push(CMD_SET_WINDOW, mk(OP_NOP, 0, 0, 0, 0), 1'b0);
    cmds[$].gb_addr = addr_t'(WINDOW);
    push(CMD_BCAST, mk(OP_INV, 0, 0, 0, 0), 1'b0);
    push_cfg(CFG_LBASE, F_BASE);  push_cfg(CFG_LSTRIDE, addr_t'(D_CH));
    push_cfg(CFG_SBASE, O1_BASE); push_cfg(CFG_SSTRIDE, addr_t'(OUT_T));
    for (int k = 0; k < nord; k++) begin
      int v;
      bit mx;
      v  = order[k];
      mx = (v % 7 == 3);
      for (int c = 0; c < int'(D_CH); c++) begin
        push(CMD_PUSH_MAPPED, mk(OP_LOADF, 4'b0001, v, 0, c), 1'b0);
        for (int o = 0; o < int'(OUT_T); o++)
          push(CMD_PUSH_MAPPED, mk(OP_COMP, 0, 0, o, (c * int'(OUT_T) + o) * LANES), 1'b0);
        if (deg[v] > 0) begin
          emit_aggr(k, c, 1'b1, mx);
          for (int o = 0; o < int'(OUT_T); o++)
            push(CMD_PUSH_MAPPED, mk(OP_COMP, 0, 0, o, ((int'(D_CH) + c) * int'(OUT_T) + o) * LANES), 1'b0);
        end
      end
      for (int o = 0; o < int'(OUT_T); o++)
        push(CMD_PUSH_MAPPED, mk(OP_STORE, 4'b0100, v, o, 0), o == int'(OUT_T) - 1);
    end
  endfunction

  localparam int L2_W = 2 * int'(D_CH * OUT_T) * LANES;  // layer-2 weights after layer 1's

  function automatic void gen_layer2();
    cmds.delete();
    push(CMD_SET_WINDOW, mk(OP_NOP, 0, 0, 0, 0), 1'b0);
    cmds[$].gb_addr = addr_t'(WINDOW);
    push(CMD_BCAST, mk(OP_INV, 0, 0, 0, 0), 1'b0);
    push_cfg(CFG_LBASE, O1_BASE); push_cfg(CFG_LSTRIDE, addr_t'(OUT_T));
    push_cfg(CFG_SBASE, O2_BASE); push_cfg(CFG_SSTRIDE, 1);
    for (int k = 0; k < nord; k++) begin
      int v;
      v = order[k];
      // serpentine chunk order: a node starts with the weight tile its
      // predecessor ended with, so the tile stays in the MAC register files
      for (int cc = 0; cc < int'(OUT_T); cc++) begin
        int c;
        c = (k % 2 == 0) ? cc : int'(OUT_T) - 1 - cc;
        push(CMD_PUSH_MAPPED, mk(OP_LOADF, 4'b0001, v, 0, c), 1'b0);
        emit_aggr(k, c, 1'b0, 1'b0);
        push(CMD_PUSH_MAPPED, mk(OP_COMP, 0, 0, 0, L2_W + c * LANES), 1'b0);
      end
      push(CMD_PUSH_MAPPED, mk(OP_STORE, 4'b0100, v, 0, 0), 1'b1);
    end
  endfunction

  // ---------------- stimulus ----------------
  task automatic send(host_cmd_t c);
    bit rdy;
    @(negedge clk);
    host_cmd_valid = 1'b1;
    host_cmd       = c;
    forever begin
      #1 rdy = host_cmd_ready;
      @(posedge clk);
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    host_cmd_valid = 1'b0;
  endtask

  task automatic wait_idle();
    int quiet;
    quiet = 0;
    while (quiet < 4) begin
      @(posedge clk);
      quiet = busy ? 0 : quiet + 1;
    end
  endtask

  function automatic line_t dram_rd(addr_t a);
    return a[0] ? g_dram[1].u_dram.peek(a) : g_dram[0].u_dram.peek(a);
  endfunction

  task automatic check_outputs(addr_t base, int ntile, string tag);
    for (int k = 0; k < nord; k++)
      for (int o = 0; o < ntile; o++) begin
        addr_t a;
        a = base + addr_t'(order[k] * ntile + o);
        checks++;
        if (dram_rd(a) !== mem_rd(a)) begin
          failures++;
          if (failures < 5) $display("MISMATCH %s node %0d tile %0d: got %h exp %h", tag, order[k], o, dram_rd(a), mem_rd(a));
        end
      end
  endtask

  task automatic check_event(string name, longint n, bit required);
    $display("  event %-12s %0d", name, n);
    if (required) begin
      checks++;
      if (n == 0) begin
        failures++;
        $display("  event %s never happened", name);
      end
    end
  endtask

  initial begin
    longint t0, t1, t2;
    void'($urandom(SEED));
    rst_n = 1'b0;
    host_cmd_valid = 1'b0;
    host_cmd = '0;
    build_graph();
    // features
    for (int v = 0; v < MAXN; v++)
      for (int c = 0; c < int'(D_CH); c++) begin
        line_t l;
        l = rand_line(-64, 128);
        ref_mem[F_BASE + addr_t'(v * int'(D_CH) + c)] = l;
      end
    // two neighbours whose first element saturates a sum
    begin
      int a, b;
      line_t l;
      a = (GRAPH == 0) ? 4 : nbr[0][0];
      b = (GRAPH == 0) ? 5 : nbr[0][1];
      l = mem_rd(F_BASE + addr_t'(a * int'(D_CH))); l[ELEM_W-1:0] = 16'sd30000;
      ref_mem[F_BASE + addr_t'(a * int'(D_CH))] = l;
      l = mem_rd(F_BASE + addr_t'(b * int'(D_CH))); l[ELEM_W-1:0] = 16'sd30000;
      ref_mem[F_BASE + addr_t'(b * int'(D_CH))] = l;
    end
    foreach (ref_mem[a]) begin
      g_dram[0].u_dram.poke(a, ref_mem[a]);
      g_dram[1].u_dram.poke(a, ref_mem[a]);
    end
    // weights: layer 1 (2*D_CH*OUT_T tiles), then layer 2 (OUT_T tiles)
    for (int i = 0; i < L2_W + int'(OUT_T) * LANES; i++) gb_img[i] = rand_line(-64, 128);

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    foreach (gb_img[i]) begin
      host_cmd_t c;
      c = '0;
      c.kind = CMD_GB_WRITE; c.gb_addr = addr_t'(i); c.gb_data = gb_img[i];
      send(c);
    end

    r_out = '{default: '{default: 0}};
    gen_layer1();
    t0 = cycles;
    foreach (cmds[i]) send(cmds[i]);
    wait_idle();
    t1 = cycles;
    check_outputs(O1_BASE, OUT_T, "layer1");

    gen_layer2();
    foreach (cmds[i]) send(cmds[i]);
    wait_idle();
    t2 = cycles;
    check_outputs(O2_BASE, 1, "layer2");

    $display("nodes %0d, layer 1 %0d cycles, layer 2 %0d cycles, lines L %0d R %0d",
             nord, t1 - t0, t2 - t1, mem_lines[0], mem_lines[1]);
    check_event("gd_hit",    perf.gd_hit,    1);
    check_event("gd_miss",   perf.gd_miss,   1);
    check_event("gc_hit",    perf.gc_hit,    1);
    check_event("gc_miss",   perf.gc_miss,   1);
    check_event("w_load",    perf.w_load,    1);
    check_event("w_reuse",   perf.w_reuse,   1);
    check_event("saturate",  perf.sat,       1);
    check_event("lsq_stall", perf.lsq_stall, REQ_STALL);
    check_event("mc_left",   mem_lines[0],   1);
    check_event("mc_right",  mem_lines[1],   1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
