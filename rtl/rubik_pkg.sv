// rubik_pkg: types and constants shared by the Rubik GCN accelerator.
//
// A feature vector is cut into 64-byte lines of LANES (32) signed 16-bit
// fixed-point elements. The line is the unit of every cache entry, every
// memory transfer and every MAC-array step, and its 32 elements match the
// 32x32 weight tile processed by the 4x8 MAC array. Memory is addressed in
// line units (ADDR_W bits of line address).
//
// The 16-bit element width is this design's choice: it is what makes the
// 2 KB register file of a 4x8 MAC array hold exactly one 32x32 weight tile.
// The instruction and packet encodings below are also this design's own.
package rubik_pkg;

  localparam int unsigned ELEM_W  = 16;            // feature / weight element
  localparam int unsigned LANES   = 32;            // elements per line = MACs per PE
  localparam int unsigned LINE_W  = ELEM_W * LANES; // 512 bits = 64 bytes
  localparam int unsigned ACC_W   = 32;            // MAC accumulator width
  localparam int unsigned ADDR_W  = 32;            // line address width
  localparam int unsigned NODE_W  = 18;            // node id (up to 262,143 nodes)
  localparam int unsigned IDX_W   = 20;            // chunk / buffer index field
  localparam int unsigned CHUNK_W = 8;             // feature chunk index (up to 8192 elements)
  localparam int unsigned COORD_W = 4;             // PE row / column index
  localparam int unsigned PE_ID_W = 8;             // flat PE index

  typedef logic [LINE_W-1:0]        line_t;
  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [NODE_W-1:0]        node_t;

  // Micro-instruction opcodes. LOADF, LOADI, COMP and STORE are the four
  // primitives of the programming model; CFG and INV are housekeeping.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_CFG   = 4'd1,  // node_a[1:0] selects register, {node_b,idx}[31:0] is the value
    OP_LOADF = 4'd2,  // aggregate feature chunk idx of node node_a
    OP_LOADI = 4'd3,  // aggregate the pair partial result (node_a,node_b), chunk idx
    OP_COMP  = 4'd4,  // out tile node_b += W tile at global-buffer line idx x aggregate
    OP_STORE = 4'd5,  // write out tile node_b of node node_a to memory, then clear it
    OP_INV   = 4'd6   // invalidate G-D, G-C and the MAC-array weight tile
  } opcode_e;

  // instruction flags
  localparam int unsigned F_FIRST = 0;  // load starts a new aggregate (overwrite)
  localparam int unsigned F_MAX   = 1;  // aggregate with element-wise max instead of sum
  localparam int unsigned F_RELU  = 2;  // store applies ReLU

  // CFG register select
  localparam logic [1:0] CFG_LBASE = 2'd0, CFG_LSTRIDE = 2'd1, CFG_SBASE = 2'd2, CFG_SSTRIDE = 2'd3;

  typedef struct packed {
    opcode_e         op;
    logic [3:0]      flags;
    node_t           node_a;
    node_t           node_b;
    logic [IDX_W-1:0] idx;
  } instr_t;  // 64 bits

  typedef struct packed {
    logic [COORD_W-1:0] row;
    logic [COORD_W-1:0] col;
  } coord_t;

  // request from a PE (or to a DRAM channel)
  typedef struct packed {
    logic   we;
    addr_t  addr;
    line_t  data;
    coord_t src;
  } mem_req_t;

  // read data from a DRAM channel, tagged with the requesting PE
  typedef struct packed {
    line_t  data;
    coord_t dst;
  } mem_resp_t;

  // NoC packet. dst_col is a PE column for responses; requests carry
  // DST_MC_L or DST_MC_R, which no PE column matches.
  typedef struct packed {
    logic [COORD_W:0] dst_col;
    logic   we;
    addr_t  addr;
    line_t  data;
    coord_t src;
  } noc_pkt_t;

  localparam logic [COORD_W:0] DST_MC_L = {1'b1, {COORD_W{1'b0}}};
  localparam logic [COORD_W:0] DST_MC_R = {1'b1, {COORD_W{1'b1}}};

  // host (driver) command
  typedef enum logic [2:0] {
    CMD_GB_WRITE    = 3'd0,  // global buffer line gb_addr <= gb_data
    CMD_PUSH_PE     = 3'd1,  // instruction to PE pe
    CMD_PUSH_MAPPED = 3'd2,  // instruction to the PE chosen by window mapping
    CMD_BCAST       = 3'd3,  // instruction to every PE
    CMD_SET_WINDOW  = 3'd4   // window size = gb_addr, restart mapping at PE 0
  } cmd_e;

  typedef struct packed {
    cmd_e               kind;
    logic               task_end;  // last instruction of one node's task
    logic [PE_ID_W-1:0] pe;
    addr_t              gb_addr;
    line_t              gb_data;
    instr_t             instr;
  } host_cmd_t;

  // event counters of one PE (or summed over the array)
  typedef struct packed {
    logic [31:0] gd_hit;
    logic [31:0] gd_miss;
    logic [31:0] gc_hit;
    logic [31:0] gc_miss;
    logic [31:0] w_load;     // weight tiles fetched from the global buffer
    logic [31:0] w_reuse;    // comp that found its tile already in the RFs
    logic [31:0] lsq_stall;  // cycles a request waited for a full LSQ
    logic [31:0] sat;        // elements clipped by saturating aggregation
  } perf_t;

  function automatic elem_t get_elem(line_t l, int unsigned i);
    return elem_t'(l[i*ELEM_W +: ELEM_W]);
  endfunction

  function automatic elem_t sat_add(elem_t a, elem_t b);
    logic signed [ELEM_W:0] s;
    s = {a[ELEM_W-1], a} + {b[ELEM_W-1], b};
    if (s > $signed({2'b00, {(ELEM_W-1){1'b1}}}))      return {1'b0, {(ELEM_W-1){1'b1}}};
    else if (s < $signed({2'b11, {(ELEM_W-1){1'b0}}})) return {1'b1, {(ELEM_W-1){1'b0}}};
    else                                                return s[ELEM_W-1:0];
  endfunction

  // element-wise reduction of two lines: saturating sum or max
  function automatic line_t line_reduce(line_t a, line_t b, logic use_max);
    line_t r;
    for (int unsigned i = 0; i < LANES; i++) begin
      elem_t x, y;
      x = get_elem(a, i);
      y = get_elem(b, i);
      r[i*ELEM_W +: ELEM_W] = use_max ? ((x > y) ? x : y) : sat_add(x, y);
    end
    return r;
  endfunction

  // number of elements that saturate in line_reduce (sum only)
  function automatic int unsigned line_sat_count(line_t a, line_t b, logic use_max);
    int unsigned n = 0;
    if (!use_max)
      for (int unsigned i = 0; i < LANES; i++) begin
        logic signed [ELEM_W:0] s;
        s = {a[i*ELEM_W+ELEM_W-1], a[i*ELEM_W +: ELEM_W]} + {b[i*ELEM_W+ELEM_W-1], b[i*ELEM_W +: ELEM_W]};
        if (s[ELEM_W] != s[ELEM_W-1]) n++;
      end
    return n;
  endfunction

endpackage
