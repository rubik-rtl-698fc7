// pe_ctrl: control logic of a processing element; executes the
// micro-instructions one at a time in program order.
//
//   LOADF node, chunk   Look the feature line up in the G-D cache (address
//                       lbase + node*lstride + chunk). On a miss, read it
//                       through the LSQ and fill G-D. Reduce it into the
//                       aggregate register (F_FIRST: overwrite instead).
//   LOADI a, b, chunk   Look the pair (a,b) up in the G-C cache. On a hit,
//                       reduce the stored partial aggregate into the
//                       aggregate register. On a miss, load a and b as two
//                       LOADFs (each through G-D), reduce them into the pair
//                       result, write it to G-C and reduce it into the
//                       aggregate register.
//   COMP  tile, gbaddr  Output tile `tile` += W x aggregate, where W is the
//                       32x32 tile at global-buffer lines gbaddr..gbaddr+31.
//                       The tile is fetched into the MAC register files
//                       (32 GB reads) unless the last COMP already left the
//                       same tile there; then 32 MAC cycles.
//   STORE node, tile    Requantise output tile `tile` (arithmetic shift by
//                       FRAC, saturate to 16 bit, optional ReLU), write it
//                       through to sbase + node*sstride + tile, clear it.
//   CFG, INV            Set a base/stride register; invalidate G-D, G-C and
//                       the loaded weight tile (between layers).
// Reduction is a saturating sum, or element-wise max with F_MAX.
//
// Timing: a G-D or G-C hit takes 2 cycles after issue; a miss adds the LSQ,
// NoC and memory round trip. COMP takes 32 cycles plus, if the tile is not
// resident, 32 global-buffer grants and one cycle of read latency. The
// instruction is popped in the IDLE cycle that starts it.
//
// The four primitives and the G-D/G-C search order follow the paper; the
// encoding, the CFG/INV helpers, the weight-tile residency check and the
// requantisation are this design's choices.
module pe_ctrl
  import rubik_pkg::*;
#(
  parameter int unsigned OUT_TILES = 8,
  parameter int unsigned FRAC      = 8,
  parameter int unsigned GB_AW     = 15
) (
  input  logic   clk,
  input  logic   rst_n,
  // instruction queue
  input  logic   iq_valid,
  input  instr_t iq_head,
  output logic   iq_pop,
  // G-D cache
  output logic   gd_lk_valid,
  output addr_t  gd_lk_addr,
  input  logic   gd_lk_done,
  input  logic   gd_lk_hit,
  input  line_t  gd_lk_data,
  output logic   gd_fill_valid,
  output addr_t  gd_fill_addr,
  output line_t  gd_fill_data,
  output logic   gd_inv,
  // G-C cache
  output logic   gc_lk_valid,
  output node_t  gc_a,
  output node_t  gc_b,
  output logic [CHUNK_W-1:0] gc_chunk,
  output logic   gc_max,
  input  logic   gc_lk_done,
  input  logic   gc_lk_hit,
  input  line_t  gc_lk_data,
  output logic   gc_fill_valid,
  output line_t  gc_fill_data,
  output logic   gc_inv,
  // MAC array
  output logic   mac_rf_we,
  output logic [$clog2(LANES)-1:0] mac_rf_row,
  output line_t  mac_rf_wdata,
  output logic   mac_en,
  output logic [$clog2(LANES)-1:0] mac_j,
  output elem_t  mac_x,
  output logic [$clog2(OUT_TILES)-1:0] mac_tile,
  output logic   mac_clr,
  output logic [$clog2(OUT_TILES)-1:0] mac_rd_tile,
  input  acc_t   mac_acc [LANES],
  // global buffer
  output logic   gb_req,
  output logic [GB_AW-1:0] gb_addr,
  input  logic   gb_gnt,
  input  logic   gb_rvalid,
  input  line_t  gb_rdata,
  // load-store queue
  output logic   lsq_valid,
  output logic   lsq_we,
  output addr_t  lsq_addr,
  output line_t  lsq_data,
  input  logic   lsq_ready,
  input  logic   lsq_rsp_valid,
  input  line_t  lsq_rsp_data,
  // status
  output logic   busy,
  output perf_t  perf
);
  localparam int unsigned TW = $clog2(OUT_TILES);
  localparam int unsigned JW = $clog2(LANES);

  typedef enum logic [3:0] {
    S_IDLE, S_GD_LK, S_GD_RSP, S_MEM_REQ, S_MEM_WAIT,
    S_GC_LK, S_GC_RSP, S_W_LOAD, S_MAC, S_STORE
  } state_e;

  state_e state;
  instr_t ins;
  addr_t  lbase, lstride, sbase, sstride;
  line_t  agg, tmp;
  logic   pair_mode, sub;
  node_t  ld_node;
  logic   w_valid;
  logic [GB_AW-1:0] w_addr;
  logic [JW:0] w_req_cnt, w_rsp_cnt;
  logic [JW-1:0] j_cnt;

  wire logic use_max = ins.flags[F_MAX];
  wire logic first   = ins.flags[F_FIRST];
  wire logic [TW-1:0] ins_tile = ins.node_b[TW-1:0];

  addr_t ld_addr, st_addr;
  assign ld_addr = lbase + addr_t'(ld_node) * lstride + addr_t'(ins.idx[CHUNK_W-1:0]);
  assign st_addr = sbase + addr_t'(ins.node_a) * sstride + addr_t'(ins_tile);

  // ---- a feature line arrives (G-D hit or memory) ----
  logic  absorb;
  line_t in_line, pair_line, agg_src, agg_next;
  logic  finish_pair;
  always_comb begin
    absorb  = (state == S_GD_RSP && gd_lk_done && gd_lk_hit) || (state == S_MEM_WAIT && lsq_rsp_valid);
    in_line = (state == S_GD_RSP) ? gd_lk_data : lsq_rsp_data;
    pair_line   = line_reduce(tmp, in_line, use_max);
    finish_pair = absorb && pair_mode && sub;
    // what is reduced into the aggregate: the line itself, the new pair
    // result, or a G-C hit
    agg_src  = (state == S_GC_RSP) ? gc_lk_data : (pair_mode ? pair_line : in_line);
    agg_next = first ? agg_src : line_reduce(agg, agg_src, use_max);
  end

  // ---- requantised output tile ----
  line_t st_line;
  always_comb begin
    for (int unsigned k = 0; k < LANES; k++) begin
      acc_t  s;
      elem_t e;
      s = mac_acc[k] >>> FRAC;
      if (s > acc_t'(32767))       e = 16'sd32767;
      else if (s < acc_t'(-32768)) e = -16'sd32768;
      else                         e = s[ELEM_W-1:0];
      if (ins.flags[F_RELU] && e < 0) e = '0;
      st_line[k*ELEM_W +: ELEM_W] = e;
    end
  end

  // ---- outputs ----
  always_comb begin
    iq_pop        = (state == S_IDLE) && iq_valid;
    gd_lk_valid   = (state == S_GD_LK);
    gd_lk_addr    = ld_addr;
    gd_fill_valid = (state == S_MEM_WAIT) && lsq_rsp_valid;
    gd_fill_addr  = ld_addr;
    gd_fill_data  = lsq_rsp_data;
    gd_inv        = iq_pop && iq_head.op == OP_INV;
    gc_lk_valid   = (state == S_GC_LK);
    gc_a          = ins.node_a;
    gc_b          = ins.node_b;
    gc_chunk      = ins.idx[CHUNK_W-1:0];
    gc_max        = use_max;
    gc_fill_valid = finish_pair;
    gc_fill_data  = pair_line;
    gc_inv        = gd_inv;
    mac_rf_we     = (state == S_W_LOAD) && gb_rvalid;
    mac_rf_row    = w_rsp_cnt[JW-1:0];
    mac_rf_wdata  = gb_rdata;
    mac_en        = (state == S_MAC);
    mac_j         = j_cnt;
    mac_x         = get_elem(agg, j_cnt);
    mac_tile      = ins_tile;
    mac_rd_tile   = ins_tile;
    mac_clr       = (state == S_STORE) && lsq_ready;
    gb_req        = (state == S_W_LOAD) && (w_req_cnt < (JW+1)'(LANES));
    gb_addr       = w_addr + GB_AW'(w_req_cnt);
    lsq_valid     = (state == S_MEM_REQ) || (state == S_STORE);
    lsq_we        = (state == S_STORE);
    lsq_addr      = (state == S_STORE) ? st_addr : ld_addr;
    lsq_data      = st_line;
    busy          = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ins       <= '0;
      lbase     <= '0; lstride <= '0; sbase <= '0; sstride <= '0;
      agg       <= '0;
      tmp       <= '0;
      pair_mode <= 1'b0;
      sub       <= 1'b0;
      ld_node   <= '0;
      w_valid   <= 1'b0;
      w_addr    <= '0;
      w_req_cnt <= '0;
      w_rsp_cnt <= '0;
      j_cnt     <= '0;
      perf      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (iq_valid) begin
          ins <= iq_head;
          unique case (iq_head.op)
            OP_CFG: unique case (iq_head.node_a[1:0])
              CFG_LBASE:   lbase   <= addr_t'({iq_head.node_b, iq_head.idx});
              CFG_LSTRIDE: lstride <= addr_t'({iq_head.node_b, iq_head.idx});
              CFG_SBASE:   sbase   <= addr_t'({iq_head.node_b, iq_head.idx});
              CFG_SSTRIDE: sstride <= addr_t'({iq_head.node_b, iq_head.idx});
            endcase
            OP_INV: w_valid <= 1'b0;
            OP_LOADF: begin
              pair_mode <= 1'b0;
              ld_node   <= iq_head.node_a;
              state     <= S_GD_LK;
            end
            OP_LOADI: state <= S_GC_LK;
            OP_COMP: begin
              j_cnt <= '0;
              if (w_valid && w_addr == iq_head.idx[GB_AW-1:0]) begin
                perf.w_reuse <= perf.w_reuse + 1;
                state <= S_MAC;
              end else begin
                perf.w_load <= perf.w_load + 1;
                w_valid   <= 1'b0;
                w_addr    <= iq_head.idx[GB_AW-1:0];
                w_req_cnt <= '0;
                w_rsp_cnt <= '0;
                state     <= S_W_LOAD;
              end
            end
            OP_STORE: state <= S_STORE;
            default: ;
          endcase
        end

        S_GD_LK: state <= S_GD_RSP;

        S_GD_RSP: begin
          if (gd_lk_hit) perf.gd_hit <= perf.gd_hit + 1;
          else begin
            perf.gd_miss <= perf.gd_miss + 1;
            state <= S_MEM_REQ;
          end
        end

        S_MEM_REQ: if (lsq_ready) state <= S_MEM_WAIT;
                   else perf.lsq_stall <= perf.lsq_stall + 1;

        S_MEM_WAIT: ;  // leaves through the absorb path below

        S_GC_LK: state <= S_GC_RSP;

        S_GC_RSP: begin
          if (gc_lk_done && gc_lk_hit) begin
            perf.gc_hit <= perf.gc_hit + 1;
            agg   <= agg_next;
            perf.sat <= perf.sat + (first ? 0 : line_sat_count(agg, agg_src, use_max));
            state <= S_IDLE;
          end else begin
            perf.gc_miss <= perf.gc_miss + 1;
            pair_mode <= 1'b1;
            sub       <= 1'b0;
            ld_node   <= ins.node_a;
            state     <= S_GD_LK;
          end
        end

        S_W_LOAD: begin
          if (gb_req && gb_gnt) w_req_cnt <= w_req_cnt + 1'b1;
          if (gb_rvalid) begin
            w_rsp_cnt <= w_rsp_cnt + 1'b1;
            if (w_rsp_cnt == (JW+1)'(LANES - 1)) begin
              w_valid <= 1'b1;
              state   <= S_MAC;
            end
          end
        end

        S_MAC: begin
          j_cnt <= j_cnt + 1'b1;
          if (j_cnt == JW'(LANES - 1)) state <= S_IDLE;
        end

        S_STORE: if (lsq_ready) state <= S_IDLE;
                 else perf.lsq_stall <= perf.lsq_stall + 1;

        default: state <= S_IDLE;
      endcase

      // a feature line has arrived (G-D hit in S_GD_RSP or data in S_MEM_WAIT)
      if (absorb) begin
        if (!pair_mode) begin
          agg   <= agg_next;
          perf.sat <= perf.sat + (first ? 0 : line_sat_count(agg, agg_src, use_max));
          state <= S_IDLE;
        end else if (!sub) begin
          tmp     <= in_line;
          sub     <= 1'b1;
          ld_node <= ins.node_b;
          state   <= S_GD_LK;
        end else begin
          agg   <= agg_next;
          perf.sat <= perf.sat + line_sat_count(tmp, in_line, use_max)
                    + (first ? 0 : line_sat_count(agg, agg_src, use_max));
          state <= S_IDLE;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!(lsq_rsp_valid && state != S_MEM_WAIT)) else $error("pe_ctrl: unexpected read data");
endmodule
