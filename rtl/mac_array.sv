// mac_array: the ROWS x COLS (4x8 = 32) MAC array of a processing element.
//
// It multiplies one 32x32 weight tile by one 32-element chunk of a node's
// aggregated feature vector. MAC k (k = row*COLS + col) holds row k of the
// tile in its register file and owns output element k of every output tile.
// A tile is loaded one 64-byte row per cycle (rf_we with rf_row = k). Then
// the controller walks j = 0..31, broadcasting feature element x = a[j] to
// all MACs; each adds W[k][j]*a[j] into its accumulator for output tile
// `tile`. So one tile-chunk product takes 32 cycles on 32 MACs, and the
// result tile rd_tile is read out as 32 accumulators in parallel.
//
// The array size and the 32x32 tile come from the paper; the broadcast
// output-stationary dataflow is this design's choice.
module mac_array
  import rubik_pkg::*;
#(
  parameter int unsigned ROWS      = 4,
  parameter int unsigned COLS      = 8,
  parameter int unsigned OUT_TILES = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic rf_we,
  input  logic [$clog2(ROWS*COLS)-1:0] rf_row,
  input  line_t rf_wdata,
  input  logic en,
  input  logic [$clog2(ROWS*COLS)-1:0] j,
  input  elem_t x,
  input  logic [$clog2(OUT_TILES)-1:0] tile,
  input  logic clr,
  input  logic [$clog2(OUT_TILES)-1:0] clr_tile,
  input  logic [$clog2(OUT_TILES)-1:0] rd_tile,
  output acc_t acc_out [ROWS*COLS]
);
  localparam int unsigned N = ROWS * COLS;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned K = r * COLS + c;
      mac_unit #(.RF_DEPTH(N), .OUT_TILES(OUT_TILES)) u_mac (
        .clk, .rst_n,
        .rf_we   (rf_we && rf_row == ($clog2(N))'(K)),
        .rf_wdata(rf_wdata[N*ELEM_W-1:0]),
        .en, .j, .x, .tile, .clr, .clr_tile, .rd_tile,
        .acc_out (acc_out[K])
      );
    end
  end

  initial assert (ROWS * COLS == LANES) else $error("mac_array: ROWS*COLS must equal LANES");
endmodule
