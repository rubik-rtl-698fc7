// mac_unit: one ALU of the MAC array together with its register file.
//
// The register file holds RF_DEPTH (32) signed 16-bit weights: one row of
// the 32x32 weight tile currently loaded into the array (32 weights x 16 bit
// x 32 MACs = the 2 KB register file per PE). It also holds OUT_TILES 32-bit
// accumulators, one per 32-element output tile, so a node's whole output
// vector (up to 32*OUT_TILES elements) stays in the array while the input
// chunks stream past (output-stationary).
//
// Timing: rf_we writes the whole weight row in one cycle. When en is high the
// unit adds rf[j] * x into accumulator tile in that cycle (result visible
// next cycle). clr zeroes accumulator clr_tile; if clr and en hit the same
// tile in one cycle, the product is written alone. acc_out shows accumulator
// rd_tile combinationally. All accumulators reset to zero.
module mac_unit
  import rubik_pkg::*;
#(
  parameter int unsigned RF_DEPTH  = 32,
  parameter int unsigned OUT_TILES = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic rf_we,
  input  logic [RF_DEPTH*ELEM_W-1:0] rf_wdata,
  input  logic en,
  input  logic [$clog2(RF_DEPTH)-1:0] j,
  input  elem_t x,
  input  logic [$clog2(OUT_TILES)-1:0] tile,
  input  logic clr,
  input  logic [$clog2(OUT_TILES)-1:0] clr_tile,
  input  logic [$clog2(OUT_TILES)-1:0] rd_tile,
  output acc_t acc_out
);
  elem_t rf  [RF_DEPTH];
  acc_t  acc [OUT_TILES];
  acc_t  prod;

  assign prod    = ACC_W'(rf[j]) * ACC_W'(x);
  assign acc_out = acc[rd_tile];

  always_ff @(posedge clk) begin
    if (rf_we)
      for (int unsigned i = 0; i < RF_DEPTH; i++) rf[i] <= elem_t'(rf_wdata[i*ELEM_W +: ELEM_W]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned t = 0; t < OUT_TILES; t++) acc[t] <= '0;
    end else begin
      if (clr) acc[clr_tile] <= '0;
      if (en)  acc[tile] <= ((clr && clr_tile == tile) ? '0 : acc[tile]) + prod;
    end
  end
endmodule
