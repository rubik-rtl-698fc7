// tb_mac_array: loads a random 32x32 weight tile row by row, streams a
// 32-element feature chunk (one element per cycle, 32 cycles as the array
// computes one tile-chunk product in 32 cycles), accumulates a second chunk
// into the same output tile, and checks all 32 outputs against a
// matrix-vector product computed here.
`timescale 1ns/1ps
module tb_mac_array;
  import rubik_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rf_we, en, clr;
  logic [4:0] rf_row, j;
  line_t rf_wdata;
  elem_t x;
  logic [2:0] tile, clr_tile, rd_tile;
  acc_t acc_out [32];
  int checks = 0, failures = 0;

  mac_array #(.ROWS(4), .COLS(8), .OUT_TILES(8)) dut (.*);

  initial begin
    int w [2][32][32];
    int a [2][32];
    int exp [32];
    int cyc;
    rf_we = 0; en = 0; clr = 0; rf_row = 0; rf_wdata = 0; j = 0; x = 0; tile = 0; clr_tile = 0; rd_tile = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 32; k++) exp[k] = 0;
    @(negedge clk);
    for (int t = 0; t < 2; t++) begin
      for (int k = 0; k < 32; k++) begin
        for (int i = 0; i < 32; i++) begin
          w[t][k][i] = int'($urandom % 4096) - 2048;
          rf_wdata[i*ELEM_W +: ELEM_W] = ELEM_W'(w[t][k][i]);
        end
        rf_we = 1; rf_row = 5'(k);
        @(negedge clk);
      end
      rf_we = 0;
      for (int i = 0; i < 32; i++) a[t][i] = int'($urandom % 4096) - 2048;
      for (int k = 0; k < 32; k++)
        for (int i = 0; i < 32; i++) exp[k] += w[t][k][i] * a[t][i];
      cyc = 0;
      for (int i = 0; i < 32; i++) begin
        en = 1; j = 5'(i); x = ELEM_W'(a[t][i]); tile = 3'd3;
        @(negedge clk);
        cyc++;
      end
      en = 0;
      checks++;
      if (cyc != 32) failures++;
    end
    rd_tile = 3;
    #1;
    for (int k = 0; k < 32; k++) begin
      checks++;
      if (acc_out[k] != exp[k]) begin
        failures++;
        $display("FAIL out %0d got %0d exp %0d", k, acc_out[k], exp[k]);
      end
    end
    clr = 1; clr_tile = 3;
    @(negedge clk);
    clr = 0;
    #1;
    checks++;
    if (acc_out[7] != 0) failures++;
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
