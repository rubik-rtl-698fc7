// tb_mac_unit: loads a random weight row, runs 32 multiply-accumulate steps
// into one accumulator tile and 32 into another, and compares both with a
// dot product computed here; then clears one tile and checks the other is
// kept.
`timescale 1ns/1ps
module tb_mac_unit;
  import rubik_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rf_we, en, clr;
  logic [32*ELEM_W-1:0] rf_wdata;
  logic [4:0] j;
  elem_t x;
  logic [2:0] tile, clr_tile, rd_tile;
  acc_t acc_out;
  int checks = 0, failures = 0;

  mac_unit #(.RF_DEPTH(32), .OUT_TILES(8)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int w [32];
    int xs [2][32];
    int exp [2];
    rf_we = 0; en = 0; clr = 0; rf_wdata = 0; j = 0; x = 0; tile = 0; clr_tile = 0; rd_tile = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      w[i] = int'($urandom % 65536) - 32768;
      rf_wdata[i*ELEM_W +: ELEM_W] = ELEM_W'(w[i]);
    end
    rf_we = 1;
    @(negedge clk);
    rf_we = 0;
    for (int t = 0; t < 2; t++) begin
      exp[t] = 0;
      for (int i = 0; i < 32; i++) begin
        xs[t][i] = int'($urandom % 65536) - 32768;
        exp[t] += w[i] * xs[t][i];
        en = 1; j = 5'(i); x = ELEM_W'(xs[t][i]); tile = 3'(t * 5);
        @(negedge clk);
      end
    end
    en = 0;
    rd_tile = 0; #1 chk(acc_out == exp[0], "tile 0 dot product");
    rd_tile = 5; #1 chk(acc_out == exp[1], "tile 5 dot product");
    rd_tile = 2; #1 chk(acc_out == 0, "untouched tile is zero");
    clr = 1; clr_tile = 0;
    @(negedge clk);
    clr = 0;
    rd_tile = 0; #1 chk(acc_out == 0, "cleared tile");
    rd_tile = 5; #1 chk(acc_out == exp[1], "other tile kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
