// tb_instr_queue: fills the instruction queue to its depth, checks that it
// refuses more, drains it and checks order, then runs simultaneous push and
// pop for a stretch of random traffic against a model queue.
`timescale 1ns/1ps
module tb_instr_queue;
  import rubik_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, head_valid, pop, empty;
  instr_t push_instr, head;
  int checks = 0, failures = 0;
  instr_t model [$];

  instr_queue #(.DEPTH(16)) dut (.*);

  function automatic instr_t rnd();
    instr_t i;
    i = {$urandom, $urandom};
    return i;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    push_valid = 0; pop = 0; push_instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(empty && !head_valid, "empty after reset");
    for (int i = 0; i < 16; i++) begin
      push_valid = 1; push_instr = rnd();
      #1 chk(push_ready, "ready while not full");
      model.push_back(push_instr);
      @(negedge clk);
    end
    #1 chk(!push_ready, "full after 16");
    push_valid = 0;
    for (int i = 0; i < 16; i++) begin
      #1 chk(head_valid && head == model[0], "order");
      void'(model.pop_front());
      pop = 1;
      @(negedge clk);
    end
    pop = 0;
    #1 chk(empty, "empty after drain");
    for (int t = 0; t < 400; t++) begin
      bit p, q, pr, hv;
      instr_t h;
      p = ($urandom % 2);
      q = ($urandom % 2);
      push_valid = p; push_instr = rnd(); pop = 0;
      #1;
      pop = q && head_valid;
      #1;
      pr = push_ready; hv = head_valid; h = head;
      if (q && hv) begin
        chk(h == model[0], "random order");
        void'(model.pop_front());
      end
      if (p && pr) model.push_back(push_instr);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
