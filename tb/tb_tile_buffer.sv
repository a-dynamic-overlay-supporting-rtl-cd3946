// tb_tile_buffer: random pushes and pops against a queue model. Checks the
// head word, the empty and full flags, that a word pushed into an empty
// buffer is visible one clock later, and that the overflow flag rises on the
// first push into a full buffer (and not before).
`timescale 1ns/1ps
module tb_tile_buffer;
  import overlay_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic  push = 0, pop = 0;
  word_t din = 0, head;
  logic  not_empty, full, overflow;
  int checks = 0, failures = 0;
  word_t model [$];
  logic  ovf_model = 0;

  tile_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check("empty after reset", not_empty, 0);
    // push one word; visible after one clock
    push = 1; din = 32'h1234; @(negedge clk); push = 0;
    check("head after one push", head, 32'h1234);
    check("not empty after push", not_empty, 1);
    pop = 1; @(negedge clk); pop = 0;
    check("empty after pop", not_empty, 0);
    // random phase: push bias high then low
    for (int k = 0; k < 3000; k++) begin
      int pp = (k / 500) % 2 ? 30 : 80;
      push = ($urandom_range(0, 99) < pp);
      pop  = not_empty && ($urandom_range(0, 99) < 55);
      din  = $urandom;
      if (model.size() > 0) check("head", head, model[0]);
      check("not_empty", not_empty, model.size() > 0);
      check("full", full, model.size() == DEPTH);
      check("overflow", overflow, ovf_model);
      @(posedge clk);
      // model update at the edge
      if (pop && model.size() > 0) void'(model.pop_front());
      if (push) begin
        if (model.size() < DEPTH) model.push_back(din);
        else ovf_model = 1;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
