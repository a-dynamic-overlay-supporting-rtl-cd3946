// tb_out_mux: each output link, one clock after its select, carries the PR
// result, the bypassed buffer word or nothing, as selected; several outputs
// may carry the same source.
`timescale 1ns/1ps
module tb_out_mux;
  import overlay_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  link_t pr_in, buf_in;
  src_e  sel [4];
  link_t link_out [4];
  int checks = 0, failures = 0;
  link_t exp_q [4];

  out_mux dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pr_in = '0; buf_in = '0;
    for (int d = 0; d < 4; d++) sel[d] = SRC_OFF;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int k = 0; k < 1000; k++) begin
      pr_in  = '{valid: 1'($urandom_range(0, 1)), data: $urandom};
      buf_in = '{valid: 1'($urandom_range(0, 1)), data: $urandom};
      for (int d = 0; d < 4; d++) begin
        sel[d] = src_e'($urandom_range(0, 2));
        exp_q[d] = (sel[d] == SRC_PR) ? pr_in : (sel[d] == SRC_BUF) ? buf_in : '0;
      end
      @(negedge clk);
      for (int d = 0; d < 4; d++) begin
        checks++;
        if (link_out[d] !== exp_q[d]) begin
          failures++;
          $display("FAIL k=%0d dir %0d sel %0d", k, d, sel[d]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
