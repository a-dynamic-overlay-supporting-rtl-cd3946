// tb_reg_file: random writes from both ports against a model; reset clears,
// and the PR region's port wins when both write the same register.
`timescale 1ns/1ps
module tb_reg_file;
  import overlay_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic       pr_we = 0, ct_we = 0;
  logic [1:0] pr_idx = 0, ct_idx = 0;
  word_t      pr_wdata = 0, ct_wdata = 0;
  word_t      regs [NREG];
  word_t      model [NREG];
  int checks = 0, failures = 0;

  reg_file dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int i = 0; i < NREG; i++) begin
      model[i] = '0;
      checks++;
      if (regs[i] !== '0) begin failures++; $display("FAIL reset R%0d", i + 1); end
    end
    for (int k = 0; k < 1000; k++) begin
      pr_we = 1'($urandom_range(0, 1)); pr_idx = 2'($urandom); pr_wdata = $urandom;
      ct_we = 1'($urandom_range(0, 1)); ct_idx = 2'($urandom); ct_wdata = $urandom;
      if (k % 10 == 0) begin ct_idx = pr_idx; ct_we = 1; pr_we = 1; end
      if (ct_we) model[ct_idx] = ct_wdata;
      if (pr_we) model[pr_idx] = pr_wdata;
      @(negedge clk);
      for (int i = 0; i < NREG; i++) begin
        checks++;
        if (regs[i] !== model[i]) begin failures++; $display("FAIL k=%0d R%0d", k, i + 1); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
