// tb_inst_bram: fills the whole instruction memory with a pseudo-random
// pattern and reads it back in random order, one clock read latency; rdata
// holds while ren is low.
`timescale 1ns/1ps
module tb_inst_bram;
  localparam int DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, ren = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  int checks = 0, failures = 0;

  inst_bram dut (.*);

  function automatic logic [31:0] pat(int a);
    return 32'(a) * 32'h9E3779B1 ^ 32'h5A5A0F0F;
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 10'(a); wdata = pat(a);
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 2000; k++) begin
      int a = $urandom_range(0, DEPTH - 1);
      ren = 1; raddr = 10'(a);
      @(negedge clk);
      ren = 0; raddr = 10'($urandom);
      checks++;
      if (rdata !== pat(a)) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rdata !== pat(a)) begin failures++; $display("FAIL hold addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
