// tb_data_bram: random reads and writes on both ports against a model:
// one clock read latency, old data on read-during-write, port B winning a
// same-address write collision.
`timescale 1ns/1ps
module tb_data_bram;
  import overlay_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = 0, b_addr = 0;
  word_t a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  word_t model [DEPTH];
  word_t ea, eb;
  int checks = 0, failures = 0;

  data_bram dut (.*);

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    // initialise the first 64 words through port A and B alternately
    for (int a = 0; a < 64; a++) begin
      a_en = 1; a_we = 1; a_addr = 12'(a); a_wdata = 32'(a * 7 + 1);
      b_en = 0; b_we = 0;
      model[a] = 32'(a * 7 + 1);
      @(negedge clk);
    end
    a_en = 0; a_we = 0;
    for (int k = 0; k < 5000; k++) begin
      a_en = 1'($urandom_range(0, 3) != 0); a_we = 1'($urandom_range(0, 1));
      b_en = 1'($urandom_range(0, 3) != 0); b_we = 1'($urandom_range(0, 1));
      a_addr = 12'($urandom_range(0, 63)); b_addr = 12'($urandom_range(0, 63));
      if (k % 16 == 0) b_addr = a_addr;
      a_wdata = $urandom; b_wdata = $urandom;
      ea = model[a_addr]; eb = model[b_addr];
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(negedge clk);
      if (a_en) begin
        checks++;
        if (a_rdata !== ea) begin failures++; $display("FAIL A k=%0d addr %0d", k, a_addr); end
      end
      if (b_en) begin
        checks++;
        if (b_rdata !== eb) begin failures++; $display("FAIL B k=%0d addr %0d", k, b_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
