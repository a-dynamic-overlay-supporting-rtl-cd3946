// tb_tile_controller: runs one program through the controller with the
// instruction BRAM, registers, data BRAMs and PR region modelled here.
// The program sets the interconnect, runs a counting loop (BLT), stores and
// loads a register (ST, LD), takes and skips branches (BEQ, BNE, JMP), issues
// a VMAP while the PR region is still downloading (it must stall) and a VRED,
// then clears the interconnect and halts. Checks the interconnect settings,
// register and memory results, the PR start requests and the cycle count
// (two clocks per instruction, three for LD, fetch + execute + PR time for
// vector instructions, plus stall clocks).
`timescale 1ns/1ps
module tb_tile_controller;
  import overlay_pkg::*;
  localparam int P = 5;        // PR operation time of the model
  localparam int K = 60;       // download still running for K clocks after start

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        start = 0, running, halted, i_ren;
  logic [9:0]  i_addr;
  logic [31:0] i_rdata;
  logic        in_en, consume;
  dir_e        in_sel;
  src_e        out_sel [4];
  logic        pr_cfg_busy = 0, pr_busy, pr_done, pr_start, pr_stream, pr_store;
  vmode_e      pr_mode;
  logic [15:0] pr_len;
  logic [1:0]  pr_red_reg;
  word_t       regs [NREG];
  logic        r_we, d_en, d_bank, d_we, stall;
  logic [1:0]  r_idx;
  word_t       r_wdata, d_wdata, d0_rdata, d1_rdata;
  logic [11:0] d_addr;

  tile_controller dut (.*);

  // models
  logic [31:0] imem [64];
  word_t D0 [16], D1 [16];
  int pr_cnt = 0;
  always_ff @(posedge clk) if (i_ren) i_rdata <= imem[i_addr[5:0]];
  always_ff @(posedge clk) if (r_we) regs[r_idx] <= r_wdata;
  always_ff @(posedge clk) if (d_en) begin
    if (d_we && !d_bank) D0[d_addr[3:0]] <= d_wdata;
    if (d_we &&  d_bank) D1[d_addr[3:0]] <= d_wdata;
    d0_rdata <= D0[d_addr[3:0]];
    d1_rdata <= D1[d_addr[3:0]];
  end
  always_ff @(posedge clk) begin
    if (pr_start) pr_cnt <= P;
    else if (pr_cnt > 0) pr_cnt <= pr_cnt - 1;
  end
  assign pr_busy = (pr_cnt != 0);
  assign pr_done = (pr_cnt == 1);

  int checks = 0, failures = 0;
  longint cycle = 0;
  int n_stall = 0, n_start = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (stall) n_stall <= n_stall + 1;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic logic [31:0] I(opcode_e op, int a = 0, int b = 0, int imm = 0);
    return mk_insn(op, 2'(a), 2'(b), 22'(imm));
  endfunction

  // PR start requests as issued, with the interconnect at that moment
  always @(posedge clk) if (pr_start) begin
    n_start++;
    if (n_start == 1) begin
      check("1st start mode MAP", pr_mode, VM_MAP);
      check("1st start len", pr_len, 10);
      check("1st start stream", pr_stream, 1);
      check("1st start store", pr_store, 1);
      check("in_en", in_en, 1);
      check("in_sel W", in_sel, DIR_W);
      check("out E = PR", out_sel[DIR_E], SRC_PR);
      check("out N = BUF", out_sel[DIR_N], SRC_BUF);
      check("out S off", out_sel[DIR_S], SRC_OFF);
      check("consume", consume, 1);
      check("not started during download", pr_cfg_busy, 0);
    end else begin
      check("2nd start mode RED", pr_mode, VM_RED);
      check("2nd start len", pr_len, 20);
      check("2nd start reg R4", pr_red_reg, 3);
      check("2nd start stream", pr_stream, 1);
      check("2nd start no store", pr_store, 0);
    end
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    for (int i = 0; i < 64; i++) imem[i] = '0;
    for (int i = 0; i < NREG; i++) regs[i] = '0;
    for (int i = 0; i < 16; i++) begin D0[i] = '0; D1[i] = '0; end
    imem[0]  = I(OP_IN, 0, 0, 3);                 // In Mux <- W
    imem[1]  = I(OP_OUT, 1, 0, int'(SRC_PR));     // Es <- PR
    imem[2]  = I(OP_OUT, 0, 0, int'(SRC_BUF));    // Ns <- buffer
    imem[3]  = I(OP_CONS, 0, 0, 1);
    imem[4]  = I(OP_LI, 0, 0, 16'hFFFD);          // R1 = -3
    imem[5]  = I(OP_LI, 1, 0, 2);                 // R2 = 2
    imem[6]  = I(OP_ADDI, 0, 0, 1);               // R1 += 1
    imem[7]  = I(OP_BLT, 0, 1, 6);                // while R1 < R2
    imem[8]  = I(OP_ST, 0, 0, (1 << 20) | 7);     // D1[7] = R1
    imem[9]  = I(OP_LD, 2, 0, (1 << 20) | 7);     // R3 = D1[7]
    imem[10] = I(OP_BEQ, 2, 1, 12);               // taken
    imem[11] = I(OP_LI, 3, 0, 99);                // skipped
    imem[12] = I(OP_VMAP, 0, 0, (3 << 16) | 10);
    imem[13] = I(OP_VRED, 3, 0, (1 << 16) | 20);
    imem[14] = I(OP_MOV, 3, 0);                   // R4 = R1
    imem[15] = I(OP_BNE, 0, 1, 17);               // not taken
    imem[16] = I(OP_JMP, 0, 0, 18);
    imem[17] = I(OP_LI, 3, 0, 55);                // skipped
    imem[18] = I(OP_ICLR);
    imem[19] = I(OP_HALT);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check("idle after reset", running, 0);
    pr_cfg_busy = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cycle;
    for (int k = 0; k < 600 && !halted; k++) begin
      if (cycle - t0 == K) pr_cfg_busy = 0;
      @(negedge clk);
    end
    check("halted", halted, 1);
    check("R1", regs[0], 2);
    check("R2", regs[1], 2);
    check("R3 loaded", regs[2], 2);
    check("R4 = R1, skipped LIs", regs[3], 2);
    check("D1[7] stored", D1[7], 2);
    check("two PR starts", n_start, 2);
    check("stall seen", n_stall > 0, 1);
    // VMAP reaches execute after 18 two-clock instructions, one LD and its fetch
    check("stall length", n_stall, K - (2 * 18 + 3 + 1));
    check("interconnect cleared", {in_en, consume, out_sel[0], out_sel[1], out_sel[2], out_sel[3]}, 0);
    check("cycles", cycle - t0, 2 * 23 + 3 + 2 * (2 + P) + n_stall);
    $display("program took %0d clocks, %0d of them stalled", cycle - t0, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
