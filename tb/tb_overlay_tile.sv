// tb_overlay_tile: one tile with a short reconfiguration time and small
// memories. Phases: (1) multiplier downloaded, VMAP streams D0[i]*D1[i] out
// of the east link only; (2) pass-through: words on the west link leave on
// the north and south links two clocks later; (3) adder downloaded, the tile
// consumes words from the south link (with gaps) and reduces them into R2,
// then stores R2 into D0, which the host reads back.
`timescale 1ns/1ps
module tb_overlay_tile;
  import overlay_pkg::*;
  localparam int N = 32;
  localparam int PRC = 20;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  link_t       link_in [4], link_out [4];
  logic        h_we = 0, h_ren = 0;
  logic [1:0]  h_sel = 0;
  logic [7:0]  h_addr = 0;
  word_t       h_wdata = 0, h_rdata;
  logic        start = 0, running, halted, cfg_load = 0, cfg_busy;
  opk_e        cfg_op = OPK_NONE, op_id;
  word_t       regs [NREG];
  logic        stall, bypass, consumed, overflow;

  overlay_tile #(.IDEPTH(64), .DDEPTH(256), .PR_CYCLES(PRC)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic logic [31:0] I(opcode_e op, int a = 0, int b = 0, int imm = 0);
    return mk_insn(op, 2'(a), 2'(b), 22'(imm));
  endfunction

  logic [31:0] pq [$];
  task automatic load_prog();
    for (int i = 0; i < pq.size(); i++) begin
      @(negedge clk);
      h_we = 1; h_sel = 0; h_addr = 8'(i); h_wdata = pq[i];
    end
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic run_prog();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
  endtask

  task automatic download(input opk_e op);
    @(negedge clk); cfg_load = 1; cfg_op = op;
    @(negedge clk); cfg_load = 0;
    while (cfg_busy) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t D0 [N], D1 [N];
  initial begin
    int n, got_n, got_s;
    word_t sum, rd;
    word_t sent [$];
    for (int d = 0; d < 4; d++) link_in[d] = '0;
    for (int i = 0; i < N; i++) begin D0[i] = $urandom_range(0, 65535); D1[i] = $urandom_range(0, 65535); end
    repeat (3) @(posedge clk);
    rst <= 0;
    // data
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      h_we = 1; h_sel = (i < N) ? 2'd1 : 2'd2; h_addr = 8'(i % N); h_wdata = (i < N) ? D0[i] : D1[i - N];
    end
    @(negedge clk); h_we = 0;
    // host read back D1[3]
    h_ren = 1; h_sel = 2; h_addr = 3; @(negedge clk); h_ren = 0;
    check("host read D1[3]", h_rdata, D1[3]);

    // (1) multiplier, VMAP to the east
    download(OPK_MUL);
    check("operator loaded", op_id, OPK_MUL);
    pq = {I(OP_ICLR), I(OP_OUT, int'(DIR_E), 0, int'(SRC_PR)), I(OP_VMAP, 0, 0, N), I(OP_HALT)};
    load_prog();
    run_prog();
    n = 0;
    for (int k = 0; k < 200 && !halted; k++) begin
      if (link_out[DIR_E].valid) begin
        if (n < N) check($sformatf("product %0d", n), link_out[DIR_E].data, D0[n] * D1[n]);
        n++;
      end
      if (link_out[DIR_N].valid || link_out[DIR_S].valid || link_out[DIR_W].valid) begin
        failures++; $display("FAIL output on an unselected link");
      end
      @(negedge clk);
    end
    check("product count", n, N);
    check("halted after VMAP", halted, 1);

    // (2) pass-through W -> N and S
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_OUT, int'(DIR_N), 0, int'(SRC_BUF)),
          I(OP_OUT, int'(DIR_S), 0, int'(SRC_BUF)), I(OP_HALT)};
    load_prog();
    run_prog();
    while (!halted) @(negedge clk);
    got_n = 0; got_s = 0;
    for (int k = 0; k < 30; k++) begin
      link_in[DIR_W] = (k < 10) ? '{valid: 1'b1, data: 32'(1000 + k)} : '0;
      link_in[DIR_E] = '{valid: 1'b1, data: 32'hDEAD};     // not selected
      if (k >= 2 && k < 12) begin
        check("bypass N valid 2 clocks later", link_out[DIR_N].valid, 1);
        check("bypass N data", link_out[DIR_N].data, 1000 + k - 2);
        check("bypass S data", link_out[DIR_S].data, 1000 + k - 2);
      end
      got_n += link_out[DIR_N].valid;
      got_s += link_out[DIR_S].valid;
      @(negedge clk);
    end
    link_in[DIR_W] = '0; link_in[DIR_E] = '0;
    check("bypass N count", got_n, 10);
    check("bypass S count", got_s, 10);

    // (3) adder, consume from the south, reduce into R2, store to D0[200]
    download(OPK_ADD);
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_S)), I(OP_CONS, 0, 0, 1), I(OP_LI, 1, 0, 5),
          I(OP_VRED, 1, 0, (1 << 16) | 16), I(OP_ST, 1, 0, 200), I(OP_HALT)};
    load_prog();
    run_prog();
    sum = 5;
    n = 0;
    repeat (8) @(negedge clk);
    while (n < 16) begin
      if ($urandom_range(0, 2) != 0) begin
        link_in[DIR_S] = '{valid: 1'b1, data: 32'(n * 3 + 7)};
        sum += 32'(n * 3 + 7);
        n++;
      end else link_in[DIR_S] = '0;
      @(negedge clk);
    end
    link_in[DIR_S] = '0;
    for (int k = 0; k < 50 && !halted; k++) @(negedge clk);
    check("halted after VRED", halted, 1);
    check("R2 = 5 + sum of stream", regs[1], sum);
    check("no overflow", overflow, 0);
    h_ren = 1; h_sel = 1; h_addr = 200; @(negedge clk); h_ren = 0;
    check("stored D0[200]", h_rdata, sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
