// tb_dynamic_overlay: end-to-end test of the 3 x 3 dynamic overlay at its
// default sizes (4096-word data BRAMs, 125000-cycle reconfiguration).
//
// Workload: the dot product sum(A[i] * B[i]) of two 4096-word vectors (16
// KBytes each), assembled from a multiplier tile (VMAP) and an adder tile
// (VRED over the stream), placed three ways on the mesh:
//   0 hops : multiplier (0,0) -> adder (0,1)
//   1 hop  : multiplier (0,0) -> (1,0) pass-through -> adder (2,0)
//   2 hops : multiplier (1,2) -> (2,2) -> (2,1) pass-through -> adder (2,0)
// It checks each sum against a sum computed here, that the run streams one
// word per clock, and that each pass-through tile adds exactly two clocks.
// Further phases check a branching loop with store and load, an edge-to-edge
// bypass across a row, a reduction from a data BRAM with a MAX operator, and
// a route that a tile picks by branching on a value in its data BRAM,
// a three-tile chain in which the middle tile adds a local vector to a
// passing stream and stores the result, and a buffer overflow. Every mechanism (reconfiguration stall, consume, bypass,
// branch taken, load/store, overflow) must be seen at least once.
`timescale 1ns/1ps
module tb_dynamic_overlay;
  import overlay_pkg::*;

  localparam int ROWS = 3, COLS = 3, NT = 9;
  localparam int N = 4096;
  localparam int PRC = 125000;
  localparam int NC = 64;      // length of the chain phase

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          h_we = 0, h_ren = 0;
  logic [3:0]    h_tile = 0;
  logic [1:0]    h_sel = 0;
  logic [11:0]   h_addr = 0;
  word_t         h_wdata = 0, h_rdata;
  logic [NT-1:0] start = 0, running, halted, cfg_busy, stall, bypass, consumed, overflow;
  logic          cfg_load = 0;
  logic [3:0]    cfg_tile = 0;
  opk_e          cfg_op = OPK_NONE;
  opk_e          op_id [NT];
  word_t         regs [NT][NREG];
  link_t         north_in [COLS], north_out [COLS], south_in [COLS], south_out [COLS];
  link_t         west_in [ROWS], west_out [ROWS], east_in [ROWS], east_out [ROWS];

  dynamic_overlay dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_stall = 0, n_bypass = 0, n_consume = 0, n_overflow = 0, n_reconf = 0, n_branch = 0, n_ldst = 0, n_store = 0;
  always @(posedge clk) if (!rst) begin
    n_stall   <= n_stall   + $countones(stall);
    n_bypass  <= n_bypass  + $countones(bypass);
    n_consume <= n_consume + $countones(consumed);
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic hread(input int t, input int sel, input int addr, output word_t d);
    h_ren <= 1; h_tile <= 4'(t); h_sel <= 2'(sel); h_addr <= 12'(addr);
    @(posedge clk);
    h_ren <= 0;
    @(posedge clk);
    #1 d = h_rdata;
  endtask

  // program to load; a module-level queue, copied word by word
  logic [31:0] pq [$];
  task automatic load_prog(input int t);
    for (int i = 0; i < pq.size(); i++) begin
      h_we <= 1; h_tile <= 4'(t); h_sel <= 2'd0; h_addr <= 12'(i); h_wdata <= pq[i];
      @(posedge clk);
    end
    h_we <= 0;
  endtask

  task automatic reconfigure(input int t, input opk_e op);
    cfg_load <= 1; cfg_tile <= 4'(t); cfg_op <= op;
    @(posedge clk);
    cfg_load <= 0;
    n_reconf++;
  endtask

  function automatic logic [31:0] I(opcode_e op, int a = 0, int b = 0, int imm = 0);
    return mk_insn(op, 2'(a), 2'(b), 22'(imm));
  endfunction

  // A start pulse of one clock; halted drops at the clock edge that takes it.
  task automatic pulse_start(input logic [NT-1:0] m);
    start <= m;
    @(posedge clk);
    start <= '0;
    @(posedge clk);
  endtask

  task automatic wait_halt(input int t, input int limit);
    int k = 0;
    while (!halted[t] && k < limit) begin @(posedge clk); k++; end
    check($sformatf("tile %0d halted", t), halted[t], 1);
  endtask

  word_t A [N], B [N], C [NC];
  word_t expected;
  longint lat [3];

  // Run one placement: producer p with route-out direction pdir; list of
  // pass-through tiles with (in, out) directions; consumer c with in dir.
  task automatic run_dot(input int scen, input int p, input dir_e pdir,
                         input int pt [$], input dir_e pt_in [$], input dir_e pt_out [$],
                         input int c, input dir_e cdir);
    longint t0;
    logic [NT-1:0] smask;
    // consumer: route in, consume, clear R1, reduce N words from the stream into R1
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(cdir)), I(OP_CONS, 0, 0, 1), I(OP_LI, 1, 0, 0),
            I(OP_VRED, 1, 0, (1 << 16) | N), I(OP_HALT)};
    load_prog(c);
    // (unrolled: no loop around a task that waits for the clock)
    if (pt.size() > 0) begin
      pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(pt_in[0])), I(OP_OUT, int'(pt_out[0]), 0, int'(SRC_BUF)), I(OP_HALT)};
      load_prog(pt[0]);
    end
    if (pt.size() > 1) begin
      pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(pt_in[1])), I(OP_OUT, int'(pt_out[1]), 0, int'(SRC_BUF)), I(OP_HALT)};
      load_prog(pt[1]);
    end
    pq = {I(OP_ICLR), I(OP_OUT, int'(pdir), 0, int'(SRC_PR)), I(OP_VMAP, 0, 0, N), I(OP_HALT)};
    load_prog(p);
    // start consumer and pass-through tiles first, so that routes exist
    smask = '0;
    smask[c] = 1'b1;
    foreach (pt[i]) smask[pt[i]] = 1'b1;
    start <= smask;
    @(posedge clk);
    start <= '0;
    repeat (20) @(posedge clk);
    start[p] <= 1;
    t0 = cycle;
    @(posedge clk);
    start <= '0;
    wait_halt(c, N + PRC * 2 + 1000);
    lat[scen] = cycle - t0;
    check($sformatf("scenario %0d dot product", scen), regs[c][1], expected);
    wait_halt(p, 100);
    $display("scenario %0d (%0d hops): result %0d, %0d cycles from producer start to consumer halt",
             scen, pt.size(), regs[c][1], lat[scen]);
  endtask

  // Data-dependent routing: tile 4 reads a flag from its D0 and, by a
  // branch, forwards the stream arriving from the west either east (flag
  // non-zero, out through tile 5) or south (flag zero, out through tile 7).
  task automatic run_branch_route(input word_t flag);
    int got_e, got_s;
    longint tin;
    h_we <= 1; h_tile <= 4'd4; h_sel <= 2'd1; h_addr <= 12'd10; h_wdata <= flag;
    @(posedge clk);
    h_we <= 0;
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_OUT, int'(DIR_E), 0, int'(SRC_BUF)), I(OP_HALT)};
    load_prog(3);
    load_prog(5);
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_N)), I(OP_OUT, int'(DIR_S), 0, int'(SRC_BUF)), I(OP_HALT)};
    load_prog(7);
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_LD, 0, 0, 10), I(OP_LI, 1, 0, 0),
          I(OP_BEQ, 0, 1, 7), I(OP_OUT, int'(DIR_E), 0, int'(SRC_BUF)), I(OP_JMP, 0, 0, 8),
          I(OP_OUT, int'(DIR_S), 0, int'(SRC_BUF)), I(OP_HALT)};
    load_prog(4);
    pulse_start(9'b010111000);
    wait_halt(4, 100);
    got_e = 0; got_s = 0;
    @(negedge clk);
    tin = cycle;
    for (int k = 0; k < 30; k++) begin
      west_in[1] = (k < 8) ? '{valid: 1'b1, data: flag + 32'(k)} : '0;
      if (east_out[1].valid) begin
        check("routed east: data", east_out[1].data, flag + 32'(got_e));
        check("routed east: latency", cycle - tin - got_e, 6);
        got_e++;
      end
      if (south_out[1].valid) begin
        check("routed south: data", south_out[1].data, flag + 32'(got_s));
        check("routed south: latency", cycle - tin - got_s, 6);
        got_s++;
      end
      @(negedge clk);
    end
    west_in[1] = '0;
    check("words routed east", got_e, (flag != 0) ? 8 : 0);
    check("words routed south", got_s, (flag != 0) ? 0 : 8);
    n_branch++;
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    word_t rd;
    int pt [$];
    int vt [2] = '{0, 5};
    dir_e pin [$], pout [$];
    foreach (north_in[i]) begin north_in[i] = '0; south_in[i] = '0; end
    foreach (west_in[i])  begin west_in[i]  = '0; east_in[i]  = '0; end
    expected = '0;
    for (int i = 0; i < N; i++) begin
      A[i] = $urandom_range(0, 100000) - 50000;
      B[i] = $urandom_range(0, 100000) - 50000;
      expected += A[i] * B[i];
    end
    repeat (5) @(posedge clk);
    rst <= 0;
    @(posedge clk);

    // ---- download operators: multipliers at tiles 0 and 5, adders at 1 and 6
    reconfigure(0, OPK_MUL);
    reconfigure(1, OPK_ADD);
    reconfigure(5, OPK_MUL);
    reconfigure(6, OPK_ADD);
    check("tile 0 blank while downloading", op_id[0], OPK_NONE);
    check("tile 0 cfg_busy", cfg_busy[0], 1);
    // ---- vectors into the multiplier tiles
    foreach (vt[k]) for (int i = 0; i < 2 * N; i++) begin
      h_we <= 1; h_tile <= 4'(vt[k]); h_sel <= (i < N) ? 2'd1 : 2'd2; h_addr <= 12'(i % N);
      h_wdata <= (i < N) ? A[i] : B[i - N];
      @(posedge clk);
    end
    h_we <= 0;
    hread(0, 2, 77, rd);
    check("host read back D1[77]", rd, B[77]);

    // scenario 0 starts while the regions are still downloading: VMAP must stall
    pt = {}; pin = {}; pout = {};
    run_dot(0, 0, DIR_E, pt, pin, pout, 1, DIR_W);
    check("operator in tile 0 after download", op_id[0], OPK_MUL);
    check("stall seen during download", n_stall > 0, 1);
    // scenario 0 again, regions now loaded, for the latency
    run_dot(0, 0, DIR_E, pt, pin, pout, 1, DIR_W);
    check("no-hop latency within N+16", lat[0] <= N + 16, 1);
    check("no-hop latency at least N", lat[0] >= N, 1);
    // scenario 1: one pass-through tile (1,0)
    pt = {3}; pin = {DIR_N}; pout = {DIR_S};
    run_dot(1, 0, DIR_S, pt, pin, pout, 6, DIR_N);
    check("one hop adds 2 cycles", lat[1] - lat[0], 2);
    // scenario 2: two pass-through tiles (2,2) and (2,1)
    pt = {8, 7}; pin = {DIR_N, DIR_E}; pout = {DIR_W, DIR_W};
    run_dot(2, 5, DIR_S, pt, pin, pout, 6, DIR_E);
    check("two hops add 4 cycles", lat[2] - lat[0], 4);

    // ---- branching, register and memory instructions on tile 4
    // R0 = 0; R1 = 5; loop: R0 += 1; if R0 < R1 goto loop;
    // D0[100] = R0; R2 = D0[100]; if R2 != R1 goto bad; R3 = 77; D1[5] = R3; halt
    // bad: R3 = 13; D1[5] = R3; halt
    pq = {I(OP_LI, 0, 0, 0), I(OP_LI, 1, 0, 5), I(OP_ADDI, 0, 0, 1), I(OP_BLT, 0, 1, 2),
            I(OP_ST, 0, 0, 100), I(OP_LD, 2, 0, 100), I(OP_BNE, 2, 1, 10), I(OP_LI, 3, 0, 77),
            I(OP_ST, 3, 0, (1 << 20) | 5), I(OP_HALT),
            I(OP_LI, 3, 0, 13), I(OP_ST, 3, 0, (1 << 20) | 5), I(OP_HALT)};
    load_prog(4);
    pulse_start(9'b000010000);
    begin
      longint tb0;
      tb0 = cycle;
      wait_halt(4, 1000);
      // 17 two-clock instructions (2 LI, 5 x (ADDI + BLT), ST, BNE, LI, ST, HALT),
      // and one three-clock LD, counted from the clock after the start pulse
      check("loop program cycles", cycle - tb0, 2 * 17 + 3);
    end
    n_branch += 4; n_ldst += 3;
    check("loop count R0", regs[4][0], 5);
    check("loaded R2", regs[4][2], 5);
    hread(4, 2, 5, rd);
    check("branch path result D1[5]", rd, 77);
    hread(4, 1, 100, rd);
    check("stored D0[100]", rd, 5);

    // ---- edge-to-edge bypass along row 1: west_in[1] -> tiles 3,4,5 -> east_out[1]
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_OUT, int'(DIR_E), 0, int'(SRC_BUF)), I(OP_HALT)};
    load_prog(3);
    load_prog(4);
    load_prog(5);
    pulse_start(9'b000111000);
    wait_halt(3, 100); wait_halt(4, 100); wait_halt(5, 100);
    begin
      int got = 0;
      longint tin;
      @(negedge clk);
      west_in[1] = '{valid: 1'b1, data: 32'hCAFE0000};
      tin = cycle;
      @(negedge clk);
      west_in[1] = '0;
      for (int k = 0; k < 20; k++) begin
        @(negedge clk);
        if (east_out[1].valid) begin
          got++;
          check("edge bypass data", east_out[1].data, 32'hCAFE0000);
          check("edge bypass latency (3 tiles x 2)", cycle - tin, 6);
        end
      end
      check("edge bypass word count", got, 1);
    end

    // ---- MAX operator reducing D0 from BRAM (no stream) on tile 2
    reconfigure(2, OPK_MAX);
    for (int i = 0; i < 64; i++) begin
      h_we <= 1; h_tile <= 4'd2; h_sel <= 2'd1; h_addr <= 12'(i); h_wdata <= A[i];
      @(posedge clk);
    end
    h_we <= 0;
    pq = {I(OP_LI, 2, 0, 16'h8000), I(OP_ADDI, 2, 0, 16'h8000), I(OP_ADDI, 2, 0, 16'h8000),
            I(OP_VRED, 2, 0, 64), I(OP_HALT)};
    load_prog(2);
    pulse_start(9'b000000100);
    wait_halt(2, PRC + 1000);
    begin
      word_t m = 32'h8000_0000;
      // R2 starts at -32768*3 = -98304, below every A[i]
      m = -98304;
      for (int i = 0; i < 64; i++) if ($signed(A[i]) > $signed(m)) m = A[i];
      check("MAX reduction from D0", regs[2][2], m);
    end

    // ---- three-stage chain along row 0: tile 0 multiplies, tile 1 adds C[i]
    // to each product as it streams past and stores it in its D0, tile 2
    // takes the maximum (operators already loaded: MUL, ADD, MAX)
    for (int i = 0; i < NC; i++) begin
      C[i] = $urandom;
      h_we <= 1; h_tile <= 4'd1; h_sel <= 2'd2; h_addr <= 12'(i); h_wdata <= C[i];
      @(posedge clk);
    end
    h_we <= 0;
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_CONS, 0, 0, 1), I(OP_LI, 0, 0, 16'h8000),
          I(OP_ADDI, 0, 0, 16'h8000), I(OP_ADDI, 0, 0, 16'h8000), I(OP_VRED, 0, 0, (1 << 16) | NC), I(OP_HALT)};
    load_prog(2);
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_CONS, 0, 0, 1), I(OP_OUT, int'(DIR_E), 0, int'(SRC_PR)),
          I(OP_VMAP, 0, 0, (3 << 16) | NC), I(OP_HALT)};
    load_prog(1);
    pq = {I(OP_ICLR), I(OP_OUT, int'(DIR_E), 0, int'(SRC_PR)), I(OP_VMAP, 0, 0, NC), I(OP_HALT)};
    load_prog(0);
    pulse_start(9'b000000110);
    repeat (20) @(posedge clk);
    pulse_start(9'b000000001);
    wait_halt(2, 1000);
    wait_halt(1, 100);
    begin
      word_t m, y;
      m = -98304;
      for (int i = 0; i < NC; i++) begin
        y = A[i] * B[i] + C[i];
        if ($signed(y) > $signed(m)) m = y;
        h_ren <= 1; h_tile <= 4'd1; h_sel <= 2'd1; h_addr <= 12'(i);
        @(posedge clk);
        h_ren <= 0;
        @(posedge clk);
        #1;
        check($sformatf("chain stored D0[%0d] in tile 1", i), h_rdata, y);
        if (h_rdata === y) n_store++;
      end
      check("chain maximum in tile 2", regs[2][0], m);
    end

    // ---- the route chosen by a branch on data
    run_branch_route(32'd1000);
    run_branch_route(32'd0);

    // ---- buffer overflow: tile 3 takes west_in[1] but nothing drains it
    pq = {I(OP_ICLR), I(OP_IN, 0, 0, int'(DIR_W)), I(OP_HALT)};
    load_prog(3);
    pulse_start(9'b000001000);
    wait_halt(3, 100);
    check("no overflow before", overflow[3], 0);
    check("no overflow anywhere else", overflow, 9'b0);
    @(negedge clk);
    for (int k = 0; k < 20; k++) begin
      west_in[1] = '{valid: 1'b1, data: 32'(k)};
      @(negedge clk);
    end
    west_in[1] = '0;
    check("overflow after 20 words into 16", overflow[3], 1);
    if (overflow[3]) n_overflow++;

    // ---- every mechanism happened
    check("mechanism: reconfiguration", n_reconf > 0, 1);
    check("mechanism: stall", n_stall > 0, 1);
    check("mechanism: consume", n_consume > 0, 1);
    check("mechanism: bypass", n_bypass > 0, 1);
    check("mechanism: branch", n_branch > 0, 1);
    check("mechanism: load/store", n_ldst > 0, 1);
    check("mechanism: overflow", n_overflow > 0, 1);
    check("mechanism: streamed map with store", n_store > 0, 1);
    $display("mechanisms: reconf=%0d stall=%0d consume=%0d bypass=%0d branch=%0d ldst=%0d overflow=%0d store=%0d",
             n_reconf, n_stall, n_consume, n_bypass, n_branch, n_ldst, n_overflow, n_store);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
