// tb_pr_region: the PR region model with a short reconfiguration time.
// Checks: the region is blank and busy for exactly PR_CYCLES clocks after a
// download; VM_MAP with the multiplier streams D0[i]*D1[i], the first result
// two clocks after start and one per clock after that; VM_RED with the adder
// sums a stream that arrives with gaps, starting from the register value;
// VM_RED with MIN reads its operands from D0; VM_MAP with x from a gappy
// stream pairs each x[i] with D1[i] and stores the results into D0; a start
// during a download is ignored. The data BRAMs are modelled here with a one-clock read.
`timescale 1ns/1ps
module tb_pr_region;
  import overlay_pkg::*;
  localparam int PRC = 50;
  localparam int N = 40;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        cfg_load = 0, cfg_busy;
  opk_e        cfg_op = OPK_NONE, op_id;
  logic        start = 0, busy, done, stream = 0, store = 0;
  vmode_e      mode = VM_MAP;
  logic [15:0] len = 0;
  logic [1:0]  red_reg = 0;
  word_t       in_data = 0;
  logic        in_valid = 0, in_ready;
  link_t       result;
  logic        d0_en, d0_we, d1_en;
  logic [11:0] d0_addr, d1_addr;
  word_t       d0_wdata, d0_rdata, d1_rdata;
  word_t       regs [NREG];
  logic        reg_we;
  logic [1:0]  reg_idx;
  word_t       reg_wdata;

  pr_region #(.PR_CYCLES(PRC)) dut (.*);

  word_t D0 [N], D1 [N], E [N];
  always_ff @(posedge clk) begin
    if (d0_en) begin
      d0_rdata <= D0[d0_addr];
      if (d0_we) D0[d0_addr] <= d0_wdata;
    end
    if (d1_en) d1_rdata <= D1[d1_addr];
  end
  always_ff @(posedge clk) if (reg_we) regs[reg_idx] <= reg_wdata;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int n_out;
    word_t sum, mn;
    for (int i = 0; i < N; i++) begin D0[i] = $urandom_range(0, 999); D1[i] = $urandom_range(0, 999); end
    for (int i = 0; i < NREG; i++) regs[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    // download the multiplier
    cfg_load = 1; cfg_op = OPK_MUL; @(negedge clk); cfg_load = 0;
    t0 = cycle;
    // a start while downloading is ignored
    start = 1; mode = VM_MAP; len = 16'(N); @(negedge clk); start = 0;
    check("start ignored while downloading", busy, 0);
    while (cfg_busy) @(negedge clk);
    check("download time", cycle - t0, PRC);
    check("operator after download", op_id, OPK_MUL);
    // VM_MAP
    start = 1; mode = VM_MAP; len = 16'(N); t0 = cycle;
    @(negedge clk); start = 0;
    n_out = 0;
    while (!done) begin
      if (result.valid) begin
        if (n_out == 0) check("first result two clocks after start", cycle - t0, 2);
        check($sformatf("map result %0d", n_out), result.data, D0[n_out] * D1[n_out]);
        n_out++;
      end
      @(negedge clk);
    end
    check("map count", n_out, N);
    check("map duration (one word per clock)", cycle - t0, N + 2);
    // download the adder
    cfg_load = 1; cfg_op = OPK_ADD; @(negedge clk); cfg_load = 0;
    check("blank while downloading", op_id, OPK_NONE);
    while (cfg_busy) @(negedge clk);
    // VM_RED from a gappy stream into R3 (index 2), which holds 1000
    regs[2] = 1000;
    sum = 1000;
    start = 1; mode = VM_RED; len = 16'(N); red_reg = 2; stream = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < N; ) begin
      in_valid = 1'($urandom_range(0, 2) != 0);
      in_data = D1[i];
      @(posedge clk);
      if (in_valid && in_ready) begin sum += D1[i]; i++; end
      @(negedge clk);
    end
    in_valid = 0;
    for (int k = 0; k < 5 && !done; k++) @(negedge clk);
    @(negedge clk);
    check("stream reduce R3", regs[2], sum);
    // MIN over D0 into R1 (index 0), no stream
    cfg_load = 1; cfg_op = OPK_MIN; @(negedge clk); cfg_load = 0;
    while (cfg_busy) @(negedge clk);
    regs[0] = 32'h7FFF_FFFF;
    mn = 32'h7FFF_FFFF;
    for (int i = 0; i < N; i++) if (D0[i] < mn) mn = D0[i];
    start = 1; mode = VM_RED; len = 16'(N); red_reg = 0; stream = 0; t0 = cycle;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check("BRAM reduce duration", cycle - t0, N + 2);
    @(negedge clk);
    check("BRAM MIN reduce R1", regs[0], mn);
    // VM_MAP with x from a gappy stream and store: out[i] = min(x[i], D1[i]) -> D0[i]
    for (int i = 0; i < N; i++) E[i] = $urandom_range(0, 999);
    start = 1; mode = VM_MAP; len = 16'(N); stream = 1; store = 1;
    @(negedge clk); start = 0; stream = 0; store = 0;
    n_out = 0;
    for (int i = 0; i < N; ) begin
      in_valid = 1'($urandom_range(0, 2) != 0);
      in_data = E[i];
      #1;
      if (result.valid) begin
        check($sformatf("stream map out %0d", n_out), result.data,
              ($signed(E[n_out]) < $signed(D1[n_out])) ? E[n_out] : D1[n_out]);
        n_out++;
      end
      @(posedge clk);
      if (in_valid && in_ready) i++;
      @(negedge clk);
    end
    in_valid = 0;
    for (int k = 0; k < 5 && busy; k++) @(negedge clk);
    check("stream map count", n_out, N);
    check("idle after stream map", busy, 0);
    for (int i = 0; i < N; i++)
      check($sformatf("stored D0[%0d]", i), D0[i], ($signed(E[i]) < $signed(D1[i])) ? E[i] : D1[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
