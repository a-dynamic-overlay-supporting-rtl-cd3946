// dynamic_overlay: a ROWS x COLS mesh of overlay tiles (top level).
//
// Every tile connects to its four neighbours with one link in each direction
// (north, east, south, west); the links at the edge of the mesh are ports of
// this module, so that meshes can be joined or fed from outside. Row 0 is the
// north edge, column 0 the west edge, and tile (r, c) has index r*COLS + c in
// all per-tile ports.
//
// An accelerator is assembled at run time, not by synthesis: the host
// downloads an operator into the PR region of the tiles that compute
// (cfg_load/cfg_tile/cfg_op), writes each tile's program and data
// (h_we/h_tile/h_sel/h_addr/h_wdata), and starts the tiles (start). Each
// program sets its tile's interconnect so that results flow from producing
// tiles through pass-through tiles to consuming ones, then runs vector
// operations. Results are read back from the registers (regs) or data BRAMs
// (h_ren, h_rdata one clock later).
//
// The mesh, the tile contents and the default size of 3 x 3 follow the
// overlay as described and evaluated; the host port layout is this design's.
module dynamic_overlay
  import overlay_pkg::*;
#(
  parameter int unsigned ROWS      = 3,
  parameter int unsigned COLS      = 3,
  parameter int unsigned IDEPTH    = 1024,
  parameter int unsigned DDEPTH    = 4096,
  parameter int unsigned BUF_DEPTH = 16,
  parameter int unsigned PR_CYCLES = 125000,
  localparam int unsigned NT       = ROWS * COLS,
  localparam int unsigned TW       = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned DAW      = $clog2(DDEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  // host memory port
  input  logic           h_we,
  input  logic           h_ren,
  input  logic [TW-1:0]  h_tile,
  input  logic [1:0]     h_sel,      // 0 instruction BRAM, 1 data BRAM 0, 2 data BRAM 1
  input  logic [DAW-1:0] h_addr,
  input  word_t          h_wdata,
  output word_t          h_rdata,
  // tile control
  input  logic [NT-1:0]  start,
  output logic [NT-1:0]  running,
  output logic [NT-1:0]  halted,
  // operator download into PR regions
  input  logic           cfg_load,
  input  logic [TW-1:0]  cfg_tile,
  input  opk_e           cfg_op,
  output logic [NT-1:0]  cfg_busy,
  output opk_e           op_id    [NT],
  output word_t          regs     [NT][NREG],
  // mesh edge links
  input  link_t          north_in  [COLS],
  output link_t          north_out [COLS],
  input  link_t          south_in  [COLS],
  output link_t          south_out [COLS],
  input  link_t          west_in   [ROWS],
  output link_t          west_out  [ROWS],
  input  link_t          east_in   [ROWS],
  output link_t          east_out  [ROWS],
  // activity per tile
  output logic [NT-1:0]  stall,
  output logic [NT-1:0]  bypass,
  output logic [NT-1:0]  consumed,
  output logic [NT-1:0]  overflow
);
  link_t   li [NT][4];
  link_t   lo [NT][4];
  word_t   t_rdata [NT];
  logic [TW-1:0] rd_tile;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int T = r * COLS + c;

      assign li[T][DIR_N] = (r == 0)        ? north_in[c] : lo[T - COLS][DIR_S];
      assign li[T][DIR_S] = (r == ROWS - 1) ? south_in[c] : lo[T + COLS][DIR_N];
      assign li[T][DIR_W] = (c == 0)        ? west_in[r]  : lo[T - 1][DIR_E];
      assign li[T][DIR_E] = (c == COLS - 1) ? east_in[r]  : lo[T + 1][DIR_W];

      if (r == 0)        begin : g_n assign north_out[c] = lo[T][DIR_N]; end
      if (r == ROWS - 1) begin : g_s assign south_out[c] = lo[T][DIR_S]; end
      if (c == 0)        begin : g_w assign west_out[r]  = lo[T][DIR_W]; end
      if (c == COLS - 1) begin : g_e assign east_out[r]  = lo[T][DIR_E]; end

      overlay_tile #(
        .IDEPTH(IDEPTH), .DDEPTH(DDEPTH), .BUF_DEPTH(BUF_DEPTH), .PR_CYCLES(PR_CYCLES)
      ) u_tile (
        .clk, .rst,
        .link_in(li[T]), .link_out(lo[T]),
        .h_we(h_we && h_tile == TW'(T)), .h_ren(h_ren && h_tile == TW'(T)),
        .h_sel, .h_addr, .h_wdata, .h_rdata(t_rdata[T]),
        .start(start[T]), .running(running[T]), .halted(halted[T]),
        .cfg_load(cfg_load && cfg_tile == TW'(T)), .cfg_op, .cfg_busy(cfg_busy[T]), .op_id(op_id[T]),
        .regs(regs[T]),
        .stall(stall[T]), .bypass(bypass[T]), .consumed(consumed[T]), .overflow(overflow[T])
      );
    end
  end

  always_ff @(posedge clk) if (h_ren) rd_tile <= h_tile;
  assign h_rdata = t_rdata[rd_tile];
endmodule
