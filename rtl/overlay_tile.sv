// overlay_tile: one tile of the dynamic overlay.
//
// The tile holds the parts of the tile diagram: an instruction BRAM feeding
// the controller, two data BRAMs and the registers R1..R4 next to the PR
// region, and the interconnect path In Mux -> Buffer -> Out Mux. A word that
// arrives on the selected neighbour link (Nr/Er/Sr/Wr) is written into the
// buffer. From there it is either consumed by the PR region (consume set,
// taken as the loaded operator asks for it) or bypassed to the Out Mux and
// sent on (a pass-through hop); with both set it does both. Each outgoing
// link (Ns/Es/Ss/Ws) carries the PR result, the bypassed word or nothing.
//
// Timing: a bypassed word leaves the tile two clocks after it arrived (one
// clock in the buffer, one in the Out Mux register). A PR result leaves one
// clock after the region produced it.
//
// Host side: the host writes the instruction BRAM (h_sel 0) and the data BRAMs
// (h_sel 1, 2) and reads the data BRAMs (h_rdata, one clock after h_ren), all
// through the data BRAMs' port B, which the controller uses instead while its
// program runs. The host also starts the program and downloads operators into
// the PR region (cfg_load). The connection list follows the tile diagram; the
// host port and the buffer pop rule are this design's choices.
module overlay_tile
  import overlay_pkg::*;
#(
  parameter int unsigned IDEPTH    = 1024,
  parameter int unsigned DDEPTH    = 4096,
  parameter int unsigned BUF_DEPTH = 16,
  parameter int unsigned PR_CYCLES = 125000,
  localparam int unsigned IAW      = $clog2(IDEPTH),
  localparam int unsigned DAW      = $clog2(DDEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  // mesh links, indexed by dir_e
  input  link_t          link_in  [4],
  output link_t          link_out [4],
  // host memory port
  input  logic           h_we,
  input  logic           h_ren,
  input  logic [1:0]     h_sel,
  input  logic [DAW-1:0] h_addr,
  input  word_t          h_wdata,
  output word_t          h_rdata,
  // host control
  input  logic           start,
  output logic           running,
  output logic           halted,
  input  logic           cfg_load,
  input  opk_e           cfg_op,
  output logic           cfg_busy,
  output opk_e           op_id,
  output word_t          regs [NREG],
  // activity, for observation
  output logic           stall,      // a vector instruction waits for the PR region
  output logic           bypass,     // a word left the buffer towards the Out Mux
  output logic           consumed,   // a word left the buffer into the PR region
  output logic           overflow
);
  // controller <-> others
  logic           i_ren;
  logic [IAW-1:0] i_addr;
  logic [31:0]    i_rdata;
  logic           in_en, consume;
  dir_e           in_sel;
  src_e           out_sel [4];
  logic           pr_start, pr_busy, pr_done, pr_stream, pr_store;
  vmode_e         pr_mode;
  logic [15:0]    pr_len;
  logic [1:0]     pr_red_reg;
  logic           c_rwe;
  logic [1:0]     c_ridx;
  word_t          c_rwdata;
  logic           c_den, c_dbank, c_dwe;
  logic [DAW-1:0] c_daddr;
  word_t          c_dwdata;
  // PR region <-> others
  logic           p_d0en, p_d0we, p_d1en;
  logic [DAW-1:0] p_d0addr, p_d1addr;
  word_t          p_d0wdata;
  word_t          d0_a_rdata, d1_a_rdata, d0_b_rdata, d1_b_rdata;
  logic           p_rwe;
  logic [1:0]     p_ridx;
  word_t          p_rwdata;
  logic           pr_in_ready;
  link_t          pr_result;
  // datapath
  link_t          in_word, buf_word;
  word_t          buf_head;
  logic           buf_ne, buf_pop;
  // port B mux
  logic           b0_en, b1_en, b_we;
  logic [DAW-1:0] b_addr;
  word_t          b_wdata;
  logic           h_rsel;

  inst_bram #(.DEPTH(IDEPTH)) u_ibram (
    .clk, .we(h_we && h_sel == 2'd0), .waddr(h_addr[IAW-1:0]), .wdata(h_wdata),
    .ren(i_ren), .raddr(i_addr), .rdata(i_rdata)
  );

  always_comb begin
    if (running) begin
      b0_en   = c_den && !c_dbank;
      b1_en   = c_den &&  c_dbank;
      b_we    = c_dwe;
      b_addr  = c_daddr;
      b_wdata = c_dwdata;
    end else begin
      b0_en   = (h_we || h_ren) && h_sel == 2'd1;
      b1_en   = (h_we || h_ren) && h_sel == 2'd2;
      b_we    = h_we;
      b_addr  = h_addr;
      b_wdata = h_wdata;
    end
  end

  always_ff @(posedge clk) if (h_ren) h_rsel <= (h_sel == 2'd2);
  assign h_rdata = h_rsel ? d1_b_rdata : d0_b_rdata;

  data_bram #(.DEPTH(DDEPTH)) u_d0 (
    .clk, .a_en(p_d0en), .a_we(p_d0we), .a_addr(p_d0addr), .a_wdata(p_d0wdata), .a_rdata(d0_a_rdata),
    .b_en(b0_en), .b_we(b_we), .b_addr(b_addr), .b_wdata(b_wdata), .b_rdata(d0_b_rdata)
  );
  data_bram #(.DEPTH(DDEPTH)) u_d1 (
    .clk, .a_en(p_d1en), .a_we(1'b0), .a_addr(p_d1addr), .a_wdata('0), .a_rdata(d1_a_rdata),
    .b_en(b1_en), .b_we(b_we), .b_addr(b_addr), .b_wdata(b_wdata), .b_rdata(d1_b_rdata)
  );

  reg_file u_regs (
    .clk, .rst, .pr_we(p_rwe), .pr_idx(p_ridx), .pr_wdata(p_rwdata),
    .ct_we(c_rwe), .ct_idx(c_ridx), .ct_wdata(c_rwdata), .regs
  );

  tile_controller #(.IAW(IAW), .DAW(DAW)) u_ctrl (
    .clk, .rst, .start, .running, .halted,
    .i_ren, .i_addr, .i_rdata,
    .in_en, .in_sel, .out_sel, .consume,
    .pr_cfg_busy(cfg_busy), .pr_busy, .pr_done, .pr_start, .pr_mode, .pr_len, .pr_red_reg, .pr_stream, .pr_store,
    .regs, .r_we(c_rwe), .r_idx(c_ridx), .r_wdata(c_rwdata),
    .d_en(c_den), .d_bank(c_dbank), .d_we(c_dwe), .d_addr(c_daddr), .d_wdata(c_dwdata),
    .d0_rdata(d0_b_rdata), .d1_rdata(d1_b_rdata), .stall
  );

  pr_region #(.PR_CYCLES(PR_CYCLES), .DAW(DAW)) u_pr (
    .clk, .rst, .cfg_load, .cfg_op, .cfg_busy, .op_id,
    .start(pr_start), .mode(pr_mode), .len(pr_len), .red_reg(pr_red_reg), .stream(pr_stream), .store(pr_store),
    .busy(pr_busy), .done(pr_done),
    .in_data(buf_head), .in_valid(consume && buf_ne), .in_ready(pr_in_ready),
    .result(pr_result),
    .d0_en(p_d0en), .d0_we(p_d0we), .d0_addr(p_d0addr), .d0_wdata(p_d0wdata), .d0_rdata(d0_a_rdata),
    .d1_en(p_d1en), .d1_addr(p_d1addr), .d1_rdata(d1_a_rdata),
    .regs, .reg_we(p_rwe), .reg_idx(p_ridx), .reg_wdata(p_rwdata)
  );

  in_mux u_in (.link_in, .en(in_en), .sel(in_sel), .link_out(in_word));

  logic bypass_cfg;
  always_comb begin
    bypass_cfg = 1'b0;
    for (int d = 0; d < 4; d++) if (out_sel[d] == SRC_BUF) bypass_cfg = 1'b1;
  end

  assign buf_pop  = buf_ne && (consume ? pr_in_ready : bypass_cfg);
  assign bypass   = buf_pop && bypass_cfg;
  assign consumed = buf_pop && consume;
  assign buf_word = '{valid: buf_pop, data: buf_head};

  tile_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst, .push(in_word.valid), .din(in_word.data), .pop(buf_pop),
    .head(buf_head), .not_empty(buf_ne), .full(), .overflow
  );

  out_mux u_out (.clk, .rst, .pr_in(pr_result), .buf_in(buf_word), .sel(out_sel), .link_out);
endmodule
