// tile_controller: the per-tile instruction interpreter ("Controller").
//
// After a start pulse the controller runs the program in its instruction BRAM
// from address 0 until HALT. Each instruction takes a fetch clock and an
// execute clock (two clocks), with these exceptions: a load (OP_LD) takes a
// third clock for the BRAM read; a vector instruction (OP_VMAP, OP_VRED)
// waits in execute while the PR region is being reconfigured or busy (a
// stall), then starts it and waits for its done pulse. The controller owns the
// interconnect settings of its tile (In Mux select, the four Out Mux selects,
// and whether the buffer feeds the PR region), which stay as set until
// changed, also across a restart.
//
// The four groups of instructions (interconnect, branching, vector, memory and
// register) follow the overlay description, which counts 42 instructions but
// does not define them. The encoding and the instructions themselves (see
// overlay_pkg) are this design's own and fewer than 42. Unknown opcodes
// execute as no-ops. The store data d_wdata is the register selected by the
// instruction, taken straight from the register-file input with no logic in
// between; the data BRAM write enable decides whether it is used.
module tile_controller
  import overlay_pkg::*;
#(
  parameter int unsigned IAW = 10,   // instruction address width
  parameter int unsigned DAW = 12    // data BRAM address width
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  output logic           running,
  output logic           halted,
  // instruction BRAM read port
  output logic           i_ren,
  output logic [IAW-1:0] i_addr,
  input  logic [31:0]    i_rdata,
  // interconnect settings
  output logic           in_en,
  output dir_e           in_sel,
  output src_e           out_sel [4],
  output logic           consume,
  // PR region
  input  logic           pr_cfg_busy,
  input  logic           pr_busy,
  input  logic           pr_done,
  output logic           pr_start,
  output vmode_e         pr_mode,
  output logic [15:0]    pr_len,
  output logic [1:0]     pr_red_reg,
  output logic           pr_stream,
  output logic           pr_store,
  // registers
  input  word_t          regs [NREG],
  output logic           r_we,
  output logic [1:0]     r_idx,
  output word_t          r_wdata,
  // data BRAM port B (bank 0 = D0, bank 1 = D1)
  output logic           d_en,
  output logic           d_bank,
  output logic           d_we,
  output logic [DAW-1:0] d_addr,
  output word_t          d_wdata,
  input  word_t          d0_rdata,
  input  word_t          d1_rdata,
  // activity
  output logic           stall        // a vector instruction waits for the PR region
);
  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_EXEC, C_LOAD, C_WAITPR, C_HALT} cstate_e;

  cstate_e        st;
  logic [IAW-1:0] pc;
  logic [1:0]     ld_reg;
  logic           ld_bank;

  opcode_e        op;
  logic [1:0]     ra, rb;
  logic [21:0]    imm;
  word_t          simm;
  logic           taken;

  assign op   = opcode_e'(i_rdata[31:26]);
  assign ra   = i_rdata[25:24];
  assign rb   = i_rdata[23:22];
  assign imm  = i_rdata[21:0];
  assign simm = W'($signed(imm[15:0]));

  always_comb begin
    unique case (op)
      OP_JMP:  taken = 1'b1;
      OP_BEQ:  taken = (regs[ra] == regs[rb]);
      OP_BNE:  taken = (regs[ra] != regs[rb]);
      OP_BLT:  taken = ($signed(regs[ra]) <  $signed(regs[rb]));
      OP_BGE:  taken = ($signed(regs[ra]) >= $signed(regs[rb]));
      default: taken = 1'b0;
    endcase
  end

  wire is_vec = (op == OP_VMAP) || (op == OP_VRED);

  assign running = (st != C_IDLE) && (st != C_HALT);
  assign halted  = (st == C_HALT);
  assign i_ren   = (st == C_FETCH);
  assign i_addr  = pc;
  assign stall   = (st == C_EXEC) && is_vec && (pr_cfg_busy || pr_busy);

  // combinational issue of the current instruction's side effects
  always_comb begin
    pr_start      = 1'b0;
    pr_mode       = (op == OP_VRED) ? VM_RED : VM_MAP;
    pr_len        = imm[15:0];
    pr_red_reg    = ra;
    pr_stream     = imm[16];
    pr_store      = imm[17];
    d_en          = 1'b0;
    d_bank        = imm[20];
    d_we          = 1'b0;
    d_addr        = imm[DAW-1:0];
    d_wdata       = regs[ra];
    r_we          = 1'b0;
    r_idx         = ra;
    r_wdata       = '0;
    if (st == C_EXEC) begin
      unique case (op)
        OP_VMAP, OP_VRED: pr_start = !(pr_cfg_busy || pr_busy);
        OP_LI:   begin r_we = 1'b1; r_wdata = simm; end
        OP_ADDI: begin r_we = 1'b1; r_wdata = regs[ra] + simm; end
        OP_MOV:  begin r_we = 1'b1; r_wdata = regs[rb]; end
        OP_LD:   d_en = 1'b1;
        OP_ST:   begin d_en = 1'b1; d_we = 1'b1; end
        default: ;
      endcase
    end else if (st == C_LOAD) begin
      r_we    = 1'b1;
      r_idx   = ld_reg;
      r_wdata = ld_bank ? d1_rdata : d0_rdata;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= C_IDLE;
      pc      <= '0;
      in_en   <= 1'b0;
      in_sel  <= DIR_N;
      consume <= 1'b0;
      for (int d = 0; d < 4; d++) out_sel[d] <= SRC_OFF;
      ld_reg  <= '0;
      ld_bank <= 1'b0;
    end else begin
      unique case (st)
        C_IDLE, C_HALT: if (start) begin
          pc <= '0;
          st <= C_FETCH;
        end
        C_FETCH: st <= C_EXEC;
        C_EXEC: begin
          st <= C_FETCH;
          pc <= pc + 1'b1;
          unique case (op)
            OP_IN:   begin in_en <= ~imm[2]; in_sel <= dir_e'(imm[1:0]); end
            OP_OUT:  out_sel[ra] <= src_e'(imm[1:0]);
            OP_ICLR: begin
              in_en   <= 1'b0;
              consume <= 1'b0;
              for (int d = 0; d < 4; d++) out_sel[d] <= SRC_OFF;
            end
            OP_CONS: consume <= imm[0];
            OP_JMP, OP_BEQ, OP_BNE, OP_BLT, OP_BGE:
              if (taken) pc <= imm[IAW-1:0];
            OP_HALT: st <= C_HALT;
            OP_VMAP, OP_VRED: begin
              if (pr_cfg_busy || pr_busy) begin
                st <= C_EXEC;           // stall until the region is ready
                pc <= pc;
              end else begin
                st <= C_WAITPR;
              end
            end
            OP_LD: begin
              st      <= C_LOAD;
              ld_reg  <= ra;
              ld_bank <= imm[20];
            end
            default: ;
          endcase
        end
        C_LOAD:   st <= C_FETCH;
        C_WAITPR: if (pr_done) st <= C_FETCH;
        default:  st <= C_IDLE;
      endcase
    end
  end
endmodule
