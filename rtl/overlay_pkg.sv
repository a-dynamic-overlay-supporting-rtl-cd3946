// overlay_pkg: types and constants shared by the tiles of the dynamic overlay.
//
// A link between two neighbouring tiles carries one data word per clock with a
// valid bit (no back-pressure). Directions follow the N-E-S-W naming of the
// tile diagram (inputs Nr/Er/Sr/Wr, outputs Ns/Es/Ss/Ws). The instruction set
// is this design's own: the overlay is described as interpreting 42
// instructions in four groups (22 interconnect, 6 branching, 2 vector, 12
// memory and register), but their encodings and meanings are not given. The
// opcode field is 6 bits wide so that 42 opcodes would fit; the subset below
// is what the controller implements. The word width (32 bits) is also a
// choice of this design.
package overlay_pkg;

  localparam int unsigned W = 32;          // data word width (bits)
  localparam int unsigned NREG = 4;        // R1..R4
  localparam int unsigned OPC_W = 6;       // opcode field width

  typedef logic [W-1:0] word_t;

  // One directional link between neighbouring tiles.
  typedef struct packed {
    logic  valid;
    word_t data;
  } link_t;

  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_E = 2'd1, DIR_S = 2'd2, DIR_W = 2'd3} dir_e;

  // Out-mux source of one outgoing link.
  typedef enum logic [1:0] {SRC_OFF = 2'd0, SRC_PR = 2'd1, SRC_BUF = 2'd2} src_e;

  // Operator bitstreams that can be loaded into a PR region (behavioural library).
  typedef enum logic [2:0] {
    OPK_NONE = 3'd0, OPK_MUL = 3'd1, OPK_ADD = 3'd2, OPK_SUB = 3'd3,
    OPK_MIN  = 3'd4, OPK_MAX = 3'd5
  } opk_e;

  // Vector operation modes issued by the controller to the PR region.
  typedef enum logic {VM_MAP = 1'b0, VM_RED = 1'b1} vmode_e;

  // Instruction word: [31:26] opcode, [25:24] ra/dir, [23:22] rb, [21:0] operand.
  typedef enum logic [OPC_W-1:0] {
    // interconnect
    OP_NOP    = 6'd0,   // no operation
    OP_IN     = 6'd1,   // [2] off, [1:0] dir : In Mux select
    OP_OUT    = 6'd2,   // [25:24] dir, [1:0] src : Out Mux select of one output
    OP_ICLR   = 6'd3,   // In Mux off, all outputs off, consume off
    OP_CONS   = 6'd4,   // [0] buffer feeds the PR region (consume) instead of bypass only
    // branching
    OP_JMP    = 6'd8,   // [9:0] target
    OP_BEQ    = 6'd9,   // if R[ra] == R[rb] goto target
    OP_BNE    = 6'd10,  // if R[ra] != R[rb] goto target
    OP_BLT    = 6'd11,  // if R[ra] <  R[rb] (signed) goto target
    OP_BGE    = 6'd12,  // if R[ra] >= R[rb] (signed) goto target
    OP_HALT   = 6'd13,  // stop, raise halted
    // vector
    OP_VMAP   = 6'd16,  // [17] store, [16] from stream, [15:0] len : out[i] = f(D0[i] or x[i], D1[i])
    OP_VRED   = 6'd17,  // [25:24] r, [16] from stream, [15:0] len : R[r] = f(..f(R[r], x0).., x(len-1))
    // memory and register
    OP_LI     = 6'd24,  // R[ra] = sign-extended [15:0]
    OP_ADDI   = 6'd25,  // R[ra] = R[ra] + sign-extended [15:0]
    OP_MOV    = 6'd26,  // R[ra] = R[rb]
    OP_LD     = 6'd27,  // R[ra] = Dbank[addr], [20] bank, [19:0] addr
    OP_ST     = 6'd28   // Dbank[addr] = R[ra]
  } opcode_e;

  function automatic logic [31:0] mk_insn(opcode_e op, logic [1:0] a, logic [1:0] b, logic [21:0] imm);
    return {op, a, b, imm};
  endfunction

endpackage
