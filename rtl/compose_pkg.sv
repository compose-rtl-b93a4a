// compose_pkg -- types and constants shared by the composable CGRA.
//
// The fabric is a 4x4 mesh of processing elements (PEs). Each PE executes one
// configuration word per clock cycle, chosen by the current time slot of a
// static modulo schedule (slot = cycle mod II). A configuration word decides
//   * which ALU operation runs (op_e),
//   * where the two ALU operands and the predicate come from (crossbar source)
//     and whether each is taken straight from the crossbar ("bypass", the
//     unlatched value produced earlier in the same cycle) or from the operand
//     register written in an earlier cycle,
//   * whether the ALU result is offered to the crossbar combinationally or
//     from the result register,
//   * for each of the four mesh outputs, its crossbar source and whether it
//     is driven combinationally (multi-hop traversal in one cycle) or from its
//     output register.
// Every register also has a write enable, so a value that is consumed within
// the same cycle never has to be written to a register at all.
//
// Operation names follow the operation list of the characterised chip
// (NOP, MOVC, SEXT, SELECT, CMERGE, BR, AND, OR, XOR, CEQ, CGT, CLT, LS, RS,
// ARS, ADD, SUB, MUL, LOAD). The byte-wide LOADB/STOREB and the word STORE
// appear in the example dataflow graphs. The numeric encodings, the data
// width and the exact meaning of SELECT, CMERGE, BR and SEXT are this
// design's own choices; they are documented at each op below.
package compose_pkg;

  // Datapath width. The paper's chip has an integer datapath; 32 bits is
  // assumed (kernels such as crc32 operate on 32-bit words).
  localparam int unsigned DATA_W = 32;

  // Array size of the characterised chip: one 4x4 cluster.
  localparam int unsigned ROWS = 4;
  localparam int unsigned COLS = 4;

  // Mesh directions. Used both as port index and as crossbar source.
  localparam int unsigned DIR_N = 0;
  localparam int unsigned DIR_E = 1;
  localparam int unsigned DIR_S = 2;
  localparam int unsigned DIR_W = 3;
  localparam int unsigned NDIR  = 4;

  // Crossbar sources: the four mesh inputs, the PE's own ALU result, or 0.
  typedef enum logic [2:0] {
    SRC_N    = 3'd0,
    SRC_E    = 3'd1,
    SRC_S    = 3'd2,
    SRC_W    = 3'd3,
    SRC_RES  = 3'd4,
    SRC_ZERO = 3'd5
  } src_e;

  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,   // result 0, no effect
    OP_MOVC   = 5'd1,   // result = constant field of the configuration word
    OP_SEXT   = 5'd2,   // result = sign-extended low 16 bits of A
    OP_SELECT = 5'd3,   // result = P ? A : B
    OP_CMERGE = 5'd4,   // result = P ? A : previous result register (merge)
    OP_BR     = 5'd5,   // result = (A != 0), a branch/predicate bit
    OP_AND    = 5'd6,
    OP_OR     = 5'd7,
    OP_XOR    = 5'd8,
    OP_CEQ    = 5'd9,   // result = (A == B)
    OP_CGT    = 5'd10,  // result = (A >  B), signed
    OP_CLT    = 5'd11,  // result = (A <  B), signed
    OP_LS     = 5'd12,  // A << B[4:0]
    OP_RS     = 5'd13,  // A >> B[4:0], logical
    OP_ARS    = 5'd14,  // A >>> B[4:0], arithmetic
    OP_ADD    = 5'd15,
    OP_SUB    = 5'd16,
    OP_MUL    = 5'd17,  // low DATA_W bits of A * B
    OP_LOAD   = 5'd18,  // word load from byte address A (MEM PEs only)
    OP_STORE  = 5'd19,  // word store of B to byte address A (MEM PEs only)
    OP_LOADB  = 5'd20,  // byte load, zero-extended (MEM PEs only)
    OP_STOREB = 5'd21   // byte store of B[7:0] (MEM PEs only)
  } op_e;

  // One operand / predicate / mesh-output selection.
  //   sel : crossbar source
  //   byp : 1 = use the unlatched crossbar value this cycle,
  //         0 = use the register (written in an earlier cycle)
  //   we  : write the crossbar value into the register at the clock edge
  typedef struct packed {
    src_e sel;
    logic byp;
    logic we;
  } port_cfg_t;

  // One configuration word: what a PE does in one time slot.
  typedef struct packed {
    op_e                    op;
    logic [DATA_W-1:0]      cnst;     // constant for MOVC
    port_cfg_t              opa;      // ALU input I1
    port_cfg_t              opb;      // ALU input I2
    port_cfg_t              pred;     // predicate input
    logic                   pred_en;  // squash the op when the predicate is 0
    logic                   res_byp;  // RES mux: 1 = ALU output, 0 = result reg
    logic                   res_we;   // write ALU output into the result reg
    port_cfg_t [NDIR-1:0]   out;      // mesh outputs, indexed by DIR_*
  } cfg_t;

  // One request on a data-memory port (byte address, byte enables).
  typedef struct packed {
    logic                 en;
    logic                 we;
    logic [DATA_W/8-1:0]  be;
    logic [DATA_W-1:0]    addr;
    logic [DATA_W-1:0]    wdata;
  } mem_req_t;

  function automatic logic is_mem_op(op_e op);
    return op inside {OP_LOAD, OP_STORE, OP_LOADB, OP_STOREB};
  endfunction

endpackage
