// compose_alu -- combinational ALU of one PE.
//
// Computes the result of one operation from the two operands A (input I1)
// and B (input I2), the predicate bit P, the constant of the configuration
// word and the PE's previous registered result. It has no clock: in this
// fabric its output may feed, in the same cycle, the crossbar of its own PE
// and the ALUs of other PEs (combinational chaining inside a virtual PE), so
// its delay is part of the chained path that the mapper budgets against the
// clock period.
//
// The operation set is the one of the characterised chip: wiring and select
// operations (MOVC, SEXT, SELECT, CMERGE, BR), bitwise and compare operations
// (AND, OR, XOR, CEQ, CGT, CLT), shifts (LS, RS, ARS) and arithmetic
// (ADD, SUB, MUL). Memory operations are carried out by the LSU of a MEM PE;
// for them, and for NOP, this unit outputs 0. The 32-bit width, signed
// compares, shift amounts taken from B[4:0] and the meaning of SELECT,
// CMERGE, BR and SEXT are this design's choices (see compose_pkg).
module compose_alu
  import compose_pkg::*;
(
  input  op_e               op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              p,
  input  logic [DATA_W-1:0] cnst,
  input  logic [DATA_W-1:0] prev,
  output logic [DATA_W-1:0] res
);

  localparam int unsigned SH_W = $clog2(DATA_W);

  logic [SH_W-1:0] sh;
  assign sh = b[SH_W-1:0];

  always_comb begin
    unique case (op)
      OP_MOVC:   res = cnst;
      OP_SEXT:   res = {{(DATA_W-16){a[15]}}, a[15:0]};
      OP_SELECT: res = p ? a : b;
      OP_CMERGE: res = p ? a : prev;
      OP_BR:     res = DATA_W'(a != '0);
      OP_AND:    res = a & b;
      OP_OR:     res = a | b;
      OP_XOR:    res = a ^ b;
      OP_CEQ:    res = DATA_W'(a == b);
      OP_CGT:    res = DATA_W'($signed(a) > $signed(b));
      OP_CLT:    res = DATA_W'($signed(a) < $signed(b));
      OP_LS:     res = a << sh;
      OP_RS:     res = a >> sh;
      OP_ARS:    res = DATA_W'($signed(a) >>> sh);
      OP_ADD:    res = a + b;
      OP_SUB:    res = a - b;
      OP_MUL:    res = a * b;
      default:   res = '0;   // NOP and memory operations
    endcase
  end

endmodule
