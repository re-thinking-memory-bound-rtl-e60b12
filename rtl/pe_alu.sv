// pe_alu: the integer ALU of a processing element.
//
// Computes RES from the operand registers I1/I2 in one cycle (purely
// combinational). The operation set is the one the paper lists for HyCUBE
// (add, sub, multiply, and, or, xor, shl) plus the shifts and comparisons that
// its area breakdown names (ashr, lshr, compare) and a move.
//
// Runahead support, as the paper describes it: each operand carries a dummy
// flag and the result's flag is the OR of the flags of the operands the
// operation reads (the "single OR gate" added to the ALU). The predicate P's
// flag is included when the operation is predicated. Which operands count
// for a move (I1 only) is this design's choice.
// LOAD/STORE are decoded by the PE, not here; for them the ALU output is unused.
// Lint note: the value bits of P are unused here. The PE applies the zero
// test of P itself; the ALU needs only P's dummy flag.
module pe_alu
  import cgra_pkg::*;
(
  input  op_e   op,
  input  logic  pred_en,
  input  word_t p,
  input  word_t i1,
  input  word_t i2,
  output word_t res
);
  logic [31:0] a, b;
  assign a = i1.v;
  assign b = i2.v;

  always_comb begin
    res.v = '0;
    unique case (op)
      OP_ADD:   res.v = a + b;
      OP_SUB:   res.v = a - b;
      OP_MUL:   res.v = a * b;
      OP_AND:   res.v = a & b;
      OP_OR:    res.v = a | b;
      OP_XOR:   res.v = a ^ b;
      OP_SHL:   res.v = a << b[4:0];
      OP_LSHR:  res.v = a >> b[4:0];
      OP_ASHR:  res.v = $unsigned($signed(a) >>> b[4:0]);
      OP_CMPEQ: res.v = {31'd0, a == b};
      OP_CMPLT: res.v = {31'd0, $signed(a) < $signed(b)};
      OP_MOV:   res.v = a;
      default:  res.v = '0;
    endcase
    // dummy propagation: OR of the flags of the operands that are read
    res.dmy = i1.dmy | ((op != OP_MOV) & i2.dmy) | (pred_en & p.dmy);
  end
endmodule
