// nc_alu: execute-stage arithmetic of the neuron core.
//
// Computes, in one combinational step, the result of every single-cycle
// instruction of the brain-inspired instruction set in either data format:
// 16-bit integer (two's complement, wrapping, low half of products) or 16-bit
// floating point (see fp16_pkg for the rounding used). The paper lists the
// instructions and the two formats; the operand roles below are this design's.
//
//   ADD/SUB/MUL(C)  result = a op b
//   AND/OR/XOR      result = a op b (bitwise, format ignored)
//   MOV             result = b
//   LD              result = m
//   LOCACC          result = m + c      (current accumulation, written to memory)
//   DIFF            result = b * c + m  (v = tau * v + input, first-order update)
//   CMP             flag   = a <cond> b (signed integer or FP16 compare)
//
// Operands: a = R[rs1], b = R[rs2] or the immediate, c = R[rd], m = the word
// read from data memory. Conditional execution (xxxC) is decided by the
// pipeline, which only writes the result when the flag is set.
module nc_alu
  import taibai_pkg::*;
  import fp16_pkg::*;
(
  input  opcode_e     op,
  input  logic        fp,
  input  logic [3:0]  cond,
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic [15:0] c,
  input  logic [15:0] m,
  output logic [15:0] result,
  output logic        cmp_flag
);
  logic [15:0] add_r, sub_r, mul_r, mac_r, acc_r;
  int          fcmp;
  logic        lt, eq;

  always_comb begin
    if (fp) begin
      add_r = fp16_add(a, b);
      sub_r = fp16_sub(a, b);
      mul_r = fp16_mul(a, b);
      acc_r = fp16_add(m, c);
      mac_r = fp16_add(fp16_mul(b, c), m);
      fcmp  = fp16_cmp(a, b);
      lt    = (fcmp == -1);
      eq    = (fcmp == 0);
    end else begin
      add_r = a + b;
      sub_r = a - b;
      mul_r = a * b;
      acc_r = m + c;
      mac_r = (b * c) + m;
      fcmp  = 0;
      lt    = $signed(a) < $signed(b);
      eq    = (a == b);
    end

    unique case (cond)
      CC_EQ:   cmp_flag = eq;
      CC_NE:   cmp_flag = !eq && (fcmp != 2);
      CC_LT:   cmp_flag = lt;
      CC_GE:   cmp_flag = !lt && (fcmp != 2);
      CC_GT:   cmp_flag = !lt && !eq && (fcmp != 2);
      CC_LE:   cmp_flag = lt || eq;
      default: cmp_flag = 1'b0;
    endcase

    unique case (op)
      OP_ADD, OP_ADDC: result = add_r;
      OP_SUB, OP_SUBC: result = sub_r;
      OP_MUL, OP_MULC: result = mul_r;
      OP_AND:          result = a & b;
      OP_OR:           result = a | b;
      OP_XOR:          result = a ^ b;
      OP_MOV:          result = b;
      OP_LD:           result = m;
      OP_LOCACC:       result = acc_r;
      OP_DIFF:         result = mac_r;
      default:         result = '0;
    endcase
  end
endmodule
