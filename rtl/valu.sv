// valu: the lane's arithmetic logic unit for official RVV integer operations.
//
// It operates on one 64-bit VRF word at a time as a SIMD unit of 8, 4, 2 or 1
// elements for SEW = 8, 16, 32 or 64 bit, and computes vd = vs2 op vs1 for
// add, sub, and, or, xor, signed/unsigned min and max and the shifts sll, srl and
// sra (shift amount = low log2(SEW) bits of the vs1 element). The unit is purely
// combinational; the lane sequencer registers its output before writing it back.
//
// The paper only names the ALU ("performs general arithmetic operations"); which
// operations it supports and how is this design's choice.
module valu
  import speed_pkg::*;
(
  input  alu_op_e           op_i,
  input  logic [1:0]        sew_i,   // 0:8 1:16 2:32 3:64
  input  logic [WORD_W-1:0] a_i,     // vs2 word
  input  logic [WORD_W-1:0] b_i,     // vs1 word
  output logic [WORD_W-1:0] y_o
);

  function automatic logic [63:0] elem_op(alu_op_e op, logic [63:0] a, logic [63:0] b, int unsigned w);
    logic [63:0] mask, sa, sb, r;
    int unsigned shamt;
    mask = (w == 64) ? '1 : ((64'd1 << w) - 1);
    a = a & mask;
    b = b & mask;
    // sign-extended copies for signed compare / arithmetic shift
    sa = a[w-1] ? (a | ~mask) : a;
    sb = b[w-1] ? (b | ~mask) : b;
    shamt = int'(b) & (w - 1);
    case (op)
      ALU_ADD:  r = a + b;
      ALU_SUB:  r = a - b;
      ALU_AND:  r = a & b;
      ALU_OR:   r = a | b;
      ALU_XOR:  r = a ^ b;
      ALU_MIN:  r = ($signed(sa) < $signed(sb)) ? a : b;
      ALU_MAX:  r = ($signed(sa) > $signed(sb)) ? a : b;
      ALU_MINU: r = (a < b) ? a : b;
      ALU_MAXU: r = (a > b) ? a : b;
      ALU_SLL:  r = a << shamt;
      ALU_SRL:  r = a >> shamt;
      ALU_SRA:  r = 64'($signed(sa) >>> shamt);
      default:  r = '0;
    endcase
    return r & mask;
  endfunction

  always_comb begin
    int unsigned w, n;
    w = 8 << sew_i;
    n = 64 / w;
    y_o = '0;
    for (int unsigned e = 0; e < 8; e++) begin
      if (e < n) y_o = y_o | (elem_op(op_i, a_i >> (e * w), b_i >> (e * w), w) << (e * w));
    end
  end

endmodule
