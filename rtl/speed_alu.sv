// speed_alu: element-wise integer ALU of one lane.
//
// Combinational SIMD unit on one 64-bit VRF word: the word is split into
// elements of 8, 16, 32 or 64 bits (sew_i = 0..3) and add, subtract, and, or
// or xor is applied element by element, with no carry across element
// boundaries. The lane sequencer fetches the two source words, registers the
// result and writes it back. The paper lists the ALU as a lane component
// without detail; the operation set is this design's minimal choice for the
// standard vadd/vsub/vand/vor/vxor .vv instructions.
module speed_alu
  import speed_pkg::*;
(
  input  alu_op_e         op_i,
  input  logic [1:0]      sew_i,
  input  logic [XLEN-1:0] a_i,
  input  logic [XLEN-1:0] b_i,
  output logic [XLEN-1:0] y_o
);
  logic [XLEN-1:0] y8, y16, y32, y64;
  logic sub;
  assign sub = (op_i == ALU_SUB);

  // One adder set per element width; sew_i selects the result.
  always_comb begin
    for (int e = 0; e < 8; e++) y8[8*e +: 8]    = sub ? a_i[8*e +: 8]   - b_i[8*e +: 8]   : a_i[8*e +: 8]   + b_i[8*e +: 8];
    for (int e = 0; e < 4; e++) y16[16*e +: 16] = sub ? a_i[16*e +: 16] - b_i[16*e +: 16] : a_i[16*e +: 16] + b_i[16*e +: 16];
    for (int e = 0; e < 2; e++) y32[32*e +: 32] = sub ? a_i[32*e +: 32] - b_i[32*e +: 32] : a_i[32*e +: 32] + b_i[32*e +: 32];
    y64 = sub ? a_i - b_i : a_i + b_i;
  end

  always_comb begin
    unique case (op_i)
      ALU_ADD, ALU_SUB: begin
        unique case (sew_i)
          2'd0:    y_o = y8;
          2'd1:    y_o = y16;
          2'd2:    y_o = y32;
          default: y_o = y64;
        endcase
      end
      ALU_AND: y_o = a_i & b_i;
      ALU_OR:  y_o = a_i | b_i;
      ALU_XOR: y_o = a_i ^ b_i;
      default: y_o = '0;
    endcase
  end
endmodule
