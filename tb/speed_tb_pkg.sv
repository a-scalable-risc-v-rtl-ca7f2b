// speed_tb_pkg: helpers shared by the SPEED testbenches.
//
// Reference arithmetic (the multi-precision dot product of two unified
// elements, written directly with wide signed multiplies, independent of the
// PE's digit decomposition) and encoders for the instructions the design
// decodes, built from the field layouts of the instruction formats.
package speed_tb_pkg;
  import speed_pkg::*;

  function automatic int dot_ref(input prec_e p, input logic [63:0] x, input logic [63:0] w);
    int s;
    s = 0;
    unique case (p)
      PREC16: s = int'($signed(x[15:0])) * int'($signed(w[15:0]));
      PREC8:  for (int k = 0; k < 4; k++)  s += int'($signed(x[8*k +: 8])) * int'($signed(w[8*k +: 8]));
      default: for (int k = 0; k < 16; k++) s += int'($signed(x[4*k +: 4])) * int'($signed(w[4*k +: 4]));
    endcase
    return s;
  endfunction

  function automatic logic [31:0] enc_vsetvli(input logic [4:0] rs1, input logic [2:0] vsew);
    return {1'b0, 11'({vsew, 3'b000}), rs1, 3'b111, 5'd0, OPC_OP_V};
  endfunction
  function automatic logic [31:0] enc_vsacfg(input prec_e p, input dflow_e d, input logic [5:0] steps, input logic [4:0] stages);
    return {3'b101, steps, d, p, stages, 3'b111, 5'd0, OPC_OP_V};
  endfunction
  function automatic logic [31:0] enc_vsald(input logic [4:0] vd, input logic [4:0] rs1);
    return {7'b0000001, 5'b00100, rs1, 3'b111, vd, OPC_LOAD_FP};
  endfunction
  function automatic logic [31:0] enc_vle(input logic [4:0] vd, input logic [4:0] rs1);
    return {7'b0000001, 5'b00000, rs1, 3'b111, vd, OPC_LOAD_FP};
  endfunction
  function automatic logic [31:0] enc_vse(input logic [4:0] vs3, input logic [4:0] rs1);
    return {7'b0000001, 5'b00000, rs1, 3'b111, vs3, OPC_STORE_FP};
  endfunction
  function automatic logic [31:0] enc_vsam(input logic [4:0] acc, input logic [4:0] vs1, input logic [4:0] vs2);
    return {6'b101010, 1'b1, vs2, vs1, 3'b010, acc, OPC_OP_V};
  endfunction
  function automatic logic [31:0] enc_valu(input logic [5:0] f6, input logic [4:0] vd, input logic [4:0] vs1, input logic [4:0] vs2);
    return {f6, 1'b1, vs2, vs1, 3'b000, vd, OPC_OP_V};
  endfunction
endpackage
