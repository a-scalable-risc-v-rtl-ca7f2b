// speed_vidu: vector instruction decode unit.
//
// Purely combinational decoder from a 32-bit instruction (plus the scalar rs1
// value forwarded by the host core) to a vinstr_t. Custom formats (SPEED):
//   VSALD  [31:25] funct7 | [24:20] 00100 | [19:15] Base Addr | [14:12] Width |
//          [11:7] Dest Addr | [6:0] 0000111   broadcast load to all lanes
//   VSACFG [31:29] 101 | [28:20] zimm9 | [19:15] uimm5 | [14:12] 111 |
//          [11:7] Dest Addr | [6:0] 1010111   SAU configuration
//   VSAM   [31:26] 101010 | [25] vm | [24:20] vs2 | [19:15] vs1 | [14:12] 010 |
//          [11:7] Acc Addr | [6:0] 1010111    systolic multiply-accumulate
// Standard RVV 1.0 subset: vsetvli, vle/vse unit-stride, vadd/vsub/vand/vor/
// vxor.vv. Everything else decodes to OP_ILLEGAL and is dropped by the
// sequencer. The field layout of the custom formats follows the paper's
// encoding table; this design packs VSACFG as zimm9[1:0] = precision
// (0:16b 1:8b 2:4b), zimm9[2] = dataflow (0:FF 1:CF), zimm9[8:3] = steps per
// VSAM (0 means 64) and uimm5 = CF stages per output tile (0 means 1).
module speed_vidu
  import speed_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic [63:0] rs1_i,
  output vinstr_t     dec_o
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [5:0] f6;
  assign opc = instr_i[6:0];
  assign f3  = instr_i[14:12];
  assign f6  = instr_i[31:26];

  always_comb begin
    dec_o        = '0;
    dec_o.op     = OP_ILLEGAL;
    dec_o.alu_op = ALU_ADD;
    dec_o.vd     = instr_i[11:7];
    dec_o.vs1    = instr_i[19:15];
    dec_o.vs2    = instr_i[24:20];
    dec_o.vm     = instr_i[25];
    dec_o.vsew   = instr_i[25:23];
    dec_o.zimm9  = instr_i[28:20];
    dec_o.uimm5  = instr_i[19:15];
    dec_o.rs1    = rs1_i;
    unique case (opc)
      OPC_LOAD_FP: begin
        if (instr_i[24:20] == VSALD_F5)                              dec_o.op = OP_VSALD;
        else if (instr_i[24:20] == 5'b00000 && instr_i[27:26] == 2'b00) dec_o.op = OP_VLE;
      end
      OPC_STORE_FP: begin
        if (instr_i[24:20] == 5'b00000 && instr_i[27:26] == 2'b00)   dec_o.op = OP_VSE;
      end
      OPC_OP_V: begin
        if (f3 == F3_OPCFG && instr_i[31] == 1'b0)                   dec_o.op = OP_VSETVLI;
        else if (f3 == VSACFG_F3 && instr_i[31:29] == VSACFG_TOP)    dec_o.op = OP_VSACFG;
        else if (f3 == VSAM_F3 && f6 == VSAM_F6)                     dec_o.op = OP_VSAM;
        else if (f3 == F3_OPIVV) begin
          dec_o.op = OP_ALU;
          unique case (f6)
            6'b000000: dec_o.alu_op = ALU_ADD;
            6'b000010: dec_o.alu_op = ALU_SUB;
            6'b001001: dec_o.alu_op = ALU_AND;
            6'b001010: dec_o.alu_op = ALU_OR;
            6'b001011: dec_o.alu_op = ALU_XOR;
            default:   dec_o.op     = OP_ILLEGAL;
          endcase
        end
      end
      default: ;
    endcase
  end
endmodule
