// speed_pkg: types and constants shared by the SPEED vector processor RTL.
//
// Holds the instruction encodings (opcode, funct3/funct6 values and the fixed
// bit patterns of the three custom instructions VSACFG, VSALD and VSAM), the
// precision and dataflow enums, the decoded-instruction struct that the decode
// unit hands to the sequencer, and the per-lane operation struct the sequencer
// broadcasts to the lanes. The custom encodings follow the SPEED instruction
// formats; how precision, dataflow, step count and stage count are packed into
// zimm9/uimm5 is this design's own choice (see speed_vidu).
package speed_pkg;

  localparam int unsigned XLEN = 64;   // datapath word width (RV64)
  localparam int unsigned AW   = 16;   // lane-local VRF word address width in structs

  // Major opcodes
  localparam logic [6:0] OPC_LOAD_FP  = 7'b0000111;  // vle / VSALD
  localparam logic [6:0] OPC_STORE_FP = 7'b0100111;  // vse
  localparam logic [6:0] OPC_OP_V     = 7'b1010111;  // vsetvli / VSACFG / VSAM / OPIVV

  // Fixed fields of the custom instructions
  localparam logic [4:0] VSALD_F5    = 5'b00100;     // bits [24:20] of VSALD
  localparam logic [2:0] VSACFG_TOP  = 3'b101;       // bits [31:29] of VSACFG
  localparam logic [2:0] VSACFG_F3   = 3'b111;       // bits [14:12] of VSACFG
  localparam logic [5:0] VSAM_F6     = 6'b101010;    // bits [31:26] of VSAM
  localparam logic [2:0] VSAM_F3     = 3'b010;       // bits [14:12] of VSAM (OPMVV)

  localparam logic [2:0] F3_OPIVV    = 3'b000;
  localparam logic [2:0] F3_OPCFG    = 3'b111;

  // Precision of the SAU (unified element = 1x16b, 4x8b or 16x4b operands)
  typedef enum logic [1:0] {PREC16 = 2'd0, PREC8 = 2'd1, PREC4 = 2'd2} prec_e;
  // Dataflow strategy: feature-map first or channel first
  typedef enum logic {DF_FF = 1'b0, DF_CF = 1'b1} dflow_e;

  typedef enum logic [3:0] {
    OP_ILLEGAL, OP_VSETVLI, OP_VSACFG, OP_VSALD, OP_VLE, OP_VSE, OP_VSAM, OP_ALU
  } op_e;

  typedef enum logic [2:0] {ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR} alu_op_e;

  // Decoded instruction
  typedef struct packed {
    op_e         op;
    alu_op_e     alu_op;
    logic [4:0]  vd;      // vd / vs3 / Dest Addr / Acc Addr field [11:7]
    logic [4:0]  vs1;     // [19:15]
    logic [4:0]  vs2;     // [24:20]
    logic        vm;      // [25]
    logic [2:0]  vsew;    // vsetvli vtype[5:3]
    logic [8:0]  zimm9;   // VSACFG [28:20]
    logic [4:0]  uimm5;   // VSACFG [19:15]
    logic [63:0] rs1;     // scalar operand (base address or AVL)
  } vinstr_t;

  // Operation sent to every lane
  typedef struct packed {
    logic          is_sau;
    alu_op_e       alu_op;
    logic [1:0]    sew;      // 0:8b 1:16b 2:32b 3:64b
    logic [AW-1:0] a_base;   // ALU src A / SAU inputs (vs1)
    logic [AW-1:0] b_base;   // ALU src B / SAU weights (vs2)
    logic [AW-1:0] d_base;   // ALU dest / SAU Acc Addr
    logic [AW-1:0] nwords;   // ALU: words per lane
    logic [6:0]    steps;    // SAU: steps per VSAM (1..64)
    prec_e         prec;
    logic          first;    // SAU: read Acc Addr into the array first
    logic          last;     // SAU: write the array back to Acc Addr at the end
  } lane_op_t;

endpackage
