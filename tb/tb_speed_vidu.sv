// tb_speed_vidu: encodes each supported instruction with random fields and
// checks the decoded operation and fields; checks that unsupported encodings
// decode as illegal.
module tb_speed_vidu;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  logic [31:0] ins; logic [63:0] rs1; vinstr_t d;
  int checks = 0, failures = 0;
  speed_vidu dut (.instr_i (ins), .rs1_i (rs1), .dec_o (d));
  task automatic chk(input bit ok, input string m); checks++; if (!ok) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [4:0] vd, v1, v2; logic [5:0] st; logic [4:0] sg; prec_e p; dflow_e df;
      vd = 5'($urandom); v1 = 5'($urandom); v2 = 5'($urandom); st = 6'($urandom); sg = 5'($urandom);
      p = prec_e'($urandom_range(2)); df = dflow_e'($urandom_range(1)); rs1 = {$urandom, $urandom};
      ins = enc_vsam(vd, v1, v2); #1;
      chk(d.op == OP_VSAM && d.vd == vd && d.vs1 == v1 && d.vs2 == v2, "vsam");
      ins = enc_vsacfg(p, df, st, sg); #1;
      chk(d.op == OP_VSACFG && d.zimm9 == {st, df, p} && d.uimm5 == sg, "vsacfg");
      ins = enc_vsald(vd, v1); #1;
      chk(d.op == OP_VSALD && d.vd == vd && d.rs1 == rs1, "vsald");
      ins = enc_vle(vd, v1); #1;
      chk(d.op == OP_VLE && d.vd == vd, "vle");
      ins = enc_vse(vd, v1); #1;
      chk(d.op == OP_VSE && d.vd == vd, "vse");
      ins = enc_vsetvli(v1, 3'($urandom_range(3))); #1;
      chk(d.op == OP_VSETVLI && d.vsew == ins[25:23], "vsetvli");
      ins = enc_valu(6'b000010, vd, v1, v2); #1;
      chk(d.op == OP_ALU && d.alu_op == ALU_SUB && d.vs1 == v1 && d.vs2 == v2, "vsub");
      ins = enc_valu(6'b001001, vd, v1, v2); #1;
      chk(d.op == OP_ALU && d.alu_op == ALU_AND, "vand");
      ins = enc_valu(6'b100101, vd, v1, v2); #1;
      chk(d.op == OP_ILLEGAL, "unsupported funct6");
      ins = {$urandom} & 32'hFFFF_FF80 | 32'h0000_0033; #1;   // OP (scalar)
      chk(d.op == OP_ILLEGAL, "scalar opcode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
