// tb_speed_alu: random operands for every operation and element width,
// compared with element-wise arithmetic done in the testbench.
module tb_speed_alu;
  import speed_pkg::*;
  alu_op_e op; logic [1:0] sew; logic [63:0] a, b, y, e;
  int checks = 0, failures = 0;
  speed_alu dut (.op_i (op), .sew_i (sew), .a_i (a), .b_i (b), .y_o (y));
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int ew;
      op = alu_op_e'($urandom_range(4)); sew = 2'($urandom); a = {$urandom, $urandom}; b = {$urandom, $urandom};
      if (i % 7 == 0) a = '1;
      ew = 8 << sew;
      for (int k = 0; k < 64 / ew; k++) begin
        logic [63:0] ea, eb, s;
        ea = (a >> (k*ew)) & ((ew == 64) ? '1 : ((64'd1 << ew) - 1));
        eb = (b >> (k*ew)) & ((ew == 64) ? '1 : ((64'd1 << ew) - 1));
        s = (op == ALU_SUB) ? ea - eb : ea + eb;
        for (int j = 0; j < ew; j++) e[k*ew + j] = s[j];
      end
      if (op == ALU_AND) e = a & b;
      if (op == ALU_OR)  e = a | b;
      if (op == ALU_XOR) e = a ^ b;
      #1;
      checks++;
      if (y != e) begin failures++; if (failures < 5) $display("FAIL op=%0d sew=%0d y=%h e=%h", op, sew, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
