// tb_speed_lane_seq: the lane sequencer against a model VRF that grants at
// random and answers reads one cycle after the grant, and a real ALU. Checks
// ALU operations word by word, the done pulse, and that a SAU operation is
// forwarded with a start pulse and finishes only after the SAU's done.
module tb_speed_lane_seq;
  import speed_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic opv, opr, done, sstart, sdone;
  lane_op_t op, scfg;
  alu_op_e aop; logic [1:0] asew; logic [63:0] aa, ab, ay;
  logic [2:0] rv, rwe, gnt, rsv; logic [8:0] ra [3]; logic [63:0] rwd [3]; logic [63:0] rsd [3];
  logic [63:0] mem [512];
  int checks = 0, failures = 0;
  speed_lane_seq dut (.clk_i (clk), .rst_ni (rst_n), .op_valid_i (opv), .op_ready_o (opr), .op_i (op), .done_o (done),
    .sau_start_o (sstart), .sau_cfg_o (scfg), .sau_done_i (sdone),
    .alu_op_o (aop), .alu_sew_o (asew), .alu_a_o (aa), .alu_b_o (ab), .alu_y_i (ay),
    .req_valid_o (rv), .req_we_o (rwe), .req_addr_o (ra), .req_wdata_o (rwd), .req_gnt_i (gnt),
    .rsp_valid_i (rsv), .rsp_data_i (rsd));
  speed_alu u_alu (.op_i (aop), .sew_i (asew), .a_i (aa), .b_i (ab), .y_o (ay));
  always_comb for (int k = 0; k < 3; k++) gnt[k] = rv[k] && ($urandom_range(2) != 0);
  always @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      rsv[k] <= gnt[k] && !rwe[k];
      if (gnt[k] && !rwe[k]) rsd[k] <= mem[ra[k]];
      if (gnt[k] && rwe[k]) mem[ra[k]] <= rwd[k];
    end
  end
  initial begin
    logic [63:0] A [20], B [20];
    int cyc;
    opv = 0; op = '0; sdone = 0;
    for (int k = 0; k < 3; k++) begin rsv[k] = 0; rsd[k] = 0; end
    for (int i = 0; i < 20; i++) begin A[i] = {$urandom, $urandom}; B[i] = {$urandom, $urandom}; mem[100+i] = A[i]; mem[200+i] = B[i]; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      @(negedge clk); opv = 1; op = '0; op.alu_op = (t == 0) ? ALU_XOR : ALU_SUB; op.sew = 2'd3;
      op.a_base = 100; op.b_base = 200; op.d_base = 300 + 20 * t; op.nwords = 20;
      @(negedge clk); opv = 0;
      checks++; if (opr) begin failures++; $display("FAIL ready while busy"); end
      while (!done) @(negedge clk);
      for (int i = 0; i < 20; i++) begin
        checks++;
        if (mem[300 + 20*t + i] != ((t == 0) ? (A[i] ^ B[i]) : (A[i] - B[i]))) begin failures++; $display("FAIL alu %0d %0d", t, i); end
      end
    end
    // SAU forwarding
    @(negedge clk); opv = 1; op = '0; op.is_sau = 1; op.steps = 5; #1;
    checks++; if (!sstart || scfg.steps != 5) begin failures++; $display("FAIL sau start"); end
    @(negedge clk); opv = 0; cyc = 0;
    repeat (7) begin @(negedge clk); checks++; if (done) begin failures++; $display("FAIL early done"); end end
    sdone = 1; @(negedge clk); sdone = 0;
    @(negedge clk);
    checks++; if (!done) begin failures++; $display("FAIL no done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
