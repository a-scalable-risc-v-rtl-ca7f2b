// tb_speed_vseq: the sequencer fed through the real decoder from an
// instruction list, with model load/store units and lanes that answer done
// after random delays. Checks word counts and register addresses handed to
// the units, lane operation fields, strict in-order issue (nothing popped while
// busy), and the CF first/last stage flags over a 3-stage group.
module tb_speed_vseq;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hv, pop, busy, lds, ldb, ldd, sts, std_, lv;
  vinstr_t dec; logic [31:0] ins; logic [63:0] rs1;
  logic [63:0] ldbase, stbase; logic [15:0] ldn, stn; logic [8:0] ldst, stsrc;
  lane_op_t lop; logic [NL-1:0] ldone; prec_e prec; dflow_e df;
  int checks = 0, failures = 0;
  speed_vidu u_dec (.instr_i (ins), .rs1_i (rs1), .dec_o (dec));
  speed_vseq #(.NLANES(NL)) dut (.clk_i (clk), .rst_ni (rst_n), .head_valid_i (hv), .dec_i (dec), .pop_o (pop), .busy_o (busy),
    .ld_start_o (lds), .ld_bcast_o (ldb), .ld_base_o (ldbase), .ld_nwords_o (ldn), .ld_dst_o (ldst), .ld_done_i (ldd),
    .st_start_o (sts), .st_base_o (stbase), .st_nwords_o (stn), .st_src_o (stsrc), .st_done_i (std_),
    .lane_valid_o (lv), .lane_op_o (lop), .lane_done_i (ldone), .prec_o (prec), .dflow_o (df));
  task automatic chk(input bit ok, input string m); checks++; if (!ok) begin failures++; $display("FAIL %s", m); end endtask
  // model units: done after a random delay
  int pend_ld = 0, pend_st = 0, pend_ln = 0;
  always @(posedge clk) begin
    ldd <= 0; std_ <= 0; ldone <= '0;
    if (lds) pend_ld <= 3 + $urandom_range(5);
    else if (pend_ld > 1) pend_ld <= pend_ld - 1; else if (pend_ld == 1) begin pend_ld <= 0; ldd <= 1; end
    if (sts) pend_st <= 3 + $urandom_range(5);
    else if (pend_st > 1) pend_st <= pend_st - 1; else if (pend_st == 1) begin pend_st <= 0; std_ <= 1; end
    if (lv) pend_ln <= 3 + $urandom_range(5);
    else if (pend_ln > 1) pend_ln <= pend_ln - 1; else if (pend_ln == 1) begin pend_ln <= 0; ldone <= 4'b0111; end
    else if (busy && !lds && !sts) ldone <= 4'b1000;   // lanes finishing at different times
    if (pop) chk(!busy, "pop while busy");
  end
  task automatic exec(input logic [31:0] i, input logic [63:0] r);
    @(negedge clk); ins = i; rs1 = r; hv = 1;
    @(posedge clk); while (!pop) @(posedge clk);
    #1;
  endtask
  task automatic finish_op(); @(negedge clk); hv = 0; while (busy) @(negedge clk); endtask
  initial begin
    hv = 0; ins = 0; rs1 = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    exec(enc_vsetvli(5'd1, 3'd1), 100); finish_op();              // 100 x e16 = 25 words
    @(negedge clk); ins = enc_vle(5'd3, 5'd2); rs1 = 64'h800; hv = 1; #1;
    chk(lds && !ldb && ldn == 25 && ldst == 9'(3*16) && ldbase == 64'h800, "vle fields");
    @(posedge clk); #1; finish_op();
    @(negedge clk); ins = enc_vsald(5'd5, 5'd2); rs1 = 64'h100; hv = 1; #1;
    chk(lds && ldb && ldn == 25 && ldst == 9'(5*16), "vsald fields");
    @(posedge clk); #1; finish_op();
    @(negedge clk); ins = enc_vse(5'd7, 5'd2); rs1 = 64'h900; hv = 1; #1;
    chk(sts && stn == 25 && stsrc == 9'(7*16) && stbase == 64'h900, "vse fields");
    @(posedge clk); #1; finish_op();
    @(negedge clk); ins = enc_valu(6'b000000, 5'd9, 5'd1, 5'd2); hv = 1; #1;
    chk(lv && !lop.is_sau && lop.nwords == 7 && lop.a_base == 32 && lop.b_base == 16 && lop.d_base == 144 && lop.sew == 1, "alu op fields");
    @(posedge clk); #1; finish_op();
    exec(enc_vsacfg(PREC4, DF_CF, 6'd9, 5'd3), 0); finish_op();
    chk(prec == PREC4 && df == DF_CF, "vsacfg state");
    for (int s = 0; s < 6; s++) begin
      @(negedge clk); ins = enc_vsam(5'd20, 5'd8, 5'd12); hv = 1; #1;
      chk(lv && lop.is_sau && lop.steps == 9 && lop.prec == PREC4 && lop.a_base == 128 && lop.b_base == 192 && lop.d_base == 320, "vsam fields");
      chk(lop.first == (s % 3 == 0) && lop.last == (s % 3 == 2), $sformatf("CF stage flags %0d", s));
      @(posedge clk); #1; finish_op();
    end
    exec(enc_vsacfg(PREC16, DF_FF, 6'd0, 5'd0), 0); finish_op();
    @(negedge clk); ins = enc_vsam(5'd20, 5'd8, 5'd12); hv = 1; #1;
    chk(lv && lop.first && lop.last && lop.steps == 64 && lop.prec == PREC16, "FF vsam, steps 0 means 64");
    @(posedge clk); #1; finish_op();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
