// tb_speed_pe: self-checking test of the multi-precision PE.
//
// For each precision, streams random unified-element pairs into one PE and
// compares the accumulator, one cycle after each MAC, with a reference dot
// product computed with plain signed multiplies. Also checks the accumulator
// preload and that x/w and their valid bits are forwarded with one cycle delay.
module tb_speed_pe;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_e prec;
  logic [63:0] x, w, xo, wo;
  logic v, xvo, wvo, ld;
  logic [31:0] ldv, acc;
  int checks = 0, failures = 0;

  speed_pe dut (.clk_i (clk), .rst_ni (rst_n), .prec_i (prec), .x_i (x), .xv_i (v), .w_i (w), .wv_i (v),
                .x_o (xo), .xv_o (xvo), .w_o (wo), .wv_o (wvo), .load_i (ld), .load_val_i (ldv), .acc_o (acc));

  initial begin
    int exp_acc;
    v = 0; ld = 0; x = 0; w = 0; ldv = 0; prec = PREC16;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      @(negedge clk);
      prec = prec_e'(p); ld = 1; ldv = $urandom; exp_acc = int'(ldv);
      @(negedge clk); ld = 0;
      checks++; if (acc != ldv) begin failures++; $display("FAIL preload"); end
      for (int i = 0; i < 40; i++) begin
        x = {$urandom, $urandom}; w = {$urandom, $urandom};
        if (i < 3) begin x = '1; w = (p == 0) ? 64'h8000 : (p == 1) ? 64'h80808080 : '1; end  // extremes
        v = 1;
        exp_acc += dot_ref(prec, x, w);
        @(negedge clk);
        checks++;
        if (acc != 32'(exp_acc)) begin failures++; $display("FAIL p=%0d i=%0d acc=%h exp=%h", p, i, acc, 32'(exp_acc)); end
        checks++;
        if (xo != x || wo != w || !xvo || !wvo) begin failures++; $display("FAIL forward"); end
      end
      v = 0;
      @(negedge clk);
      checks++; if (acc != 32'(exp_acc)) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
