// tb_speed_sau_addrgen: checks the input, weight and accumulator address
// sequences for random bases against the layout formulas.
module tb_speed_sau_addrgen;
  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, sadv, aadv, arst; logic [8:0] ib, wb, ab, ia [R], wa [C], aa; logic [6:0] step; logic [3:0] aidx;
  int checks = 0, failures = 0;
  speed_sau_addrgen #(.TILE_R(R), .TILE_C(C), .WORDS(512)) dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start),
    .in_base_i (ib), .w_base_i (wb), .acc_base_i (ab), .step_adv_i (sadv), .acc_adv_i (aadv), .acc_rst_i (arst),
    .step_o (step), .acc_idx_o (aidx), .in_addr_o (ia), .w_addr_o (wa), .acc_addr_o (aa));
  initial begin
    start = 0; sadv = 0; aadv = 0; arst = 0; ib = 0; wb = 0; ab = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int t, k;
      @(negedge clk); start = 1; ib = 9'($urandom); wb = 9'($urandom); ab = 9'($urandom);
      @(negedge clk); start = 0; t = 0; k = 0;
      for (int i = 0; i < 40; i++) begin
        checks++;
        for (int r = 0; r < R; r++) if (ia[r] != 9'(ib + t*R + r)) begin failures++; $display("FAIL in"); end
        for (int c = 0; c < C; c++) if (wa[c] != 9'(wb + t*C + c)) begin failures++; $display("FAIL w"); end
        if (aa != 9'(ab + k) || int'(aidx) != k || int'(step) != t) begin failures++; $display("FAIL acc/step"); end
        sadv = $urandom_range(1); aadv = $urandom_range(1) && k < 8; arst = (i == 20);
        @(negedge clk);
        if (sadv) t++;
        if (arst) k = 0; else if (aadv) k++;
        sadv = 0; aadv = 0; arst = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
