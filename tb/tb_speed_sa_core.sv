// tb_speed_sa_core: streams random steps (with random bubbles) into the 4x4
// array in each precision, with random accumulator preloads, and compares every
// PE's accumulator with the reference matrix of dot products. Checks that
// busy_o stays high exactly TILE_R+TILE_C-2 cycles after the cycle of the last step.
module tb_speed_sa_core;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_e prec; logic vin, accwr, busy;
  logic [63:0] x [R]; logic [63:0] w [C];
  logic [2:0] idx; logic [63:0] accd; logic [31:0] acc [R*C];
  int checks = 0, failures = 0;
  speed_sa_core #(.TILE_R(R), .TILE_C(C)) dut (.clk_i (clk), .rst_ni (rst_n), .prec_i (prec), .in_valid_i (vin),
    .x_i (x), .w_i (w), .acc_wr_i (accwr), .acc_wr_idx_i (idx), .acc_wr_data_i (accd), .acc_o (acc), .busy_o (busy));
  initial begin
    int e [R*C];
    vin = 0; accwr = 0; idx = 0; accd = 0; prec = PREC16;
    for (int r = 0; r < R; r++) x[r] = 0;
    for (int c = 0; c < C; c++) w[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int lat;
      @(negedge clk);
      prec = prec_e'(trial % 3);
      for (int k = 0; k < 8; k++) begin
        accwr = 1; idx = 3'(k); accd = {$urandom, $urandom};
        e[2*k] = int'(accd[31:0]); e[2*k+1] = int'(accd[63:32]);
        @(negedge clk);
      end
      accwr = 0;
      for (int t = 0; t < 20; t++) begin
        while ($urandom_range(3) == 0) begin vin = 0; @(negedge clk); end
        vin = 1;
        for (int r = 0; r < R; r++) x[r] = {$urandom, $urandom};
        for (int c = 0; c < C; c++) w[c] = {$urandom, $urandom};
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) e[r*C+c] += dot_ref(prec, x[r], w[c]);
        @(negedge clk);
      end
      vin = 0;
      lat = 0;
      while (busy) begin lat++; @(negedge clk); end
      checks++;
      if (lat != R + C - 2) begin failures++; $display("FAIL drain latency %0d", lat); end
      for (int k = 0; k < R*C; k++) begin
        checks++;
        if (acc[k] != 32'(e[k])) begin failures++; $display("FAIL trial %0d pe %0d %h exp %h", trial, k, acc[k], 32'(e[k])); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
