// tb_speed_sau: the SAU with a real request arbiter and VRF. The testbench
// owns requester 0 to preload inputs, weights and accumulators and to read the
// results back. Runs an FF VSAM in each precision and a two-stage CF sequence
// (Acc Addr must be untouched after the first stage and hold the full sum after
// the second), compares with reference dot products, and checks that a VSAM
// of S steps completes within 2*S + 40 cycles (two bank cycles per step when
// inputs and weights share banks, plus fixed overhead).
module tb_speed_sau;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  localparam int R = 4, C = 4, NSR = R + C + 2, NREQ = NSR + 1, WORDS = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NREQ-1:0] v, we, gnt, rv;
  logic [8:0] addr [NREQ]; logic [63:0] wd [NREQ]; logic [63:0] rsp [NREQ];
  logic [7:0] ben, bwe; logic [5:0] brow [8]; logic [63:0] bwd [8]; logic [63:0] brd [8];
  logic start, done; lane_op_t cfg;
  logic [NSR-1:0] sv, swe; logic [8:0] sa [NSR]; logic [63:0] sw [NSR];
  int checks = 0, failures = 0;

  logic v0, we0; logic [8:0] a0; logic [63:0] wd0;
  assign v = {sv, v0}; assign we = {swe, we0}; assign addr[0] = a0; assign wd[0] = wd0;
  for (genvar k = 0; k < NSR; k++) begin : g_c
    assign addr[k+1] = sa[k]; assign wd[k+1] = sw[k];
  end
  logic [63:0] srsp [NSR];
  for (genvar k = 0; k < NSR; k++) begin : g_r
    assign srsp[k] = rsp[k+1];
  end

  speed_sau #(.TILE_R(R), .TILE_C(C), .WORDS(WORDS)) dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start),
    .cfg_i (cfg), .done_o (done), .busy_o (), .req_valid_o (sv), .req_we_o (swe), .req_addr_o (sa),
    .req_wdata_o (sw), .req_gnt_i (gnt[NREQ-1:1]), .rsp_valid_i (rv[NREQ-1:1]), .rsp_data_i (srsp));
  speed_req_arbiter #(.NREQ(NREQ), .NBANKS(8), .WORDS(WORDS)) u_arb (.clk_i (clk), .rst_ni (rst_n),
    .req_valid_i (v), .req_we_i (we), .req_addr_i (addr), .req_wdata_i (wd), .req_gnt_o (gnt),
    .rsp_valid_o (rv), .rsp_data_o (rsp), .bank_en_o (ben), .bank_we_o (bwe), .bank_row_o (brow),
    .bank_wdata_o (bwd), .bank_rdata_i (brd));
  speed_vrf #(.NBANKS(8), .WORDS(WORDS)) u_vrf (.clk_i (clk), .bank_en_i (ben), .bank_we_i (bwe),
    .bank_row_i (brow), .bank_wdata_i (bwd), .bank_rdata_o (brd));

  task automatic wr(input int a, input logic [63:0] d);
    @(negedge clk); v0 = 1; we0 = 1; a0 = 9'(a); wd0 = d;
    @(posedge clk); while (!gnt[0]) @(posedge clk);
    @(negedge clk); v0 = 0;
  endtask
  task automatic rd(input int a, output logic [63:0] d);
    @(negedge clk); v0 = 1; we0 = 0; a0 = 9'(a);
    @(posedge clk); while (!gnt[0]) @(posedge clk);
    @(negedge clk); v0 = 0; d = rsp[0];
  endtask

  logic [63:0] X [64]; logic [63:0] W [64];
  int e [16];

  task automatic run(input prec_e p, input int steps, input int xb, input int wb, input bit first, input bit last);
    int cyc;
    for (int j = 0; j < steps*R; j++) begin X[j] = {$urandom, $urandom}; wr(xb + j, X[j]); end
    for (int j = 0; j < steps*C; j++) begin W[j] = {$urandom, $urandom}; wr(wb + j, W[j]); end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int t = 0; t < steps; t++)
      e[r*C+c] += dot_ref(p, X[t*R+r], W[t*C+c]);
    @(negedge clk);
    cfg = '0; cfg.is_sau = 1; cfg.a_base = 16'(xb); cfg.b_base = 16'(wb); cfg.d_base = 16'd480;
    cfg.steps = 7'(steps); cfg.prec = p; cfg.first = first; cfg.last = last;
    start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 2*steps + 40) begin failures++; $display("FAIL slow: %0d cycles for %0d steps", cyc, steps); end
  endtask

  task automatic compare(input int exp [16], input string tag);
    for (int k = 0; k < 8; k++) begin
      logic [63:0] d;
      rd(480 + k, d);
      checks++;
      if (d != {32'(exp[2*k+1]), 32'(exp[2*k])}) begin failures++; $display("FAIL %s word %0d %h", tag, k, d); end
    end
  endtask

  initial begin
    int bias [16];
    v0 = 0; we0 = 0; a0 = 0; wd0 = 0; start = 0; cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      for (int k = 0; k < 8; k++) begin
        bias[2*k] = int'($urandom) % 5000; bias[2*k+1] = int'($urandom) % 5000;
        wr(480 + k, {32'(bias[2*k+1]), 32'(bias[2*k])});
      end
      e = bias;
      run(prec_e'(p), 10, 0, 128, 1'b1, 1'b1);
      compare(e, "FF");
    end
    // CF: two stages
    for (int k = 0; k < 8; k++) begin bias[2*k] = k; bias[2*k+1] = -k; wr(480 + k, {32'(bias[2*k+1]), 32'(bias[2*k])}); end
    e = bias;
    run(PREC8, 8, 0, 128, 1'b1, 1'b0);
    compare(bias, "CF after stage 1");
    run(PREC8, 8, 256, 384, 1'b0, 1'b1);
    compare(e, "CF after stage 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (30000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
