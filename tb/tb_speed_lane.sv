// tb_speed_lane: one lane at default size. Loads words through the load port,
// runs a vadd.vv (e32) and a 16-bit SAU stage through the operation port, and
// reads the results back through the store port, comparing with values
// computed here.
module tb_speed_lane;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic opv, opr, done, ldp, ldf, str, stg, strv;
  lane_op_t op; logic [8:0] lda, sta; logic [63:0] ldd, std_;
  int checks = 0, failures = 0;
  speed_lane dut (.clk_i (clk), .rst_ni (rst_n), .op_valid_i (opv), .op_ready_o (opr), .op_i (op), .op_done_o (done),
    .ld_push_i (ldp), .ld_addr_i (lda), .ld_data_i (ldd), .ld_full_o (ldf),
    .st_req_i (str), .st_addr_i (sta), .st_gnt_o (stg), .st_rvalid_o (strv), .st_rdata_o (std_));
  task automatic ld(input int a, input logic [63:0] d);
    @(negedge clk); while (ldf) @(negedge clk);
    ldp = 1; lda = 9'(a); ldd = d; @(negedge clk); ldp = 0;
  endtask
  task automatic st(input int a, output logic [63:0] d);
    @(negedge clk); str = 1; sta = 9'(a);
    @(posedge clk); while (!stg) @(posedge clk);
    @(negedge clk); str = 0; d = std_;
  endtask
  task automatic run(input lane_op_t o);
    @(negedge clk); while (!opr) @(negedge clk);
    opv = 1; op = o; @(negedge clk); opv = 0;
    while (!done) @(negedge clk);
  endtask
  initial begin
    logic [63:0] A [16], B [16], X [16], W [16], d; int e [16];
    lane_op_t o;
    opv = 0; ldp = 0; str = 0; lda = 0; sta = 0; ldd = 0; op = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin A[i] = {$urandom, $urandom}; B[i] = {$urandom, $urandom}; ld(16 + i, A[i]); ld(32 + i, B[i]); end
    o = '0; o.alu_op = ALU_ADD; o.sew = 2'd2; o.a_base = 16; o.b_base = 32; o.d_base = 48; o.nwords = 16;
    run(o);
    for (int i = 0; i < 16; i++) begin
      st(48 + i, d); checks++;
      if (d != {A[i][63:32] + B[i][63:32], A[i][31:0] + B[i][31:0]}) begin failures++; $display("FAIL add %0d", i); end
    end
    // SAU: 4 steps, 16-bit
    for (int i = 0; i < 16; i++) begin X[i] = {$urandom, $urandom}; W[i] = {$urandom, $urandom}; ld(64 + i, X[i]); ld(128 + i, W[i]); end
    for (int k = 0; k < 8; k++) begin ld(256 + k, {32'(k), 32'(100 * k)}); e[2*k] = 100 * k; e[2*k+1] = k; end
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) for (int t = 0; t < 4; t++) e[r*4+c] += dot_ref(PREC16, X[t*4+r], W[t*4+c]);
    o = '0; o.is_sau = 1; o.a_base = 64; o.b_base = 128; o.d_base = 256; o.steps = 4; o.prec = PREC16; o.first = 1; o.last = 1;
    run(o);
    for (int k = 0; k < 8; k++) begin
      st(256 + k, d); checks++;
      if (d != {32'(e[2*k+1]), 32'(e[2*k])}) begin failures++; $display("FAIL sau %0d %h", k, d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
