// tb_speed_vstu: store unit with four model lanes (random grant delay, data one
// cycle after the grant) and the memory model. Checks that memory word i
// receives lane i mod 4's word at src + i/4.
module tb_speed_vstu;
  import speed_pkg::*;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, mreq, mgnt, mrv; logic [63:0] base, maddr, mwd, mrd; logic [15:0] nw; logic [8:0] src, sa;
  logic [NL-1:0] sreq, sgnt, srv; logic [63:0] srd [NL];
  logic [63:0] lane_mem [NL][512];
  int checks = 0, failures = 0;
  speed_vstu #(.NLANES(NL)) dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start), .base_i (base), .nwords_i (nw),
    .src_i (src), .done_o (done), .mem_req_o (mreq), .mem_addr_o (maddr), .mem_wdata_o (mwd), .mem_gnt_i (mgnt),
    .st_req_o (sreq), .st_addr_o (sa), .st_gnt_i (sgnt), .st_rvalid_i (srv), .st_rdata_i (srd));
  speed_mem_model #(.WORDS(1024), .STALL(1'b1)) u_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (mreq), .we_i (1'b1),
    .addr_i (maddr), .wdata_i (mwd), .gnt_o (mgnt), .rvalid_o (mrv), .rdata_o (mrd));
  always_comb for (int l = 0; l < NL; l++) sgnt[l] = sreq[l] && $urandom_range(1);
  always @(posedge clk) for (int l = 0; l < NL; l++) begin
    srv[l] <= sgnt[l];
    if (sgnt[l]) srd[l] <= lane_mem[l][sa];
  end
  initial begin
    int n;
    start = 0; base = 0; nw = 0; src = 0;
    for (int l = 0; l < NL; l++) begin srv[l] = 0; srd[l] = 0; for (int i = 0; i < 512; i++) lane_mem[l][i] = {$urandom, $urandom}; end
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    n = 45;
    @(negedge clk); start = 1; base = 64'(300 * 8); nw = 16'(n); src = 9'(80);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (u_mem.mem[300 + i] != lane_mem[i % NL][80 + i / NL]) begin failures++; $display("FAIL word %0d", i); end
    end
    checks++; if (u_mem.mem[300 + n] != 0) begin failures++; $display("FAIL wrote past end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
