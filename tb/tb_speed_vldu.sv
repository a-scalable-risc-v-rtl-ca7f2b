// tb_speed_vldu: load unit with the memory model (random stalls) and four
// model lane buffers that are randomly full. Checks that a broadcast load puts
// word i at address dst+i of every lane and that an ordered load puts word i
// in lane i mod 4 at dst + i/4, and that done pulses once per load.
module tb_speed_vldu;
  import speed_pkg::*;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, bcast, done, mreq, mgnt, mrv; logic [63:0] base, maddr, mrd; logic [15:0] nw; logic [8:0] dst, la;
  logic [NL-1:0] push, full; logic [63:0] ld;
  logic [63:0] lane_mem [NL][512];
  int checks = 0, failures = 0, ndone = 0;
  speed_vldu #(.NLANES(NL)) dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start), .bcast_i (bcast), .base_i (base),
    .nwords_i (nw), .dst_i (dst), .done_o (done), .mem_req_o (mreq), .mem_addr_o (maddr), .mem_gnt_i (mgnt),
    .mem_rvalid_i (mrv), .mem_rdata_i (mrd), .ld_push_o (push), .ld_addr_o (la), .ld_data_o (ld), .ld_full_i (full));
  speed_mem_model #(.WORDS(1024), .STALL(1'b1)) u_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (mreq), .we_i (1'b0),
    .addr_i (maddr), .wdata_i (64'd0), .gnt_o (mgnt), .rvalid_o (mrv), .rdata_o (mrd));
  always @(posedge clk) begin
    full <= NL'($urandom);
    for (int l = 0; l < NL; l++) if (push[l]) begin
      lane_mem[l][la] <= ld;
      if (full[l]) begin failures++; $display("FAIL push into full lane"); end
    end
    if (done) ndone++;
  end
  initial begin
    start = 0; bcast = 0; base = 0; nw = 0; dst = 0; full = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      int n, d, b;
      n = 37; d = 64 + 100 * mode; b = 200 + 300 * mode;
      @(negedge clk); start = 1; bcast = (mode == 0); base = 64'(b * 8); nw = 16'(n); dst = 9'(d);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int i = 0; i < n; i++)
        for (int l = 0; l < NL; l++) begin
          if (mode == 0) begin
            checks++; if (lane_mem[l][d + i] != u_mem.mem[b + i]) begin failures++; $display("FAIL bcast %0d %0d", i, l); end
          end else if (i % NL == l) begin
            checks++; if (lane_mem[l][d + i / NL] != u_mem.mem[b + i]) begin failures++; $display("FAIL ordered %0d", i); end
          end
        end
    end
    checks++; if (ndone != 2) begin failures++; $display("FAIL done count %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
