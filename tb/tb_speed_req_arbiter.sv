// tb_speed_req_arbiter: random requesters (held until granted) in front of a
// real speed_vrf. Checks at most one grant per bank per cycle, that every
// bank with a request grants someone, that read data returns to the right
// requester one cycle after the grant with the value of a model memory, and
// that no requester waits longer than NREQ cycles (round-robin fairness).
module tb_speed_req_arbiter;
  localparam int NREQ = 6, NB = 4, WORDS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NREQ-1:0] v, we, gnt, rv;
  logic [5:0] addr [NREQ]; logic [63:0] wd [NREQ]; logic [63:0] rsp [NREQ];
  logic [NB-1:0] ben, bwe; logic [3:0] brow [NB]; logic [63:0] bwd [NB]; logic [63:0] brd [NB];
  logic [63:0] model [WORDS];
  int checks = 0, failures = 0, waitc [NREQ];
  speed_req_arbiter #(.NREQ(NREQ), .NBANKS(NB), .WORDS(WORDS)) dut (.clk_i (clk), .rst_ni (rst_n),
    .req_valid_i (v), .req_we_i (we), .req_addr_i (addr), .req_wdata_i (wd), .req_gnt_o (gnt),
    .rsp_valid_o (rv), .rsp_data_o (rsp), .bank_en_o (ben), .bank_we_o (bwe), .bank_row_o (brow),
    .bank_wdata_o (bwd), .bank_rdata_i (brd));
  speed_vrf #(.NBANKS(NB), .WORDS(WORDS)) u_vrf (.clk_i (clk), .bank_en_i (ben), .bank_we_i (bwe),
    .bank_row_i (brow), .bank_wdata_i (bwd), .bank_rdata_o (brd));
  initial begin
    logic [NREQ-1:0] exp_rv; logic [63:0] exp_d [NREQ];
    v = 0; we = 0;
    for (int i = 0; i < NREQ; i++) begin addr[i] = 0; wd[i] = 0; waitc[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise memory through requester 0
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); v = 1; we = 1; addr[0] = 6'(a); wd[0] = {$urandom, $urandom}; model[a] = wd[0];
    end
    @(negedge clk); v = 0; exp_rv = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // new requests for idle requesters
      for (int i = 0; i < NREQ; i++) if (!v[i] && $urandom_range(1)) begin
        v[i] = 1; we[i] = $urandom_range(3) == 0; addr[i] = 6'($urandom); wd[i] = {$urandom, $urandom};
      end
      #1;
      // checks on this cycle's grants
      for (int b = 0; b < NB; b++) begin
        int n, want;
        n = 0; want = 0;
        for (int i = 0; i < NREQ; i++) begin
          if (gnt[i] && addr[i][1:0] == b) n++;
          if (v[i] && addr[i][1:0] == b) want++;
        end
        checks++;
        if (n > 1 || (want > 0 && n != 1)) begin failures++; $display("FAIL bank %0d grants %0d wants %0d", b, n, want); end
      end
      for (int i = 0; i < NREQ; i++) begin
        checks++;
        if (rv[i] != exp_rv[i] || (rv[i] && rsp[i] != exp_d[i])) begin failures++; $display("FAIL rsp %0d", i); end
      end
      exp_rv = '0;
      for (int i = 0; i < NREQ; i++) begin
        if (gnt[i]) begin
          if (we[i]) model[addr[i]] = wd[i];
          else begin exp_rv[i] = 1; exp_d[i] = model[addr[i]]; end
          waitc[i] = 0;
        end else if (v[i]) begin
          waitc[i]++;
          checks++;
          if (waitc[i] > NREQ) begin failures++; $display("FAIL starvation %0d", i); end
        end
      end
      @(negedge clk);
      for (int i = 0; i < NREQ; i++) if (gnt[i]) v[i] = 0;
      // gnt was sampled before the edge; clear those handled
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
