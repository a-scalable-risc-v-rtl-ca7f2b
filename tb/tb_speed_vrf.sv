// tb_speed_vrf: random writes and reads on all banks at once, compared with a
// model array; checks the one-cycle read latency and that reads do not disturb
// data.
module tb_speed_vrf;
  localparam int NB = 8, WORDS = 512, D = WORDS / NB;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] en, we;
  logic [5:0] row [NB];
  logic [63:0] wd [NB]; logic [63:0] rd [NB];
  logic [63:0] model [NB][D];
  int checks = 0, failures = 0;
  speed_vrf #(.NBANKS(NB), .WORDS(WORDS)) dut (.clk_i (clk), .bank_en_i (en), .bank_we_i (we),
    .bank_row_i (row), .bank_wdata_i (wd), .bank_rdata_o (rd));
  initial begin
    logic [NB-1:0] was_rd; logic [5:0] was_row [NB];
    en = '0; we = '0;
    for (int b = 0; b < NB; b++) begin row[b] = 0; wd[b] = 0; end
    // fill
    for (int r = 0; r < D; r++) begin
      @(negedge clk);
      en = '1; we = '1;
      for (int b = 0; b < NB; b++) begin row[b] = 6'(r); wd[b] = {$urandom, $urandom}; model[b][r] = wd[b]; end
    end
    was_rd = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) if (was_rd[b]) begin
        checks++;
        if (rd[b] != model[b][was_row[b]]) begin failures++; $display("FAIL bank %0d row %0d", b, was_row[b]); end
      end
      en = NB'($urandom); we = NB'($urandom);
      for (int b = 0; b < NB; b++) begin
        row[b] = 6'($urandom); wd[b] = {$urandom, $urandom};
        was_rd[b] = en[b] && !we[b]; was_row[b] = row[b];
        if (en[b] && we[b]) model[b][row[b]] = wd[b];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
