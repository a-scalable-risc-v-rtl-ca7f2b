// tb_speed_conv: convolution-layer workloads on the full-size processor.
//
// Runs two small layers of the kinds the evaluated networks are made of and
// compares every output with a direct nested-loop convolution computed here
// from the raw tensors:
//   A. 3x3 convolution, 8-bit, FF strategy: input 6x6x8, 16 output channels,
//      output 4x4x16. Each lane owns 4 output channels (PE columns), PE rows are
//      4 output rows, and one VSAM of 18 steps (9 kernel taps x 2 unified 8-bit
//      elements of 4 channels) computes one output column. The host lays the
//      input windows out for each output column (the words overlap between
//      columns, which is the reuse FF exploits); weights are loaded once.
//   B. 1x1 convolution, 4-bit, CF strategy: 4 pixels x 128 channels, 16 output
//      channels, reduced in 2 CF stages of 4 steps (16 channels per element),
//      partial sums kept inside the SAU between the stages.
module tb_speed_conv;
  import speed_pkg::*;
  import speed_tb_pkg::*;
  localparam int NL = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic iv, ir, idle, mreq, mwe, mgnt, mrv;
  logic [31:0] instr; logic [63:0] rs1, maddr, mwdata, mrdata;
  speed_top dut (.clk_i (clk), .rst_ni (rst_n), .instr_valid_i (iv), .instr_ready_o (ir), .instr_i (instr),
    .rs1_i (rs1), .mem_req_o (mreq), .mem_we_o (mwe), .mem_addr_o (maddr), .mem_wdata_o (mwdata),
    .mem_gnt_i (mgnt), .mem_rvalid_i (mrv), .mem_rdata_i (mrdata), .idle_o (idle));
  speed_mem_model #(.WORDS(8192)) u_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (mreq), .we_i (mwe), .addr_i (maddr),
    .wdata_i (mwdata), .gnt_o (mgnt), .rvalid_o (mrv), .rdata_o (mrdata));
  int checks = 0, failures = 0;

  task automatic issue(input logic [31:0] i, input logic [63:0] r = 64'd0);
    @(negedge clk); iv = 1'b1; instr = i; rs1 = r;
    @(posedge clk); while (!ir) @(posedge clk);
    @(negedge clk); iv = 1'b0;
  endtask
  task automatic wait_idle(); @(posedge clk); while (!idle) @(posedge clk); endtask

  // layer A tensors
  logic signed [7:0] X [6][6][8];
  logic signed [7:0] K [16][3][3][8];
  // layer B tensors
  logic signed [3:0] X2 [4][128];
  logic signed [3:0] K2 [16][128];

  localparam int XB = 0, WB = 1024, ZB = 2048, OB = 3072;

  initial begin
    int cyc0;
    iv = 0; instr = 0; rs1 = 0;
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1'b1;

    // ---------------- A: 3x3, 8-bit, FF
    foreach (X[h, w, c]) X[h][w][c] = 8'($urandom);
    foreach (K[o, a, b, c]) K[o][a][b][c] = 8'($urandom);
    for (int w = 0; w < 4; w++)                    // input words for output column w
      for (int t = 0; t < 18; t++)
        for (int r = 0; r < 4; r++) begin
          int kh, kw, g; logic [63:0] word;
          kh = (t / 2) / 3; kw = (t / 2) % 3; g = t % 2; word = '0;
          for (int k = 0; k < 4; k++) word[8*k +: 8] = X[r + kh][w + kw][4*g + k];
          u_mem.mem[XB + w*72 + t*4 + r] = word;
        end
    for (int l = 0; l < NL; l++)                   // weights: lane l, column c = output channel 4l+c
      for (int t = 0; t < 18; t++)
        for (int c = 0; c < 4; c++) begin
          int kh, kw, g; logic [63:0] word;
          kh = (t / 2) / 3; kw = (t / 2) % 3; g = t % 2; word = '0;
          for (int k = 0; k < 4; k++) word[8*k +: 8] = K[4*l + c][kh][kw][4*g + k];
          u_mem.mem[WB + (t*4 + c)*NL + l] = word;
        end
    issue(enc_vsacfg(PREC8, DF_FF, 6'd18, 5'd1));
    issue(enc_vsetvli(5'd1, 3'd3), 72);
    for (int w = 0; w < 4; w++) issue(enc_vsald(5'(5*w), 5'd2), (XB + w*72)*8);
    issue(enc_vsetvli(5'd1, 3'd3), 72*NL);
    issue(enc_vle(5'd20, 5'd2), WB*8);
    issue(enc_vsetvli(5'd1, 3'd3), 8*NL);
    for (int w = 0; w < 4; w++) issue(enc_vle(5'(26 + w), 5'd2), ZB*8);      // zero accumulators
    wait_idle();
    cyc0 = $time;
    for (int w = 0; w < 4; w++) issue(enc_vsam(5'(26 + w), 5'(5*w), 5'd20));
    wait_idle();
    $display("3x3 layer: 4 VSAMs of 18 steps in %0d cycles", ($time - cyc0) / 10);
    for (int w = 0; w < 4; w++) issue(enc_vse(5'(26 + w), 5'd2), (OB + 32*w)*8);
    wait_idle();
    for (int w = 0; w < 4; w++)
      for (int l = 0; l < NL; l++)
        for (int n = 0; n < 16; n++) begin
          int r, c, o, ref_v; logic [63:0] word; logic [31:0] got;
          r = n / 4; c = n % 4; o = 4*l + c; ref_v = 0;
          for (int kh = 0; kh < 3; kh++) for (int kw = 0; kw < 3; kw++) for (int ci = 0; ci < 8; ci++)
            ref_v += int'(X[r + kh][w + kw][ci]) * int'(K[o][kh][kw][ci]);
          word = u_mem.mem[OB + 32*w + (n/2)*NL + l];
          got = (n % 2 == 0) ? word[31:0] : word[63:32];
          checks++;
          if (got != 32'(ref_v)) begin failures++; if (failures < 5) $display("FAIL A out[%0d][%0d][%0d] %0d exp %0d", r, w, o, int'(got), ref_v); end
        end

    // ---------------- B: 1x1, 4-bit, CF in 2 stages
    foreach (X2[p, c]) X2[p][c] = 4'($urandom);
    foreach (K2[o, c]) K2[o][c] = 4'($urandom);
    for (int s = 0; s < 2; s++) begin
      for (int t = 0; t < 4; t++)
        for (int r = 0; r < 4; r++) begin
          logic [63:0] word;
          for (int k = 0; k < 16; k++) word[4*k +: 4] = X2[r][64*s + 16*t + k];
          u_mem.mem[XB + 512*s + t*4 + r] = word;
        end
      for (int l = 0; l < NL; l++)
        for (int t = 0; t < 4; t++)
          for (int c = 0; c < 4; c++) begin
            logic [63:0] word;
            for (int k = 0; k < 16; k++) word[4*k +: 4] = K2[4*l + c][64*s + 16*t + k];
            u_mem.mem[WB + 512*s + (t*4 + c)*NL + l] = word;
          end
    end
    issue(enc_vsacfg(PREC4, DF_CF, 6'd4, 5'd2));
    issue(enc_vsetvli(5'd1, 3'd3), 16);
    issue(enc_vsald(5'd0, 5'd2), XB*8);
    issue(enc_vsald(5'd1, 5'd2), (XB + 512)*8);
    issue(enc_vsetvli(5'd1, 3'd3), 16*NL);
    issue(enc_vle(5'd4, 5'd2), WB*8);
    issue(enc_vle(5'd5, 5'd2), (WB + 512)*8);
    issue(enc_vsetvli(5'd1, 3'd3), 8*NL);
    issue(enc_vle(5'd8, 5'd2), ZB*8);
    issue(enc_vsam(5'd8, 5'd0, 5'd4));
    issue(enc_vsam(5'd8, 5'd1, 5'd5));
    issue(enc_vse(5'd8, 5'd2), (OB + 256)*8);
    wait_idle();
    for (int l = 0; l < NL; l++)
      for (int n = 0; n < 16; n++) begin
        int r, o, ref_v; logic [63:0] word; logic [31:0] got;
        r = n / 4; o = 4*l + n % 4; ref_v = 0;
        for (int ci = 0; ci < 128; ci++) ref_v += int'(X2[r][ci]) * int'(K2[o][ci]);
        word = u_mem.mem[OB + 256 + (n/2)*NL + l];
        got = (n % 2 == 0) ? word[31:0] : word[63:32];
        checks++;
        if (got != 32'(ref_v)) begin failures++; if (failures < 5) $display("FAIL B out[%0d][%0d] %0d exp %0d", r, o, int'(got), ref_v); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
