// tb_speed_top: end-to-end test of the SPEED vector processor at its default
// size (4 lanes, VLEN 4096, 4x4 PEs per lane, 8 VRF banks).
//
// The testbench plays the host core: it pushes instructions with their rs1
// values into the instruction queue and preloads/inspects the external memory
// model. Programs run:
//   1. standard RVV: vsetvli, vle, vle, vadd.vv (e16), vsub.vv (e8), vxor.vv,
//      vse; results compared with element-wise arithmetic done here.
//   2. a 16-bit FF convolution tile: VSACFG, VSALD (inputs, broadcast to all
//      lanes), vle (weights, one kernel set per lane), vle (bias/accumulators),
//      VSAM, vse; every lane's 4x4 accumulators compared with the reference.
//   3. an 8-bit CF tile in two stages: the accumulator register is stored after
//      stage 1 (must still hold the bias, because CF keeps partial sums in the
//      SAU) and after stage 2 (must hold the full sum).
//   4. a 4-bit FF tile in two stages (partial sums go through the VRF).
// It counts the mechanisms exercised (broadcast and ordered loads, FF and CF
// stages, each precision, VRF bank conflicts, SAU operand starvation of the SA core, memory
// stalls) and fails any that never happened. The VSAM run time is checked
// against a bound derived from the step count.
module tb_speed_top;
  import speed_pkg::*;
  import speed_tb_pkg::*;

  localparam int NL = 4, TR = 4, TC = 4, WPR = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        iv, ir, idle;
  logic [31:0] instr;
  logic [63:0] rs1;
  logic mreq, mwe, mgnt, mrv;
  logic [63:0] maddr, mwdata, mrdata;

  speed_top dut (
    .clk_i (clk), .rst_ni (rst_n), .instr_valid_i (iv), .instr_ready_o (ir), .instr_i (instr),
    .rs1_i (rs1), .mem_req_o (mreq), .mem_we_o (mwe), .mem_addr_o (maddr), .mem_wdata_o (mwdata),
    .mem_gnt_i (mgnt), .mem_rvalid_i (mrv), .mem_rdata_i (mrdata), .idle_o (idle));

  speed_mem_model #(.WORDS(8192), .STALL(1'b1)) u_mem (
    .clk_i (clk), .rst_ni (rst_n), .req_i (mreq), .we_i (mwe), .addr_i (maddr), .wdata_i (mwdata),
    .gnt_o (mgnt), .rvalid_o (mrv), .rdata_o (mrdata));

  int checks = 0, failures = 0;
  int n_bcast = 0, n_ordered = 0, n_ff = 0, n_cf_mid = 0, n_p16 = 0, n_p8 = 0, n_p4 = 0;
  int n_conflict = 0, n_qfull = 0, n_mstall = 0, n_alu = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input logic [31:0] i, input logic [63:0] r = 64'd0);
    @(negedge clk);
    iv = 1'b1; instr = i; rs1 = r;
    @(posedge clk);
    while (!ir) @(posedge clk);
    @(negedge clk);
    iv = 1'b0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  // ---------------- mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.ld_start && dut.ld_bcast)  n_bcast++;
    if (dut.ld_start && !dut.ld_bcast) n_ordered++;
    if (dut.lane_valid && !dut.lane_op.is_sau) n_alu++;
    if (dut.lane_valid && dut.lane_op.is_sau) begin
      if (dut.lane_op.first && dut.lane_op.last) n_ff++;
      if (!dut.lane_op.last) n_cf_mid++;
      case (dut.lane_op.prec)
        PREC16: n_p16++;
        PREC8:  n_p8++;
        default: n_p4++;
      endcase
    end
    if (mreq && !mgnt) n_mstall++;
    // SAU requester waiting on a bank another requester won
    if ((dut.g_lane[0].u_lane.rq_valid & ~dut.g_lane[0].u_lane.rq_gnt) != 0) n_conflict++;
    // SA core waiting for operands (input queue empty while streaming)
    if (dut.g_lane[0].u_lane.u_sau.state_q == 3'd2 && dut.g_lane[0].u_lane.u_sau.inq_empty) n_qfull++;
  end

  // memory word helpers
  function automatic logic [63:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  localparam int XB = 1024, WB = 2048, AB = 3072, OB = 4096, OB2 = 5120; // word bases

  // Load the memory with inputs X (steps*TR words), weights W (NL*steps*TC words,
  // ordered allocation: lane l word j at j*NL+l) and biases (NL*8 words).
  int steps;
  logic [63:0] X [256];
  logic [63:0] W [NL][256];
  int bias [NL][TR*TC];

  task automatic make_tile(input int s, input int xbase, input int wbase, input int with_bias);
    for (int j = 0; j < s*TR; j++) begin X[j] = rnd64(); u_mem.mem[xbase + j] = X[j]; end
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < s*TC; j++) begin W[l][j] = rnd64(); u_mem.mem[wbase + j*NL + l] = W[l][j]; end
    if (with_bias)
      for (int l = 0; l < NL; l++)
        for (int k = 0; k < 8; k++) begin
          bias[l][2*k] = $signed($urandom_range(2000)) - 1000; bias[l][2*k+1] = $signed($urandom_range(2000)) - 1000;
          u_mem.mem[AB + k*NL + l] = {32'(bias[l][2*k+1]), 32'(bias[l][2*k])};
        end
  endtask

  task automatic accumulate(input prec_e p, input int s, inout int ref_acc [NL][TR*TC]);
    for (int l = 0; l < NL; l++)
      for (int r = 0; r < TR; r++)
        for (int c = 0; c < TC; c++)
          for (int t = 0; t < s; t++)
            ref_acc[l][r*TC+c] += dot_ref(p, X[t*TR+r], W[l][t*TC+c]);
  endtask

  task automatic compare_acc(input int obase, input int ref_acc [NL][TR*TC], input string tag);
    int bad;
    bad = 0;
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < 8; k++) begin
        logic [63:0] got;
        got = u_mem.mem[obase + k*NL + l];
        if (got[31:0] != 32'(ref_acc[l][2*k]) || got[63:32] != 32'(ref_acc[l][2*k+1])) begin
          bad++;
          if (bad < 4) $display("  %s lane %0d word %0d got %h exp %h_%h", tag, l, k, got,
                                32'(ref_acc[l][2*k+1]), 32'(ref_acc[l][2*k]));
        end
        checks++;
      end
    failures += bad;
  endtask

  int ref_acc [NL][TR*TC];
  int t0, t1;

  initial begin
    iv = 1'b0; instr = '0; rs1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---------------- 1. standard RVV ALU program
    begin
      logic [63:0] A [64], Bv [64];
      for (int i = 0; i < 64; i++) begin A[i] = rnd64(); Bv[i] = rnd64(); u_mem.mem[i] = A[i]; u_mem.mem[256+i] = Bv[i]; end
      issue(enc_vsetvli(5'd1, 3'd3), 64);           // vl = 64 x e64 = 64 words
      issue(enc_vle(5'd1, 5'd2), 0);
      issue(enc_vle(5'd2, 5'd2), 256*8);
      issue(enc_vsetvli(5'd1, 3'd1), 256);          // e16, 256 elements = 64 words
      issue(enc_valu(6'b000000, 5'd3, 5'd1, 5'd2)); // v3 = v1 + v2 (e16)
      issue(enc_vsetvli(5'd1, 3'd0), 512);          // e8
      issue(enc_valu(6'b000010, 5'd4, 5'd1, 5'd2)); // v4 = v2 - v1 (e8)
      issue(enc_valu(6'b001011, 5'd5, 5'd1, 5'd2)); // v5 = v2 ^ v1
      issue(enc_vse(5'd3, 5'd2), 512*8);
      issue(enc_vse(5'd4, 5'd2), 640*8);
      issue(enc_vse(5'd5, 5'd2), 768*8);
      wait_idle();
      for (int i = 0; i < 64; i++) begin
        logic [63:0] e_add, e_sub;
        for (int k = 0; k < 4; k++) e_add[16*k +: 16] = A[i][16*k +: 16] + Bv[i][16*k +: 16];
        for (int k = 0; k < 8; k++) e_sub[8*k +: 8]   = Bv[i][8*k +: 8] - A[i][8*k +: 8];
        check(u_mem.mem[512+i] == e_add, $sformatf("vadd.vv e16 word %0d", i));
        check(u_mem.mem[640+i] == e_sub, $sformatf("vsub.vv e8 word %0d", i));
        check(u_mem.mem[768+i] == (A[i] ^ Bv[i]), $sformatf("vxor.vv word %0d", i));
      end
    end

    // ---------------- 2. 16-bit FF tile
    steps = 16;
    make_tile(steps, XB, WB, 1);
    for (int l = 0; l < NL; l++) for (int k = 0; k < 16; k++) ref_acc[l][k] = bias[l][k];
    accumulate(PREC16, steps, ref_acc);
    issue(enc_vsacfg(PREC16, DF_FF, 6'(steps), 5'd1));
    issue(enc_vsetvli(5'd1, 3'd3), steps*TR);              // input words
    issue(enc_vsald(5'd8, 5'd2), XB*8);                    // v8..v11 inputs (broadcast)
    issue(enc_vsetvli(5'd1, 3'd3), NL*steps*TC);
    issue(enc_vle(5'd16, 5'd2), WB*8);                     // v16..v19 weights (ordered)
    issue(enc_vsetvli(5'd1, 3'd3), NL*8);
    issue(enc_vle(5'd24, 5'd2), AB*8);                     // v24 accumulators
    wait_idle();
    t0 = $time;
    issue(enc_vsam(5'd24, 5'd8, 5'd16));
    wait_idle();
    t1 = $time;
    $display("16-bit FF VSAM of %0d steps took %0d cycles", steps, (t1 - t0) / 10);
    check((t1 - t0) / 10 <= 4 * steps + 60, "VSAM cycle count within bound");
    check((t1 - t0) / 10 >= steps, "VSAM cannot beat one step per cycle");
    issue(enc_vse(5'd24, 5'd2), OB*8);
    wait_idle();
    compare_acc(OB, ref_acc, "p16 FF");

    // ---------------- 3. 8-bit CF, two stages
    steps = 8;
    make_tile(steps, XB, WB, 1);
    for (int l = 0; l < NL; l++) for (int k = 0; k < 16; k++) ref_acc[l][k] = bias[l][k];
    accumulate(PREC8, steps, ref_acc);
    issue(enc_vsacfg(PREC8, DF_CF, 6'(steps), 5'd2));
    issue(enc_vsetvli(5'd1, 3'd3), steps*TR);
    issue(enc_vsald(5'd8, 5'd2), XB*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*steps*TC);
    issue(enc_vle(5'd16, 5'd2), WB*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*8);
    issue(enc_vle(5'd24, 5'd2), AB*8);
    issue(enc_vsam(5'd24, 5'd8, 5'd16));                    // stage 1 (first)
    issue(enc_vse(5'd24, 5'd2), OB2*8);                     // still the bias
    wait_idle();
    begin
      int bias_only [NL][TR*TC];
      for (int l = 0; l < NL; l++) for (int k = 0; k < 16; k++) bias_only[l][k] = bias[l][k];
      compare_acc(OB2, bias_only, "CF between stages");
    end
    make_tile(steps, XB + 512, WB + 4096, 0);               // second input channel group
    accumulate(PREC8, steps, ref_acc);
    issue(enc_vsetvli(5'd1, 3'd3), steps*TR);
    issue(enc_vsald(5'd12, 5'd2), (XB + 512)*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*steps*TC);
    issue(enc_vle(5'd20, 5'd2), (WB + 4096)*8);
    issue(enc_vsam(5'd24, 5'd12, 5'd20));                   // stage 2 (last)
    issue(enc_vse(5'd24, 5'd2), OB*8);
    wait_idle();
    compare_acc(OB, ref_acc, "p8 CF");

    // ---------------- 4. 4-bit FF, two stages through the VRF
    steps = 12;
    make_tile(steps, XB, WB, 1);
    for (int l = 0; l < NL; l++) for (int k = 0; k < 16; k++) ref_acc[l][k] = bias[l][k];
    accumulate(PREC4, steps, ref_acc);
    issue(enc_vsacfg(PREC4, DF_FF, 6'(steps), 5'd1));
    issue(enc_vsetvli(5'd1, 3'd3), steps*TR);
    issue(enc_vsald(5'd8, 5'd2), XB*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*steps*TC);
    issue(enc_vle(5'd16, 5'd2), WB*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*8);
    issue(enc_vle(5'd24, 5'd2), AB*8);
    issue(enc_vsam(5'd24, 5'd8, 5'd16));
    wait_idle();
    make_tile(steps, XB + 512, WB + 4096, 0);
    accumulate(PREC4, steps, ref_acc);
    issue(enc_vsetvli(5'd1, 3'd3), steps*TR);
    issue(enc_vsald(5'd12, 5'd2), (XB + 512)*8);
    issue(enc_vsetvli(5'd1, 3'd3), NL*steps*TC);
    issue(enc_vle(5'd20, 5'd2), (WB + 4096)*8);
    issue(enc_vsam(5'd24, 5'd12, 5'd20));
    issue(enc_vse(5'd24, 5'd2), OB*8);
    wait_idle();
    compare_acc(OB, ref_acc, "p4 FF");

    // ---------------- mechanisms
    $display("mechanisms: bcast=%0d ordered=%0d alu=%0d ff=%0d cf_mid=%0d p16=%0d p8=%0d p4=%0d conflict=%0d qfull=%0d mstall=%0d",
             n_bcast, n_ordered, n_alu, n_ff, n_cf_mid, n_p16, n_p8, n_p4, n_conflict, n_qfull, n_mstall);
    check(n_bcast > 0,    "broadcast load happened");
    check(n_ordered > 0,  "ordered load happened");
    check(n_alu > 0,      "ALU operation happened");
    check(n_ff > 0,       "FF stage happened");
    check(n_cf_mid > 0,   "CF intermediate stage happened");
    check(n_p16 > 0 && n_p8 > 0 && n_p4 > 0, "all three precisions used");
    check(n_conflict > 0, "VRF bank conflict happened");
    check(n_qfull > 0,    "SA core operand stall happened");
    check(n_mstall > 0,   "memory stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
