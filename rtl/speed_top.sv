// speed_top: SPEED multi-precision RISC-V vector processor.
//
// The host scalar core pushes vector instructions with their rs1 value into
// the vector instruction queue (instr_valid_i/instr_ready_o). The decode unit
// decodes the queue head; the sequencer executes it on the load unit, the
// store unit or all NLANES lanes. Each lane has its own banked VRF slice, ALU
// and systolic array unit. External memory is reached through one 64-bit
// request/grant port shared by the load and store units (mem_rvalid_i returns
// read data, writes need only the grant). idle_o is high when the queue is
// empty and nothing runs. Defaults are the evaluated configuration: 4 lanes,
// VLEN 4096, 4x4 PEs per lane.
module speed_top
  import speed_pkg::*;
#(
  parameter int unsigned NLANES = 4,
  parameter int unsigned VLEN   = 4096,
  parameter int unsigned TILE_R = 4,
  parameter int unsigned TILE_C = 4,
  parameter int unsigned NBANKS = 8,
  parameter int unsigned IQ_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        instr_valid_i,
  output logic        instr_ready_o,
  input  logic [31:0] instr_i,
  input  logic [63:0] rs1_i,
  output logic        mem_req_o,
  output logic        mem_we_o,
  output logic [63:0] mem_addr_o,
  output logic [63:0] mem_wdata_o,
  input  logic        mem_gnt_i,
  input  logic        mem_rvalid_i,
  input  logic [63:0] mem_rdata_i,
  output logic        idle_o
);
  localparam int unsigned WORDS = VLEN * 32 / XLEN / NLANES;   // per lane
  localparam int unsigned A     = $clog2(WORDS);

  // ---------------- vector instruction queue + decode
  logic iq_full, iq_empty, iq_pop;
  logic [95:0] iq_head;
  speed_fifo #(.WIDTH(96), .DEPTH(IQ_DEPTH)) u_viq (
    .clk_i, .rst_ni, .push_i (instr_valid_i && !iq_full), .data_i ({rs1_i, instr_i}),
    .full_o (iq_full), .pop_i (iq_pop), .data_o (iq_head), .empty_o (iq_empty), .count_o ());
  assign instr_ready_o = !iq_full;

  vinstr_t dec;
  speed_vidu u_vidu (.instr_i (iq_head[31:0]), .rs1_i (iq_head[95:32]), .dec_o (dec));

  // ---------------- sequencer
  logic ld_start, ld_bcast, ld_done, st_start, st_done, seq_busy, lane_valid;
  logic [63:0] ld_base, st_base;
  logic [AW-1:0] ld_nwords, st_nwords;
  logic [A-1:0] ld_dst, st_src;
  lane_op_t lane_op;
  logic [NLANES-1:0] lane_done;

  speed_vseq #(.NLANES(NLANES), .VLEN(VLEN), .WORDS(WORDS)) u_vseq (
    .clk_i, .rst_ni, .head_valid_i (!iq_empty), .dec_i (dec), .pop_o (iq_pop), .busy_o (seq_busy),
    .ld_start_o (ld_start), .ld_bcast_o (ld_bcast), .ld_base_o (ld_base), .ld_nwords_o (ld_nwords),
    .ld_dst_o (ld_dst), .ld_done_i (ld_done),
    .st_start_o (st_start), .st_base_o (st_base), .st_nwords_o (st_nwords), .st_src_o (st_src),
    .st_done_i (st_done),
    .lane_valid_o (lane_valid), .lane_op_o (lane_op), .lane_done_i (lane_done),
    .prec_o (), .dflow_o ());

  assign idle_o = iq_empty && !seq_busy;

  // ---------------- load / store units
  logic ldu_req, stu_req;
  logic [63:0] ldu_addr, stu_addr, stu_wdata;
  logic [NLANES-1:0] ld_push, ld_full, st_req, st_gnt, st_rvalid;
  logic [A-1:0] ld_addr, st_addr;
  logic [XLEN-1:0] ld_data;
  logic [XLEN-1:0] st_rdata [NLANES];

  speed_vldu #(.NLANES(NLANES), .WORDS(WORDS)) u_vldu (
    .clk_i, .rst_ni, .start_i (ld_start), .bcast_i (ld_bcast), .base_i (ld_base),
    .nwords_i (ld_nwords), .dst_i (ld_dst), .done_o (ld_done),
    .mem_req_o (ldu_req), .mem_addr_o (ldu_addr), .mem_gnt_i (mem_gnt_i && ldu_req),
    .mem_rvalid_i (mem_rvalid_i), .mem_rdata_i (mem_rdata_i),
    .ld_push_o (ld_push), .ld_addr_o (ld_addr), .ld_data_o (ld_data), .ld_full_i (ld_full));

  speed_vstu #(.NLANES(NLANES), .WORDS(WORDS)) u_vstu (
    .clk_i, .rst_ni, .start_i (st_start), .base_i (st_base), .nwords_i (st_nwords),
    .src_i (st_src), .done_o (st_done),
    .mem_req_o (stu_req), .mem_addr_o (stu_addr), .mem_wdata_o (stu_wdata),
    .mem_gnt_i (mem_gnt_i && stu_req),
    .st_req_o (st_req), .st_addr_o (st_addr), .st_gnt_i (st_gnt), .st_rvalid_i (st_rvalid),
    .st_rdata_i (st_rdata));

  // Only one of the two units is active at a time (in-order sequencer).
  assign mem_req_o   = ldu_req | stu_req;
  assign mem_we_o    = stu_req;
  assign mem_addr_o  = stu_req ? stu_addr : ldu_addr;
  assign mem_wdata_o = stu_wdata;

  // ---------------- lanes
  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    speed_lane #(.TILE_R(TILE_R), .TILE_C(TILE_C), .NBANKS(NBANKS), .WORDS(WORDS)) u_lane (
      .clk_i, .rst_ni,
      .op_valid_i (lane_valid), .op_ready_o (), .op_i (lane_op), .op_done_o (lane_done[l]),
      .ld_push_i (ld_push[l]), .ld_addr_i (ld_addr), .ld_data_i (ld_data), .ld_full_o (ld_full[l]),
      .st_req_i (st_req[l]), .st_addr_i (st_addr), .st_gnt_o (st_gnt[l]),
      .st_rvalid_o (st_rvalid[l]), .st_rdata_o (st_rdata[l]));
  end

  a_one_mem_user: assert property (@(posedge clk_i) disable iff (!rst_ni) !(ldu_req && stu_req));
endmodule
