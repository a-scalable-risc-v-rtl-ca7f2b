// speed_lane: one scalable lane of SPEED.
//
// Contains the lane sequencer, the banked VRF, the ALU, the SAU and the
// request arbiter that gives all of them access to the VRF banks. Ports:
//   op_*  : lane operation from the vector instruction sequencer (valid/ready,
//           done pulse when finished).
//   ld_*  : word writes from the vector load unit (push into a 2-entry load
//           buffer; ld_full_o is back-pressure).
//   st_*  : word reads for the vector store unit (request held until st_gnt_o,
//           data on st_rdata_o with st_rvalid_o one cycle later).
// Arbiter requester numbering: 0 load write, 1 store read, 2..4 ALU read A,
// read B and write, then the TILE_R+TILE_C+2 SAU ports. The paper places the
// request arbiter in the SAU's operand requester; here a single arbiter per lane
// also serves the ALU, load and store paths because they share the banks.
module speed_lane
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 4,
  parameter int unsigned TILE_C = 4,
  parameter int unsigned NBANKS = 8,
  parameter int unsigned WORDS  = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     op_valid_i,
  output logic                     op_ready_o,
  input  lane_op_t                 op_i,
  output logic                     op_done_o,
  input  logic                     ld_push_i,
  input  logic [$clog2(WORDS)-1:0] ld_addr_i,
  input  logic [XLEN-1:0]          ld_data_i,
  output logic                     ld_full_o,
  input  logic                     st_req_i,
  input  logic [$clog2(WORDS)-1:0] st_addr_i,
  output logic                     st_gnt_o,
  output logic                     st_rvalid_o,
  output logic [XLEN-1:0]          st_rdata_o
);
  localparam int unsigned A    = $clog2(WORDS);
  localparam int unsigned NSR  = TILE_R + TILE_C + 2;
  localparam int unsigned NREQ = 5 + NSR;
  localparam int unsigned RWB  = $clog2(WORDS / NBANKS);

  logic [NREQ-1:0] rq_valid, rq_we, rq_gnt, rs_valid;
  logic [A-1:0]    rq_addr  [NREQ];
  logic [XLEN-1:0] rq_wdata [NREQ];
  logic [XLEN-1:0] rs_data  [NREQ];

  // ---------------- load buffer
  logic            lb_empty, lb_pop;
  logic [A+XLEN-1:0] lb_head;
  speed_fifo #(.WIDTH(A + XLEN), .DEPTH(2)) u_ld_buf (
    .clk_i, .rst_ni, .push_i (ld_push_i), .data_i ({ld_addr_i, ld_data_i}), .full_o (ld_full_o),
    .pop_i (lb_pop), .data_o (lb_head), .empty_o (lb_empty), .count_o ());
  assign rq_valid[0] = !lb_empty;
  assign rq_we[0]    = 1'b1;
  assign rq_addr[0]  = lb_head[A+XLEN-1:XLEN];
  assign rq_wdata[0] = lb_head[XLEN-1:0];
  assign lb_pop      = rq_gnt[0];

  // ---------------- store read port
  assign rq_valid[1] = st_req_i;
  assign rq_we[1]    = 1'b0;
  assign rq_addr[1]  = st_addr_i;
  assign rq_wdata[1] = '0;
  assign st_gnt_o    = rq_gnt[1];
  assign st_rvalid_o = rs_valid[1];
  assign st_rdata_o  = rs_data[1];

  // ---------------- lane sequencer + ALU
  logic     sau_start, sau_done;
  lane_op_t sau_cfg;
  alu_op_e  alu_op;
  logic [1:0] alu_sew;
  logic [XLEN-1:0] alu_a, alu_b, alu_y;
  logic [2:0] ls_valid, ls_we;
  logic [A-1:0] ls_addr [3];
  logic [XLEN-1:0] ls_wdata [3];
  logic [XLEN-1:0] ls_rdata [3];

  speed_lane_seq #(.WORDS(WORDS)) u_seq (
    .clk_i, .rst_ni, .op_valid_i, .op_ready_o, .op_i, .done_o (op_done_o),
    .sau_start_o (sau_start), .sau_cfg_o (sau_cfg), .sau_done_i (sau_done),
    .alu_op_o (alu_op), .alu_sew_o (alu_sew), .alu_a_o (alu_a), .alu_b_o (alu_b), .alu_y_i (alu_y),
    .req_valid_o (ls_valid), .req_we_o (ls_we), .req_addr_o (ls_addr), .req_wdata_o (ls_wdata),
    .req_gnt_i (rq_gnt[4:2]), .rsp_valid_i (rs_valid[4:2]), .rsp_data_i (ls_rdata));

  speed_alu u_alu (.op_i (alu_op), .sew_i (alu_sew), .a_i (alu_a), .b_i (alu_b), .y_o (alu_y));

  for (genvar k = 0; k < 3; k++) begin : g_ls
    assign rq_valid[2+k] = ls_valid[k];
    assign rq_we[2+k]    = ls_we[k];
    assign rq_addr[2+k]  = ls_addr[k];
    assign rq_wdata[2+k] = ls_wdata[k];
    assign ls_rdata[k]   = rs_data[2+k];
  end

  // ---------------- SAU
  logic [NSR-1:0]  sa_valid, sa_we;
  logic [A-1:0]    sa_addr  [NSR];
  logic [XLEN-1:0] sa_wdata [NSR];
  logic [XLEN-1:0] sa_rdata [NSR];

  speed_sau #(.TILE_R(TILE_R), .TILE_C(TILE_C), .WORDS(WORDS)) u_sau (
    .clk_i, .rst_ni, .start_i (sau_start), .cfg_i (sau_cfg), .done_o (sau_done), .busy_o (),
    .req_valid_o (sa_valid), .req_we_o (sa_we), .req_addr_o (sa_addr), .req_wdata_o (sa_wdata),
    .req_gnt_i (rq_gnt[NREQ-1:5]), .rsp_valid_i (rs_valid[NREQ-1:5]), .rsp_data_i (sa_rdata));

  for (genvar k = 0; k < NSR; k++) begin : g_sa
    assign rq_valid[5+k] = sa_valid[k];
    assign rq_we[5+k]    = sa_we[k];
    assign rq_addr[5+k]  = sa_addr[k];
    assign rq_wdata[5+k] = sa_wdata[k];
    assign sa_rdata[k]   = rs_data[5+k];
  end

  // ---------------- arbiter + VRF
  logic [NBANKS-1:0] b_en, b_we;
  logic [RWB-1:0]    b_row   [NBANKS];
  logic [XLEN-1:0]   b_wdata [NBANKS];
  logic [XLEN-1:0]   b_rdata [NBANKS];

  speed_req_arbiter #(.NREQ(NREQ), .NBANKS(NBANKS), .WORDS(WORDS)) u_arb (
    .clk_i, .rst_ni,
    .req_valid_i (rq_valid), .req_we_i (rq_we), .req_addr_i (rq_addr), .req_wdata_i (rq_wdata),
    .req_gnt_o (rq_gnt), .rsp_valid_o (rs_valid), .rsp_data_o (rs_data),
    .bank_en_o (b_en), .bank_we_o (b_we), .bank_row_o (b_row), .bank_wdata_o (b_wdata),
    .bank_rdata_i (b_rdata));

  speed_vrf #(.NBANKS(NBANKS), .WORDS(WORDS)) u_vrf (
    .clk_i, .bank_en_i (b_en), .bank_we_i (b_we), .bank_row_i (b_row),
    .bank_wdata_i (b_wdata), .bank_rdata_o (b_rdata));
endmodule
