// speed_sau: systolic array unit of one lane; executes VSAM.
//
// Three parts, as in the paper: an operand requester (speed_sau_addrgen plus
// request ports into the lane's speed_req_arbiter), queues (speed_fifo for
// inputs, weights, accumulation values and results) and the SA core
// (speed_sa_core). A VSAM runs through these phases:
//   ACC    (only if cfg.first) read the TILE_R*TILE_C/2 accumulator words at
//          Acc Addr into the acc queue and preload the PE accumulators from it.
//   STREAM for cfg.steps steps, request TILE_R input words and TILE_C weight
//          words per step; a step whose words have all returned is pushed into
//          the input and weight queues, and the core consumes one step per
//          cycle whenever both queues hold one. Bank conflicts and queue space
//          throttle the requester; the queues decouple it from the core.
//   FLUSH  wait until the last step has left the array.
//   WB     (only if cfg.last) push the accumulators into the result queue and
//          write them back to Acc Addr.
// The feature-map-first (FF) strategy uses first=last=1 on every VSAM, so each
// stage's partial sums go back to the VRF; the channel-first (CF) strategy
// reads at the first stage, writes at the last and keeps the partial sums in
// the PEs in between, which is how the paper's CF strategy avoids moving
// partial results. start_i is a one-cycle pulse with cfg_i valid; done_o pulses
// for one cycle at the end. Requester slots: 0..TILE_R-1 inputs, then TILE_C
// weights, then the accumulator read, then the result write.
module speed_sau
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 4,
  parameter int unsigned TILE_C = 4,
  parameter int unsigned WORDS  = 512,
  parameter int unsigned QD     = 4,
  parameter int unsigned NSR    = TILE_R + TILE_C + 2
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  lane_op_t                 cfg_i,
  output logic                     done_o,
  output logic                     busy_o,
  // VRF request ports
  output logic [NSR-1:0]           req_valid_o,
  output logic [NSR-1:0]           req_we_o,
  output logic [$clog2(WORDS)-1:0] req_addr_o  [NSR],
  output logic [XLEN-1:0]          req_wdata_o [NSR],
  input  logic [NSR-1:0]           req_gnt_i,
  input  logic [NSR-1:0]           rsp_valid_i,
  input  logic [XLEN-1:0]          rsp_data_i  [NSR]
);
  localparam int unsigned A     = $clog2(WORDS);
  localparam int unsigned NACC  = TILE_R * TILE_C / 2;
  localparam int unsigned NOP   = TILE_R + TILE_C;     // operand slots
  localparam int unsigned S_ACC = NOP;                 // accumulator read slot
  localparam int unsigned S_RES = NOP + 1;             // result write slot
  localparam int unsigned IW    = $clog2(NACC + 1);

  typedef enum logic [2:0] {ST_IDLE, ST_ACC, ST_STREAM, ST_FLUSH, ST_WB, ST_DONE} state_e;
  state_e state_q;

  lane_op_t cfg_q;
  logic [6:0] fed_q;
  logic [IW-1:0] load_cnt_q, wb_push_q;

  // ---------------- address generator
  logic step_adv, acc_adv, acc_rst;
  logic [6:0] step;
  logic [IW-1:0] acc_idx;
  logic [A-1:0] in_addr [TILE_R];
  logic [A-1:0] w_addr  [TILE_C];
  logic [A-1:0] acc_addr;

  speed_sau_addrgen #(.TILE_R(TILE_R), .TILE_C(TILE_C), .WORDS(WORDS)) u_addrgen (
    .clk_i, .rst_ni, .start_i,
    .in_base_i (A'(cfg_i.a_base)), .w_base_i (A'(cfg_i.b_base)), .acc_base_i (A'(cfg_i.d_base)),
    .step_adv_i (step_adv), .acc_adv_i (acc_adv), .acc_rst_i (acc_rst),
    .step_o (step), .acc_idx_o (acc_idx),
    .in_addr_o (in_addr), .w_addr_o (w_addr), .acc_addr_o (acc_addr)
  );

  // ---------------- queues
  logic [TILE_R*XLEN-1:0] inq_din, inq_dout;
  logic [TILE_C*XLEN-1:0] wq_din, wq_dout;
  logic q_push, q_pop, inq_full, inq_empty, wq_full, wq_empty;
  logic [$clog2(QD+1)-1:0] inq_cnt, wq_cnt;

  speed_fifo #(.WIDTH(TILE_R*XLEN), .DEPTH(QD)) u_input_q (
    .clk_i, .rst_ni, .push_i (q_push), .data_i (inq_din), .full_o (inq_full),
    .pop_i (q_pop), .data_o (inq_dout), .empty_o (inq_empty), .count_o (inq_cnt));
  speed_fifo #(.WIDTH(TILE_C*XLEN), .DEPTH(QD)) u_weight_q (
    .clk_i, .rst_ni, .push_i (q_push), .data_i (wq_din), .full_o (wq_full),
    .pop_i (q_pop), .data_o (wq_dout), .empty_o (wq_empty), .count_o (wq_cnt));

  logic accq_push, accq_pop, accq_full, accq_empty;
  logic [XLEN-1:0] accq_dout;
  logic [$clog2(NACC+1)-1:0] accq_cnt;
  speed_fifo #(.WIDTH(XLEN), .DEPTH(NACC)) u_acc_q (
    .clk_i, .rst_ni, .push_i (accq_push), .data_i (rsp_data_i[S_ACC]), .full_o (accq_full),
    .pop_i (accq_pop), .data_o (accq_dout), .empty_o (accq_empty), .count_o (accq_cnt));

  logic resq_push, resq_pop, resq_full, resq_empty;
  logic [XLEN-1:0] resq_din, resq_dout;
  logic [$clog2(QD+1)-1:0] resq_cnt;
  speed_fifo #(.WIDTH(XLEN), .DEPTH(QD)) u_result_q (
    .clk_i, .rst_ni, .push_i (resq_push), .data_i (resq_din), .full_o (resq_full),
    .pop_i (resq_pop), .data_o (resq_dout), .empty_o (resq_empty), .count_o (resq_cnt));

  // ---------------- SA core
  logic [XLEN-1:0] core_x [TILE_R];
  logic [XLEN-1:0] core_w [TILE_C];
  logic [31:0]     acc    [TILE_R*TILE_C];
  logic            core_busy;

  for (genvar r = 0; r < TILE_R; r++) begin : g_x
    assign core_x[r] = inq_dout[r*XLEN +: XLEN];
  end
  for (genvar c = 0; c < TILE_C; c++) begin : g_w
    assign core_w[c] = wq_dout[c*XLEN +: XLEN];
  end

  speed_sa_core #(.TILE_R(TILE_R), .TILE_C(TILE_C), .ACC_W(32)) u_core (
    .clk_i, .rst_ni, .prec_i (cfg_q.prec),
    .in_valid_i (q_pop), .x_i (core_x), .w_i (core_w),
    .acc_wr_i (accq_pop), .acc_wr_idx_i (($clog2(NACC))'(load_cnt_q)), .acc_wr_data_i (accq_dout),
    .acc_o (acc), .busy_o (core_busy)
  );

  // ---------------- operand requester: one step of TILE_R + TILE_C words
  logic [NOP-1:0]  issued_q, got_q;
  logic            pend_q;                       // a step is being collected
  logic [XLEN-1:0] buf_q [NOP];
  logic [XLEN-1:0] buf_n [NOP];
  logic            fetching, all_gnt, complete;

  assign fetching = (state_q == ST_STREAM) && (step < cfg_q.steps) &&
                    ((int'(inq_cnt) + int'(pend_q)) < QD);
  assign all_gnt  = &(issued_q | req_gnt_i[NOP-1:0]);
  assign step_adv = fetching && all_gnt;
  assign complete = pend_q && (&(got_q | rsp_valid_i[NOP-1:0]));
  assign q_push   = complete;

  always_comb begin
    for (int s = 0; s < NOP; s++) buf_n[s] = rsp_valid_i[s] ? rsp_data_i[s] : buf_q[s];
    for (int r = 0; r < TILE_R; r++) inq_din[r*XLEN +: XLEN] = buf_n[r];
    for (int c = 0; c < TILE_C; c++) wq_din[c*XLEN +: XLEN]  = buf_n[TILE_R + c];
  end

  // ---------------- request ports
  always_comb begin
    req_valid_o = '0;
    req_we_o    = '0;
    for (int s = 0; s < NSR; s++) begin req_addr_o[s] = '0; req_wdata_o[s] = '0; end
    for (int r = 0; r < TILE_R; r++) begin
      req_valid_o[r] = fetching && !issued_q[r];
      req_addr_o[r]  = in_addr[r];
    end
    for (int c = 0; c < TILE_C; c++) begin
      req_valid_o[TILE_R + c] = fetching && !issued_q[TILE_R + c];
      req_addr_o[TILE_R + c]  = w_addr[c];
    end
    req_valid_o[S_ACC] = (state_q == ST_ACC) && (int'(acc_idx) < NACC);
    req_addr_o[S_ACC]  = acc_addr;
    req_valid_o[S_RES] = (state_q == ST_WB) && !resq_empty;
    req_we_o[S_RES]    = 1'b1;
    req_addr_o[S_RES]  = acc_addr;
    req_wdata_o[S_RES] = resq_dout;
  end

  assign accq_push = rsp_valid_i[S_ACC];
  assign accq_pop  = (state_q == ST_ACC) && !accq_empty;
  assign q_pop     = (state_q == ST_STREAM) && !inq_empty && !wq_empty;
  assign resq_push = (state_q == ST_WB) && (int'(wb_push_q) < NACC) && !resq_full;
  assign resq_din  = {acc[2*wb_push_q+1], acc[2*wb_push_q]};
  assign resq_pop  = req_valid_o[S_RES] && req_gnt_i[S_RES];
  assign acc_adv   = (req_valid_o[S_ACC] && req_gnt_i[S_ACC]) || resq_pop;
  assign acc_rst   = (state_q == ST_ACC) && accq_pop && (int'(load_cnt_q) == NACC - 1);

  assign busy_o = (state_q != ST_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= ST_IDLE;
      cfg_q      <= '0;
      fed_q      <= '0;
      load_cnt_q <= '0;
      wb_push_q  <= '0;
      issued_q   <= '0;
      got_q      <= '0;
      pend_q     <= 1'b0;
      done_o     <= 1'b0;
      for (int s = 0; s < NOP; s++) buf_q[s] <= '0;
    end else begin
      done_o <= 1'b0;
      // operand collection
      for (int s = 0; s < NOP; s++) buf_q[s] <= buf_n[s];
      if (complete) got_q <= '0;
      else          got_q <= got_q | rsp_valid_i[NOP-1:0];
      if (step_adv) issued_q <= '0;
      else if (fetching) issued_q <= issued_q | req_gnt_i[NOP-1:0];
      if (step_adv) pend_q <= 1'b1;
      else if (complete) pend_q <= 1'b0;

      unique case (state_q)
        ST_IDLE: if (start_i) begin
          cfg_q      <= cfg_i;
          fed_q      <= '0;
          load_cnt_q <= '0;
          wb_push_q  <= '0;
          state_q    <= cfg_i.first ? ST_ACC : ST_STREAM;
        end
        ST_ACC: if (accq_pop) begin
          load_cnt_q <= load_cnt_q + 1'b1;
          if (int'(load_cnt_q) == NACC - 1) state_q <= ST_STREAM;
        end
        ST_STREAM: if (q_pop) begin
          fed_q <= fed_q + 1'b1;
          if (fed_q + 1'b1 == cfg_q.steps) state_q <= ST_FLUSH;
        end
        ST_FLUSH: if (!core_busy) state_q <= cfg_q.last ? ST_WB : ST_DONE;
        ST_WB: begin
          if (resq_push) wb_push_q <= wb_push_q + 1'b1;
          if (resq_pop && int'(acc_idx) == NACC - 1) state_q <= ST_DONE;
        end
        ST_DONE: begin
          done_o  <= 1'b1;
          state_q <= ST_IDLE;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> state_q == ST_IDLE);
  a_steps_nz:   assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> cfg_i.steps != 0);
endmodule
