// speed_vseq: vector instruction sequencer.
//
// Takes decoded instructions from the head of the vector instruction queue
// (head_valid_i, pop_o) strictly in order, one at a time:
//   vsetvli : vl <= rs1, SEW <= vsew. One cycle.
//   VSACFG  : precision, dataflow, steps and stages; resets the CF stage count.
//   VSALD   : broadcast load of ceil(vl*SEW/64) words to register vd.
//   vle/vse : ordered-allocation load/store of the same number of words.
//   ALU op  : every lane runs ceil(words/NLANES) words of vs2 op vs1 -> vd.
//   VSAM    : every lane runs one SAU stage on vs1 (inputs), vs2 (weights),
//             Acc Addr. FF: every VSAM is a full stage (read and write Acc
//             Addr). CF: the first of each group of `stages` VSAMs reads Acc
//             Addr, the last writes it; partial sums stay in the SAU between.
// An instruction completes when the unit(s) it went to pulse done (for lanes:
// all lanes). Lane word address of register v is v*WPR with WPR = VLEN/64/
// NLANES. busy_o is high while an instruction is running. The in-order,
// no-chaining sequencing is this design's simplification.
module speed_vseq
  import speed_pkg::*;
#(
  parameter int unsigned NLANES = 4,
  parameter int unsigned VLEN   = 4096,
  parameter int unsigned WORDS  = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     head_valid_i,
  input  vinstr_t                  dec_i,
  output logic                     pop_o,
  output logic                     busy_o,
  // load unit
  output logic                     ld_start_o,
  output logic                     ld_bcast_o,
  output logic [63:0]              ld_base_o,
  output logic [AW-1:0]            ld_nwords_o,
  output logic [$clog2(WORDS)-1:0] ld_dst_o,
  input  logic                     ld_done_i,
  // store unit
  output logic                     st_start_o,
  output logic [63:0]              st_base_o,
  output logic [AW-1:0]            st_nwords_o,
  output logic [$clog2(WORDS)-1:0] st_src_o,
  input  logic                     st_done_i,
  // lanes
  output logic                     lane_valid_o,
  output lane_op_t                 lane_op_o,
  input  logic [NLANES-1:0]        lane_done_i,
  // configuration state (observable)
  output prec_e                    prec_o,
  output dflow_e                   dflow_o
);
  localparam int unsigned A   = $clog2(WORDS);
  localparam int unsigned WPR = VLEN / XLEN / NLANES;

  typedef enum logic [1:0] {SQ_IDLE, SQ_LD, SQ_ST, SQ_LANE} state_e;
  state_e state_q;
  logic [15:0] vl_q;
  logic [1:0]  sew_q;
  prec_e       prec_q;
  dflow_e      dflow_q;
  logic [6:0]  steps_q;
  logic [5:0]  stages_q, stage_cnt_q;
  logic [NLANES-1:0] done_q;

  logic [AW-1:0] nwords, lane_words;
  always_comb begin
    nwords     = AW'(((32'(vl_q) << sew_q) + 32'd7) >> 3);
    lane_words = AW'((32'(nwords) + NLANES - 1) / NLANES);
  end

  function automatic logic [A-1:0] vaddr(input logic [4:0] v);
    return A'(int'(v) * WPR);
  endfunction

  logic go;
  assign go     = (state_q == SQ_IDLE) && head_valid_i;
  assign pop_o  = go;
  assign busy_o = (state_q != SQ_IDLE);
  assign prec_o = prec_q;
  assign dflow_o = dflow_q;

  assign ld_start_o  = go && (dec_i.op == OP_VSALD || dec_i.op == OP_VLE);
  assign ld_bcast_o  = (dec_i.op == OP_VSALD);
  assign ld_base_o   = dec_i.rs1;
  assign ld_nwords_o = nwords;
  assign ld_dst_o    = vaddr(dec_i.vd);
  assign st_start_o  = go && (dec_i.op == OP_VSE);
  assign st_base_o   = dec_i.rs1;
  assign st_nwords_o = nwords;
  assign st_src_o    = vaddr(dec_i.vd);

  logic cf_first, cf_last;
  assign cf_first = (dflow_q == DF_FF) || (stage_cnt_q == 0);
  assign cf_last  = (dflow_q == DF_FF) || (stage_cnt_q == stages_q - 1'b1);

  always_comb begin
    lane_valid_o     = go && (dec_i.op == OP_ALU || dec_i.op == OP_VSAM);
    lane_op_o        = '0;
    lane_op_o.is_sau = (dec_i.op == OP_VSAM);
    lane_op_o.alu_op = dec_i.alu_op;
    lane_op_o.sew    = sew_q;
    // ALU: a = vs2, b = vs1 (vd = vs2 op vs1, as RVV vsub.vv); SAU: a = inputs (vs1), b = weights (vs2)
    lane_op_o.a_base = AW'(vaddr((dec_i.op == OP_VSAM) ? dec_i.vs1 : dec_i.vs2));
    lane_op_o.b_base = AW'(vaddr((dec_i.op == OP_VSAM) ? dec_i.vs2 : dec_i.vs1));
    lane_op_o.d_base = AW'(vaddr(dec_i.vd));
    lane_op_o.nwords = lane_words;
    lane_op_o.steps  = steps_q;
    lane_op_o.prec   = prec_q;
    lane_op_o.first  = cf_first;
    lane_op_o.last   = cf_last;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= SQ_IDLE; vl_q <= '0; sew_q <= 2'd3; prec_q <= PREC16; dflow_q <= DF_FF;
      steps_q <= 7'd1; stages_q <= 6'd1; stage_cnt_q <= '0; done_q <= '0;
    end else begin
      unique case (state_q)
        SQ_IDLE: if (go) begin
          done_q <= '0;
          unique case (dec_i.op)
            OP_VSETVLI: begin
              vl_q  <= dec_i.rs1[15:0];
              sew_q <= (dec_i.vsew > 3'd3) ? 2'd3 : dec_i.vsew[1:0];
            end
            OP_VSACFG: begin
              prec_q      <= (dec_i.zimm9[1:0] == 2'd0) ? PREC16 : (dec_i.zimm9[1:0] == 2'd1) ? PREC8 : PREC4;
              dflow_q     <= dec_i.zimm9[2] ? DF_CF : DF_FF;
              steps_q     <= (dec_i.zimm9[8:3] == 0) ? 7'd64 : {1'b0, dec_i.zimm9[8:3]};
              stages_q    <= (dec_i.uimm5 == 0) ? 6'd1 : {1'b0, dec_i.uimm5};
              stage_cnt_q <= '0;
            end
            OP_VSALD, OP_VLE: state_q <= SQ_LD;
            OP_VSE:           state_q <= SQ_ST;
            OP_ALU:           state_q <= SQ_LANE;
            OP_VSAM: begin
              state_q <= SQ_LANE;
              if (dflow_q == DF_CF)
                stage_cnt_q <= cf_last ? '0 : stage_cnt_q + 1'b1;
            end
            default: ;
          endcase
        end
        SQ_LD: if (ld_done_i) state_q <= SQ_IDLE;
        SQ_ST: if (st_done_i) state_q <= SQ_IDLE;
        SQ_LANE: begin
          done_q <= done_q | lane_done_i;
          if (&(done_q | lane_done_i)) state_q <= SQ_IDLE;
        end
        default: state_q <= SQ_IDLE;
      endcase
    end
  end
endmodule
