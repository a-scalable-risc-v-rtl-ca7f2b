// speed_vldu: vector load unit.
//
// On start_i it reads nwords_i consecutive 64-bit words from external memory,
// starting at byte address base_i, and writes them into the lanes' VRFs:
//   broadcast (VSALD): word i goes to every lane at lane word address dst_i+i,
//                      so all lanes see the same inputs;
//   ordered   (VLE)  : word i goes to lane i mod NLANES at dst_i + i/NLANES,
//                      the standard RVV element-to-lane allocation.
// Memory port: mem_req_o held until mem_gnt_i; read data with mem_rvalid_i,
// any number of cycles later. One read is outstanding at a time; a word is
// pushed into the lane load buffers when every target lane has space. done_o
// pulses one cycle after the last push. Broadcast versus ordered allocation
// follows the paper; the memory protocol and one-at-a-time operation are this
// design's choices.
module speed_vldu
  import speed_pkg::*;
#(
  parameter int unsigned NLANES = 4,
  parameter int unsigned WORDS  = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  logic                     bcast_i,
  input  logic [63:0]              base_i,
  input  logic [AW-1:0]            nwords_i,
  input  logic [$clog2(WORDS)-1:0] dst_i,
  output logic                     done_o,
  output logic                     mem_req_o,
  output logic [63:0]              mem_addr_o,
  input  logic                     mem_gnt_i,
  input  logic                     mem_rvalid_i,
  input  logic [XLEN-1:0]          mem_rdata_i,
  output logic [NLANES-1:0]        ld_push_o,
  output logic [$clog2(WORDS)-1:0] ld_addr_o,
  output logic [XLEN-1:0]          ld_data_o,
  input  logic [NLANES-1:0]        ld_full_i
);
  localparam int unsigned A  = $clog2(WORDS);
  localparam int unsigned LW = (NLANES > 1) ? $clog2(NLANES) : 1;
  typedef enum logic [1:0] {LD_IDLE, LD_REQ, LD_WAIT, LD_PUSH} state_e;
  state_e state_q;
  logic bcast_q;
  logic [63:0] addr_q;
  logic [AW-1:0] left_q;
  logic [A-1:0] row_q;
  logic [LW-1:0] lane_q;
  logic [XLEN-1:0] data_q;
  logic can_push;

  assign mem_req_o  = (state_q == LD_REQ);
  assign mem_addr_o = addr_q;
  assign ld_addr_o  = row_q;
  assign ld_data_o  = data_q;
  assign can_push   = bcast_q ? (ld_full_i == '0) : !ld_full_i[lane_q];

  always_comb begin
    ld_push_o = '0;
    if (state_q == LD_PUSH && can_push) begin
      if (bcast_q) ld_push_o = '1;
      else         ld_push_o[lane_q] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= LD_IDLE; bcast_q <= 1'b0; addr_q <= '0; left_q <= '0;
      row_q <= '0; lane_q <= '0; data_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        LD_IDLE: if (start_i) begin
          bcast_q <= bcast_i; addr_q <= base_i; left_q <= nwords_i;
          row_q <= dst_i; lane_q <= '0;
          if (nwords_i == 0) done_o <= 1'b1;
          else               state_q <= LD_REQ;
        end
        LD_REQ:  if (mem_gnt_i) state_q <= LD_WAIT;
        LD_WAIT: if (mem_rvalid_i) begin data_q <= mem_rdata_i; state_q <= LD_PUSH; end
        LD_PUSH: if (can_push) begin
          addr_q <= addr_q + 64'd8;
          left_q <= left_q - 1'b1;
          if (bcast_q || int'(lane_q) == NLANES - 1) begin
            row_q  <= row_q + 1'b1;
            lane_q <= '0;
          end else begin
            lane_q <= lane_q + 1'b1;
          end
          if (left_q == 1) begin state_q <= LD_IDLE; done_o <= 1'b1; end
          else             state_q <= LD_REQ;
        end
        default: state_q <= LD_IDLE;
      endcase
    end
  end
endmodule
