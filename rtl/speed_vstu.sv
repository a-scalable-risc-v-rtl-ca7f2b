// speed_vstu: vector store unit.
//
// On start_i it writes nwords_i 64-bit words to external memory from byte
// address base_i upward. Word i is read from lane i mod NLANES at lane word
// address src_i + i/NLANES (the same ordered allocation as vle), so a register
// loaded with vle and stored with vse returns unchanged. Per word: a read
// request to the lane (held until its grant, data one cycle later), then a
// memory write held until mem_gnt_i. done_o pulses one cycle after the last
// write is granted. The paper only names this unit; its behaviour here is the
// simplest one that implements vse.
module speed_vstu
  import speed_pkg::*;
#(
  parameter int unsigned NLANES = 4,
  parameter int unsigned WORDS  = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  logic [63:0]              base_i,
  input  logic [AW-1:0]            nwords_i,
  input  logic [$clog2(WORDS)-1:0] src_i,
  output logic                     done_o,
  output logic                     mem_req_o,
  output logic [63:0]              mem_addr_o,
  output logic [XLEN-1:0]          mem_wdata_o,
  input  logic                     mem_gnt_i,
  output logic [NLANES-1:0]        st_req_o,
  output logic [$clog2(WORDS)-1:0] st_addr_o,
  input  logic [NLANES-1:0]        st_gnt_i,
  input  logic [NLANES-1:0]        st_rvalid_i,
  input  logic [XLEN-1:0]          st_rdata_i [NLANES]
);
  localparam int unsigned A  = $clog2(WORDS);
  localparam int unsigned LW = (NLANES > 1) ? $clog2(NLANES) : 1;
  typedef enum logic [1:0] {ST_IDLE, ST_RD, ST_WAIT, ST_WR} state_e;
  state_e state_q;
  logic [63:0] addr_q;
  logic [AW-1:0] left_q;
  logic [A-1:0] row_q;
  logic [LW-1:0] lane_q;
  logic [XLEN-1:0] data_q;

  assign mem_req_o   = (state_q == ST_WR);
  assign mem_addr_o  = addr_q;
  assign mem_wdata_o = data_q;
  assign st_addr_o   = row_q;
  always_comb begin
    st_req_o = '0;
    if (state_q == ST_RD) st_req_o[lane_q] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= ST_IDLE; addr_q <= '0; left_q <= '0; row_q <= '0; lane_q <= '0;
      data_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        ST_IDLE: if (start_i) begin
          addr_q <= base_i; left_q <= nwords_i; row_q <= src_i; lane_q <= '0;
          if (nwords_i == 0) done_o <= 1'b1;
          else               state_q <= ST_RD;
        end
        ST_RD:   if (st_gnt_i[lane_q]) state_q <= ST_WAIT;
        ST_WAIT: if (st_rvalid_i[lane_q]) begin data_q <= st_rdata_i[lane_q]; state_q <= ST_WR; end
        ST_WR:   if (mem_gnt_i) begin
          addr_q <= addr_q + 64'd8;
          left_q <= left_q - 1'b1;
          if (int'(lane_q) == NLANES - 1) begin lane_q <= '0; row_q <= row_q + 1'b1; end
          else                            lane_q <= lane_q + 1'b1;
          if (left_q == 1) begin state_q <= ST_IDLE; done_o <= 1'b1; end
          else             state_q <= ST_RD;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end
endmodule
