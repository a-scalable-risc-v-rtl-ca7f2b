// speed_lane_seq: lane sequencer.
//
// Accepts one lane_op_t at a time (op_valid_i/op_ready_o handshake; ready only
// when idle). A SAU operation is forwarded to the SAU with a start pulse and
// the sequencer waits for its done. An ALU operation is run word by word: the
// two source words a_base+i and b_base+i are requested from the VRF through two
// arbiter ports, the ALU result is registered and written to d_base+i through a
// third port, then i advances until nwords words are done. done_o pulses one
// cycle when the operation has finished. One operation at a time, without
// chaining, is this design's choice; the paper only names the lane sequencer.
module speed_lane_seq
  import speed_pkg::*;
#(
  parameter int unsigned WORDS = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     op_valid_i,
  output logic                     op_ready_o,
  input  lane_op_t                 op_i,
  output logic                     done_o,
  // SAU control
  output logic                     sau_start_o,
  output lane_op_t                 sau_cfg_o,
  input  logic                     sau_done_i,
  // ALU
  output alu_op_e                  alu_op_o,
  output logic [1:0]               alu_sew_o,
  output logic [XLEN-1:0]          alu_a_o,
  output logic [XLEN-1:0]          alu_b_o,
  input  logic [XLEN-1:0]          alu_y_i,
  // VRF ports: 0 = read A, 1 = read B, 2 = write
  output logic [2:0]               req_valid_o,
  output logic [2:0]               req_we_o,
  output logic [$clog2(WORDS)-1:0] req_addr_o  [3],
  output logic [XLEN-1:0]          req_wdata_o [3],
  input  logic [2:0]               req_gnt_i,
  input  logic [2:0]               rsp_valid_i,
  input  logic [XLEN-1:0]          rsp_data_i  [3]
);
  localparam int unsigned A = $clog2(WORDS);
  typedef enum logic [2:0] {LS_IDLE, LS_SAU, LS_READ, LS_WRITE, LS_DONE} state_e;
  state_e state_q;
  lane_op_t op_q;
  logic [A-1:0] i_q;
  logic [1:0] issued_q, got_q;
  logic [XLEN-1:0] a_q, b_q, y_q;

  assign op_ready_o  = (state_q == LS_IDLE);
  assign sau_start_o = (state_q == LS_IDLE) && op_valid_i && op_i.is_sau;
  assign sau_cfg_o   = op_i;
  assign alu_op_o    = op_q.alu_op;
  assign alu_sew_o   = op_q.sew;
  assign alu_a_o     = rsp_valid_i[0] ? rsp_data_i[0] : a_q;
  assign alu_b_o     = rsp_valid_i[1] ? rsp_data_i[1] : b_q;

  logic [1:0] got_n;
  assign got_n = got_q | rsp_valid_i[1:0];

  always_comb begin
    req_valid_o    = '0;
    req_we_o       = 3'b100;
    req_valid_o[0] = (state_q == LS_READ) && !issued_q[0];
    req_valid_o[1] = (state_q == LS_READ) && !issued_q[1];
    req_valid_o[2] = (state_q == LS_WRITE);
    req_addr_o[0]  = A'(op_q.a_base) + i_q;
    req_addr_o[1]  = A'(op_q.b_base) + i_q;
    req_addr_o[2]  = A'(op_q.d_base) + i_q;
    req_wdata_o[0] = '0;
    req_wdata_o[1] = '0;
    req_wdata_o[2] = y_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= LS_IDLE; op_q <= '0; i_q <= '0; issued_q <= '0; got_q <= '0;
      a_q <= '0; b_q <= '0; y_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        LS_IDLE: if (op_valid_i) begin
          op_q <= op_i; i_q <= '0; issued_q <= '0; got_q <= '0;
          if (op_i.is_sau)           state_q <= LS_SAU;
          else if (op_i.nwords == 0) state_q <= LS_DONE;
          else                       state_q <= LS_READ;
        end
        LS_SAU: if (sau_done_i) state_q <= LS_DONE;
        LS_READ: begin
          issued_q <= issued_q | req_gnt_i[1:0];
          got_q    <= got_n;
          if (rsp_valid_i[0]) a_q <= rsp_data_i[0];
          if (rsp_valid_i[1]) b_q <= rsp_data_i[1];
          if (&got_n) begin
            y_q     <= alu_y_i;
            state_q <= LS_WRITE;
          end
        end
        LS_WRITE: if (req_gnt_i[2]) begin
          issued_q <= '0; got_q <= '0;
          i_q <= i_q + 1'b1;
          state_q <= (i_q + 1'b1 == A'(op_q.nwords)) ? LS_DONE : LS_READ;
        end
        LS_DONE: begin done_o <= 1'b1; state_q <= LS_IDLE; end
        default: state_q <= LS_IDLE;
      endcase
    end
  end
endmodule
