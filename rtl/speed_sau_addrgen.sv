// speed_sau_addrgen: address generator of the SAU operand requester.
//
// Loaded with the three base word addresses of a VSAM (inputs vs1, weights
// vs2, accumulators Acc Addr) by start_i. It keeps a step counter for the
// operand streams and an index counter for the accumulator stream and turns
// them into lane-local VRF word addresses:
//   input  row r    of step t : in_base  + t*TILE_R + r
//   weight column c of step t : w_base   + t*TILE_C + c
//   accumulator word k        : acc_base + k      (k = 0 .. TILE_R*TILE_C/2-1)
// step_adv_i / acc_adv_i advance the counters at the clock edge; acc_rst_i
// rewinds the accumulator index (read pass, then write-back pass). All outputs
// are combinational from the registered bases and counters. The streaming
// order (one row or column word per step, consecutive steps contiguous) is
// this design's layout choice; the paper only names an address generator.
module speed_sau_addrgen
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 4,
  parameter int unsigned TILE_C = 4,
  parameter int unsigned WORDS  = 512
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  logic [$clog2(WORDS)-1:0] in_base_i,
  input  logic [$clog2(WORDS)-1:0] w_base_i,
  input  logic [$clog2(WORDS)-1:0] acc_base_i,
  input  logic                     step_adv_i,
  input  logic                     acc_adv_i,
  input  logic                     acc_rst_i,
  output logic [6:0]               step_o,
  output logic [$clog2(TILE_R*TILE_C/2+1)-1:0] acc_idx_o,
  output logic [$clog2(WORDS)-1:0] in_addr_o  [TILE_R],
  output logic [$clog2(WORDS)-1:0] w_addr_o   [TILE_C],
  output logic [$clog2(WORDS)-1:0] acc_addr_o
);
  localparam int unsigned A = $clog2(WORDS);
  logic [A-1:0] in_b, w_b, acc_b;     // current step bases
  logic [A-1:0] acc_base_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      in_b <= '0; w_b <= '0; acc_b <= '0; acc_base_q <= '0; step_o <= '0; acc_idx_o <= '0;
    end else if (start_i) begin
      in_b <= in_base_i; w_b <= w_base_i; acc_b <= acc_base_i; acc_base_q <= acc_base_i;
      step_o <= '0; acc_idx_o <= '0;
    end else begin
      if (step_adv_i) begin
        in_b   <= in_b + A'(TILE_R);
        w_b    <= w_b  + A'(TILE_C);
        step_o <= step_o + 1'b1;
      end
      if (acc_rst_i) begin
        acc_b <= acc_base_q; acc_idx_o <= '0;
      end else if (acc_adv_i) begin
        acc_b <= acc_b + 1'b1; acc_idx_o <= acc_idx_o + 1'b1;
      end
    end
  end

  for (genvar r = 0; r < TILE_R; r++) begin : g_in
    assign in_addr_o[r] = in_b + A'(r);
  end
  for (genvar c = 0; c < TILE_C; c++) begin : g_w
    assign w_addr_o[c] = w_b + A'(c);
  end
  assign acc_addr_o = acc_b;
endmodule
