// speed_fifo: synchronous first-word-fall-through FIFO.
//
// Used for the vector instruction queue in front of the decode unit, for the
// per-lane load buffer, and for the four SAU queues (input, weight, acc and
// result). The head entry is visible on data_o whenever empty_o is low; pop_i
// removes it at the clock edge. A push and a pop may happen in the same cycle.
// Depth and width are free parameters; the paper gives neither. Pushing a full
// or popping an empty FIFO is a protocol error and is flagged by assertions.
module speed_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       push_i,
  input  logic [WIDTH-1:0]           data_i,
  output logic                       full_o,
  input  logic                       pop_i,
  output logic [WIDTH-1:0]           data_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  assign full_o  = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty_o = (cnt == '0);
  assign count_o = cnt;
  assign data_o  = mem[rd_ptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push_i) wr_ptr <= incr(wr_ptr);
      if (pop_i)  rd_ptr <= incr(rd_ptr);
      cnt <= cnt + (push_i ? 1'b1 : 1'b0) - (pop_i ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i) mem[wr_ptr] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i  |-> !empty_o);
endmodule
