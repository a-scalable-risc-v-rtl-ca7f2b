// speed_vrf: banked vector register file of one lane.
//
// WORDS 64-bit words split over NBANKS single-port banks; lane-local word
// address a lives in bank (a mod NBANKS), row (a / NBANKS). Each bank performs
// one read or one write per cycle; read data appears on bank_rdata_o one cycle
// after the request (registered output). Bank selection and conflict handling
// are done by speed_req_arbiter in front of it. With the default 4096-bit VLEN
// and four lanes, one vector register is 16 words of a lane and the 32
// registers take 512 words. The bank count is this design's choice (the paper
// draws banks #0..#N-1 without a number); the banks are flip-flop arrays.
module speed_vrf
  import speed_pkg::*;
#(
  parameter int unsigned NBANKS = 8,
  parameter int unsigned WORDS  = 512
) (
  input  logic                             clk_i,
  input  logic [NBANKS-1:0]                bank_en_i,
  input  logic [NBANKS-1:0]                bank_we_i,
  input  logic [$clog2(WORDS/NBANKS)-1:0]  bank_row_i   [NBANKS],
  input  logic [XLEN-1:0]                  bank_wdata_i [NBANKS],
  output logic [XLEN-1:0]                  bank_rdata_o [NBANKS]
);
  localparam int unsigned DEPTH = WORDS / NBANKS;

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [XLEN-1:0] mem [DEPTH];
    always_ff @(posedge clk_i) begin
      if (bank_en_i[b]) begin
        if (bank_we_i[b]) mem[bank_row_i[b]] <= bank_wdata_i[b];
        else              bank_rdata_o[b]    <= mem[bank_row_i[b]];
      end
    end
  end
endmodule
