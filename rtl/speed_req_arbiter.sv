// speed_req_arbiter: VRF request arbiter of one lane.
//
// NREQ requesters each present a request (valid, write enable, lane-local word
// address, write data) and hold it until req_gnt_o is high in the same cycle.
// The arbiter decodes each address to its bank (low address bits) and, per
// bank, grants one requester per cycle in round-robin order, so requesters that
// target different banks are served in parallel and a bank conflict costs the
// loser a cycle. A granted read returns its data on rsp_data_o with
// rsp_valid_o one cycle later. Grants depend combinationally on the requests.
// The paper names this arbiter ("prioritizing data requests"); the round-robin
// policy is this design's choice. NBANKS must be a power of two.
module speed_req_arbiter
  import speed_pkg::*;
#(
  parameter int unsigned NREQ   = 15,
  parameter int unsigned NBANKS = 8,
  parameter int unsigned WORDS  = 512
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic [NREQ-1:0]                  req_valid_i,
  input  logic [NREQ-1:0]                  req_we_i,
  input  logic [$clog2(WORDS)-1:0]         req_addr_i  [NREQ],
  input  logic [XLEN-1:0]                  req_wdata_i [NREQ],
  output logic [NREQ-1:0]                  req_gnt_o,
  output logic [NREQ-1:0]                  rsp_valid_o,
  output logic [XLEN-1:0]                  rsp_data_o  [NREQ],
  output logic [NBANKS-1:0]                bank_en_o,
  output logic [NBANKS-1:0]                bank_we_o,
  output logic [$clog2(WORDS/NBANKS)-1:0]  bank_row_o   [NBANKS],
  output logic [XLEN-1:0]                  bank_wdata_o [NBANKS],
  input  logic [XLEN-1:0]                  bank_rdata_i [NBANKS]
);
  localparam int unsigned BW = $clog2(NBANKS);
  localparam int unsigned RW = $clog2(NREQ);

  logic [RW-1:0] rr_q  [NBANKS];     // requester with highest priority per bank
  logic [RW-1:0] win   [NBANKS];
  logic [NBANKS-1:0] rd_q;           // bank returned read data this cycle
  logic [RW-1:0] owner_q [NBANKS];

  always_comb begin
    req_gnt_o = '0;
    for (int b = 0; b < NBANKS; b++) begin
      bank_en_o[b]    = 1'b0;
      bank_we_o[b]    = 1'b0;
      bank_row_o[b]   = '0;
      bank_wdata_o[b] = '0;
      win[b]          = '0;
      for (int k = 0; k < NREQ; k++) begin
        int i;
        i = (int'(rr_q[b]) + k) % NREQ;
        if (!bank_en_o[b] && req_valid_i[i] && (int'(req_addr_i[i][BW-1:0]) == b)) begin
          bank_en_o[b]    = 1'b1;
          bank_we_o[b]    = req_we_i[i];
          bank_row_o[b]   = req_addr_i[i][$clog2(WORDS)-1:BW];
          bank_wdata_o[b] = req_wdata_i[i];
          win[b]          = RW'(i);
          req_gnt_o[i]    = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0;
      for (int b = 0; b < NBANKS; b++) begin rr_q[b] <= '0; owner_q[b] <= '0; end
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        rd_q[b] <= bank_en_o[b] && !bank_we_o[b];
        if (bank_en_o[b]) begin
          owner_q[b] <= win[b];
          rr_q[b]    <= (int'(win[b]) == NREQ - 1) ? '0 : win[b] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    rsp_valid_o = '0;
    for (int i = 0; i < NREQ; i++) rsp_data_o[i] = '0;
    for (int b = 0; b < NBANKS; b++) begin
      if (rd_q[b]) begin
        rsp_valid_o[owner_q[b]] = 1'b1;
        rsp_data_o[owner_q[b]]  = bank_rdata_i[b];
      end
    end
  end
endmodule
