// speed_mem_model: behavioural model of the external memory (testbench only).
//
// WORDS 64-bit words addressed by byte address / 8 (modulo WORDS). A request
// is granted in the cycle it is made unless the optional random stall holds it
// off; a granted read returns its data with rvalid one cycle later, a granted
// write updates the array at the clock edge. The array is public so the
// testbench can preload and inspect it.
module speed_mem_model #(
  parameter int unsigned WORDS = 4096,
  parameter bit          STALL = 1'b0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  logic        we_i,
  input  logic [63:0] addr_i,
  input  logic [63:0] wdata_i,
  output logic        gnt_o,
  output logic        rvalid_o,
  output logic [63:0] rdata_o
);
  logic [63:0] mem [WORDS];
  logic stall_q;

  assign gnt_o = req_i && !stall_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o <= 1'b0; rdata_o <= '0; stall_q <= 1'b0;
    end else begin
      stall_q  <= STALL ? ($urandom_range(3) == 0) : 1'b0;
      rvalid_o <= gnt_o && !we_i;
      if (gnt_o && !we_i) rdata_o <= mem[(addr_i >> 3) % WORDS];
      if (gnt_o && we_i)  mem[(addr_i >> 3) % WORDS] <= wdata_i;
    end
  end
endmodule
