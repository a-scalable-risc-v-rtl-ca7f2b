// speed_sa_core: TILE_R x TILE_C output-stationary systolic array of speed_pe.
//
// Rows work on different output rows of the feature map (height), columns on
// different output channels (one weight kernel per column), and each PE on the
// input-channel dimension inside a unified element, as in the paper's three
// levels of parallelism. One "step" presents TILE_R input words (x_i, one per
// row) and TILE_C weight words (w_i, one per column) with in_valid_i. Row r is
// delayed r cycles and column c is delayed c cycles before entering the array;
// inputs then move right and weights move down one PE per cycle, so PE(r,c)
// sees step t at cycle t+r+c. busy_o stays high while any step is in flight
// (TILE_R+TILE_C-1 cycles after the last in_valid_i). The accumulators are
// preloaded two at a time through acc_wr_i (word k holds PE 2k in bits [31:0]
// and PE 2k+1 in bits [63:32], PEs numbered r*TILE_C+c) and read in parallel
// from acc_o. The skewed output-stationary organisation is this design's
// choice; the paper gives the array shape and the PE function.
module speed_sa_core
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 4,
  parameter int unsigned TILE_C = 4,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  prec_e                prec_i,
  input  logic                 in_valid_i,
  input  logic [XLEN-1:0]      x_i [TILE_R],
  input  logic [XLEN-1:0]      w_i [TILE_C],
  input  logic                 acc_wr_i,
  input  logic [$clog2(TILE_R*TILE_C/2)-1:0] acc_wr_idx_i,
  input  logic [2*ACC_W-1:0]   acc_wr_data_i,
  output logic [ACC_W-1:0]     acc_o [TILE_R*TILE_C],
  output logic                 busy_o
);
  localparam int unsigned NPE = TILE_R * TILE_C;

  // Skew lines: row r gets r registers, column c gets c registers.
  logic [XLEN-1:0] xsk [TILE_R][TILE_R];
  logic            xvs [TILE_R][TILE_R];
  logic [XLEN-1:0] wsk [TILE_C][TILE_C];
  logic            wvs [TILE_C][TILE_C];

  // PE interconnect
  logic [XLEN-1:0] xh [TILE_R][TILE_C+1];
  logic            xvh[TILE_R][TILE_C+1];
  logic [XLEN-1:0] wv_d [TILE_R+1][TILE_C];
  logic            wvv  [TILE_R+1][TILE_C];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < TILE_R; r++) for (int k = 0; k < TILE_R; k++) begin xsk[r][k] <= '0; xvs[r][k] <= 1'b0; end
      for (int c = 0; c < TILE_C; c++) for (int k = 0; k < TILE_C; k++) begin wsk[c][k] <= '0; wvs[c][k] <= 1'b0; end
    end else begin
      for (int r = 0; r < TILE_R; r++) begin
        xsk[r][0] <= x_i[r]; xvs[r][0] <= in_valid_i;
        for (int k = 1; k < TILE_R; k++) begin xsk[r][k] <= xsk[r][k-1]; xvs[r][k] <= xvs[r][k-1]; end
      end
      for (int c = 0; c < TILE_C; c++) begin
        wsk[c][0] <= w_i[c]; wvs[c][0] <= in_valid_i;
        for (int k = 1; k < TILE_C; k++) begin wsk[c][k] <= wsk[c][k-1]; wvs[c][k] <= wvs[c][k-1]; end
      end
    end
  end

  for (genvar r = 0; r < TILE_R; r++) begin : g_rin
    if (r == 0) begin : g_direct
      assign xh[r][0] = x_i[r]; assign xvh[r][0] = in_valid_i;
    end else begin : g_skew
      assign xh[r][0] = xsk[r][r-1]; assign xvh[r][0] = xvs[r][r-1];
    end
  end
  for (genvar c = 0; c < TILE_C; c++) begin : g_cin
    if (c == 0) begin : g_direct
      assign wv_d[0][c] = w_i[c]; assign wvv[0][c] = in_valid_i;
    end else begin : g_skew
      assign wv_d[0][c] = wsk[c][c-1]; assign wvv[0][c] = wvs[c][c-1];
    end
  end

  logic pe_valid [TILE_R][TILE_C];

  for (genvar r = 0; r < TILE_R; r++) begin : g_row
    for (genvar c = 0; c < TILE_C; c++) begin : g_col
      localparam int unsigned IDX = r * TILE_C + c;
      logic ld;
      assign ld = acc_wr_i && (acc_wr_idx_i == IDX / 2);
      speed_pe #(.ACC_W(ACC_W)) u_pe (
        .clk_i, .rst_ni, .prec_i,
        .x_i (xh[r][c]),   .xv_i (xvh[r][c]),
        .w_i (wv_d[r][c]), .wv_i (wvv[r][c]),
        .x_o (xh[r][c+1]), .xv_o (xvh[r][c+1]),
        .w_o (wv_d[r+1][c]), .wv_o (wvv[r+1][c]),
        .load_i (ld),
        .load_val_i ((IDX % 2 == 0) ? acc_wr_data_i[ACC_W-1:0] : acc_wr_data_i[2*ACC_W-1:ACC_W]),
        .acc_o (acc_o[IDX])
      );
      assign pe_valid[r][c] = xvh[r][c];
    end
  end

  always_comb begin
    busy_o = 1'b0;
    for (int r = 0; r < TILE_R; r++)
      for (int c = 0; c < TILE_C; c++)
        busy_o |= pe_valid[r][c];
  end
endmodule
