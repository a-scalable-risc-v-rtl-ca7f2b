// speed_pe: multi-precision processing element of the SA core.
//
// The PE holds sixteen 4-bit multipliers. Each is built as a 5x5 signed
// multiplier so that a 4-bit digit can enter either sign-extended (the top
// digit of a signed operand) or zero-extended (a lower digit). The multiplier
// inputs and the shift applied to each product are chosen by the precision:
//   PREC16: one 16x16 MAC. Multiplier 4i+j takes digit i of x and digit j of w,
//           product shifted left by 4(i+j).
//   PREC8 : four 8x8 MACs. For pair k (x[8k+:8], w[8k+:8]) multiplier 4k+2i+j
//           takes digit 2k+i of x and 2k+j of w, shifted by 4(i+j).
//   PREC4 : sixteen 4x4 MACs. Multiplier m takes digit m of x and of w.
// The sixteen shifted products are summed, which gives the dot product of the
// unified element pair along the input channel, and added to the accumulator.
// The multiplier count and the 1/4/16 MAC modes follow the paper; the signed
// operand format, the operand order inside the 64-bit word and the 32-bit
// accumulator are this design's choices.
//
// Systolic timing: x and w (with their valid bits) are registered and passed
// to the right and lower neighbours one cycle later. The MAC uses the inputs of
// the current cycle; the accumulator updates at the clock edge. load_i writes
// load_val_i into the accumulator (it wins over a MAC in the same cycle).
module speed_pe
  import speed_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  prec_e            prec_i,
  input  logic [XLEN-1:0]  x_i,
  input  logic             xv_i,
  input  logic [XLEN-1:0]  w_i,
  input  logic             wv_i,
  output logic [XLEN-1:0]  x_o,
  output logic             xv_o,
  output logic [XLEN-1:0]  w_o,
  output logic             wv_o,
  input  logic             load_i,
  input  logic [ACC_W-1:0] load_val_i,
  output logic [ACC_W-1:0] acc_o
);
  logic signed [ACC_W-1:0] dot;

  // Sixteen 5x5 signed multipliers fed according to the precision mode.
  always_comb begin
    dot = '0;
    for (int m = 0; m < 16; m++) begin
      int ia, ib, sh;
      logic sa, sb;
      logic signed [4:0] ea, eb;
      logic signed [9:0] p;
      unique case (prec_i)
        PREC16: begin
          ia = m / 4; ib = m % 4; sh = 4 * (ia + ib);
          sa = (ia == 3); sb = (ib == 3);
        end
        PREC8: begin
          ia = 2 * (m / 4) + (m % 4) / 2; ib = 2 * (m / 4) + (m % 2);
          sh = 4 * ((m % 4) / 2 + (m % 2));
          sa = ((m % 4) / 2 == 1); sb = (m % 2 == 1);
        end
        default: begin
          ia = m; ib = m; sh = 0; sa = 1'b1; sb = 1'b1;
        end
      endcase
      ea = {sa & x_i[4*ia+3], x_i[4*ia +: 4]};
      eb = {sb & w_i[4*ib+3], w_i[4*ib +: 4]};
      p  = ea * eb;
      dot = dot + (ACC_W'(p) <<< sh);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      x_o <= '0; w_o <= '0; xv_o <= 1'b0; wv_o <= 1'b0; acc_o <= '0;
    end else begin
      x_o  <= x_i;  xv_o <= xv_i;
      w_o  <= w_i;  wv_o <= wv_i;
      if (load_i)              acc_o <= load_val_i;
      else if (xv_i && wv_i)   acc_o <= acc_o + dot;
    end
  end

  // Skewed injection must make input and weight arrive together.
  a_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni) xv_i == wv_i);
endmodule
