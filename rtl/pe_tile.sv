// pe_tile: the M2XFP processing element. One tile multiplies an 8-element
// FP4 weight subgroup with an 8-element FP4 activation subgroup and adds the
// result, dequantized to FP32, to an incoming FP32 partial sum.
//
// Datapath (following the paper's PE figure):
//  1. FP4 multiply-accumulate: eight FP4 x FP4 products, exact as integers
//     in units of 1/4, summed by an adder tree.
//  2. Extra mantissa: the activation's top-1 element X' = X + dX carries two
//     extra mantissa bits. W x X is already in the main sum, so only the
//     correction W x dX is added, where dX = FP6(top-1) - FP4(top-1) is
//     formed exactly in units of 1/8. (dX may be negative because the
//     encoder's bias can move the FP6 code below the FP4 value.)
//  3. Subgroup scale: the weight's 2-bit sg_em multiplies the partial sum P
//     by 1.0/1.25/1.5/1.75, computed as P + sg_em[0]*(P>>2) + sg_em[1]*(P>>1)
//     in a signed FXP_W-bit register with FXP_FRAC fraction bits (6 by
//     default, enough for both shifts to be exact).
//  4. Dequantize & accumulate: the fixed-point result is converted to FP32
//     with the exponent offset (sw-127)+(sx-127) of the two E8M0 shared
//     scales and added to psum_i.
// The 32-bit register width, the shift-and-add scale and the E8M0 exponent
// alignment are the paper's; the fraction width, dX formed as a difference
// and FP32 flush-to-zero rounding are this design's choices.
//
// Interface: x_i/w_i element j at index j; top_idx_i/top_fp6_i from the
// top-1 decode unit for x; sg_em_i from the weight metadata.
// Timing: combinational; the enclosing array registers the result.
module pe_tile #(
  parameter int unsigned SG_SIZE  = 8,
  parameter int unsigned FXP_W    = 32,
  parameter int unsigned FXP_FRAC = 6
) (
  input  logic [SG_SIZE-1:0][3:0] x_i,
  input  logic [SG_SIZE-1:0][3:0] w_i,
  input  logic [2:0]              top_idx_i,
  input  logic [5:0]              top_fp6_i,
  input  logic [1:0]              sg_em_i,
  input  logic [7:0]              scale_w_i,
  input  logic [7:0]              scale_x_i,
  input  logic [31:0]             psum_i,
  output logic [31:0]             psum_o
);
  import m2xfp_pkg::*;

  if (FXP_FRAC < 6 || FXP_W != 32) begin : g_param_check
    $error("pe_tile needs FXP_FRAC >= 6 and FXP_W = 32");
  end

  logic signed [9:0]              prod [SG_SIZE]; // units of 1/4
  logic signed [15:0]             base_sum;  // units of 1/4
  logic signed [7:0]              x6_val;    // units of 1/8
  logic signed [7:0]              x4_val;    // units of 1/8
  logic signed [7:0]              dx;        // units of 1/8
  logic signed [4:0]              w_top;     // units of 1/2
  logic signed [13:0]             corr;      // units of 1/16
  logic signed [FXP_W-1:0]        p_fx, p_q, p_h, scaled;
  logic signed [11:0]             exp_adj;
  logic        [31:0]             deq;

  always_comb begin
    for (int j = 0; j < int'(SG_SIZE); j++) begin
      prod[j] = 10'(fp4_val_half(x_i[j])) * 10'(fp4_val_half(w_i[j]));
    end
    base_sum = '0;
    for (int j = 0; j < int'(SG_SIZE); j++) begin
      base_sum = base_sum + 16'(prod[j]);
    end
    x6_val = $signed({2'b00, fp6_mag_eighth(top_fp6_i[4:0])});
    if (top_fp6_i[5]) x6_val = -x6_val;
    x4_val = 8'(fp4_val_half(x_i[top_idx_i])) <<< 2;
    dx     = x6_val - x4_val;
    w_top  = fp4_val_half(w_i[top_idx_i]);
    corr   = 14'(dx) * 14'(w_top);
    p_fx   = (FXP_W'(base_sum) <<< (FXP_FRAC - 2)) + (FXP_W'(corr) <<< (FXP_FRAC - 4));
    p_q    = p_fx >>> 2;   // 0.25 P
    p_h    = p_fx >>> 1;   // 0.5 P
    scaled = p_fx + (sg_em_i[0] ? p_q : '0) + (sg_em_i[1] ? p_h : '0);
    exp_adj = 12'(scale_w_i) + 12'(scale_x_i) - 12'sd254 - 12'(FXP_FRAC);
  end

  fx_to_fp32 u_deq (.fx_i(scaled), .exp_adj_i(exp_adj), .fp_o(deq));
  fp32_add   u_acc (.a_i(psum_i), .b_i(deq), .s_o(psum_o));
endmodule
