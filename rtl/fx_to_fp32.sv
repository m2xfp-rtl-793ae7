// fx_to_fp32: converts a signed 32-bit fixed-point value to FP32 and scales
// it by a power of two, exp_adj_i being added to the exponent. This is the
// dequantization step of a PE tile: with E8M0 shared scales the
// multiplication by 2^(sw-127) * 2^(sx-127) is only an exponent offset.
// Leading-one detection normalises the magnitude; more than 24 significant
// bits are rounded to nearest even. Results below the normal range flush to
// zero, results above it become infinity (this design's choice).
// Combinational.
module fx_to_fp32 (
  input  logic signed [31:0] fx_i,
  input  logic signed [11:0] exp_adj_i,   // value = fx_i * 2^exp_adj_i
  output logic        [31:0] fp_o
);
  logic        sgn;
  logic [31:0] mag, norm;
  logic [4:0]  p;
  logic [24:0] mant;
  logic        rnd;
  logic signed [12:0] e_b;
  logic [22:0] frac;
  logic        c_zero, c_inf, c_num;

  always_comb begin
    sgn = fx_i[31];
    mag = sgn ? 32'(-fx_i) : 32'(fx_i);
    p   = 5'd0;
    for (int i = 0; i < 32; i++) begin
      if (mag[i]) p = 5'(i);
    end
    norm = mag << (5'd31 - p);
    rnd  = norm[7] & ((|norm[6:0]) | norm[8]);
    mant = {1'b0, norm[31:8]} + 25'(rnd);
    e_b  = 13'(p) + 13'(exp_adj_i) + 13'sd127 + 13'(mant[24]);
    frac = ({23{mant[24]}} & mant[23:1]) | ({23{~mant[24]}} & mant[22:0]);
    // AND-OR result selection keeps the datapath unconditional for synthesis
    c_zero = (mag == 32'd0) || (e_b <= 13'sd0);
    c_inf  = !c_zero && (e_b >= 13'sd255);
    c_num  = !c_zero && !c_inf;
    fp_o = ({32{c_inf}} & {sgn, 8'hFF, 23'd0}) | ({32{c_num}} & {sgn, e_b[7:0], frac});
  end
endmodule
