// scale_norm_unit: first stage of the quantization engine,
// Max -> Scale -> Normalize -> Round, for one 32-element FP16 group.
//
// 1. Max: amax is the largest |x|; for finite FP16 the 15 magnitude bits
//    compare as unsigned integers.
// 2. Scale: the OCP floor rule E = floor(log2(amax / 4)), 4 being the largest
//    power of two of FP4; floor(log2 amax) is the exponent field minus 15
//    for normal numbers and the leading-one position minus 24 for subnormals.
//    The E8M0 code is E + 127. An all-zero group gives code 0.
// 3. Normalize: every |x| / 2^E is formed as an unsigned fixed-point number
//    with 16 fraction bits (always below 8) plus a sticky bit, by shifting the
//    FP16 significand by (exponent - E).
// 4. Round: the same value is rounded to an FP4 (E2M1) and an FP6 (E2M3)
//    code (m2xfp_pkg::round_e2m: nearest, ties toward zero, saturating).
//    Signs are copied, so -0.0 stays 1000 as in the paper's example.
// The floor rule and the FP4/FP6 candidate outputs are the paper's; the
// fixed-point width, tie rule and zero-group scale are this design's.
// Combinational; inf/NaN inputs are not supported.
module scale_norm_unit #(
  parameter int unsigned GROUP = 32
) (
  input  logic [GROUP-1:0][15:0] x_i,
  output logic [GROUP-1:0][3:0]  fp4_o,
  output logic [GROUP-1:0][5:0]  fp6_o,
  output logic [7:0]             scale_o
);
  import m2xfp_pkg::*;

  logic [14:0]        amax;
  logic signed [7:0]  lg;      // floor(log2(amax))
  logic signed [7:0]  e_sh;    // shared exponent E
  logic signed [8:0]  code;

  always_comb begin
    amax = '0;
    for (int i = 0; i < int'(GROUP); i++) begin
      if (x_i[i][14:0] > amax) amax = x_i[i][14:0];
    end
    if (amax[14:10] != 5'd0) begin
      lg = 8'(amax[14:10]) - 8'sd15;
    end else begin
      lg = -8'sd24;
      for (int b = 0; b < 10; b++) begin
        if (amax[b]) lg = 8'(b) - 8'sd24;
      end
    end
    e_sh = lg - 8'sd2;
    code = 9'(e_sh) + 9'sd127;
    if (amax == 15'd0)       scale_o = 8'd0;
    else if (code < 9'sd0)   scale_o = 8'd0;
    else if (code > 9'sd254) scale_o = 8'd254;
    else                     scale_o = code[7:0];
  end

  for (genvar i = 0; i < int'(GROUP); i++) begin : g_elem
    logic [10:0]       sig;
    logic [4:0]        ex;
    logic signed [8:0] s;       // left shift of sig into VF fraction bits
    logic [VF+2:0]     v;
    logic [4:0]        t;
    logic [28:0]       wide;
    logic              sticky;
    logic [2:0]        m4;     // FP4 codes stop at 7
    logic [4:0]        m6;
    always_comb begin
      ex  = x_i[i][14:10];
      sig = {ex != 5'd0, x_i[i][9:0]};
      s   = 9'((ex == 5'd0) ? 5'd1 : ex) - 9'sd9 - 9'(e_sh);
      // v = sig * 2^s (s <= 18) with one right shift of sig placed 18 bits
      // up: t = 18 - s, clamped so that everything shifts out (sticky only)
      if (s <= -9'sd11)     t = 5'd29;
      else                  t = 5'(9'sd18 - s);
      wide   = {sig, 18'd0};
      v      = (VF+3)'(wide >> t);
      sticky = |(wide & ~({29{1'b1}} << t));
      m4 = 3'(round_e2m(v, sticky, 1));
      m6 = round_e2m(v, sticky, 3);
      fp4_o[i] = {x_i[i][15], m4};
      fp6_o[i] = {x_i[i][15], m6};
    end
  end
endmodule
