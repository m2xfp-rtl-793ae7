// fp32_to_fp16: narrows an FP32 partial sum to the FP16 input format of the
// quantization engine. Round to nearest even; FP16 subnormals are produced;
// magnitudes beyond the FP16 range saturate to +-65504 so that a group
// maximum stays finite; FP32 subnormals, infinities and NaN are treated as
// zero, saturation and saturation respectively (this design's choices; the
// paper only shows FP16 engine inputs). Combinational.
module fp32_to_fp16 (
  input  logic [31:0] f_i,
  output logic [15:0] h_o
);
  logic        s;
  logic [7:0]  e8;
  logic signed [9:0] e;
  logic [23:0] sig;
  logic [4:0]  rs;       // right shift of the 24-bit significand
  logic [10:0] q;
  logic [23:0] mask, rem;
  logic        g, st, rnd;
  logic [11:0] qr;
  logic [4:0]  eh;
  logic        is_norm, is_sub, is_sat, norm_of;
  logic        c_sat, c_norm, c_sub;
  always_comb begin
    s   = f_i[31];
    e8  = f_i[30:23];
    e   = 10'(e8) - 10'sd127;
    sig = {1'b1, f_i[22:0]};
    is_sat  = (e8 == 8'hFF) || (e > 10'sd15);
    is_norm = (e >= -10'sd14);
    is_sub  = !is_norm && (e >= -10'sd25);
    // Normal results keep 11 significant bits (shift 13); subnormal ones
    // are counted in units of 2^-24, i.e. shifted by -(e+1) in 14..24.
    // One shifter serves both cases.
    if (is_norm)     rs = 5'd13;
    else if (is_sub) rs = 5'(-(e + 10'sd1));
    else             rs = 5'd25;
    q    = 11'(sig >> rs);
    mask = ~(24'hFF_FFFF << rs);
    rem  = sig & mask;
    g    = |(rem & (mask ^ (mask >> 1)));
    st   = |(rem & (mask >> 1));
    rnd  = g & (st | q[0]);
    qr   = 12'(q) + 12'(rnd);
    // a normal mantissa carrying out to 2.0 bumps the exponent
    eh      = 5'(e + 10'sd15 + 10'(qr[11]));
    norm_of = qr[11] && (e == 10'sd15);
    c_sat  = (e8 != 8'd0) && (is_sat || (is_norm && norm_of));
    c_norm = (e8 != 8'd0) && !is_sat && is_norm && !norm_of;
    c_sub  = (e8 != 8'd0) && !is_sat && is_sub;
    // AND-OR result selection; a subnormal carry to 1024 is the smallest
    // normal number
    h_o = {s, ({15{c_sat}} & 15'h7BFF)
            | ({15{c_norm}} & {eh, qr[9:0] & {10{~qr[11]}}})
            | ({15{c_sub}} & {4'd0, qr[10:0]})};
  end
endmodule
