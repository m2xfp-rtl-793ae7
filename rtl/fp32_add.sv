// fp32_add: IEEE-754 single-precision adder used for the FP32 partial-sum
// accumulation of the PE tiles.
//
// The operands are unpacked, the smaller magnitude is aligned to the larger
// with guard, round and sticky bits, added or subtracted, renormalised and
// rounded to nearest even. Subnormal inputs and results are flushed to zero;
// an infinite input or an exponent overflow gives infinity, inf - inf gives
// the quiet NaN 0x7FC00000. These corner rules are this design's choice.
// Combinational.
module fp32_add (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] s_o
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic [26:0] ml_x, ms_x, ms_sh;
  logic [27:0] acc, acc_n;
  logic        sub;
  logic [7:0]  d;
  logic [4:0]  d_c;
  logic        sticky;
  logic [4:0]  lz;
  logic signed [9:0] e_res, e_fin;
  logic [22:0] frac;
  logic        any_inf, c_nan, c_inf, c_zero, c_uf, c_of, c_num;
  logic [23:0] mant;
  logic        rnd;
  logic [24:0] mant_r;

  always_comb begin
    sa = a_i[31]; ea = a_i[30:23];
    sb = b_i[31]; eb = b_i[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a_i[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b_i[22:0]};
    // larger magnitude first
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    d      = el - es;
    d_c    = (d >= 8'd27) ? 5'd27 : d[4:0];
    ml_x   = {ml, 3'b000};
    ms_x   = {ms, 3'b000};
    // Every shifter and adder below is used on every path (alignment by a
    // clamped distance, one adder with a conditional two's complement, one
    // normalising shift), so each exists once in hardware.
    ms_sh  = ms_x >> d_c;
    sticky = |(ms_x & ~({27{1'b1}} << d_c));
    ms_sh[0] = ms_sh[0] | sticky;

    sub = (sl != ss);
    acc = {1'b0, ml_x} + ({1'b0, ms_sh} ^ {28{sub}}) + 28'(sub);
    // leading-zero count of acc[27:0]; acc[27] is set only by an addition
    // carry, and a shift above 2 only follows an exact (sticky-free)
    // subtraction
    lz = 5'd0;
    for (int i = 0; i <= 27; i++) begin
      if (acc[i]) lz = 5'(27 - i);
    end
    acc_n = acc << lz;
    e_res = {2'b00, el} + 10'sd1 - 10'(lz);

    mant   = acc_n[27:4];
    rnd    = acc_n[3] & (acc_n[2] | acc_n[1] | acc_n[0] | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    e_fin  = e_res + 10'(mant_r[24]);
    frac   = ({23{mant_r[24]}} & mant_r[23:1]) | ({23{~mant_r[24]}} & mant_r[22:0]);

    // Result selection as an AND-OR of exclusive cases (not a mux chain),
    // so that synthesis sees the datapath as always in use.
    any_inf = (ea == 8'hFF) || (eb == 8'hFF);
    c_nan   = (ea == 8'hFF) && (eb == 8'hFF) && (sa != sb);
    c_inf   = any_inf && !c_nan;
    c_zero  = !any_inf && (acc == 28'd0 || ml == 24'd0);
    c_uf    = !any_inf && !c_zero && (e_fin <= 10'sd0);
    c_of    = !any_inf && !c_zero && !c_uf && (e_fin >= 10'sd255);
    c_num   = !any_inf && !c_zero && !c_uf && !c_of;
    s_o = ({32{c_nan}}  & 32'h7FC0_0000)
        | ({32{c_inf}}  & {(ea == 8'hFF) ? sa : sb, 8'hFF, 23'd0})
        | ({32{c_zero}} & {sa & sb & (ml == 24'd0) & (ms == 24'd0), 31'd0})
        | ({32{c_uf}}   & {sl, 31'd0})
        | ({32{c_of}}   & {sl, 8'hFF, 23'd0})
        | ({32{c_num}}  & {sl, e_fin[7:0], frac});
  end
endmodule
