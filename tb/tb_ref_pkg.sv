// tb_ref_pkg: reference models for the M2XFP testbenches. They are written
// from the value tables of the formats (exhaustive nearest-value search,
// real arithmetic) rather than from the bit tricks the RTL uses, so that the
// two can be compared.
package tb_ref_pkg;

  // FP4 E2M1 value of a code.
  function automatic real fp4_real(input logic [3:0] c);
    real v;
    case (c[2:0])
      3'd0: v = 0.0;
      3'd1: v = 0.5;
      3'd2: v = 1.0;
      3'd3: v = 1.5;
      3'd4: v = 2.0;
      3'd5: v = 3.0;
      3'd6: v = 4.0;
      default: v = 6.0;
    endcase
    return c[3] ? -v : v;
  endfunction

  // FP6 E2M3 value of a code (bias 1, subnormals when exp = 0).
  function automatic real fp6_real(input logic [5:0] c);
    int e;
    int m;
    real v;
    e = int'(c[4:3]);
    m = int'(c[2:0]);
    if (e == 0) v = m / 8.0;
    else        v = pow2(e - 1) * (1.0 + m / 8.0);
    return c[5] ? -v : v;
  endfunction

  // Nearest magnitude code of |v| in E2M1 (m=1) or E2M3 (m=3); ties go to
  // the smaller magnitude; values beyond the largest saturate.
  function automatic int q_near(input real v, input int m);
    int best;
    real bd;
    real a;
    real cv;
    a = (v < 0.0) ? -v : v;
    best = 0;
    bd = 1.0e30;
    for (int c = 0; c < (1 << (m + 2)); c++) begin
      cv = (m == 1) ? fp4_real(4'(c)) : fp6_real(6'(c));
      if ((a - cv < 0.0 ? cv - a : a - cv) < bd) begin
        bd = (a - cv < 0.0) ? cv - a : a - cv;
        best = c;
      end
    end
    return best;
  endfunction

  // Top-1 index of a subgroup: largest |value|, positive above negative at
  // equal magnitude (the decode unit's ranking table), lowest index on ties.
  function automatic int top1_ref(input logic [7:0][3:0] x);
    int best;
    int bk;
    int k;
    best = 0;
    bk = -1;
    for (int j = 0; j < 8; j++) begin
      k = 2 * int'(x[j][2:0]) + (x[j][3] ? 0 : 1);
      if (k > bk) begin
        bk = k;
        best = j;
      end
    end
    return best;
  endfunction

  // Real value of an FP16 code.
  function automatic real fp16_real(input logic [15:0] h);
    int e;
    real v;
    e = int'(h[14:10]);
    if (e == 0) v = (h[9:0] / 1024.0) * pow2(-14);
    else        v = (1.0 + h[9:0] / 1024.0) * pow2(e - 15);
    return h[15] ? -v : v;
  endfunction

  // Real value of an FP32 code (normal numbers and zero).
  function automatic real fp32_real(input logic [31:0] f);
    int e;
    real v;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    v = (1.0 + f[22:0] / 8388608.0) * pow2(e - 127);
    return f[31] ? -v : v;
  endfunction

  // Real to FP32 bits, round to nearest even, flush to zero below the
  // normal range, infinity above it (the same corner rules as the RTL).
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    int e;
    logic [23:0] m;
    logic [28:0] rest;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    rest = d[28:0];
    if (rest > 29'h1000_0000 || (rest == 29'h1000_0000 && m[0])) m = m + 24'd1;
    if (m[23]) begin
      m = 24'd0;
      e = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // floor(log2(a)) for a > 0.
  function automatic int floor_log2(input real a);
    int e;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    return e;
  endfunction

  // Metadata of one subgroup from the value side: of the four values the
  // decoder can return for FP4 code c ({c, meta} - 1), the one nearest to
  // the FP6 value v6 (the larger metadata when two decode to the same
  // value, which only happens at zero).
  function automatic logic [1:0] meta_ref(input logic [3:0] c, input real v6);
    real best;
    real d;
    real cv;
    logic [1:0] bm;
    logic [4:0] code;
    best = 1.0e30;
    bm = 0;
    for (int m = 0; m < 4; m++) begin
      code = {c[2:0], 2'(m)};
      cv = (code == 5'd0) ? 0.0 : fp6_real({1'b0, code - 5'd1});
      d = (cv > v6) ? cv - v6 : v6 - cv;
      if (d <= best) begin best = d; bm = 2'(m); end
    end
    return bm;
  endfunction

  // Random FP16 code with an exponent field in [elo, ehi]; one in eight is
  // a signed zero.
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    if ($urandom_range(0, 7) == 0) return {1'($urandom_range(0, 1)), 15'd0};
    return {1'($urandom_range(0, 1)), 5'($urandom_range(elo, ehi)), 10'($urandom_range(0, 1023))};
  endfunction

  // Real to FP16 bits, round to nearest even, saturating at 65504, with
  // FP16 subnormals.
  function automatic logic [15:0] real_to_fp16(input real r);
    logic sgn;
    real a;
    real q;
    int e;
    int fl;
    sgn = (r < 0.0);
    a = sgn ? -r : r;
    if (a == 0.0) return {sgn, 15'd0};
    e = floor_log2(a);
    if (e < -14) begin
      q = a * pow2(24);
      fl = $rtoi(q);
      if (q - fl > 0.5 || (q - fl == 0.5 && (fl % 2) == 1)) fl = fl + 1;
      return {sgn, 5'(fl / 1024), 10'(fl % 1024)};
    end
    q = (a / pow2(e) - 1.0) * 1024.0;
    fl = $rtoi(q);
    if (q - fl > 0.5 || (q - fl == 0.5 && (fl % 2) == 1)) fl = fl + 1;
    if (fl == 1024) begin
      fl = 0;
      e = e + 1;
    end
    if (e > 15) return {sgn, 15'h7BFF};
    return {sgn, 5'(e + 15), 10'(fl)};
  endfunction

  // Decoded value of a top-1 element: ({FP4 magnitude, meta} - 1) as E2M3,
  // zero when that would go below zero.
  function automatic real top1_value(input logic [3:0] c, input logic [1:0] meta);
    logic [4:0] code;
    real v;
    code = {c[2:0], meta};
    v = (code == 5'd0) ? 0.0 : fp6_real({1'b0, code - 5'd1});
    return c[3] ? -v : v;
  endfunction

  // Contribution of one PE tile: W subgroup (with sg_em and scale sw) times
  // an Elem-EM activation subgroup (metadata am, scale sx), exact.
  function automatic real tile_ref(input logic [7:0][3:0] x, input logic [1:0] am,
                                   input logic [7:0][3:0] w, input logic [1:0] sg,
                                   input logic [7:0] sw, input logic [7:0] sx);
    int t;
    real s;
    real xv;
    real wv;
    t = top1_ref(x);
    s = 0.0;
    for (int j = 0; j < 8; j++) begin
      xv = (j == t) ? top1_value(x[j], am) : fp4_real(x[j]);
      wv = fp4_real(w[j]);
      s = s + xv * wv;
    end
    s = s * (1.0 + real'(sg) / 4.0);
    return s * pow2(int'(sw) - 127) * pow2(int'(sx) - 127);
  endfunction

  // Full Elem-EM quantization of a 32-element FP16 group.
  // nclamp counts subgroups whose FP6 code fell outside the encodable
  // window; nties subgroups whose FP4 maximum occurs more than once.
  task automatic quantize_ref(input logic [31:0][15:0] g, output logic [127:0] elem,
                              output logic [7:0] scale, output logic [7:0] meta,
                              output int nclamp, output int nties);
    real amax;
    real v;
    int e;
    int t;
    logic [31:0][3:0] f4;
    logic [31:0][5:0] f6;
    logic [7:0][3:0] sub;
    amax = 0.0;
    for (int i = 0; i < 32; i++) begin
      v = fp16_real(g[i]);
      if (v < 0.0) v = -v;
      if (v > amax) amax = v;
    end
    e = (amax == 0.0) ? 0 : floor_log2(amax) - 2;
    for (int i = 0; i < 32; i++) begin
      v = fp16_real(g[i]) / pow2(e);
      f4[i] = {g[i][15], 3'(q_near(v, 1))};
      f6[i] = {g[i][15], 5'(q_near(v, 3))};
    end
    nclamp = 0;
    nties = 0;
    for (int s = 0; s < 4; s++) begin
      sub = f4[8*s +: 8];
      t = top1_ref(sub);
      meta[2*s +: 2] = meta_ref(sub[t], fp6_real({1'b0, f6[8*s+t][4:0]}));
      if (int'(f6[8*s+t][4:0]) + 1 < 4 * int'(sub[t][2:0]) ||
          int'(f6[8*s+t][4:0]) + 1 > 4 * int'(sub[t][2:0]) + 3) nclamp++;
      for (int j = 0; j < 8; j++)
        if (j != t && sub[j] == sub[t]) begin
          nties++;
          break;
        end
    end
    elem = f4;
    scale = (amax == 0.0) ? 8'd0 : 8'(e + 127);
  endtask

  // 2^e for an integer e.
  function automatic real pow2(input int e);
    real v;
    v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

endpackage
