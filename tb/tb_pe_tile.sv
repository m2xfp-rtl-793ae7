// tb_pe_tile: checks one PE tile against a real-arithmetic model:
//   psum_o = psum_i + 2^(sw-127) 2^(sx-127) (1 + sg_em/4)
//            * (sum_j w_j x_j + w_t (X'_t - x_t))
// where t is the top-1 index and X'_t its decoded FP6 value. The model sum
// is exact in double precision, so one rounding to FP32 must match the RTL
// bit for bit. Covers every sg_em code, top-1 corrections of both signs,
// cancellation against psum_i and a zero partial sum.
module tb_pe_tile;
  import tb_ref_pkg::*;

  logic [7:0][3:0] x, w;
  logic [2:0]      tidx;
  logic [5:0]      tfp6;
  logic [1:0]      sg;
  logic [7:0]      sw, sx;
  logic [31:0]     pin, pout;
  int checks = 0, failures = 0;
  int sg_seen[4];

  pe_tile dut (.x_i(x), .w_i(w), .top_idx_i(tidx), .top_fp6_i(tfp6), .sg_em_i(sg),
               .scale_w_i(sw), .scale_x_i(sx), .psum_i(pin), .psum_o(pout));

  function automatic real model();
    real s;
    real a;
    real b;
    s = 0.0;
    for (int j = 0; j < 8; j++) begin
      a = fp4_real(x[j]);
      b = fp4_real(w[j]);
      s = s + a * b;
    end
    a = fp4_real(w[tidx]);
    b = fp6_real(tfp6) - fp4_real(x[tidx]);
    s = s + a * b;
    s = s * (1.0 + real'(sg) / 4.0);
    s = s * pow2(int'(sw) - 127) * pow2(int'(sx) - 127);
    return s + fp32_real(pin);
  endfunction

  task automatic check(input string tag);
    logic [31:0] want;
    #1;
    want = real_to_fp32(model());
    checks++;
    sg_seen[sg]++;
    if (pout != want) begin
      failures++;
      $display("FAIL %s: got %h (%g) want %h (%g) scaled=%0d deq=%h pin=%h", tag, pout, fp32_real(pout),
               want, fp32_real(want), dut.scaled, dut.deq, pin);
    end
  endtask

  // a consistent activation subgroup: top-1 from the reference ranking and
  // an FP6 code within the encoder's window {fp4, meta} - 1
  task automatic rand_act();
    logic [1:0] meta;
    for (int j = 0; j < 8; j++) begin
      x[j] = 4'($urandom_range(0, 15));
      w[j] = 4'($urandom_range(0, 15));
    end
    tidx = 3'(top1_ref(x));
    meta = 2'($urandom_range(0, 3));
    if ({x[tidx][2:0], meta} == 5'd0) meta = 2'd1;
    tfp6 = {x[tidx][3], {x[tidx][2:0], meta} - 5'd1};
  endtask

  initial begin
    // directed: all ones, sg 0..3, no correction (meta 01 => dX = 0)
    x = {8{4'b0010}}; w = {8{4'b0010}}; tidx = 0; tfp6 = 6'b001000;
    sw = 127; sx = 127; pin = 32'd0;
    for (int s = 0; s < 4; s++) begin
      sg = 2'(s);
      check("ones");
    end
    // negative correction: x top 1.5 decoded as 1.375
    x = '0; x[3] = 4'b0011; w = '0; w[3] = 4'b0111; tidx = 3; tfp6 = 6'b001011; sg = 0;
    check("neg dx");
    // cancellation against psum_in
    x = {8{4'b0010}}; w = {8{4'b0010}}; tidx = 0; tfp6 = 6'b001000; sg = 0;
    pin = real_to_fp32(-8.0);
    check("cancel");
    for (int n = 0; n < 20000; n++) begin
      rand_act();
      sg  = 2'($urandom_range(0, 3));
      sw  = 8'($urandom_range(110, 140));
      sx  = 8'($urandom_range(110, 140));
      pin = real_to_fp32((($urandom_range(0, 2000) - 1000.0) / 64.0 *
                                        pow2(int'(sw) + int'(sx) - 254)));
      check("rand");
    end
    for (int s = 0; s < 4; s++)
      if (sg_seen[s] == 0) begin failures++; $display("FAIL sg_em %0d never used", s); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
