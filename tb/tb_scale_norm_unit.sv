// tb_scale_norm_unit: checks the shared scale and the FP4/FP6 candidates of
// random FP16 groups (normal, subnormal, zero and all-zero groups) against a
// model that computes E = floor(log2(amax)) - 2 on real numbers and rounds
// x / 2^E by searching the FP4 and FP6 value tables. Includes the paper's
// worked example (scale 2^3, FP4 codes 1000 0011 0010 0011 / 0010 0111 0011
// 0000).
module tb_scale_norm_unit;
  import tb_ref_pkg::*;

  logic [31:0][15:0] x;
  logic [31:0][3:0]  fp4;
  logic [31:0][5:0]  fp6;
  logic [7:0]        scale;
  int checks = 0, failures = 0;

  scale_norm_unit dut (.x_i(x), .fp4_o(fp4), .fp6_o(fp6), .scale_o(scale));

  task automatic check(input string tag);
    real amax;
    real v;
    int e;
    logic [7:0] want_s;
    #1;
    amax = 0.0;
    for (int i = 0; i < 32; i++) begin
      v = fp16_real(x[i]);
      if (v < 0.0) v = -v;
      if (v > amax) amax = v;
    end
    e = (amax == 0.0) ? 0 : floor_log2(amax) - 2;
    want_s = (amax == 0.0) ? 8'd0 : 8'(e + 127);
    checks++;
    if (scale != want_s) begin
      failures++;
      $display("FAIL %s scale %0d want %0d", tag, scale, want_s);
    end
    for (int i = 0; i < 32; i++) begin
      v = fp16_real(x[i]) / pow2(e);
      checks++;
      if (fp4[i] != {x[i][15], 3'(q_near(v, 1))} || fp6[i] != {x[i][15], 5'(q_near(v, 3))}) begin
        failures++;
        $display("FAIL %s elem %0d x=%h v=%f fp4=%b want %b fp6=%b want %b", tag, i, x[i], v,
                 fp4[i], {x[i][15], 3'(q_near(v, 1))}, fp6[i], {x[i][15], 5'(q_near(v, 3))});
      end
    end
  endtask

  initial begin
    // worked example: FP16 codes of -0.27 10.26 6.41 10.78 and 9.25 45.36
    // 10.72 1.26 (lowest address on the right)
    x = '0;
    x[3] = 16'hB452; x[2] = 16'h4921; x[1] = 16'h4669; x[0] = 16'h4964;
    x[11] = 16'h48A0; x[10] = 16'h51AC; x[9] = 16'h495C; x[8] = 16'h3D0A;
    check("example");
    checks++;
    if (scale != 8'd130 || fp4[3:0] != {4'b1000, 4'b0011, 4'b0010, 4'b0011} ||
        fp4[11:8] != {4'b0010, 4'b0111, 4'b0011, 4'b0000}) begin
      failures++;
      $display("FAIL example codes scale=%0d fp4=%h", scale, fp4);
    end
    x = '0;
    check("zero group");
    for (int n = 0; n < 3000; n++) begin
      int hi;
      hi = $urandom_range(0, 30);
      for (int i = 0; i < 32; i++) x[i] = rand_fp16((hi > 6) ? hi - 6 : 0, hi);
      check("rand");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
