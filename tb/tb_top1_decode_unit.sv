// tb_top1_decode_unit: checks the top-1 decode unit against an independent
// ranking model: all-equal subgroups (lowest index), +v/-v ties, the worked
// examples of the format description (0011 + 00 -> 1.375, 0111 + 00 -> 5.5,
// 0110 + 00 -> 3.75) and random subgroups with random metadata.
module tb_top1_decode_unit;
  import tb_ref_pkg::*;

  logic [7:0][3:0] fp4;
  logic [1:0]      meta;
  logic [2:0]      idx;
  logic [3:0]      val;
  logic [5:0]      fp6;
  int checks = 0, failures = 0;

  top1_decode_unit dut (.fp4_i(fp4), .meta_i(meta), .idx_o(idx), .val_o(val), .fp6_o(fp6));

  task automatic check_one(input string tag);
    int ri;
    real want;
    #1;
    ri = top1_ref(fp4);
    // decoded value: FP4 value plus (meta - 1) eighths of the FP4 binade step
    want = fp6_real({fp4[ri][3], ({fp4[ri][2:0], meta} == 5'd0) ? 5'd0 : ({fp4[ri][2:0], meta} - 5'd1)});
    checks++;
    if (idx != 3'(ri) || val != fp4[ri] || fp6_real(fp6) != want) begin
      failures++;
      $display("FAIL %s: fp4=%h meta=%0d idx=%0d(exp %0d) val=%h fp6=%b (%f exp %f)",
               tag, fp4, meta, idx, ri, val, fp6, fp6_real(fp6), want);
    end
  endtask

  task automatic check_val(input string tag, input real want);
    #1;
    checks++;
    if (fp6_real(fp6) != want) begin
      failures++;
      $display("FAIL %s: fp6=%b %f, expected %f", tag, fp6, fp6_real(fp6), want);
    end
  endtask

  initial begin
    // all equal: index 0
    for (int c = 0; c < 16; c++) begin
      for (int j = 0; j < 8; j++) fp4[j] = 4'(c);
      meta = 2'(c);
      check_one("equal");
      checks++;
      if (idx != 3'd0) begin failures++; $display("FAIL equal tie idx=%0d", idx); end
    end
    // tie between two equal maxima at positions a<b: lowest index
    for (int a = 0; a < 8; a++)
      for (int b = a + 1; b < 8; b++) begin
        fp4 = '0;
        fp4[a] = 4'b0101;
        fp4[b] = 4'b0101;
        meta = 2'd1;
        check_one("pair");
        checks++;
        if (idx != 3'(a)) begin failures++; $display("FAIL pair a=%0d b=%0d idx=%0d", a, b, idx); end
      end
    // +v ranks above -v
    fp4 = '0; fp4[1] = 4'b1110; fp4[6] = 4'b0110; meta = 0;
    check_one("sign");
    checks++;
    if (idx != 3'd6) begin failures++; $display("FAIL sign rank idx=%0d", idx); end
    // worked examples
    // (printed with the lowest address on the right, as in the paper's example)
    fp4 = {16'h0000, 4'b1000, 4'b0011, 4'b0010, 4'b0011}; meta = 2'b00;
    check_val("ex 1.375", 1.375);
    checks++;
    if (idx != 3'd0) begin failures++; $display("FAIL ex idx=%0d", idx); end
    fp4 = {16'h0000, 4'b0010, 4'b0111, 4'b0011, 4'b0000}; meta = 2'b00;
    check_val("ex 5.5", 5.5);
    checks++;
    if (idx != 3'd2) begin failures++; $display("FAIL ex idx=%0d", idx); end
    fp4 = 32'h0000_0006; meta = 2'b00;
    check_val("bad case 3.75", 3.75);
    // random
    for (int n = 0; n < 4000; n++) begin
      for (int j = 0; j < 8; j++) fp4[j] = 4'($urandom_range(0, 15));
      meta = 2'($urandom_range(0, 3));
      check_one("rand");
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
