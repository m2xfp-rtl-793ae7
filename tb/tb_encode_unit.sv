// tb_encode_unit: checks the Elem-EM encoder. For random FP4 codes and FP6
// candidates the metadata of every subgroup must make the decoder's value
// ({fp4, meta} - 1) the one nearest the FP6 candidate of the top-1 element,
// found here by a value-domain search rather than by +1/clamp. Also checks
// the paper's two worked subgroups and its clamped case (3.578 -> 3.75).
module tb_encode_unit;
  import tb_ref_pkg::*;

  logic [31:0][3:0] fp4_i;
  logic [31:0][5:0] fp6;
  logic [7:0]       meta;
  int checks = 0, failures = 0;

  encode_unit dut (.fp4_i(fp4_i), .fp6_i(fp6), .meta_o(meta));

  task automatic check(input string tag);
    logic [7:0][3:0] sub;
    int t;
    logic [1:0] want;
    #1;
    for (int i = 0; i < 4; i++) begin
      sub = fp4_i[8*i +: 8];
      t = top1_ref(sub);
      want = meta_ref(sub[t], fp6_real({1'b0, fp6[8*i+t][4:0]}));
      checks++;
      if (meta[2*i +: 2] != want) begin
        failures++;
        $display("FAIL %s sg %0d top %0d fp4=%b fp6=%b meta=%b want %b", tag, i, t,
                 sub[t], fp6[8*i+t], meta[2*i +: 2], want);
      end
    end
  endtask

  initial begin
    // worked examples: subgroup 0 top-1 0011 with FP6 1.375 (001011) -> 00,
    // subgroup 1 top-1 0111 with FP6 5.5 (011011) -> 00, subgroup 2 top-1
    // 0110 (4.0) with FP6 3.5 (010110) -> clamped to 00 (decodes to 3.75)
    fp4_i = '0; fp6 = '0;
    fp4_i[0] = 4'b0011; fp6[0] = 6'b001011; fp4_i[2] = 4'b0011; fp6[2] = 6'b001010;
    fp4_i[9] = 4'b0111; fp6[9] = 6'b011011;
    fp4_i[16] = 4'b0110; fp6[16] = 6'b010110;
    fp4_i[24] = 4'b0101; fp6[24] = 6'b010100;   // 3.0 -> 3.0 exactly: meta 01
    check("examples");
    checks++;
    if (meta != 8'b01_00_00_00) begin failures++; $display("FAIL example meta %b", meta); end
    for (int n = 0; n < 5000; n++) begin
      for (int j = 0; j < 32; j++) begin
        fp4_i[j] = 4'($urandom_range(0, 15));
        fp6[j]   = 6'($urandom_range(0, 63));
      end
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
