// tb_m2xfp_linear_layer: runs tiles of LLM linear layers through the compute
// engine at its default size, with the reduction lengths of real models.
//
//  1. Attention/projection tile, K = 4096 (hidden size of the 7B/8B
//     LLaMA, Mistral and OPT models): 64 token rows x 32 output columns,
//     128 K groups, which fills the 8192-group activation buffer.
//  2. FFN down-projection tile, K = 11008 (LLaMA2-7B), longer than one
//     command holds: 32 rows x 32 columns as a first command of 256 K groups,
//     then the buffers are reloaded with the next 88 K groups and a second
//     command with acc_i set continues the sums in the output buffer.
//
// Activations are random FP16 rows quantized by the reference Elem-EM
// quantizer, weights random Sg-EM groups. Every FP32 output and quantized
// output group is compared bit-exactly with a reference that adds the tile
// contributions in the engine's order, and each command's length must be
// kg*(32+m)+m+6 cycles. Model sizes are the public configurations of these
// models.
module tb_m2xfp_linear_layer;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic a_wr_en, w_wr_en;
  logic [12:0] a_wr_addr, w_wr_addr;
  logic [127:0] a_wr_elem, w_wr_elem;
  logic [7:0] a_wr_scale, a_wr_meta, w_wr_scale, w_wr_meta;
  logic start, acc;
  logic [9:0] m;
  logic [13:0] kg;
  logic [12:0] abase, wbase;
  logic busy, done;
  logic o_valid, q_valid;
  logic [8:0] o_row, q_row;
  logic [31:0][31:0] o_data;
  logic [127:0] q_elem;
  logic [7:0] q_scale, q_meta;
  int checks = 0, failures = 0;
  int cycle = 0;

  m2xfp_compute_engine dut (
    .clk(clk), .rst_n(rst_n),
    .a_wr_en_i(a_wr_en), .a_wr_addr_i(a_wr_addr), .a_wr_elem_i(a_wr_elem),
    .a_wr_scale_i(a_wr_scale), .a_wr_meta_i(a_wr_meta),
    .w_wr_en_i(w_wr_en), .w_wr_addr_i(w_wr_addr), .w_wr_elem_i(w_wr_elem),
    .w_wr_scale_i(w_wr_scale), .w_wr_meta_i(w_wr_meta),
    .start_i(start), .m_i(m), .kg_i(kg), .abase_i(abase), .wbase_i(wbase), .acc_i(acc),
    .busy_o(busy), .done_o(done),
    .o_valid_o(o_valid), .o_row_o(o_row), .o_data_o(o_data),
    .q_valid_o(q_valid), .q_row_o(q_row), .q_elem_o(q_elem), .q_scale_o(q_scale),
    .q_meta_o(q_meta));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // model copies of the buffers
  logic [127:0] am_elem [8192];
  logic [7:0]   am_scale[8192], am_meta[8192];
  logic [127:0] wm_elem [8192];
  logic [7:0]   wm_scale[8192], wm_meta[8192];

  // mechanism counters
  int n_wload = 0, n_zero = 0, n_accum = 0, n_drain = 0, n_quant = 0;
  int n_cont = 0;
  int n_dx_pos = 0, n_dx_neg = 0, n_tie = 0, n_clamp = 0;
  int n_sg[4] = '{0, 0, 0, 0};

  always @(posedge clk) if (rst_n) begin
    if (dut.wload_en) n_wload++;
    if (dut.act_valid && dut.psum_zero) n_zero++;
    if (dut.act_valid && !dut.psum_zero) n_accum++;
    if (o_valid) n_drain++;
    if (q_valid) n_quant++;
  end

  task automatic write_act(input int a);
    logic [31:0][15:0] g;
    logic [127:0] e;
    logic [7:0] sc, me;
    int nc, nt;
    int hi;
    hi = $urandom_range(8, 22);
    for (int i = 0; i < 32; i++) g[i] = rand_fp16(hi - 5, hi);
    // now and then repeat a value so FP4 maxima tie
    if (a % 7 == 0) g[5] = g[3];
    quantize_ref(g, e, sc, me, nc, nt);
    n_clamp += nc;
    n_tie += nt;
    @(negedge clk);
    a_wr_en = 1'b1; a_wr_addr = 13'(a); a_wr_elem = e; a_wr_scale = sc; a_wr_meta = me;
    am_elem[a] = e; am_scale[a] = sc; am_meta[a] = me;
  endtask

  task automatic write_wgt(input int a);
    @(negedge clk);
    w_wr_en = 1'b1; w_wr_addr = 13'(a);
    w_wr_elem = {$urandom, $urandom, $urandom, $urandom};
    w_wr_scale = 8'($urandom_range(120, 134));
    w_wr_meta = 8'($urandom);
    wm_elem[a] = w_wr_elem; wm_scale[a] = w_wr_scale; wm_meta[a] = w_wr_meta;
  endtask

  // expected results of the running command
  logic [31:0][31:0] exp_out [288];
  logic [127:0] exp_qe [288];
  logic [7:0] exp_qs [288], exp_qm [288];
  int got_o, got_q;

  task automatic reference(input int mm, input int kk, input int ab, input int wb, input bit ac);
    logic [31:0] acc;
    logic [31:0][15:0] h;
    logic [7:0][3:0] xs;
    int nc, nt, t;
    real dx;
    for (int i = 0; i < mm; i++) begin
      for (int g = 0; g < kk; g++)
        for (int s = 0; s < 4; s++) begin
          xs = am_elem[ab + i * kk + g][32*s +: 32];
          t = top1_ref(xs);
          dx = top1_value(xs[t], am_meta[ab + i * kk + g][2*s +: 2]) - fp4_real(xs[t]);
          if (dx > 0.0) n_dx_pos++;
          if (dx < 0.0) n_dx_neg++;
        end
      for (int r = 0; r < 32; r++) begin
        acc = ac ? exp_out[i][r] : 32'd0;
        for (int g = 0; g < kk; g++) begin
          int ai, wi;
          ai = ab + i * kk + g;
          wi = wb + g * 32 + r;
          for (int s = 0; s < 4; s++) begin
            acc = real_to_fp32(fp32_real(acc) +
                  tile_ref(am_elem[ai][32*s +: 32], am_meta[ai][2*s +: 2],
                           wm_elem[wi][32*s +: 32], wm_meta[wi][2*s +: 2],
                           wm_scale[wi], am_scale[ai]));
            n_sg[wm_meta[wi][2*s +: 2]]++;
          end
        end
        exp_out[i][r] = acc;
        h[r] = real_to_fp16(fp32_real(acc));
      end
      quantize_ref(h, exp_qe[i], exp_qs[i], exp_qm[i], nc, nt);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (o_valid) begin
      checks++;
      if (o_data != exp_out[o_row] || int'(o_row) != got_o) begin
        failures++;
        if (failures < 10) $display("FAIL fp32 row %0d (expected row %0d)", o_row, got_o);
      end
      got_o++;
    end
    if (q_valid) begin
      checks++;
      if (q_elem != exp_qe[q_row] || q_scale != exp_qs[q_row] || q_meta != exp_qm[q_row] ||
          int'(q_row) != got_q) begin
        failures++;
        if (failures < 10) $display("FAIL quantized row %0d: %h/%h %0d/%0d %b/%b", q_row, q_elem,
                                    exp_qe[q_row], q_scale, exp_qs[q_row], q_meta, exp_qm[q_row]);
      end
      got_q++;
    end
  end

  task automatic run(input int mm, input int kk, input int ab, input int wb, input bit ac = 1'b0);
    int t0;
    reference(mm, kk, ab, wb, ac);
    if (ac) n_cont++;
    got_o = 0;
    got_q = 0;
    @(negedge clk);
    m = 10'(mm); kg = 14'(kk); abase = 13'(ab); wbase = 13'(wb); acc = ac;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (cycle - t0 != kk * (32 + mm) + mm + 6) begin
      failures++;
      $display("FAIL command length %0d, want %0d", cycle - t0, kk * (32 + mm) + mm + 6);
    end
    checks++;
    if (got_o != mm || got_q != mm) begin
      failures++;
      $display("FAIL %0d/%0d output rows for %0d", got_o, got_q, mm);
    end
    $display("GEMM m=%0d kg=%0d done in %0d cycles", mm, kk, cycle - t0);
  endtask

  task automatic load(input int na, input int nw);
    for (int a = 0; a < na; a++) write_act(a);
    for (int w = 0; w < nw; w++) write_wgt(w);
    @(negedge clk);
    a_wr_en = 0; w_wr_en = 0;
  endtask

  initial begin
    a_wr_en = 0; w_wr_en = 0; a_wr_addr = 0; w_wr_addr = 0; a_wr_elem = 0; w_wr_elem = 0;
    a_wr_scale = 0; a_wr_meta = 0; w_wr_scale = 0; w_wr_meta = 0;
    start = 0; acc = 0; m = 0; kg = 0; abase = 0; wbase = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1. K = 4096: 128 K groups, 64 rows
    load(64 * 128, 128 * 32);
    run(64, 128, 0, 0);
    // 2. K = 11008 = 344 K groups over two commands, 32 rows
    load(32 * 256, 256 * 32);
    run(32, 256, 0, 0);
    load(32 * 88, 88 * 32);
    run(32, 88, 0, 0, 1'b1);

    $display("mechanisms: wload=%0d zero_start=%0d accumulate=%0d continue=%0d drain=%0d quantize=%0d",
             n_wload, n_zero, n_accum, n_cont, n_drain, n_quant);
    $display("            dx+=%0d dx-=%0d ties=%0d clamp=%0d sg_em=%0d/%0d/%0d/%0d",
             n_dx_pos, n_dx_neg, n_tie, n_clamp, n_sg[0], n_sg[1], n_sg[2], n_sg[3]);
    checks++;
    if (n_cont == 0 || n_quant != 128) begin
      failures++;
      $display("FAIL continued command or quantized rows missing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
