// tb_dispatch_unit: runs commands (including a zero-length one) through the
// dispatch unit and checks, against address lists built independently from
// the loop nest, the order of weight, activation and output-buffer reads,
// the row/valid strobes one and two cycles later, the zero partial sum of
// the first K group (absent when the command continues earlier sums),
// the drain sequence and the command length of
// kg*(ROWS+m) + m + 6 cycles.
module tb_dispatch_unit;
  localparam int ROWS = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, acc;
  logic [9:0] m;
  logic [13:0] kg;
  logic [12:0] abase, wbase;
  logic busy, done;
  logic w_rd_en, a_rd_en, o_rd_en;
  logic [12:0] w_rd_addr, a_rd_addr;
  logic [8:0] o_rd_addr;
  logic wload_en, act_valid, psum_zero, drain_valid, o_wr_en;
  logic [4:0] wload_row;
  logic [8:0] drain_row, o_wr_addr;
  int checks = 0, failures = 0;
  int cycle = 0;

  dispatch_unit dut (.clk(clk), .rst_n(rst_n), .start_i(start), .m_i(m), .kg_i(kg),
    .abase_i(abase), .wbase_i(wbase), .acc_i(acc), .busy_o(busy), .done_o(done),
    .w_rd_en_o(w_rd_en), .w_rd_addr_o(w_rd_addr), .a_rd_en_o(a_rd_en), .a_rd_addr_o(a_rd_addr),
    .o_rd_en_o(o_rd_en), .o_rd_addr_o(o_rd_addr),
    .wload_en_d1_o(wload_en), .wload_row_d1_o(wload_row), .act_valid_d1_o(act_valid),
    .psum_zero_d1_o(psum_zero), .drain_valid_d1_o(drain_valid), .drain_row_d1_o(drain_row),
    .o_wr_en_d2_o(o_wr_en), .o_wr_addr_d2_o(o_wr_addr));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // observed events
  int w_rd[$], a_rd[$], o_rd[$], wl[$], av[$], pz[$], dr[$], ow[$];
  int w_cyc[$], a_cyc[$], o_cyc[$];
  int wl_cyc[$], av_cyc[$], dr_cyc[$], ow_cyc[$];

  always @(posedge clk) if (rst_n) begin
    if (w_rd_en) begin w_rd.push_back(int'(w_rd_addr)); w_cyc.push_back(cycle); end
    if (a_rd_en) begin a_rd.push_back(int'(a_rd_addr)); a_cyc.push_back(cycle); end
    if (o_rd_en) begin o_rd.push_back(int'(o_rd_addr)); o_cyc.push_back(cycle); end
    if (wload_en) begin wl.push_back(int'(wload_row)); wl_cyc.push_back(cycle); end
    if (act_valid) begin pz.push_back(int'(psum_zero)); av_cyc.push_back(cycle); end
    if (drain_valid) begin dr.push_back(int'(drain_row)); dr_cyc.push_back(cycle); end
    if (o_wr_en) begin ow.push_back(int'(o_wr_addr)); ow_cyc.push_back(cycle); end
  end

  task automatic cmp(input string tag, input int got[$], input int want[$]);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: %0d events, want %0d", tag, got.size(), want.size());
      for (int i = 0; i < got.size() && i < want.size(); i++)
        if (got[i] != want[i]) begin
          $display("  first difference at %0d: %0d vs %0d", i, got[i], want[i]);
          break;
        end
    end
  endtask

  task automatic shifted(input string tag, input int base[$], input int later[$], input int d);
    checks++;
    if (later.size() != base.size()) begin
      failures++;
      $display("FAIL %s count %0d vs %0d", tag, later.size(), base.size());
      return;
    end
    foreach (base[i])
      if (later[i] != base[i] + d) begin
        failures++;
        $display("FAIL %s timing at %0d", tag, i);
        return;
      end
  endtask

  task automatic run(input int mm, input int kk, input int ab, input int wb, input bit ac = 1'b0);
    int t0, tdone;
    int ew[$], ea[$], eo[$], ewl[$], epz[$], edr[$], eow[$];
    int a_stream_cyc[$], o_stream_cyc[$];
    w_rd = {}; a_rd = {}; o_rd = {}; wl = {}; pz = {}; dr = {}; ow = {};
    w_cyc = {}; a_cyc = {}; o_cyc = {}; wl_cyc = {}; av_cyc = {}; dr_cyc = {}; ow_cyc = {};
    @(negedge clk);
    m = 10'(mm); kg = 14'(kk); abase = 13'(ab); wbase = 13'(wb); acc = ac;
    start = 1'b1;
    t0 = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    tdone = cycle;
    repeat (4) @(negedge clk);
    // expected streams from the loop nest
    for (int g = 0; g < ((mm > 0) ? kk : 0); g++) begin
      for (int r = 0; r < ROWS; r++) begin ew.push_back(wb + g * ROWS + r); ewl.push_back(r); end
      for (int i = 0; i < mm; i++) begin
        ea.push_back(ab + i * kk + g);
        if (g > 0 || ac) eo.push_back(i);
        epz.push_back(g == 0 && !ac);
        eow.push_back(i);
      end
    end
    for (int i = 0; i < mm; i++) begin eo.push_back(i); edr.push_back(i); end
    cmp("weight reads", w_rd, ew);
    cmp("weight rows", wl, ewl);
    cmp("activation reads", a_rd, ea);
    cmp("output reads", o_rd, eo);
    cmp("zero psum", pz, epz);
    cmp("output writes", ow, eow);
    cmp("drain rows", dr, edr);
    shifted("wload +1", w_cyc, wl_cyc, 1);
    shifted("act +1", a_cyc, av_cyc, 1);
    shifted("write +2", a_cyc, ow_cyc, 2);
    // one activation group per cycle within a K group
    for (int i = 1; i < a_cyc.size(); i++)
      if (i % mm != 0 && a_cyc[i] != a_cyc[i-1] + 1) begin
        failures++;
        $display("FAIL stream gap at %0d", i);
        break;
      end
    checks++;
    if (mm > 0 && kk > 0 && tdone - t0 != kk * (ROWS + mm) + mm + 6) begin
      failures++;
      $display("FAIL length %0d, want %0d", tdone - t0, kk * (ROWS + mm) + mm + 6);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    start = 0; acc = 0; m = 0; kg = 0; abase = 0; wbase = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1, 1, 0, 0);
    run(5, 3, 100, 200);
    run(40, 2, 7, 4000);
    run(0, 3, 0, 0);
    run(3, 7, 8000, 0);
    run(4, 2, 50, 60, 1'b1);   // continue sums left by an earlier command
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
