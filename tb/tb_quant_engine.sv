// tb_quant_engine: streams FP16 groups through the two-stage quantization
// engine, one per cycle with occasional idle cycles, and checks every packed
// output (elements, scale, metadata) against a full software model of the
// Elem-EM quantization: floor scale, nearest FP4/FP6 by table search, top-1
// by magnitude (positive first, lowest index), metadata by nearest decodable
// value. It also checks the two-cycle latency of each group and that one
// group per cycle is sustained.
module tb_quant_engine;
  import tb_ref_pkg::*;

  localparam int NG = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [31:0][15:0] x;
  logic out_valid;
  logic [127:0] elem;
  logic [7:0] scale, meta;
  int checks = 0, failures = 0;
  int cycle = 0;

  quant_engine dut (.clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .x_i(x),
                    .out_valid_o(out_valid), .elem_o(elem), .scale_o(scale), .meta_o(meta));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // expected outputs, queued at input time with the input cycle
  logic [127:0] q_elem[$];
  logic [7:0]   q_scale[$], q_meta[$];
  int           q_cyc[$];
  int           nout = 0, back_to_back = 0, last_out = -10;

  task automatic model(input logic [31:0][15:0] g);
    real amax;
    real v;
    int e;
    logic [31:0][3:0] f4;
    logic [31:0][5:0] f6;
    logic [7:0] m;
    logic [7:0][3:0] sub;
    int t;
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
    for (int s = 0; s < 4; s++) begin
      sub = f4[8*s +: 8];
      t = top1_ref(sub);
      m[2*s +: 2] = meta_ref(sub[t], fp6_real({1'b0, f6[8*s+t][4:0]}));
    end
    q_elem.push_back(f4);
    q_scale.push_back((amax == 0.0) ? 8'd0 : 8'(e + 127));
    q_meta.push_back(m);
    q_cyc.push_back(cycle);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (q_elem.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        if (elem != q_elem[0] || scale != q_scale[0] || meta != q_meta[0]) begin
          failures++;
          $display("FAIL group %0d: elem %h/%h scale %0d/%0d meta %b/%b", nout, elem, q_elem[0],
                   scale, q_scale[0], meta, q_meta[0]);
        end
        checks++;
        if (cycle - q_cyc[0] != 2) begin
          failures++;
          $display("FAIL latency %0d", cycle - q_cyc[0]);
        end
        void'(q_elem.pop_front()); void'(q_scale.pop_front());
        void'(q_meta.pop_front()); void'(q_cyc.pop_front());
      end
      if (last_out == cycle - 1) back_to_back++;
      last_out = cycle;
      nout++;
    end
  end

  initial begin
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // the paper's example group first
    @(negedge clk);
    x = '0;
    x[3] = 16'hB452; x[2] = 16'h4921; x[1] = 16'h4669; x[0] = 16'h4964;
    x[11] = 16'h48A0; x[10] = 16'h51AC; x[9] = 16'h495C; x[8] = 16'h3D0A;
    in_valid = 1'b1;
    model(x);
    for (int n = 1; n < NG; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 9) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      begin
        int hi;
        hi = $urandom_range(0, 30);
        for (int i = 0; i < 32; i++) x[i] = rand_fp16((hi > 6) ? hi - 6 : 0, hi);
      end
      in_valid = 1'b1;
      model(x);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NG || q_elem.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs for %0d groups", nout, NG);
    end
    checks++;
    if (back_to_back < NG / 2) begin
      failures++;
      $display("FAIL only %0d back-to-back outputs", back_to_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
