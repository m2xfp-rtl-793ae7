// tb_dpu_array: loads random weight groups (random FP4 codes, sg_em and
// scales) into all 32 rows of the array, then streams random activation
// groups with random FP32 partial sums, one per cycle. The top-1 index and
// FP6 of every activation subgroup are produced here by the reference
// model. Every row result must equal the reference: the partial sum plus the
// four tile contributions, each added with one FP32 rounding in tile order.
// Also checks the one-cycle latency and that a reloaded row is used from
// the next group on.
module tb_dpu_array;
  import tb_ref_pkg::*;

  localparam int ROWS = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wload_en;
  logic [4:0] wload_row;
  logic [127:0] wload_elem;
  logic [7:0] wload_scale, wload_meta;
  logic act_valid;
  logic [127:0] act_elem;
  logic [7:0] act_scale, act_meta;
  logic [3:0][2:0] act_idx;
  logic [3:0][5:0] act_fp6;
  logic [ROWS-1:0][31:0] psum_in, psum_out;
  logic out_valid;
  int checks = 0, failures = 0;

  dpu_array dut (.clk(clk), .rst_n(rst_n), .wload_en_i(wload_en), .wload_row_i(wload_row),
                 .wload_elem_i(wload_elem), .wload_scale_i(wload_scale), .wload_meta_i(wload_meta),
                 .act_valid_i(act_valid), .act_elem_i(act_elem), .act_scale_i(act_scale),
                 .act_idx_i(act_idx), .act_fp6_i(act_fp6), .psum_i(psum_in),
                 .out_valid_o(out_valid), .psum_o(psum_out));

  always #5 clk = ~clk;

  logic [127:0] wm_elem [ROWS];
  logic [7:0]   wm_scale[ROWS], wm_meta[ROWS];

  function automatic logic [31:0] row_ref(input int r, input logic [127:0] xe, input logic [7:0] xm,
                                          input logic [7:0] xs, input logic [31:0] p);
    logic [31:0] acc;
    acc = p;
    for (int s = 0; s < 4; s++)
      acc = real_to_fp32(fp32_real(acc) + tile_ref(xe[32*s +: 32], xm[2*s +: 2],
                         wm_elem[r][32*s +: 32], wm_meta[r][2*s +: 2], wm_scale[r], xs));
    return acc;
  endfunction

  task automatic load_row(input int r);
    wload_en = 1'b1;
    wload_row = 5'(r);
    for (int k = 0; k < 4; k++) wload_elem[32*k +: 32] = $urandom;
    wload_scale = 8'($urandom_range(118, 136));
    wload_meta = 8'($urandom);
    wm_elem[r] = wload_elem; wm_scale[r] = wload_scale; wm_meta[r] = wload_meta;
  endtask

  task automatic drive_act();
    logic [7:0][3:0] sub;
    int t;
    act_valid = 1'b1;
    for (int k = 0; k < 4; k++) act_elem[32*k +: 32] = $urandom;
    act_scale = 8'($urandom_range(118, 136));
    act_meta = 8'($urandom);
    for (int s = 0; s < 4; s++) begin
      sub = act_elem[32*s +: 32];
      t = top1_ref(sub);
      act_idx[s] = 3'(t);
      act_fp6[s] = {sub[t][3], ({sub[t][2:0], act_meta[2*s +: 2]} == 5'd0) ? 5'd0 :
                               ({sub[t][2:0], act_meta[2*s +: 2]} - 5'd1)};
    end
    for (int r = 0; r < ROWS; r++)
      psum_in[r] = real_to_fp32(($urandom_range(0, 4000) - 2000.0) / 16.0 *
                                pow2(int'(act_scale) + 127 - 254));
  endtask

  logic [ROWS-1:0][31:0] exp_q[$];

  initial begin
    wload_en = 0; act_valid = 0; wload_row = 0; wload_elem = 0; wload_scale = 0; wload_meta = 0;
    act_elem = 0; act_scale = 0; act_meta = 0; act_idx = 0; act_fp6 = 0; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      load_row(r);
      @(negedge clk);
    end
    wload_en = 1'b0;
    for (int n = 0; n < 300; n++) begin
      logic [ROWS-1:0][31:0] e;
      drive_act();
      // sometimes reload a row in the same cycle: the current group must
      // still see the old weights
      for (int r = 0; r < ROWS; r++) e[r] = row_ref(r, act_elem, act_meta, act_scale, psum_in[r]);
      exp_q.push_back(e);
      if (n % 37 == 5) load_row($urandom_range(0, ROWS - 1));
      else wload_en = 1'b0;
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid low at group %0d", n); end
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (psum_out[r] != exp_q[0][r]) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d row %0d got %h want %h", n, r, psum_out[r], exp_q[0][r]);
        end
      end
      void'(exp_q.pop_front());
    end
    act_valid = 1'b0;
    wload_en = 1'b0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
