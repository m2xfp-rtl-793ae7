// dpu_array: the dot product unit array, ROWS x NSG PE tiles (32 x 4 = 128
// tiles of 8 multipliers, i.e. 32 x 32 four-bit MACs, by default).
//
// Row r holds one weight group (32 FP4 weights, its E8M0 scale and four
// 2-bit sg_em fields), loaded by wload_en_i one row per cycle; tile s of the
// row holds weight subgroup s. Each cycle act_valid_i presents one decoded
// activation group (32 FP4 codes, scale, and per subgroup the top-1 index
// and decoded FP6 from the top-1 decode units); it is broadcast to all rows.
// Within a row the FP32 partial sum flows through the four tiles
// (psum_i[r] -> tile 0 -> ... -> tile 3), so each row adds its 32-element
// dot product to its incoming partial sum. Results are registered:
// out_valid_o/psum_o follow act_valid_i by one cycle. A weight load takes
// effect for activations presented from the next cycle on.
// The tile count and per-subgroup tiles follow the paper's 32x32 array of
// 128 tiles; the weight-stationary, broadcast organisation is this design's.
module dpu_array #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned NSG  = 4,
  parameter int unsigned RW   = $clog2(ROWS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight load
  input  logic                   wload_en_i,
  input  logic [RW-1:0]          wload_row_i,
  input  logic [NSG*32-1:0]      wload_elem_i,
  input  logic [7:0]             wload_scale_i,
  input  logic [2*NSG-1:0]       wload_meta_i,
  // decoded activation group
  input  logic                   act_valid_i,
  input  logic [NSG*32-1:0]      act_elem_i,
  input  logic [7:0]             act_scale_i,
  input  logic [NSG-1:0][2:0]    act_idx_i,
  input  logic [NSG-1:0][5:0]    act_fp6_i,
  input  logic [ROWS-1:0][31:0]  psum_i,
  output logic                   out_valid_o,
  output logic [ROWS-1:0][31:0]  psum_o
);
  logic [NSG*32-1:0] w_elem  [ROWS];
  logic [7:0]        w_scale [ROWS];
  logic [2*NSG-1:0]  w_meta  [ROWS];

  always_ff @(posedge clk) begin
    if (wload_en_i) begin
      w_elem[wload_row_i]  <= wload_elem_i;
      w_scale[wload_row_i] <= wload_scale_i;
      w_meta[wload_row_i]  <= wload_meta_i;
    end
  end

  logic [ROWS-1:0][31:0] row_sum;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    logic [NSG:0][31:0] chain;
    assign chain[0] = psum_i[r];
    for (genvar s = 0; s < int'(NSG); s++) begin : g_tile
      pe_tile #(.SG_SIZE(8)) u_pe (
        .x_i      (act_elem_i[32*s +: 32]),
        .w_i      (w_elem[r][32*s +: 32]),
        .top_idx_i(act_idx_i[s]),
        .top_fp6_i(act_fp6_i[s]),
        .sg_em_i  (w_meta[r][2*s +: 2]),
        .scale_w_i(w_scale[r]),
        .scale_x_i(act_scale_i),
        .psum_i   (chain[s]),
        .psum_o   (chain[s+1]));
    end
    assign row_sum[r] = chain[NSG];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= act_valid_i;
    if (act_valid_i) psum_o <= row_sum;
  end
endmodule
