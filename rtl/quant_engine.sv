// quant_engine: the online activation quantizer. It turns one group of 32
// FP16 values per cycle into an M2XFP group: 32 FP4 codes (128 bits), an
// E8M0 shared scale and 8 bits of Elem-EM metadata.
//
// It is the paper's two-stage pipeline: stage 1 (scale_norm_unit) computes
// the shared scale and the FP4/FP6 candidates, stage 2 (encode_unit) finds
// each subgroup's top-1 and encodes its extra mantissa. A register follows
// each stage, so a group entering with in_valid_i appears with out_valid_o
// two cycles later; a new group may enter every cycle. There is no
// back-pressure. Only the valid bits are reset (synchronous, active low).
module quant_engine #(
  parameter int unsigned GROUP = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid_i,
  input  logic [GROUP-1:0][15:0] x_i,
  output logic                   out_valid_o,
  output logic [GROUP*4-1:0]     elem_o,
  output logic [7:0]             scale_o,
  output logic [GROUP/4-1:0]     meta_o
);
  localparam int unsigned NSG = GROUP / 8;

  if (GROUP % 8 != 0) begin : g_group_check
    $error("quant_engine: GROUP must be a multiple of the subgroup size 8");
  end

  // stage 1
  logic [GROUP-1:0][3:0] s1_fp4_d, s1_fp4_q;
  logic [GROUP-1:0][5:0] s1_fp6_d, s1_fp6_q;
  logic [7:0]            s1_scale_d, s1_scale_q;
  logic                  s1_valid_q;

  scale_norm_unit #(.GROUP(GROUP)) u_scale (
    .x_i(x_i), .fp4_o(s1_fp4_d), .fp6_o(s1_fp6_d), .scale_o(s1_scale_d));

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid_q <= 1'b0;
    else        s1_valid_q <= in_valid_i;
    if (in_valid_i) begin
      s1_fp4_q   <= s1_fp4_d;
      s1_fp6_q   <= s1_fp6_d;
      s1_scale_q <= s1_scale_d;
    end
  end

  // stage 2
  logic [2*NSG-1:0]      s2_meta_d;

  encode_unit #(.NSG(NSG)) u_enc (
    .fp4_i(s1_fp4_q), .fp6_i(s1_fp6_q), .meta_o(s2_meta_d));

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= s1_valid_q;
    if (s1_valid_q) begin
      elem_o  <= s1_fp4_q;
      scale_o <= s1_scale_q;
      meta_o  <= s2_meta_d;
    end
  end
endmodule
