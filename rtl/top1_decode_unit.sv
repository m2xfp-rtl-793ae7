// top1_decode_unit: finds the top-1 element of one 8-element FP4 subgroup
// and restores its extra mantissa.
//
// Each FP4 code is ranked through the FP4-to-UINT table (fp4_uint_lut), and a
// three-level tree of top1_comparator nodes (4, 2 and 1 nodes) returns the
// index of the largest rank, the lowest index winning ties, as the paper's
// decode unit does. The FP4 code at that index is then packed with the
// subgroup's 2-bit metadata and 1 is subtracted from the 5-bit magnitude
// {exp, man, meta}: this undoes the +1 bias the encoder adds, giving the
// element's FP6 (E2M3) code. The sign is the FP4 sign. A zero magnitude with
// metadata 00, which the encoder never emits, decodes to zero instead of
// wrapping (this design's choice).
//
// Interface: fp4_i[j] is element j; meta_i the subgroup metadata; idx_o the
// top-1 index, val_o its FP4 code, fp6_o the decoded FP6 code.
// Timing: purely combinational, as drawn in the paper.
module top1_decode_unit #(
  parameter int unsigned SG_SIZE = 8
) (
  input  logic [SG_SIZE-1:0][3:0] fp4_i,
  input  logic [1:0]              meta_i,
  output logic [2:0]              idx_o,
  output logic [3:0]              val_o,
  output logic [5:0]              fp6_o
);
  // The comparator tree and 3-bit index are sized for the paper's subgroup
  // of eight; other sizes are rejected at elaboration.
  if (SG_SIZE != 8) begin : g_size_check
    $error("top1_decode_unit supports SG_SIZE = 8 only");
  end

  logic [7:0][3:0] rank;
  logic [3:0][3:0] l1_val;
  logic [3:0][2:0] l1_idx;
  logic [1:0][3:0] l2_val;
  logic [1:0][2:0] l2_idx;
  logic [3:0]      l3_val;

  for (genvar j = 0; j < 8; j++) begin : g_lut
    fp4_uint_lut u_lut (.fp4_i(fp4_i[j]), .rank_o(rank[j]));
  end

  for (genvar j = 0; j < 4; j++) begin : g_l1
    top1_comparator u_cmp (
      .val_a_i(rank[2*j]),   .idx_a_i(3'(2*j)),
      .val_b_i(rank[2*j+1]), .idx_b_i(3'(2*j+1)),
      .val_o(l1_val[j]), .idx_o(l1_idx[j]));
  end

  for (genvar j = 0; j < 2; j++) begin : g_l2
    top1_comparator u_cmp (
      .val_a_i(l1_val[2*j]),   .idx_a_i(l1_idx[2*j]),
      .val_b_i(l1_val[2*j+1]), .idx_b_i(l1_idx[2*j+1]),
      .val_o(l2_val[j]), .idx_o(l2_idx[j]));
  end

  top1_comparator u_l3 (
    .val_a_i(l2_val[0]), .idx_a_i(l2_idx[0]),
    .val_b_i(l2_val[1]), .idx_b_i(l2_idx[1]),
    .val_o(l3_val), .idx_o(idx_o));

  // Packer and -1.
  logic [4:0] packed_mag;
  always_comb begin
    val_o      = fp4_i[idx_o];
    packed_mag = {val_o[2:0], meta_i};
    fp6_o      = {val_o[3], (packed_mag == 5'd0) ? 5'd0 : packed_mag - 5'd1};
  end

  logic unused_rank;
  assign unused_rank = ^l3_val;
endmodule
