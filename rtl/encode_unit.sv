// encode_unit: second stage of the quantization engine. For each 8-element
// subgroup it picks the top-1 element of the FP4 codes with the same
// top1_decode_unit the datapath uses (so encoder and decoder agree on the
// index), selects that element's FP6 candidate, adds the bias 1 to its 5-bit
// magnitude and clamps the result into [fp4:00, fp4:11], the six-bit codes
// whose high bits equal the FP4 code. The low two bits are the subgroup's
// extra-mantissa metadata; the FP4 codes themselves are stored unchanged
// (the quantization engine takes them from its stage register).
// Decoding ({fp4, meta} - 1) thus returns the FP6 value whenever it lies
// within -1..+2 FP6 steps of the FP4 value, and the nearest end otherwise.
// The +1/clamp procedure is the paper's; the paper's block drawing prints
// -1 at this point, its text and algorithm +1, which is what is built.
// Interface: fp4_i/fp6_i element j at index j; meta_o[2i+1:2i] for
// subgroup i. Combinational.
module encode_unit #(
  parameter int unsigned NSG = 4
) (
  input  logic [NSG*8-1:0][3:0] fp4_i,
  input  logic [NSG*8-1:0][5:0] fp6_i,
  output logic [2*NSG-1:0]      meta_o
);

  for (genvar i = 0; i < int'(NSG); i++) begin : g_sg
    logic [7:0][3:0] sub;
    logic [2:0]      idx;
    logic [3:0]      val;
    logic            unused_sign;   // the top-1 sign plays no part in meta
    logic [5:0]      unused_fp6;
    logic [4:0]      sel6;
    logic [5:0]      enc, lo, hi;

    assign sub = fp4_i[8*i +: 8];
    assign unused_sign = val[3];

    top1_decode_unit #(.SG_SIZE(8)) u_top1 (
      .fp4_i(sub), .meta_i(2'b00), .idx_o(idx), .val_o(val), .fp6_o(unused_fp6));

    always_comb begin
      sel6 = fp6_i[8*i + int'(idx)][4:0];
      enc  = {1'b0, sel6} + 6'd1;
      lo   = {1'b0, val[2:0], 2'b00};
      hi   = {1'b0, val[2:0], 2'b11};
      // clamp into [lo, hi]; only the low two bits are stored
      if (enc < lo)      meta_o[2*i +: 2] = lo[1:0];
      else if (enc > hi) meta_o[2*i +: 2] = hi[1:0];
      else               meta_o[2*i +: 2] = enc[1:0];
    end
  end
endmodule
