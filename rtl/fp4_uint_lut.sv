// fp4_uint_lut: the 16-entry FP4-to-UINT lookup table of the top-1 decode
// unit. It maps an FP4 (E2M1) code to a 4-bit unsigned rank so that a plain
// unsigned comparison orders FP4 values by magnitude. The printed rows of the
// paper's table (+6.0 -> 1111, -6.0 -> 1110, +4.0 -> 1101, -4.0 -> 1100,
// +0.0 -> 0001, -0.0 -> 0000) all follow rank = {magnitude, ~sign}, which is
// used for every entry: equal magnitudes rank the positive value higher.
// Purely combinational.
module fp4_uint_lut (
  input  logic [3:0] fp4_i,
  output logic [3:0] rank_o
);
  always_comb begin
    case (fp4_i)
      4'b0000: rank_o = 4'b0001;  // +0.0
      4'b1000: rank_o = 4'b0000;  // -0.0
      4'b0001: rank_o = 4'b0011;  // +0.5
      4'b1001: rank_o = 4'b0010;  // -0.5
      4'b0010: rank_o = 4'b0101;  // +1.0
      4'b1010: rank_o = 4'b0100;  // -1.0
      4'b0011: rank_o = 4'b0111;  // +1.5
      4'b1011: rank_o = 4'b0110;  // -1.5
      4'b0100: rank_o = 4'b1001;  // +2.0
      4'b1100: rank_o = 4'b1000;  // -2.0
      4'b0101: rank_o = 4'b1011;  // +3.0
      4'b1101: rank_o = 4'b1010;  // -3.0
      4'b0110: rank_o = 4'b1101;  // +4.0
      4'b1110: rank_o = 4'b1100;  // -4.0
      4'b0111: rank_o = 4'b1111;  // +6.0
      default: rank_o = 4'b1110;  // -6.0
    endcase
  end
endmodule
