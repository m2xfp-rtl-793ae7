// m2xfp_pkg: shared constants, types and small arithmetic functions of the
// M2XFP datapath.
//
// M2XFP stores a group of 32 FP4 (E2M1) elements with one E8M0 shared scale
// and 8 bits of metadata, split into 4 subgroups of 8 elements. Activations
// use the metadata as a 2-bit extra mantissa for the largest (top-1) element
// of each subgroup (Elem-EM); weights use it as a 2-bit mantissa for the
// subgroup scale (Sg-EM, x1.0/1.25/1.5/1.75).
//
// Bit layout used throughout this design (the source paper does not fix it):
// element j of a group lives in elem[4j+3:4j], the metadata of subgroup i in
// meta[2i+1:2i].
//
// Fixed-point conventions: FP4 magnitudes are integers in units of 1/2,
// FP6 (E2M3) magnitudes integers in units of 1/8.
package m2xfp_pkg;

  localparam int unsigned GROUP   = 32;  // elements per group
  localparam int unsigned SG_SIZE = 8;   // elements per subgroup
  localparam int unsigned NSG     = GROUP / SG_SIZE;
  localparam int unsigned ELEM_W  = GROUP * 4;  // 128-bit element block
  localparam int unsigned META_W  = 2 * NSG;    // 8-bit metadata

  typedef logic [3:0] fp4_t;   // sign, exp[1:0], man
  typedef logic [5:0] fp6_t;   // sign, exp[1:0], man[2:0]
  typedef logic [7:0] e8m0_t;  // shared scale 2^(code-127)

  // One packed M2XFP group as the three streams are read out of a buffer.
  typedef struct packed {
    logic [META_W-1:0] meta;
    e8m0_t             scale;
    logic [ELEM_W-1:0] elem;
  } mx_group_t;

  // |FP4| in units of 1/2: 0, 0.5, 1, 1.5, 2, 3, 4, 6.
  function automatic logic [3:0] fp4_mag_half(input logic [2:0] mag);
    case (mag)
      3'd0: return 4'd0;
      3'd1: return 4'd1;
      3'd2: return 4'd2;
      3'd3: return 4'd3;
      3'd4: return 4'd4;
      3'd5: return 4'd6;
      3'd6: return 4'd8;
      default: return 4'd12;
    endcase
  endfunction

  // |FP6 E2M3| in units of 1/8 (0 .. 60 = 7.5).
  function automatic logic [5:0] fp6_mag_eighth(input logic [4:0] mag);
    logic [1:0] e;
    logic [2:0] m;
    e = mag[4:3];
    m = mag[2:0];
    case (e)
      2'd0: return {3'd0, m};               // subnormal m/8
      2'd1: return 6'd8 + {3'd0, m};        // 1 + m/8
      2'd2: return 6'd16 + {2'd0, m, 1'b0}; // 2 * (1 + m/8)
      default: return 6'd32 + {1'd0, m, 2'b0}; // 4 * (1 + m/8)
    endcase
  endfunction

  // Signed FP4 value in units of 1/2.
  function automatic logic signed [4:0] fp4_val_half(input fp4_t c);
    logic signed [4:0] v;
    v = $signed({1'b0, fp4_mag_half(c[2:0])});
    return c[3] ? -v : v;
  endfunction

  // Round a non-negative fixed-point value v (VF fractional bits, value < 8)
  // plus a sticky bit to an E2Mx code magnitude (M = 1 for FP4, 3 for FP6),
  // round-to-nearest with exact ties rounded toward zero (a tie counts as
  // "above half" only when sticky_in shows lower nonzero bits), saturating
  // at the largest finite code.
  // For v < 2 the code is round(v*2^M); for v in [2^(f-1),2^f), f = 2,3,
  // it is round(v*2^(M-f+1)) + ((f-1) << M); a carry into the next binade
  // is absorbed by the monotonic code.
  localparam int unsigned VF = 16;
  // Written with one shifter per operation and an AND-OR saturation so the
  // datapath has no conditionally used shifters.
  function automatic logic [4:0] round_e2m(input logic [VF+2:0] v, input logic sticky_in,
                                           input int unsigned m);
    logic [1:0]    bn;    // binade: 0 for [0,2), 1 for [2,4), 2 for [4,8)
    logic [4:0]    sh;    // right shift from VF fraction bits to the code grid
    logic [VF+2:0] mask, rem, half;
    logic [5:0]    q;
    logic [5:0]    code;
    logic          round_up, sat;
    logic [4:0]    maxc;
    bn   = v[VF+2] ? 2'd2 : (v[VF+1] ? 2'd1 : 2'd0);
    sh   = 5'(VF - m) + 5'(bn);
    q    = 6'(v >> sh);
    mask = ~({(VF+3){1'b1}} << sh);
    rem  = v & mask;
    half = mask ^ (mask >> 1);
    round_up = (rem > half) || (rem == half && sticky_in);
    code = q + 6'(round_up) + (6'(bn) << m);
    maxc = 5'((1 << (m + 2)) - 1);
    sat  = code > {1'b0, maxc};
    return ({5{sat}} & maxc) | ({5{~sat}} & code[4:0]);
  endfunction

endpackage
