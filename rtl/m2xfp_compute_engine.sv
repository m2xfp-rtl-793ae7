// m2xfp_compute_engine: the M2XFP compute engine, a 32x32 four-bit
// dot-product array extended for the M2XFP format, with its buffers, the
// top-1 decode units and the online quantization engine.
//
// Data path of one GEMM (sequenced by dispatch_unit):
//   weight buffer ---------------------------------> dpu_array weights
//   activation buffer -> 4 x top1_decode_unit -----> dpu_array activations
//   output buffer (FP32 partial sums) <-> dpu_array (read, add, write back)
//   output buffer -> 32 x fp32_to_fp16 -> quant_engine -> q_* port
// Weights are M2XFP groups with Sg-EM metadata (a 2-bit subgroup mantissa
// per 8 weights); activations carry Elem-EM metadata (2 extra mantissa bits
// for the largest element of each 8-element subgroup). The decode units find
// that element in each activation subgroup and restore its FP6 value; the PE
// tiles add the W x dX correction and apply the weight subgroup scale.
// Each output row of 32 FP32 sums is one 32-element group again, which the
// quantization engine re-encodes as an M2XFP activation group for the next
// layer.
//
// Ports: a_wr_*/w_wr_* write groups into the activation/weight buffers
// (the DMA side); start_i with m_i, kg_i, abase_i, wbase_i, acc_i runs
// OUT[m][r] = sum_g ACT[abase + m*kg + g] . W[wbase + g*32 + r] for
// m < m_i (acc_i = 1 adds this sum to what the output buffer already
// holds for each row, so a long K is split over several commands);
// o_valid_o/o_row_o/o_data_o give each FP32 output row and
// q_valid_o/q_row_o/q_elem_o/q_scale_o/q_meta_o its quantized form two
// cycles later; done_o pulses at the end.
// Timing: one activation group per cycle in the stream phase; a command
// takes kg*(32 + m) + m + 6 cycles from start_i to done_o (see
// dispatch_unit). Buffer sizes default to the paper's 144 KB + 144 KB +
// 36 KB; the organisation around the paper's units is this design's own.
module m2xfp_compute_engine #(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned ABUF_DEPTH = 8192,
  parameter int unsigned WBUF_DEPTH = 8192,
  parameter int unsigned OBUF_DEPTH = 288,
  parameter int unsigned A_AW       = $clog2(ABUF_DEPTH),
  parameter int unsigned W_AW       = $clog2(WBUF_DEPTH),
  parameter int unsigned O_AW       = $clog2(OBUF_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // activation buffer write port
  input  logic                  a_wr_en_i,
  input  logic [A_AW-1:0]       a_wr_addr_i,
  input  logic [127:0]          a_wr_elem_i,
  input  logic [7:0]            a_wr_scale_i,
  input  logic [7:0]            a_wr_meta_i,
  // weight buffer write port
  input  logic                  w_wr_en_i,
  input  logic [W_AW-1:0]       w_wr_addr_i,
  input  logic [127:0]          w_wr_elem_i,
  input  logic [7:0]            w_wr_scale_i,
  input  logic [7:0]            w_wr_meta_i,
  // command
  input  logic                  start_i,
  input  logic [O_AW:0]         m_i,
  input  logic [A_AW:0]         kg_i,
  input  logic [A_AW-1:0]       abase_i,
  input  logic [W_AW-1:0]       wbase_i,
  input  logic                  acc_i,
  output logic                  busy_o,
  output logic                  done_o,
  // FP32 output rows
  output logic                  o_valid_o,
  output logic [O_AW-1:0]       o_row_o,
  output logic [ROWS-1:0][31:0] o_data_o,
  // quantized output groups
  output logic                  q_valid_o,
  output logic [O_AW-1:0]       q_row_o,
  output logic [ROWS*4-1:0]     q_elem_o,
  output logic [7:0]            q_scale_o,
  output logic [ROWS/4-1:0]     q_meta_o
);
  import m2xfp_pkg::*;

  if (ROWS % 8 != 0) begin : g_rows_check
    $error("m2xfp_compute_engine: ROWS must be a multiple of 8");
  end

  // ---------------------------------------------------------------- dispatch
  logic            w_rd_en, a_rd_en, o_rd_en;
  logic [W_AW-1:0] w_rd_addr;
  logic [A_AW-1:0] a_rd_addr;
  logic [O_AW-1:0] o_rd_addr;
  logic            wload_en, act_valid, psum_zero, drain_valid, o_wr_en;
  logic [$clog2(ROWS)-1:0] wload_row;
  logic [O_AW-1:0] drain_row, o_wr_addr;

  dispatch_unit #(.ROWS(ROWS), .A_AW(A_AW), .W_AW(W_AW), .O_AW(O_AW)) u_dispatch (
    .clk(clk), .rst_n(rst_n),
    .start_i(start_i), .m_i(m_i), .kg_i(kg_i), .abase_i(abase_i), .wbase_i(wbase_i), .acc_i(acc_i),
    .busy_o(busy_o), .done_o(done_o),
    .w_rd_en_o(w_rd_en), .w_rd_addr_o(w_rd_addr),
    .a_rd_en_o(a_rd_en), .a_rd_addr_o(a_rd_addr),
    .o_rd_en_o(o_rd_en), .o_rd_addr_o(o_rd_addr),
    .wload_en_d1_o(wload_en), .wload_row_d1_o(wload_row),
    .act_valid_d1_o(act_valid), .psum_zero_d1_o(psum_zero),
    .drain_valid_d1_o(drain_valid), .drain_row_d1_o(drain_row),
    .o_wr_en_d2_o(o_wr_en), .o_wr_addr_d2_o(o_wr_addr));

  // ----------------------------------------------------------------- buffers
  logic [127:0] a_elem, w_elem;
  logic [7:0]   a_scale, a_meta, w_scale, w_meta;

  mx_buffer #(.DEPTH(ABUF_DEPTH)) u_abuf (
    .clk(clk),
    .wr_en_i(a_wr_en_i), .wr_addr_i(a_wr_addr_i), .wr_elem_i(a_wr_elem_i),
    .wr_scale_i(a_wr_scale_i), .wr_meta_i(a_wr_meta_i),
    .rd_en_i(a_rd_en), .rd_addr_i(a_rd_addr),
    .rd_elem_o(a_elem), .rd_scale_o(a_scale), .rd_meta_o(a_meta));

  mx_buffer #(.DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk(clk),
    .wr_en_i(w_wr_en_i), .wr_addr_i(w_wr_addr_i), .wr_elem_i(w_wr_elem_i),
    .wr_scale_i(w_wr_scale_i), .wr_meta_i(w_wr_meta_i),
    .rd_en_i(w_rd_en), .rd_addr_i(w_rd_addr),
    .rd_elem_o(w_elem), .rd_scale_o(w_scale), .rd_meta_o(w_meta));

  logic [ROWS-1:0][31:0] o_rd_data, array_out;
  logic                  array_valid;

  output_buffer #(.DEPTH(OBUF_DEPTH), .ROWS(ROWS)) u_obuf (
    .clk(clk),
    .wr_en_i(o_wr_en && array_valid), .wr_addr_i(o_wr_addr), .wr_data_i(array_out),
    .rd_en_i(o_rd_en), .rd_addr_i(o_rd_addr), .rd_data_o(o_rd_data));

  // ----------------------------------------------------- top-1 decode units
  logic [NSG-1:0][2:0] top_idx;
  logic [NSG-1:0][5:0] top_fp6;
  logic [NSG-1:0][3:0] top_val;

  for (genvar s = 0; s < int'(NSG); s++) begin : g_dec
    top1_decode_unit #(.SG_SIZE(SG_SIZE)) u_dec (
      .fp4_i(a_elem[32*s +: 32]), .meta_i(a_meta[2*s +: 2]),
      .idx_o(top_idx[s]), .val_o(top_val[s]), .fp6_o(top_fp6[s]));
  end

  // ------------------------------------------------------------- PE array
  logic [ROWS-1:0][31:0] psum_in;
  assign psum_in = psum_zero ? '0 : o_rd_data;

  dpu_array #(.ROWS(ROWS), .NSG(NSG)) u_array (
    .clk(clk), .rst_n(rst_n),
    .wload_en_i(wload_en), .wload_row_i(wload_row), .wload_elem_i(w_elem),
    .wload_scale_i(w_scale), .wload_meta_i(w_meta),
    .act_valid_i(act_valid), .act_elem_i(a_elem), .act_scale_i(a_scale),
    .act_idx_i(top_idx), .act_fp6_i(top_fp6), .psum_i(psum_in),
    .out_valid_o(array_valid), .psum_o(array_out));

  // ---------------------------------------------- drain and quantization
  logic [ROWS-1:0][15:0] h;
  for (genvar i = 0; i < int'(ROWS); i++) begin : g_cvt
    fp32_to_fp16 u_cvt (.f_i(o_rd_data[i]), .h_o(h[i]));
  end

  assign o_valid_o = drain_valid;
  assign o_row_o   = drain_row;
  assign o_data_o  = o_rd_data;

  quant_engine #(.GROUP(ROWS)) u_qe (
    .clk(clk), .rst_n(rst_n), .in_valid_i(drain_valid), .x_i(h),
    .out_valid_o(q_valid_o), .elem_o(q_elem_o), .scale_o(q_scale_o), .meta_o(q_meta_o));

  logic [O_AW-1:0] row_d1;
  always_ff @(posedge clk) begin
    row_d1  <= drain_row;
    q_row_o <= row_d1;
  end

  logic unused_top_val;
  assign unused_top_val = ^top_val;
endmodule
