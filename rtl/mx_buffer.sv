// mx_buffer: on-chip buffer for M2XFP groups (used for activations and for
// weights). As in the paper's memory organisation, the three parts of a
// group are kept as three separate streams of fixed width, so each stays
// aligned: a 128-bit element block, an 8-bit E8M0 scale and 8 bits of
// metadata, all at the same group index. The default depth of 8192 groups
// is the paper's 144 KB per buffer divided by 18 bytes per group.
// Interface: one write port (from the DMA side) and one read port; the read
// data appear one cycle after rd_en_i (registered output). A read and a
// write of the same address in one cycle return the old contents. These
// port choices are this design's own.
module mx_buffer #(
  parameter int unsigned DEPTH  = 8192,
  parameter int unsigned ELEM_W = 128,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en_i,
  input  logic [AW-1:0]     wr_addr_i,
  input  logic [ELEM_W-1:0] wr_elem_i,
  input  logic [7:0]        wr_scale_i,
  input  logic [7:0]        wr_meta_i,
  input  logic              rd_en_i,
  input  logic [AW-1:0]     rd_addr_i,
  output logic [ELEM_W-1:0] rd_elem_o,
  output logic [7:0]        rd_scale_o,
  output logic [7:0]        rd_meta_o
);
  logic [ELEM_W-1:0] elem_mem  [DEPTH];
  logic [7:0]        scale_mem [DEPTH];
  logic [7:0]        meta_mem  [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) begin
      elem_mem[wr_addr_i]  <= wr_elem_i;
      scale_mem[wr_addr_i] <= wr_scale_i;
      meta_mem[wr_addr_i]  <= wr_meta_i;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en_i) begin
      rd_elem_o  <= elem_mem[rd_addr_i];
      rd_scale_o <= scale_mem[rd_addr_i];
      rd_meta_o  <= meta_mem[rd_addr_i];
    end
  end
endmodule
