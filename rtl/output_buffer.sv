// output_buffer: holds the FP32 partial sums produced by the dot product unit
// array. One entry is a full array row result: ROWS FP32 values (1024 bits
// for 32 rows), indexed by activation row. The default depth of 288 entries
// is the paper's 36 KB output buffer divided by 128 bytes per entry.
// During a GEMM the dispatch unit reads an entry, the array adds one K group
// to it and the result is written back; afterwards the entries are drained
// through the quantization engine.
// Interface: one write port and one read port, read data registered (one
// cycle latency), old data on a same-address read and write. These port
// choices are this design's own.
module output_buffer #(
  parameter int unsigned DEPTH = 288,
  parameter int unsigned ROWS  = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  wr_en_i,
  input  logic [AW-1:0]         wr_addr_i,
  input  logic [ROWS-1:0][31:0] wr_data_i,
  input  logic                  rd_en_i,
  input  logic [AW-1:0]         rd_addr_i,
  output logic [ROWS-1:0][31:0] rd_data_o
);
  logic [ROWS-1:0][31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end
endmodule
