// tb_mx_buffer: writes random groups to random addresses of a full-size
// (8192-group) buffer, keeps a model copy, and reads back random addresses,
// checking elements, scale and metadata with the one-cycle read latency,
// including a read and write of the same address in one cycle (old data).
module tb_mx_buffer;
  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [12:0] wr_addr, rd_addr;
  logic [127:0] wr_elem, rd_elem;
  logic [7:0] wr_scale, wr_meta, rd_scale, rd_meta;
  int checks = 0, failures = 0;

  mx_buffer dut (.clk(clk), .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_elem_i(wr_elem),
                 .wr_scale_i(wr_scale), .wr_meta_i(wr_meta), .rd_en_i(rd_en), .rd_addr_i(rd_addr),
                 .rd_elem_o(rd_elem), .rd_scale_o(rd_scale), .rd_meta_o(rd_meta));
  always #5 clk = ~clk;

  logic [143:0] model [int];
  int           keys[$];
  logic [143:0] expect_d;
  logic         expect_v;

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_elem = 0; wr_scale = 0; wr_meta = 0;
    expect_v = 0;
    // fill a set of addresses, including both ends
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = (n == 0) ? 13'd0 : (n == 1) ? 13'd8191 : 13'($urandom_range(0, 8191));
      wr_elem = {$urandom, $urandom, $urandom, $urandom};
      wr_scale = 8'($urandom);
      wr_meta = 8'($urandom);
      model[int'(wr_addr)] = {wr_meta, wr_scale, wr_elem};
      keys.push_back(int'(wr_addr));
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      if (expect_v) begin
        checks++;
        if ({rd_meta, rd_scale, rd_elem} != expect_d) begin
          failures++;
          $display("FAIL read %0d", n);
        end
      end
      rd_en = 1;
      rd_addr = 13'(keys[$urandom_range(0, keys.size() - 1)]);
      expect_d = model[int'(rd_addr)];
      expect_v = 1;
      // write the same address in the same cycle now and then
      wr_en = (n % 5 == 0);
      if (wr_en) begin
        wr_addr = rd_addr;
        wr_elem = {$urandom, $urandom, $urandom, $urandom};
        wr_scale = 8'($urandom);
        wr_meta = 8'($urandom);
        model[int'(wr_addr)] = {wr_meta, wr_scale, wr_elem};
      end
    end
    @(negedge clk);
    checks++;
    if ({rd_meta, rd_scale, rd_elem} != expect_d) begin failures++; $display("FAIL last read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
