// tb_output_buffer: read-modify-write traffic on a full-size (288 x 32 x
// FP32) output buffer. Writes random rows, then reads random entries and
// checks each against a model copy one cycle later, with same-address
// read/write cycles returning the old row.
module tb_output_buffer;
  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [8:0] wr_addr, rd_addr;
  logic [31:0][31:0] wr_data, rd_data;
  int checks = 0, failures = 0;

  output_buffer dut (.clk(clk), .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
                     .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data));
  always #5 clk = ~clk;

  logic [31:0][31:0] model [288];
  logic [31:0][31:0] expect_d;
  logic expect_v;

  task automatic rand_row(output logic [31:0][31:0] d);
    for (int i = 0; i < 32; i++) d[i] = $urandom;
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0; expect_v = 0;
    for (int a = 0; a < 288; a++) begin
      @(negedge clk);
      wr_en = 1;
      wr_addr = 9'(a);
      rand_row(wr_data);
      model[a] = wr_data;
    end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (expect_v) begin
        checks++;
        if (rd_data != expect_d) begin failures++; $display("FAIL read %0d", n); end
      end
      rd_en = 1;
      rd_addr = 9'($urandom_range(0, 287));
      expect_d = model[rd_addr];
      expect_v = 1;
      wr_en = ($urandom_range(0, 2) == 0);
      wr_addr = (n % 3 == 0) ? rd_addr : 9'($urandom_range(0, 287));
      rand_row(wr_data);
      if (wr_en) model[wr_addr] = wr_data;
    end
    @(negedge clk);
    checks++;
    if (rd_data != expect_d) begin failures++; $display("FAIL last read"); end
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
