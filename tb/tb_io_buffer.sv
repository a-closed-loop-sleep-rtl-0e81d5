// tb_io_buffer: the input half is written from the bus side and read from the
// engine side, the output half the other way round; both with one-cycle reads.
module tb_io_buffer;
  logic clk = 0;
  logic in_wr_en = 0, in_rd_en = 0, out_wr_en = 0, out_rd_en = 0;
  logic [8:0] in_wr_addr = '0, in_rd_addr = '0;
  logic [3:0] out_wr_addr = '0, out_rd_addr = '0;
  logic [7:0] in_wr_data = '0, in_rd_data, out_wr_data = '0, out_rd_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  io_buffer #(.IN_DEPTH(512), .OUT_DEPTH(16)) dut (.*);

  initial begin
    @(negedge clk);
    for (int a = 0; a < 512; a++) begin
      in_wr_en = 1; in_wr_addr = 9'(a); in_wr_data = 8'(a * 5 + 1);
      out_wr_en = (a < 16); out_wr_addr = 4'(a); out_wr_data = 8'(200 - a * 3);
      @(negedge clk);
    end
    in_wr_en = 0; out_wr_en = 0;
    for (int a = 0; a < 512; a++) begin
      in_rd_en = 1; in_rd_addr = 9'(a); out_rd_en = (a < 16); out_rd_addr = 4'(a);
      @(negedge clk);
      checks++;
      if (in_rd_data != 8'(a * 5 + 1)) begin failures++; $display("FAIL in %0d", a); end
      if (a < 16) begin
        checks++;
        if (out_rd_data != 8'(200 - a * 3)) begin failures++; $display("FAIL out %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
