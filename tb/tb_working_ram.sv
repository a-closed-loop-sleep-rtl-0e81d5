// tb_working_ram: writes a pseudo-random pattern, reads it back with the
// one-cycle latency, and checks that a same-cycle read returns the old byte.
module tb_working_ram;
  localparam int DEPTH = 1024;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  logic [7:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  working_ram #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [7:0] pat(int a, int s); return 8'((a * 37 + s * 11) ^ (a >> 3)); endfunction

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 10'(a); wr_data = pat(a, 1); @(negedge clk);
    end
    wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = 10'(a); @(negedge clk);
      checks++;
      if (rd_data != pat(a, 1)) begin failures++; $display("FAIL a=%0d got %h", a, rd_data); end
    end
    // read-during-write to the same address returns the old value
    rd_en = 1; rd_addr = 10'd5; wr_en = 1; wr_addr = 10'd5; wr_data = 8'hA5; @(negedge clk);
    wr_en = 0; checks++;
    if (rd_data != pat(5, 1)) begin failures++; $display("FAIL rdw old"); end
    @(negedge clk); checks++;
    if (rd_data != 8'hA5) begin failures++; $display("FAIL rdw new"); end
    // rd_en low holds the output
    rd_en = 0; rd_addr = 10'd6; @(negedge clk); checks++;
    if (rd_data != 8'hA5) begin failures++; $display("FAIL hold"); end
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
