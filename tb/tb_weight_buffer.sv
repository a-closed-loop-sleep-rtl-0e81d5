// tb_weight_buffer: byte writes over the bus side land in the lane chosen by
// the two low address bits; word reads return all four lanes one cycle later.
// Writes past DEPTH are dropped.
module tb_weight_buffer;
  localparam int DEPTH = 256;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [15:0] wr_byte_addr = '0;
  logic [7:0]  wr_data = '0;
  logic [7:0]  rd_addr = '0;
  logic signed [3:0][7:0] rd_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  weight_buffer #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [7:0] pat(int b); return 8'(b * 73 + 19); endfunction

  initial begin
    @(negedge clk);
    for (int b = 0; b < DEPTH * 4; b++) begin
      wr_en = 1; wr_byte_addr = 16'(b); wr_data = pat(b); @(negedge clk);
    end
    // out-of-range write must not wrap onto word 0
    wr_byte_addr = 16'(DEPTH * 4); wr_data = 8'hEE; @(negedge clk);
    wr_en = 0;
    for (int w = 0; w < DEPTH; w++) begin
      rd_en = 1; rd_addr = 8'(w); @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (rd_data[l] != pat(w * 4 + l)) begin
          failures++; $display("FAIL w=%0d l=%0d got %h exp %h", w, l, rd_data[l], pat(w * 4 + l));
        end
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
