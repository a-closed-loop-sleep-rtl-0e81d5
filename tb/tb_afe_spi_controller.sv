// tb_afe_spi_controller: the SPI master against a behavioural amplifier model.
// First, with sampling off, three MCU commands (WRITE, READ, READ) check the
// command path and the two-word answer latency of the chip.  Then sampling is
// enabled: every sample must be the answer to the frame's CONVERT word, the
// frame must be CONVERT(channel), READ(40), READ(40), and samples must come
// exactly sample_div cycles apart.
module tb_afe_spi_controller;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  logic        enable = 0, cmd_valid = 0, cmd_ready, resp_valid, sample_valid;
  logic [7:0]  clk_div = 8'd2;
  logic [31:0] sample_div = 32'd500;
  logic [5:0]  channel = 6'd5;
  logic [15:0] cmd_word = '0, resp, sample;
  logic        spi_cs_n, spi_sclk, spi_mosi, spi_miso;
  int checks = 0, failures = 0;

  afe_spi_controller dut (.*);
  rhd_spi_model chip (.cs_n(spi_cs_n), .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso));

  task automatic cmd(input logic [15:0] w, output logic [15:0] r);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_word = w;
    @(negedge clk); cmd_valid = 0;
    while (!resp_valid) @(negedge clk);
    r = resp;
  endtask

  int last_t = -1, cyc = 0, nsamp = 0;
  always @(posedge clk) cyc++;

  initial begin
    logic [15:0] r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cmd({2'b10, 6'd5, 8'hAB}, r);
    cmd({2'b11, 6'd5, 8'h00}, r);
    cmd({2'b11, 6'd40, 8'h00}, r);
    checks++;
    if (r != 16'hFFAB) begin failures++; $display("FAIL write answer %h", r); end
    cmd({2'b11, 6'd40, 8'h00}, r);
    checks++;
    if (r != 16'h00AB) begin failures++; $display("FAIL read answer %h", r); end
    checks++;
    if (chip.last_cmd.size() != 4 || chip.last_cmd[0] != 16'h85AB) begin
      failures++; $display("FAIL commands seen by the chip");
    end
    chip.last_cmd.delete();
    @(negedge clk); enable = 1;
    while (nsamp < 6) begin
      @(negedge clk);
      if (sample_valid) begin
        checks++;
        if (sample != 16'(32'h8000 + 64 * nsamp + 5)) begin
          failures++; $display("FAIL sample %0d = %h", nsamp, sample);
        end
        if (last_t >= 0) begin
          checks++;
          if (cyc - last_t != 500) begin failures++; $display("FAIL sample period %0d", cyc - last_t); end
        end
        last_t = cyc;
        nsamp++;
      end
    end
    checks++;
    if (chip.last_cmd.size() < 18 || chip.last_cmd[0] != 16'h0500 || chip.last_cmd[1] != 16'hE800 ||
        chip.last_cmd[2] != 16'hE800 || chip.last_cmd[3] != 16'h0500) begin
      failures++; $display("FAIL frame words %h %h %h", chip.last_cmd[0], chip.last_cmd[1], chip.last_cmd[2]);
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
