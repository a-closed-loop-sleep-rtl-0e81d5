// rhd_spi_model: behavioural model of the SPI side of a 16-bit EEG amplifier
// chip of the RHD2000 family, for testbenches only.
//
// SPI mode 0, 16-bit words, MSB first.  MOSI is sampled on the rising SCLK
// edge, MISO changes on the falling edge (its first bit when chip select
// falls).  Each word's answer is shifted out two words later.  CONVERT(C)
// {00,C,00000000} answers 16'h8000 + 64*n + C for the n-th conversion,
// WRITE(R,D) {10,R,D} stores D and answers {8'hFF, D}, READ(R) {11,R,00000000}
// answers {8'h00, reg[R]}; register 40 reads 8'h49.  The last command words
// are kept for the testbench in `last_cmd`.  With RAMP = 0 a conversion
// answers an EEG-like test signal instead: offset binary 32768 plus a 1 Hz
// slow oscillation, an 11 Hz rhythm and hashed noise at 256 samples/s
// (see eeg()).
module rhd_spi_model #(
  parameter bit RAMP = 1'b1
) (
  input  logic cs_n,
  input  logic sclk,
  input  logic mosi,
  output logic miso
);
  logic [15:0] rx, tx, pipe0, pipe1;
  logic [7:0]  regs [64];
  int          nconv = 0;
  int          bitn = 0;
  logic [15:0] last_cmd [$];

  initial begin
    foreach (regs[i]) regs[i] = 8'h00;
    regs[40] = 8'h49;
    pipe0 = 16'h0000; pipe1 = 16'h0000; tx = 16'h0000; miso = 1'b0;
  end

  function automatic int eeg(int n);
    int h = n * 32'h9E3779B1;
    h = h ^ (h >>> 13);
    return 32768 + int'($floor(12000.0 * $sin(6.283185307 * n / 256.0) +
                               4000.0 * $sin(6.283185307 * 11.0 * n / 256.0) + 0.5)) + (h % 2000);
  endfunction

  function automatic logic [15:0] answer(logic [15:0] c);
    logic [15:0] r;
    unique case (c[15:14])
      2'b00: begin r = RAMP ? 16'(32'h8000 + 64 * nconv + int'(c[13:8])) : 16'(eeg(nconv)); nconv++; end
      2'b10: begin regs[c[13:8]] = c[7:0]; r = {8'hFF, c[7:0]}; end
      2'b11: r = {8'h00, regs[c[13:8]]};
      default: r = 16'h0000;
    endcase
    return r;
  endfunction

  always @(negedge cs_n) begin
    bitn = 0;
    tx   = pipe1;
    miso = tx[15];
  end
  always @(posedge sclk) if (!cs_n) begin
    rx = {rx[14:0], mosi};
    bitn++;
  end
  always @(negedge sclk) if (!cs_n && bitn < 16) begin
    tx   = {tx[14:0], 1'b0};
    miso = tx[15];
  end
  always @(posedge cs_n) if (bitn == 16) begin
    last_cmd.push_back(rx);
    pipe1 = pipe0;
    pipe0 = answer(rx);
  end
endmodule
