// afe_spi_controller: SPI master for the 16-bit EEG amplifier/ADC chip.
//
// The chip (an Intan RHD2216 in the paper) is driven by 16-bit SPI words, MSB
// first, SPI mode 0 (MOSI set while SCLK is low, MISO sampled on the rising
// edge), chip select low for one word.  Every sample_div clock cycles, while
// enabled, the controller sends a frame of three words: CONVERT(channel)
// = {2'b00, channel, 8'h00} followed by two READ(40) words
// = {2'b11, 6'd40, 8'h00}.  The chip answers a command two words later, so the
// MISO word of the frame's third transfer is the conversion result; it is
// delivered on sample/sample_valid.  Between frames the MCU can send any
// command word (register setup, calibration) with cmd_valid/cmd_ready; the
// MISO word received during that transfer comes back on resp/resp_valid.
//
// Timing: SCLK has a half period of clk_div clock cycles (clk_div >= 1); a word
// takes 2*clk_div*16 + 2*clk_div cycles including the chip-select gaps.  The
// paper gives only the block's name and its SPI link; the command framing
// follows the amplifier's published protocol, the rest is this design's choice.
module afe_spi_controller (
  input  logic        clk,
  input  logic        rst_n,
  // configuration (from the MCU)
  input  logic        enable,
  input  logic [7:0]  clk_div,
  input  logic [31:0] sample_div,
  input  logic [5:0]  channel,
  // MCU command path
  input  logic        cmd_valid,
  input  logic [15:0] cmd_word,
  output logic        cmd_ready,
  output logic        resp_valid,
  output logic [15:0] resp,
  // samples
  output logic        sample_valid,
  output logic [15:0] sample,
  // SPI
  output logic        spi_cs_n,
  output logic        spi_sclk,
  output logic        spi_mosi,
  input  logic        spi_miso
);

  // ------------------------------------------------------------ sample timer
  logic [31:0] tcnt;
  logic        tick, frame_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcnt <= '0; tick <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (!enable) tcnt <= '0;
      else if (tcnt >= sample_div - 1) begin tcnt <= '0; tick <= 1'b1; end
      else tcnt <= tcnt + 1;
    end
  end

  // ------------------------------------------------------------ word engine
  typedef enum logic [2:0] {W_IDLE, W_LEAD, W_LOW, W_HIGH, W_TRAIL} wstate_e;
  wstate_e     ws;
  logic [7:0]  hcnt;
  logic [3:0]  bitn;
  logic [15:0] tx, rx;
  logic        w_start, w_done;
  logic [15:0] w_word;
  logic [1:0]  miso_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miso_s <= '0;
    else        miso_s <= {miso_s[0], spi_miso};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE; hcnt <= '0; bitn <= '0; tx <= '0; rx <= '0; w_done <= 1'b0;
      spi_cs_n <= 1'b1; spi_sclk <= 1'b0; spi_mosi <= 1'b0;
    end else begin
      w_done <= 1'b0;
      unique case (ws)
        W_IDLE: if (w_start) begin
          ws <= W_LEAD; tx <= w_word; hcnt <= '0; bitn <= '0; spi_cs_n <= 1'b0;
        end
        W_LEAD: if (hcnt == clk_div - 1) begin
          hcnt <= '0; ws <= W_LOW; spi_mosi <= tx[15];
        end else hcnt <= hcnt + 1;
        W_LOW: if (hcnt == clk_div - 1) begin
          hcnt <= '0; ws <= W_HIGH; spi_sclk <= 1'b1;
        end else hcnt <= hcnt + 1;
        W_HIGH: if (hcnt == clk_div - 1) begin
          hcnt <= '0; spi_sclk <= 1'b0;
          // MISO is sampled at the end of the high phase (two-flop synchronised)
          rx <= {rx[14:0], miso_s[1]};
          tx <= {tx[14:0], 1'b0};
          if (bitn == 4'd15) ws <= W_TRAIL;
          else begin bitn <= bitn + 1; ws <= W_LOW; spi_mosi <= tx[14]; end
        end else hcnt <= hcnt + 1;
        W_TRAIL: if (hcnt == clk_div - 1) begin
          hcnt <= '0; spi_cs_n <= 1'b1; ws <= W_IDLE; w_done <= 1'b1;
        end else hcnt <= hcnt + 1;
        default: ws <= W_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ frame control
  typedef enum logic [2:0] {F_IDLE, F_CONV, F_D1, F_D2, F_CMD} fstate_e;
  fstate_e fs;
  localparam logic [15:0] READ40 = {2'b11, 6'd40, 8'h00};
  logic [15:0] cmd_word_q;

  assign cmd_ready = (fs == F_IDLE) && !frame_pend && !tick && (ws == W_IDLE);

  always_comb begin
    w_start = 1'b0;
    w_word  = READ40;
    unique case (fs)
      F_CONV: begin w_start = (ws == W_IDLE) && !w_done; w_word = {2'b00, channel, 8'h00}; end
      F_D1, F_D2: begin w_start = (ws == W_IDLE) && !w_done; w_word = READ40; end
      F_CMD: begin w_start = (ws == W_IDLE) && !w_done; w_word = cmd_word_q; end
      default: ;
    endcase
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE; frame_pend <= 1'b0; cmd_word_q <= '0;
      sample_valid <= 1'b0; sample <= '0; resp_valid <= 1'b0; resp <= '0;
    end else begin
      sample_valid <= 1'b0;
      resp_valid   <= 1'b0;
      if (tick) frame_pend <= 1'b1;
      unique case (fs)
        F_IDLE: begin
          if (frame_pend || tick) begin
            fs <= F_CONV; frame_pend <= 1'b0;
          end else if (cmd_valid && cmd_ready) begin
            fs <= F_CMD; cmd_word_q <= cmd_word;
          end
        end
        F_CONV: if (w_done) fs <= F_D1;
        F_D1:   if (w_done) fs <= F_D2;
        F_D2:   if (w_done) begin
          fs <= F_IDLE; sample <= rx; sample_valid <= 1'b1;
        end
        F_CMD:  if (w_done) begin
          fs <= F_IDLE; resp <= rx; resp_valid <= 1'b1;
        end
        default: fs <= F_IDLE;
      endcase
    end
  end

endmodule
