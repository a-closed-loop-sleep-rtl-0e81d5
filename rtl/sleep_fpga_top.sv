// sleep_fpga_top: the FPGA part of the closed-loop sleep modulation system.
//
// It holds the sleep-stage classification engine and the closed-loop glue:
//   - an 8-bit memory bus (bus_decoder) by which the MCU fills the weight
//     buffer and the input buffer, programs and starts the two engines and
//     reads the dense-layer results from the output buffer;
//   - the convolution engine (conv_controller with its conv_datapath): four
//     kernels per cycle, ReLU and max pooling, used for the two CNN paths, for
//     the LSTM gate products and for the final dense layer;
//   - the LSTM engine (lstm_controller, lstm_datapath, tanh_lut): grouping of
//     input and hidden state, and the cell/hidden update;
//   - the working RAM shared by both engines and the weight and I/O buffers,
//     all simple dual-port;
//   - the SPI controller of the EEG amplifier and the stage-gated, delayed
//     trigger of the auditory stimulus.
// The MCU itself (a processor with its firmware: weight loading from flash,
// layer sequencing, softmax) is outside: its bus, the engine status bits, the
// AFE controller's configuration and sample stream and the trigger's settings
// are ports.  Only one engine may run at a time (the MCU waits for busy to
// drop); the working RAM follows whichever is busy, and an assertion checks
// that the two are never busy together (its `disable iff (!rst_n)` is the
// only synchronous use of rst_n the linter reports).  The convolution
// engine's 16-bit map addresses are cut to the working RAM's 14 bits, so
// their top two bits go unused.  The split of work between the engines and
// the MCU follows the paper; the bus map, sizes and arbitration are this
// design's choices.
module sleep_fpga_top
  import sleep_pkg::*;
#(
  parameter int unsigned WBUF_DEPTH = 12288,
  parameter int unsigned WRAM_DEPTH = 16384,
  parameter int unsigned IBUF_DEPTH = 8192,
  parameter int unsigned OBUF_DEPTH = 256,
  parameter int unsigned LANES      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // MCU memory bus
  input  logic              bus_valid,
  input  logic              bus_we,
  input  logic [BUS_AW-1:0] bus_addr,
  input  logic [7:0]        bus_wdata,
  output logic [7:0]        bus_rdata,
  output logic              bus_err,
  output logic              conv_busy,
  output logic              conv_done,
  output logic              lstm_busy,
  output logic              lstm_done,
  // AFE controller (configured by the MCU)
  input  logic              afe_enable,
  input  logic [7:0]        afe_clk_div,
  input  logic [31:0]       afe_sample_div,
  input  logic [5:0]        afe_channel,
  input  logic              afe_cmd_valid,
  input  logic [15:0]       afe_cmd_word,
  output logic              afe_cmd_ready,
  output logic              afe_resp_valid,
  output logic [15:0]       afe_resp,
  output logic              afe_sample_valid,
  output logic [15:0]       afe_sample,
  output logic              spi_cs_n,
  output logic              spi_sclk,
  output logic              spi_mosi,
  input  logic              spi_miso,
  // closed-loop stimulation
  input  logic              osc_detect,
  input  logic              stim_enable,
  input  logic              stim_edge_falling,
  input  sleep_stage_e      stage,
  input  sleep_stage_e      target_stage,
  input  logic [31:0]       stim_delay,
  input  logic [31:0]       stim_pulse_len,
  output logic              stim_on,
  output logic [15:0]       stim_n_triggers,
  output logic [15:0]       stim_n_blocked
);

  localparam int unsigned WB_AW = $clog2(WBUF_DEPTH);
  localparam int unsigned WR_AW = $clog2(WRAM_DEPTH);
  localparam int unsigned IB_AW = $clog2(IBUF_DEPTH);
  localparam int unsigned OB_AW = $clog2(OBUF_DEPTH);

  // ------------------------------------------------------------ memory bus
  logic [7:0]  s_wdata, obuf_rdata, conv_rdata, lstm_rdata;
  logic [15:0] s_addr;
  logic        wbuf_we, ibuf_we, obuf_re, conv_we, conv_re, lstm_we, lstm_re;

  bus_decoder u_bus (
    .clk, .rst_n,
    .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_err,
    .s_wdata, .s_addr,
    .wbuf_we, .ibuf_we, .obuf_re, .conv_we, .conv_re, .lstm_we, .lstm_re,
    .obuf_rdata, .conv_rdata, .lstm_rdata
  );

  // ------------------------------------------------------------ convolution engine
  logic                         c_rd_en, c_rd_src_ibuf, c_w_rd_en, c_wr_en, c_wr_dst_obuf;
  logic [15:0]                  c_rd_addr, c_wr_addr;
  logic [WB_AW-1:0]             c_w_rd_addr;
  logic signed [LANES-1:0][7:0] w_rd_data;
  logic [7:0]                   c_wr_data, wram_rd_data, ibuf_rd_data;

  conv_controller #(.LANES(LANES), .WB_AW(WB_AW), .DATA_AW(16)) u_conv (
    .clk, .rst_n,
    .reg_we (conv_we), .reg_re (conv_re), .reg_addr (s_addr[11:0]), .reg_wdata (s_wdata),
    .reg_rdata (conv_rdata), .busy (conv_busy), .done (conv_done),
    .rd_en (c_rd_en), .rd_addr (c_rd_addr), .rd_src_ibuf (c_rd_src_ibuf),
    .rd_data_wram (wram_rd_data), .rd_data_ibuf (ibuf_rd_data),
    .w_rd_en (c_w_rd_en), .w_rd_addr (c_w_rd_addr), .w_rd_data (w_rd_data),
    .wr_en (c_wr_en), .wr_dst_obuf (c_wr_dst_obuf), .wr_addr (c_wr_addr), .wr_data (c_wr_data)
  );

  weight_buffer #(.DEPTH(WBUF_DEPTH), .LANES(LANES)) u_wbuf (
    .clk,
    .wr_en (wbuf_we), .wr_byte_addr (s_addr), .wr_data (s_wdata),
    .rd_en (c_w_rd_en), .rd_addr (c_w_rd_addr), .rd_data (w_rd_data)
  );

  io_buffer #(.IN_DEPTH(IBUF_DEPTH), .OUT_DEPTH(OBUF_DEPTH)) u_iobuf (
    .clk,
    .in_wr_en  (ibuf_we), .in_wr_addr (IB_AW'(s_addr)), .in_wr_data (s_wdata),
    .in_rd_en  (c_rd_en && c_rd_src_ibuf), .in_rd_addr (IB_AW'(c_rd_addr)), .in_rd_data (ibuf_rd_data),
    .out_wr_en (c_wr_en && c_wr_dst_obuf), .out_wr_addr (OB_AW'(c_wr_addr)), .out_wr_data (c_wr_data),
    .out_rd_en (obuf_re), .out_rd_addr (OB_AW'(s_addr)), .out_rd_data (obuf_rdata)
  );

  // ------------------------------------------------------------ LSTM engine
  logic             l_rd_en, l_wr_en;
  logic [WR_AW-1:0] l_rd_addr, l_wr_addr;
  logic [7:0]       l_wr_data;

  lstm_controller #(.AW(WR_AW)) u_lstm (
    .clk, .rst_n,
    .reg_we (lstm_we), .reg_re (lstm_re), .reg_addr (s_addr[11:0]), .reg_wdata (s_wdata),
    .reg_rdata (lstm_rdata), .busy (lstm_busy), .done (lstm_done),
    .rd_en (l_rd_en), .rd_addr (l_rd_addr), .rd_data (wram_rd_data),
    .wr_en (l_wr_en), .wr_addr (l_wr_addr), .wr_data (l_wr_data)
  );

  // ------------------------------------------------------------ working RAM
  logic             m_rd_en, m_wr_en;
  logic [WR_AW-1:0] m_rd_addr, m_wr_addr;
  logic [7:0]       m_wr_data;

  always_comb begin
    if (conv_busy) begin
      m_rd_en   = c_rd_en && !c_rd_src_ibuf;
      m_rd_addr = WR_AW'(c_rd_addr);
      m_wr_en   = c_wr_en && !c_wr_dst_obuf;
      m_wr_addr = WR_AW'(c_wr_addr);
      m_wr_data = c_wr_data;
    end else begin
      m_rd_en   = l_rd_en;
      m_rd_addr = l_rd_addr;
      m_wr_en   = l_wr_en;
      m_wr_addr = l_wr_addr;
      m_wr_data = l_wr_data;
    end
  end

  working_ram #(.DEPTH(WRAM_DEPTH)) u_wram (
    .clk,
    .wr_en (m_wr_en), .wr_addr (m_wr_addr), .wr_data (m_wr_data),
    .rd_en (m_rd_en), .rd_addr (m_rd_addr), .rd_data (wram_rd_data)
  );

  // The MCU runs one engine at a time.
  assert property (@(posedge clk) disable iff (!rst_n) !(conv_busy && lstm_busy));

  // ------------------------------------------------------------ AFE and stimulation
  afe_spi_controller u_afe (
    .clk, .rst_n,
    .enable (afe_enable), .clk_div (afe_clk_div), .sample_div (afe_sample_div), .channel (afe_channel),
    .cmd_valid (afe_cmd_valid), .cmd_word (afe_cmd_word), .cmd_ready (afe_cmd_ready),
    .resp_valid (afe_resp_valid), .resp (afe_resp),
    .sample_valid (afe_sample_valid), .sample (afe_sample),
    .spi_cs_n, .spi_sclk, .spi_mosi, .spi_miso
  );

  stim_trigger u_stim (
    .clk, .rst_n,
    .osc_detect, .enable (stim_enable), .edge_falling (stim_edge_falling),
    .stage, .target_stage, .delay (stim_delay), .pulse_len (stim_pulse_len),
    .stim_on, .n_triggers (stim_n_triggers), .n_blocked (stim_n_blocked)
  );

endmodule
