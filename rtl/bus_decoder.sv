// bus_decoder: the 8-bit memory bus between the MCU and the engine.
//
// The MCU is the only master.  A transfer is one cycle with bus_valid high:
// bus_we selects write (bus_wdata is taken that cycle) or read (bus_rdata is
// valid the following cycle, because every slave answers from a register or a
// synchronous RAM).  The decoder splits the 17-bit byte address by the map in
// sleep_pkg, raises exactly one slave strobe, hands the slave its local
// offset and steers that slave's read data back, using the select registered
// with the request.  Accesses outside the map are dropped, flagged on bus_err
// and read as zero.  The paper shows only a shared 8-bit "memory bus"; the
// protocol, the map and the error flag are this design's choices.  An
// assertion checks that at most one strobe is high; its `disable iff (!rst_n)`
// makes the linter see rst_n used both asynchronously and synchronously,
// which only concerns the assertion.
module bus_decoder
  import sleep_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // master side
  input  logic              bus_valid,
  input  logic              bus_we,
  input  logic [BUS_AW-1:0] bus_addr,
  input  logic [7:0]        bus_wdata,
  output logic [7:0]        bus_rdata,
  output logic              bus_err,
  // slave side (shared write data and local offset)
  output logic [7:0]        s_wdata,
  output logic [15:0]       s_addr,
  output logic              wbuf_we,
  output logic              ibuf_we,
  output logic              obuf_re,
  output logic              conv_we,
  output logic              conv_re,
  output logic              lstm_we,
  output logic              lstm_re,
  input  logic [7:0]        obuf_rdata,
  input  logic [7:0]        conv_rdata,
  input  logic [7:0]        lstm_rdata
);

  bus_sel_e sel, sel_q;

  always_comb begin
    if      (bus_addr < IBUF_BASE) sel = SEL_WBUF;
    else if (bus_addr < OBUF_BASE) sel = SEL_IBUF;
    else if (bus_addr < CONV_BASE) sel = SEL_OBUF;
    else if (bus_addr < LSTM_BASE) sel = (bus_addr[11:10] == 2'b00) ? SEL_CONV : SEL_NONE;
    else if (bus_addr < LSTM_BASE + 17'h1000) sel = (bus_addr[11:10] == 2'b00) ? SEL_LSTM : SEL_NONE;
    else                           sel = SEL_NONE;
  end

  assign s_wdata = bus_wdata;
  assign s_addr  = bus_addr[15:0] & ((sel == SEL_WBUF) ? 16'hFFFF :
                                     (sel == SEL_IBUF) ? 16'h7FFF :
                                     (sel == SEL_OBUF) ? 16'h3FFF : 16'h0FFF);

  assign wbuf_we = bus_valid &  bus_we & (sel == SEL_WBUF);
  assign ibuf_we = bus_valid &  bus_we & (sel == SEL_IBUF);
  assign obuf_re = bus_valid & ~bus_we & (sel == SEL_OBUF);
  assign conv_we = bus_valid &  bus_we & (sel == SEL_CONV);
  assign conv_re = bus_valid & ~bus_we & (sel == SEL_CONV);
  assign lstm_we = bus_valid &  bus_we & (sel == SEL_LSTM);
  assign lstm_re = bus_valid & ~bus_we & (sel == SEL_LSTM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q   <= SEL_NONE;
      bus_err <= 1'b0;
    end else begin
      sel_q   <= (bus_valid && !bus_we) ? sel : SEL_NONE;
      bus_err <= bus_valid && (sel == SEL_NONE);
    end
  end

  always_comb begin
    unique case (sel_q)
      SEL_OBUF: bus_rdata = obuf_rdata;
      SEL_CONV: bus_rdata = conv_rdata;
      SEL_LSTM: bus_rdata = lstm_rdata;
      default:  bus_rdata = 8'h00;
    endcase
  end

  // At most one slave strobe per cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({wbuf_we, ibuf_we, obuf_re, conv_we, conv_re, lstm_we, lstm_re}));

endmodule
