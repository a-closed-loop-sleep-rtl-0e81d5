// tb_bus_decoder: walks reads and writes over every region of the bus map and
// a few unmapped holes, checking which strobe fires, the local offset, the
// read-data steering one cycle later and the error flag.
module tb_bus_decoder;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  logic bus_valid = 0, bus_we = 0, bus_err;
  logic [BUS_AW-1:0] bus_addr = '0;
  logic [7:0] bus_wdata = '0, bus_rdata, s_wdata;
  logic [15:0] s_addr;
  logic wbuf_we, ibuf_we, obuf_re, conv_we, conv_re, lstm_we, lstm_re;
  logic [7:0] obuf_rdata, conv_rdata, lstm_rdata;
  int checks = 0, failures = 0;

  bus_decoder dut (.*);

  // slaves answer one cycle later with a tag and the low offset bits
  always_ff @(posedge clk) begin
    obuf_rdata <= 8'h10 ^ s_addr[7:0];
    conv_rdata <= 8'h20 ^ s_addr[7:0];
    lstm_rdata <= 8'h30 ^ s_addr[7:0];
  end

  // expected slave: 0 none, 1 wbuf, 2 ibuf, 3 obuf, 4 conv, 5 lstm
  function automatic int region(int a);
    if (a < 'h10000) return 1;
    if (a < 'h18000) return 2;
    if (a < 'h1C000) return 3;
    if (a < 'h1C400) return 4;
    if (a < 'h1D000) return 0;
    if (a < 'h1D400) return 5;
    return 0;
  endfunction
  function automatic int mask(int r);
    case (r) 1: return 'hFFFF; 2: return 'h7FFF; 3: return 'h3FFF; default: return 'hFFF; endcase
  endfunction

  task automatic access(input int a, input bit we);
    int r = region(a);
    bit [6:0] exp_str;
    @(negedge clk);
    bus_valid = 1; bus_we = we; bus_addr = BUS_AW'(a); bus_wdata = 8'(a * 3);
    #1;
    exp_str = '0;
    case (r)
      1: exp_str[6] = we;
      2: exp_str[5] = we;
      3: exp_str[4] = !we;
      4: begin exp_str[3] = we; exp_str[2] = !we; end
      5: begin exp_str[1] = we; exp_str[0] = !we; end
      default: ;
    endcase
    checks++;
    if ({wbuf_we, ibuf_we, obuf_re, conv_we, conv_re, lstm_we, lstm_re} != exp_str) begin
      failures++; $display("FAIL strobes addr %h we %0d: %b exp %b", a, we,
        {wbuf_we, ibuf_we, obuf_re, conv_we, conv_re, lstm_we, lstm_re}, exp_str);
    end
    if (r != 0) begin
      checks++;
      if (int'(s_addr) != (a & mask(r)) || s_wdata != 8'(a * 3)) begin
        failures++; $display("FAIL offset addr %h got %h", a, s_addr);
      end
    end
    @(negedge clk);
    bus_valid = 0;
    #1;
    checks++;
    if (bus_err != (r == 0)) begin failures++; $display("FAIL err addr %h", a); end
    if (!we) begin
      int e = 0;
      case (r)
        3: e = 'h10 ^ (a & 'hFF);
        4: e = 'h20 ^ (a & 'hFF);
        5: e = 'h30 ^ (a & 'hFF);
        default: e = 0;
      endcase
      checks++;
      if (int'(bus_rdata) != e) begin failures++; $display("FAIL rdata addr %h got %h exp %h", a, bus_rdata, e); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (pts[i]) begin access(pts[i], 1); access(pts[i], 0); end
    for (int n = 0; n < 400; n++) access(int'($urandom % 'h20000), n[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int pts [] = '{0, 'h0003, 'hBFFF, 'hFFFF, 'h10000, 'h17FFF, 'h18000, 'h18005, 'h1BFFF,
                 'h1C000, 'h1C01F, 'h1C3FF, 'h1C400, 'h1CFFF, 'h1D000, 'h1D015, 'h1D3FF, 'h1D400, 'h1FFFF};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
