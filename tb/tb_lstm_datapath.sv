// tb_lstm_datapath: random and corner-case gate values through the cell
// update.  The expected c' and h come from a bit-exact model of the fixed-point
// formulas (table values recomputed from tanh), and the result is also held
// against real-valued LSTM arithmetic within a few LSBs.  done must come
// exactly 8 cycles after start.
module tb_lstm_datapath;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, done;
  act_t i_pre, f_pre, g_pre, o_pre, c_in, c_out, h_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  lstm_datapath dut (.*);

  function automatic int tab(int i);
    if (i > 37) i = 37;
    return int'($floor(127.0 * $tanh(real'(i) / 8.0) + 0.5));
  endfunction
  // tanh of v/16 (sig=0) or of v/32 (sig=1, for the sigmoid), Q0.7
  function automatic int act_tanh(int v, bit sig);
    int a = v < 0 ? -v : v;
    int idx = sig ? a >> 2 : a >> 1;
    int fr  = sig ? a & 3 : a & 1;
    int y   = tab(idx) + (((tab(idx + 1) - tab(idx)) * fr) >> (sig ? 2 : 1));
    return v < 0 ? -y : y;
  endfunction
  function automatic int sigm(int v); return (128 + act_tanh(v, 1)) >>> 1; endfunction
  function automatic int s8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : int'(v)); endfunction

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  task automatic one(input int vi, input int vf, input int vg, input int vo, input int vc);
    int si, sf, tg, so, cn, tc, h, lat;
    real ci, hr;
    i_pre = act_t'(vi); f_pre = act_t'(vf); g_pre = act_t'(vg); o_pre = act_t'(vo); c_in = act_t'(vc);
    si = sigm(vi); sf = sigm(vf); tg = act_tanh(vg, 0); so = sigm(vo);
    cn = s8((sf * vc + ((si * tg) >>> 3) + 64) >>> 7);
    tc = act_tanh(cn, 0);
    h  = s8((so * tc + 64) >>> 7);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks += 3;
    if (lat != 9) begin failures++; $display("FAIL latency %0d", lat); end
    if (int'(c_out) != cn || int'(h_out) != h) begin
      failures++;
      $display("FAIL i%0d f%0d g%0d o%0d c%0d: c'=%0d/%0d h=%0d/%0d", vi, vf, vg, vo, vc, c_out, cn, h_out, h);
    end
    // real-valued reference (cell state in units of 1/16, h in 1/128)
    ci = (1.0 / (1.0 + $exp(-vf / 16.0))) * (vc / 16.0) + (1.0 / (1.0 + $exp(-vi / 16.0))) * $tanh(vg / 16.0);
    if (ci > 127.0 / 16.0) ci = 127.0 / 16.0;
    if (ci < -8.0) ci = -8.0;
    hr = 128.0 * (1.0 / (1.0 + $exp(-vo / 16.0))) * $tanh(real'(cn) / 16.0);
    if (fabs(ci * 16.0 - real'(c_out)) > 3.0 || fabs(hr - real'(h_out)) > 4.0) begin
      failures++;
      $display("FAIL accuracy: c' %0d vs %f, h %0d vs %f", c_out, ci * 16.0, h_out, hr);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(0, 0, 0, 0, 0);
    one(127, 127, 127, 127, 127);
    one(-128, -128, -128, -128, -128);
    one(127, -128, 127, 127, 0);
    one(-128, 127, -128, 127, 100);
    for (int n = 0; n < 300; n++)
      one(int'($urandom % 256) - 128, int'($urandom % 256) - 128, int'($urandom % 256) - 128,
          int'($urandom % 256) - 128, int'($urandom % 256) - 128);
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
