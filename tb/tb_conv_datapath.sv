// tb_conv_datapath: random pooled convolutions through the four MAC lanes.
//
// Each trial picks a pool size (1..3), taps per position (1..40), a shift
// (0..12), ReLU on or off, random int8 inputs and weights and 16-bit biases,
// with random idle cycles between taps.  A loop model computes, per lane,
// bias + sum(x*w), rounds half up by the shift, saturates to int8, applies
// ReLU and takes the maximum over the window.  The test checks every pooled
// byte, that out_valid comes exactly two cycles after the last tap and pulses
// once per window, and counts saturated, clipped and pooled results so that
// each of those paths is shown to occur.
module tb_conv_datapath;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  logic in_valid = 0, in_first = 0, in_last = 0, in_pool_first = 0, in_pool_last = 0, relu = 0;
  act_t x = '0;
  logic signed [3:0][7:0]  w = '0;
  logic signed [3:0][15:0] bias = '0;
  logic [4:0] shift = '0;
  act_t [3:0] out;
  logic out_valid;
  int checks = 0, failures = 0;
  int n_sat = 0, n_relu = 0, n_pool = 0, n_valid = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) n_valid <= n_valid + 1;

  conv_datapath #(.LANES(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int model_rq(longint acc, int sh);
    longint v = acc;
    if (sh > 0) v = (v + (64'sd1 <<< (sh - 1))) >>> sh;
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int trial = 0; trial < 400; trial++) begin
      automatic int pool = $urandom_range(1, 3);
      automatic int taps = $urandom_range(1, 40);
      automatic int sh = $urandom_range(0, 12);
      automatic int best [4];
      automatic int t_last, v0;
      automatic bit r = $urandom_range(0, 1);
      for (int l = 0; l < 4; l++) best[l] = -1000;
      relu = r; shift = 5'(sh);
      v0 = n_valid;
      for (int p = 0; p < pool; p++) begin
        automatic longint acc [4];
        for (int l = 0; l < 4; l++) begin
          bias[l] = 16'($urandom_range(0, 65535));
          acc[l] = longint'($signed(bias[l]));
        end
        for (int t = 0; t < taps; t++) begin
          // random gaps between taps
          while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_first = (t == 0); in_last = (t == taps - 1);
          in_pool_first = (p == 0); in_pool_last = (p == pool - 1);
          x = act_t'($urandom_range(0, 255));
          for (int l = 0; l < 4; l++) begin
            w[l] = 8'($urandom_range(0, 255));
            acc[l] += longint'(x) * longint'($signed(w[l]));
          end
          @(negedge clk);
        end
        in_valid = 0; in_first = 0; in_last = 0;
        t_last = cyc;
        for (int l = 0; l < 4; l++) begin
          automatic int v = model_rq(acc[l], sh);
          if (v == 127 || v == -128) n_sat++;
          if (r && v < 0) begin v = 0; n_relu++; end
          if (v > best[l]) best[l] = v;
        end
        // the bias is reused between positions only after the merge
        @(negedge clk);
      end
      if (pool > 1) n_pool++;
      // out_valid two cycles after the last tap's cycle
      while (!out_valid && cyc < t_last + 4) @(negedge clk);
      check(out_valid, $sformatf("trial %0d: out_valid", trial));
      for (int l = 0; l < 4; l++) begin
        automatic act_t o = out[l];
        check(int'(o) == best[l], $sformatf("trial %0d lane %0d: %0d, expected %0d", trial, l, o, best[l]));
      end
      @(negedge clk);
      check(!out_valid, "out_valid is a single pulse");
      check(n_valid == v0 + 1, $sformatf("trial %0d: one out_valid per window", trial));
    end
    // exact latency: last tap at cycle n, out_valid in the cycle n+2
    begin
      int tl;
      bias = '0; shift = 0; relu = 0;
      in_valid = 1; in_first = 1; in_last = 1; in_pool_first = 1; in_pool_last = 1; x = 8'sd3;
      w = {8'sd1, 8'sd2, -8'sd3, 8'sd4};
      tl = cyc;
      @(negedge clk);
      in_valid = 0;
      check(!out_valid, "no out_valid one cycle after last tap");
      @(negedge clk);
      check(out_valid && cyc == tl + 2, "out_valid two cycles after last tap");
      check(out[0] == 8'sd12 && out[1] == -8'sd9 && out[2] == 8'sd6 && out[3] == 8'sd3, "lanes map to w[l]");
    end
    check(n_sat > 0 && n_relu > 0 && n_pool > 0, $sformatf("paths exercised sat %0d relu %0d pool %0d", n_sat, n_relu, n_pool));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
