// tb_stim_trigger: a square-wave "comparator output" (period 1000 cycles)
// drives the trigger.  While the stage is not the target the crossings are
// counted as blocked and nothing fires; in the target stage each selected
// crossing fires a burst that rises exactly delay+3 cycles after the edge and
// lasts pulse_len cycles; edges during a pending trigger are ignored; the edge
// select picks rising or falling crossings; disabling stops all bursts.
// Last, the bench test of the closed loop runs at real time scale: a 1 Hz
// crossing signal with a 20 MHz clock, a 250 ms delay and 100 ms bursts.
module tb_stim_trigger;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  logic osc_detect = 0, enable = 0, edge_falling = 0, stim_on;
  sleep_stage_e stage = STAGE_N2, target_stage = STAGE_N3;
  logic [31:0] delay = 32'd120, pulse_len = 32'd200;
  logic [15:0] n_triggers, n_blocked;
  int checks = 0, failures = 0;

  stim_trigger dut (.*);

  int cyc = 0, last_rise = -1, last_fall = -1, on_start = -1, bursts = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
  end
  // comparator: square wave of `period` cycles starting at cycle t0, changes
  // between clock edges
  int period = 1000, t0 = 0;
  always @(negedge clk) begin
    if (cyc >= t0) begin
      if ((cyc - t0) % period == 0)          begin osc_detect <= 1; last_rise <= cyc; end
      if ((cyc - t0) % period == period / 2) begin osc_detect <= 0; last_fall <= cyc; end
    end
  end
  logic stim_q = 0;
  always @(posedge clk) begin
    stim_q <= stim_on;
    if (stim_on && !stim_q) begin
      automatic int ref_edge = edge_falling ? last_fall : last_rise;
      on_start <= cyc;
      bursts++;
      checks++;
      if (!enable || stage != target_stage) begin failures++; $display("FAIL burst while gated"); end
      if (cyc - ref_edge != int'(delay) + 3) begin
        failures++; $display("FAIL burst %0d cycles after edge, expected %0d", cyc - ref_edge, delay + 3);
      end
    end
    if (!stim_on && stim_q) begin
      checks++;
      if (cyc - on_start != int'(pulse_len)) begin failures++; $display("FAIL burst length %0d", cyc - on_start); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    enable = 1;
    repeat (3500) @(negedge clk);               // N2: 3 or 4 rising edges blocked
    checks += 2;
    if (bursts != 0) begin failures++; $display("FAIL bursts in N2"); end
    if (n_blocked < 3) begin failures++; $display("FAIL blocked count %0d", n_blocked); end
    stage = STAGE_N3;
    repeat (5000) @(negedge clk);               // 5 rising edges
    checks++;
    if (bursts != 5 || n_triggers != 16'd5) begin failures++; $display("FAIL %0d bursts in N3", bursts); end
    edge_falling = 1; delay = 32'd700;          // delay + burst > period: every other falling edge is ignored
    pulse_len = 32'd400;
    repeat (5000) @(negedge clk);
    checks++;
    if (bursts < 7 || bursts > 8) begin failures++; $display("FAIL %0d bursts with long delay", bursts); end
    enable = 0;
    begin
      automatic int b = bursts;
      repeat (3000) @(negedge clk);
      checks++;
      if (bursts != b) begin failures++; $display("FAIL bursts while disabled"); end
    end
    // the published bench test: a 1 Hz oscillation at a 20 MHz clock
    // (20,000,000 cycles per period), stimulus a quarter period (250 ms)
    // after each rising crossing, 100 ms long; three periods in N3
    begin
      automatic int b = bursts;
      @(negedge clk);
      period = 20_000_000; t0 = cyc + 10;
      edge_falling = 0; delay = 32'd5_000_000; pulse_len = 32'd2_000_000;
      stage = STAGE_N3; enable = 1;
      repeat (3 * 20_000_000) @(negedge clk);
      checks++;
      if (bursts != b + 3) begin failures++; $display("FAIL %0d bursts in three 1 Hz periods", bursts - b); end
    end
    $display("bursts %0d, blocked %0d", bursts, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
