// tb_lstm_controller: the LSTM engine's three commands on a working RAM.
// CLEAR zeroes a state vector; GROUP concatenates an input vector and a hidden
// state; CELL updates N = 8 hidden units from gate values placed in the RAM.
// The RAM contents are compared with a model of each command (the cell maths
// is the same fixed-point model as in tb_lstm_datapath) and the busy time of
// each command with its cycle formula.
module tb_lstm_controller;
  import sleep_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset
  logic        reg_we = 0, reg_re = 0;
  logic [11:0] reg_addr = '0;
  logic [7:0]  reg_wdata = '0, reg_rdata;
  logic        busy, done, rd_en, wr_en;
  logic [9:0]  rd_addr, wr_addr;
  logic [7:0]  rd_data, wr_data;
  int checks = 0, failures = 0;
  int model [1024];

  lstm_controller #(.AW(10)) dut (.*);
  working_ram #(.DEPTH(1024)) u_ram (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  function automatic int tab(int i);
    if (i > 37) i = 37;
    return int'($floor(127.0 * $tanh(real'(i) / 8.0) + 0.5));
  endfunction
  function automatic int act_tanh(int v, bit sig);
    int a = v < 0 ? -v : v;
    int idx = sig ? a >> 2 : a >> 1;
    int fr  = sig ? a & 3 : a & 1;
    int y   = tab(idx) + (((tab(idx + 1) - tab(idx)) * fr) >> (sig ? 2 : 1));
    return v < 0 ? -y : y;
  endfunction
  function automatic int sigm(int v); return (128 + act_tanh(v, 1)) >>> 1; endfunction
  function automatic int s8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : int'(v)); endfunction

  task automatic wreg(input int idx, input int val);
    @(negedge clk); reg_we = 1; reg_addr = 12'(2 * idx); reg_wdata = 8'(val);
    @(negedge clk); reg_addr = 12'(2 * idx + 1); reg_wdata = 8'(val >> 8);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic go(input int op, input int expc);
    int cyc = 0;
    @(negedge clk); reg_we = 1; reg_addr = 12'h000; reg_wdata = 8'(8'h80 | op);
    @(negedge clk); reg_we = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != expc) begin failures++; $display("FAIL op %0d took %0d cycles, expected %0d", op, cyc, expc); end
    if (!done) begin failures++; $display("FAIL op %0d no done", op); end
  endtask
  task automatic compare(input string what);
    int bad = 0;
    for (int a = 0; a < 1024; a++) if (int'($signed(u_ram.mem[a])) != model[a]) begin
      bad++;
      if (bad < 5) $display("FAIL %s addr %0d got %0d exp %0d", what, a, $signed(u_ram.mem[a]), model[a]);
    end
    checks++;
    if (bad != 0) failures++;
  endtask

  localparam int N = 8;
  initial begin
    for (int a = 0; a < 1024; a++) begin
      u_ram.mem[a] = 8'($urandom);
      model[a] = int'($signed(u_ram.mem[a]));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // CLEAR 8 bytes at 600 (cell state) and 8 at 608 (hidden state)
    wreg(LR_DST, 600); wreg(LR_LEN_A, 16);
    go(LOP_CLEAR, 16);
    for (int a = 600; a < 616; a++) model[a] = 0;
    compare("clear");
    // GROUP: x (12 bytes at 100) and h (8 bytes at 608) into 700
    wreg(LR_SRC_A, 100); wreg(LR_LEN_A, 12); wreg(LR_SRC_B, 608); wreg(LR_LEN_B, 8); wreg(LR_DST, 700);
    go(LOP_GROUP, 21);
    for (int a = 0; a < 12; a++) model[700 + a] = model[100 + a];
    for (int a = 0; a < 8; a++)  model[712 + a] = model[608 + a];
    compare("group");
    // CELL twice over the gate block at 200 (4*N bytes), state at 300/400, output copy at 500
    for (int rep = 0; rep < 2; rep++) begin
      wreg(LR_GATES, 200); wreg(LR_CSTATE, 300); wreg(LR_HSTATE, 400); wreg(LR_HOUT, 500 + rep * 16);
      wreg(LR_NHID, N);
      go(LOP_CELL, N * 19);
      for (int j = 0; j < N; j++) begin
        automatic int vi = model[200 + j], vf = model[200 + N + j], vg = model[200 + 2 * N + j];
        automatic int vo = model[200 + 3 * N + j], vc = model[300 + j];
        automatic int cn = s8((sigm(vf) * vc + ((sigm(vi) * act_tanh(vg, 0)) >>> 3) + 64) >>> 7);
        automatic int h  = s8((sigm(vo) * act_tanh(cn, 0) + 64) >>> 7);
        model[300 + j] = cn; model[400 + j] = h; model[500 + rep * 16 + j] = h;
      end
      compare("cell");
    end
    // registers read back
    @(negedge clk); reg_re = 1; reg_addr = 12'(2 * LR_NHID); @(negedge clk); reg_re = 0;
    checks++;
    if (reg_rdata != 8'(N)) begin failures++; $display("FAIL readback %0d", reg_rdata); end
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
