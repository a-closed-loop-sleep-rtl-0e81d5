// tb_conv_controller: the convolution engine (controller, datapath, weight
// buffer, working RAM and input/output buffer) against a direct loop model.
//
// Three runs are programmed through the register port: a strided, padded,
// pooled convolution with ReLU from the input buffer into the working RAM
// (two filter groups, the second one partial); a second layer reading that map
// back from the working RAM; and a dense layer into the output buffer with a
// large shift and saturation.  Every output byte is compared with the model
// and each run's busy time with NGROUPS*OUT_LEN*(POOL*K*C + 7) cycles.
module tb_conv_controller;
  import sleep_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  logic        reg_we = 0, reg_re = 0;
  logic [11:0] reg_addr = '0;
  logic [7:0]  reg_wdata = '0, reg_rdata;
  logic        busy, done;
  logic        rd_en, rd_src_ibuf, w_rd_en, wr_en, wr_dst_obuf;
  logic [15:0] rd_addr, wr_addr;
  logic [7:0]  rd_data_wram, rd_data_ibuf, wr_data, obuf_q;
  logic [9:0]  w_rd_addr;
  logic signed [3:0][7:0] w_rd_data;
  logic        wb_we = 0;
  logic [15:0] wb_addr = '0;
  logic [7:0]  wb_data = '0;
  logic        ib_we = 0;
  logic [9:0]  ib_addr = '0;
  logic [7:0]  ib_data = '0;
  logic        ob_re = 0;
  logic [5:0]  ob_addr = '0;

  conv_controller #(.WB_AW(10), .DATA_AW(16)) dut (.*);
  weight_buffer #(.DEPTH(1024)) u_wb (.clk, .wr_en(wb_we), .wr_byte_addr(wb_addr), .wr_data(wb_data),
                                      .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data));
  working_ram #(.DEPTH(1024)) u_wr (.clk, .wr_en(wr_en && !wr_dst_obuf), .wr_addr(wr_addr[9:0]), .wr_data,
                                    .rd_en(rd_en && !rd_src_ibuf), .rd_addr(rd_addr[9:0]), .rd_data(rd_data_wram));
  io_buffer #(.IN_DEPTH(1024), .OUT_DEPTH(64)) u_io (
    .clk, .in_wr_en(ib_we), .in_wr_addr(ib_addr), .in_wr_data(ib_data),
    .in_rd_en(rd_en && rd_src_ibuf), .in_rd_addr(rd_addr[9:0]), .in_rd_data(rd_data_ibuf),
    .out_wr_en(wr_en && wr_dst_obuf), .out_wr_addr(wr_addr[5:0]), .out_wr_data(wr_data),
    .out_rd_en(ob_re), .out_rd_addr(ob_addr), .out_rd_data(obuf_q));

  int checks = 0, failures = 0;
  int n_sat = 0, n_relu = 0, n_pad = 0;

  task automatic wreg(input int idx, input int val);
    @(negedge clk); reg_we = 1; reg_addr = 12'(2 * idx); reg_wdata = 8'(val);
    @(negedge clk); reg_addr = 12'(2 * idx + 1); reg_wdata = 8'(val >> 8);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic wbias(input int f, input int val);
    @(negedge clk); reg_we = 1; reg_addr = 12'(12'h200 + 2 * f); reg_wdata = 8'(val);
    @(negedge clk); reg_addr = 12'(12'h200 + 2 * f + 1); reg_wdata = 8'(val >> 8);
    @(negedge clk); reg_we = 0;
  endtask

  // model state
  int inmap [1024];     // input buffer contents
  int wram  [1024];     // expected working RAM
  int obuf  [64];
  int wts   [1024][4];  // weight buffer
  int bias  [16];

  function automatic int rq(longint acc, int sh, bit relu);
    longint v = acc;
    if (sh > 0) v = (v + (64'sd1 <<< (sh - 1))) >>> sh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  // configure, run, model and check one layer
  task automatic run_layer(input bit src_ib, input bit dst_ob, input int in_base, input int in_len,
                           input int c, input int k, input int s, input int pad, input int nf,
                           input int out_len, input int pool, input bit relu, input int sh,
                           input int out_base, input int pstr);
    int ng = (nf + 3) / 4;
    int cyc = 0;
    int expc;
    int res [64][16];
    for (int f = 0; f < nf; f++) begin
      for (int q = 0; q < out_len; q++) begin
        int best = -1000;
        for (int j = 0; j < pool; j++) begin
          longint acc = bias[f];
          int p = q * pool + j;
          for (int t = 0; t < k * c; t++) begin
            int lin = (p * s - pad) * c + t;
            int x = 0;
            if (lin >= 0 && lin < in_len * c) x = src_ib ? inmap[in_base + lin] : wram[in_base + lin];
            else n_pad++;
            acc += x * wts[(f / 4) * k * c + t][f % 4];
          end
          begin
            int y = rq(acc, sh, relu);
            int r = rq(acc, sh, 0);
            if (r == 127 || r == -128) n_sat++;
            if (relu && r < 0) n_relu++;
            if (y > best) best = y;
          end
        end
        res[q][f] = best;
      end
    end
    wreg(CR_SRC, src_ib); wreg(CR_DST, dst_ob); wreg(CR_IN_BASE, in_base); wreg(CR_IN_LEN, in_len);
    wreg(CR_IN_CH, c); wreg(CR_KSIZE, k); wreg(CR_STRIDE, s); wreg(CR_PAD, pad);
    wreg(CR_NGROUPS, ng); wreg(CR_NFILT, nf); wreg(CR_OUT_LEN, out_len); wreg(CR_POOL, pool);
    wreg(CR_MODE, (sh << 8) | int'(relu)); wreg(CR_OUT_BASE, out_base); wreg(CR_OUT_PSTR, pstr);
    @(negedge clk); reg_we = 1; reg_addr = 12'h000; reg_wdata = 8'h01;
    @(negedge clk); reg_we = 0;
    while (busy) begin @(negedge clk); cyc++; end
    expc = ng * out_len * (pool * k * c + 7);
    checks++;
    if (cyc != expc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, expc); end
    checks++;
    if (!done) begin failures++; $display("FAIL done not set"); end
    // the status register reads back done
    @(negedge clk); reg_re = 1; reg_addr = 12'h000; @(negedge clk); reg_re = 0;
    checks++;
    if (reg_rdata != 8'h02) begin failures++; $display("FAIL status %h", reg_rdata); end
    for (int q = 0; q < out_len; q++)
      for (int f = 0; f < nf; f++) begin
        int a = out_base + q * pstr + f;
        int got;
        if (dst_ob) begin
          ob_re = 1; ob_addr = 6'(a); @(negedge clk); ob_re = 0; got = int'($signed(obuf_q));
          obuf[a] = res[q][f];
        end else begin
          got = int'($signed(u_wr.mem[a]));
          wram[a] = res[q][f];
        end
        checks++;
        if (got != res[q][f]) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d f=%0d got %0d exp %0d", q, f, got, res[q][f]);
        end
      end
  endtask

  task automatic load_weights(input int words, input int seed, input int range);
    for (int wd = 0; wd < words; wd++)
      for (int l = 0; l < 4; l++) begin
        int v = int'($urandom(seed * 7919 + wd * 4 + l) % (2 * range + 1)) - range;
        wts[wd][l] = v;
        @(negedge clk); wb_we = 1; wb_addr = 16'(wd * 4 + l); wb_data = 8'(v);
      end
    @(negedge clk); wb_we = 0;
  endtask

  initial begin
    for (int a = 0; a < 1024; a++) wram[a] = int'($signed(u_wr.mem[a]));
    repeat (3) @(negedge clk);
    rst_n = 1;
    // input map: 40 positions x 2 channels
    for (int a = 0; a < 80; a++) begin
      inmap[a] = int'($urandom % 256) - 128;
      @(negedge clk); ib_we = 1; ib_addr = 10'(a); ib_data = 8'(inmap[a]);
    end
    @(negedge clk); ib_we = 0;
    // layer 1: C=2, K=5, S=2, PAD=2, 6 filters, pool 3 -> positions 0..17 -> 6 pooled
    load_weights(2 * 10, 1, 20);
    for (int f = 0; f < 6; f++) begin bias[f] = int'($urandom % 2001) - 1000; wbias(f, bias[f]); end
    run_layer(1, 0, 0, 40, 2, 5, 2, 2, 6, 6, 3, 1, 7, 100, 8);
    // layer 2: reads layer 1's map (6 positions x 8 stride, 6 channels used) as C=8 map, K=3
    load_weights(1 * 24, 2, 30);
    for (int f = 0; f < 4; f++) begin bias[f] = int'($urandom % 201) - 100; wbias(f, bias[f]); end
    run_layer(0, 0, 100, 6, 8, 3, 1, 0, 4, 2, 2, 0, 6, 300, 4);
    // dense into the output buffer: 48-vector of layer 1, 5 outputs, no shift -> saturation
    load_weights(2 * 48, 3, 60);
    for (int f = 0; f < 5; f++) begin bias[f] = 0; wbias(f, 0); end
    run_layer(0, 1, 100, 1, 48, 1, 1, 0, 5, 1, 1, 0, 2, 10, 0);
    checks++;
    if (n_sat == 0 || n_relu == 0 || n_pad == 0) begin
      failures++; $display("FAIL coverage sat=%0d relu=%0d pad=%0d", n_sat, n_relu, n_pad);
    end
    $display("coverage: saturated %0d, rectified %0d, padded taps %0d", n_sat, n_relu, n_pad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
