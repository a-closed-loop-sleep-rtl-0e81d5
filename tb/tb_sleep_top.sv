// tb_sleep_top: end-to-end run of the FPGA design, with the testbench playing
// the MCU and the amplifier chip.
//
// For each network configuration the "firmware" below
//   1. acquires one segment of EEG through the SPI controller (behavioural
//      amplifier model) and quantises it to int8 (top byte of the 16-bit
//      sample) into the input buffer;
//   2. shifts the a_detail history of the last two segments down by one slot
//      (LSTM GROUP used as a copy);
//   3. runs the four layers of the shape path and of the detail path on the
//      convolution engine, loading each layer's weights (and folded biases)
//      over the 8-bit bus in chunks that fit the weight buffer;
//   4. runs the two-layer bidirectional LSTM over the 3 segments x P feature
//      positions: per layer and direction the 256x(in+H) gate weights are
//      loaded once, then per step GROUP, one dense gate run, CELL;
//   5. runs the dense layer on [a_detail, a_shape, h_f, h_r] into the output
//      buffer and reads the logits; the stage is their arg-max (softmax does
//      not change it).
// Weights are a fixed hash of (layer, filter, tap).  A loop model of the same
// integer network runs beside it and every segment's a_shape, a_detail, h_f,
// h_r and logits are compared.  Then the stimulation trigger is run with a
// comparator square wave, in a stage other than N3 and in N3.
//
// Three configurations run: a tiny one (8 filters, H = 8, 512-sample
// segments), the paper's 20-s model (5120 samples at 256 Hz; shape path
// 128/1280/16, detail path 128/128/16, max-pool 12/12, three 128/8/1 layers
// each; BiLSTM with 64 hidden units and 2 layers; 3 segments of 5 positions)
// and a 30-s variant (7680 samples, max-pool 18, everything else the same;
// the pool size is this testbench's choice, made so that the LSTM again sees
// 5 positions per segment).  For the
// 20-s model the cycles from a loaded input buffer to the logits, weight
// loading included, must stay under 20 M (1 s at 20 MHz).  The design runs at
// its default parameters.  Mechanisms counted (each must occur): zero padding,
// ReLU clipping, saturation, pooling, multi-chunk weight loads, partial filter
// groups, GROUP / CELL / CLEAR commands, history shifts, AFE samples, a bus
// error, blocked and fired stimulation bursts.
module tb_sleep_top;
  import sleep_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge applies the asynchronous reset

  // ---------------------------------------------------------------- DUT
  logic              bus_valid = 0, bus_we = 0, bus_err;
  logic [BUS_AW-1:0] bus_addr = '0;
  logic [7:0]        bus_wdata = '0, bus_rdata;
  logic              conv_busy, conv_done, lstm_busy, lstm_done;
  logic              afe_enable = 0, afe_cmd_valid = 0, afe_cmd_ready, afe_resp_valid, afe_sample_valid;
  logic [7:0]        afe_clk_div = 8'd1;
  logic [31:0]       afe_sample_div = 32'd128;
  logic [5:0]        afe_channel = 6'd3;
  logic [15:0]       afe_cmd_word = '0, afe_resp, afe_sample;
  logic              spi_cs_n, spi_sclk, spi_mosi, spi_miso;
  logic              osc_detect = 0, stim_enable = 0, stim_edge_falling = 0, stim_on;
  sleep_stage_e      stage = STAGE_W, target_stage = STAGE_N3;
  logic [31:0]       stim_delay = 32'd100, stim_pulse_len = 32'd300;
  logic [15:0]       stim_n_triggers, stim_n_blocked;

  sleep_fpga_top dut (.*);
  rhd_spi_model #(.RAMP(1'b0)) chip (.cs_n(spi_cs_n), .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_pad = 0, n_relu = 0, n_sat = 0, n_pool = 0, n_chunked = 0, n_partial = 0;
  int n_group = 0, n_cell = 0, n_clear = 0, n_shift = 0, n_samples = 0, n_buserr = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- network description
  typedef struct {
    int k, s, pad, pool;   // kernel, stride, zero padding, max-pool size = stride
  } layer_t;

  int IN_LEN, F, H, P, SEG;
  layer_t shape_l [4];
  layer_t detail_l [4];

  // working-RAM map (bytes)
  localparam int BUF_A = 'h0000, BUF_B = 'h0D00, HIST = 'h1800, SEQ1 = 'h2400;
  localparam int CAT = 'h2C00, GATES = 'h2D00, CST = 'h2E00;
  int SLOT, A_DET, A_SHP, HF, HR, HST;

  // ---------------------------------------------------------------- weights
  function automatic int hash3(int a, int b, int c);
    int unsigned h = (a * 32'h9E3779B1) ^ (b * 32'h85EBCA6B) ^ (c * 32'hC2B2AE35);
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 12); h = h * 32'h297A2D39; h = h ^ (h >> 15);
    return int'(h & 32'h7FFFFFFF);
  endfunction
  function automatic int wgen(int lid, int f, int t); return hash3(lid, f, t) % 31 - 15; endfunction
  function automatic int shift_for(int taps);
    return int'($floor($ln(8.75 * $sqrt(real'(taps))) / $ln(2.0) + 0.5));
  endfunction
  function automatic int bgen(int lid, int f, int sh); return hash3(lid + 7777, f, 1) % (1 << (sh + 5)) - (1 << (sh + 4)); endfunction

  // ---------------------------------------------------------------- bus tasks
  task automatic bw(input int a, input int d);
    bus_valid = 1; bus_we = 1; bus_addr = BUS_AW'(a); bus_wdata = 8'(d);
    @(negedge clk);
    bus_valid = 0;
  endtask
  task automatic br(input int a, output int d);
    bus_valid = 1; bus_we = 0; bus_addr = BUS_AW'(a);
    @(negedge clk);
    bus_valid = 0;
    #1 d = int'(bus_rdata);
    @(negedge clk);
  endtask
  task automatic creg(input int idx, input int v); bw(int'(CONV_BASE) + 2 * idx, v & 255); bw(int'(CONV_BASE) + 2 * idx + 1, (v >> 8) & 255); endtask
  task automatic lreg(input int idx, input int v); bw(int'(LSTM_BASE) + 2 * idx, v & 255); bw(int'(LSTM_BASE) + 2 * idx + 1, (v >> 8) & 255); endtask

  task automatic conv_go();
    int st;
    bw(int'(CONV_BASE), 1);
    @(negedge clk);
    while (conv_busy) @(negedge clk);
    br(int'(CONV_BASE), st);
    check(st == 2, "conv status after run");
  endtask
  task automatic lstm_go(input int op);
    bw(int'(LSTM_BASE), 8'h80 | op);
    @(negedge clk);
    while (lstm_busy) @(negedge clk);
    check(lstm_done, "lstm done");
    if (op == LOP_GROUP) n_group++;
    if (op == LOP_CELL)  n_cell++;
    if (op == LOP_CLEAR) n_clear++;
  endtask
  task automatic lstm_copy(input int src_a, input int len_a, input int src_b, input int len_b, input int dst);
    lreg(LR_SRC_A, src_a); lreg(LR_LEN_A, len_a); lreg(LR_SRC_B, src_b); lreg(LR_LEN_B, len_b); lreg(LR_DST, dst);
    lstm_go(LOP_GROUP);
  endtask

  // One convolution / dense layer on the engine.  nf filters, weights
  // wgen(lid, f, t) with t = k*C + c; chunks of whole filter groups.
  task automatic hw_layer(input int lid, input bit src_ib, input bit dst_ob, input int in_base, input int in_len,
                          input int c, input layer_t L, input int nf, input int out_len, input bit relu,
                          input int out_base, input int pstr);
    int taps = L.k * c;
    int ngt = (nf + 3) / 4;
    int gpc = 12288 / taps;
    int sh = shift_for(taps);
    if (gpc > 64) gpc = 64;
    if (gpc < ngt) n_chunked++;
    if (nf % 4 != 0) n_partial++;
    for (int g0 = 0; g0 < ngt; g0 += gpc) begin
      int ng = (ngt - g0 < gpc) ? ngt - g0 : gpc;
      int nfc = (nf - 4 * g0 < 4 * ng) ? nf - 4 * g0 : 4 * ng;
      for (int gg = 0; gg < ng; gg++)
        for (int t = 0; t < taps; t++)
          for (int l = 0; l < 4; l++) begin
            int f = (g0 + gg) * 4 + l;
            bw(int'(WBUF_BASE) + (gg * taps + t) * 4 + l, f < nf ? wgen(lid, f, t) : 0);
          end
      for (int i = 0; i < 4 * ng; i++) begin
        int b = bgen(lid, 4 * g0 + i, sh);
        bw(int'(CONV_BASE) + 'h200 + 2 * i, b & 255);
        bw(int'(CONV_BASE) + 'h201 + 2 * i, (b >> 8) & 255);
      end
      creg(CR_SRC, src_ib); creg(CR_DST, dst_ob); creg(CR_IN_BASE, in_base); creg(CR_IN_LEN, in_len);
      creg(CR_IN_CH, c); creg(CR_KSIZE, L.k); creg(CR_STRIDE, L.s); creg(CR_PAD, L.pad);
      creg(CR_NGROUPS, ng); creg(CR_NFILT, nfc); creg(CR_OUT_LEN, out_len); creg(CR_POOL, L.pool);
      creg(CR_MODE, (sh << 8) | int'(relu)); creg(CR_OUT_BASE, out_base + 4 * g0); creg(CR_OUT_PSTR, pstr);
      conv_go();
    end
  endtask

  // ---------------------------------------------------------------- reference model
  function automatic int s8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : int'(v)); endfunction
  function automatic int rq(longint acc, int sh);
    longint v = acc;
    if (sh > 0) v = (v + (64'sd1 <<< (sh - 1))) >>> sh;
    return s8(v);
  endfunction
  task automatic ref_layer(input int lid, input int x[], input int in_len, input int c, input layer_t L,
                           input int nf, input int out_len, input bit relu, output int y[]);
    int taps = L.k * c;
    int sh = shift_for(taps);
    int w [];
    y = new[out_len * nf];
    w = new[taps];
    for (int f = 0; f < nf; f++) begin
      int b = bgen(lid, f, sh);
      for (int t = 0; t < taps; t++) w[t] = wgen(lid, f, t);
      for (int q = 0; q < out_len; q++) begin
        int best = -1000;
        for (int j = 0; j < L.pool; j++) begin
          longint acc = b;
          int p = q * L.pool + j;
          int lin0 = (p * L.s - L.pad) * c;
          int v;
          for (int t = 0; t < taps; t++) begin
            int lin = lin0 + t;
            if (lin >= 0 && lin < in_len * c) acc += x[lin] * w[t];
            else n_pad++;
          end
          v = rq(acc, sh);
          if (v == 127 || v == -128) n_sat++;
          if (relu && v < 0) begin v = 0; n_relu++; end
          if (v > best) best = v;
        end
        if (L.pool > 1) n_pool++;
        y[q * nf + f] = best;
      end
    end
  endtask

  function automatic int tab(int i);
    if (i > 37) i = 37;
    return int'($floor(127.0 * $tanh(real'(i) / 8.0) + 0.5));
  endfunction
  function automatic int act_tanh(int v, bit sig);
    int a = v < 0 ? -v : v;
    int idx = sig ? a >> 2 : a >> 1;
    int fr  = sig ? a & 3 : a & 1;
    int yv  = tab(idx) + (((tab(idx + 1) - tab(idx)) * fr) >> (sig ? 2 : 1));
    return v < 0 ? -yv : yv;
  endfunction
  function automatic int sigm(int v); return (128 + act_tanh(v, 1)) >>> 1; endfunction

  // reference LSTM pass over T steps: input seq xs[T*nin], returns outputs hs[T*H]
  task automatic ref_lstm_pass(input int lid, input int xs[], input int T, input int nin, input bit rev,
                               output int hs[]);
    int c [], h [], cat [], g [];
    layer_t L1 = '{1, 1, 0, 1};
    hs = new[T * H]; c = new[H]; h = new[H]; cat = new[nin + H];
    foreach (c[j]) begin c[j] = 0; h[j] = 0; end
    for (int st = 0; st < T; st++) begin
      int tau = rev ? T - 1 - st : st;
      for (int i = 0; i < nin; i++) cat[i] = xs[tau * nin + i];
      for (int j = 0; j < H; j++) cat[nin + j] = h[j];
      ref_layer(lid, cat, 1, nin + H, L1, 4 * H, 1, 0, g);
      for (int j = 0; j < H; j++) begin
        int cn = s8((sigm(g[H + j]) * c[j] + ((sigm(g[j]) * act_tanh(g[2 * H + j], 0)) >>> 3) + 64) >>> 7);
        int hn = s8((sigm(g[3 * H + j]) * act_tanh(cn, 0) + 64) >>> 7);
        c[j] = cn; h[j] = hn; hs[tau * H + j] = hn;
      end
    end
  endtask

  // ---------------------------------------------------------------- firmware
  int ref_hist [];     // reference a_detail of the last SEG segments, oldest first
  int seg_no = 0;

  task automatic acquire(output int x[]);
    x = new[IN_LEN];
    afe_enable = 1;
    for (int n = 0; n < IN_LEN; ) begin
      @(negedge clk);
      if (afe_sample_valid) begin
        x[n] = int'($signed(afe_sample[15:8] ^ 8'h80));   // offset binary -> int8, top byte
        n++; n_samples++;
      end
    end
    afe_enable = 0;
    for (int n = 0; n < IN_LEN; n++) bw(int'(IBUF_BASE) + n, x[n]);
  endtask

  task automatic compare_ram(input int base, input int exp[], input string what);
    int bad = 0;
    foreach (exp[i]) if (int'($signed(dut.u_wram.mem[base + i])) != exp[i]) bad++;
    check(bad == 0, $sformatf("%s: %0d of %0d bytes differ (segment %0d)", what, bad, exp.size(), seg_no));
  endtask

  task automatic run_segment(output int stage_out);
    int x [], a [], b [], shp [], det [], seq1 [], hsf [], hsr [], dvec [], logits [];
    int T = SEG * P;
    int t0;
    int cur_in [];
    layer_t L1 = '{1, 1, 0, 1};
    acquire(x);
    t0 = int'(cyc);
    // history shift: slot1 -> slot0, slot2 -> slot1
    lstm_copy(HIST + SLOT, SLOT, 0, 0, HIST);
    lstm_copy(HIST + 2 * SLOT, SLOT, 0, 0, HIST + SLOT);
    n_shift++;
    for (int i = 0; i < 2 * SLOT; i++) ref_hist[i] = ref_hist[i + SLOT];
    // shape path
    begin
      int l0 = ((IN_LEN + 2 * shape_l[0].pad - shape_l[0].k) / shape_l[0].s + 1) / shape_l[0].pool;
      int l1 = l0 - shape_l[1].k + 1, l2 = l1 - shape_l[2].k + 1, l3 = l2 - shape_l[3].k + 1;
      check(l3 == P, "shape path length");
      hw_layer(1, 1, 0, 0,     IN_LEN, 1, shape_l[0], F, l0, 1, BUF_A, F);
      hw_layer(2, 0, 0, BUF_A, l0,     F, shape_l[1], F, l1, 1, BUF_B, F);
      hw_layer(3, 0, 0, BUF_B, l1,     F, shape_l[2], F, l2, 1, BUF_A, F);
      hw_layer(4, 0, 0, BUF_A, l2,     F, shape_l[3], F, l3, 1, A_SHP, F);
      ref_layer(1, x, IN_LEN, 1, shape_l[0], F, l0, 1, a);
      ref_layer(2, a, l0, F, shape_l[1], F, l1, 1, b);
      ref_layer(3, b, l1, F, shape_l[2], F, l2, 1, a);
      ref_layer(4, a, l2, F, shape_l[3], F, l3, 1, shp);
    end
    // detail path
    begin
      int l0 = ((IN_LEN + 2 * detail_l[0].pad - detail_l[0].k) / detail_l[0].s + 1) / detail_l[0].pool;
      int l1 = l0 - detail_l[1].k + 1, l2 = l1 - detail_l[2].k + 1, l3 = l2 - detail_l[3].k + 1;
      check(l3 == P, "detail path length");
      hw_layer(11, 1, 0, 0,     IN_LEN, 1, detail_l[0], F, l0, 1, BUF_A, F);
      hw_layer(12, 0, 0, BUF_A, l0,     F, detail_l[1], F, l1, 1, BUF_B, F);
      hw_layer(13, 0, 0, BUF_B, l1,     F, detail_l[2], F, l2, 1, BUF_A, F);
      hw_layer(14, 0, 0, BUF_A, l2,     F, detail_l[3], F, l3, 1, A_DET, F);
      ref_layer(11, x, IN_LEN, 1, detail_l[0], F, l0, 1, a);
      ref_layer(12, a, l0, F, detail_l[1], F, l1, 1, b);
      ref_layer(13, b, l1, F, detail_l[2], F, l2, 1, a);
      ref_layer(14, a, l2, F, detail_l[3], F, l3, 1, det);
      for (int i = 0; i < SLOT; i++) ref_hist[2 * SLOT + i] = det[i];
    end
    compare_ram(A_SHP, shp, "a_shape");
    compare_ram(A_DET, det, "a_detail");
    // bidirectional LSTM, two layers
    for (int layer = 0; layer < 2; layer++) begin
      int nin = layer == 0 ? F : 2 * H;
      for (int dir = 0; dir < 2; dir++) begin
        int lid = 100 + 2 * layer + dir;
        int taps = nin + H;
        int sh = shift_for(taps);
        // gate weights of this layer and direction, loaded once
        for (int gg = 0; gg < H; gg++)
          for (int t = 0; t < taps; t++)
            for (int l = 0; l < 4; l++)
              bw(int'(WBUF_BASE) + (gg * taps + t) * 4 + l, wgen(lid, 4 * gg + l, t));
        for (int i = 0; i < 4 * H; i++) begin
          int bb = bgen(lid, i, sh);
          bw(int'(CONV_BASE) + 'h200 + 2 * i, bb & 255);
          bw(int'(CONV_BASE) + 'h201 + 2 * i, (bb >> 8) & 255);
        end
        creg(CR_SRC, 0); creg(CR_DST, 0); creg(CR_IN_BASE, CAT); creg(CR_IN_LEN, 1);
        creg(CR_IN_CH, taps); creg(CR_KSIZE, 1); creg(CR_STRIDE, 1); creg(CR_PAD, 0);
        creg(CR_NGROUPS, H); creg(CR_NFILT, 4 * H); creg(CR_OUT_LEN, 1); creg(CR_POOL, 1);
        creg(CR_MODE, sh << 8); creg(CR_OUT_BASE, GATES); creg(CR_OUT_PSTR, 0);
        lreg(LR_DST, CST); lreg(LR_LEN_A, 2 * H);
        lstm_go(LOP_CLEAR);
        for (int st = 0; st < T; st++) begin
          int tau = dir ? T - 1 - st : st;
          int xin = layer == 0 ? HIST + tau * F : SEQ1 + tau * 2 * H;
          lstm_copy(xin, nin, HST, H, CAT);
          conv_go();
          lreg(LR_GATES, GATES); lreg(LR_CSTATE, CST); lreg(LR_HSTATE, HST); lreg(LR_NHID, H);
          lreg(LR_HOUT, layer == 0 ? SEQ1 + tau * 2 * H + dir * H : (dir ? HR : HF));
          lstm_go(LOP_CELL);
        end
      end
      if (layer == 0) begin
        ref_lstm_pass(100, ref_hist, T, F, 0, hsf);
        ref_lstm_pass(101, ref_hist, T, F, 1, hsr);
        seq1 = new[T * 2 * H];
        for (int t = 0; t < T; t++)
          for (int j = 0; j < H; j++) begin
            seq1[t * 2 * H + j] = hsf[t * H + j];
            seq1[t * 2 * H + H + j] = hsr[t * H + j];
          end
        compare_ram(SEQ1, seq1, "LSTM layer-1 sequence");
      end else begin
        int hfr [];
        ref_lstm_pass(102, seq1, T, 2 * H, 0, hsf);
        ref_lstm_pass(103, seq1, T, 2 * H, 1, hsr);
        hfr = new[2 * H];
        for (int j = 0; j < H; j++) begin
          hfr[j] = hsf[(T - 1) * H + j];   // final forward state
          hfr[H + j] = hsr[j];             // first reverse state
        end
        compare_ram(HF, hfr, "h_f, h_r");
      end
    end
    // dense layer over [a_detail, a_shape, h_f, h_r] into the output buffer
    begin
      int nd = 2 * P * F + 2 * H;
      hw_layer(200, 0, 1, A_DET, 1, nd, L1, 5, 1, 0, 0, 0);
      dvec = new[nd];
      for (int i = 0; i < P * F; i++) begin dvec[i] = det[i]; dvec[P * F + i] = shp[i]; end
      for (int j = 0; j < H; j++) begin dvec[2 * P * F + j] = hsf[(T - 1) * H + j]; dvec[2 * P * F + H + j] = hsr[j]; end
      ref_layer(200, dvec, 1, nd, L1, 5, 1, 0, logits);
    end
    begin
      int best = -1000, bi = 0, v;
      for (int k = 0; k < 5; k++) begin
        br(int'(OBUF_BASE) + k, v);
        v = int'($signed(8'(v)));
        check(v == logits[k], $sformatf("logit %0d: %0d, expected %0d (segment %0d)", k, v, logits[k], seg_no));
        if (v > best) begin best = v; bi = k; end
      end
      stage_out = bi;
      $display("segment %0d: logits %0d %0d %0d %0d %0d -> stage %0d, %0d cycles from input to result",
               seg_no, logits[0], logits[1], logits[2], logits[3], logits[4], bi, int'(cyc) - t0);
      if (IN_LEN == 5120) check(int'(cyc) - t0 < 20_000_000, "20-s segment classified within 1 s at 20 MHz");
    end
    seg_no++;
  endtask

  task automatic run_config();
    int st;
    SLOT = P * F; A_DET = HIST + 2 * SLOT; A_SHP = HIST + 3 * SLOT; HF = A_SHP + SLOT; HR = HF + H;
    HST = CST + H;
    ref_hist = new[3 * SLOT];
    foreach (ref_hist[i]) ref_hist[i] = 0;
    // empty history in the RAM as well
    lreg(LR_DST, HIST); lreg(LR_LEN_A, 3 * SLOT);
    lstm_go(LOP_CLEAR);
    for (int s = 0; s < SEG; s++) begin
      run_segment(st);
      stage = sleep_stage_e'(st);
    end
  endtask

  // ---------------------------------------------------------------- stimulation
  always @(negedge clk) osc_detect <= (cyc % 2000) < 1000;

  task automatic stim_phase();
    int trig0, blk0;
    stim_enable = 1;
    stage = STAGE_N2;
    trig0 = int'(stim_n_triggers); blk0 = int'(stim_n_blocked);
    repeat (6000) @(negedge clk);
    check(stim_n_triggers == 16'(trig0), "no stimulation outside N3");
    check(int'(stim_n_blocked) > blk0, "crossings blocked outside N3");
    stage = STAGE_N3;
    repeat (6000) @(negedge clk);
    check(int'(stim_n_triggers) >= trig0 + 2, "stimulation in N3");
    stim_enable = 0;
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    int v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // an unmapped access raises bus_err
    bus_valid = 1; bus_we = 1; bus_addr = BUS_AW'(17'h1C800); bus_wdata = 8'h00;
    @(negedge clk); bus_valid = 0; #1;
    if (bus_err) n_buserr++;
    @(negedge clk);
    // tiny network
    IN_LEN = 512; F = 8; H = 8; P = 7; SEG = 3;
    shape_l  = '{'{64, 8, 28, 4}, '{4, 1, 0, 1}, '{4, 1, 0, 1}, '{4, 1, 0, 1}};
    detail_l = '{'{8, 8, 0, 4},   '{4, 1, 0, 1}, '{4, 1, 0, 1}, '{4, 1, 0, 1}};
    run_config();
    stim_phase();
    // the paper's 20-s model
    IN_LEN = 5120; F = 128; H = 64; P = 5; SEG = 3;
    shape_l  = '{'{1280, 16, 576, 12}, '{8, 1, 0, 1}, '{8, 1, 0, 1}, '{8, 1, 0, 1}};
    detail_l = '{'{128, 16, 0, 12},    '{8, 1, 0, 1}, '{8, 1, 0, 1}, '{8, 1, 0, 1}};
    run_config();
    // the 30-s variant: 7680 samples; pooling by 18 instead of 12 gives the
    // same 26 pooled positions, so every later layer is unchanged
    IN_LEN = 7680;
    shape_l[0].pool = 18; detail_l[0].pool = 18;
    run_config();
    $display("mechanisms: pad %0d relu %0d sat %0d pool %0d chunked %0d partial %0d group %0d cell %0d clear %0d shift %0d samples %0d buserr %0d stim fired %0d blocked %0d",
             n_pad, n_relu, n_sat, n_pool, n_chunked, n_partial, n_group, n_cell, n_clear, n_shift,
             n_samples, n_buserr, stim_n_triggers, stim_n_blocked);
    check(n_pad > 0, "zero padding exercised");
    check(n_relu > 0, "ReLU clipping exercised");
    check(n_sat > 0, "saturation exercised");
    check(n_pool > 0, "max pooling exercised");
    check(n_chunked > 0, "multi-chunk weight load exercised");
    check(n_partial > 0, "partial filter group exercised");
    check(n_group > 0 && n_cell > 0 && n_clear > 0, "LSTM commands exercised");
    check(n_shift > 0, "feature history shifted");
    check(n_samples > 0, "AFE samples");
    check(n_buserr > 0, "bus error flagged");
    check(stim_n_triggers > 0 && stim_n_blocked > 0, "stimulation fired and blocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
