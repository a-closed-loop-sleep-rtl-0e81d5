// conv_controller: registers, loop sequencing and address generation of the
// convolution engine.
//
// The MCU programs one run over the memory bus (16-bit registers, see
// sleep_pkg::conv_reg_e, plus a 256-entry bias table) and starts it.  A run
// computes NGROUPS groups of four filters.  For each group, each pooled output
// q and each position p = q*POOL + j of its pooling window, the controller
// streams the K*C taps of the receptive field: input byte
// IN_BASE + (p*STRIDE - PAD)*C + t (read as zero outside the map, which gives
// the zero padding) and weight word g*K*C + t.  The map is stored with its
// channels innermost, so a receptive field is one contiguous run of bytes and
// one address counter serves every layer type: a dense layer or an LSTM gate
// product is a run with IN_LEN = K = 1 and C = vector length.  After each
// pooling window the four pooled bytes are written, one per cycle, to
// OUT_BASE + q*OUT_PSTR + 4g + lane, in the working RAM or the output buffer;
// lanes past NFILT are skipped.  Choosing OUT_PSTR and OUT_BASE places outputs
// anywhere (for instance directly into a concatenated feature vector), which
// is the flexible data arrangement that spares later moves or reordering.
//
// Timing: one tap per cycle with no bubbles inside a pooling window; each
// pooled output adds 7 cycles (pipeline drain and four writes).  The inputs
// come from the working RAM or the input buffer, both with one-cycle reads.
// The register layout, the bias table and the write-back order are this
// design's choices.
module conv_controller
  import sleep_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned WB_AW   = 14,   // weight-buffer word address width
  parameter int unsigned DATA_AW = 16    // map address width (RAM or buffer)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // register port (memory bus)
  input  logic                          reg_we,
  input  logic                          reg_re,
  input  logic [11:0]                   reg_addr,
  input  logic [7:0]                    reg_wdata,
  output logic [7:0]                    reg_rdata,
  output logic                          busy,
  output logic                          done,
  // input map read port (working RAM or input buffer)
  output logic                          rd_en,
  output logic [DATA_AW-1:0]            rd_addr,
  output logic                          rd_src_ibuf,
  input  logic [7:0]                    rd_data_wram,
  input  logic [7:0]                    rd_data_ibuf,
  // weight buffer read port
  output logic                          w_rd_en,
  output logic [WB_AW-1:0]              w_rd_addr,
  input  logic signed [LANES-1:0][7:0]  w_rd_data,
  // output write port (working RAM or output buffer)
  output logic                          wr_en,
  output logic                          wr_dst_obuf,
  output logic [DATA_AW-1:0]            wr_addr,
  output logic [7:0]                    wr_data
);

  // ---------------------------------------------------------------- registers
  logic [15:0] regs [16];
  logic [15:0] bias_mem [256];
  conv_cfg_t   cfg;
  logic        start;

  always_comb begin
    cfg.src_ibuf = regs[CR_SRC][0];
    cfg.dst_obuf = regs[CR_DST][0];
    cfg.in_base  = regs[CR_IN_BASE];
    cfg.in_len   = regs[CR_IN_LEN];
    cfg.in_ch    = regs[CR_IN_CH];
    cfg.ksize    = regs[CR_KSIZE];
    cfg.stride   = regs[CR_STRIDE];
    cfg.pad      = regs[CR_PAD];
    cfg.ngroups  = regs[CR_NGROUPS];
    cfg.nfilt    = regs[CR_NFILT];
    cfg.out_len  = regs[CR_OUT_LEN];
    cfg.pool     = regs[CR_POOL];
    cfg.relu     = regs[CR_MODE][0];
    cfg.shift    = regs[CR_MODE][12:8];
    cfg.out_base = regs[CR_OUT_BASE];
    cfg.out_pstr = regs[CR_OUT_PSTR];
  end

  assign start = reg_we && reg_addr == 12'h000 && reg_wdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) regs[i] <= '0;
      reg_rdata <= '0;
    end else begin
      if (reg_we && reg_addr < 12'h020 && reg_addr[11:1] != 11'd0) begin
        if (reg_addr[0]) regs[reg_addr[4:1]][15:8] <= reg_wdata;
        else             regs[reg_addr[4:1]][7:0]  <= reg_wdata;
      end
      if (reg_re) begin
        if (reg_addr[11:1] == 11'd0)
          reg_rdata <= reg_addr[0] ? 8'h00 : {6'b0, done, busy};
        else if (reg_addr < 12'h020)
          reg_rdata <= reg_addr[0] ? regs[reg_addr[4:1]][15:8] : regs[reg_addr[4:1]][7:0];
        else if (reg_addr >= 12'h200 && reg_addr < 12'h400)
          reg_rdata <= reg_addr[0] ? bias_mem[reg_addr[8:1]][15:8] : bias_mem[reg_addr[8:1]][7:0];
        else
          reg_rdata <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (reg_we && reg_addr >= 12'h200 && reg_addr < 12'h400) begin
      if (reg_addr[0]) bias_mem[reg_addr[8:1]][15:8] <= reg_wdata;
      else             bias_mem[reg_addr[8:1]][7:0]  <= reg_wdata;
    end
  end

  // ---------------------------------------------------------------- sequencer
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_WAIT, S_WRITE} state_e;
  state_e state;

  logic [31:0]          taps;       // K*C
  logic signed [31:0]   step;       // STRIDE*C
  logic signed [31:0]   lin_len;    // IN_LEN*C
  logic signed [31:0]   lin_pos0;   // (p*STRIDE - PAD)*C of the current position
  logic signed [31:0]   lin;        // current tap's offset into the map
  logic [31:0]          t;          // tap index
  logic [15:0]          j, q, g;    // pool index, pooled output, group
  logic [WB_AW-1:0]     wbase;      // weight word of tap 0 of this group
  logic [15:0]          out_q_addr; // OUT_BASE + q*OUT_PSTR + 4g
  logic [15:0]          fbase;      // 4g
  logic [1:0]           lane;

  logic                 last_tap, last_pos;
  assign last_tap = (t == taps - 1);
  assign last_pos = (j == cfg.pool - 1);

  // issue this cycle (tap t of position j)
  logic in_range;
  assign in_range = (lin >= 0) && (lin < lin_len);
  assign rd_en       = (state == S_RUN) && in_range;
  assign rd_addr     = DATA_AW'(cfg.in_base + 16'(lin));
  assign rd_src_ibuf = cfg.src_ibuf;
  assign w_rd_en     = (state == S_RUN);
  assign w_rd_addr   = WB_AW'(wbase + WB_AW'(t));

  // flags aligned with the read data (one cycle later)
  logic d_valid, d_zero, d_first, d_last, d_pfirst, d_plast;
  act_t x_in;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {d_valid, d_zero, d_first, d_last, d_pfirst, d_plast} <= '0;
    end else begin
      d_valid  <= (state == S_RUN);
      d_zero   <= !in_range;
      d_first  <= (t == 0);
      d_last   <= last_tap;
      d_pfirst <= (j == 0);
      d_plast  <= last_pos;
    end
  end
  assign x_in = d_zero ? act_t'(0) : act_t'(cfg.src_ibuf ? rd_data_ibuf : rd_data_wram);

  logic signed [LANES-1:0][15:0] bias_v;
  for (genvar l = 0; l < LANES; l++) begin : g_bias
    assign bias_v[l] = bias_mem[8'(fbase + 16'(l))];
  end

  act_t [LANES-1:0] pooled;
  logic             pooled_valid;

  conv_datapath #(.LANES(LANES)) u_dp (
    .clk, .rst_n,
    .in_valid      (d_valid),
    .in_first      (d_first),
    .in_last       (d_last),
    .in_pool_first (d_pfirst),
    .in_pool_last  (d_plast),
    .x             (x_in),
    .w             (w_rd_data),
    .bias          (bias_v),
    .relu          (cfg.relu),
    .shift         (cfg.shift),
    .out           (pooled),
    .out_valid     (pooled_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      busy <= 1'b0; done <= 1'b0;
      taps <= '0; step <= '0; lin_len <= '0; lin_pos0 <= '0; lin <= '0;
      t <= '0; j <= '0; q <= '0; g <= '0; wbase <= '0;
      out_q_addr <= '0; fbase <= '0; lane <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          done <= 1'b0;
          if (cfg.ngroups == 0 || cfg.out_len == 0 || cfg.ksize == 0 ||
              cfg.in_ch == 0 || cfg.pool == 0) begin
            done <= 1'b1;
          end else begin
            busy     <= 1'b1;
            state    <= S_RUN;
            taps     <= 32'(cfg.ksize) * 32'(cfg.in_ch);
            step     <= 32'(cfg.stride) * 32'(cfg.in_ch);
            lin_len  <= 32'(cfg.in_len) * 32'(cfg.in_ch);
            lin_pos0 <= -(32'(cfg.pad) * 32'(cfg.in_ch));
            lin      <= -(32'(cfg.pad) * 32'(cfg.in_ch));
            t <= '0; j <= '0; q <= '0; g <= '0; wbase <= '0;
            out_q_addr <= cfg.out_base; fbase <= '0;
          end
        end
        S_RUN: begin
          if (!last_tap) begin
            t   <= t + 1;
            lin <= lin + 1;
          end else begin
            t        <= '0;
            lin_pos0 <= lin_pos0 + step;
            lin      <= lin_pos0 + step;
            if (!last_pos) j <= j + 1;
            else           state <= S_WAIT;
          end
        end
        S_WAIT: if (pooled_valid) begin
          state <= S_WRITE;
          lane  <= '0;
        end
        S_WRITE: begin
          lane <= lane + 1;
          if (lane == 2'(LANES - 1)) begin
            j <= '0;
            if (q != cfg.out_len - 1) begin
              q <= q + 1;
              out_q_addr <= out_q_addr + cfg.out_pstr;
              state <= S_RUN;
            end else if (g != cfg.ngroups - 1) begin
              q <= '0;
              g <= g + 1;
              fbase <= fbase + 16'(LANES);
              out_q_addr <= cfg.out_base + fbase + 16'(LANES);
              wbase <= wbase + WB_AW'(taps);
              lin_pos0 <= -(32'(cfg.pad) * 32'(cfg.in_ch));
              lin      <= -(32'(cfg.pad) * 32'(cfg.in_ch));
              state <= S_RUN;
            end else begin
              busy  <= 1'b0;
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign wr_en       = (state == S_WRITE) && (fbase + 16'(lane) < cfg.nfilt);
  assign wr_dst_obuf = cfg.dst_obuf;
  assign wr_addr     = DATA_AW'(out_q_addr + 16'(lane));
  assign wr_data     = pooled[lane];

endmodule
