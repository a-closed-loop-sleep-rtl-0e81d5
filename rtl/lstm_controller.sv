// lstm_controller: sequencing of the LSTM engine.
//
// One LSTM time step runs as three commands issued by the MCU:
//   GROUP  concatenates the layer input x_t (SRC_A, LEN_A bytes) and the
//          previous hidden state h_{t-1} (SRC_B, LEN_B bytes) into one vector
//          at DST, so that the convolution engine can compute all four gate
//          pre-activations as one dense product [x_t, h_{t-1}] * W;
//   (the convolution engine then writes the 4N gate values i,f,g,o to GATES)
//   CELL   for each hidden unit j reads i_j, f_j, g_j, o_j and c_j, runs the
//          cell update in lstm_datapath and writes c'_j back to CSTATE, h_j
//          back to HSTATE and a copy of h_j to HOUT (the layer's output
//          sequence, or the final h_f / h_r);
//   CLEAR  zeroes LEN_A bytes at DST (initial cell and hidden state).
// Registers are 16 bits at byte offset 2*index (sleep_pkg::lstm_reg_e); a
// write of {start, opcode} to CTRL starts a command, CTRL reads back
// {done, busy}.  Working-RAM reads take one cycle.
//
// Timing: GROUP takes LEN_A+LEN_B+1 cycles, CLEAR LEN_A, CELL 19 cycles per
// hidden unit (5 reads, 2 operand cycles, 8 datapath steps, 1 handshake,
// 3 writes).  The split
// of work between the convolution engine and this datapath follows the paper;
// the command set and registers are this design's choices.
module lstm_controller
  import sleep_pkg::*;
#(
  parameter int unsigned AW = 14   // working-RAM address width
) (
  input  logic          clk,
  input  logic          rst_n,
  // register port (memory bus)
  input  logic          reg_we,
  input  logic          reg_re,
  input  logic [11:0]   reg_addr,
  input  logic [7:0]    reg_wdata,
  output logic [7:0]    reg_rdata,
  output logic          busy,
  output logic          done,
  // working RAM
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [7:0]    rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [7:0]    wr_data
);

  logic [15:0] regs [11];
  logic        start;

  assign start = reg_we && reg_addr == 12'h000 && reg_wdata[7] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 11; i++) regs[i] <= '0;
      reg_rdata <= '0;
    end else begin
      if (reg_we && reg_addr < 12'h016 && reg_addr[11:1] != 11'd0) begin
        if (reg_addr[0]) regs[reg_addr[4:1]][15:8] <= reg_wdata;
        else             regs[reg_addr[4:1]][7:0]  <= reg_wdata;
      end
      if (reg_re) begin
        if (reg_addr[11:1] == 11'd0)
          reg_rdata <= reg_addr[0] ? 8'h00 : {6'b0, done, busy};
        else if (reg_addr < 12'h016)
          reg_rdata <= reg_addr[0] ? regs[reg_addr[4:1]][15:8] : regs[reg_addr[4:1]][7:0];
        else
          reg_rdata <= '0;
      end
    end
  end

  // ---------------------------------------------------------------- sequencer
  typedef enum logic [2:0] {S_IDLE, S_COPY, S_FLUSH, S_CLEAR, S_CRD, S_CCALC, S_CWR} state_e;
  state_e state;

  logic [15:0] n;        // byte counter (GROUP/CLEAR) or hidden unit (CELL)
  logic [2:0]  k;        // read / write index within a CELL unit
  logic [15:0] len_ab;
  logic        cp_pend;  // a GROUP write trails its read by one cycle
  logic [AW-1:0] cp_dst;
  logic        rd_q;
  logic [2:0]  k_q;
  act_t        opnd [5];
  logic        dp_start, dp_done;
  act_t        c_new, h_new;

  assign len_ab = regs[LR_LEN_A] + regs[LR_LEN_B];

  lstm_datapath u_dp (
    .clk, .rst_n,
    .start (dp_start),
    .i_pre (opnd[0]), .f_pre (opnd[1]), .g_pre (opnd[2]), .o_pre (opnd[3]), .c_in (opnd[4]),
    .c_out (c_new), .h_out (h_new), .done (dp_done)
  );

  // read port
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == S_COPY) begin
      rd_en   = 1'b1;
      rd_addr = AW'((n < regs[LR_LEN_A]) ? regs[LR_SRC_A] + n
                                         : regs[LR_SRC_B] + (n - regs[LR_LEN_A]));
    end else if (state == S_CRD) begin
      rd_en   = 1'b1;
      rd_addr = AW'((k == 3'd4) ? regs[LR_CSTATE] + n
                                : regs[LR_GATES] + 16'(k) * regs[LR_NHID] + n);
    end
  end

  // write port
  always_comb begin
    wr_en   = 1'b0;
    wr_addr = '0;
    wr_data = '0;
    if (cp_pend) begin
      wr_en = 1'b1; wr_addr = cp_dst; wr_data = rd_data;
    end else if (state == S_CLEAR) begin
      wr_en = 1'b1; wr_addr = AW'(regs[LR_DST] + n); wr_data = '0;
    end else if (state == S_CWR) begin
      wr_en = 1'b1;
      unique case (k)
        3'd0:    begin wr_addr = AW'(regs[LR_CSTATE] + n); wr_data = c_new; end
        3'd1:    begin wr_addr = AW'(regs[LR_HSTATE] + n); wr_data = h_new; end
        default: begin wr_addr = AW'(regs[LR_HOUT]   + n); wr_data = h_new; end
      endcase
    end
  end

  assign dp_start = (state == S_CCALC) && !rd_q && k == 3'd5;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      n <= '0; k <= '0; cp_pend <= 1'b0; cp_dst <= '0; rd_q <= 1'b0; k_q <= '0;
      for (int i = 0; i < 5; i++) opnd[i] <= '0;
    end else begin
      cp_pend <= 1'b0;
      rd_q    <= (state == S_CRD);
      k_q     <= k;
      if (rd_q) opnd[k_q] <= act_t'(rd_data);
      unique case (state)
        S_IDLE: if (start) begin
          done <= 1'b0;
          n    <= '0;
          k    <= '0;
          unique case (reg_wdata[1:0])
            LOP_GROUP: if (len_ab != 0)          begin state <= S_COPY;  busy <= 1'b1; end else done <= 1'b1;
            LOP_CELL:  if (regs[LR_NHID] != 0)   begin state <= S_CRD;   busy <= 1'b1; end else done <= 1'b1;
            LOP_CLEAR: if (regs[LR_LEN_A] != 0)  begin state <= S_CLEAR; busy <= 1'b1; end else done <= 1'b1;
            default:   done <= 1'b1;
          endcase
        end
        S_COPY: begin
          cp_pend <= 1'b1;
          cp_dst  <= AW'(regs[LR_DST] + n);
          n       <= n + 1;
          if (n == len_ab - 1) state <= S_FLUSH;
        end
        S_FLUSH: begin
          state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
        end
        S_CLEAR: begin
          n <= n + 1;
          if (n == regs[LR_LEN_A] - 1) begin
            state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
          end
        end
        S_CRD: begin
          if (k == 3'd4) begin k <= 3'd5; state <= S_CCALC; end
          else k <= k + 3'd1;
        end
        S_CCALC: begin
          // k = 5: last operand lands this cycle (rd_q), start the datapath next
          if (dp_start) k <= 3'd6;
          if (dp_done) begin k <= 3'd0; state <= S_CWR; end
        end
        S_CWR: begin
          if (k == 3'd2) begin
            k <= 3'd0;
            if (n == regs[LR_NHID] - 1) begin
              state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
            end else begin
              n <= n + 1;
              state <= S_CRD;
            end
          end else k <= k + 3'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
