// sleep_pkg: types and constants shared by the sleep-stage classification engine.
//
// All activations and weights are signed 8-bit, as the design quantises both
// statically to int8.  The convolution engine accumulates in 32 bits.  The
// memory bus is 8 bits wide; its address map and the register offsets of the
// two engine controllers are defined here so that the bus decoder, the
// controllers and any software model agree on them.  The map itself is this
// implementation's choice: the paper only shows that the buffers and the two
// controllers hang off one 8-bit memory bus.
package sleep_pkg;

  localparam int unsigned DATA_W = 8;   // activations and weights
  localparam int unsigned ACC_W  = 32;  // convolution accumulator
  localparam int unsigned NLANES = 4;   // kernels computed in parallel (default of the LANES parameters)
  localparam int unsigned BUS_AW = 17;  // memory-bus byte address width

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Memory-bus address map (byte addresses).
  localparam logic [BUS_AW-1:0] WBUF_BASE = 17'h0_0000; // weight buffer, 4 bytes per word
  localparam logic [BUS_AW-1:0] IBUF_BASE = 17'h1_0000; // input half of the I/O buffer
  localparam logic [BUS_AW-1:0] OBUF_BASE = 17'h1_8000; // output half of the I/O buffer
  localparam logic [BUS_AW-1:0] CONV_BASE = 17'h1_C000; // convolution controller registers
  localparam logic [BUS_AW-1:0] LSTM_BASE = 17'h1_D000; // LSTM controller registers

  // Slave select decoded from a bus address.
  typedef enum logic [2:0] {
    SEL_NONE, SEL_WBUF, SEL_IBUF, SEL_OBUF, SEL_CONV, SEL_LSTM
  } bus_sel_e;

  // Convolution controller: 16-bit registers at byte offset 2*index
  // (little endian).  Byte offsets 0x200..0x3FF hold the 256 16-bit biases.
  typedef enum logic [3:0] {
    CR_CTRL      = 4'd0,   // write bit0=1: start; read: bit0 busy, bit1 done
    CR_SRC       = 4'd1,   // 0: working RAM, 1: input buffer
    CR_DST       = 4'd2,   // 0: working RAM, 1: output buffer
    CR_IN_BASE   = 4'd3,   // first byte of the input map
    CR_IN_LEN    = 4'd4,   // input positions (samples)
    CR_IN_CH     = 4'd5,   // input channels, stored innermost
    CR_KSIZE     = 4'd6,   // kernel length in positions
    CR_STRIDE    = 4'd7,   // convolution stride
    CR_PAD       = 4'd8,   // zero positions before the first sample
    CR_NGROUPS   = 4'd9,   // groups of LANES filters in this run
    CR_NFILT     = 4'd10,  // filters in this run (last group may be partial)
    CR_OUT_LEN   = 4'd11,  // pooled output positions
    CR_POOL      = 4'd12,  // max-pool size = stride (1: no pooling)
    CR_MODE      = 4'd13,  // bit0 ReLU, bits 12:8 right shift
    CR_OUT_BASE  = 4'd14,  // address of output position 0, filter 0
    CR_OUT_PSTR  = 4'd15   // address step between output positions
  } conv_reg_e;

  typedef struct packed {
    logic        src_ibuf;
    logic        dst_obuf;
    logic [15:0] in_base;
    logic [15:0] in_len;
    logic [15:0] in_ch;
    logic [15:0] ksize;
    logic [15:0] stride;
    logic [15:0] pad;
    logic [15:0] ngroups;
    logic [15:0] nfilt;
    logic [15:0] out_len;
    logic [15:0] pool;
    logic        relu;
    logic [4:0]  shift;
    logic [15:0] out_base;
    logic [15:0] out_pstr;
  } conv_cfg_t;

  // LSTM controller: 16-bit registers at byte offset 2*index.
  typedef enum logic [3:0] {
    LR_CTRL   = 4'd0,  // write: bits 1:0 opcode, bit 7 start; read: bit0 busy, bit1 done
    LR_SRC_A  = 4'd1,  // GROUP: first source (input x_t)
    LR_LEN_A  = 4'd2,  // GROUP/CLEAR: bytes from SRC_A / bytes to clear
    LR_SRC_B  = 4'd3,  // GROUP: second source (hidden state h_{t-1})
    LR_LEN_B  = 4'd4,  // GROUP: bytes from SRC_B
    LR_DST    = 4'd5,  // GROUP/CLEAR: destination
    LR_GATES  = 4'd6,  // CELL: gate pre-activations i,f,g,o (4*N bytes)
    LR_CSTATE = 4'd7,  // CELL: cell state (N bytes, updated in place)
    LR_HSTATE = 4'd8,  // CELL: hidden state (N bytes, updated in place)
    LR_HOUT   = 4'd9,  // CELL: extra copy of the new hidden state
    LR_NHID   = 4'd10  // CELL: hidden units N
  } lstm_reg_e;

  typedef enum logic [1:0] {
    LOP_GROUP = 2'd1,  // concatenate SRC_A[0:LEN_A) and SRC_B[0:LEN_B) at DST
    LOP_CELL  = 2'd2,  // LSTM cell update over N hidden units
    LOP_CLEAR = 2'd3   // zero LEN_A bytes at DST
  } lstm_op_e;

  // Sleep stages as reported by the classifier (index of the largest logit).
  typedef enum logic [2:0] {
    STAGE_W = 3'd0, STAGE_N1 = 3'd1, STAGE_N2 = 3'd2, STAGE_N3 = 3'd3, STAGE_REM = 3'd4
  } sleep_stage_e;

  // Saturate a wide signed value to int8.
  function automatic act_t sat8(input logic signed [39:0] v);
    if (v > 40'sd127)       return 8'sd127;
    else if (v < -40'sd128) return -8'sd128;
    else                    return act_t'(v[7:0]);
  endfunction

  // Arithmetic right shift with round-half-up, then saturation to int8.
  function automatic act_t requant(input acc_t acc, input logic [4:0] sh);
    logic signed [39:0] v;
    v = 40'(acc);
    if (sh != 0) v = (v + (40'sd1 <<< (sh - 1))) >>> sh;
    return sat8(v);
  endfunction

endpackage
