// conv_datapath: the convolution engine's arithmetic, four kernels in parallel.
//
// Every cycle with in_valid high one input byte x is broadcast to LANES
// multiply-accumulate units, each with its own int8 weight, so four output
// channels of a convolution (or a dense layer) advance together.  The first tap
// of a convolution position loads the accumulator with the lane's 16-bit bias
// (the folded batch-normalisation offset) plus the product.  One cycle after
// the last tap the accumulator is rounded and shifted right by `shift`,
// saturated to int8, optionally passed through ReLU, and merged into a running
// maximum over the pooling window; after the window's last position `out`
// holds the pooled bytes and out_valid pulses for one cycle.
//
// Timing: in_* are aligned with the RAM read data; out_valid comes two cycles
// after the in_valid cycle that carried in_last together with in_pool_last.
// The parallelism of four kernels, ReLU and max pooling are the paper's; the
// bias, the rounding shift and saturation are this design's reading of
// "appropriate data shifting and saturation".
module conv_datapath
  import sleep_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_first,      // first tap of a conv position
  input  logic                          in_last,       // last tap of a conv position
  input  logic                          in_pool_first, // position opens a pooling window
  input  logic                          in_pool_last,  // position closes a pooling window
  input  act_t                          x,
  input  logic signed [LANES-1:0][7:0]  w,
  input  logic signed [LANES-1:0][15:0] bias,
  input  logic                          relu,
  input  logic [4:0]                    shift,
  output act_t        [LANES-1:0]       out,
  output logic                          out_valid
);

  acc_t acc [LANES];
  act_t y   [LANES];   // requantised (and rectified) value of each accumulator
  logic fin_q, pf_q, pl_q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      y[l] = requant(acc[l], shift);
      if (relu && y[l] < 0) y[l] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_q     <= 1'b0;
      pf_q      <= 1'b0;
      pl_q      <= 1'b0;
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        acc[l] <= '0;
        out[l] <= '0;
      end
    end else begin
      fin_q     <= in_valid & in_last;
      pf_q      <= in_pool_first;
      pl_q      <= in_pool_last;
      out_valid <= fin_q & pl_q;
      for (int l = 0; l < LANES; l++) begin
        if (in_valid) begin
          if (in_first) acc[l] <= acc_t'($signed(bias[l])) + acc_t'(x * $signed(w[l]));
          else          acc[l] <= acc[l] + acc_t'(x * $signed(w[l]));
        end
        if (fin_q && (pf_q || y[l] > out[l])) out[l] <= y[l];
      end
    end
  end

endmodule
