// io_buffer: the input & output buffer between the MCU and the convolution
// engine.
//
// The input half holds the 8-bit EEG samples of the current segment: the MCU
// writes them over the memory bus, the engine reads them as the first layer's
// input map.  The output half receives the dense-layer results from the engine
// and is read by the MCU, which applies the softmax.  Each half is a simple
// dual-port RAM with one cycle of read latency.  IN_DEPTH = 8192 holds a 30-s
// segment at 256 Hz (7680 samples); OUT_DEPTH = 256 is this design's choice.
module io_buffer #(
  parameter int unsigned IN_DEPTH  = 8192,
  parameter int unsigned OUT_DEPTH = 256,
  localparam int unsigned IAW = $clog2(IN_DEPTH),
  localparam int unsigned OAW = $clog2(OUT_DEPTH)
) (
  input  logic           clk,
  // input half: bus writes, engine reads
  input  logic           in_wr_en,
  input  logic [IAW-1:0] in_wr_addr,
  input  logic [7:0]     in_wr_data,
  input  logic           in_rd_en,
  input  logic [IAW-1:0] in_rd_addr,
  output logic [7:0]     in_rd_data,
  // output half: engine writes, bus reads
  input  logic           out_wr_en,
  input  logic [OAW-1:0] out_wr_addr,
  input  logic [7:0]     out_wr_data,
  input  logic           out_rd_en,
  input  logic [OAW-1:0] out_rd_addr,
  output logic [7:0]     out_rd_data
);

  logic [7:0] in_mem  [IN_DEPTH];
  logic [7:0] out_mem [OUT_DEPTH];

  always_ff @(posedge clk) begin
    if (in_wr_en)  in_mem[in_wr_addr]   <= in_wr_data;
    if (in_rd_en)  in_rd_data           <= in_mem[in_rd_addr];
    if (out_wr_en) out_mem[out_wr_addr] <= out_wr_data;
    if (out_rd_en) out_rd_data          <= out_mem[out_rd_addr];
  end

endmodule
