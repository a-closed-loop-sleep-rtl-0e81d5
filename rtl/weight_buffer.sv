// weight_buffer: simple dual-port weight store between the memory bus and the
// convolution datapath.
//
// The MCU writes one byte per cycle over the 8-bit bus; the byte offset picks
// word offset[15:2] and lane offset[1:0].  The datapath reads one word per
// cycle, i.e. one int8 weight for each of the four kernels computed in
// parallel (the "4x8" path of the block diagram), with one cycle of read
// latency.  Each lane is its own byte-wide RAM so that byte writes need no
// read-modify-write.  DEPTH = 12288 words (48 KiB) is this design's choice: it
// holds all gate weights of one LSTM layer and direction (256 gates x 192
// inputs), so they are loaded once per pass instead of once per time step.
module weight_buffer #(
  parameter int unsigned DEPTH = 12288,
  parameter int unsigned LANES = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                         clk,
  // write port (memory bus)
  input  logic                         wr_en,
  input  logic [15:0]                  wr_byte_addr,
  input  logic [7:0]                   wr_data,
  // read port (convolution datapath)
  input  logic                         rd_en,
  input  logic [AW-1:0]                rd_addr,
  output logic signed [LANES-1:0][7:0] rd_data
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [7:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_byte_addr[1:0] == 2'(l) && 32'(wr_byte_addr[15:2]) < DEPTH)
        mem[wr_byte_addr[AW+1:2]] <= wr_data;
      if (rd_en)
        rd_data[l] <= mem[rd_addr];
    end
  end

endmodule
