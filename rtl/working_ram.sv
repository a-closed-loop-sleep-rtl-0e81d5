// working_ram: the engine's scratch memory, a simple dual-port RAM (one write
// port, one read port, 8 bits wide) as the design uses simple dual-port
// memories throughout.
//
// It holds the intermediate maps of the convolution layers, the a_shape and
// a_detail features of the last three segments, the LSTM gate scratch, cell
// and hidden states and the layer-1 output sequence.  Reads have one cycle of
// latency; a read and a write to the same address in one cycle return the old
// byte.  DEPTH = 16 KiB is this design's choice (the 20-s model uses about
// 11.4 KiB of it, see the README's memory map).
module working_ram #(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data
);

  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
