// edram_buffer: the tile's eDRAM buffer, written here as a single-port
// synchronous memory array (the eDRAM macro itself is process specific).
//
// It holds the kernel words, the image columns and the output columns of the
// convolution being run. One word is read or written per clock: a write stores
// wdata at addr on the clock edge; a read returns mem[addr] on rdata one clock
// after `re`. Depth and word width are this design's choices; the paper only
// names the buffer. The array is not reset.
module edram_buffer #(
  parameter int unsigned DEPTH = conv3d_pkg::BUF_DEPTH,
  parameter int unsigned WIDTH = conv3d_pkg::buf_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::XB_COLS, conv3d_pkg::ADC_BITS),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end

endmodule
