// volume_ram - on-chip 3-D array of complex samples.
//
// Holds a rows x columns x range volume between the passes of the 3-D FFT.
// The caller flattens (row, column, range index) into one address; the core
// uses {row, column, z} because all three extents are powers of two. One
// instance holds the image spectrum and later the product spectrum, a second
// one the filter spectrum.
//
// Interface: one synchronous write port, one synchronous read port.
// Timing: rd_data is the word addressed one cycle earlier (read-before-write
// on an address collision).
//
// The paper says only that the 3-D arrays occupy BRAM and URAM; a plain
// simple-dual-port memory is this design's choice.
module volume_ram #(
  parameter int unsigned DEPTH = 1024 * 1024 * 64,
  parameter int unsigned WIDTH = 80,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
