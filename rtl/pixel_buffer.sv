// pixel_buffer - 2-D array holding an image or a structuring element.
//
// Each entry stores one grey value of PIX_W bits and a domain flag (the top
// bit). A cleared flag marks a position that is not part of the image or
// filter domain, so shapes with gaps (the "X" entries of a structuring
// element) can be held in a rectangular array. The core keeps the image and
// the filter in two instances of this block and reads them while it builds
// the umbras.
//
// Interface: one synchronous write port and one synchronous read port,
// addressed by (row, column). Timing: rd_pix shows the entry addressed one
// cycle earlier; a write and a read of the same entry in one cycle return
// the old contents.
//
// The paper states only that 2-D arrays are kept in on-chip memory; the
// word layout and the port arrangement are this design's choice.
module pixel_buffer #(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 1024,
  parameter int unsigned PIX_W = 5,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CWD = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [RW-1:0]  wr_row,
  input  logic [CWD-1:0] wr_col,
  input  logic [PIX_W:0] wr_pix,
  input  logic [RW-1:0]  rd_row,
  input  logic [CWD-1:0] rd_col,
  output logic [PIX_W:0] rd_pix
);

  localparam int unsigned DEPTH = ROWS * COLS;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [PIX_W:0] mem [DEPTH];

  logic [AW-1:0] wa, ra;
  assign wa = AW'(wr_row) * AW'(COLS) + AW'(wr_col);
  assign ra = AW'(rd_row) * AW'(COLS) + AW'(rd_col);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa] <= wr_pix;
    rd_pix <= mem[ra];
  end

endmodule
