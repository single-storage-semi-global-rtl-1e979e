// line_buffer: the last WIN-1 rows of one image, so that each new pixel
// comes out together with the WIN-1 pixels above it in the same column.
//
// One memory word per image column holds that column's previous WIN-1
// pixels. When `en` is high the word at `col` is read, the incoming pixel
// is appended as the newest row, the WIN-pixel column is registered on
// `col_out` (valid the next cycle, `col_valid`) and the word is written back
// without its oldest pixel. One read and one write of the same address per
// pixel, which maps onto a simple dual-port block RAM.
//
// col_out[k] is row (current - (WIN-1) + k): index 0 is the oldest (top)
// row, index WIN-1 the pixel just written.
//
// The described design scans the image in raster order and shifts a 7x7
// census window; storing the previous rows in one packed word per column
// is this design's choice. Contents are not cleared: rows above the start
// of a section are never used by the SGM block.
module line_buffer #(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned WIN   = 7,
  parameter int unsigned COL_W = $clog2(IMG_W)
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic [COL_W-1:0]     col,
  input  logic [7:0]           pix,
  output logic [WIN-1:0][7:0]  col_out,
  output logic                 col_valid
);
  logic [(WIN-1)*8-1:0] mem [IMG_W];
  logic [WIN*8-1:0]     full;

  assign full = {pix, mem[col]};

  always_ff @(posedge clk) begin
    col_valid <= en;
    if (en) begin
      mem[col] <= full[WIN*8-1:8];
      col_out  <= full;
    end
  end
endmodule
