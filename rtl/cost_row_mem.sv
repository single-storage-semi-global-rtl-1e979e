// cost_row_mem: the cost_row store of the SGM block.
//
// For every image column it keeps the aggregated cost vector (DRANGE
// 8-bit costs) of the most recent pixel processed in that column, plus the
// minimum of that vector. Columns at and right of the current pixel hold
// the row above; columns left of it already hold the current row. It is
// written from cost_left one column behind the current pixel and read
// ahead of it, so one read port and one write port suffice.
//
// Two simple dual-port RAMs: costs addressed by (column, disparity), minima
// by column. Reads are synchronous: data appears the cycle after `rd_en`.
// Write and read in the same cycle never target the same address in the
// SGM block (write column x-1, read column x+2 or later).
//
// Size per the described design: 640 x 92 x 8 bit (57.5 KB) for one path
// group. Splitting the minima into a second RAM is this design's choice.
module cost_row_mem #(
  parameter int unsigned IMG_W  = 640,
  parameter int unsigned DRANGE = 92,
  parameter int unsigned COST_W = 8,
  parameter int unsigned COL_W  = $clog2(IMG_W),
  parameter int unsigned D_W    = $clog2(DRANGE)
) (
  input  logic              clk,
  // cost vectors
  input  logic              rd_en,
  input  logic [COL_W-1:0]  rd_col,
  input  logic [D_W-1:0]    rd_d,
  output logic [COST_W-1:0] rd_data,
  input  logic              wr_en,
  input  logic [COL_W-1:0]  wr_col,
  input  logic [D_W-1:0]    wr_d,
  input  logic [COST_W-1:0] wr_data,
  // per-column minima
  input  logic              min_rd_en,
  input  logic [COL_W-1:0]  min_rd_col,
  output logic [COST_W-1:0] min_rd_data,
  input  logic              min_wr_en,
  input  logic [COL_W-1:0]  min_wr_col,
  input  logic [COST_W-1:0] min_wr_data
);
  localparam int unsigned DEPTH = IMG_W * DRANGE;
  localparam int unsigned A_W   = $clog2(DEPTH);

  logic [COST_W-1:0] costs [DEPTH];
  logic [COST_W-1:0] mins  [IMG_W];

  function automatic logic [A_W-1:0] addr(input logic [COL_W-1:0] col,
                                          input logic [D_W-1:0] d);
    return A_W'(col) * A_W'(DRANGE) + A_W'(d);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en)     costs[addr(wr_col, wr_d)] <= wr_data;
    if (rd_en)     rd_data <= costs[addr(rd_col, rd_d)];
    if (min_wr_en) mins[min_wr_col] <= min_wr_data;
    if (min_rd_en) min_rd_data <= mins[min_rd_col];
  end
endmodule
