// census_window: 7x7 sliding window and census transform of its centre.
//
// Each `shift` pushes a new WIN-pixel image column (oldest row at index 0)
// into the window; the oldest column drops out. `in_valid` tells whether the
// pushed column lies inside the image; columns outside it (at the left and
// right image edges) stay in the window flagged invalid. The census vector
// of the centre pixel has one bit per other window position, in raster
// order (top row first, left column first, centre skipped): the bit is 1
// when that neighbour is valid and darker than the centre. Invalid
// neighbours give 0 in both images and so add nothing to a Hamming
// distance. `census` is combinational from the window registers, so it
// describes the window after the last shift.
//
// The 7x7 window and the census transform follow the described design. The
// bit convention (neighbour < centre) and the handling of image edges are
// this design's choices.
module census_window #(
  parameter int unsigned WIN   = 7,
  parameter int unsigned NBITS = WIN * WIN - 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift,
  input  logic [WIN-1:0][7:0] col_in,
  input  logic                in_valid,
  output logic [NBITS-1:0]    census,
  output logic [7:0]          centre,
  output logic                centre_valid
);
  // win[c][r]: c = 0 newest (rightmost) column, r = 0 top row.
  logic [WIN-1:0][WIN-1:0][7:0] win;
  logic [WIN-1:0]               wval;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wval <= '0;
      win  <= '0;
    end else if (shift) begin
      for (int c = WIN - 1; c > 0; c--) win[c] <= win[c-1];
      win[0] <= col_in;
      wval   <= {wval[WIN-2:0], in_valid};
    end
  end

  localparam int unsigned H = WIN / 2;

  always_comb begin
    int unsigned b;
    centre       = win[H][H];
    centre_valid = wval[H];
    census       = '0;
    b            = NBITS - 1;
    // Raster order: row 0 first, leftmost column (c = WIN-1) first; MSB first.
    for (int r = 0; r < WIN; r++) begin
      for (int c = WIN - 1; c >= 0; c--) begin
        if (!(r == H && c == H)) begin
          census[b] = wval[c] && (win[c][r] < centre);
          b = b - 1;
        end
      end
    end
  end
endmodule
