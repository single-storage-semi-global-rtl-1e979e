// hamming_distance: matching cost of the stereo matcher.
//
// The cost C(p,d) of matching a left pixel with the right pixel d columns
// to its left is the Hamming distance between their census vectors: the
// number of bit positions in which they differ. This block XORs the two
// vectors and counts the ones. It is purely combinational; the SGM block
// uses one instance per clock, one disparity per cycle.
//
// The census metric as the matching cost follows the described design; the
// plain adder-tree popcount is this design's choice.
module hamming_distance #(
  parameter int unsigned NBITS = 48,               // 7x7 window minus centre
  parameter int unsigned OUT_W = $clog2(NBITS + 1)
) (
  input  logic [NBITS-1:0] a,
  input  logic [NBITS-1:0] b,
  output logic [OUT_W-1:0] distance
);
  logic [NBITS-1:0] diff;

  always_comb begin
    diff = a ^ b;
    distance = '0;
    for (int unsigned i = 0; i < NBITS; i++)
      distance = distance + OUT_W'(diff[i]);
  end
endmodule
