// mgm_cost: aggregated MGM cost of the current pixel at one disparity d.
//
// The four neighbours already processed in raster order (top-left, top,
// top-right, left) each hold one stored cost vector L(.) and its minimum
// m. For each neighbour the smoothing term is
//     min( L(d), L(d-1)+P1, L(d+1)+P1, m+P2 ) - m
// where d-1 and d+1 outside the search range are left out. The four terms
// are added, the sum is divided by 4 with a right shift by two, the
// Hamming cost C(p,d) is added and the result is capped at the largest
// storable cost (8-bit). This is the MGM recursion with all four paths in
// one group (n = 4), so a single vector per pixel is stored.
//
// Interface: for neighbour k, v_dm1[k], v_d[k], v_dp1[k] are its costs at
// d-1, d, d+1 and vmin[k] its minimum; d_is_first / d_is_last mark d = 0
// and d = DRANGE-1. Purely combinational.
//
// Follows the described design: the equation, grouping of 4 paths, the
// divide by 4 by shifting, the upper bound. The paper's text and figure
// both say "<<2" for the divide by 4; a divide needs a right shift, which is
// what is built. P1, P2 and the cap value (8-bit maximum) are this
// design's choices.
module mgm_cost #(
  parameter int unsigned COST_W = 8,
  parameter int unsigned C_W    = 6,
  parameter int unsigned P1     = 10,
  parameter int unsigned P2     = 40
) (
  input  logic [3:0][COST_W-1:0] v_dm1,
  input  logic [3:0][COST_W-1:0] v_d,
  input  logic [3:0][COST_W-1:0] v_dp1,
  input  logic [3:0][COST_W-1:0] vmin,
  input  logic                   d_is_first,
  input  logic                   d_is_last,
  input  logic [C_W-1:0]         c,
  output logic [COST_W-1:0]      agg
);
  localparam int unsigned W  = COST_W + 3;          // room for +P2 and sums
  localparam logic [W-1:0] CAP = W'((1 << COST_W) - 1);

  logic [3:0][W-1:0] term;
  logic [W+1:0]      sum;
  logic [W+1:0]      total;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      logic [W-1:0] best;
      best = W'(vmin[k]) + W'(P2);
      if (W'(v_d[k]) < best) best = W'(v_d[k]);
      if (!d_is_first && (W'(v_dm1[k]) + W'(P1) < best)) best = W'(v_dm1[k]) + W'(P1);
      if (!d_is_last  && (W'(v_dp1[k]) + W'(P1) < best)) best = W'(v_dp1[k]) + W'(P1);
      term[k] = best - W'(vmin[k]);
    end
    sum   = (W+2)'(term[0]) + (W+2)'(term[1]) + (W+2)'(term[2]) + (W+2)'(term[3]);
    total = (sum >> 2) + (W+2)'(c);
    agg   = (total > (W+2)'(CAP)) ? COST_W'(CAP) : total[COST_W-1:0];
  end
endmodule
