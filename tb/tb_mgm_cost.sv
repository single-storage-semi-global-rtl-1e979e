// tb_mgm_cost: the MGM cost equation for one disparity, against values
// worked out in the testbench from the equation: per neighbour
// min(L(d), L(d-1)+P1, L(d+1)+P1, min+P2) - min, sum / 4, + C, capped at
// 255. Covers the edge of the search range, all-maximum (image edge)
// neighbours and the cap (with a second instance whose P2 is large
// enough to reach it).
module tb_mgm_cost;
  localparam int P1 = 10, P2 = 40;
  logic [3:0][7:0] vm, v0, vp, mn;
  logic first, last;
  logic [5:0] c;
  logic [7:0] agg;
  int checks = 0, failures = 0;
  logic [7:0] agg_big;

  mgm_cost #(.COST_W(8), .C_W(6), .P1(P1), .P2(P2)) dut (
    .v_dm1(vm), .v_d(v0), .v_dp1(vp), .vmin(mn), .d_is_first(first), .d_is_last(last),
    .c, .agg);
  mgm_cost #(.COST_W(8), .C_W(6), .P1(P1), .P2(240)) dut_big (
    .v_dm1(vm), .v_d(v0), .v_dp1(vp), .vmin(mn), .d_is_first(first), .d_is_last(last),
    .c, .agg(agg_big));

  function automatic int expect_agg();
    int s = 0, e;
    for (int k = 0; k < 4; k++) begin
      int best = mn[k] + P2;
      if (v0[k] < best) best = v0[k];
      if (!first && vm[k] + P1 < best) best = vm[k] + P1;
      if (!last  && vp[k] + P1 < best) best = vp[k] + P1;
      s += best - mn[k];
    end
    e = c + s / 4;
    return (e > 255) ? 255 : e;
  endfunction

  task automatic check();
    int e;
    #1;
    e = expect_agg();
    checks++;
    if (agg != 8'(e)) begin
      failures++;
      $display("got %0d exp %0d", agg, e);
    end
  endtask

  initial begin
    // image edge: every neighbour at the maximum -> only C remains
    vm = {4{8'd255}}; v0 = vm; vp = vm; mn = vm; first = 0; last = 0; c = 6'd17;
    check();
    checks++; if (agg != 8'd17) failures++;
    // hand example: neighbour k has v0 = min+k*20, P1 path better for k >= 1
    for (int k = 0; k < 4; k++) begin
      mn[k] = 8'd5; v0[k] = 8'(5 + 20*k); vm[k] = 8'd6; vp[k] = 8'd200;
    end
    c = 6'd3; check();
    // terms: 0, min(25,16,45)-5=11, 11, 11 -> 33/4 = 8 -> 11
    checks++; if (agg != 8'd11) failures++;
    // random
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 4; k++) begin
        mn[k] = 8'($urandom % 200);
        v0[k] = mn[k] + 8'($urandom % 56);
        vm[k] = mn[k] + 8'($urandom % 56);
        vp[k] = mn[k] + 8'($urandom % 56);
      end
      first = ($urandom % 8 == 0);
      last  = ($urandom % 8 == 0);
      c = 6'($urandom % 49);
      check();
    end
    // largest smoothing terms: each term is P2, so 48 + P2 = 88
    for (int k = 0; k < 4; k++) begin
      mn[k] = 8'd0; v0[k] = 8'd255; vm[k] = 8'd255; vp[k] = 8'd255;
    end
    c = 6'd48;
    check();
    checks++; if (agg != 8'(48 + P2)) failures++;
    // the upper bound: a second instance with a large P2 must saturate
    #1;
    checks++;
    if (agg_big != 8'd255) begin
      failures++;
      $display("no saturation: %0d", agg_big);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
