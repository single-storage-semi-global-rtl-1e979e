// tb_census_window: pushes random 7-pixel columns, some flagged outside
// the image, and compares the census vector of the window centre with one
// computed in the testbench from its own copy of the window (bit set when
// the neighbour is valid and darker than the centre, raster order, MSB
// first, centre skipped).
module tb_census_window;
  localparam int WIN = 7, N = WIN * WIN - 1, HW = WIN / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift = 0, in_valid = 0;
  logic [WIN-1:0][7:0] col_in = '0;
  logic [N-1:0] census;
  logic [7:0] centre;
  logic centre_valid;
  int checks = 0, failures = 0;

  // model window: cols[0] = oldest (leftmost)
  byte unsigned mw [WIN][WIN];   // [col][row]
  bit mv [WIN];

  census_window #(.WIN(WIN)) dut (.clk, .rst_n, .shift, .col_in, .in_valid, .census,
                                  .centre, .centre_valid);

  function automatic logic [N-1:0] model();
    logic [N-1:0] v = '0;
    byte unsigned c = mw[HW][HW];
    for (int r = 0; r < WIN; r++)
      for (int q = 0; q < WIN; q++) begin
        if (r == HW && q == HW) continue;
        v = v << 1;
        v[0] = mv[q] && (mw[q][r] < c);
      end
    return v;
  endfunction

  initial begin
    foreach (mv[i]) mv[i] = 0;
    foreach (mw[i, j]) mw[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 400; t++) begin
      @(posedge clk);
      for (int r = 0; r < WIN; r++) col_in[r] <= 8'($urandom % 16);  // many ties
      in_valid <= ($urandom % 5 != 0);
      shift <= 1;
      @(posedge clk);
      shift <= 0;
      for (int q = 0; q < WIN - 1; q++) begin
        mv[q] = mv[q+1];
        for (int r = 0; r < WIN; r++) mw[q][r] = mw[q+1][r];
      end
      mv[WIN-1] = in_valid;
      for (int r = 0; r < WIN; r++) mw[WIN-1][r] = col_in[r];
      @(negedge clk);
      checks++;
      if (census != model() || centre != mw[HW][HW] || centre_valid != mv[HW]) begin
        failures++;
        if (failures < 5) $display("t=%0d got %h exp %h", t, census, model());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
