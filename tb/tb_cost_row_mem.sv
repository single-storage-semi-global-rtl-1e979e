// tb_cost_row_mem: writes random cost vectors and minima through the write
// ports, reads them back through the read ports while writing elsewhere in
// the same cycle (as the SGM block does), and checks the one-cycle read
// latency against a testbench copy.
module tb_cost_row_mem;
  localparam int W = 16, D = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, mrd_en = 0, mwr_en = 0;
  logic [3:0] rd_col = 0, wr_col = 0, mrd_col = 0, mwr_col = 0;
  logic [3:0] rd_d = 0, wr_d = 0;
  logic [7:0] rd_data, wr_data = 0, mrd_data, mwr_data = 0;
  int checks = 0, failures = 0;
  byte unsigned ref_c [W][D];
  byte unsigned ref_m [W];

  cost_row_mem #(.IMG_W(W), .DRANGE(D), .COST_W(8)) dut (
    .clk, .rd_en, .rd_col, .rd_d, .rd_data, .wr_en, .wr_col, .wr_d, .wr_data,
    .min_rd_en(mrd_en), .min_rd_col(mrd_col), .min_rd_data(mrd_data),
    .min_wr_en(mwr_en), .min_wr_col(mwr_col), .min_wr_data(mwr_data));

  initial begin
    // fill
    for (int c = 0; c < W; c++) begin
      for (int d = 0; d < D; d++) begin
        ref_c[c][d] = byte'($urandom);
        wr_en <= 1; wr_col <= 4'(c); wr_d <= 4'(d); wr_data <= ref_c[c][d];
        mwr_en <= (d == 0); mwr_col <= 4'(c);
        if (d == 0) begin ref_m[c] = byte'($urandom); mwr_data <= ref_m[c]; end
        @(posedge clk);
      end
    end
    wr_en <= 0; mwr_en <= 0;
    // read column c while writing column c-3 with new data
    for (int t = 0; t < 300; t++) begin
      automatic int c  = 3 + $urandom % (W - 3);
      automatic int d  = $urandom % D;
      automatic int wc = c - 3;
      automatic int wd = $urandom % D;
      automatic byte unsigned nv = byte'($urandom);
      rd_en <= 1; rd_col <= 4'(c); rd_d <= 4'(d);
      mrd_en <= 1; mrd_col <= 4'(c);
      wr_en <= 1; wr_col <= 4'(wc); wr_d <= 4'(wd); wr_data <= nv;
      @(posedge clk);
      rd_en <= 0; wr_en <= 0; mrd_en <= 0;
      ref_c[wc][wd] = nv;
      @(negedge clk);
      checks++;
      if (rd_data != ref_c[c][d] || mrd_data != ref_m[c]) begin
        failures++;
        $display("col %0d d %0d got %0d/%0d exp %0d/%0d", c, d, rd_data, mrd_data,
                 ref_c[c][d], ref_m[c]);
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
