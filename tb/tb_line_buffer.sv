// tb_line_buffer: streams a small random image through the line buffer
// in raster order and checks that every output column holds the new pixel
// and the WIN-1 pixels above it (for rows where they exist), one cycle
// after the write.
module tb_line_buffer;
  localparam int W = 12, H = 10, WIN = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [3:0] col = 0;
  logic [7:0] pix = 0;
  logic [WIN-1:0][7:0] col_out;
  logic col_valid;
  int checks = 0, failures = 0;
  byte unsigned img [H][W];

  line_buffer #(.IMG_W(W), .WIN(WIN)) dut (.clk, .en, .col, .pix, .col_out, .col_valid);

  initial begin
    foreach (img[y, x]) img[y][x] = byte'($urandom);
    @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        en <= 1; col <= 4'(x); pix <= img[y][x];
        @(posedge clk);
        en <= 0;
        @(negedge clk);
        checks++;
        if (!col_valid) failures++;
        for (int k = 0; k < WIN; k++) begin
          automatic int r = y - (WIN - 1) + k;
          if (r >= 0) begin
            checks++;
            if (col_out[k] != img[r][x]) begin
              failures++;
              $display("(%0d,%0d) k=%0d got %0d exp %0d", y, x, k, col_out[k], img[r][x]);
            end
          end
        end
        @(negedge clk);
        checks++;
        if (col_valid) failures++;   // valid only after a write
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
