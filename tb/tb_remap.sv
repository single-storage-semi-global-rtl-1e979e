// tb_remap: rectifies a small random image with a random map that has
// integer, fractional and out-of-range source positions. One remap unit
// runs on an ideal memory (checks 17 cycles per pixel), one on a memory
// that stalls at random; both results are compared pixel by pixel with the
// bilinear reference of sgm_ref_pkg.
module tb_remap;
  import sgm_pkg::*;
  import sgm_ref_pkg::*;

  localparam int W = 16, H = 12;
  localparam int RAW = 0, MAP = 1024, OUT = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic busy_a, done_a, busy_b, done_b;
  mem_req_t [0:0] req_a, req_b;
  mem_rsp_t [0:0] rsp_a, rsp_b;

  remap #(.IMG_W(W), .IMG_H(H)) dut_a (.clk, .rst_n, .start, .busy(busy_a), .done(done_a),
    .map_base(MAP), .raw_base(RAW), .out_base(OUT), .mem_req(req_a[0]), .mem_rsp(rsp_a[0]));
  mem_model #(.NPORTS(1), .MEM_BYTES(4096), .STALL(0)) mem_a (.clk, .rst_n, .req(req_a), .rsp(rsp_a));
  remap #(.IMG_W(W), .IMG_H(H)) dut_b (.clk, .rst_n, .start, .busy(busy_b), .done(done_b),
    .map_base(MAP), .raw_base(RAW), .out_base(OUT), .mem_req(req_b[0]), .mem_rsp(rsp_b[0]));
  mem_model #(.NPORTS(1), .MEM_BYTES(4096), .STALL(1)) mem_b (.clk, .rst_n, .req(req_b), .rsp(rsp_b));

  img_t raw;
  int mx[W*H], my[W*H];
  longint t0, t1;
  int clamped = 0, fractional = 0;

  initial begin
    raw = new[W*H];
    foreach (raw[i]) raw[i] = byte'($urandom);
    for (int i = 0; i < W*H; i++) begin
      case ($urandom % 4)
        0: begin mx[i] = ($urandom % W) * 32; my[i] = ($urandom % H) * 32; end
        1: begin mx[i] = W * 32 + $urandom % 200; my[i] = $urandom % (H * 32); end
        default: begin mx[i] = $urandom % (W * 32); my[i] = $urandom % (H * 32 + 64); end
      endcase
      if ((mx[i] >> 5) >= W - 1 || (my[i] >> 5) >= H - 1) clamped++;
      if ((mx[i] & 31) != 0 || (my[i] & 31) != 0) fractional++;
    end
    for (int i = 0; i < 4096; i++) begin mem_a.mem[i] = 0; mem_b.mem[i] = 0; end
    for (int i = 0; i < W*H; i++) begin
      automatic logic [31:0] wd = {16'(my[i]), 16'(mx[i])};
      mem_a.mem[RAW+i] = raw[i]; mem_b.mem[RAW+i] = raw[i];
      for (int b = 0; b < 4; b++) begin
        mem_a.mem[MAP + 4*i + b] = wd[8*b +: 8];
        mem_b.mem[MAP + 4*i + b] = wd[8*b +: 8];
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = $time;
    fork
      begin wait (done_a); t1 = $time; end
      wait (done_b);
    join
    @(posedge clk);
    for (int i = 0; i < W*H; i++) begin
      automatic int e = remap_px(raw, W, H, mx[i], my[i]);
      checks += 2;
      if (mem_a.mem[OUT+i] != 8'(e) || mem_b.mem[OUT+i] != 8'(e)) begin
        failures++;
        $display("pixel %0d map (%0d,%0d): got %0d/%0d exp %0d", i, mx[i], my[i],
                 mem_a.mem[OUT+i], mem_b.mem[OUT+i], e);
      end
    end
    // cycle count: 17 per pixel with the ideal memory (clock period 10)
    checks++;
    if ((t1 - t0) / 10 != 17 * W * H) begin
      failures++;
      $display("cycles %0d, expected %0d", (t1 - t0) / 10, 17 * W * H);
    end
    checks++;
    if (clamped == 0 || fractional == 0 || mem_b.stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
