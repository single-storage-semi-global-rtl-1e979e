// tb_sgm_multi: the SGM peripheral with three blocks on a small stereo
// pair, each block on its own randomly stalling memory port over one shared
// frame memory. Checks every disparity of every band against the reference
// (aggregation restarting at each band's first row), that the bands leave
// no unprocessed strip between them, that rows outside [WIN/2, H-WIN/2)
// are not written and that the blocks really run at the same time.
module tb_sgm_multi;
  import sgm_pkg::*;
  import sgm_ref_pkg::*;

  localparam int W = 20, H = 22, WIN = 7, DR = 8, NB = 3, P1 = 10, P2 = 40;
  localparam int LB = 0, RB = 1024, DB = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  mem_req_t [NB-1:0] req;
  mem_rsp_t [NB-1:0] rsp;

  sgm_multi #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .DRANGE(DR), .NBLOCKS(NB), .P1(P1), .P2(P2))
    dut (.clk, .rst_n, .start, .busy, .done, .left_base(LB), .right_base(RB), .disp_base(DB),
         .mem_req(req), .mem_rsp(rsp));
  mem_model #(.NPORTS(NB), .MEM_BYTES(4096), .STALL(1)) mem (.clk, .rst_n, .req, .rsp);

  int all_busy = 0;
  always @(posedge clk) if (rst_n && dut.blk_busy == '1) all_busy++;

  img_t li, ri;
  int exp_d[];
  bit covered[H];

  initial begin
    li = new[W*H]; ri = new[W*H]; exp_d = new[W*H];
    foreach (li[i]) li[i] = byte'($urandom);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        ri[y*W + x] = (x + 2 < W) ? li[y*W + x + 2] : byte'($urandom);
    for (int i = 0; i < 4096; i++) mem.mem[i] = 8'hEE;
    for (int i = 0; i < W*H; i++) begin mem.mem[LB+i] = li[i]; mem.mem[RB+i] = ri[i]; end
    foreach (covered[i]) covered[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done);
    @(posedge clk);
    for (int b = 0; b < NB; b++) begin
      automatic int os = b * (H / NB);
      automatic int oe = (b == NB - 1) ? H : (b + 1) * (H / NB);
      automatic int is = (os >= WIN/2) ? os - WIN/2 : 0;
      automatic int ie = (oe + WIN/2 <= H) ? oe + WIN/2 : H;
      automatic int c0 = (os > is + WIN/2) ? os : is + WIN/2;
      automatic int c1 = (oe < ie - WIN/2) ? oe : ie - WIN/2;
      sgm_band(li, ri, W, WIN, DR, P1, P2, c0, c1, exp_d);
      for (int y = c0; y < c1; y++) begin
        covered[y] = 1;
        for (int x = 0; x < W; x++) begin
          checks++;
          if (mem.mem[DB + y*W + x] != 8'(exp_d[y*W + x])) begin
            failures++;
            if (failures < 10) $display("band %0d (%0d,%0d) got %0d exp %0d", b, y, x,
                                        mem.mem[DB + y*W + x], exp_d[y*W + x]);
          end
        end
      end
    end
    for (int y = 0; y < H; y++) begin
      checks++;
      if (covered[y] != (y >= WIN/2 && y < H - WIN/2)) begin
        failures++;
        $display("row %0d coverage wrong", y);
      end
      if (!covered[y]) begin
        checks++;
        if (mem.mem[DB + y*W + 5] != 8'hEE) failures++;
      end
    end
    checks++;
    if (all_busy == 0 || mem.stalls == 0) begin
      failures++;
      $display("blocks never ran together (%0d) or no stalls", all_busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
