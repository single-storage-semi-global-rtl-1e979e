// tb_sgm_core: one SGM block on a small synthetic stereo pair.
//
// The right image is the left one shifted by a few columns plus noise, so
// the matcher has real work to do. Two blocks run: one on an ideal memory
// (checks the cycle count per pixel: DRANGE + 12 with one-cycle reads,
// DRANGE + 7 for the last WIN/2 pixels of a row, which need no reads) and
// one on a memory that stalls at random (checks the handshakes). Every
// disparity written is compared with the software reference of
// sgm_ref_pkg; a second run of the stalled block on an inner band checks
// the row-section inputs and the per-run re-initialisation of cost_row.
module tb_sgm_core;
  import sgm_pkg::*;
  import sgm_ref_pkg::*;

  localparam int W = 24, H = 16, WIN = 7, DR = 10, P1 = 10, P2 = 40;
  localparam int ROW_W = $clog2(H + 1);
  localparam int LB = 0, RB = 1024, DB = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start_a = 0, start_b = 0;
  logic busy_a, busy_b, done_a, done_b;
  logic [ROW_W-1:0] ris, rie, os, oe;
  mem_req_t [0:0] req_a, req_b;
  mem_rsp_t [0:0] rsp_a, rsp_b;

  sgm_core #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .DRANGE(DR), .P1(P1), .P2(P2)) dut_a (
    .clk, .rst_n, .start(start_a), .busy(busy_a), .done(done_a),
    .left_base(LB), .right_base(RB), .disp_base(DB),
    .row_in_start(ROW_W'(0)), .row_in_end(ROW_W'(H)), .out_start(ROW_W'(0)), .out_end(ROW_W'(H)),
    .mem_req(req_a[0]), .mem_rsp(rsp_a[0]));
  mem_model #(.NPORTS(1), .MEM_BYTES(4096), .STALL(0)) mem_a (.clk, .rst_n, .req(req_a), .rsp(rsp_a));

  sgm_core #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .DRANGE(DR), .P1(P1), .P2(P2)) dut_b (
    .clk, .rst_n, .start(start_b), .busy(busy_b), .done(done_b),
    .left_base(LB), .right_base(RB), .disp_base(DB),
    .row_in_start(ris), .row_in_end(rie), .out_start(os), .out_end(oe),
    .mem_req(req_b[0]), .mem_rsp(rsp_b[0]));
  mem_model #(.NPORTS(1), .MEM_BYTES(4096), .STALL(1)) mem_b (.clk, .rst_n, .req(req_b), .rsp(rsp_b));

  img_t li, ri;
  int exp_d[];

  // cycle spacing of disparity writes in the ideal run
  longint last_wr = -1, cyc = 0;
  int gaps_ok = 0, gaps_bad = 0;
  logic [7:0] prev_col;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req_a[0].valid && req_a[0].we && rsp_a[0].ready) begin
      automatic int lane = req_a[0].wstrb[1] ? 1 : req_a[0].wstrb[2] ? 2 : req_a[0].wstrb[3] ? 3 : 0;
      automatic int col = (int'(req_a[0].addr) + lane - DB) % W;
      if (last_wr >= 0 && col != 0) begin
        if (cyc - last_wr == ((col < W - WIN/2) ? DR + 12 : DR + 7)) gaps_ok++;
        else gaps_bad++;
      end
      last_wr = cyc;
    end
  end

  function automatic logic [7:0] rd(bit b, int a);
    return b ? mem_b.mem[a] : mem_a.mem[a];
  endfunction

  task automatic check_band(string tag, bit b, int cy0, int cy1);
    for (int y = cy0; y < cy1; y++)
      for (int x = 0; x < W; x++) begin
        checks++;
        if (rd(b, DB + y*W + x) != 8'(exp_d[y*W + x])) begin
          failures++;
          if (failures < 10)
            $display("%s mismatch (%0d,%0d): got %0d exp %0d", tag, y, x,
                     rd(b, DB + y*W + x), exp_d[y*W + x]);
        end
      end
  endtask

  initial begin
    li = new[W*H]; ri = new[W*H]; exp_d = new[W*H];
    for (int i = 0; i < W*H; i++) li[i] = byte'($urandom % 256);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int sh = (x < W/2) ? 3 : 6;
        ri[y*W + x] = (x + sh < W) ? li[y*W + x + sh] : byte'($urandom % 256);
        if ($urandom % 8 == 0) ri[y*W + x] = byte'($urandom % 256);
      end
    for (int i = 0; i < 4096; i++) begin mem_a.mem[i] = 8'hEE; mem_b.mem[i] = 8'hEE; end
    for (int i = 0; i < W*H; i++) begin
      mem_a.mem[LB+i] = li[i]; mem_a.mem[RB+i] = ri[i];
      mem_b.mem[LB+i] = li[i]; mem_b.mem[RB+i] = ri[i];
    end
    ris = 0; rie = ROW_W'(H); os = 0; oe = ROW_W'(H);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start_a <= 1; start_b <= 1;
    @(posedge clk);
    start_a <= 0; start_b <= 0;
    fork
      wait (done_a);
      wait (done_b);
    join
    @(posedge clk);
    sgm_band(li, ri, W, WIN, DR, P1, P2, WIN/2, H - WIN/2, exp_d);
    check_band("ideal", 0, WIN/2, H - WIN/2);
    check_band("stall", 1, WIN/2, H - WIN/2);
    // untouched rows
    checks++;
    if (mem_a.mem[DB] != 8'hEE || mem_a.mem[DB + (H-1)*W] != 8'hEE) failures++;
    // timing
    checks++;
    if (gaps_bad != 0 || gaps_ok == 0) begin
      failures++;
      $display("pixel interval: %0d ok, %0d wrong", gaps_ok, gaps_bad);
    end
    checks++;
    if (mem_b.stalls == 0) failures++;

    // inner band: input rows 4..13, output rows 6..11 -> centre rows 7..10
    for (int i = DB; i < DB + W*H; i++) mem_b.mem[i] = 8'hEE;
    ris = 4; rie = 14; os = 6; oe = 12;
    @(posedge clk); start_b <= 1; @(posedge clk); start_b <= 0;
    wait (done_b);
    @(posedge clk);
    sgm_band(li, ri, W, WIN, DR, P1, P2, 7, 11, exp_d);
    check_band("band", 1, 7, 11);
    checks++;
    if (mem_b.mem[DB + 6*W + 3] != 8'hEE || mem_b.mem[DB + 11*W + 3] != 8'hEE) begin
      failures++;
      $display("rows outside the band were written");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
