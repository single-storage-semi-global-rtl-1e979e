// Body shared by the end-to-end testbenches of stereo_top. The including
// module declares W, H, WIN, DR, NB, P1, P2 (matching the DUT), STALL and
// WATCHDOG, and SGM_MAX_CYCLES (the longest allowed SGM pass in cycles,
// 0 for no limit), includes this file and then instantiates stereo_top as `dut`
// on the signals declared here.
  localparam int WH = W * H;
  localparam int RAW_L = 0, RAW_R = WH, MAP_L = 2 * WH, MAP_R = 6 * WH;
  localparam int RECT_L = 10 * WH, RECT_R = 11 * WH, DISP = 12 * WH;
  localparam int MEM = 13 * WH + 4;
  localparam int NP = NB + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic remap_start = 0, remap_busy, remap_done;
  logic sgm_start = 0, sgm_busy, sgm_done;
  logic [ADDR_W-1:0] sgm_l, sgm_r;
  axi_m2s_t [NP-1:0] req;
  axi_s2m_t [NP-1:0] rsp;

  axi_mem_model #(.NPORTS(NP), .MEM_BYTES(MEM), .STALL(STALL)) mem (
    .clk, .rst_n, .axi_i(req), .axi_o(rsp));

  // mechanism counters
  int n_parallel = 0, n_clamped = 0, n_fraction = 0, n_bypass = 0, n_remap = 0;
  always @(posedge clk) if (rst_n && dut.u_sgm.blk_busy == '1) n_parallel++;
  always @(posedge clk) if (rst_n && remap_done) n_remap++;

  img_t raw_l, raw_r, rect_l, rect_r;
  int exp_d[];
  int map_x[2][], map_y[2][];

  task automatic check_disp(string tag, const ref img_t l, const ref img_t r);
    for (int b = 0; b < NB; b++) begin
      automatic int os = b * (H / NB);
      automatic int oe = (b == NB - 1) ? H : (b + 1) * (H / NB);
      automatic int is = (os >= WIN/2) ? os - WIN/2 : 0;
      automatic int ie = (oe + WIN/2 <= H) ? oe + WIN/2 : H;
      automatic int c0 = (os > is + WIN/2) ? os : is + WIN/2;
      automatic int c1 = (oe < ie - WIN/2) ? oe : ie - WIN/2;
      sgm_band(l, r, W, WIN, DR, P1, P2, c0, c1, exp_d);
      for (int y = c0; y < c1; y++)
        for (int x = 0; x < W; x++) begin
          checks++;
          if (mem.mem[DISP + y*W + x] != 8'(exp_d[y*W + x])) begin
            failures++;
            if (failures < 10) $display("%s disparity (%0d,%0d) got %0d exp %0d", tag, y, x,
                                        mem.mem[DISP + y*W + x], exp_d[y*W + x]);
          end
        end
    end
  endtask

  task automatic run_sgm(logic [ADDR_W-1:0] l, logic [ADDR_W-1:0] r);
    sgm_l = l; sgm_r = r;
    @(posedge clk); sgm_start <= 1; @(posedge clk); sgm_start <= 0;
    wait (sgm_done);
    @(posedge clk);
  endtask

  initial begin
    longint t0;
    raw_l = new[WH]; raw_r = new[WH]; rect_l = new[WH]; rect_r = new[WH]; exp_d = new[WH];
    // scene: smooth gradients plus texture, right view shifted by 4..9 columns
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        raw_l[y*W + x] = byte'((x * 7 + y * 3 + ($urandom % 64)) % 256);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        automatic int sh = 4 + (x * 6) / W;
        raw_r[y*W + x] = (x + sh < W) ? raw_l[y*W + x + sh] : byte'($urandom);
      end
    // maps: small sub-pixel offsets, a few entries pointing off the frame
    for (int c = 0; c < 2; c++) begin
      map_x[c] = new[WH]; map_y[c] = new[WH];
      for (int i = 0; i < WH; i++) begin
        automatic int x = i % W, y = i / W;
        map_x[c][i] = x * 32 + ((c == 0) ? 3 : 11) + (y % 3);
        map_y[c][i] = y * 32 + ((c == 0) ? 5 : 0) + (x % 4);
        if ($urandom % 32 == 0) map_x[c][i] = W * 32 + 40;
        if ((map_x[c][i] >> 5) >= W - 1 || (map_y[c][i] >> 5) >= H - 1) n_clamped++;
        if ((map_x[c][i] & 31) != 0 || (map_y[c][i] & 31) != 0) n_fraction++;
      end
    end
    for (int i = 0; i < MEM; i++) mem.mem[i] = 8'hEE;
    for (int i = 0; i < WH; i++) begin
      mem.mem[RAW_L + i] = raw_l[i];
      mem.mem[RAW_R + i] = raw_r[i];
      for (int c = 0; c < 2; c++)
        for (int b = 0; b < 4; b++) begin
          automatic logic [31:0] wd = {16'(map_y[c][i]), 16'(map_x[c][i])};
          mem.mem[((c == 0) ? MAP_L : MAP_R) + 4*i + b] = wd[8*b +: 8];
        end
    end
    for (int i = 0; i < WH; i++) begin
      rect_l[i] = byte'(remap_px(raw_l, W, H, map_x[0][i], map_y[0][i]));
      rect_r[i] = byte'(remap_px(raw_r, W, H, map_x[1][i], map_y[1][i]));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // ---- frame 1: rectify, then match ----
    @(posedge clk); remap_start <= 1; @(posedge clk); remap_start <= 0;
    t0 = $time;
    wait (remap_done);
    $display("remap: %0d cycles", ($time - t0) / 10);
    @(posedge clk);
    for (int i = 0; i < WH; i++) begin
      checks += 2;
      if (mem.mem[RECT_L + i] != rect_l[i] || mem.mem[RECT_R + i] != rect_r[i]) begin
        failures++;
        if (failures < 10) $display("rectified pixel %0d got %0d/%0d exp %0d/%0d", i,
                                    mem.mem[RECT_L + i], mem.mem[RECT_R + i], rect_l[i], rect_r[i]);
      end
    end
    t0 = $time;
    run_sgm(RECT_L, RECT_R);
    $display("sgm: %0d cycles", ($time - t0) / 10);
    if (SGM_MAX_CYCLES > 0) begin
      checks++;
      if (($time - t0) / 10 > SGM_MAX_CYCLES) begin
        failures++;
        $display("SGM pass longer than %0d cycles", SGM_MAX_CYCLES);
      end
    end
    check_disp("rectified", rect_l, rect_r);

    // ---- frame 2: camera delivers rectified frames, remap bypassed ----
    for (int i = DISP; i < DISP + WH; i++) mem.mem[i] = 8'hEE;
    run_sgm(RAW_L, RAW_R);
    n_bypass++;
    check_disp("bypass", raw_l, raw_r);

    $display("mechanisms: stalls=%0d fractional=%0d clamped=%0d parallel_cycles=%0d remap=%0d bypass=%0d",
             mem.stalls, n_fraction, n_clamped, n_parallel, n_remap, n_bypass);
    $display("axi: reads=%0d writes=%0d protocol_errors=%0d", mem.reads, mem.writes, mem.proto_err);
    // every byte write is one AXI4 transfer: two rectified images, and two
    // disparity images of rows [WIN/2, H - WIN/2)
    checks++;
    if (mem.writes != 2 * WH + 2 * (H - 2 * (WIN/2)) * W) begin
      failures++;
      $display("write transfers %0d, expected %0d", mem.writes, 2 * WH + 2 * (H - 2 * (WIN/2)) * W);
    end
    checks++;
    if (mem.proto_err != 0) begin
      failures++;
      $display("AXI4 protocol errors seen by the memory");
    end
    checks++;
    if ((STALL && mem.stalls == 0) || n_fraction == 0 || n_clamped == 0 || n_parallel == 0 ||
        n_remap != 1 || n_bypass == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
