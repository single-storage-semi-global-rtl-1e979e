// tb_stereo_full: end-to-end run of the stereo system at its full size:
// 640x480 frames, 92 disparities, 5 SGM blocks, every parameter of
// stereo_top at its default. The memory answers at once (no random
// stalls) to keep the run short; tb_stereo_top covers the stalls.
//
// Frame 1 (a camera that needs rectification): two raw frames and two
// rectification maps with sub-pixel and out-of-range entries are placed in
// the frame memory (reached over AXI4); both remap units rectify, then the SGM peripheral
// computes the disparity image from the rectified pair. Frame 2 (a camera
// that delivers rectified frames): the remap units are skipped and the SGM
// peripheral reads the received frames directly. Every rectified pixel
// and every disparity is compared with the software reference; the run
// also counts fractional interpolation, clamped map entries, all SGM
// blocks running together and the remap bypass, and prints the cycle
// counts of the remap and SGM passes (about 5.5 M and 6.6 M cycles) and
// checks that the SGM pass fits the 10.5 frames per second of the
// described system at 100 MHz.
module tb_stereo_full;
  import sgm_pkg::*;
  import sgm_ref_pkg::*;

  localparam int W = 640, H = 480, WIN = 7, DR = 92, NB = 5, P1 = 10, P2 = 40;
  localparam bit STALL = 1'b0;
  localparam int WATCHDOG = 40000000;
  // 10.5 frames per second at a 100 MHz clock: at most 100e6 / 10.5 cycles
  // for the SGM pass of one frame
  localparam longint SGM_MAX_CYCLES = 9523809;
`include "stereo_e2e_body.svh"

  stereo_top dut (
    .clk, .rst_n,
    .remap_start, .remap_busy, .remap_done,
    .raw_left_base(RAW_L), .raw_right_base(RAW_R), .map_left_base(MAP_L),
    .map_right_base(MAP_R), .rect_left_base(RECT_L), .rect_right_base(RECT_R),
    .sgm_start, .sgm_busy, .sgm_done, .sgm_left_base(sgm_l), .sgm_right_base(sgm_r),
    .disp_base(DISP), .axi_req(req), .axi_rsp(rsp));
endmodule
