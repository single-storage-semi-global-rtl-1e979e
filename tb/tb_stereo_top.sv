// tb_stereo_top: end-to-end run of the stereo system at a reduced size.
//
// Frame 1 (a camera that needs rectification): two raw frames and two
// rectification maps with sub-pixel and out-of-range entries are placed in
// the frame memory (reached over AXI4); both remap units rectify, then the
// SGM peripheral computes the disparity image from the rectified pair. Frame 2 (a camera
// that delivers rectified frames): the remap units are skipped and the SGM
// peripheral reads the received frames directly. All memory ports stall
// at random. Rectified pixels and disparities are compared with the
// software reference; the run also counts that each mechanism happened:
// AXI4 handshake stalls with no protocol errors, fractional interpolation,
// clamped map entries, all SGM blocks running together, and the remap
// bypass.
module tb_stereo_top;
  import sgm_pkg::*;
  import sgm_ref_pkg::*;

  localparam int W = 32, H = 20, WIN = 7, DR = 12, NB = 2, P1 = 10, P2 = 40;
  localparam bit STALL = 1'b1;
  localparam int WATCHDOG = 2000000;
  localparam longint SGM_MAX_CYCLES = 0;   // random stalls: no rate check
`include "stereo_e2e_body.svh"

  stereo_top #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .DRANGE(DR), .NBLOCKS(NB), .P1(P1), .P2(P2)) dut (
    .clk, .rst_n,
    .remap_start, .remap_busy, .remap_done,
    .raw_left_base(RAW_L), .raw_right_base(RAW_R), .map_left_base(MAP_L),
    .map_right_base(MAP_R), .rect_left_base(RECT_L), .rect_right_base(RECT_R),
    .sgm_start, .sgm_busy, .sgm_done, .sgm_left_base(sgm_l), .sgm_right_base(sgm_r),
    .disp_base(DISP), .axi_req(req), .axi_rsp(rsp));
endmodule
