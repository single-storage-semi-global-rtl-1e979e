// stereo_top: the FPGA side of the stereo depth system.
//
// Two remap peripherals rectify the left and right raw frames with their
// rectification maps, and the SGM peripheral (NBLOCKS parallel SGM blocks)
// turns the rectified pair into a disparity image. All data moves through
// frame memory: raw images, maps, rectified images and the disparity image
// each have their own region, given by the base address inputs. The
// processor that captures frames and starts the peripherals, the DRAM
// itself and the display path are outside this module.
//
// Control: `remap_start` starts both remap peripherals on the same frame,
// `remap_done` pulses when both have finished; `sgm_start` starts the SGM
// peripheral and `sgm_done` pulses when the disparity image is complete.
// For a camera that delivers rectified frames, rectification is skipped by
// pointing the SGM inputs (sgm_left_base, sgm_right_base) at the received
// frames and never starting the remap peripherals.
//
// Memory ports: one AXI4 master per peripheral: index 0 is the left remap,
// 1 the right remap, 2.. the SGM blocks in band order. Each peripheral's
// simple request/response port goes through an axi4_master adapter, so the
// ports carry single-beat AXI4 transfers, one outstanding each. A
// peripheral reports done only after its last write has been answered.
//
// Follows the system block diagram: Remap x2 -> rectified images -> SGM
// -> depth image, all through DRAM over AXI4. Port indices and the separate start
// signals (in place of the processor's register writes) are this
// design's choices.
module stereo_top
  import sgm_pkg::*;
#(
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  parameter int unsigned WIN     = 7,
  parameter int unsigned DRANGE  = 92,
  parameter int unsigned NBLOCKS = 5,
  parameter int unsigned P1      = 10,
  parameter int unsigned P2      = 40,
  parameter int unsigned NPORTS  = NBLOCKS + 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // rectification
  input  logic                  remap_start,
  output logic                  remap_busy,
  output logic                  remap_done,
  input  logic [ADDR_W-1:0]     raw_left_base,
  input  logic [ADDR_W-1:0]     raw_right_base,
  input  logic [ADDR_W-1:0]     map_left_base,
  input  logic [ADDR_W-1:0]     map_right_base,
  input  logic [ADDR_W-1:0]     rect_left_base,
  input  logic [ADDR_W-1:0]     rect_right_base,
  // stereo matching
  input  logic                  sgm_start,
  output logic                  sgm_busy,
  output logic                  sgm_done,
  input  logic [ADDR_W-1:0]     sgm_left_base,
  input  logic [ADDR_W-1:0]     sgm_right_base,
  input  logic [ADDR_W-1:0]     disp_base,
  // frame memory, one AXI4 master port per peripheral
  output axi_m2s_t [NPORTS-1:0] axi_req,
  input  axi_s2m_t [NPORTS-1:0] axi_rsp
);
  mem_req_t [NPORTS-1:0] mem_req;
  mem_rsp_t [NPORTS-1:0] mem_rsp;

  for (genvar p = 0; p < NPORTS; p++) begin : g_axi
    axi4_master u_axi (
      .clk, .rst_n, .mem_req(mem_req[p]), .mem_rsp(mem_rsp[p]),
      .axi_o(axi_req[p]), .axi_i(axi_rsp[p]));
  end

  logic [1:0] rm_busy, rm_done, rm_fin;

  remap #(.IMG_W(IMG_W), .IMG_H(IMG_H), .FRAC(MAP_FRAC)) u_remap_left (
    .clk, .rst_n, .start(remap_start), .busy(rm_busy[0]), .done(rm_done[0]),
    .map_base(map_left_base), .raw_base(raw_left_base), .out_base(rect_left_base),
    .mem_req(mem_req[0]), .mem_rsp(mem_rsp[0]));

  remap #(.IMG_W(IMG_W), .IMG_H(IMG_H), .FRAC(MAP_FRAC)) u_remap_right (
    .clk, .rst_n, .start(remap_start), .busy(rm_busy[1]), .done(rm_done[1]),
    .map_base(map_right_base), .raw_base(raw_right_base), .out_base(rect_right_base),
    .mem_req(mem_req[1]), .mem_rsp(mem_rsp[1]));

  // both remaps finished (they may end in different cycles)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rm_fin     <= '0;
      remap_done <= 1'b0;
    end else begin
      remap_done <= 1'b0;
      if (remap_start) rm_fin <= '0;
      else if ((rm_fin | rm_done) == 2'b11 && rm_fin != 2'b11) begin
        rm_fin     <= 2'b11;
        remap_done <= 1'b1;
      end else rm_fin <= rm_fin | rm_done;
    end
  end
  assign remap_busy = |rm_busy;

  sgm_multi #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN(WIN), .DRANGE(DRANGE), .NBLOCKS(NBLOCKS),
    .P1(P1), .P2(P2)
  ) u_sgm (
    .clk, .rst_n, .start(sgm_start), .busy(sgm_busy), .done(sgm_done),
    .left_base(sgm_left_base), .right_base(sgm_right_base), .disp_base,
    .mem_req(mem_req[NPORTS-1:2]), .mem_rsp(mem_rsp[NPORTS-1:2]));
endmodule
