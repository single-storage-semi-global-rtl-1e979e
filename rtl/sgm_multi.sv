// sgm_multi: the SGM stereo matching peripheral, NBLOCKS SGM blocks working
// on horizontal sections of the same frame at the same time.
//
// The SGM block's logic does not grow with the image, but its run time is
// proportional to rows x columns x (search range + pipeline depth), so the
// frame is cut into NBLOCKS bands of IMG_H/NBLOCKS output rows each (the
// last band takes any remainder) and each band gets its own block and its
// own memory port. A band's census windows need WIN/2 rows above and below
// it, so block b reads input rows
//     [max(0, b*IMG_H/NBLOCKS - WIN/2), min(IMG_H, (b+1)*IMG_H/NBLOCKS + WIN/2))
// and writes only the disparities of its own band. The top and bottom
// bands are therefore IMG_H/NBLOCKS + WIN/2 rows high, as in the two-band
// example of the described design; inner bands read WIN/2 more. Each
// block restarts its aggregation at the top of its band.
//
// Interface: pulse `start`; `done` pulses once every block has finished;
// `busy` is high in between. Memory port b belongs to block b.
//
// Follows the described design: 5 parallel blocks, row sections enlarged
// by half a window so no invalid strip appears between sections. The
// exact band boundaries and the inner-band overlap are this design's
// choices (the text's "128 rows" per block does not match 480/5).
module sgm_multi
  import sgm_pkg::*;
#(
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  parameter int unsigned WIN     = 7,
  parameter int unsigned DRANGE  = 92,
  parameter int unsigned NBLOCKS = 5,
  parameter int unsigned P1      = 10,
  parameter int unsigned P2      = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic [ADDR_W-1:0]      left_base,
  input  logic [ADDR_W-1:0]      right_base,
  input  logic [ADDR_W-1:0]      disp_base,
  output mem_req_t [NBLOCKS-1:0] mem_req,
  input  mem_rsp_t [NBLOCKS-1:0] mem_rsp
);
  localparam int unsigned ROW_W = $clog2(IMG_H + 1);
  localparam int unsigned BAND  = IMG_H / NBLOCKS;
  localparam int unsigned H     = WIN / 2;

  logic [NBLOCKS-1:0] blk_busy, blk_done, finished;

  for (genvar b = 0; b < NBLOCKS; b++) begin : g_blk
    localparam int unsigned OS = b * BAND;
    localparam int unsigned OE = (b == NBLOCKS - 1) ? IMG_H : (b + 1) * BAND;
    localparam int unsigned IS = (OS >= H) ? OS - H : 0;
    localparam int unsigned IE = (OE + H <= IMG_H) ? OE + H : IMG_H;

    sgm_core #(
      .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN(WIN), .DRANGE(DRANGE), .P1(P1), .P2(P2)
    ) u_core (
      .clk, .rst_n, .start,
      .busy(blk_busy[b]), .done(blk_done[b]),
      .left_base, .right_base, .disp_base,
      .row_in_start(ROW_W'(IS)), .row_in_end(ROW_W'(IE)),
      .out_start(ROW_W'(OS)), .out_end(ROW_W'(OE)),
      .mem_req(mem_req[b]), .mem_rsp(mem_rsp[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      finished <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        finished <= '0;
        busy     <= 1'b1;
      end else if (busy) begin
        if ((finished | blk_done) == '1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        finished <= finished | blk_done;
      end
    end
  end
endmodule
