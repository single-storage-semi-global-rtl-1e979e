// remap: stereo rectification peripheral (one per camera).
//
// A rectification map, computed offline, gives for every pixel (i, j) of
// the rectified image a source position (x, y) in the raw image, in fixed
// point with MAP_FRAC = 5 fractional bits. The peripheral walks the map in
// raster order (a stream), fetches the four raw pixels around (x, y)
// (random access) and blends them bilinearly:
//     A = raw(x0, y0)    B = raw(x0+1, y0)
//     C = raw(x0, y0+1)  D = raw(x0+1, y0+1)
//     p_top    = A*(32-fx) + B*fx
//     p_bottom = C*(32-fx) + D*fx
//     p_final  = (p_top*(32-fy) + p_bottom*fy + 512) >> 10
// where x0 = x >> 5, fx = x & 31 (likewise y). The result is written as
// one byte at out_base + i*IMG_W + j.
//
// Map word format: one 32-bit word per pixel at map_base + 4*(i*IMG_W+j),
// x in bits [15:0], y in bits [31:16], both unsigned. Source positions past
// the last column or row are clamped to it.
//
// Interface: pulse `start`; `busy` is high until `done` pulses after the last
// pixel is written. One memory port (sgm_pkg), one request at a time; read
// data is expected at the earliest the cycle after the read is accepted.
// Timing with an ideal memory (accept at once, answer next cycle): 17
// cycles per pixel (5 reads of 3 cycles, one cycle to blend, one write).
//
// Follows the described design: maps and images in DRAM, streaming map
// read, random raw reads, fixed-point maps with five fractional bits, four
// neighbour bilinear interpolation through p_top and p_bottom. The map word
// layout, the clamping, the rounding and the single-request memory access
// are this design's choices.
module remap
  import sgm_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned FRAC  = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [ADDR_W-1:0] map_base,
  input  logic [ADDR_W-1:0] raw_base,
  input  logic [ADDR_W-1:0] out_base,
  output mem_req_t          mem_req,
  input  mem_rsp_t          mem_rsp
);
  localparam int unsigned ONE = 1 << FRAC;

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_RSP, S_CALC, S_WR} state_t;
  state_t state;

  logic [ADDR_W-1:0] mbase, rbase, obase;
  logic [$clog2(IMG_H)-1:0] i;
  logic [$clog2(IMG_W)-1:0] j;
  logic [2:0]               n;        // 0: map word, 1..4: A, B, C, D
  logic [15:0]              x0, y0, x1, y1;
  logic [FRAC-1:0]          fx, fy;
  logic [3:0][7:0]          px;       // A, B, C, D
  logic [7:0]               result;

  // address of the current request
  logic [ADDR_W-1:0] addr;
  always_comb begin
    logic [15:0] sx, sy;
    sx = (n == 1 || n == 3) ? x0 : x1;
    sy = (n <= 2) ? y0 : y1;
    if (n == 0)
      addr = mbase + ADDR_W'(4) * (ADDR_W'(i) * ADDR_W'(IMG_W) + ADDR_W'(j));
    else
      addr = rbase + ADDR_W'(sy) * ADDR_W'(IMG_W) + ADDR_W'(sx);
  end

  // bilinear blend
  always_comb begin
    logic [FRAC+8:0]     top, bot;
    logic [2*FRAC+9:0]   fin;
    top = (FRAC+9)'(px[0]) * (FRAC+9)'(ONE - fx) + (FRAC+9)'(px[1]) * (FRAC+9)'(fx);
    bot = (FRAC+9)'(px[2]) * (FRAC+9)'(ONE - fx) + (FRAC+9)'(px[3]) * (FRAC+9)'(fx);
    fin = (2*FRAC+10)'(top) * (2*FRAC+10)'(ONE - fy) + (2*FRAC+10)'(bot) * (2*FRAC+10)'(fy)
        + (2*FRAC+10)'(1 << (2*FRAC - 1));
    result = fin[2*FRAC +: 8];
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      mem_req <= '0;
      {mbase, rbase, obase} <= '0;
      i <= '0; j <= '0; n <= '0;
      {x0, y0, x1, y1} <= '0;
      fx <= '0; fy <= '0; px <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mbase <= map_base; rbase <= raw_base; obase <= out_base;
          i <= '0; j <= '0; n <= '0;
          state <= S_REQ;
        end
        S_REQ: begin
          if (mem_req.valid && mem_rsp.ready) begin
            mem_req <= '0;
            state   <= S_RSP;
          end else mem_req <= word_read(addr);
        end
        S_RSP: if (mem_rsp.rvalid) begin
          if (n == 0) begin
            logic [15:0] xi, yi;
            xi = mem_rsp.rdata[15:0]  >> FRAC;
            yi = mem_rsp.rdata[31:16] >> FRAC;
            fx <= mem_rsp.rdata[FRAC-1:0];
            fy <= mem_rsp.rdata[16 +: FRAC];
            x0 <= (32'(xi) >= IMG_W - 1) ? 16'(IMG_W - 1) : xi;
            x1 <= (32'(xi) >= IMG_W - 1) ? 16'(IMG_W - 1) : xi + 1'b1;
            y0 <= (32'(yi) >= IMG_H - 1) ? 16'(IMG_H - 1) : yi;
            y1 <= (32'(yi) >= IMG_H - 1) ? 16'(IMG_H - 1) : yi + 1'b1;
          end else begin
            px[n-1] <= byte_lane(mem_rsp.rdata, addr[1:0]);
          end
          if (n == 4) state <= S_CALC;
          else begin
            n <= n + 1'b1;
            state <= S_REQ;
          end
        end
        S_CALC: begin
          mem_req <= byte_write(obase + ADDR_W'(i) * ADDR_W'(IMG_W) + ADDR_W'(j), result);
          state <= S_WR;
        end
        S_WR: if (mem_rsp.ready) begin
          mem_req <= '0;
          n <= '0;
          if (32'(j) == IMG_W - 1) begin
            j <= '0;
            if (32'(i) == IMG_H - 1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              i <= i + 1'b1;
              state <= S_REQ;
            end
          end else begin
            j <= j + 1'b1;
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (mem_req.valid && !mem_rsp.ready) |=> $stable(mem_req);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
