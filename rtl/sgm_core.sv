// sgm_core: one SGM stereo matching block.
//
// It computes a disparity map for one horizontal section of a rectified
// stereo pair with census matching and a single-storage MGM aggregation of
// four paths (top-left, top, top-right, left). The section's input rows are
// read from memory in raster order, one left and one right pixel per step.
// Each image has a line buffer and a 7x7 census window; the census centre
// trails the newest pixel by WIN/2 rows and WIN/2 columns, so each row is
// followed by WIN/2 flush steps that push out-of-image columns.
//
// For every centre pixel p = (cy, cx) of an output row the disparity loop
// runs once over d = 0..DRANGE-1, one disparity per clock:
//   C(p,d)   Hamming distance of the left census and the right census at
//            column cx-d (the census bit count when cx-d < 0);
//   L(p,d)   mgm_cost() of the four neighbour vectors and C(p,d);
//   the running minimum of L(p,.) and its first index, the disparity.
// The neighbour vectors live in registers: TL, T, TR (from cost_row, i.e.
// the row above) and L (cost_left, the pixel to the left). In the same loop
// cost_left is written into cost_row at column cx-1 (the top-left vector is
// no longer needed) and the vector of column cx+2 is prefetched, so that
// after the loop the window shifts: TL<=T, T<=TR, TR<=prefetch, L<=new.
// Image edges: vectors outside the image are all COST_MAX, which makes
// their smoothing term zero. cost_row is set to COST_MAX at every start.
//
// Interface: pulse `start` with the section configured on the row inputs;
// `done` pulses when the last disparity has been written. Input rows
// [row_in_start, row_in_end) are read; a centre row cy is computed and
// written when its whole window lies in the input rows and
// out_start <= cy < out_end. Disparities are written as bytes at
// disp_base + cy*IMG_W + cx. One memory port (sgm_pkg), one request at a
// time.
//
// Timing: with a memory that accepts at once and answers one cycle later,
// a centre pixel takes DRANGE + 12 cycles (the search loop is pipelined,
// the pixel loop is not); see the time equation T ~ rows x cols x
// (search range + pipeline depth). The last WIN/2 centre pixels of a row
// need no memory reads and take DRANGE + 7; a step of a row that yields
// no centre row takes 10 cycles. Read data is expected at the earliest
// the cycle after the read is accepted.
//
// Follows the described design: raster scan, census 7x7, 92 disparities,
// one stored vector per pixel for the four grouped paths, cost_row and
// cost_left with the update order of the array-update figure, stored
// minima, edges and initial values at the maximum cost, the divide by 4
// and the upper bound. This design's own choices: the memory port, the
// register window TL/T/TR/prefetch, the edge handling of the census window,
// the cost for cx-d < 0, P1/P2, the first-minimum tie rule and that rows
// outside [WIN/2, IMG_H-WIN/2) are not written.
module sgm_core
  import sgm_pkg::*;
#(
  parameter int unsigned IMG_W  = 640,
  parameter int unsigned IMG_H  = 480,
  parameter int unsigned WIN    = 7,
  parameter int unsigned DRANGE = 92,
  parameter int unsigned P1     = 10,
  parameter int unsigned P2     = 40,
  parameter int unsigned COST_W = 8,
  parameter int unsigned ROW_W  = $clog2(IMG_H + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [ADDR_W-1:0] left_base,
  input  logic [ADDR_W-1:0] right_base,
  input  logic [ADDR_W-1:0] disp_base,
  input  logic [ROW_W-1:0]  row_in_start,
  input  logic [ROW_W-1:0]  row_in_end,
  input  logic [ROW_W-1:0]  out_start,
  input  logic [ROW_W-1:0]  out_end,
  output mem_req_t          mem_req,
  input  mem_rsp_t          mem_rsp
);
  localparam int unsigned H      = WIN / 2;
  localparam int unsigned NBITS  = WIN * WIN - 1;
  localparam int unsigned C_W    = $clog2(NBITS + 1);
  localparam int unsigned COL_W  = $clog2(IMG_W);
  localparam int unsigned IX_W   = $clog2(IMG_W + H + 1);
  localparam int unsigned D_W    = $clog2(DRANGE);
  localparam int unsigned K_W    = $clog2(2 * DRANGE + 1);
  localparam logic [COST_W-1:0] CMAX = '1;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ROW, S_PRE, S_RDL, S_WL, S_RDR, S_WR, S_LB, S_SH,
    S_CEN, S_DISP, S_UPD, S_WD, S_FLUSH
  } state_t;

  typedef logic [DRANGE-1:0][COST_W-1:0] cvec_t;

  state_t state;

  // configuration latched at start
  logic [ADDR_W-1:0] lbase, rbase, dbase;
  logic [ROW_W-1:0]  rin_s, rin_e, o_s, o_e;

  // scan position
  logic [ROW_W-1:0] iy;
  logic [IX_W-1:0]  ix;
  logic             crow;          // current row produces a centre row
  logic [ROW_W-1:0] cy;
  logic [IX_W-1:0]  cx;
  logic [K_W-1:0]   k;             // loop counter
  logic [COL_W-1:0] icol;          // init sweep column

  // pixels
  logic [7:0] lpix, rpix;

  // neighbour vectors and minima
  cvec_t            v_tl, v_t, v_tr, v_nx, v_l, v_cur;
  logic [COST_W-1:0] m_tl, m_t, m_tr, m_nx, m_l;
  logic [COST_W-1:0] best_v;
  logic [D_W-1:0]    best_d;

  // census
  logic [NBITS-1:0]              lc;
  logic [DRANGE-1:0][NBITS-1:0]  rc;
  logic [DRANGE-1:0]             rcv;

  // ------------------------------------------------------------------
  // line buffers and census windows
  // ------------------------------------------------------------------
  logic                lb_en;
  logic [WIN-1:0][7:0] lcol, rcol;
  logic                lcol_v, rcol_v;
  logic                win_shift, win_in_valid;
  logic [NBITS-1:0]    lcen, rcen;
  logic [7:0]          lctr, rctr;
  logic                lctr_v, rctr_v;

  line_buffer #(.IMG_W(IMG_W), .WIN(WIN)) u_lb_l (
    .clk, .en(lb_en), .col(COL_W'(ix)), .pix(lpix), .col_out(lcol), .col_valid(lcol_v));
  line_buffer #(.IMG_W(IMG_W), .WIN(WIN)) u_lb_r (
    .clk, .en(lb_en), .col(COL_W'(ix)), .pix(rpix), .col_out(rcol), .col_valid(rcol_v));

  census_window #(.WIN(WIN)) u_cw_l (
    .clk, .rst_n, .shift(win_shift), .col_in(win_in_valid ? lcol : '0),
    .in_valid(win_in_valid), .census(lcen), .centre(lctr), .centre_valid(lctr_v));
  census_window #(.WIN(WIN)) u_cw_r (
    .clk, .rst_n, .shift(win_shift), .col_in(win_in_valid ? rcol : '0),
    .in_valid(win_in_valid), .census(rcen), .centre(rctr), .centre_valid(rctr_v));

  assign lb_en        = (state == S_LB) && (ix < IX_W'(IMG_W));
  assign win_shift    = (state == S_SH);
  assign win_in_valid = (ix < IX_W'(IMG_W));

  // ------------------------------------------------------------------
  // cost_row store
  // ------------------------------------------------------------------
  logic              cr_rd_en, cr_wr_en, cm_rd_en, cm_wr_en;
  logic [COL_W-1:0]  cr_rd_col, cr_wr_col, cm_rd_col, cm_wr_col;
  logic [D_W-1:0]    cr_rd_d, cr_wr_d;
  logic [COST_W-1:0] cr_rd_data, cr_wr_data, cm_rd_data, cm_wr_data;

  cost_row_mem #(.IMG_W(IMG_W), .DRANGE(DRANGE), .COST_W(COST_W)) u_cost_row (
    .clk,
    .rd_en(cr_rd_en), .rd_col(cr_rd_col), .rd_d(cr_rd_d), .rd_data(cr_rd_data),
    .wr_en(cr_wr_en), .wr_col(cr_wr_col), .wr_d(cr_wr_d), .wr_data(cr_wr_data),
    .min_rd_en(cm_rd_en), .min_rd_col(cm_rd_col), .min_rd_data(cm_rd_data),
    .min_wr_en(cm_wr_en), .min_wr_col(cm_wr_col), .min_wr_data(cm_wr_data));

  // read bookkeeping: what the data arriving this cycle belongs to
  logic             rd_q;
  logic [1:0]       rd_tgt_q;      // 0: T, 1: TR, 2: prefetch
  logic [D_W-1:0]   rd_d_q;
  logic             mrd_q;
  logic [1:0]       mrd_tgt_q;

  logic [D_W-1:0] d_now;
  assign d_now = D_W'(k);

  // prefetch column cx+2 exists?
  logic nx_in;
  assign nx_in = (32'(cx) + 2) < IMG_W;

  always_comb begin
    cr_rd_en = 1'b0; cr_rd_col = '0; cr_rd_d = '0;
    cr_wr_en = 1'b0; cr_wr_col = '0; cr_wr_d = '0; cr_wr_data = '0;
    cm_rd_en = 1'b0; cm_rd_col = '0;
    cm_wr_en = 1'b0; cm_wr_col = '0; cm_wr_data = '0;
    unique case (state)
      S_INIT: begin
        cr_wr_en = 1'b1; cr_wr_col = icol; cr_wr_d = d_now; cr_wr_data = CMAX;
        cm_wr_en = (k == 0); cm_wr_col = icol; cm_wr_data = CMAX;
      end
      S_PRE: begin
        // k counts 0 .. 2*DRANGE: reads of columns 0 and 1
        cr_rd_en  = (k < K_W'(2 * DRANGE));
        if (k < K_W'(DRANGE)) begin
          cr_rd_col = '0; cr_rd_d = d_now;
        end else begin
          cr_rd_col = COL_W'(1); cr_rd_d = D_W'(k - K_W'(DRANGE));
        end
        cm_rd_en  = (k < K_W'(2)); cm_rd_col = (k == 0) ? COL_W'(0) : COL_W'(1);
      end
      S_DISP: begin
        if (k < K_W'(DRANGE)) begin
          cr_wr_en = (cx != 0); cr_wr_col = COL_W'(cx - 1); cr_wr_d = d_now;
          cr_wr_data = v_l[d_now];
          cr_rd_en = nx_in; cr_rd_col = COL_W'(cx + 2); cr_rd_d = d_now;
        end
        cm_wr_en = (k == 0) && (cx != 0); cm_wr_col = COL_W'(cx - 1); cm_wr_data = m_l;
        cm_rd_en = (k == 0) && nx_in;     cm_rd_col = COL_W'(cx + 2);
      end
      S_FLUSH: begin
        cr_wr_en = 1'b1; cr_wr_col = COL_W'(IMG_W - 1); cr_wr_d = d_now;
        cr_wr_data = v_l[d_now];
        cm_wr_en = (k == 0); cm_wr_col = COL_W'(IMG_W - 1); cm_wr_data = m_l;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // per-disparity datapath
  // ------------------------------------------------------------------
  logic [C_W-1:0]              hd, cost_c;
  logic [3:0][COST_W-1:0]      n_dm1, n_d, n_dp1, n_min;
  logic [COST_W-1:0]           agg;
  logic                        d_first, d_last;

  hamming_distance #(.NBITS(NBITS)) u_hd (.a(lc), .b(rc[d_now]), .distance(hd));

  assign cost_c  = rcv[d_now] ? hd : C_W'(NBITS);
  assign d_first = (d_now == 0);
  assign d_last  = (32'(d_now) == DRANGE - 1);

  always_comb begin
    logic [D_W-1:0] dm, dp;
    dm = d_first ? d_now : d_now - 1'b1;
    dp = d_last  ? d_now : d_now + 1'b1;
    n_d   = {v_l[d_now], v_tr[d_now], v_t[d_now], v_tl[d_now]};
    n_dm1 = {v_l[dm],    v_tr[dm],    v_t[dm],    v_tl[dm]};
    n_dp1 = {v_l[dp],    v_tr[dp],    v_t[dp],    v_tl[dp]};
    n_min = {m_l, m_tr, m_t, m_tl};
  end

  mgm_cost #(.COST_W(COST_W), .C_W(C_W), .P1(P1), .P2(P2)) u_mgm (
    .v_dm1(n_dm1), .v_d(n_d), .v_dp1(n_dp1), .vmin(n_min),
    .d_is_first(d_first), .d_is_last(d_last), .c(cost_c), .agg(agg));

  // ------------------------------------------------------------------
  // control
  // ------------------------------------------------------------------
  logic [ADDR_W-1:0] pix_off;
  assign pix_off = ADDR_W'(iy) * ADDR_W'(IMG_W) + ADDR_W'(ix);

  logic row_is_centre;
  always_comb begin
    logic [ROW_W:0] c_y;
    c_y = {1'b0, iy} - (ROW_W+1)'(H);
    row_is_centre = (32'(iy) >= 32'(rin_s) + WIN - 1) &&
                    ({1'b0, o_s} <= c_y) && (c_y < {1'b0, o_e});
  end

  logic centre_step;
  assign centre_step = crow && (ix >= IX_W'(H));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      mem_req <= '0;
      {lbase, rbase, dbase} <= '0;
      {rin_s, rin_e, o_s, o_e} <= '0;
      iy <= '0; ix <= '0; crow <= 1'b0; cy <= '0; cx <= '0; k <= '0; icol <= '0;
      lpix <= '0; rpix <= '0;
      v_tl <= '0; v_t <= '0; v_tr <= '0; v_nx <= '0; v_l <= '0; v_cur <= '0;
      m_tl <= '0; m_t <= '0; m_tr <= '0; m_nx <= '0; m_l <= '0;
      best_v <= '0; best_d <= '0;
      lc <= '0; rc <= '0; rcv <= '0;
      rd_q <= 1'b0; rd_tgt_q <= '0; rd_d_q <= '0; mrd_q <= 1'b0; mrd_tgt_q <= '0;
    end else begin
      done <= 1'b0;

      // ---- capture of cost_row read data (one cycle after the read) ----
      if (rd_q) begin
        unique case (rd_tgt_q)
          2'd0:    v_t[rd_d_q]  <= cr_rd_data;
          2'd1:    v_tr[rd_d_q] <= cr_rd_data;
          default: v_nx[rd_d_q] <= cr_rd_data;
        endcase
      end
      if (mrd_q) begin
        unique case (mrd_tgt_q)
          2'd0:    m_t  <= cm_rd_data;
          2'd1:    m_tr <= cm_rd_data;
          default: m_nx <= cm_rd_data;
        endcase
      end
      rd_q  <= cr_rd_en;
      rd_d_q <= cr_rd_d;
      rd_tgt_q <= (state == S_PRE) ? ((k < K_W'(DRANGE)) ? 2'd0 : 2'd1) : 2'd2;
      mrd_q <= cm_rd_en;
      mrd_tgt_q <= (state == S_PRE) ? ((k == 0) ? 2'd0 : 2'd1) : 2'd2;

      unique case (state)
        S_IDLE: if (start) begin
          lbase <= left_base; rbase <= right_base; dbase <= disp_base;
          rin_s <= row_in_start; rin_e <= row_in_end; o_s <= out_start; o_e <= out_end;
          icol <= '0; k <= '0;
          state <= S_INIT;
        end

        // cost_row <= COST_MAX everywhere, once per frame
        S_INIT: begin
          if (32'(k) == DRANGE - 1) begin
            k <= '0;
            if (32'(icol) == IMG_W - 1) begin
              iy <= rin_s;
              state <= S_ROW;
            end else icol <= icol + 1'b1;
          end else k <= k + 1'b1;
        end

        S_ROW: begin
          if (iy >= rin_e) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            ix   <= '0;
            crow <= row_is_centre;
            cy   <= ROW_W'(iy - ROW_W'(H));
            rcv  <= '0;
            // left edge: no left or top-left neighbour
            v_tl <= {DRANGE{CMAX}}; m_tl <= CMAX;
            v_l  <= {DRANGE{CMAX}}; m_l  <= CMAX;
            k    <= '0;
            state <= row_is_centre ? S_PRE : S_RDL;
          end
        end

        // T <= cost_row[0], TR <= cost_row[1] (or the edge value)
        S_PRE: begin
          if (k == K_W'(2 * DRANGE)) begin
            k <= '0;
            state <= S_RDL;
          end else k <= k + 1'b1;
        end

        S_RDL: begin
          if (ix < IX_W'(IMG_W)) begin
            if (mem_req.valid && mem_rsp.ready) begin
              mem_req <= '0;
              state   <= S_WL;
            end else mem_req <= word_read(lbase + pix_off);
          end else begin
            lpix <= '0; rpix <= '0;
            state <= S_LB;
          end
        end
        S_WL: if (mem_rsp.rvalid) begin
          lpix  <= byte_lane(mem_rsp.rdata, 2'(lbase + pix_off));
          state <= S_RDR;
        end
        S_RDR: begin
          if (mem_req.valid && mem_rsp.ready) begin
            mem_req <= '0;
            state   <= S_WR;
          end else mem_req <= word_read(rbase + pix_off);
        end
        S_WR: if (mem_rsp.rvalid) begin
          rpix  <= byte_lane(mem_rsp.rdata, 2'(rbase + pix_off));
          state <= S_LB;
        end

        S_LB: state <= S_SH;     // line buffer read/write
        S_SH: state <= S_CEN;    // census windows shift

        S_CEN: begin
          if (centre_step) begin
            cx  <= ix - IX_W'(H);
            lc  <= lcen;
            rc  <= {rc[DRANGE-2:0], rcen};
            rcv <= {rcv[DRANGE-2:0], rctr_v};
            k   <= '0;
            state <= S_DISP;
          end else begin
            state <= S_WD;       // next column
          end
        end

        // one disparity per cycle, plus one cycle for the last prefetch
        S_DISP: begin
          if (k < K_W'(DRANGE)) begin
            v_cur[d_now] <= agg;
            if (k == 0 || agg < best_v) begin
              best_v <= agg;
              best_d <= d_now;
            end
          end
          if (k == K_W'(DRANGE)) state <= S_UPD;
          else k <= k + 1'b1;
        end

        // shift the neighbour window, cost_left <= new vector, write disparity
        S_UPD: begin
          v_tl <= v_t;  m_tl <= m_t;
          v_t  <= v_tr; m_t  <= m_tr;
          if (nx_in) begin
            v_tr <= v_nx; m_tr <= m_nx;
          end else begin
            v_tr <= {DRANGE{CMAX}}; m_tr <= CMAX;
          end
          v_l <= v_cur; m_l <= best_v;
          mem_req <= byte_write(dbase + ADDR_W'(cy) * ADDR_W'(IMG_W) + ADDR_W'(cx),
                                8'(best_d));
          state <= S_WD;
        end

        // wait for the disparity write (if any), then advance the column
        S_WD: begin
          if (mem_req.valid && !mem_rsp.ready) begin
            // hold the write
          end else begin
            mem_req <= '0;
            if (32'(ix) == IMG_W + H - 1) begin
              k <= '0;
              if (crow) state <= S_FLUSH;
              else begin
                iy <= iy + 1'b1;
                state <= S_ROW;
              end
            end else begin
              ix <= ix + 1'b1;
              state <= S_RDL;
            end
          end
        end

        // cost_left (last column) -> cost_row[IMG_W-1]
        S_FLUSH: begin
          if (32'(k) == DRANGE - 1) begin
            iy <= iy + 1'b1;
            state <= S_ROW;
          end else k <= k + 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // a request that is not accepted stays unchanged
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (mem_req.valid && !mem_rsp.ready) |=> $stable(mem_req);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
