// axi4_master: turns a peripheral's simple memory port into an AXI4
// master, the bus the peripherals use to reach the frame memory.
//
// The peripheral holds a request unchanged until it sees `mem_rsp.ready`,
// so the adapter drives the AXI4 address and data channels straight from
// the request and keeps only two flags of state.
//   Read:  ARVALID follows the request; the request is accepted with the
//          AR handshake. RREADY is high until the single R beat, whose data
//          goes back on `mem_rsp.rvalid` / `mem_rsp.rdata` in that cycle.
//   Write: AWVALID and WVALID follow the request, each until its own
//          handshake (aw_done, w_done). The request is accepted only when
//          the B response arrives, so a peripheral that has finished knows
//          all its writes are in memory.
// Every transfer is one 32-bit beat: LEN 0, SIZE 4 bytes, INCR, WLAST 1,
// with the peripheral's byte strobes. Error responses are not reported
// back (the peripherals have no use for them).
//
// Timing: a read costs the same as on the plain port (accept with ARREADY,
// data the cycle after at the earliest); a write costs one more cycle (B
// after the AW/W handshakes).
//
// The use of AXI4 for the peripherals' memory traffic follows the described
// system; single-beat transfers, one outstanding transfer and no IDs are
// this design's choices.
module axi4_master
  import sgm_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t mem_req,
  output mem_rsp_t mem_rsp,
  output axi_m2s_t axi_o,
  input  axi_s2m_t axi_i
);
  logic r_wait;            // AR accepted, R beat not yet seen
  logic aw_done, w_done;   // write address / data already accepted

  logic rd_req, wr_req;
  assign rd_req = mem_req.valid && !mem_req.we && !r_wait;
  assign wr_req = mem_req.valid &&  mem_req.we;

  always_comb begin
    mem_rsp.ready  = mem_req.we ? (aw_done && w_done && axi_i.bvalid)
                                : (!r_wait && axi_i.arready);
    mem_rsp.rvalid = r_wait && axi_i.rvalid;
    mem_rsp.rdata  = axi_i.rdata;

    axi_o          = '0;
    axi_o.awaddr   = mem_req.addr;
    axi_o.awsize   = AXI_SIZE_4B;
    axi_o.awburst  = AXI_BURST_INCR;
    axi_o.awvalid  = wr_req && !aw_done;
    axi_o.wdata    = mem_req.wdata;
    axi_o.wstrb    = mem_req.wstrb;
    axi_o.wlast    = 1'b1;
    axi_o.wvalid   = wr_req && !w_done;
    axi_o.bready   = aw_done && w_done;
    axi_o.araddr   = mem_req.addr;
    axi_o.arsize   = AXI_SIZE_4B;
    axi_o.arburst  = AXI_BURST_INCR;
    axi_o.arvalid  = rd_req;
    axi_o.rready   = r_wait;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_wait  <= 1'b0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      if (rd_req && axi_i.arready)      r_wait <= 1'b1;
      else if (r_wait && axi_i.rvalid)  r_wait <= 1'b0;
      if (aw_done && w_done && axi_i.bvalid) begin
        aw_done <= 1'b0;
        w_done  <= 1'b0;
      end else begin
        if (axi_o.awvalid && axi_i.awready) aw_done <= 1'b1;
        if (axi_o.wvalid  && axi_i.wready)  w_done  <= 1'b1;
      end
    end
  end

  // AXI4 handshake rule: a valid address or data beat stays, unchanged,
  // until it is accepted.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (axi_o.arvalid && !axi_i.arready) |=> (axi_o.arvalid && $stable(axi_o.araddr)));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (axi_o.awvalid && !axi_i.awready) |=> (axi_o.awvalid && $stable(axi_o.awaddr)));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (axi_o.wvalid && !axi_i.wready) |=> (axi_o.wvalid && $stable(axi_o.wdata)
                                          && $stable(axi_o.wstrb)));
endmodule
