// axi_mem_model: behavioural frame memory with NPORTS AXI4 slave ports.
//
// All ports share one byte array, public as `mem` so a testbench can load
// images and check results directly. Each port takes single-beat transfers:
// a write is answered on B the cycle after its second beat (AW or W)
// arrives, or up to three cycles later with STALL, and is stored in the
// array at the B handshake; a read is answered on
// R with the aligned word, the next cycle or one to four cycles later. With
// STALL set the READY signals drop at random. `stalls` counts cycles in
// which a VALID waited for READY; `proto_err` counts beats that break the
// single-beat form (LEN != 0, SIZE != 4 bytes, BURST != INCR, WLAST low)
// or a VALID that dropped before its handshake. Inputs are ignored while
// rst_n is low.
module axi_mem_model
  import sgm_pkg::*;
#(
  parameter int unsigned NPORTS    = 1,
  parameter int unsigned MEM_BYTES = 1 << 16,
  parameter bit          STALL     = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  axi_m2s_t [NPORTS-1:0] axi_i,
  output axi_s2m_t [NPORTS-1:0] axi_o
);
  logic [7:0] mem [MEM_BYTES];
  int unsigned stalls    = 0;
  int unsigned proto_err = 0;
  int unsigned writes    = 0;
  int unsigned reads     = 0;

  logic [NPORTS-1:0] aw_got, w_got, b_pend, r_pend;
  logic [NPORTS-1:0] aw_rdy, w_rdy, ar_rdy;
  logic [ADDR_W-1:0] aw_addr [NPORTS];
  logic [DATA_W-1:0] w_data  [NPORTS];
  logic [3:0]        w_strb  [NPORTS];
  logic [DATA_W-1:0] r_data  [NPORTS];
  int unsigned       b_wait  [NPORTS];
  int unsigned       r_wait  [NPORTS];
  logic [NPORTS-1:0] prev_awv, prev_wv, prev_arv, prev_awr, prev_wr, prev_arr;

  initial begin
    {aw_got, w_got, b_pend, r_pend} = '0;
    {aw_rdy, w_rdy, ar_rdy} = '1;
    {prev_awv, prev_wv, prev_arv, prev_awr, prev_wr, prev_arr} = '0;
    for (int p = 0; p < NPORTS; p++) begin
      aw_addr[p] = '0; w_data[p] = '0; w_strb[p] = '0; r_data[p] = '0;
      b_wait[p] = 0; r_wait[p] = 0;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      axi_o[p]         = '0;
      axi_o[p].awready = aw_rdy[p] && !aw_got[p] && !b_pend[p];
      axi_o[p].wready  = w_rdy[p]  && !w_got[p]  && !b_pend[p];
      axi_o[p].bvalid  = b_pend[p] && (b_wait[p] == 0);
      axi_o[p].arready = ar_rdy[p] && !r_pend[p];
      axi_o[p].rvalid  = r_pend[p] && (r_wait[p] == 0);
      axi_o[p].rdata   = r_data[p];
      axi_o[p].rlast   = axi_o[p].rvalid;
    end
  end

  function automatic logic [DATA_W-1:0] rd_word(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] w;
    for (int b = 0; b < 4; b++) w[8*b +: 8] = mem[(a & ~32'd3) + b];
    return w;
  endfunction

  function automatic int unsigned lat();
    return STALL ? ($urandom % 4) : 0;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (rst_n) begin
        // VALID must stay up until READY
        if ((prev_awv[p] && !prev_awr[p] && !axi_i[p].awvalid) ||
            (prev_wv[p]  && !prev_wr[p]  && !axi_i[p].wvalid)  ||
            (prev_arv[p] && !prev_arr[p] && !axi_i[p].arvalid))
          proto_err = proto_err + 1;
        if ((axi_i[p].awvalid && !axi_o[p].awready) || (axi_i[p].wvalid && !axi_o[p].wready) ||
            (axi_i[p].arvalid && !axi_o[p].arready))
          stalls = stalls + 1;

        // write address and data; the write is done in the cycle in which
        // the second of the two beats arrives
        begin
          automatic bit aw_hs = axi_i[p].awvalid && axi_o[p].awready;
          automatic bit w_hs  = axi_i[p].wvalid  && axi_o[p].wready;
          automatic logic [ADDR_W-1:0] wa = aw_hs ? axi_i[p].awaddr : aw_addr[p];
          automatic logic [DATA_W-1:0] wd = w_hs  ? axi_i[p].wdata  : w_data[p];
          automatic logic [3:0]        ws = w_hs  ? axi_i[p].wstrb  : w_strb[p];
          if (aw_hs && (axi_i[p].awlen != 0 || axi_i[p].awsize != AXI_SIZE_4B ||
                        axi_i[p].awburst != AXI_BURST_INCR))
            proto_err = proto_err + 1;
          if (w_hs && !axi_i[p].wlast) proto_err = proto_err + 1;
          if (aw_hs) aw_addr[p] <= wa;
          if (w_hs)  begin w_data[p] <= wd; w_strb[p] <= ws; end
          if ((aw_got[p] || aw_hs) && (w_got[p] || w_hs)) begin
            aw_got[p] <= 1'b0;
            w_got[p]  <= 1'b0;
            b_pend[p] <= 1'b1;
            b_wait[p] <= lat();
          end else begin
            if (aw_hs) aw_got[p] <= 1'b1;
            if (w_hs)  w_got[p]  <= 1'b1;
          end
        end
        if (b_pend[p]) begin
          if (b_wait[p] != 0) b_wait[p] <= b_wait[p] - 1;
          else if (axi_i[p].bready) begin
            for (int b = 0; b < 4; b++)
              if (w_strb[p][b]) mem[(aw_addr[p] & ~32'd3) + b] = w_data[p][8*b +: 8];
            b_pend[p] <= 1'b0;
            writes    = writes + 1;
          end
        end

        // read
        if (axi_i[p].arvalid && axi_o[p].arready) begin
          if (axi_i[p].arlen != 0 || axi_i[p].arsize != AXI_SIZE_4B ||
              axi_i[p].arburst != AXI_BURST_INCR)
            proto_err = proto_err + 1;
          r_pend[p] <= 1'b1;
          r_data[p] <= rd_word(axi_i[p].araddr);
          r_wait[p] <= lat();
          reads     = reads + 1;
        end else if (r_pend[p]) begin
          if (r_wait[p] != 0) r_wait[p] <= r_wait[p] - 1;
          else if (axi_i[p].rready) r_pend[p] <= 1'b0;
        end
      end
      prev_awv[p] <= rst_n && axi_i[p].awvalid;
      prev_wv[p]  <= rst_n && axi_i[p].wvalid;
      prev_arv[p] <= rst_n && axi_i[p].arvalid;
      prev_awr[p] <= axi_o[p].awready;
      prev_wr[p]  <= axi_o[p].wready;
      prev_arr[p] <= axi_o[p].arready;
      aw_rdy[p] <= STALL ? ($urandom % 4 != 0) : 1'b1;
      w_rdy[p]  <= STALL ? ($urandom % 4 != 0) : 1'b1;
      ar_rdy[p] <= STALL ? ($urandom % 4 != 0) : 1'b1;
    end
  end
endmodule
