// mem_model: behavioural frame memory (the DRAM) for the testbenches.
//
// NPORTS independent request/response ports of the sgm_pkg kind share one
// byte array. A port accepts a request when `ready` is high; a read is
// answered with the aligned 32-bit word LAT cycles later (LAT >= 1), a write
// stores the bytes enabled by wstrb. With STALL set, `ready` drops at
// random and the read latency varies between 1 and 4 cycles, to exercise
// the peripherals' handshakes. The array is public (`mem`) so a testbench
// can load images and check results directly. `stalls` counts cycles in
// which a request waited. Requests are ignored while rst_n is low, when
// the peripherals' outputs are not yet defined.
module mem_model
  import sgm_pkg::*;
#(
  parameter int unsigned NPORTS    = 1,
  parameter int unsigned MEM_BYTES = 1 << 16,
  parameter bit          STALL     = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  mem_req_t [NPORTS-1:0] req,
  output mem_rsp_t [NPORTS-1:0] rsp
);
  logic [7:0] mem [MEM_BYTES];
  int unsigned stalls = 0;

  logic [NPORTS-1:0]       pend;
  int unsigned             wait_cnt [NPORTS];
  logic [DATA_W-1:0]       pdata [NPORTS];
  logic [NPORTS-1:0]       rdy;

  initial begin
    pend = '0;
    rdy  = '1;
    for (int p = 0; p < NPORTS; p++) begin
      wait_cnt[p] = 0;
      pdata[p]    = '0;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp[p].ready  = rdy[p] && !pend[p];
      rsp[p].rvalid = pend[p] && (wait_cnt[p] == 0);
      rsp[p].rdata  = pdata[p];
    end
  end

  function automatic logic [DATA_W-1:0] rd_word(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] w;
    for (int b = 0; b < 4; b++) w[8*b +: 8] = mem[(a & ~32'd3) + b];
    return w;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (pend[p]) begin
        if (wait_cnt[p] == 0) pend[p] <= 1'b0;
        else wait_cnt[p] <= wait_cnt[p] - 1;
      end
      if (rst_n && req[p].valid && !rsp[p].ready) stalls = stalls + 1;
      if (rst_n && req[p].valid && rsp[p].ready) begin
        if (req[p].we) begin
          for (int b = 0; b < 4; b++)
            if (req[p].wstrb[b]) mem[(req[p].addr & ~32'd3) + b] = req[p].wdata[8*b +: 8];
        end else begin
          pend[p]     <= 1'b1;
          pdata[p]    <= rd_word(req[p].addr);
          wait_cnt[p] <= STALL ? ($urandom % 4) : 0;
        end
      end
      rdy[p] <= STALL ? ($urandom % 4 != 0) : 1'b1;
    end
  end
endmodule
