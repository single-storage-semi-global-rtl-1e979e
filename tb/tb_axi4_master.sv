// tb_axi4_master: drives random single-word reads and byte/word writes into
// the adapter, the way a peripheral does (request held until accepted, one
// outstanding), with an AXI4 memory behind it. Two copies are exercised in turn:
// one with a memory that answers at once, where the cycle counts are
// checked (read data the cycle after acceptance, write accepted the cycle
// after the AW/W handshake), and one with random READY drops and latencies.
// Checks: read data against a testbench copy of memory, written bytes in
// memory by the time the write is accepted, no protocol errors seen by the
// memory, and the single-beat fields of every AXI4 beat.
module tb_axi4_master;
  import sgm_pkg::*;
  localparam int MEMB = 256;
  localparam int NOPS = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mem_req_t [1:0] req;
  mem_rsp_t [1:0] rsp;
  axi_m2s_t [1:0] m2s;
  axi_s2m_t [1:0] s2m;

  for (genvar k = 0; k < 2; k++) begin : g_dut
    axi4_master dut (.clk, .rst_n, .mem_req(req[k]), .mem_rsp(rsp[k]),
                     .axi_o(m2s[k]), .axi_i(s2m[k]));
  end
  axi_mem_model #(.NPORTS(1), .MEM_BYTES(MEMB), .STALL(1'b0)) m_fast (
    .clk, .rst_n, .axi_i(m2s[0:0]), .axi_o(s2m[0:0]));
  axi_mem_model #(.NPORTS(1), .MEM_BYTES(MEMB), .STALL(1'b1)) m_slow (
    .clk, .rst_n, .axi_i(m2s[1:1]), .axi_o(s2m[1:1]));

  byte unsigned shadow [2][MEMB];

  function automatic logic [7:0] mbyte(input int k, input int a);
    return (k == 0) ? m_fast.mem[a] : m_slow.mem[a];
  endfunction

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endfunction

  // every beat leaving either adapter is a single 4-byte INCR beat
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) begin
      if (m2s[k].arvalid && s2m[k].arready)
        check(m2s[k].arlen == 0 && m2s[k].arsize == AXI_SIZE_4B &&
              m2s[k].arburst == AXI_BURST_INCR, "AR beat fields");
      if (m2s[k].wvalid && s2m[k].wready)
        check(m2s[k].wlast && m2s[k].awlen == 0, "W beat fields");
    end
  end

  task automatic run(input int k);
    bit          we, full;
    int          a, t0, t1;
    logic [31:0] wd, exp_w;
    for (int op = 0; op < NOPS; op++) begin
      we   = 1'($urandom % 2);
      a    = $urandom % MEMB;
      full = 1'($urandom % 2);
      wd   = $urandom;
      if (we) req[k] = full ? '{valid: 1'b1, we: 1'b1, addr: 32'(a & ~3), wdata: wd, wstrb: 4'hF}
                             : byte_write(32'(a), wd[7:0]);
      else    req[k] = word_read(32'(a));
      for (int b = 0; b < 4; b++) exp_w[8*b +: 8] = shadow[k][(a & ~3) + b];
      t0 = 0;
      @(negedge clk);
      while (!rsp[k].ready) begin @(negedge clk); t0++; end
      @(posedge clk);          // accepted at this edge
      #1 req[k] = '0;          // (checks below run after the edge settles)
      if (we) begin
        if (full) for (int b = 0; b < 4; b++) shadow[k][(a & ~3) + b] = wd[8*b +: 8];
        else shadow[k][a] = wd[7:0];
        if (k == 0) check(t0 == 1, $sformatf("write accept cycles %0d", t0));
        for (int b = 0; b < 4; b++)
          check(mbyte(k, (a & ~3) + b) == shadow[k][(a & ~3) + b],
                $sformatf("port %0d write at %0d not in memory", k, a));
      end else begin
        if (k == 0) check(t0 == 0, $sformatf("read accept cycles %0d", t0));
        t1 = 0;
        @(negedge clk);     // the cycle after acceptance
        while (!rsp[k].rvalid) begin @(negedge clk); t1++; end
        if (k == 0) check(t1 == 0, $sformatf("read data cycles %0d", t1));
        check(rsp[k].rdata == exp_w, $sformatf("port %0d read %0d got %h exp %h",
                                               k, a, rsp[k].rdata, exp_w));
        @(posedge clk);
        #1;
      end
      if ($urandom % 3 == 0) repeat ($urandom % 3) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    req = '0;
    for (int a = 0; a < MEMB; a++) begin
      shadow[0][a] = byte'($urandom); shadow[1][a] = byte'($urandom);
      m_fast.mem[a] = shadow[0][a];  m_slow.mem[a] = shadow[1][a];
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    run(0);
    run(1);
    repeat (5) @(posedge clk);
    check(m_fast.proto_err == 0 && m_slow.proto_err == 0, "protocol errors seen by memory");
    check(m_slow.stalls > 0, "slow memory never stalled");
    check(m_fast.reads + m_fast.writes == NOPS, "fast memory transfer count");
    check(m_slow.reads + m_slow.writes == NOPS, "slow memory transfer count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
