// sgm_pkg: types and constants shared by the rectification and stereo
// matching peripherals.
//
// Every peripheral talks to the frame memory (DDR) through one simple
// memory port: a request (valid, write enable, byte address, 32-bit write
// data, byte strobes) accepted when `ready` is high, and for reads one
// in-order response word per accepted read, flagged by `rvalid`. Addresses
// are byte addresses; reads return the aligned 32-bit word that holds the
// addressed byte, and the peripheral picks its byte lane from addr[1:0].
// Inside the design every peripheral uses this port; at the top each port
// is turned into an AXI4 master (axi4_master) by an adapter that issues
// single-beat transfers. The AXI4 channel bundles are the two structs
// axi_m2s_t (master to slave) and axi_s2m_t (slave to master); IDs, cache,
// protection, QoS and user signals are left out.
//
// Image geometry, census window, disparity range and the number of
// parallel SGM blocks follow the described system (640x480 8-bit pixels,
// 7x7 census, 92 disparities, 5 blocks). The penalties P1 and P2 are not
// given and are this design's choice.
package sgm_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;

  localparam int unsigned COST_MAX = 255;  // 8-bit cost storage
  localparam int unsigned MAP_FRAC = 5;    // fractional bits of map entries

  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
    logic [3:0]        wstrb;
  } mem_req_t;

  typedef struct packed {
    logic              ready;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  // AXI4 burst type and size codes used here
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE_4B    = 3'b010;

  typedef struct packed {
    // write address
    logic              awvalid;
    logic [ADDR_W-1:0] awaddr;
    logic [7:0]        awlen;
    logic [2:0]        awsize;
    logic [1:0]        awburst;
    // write data
    logic              wvalid;
    logic [DATA_W-1:0] wdata;
    logic [3:0]        wstrb;
    logic              wlast;
    // write response
    logic              bready;
    // read address
    logic              arvalid;
    logic [ADDR_W-1:0] araddr;
    logic [7:0]        arlen;
    logic [2:0]        arsize;
    logic [1:0]        arburst;
    // read data
    logic              rready;
  } axi_m2s_t;

  typedef struct packed {
    logic              awready;
    logic              wready;
    logic              bvalid;
    logic [1:0]        bresp;
    logic              arready;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
    logic [1:0]        rresp;
    logic              rlast;
  } axi_s2m_t;

  // Byte write request for an arbitrary byte address.
  function automatic mem_req_t byte_write(input logic [ADDR_W-1:0] addr,
                                          input logic [7:0] data);
    mem_req_t r;
    r.valid = 1'b1;
    r.we    = 1'b1;
    r.addr  = {addr[ADDR_W-1:2], 2'b00};
    r.wdata = {4{data}};
    r.wstrb = 4'b0001 << addr[1:0];
    return r;
  endfunction

  // Read request for the word that holds a byte address.
  function automatic mem_req_t word_read(input logic [ADDR_W-1:0] addr);
    mem_req_t r;
    r.valid = 1'b1;
    r.we    = 1'b0;
    r.addr  = {addr[ADDR_W-1:2], 2'b00};
    r.wdata = '0;
    r.wstrb = '0;
    return r;
  endfunction

  function automatic logic [7:0] byte_lane(input logic [DATA_W-1:0] w,
                                           input logic [1:0] lane);
    return w[8*lane +: 8];
  endfunction

endpackage
