// axil_pkg: AXI4-Lite signal bundles used on every slave port of the design.
//
// axil_req_t carries everything the master drives (write address, write data,
// write-response ready, read address, read-data ready); axil_rsp_t everything
// the slave drives. Addresses and data are 32 bits, as on the processor's
// general-purpose AXI port. AWPROT/ARPROT are left out: no block here uses
// them. Responses are always OKAY.
package axil_pkg;

  localparam int unsigned AXIL_AW = 32;
  localparam int unsigned AXIL_DW = 32;

  localparam logic [1:0] RESP_OKAY = 2'b00;

  typedef struct packed {
    logic [AXIL_AW-1:0]   awaddr;
    logic                 awvalid;
    logic [AXIL_DW-1:0]   wdata;
    logic [AXIL_DW/8-1:0] wstrb;
    logic                 wvalid;
    logic                 bready;
    logic [AXIL_AW-1:0]   araddr;
    logic                 arvalid;
    logic                 rready;
  } axil_req_t;

  typedef struct packed {
    logic                 awready;
    logic                 wready;
    logic [1:0]           bresp;
    logic                 bvalid;
    logic                 arready;
    logic [AXIL_DW-1:0]   rdata;
    logic [1:0]           rresp;
    logic                 rvalid;
  } axil_rsp_t;

  // Offsets of the control registers every accelerator starts its map with.
  localparam logic [5:0] REG_CTRL = 6'h00;  // bit0 start, bit1 done (clear on read), bit2 idle, bit3 ready (clear on read)
  localparam logic [5:0] REG_GIE  = 6'h04;  // bit0 global interrupt enable
  localparam logic [5:0] REG_IER  = 6'h08;  // bit0 done, bit1 ready
  localparam logic [5:0] REG_ISR  = 6'h0C;  // bit0 done, bit1 ready; write 1 to toggle

endpackage
