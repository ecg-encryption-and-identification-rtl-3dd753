// axil_slave: AXI4-Lite slave protocol engine shared by the three accelerator
// IPs. It turns bus transactions into a plain register-file port:
//   - write: the write address and write data channels are accepted
//     independently and in either order; once both are held, wr_en pulses
//     for one cycle with wr_addr/wr_data/wr_strb, and the OKAY write response
//     is raised in the next cycle and held until BREADY.
//   - read: when ARVALID is accepted, rd_en pulses in the same cycle with
//     rd_addr; the register file must present rd_data in the following cycle
//     (one-cycle synchronous read, like a block RAM). That word is then held
//     on RDATA with RVALID until RREADY.
// One write and one read may be in progress at a time; a new address is not
// accepted until the previous response has been taken. Only the low ADDR_W
// bits of the byte address are passed on. Reset is synchronous, active low.
// The protocol is standard AXI4-Lite; its realisation here is this design's.
module axil_slave
  import axil_pkg::*;
#(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axil_req,
  output axil_rsp_t         s_axil_rsp,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [31:0]       wr_data,
  output logic [3:0]        wr_strb,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [31:0]       rd_data
);

  logic aw_full_q, w_full_q, bvalid_q;
  logic rd_pend_q, rvalid_q;
  logic [ADDR_W-1:0] aw_addr_q;
  logic [31:0] w_data_q, rdata_q;
  logic [3:0]  w_strb_q;
  logic aw_hs, w_hs, ar_hs;

  assign aw_hs = s_axil_req.awvalid && !aw_full_q;
  assign w_hs  = s_axil_req.wvalid  && !w_full_q;
  assign ar_hs = s_axil_req.arvalid && !rd_pend_q && !rvalid_q;

  assign wr_en   = aw_full_q && w_full_q && !bvalid_q;
  assign wr_addr = aw_addr_q;
  assign wr_data = w_data_q;
  assign wr_strb = w_strb_q;
  assign rd_en   = ar_hs;
  assign rd_addr = s_axil_req.araddr[ADDR_W-1:0];

  always_comb begin
    s_axil_rsp         = '0;
    s_axil_rsp.awready = !aw_full_q;
    s_axil_rsp.wready  = !w_full_q;
    s_axil_rsp.bvalid  = bvalid_q;
    s_axil_rsp.bresp   = RESP_OKAY;
    s_axil_rsp.arready = !rd_pend_q && !rvalid_q;
    s_axil_rsp.rvalid  = rvalid_q;
    s_axil_rsp.rdata   = rdata_q;
    s_axil_rsp.rresp   = RESP_OKAY;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_full_q <= 1'b0;
      w_full_q  <= 1'b0;
      bvalid_q  <= 1'b0;
      rd_pend_q <= 1'b0;
      rvalid_q  <= 1'b0;
      aw_addr_q <= '0;
      w_data_q  <= '0;
      w_strb_q  <= '0;
      rdata_q   <= '0;
    end else begin
      // write channel
      if (aw_hs) begin
        aw_full_q <= 1'b1;
        aw_addr_q <= s_axil_req.awaddr[ADDR_W-1:0];
      end
      if (w_hs) begin
        w_full_q <= 1'b1;
        w_data_q <= s_axil_req.wdata;
        w_strb_q <= s_axil_req.wstrb;
      end
      if (wr_en) bvalid_q <= 1'b1;
      if (bvalid_q && s_axil_req.bready) begin
        bvalid_q  <= 1'b0;
        aw_full_q <= 1'b0;
        w_full_q  <= 1'b0;
      end
      // read channel
      if (ar_hs) rd_pend_q <= 1'b1;
      if (rd_pend_q) begin
        rd_pend_q <= 1'b0;
        rvalid_q  <= 1'b1;
        rdata_q   <= rd_data;
      end
      if (rvalid_q && s_axil_req.rready) rvalid_q <= 1'b0;
    end
  end

endmodule
