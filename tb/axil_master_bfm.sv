// axil_master_bfm: AXI4-Lite master for the testbenches, standing in for the
// processor and the interconnect. Tasks write() and read() perform one
// transaction each; write() can present address and data together, address
// first or data first, and both tasks hold off BREADY/RREADY for a random
// number of cycles to exercise back-pressure. Concurrent assertions check the
// slave side of the handshake rules: a response, once valid, stays valid with
// stable contents until it is taken.
module axil_master_bfm
  import axil_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  output axil_req_t req,
  input  axil_rsp_t rsp
);

  initial req = '0;

  int unsigned max_wait = 3;   // largest random ready delay

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic [3:0] strb = 4'hF, input int order = 0);
    bit aw_done, w_done;
    aw_done = 0; w_done = 0;
    req.awaddr  <= addr;
    req.wdata   <= data;
    req.wstrb   <= strb;
    req.awvalid <= (order != 2);
    req.wvalid  <= (order != 1);
    req.bready  <= 1'b0;
    do begin
      @(posedge clk);
      if (req.awvalid && rsp.awready) begin aw_done = 1; req.awvalid <= 1'b0; end
      if (req.wvalid  && rsp.wready)  begin w_done  = 1; req.wvalid  <= 1'b0; end
      if (order == 1 && aw_done && !w_done) req.wvalid  <= 1'b1;
      if (order == 2 && w_done && !aw_done) req.awvalid <= 1'b1;
    end while (!(aw_done && w_done));
    repeat ($urandom_range(0, max_wait)) @(posedge clk);
    req.bready <= 1'b1;
    do @(posedge clk); while (!rsp.bvalid);
    req.bready <= 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data);
    req.araddr  <= addr;
    req.arvalid <= 1'b1;
    req.rready  <= 1'b0;
    do @(posedge clk); while (!rsp.arready);
    req.arvalid <= 1'b0;
    repeat ($urandom_range(0, max_wait)) @(posedge clk);
    req.rready <= 1'b1;
    do @(posedge clk); while (!rsp.rvalid);
    data = rsp.rdata;
    req.rready <= 1'b0;
  endtask

  // Slave-side handshake rules.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n) rsp.bvalid && !req.bready |=> rsp.bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n) rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata));
  a_bresp_okay:  assert property (@(posedge clk) disable iff (!rst_n) rsp.bvalid |-> rsp.bresp == RESP_OKAY);

endmodule
