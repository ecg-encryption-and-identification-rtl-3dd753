// tb_axil_slave: self-checking test of the AXI4-Lite slave engine. A small
// register file of 16 words behind it (one-cycle read) is written and read
// through the bus with the three orders of address and data, random
// back-pressure and byte strobes; a shadow copy kept by the testbench gives
// the expected read data. It also checks that every write produces exactly
// one wr_en pulse and every read exactly one rd_en pulse.
module tb_axil_slave;
  import axil_pkg::*;

  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic        wr_en, rd_en;
  logic [5:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0]  wr_strb;
  logic [31:0] regs [16];
  logic [31:0] shadow [16];
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm (.clk, .rst_n, .req, .rsp);
  axil_slave #(.ADDR_W(6)) dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data);

  always_ff @(posedge clk) begin
    if (wr_en) begin
      n_wr++;
      for (int b = 0; b < 4; b++) if (wr_strb[b]) regs[wr_addr[5:2]][8*b +: 8] <= wr_data[8*b +: 8];
    end
    if (rd_en) begin n_rd++; rd_data <= regs[rd_addr[5:2]]; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, v;
    logic [3:0] s;
    int a;
    for (int i = 0; i < 16; i++) begin regs[i] = '0; shadow[i] = '0; end
    rd_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      a = $urandom_range(0, 15);
      if ($urandom_range(0, 1)) begin
        d = $urandom;
        s = (n < 30) ? 4'hF : 4'($urandom);
        bfm.write(32'(4 * a), d, s, n % 3);
        for (int b = 0; b < 4; b++) if (s[b]) shadow[a][8*b +: 8] = d[8*b +: 8];
      end else begin
        bfm.read(32'(4 * a), v);
        checks++;
        if (v !== shadow[a]) begin
          failures++;
          $display("FAIL read word %0d: got %h expected %h", a, v, shadow[a]);
        end
      end
    end
    // one strobe per write/read transaction
    begin
      int w0, r0;
      w0 = n_wr; r0 = n_rd;
      bfm.write(32'h4, 32'h1234_5678, 4'hF, 1);
      bfm.read(32'h4, v);
      @(posedge clk);
      checks++;
      if (n_wr != w0 + 1 || n_rd != r0 + 1 || v != 32'h1234_5678) begin
        failures++;
        $display("FAIL strobe count wr %0d rd %0d data %h", n_wr - w0, n_rd - r0, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
