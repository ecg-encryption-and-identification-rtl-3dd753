// tb_aes_decipher_axil: self-checking test of the decipher IP through its
// AXI4-Lite port, in the way the control software uses it: write key and
// input array, enable the interrupt, start, wait for the interrupt, read the
// control register (done set, then cleared by that read), read the output
// array, acknowledge the interrupt by toggling the status bit. Results are
// compared with the reference AES model. Also checks register read-back with
// byte strobes, the idle bit, and polling without interrupts.
module tb_aes_decipher_axil;
  import axil_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic interrupt;
  int checks = 0, failures = 0, n_irq = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm (.clk, .rst_n, .req, .rsp);
  aes_decipher_axil dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_decipher_req(req),
                       .s_axi_decipher_rsp(rsp), .interrupt);

  function automatic logic [127:0] model(input logic [127:0] k, input logic [127:0] d);
    return decrypt(k, d);
  endfunction

  function automatic logic [31:0] word(input logic [127:0] b, input int w);
    logic [31:0] r;
    for (int i = 0; i < 4; i++) r[8*i +: 8] = b[127 - 8*(4*w + i) -: 8];
    return r;
  endfunction

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic one_block(input logic [127:0] k, input logic [127:0] d, input bit use_irq);
    logic [31:0] v;
    logic [127:0] o;
    for (int w = 0; w < 4; w++) bfm.write(32'h10 + 4*w, word(k, w), 4'hF, w % 3);
    for (int w = 0; w < 4; w++) bfm.write(32'h20 + 4*w, word(d, w), 4'hF, w % 3);
    bfm.write(32'h00, 32'h1);
    if (use_irq) begin
      do @(posedge clk); while (!interrupt);
      n_irq++;
    end
    do bfm.read(32'h00, v); while (!v[1]);
    expect_eq("idle after done", 32'(v[2]), 32'd1);
    bfm.read(32'h00, v);
    expect_eq("done cleared by read", 32'(v[1]), 32'd0);
    for (int w = 0; w < 4; w++) begin
      bfm.read(32'h30 + 4*w, v);
      o[127 - 32*w -: 32] = {v[7:0], v[15:8], v[23:16], v[31:24]};
    end
    checks++;
    if (o !== model(k, d)) begin
      failures++;
      $display("FAIL block: got %h expected %h", o, model(k, d));
    end
    if (use_irq) begin
      bfm.read(32'h0C, v);
      expect_eq("ISR done bit", v & 32'h1, 32'h1);
      bfm.write(32'h0C, 32'h1);          // toggle to clear
      @(posedge clk);
      expect_eq("interrupt cleared", 32'(interrupt), 32'd0);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    bfm.read(32'h00, v);
    expect_eq("idle after reset", v, 32'h4);
    // byte strobes and read-back on the key registers
    bfm.write(32'h14, 32'hAABBCCDD);
    bfm.write(32'h14, 32'h11223344, 4'b0101);
    bfm.read(32'h14, v);
    expect_eq("strobed key word", v, 32'hAA22CC44);
    // polled operation, FIPS-197 C.1 inverse
    one_block(128'h000102030405060708090a0b0c0d0e0f, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 0);
    // interrupt-driven operation
    bfm.write(32'h04, 32'h1);
    bfm.write(32'h08, 32'h1);
    for (int n = 0; n < 10; n++) one_block(rand128(), rand128(), 1);
    checks++;
    if (n_irq != 10) begin failures++; $display("FAIL %0d interrupts", n_irq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
