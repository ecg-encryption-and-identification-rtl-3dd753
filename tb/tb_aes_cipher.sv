// tb_aes_cipher: self-checking test of the AES-128 encryption core.
// Checks the two FIPS-197 known-answer vectors (Appendix B and C.1), then
// random keys and plaintexts against the reference model in aes_ref_pkg, and
// that every encryption takes exactly 11 cycles from start to done. It also
// starts a block in the same cycle as the previous done to check back-to-back
// operation.
module tb_aes_cipher;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [127:0] key = '0, din = '0, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  aes_cipher dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp, input string what);
    int cyc;
    key <= k; din <= p; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!done);
    check(what, dout, exp);
    checks++;
    if (cyc != 11) begin failures++; $display("FAIL latency %0d, expected 11", cyc); end
  endtask

  initial begin
    logic [127:0] k, p;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 App. B");
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 App. C.1");
    for (int n = 0; n < 40; n++) begin
      k = rand128(); p = rand128();
      run(k, p, encrypt(k, p), "random");
    end
    // back-to-back: start again in the done cycle
    k = rand128(); p = rand128();
    key <= k; din <= p; start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    do @(posedge clk); while (!done);
    begin
      logic [127:0] k2, p2;
      k2 = rand128(); p2 = rand128();
      key <= k2; din <= p2; start <= 1'b1;
      check("first of pair", dout, encrypt(k, p));
      @(posedge clk); start <= 1'b0;
      do @(posedge clk); while (!done);
      check("second of pair", dout, encrypt(k2, p2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
