// tb_euclid_distance: self-checking test of the Euclidean distance calculator
// at its default size (m = 12, i = 64). Random full-range projected test and
// training values; every emitted squared distance and its index is compared
// with the wide-integer reference, and the run time with m*i + 5 cycles.
module tb_euclid_distance;
  import ecg_ref_pkg::*;

  localparam int M = 12, NT = 64, DW = 32;
  localparam int IW = $clog2(NT), TW = $clog2(M*NT);
  localparam int DIST_W = ecg_pkg::dist_width(DW, M);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, dist_we;
  logic signed [DW-1:0] ptest [M];
  logic [TW-1:0] trn_addr;
  logic signed [DW-1:0] trn_q;
  logic [IW-1:0] dist_idx;
  logic [DIST_W-1:0] dist_d;
  int p [] = new[M], trn [] = new[M*NT];
  int nout, checks = 0, failures = 0;

  always #5 clk = ~clk;

  euclid_distance dut (.*);

  always_ff @(posedge clk) trn_q <= trn[trn_addr];

  always @(posedge clk) if (dist_we) begin
    wide_t exp;
    exp = distance(p, trn, nout, M);
    checks++;
    if (dist_idx != IW'(nout) || wide_t'(dist_d) != exp) begin
      failures++;
      $display("FAIL distance %0d (idx %0d): got %0d expected %0d", nout, dist_idx, dist_d, exp);
    end
    nout++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 4; r++) begin
      for (int j = 0; j < M; j++) begin
        p[j] = (r == 3) ? 32'h7fffffff : int'($urandom);
        ptest[j] = p[j];
      end
      for (int e = 0; e < M*NT; e++) trn[e] = (r == 3) ? 32'h80000000 : (r == 0 ? int'($urandom_range(0, 2000)) - 1000 : int'($urandom));
      nout = 0;
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done);
      checks++;
      if (cyc != M*NT + 5 || nout != NT) begin
        failures++;
        $display("FAIL cycles %0d (expected %0d), outputs %0d", cyc, M*NT + 5, nout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
