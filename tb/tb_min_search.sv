// tb_min_search: self-checking test of the minimum search. Streams of random
// distances (small values, so ties are frequent, and full-range values) are
// fed with gaps; after each stream the kept index and distance are compared
// with the first smallest element computed by the testbench.
module tb_min_search;
  localparam int NT = 64, DW = 70, IW = $clog2(NT);

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [IW-1:0] in_idx = '0, min_idx;
  logic [DW-1:0] in_dist = '0, min_dist;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  min_search #(.N_TRAIN(NT), .DIST_W(DW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] d, best;
    int bi;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < 50; r++) begin
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      best = '1; bi = 0;
      for (int i = 0; i < NT; i++) begin
        d = (r % 2) ? {$urandom, $urandom, $urandom} : DW'($urandom_range(0, 20));
        if (i == 0 || d < best) begin best = d; bi = i; end
        @(negedge clk);
        in_valid = 1'b1; in_idx = IW'(i); in_dist = d;
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      @(negedge clk);
      checks++;
      if (min_idx != IW'(bi) || min_dist != best) begin
        failures++;
        $display("FAIL stream %0d: got %0d/%0d expected %0d/%0d", r, min_idx, min_dist, bi, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
