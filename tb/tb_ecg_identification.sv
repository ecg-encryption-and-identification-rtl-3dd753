// tb_ecg_identification: self-checking test of the identification core at its
// default size (n = 300, m = 12, i = 64). The four arrays are loaded through
// the array write port with random data; for some runs one training row is set
// to the exact projection of the test signal (so its distance is 0 and the ID
// is known in advance), and one run places that row twice to check that ties
// go to the lower index. ID and minimum distance are compared with the
// wide-integer reference, and every run must take m*n + m*i + 12 cycles.
module tb_ecg_identification;
  import ecg_pkg::*;
  import ecg_ref_pkg::*;

  localparam int N = 300, M = 12, NT = 64, DW = 32, FRAC = 16;
  localparam int IW = $clog2(NT), MAW = $clog2(M*N);
  localparam int DIST_W = dist_width(DW, M);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [IW-1:0] id;
  logic [DIST_W-1:0] min_dist;
  logic mem_we = 0;
  ecg_mem_e mem_sel = MEM_TEST;
  logic [MAW-1:0] mem_addr = '0;
  logic [DW-1:0] mem_wdata = '0;
  int test [] = new[N], mean [] = new[N], eig [] = new[M*N], trn [] = new[M*NT], p [] = new[M];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ecg_identification dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input ecg_mem_e sel, input int a [], input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      mem_we = 1'b1; mem_sel = sel; mem_addr = MAW'(k); mem_wdata = a[k];
    end
    @(negedge clk);
    mem_we = 1'b0;
  endtask

  task automatic run(input int plant, input int plant2);
    int cyc, best_i;
    wide_t d, best;
    for (int k = 0; k < N; k++) begin
      test[k] = $urandom_range(0, 1 << 21) - (1 << 20);
      mean[k] = $urandom_range(0, 1 << 21) - (1 << 20);
    end
    for (int e = 0; e < M*N; e++) eig[e] = $urandom_range(0, 1 << 17) - (1 << 16);
    for (int j = 0; j < M; j++) p[j] = project(test, mean, eig, j, N, FRAC);
    for (int e = 0; e < M*NT; e++) trn[e] = $urandom_range(0, 1 << 26) - (1 << 25);
    if (plant >= 0)  for (int j = 0; j < M; j++) trn[plant*M + j] = p[j];
    if (plant2 >= 0) for (int j = 0; j < M; j++) trn[plant2*M + j] = p[j];
    load(MEM_TEST, test, N);
    load(MEM_MEAN, mean, N);
    load(MEM_EIG, eig, M*N);
    load(MEM_TRAIN, trn, M*NT);
    best = 0; best_i = 0;
    for (int i = 0; i < NT; i++) begin
      d = distance(p, trn, i, M);
      if (i == 0 || d < best) begin best = d; best_i = i; end
    end
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!done);
    checks++;
    if (cyc != M*N + M*NT + 12) begin
      failures++;
      $display("FAIL run took %0d cycles, expected %0d", cyc, M*N + M*NT + 12);
    end
    checks++;
    if (id != IW'(best_i) || wide_t'(min_dist) != best) begin
      failures++;
      $display("FAIL id %0d dist %0d, expected %0d dist %0d", id, min_dist, best_i, best);
    end
    if (plant >= 0) begin
      checks++;
      if (id != IW'((plant2 >= 0 && plant2 < plant) ? plant2 : plant)) begin
        failures++;
        $display("FAIL planted row %0d not identified (got %0d)", plant, id);
      end
    end
    $display("run: id %0d in %0d cycles", id, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(-1, -1);
    run(37, -1);
    run(0, -1);
    run(NT - 1, -1);
    run(50, 20);      // tie: the lower index wins
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
