// tb_pca_projection: self-checking test of the PCA projection block at its
// default size (n = 300, m = 12). Behavioural one-cycle-read memories hold
// random test, mean and Eigen data; every projected element is compared with
// the wide-integer reference of ecg_ref_pkg, including a run with full-range
// values that drives the result into saturation, and the run time is checked
// against m*n + 5 cycles.
module tb_pca_projection;
  import ecg_ref_pkg::*;

  localparam int N = 300, M = 12, DW = 32, FRAC = 16;
  localparam int KW = $clog2(N), JW = $clog2(M), EW = $clog2(M*N);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, proj_we;
  logic [KW-1:0] sig_addr;
  logic [EW-1:0] eig_addr;
  logic signed [DW-1:0] test_q, mean_q, eig_q, proj_d;
  logic [JW-1:0] proj_idx;
  int test [] = new[N], mean [] = new[N], eig [] = new[M*N];
  int got [M];
  int nwr;
  int checks = 0, failures = 0, n_sat = 0;

  always #5 clk = ~clk;

  pca_projection dut (.*);

  always_ff @(posedge clk) begin
    test_q <= test[sig_addr];
    mean_q <= mean[sig_addr];
    eig_q  <= eig[eig_addr];
    if (proj_we) begin got[proj_idx] <= proj_d; nwr <= nwr + 1; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int mode);
    int cyc, exp;
    for (int k = 0; k < N; k++) begin
      if (mode == 0) begin
        test[k] = $urandom_range(0, 1 << 21) - (1 << 20);
        mean[k] = $urandom_range(0, 1 << 21) - (1 << 20);
      end else begin
        test[k] = (mode == 1) ? 32'h7fff0000 : int'($urandom);
        mean[k] = (mode == 1) ? -32'sh7fff0000 : int'($urandom);
      end
    end
    for (int e = 0; e < M*N; e++)
      eig[e] = (mode == 0) ? $urandom_range(0, 1 << 17) - (1 << 16) :
               (mode == 1) ? ((e / N) % 2 ? -32'sh40000000 : 32'sh40000000) : int'($urandom);
    nwr = 0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!done);
    checks++;
    if (cyc != M*N + 5 || nwr != M) begin
      failures++;
      $display("FAIL cycles %0d (expected %0d), writes %0d", cyc, M*N + 5, nwr);
    end
    for (int j = 0; j < M; j++) begin
      exp = project(test, mean, eig, j, N, FRAC);
      if (exp == 32'h7fffffff || exp == 32'h80000000) n_sat++;
      checks++;
      if (got[j] != exp) begin
        failures++;
        $display("FAIL mode %0d p[%0d] = %0d, expected %0d", mode, j, got[j], exp);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 4; r++) run(0);
    run(1);   // large positive and negative sums: saturation
    run(2);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated outputs: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
