// tb_ecg_dataset: recognition workload for the identification core at its
// default size (n = 300, m = 12, i = 64). It stands in for the smallest data
// set the original work evaluates: 20 test beats identified against a
// database of enrolled people.
//   - Enrolment (done here, as software would): 64 synthetic people, each a
//     heartbeat of Gaussian P, QRS and T waves with its own amplitudes, widths
//     and positions; the mean beat; a 12-row projection basis (orthonormal
//     DCT-II rows 1 to 12 in Q16.16 fixed point, in place of eigenvectors;
//     row 0, the constant row, is left out so that a baseline offset does
//     not change the features); and the projected training matrix from the
//     reference model.
//   - Test beats: 20 different people, each beat being the enrolled beat
//     scaled by up to +-3 %, shifted by a baseline offset of up to +-50 and
//     with sample noise of up to +-15.
// For each beat the core's ID and distance must equal the reference model
// bit for bit, and every run must take m*n + m*i + 12 cycles. The run prints
// the recognition rate (ID equal to the person the beat came from) and fails
// if fewer than 18 of the 20 beats are recognised. The database is loaded
// once; only the test array is rewritten between beats, as in the original
// driver loop.
module tb_ecg_dataset;
  import ecg_pkg::*;
  import ecg_ref_pkg::*;

  localparam int N = 300, M = 12, NT = 64, DW = 32, FRAC = 16, NBEATS = 20;
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

  int train [NT][N];
  int mean [] = new[N], eig [] = new[M*N], ptrn [] = new[M*NT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ecg_identification dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real gauss(input real x, input real c, input real w);
    return $exp(-((x - c) / w) * ((x - c) / w));
  endfunction

  task automatic enrol();
    real ap, ar, at, cp, cr, ct, wp, wr, wt, s;
    for (int i = 0; i < NT; i++) begin
      ap = 150 + $urandom_range(0, 200);  cp = 60 + $urandom_range(0, 30);  wp = 10 + $urandom_range(0, 8);
      ar = 900 + $urandom_range(0, 800); cr = 130 + $urandom_range(0, 30); wr = 4 + $urandom_range(0, 6);
      at = 200 + $urandom_range(0, 300); ct = 200 + $urandom_range(0, 60); wt = 15 + $urandom_range(0, 15);
      for (int k = 0; k < N; k++) begin
        s = ap * gauss(k, cp, wp) + ar * gauss(k, cr, wr) - 0.2 * ar * gauss(k, cr + 2.5 * wr, wr)
          + at * gauss(k, ct, wt);
        train[i][k] = int'(s);
      end
    end
    for (int k = 0; k < N; k++) begin
      longint acc = 0;
      for (int i = 0; i < NT; i++) acc += train[i][k];
      mean[k] = int'(acc / NT);
    end
    for (int j = 0; j < M; j++)
      for (int k = 0; k < N; k++)
        eig[j*N + k] = int'($rtoi(65536.0 * $sqrt(2.0 / N) *
                                  $cos(3.14159265358979 * (k + 0.5) * (j + 1) / N)));
    for (int i = 0; i < NT; i++) begin
      int sig [] = new[N];
      for (int k = 0; k < N; k++) sig[k] = train[i][k];
      for (int j = 0; j < M; j++) ptrn[i*M + j] = project(sig, mean, eig, j, N, FRAC);
    end
  endtask

  task automatic load(input ecg_mem_e sel, input int a [], input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      mem_we = 1'b1; mem_sel = sel; mem_addr = MAW'(k); mem_wdata = a[k];
    end
    @(negedge clk);
    mem_we = 1'b0;
  endtask

  initial begin
    int order [NT];
    int test [] = new[N], p [] = new[M];
    int person, cyc, best_i, correct;
    real gain;
    int offs, r;
    wide_t d, best;

    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    enrol();
    load(MEM_MEAN, mean, N);
    load(MEM_EIG, eig, M*N);
    load(MEM_TRAIN, ptrn, M*NT);

    // 20 distinct people, in random order
    for (int i = 0; i < NT; i++) order[i] = i;
    order.shuffle();
    correct = 0;
    for (int b = 0; b < NBEATS; b++) begin
      person = order[b];
      r = $urandom_range(0, 60);
      gain = 1.0 + (r - 30) / 1000.0;
      r = $urandom_range(0, 100);
      offs = r - 50;
      for (int k = 0; k < N; k++) begin
        r = $urandom_range(0, 30);
        test[k] = $rtoi(gain * train[person][k]) + offs + r - 15;
      end
      load(MEM_TEST, test, N);

      for (int j = 0; j < M; j++) p[j] = project(test, mean, eig, j, N, FRAC);
      best = 0; best_i = 0;
      for (int i = 0; i < NT; i++) begin
        d = distance(p, ptrn, i, M);
        if (i == 0 || d < best) begin best = d; best_i = i; end
      end

      @(negedge clk);
      start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done);
      check(cyc == M*N + M*NT + 12, $sformatf("beat %0d took %0d cycles", b, cyc));
      check(id == IW'(best_i), $sformatf("beat %0d: id %0d, reference %0d", b, id, best_i));
      check(wide_t'(min_dist) == best, $sformatf("beat %0d: distance differs from reference", b));
      if (int'(id) == person) correct++;
      else $display("beat %0d of person %0d identified as %0d", b, person, id);
    end

    $display("recognised %0d of %0d beats (%0d %%)", correct, NBEATS, 100 * correct / NBEATS);
    check(correct >= NBEATS - 2, "recognition rate below 90 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
