// tb_ecg_id_axil: self-checking test of the identification IP through its
// AXI4-Lite port, at a reduced size (n = 40, m = 4, i = 8) so that its
// address map is also exercised at non-default parameters. Loads the four
// arrays over the bus, starts with the interrupt enabled, checks the time from
// the core's acceptance of start to the interrupt (m*n + m*i + 12 core
// cycles plus one for the interrupt status flop), reads the ID and the squared distance (three words)
// and compares them with the reference; checks that array reads return 0.
module tb_ecg_id_axil;
  import axil_pkg::*;
  import ecg_ref_pkg::*;

  localparam int N = 40, M = 4, NT = 8, FRAC = 16;
  localparam int SUB_AW = 10;   // from the map rule: max(clog2(max(n, m*i)) + 4, clog2(m*n) + 2)
  localparam logic [31:0] Q_TEST = 32'(1) << (SUB_AW - 2), Q_MEAN = 32'(2) << (SUB_AW - 2),
                          Q_TRN = 32'(3) << (SUB_AW - 2), EIG = 32'(1) << SUB_AW;

  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic interrupt;
  int test [] = new[N], mean [] = new[N], eig [] = new[M*N], trn [] = new[M*NT], p [] = new[M];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // The core takes a start in the cycle after the start register is written,
  // which is also the first clock edge that sees the write response valid.
  time t_accept;
  logic bvalid_d = 0;
  always @(posedge clk) begin
    if (rsp.bvalid && !bvalid_d) t_accept = $time;
    bvalid_d <= rsp.bvalid;
  end

  axil_master_bfm bfm (.clk, .rst_n, .req, .rsp);
  ecg_id_axil #(.N_SAMPLES(N), .M_FEAT(M), .N_TRAIN(NT)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n), .s_axi_Identification_req(req),
    .s_axi_Identification_rsp(rsp), .interrupt);

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    logic [95:0] dw;
    wide_t d, best;
    int best_i, cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    bfm.write(32'h04, 32'h1);
    bfm.write(32'h08, 32'h1);
    for (int r = 0; r < 4; r++) begin
      for (int k = 0; k < N; k++) begin
        test[k] = $urandom_range(0, 1 << 21) - (1 << 20);
        mean[k] = $urandom_range(0, 1 << 21) - (1 << 20);
      end
      for (int e = 0; e < M*N; e++) eig[e] = $urandom_range(0, 1 << 17) - (1 << 16);
      for (int j = 0; j < M; j++) p[j] = project(test, mean, eig, j, N, FRAC);
      for (int e = 0; e < M*NT; e++) trn[e] = $urandom_range(0, 1 << 24) - (1 << 23);
      if (r > 0) for (int j = 0; j < M; j++) trn[(r + 2)*M + j] = p[j] + r;
      for (int k = 0; k < N; k++) bfm.write(Q_TEST + 4*k, test[k]);
      for (int k = 0; k < N; k++) bfm.write(Q_MEAN + 4*k, mean[k], 4'hF, 1);
      for (int e = 0; e < M*NT; e++) bfm.write(Q_TRN + 4*e, trn[e], 4'hF, 2);
      for (int e = 0; e < M*N; e++) bfm.write(EIG + 4*e, eig[e]);
      best = 0; best_i = 0;
      for (int i = 0; i < NT; i++) begin
        d = distance(p, trn, i, M);
        if (i == 0 || d < best) begin best = d; best_i = i; end
      end
      bfm.write(32'h00, 32'h1);
      while (!interrupt) @(posedge clk);
      cyc = int'(($time - t_accept) / 10);
      checks++;
      if (cyc != M*N + M*NT + 13) begin
        failures++;
        $display("FAIL start to interrupt %0d cycles", cyc);
      end
      bfm.read(32'h10, v);
      expect_eq("id", v, 32'(best_i));
      for (int w = 0; w < 3; w++) begin bfm.read(32'h14 + 4*w, v); dw[32*w +: 32] = v; end
      expect_eq("distance low", dw[31:0], best[31:0]);
      expect_eq("distance mid", dw[63:32], best[63:32]);
      expect_eq("distance high", dw[95:64], best[95:64]);
      if (r > 0) expect_eq("planted id", 32'(best_i), 32'(r + 2));
      bfm.read(32'h00, v);
      bfm.write(32'h0C, 32'h1);
    end
    bfm.read(Q_TEST, v);
    expect_eq("arrays are write-only", v, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
