// pca_projection: PCA projection of a test ECG signal, p = E^T * (test - mean).
//
// The test signal and the mean training signal (n samples each) are read
// element by element; their difference is multiplied by the matching entry of
// one row of the m x n Eigen ECG matrix and summed in an accumulator (C1).
// After n products the accumulated value is one element of the projected PCA
// vector; the next row follows without a gap, m rows in all. This is the
// subtract / multiply / accumulate structure of the PCA projection block; the
// fixed-point format and the pipeline depth are this design's choices:
//   test, mean: signed DATA_W-bit integers; Eigen entries: signed DATA_W-bit
//   fixed point with EIG_FRAC fraction bits. The sum is kept at full
//   precision, shifted right arithmetically by EIG_FRAC and saturated to a
//   signed DATA_W-bit result.
//
// Timing: one multiply-accumulate per clock. start (while busy is low) begins
// reading on the next cycle; the memories answer one cycle after the address
// (sig_addr for test and mean, eig_addr = j*n + k for the Eigen matrix). The
// pipeline is read -> subtract/multiply -> accumulate -> output register, so
// p[j] appears on proj_we/proj_idx/proj_d four cycles after its last element
// was addressed, and done pulses in the cycle after p[m-1]: m*n + 5 cycles
// after start.
module pca_projection #(
  parameter int unsigned N_SAMPLES = 300,
  parameter int unsigned M_FEAT    = 12,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned EIG_FRAC  = 16,
  localparam int unsigned KW = $clog2(N_SAMPLES),
  localparam int unsigned JW = (M_FEAT > 1) ? $clog2(M_FEAT) : 1,
  localparam int unsigned EW = $clog2(M_FEAT * N_SAMPLES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic [KW-1:0]            sig_addr,
  input  logic signed [DATA_W-1:0] test_q,
  input  logic signed [DATA_W-1:0] mean_q,
  output logic [EW-1:0]            eig_addr,
  input  logic signed [DATA_W-1:0] eig_q,
  output logic                     proj_we,
  output logic [JW-1:0]            proj_idx,
  output logic signed [DATA_W-1:0] proj_d
);

  localparam int unsigned PW   = 2 * DATA_W + 1;              // product
  localparam int unsigned ACCW = PW + $clog2(N_SAMPLES);      // accumulator

  localparam logic signed [ACCW-1:0] SAT_MAX = ACCW'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [ACCW-1:0] SAT_MIN = -SAT_MAX - ACCW'(1);

  // issue stage
  logic            run_q;
  logic [KW-1:0]   k_q;
  logic [JW-1:0]   j_q;
  logic [EW-1:0]   e_q;
  // stage 1: memory data valid
  logic            v1, first1, last1;
  logic [JW-1:0]   row1;
  // stage 2: product
  logic            v2, first2, last2;
  logic [JW-1:0]   row2;
  logic signed [PW-1:0] prod2;
  // stage 3: accumulator C1
  logic            v3, last3;
  logic [JW-1:0]   row3;
  logic signed [ACCW-1:0] acc3;

  logic signed [DATA_W:0]   diff1;
  logic signed [ACCW-1:0]   scaled3;

  assign sig_addr = k_q;
  assign eig_addr = e_q;
  assign diff1    = test_q - mean_q;     // sign-extended to DATA_W+1 bits
  assign scaled3  = acc3 >>> EIG_FRAC;
  assign busy     = run_q || v1 || v2 || v3 || proj_we;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q <= 1'b0; k_q <= '0; j_q <= '0; e_q <= '0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; row1 <= '0;
      v2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0; row2 <= '0; prod2 <= '0;
      v3 <= 1'b0; last3 <= 1'b0; row3 <= '0; acc3 <= '0;
      proj_we <= 1'b0; proj_idx <= '0; proj_d <= '0;
      done <= 1'b0;
    end else begin
      // issue addresses, row-major over the Eigen matrix
      if (!busy && start) begin
        run_q <= 1'b1; k_q <= '0; j_q <= '0; e_q <= '0;
      end else if (run_q) begin
        e_q <= e_q + EW'(1);
        if (k_q == KW'(N_SAMPLES - 1)) begin
          k_q <= '0;
          j_q <= j_q + JW'(1);
          if (j_q == JW'(M_FEAT - 1)) run_q <= 1'b0;
        end else begin
          k_q <= k_q + KW'(1);
        end
      end
      v1     <= run_q;
      first1 <= (k_q == '0);
      last1  <= (k_q == KW'(N_SAMPLES - 1));
      row1   <= j_q;
      // subtract and multiply
      v2     <= v1;
      first2 <= first1;
      last2  <= last1;
      row2   <= row1;
      prod2  <= diff1 * eig_q;
      // accumulate
      v3    <= v2;
      last3 <= last2;
      row3  <= row2;
      if (v2) acc3 <= first2 ? ACCW'(prod2) : acc3 + ACCW'(prod2);
      // scale, saturate, output
      proj_we  <= v3 && last3;
      proj_idx <= row3;
      if (scaled3 > SAT_MAX)      proj_d <= SAT_MAX[DATA_W-1:0];
      else if (scaled3 < SAT_MIN) proj_d <= SAT_MIN[DATA_W-1:0];
      else                        proj_d <= scaled3[DATA_W-1:0];
      done <= proj_we && (proj_idx == JW'(M_FEAT - 1));
    end
  end

endmodule
