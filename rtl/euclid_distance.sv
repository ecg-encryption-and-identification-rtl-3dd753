// euclid_distance: squared Euclidean distances between the projected test
// vector and every row of the projected training matrix.
//
// For training vector i the block reads its m projected values one per clock,
// subtracts each from the matching element of the projected test vector,
// multiplies the difference by itself and sums the squares in an accumulator
// (C2). The square root of the Euclidean distance is not taken: it does not
// change which distance is smallest. Each finished sum is emitted on
// dist_we/dist_idx/dist_d, forming the distance vector of size i one element
// at a time. Sums are kept at full precision (DIST_W bits), so no overflow can
// occur.
//
// Timing: start (while busy is low) begins reading on the next cycle. The
// training memory answers one cycle after trn_addr (= i*m + j). The pipeline
// is read -> subtract/square -> accumulate -> output register; distance i
// appears four cycles after its last element was addressed and done pulses in
// the cycle after the last distance: m*i + 5 cycles after start. ptest must be
// stable while busy.
module euclid_distance #(
  parameter int unsigned M_FEAT  = 12,
  parameter int unsigned N_TRAIN = 64,
  parameter int unsigned DATA_W  = 32,
  localparam int unsigned JW     = (M_FEAT > 1) ? $clog2(M_FEAT) : 1,
  localparam int unsigned IW     = (N_TRAIN > 1) ? $clog2(N_TRAIN) : 1,
  localparam int unsigned TW     = $clog2(M_FEAT * N_TRAIN),
  localparam int unsigned DIST_W = ecg_pkg::dist_width(DATA_W, M_FEAT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  input  logic signed [DATA_W-1:0] ptest [M_FEAT],
  output logic [TW-1:0]            trn_addr,
  input  logic signed [DATA_W-1:0] trn_q,
  output logic                     dist_we,
  output logic [IW-1:0]            dist_idx,
  output logic [DIST_W-1:0]        dist_d
);

  localparam int unsigned SQW = 2 * (DATA_W + 1);

  logic            run_q;
  logic [JW-1:0]   j_q;
  logic [IW-1:0]   i_q;
  logic [TW-1:0]   t_q;
  logic            v1, first1, last1;
  logic [JW-1:0]   col1;
  logic [IW-1:0]   row1;
  logic            v2, first2, last2;
  logic [IW-1:0]   row2;
  logic [SQW-1:0]  sq2;
  logic            v3, last3;
  logic [IW-1:0]   row3;
  logic [DIST_W-1:0] acc3;
  logic signed [DATA_W:0] diff1;
  logic signed [SQW-1:0]  sq1;

  assign trn_addr = t_q;
  assign diff1    = ptest[col1] - trn_q;   // sign-extended to DATA_W+1 bits
  assign sq1      = diff1 * diff1;         // full-width signed product
  assign busy     = run_q || v1 || v2 || v3 || dist_we;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q <= 1'b0; j_q <= '0; i_q <= '0; t_q <= '0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; col1 <= '0; row1 <= '0;
      v2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0; row2 <= '0; sq2 <= '0;
      v3 <= 1'b0; last3 <= 1'b0; row3 <= '0; acc3 <= '0;
      dist_we <= 1'b0; dist_idx <= '0; dist_d <= '0;
      done <= 1'b0;
    end else begin
      if (!busy && start) begin
        run_q <= 1'b1; j_q <= '0; i_q <= '0; t_q <= '0;
      end else if (run_q) begin
        t_q <= t_q + TW'(1);
        if (j_q == JW'(M_FEAT - 1)) begin
          j_q <= '0;
          i_q <= i_q + IW'(1);
          if (i_q == IW'(N_TRAIN - 1)) run_q <= 1'b0;
        end else begin
          j_q <= j_q + JW'(1);
        end
      end
      v1     <= run_q;
      first1 <= (j_q == '0);
      last1  <= (j_q == JW'(M_FEAT - 1));
      col1   <= j_q;
      row1   <= i_q;
      // subtract and square (the difference multiplied by itself)
      v2     <= v1;
      first2 <= first1;
      last2  <= last1;
      row2   <= row1;
      sq2    <= sq1;
      // accumulate
      v3    <= v2;
      last3 <= last2;
      row3  <= row2;
      if (v2) acc3 <= first2 ? DIST_W'(sq2) : acc3 + DIST_W'(sq2);
      // output
      dist_we  <= v3 && last3;
      dist_idx <= row3;
      dist_d   <= acc3;
      done     <= dist_we && (dist_idx == IW'(N_TRAIN - 1));
    end
  end

endmodule
