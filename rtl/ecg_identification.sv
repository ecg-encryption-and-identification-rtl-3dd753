// ecg_identification: the ECG identification accelerator core.
//
// It holds the four arrays produced by enrolment and by the test
// acquisition - test signal (n words), mean training signal (n words),
// projected training matrix (i rows of m words) and Eigen ECG matrix (m rows
// of n words) - in on-chip memories that software fills through the array
// write port. On start it runs two phases back to back:
//   1. pca_projection computes the m-element projected test vector
//      p = E^T * (test - mean) into a register array;
//   2. euclid_distance compares p with each of the i projected training
//      vectors; min_search follows the stream of squared distances and keeps
//      the smallest.
// The result is the index of the closest training vector (the identified ID)
// and its squared distance. Both phases handle one multiply-accumulate per
// clock, so a run takes m*n + m*i + 12 cycles (4,380 at m=12, n=300, i=64:
// 87.6 us at a 50 MHz clock).
//
// Interface: start while busy is low; done pulses for one cycle, with id and
// min_dist valid from then until the next done. Array writes (mem_we with
// mem_sel/mem_addr/mem_wdata) go straight into the memories; addresses past an
// array's end are ignored. Writing an array while busy corrupts that run.
// Number format (signed integers and EIG_FRAC fixed point) is described in
// pca_projection; all of it, the memory organisation and the phase sequencing
// are this design's choices around the subtract-multiply-accumulate
// structures of the PCA projection and distance calculator.
module ecg_identification
  import ecg_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 300,
  parameter int unsigned M_FEAT    = 12,
  parameter int unsigned N_TRAIN   = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned EIG_FRAC  = 16,
  localparam int unsigned DEPTH_MAX = (M_FEAT * N_SAMPLES > M_FEAT * N_TRAIN) ?
                                      M_FEAT * N_SAMPLES : M_FEAT * N_TRAIN,
  localparam int unsigned MAW    = $clog2(DEPTH_MAX),
  localparam int unsigned IW     = (N_TRAIN > 1) ? $clog2(N_TRAIN) : 1,
  localparam int unsigned DIST_W = dist_width(DATA_W, M_FEAT)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IW-1:0]     id,
  output logic [DIST_W-1:0] min_dist,
  input  logic              mem_we,
  input  ecg_mem_e          mem_sel,
  input  logic [MAW-1:0]    mem_addr,
  input  logic [DATA_W-1:0] mem_wdata
);

  localparam int unsigned KW = $clog2(N_SAMPLES);
  localparam int unsigned JW = (M_FEAT > 1) ? $clog2(M_FEAT) : 1;
  localparam int unsigned EW = $clog2(M_FEAT * N_SAMPLES);
  localparam int unsigned TW = $clog2(M_FEAT * N_TRAIN);

  typedef enum logic [1:0] {S_IDLE, S_PCA, S_DIST} state_e;
  state_e state_q;

  logic [KW-1:0] sig_addr;
  logic [EW-1:0] eig_addr;
  logic [TW-1:0] trn_addr;
  logic signed [DATA_W-1:0] test_q, mean_q, eig_q, trn_q;
  logic signed [DATA_W-1:0] ptest [M_FEAT];

  logic pca_start, pca_busy, pca_done;
  logic proj_we;
  logic [JW-1:0] proj_idx;
  logic signed [DATA_W-1:0] proj_d;

  logic ed_start_q, ed_busy, ed_done;
  logic dist_we;
  logic [IW-1:0] dist_idx, min_idx;
  logic [DIST_W-1:0] dist_d, min_d;

  // ---- memories -------------------------------------------------------
  ram_1w1r #(.DEPTH(N_SAMPLES), .W(DATA_W)) u_test (
    .clk, .we(mem_we && mem_sel == MEM_TEST && mem_addr < MAW'(N_SAMPLES)),
    .waddr(KW'(mem_addr)), .wdata(mem_wdata), .raddr(sig_addr), .rdata(test_q));
  ram_1w1r #(.DEPTH(N_SAMPLES), .W(DATA_W)) u_mean (
    .clk, .we(mem_we && mem_sel == MEM_MEAN && mem_addr < MAW'(N_SAMPLES)),
    .waddr(KW'(mem_addr)), .wdata(mem_wdata), .raddr(sig_addr), .rdata(mean_q));
  ram_1w1r #(.DEPTH(M_FEAT * N_SAMPLES), .W(DATA_W)) u_eig (
    .clk, .we(mem_we && mem_sel == MEM_EIG && mem_addr < MAW'(M_FEAT * N_SAMPLES)),
    .waddr(EW'(mem_addr)), .wdata(mem_wdata), .raddr(eig_addr), .rdata(eig_q));
  ram_1w1r #(.DEPTH(M_FEAT * N_TRAIN), .W(DATA_W)) u_train (
    .clk, .we(mem_we && mem_sel == MEM_TRAIN && mem_addr < MAW'(M_FEAT * N_TRAIN)),
    .waddr(TW'(mem_addr)), .wdata(mem_wdata), .raddr(trn_addr), .rdata(trn_q));

  // ---- phase 1: PCA projection ---------------------------------------
  assign pca_start = (state_q == S_IDLE) && start;

  pca_projection #(.N_SAMPLES(N_SAMPLES), .M_FEAT(M_FEAT), .DATA_W(DATA_W),
                   .EIG_FRAC(EIG_FRAC)) u_pca (
    .clk, .rst_n, .start(pca_start), .busy(pca_busy), .done(pca_done),
    .sig_addr, .test_q, .mean_q, .eig_addr, .eig_q,
    .proj_we, .proj_idx, .proj_d);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < M_FEAT; j++) ptest[j] <= '0;
    end else if (proj_we) begin
      ptest[proj_idx] <= proj_d;
    end
  end

  // ---- phase 2: distances and minimum search -------------------------
  euclid_distance #(.M_FEAT(M_FEAT), .N_TRAIN(N_TRAIN), .DATA_W(DATA_W)) u_ed (
    .clk, .rst_n, .start(ed_start_q), .busy(ed_busy), .done(ed_done),
    .ptest, .trn_addr, .trn_q, .dist_we, .dist_idx, .dist_d);

  min_search #(.N_TRAIN(N_TRAIN), .DIST_W(DIST_W)) u_min (
    .clk, .rst_n, .clear(ed_start_q), .in_valid(dist_we), .in_idx(dist_idx),
    .in_dist(dist_d), .min_idx, .min_dist(min_d));

  // ---- sequencing ----------------------------------------------------
  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      ed_start_q <= 1'b0;
      done       <= 1'b0;
      id         <= '0;
      min_dist   <= '0;
    end else begin
      ed_start_q <= 1'b0;
      done       <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) state_q <= S_PCA;
        S_PCA: if (pca_done) begin
          state_q    <= S_DIST;
          ed_start_q <= 1'b1;
        end
        S_DIST: if (ed_done) begin
          state_q  <= S_IDLE;
          done     <= 1'b1;
          id       <= min_idx;
          min_dist <= min_d;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
