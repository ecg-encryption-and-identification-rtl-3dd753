// min_search: running minimum over the stream of Euclidean distances. The
// index of the smallest distance is the identified ID. clear starts a new
// search; each in_valid compares the incoming distance with the smallest so
// far and keeps it if strictly smaller (ties keep the lower index, an
// assumption of this design). min_idx/min_dist are registered and valid the
// cycle after the last in_valid.
module min_search #(
  parameter int unsigned N_TRAIN = 64,
  parameter int unsigned DIST_W  = 70,
  localparam int unsigned IW     = (N_TRAIN > 1) ? $clog2(N_TRAIN) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [IW-1:0]     in_idx,
  input  logic [DIST_W-1:0] in_dist,
  output logic [IW-1:0]     min_idx,
  output logic [DIST_W-1:0] min_dist
);

  logic have_q;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      have_q   <= 1'b0;
      min_idx  <= '0;
      min_dist <= '1;
    end else if (in_valid && (!have_q || in_dist < min_dist)) begin
      have_q   <= 1'b1;
      min_idx  <= in_idx;
      min_dist <= in_dist;
    end
  end

endmodule
