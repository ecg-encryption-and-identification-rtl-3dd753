// ram_1w1r: simple dual-port memory, one write port and one synchronous read
// port (read data appears the cycle after the address, as from a block RAM).
// Used for the arrays of the ECG identification accelerator. Contents are not
// reset; software loads them before use.
module ram_1w1r #(
  parameter int unsigned DEPTH = 300,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
