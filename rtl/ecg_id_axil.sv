// ecg_id_axil: the ECG identification IP as the processor sees it: the
// identification core behind an AXI4-Lite slave port, with an interrupt.
//
// Address map (byte offsets; SUB_AW = 14 and ADDR_W = 15 at the defaults):
//   lower half, quarter 0: registers
//     0x00-0x0C  control, global/IP interrupt enable, interrupt status (hls_ctrl_regs)
//     0x10       identified ID (read only)
//     0x14-0x1C  squared distance of that ID, least significant word first (read only)
//   lower half, quarter 1: test signal,                word k at 4k
//   lower half, quarter 2: mean training signal,       word k at 4k
//   lower half, quarter 3: projected training matrix,  row i element j at 4(i*m + j)
//   upper half:            Eigen ECG matrix,           row j element k at 4(j*n + k)
// The arrays are write-only (reads return 0) and take whole 32-bit words
// (byte strobes are ignored for them). Software loads the arrays, writes 1 to
// the start bit and waits for the done bit or the interrupt, then reads the
// ID. A start reaches the core one cycle after the write. The port names
// follow the IP's block-diagram symbol (s_axi_Identification, ap_clk,
// ap_rst_n, interrupt); the address map is this design's choice.
module ecg_id_axil
  import axil_pkg::*;
  import ecg_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 300,
  parameter int unsigned M_FEAT    = 12,
  parameter int unsigned N_TRAIN   = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned EIG_FRAC  = 16
) (
  input  logic      ap_clk,
  input  logic      ap_rst_n,
  input  axil_req_t s_axi_Identification_req,
  output axil_rsp_t s_axi_Identification_rsp,
  output logic      interrupt
);

  localparam int unsigned DEPTH_LO = (N_SAMPLES > M_FEAT * N_TRAIN) ? N_SAMPLES : M_FEAT * N_TRAIN;
  localparam int unsigned LO_AW    = $clog2(DEPTH_LO) + 2 + 2;      // four quarters of the lower half
  localparam int unsigned EIG_AW   = $clog2(M_FEAT * N_SAMPLES) + 2;
  localparam int unsigned SUB_AW   = (LO_AW > EIG_AW) ? LO_AW : EIG_AW;
  localparam int unsigned ADDR_W   = SUB_AW + 1;
  localparam int unsigned DEPTH_MAX = (M_FEAT * N_SAMPLES > M_FEAT * N_TRAIN) ?
                                      M_FEAT * N_SAMPLES : M_FEAT * N_TRAIN;
  localparam int unsigned MAW      = $clog2(DEPTH_MAX);
  localparam int unsigned IW       = (N_TRAIN > 1) ? $clog2(N_TRAIN) : 1;
  localparam int unsigned DIST_W   = dist_width(DATA_W, M_FEAT);
  localparam int unsigned DWORDS   = (DIST_W + 31) / 32;

  logic              wr_en, rd_en;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  logic [31:0]       wr_data, rd_q, ctrl_rdata;
  logic [3:0]        wr_strb;
  logic              ap_start, busy, done;
  logic [IW-1:0]     id;
  logic [DIST_W-1:0] min_dist;
  logic [32*DWORDS-1:0] dist_words;

  logic              wr_hi, rd_hi;
  logic [1:0]        wr_quarter, rd_quarter;
  logic              wr_regs, rd_regs;
  logic              mem_we;
  ecg_mem_e          mem_sel;
  logic [MAW-1:0]    mem_addr;

  axil_slave #(.ADDR_W(ADDR_W)) u_axil (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axil_req(s_axi_Identification_req), .s_axil_rsp(s_axi_Identification_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data(rd_q)
  );

  // address decode
  assign wr_hi      = wr_addr[SUB_AW];
  assign rd_hi      = rd_addr[SUB_AW];
  assign wr_quarter = wr_addr[SUB_AW-1 -: 2];
  assign rd_quarter = rd_addr[SUB_AW-1 -: 2];
  assign wr_regs    = !wr_hi && wr_quarter == 2'd0 && wr_addr[SUB_AW-3:6] == '0;
  assign rd_regs    = !rd_hi && rd_quarter == 2'd0 && rd_addr[SUB_AW-3:6] == '0;

  always_comb begin
    mem_we   = wr_en && !(!wr_hi && wr_quarter == 2'd0);
    mem_sel  = MEM_EIG;
    mem_addr = MAW'(wr_addr[SUB_AW-1:2]);
    if (!wr_hi) begin
      mem_addr = MAW'(wr_addr[SUB_AW-3:2]);
      unique case (wr_quarter)
        2'd1:    mem_sel = MEM_TEST;
        2'd2:    mem_sel = MEM_MEAN;
        default: mem_sel = MEM_TRAIN;
      endcase
    end
  end

  hls_ctrl_regs u_ctrl (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .wr_en(wr_en && wr_regs && wr_addr[5:4] == 2'd0), .wr_addr(wr_addr[5:0]), .wr_data,
    .rd_en(rd_en && rd_regs && rd_addr[5:4] == 2'd0), .rd_addr(rd_addr[5:0]), .rdata(ctrl_rdata),
    .core_busy(busy), .core_done(done), .ap_start, .interrupt
  );

  ecg_identification #(.N_SAMPLES(N_SAMPLES), .M_FEAT(M_FEAT), .N_TRAIN(N_TRAIN),
                       .DATA_W(DATA_W), .EIG_FRAC(EIG_FRAC)) u_core (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(ap_start), .busy, .done, .id, .min_dist,
    .mem_we, .mem_sel, .mem_addr, .mem_wdata(wr_data[DATA_W-1:0])
  );

  assign dist_words = (32*DWORDS)'(min_dist);

  always_ff @(posedge ap_clk) begin
    if (!ap_rst_n) begin
      rd_q <= '0;
    end else if (rd_en) begin
      rd_q <= '0;
      if (rd_regs) begin
        if (rd_addr[5:4] == 2'd0) begin
          rd_q <= ctrl_rdata;
        end else if (rd_addr[5:2] == 4'd4) begin
          rd_q <= 32'(id);
        end else begin
          for (int w = 0; w < DWORDS; w++)
            if (rd_addr[5:2] == 4'(5 + w)) rd_q <= dist_words[32*w +: 32];
        end
      end
    end
  end

endmodule
