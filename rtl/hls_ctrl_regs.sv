// hls_ctrl_regs: block-level control, status and interrupt registers that
// each accelerator IP places at the start of its AXI4-Lite address map. The
// layout follows the common high-level-synthesis convention (the register map
// itself is this design's choice):
//   0x00 control  bit0 start (write 1; stays set until the core accepts it)
//                 bit1 done  (set when the core finishes, cleared by reading 0x00)
//                 bit2 idle  (core not busy and no start pending)
//                 bit3 ready (set when the core accepts a start, cleared by reading 0x00)
//   0x04 global interrupt enable, bit0
//   0x08 interrupt enable: bit0 done, bit1 ready
//   0x0C interrupt status: bit0 done, bit1 ready; writing 1 toggles a bit
// interrupt = GIE & (ISR bit0 | ISR bit1), a level.
// Core handshake: ap_start is held high; the core takes it in a cycle where
// core_busy is low (ap_start & !core_busy = accepted). core_done is the
// core's one-cycle completion pulse.
// Register port: wr_en/wr_addr/wr_data as from axil_slave, already decoded to
// this block (only address bits 3:2 are looked at); rd_en/rd_addr likewise,
// rdata is combinational and the caller registers it.
module hls_ctrl_regs
  import axil_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [5:0]  wr_addr,
  input  logic [31:0] wr_data,
  input  logic        rd_en,
  input  logic [5:0]  rd_addr,
  output logic [31:0] rdata,
  input  logic        core_busy,
  input  logic        core_done,
  output logic        ap_start,
  output logic        interrupt
);

  logic done_q, ready_q, gie_q;
  logic [1:0] ier_q, isr_q;
  logic accepted, rd_ctrl;

  assign accepted = ap_start && !core_busy;
  assign rd_ctrl  = rd_en && ({rd_addr[5:2], 2'b00} == REG_CTRL);
  assign interrupt = gie_q && (|isr_q);

  always_comb begin
    unique case ({rd_addr[5:2], 2'b00})
      REG_CTRL: rdata = {28'd0, ready_q, !core_busy && !ap_start, done_q, ap_start};
      REG_GIE:  rdata = {31'd0, gie_q};
      REG_IER:  rdata = {30'd0, ier_q};
      REG_ISR:  rdata = {30'd0, isr_q};
      default:  rdata = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ap_start <= 1'b0;
      done_q   <= 1'b0;
      ready_q  <= 1'b0;
      gie_q    <= 1'b0;
      ier_q    <= '0;
      isr_q    <= '0;
    end else begin
      if (accepted) ap_start <= 1'b0;
      if (wr_en && {wr_addr[5:2], 2'b00} == REG_CTRL && wr_data[0]) ap_start <= 1'b1;
      if (wr_en && {wr_addr[5:2], 2'b00} == REG_GIE) gie_q <= wr_data[0];
      if (wr_en && {wr_addr[5:2], 2'b00} == REG_IER) ier_q <= wr_data[1:0];

      // status bits: an event sets, a read of the control register clears
      if (rd_ctrl) begin
        done_q  <= 1'b0;
        ready_q <= 1'b0;
      end
      if (core_done) done_q  <= 1'b1;
      if (accepted)  ready_q <= 1'b1;

      begin
        logic [1:0] isr_n;
        isr_n = isr_q;
        if (wr_en && {wr_addr[5:2], 2'b00} == REG_ISR) isr_n = isr_n ^ wr_data[1:0];
        if (core_done && ier_q[0]) isr_n[0] = 1'b1;
        if (accepted  && ier_q[1]) isr_n[1] = 1'b1;
        isr_q <= isr_n;
      end
    end
  end

endmodule
