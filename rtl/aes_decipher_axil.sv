// aes_decipher_axil: the decipher IP as the processor sees it: the AES-128
// decryption core behind an AXI4-Lite slave port, with an interrupt.
//
// Address map (byte offsets, 32-bit words):
//   0x00-0x0C  control, global/IP interrupt enable, interrupt status (hls_ctrl_regs)
//   0x10-0x1C  key[0..15]      read/write
//   0x20-0x2C  in[0..15]       read/write, the 16 x 8-bit input array
//   0x30-0x3C  out[0..15]      read only,  the 16 x 8-bit output array
// Array byte 4w+b is held in bits 8b+7:8b of word w (bytes packed little-endian
// into words, as high-level-synthesis tools pack byte arrays). Software writes
// the key and input, writes 1 to the start bit, then waits for the done bit or
// the interrupt and reads the output. The input and key registers are copied
// into the core when it accepts the start, so they may be rewritten while it
// runs. A start takes one cycle to reach the core; the result is in the output
// registers 22 cycles later. The port names follow the IP's block-diagram
// symbol (s_axi_decipher, ap_clk, ap_rst_n, interrupt); the register layout is
// this design's choice.
module aes_decipher_axil
  import axil_pkg::*;
  import aes_pkg::*;
(
  input  logic      ap_clk,
  input  logic      ap_rst_n,
  input  axil_req_t s_axi_decipher_req,
  output axil_rsp_t s_axi_decipher_rsp,
  output logic      interrupt
);

  localparam int unsigned AW = 6;

  logic          wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [31:0]   wr_data, rd_q, ctrl_rdata;
  logic [3:0]    wr_strb;
  block_t        key_q, din_q, dout;
  logic          ap_start, busy, done;

  axil_slave #(.ADDR_W(AW)) u_axil (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axil_req(s_axi_decipher_req), .s_axil_rsp(s_axi_decipher_rsp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data(rd_q)
  );

  hls_ctrl_regs u_ctrl (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .wr_en(wr_en && wr_addr[5:4] == 2'd0), .wr_addr, .wr_data,
    .rd_en(rd_en && rd_addr[5:4] == 2'd0), .rd_addr, .rdata(ctrl_rdata),
    .core_busy(busy), .core_done(done), .ap_start, .interrupt
  );

  aes_decipher u_core (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(ap_start),
    .key(key_q), .din(din_q), .busy, .done, .dout
  );

  // word w of a block as the bus sees it: byte 4w in bits 7:0
  function automatic logic [31:0] word_of(input block_t b, input logic [1:0] w);
    logic [31:0] r;
    for (int i = 0; i < 4; i++) r[8*i +: 8] = b[127 - 8*(4*w + i) -: 8];
    return r;
  endfunction

  function automatic block_t put_word(input block_t b, input logic [1:0] w,
                                      input logic [31:0] d, input logic [3:0] strb);
    block_t r;
    r = b;
    for (int i = 0; i < 4; i++)
      if (strb[i]) r[127 - 8*(4*w + i) -: 8] = d[8*i +: 8];
    return r;
  endfunction

  always_ff @(posedge ap_clk) begin
    if (!ap_rst_n) begin
      key_q <= '0;
      din_q <= '0;
      rd_q  <= '0;
    end else begin
      if (wr_en && wr_addr[5:4] == 2'd1) key_q <= put_word(key_q, wr_addr[3:2], wr_data, wr_strb);
      if (wr_en && wr_addr[5:4] == 2'd2) din_q <= put_word(din_q, wr_addr[3:2], wr_data, wr_strb);
      if (rd_en) begin
        unique case (rd_addr[5:4])
          2'd0: rd_q <= ctrl_rdata;
          2'd1: rd_q <= word_of(key_q, rd_addr[3:2]);
          2'd2: rd_q <= word_of(din_q, rd_addr[3:2]);
          2'd3: rd_q <= word_of(dout,  rd_addr[3:2]);
          default: rd_q <= '0;
        endcase
      end
    end
  end

endmodule
