// ecg_security_pl: programmable-logic side of the connected-health security
// system. Three accelerators share the chip: the AES-128 cipher, which
// encrypts ECG data before it leaves the unit, the AES-128 decipher, and the
// ECG identification engine, which recognises the patient from a heartbeat
// by PCA projection and nearest-neighbour search. Each sits behind its own
// AXI4-Lite slave port, so the processor can drive them independently:
//   s_axi_cipher_*          cipher IP          (aes_cipher_axil)
//   s_axi_decipher_*        decipher IP        (aes_decipher_axil)
//   s_axi_identification_*  identification IP (ecg_id_axil)
// In the full system these three ports hang off an AXI interconnect driven by
// the processor's general-purpose master port, and the reset comes from a
// reset synchroniser; both are outside this module. irq concatenates the three
// interrupt lines for the processor's fabric interrupt input:
//   irq[0] cipher, irq[1] decipher, irq[2] identification (order assumed).
// One clock drives everything (50 MHz in the reference system); rst_n is
// synchronous and active low.
module ecg_security_pl
  import axil_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 300,
  parameter int unsigned M_FEAT    = 12,
  parameter int unsigned N_TRAIN   = 64,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned EIG_FRAC  = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi_cipher_req,
  output axil_rsp_t s_axi_cipher_rsp,
  input  axil_req_t s_axi_decipher_req,
  output axil_rsp_t s_axi_decipher_rsp,
  input  axil_req_t s_axi_identification_req,
  output axil_rsp_t s_axi_identification_rsp,
  output logic [2:0] irq
);

  logic irq_cipher, irq_decipher, irq_ident;

  aes_cipher_axil u_aes_cipher (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_cipher_req, .s_axi_cipher_rsp, .interrupt(irq_cipher));

  aes_decipher_axil u_aes_decipher (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_decipher_req, .s_axi_decipher_rsp, .interrupt(irq_decipher));

  ecg_id_axil #(.N_SAMPLES(N_SAMPLES), .M_FEAT(M_FEAT), .N_TRAIN(N_TRAIN),
                .DATA_W(DATA_W), .EIG_FRAC(EIG_FRAC)) u_identification (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_Identification_req(s_axi_identification_req),
    .s_axi_Identification_rsp(s_axi_identification_rsp),
    .interrupt(irq_ident));

  assign irq = {irq_ident, irq_decipher, irq_cipher};

endmodule
