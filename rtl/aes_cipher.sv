// aes_cipher: AES-128 encryption core (FIPS-197 cipher) for one 128-bit block.
//
// The block takes a 16-byte plaintext array and a 16-byte key and produces the
// 16-byte ciphertext array, as the cipher block of the system does. The round
// function is the standard one; the schedule in time is this design's own:
// every round's four steps (SubBytes, ShiftRows, MixColumns, AddRoundKey) are
// laid out side by side, so one round completes per clock, and the key
// schedule produces the next round key in the same cycle, so no round keys are
// stored.
//
// Timing: start is sampled while busy is low. The cycle start is taken performs
// the initial AddRoundKey; rounds 1..NR follow, one per clock. done pulses high
// for one cycle NR+1 cycles after start was taken (11 at AES-128), with dout
// valid from then until the next done. busy is high from the cycle after start
// up to the done cycle (exclusive). Reset is synchronous and active low.
//
// Interface: byte 0 of each array is in bits 127:120 (see aes_pkg).
module aes_cipher
  import aes_pkg::*;
#(
  parameter int unsigned NR = 10   // rounds, AES-128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  block_t key,
  input  block_t din,
  output logic   busy,
  output logic   done,
  output block_t dout
);

  localparam int unsigned RW = $clog2(NR + 1);

  block_t         state_q, rk_q;
  logic [7:0]     rcon_q;
  logic [RW-1:0]  round_q;
  block_t         rk_next, state_next;
  logic           last;

  assign last       = (round_q == RW'(NR));
  assign rk_next    = key_next(rk_q, rcon_q);
  assign state_next = enc_round(state_q, rk_next, last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      round_q <= '0;
      rcon_q  <= 8'h01;
      state_q <= '0;
      rk_q    <= '0;
      dout    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state_q <= din ^ key;      // round 0: AddRoundKey
          rk_q    <= key;
          rcon_q  <= 8'h01;
          round_q <= RW'(1);
          busy    <= 1'b1;
        end
      end else begin
        state_q <= state_next;
        rk_q    <= rk_next;
        rcon_q  <= xtime(rcon_q);
        round_q <= round_q + RW'(1);
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
          dout <= state_next;
        end
      end
    end
  end

endmodule
