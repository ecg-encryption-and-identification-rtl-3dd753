// aes_decipher: AES-128 decryption core (FIPS-197 inverse cipher) for one
// 128-bit block, with the same 16-byte input and output arrays as aes_cipher.
//
// How it works: decryption needs the round keys in reverse order. Rather than
// storing all eleven, the core first runs the key schedule forwards for NR
// cycles to reach the last round key, then runs it backwards (each step of the
// AES-128 schedule can be undone from the next round key alone) while it
// applies the inverse rounds, one per clock: InvShiftRows, InvSubBytes,
// AddRoundKey, InvMixColumns (the last round without InvMixColumns). The
// straightforward inverse cipher order of FIPS-197 Sec. 5.3 is used. The
// key-expansion phase and one round per clock are this design's choices.
//
// Timing: start is sampled while busy is low. Phases: NR cycles of key
// expansion, one cycle of initial AddRoundKey with the last round key, NR
// inverse rounds. done pulses 2*NR+2 cycles after start was taken (22 at
// AES-128); dout holds the plaintext until the next done. Reset is synchronous
// and active low. Byte 0 of each array is in bits 127:120.
module aes_decipher
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

  typedef enum logic [1:0] {S_IDLE, S_EXPAND, S_INIT, S_ROUND} phase_e;

  localparam int unsigned RW = $clog2(NR + 1);

  phase_e         phase_q;
  block_t         state_q, rk_q;
  logic [7:0]     rcon_q;
  logic [RW-1:0]  cnt_q;
  block_t         rk_fwd, rk_bwd, state_next;
  logic           last;

  assign last       = (cnt_q == RW'(NR - 1));
  assign rk_fwd     = key_next(rk_q, rcon_q);
  assign rk_bwd     = key_prev(rk_q, rcon_q);
  assign state_next = dec_round(state_q, rk_bwd, last);
  assign busy       = (phase_q != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase_q <= S_IDLE;
      done    <= 1'b0;
      cnt_q   <= '0;
      rcon_q  <= 8'h01;
      state_q <= '0;
      rk_q    <= '0;
      dout    <= '0;
    end else begin
      done <= 1'b0;
      unique case (phase_q)
        S_IDLE: if (start) begin
          state_q <= din;
          rk_q    <= key;
          rcon_q  <= 8'h01;
          cnt_q   <= '0;
          phase_q <= S_EXPAND;
        end
        S_EXPAND: begin
          rk_q  <= rk_fwd;
          cnt_q <= cnt_q + RW'(1);
          // keep the constant that produced the last round key
          if (last) begin
            phase_q <= S_INIT;
          end else begin
            rcon_q <= xtime(rcon_q);
          end
        end
        S_INIT: begin
          state_q <= state_q ^ rk_q;
          cnt_q   <= '0;
          phase_q <= S_ROUND;
        end
        S_ROUND: begin
          state_q <= state_next;
          rk_q    <= rk_bwd;
          rcon_q  <= xtime_inv(rcon_q);
          cnt_q   <= cnt_q + RW'(1);
          if (last) begin
            phase_q <= S_IDLE;
            done    <= 1'b1;
            dout    <= state_next;
          end
        end
        default: phase_q <= S_IDLE;
      endcase
    end
  end

endmodule
