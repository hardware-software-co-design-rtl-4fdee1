// aes_enc_core -- iterative ("FSM-based") AES-128 forward cipher.
//
// One 128-bit block is processed at a time. The cycle a block is accepted
// performs the initial AddRoundKey with the cipher key; each of the next ten
// cycles performs one full round (SubBytes, ShiftRows, MixColumns except in
// round 10, AddRoundKey) while the next round key is derived from the current
// one, so no key storage beyond one round key is needed. A block therefore
// occupies the core for 11 clock cycles, which is the latency implied by the
// throughput figures reported for the FSM/CTR designs
// (128 bit x 175.35 MHz / 2.04 Gbit/s = 11 cycles).
//
// Interface: valid/ready on both sides. in_block and key are sampled in the
// cycle in_valid && in_ready. out_valid rises 10 cycles after that and
// out_block is held until out_valid && out_ready. A new block can be accepted
// in the same cycle the previous result is taken, so a continuous stream runs
// at one block every 11 cycles. Reset is asynchronous, active low.
//
// The round structure follows FIPS-197; the handshake, the reset style and the
// one-round-per-cycle schedule are this implementation's choices.
module aes_enc_core
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  block_t in_block,
  input  block_t key,
  output logic   out_valid,
  input  logic   out_ready,
  output block_t out_block
);

  typedef enum logic [1:0] {IDLE, ROUND, DONE} state_e;

  state_e      state_q;
  block_t      st_q;     // AES state
  block_t      rk_q;     // round key of the round to be performed next
  byte_t       rcon_q;   // round constant that derives the key after rk_q
  logic [3:0]  round_q;  // round to be performed next, 1..10

  logic accept, last;
  assign in_ready  = (state_q == IDLE) || (state_q == DONE && out_ready);
  assign accept    = in_valid && in_ready;
  assign last      = (round_q == 4'(NR));
  assign out_valid = (state_q == DONE);
  assign out_block = st_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      st_q    <= '0;
      rk_q    <= '0;
      rcon_q  <= RCON_FIRST;
      round_q <= 4'd1;
    end else if (accept) begin
      state_q <= ROUND;
      st_q    <= in_block ^ key;
      rk_q    <= key_step(key, RCON_FIRST);
      rcon_q  <= xtime(RCON_FIRST);
      round_q <= 4'd1;
    end else begin
      unique case (state_q)
        ROUND: begin
          st_q    <= enc_round(st_q, rk_q, last);
          rk_q    <= key_step(rk_q, rcon_q);
          rcon_q  <= xtime(rcon_q);
          round_q <= round_q + 4'd1;
          if (last) state_q <= DONE;
        end
        DONE:    if (out_ready) state_q <= IDLE;
        default: ;
      endcase
    end
  end

  // The result must stay put while it waits to be taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_block));

endmodule
