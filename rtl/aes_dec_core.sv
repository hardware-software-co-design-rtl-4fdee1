// aes_dec_core -- iterative ("FSM-based") AES-128 inverse cipher.
//
// The inverse cipher needs the round keys in reverse order. The core keeps
// the last round key (round key 10) of the key it was last given; whenever a
// block is offered with a different key, it first runs the key schedule
// forward for 10 cycles (in_ready is low meanwhile) and stores round key 10.
// Decrypting a block then mirrors aes_enc_core: the accept cycle performs
// AddRoundKey with round key 10, and each of the next ten cycles performs one
// inverse round (InvShiftRows, InvSubBytes, AddRoundKey, InvMixColumns except
// in the last round) while the previous round key is recomputed from the
// current one. A block occupies the core for 11 cycles.
//
// Interface: valid/ready on both sides, identical to aes_enc_core. in_block
// and key are sampled in the cycle in_valid && in_ready. out_valid rises 10
// cycles later and out_block is held until taken. After a key change the
// first block waits 11 extra cycles (10 schedule steps and one cycle to
// return to idle). Reset is asynchronous, active low, and forgets the key.
//
// The inverse cipher follows FIPS-197. Key handling (cached last round key
// and on-the-fly reverse schedule) is this implementation's choice; the paper
// only states that a separate VHDL decryption block exists.
module aes_dec_core
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
  output block_t out_block,
  output logic   key_busy      // expanding a new key
);

  typedef enum logic [1:0] {IDLE, KEYEXP, ROUND, DONE} state_e;

  state_e      state_q;
  block_t      st_q;
  block_t      rk_q;
  byte_t       rcon_q;
  logic [3:0]  round_q;
  block_t      key_q;       // key whose last round key is held
  block_t      last_rk_q;   // round key 10 of key_q
  logic        key_ok_q;

  logic key_match, idle_like, accept, last, start_exp;
  assign key_match = key_ok_q && (key == key_q);
  assign idle_like = (state_q == IDLE) || (state_q == DONE && out_ready);
  assign in_ready  = idle_like && key_match;
  assign accept    = in_valid && in_ready;
  assign start_exp = in_valid && idle_like && !key_match;
  assign last      = (round_q == 4'(NR));
  assign out_valid = (state_q == DONE);
  assign out_block = st_q;
  assign key_busy  = (state_q == KEYEXP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= IDLE;
      st_q      <= '0;
      rk_q      <= '0;
      rcon_q    <= RCON_FIRST;
      round_q   <= 4'd1;
      key_q     <= '0;
      last_rk_q <= '0;
      key_ok_q  <= 1'b0;
    end else if (accept) begin
      state_q <= ROUND;
      st_q    <= in_block ^ last_rk_q;
      rk_q    <= inv_key_step(last_rk_q, RCON_LAST);  // round key 9
      rcon_q  <= inv_xtime(RCON_LAST);                // round constant 9
      round_q <= 4'd1;
    end else if (start_exp) begin
      state_q  <= KEYEXP;
      key_q    <= key;
      key_ok_q <= 1'b0;
      rk_q     <= key;
      rcon_q   <= RCON_FIRST;
      round_q  <= 4'd1;
    end else begin
      unique case (state_q)
        KEYEXP: begin
          rk_q    <= key_step(rk_q, rcon_q);
          rcon_q  <= xtime(rcon_q);
          round_q <= round_q + 4'd1;
          if (last) begin
            last_rk_q <= key_step(rk_q, rcon_q);
            key_ok_q  <= 1'b1;
            state_q   <= IDLE;
          end
        end
        ROUND: begin
          st_q    <= dec_round(st_q, rk_q, last);
          rk_q    <= inv_key_step(rk_q, rcon_q);
          rcon_q  <= inv_xtime(rcon_q);
          round_q <= round_q + 4'd1;
          if (last) state_q <= DONE;
        end
        DONE:    if (out_ready) state_q <= IDLE;
        default: ;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_block));

endmodule
