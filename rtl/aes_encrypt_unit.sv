// aes_encrypt_unit -- the "Encryption" block of the image pipeline: AES-128
// encryption of 128-bit pixel blocks in ECB or CTR mode.
//
// ECB: the block itself goes through the cipher, ciphertext = E_K(P).
// CTR: the cipher encrypts a 128-bit counter block and the result (the key
//      stream) is XORed with the data, ciphertext = P xor E_K(CTR). The
//      counter is loaded with iv on ctr_load and incremented by one, modulo
//      2^128, for every block encrypted in CTR mode (the standard incrementing
//      function of NIST SP 800-38A applied to the whole block).
//
// The cipher is one iterative aes_enc_core, so a block takes 11 cycles and
// one block is in flight at a time; a new block is accepted in the cycle the
// previous result is taken. mode is sampled with each block and returned with
// the result on out_mode, so the downstream decryptor can follow a mode
// switch between blocks. ctr_load must be given while no block is in flight
// (in_ready is held low during ctr_load).
//
// ECB and CTR modes, AES-128 and the iterative architecture are the paper's;
// the counter format, the handshake and passing the mode along are this
// implementation's choices.
module aes_encrypt_unit
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  mode_e  mode,
  input  block_t iv,
  input  logic   ctr_load,
  input  block_t key,
  input  logic   in_valid,
  output logic   in_ready,
  input  block_t in_block,
  output logic   out_valid,
  input  logic   out_ready,
  output block_t out_block,
  output mode_e  out_mode,
  output logic   busy          // a block is in flight
);

  logic   busy_q;
  mode_e  mode_q;
  block_t data_q;
  block_t ctr_q;

  logic   core_in_valid, core_in_ready, core_out_valid;
  block_t core_out;
  logic   out_fire, accept;

  assign out_valid     = busy_q && core_out_valid;
  assign out_fire      = out_valid && out_ready;
  assign in_ready      = !ctr_load && (!busy_q || out_fire) && core_in_ready;
  assign accept        = in_valid && in_ready;
  assign core_in_valid = in_valid && !ctr_load && (!busy_q || out_fire);
  assign busy      = busy_q;
  assign out_block     = (mode_q == MODE_CTR) ? (core_out ^ data_q) : core_out;
  assign out_mode      = mode_q;

  aes_enc_core u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (core_in_valid),
    .in_ready  (core_in_ready),
    .in_block  ((mode == MODE_CTR) ? ctr_q : in_block),
    .key       (key),
    .out_valid (core_out_valid),
    .out_ready (out_ready && busy_q),
    .out_block (core_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      mode_q <= MODE_ECB;
      data_q <= '0;
      ctr_q  <= '0;
    end else begin
      if (ctr_load) ctr_q <= iv;
      if (accept) begin
        busy_q <= 1'b1;
        mode_q <= mode;
        data_q <= in_block;
        if (mode == MODE_CTR) ctr_q <= ctr_q + 128'd1;
      end else if (out_fire) begin
        busy_q <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_block));

endmodule
