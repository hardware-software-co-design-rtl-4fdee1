// aes_decrypt_unit -- the "Decryption" block of the image pipeline: recovers
// 128-bit pixel blocks from the output of the Encryption block.
//
// ECB: the block goes through the AES-128 inverse cipher, P = D_K(C), in an
//      aes_dec_core.
// CTR: decryption is the same operation as encryption, P = C xor E_K(CTR), so
//      the key stream comes from a forward aes_enc_core fed by this unit's own
//      counter. The counter is loaded with iv on ctr_load and incremented for
//      every CTR block, exactly as in aes_encrypt_unit, so both stay in step
//      as long as both are loaded with the same iv.
//
// mode is sampled with each block (it travels with the ciphertext from the
// encryptor) and selects the core. One block is in flight at a time; a new
// one is accepted in the cycle the previous result is taken, so the unit
// runs at one block per 11 cycles. The first ECB block after a key change
// waits while aes_dec_core expands the key (key_busy high, in_ready low).
// ctr_load must be given while no block is in flight.
//
// The paper gives the block's function (AES decryption in ECB and CTR mode);
// using a second forward core for CTR and the handshake are this
// implementation's choices.
module aes_decrypt_unit
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
  output logic   key_busy,
  output logic   busy          // a block is in flight
);

  logic   busy_q;
  mode_e  mode_q;
  block_t data_q;
  block_t ctr_q;

  logic   free, out_fire, accept;
  logic   ctr_in_valid, ctr_in_ready, ctr_out_valid;
  logic   ecb_in_valid, ecb_in_ready, ecb_out_valid;
  block_t ctr_out, ecb_out;

  assign out_valid = busy_q && ((mode_q == MODE_CTR) ? ctr_out_valid : ecb_out_valid);
  assign out_fire  = out_valid && out_ready;
  assign free      = !ctr_load && (!busy_q || out_fire);
  assign in_ready  = free && ((mode == MODE_CTR) ? ctr_in_ready : ecb_in_ready);
  assign accept    = in_valid && in_ready;
  assign busy      = busy_q;
  assign out_block = (mode_q == MODE_CTR) ? (ctr_out ^ data_q) : ecb_out;

  assign ctr_in_valid = in_valid && free && (mode == MODE_CTR);
  assign ecb_in_valid = in_valid && free && (mode == MODE_ECB);

  aes_enc_core u_ctr_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (ctr_in_valid),
    .in_ready  (ctr_in_ready),
    .in_block  (ctr_q),
    .key       (key),
    .out_valid (ctr_out_valid),
    .out_ready (out_ready && busy_q && mode_q == MODE_CTR),
    .out_block (ctr_out)
  );

  aes_dec_core u_ecb_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (ecb_in_valid),
    .in_ready  (ecb_in_ready),
    .in_block  (in_block),
    .key       (key),
    .out_valid (ecb_out_valid),
    .out_ready (out_ready && busy_q && mode_q == MODE_ECB),
    .out_block (ecb_out),
    .key_busy  (key_busy)
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
