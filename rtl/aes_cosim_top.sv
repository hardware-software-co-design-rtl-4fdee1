// aes_cosim_top -- hardware part of the AES-128 image encryption co-design:
// a stream of 8-bit grey pixels is packed into 128-bit blocks, encrypted,
// decrypted again, and either the ciphertext or the recovered plaintext is
// returned to the host.
//
// Data path (left to right, as in the co-simulation model):
//   pix  -> bit_conversion -> aes_encrypt_unit -+-> out_mux d0 -> dout
//                                               +-> aes_decrypt_unit -> out_mux d1
//   user_key -> key of both AES units
// sel = 0 returns the encrypted block, sel = 1 the decrypted one (in the
// model sel is a constant 0 with an on/off switch). enable1 gates the key
// (a constant 1 in the model). The host-side parts of the model -- reading
// the image, pre- and post-processing, the viewers and the JTAG
// co-simulation link -- are outside this RTL; their signals are the ports.
//
// Timing: pixels are taken on pix_valid && pix_ready, one per cycle at most.
// Each AES unit takes 11 cycles per block, fewer than the 16 cycles a block
// of pixels needs to arrive, so a continuous pixel stream is not stalled
// except while the ECB decryptor expands a newly written key. dout_valid
// pulses for one cycle per block: 1 cycle after the encryptor's result
// (sel = 0) or after the decryptor's result (sel = 1). mode selects ECB or
// CTR per block; iv and ctr_load (re)start the CTR counters of both units
// and must be used while no block is in flight (idle high); key_wr likewise.
// key_busy shows the ECB decryptor expanding a new key. dout has no
// back-pressure, like the hardware-to-host gateway it stands for.
//
// The block structure follows the paper's co-simulation model; the mode, iv
// and key-write ports are this implementation's, because the paper built the
// ECB and CTR variants as separate designs and gives no key-loading path.
module aes_cosim_top
  import aes_pkg::*;
#(
  parameter block_t DEFAULT_KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c
) (
  input  logic         clk,
  input  logic         rst_n,
  // pixel stream (Gateway In)
  input  logic         pix_valid,
  output logic         pix_ready,
  input  logic [7:0]   pix,
  // control (Gateway In1 = enable1, Gateway In2 = sel)
  input  logic         enable1,
  input  logic         sel,
  input  mode_e        mode,
  input  block_t       iv,
  input  logic         ctr_load,
  input  logic         key_wr,
  input  block_t       key_wr_data,
  // result (Gateway Out)
  output logic         dout_valid,
  output block_t       dout,
  output logic         idle,
  output logic         key_busy     // ECB decryptor expanding a new key
);

  block_t key;
  logic   blk_valid, blk_ready;
  block_t blk;
  logic   enc_valid, enc_ready;
  block_t enc_block;
  mode_e  enc_mode;
  logic   dec_valid;
  block_t dec_block;
  logic   dec_key_busy, enc_busy, dec_busy;

  bit_conversion #(.IN_W(8), .OUT_W(128)) u_bit_conversion (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (pix_valid),
    .in_ready  (pix_ready),
    .in_data   (pix),
    .out_valid (blk_valid),
    .out_ready (blk_ready),
    .out_data  (blk)
  );

  user_key #(.DEFAULT_KEY(DEFAULT_KEY)) u_user_key (
    .clk         (clk),
    .rst_n       (rst_n),
    .enable1     (enable1),
    .key_wr      (key_wr),
    .key_wr_data (key_wr_data),
    .key_user1   (key)
  );

  aes_encrypt_unit u_encryption (
    .clk       (clk),
    .rst_n     (rst_n),
    .mode      (mode),
    .iv        (iv),
    .ctr_load  (ctr_load),
    .key       (key),
    .in_valid  (blk_valid),
    .in_ready  (blk_ready),
    .in_block  (blk),
    .out_valid (enc_valid),
    .out_ready (enc_ready),
    .out_block (enc_block),
    .out_mode  (enc_mode),
    .busy      (enc_busy)
  );

  aes_decrypt_unit u_decryption (
    .clk       (clk),
    .rst_n     (rst_n),
    .mode      (enc_mode),
    .iv        (iv),
    .ctr_load  (ctr_load),
    .key       (key),
    .in_valid  (enc_valid),
    .in_ready  (enc_ready),
    .in_block  (enc_block),
    .out_valid (dec_valid),
    .out_ready (1'b1),
    .out_block (dec_block),
    .key_busy  (dec_key_busy),
    .busy      (dec_busy)
  );

  out_mux #(.W(128)) u_mux (
    .clk        (clk),
    .rst_n      (rst_n),
    .sel        (sel),
    .d0_valid   (enc_valid && enc_ready),
    .d0         (enc_block),
    .d1_valid   (dec_valid),
    .d1         (dec_block),
    .dout_valid (dout_valid),
    .dout       (dout)
  );

  assign key_busy = dec_key_busy;

  // Nothing buffered or in flight between the pixel input and dout.
  assign idle = !blk_valid && !enc_busy && !dec_busy
                && !dec_key_busy && !dout_valid;

endmodule
